// karatsuba_mul: pipelined K x K -> 2K unsigned multiplier, one Karatsuba step.
//
// The operands are split in halves, a = ah*2^(K/2) + al, b likewise. Three
// half-size products are formed instead of four:
//   HH = ah*bh,  LL = al*bl,  HL = (ah+al)*(bh+bl)
//   p  = HH*2^K + (HL - HH - LL)*2^(K/2) + LL
// For K = 32 the three products are 16x16 and 17x17, each fitting one FPGA DSP
// slice, so a 32x32 product costs three DSPs instead of four.
// Pipeline: stage 1 registers the halves and the two half sums, stage 2 the
// three products, stage 3 the recombined result. A new operand pair may be
// presented every clock; p belongs to the pair presented 3 clocks earlier
// (LATENCY = 3). No reset: the datapath carries no state of its own.
// The decomposition follows the paper (one recursion level, three DSPs per
// 32x32 product); the three-stage split is this design's choice.
module karatsuba_mul #(
  parameter int unsigned K = 32
) (
  input  logic           clk,
  input  logic [K-1:0]   a,
  input  logic [K-1:0]   b,
  output logic [2*K-1:0] p
);
  localparam int unsigned H = K / 2;

  logic [H-1:0] ah_q, al_q, bh_q, bl_q;
  logic [H:0]   sa_q, sb_q;
  logic [K-1:0] hh_q, ll_q;
  logic [K+1:0] hl_q;

  always_ff @(posedge clk) begin
    // stage 1
    ah_q <= a[K-1:H];
    al_q <= a[H-1:0];
    bh_q <= b[K-1:H];
    bl_q <= b[H-1:0];
    sa_q <= {1'b0, a[K-1:H]} + {1'b0, a[H-1:0]};
    sb_q <= {1'b0, b[K-1:H]} + {1'b0, b[H-1:0]};
    // stage 2: three half-size products
    hh_q <= ah_q * bh_q;
    ll_q <= al_q * bl_q;
    hl_q <= sa_q * sb_q;
    // stage 3: recombine
    p <= {hh_q, ll_q} + ({{(K-2){1'b0}}, (hl_q - {2'b00, hh_q} - {2'b00, ll_q})} << H);
  end

endmodule
