// mont_q_unit: computes the Montgomery quotient digit of the next outer
// iteration,  q = ((S^0 + X^0 * Y^i) * M') mod 2^K,  M' = -M^-1 mod 2^K,
// while the current inner loop is still running.
//
// The unit owns one Karatsuba multiplier and uses it twice per digit:
//   1. on start, X^0 * Y^i (only the low K bits are kept);
//   2. once both that product and the word S^0 of the new partial sum are
//      known, (S^0 + lo(X^0*Y^i)) * M'; the low K bits are q.
// S^0 may arrive before or after the first product finishes; it is held.
// q_valid stays high until `consume`; a `start` in the same cycle as
// `consume` begins the next digit. Latency from the later of (start + 3,
// s0_valid + 1) to q_valid is 4 clocks: q is ready max(start + 8,
// s0_valid + 5) clocks after the inputs arrive.
// Interface: start/x0/yi open a digit, s0_valid/s0 deliver S^0, mprime is
// M' (held stable during a multiplication).
// Overlapping the q computation with the inner loop follows the paper; the
// single time-shared multiplier is this design's choice, made so the whole
// ModMult uses three 32x32 multipliers (nine DSPs, the count the paper reports).
module mont_q_unit #(
  parameter int unsigned K = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [K-1:0] x0,
  input  logic [K-1:0] yi,
  input  logic         s0_valid,
  input  logic [K-1:0] s0,
  input  logic [K-1:0] mprime,
  input  logic         consume,
  output logic         q_valid,
  output logic [K-1:0] q
);
  localparam int unsigned LAT = 3;

  logic [K-1:0]   mul_a, mul_b;
  logic [2*K-1:0] mul_p;
  logic [LAT-1:0] v1_pipe, v2_pipe;   // product of step 1 / step 2 in flight
  logic           have_p, have_s;
  logic [K-1:0]   p_lo, s0_q;
  logic           issue2;

  karatsuba_mul #(.K(K)) u_mul (.clk(clk), .a(mul_a), .b(mul_b), .p(mul_p));

  always_comb begin
    issue2 = have_p && have_s;
    if (issue2) begin
      mul_a = s0_q + p_lo;
      mul_b = mprime;
    end else begin
      mul_a = x0;
      mul_b = yi;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_pipe <= '0;
      v2_pipe <= '0;
      have_p  <= 1'b0;
      have_s  <= 1'b0;
      p_lo    <= '0;
      s0_q    <= '0;
      q_valid <= 1'b0;
      q       <= '0;
    end else begin
      v1_pipe <= {v1_pipe[LAT-2:0], start};
      v2_pipe <= {v2_pipe[LAT-2:0], issue2};
      if (start) begin
        have_p <= 1'b0;
        have_s <= 1'b0;
      end
      if (issue2) begin
        have_p <= 1'b0;
        have_s <= 1'b0;
      end
      if (v1_pipe[LAT-1]) begin
        have_p <= 1'b1;
        p_lo   <= mul_p[K-1:0];
      end
      if (s0_valid) begin
        have_s <= 1'b1;
        s0_q   <= s0;
      end
      if (consume) q_valid <= 1'b0;
      if (v2_pipe[LAT-1]) begin
        q_valid <= 1'b1;
        q       <= mul_p[K-1:0];
      end
    end
  end

  // The two uses of the multiplier never collide: step 1 is issued only on
  // start, and step 2 only after step 1's product has returned.
  assert property (@(posedge clk) disable iff (!rst_n) !(start && issue2));

endmodule
