// mont_pe: processing element for one inner iteration of word-serial
// Montgomery multiplication,  t = x*y + q*m + s_in + carry.
//
// Two Karatsuba multipliers form x*y and q*m in parallel. Their products are
// added to the previous partial-sum word s_in, and in a last stage the carry
// of the previous inner iteration is added. The low K bits of the sum leave as
// s_out, the rest is kept as the carry for the next iteration (and is the top
// word c_out after the last iteration of an inner loop).
//
// Timing, with operands x, y, q, m presented in clock t0:
//   t0+3 : s_in must be valid (it is read from the partial-sum buffer then)
//   t0+4 : c_clr must be high if this is the first word (j = 0) of an inner loop
//   t0+5 : s_out and c_out hold the result of this iteration
// A new iteration may start every clock; only the final carry addition forms a
// loop, one adder deep. The widest addition is 2K+2 bits (66 for K = 32):
// x*y + q*m + s_in can reach 2^(2K+1), so it exceeds the 64 bits quoted as
// the widest operation by two bits.
// The x*y / q*m / add / add structure is the paper's PE; the stage split and
// the carry handling are this design's.
module mont_pe #(
  parameter int unsigned K = 32
) (
  input  logic           clk,
  input  logic [K-1:0]   x,
  input  logic [K-1:0]   y,
  input  logic [K-1:0]   q,
  input  logic [K-1:0]   m,
  input  logic [K-1:0]   s_in,
  input  logic           c_clr,
  output logic [K-1:0]   s_out,
  output logic [K+1:0]   c_out
);
  logic [2*K-1:0] p_xy, p_qm;
  logic [2*K+1:0] sum_a;
  logic [2*K+1:0] t;

  karatsuba_mul #(.K(K)) u_mul_xy (.clk(clk), .a(x), .b(y), .p(p_xy));
  karatsuba_mul #(.K(K)) u_mul_qm (.clk(clk), .a(q), .b(m), .p(p_qm));

  always_comb t = sum_a + (c_clr ? '0 : {{K{1'b0}}, c_out});

  always_ff @(posedge clk) begin
    sum_a <= {2'b00, p_xy} + {2'b00, p_qm} + {{(K+2){1'b0}}, s_in};
    s_out <= t[K-1:0];
    c_out <= t[2*K+1:K];
  end

endmodule
