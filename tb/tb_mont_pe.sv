// tb_mont_pe: drives the processing element with a continuous stream of
// inner iterations, grouped into inner loops of random length, exactly as the
// ModMult controller does: x, y, q, m at issue (clock t0), s_in at t0+3, c_clr
// at t0+4 for the first word of each inner loop. A reference model keeps the
// running carry and predicts s_out / c_out, which are compared at t0+5; the
// check therefore covers the arithmetic, the carry chain and the latency.
module tb_mont_pe;
  localparam int unsigned K = 32;
  localparam int unsigned NIT = 3000;
  logic clk = 1'b0;
  logic [K-1:0] x, y, q, m, s_in, s_out;
  logic [K+1:0] c_out;
  logic c_clr;
  int checks = 0, failures = 0;

  logic [K-1:0] xs [NIT], ys [NIT], qs [NIT], ms [NIT], ss [NIT];
  logic         first [NIT];
  logic [K-1:0] exp_s [NIT];
  logic [K+1:0] exp_c [NIT];

  mont_pe #(.K(K)) dut (.clk(clk), .x(x), .y(y), .q(q), .m(m), .s_in(s_in),
                        .c_clr(c_clr), .s_out(s_out), .c_out(c_out));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*K+1:0] t, carry;
    int len;
    len = 0;
    carry = '0;
    for (int n = 0; n < NIT; n++) begin
      if (len == 0) begin
        len = 1 + ($urandom % 6);
        first[n] = 1'b1;
      end else first[n] = 1'b0;
      len--;
      if (n < 4) begin
        xs[n] = '1; ys[n] = '1; qs[n] = '1; ms[n] = '1; ss[n] = '1;
      end else begin
        xs[n] = $urandom; ys[n] = $urandom; qs[n] = $urandom; ms[n] = $urandom; ss[n] = $urandom;
      end
      t = (66'(xs[n]) * 66'(ys[n])) + (66'(qs[n]) * 66'(ms[n])) + 66'(ss[n])
          + (first[n] ? '0 : carry);
      exp_s[n] = t[K-1:0];
      exp_c[n] = t[2*K+1:K];
      carry = {{K{1'b0}}, t[2*K+1:K]};
    end
  end

  initial begin
    x = '0; y = '0; q = '0; m = '0; s_in = '0; c_clr = 1'b1;
    #1;
    for (int c = 0; c < NIT + 6; c++) begin
      // drive this clock's inputs: issue n=c, s_in of n=c-3, c_clr of n=c-4
      if (c < NIT) begin x = xs[c]; y = ys[c]; q = qs[c]; m = ms[c]; end
      if (c >= 3 && c - 3 < NIT) s_in = ss[c-3];
      if (c >= 4 && c - 4 < NIT) c_clr = first[c-4];
      // outputs of n=c-5 are visible in this clock
      if (c >= 5 && c - 5 < NIT) begin
        checks++;
        if (s_out !== exp_s[c-5] || c_out !== exp_c[c-5]) begin
          failures++;
          if (failures < 5) $display("n=%0d got %h/%h exp %h/%h", c-5, s_out, c_out, exp_s[c-5], exp_c[c-5]);
        end
      end
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
