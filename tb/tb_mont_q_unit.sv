// tb_mont_q_unit: runs many quotient-digit computations with S^0 arriving at
// random times relative to start (same clock, before the first product is
// back, or long after). Each q is compared with ((s0 + x0*yi) * M') mod 2^32
// computed here, and the clock at which q_valid rises is compared with
// max(start + 8, s0_valid + 5).
module tb_mont_q_unit;
  localparam int unsigned K = 32;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic start, s0_valid, consume, q_valid;
  logic [K-1:0] x0, yi, s0, mprime, q;
  int checks = 0, failures = 0;
  int cyc = 0;

  mont_q_unit #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .start(start), .x0(x0), .yi(yi),
                            .s0_valid(s0_valid), .s0(s0), .mprime(mprime),
                            .consume(consume), .q_valid(q_valid), .q(q));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, t_start, t_s0, t_q, exp_t;
    logic [K-1:0] e;
    start = 0; s0_valid = 0; consume = 0; x0 = 0; yi = 0; s0 = 0; mprime = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      d = $urandom % 12;
      x0 = $urandom; yi = $urandom; mprime = $urandom;
      s0 = $urandom;
      e = (s0 + 32'(64'(x0) * 64'(yi))) * mprime;
      start = 1; t_start = cyc;
      if (d == 0) begin s0_valid = 1; t_s0 = cyc; end
      @(posedge clk); #1;
      start = 0; s0_valid = 0;
      if (d != 0) begin
        repeat (d - 1) begin @(posedge clk); #1; end
        s0_valid = 1; t_s0 = cyc;
        @(posedge clk); #1;
        s0_valid = 0;
      end
      while (!q_valid) begin @(posedge clk); #1; end
      t_q = cyc;
      exp_t = (t_start + 8 > t_s0 + 5) ? t_start + 8 : t_s0 + 5;
      checks++;
      if (q !== e) begin
        failures++;
        if (failures < 5) $display("n=%0d q=%h exp %h", n, q, e);
      end
      checks++;
      if (t_q != exp_t) begin
        failures++;
        if (failures < 5) $display("n=%0d latency: q at %0d exp %0d (start %0d s0 %0d)", n, t_q, exp_t, t_start, t_s0);
      end
      // hold q a random time, then consume it
      repeat ($urandom % 3) begin @(posedge clk); #1; end
      checks++;
      if (!q_valid || q !== e) failures++;
      consume = 1;
      @(posedge clk); #1;
      consume = 0;
      checks++;
      if (q_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
