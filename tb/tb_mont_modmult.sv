// tb_mont_modmult: Montgomery multiplications of random operands for word
// counts 1 .. 64 (up to 2048-bit moduli, the largest the default NW_MAX
// holds). For each: M is random and odd with a non-zero top word, X, Y < M.
// The result S is checked independently of the Montgomery recurrence:
//   S < M  and  (S * 2^(32N)) mod M == (X * Y) mod M.
// The clock count from start to done is checked against the schedule: at most
// N*max(N+1, 11) + N + 30 (short operands wait for q: one outer loop takes
// at least 11 clocks), and for N >= 32 within 10% of the ideal N*(N+1).
// Event coverage: the q wait (short operands) and the final subtraction both
// have to occur.
module tb_mont_modmult;
  import he_pkg::*;
  localparam int unsigned NW = 64;
  localparam int unsigned BW = 32 * NW;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  widx_t nwords, ld_idx, rd_idx;
  word_t mprime, ld_x, ld_y, ld_m, rd_data;
  logic ld_x_we, ld_y_we, ld_m_we, start, busy, done, q_stall, sub_taken;
  int checks = 0, failures = 0;
  int n_stall = 0, n_sub = 0;

  mont_modmult #(.NW_MAX(NW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (q_stall) n_stall++;
    if (sub_taken) n_sub++;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t neg_inv(word_t m0);
    word_t inv = 32'd1;
    for (int k = 0; k < 6; k++) inv = inv * (32'd2 - m0 * inv);
    return -inv;
  endfunction

  task automatic run_one(int n);
    logic [BW-1:0] x, y, m, s;
    logic [2*BW-1:0] lhs, rhs, mw;
    int t0, cyc;
    m = '0; x = '0; y = '0;
    for (int w = 0; w < n; w++) begin
      m[32*w +: 32] = $urandom;
      x[32*w +: 32] = $urandom;
      y[32*w +: 32] = $urandom;
    end
    m[0] = 1'b1;
    m[32*n-1] = 1'b1;
    x = x % m;
    y = y % m;
    nwords = widx_t'(n);
    mprime = neg_inv(m[31:0]);
    for (int w = 0; w < n; w++) begin
      ld_x_we = 1; ld_y_we = 1; ld_m_we = 1; ld_idx = widx_t'(w);
      ld_x = x[32*w +: 32]; ld_y = y[32*w +: 32]; ld_m = m[32*w +: 32];
      @(posedge clk); #1;
    end
    ld_x_we = 0; ld_y_we = 0; ld_m_we = 0;
    start = 1;
    cyc = 0;
    @(posedge clk); #1;
    start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    s = '0;
    for (int w = 0; w < n; w++) begin
      rd_idx = widx_t'(w);
      #1;
      s[32*w +: 32] = rd_data;
    end
    rd_idx = widx_t'(n);
    #1;
    mw  = {{BW{1'b0}}, m};
    lhs = ({{BW{1'b0}}, s} << (32 * n)) % mw;
    rhs = ({{BW{1'b0}}, x} * {{BW{1'b0}}, y}) % mw;
    checks++;
    if (lhs !== rhs || s >= m || (n < NW && rd_data != 0)) begin
      failures++;
      if (failures < 5) $display("N=%0d wrong result", n);
    end
    checks++;
    if (cyc > n * ((n + 1 > 11) ? n + 1 : 11) + n + 30 || (n >= 32 && cyc * 10 > n * (n + 1) * 11)) begin
      failures++;
      $display("N=%0d took %0d clocks (ideal %0d)", n, cyc, n * (n + 1));
    end
    if (n == 64 || n == 32) $display("N=%0d: %0d clocks, ideal %0d", n, cyc, n * (n + 1));
    @(posedge clk); #1;
  endtask

  initial begin
    ld_x_we = 0; ld_y_we = 0; ld_m_we = 0; start = 0; ld_idx = 0; rd_idx = 0;
    ld_x = 0; ld_y = 0; ld_m = 0; nwords = 1; mprime = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int n = 1; n <= 12; n++) run_one(n);
    for (int r = 0; r < 30; r++) run_one(1 + ($urandom % 8));
    run_one(16); run_one(32); run_one(33); run_one(63); run_one(64); run_one(64);
    checks++;
    if (n_stall == 0 || n_sub == 0) begin
      failures++;
      $display("coverage: q waits %0d, final subtractions %0d", n_stall, n_sub);
    end
    $display("q waits %0d, final subtractions %0d", n_stall, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
