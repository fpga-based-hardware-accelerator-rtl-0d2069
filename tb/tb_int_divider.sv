// tb_int_divider: divides random dividends (up to 2048 bits) by random
// divisors (up to 1024 bits), including exact multiples as in the Paillier L
// function, and compares quotient and remainder with the / and % of wide
// integers. Checks that done comes exactly DW = 2048 clocks after start.
module tb_int_divider;
  import he_pkg::*;
  localparam int unsigned NW = 64;
  localparam int unsigned DW = 32 * NW;
  localparam int unsigned DV = DW / 2;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic clear, ld_dvd_we, ld_dvs_we, start, busy, done;
  widx_t ld_idx, rd_idx;
  word_t ld_data, quo_data, rem_data;
  int checks = 0, failures = 0;

  int_divider #(.NW_MAX(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [DW-1:0] a, logic [DV-1:0] b);
    logic [DW-1:0] qe, re, qg, rg;
    int cyc;
    qe = a / {{DV{1'b0}}, b};
    re = a % {{DV{1'b0}}, b};
    clear = 1; @(posedge clk); #1; clear = 0;
    for (int w = 0; w < NW; w++) begin
      ld_dvd_we = 1; ld_idx = widx_t'(w); ld_data = a[32*w +: 32];
      @(posedge clk); #1;
    end
    ld_dvd_we = 0;
    for (int w = 0; w < NW / 2; w++) begin
      ld_dvs_we = 1; ld_idx = widx_t'(w); ld_data = b[32*w +: 32];
      @(posedge clk); #1;
    end
    ld_dvs_we = 0;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    for (int w = 0; w < NW; w++) begin
      rd_idx = widx_t'(w); #1;
      qg[32*w +: 32] = quo_data;
      rg[32*w +: 32] = rem_data;
    end
    checks++;
    if (qg !== qe || rg !== re) begin failures++; $display("wrong quotient/remainder"); end
    checks++;
    if (cyc != DW + 1) begin failures++; $display("done after %0d clocks", cyc); end
  endtask

  initial begin
    logic [DW-1:0] a;
    logic [DV-1:0] b;
    clear = 0; ld_dvd_we = 0; ld_dvs_we = 0; start = 0; ld_idx = 0; ld_data = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      int nb;
      a = '0; b = '0;
      nb = 1 + $urandom % (NW / 2);
      for (int w = 0; w < NW; w++) a[32*w +: 32] = $urandom;
      for (int w = 0; w < nb; w++) b[32*w +: 32] = $urandom;
      b[0] = 1'b1;
      if (r % 3 == 0) begin
        // exact multiple: a = b * c with c < b
        logic [DW-1:0] c;
        c = a % {{DV{1'b0}}, b};
        a = c * {{DV{1'b0}}, b};
      end
      if (r == 11) a = '0;
      run(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
