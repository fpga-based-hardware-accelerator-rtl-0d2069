// tb_sparse_buffer: fills the sparse buffer with random (index, value) sets,
// some with zero words mixed in and some with more non-zero words than it
// holds, then reads every dense index and compares with a dense copy made
// here; also checks top_idx and the overflow flag.
module tb_sparse_buffer;
  import he_pkg::*;
  localparam int unsigned E = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic clear, we, overflow;
  widx_t wr_idx, rd_idx, top_idx;
  word_t wr_data, rd_data;
  int checks = 0, failures = 0;

  sparse_buffer #(.ENTRIES(E)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t dense [64];
    int nz, top, nwr, used [64];
    clear = 0; we = 0; wr_idx = 0; wr_data = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int i = 0; i < 64; i++) begin dense[i] = 0; used[i] = 0; end
      nz = 0; top = 0;
      nwr = $urandom % 12;
      for (int w = 0; w < nwr; w++) begin
        int i;
        do i = $urandom % 64; while (used[i]);
        used[i] = 1;
        wr_idx = widx_t'(i);
        wr_data = ($urandom % 4 == 0) ? 32'd0 : $urandom;
        if (wr_data != 0) begin
          nz++;
          if (nz <= E) begin dense[i] = wr_data; if (i > top) top = i; end
        end
        we = 1; @(posedge clk); #1; we = 0;
      end
      for (int i = 0; i < 64; i++) begin
        rd_idx = widx_t'(i); #1;
        checks++;
        if (rd_data !== dense[i]) failures++;
      end
      checks++;
      if (int'(top_idx) != top || overflow != (nz > E)) begin
        failures++;
        $display("round %0d: top %0d exp %0d ovf %0d nz %0d", r, top_idx, top, overflow, nz);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
