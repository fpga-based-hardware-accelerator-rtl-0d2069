// tb_collector: four modelled processors each produce results of random
// length at random times; the output side applies random back-pressure.
// Checked: every result arrives complete, its words in order and never
// interleaved with another result (tag and index sequence), the grants
// rotate (after serving processor p, the next grant among several waiting
// processors goes to the first one after p), contention happens, and
// batch_done rises exactly when batch_len results have been delivered.
module tb_collector;
  import he_pkg::*;
  localparam int unsigned NP = 4;
  localparam int unsigned PER = 40;      // results per processor
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic [NP-1:0] in_valid, in_ready;
  rsp_beat_t in_beat [NP];
  logic out_valid, out_ready, batch_start, batch_done, contention;
  rsp_beat_t out_beat;
  logic [31:0] batch_len;
  int checks = 0, failures = 0;
  int n_cont = 0, done_results = 0;
  int cur_tag = -1, cur_idx = 0, last_p = NP - 1;
  int prod_len [NP];

  collector #(.NPROC(NP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producers: result k of processor p has tag p*1000+k and 1..6 words
  for (genvar p = 0; p < NP; p++) begin : g_prod
    initial begin
      in_valid[p] = 0; in_beat[p] = '0;
      wait (rst_n);
      repeat (2) @(posedge clk);   // batch_start has been seen
      for (int k = 0; k < PER; k++) begin
        int len;
        len = 1 + $urandom % 6;
        repeat ($urandom % 8) @(posedge clk);
        for (int w = 0; w < len; w++) begin
          #1;
          in_valid[p] = 1;
          in_beat[p].tag = tag_t'(p * 1000 + k); in_beat[p].idx = widx_t'(w);
          in_beat[p].data = $urandom; in_beat[p].err = 0; in_beat[p].last = (w == len - 1);
          do @(posedge clk); while (!in_ready[p]);
        end
        #1 in_valid[p] = 0;
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (contention) n_cont++;
    checks++;
    if (batch_done != (done_results >= 50)) begin
      failures++; $display("batch_done %0d after %0d results", batch_done, done_results);
    end
    if (out_valid && out_ready) begin
      int p;
      p = int'(out_beat.tag) / 1000;
      checks++;
      if (cur_tag < 0) begin
        // new grant: must be the first waiting processor after the last served
        int exp_p;
        exp_p = -1;
        for (int k = NP; k >= 1; k--) if (in_valid[(last_p + k) % NP]) exp_p = (last_p + k) % NP;
        if (p != exp_p || out_beat.idx != 0) begin
          failures++; $display("grant to %0d, expected %0d", p, exp_p);
        end
        cur_tag = int'(out_beat.tag);
      end else if (int'(out_beat.tag) != cur_tag || int'(out_beat.idx) != cur_idx) begin
        failures++; $display("interleaved result");
      end
      checks++;
      if (out_beat !== in_beat[p]) failures++;
      cur_idx = int'(out_beat.idx) + 1;
      if (out_beat.last) begin
        cur_tag = -1; cur_idx = 0; last_p = p;
        done_results++;
      end
    end
  end

  initial begin
    batch_start = 0; batch_len = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    batch_start = 1; batch_len = 50;
    @(posedge clk); #1 batch_start = 0;
    wait (done_results == NP * PER);
    repeat (3) @(posedge clk);
    checks++;
    if (n_cont == 0) failures++;
    $display("contention %0d", n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
