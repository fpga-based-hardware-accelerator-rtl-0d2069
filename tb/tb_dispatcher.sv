// tb_dispatcher: four modelled processors that go busy for a random time
// after receiving the last beat of a request. Random multi-beat requests are
// offered back to back. Checked for every beat: it reaches exactly one
// processor, all beats of a request reach the same one, and that processor
// was the lowest-numbered idle one when the first beat went. Also checked:
// the stall output (requests must wait while all processors are busy, and
// this has to happen) and that no beat is lost or duplicated.
module tb_dispatcher;
  import he_pkg::*;
  localparam int unsigned NP = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic in_valid, in_ready, stall;
  req_beat_t in_beat, out_beat;
  logic [NP-1:0] out_valid, out_ready;
  int busy_cnt [NP];
  int checks = 0, failures = 0;
  int sent = 0, recv = 0, n_stall = 0;
  int cur_proc = -1;

  dispatcher #(.NPROC(NP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // processor models: ready while idle
  always_comb for (int p = 0; p < NP; p++) out_ready[p] = (busy_cnt[p] == 0);

  always @(posedge clk) if (rst_n) begin
    int hit, lowest;
    hit = -1;
    lowest = -1;
    for (int p = NP - 1; p >= 0; p--) if (out_ready[p]) lowest = p;
    if (stall) n_stall++;
    checks++;
    if (stall != (in_valid && cur_proc < 0 && lowest < 0)) failures++;
    for (int p = 0; p < NP; p++) if (out_valid[p] && out_ready[p]) begin
      if (hit >= 0) failures++;
      hit = p;
    end
    if (in_valid && in_ready) begin
      checks++;
      if (hit < 0) failures++;
      else if (cur_proc < 0 && hit != lowest) begin
        failures++; $display("first beat went to %0d, lowest idle %0d", hit, lowest);
      end else if (cur_proc >= 0 && hit != cur_proc) begin
        failures++; $display("beat of a request split over processors");
      end
      checks++;
      if (out_beat !== in_beat) failures++;
      recv++;
      cur_proc = in_beat.last ? -1 : hit;
    end else if (hit >= 0) failures++;
    for (int p = 0; p < NP; p++) begin
      if (busy_cnt[p] > 0) busy_cnt[p]--;
      if (in_valid && in_ready && hit == p && in_beat.last) busy_cnt[p] = 5 + $urandom % 60;
    end
  end

  initial begin
    for (int p = 0; p < NP; p++) busy_cnt[p] = 0;
    in_valid = 0; in_beat = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      int len;
      len = 1 + $urandom % 5;
      for (int b = 0; b < len; b++) begin
        in_beat.op = op_e'($urandom % 2); in_beat.tag = tag_t'(r); in_beat.idx = widx_t'(b);
        in_beat.data = $urandom; in_beat.last = (b == len - 1);
        in_valid = 1;
        do @(posedge clk); while (!in_ready);
        sent++;
        #1;
        in_valid = ($urandom % 4 == 0) ? 0 : 1;
        if (!in_valid) begin @(posedge clk); #1; end
      end
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (sent != recv || n_stall == 0) begin
      failures++; $display("sent %0d received %0d stalls %0d", sent, recv, n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
