// collector: merges the result streams of the processors into one output
// stream and counts finished requests of a batch.
//
// Each processor offers result beats (valid/ready) ending with `last`. A
// round-robin arbiter grants one processor at a time, starting after the
// last one served, and keeps the grant until that processor's `last` beat
// has gone, so the words of one result are never interleaved with another.
// `contention` is high in a clock in which a new grant is made while more
// than one processor is waiting.
// Batch: `batch_start` clears the count of finished results and loads
// batch_len; `batch_done` is high once batch_len results have left (low
// from reset until the first batch_start). This
// mirrors one kernel invocation working on a fixed-size batch.
// Collecting results from the processors and fixed-size batches are the
// paper's; round-robin arbitration and the counter interface are this
// design's.
module collector
  import he_pkg::*;
#(
  parameter int unsigned NPROC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NPROC-1:0] in_valid,
  output logic [NPROC-1:0] in_ready,
  input  rsp_beat_t        in_beat [NPROC],
  output logic             out_valid,
  input  logic             out_ready,
  output rsp_beat_t        out_beat,
  input  logic             batch_start,
  input  logic [31:0]      batch_len,
  output logic             batch_done,
  output logic             contention
);
  localparam int unsigned PW = (NPROC > 1) ? $clog2(NPROC) : 1;

  logic          locked;
  logic [PW-1:0] grant_q, last_q, pick, sel;
  logic          any;
  logic [31:0]   count, len_q;
  logic          opened;      // a batch has been started since reset

  // round robin: first valid processor after last_q
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = NPROC; k >= 1; k--) begin
      int unsigned p;
      p = (int'(last_q) + k) % NPROC;
      if (in_valid[p]) begin
        any  = 1'b1;
        pick = PW'(p);
      end
    end
    sel        = locked ? grant_q : pick;
    out_valid  = (locked || any) && in_valid[sel];
    out_beat   = in_beat[sel];
    in_ready   = '0;
    in_ready[sel] = (locked || any) && out_ready;
    contention = !locked && ($countones(in_valid) > 1);
    batch_done = opened && (count == len_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      grant_q <= '0;
      last_q  <= PW'(NPROC - 1);
      count   <= '0;
      len_q   <= '0;
      opened  <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        locked  <= !out_beat.last;
        grant_q <= sel;
        if (out_beat.last) last_q <= sel;
      end
      if (batch_start) begin
        count  <= '0;
        len_q  <= batch_len;
        opened <= 1'b1;
      end else if (out_valid && out_ready && out_beat.last && count != len_q) begin
        count <= count + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));

endmodule
