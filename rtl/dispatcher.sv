// dispatcher: hands each incoming request to an idle Paillier processor.
//
// Requests arrive as a beat stream (valid/ready). On the first beat of a
// request the lowest-numbered processor that is ready (idle) is chosen, and
// all beats up to `last` go to it; the choice is held until then. While no
// processor is idle the first beat waits (in_ready low), so a full array of
// busy processors back-pressures the host stream. `stall` is high in every
// clock in which a request waits for a free processor.
// Routing: out_valid[p] is in_valid gated to the chosen processor; the beat
// itself is broadcast to all processors.
// Dispatching input data to replicated processors is the paper's; the
// lowest-index-first policy and the per-request lock are this design's.
module dispatcher
  import he_pkg::*;
#(
  parameter int unsigned NPROC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  req_beat_t        in_beat,
  output logic [NPROC-1:0] out_valid,
  input  logic [NPROC-1:0] out_ready,
  output req_beat_t        out_beat,
  output logic             stall
);
  localparam int unsigned PW = (NPROC > 1) ? $clog2(NPROC) : 1;

  logic          locked;
  logic [PW-1:0] sel_q, sel_free, sel;
  logic          any_free;

  always_comb begin
    any_free = 1'b0;
    sel_free = '0;
    for (int p = NPROC - 1; p >= 0; p--)
      if (out_ready[p]) begin
        any_free = 1'b1;
        sel_free = PW'(p);
      end
    sel      = locked ? sel_q : sel_free;
    out_beat = in_beat;
    out_valid = '0;
    if (locked || any_free) out_valid[sel] = in_valid;
    in_ready = (locked || any_free) && out_ready[sel];
    stall    = in_valid && !locked && !any_free;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      sel_q  <= '0;
    end else if (in_valid && in_ready) begin
      locked <= !in_beat.last;
      sel_q  <= sel;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid));
  assert property (@(posedge clk) disable iff (!rst_n) locked |-> out_ready[sel_q]);

endmodule
