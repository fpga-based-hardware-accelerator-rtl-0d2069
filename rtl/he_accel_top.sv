// he_accel_top: Paillier encryption/decryption engine for federated learning,
// the logic of one accelerator kernel.
//
// NPROC independent Paillier processors (paillier_proc) work in parallel,
// each on its own request; throughput scales with their number, because one
// en/decryption is a long chain of dependent modular multiplications that
// cannot itself be parallelised well. A dispatcher hands each request from
// the host stream to an idle processor, a collector merges the results and
// counts them against the batch length. The key material is broadcast to
// every processor, which keeps its own copy so that no storage is shared.
//
// Ports (all synchronous to clk, active-low asynchronous reset):
//   cfg          key-material write, broadcast to all processors (idle only)
//   req_*        request beats, valid/ready (he_pkg::req_beat_t)
//   rsp_*        result beats, valid/ready (he_pkg::rsp_beat_t), tagged
//   batch_*      batch_start with batch_len opens a batch, batch_done when
//                that many results have left
//   dispatch_stall  a request is waiting for a free processor
//   collect_contention  several processors have results ready at once
//   evt          per-processor event strobes
// The host stream and the result stream stand where the platform's PCIe DMA
// and on-board memory would connect; those are not part of this RTL.
// The processor array with dispatch and collection is the paper's; the
// number of processors (NPROC) is not given there and is a parameter here.
module he_accel_top
  import he_pkg::*;
#(
  parameter int unsigned NPROC          = 4,
  parameter int unsigned NW_MAX         = 64,
  parameter int unsigned SPARSE_ENTRIES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_beat_t   cfg,
  input  logic        req_valid,
  output logic        req_ready,
  input  req_beat_t   req,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output rsp_beat_t   rsp,
  input  logic        batch_start,
  input  logic [31:0] batch_len,
  output logic        batch_done,
  output logic        dispatch_stall,
  output logic        collect_contention,
  output proc_evt_t   evt [NPROC]
);
  logic [NPROC-1:0] p_req_valid, p_req_ready, p_rsp_valid, p_rsp_ready;
  req_beat_t        p_req;
  rsp_beat_t        p_rsp [NPROC];

  dispatcher #(.NPROC(NPROC)) u_disp (
    .clk(clk), .rst_n(rst_n),
    .in_valid(req_valid), .in_ready(req_ready), .in_beat(req),
    .out_valid(p_req_valid), .out_ready(p_req_ready), .out_beat(p_req),
    .stall(dispatch_stall));

  for (genvar p = 0; p < NPROC; p++) begin : g_proc
    paillier_proc #(
      .NW_MAX(NW_MAX),
      .SPARSE_ENTRIES(SPARSE_ENTRIES),
      .SEED(32'h2545_F491 ^ (32'(p) * 32'h9E37_79B9))
    ) u_proc (
      .clk(clk), .rst_n(rst_n), .cfg(cfg),
      .req_valid(p_req_valid[p]), .req_ready(p_req_ready[p]), .req(p_req),
      .rsp_valid(p_rsp_valid[p]), .rsp_ready(p_rsp_ready[p]), .rsp(p_rsp[p]),
      .evt(evt[p]));
  end

  collector #(.NPROC(NPROC)) u_coll (
    .clk(clk), .rst_n(rst_n),
    .in_valid(p_rsp_valid), .in_ready(p_rsp_ready), .in_beat(p_rsp),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_beat(rsp),
    .batch_start(batch_start), .batch_len(batch_len), .batch_done(batch_done),
    .contention(collect_contention));

endmodule
