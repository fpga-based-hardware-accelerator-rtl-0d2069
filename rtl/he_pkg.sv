// he_pkg: types and constants shared by the Paillier accelerator.
//
// The accelerator works on large integers split into K-bit words (K = 32, the
// operand size used throughout the Montgomery datapath). Word indices are
// IDX_W bits wide, enough for moduli up to 2^IDX_W words. Requests from the
// host arrive as a stream of beats (one 32-bit word per beat), results leave
// the same way; the key material is written once into every processor through
// a broadcast configuration port. The beat formats, slot names and the
// one-hot state codes of the ModMult controller are defined here.
// The 32-bit word size is the paper's; beat formats, slot map and widths are
// choices of this design.
package he_pkg;

  localparam int unsigned K      = 32;  // word size of the datapath
  localparam int unsigned IDX_W  = 8;   // word-index width
  localparam int unsigned TAG_W  = 16;  // request tag width

  typedef logic [K-1:0]     word_t;
  typedef logic [IDX_W-1:0] widx_t;
  typedef logic [TAG_W-1:0] tag_t;

  typedef enum logic {OP_ENC = 1'b0, OP_DEC = 1'b1} op_e;

  // Request beat: ENC carries the non-zero words of the plaintext (sparse,
  // idx = word position); DEC carries every word of the ciphertext.
  typedef struct packed {
    op_e   op;
    tag_t  tag;
    widx_t idx;
    word_t data;
    logic  last;
  } req_beat_t;

  // Result beat: ciphertext (ENC) or plaintext (DEC), words in increasing order.
  typedef struct packed {
    tag_t  tag;
    widx_t idx;
    word_t data;
    logic  err;   // sparse input buffer overflowed for this request
    logic  last;
  } rsp_beat_t;

  // Local-store slots. The first group is key material written by the host,
  // the second is working storage of the processor.
  typedef enum logic [3:0] {
    SL_N      = 4'd0,   // n
    SL_NSQ    = 4'd1,   // n^2
    SL_G      = 4'd2,   // g
    SL_R2NSQ  = 4'd3,   // R^2 mod n^2, R = 2^(K*nw_nsq)
    SL_R2N    = 4'd4,   // R'^2 mod n,  R' = 2^(K*nw_n)
    SL_LAMBDA = 4'd5,   // lambda
    SL_MU     = 4'd6,   // mu
    SL_C      = 4'd7,   // ciphertext under decryption
    SL_BASE   = 4'd8,   // ModExp base (Montgomery form)
    SL_ACC    = 4'd9,   // ModExp accumulator
    SL_ACC2   = 4'd10,  // second accumulator (r^n)
    SL_RND    = 4'd11,  // random r
    SL_TMP    = 4'd12,  // L(u) quotient
    SL_ONE    = 4'd15   // not stored: reads as the integer 1
  } slot_e;

  localparam int unsigned NSLOT = 13;

  // Scalar key registers, written with cfg slot CFG_SCALAR and idx below.
  localparam widx_t SC_NW_N    = 8'd0;  // words of n
  localparam widx_t SC_NW_NSQ  = 8'd1;  // words of n^2
  localparam widx_t SC_MP_N    = 8'd2;  // -n^-1 mod 2^K
  localparam widx_t SC_MP_NSQ  = 8'd3;  // -(n^2)^-1 mod 2^K

  typedef enum logic [3:0] {
    CFG_N      = 4'd0,
    CFG_NSQ    = 4'd1,
    CFG_G      = 4'd2,
    CFG_R2NSQ  = 4'd3,
    CFG_R2N    = 4'd4,
    CFG_LAMBDA = 4'd5,
    CFG_MU     = 4'd6,
    CFG_SCALAR = 4'd15
  } cfg_slot_e;

  typedef struct packed {
    logic      we;
    cfg_slot_e slot;
    widx_t     idx;
    word_t     data;
  } cfg_beat_t;

  // One-hot state codes of the ModMult controller.
  typedef enum logic [4:0] {
    MM_IDLE  = 5'b00001,
    MM_RUN   = 5'b00010,   // issue one inner iteration per clock
    MM_DRAIN = 5'b00100,   // wait for the PE pipeline to empty
    MM_SUB   = 5'b01000,   // word-serial S - M
    MM_DONE  = 5'b10000
  } mm_state_e;

  // Per-processor event strobes (one cycle each), used for monitoring.
  typedef struct packed {
    logic mm_done;     // a ModMult finished
    logic q_stall;     // issue waited for q
    logic sub_taken;   // final subtraction S - M was selected
    logic div_done;    // the integer divider finished
    logic enc_done;    // an encryption finished
    logic dec_done;    // a decryption finished
    logic sparse_ovf;  // more non-zero words than sparse entries
  } proc_evt_t;

endpackage
