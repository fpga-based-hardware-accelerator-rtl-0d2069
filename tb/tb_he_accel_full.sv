// tb_he_accel_full: the accelerator top with every parameter at its default
// (4 processors, operands up to 64 words = 2048 bits, 8-entry sparse
// buffers) taken through one complete Paillier round trip with a 1024-bit
// key, the configuration the design is sized for (n^2 is 2048 bits).
// 1. Encryption of a plaintext with three non-zero words (the sparse input
//    path). The request goes to processor 0, whose random-number generator
//    starts from a known seed, so r is predicted here and the ciphertext is
//    compared with g^m * r^n mod n^2 computed with wide integers.
// 2. Decryption of that ciphertext: the plaintext must come back.
// Timing: every Montgomery multiplication of 64 words should take close to
// the ideal N*(N+1) = 4160 clocks of the word-serial schedule; the average
// over each whole request (loads, stores, divider and output included) must
// stay within 10% of it. The number of multiplications is checked against
// the square-and-multiply count. Runs about 14 million clocks.
module tb_he_accel_full;
  import he_pkg::*;
  import tb_paillier_pkg::*;
  localparam logic [31:0] SEED0 = 32'h2545_F491;   // seed of processor 0
  localparam int unsigned NP = 4;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  cfg_beat_t cfg;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  req_beat_t req;
  rsp_beat_t rsp;
  logic batch_start, batch_done, dispatch_stall, collect_contention;
  logic [31:0] batch_len;
  proc_evt_t evt [NP];

  he_accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_mm = 0;
  longint cyc = 0;
  big_t kn, kn2;
  int nw_n, nw_nsq;

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int p = 0; p < NP; p++) if (evt[p].mm_done) n_mm++;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg_word(cfg_slot_e s, int idx, word_t d);
    cfg.we = 1; cfg.slot = s; cfg.idx = widx_t'(idx); cfg.data = d;
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  task automatic cfg_big(cfg_slot_e s, big_t v, int nw);
    for (int w = 0; w < nw; w++) cfg_word(s, w, v[32*w +: 32]);
  endtask

  task automatic load_key(big_t n, big_t lam, big_t mu);
    kn = n; kn2 = n * n;
    nw_n = nwords_of(n);
    nw_nsq = nwords_of(kn2);
    cfg_big(CFG_N, n, nw_n);
    cfg_big(CFG_NSQ, kn2, nw_nsq);
    cfg_big(CFG_G, n + 1, nw_nsq);
    cfg_big(CFG_R2NSQ, r2_of(kn2, nw_nsq), nw_nsq);
    cfg_big(CFG_R2N, r2_of(n, nw_n), nw_n);
    cfg_big(CFG_LAMBDA, lam, nw_n);
    cfg_big(CFG_MU, mu, nw_n);
    cfg_word(CFG_SCALAR, int'(SC_NW_N), word_t'(nw_n));
    cfg_word(CFG_SCALAR, int'(SC_NW_NSQ), word_t'(nw_nsq));
    cfg_word(CFG_SCALAR, int'(SC_MP_N), neg_inv(n[31:0]));
    cfg_word(CFG_SCALAR, int'(SC_MP_NSQ), neg_inv(kn2[31:0]));
  endtask

  task automatic send(op_e op, int tag, int idx, word_t d, bit last);
    req.op = op; req.tag = tag_t'(tag); req.idx = widx_t'(idx); req.data = d; req.last = last;
    req_valid = 1;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
  endtask

  task automatic receive(int tag, int nw, output big_t v, output bit err);
    v = '0;
    err = 0;
    rsp_ready = 1;
    for (int w = 0; w < nw; w++) begin
      do @(posedge clk); while (!rsp_valid);
      check(int'(rsp.idx) == w && int'(rsp.tag) == tag && rsp.last == (w == nw - 1), "result beat framing");
      v[32*w +: 32] = rsp.data;
      err |= rsp.err;
    end
    #1 rsp_ready = 0;
  endtask

  // the r processor 0 draws for its first encryption
  function automatic big_t first_r();
    big_t r = '0;
    word_t st = SEED0;
    word_t mask = kn[32*(nw_n-1) +: 32];
    mask |= mask >> 1; mask |= mask >> 2; mask |= mask >> 4; mask |= mask >> 8; mask |= mask >> 16;
    mask >>= 1;
    for (int w = 0; w < nw_n; w++) begin
      r[32*w +: 32] = (w == nw_n - 1) ? (st & mask) : st;
      st = xorshift(st);
    end
    return r;
  endfunction

  initial begin
    big_t m, c, d, lam, mu, r;
    bit err;
    int mm0;
    longint t0, ideal;
    cfg = '0; req = '0; req_valid = 0; rsp_ready = 0; batch_start = 0; batch_len = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    lam = key_lambda(3); mu = key_mu(3);
    load_key(key_n(3), lam, mu);
    check(nw_n == 32 && nw_nsq == 64, "1024-bit key fills the 64-word datapath");
    batch_len = 2; batch_start = 1;
    @(posedge clk); #1 batch_start = 0;

    // ---- encryption of m with non-zero words 0, 5 and 31
    m = '0;
    m[31:0] = 32'h0000_0017; m[32*5 +: 32] = 32'hDEAD_BEEF; m[32*31 +: 32] = 32'h0123_4567;
    r = first_r();
    mm0 = n_mm; t0 = cyc;
    send(OP_ENC, 7, 0, m[31:0], 0);
    send(OP_ENC, 7, 5, m[32*5 +: 32], 0);
    send(OP_ENC, 7, 31, m[32*31 +: 32], 1);
    receive(7, nw_nsq, c, err);
    check(!err, "no error flag on encryption");
    check(c == enc_ref(m, r, kn + 1, kn), "ciphertext equals g^m r^n mod n^2");
    check(n_mm - mm0 == 6 + expmm(m) + expmm(kn), "encryption ModMult count");
    ideal = longint'(n_mm - mm0) * 64 * 65;
    $display("encryption: %0d ModMults in %0d clocks (%0d per ModMult, ideal 4160)",
             n_mm - mm0, cyc - t0, (cyc - t0) / (n_mm - mm0));
    check((cyc - t0) * 10 <= ideal * 11, "encryption within 10% of the ideal ModMult schedule");

    // ---- decryption of the ciphertext
    mm0 = n_mm; t0 = cyc;
    for (int w = 0; w < nw_nsq; w++) send(OP_DEC, 8, w, c[32*w +: 32], w == nw_nsq - 1);
    receive(8, nw_n, d, err);
    check(d == m, "decryption returns the plaintext");
    check(n_mm - mm0 == 5 + expmm(lam), "decryption ModMult count");
    ideal = longint'(n_mm - mm0) * 64 * 65;
    $display("decryption: %0d ModMults in %0d clocks (%0d per ModMult)",
             n_mm - mm0, cyc - t0, (cyc - t0) / (n_mm - mm0));
    check((cyc - t0) * 10 <= ideal * 11, "decryption within 10% of the ideal ModMult schedule");
    repeat (2) @(posedge clk); #1;
    check(batch_done, "batch of two results complete");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
