// tb_he_accel_top: end-to-end test of the accelerator with its default
// parameters (4 processors, operands up to 2048 bits) and small keys (n of
// 64 and 128 bits), so that many requests fit in a short simulation.
// For each key: a batch of 10 encryptions is streamed in back to back (more
// than there are processors, so the dispatcher has to hold requests back),
// results are drained with random back-pressure (so several processors wait
// for the collector at once); every ciphertext is decrypted here with the
// textbook formula and must give its plaintext, and two encryptions of the
// same plaintext must differ (fresh r). Then the ciphertexts are sent back
// as a batch of decryptions, and the hardware must return the plaintexts.
// One more request overflows the sparse input buffer and must come back
// flagged. batch_done is checked at the end of each batch.
// Mechanism coverage, each counted and required at least once: dispatch
// stall, collector contention, ModMult q wait, final subtraction taken,
// divider use, encryption and decryption on every processor, sparse overflow.
module tb_he_accel_top;
  import he_pkg::*;
  import tb_paillier_pkg::*;
  localparam int unsigned NP = 4;
  localparam int unsigned NB = 10;

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
  int n_dstall = 0, n_cont = 0, n_qw = 0, n_sub = 0, n_div = 0, n_ovf = 0;
  int n_enc [NP], n_dec [NP];
  big_t kn, kn2;
  int nw_n, nw_nsq;

  // received results, by tag
  big_t res_val [int];
  bit   res_err [int];
  int   res_cnt = 0;

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dispatch_stall) n_dstall++;
    if (collect_contention) n_cont++;
    for (int p = 0; p < NP; p++) begin
      if (evt[p].q_stall) n_qw++;
      if (evt[p].sub_taken) n_sub++;
      if (evt[p].div_done) n_div++;
      if (evt[p].sparse_ovf) n_ovf++;
      if (evt[p].enc_done) n_enc[p]++;
      if (evt[p].dec_done) n_dec[p]++;
    end
  end

  // result collection with random back-pressure
  always @(negedge clk) rsp_ready = ($urandom % 3) == 0;
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    int t;
    big_t v;
    bit e;
    t = int'(rsp.tag);
    v = res_val.exists(t) ? res_val[t] : '0;
    e = res_err.exists(t) ? res_err[t] : 1'b0;
    v[32*rsp.idx +: 32] = rsp.data;
    res_val[t] = v;
    res_err[t] = e | rsp.err;
    if (rsp.last) res_cnt++;
  end

  initial begin
    #10000000;   // 1 million clocks, three times a normal run
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

  task automatic send_enc(big_t m, int tag);
    int nzw[$];
    for (int w = 0; w < nw_n; w++) if (m[32*w +: 32] != 0) nzw.push_back(w);
    if (nzw.size() == 0) send(OP_ENC, tag, 0, 0, 1);
    foreach (nzw[k]) send(OP_ENC, tag, nzw[k], m[32*nzw[k] +: 32], k == nzw.size() - 1);
  endtask

  task automatic send_dec(big_t c, int tag);
    for (int w = 0; w < nw_nsq; w++) send(OP_DEC, tag, w, c[32*w +: 32], w == nw_nsq - 1);
  endtask

  task automatic start_batch(int len);
    batch_len = len; batch_start = 1;
    @(posedge clk); #1 batch_start = 0;
  endtask

  task automatic wait_results(int total);
    while (res_cnt < total) @(posedge clk);
    repeat (2) @(posedge clk);
    #1;
    check(batch_done, "batch_done at end of batch");
  endtask

  initial begin
    big_t m [NB];
    big_t lam, mu;
    int base;
    for (int p = 0; p < NP; p++) begin n_enc[p] = 0; n_dec[p] = 0; end
    cfg = '0; req = '0; req_valid = 0; batch_start = 0; batch_len = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    base = 0;
    for (int k = 1; k <= 2; k++) begin
      lam = key_lambda(k); mu = key_mu(k);
      load_key(key_n(k), lam, mu);
      // encryptions
      for (int i = 0; i < NB; i++) begin
        m[i] = {$urandom, $urandom, $urandom, $urandom} % kn;
        if (i == 1) m[i] = m[0];
        if (i == 2) m[i] = big_t'($urandom);
      end
      start_batch(NB);
      for (int i = 0; i < NB; i++) send_enc(m[i], base + i);
      wait_results(base + NB);
      for (int i = 0; i < NB; i++)
        check(dec_ref(res_val[base + i], kn, lam, mu) == m[i] && !res_err[base + i],
              $sformatf("ciphertext %0d decrypts to its plaintext", i));
      check(res_val[base] != res_val[base + 1], "fresh randomness per encryption");
      // decryptions of the hardware's ciphertexts
      start_batch(NB);
      for (int i = 0; i < NB; i++) send_dec(res_val[base + i], base + 100 + i);
      wait_results(base + 2 * NB);
      for (int i = 0; i < NB; i++)
        check(res_val[base + 100 + i] == m[i], $sformatf("decryption %0d", i));
      base += 2 * NB;
    end
    // sparse overflow: 9 non-zero words into an 8-entry buffer
    start_batch(1);
    for (int w = 0; w < 9; w++) send(OP_ENC, 999, w % nw_n, 32'h5, w == 8);
    wait_results(base + 1);
    check(res_err[999], "overflow flagged in the result");
    // mechanism coverage
    check(n_dstall > 0, "dispatch stall seen");
    check(n_cont > 0, "collector contention seen");
    check(n_qw > 0, "ModMult q wait seen");
    check(n_sub > 0, "final subtraction seen");
    check(n_div == 2 * NB, "divider used once per decryption");
    check(n_ovf == 1, "sparse overflow seen");
    for (int p = 0; p < NP; p++) check(n_enc[p] > 0 && n_dec[p] > 0, $sformatf("processor %0d used in both modes", p));
    $display("%0d clocks", $time / 10);
    $display("dispatch stalls %0d, contention %0d, q waits %0d, final subtractions %0d, divisions %0d, overflows %0d",
             n_dstall, n_cont, n_qw, n_sub, n_div, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
