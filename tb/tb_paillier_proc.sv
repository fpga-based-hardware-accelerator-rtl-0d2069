// tb_paillier_proc: one Paillier processor, default parameters (operands up
// to 2048 bits), exercised with three key pairs (n of 32, 64 and 128 bits;
// the word counts are run-time values, so small keys run on the full-size
// hardware).
// Encryption: the random words the processor draws are predicted with a
// xorshift model started from the same seed, and the ciphertext is compared
// with g^m * r^n mod n^2 computed here with wide integers; both g = n+1 and a
// random g are used. Decryption: the hardware result is compared with the
// plaintext (round trip) and with the textbook formula. Plaintexts include 0,
// 1, single-word, multi-word and n-1.
// Timing: the number of Montgomery multiplications of every request is
// compared with the count the square-and-multiply programme needs.
// Also checked: the sparse-buffer overflow flag (err) and the event strobes.
module tb_paillier_proc;
  import he_pkg::*;
  import tb_paillier_pkg::*;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  cfg_beat_t cfg;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  req_beat_t req;
  rsp_beat_t rsp;
  proc_evt_t evt;
  int checks = 0, failures = 0;
  int n_mm = 0, n_stall = 0, n_sub = 0, n_div = 0, n_enc = 0, n_dec = 0, n_ovf = 0;
  word_t rng_state = SEED;
  big_t kn, kn2, kg;
  int nw_n, nw_nsq;

  paillier_proc #(.SEED(SEED)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (evt.mm_done) n_mm++;
    if (evt.q_stall) n_stall++;
    if (evt.sub_taken) n_sub++;
    if (evt.div_done) n_div++;
    if (evt.enc_done) n_enc++;
    if (evt.dec_done) n_dec++;
    if (evt.sparse_ovf) n_ovf++;
  end

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic cfg_word(cfg_slot_e s, int idx, word_t d);
    cfg.we = 1; cfg.slot = s; cfg.idx = widx_t'(idx); cfg.data = d;
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  task automatic cfg_big(cfg_slot_e s, big_t v, int nw);
    for (int w = 0; w < nw; w++) cfg_word(s, w, v[32*w +: 32]);
  endtask

  task automatic load_key(big_t n, big_t g, big_t lam, big_t mu);
    kn = n; kn2 = n * n; kg = g;
    nw_n = nwords_of(n);
    nw_nsq = nwords_of(kn2);
    cfg_big(CFG_N, n, nw_n);
    cfg_big(CFG_NSQ, kn2, nw_nsq);
    cfg_big(CFG_G, g, nw_nsq);
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
    for (int w = 0; w < nw; w++) begin
      rsp_ready = ($urandom % 4) != 0;
      @(posedge clk);
      while (!(rsp_valid && rsp_ready)) begin #1 rsp_ready = ($urandom % 4) != 0; @(posedge clk); end
      check(int'(rsp.idx) == w && int'(rsp.tag) == tag && rsp.last == (w == nw - 1), "result beat framing");
      v[32*w +: 32] = rsp.data;
      err |= rsp.err;
      #1 rsp_ready = 0;
    end
  endtask

  task automatic encrypt(big_t m, int tag, output big_t c, output bit err);
    int nzw[$];
    for (int w = 0; w < nw_n; w++) if (m[32*w +: 32] != 0) nzw.push_back(w);
    if (nzw.size() == 0) send(OP_ENC, tag, 0, 0, 1);
    foreach (nzw[k]) send(OP_ENC, tag, nzw[k], m[32*nzw[k] +: 32], k == nzw.size() - 1);
    receive(tag, nw_nsq, c, err);
  endtask

  task automatic decrypt(big_t c, int tag, output big_t m);
    bit err;
    for (int w = 0; w < nw_nsq; w++) send(OP_DEC, tag, w, c[32*w +: 32], w == nw_nsq - 1);
    receive(tag, nw_n, m, err);
  endtask

  // r the processor will draw next
  function automatic big_t next_r();
    big_t r = '0;
    word_t ntop = kn[32*(nw_n-1) +: 32];
    word_t mask = ntop;
    mask |= mask >> 1; mask |= mask >> 2; mask |= mask >> 4; mask |= mask >> 8; mask |= mask >> 16;
    mask >>= 1;
    for (int w = 0; w < nw_n; w++) begin
      r[32*w +: 32] = (w == nw_n - 1) ? (rng_state & mask) : rng_state;
      rng_state = xorshift(rng_state);
    end
    return r;
  endfunction

  initial begin
    big_t m, c, c_exp, d, r, lam, mu;
    bit err;
    int mm0, tag;
    cfg = '0; req = '0; req_valid = 0; rsp_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    tag = 1;
    for (int k = 0; k < 3; k++) begin
      lam = key_lambda(k); mu = key_mu(k);
      load_key(key_n(k), key_n(k) + 1, lam, mu);
      for (int t = 0; t < 6; t++) begin
        case (t)
          0: m = '0;
          1: m = 1;
          2: m = kn - 1;
          3: m = big_t'($urandom) % kn;
          default: begin
            m = {$urandom, $urandom, $urandom, $urandom};
            m = m % kn;
          end
        endcase
        r = next_r();
        c_exp = enc_ref(m, r, kg, kn);
        mm0 = n_mm;
        encrypt(m, tag, c, err);
        check(c == c_exp, $sformatf("ciphertext key %0d test %0d", k, t));
        check(!err, "no overflow flag");
        check(n_mm - mm0 == 6 + expmm(m) + expmm(kn), $sformatf("ModMult count of encryption: %0d", n_mm - mm0));
        mm0 = n_mm;
        decrypt(c, tag + 1, d);
        check(d == m, $sformatf("round trip key %0d test %0d", k, t));
        check(d == dec_ref(c, kn, lam, mu), "decryption matches formula");
        check(n_mm - mm0 == 5 + expmm(lam), $sformatf("ModMult count of decryption: %0d", n_mm - mm0));
        tag += 2;
      end
      // random g (not a key generator for decryption: encryption checked only)
      kg = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % kn2;
      cfg_big(CFG_G, kg, nw_nsq);
      m = {$urandom, $urandom} % kn;
      r = next_r();
      encrypt(m, tag, c, err);
      check(c == enc_ref(m, r, kg, kn), "ciphertext with random g");
      tag++;
    end
    // more non-zero words than the sparse buffer holds: the err flag is set
    for (int w = 0; w < 9; w++) send(OP_ENC, tag, w % nw_n, 32'h1, w == 8);
    void'(next_r());
    receive(tag, nw_nsq, c, err);
    check(err, "sparse overflow reported");
    repeat (3) @(posedge clk);
    check(n_stall > 0 && n_sub > 0 && n_div == 18 && n_enc == 22 && n_dec == 18 && n_ovf == 1,
          $sformatf("events: stall %0d sub %0d div %0d enc %0d dec %0d ovf %0d", n_stall, n_sub, n_div, n_enc, n_dec, n_ovf));
    $display("ModMults %0d, q waits %0d, final subtractions %0d, %0d clocks", n_mm, n_stall, n_sub, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
