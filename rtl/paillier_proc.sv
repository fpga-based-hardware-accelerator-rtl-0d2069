// paillier_proc: one Paillier processor. It encrypts, c = g^m * r^n mod n^2,
// or decrypts, m = L(c^lambda mod n^2) * mu mod n with L(u) = (u-1)/n, one
// request at a time.
//
// Units: a Montgomery modular multiplier (mont_modmult), a random number
// generator for r (rng_xorshift), an integer divider for L (int_divider), a
// sparse buffer for the plaintext (sparse_buffer) and a private word memory
// (local_store) for key material and intermediate values.
//
// Everything is reduced to Montgomery multiplications MM(a, b) = a*b/R mod M
// (R = 2^(32*words of M)); values are kept in Montgomery form xR mod M.
// Modular exponentiation is left-to-right square-and-multiply; leading zero
// bits of the exponent are skipped (no multiplication happens before the first
// one bit), and for the sparse plaintext the scan starts at its highest
// non-zero word. The programme, modulus n^2 unless noted:
//   encrypt:  r <- RNG;  B = MM(g, R^2);  A = MM(R^2, 1);  A = A^m (B);
//             B = MM(r, R^2);  A2 = MM(R^2, 1);  A2 = A2^n (B);
//             A = MM(A, A2);  A = MM(A, 1);  output A            (= g^m r^n)
//   decrypt:  B = MM(c, R^2);  A = MM(R^2, 1);  A = A^lambda (B);  A = MM(A, 1);
//             T = (A - 1) / n;  A = MM(T, mu) mod n;  A = MM(A, R'^2) mod n;
//             output A                                               (= m)
// Each MM copies its operands and the modulus from the local store into the
// multiplier (words words + 2 clocks), runs it, and copies the result back
// (words clocks); about 3% on top of the multiplication for 2048-bit operands.
//
// Interface:
//   cfg      key material, written while the processor is idle: slots n, n^2,
//            g, R^2 mod n^2, R'^2 mod n, lambda, mu (one word per beat) and
//            the scalars (words of n and of n^2, -n^-1 and -(n^2)^-1 mod 2^32).
//   req_*    request beats (valid/ready). ENC: the non-zero plaintext words,
//            DEC: all ciphertext words; `last` on the final beat. req_ready
//            is high only while the processor is idle or receiving.
//   rsp_*    result beats (valid/ready), words 0 .. upwards, `last` on the top
//            word; ENC returns words-of-n^2 words, DEC words-of-n words.
//   evt      one-clock event strobes for monitoring.
// r is drawn word by word from the generator; its top word (word nw_n - 1)
// keeps only the bits below the leading one of n's top word, so r < n, and
// the words above it are written as zero (r is an operand modulo n^2).
// The unit list (ModMult, RNG, divisor, local storage), the formulas and the
// sparse input follow the paper; the Montgomery-form programme, the skipping
// of leading zeros, the slot map, the beat protocol and the r < n rule are
// this design's. The paper's decryption formula reduces mod n^2; this design
// reduces mod n, which is the Paillier definition (mod n^2 would not return m).
module paillier_proc
  import he_pkg::*;
#(
  parameter int unsigned  NW_MAX         = 64,
  parameter int unsigned  SPARSE_ENTRIES = 8,
  parameter logic [31:0]  SEED           = 32'h2545_F491
) (
  input  logic      clk,
  input  logic      rst_n,
  input  cfg_beat_t cfg,
  input  logic      req_valid,
  output logic      req_ready,
  input  req_beat_t req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output rsp_beat_t rsp,
  output proc_evt_t evt
);

  typedef enum logic [4:0] {
    P_IDLE, P_NEXT, P_RNG_RD, P_RNG_MASK, P_RNG,
    P_MM_LOAD, P_MM_GO, P_MM_RUN, P_MM_STORE,
    P_EXP_FETCH, P_EXP_WAIT, P_EXP_BIT, P_EXP_MUL, P_EXP_ADV,
    P_DIV_CLR, P_DIV_LOAD, P_DIV_GO, P_DIV_RUN, P_DIV_STORE,
    P_OUT_RD, P_OUT_LAT, P_OUT_WAIT
  } pstate_e;

  pstate_e state, mm_ret;

  // key scalars
  widx_t nw_n, nw_nsq;
  word_t mp_n, mp_nsq;

  // request context
  op_e   op;
  tag_t  tag;
  logic  err;
  logic [3:0] step;

  // MM operation
  slot_e mm_a, mm_b, mm_dst;
  logic  mm_modn;              // 1: modulus n, 0: modulus n^2
  widx_t mm_nw, j;
  logic  ld_v;
  widx_t ld_i;

  // ModExp
  slot_e ex_acc, ex_base, ex_slot;
  logic  ex_sparse, ex_started;
  widx_t ex_widx;
  logic [4:0] ex_bit;
  word_t ex_word;

  // divider load
  logic  div_ph;               // 0: dividend, 1: divisor
  logic  div_borrow;

  // random r: mask for its top word
  word_t r_mask;

  function automatic word_t smear(word_t w);
    word_t v = w;
    v |= v >> 1; v |= v >> 2; v |= v >> 4; v |= v >> 8; v |= v >> 16;
    return v;
  endfunction

  // store ports
  logic  st_we;
  slot_e st_wslot, ra_s, rb_s, rc_s;
  widx_t st_widx, ra_i, rb_i, rc_i;
  word_t st_wdata, ra_d, rb_d, rc_d;

  // modmult
  logic  mm_ld;
  logic  mm_start, mm_busy, mm_done, mm_q_stall, mm_sub_taken;
  word_t mm_rd;

  // divider
  logic  dv_clear, dv_dvd_we, dv_dvs_we, dv_start, dv_busy, dv_done;
  widx_t dv_idx;
  word_t dv_data, dv_quo, dv_rem;

  // rng, sparse
  logic  rng_en;
  word_t rng_out;
  logic  sp_clear, sp_we, sp_ovf;
  widx_t sp_top;
  word_t sp_rd;

  local_store #(.NW_MAX(NW_MAX)) u_store (
    .clk(clk), .we(st_we), .wr_slot(st_wslot), .wr_idx(st_widx), .wr_data(st_wdata),
    .rd_a_slot(ra_s), .rd_a_idx(ra_i), .rd_a_data(ra_d),
    .rd_b_slot(rb_s), .rd_b_idx(rb_i), .rd_b_data(rb_d),
    .rd_c_slot(rc_s), .rd_c_idx(rc_i), .rd_c_data(rc_d));

  mont_modmult #(.NW_MAX(NW_MAX)) u_mm (
    .clk(clk), .rst_n(rst_n),
    .nwords(mm_nw), .mprime(mm_modn ? mp_n : mp_nsq),
    .ld_x_we(mm_ld), .ld_y_we(mm_ld), .ld_m_we(mm_ld), .ld_idx(ld_i),
    .ld_x(ra_d), .ld_y(rb_d), .ld_m(rc_d),
    .start(mm_start), .busy(mm_busy), .done(mm_done),
    .rd_idx(j), .rd_data(mm_rd),
    .q_stall(mm_q_stall), .sub_taken(mm_sub_taken));

  int_divider #(.NW_MAX(NW_MAX)) u_div (
    .clk(clk), .rst_n(rst_n), .clear(dv_clear),
    .ld_dvd_we(dv_dvd_we), .ld_dvs_we(dv_dvs_we), .ld_idx(dv_idx), .ld_data(dv_data),
    .start(dv_start), .busy(dv_busy), .done(dv_done),
    .rd_idx(j), .quo_data(dv_quo), .rem_data(dv_rem));

  rng_xorshift #(.SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .en(rng_en), .reseed(1'b0), .seed_in(32'd0), .rnd(rng_out));

  sparse_buffer #(.ENTRIES(SPARSE_ENTRIES)) u_sparse (
    .clk(clk), .rst_n(rst_n), .clear(sp_clear),
    .we(sp_we), .wr_idx(req.idx), .wr_data(req.data),
    .rd_idx(ex_widx), .rd_data(sp_rd), .top_idx(sp_top), .overflow(sp_ovf));

  // ------------------------------------------------------------ datapath muxes
  logic  req_fire, rsp_fire;
  word_t dvd_word;

  always_comb begin
    req_ready = (state == P_IDLE);
    req_fire  = req_valid && req_ready;
    rsp_fire  = rsp_valid && rsp_ready;

    // store write port: host key writes, request words, results
    st_we    = 1'b0;
    st_wslot = SL_TMP;
    st_widx  = j;
    st_wdata = mm_rd;
    if (cfg.we && cfg.slot != CFG_SCALAR) begin
      st_we    = 1'b1;
      st_wslot = slot_e'(cfg.slot);
      st_widx  = cfg.idx;
      st_wdata = cfg.data;
    end else if (req_fire && req.op == OP_DEC) begin
      st_we    = 1'b1;
      st_wslot = SL_C;
      st_widx  = req.idx;
      st_wdata = req.data;
    end else if (state == P_MM_STORE) begin
      st_we    = 1'b1;
      st_wslot = mm_dst;
    end else if (state == P_DIV_STORE) begin
      st_we    = 1'b1;
      st_wslot = SL_TMP;
      st_wdata = dv_quo;
    end else if (state == P_RNG) begin
      st_we    = 1'b1;
      st_wslot = SL_RND;
      st_wdata = (j >= nw_n) ? '0 : (j == nw_n - 1'b1) ? (rng_out & r_mask) : rng_out;
    end

    // read ports
    ra_s = mm_a;  ra_i = j;
    rb_s = mm_b;  rb_i = j;
    rc_s = mm_modn ? SL_N : SL_NSQ;  rc_i = j;
    unique case (state)
      P_EXP_FETCH: begin rc_s = ex_slot; rc_i = ex_widx; end
      P_RNG_RD:    begin rc_s = SL_N;    rc_i = nw_n - 1'b1; end
      P_DIV_LOAD:  begin ra_s = SL_ACC;  rc_s = SL_N; end
      P_OUT_RD:    begin ra_s = SL_ACC; end
      default: ;
    endcase

    rng_en   = (state == P_RNG) && (j < nw_n);
    sp_we    = req_fire && req.op == OP_ENC;
    mm_start = (state == P_MM_GO);
    mm_ld    = ld_v && (state == P_MM_LOAD);
    // empty the sparse buffer as the last result word leaves
    sp_clear = (state == P_OUT_WAIT) && rsp_fire && rsp.last;

    // divider load: dividend = ACC - 1 (word-serial borrow), divisor = n
    dvd_word  = ra_d - {{(K-1){1'b0}}, div_borrow};
    dv_dvd_we = (state == P_DIV_LOAD) && ld_v && !div_ph;
    dv_dvs_we = (state == P_DIV_LOAD) && ld_v && div_ph;
    dv_idx    = ld_i;
    dv_data   = div_ph ? rc_d : dvd_word;
    dv_clear  = (state == P_DIV_CLR);
    dv_start  = (state == P_DIV_GO);
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE;   mm_ret <= P_IDLE;
      nw_n <= 8'd1;      nw_nsq <= 8'd2;   mp_n <= '0;  mp_nsq <= '0;
      op <= OP_ENC;      tag <= '0;        err <= 1'b0; step <= '0;
      mm_a <= SL_ONE;    mm_b <= SL_ONE;   mm_dst <= SL_TMP; mm_modn <= 1'b0;
      mm_nw <= 8'd1;     j <= '0;          ld_v <= 1'b0; ld_i <= '0;
      ex_acc <= SL_ACC;  ex_base <= SL_BASE; ex_slot <= SL_N;
      ex_sparse <= 1'b0; ex_started <= 1'b0; ex_widx <= '0; ex_bit <= '0; ex_word <= '0;
      div_ph <= 1'b0;    div_borrow <= 1'b0;  r_mask <= '0;
      rsp_valid <= 1'b0; rsp <= '0;
      evt <= '0;
    end else begin
      evt      <= '0;
      ld_v     <= 1'b0;
      evt.mm_done   <= mm_done;
      evt.q_stall   <= mm_q_stall;
      evt.sub_taken <= mm_sub_taken;
      evt.div_done  <= dv_done;

      if (cfg.we && cfg.slot == CFG_SCALAR) begin
        unique case (cfg.idx)
          SC_NW_N:   nw_n   <= widx_t'(cfg.data);
          SC_NW_NSQ: nw_nsq <= widx_t'(cfg.data);
          SC_MP_N:   mp_n   <= cfg.data;
          SC_MP_NSQ: mp_nsq <= cfg.data;
          default: ;
        endcase
      end

      unique case (state)
        // ------------------------------------------------ receive a request
        P_IDLE: if (req_fire) begin
          op  <= req.op;
          tag <= req.tag;
          if (req.last) begin
            state <= P_NEXT;
            step  <= '0;
          end
        end

        // ------------------------------------------------ programme sequencer
        P_NEXT: begin
          step <= step + 1'b1;
          j    <= '0;
          if (step == '0) begin
            err <= (op == OP_ENC) && sp_ovf;
            evt.sparse_ovf <= (op == OP_ENC) && sp_ovf;
          end
          mm_ret <= P_NEXT;
          state  <= P_MM_LOAD;
          mm_modn <= 1'b0;
          mm_nw   <= nw_nsq;
          if (op == OP_ENC) begin
            unique case (step)
              4'd0: state <= P_RNG_RD;
              4'd1: begin mm_a <= SL_G;     mm_b <= SL_R2NSQ; mm_dst <= SL_BASE; end
              4'd2: begin mm_a <= SL_R2NSQ; mm_b <= SL_ONE;   mm_dst <= SL_ACC;  end
              4'd3: begin
                state <= P_EXP_FETCH; ex_acc <= SL_ACC; ex_base <= SL_BASE;
                ex_sparse <= 1'b1; ex_widx <= sp_top; ex_started <= 1'b0;
              end
              4'd4: begin mm_a <= SL_RND;   mm_b <= SL_R2NSQ; mm_dst <= SL_BASE; end
              4'd5: begin mm_a <= SL_R2NSQ; mm_b <= SL_ONE;   mm_dst <= SL_ACC2; end
              4'd6: begin
                state <= P_EXP_FETCH; ex_acc <= SL_ACC2; ex_base <= SL_BASE;
                ex_sparse <= 1'b0; ex_slot <= SL_N; ex_widx <= nw_n - 1'b1; ex_started <= 1'b0;
              end
              4'd7: begin mm_a <= SL_ACC;   mm_b <= SL_ACC2;  mm_dst <= SL_ACC;  end
              4'd8: begin mm_a <= SL_ACC;   mm_b <= SL_ONE;   mm_dst <= SL_ACC;  end
              default: begin state <= P_OUT_RD; mm_nw <= nw_nsq; end
            endcase
          end else begin
            unique case (step)
              4'd0: begin mm_a <= SL_C;     mm_b <= SL_R2NSQ; mm_dst <= SL_BASE; end
              4'd1: begin mm_a <= SL_R2NSQ; mm_b <= SL_ONE;   mm_dst <= SL_ACC;  end
              4'd2: begin
                state <= P_EXP_FETCH; ex_acc <= SL_ACC; ex_base <= SL_BASE;
                ex_sparse <= 1'b0; ex_slot <= SL_LAMBDA; ex_widx <= nw_n - 1'b1; ex_started <= 1'b0;
              end
              4'd3: begin mm_a <= SL_ACC;   mm_b <= SL_ONE;   mm_dst <= SL_ACC;  end
              4'd4: begin state <= P_DIV_CLR; end
              4'd5: begin mm_a <= SL_TMP; mm_b <= SL_MU;  mm_dst <= SL_ACC; mm_modn <= 1'b1; mm_nw <= nw_n; end
              4'd6: begin mm_a <= SL_ACC; mm_b <= SL_R2N; mm_dst <= SL_ACC; mm_modn <= 1'b1; mm_nw <= nw_n; end
              default: begin state <= P_OUT_RD; mm_nw <= nw_n; end
            endcase
          end
        end

        // ------------------------------------------------ random r
        P_RNG_RD:   state <= P_RNG_MASK;
        P_RNG_MASK: begin
          // ones strictly below the leading one of n's top word
          r_mask <= smear(rc_d) >> 1;
          state  <= P_RNG;
        end
        P_RNG: begin
          // r has nw_n words; the words above, up to nw_nsq, are cleared
          // because r is used as an operand modulo n^2
          if (j == nw_nsq - 1'b1) state <= P_NEXT;
          j <= j + 1'b1;
        end

        // ------------------------------------------------ one ModMult
        P_MM_LOAD: begin
          if (j == mm_nw) begin
            state <= P_MM_GO;
          end else begin
            ld_v <= 1'b1;
            ld_i <= j;
            j    <= j + 1'b1;
          end
        end
        P_MM_GO:  state <= P_MM_RUN;
        P_MM_RUN: if (mm_done) begin
          state <= P_MM_STORE;
          j     <= '0;
        end
        P_MM_STORE: begin
          j <= j + 1'b1;
          if (j == mm_nw - 1'b1) state <= mm_ret;
        end

        // ------------------------------------------------ ModExp
        P_EXP_FETCH: state <= P_EXP_WAIT;
        P_EXP_WAIT: begin
          ex_word <= ex_sparse ? sp_rd : rc_d;
          ex_bit  <= 5'd31;
          state   <= P_EXP_BIT;
        end
        P_EXP_BIT: begin
          mm_modn <= 1'b0;
          mm_nw   <= nw_nsq;
          mm_dst  <= ex_acc;
          j       <= '0;
          if (ex_started) begin
            // square, then (P_EXP_MUL) multiply if the bit is set
            mm_a   <= ex_acc;
            mm_b   <= ex_acc;
            mm_ret <= P_EXP_MUL;
            state  <= P_MM_LOAD;
          end else if (ex_word[ex_bit]) begin
            mm_a       <= ex_acc;
            mm_b       <= ex_base;
            mm_ret     <= P_EXP_ADV;
            state      <= P_MM_LOAD;
            ex_started <= 1'b1;
          end else begin
            state <= P_EXP_ADV;
          end
        end
        P_EXP_MUL: begin
          j <= '0;
          if (ex_word[ex_bit]) begin
            mm_a   <= ex_acc;
            mm_b   <= ex_base;
            mm_ret <= P_EXP_ADV;
            state  <= P_MM_LOAD;
          end else begin
            state <= P_EXP_ADV;
          end
        end
        P_EXP_ADV: begin
          if (ex_bit != '0) begin
            ex_bit <= ex_bit - 1'b1;
            state  <= P_EXP_BIT;
          end else if (ex_widx != '0) begin
            ex_widx <= ex_widx - 1'b1;
            state   <= P_EXP_FETCH;
          end else begin
            state <= P_NEXT;
          end
        end

        // ------------------------------------------------ L(u) = (u-1)/n
        P_DIV_CLR: begin
          state      <= P_DIV_LOAD;
          j          <= '0;
          div_ph     <= 1'b0;
          div_borrow <= 1'b1;
        end
        P_DIV_LOAD: begin
          if (ld_v && !div_ph) div_borrow <= div_borrow && (ra_d == '0);
          if (!div_ph && j == nw_nsq) begin
            div_ph <= 1'b1;
            j      <= '0;
          end else if (div_ph && j == nw_n) begin
            state <= P_DIV_GO;
          end else begin
            ld_v <= 1'b1;
            ld_i <= j;
            j    <= j + 1'b1;
          end
        end
        P_DIV_GO:  state <= P_DIV_RUN;
        P_DIV_RUN: if (dv_done) begin
          state <= P_DIV_STORE;
          j     <= '0;
        end
        P_DIV_STORE: begin
          j <= j + 1'b1;
          if (j == nw_n - 1'b1) state <= P_NEXT;
        end

        // ------------------------------------------------ result words
        P_OUT_RD:  state <= P_OUT_LAT;
        P_OUT_LAT: begin
          rsp_valid <= 1'b1;
          rsp.tag   <= tag;
          rsp.idx   <= j;
          rsp.data  <= ra_d;
          rsp.err   <= err;
          rsp.last  <= (j == mm_nw - 1'b1);
          state     <= P_OUT_WAIT;
        end
        P_OUT_WAIT: if (rsp_fire) begin
          rsp_valid <= 1'b0;
          if (rsp.last) begin
            state    <= P_IDLE;
            evt.enc_done <= (op == OP_ENC);
            evt.dec_done <= (op == OP_DEC);
          end else begin
            j     <= j + 1'b1;
            state <= P_OUT_RD;
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // rem is not needed: L(u) divides exactly for a valid key
  logic unused_ok;
  always_comb unused_ok = ^{dv_rem, dv_busy, mm_busy};

  assert property (@(posedge clk) disable iff (!rst_n) cfg.we |-> state == P_IDLE);
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid && !rsp_ready |=> $stable(rsp));

endmodule
