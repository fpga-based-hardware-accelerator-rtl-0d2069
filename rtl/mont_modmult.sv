// mont_modmult: word-serial Montgomery modular multiplier,
//   S = X * Y * 2^(-K*N) mod M,   N = nwords (1 .. NW_MAX), M odd.
//
// Algorithm (radix 2^K):  S = 0;  for i in 0..N-1 {  q = ((S + X*Y^i) * M') mod 2^K;
//   S = (S + X*Y^i + q*M) / 2^K  }  if (S >= M) S -= M.
// Each outer iteration i is unrolled into N+1 inner iterations j = 0..N, one
// word each:  t = X^j*Y^i + q*M^j + S^j + carry  (X^N = M^N = 0). The low word
// of t is S^(j-1) of the next partial sum (the j = 0 word is zero and
// dropped), and the last carry becomes S^N.
//
// A single processing element (mont_pe) executes the inner iterations, one is
// issued per clock, and the outer loop is pipelined: inner iteration (i+1, 0)
// is issued right after (i, N). The digit q of outer iteration i+1 is
// produced by mont_q_unit as soon as word S^0 of the new partial sum leaves
// the PE (after inner iteration (i, 1)), so it is normally ready before the
// inner loop ends. Issue waits at j = 0 only if q is not ready yet, which
// happens for the first digit and for short operands (N below about 10).
// The PE reads S^j three clocks after issue; the word it needs was written by
// iteration (i-1, j+1), at least 11 clocks earlier once the q wait is taken
// into account, so the partial sum can live in one buffer.
// After the last inner iteration the pipeline drains, then S - M is computed
// word by word (N+1 clocks, 32-bit subtract with borrow); if it does not
// borrow, the difference is the result.
//
// Execution time: N*(N+1) issue clocks + about 8 (first q) + 5 (drain) + N+2
// (subtraction) + 1. For N = 64 (2048-bit operands): 4160 + 80 = 4240 clocks,
// 2% above the ideal N*(N+1).
//
// Interface: operand words are written through the ld_* port (X, Y and M
// with separate enables, so M may stay loaded between multiplications) while
// the unit is idle; `start` begins a multiplication with the current nwords
// and mprime (= -M^-1 mod 2^K), both held stable until `done`. `done` is a
// one-clock pulse; the result words are then read combinationally through
// rd_idx/rd_data and stay until the next start. q_stall and sub_taken are
// event strobes for monitoring.
// The controller is a one-hot state machine (he_pkg::mm_state_e).
// Word indices use the package-wide 8-bit widx_t, wider than the buffers of
// NW_MAX (+1) entries need; an index never exceeds nwords <= NW_MAX, so the
// truncation lint reports on these array selects drops only zero bits.
// Following the paper: the algorithm, one PE with two multipliers, one inner
// iteration per clock, q interleaved with the inner loop, pipelined outer
// loop, 32-bit words, one-hot FSM. This design's choices: the PE pipeline
// depth, the stall rule at j = 0, the `>=` in the final comparison (the
// paper writes `>`, which leaves S = M unreduced), the subtraction and the
// load/read ports.
module mont_modmult
  import he_pkg::*;
#(
  parameter int unsigned NW_MAX = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  widx_t nwords,
  input  word_t mprime,
  input  logic  ld_x_we,
  input  logic  ld_y_we,
  input  logic  ld_m_we,
  input  widx_t ld_idx,
  input  word_t ld_x,
  input  word_t ld_y,
  input  word_t ld_m,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  widx_t rd_idx,
  output word_t rd_data,
  output logic  q_stall,
  output logic  sub_taken
);
  localparam int unsigned PE_LAT = 5;   // issue -> s_out
  localparam int unsigned RD_STG = 3;   // issue -> s_in read

  word_t xb [NW_MAX];
  word_t yb [NW_MAX];
  word_t mb [NW_MAX];
  word_t sb [NW_MAX+1];
  word_t db [NW_MAX+1];

  mm_state_e state;
  widx_t     i_cnt, j_cnt;      // next inner iteration to issue
  widx_t     sub_j;
  logic      sub_borrow;
  logic      use_diff;
  logic      q0_pend;           // S^0 = 0 must still be given for digit 0

  // issue-side signals
  logic  issue;
  word_t pe_x, pe_m, q_cur;
  logic  last_issue;

  // tag pipeline: valid, i, j of each PE stage (index 0 = issued this clock)
  logic  v_pipe [PE_LAT+1];
  widx_t i_pipe [PE_LAT+1];
  widx_t j_pipe [PE_LAT+1];

  // PE
  word_t           s_in, s_out;
  logic [K+1:0]    c_out;
  logic            c_clr;

  // q unit
  logic  qu_start, qu_s0_valid, qu_q_valid, qu_consume;
  word_t qu_yi, qu_s0, qu_q;

  logic pipe_busy;
  logic [K:0] sub_full;   // S^j - M^j - borrow

  // ---------------------------------------------------------------- issue
  always_comb begin
    issue      = (state == MM_RUN) && !(j_cnt == '0 && !qu_q_valid);
    q_stall    = (state == MM_RUN) && (j_cnt == '0) && !qu_q_valid;
    last_issue = issue && (j_cnt == nwords) && (i_cnt == nwords - 1'b1);
    pe_x       = (j_cnt == nwords) ? '0 : xb[j_cnt];
    pe_m       = (j_cnt == nwords) ? '0 : mb[j_cnt];
    qu_consume = issue && (j_cnt == '0);
    // next digit: start when digit i is consumed and another outer loop follows
    qu_start   = (state == MM_IDLE && start) ||
                 (qu_consume && (i_cnt + 1'b1 < nwords));
    qu_yi      = (state == MM_IDLE) ? yb[0] : yb[i_cnt + 1'b1];
  end

  // q of the current outer loop: the digit being consumed, held for j > 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q_cur <= '0;
    else if (qu_consume) q_cur <= qu_q;
  end

  // ------------------------------------------------------------- PE + tags
  always_comb begin
    s_in  = (i_pipe[RD_STG] == '0) ? '0 : sb[j_pipe[RD_STG]];
    c_clr = (j_pipe[RD_STG+1] == '0);
  end

  mont_pe #(.K(K)) u_pe (
    .clk   (clk),
    .x     (pe_x),
    .y     (yb[i_cnt]),
    .q     ((j_cnt == '0) ? qu_q : q_cur),
    .m     (pe_m),
    .s_in  (s_in),
    .c_clr (c_clr),
    .s_out (s_out),
    .c_out (c_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 1; s <= PE_LAT; s++) begin
        v_pipe[s] <= 1'b0;
        i_pipe[s] <= '0;
        j_pipe[s] <= '0;
      end
    end else begin
      v_pipe[1] <= issue;
      i_pipe[1] <= i_cnt;
      j_pipe[1] <= j_cnt;
      for (int s = 2; s <= PE_LAT; s++) begin
        v_pipe[s] <= v_pipe[s-1];
        i_pipe[s] <= i_pipe[s-1];
        j_pipe[s] <= j_pipe[s-1];
      end
    end
  end
  always_comb begin
    v_pipe[0] = issue;
    i_pipe[0] = i_cnt;
    j_pipe[0] = j_cnt;
  end

  // S^0 of the partial sum for digit i+1 leaves the PE with inner iteration (i, 1)
  always_comb begin
    qu_s0_valid = q0_pend ||
                  (v_pipe[PE_LAT] && j_pipe[PE_LAT] == 8'd1 && (i_pipe[PE_LAT] + 1'b1 < nwords));
    qu_s0       = q0_pend ? '0 : s_out;
  end

  mont_q_unit #(.K(K)) u_q (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (qu_start),
    .x0       (xb[0]),
    .yi       (qu_yi),
    .s0_valid (qu_s0_valid),
    .s0       (qu_s0),
    .mprime   (mprime),
    .consume  (qu_consume),
    .q_valid  (qu_q_valid),
    .q        (qu_q)
  );

  always_comb begin
    pipe_busy = 1'b0;
    for (int s = 1; s <= PE_LAT; s++) pipe_busy |= v_pipe[s];
  end

  // ------------------------------------------------------ buffers (no reset)
  always_ff @(posedge clk) begin
    if (ld_x_we) xb[ld_idx] <= ld_x;
    if (ld_y_we) yb[ld_idx] <= ld_y;
    if (ld_m_we) mb[ld_idx] <= ld_m;
    if (v_pipe[PE_LAT] && j_pipe[PE_LAT] != '0)
      sb[j_pipe[PE_LAT] - 1'b1] <= s_out;
    if (v_pipe[PE_LAT] && j_pipe[PE_LAT] == nwords)
      sb[nwords] <= c_out[K-1:0];
    if (state == MM_SUB)
      db[sub_j] <= sub_full[K-1:0];
  end

  // --------------------------------------------------------------- control
  always_comb sub_full = {1'b0, sb[sub_j]} - {1'b0, ((sub_j == nwords) ? '0 : mb[sub_j])}
                         - {{K{1'b0}}, sub_borrow};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= MM_IDLE;
      i_cnt      <= '0;
      j_cnt      <= '0;
      sub_j      <= '0;
      sub_borrow <= 1'b0;
      use_diff   <= 1'b0;
      q0_pend    <= 1'b0;
    end else begin
      q0_pend <= 1'b0;
      unique case (state)
        MM_IDLE: if (start) begin
          state   <= MM_RUN;
          i_cnt   <= '0;
          j_cnt   <= '0;
          q0_pend <= 1'b1;
        end
        MM_RUN: if (issue) begin
          if (last_issue) state <= MM_DRAIN;
          if (j_cnt == nwords) begin
            j_cnt <= '0;
            i_cnt <= i_cnt + 1'b1;
          end else begin
            j_cnt <= j_cnt + 1'b1;
          end
        end
        MM_DRAIN: if (!pipe_busy) begin
          state      <= MM_SUB;
          sub_j      <= '0;
          sub_borrow <= 1'b0;
        end
        MM_SUB: begin
          sub_borrow <= sub_full[K];
          if (sub_j == nwords) begin
            use_diff <= !sub_full[K];
            state    <= MM_DONE;
          end else begin
            sub_j <= sub_j + 1'b1;
          end
        end
        MM_DONE: state <= MM_IDLE;
        default: state <= MM_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != MM_IDLE);
    done      = (state == MM_DONE);
    sub_taken = done && use_diff;
    rd_data   = use_diff ? db[rd_idx] : sb[rd_idx];
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot(state));
  assert property (@(posedge clk) disable iff (!rst_n)
                   start |-> (state == MM_IDLE && nwords != '0 && nwords <= NW_MAX));
  assert property (@(posedge clk) disable iff (!rst_n) (ld_x_we || ld_y_we) |-> !busy);

endmodule
