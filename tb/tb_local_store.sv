// tb_local_store: writes random words to random {slot, index} addresses and
// reads them back through all three read ports, checking the one-clock read
// latency against a shadow copy kept here, and checks that the SL_ONE slot
// reads as the integer 1.
module tb_local_store;
  import he_pkg::*;
  localparam int unsigned NW = 64;
  logic clk = 1'b0;
  logic we;
  slot_e wr_slot, ra_s, rb_s, rc_s;
  widx_t wr_idx, ra_i, rb_i, rc_i;
  word_t wr_data, ra_d, rb_d, rc_d;
  word_t shadow [NSLOT][NW];
  logic  known  [NSLOT][NW];
  int checks = 0, failures = 0;

  local_store #(.NW_MAX(NW)) dut (
    .clk(clk), .we(we), .wr_slot(wr_slot), .wr_idx(wr_idx), .wr_data(wr_data),
    .rd_a_slot(ra_s), .rd_a_idx(ra_i), .rd_a_data(ra_d),
    .rd_b_slot(rb_s), .rd_b_idx(rb_i), .rd_b_data(rb_d),
    .rd_c_slot(rc_s), .rd_c_idx(rc_i), .rd_c_data(rc_d));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t expect_word(slot_e s, widx_t i);
    if (s == SL_ONE) return (i == 0) ? 32'd1 : 32'd0;
    return shadow[int'(s)][int'(i)];
  endfunction

  initial begin
    slot_e es [3];
    widx_t ei [3];
    logic  ek [3];
    for (int s = 0; s < NSLOT; s++) for (int i = 0; i < NW; i++) known[s][i] = 1'b0;
    we = 0; wr_slot = SL_N; wr_idx = 0; wr_data = 0;
    ra_s = SL_N; rb_s = SL_N; rc_s = SL_N; ra_i = 0; rb_i = 0; rc_i = 0;
    #1;
    for (int n = 0; n < 4000; n++) begin
      we = ($urandom % 2) == 1;
      wr_slot = slot_e'($urandom % NSLOT);
      wr_idx = widx_t'($urandom % NW);
      wr_data = $urandom;
      ra_s = (n % 17 == 0) ? SL_ONE : slot_e'($urandom % NSLOT);
      rb_s = slot_e'($urandom % NSLOT);
      rc_s = (n % 13 == 0) ? SL_ONE : slot_e'($urandom % NSLOT);
      ra_i = widx_t'($urandom % 4); rb_i = widx_t'($urandom % NW); rc_i = widx_t'($urandom % 2);
      es[0] = ra_s; es[1] = rb_s; es[2] = rc_s;
      ei[0] = ra_i; ei[1] = rb_i; ei[2] = rc_i;
      for (int p = 0; p < 3; p++) ek[p] = (es[p] == SL_ONE) || known[int'(es[p])][int'(ei[p])];
      // expected values are those before this clock's write (read-before-write)
      @(posedge clk);
      #1;
      if (ek[0]) begin checks++; if (ra_d !== expect_word(es[0], ei[0])) failures++; end
      if (ek[1]) begin checks++; if (rb_d !== expect_word(es[1], ei[1])) failures++; end
      if (ek[2]) begin checks++; if (rc_d !== expect_word(es[2], ei[2])) failures++; end
      if (we) begin
        shadow[int'(wr_slot)][int'(wr_idx)] = wr_data;
        known[int'(wr_slot)][int'(wr_idx)] = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
