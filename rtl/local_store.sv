// local_store: private word memory of one Paillier processor.
//
// Holds NSLOT large integers of up to NW_MAX K-bit words each: the key
// material (n, n^2, g, Montgomery constants, lambda, mu) and the working
// values of an en/decryption (ciphertext, ModExp base and accumulators, the
// random r, the L(u) quotient). A word is addressed by {slot, index}.
// One write port and three read ports (A and B feed the two ModMult operands,
// C the modulus or an exponent word). Reads are synchronous like a block RAM:
// the word addressed in one clock appears on rd_*_data in the next. Reading
// slot SL_ONE returns the integer 1 (word 0 = 1, all others 0) without
// storing it. No reset; nothing is read before it is written.
// A private local buffer per processor, holding the large integers as word
// arrays, follows the paper; slot map and port count are this design's.
module local_store
  import he_pkg::*;
#(
  parameter int unsigned NW_MAX = 64
) (
  input  logic  clk,
  input  logic  we,
  input  slot_e wr_slot,
  input  widx_t wr_idx,
  input  word_t wr_data,
  input  slot_e rd_a_slot,
  input  widx_t rd_a_idx,
  output word_t rd_a_data,
  input  slot_e rd_b_slot,
  input  widx_t rd_b_idx,
  output word_t rd_b_data,
  input  slot_e rd_c_slot,
  input  widx_t rd_c_idx,
  output word_t rd_c_data
);
  localparam int unsigned AW = $clog2(NW_MAX);
  localparam int unsigned DEPTH = NSLOT * NW_MAX;

  word_t mem [DEPTH];

  function automatic int unsigned addr(slot_e s, widx_t i);
    return int'(s) * NW_MAX + int'(i[AW-1:0]);
  endfunction

  function automatic word_t one_word(widx_t i);
    return (i == '0) ? word_t'(1) : '0;
  endfunction

  always_ff @(posedge clk) begin
    if (we && wr_slot != SL_ONE) mem[addr(wr_slot, wr_idx)] <= wr_data;
    rd_a_data <= (rd_a_slot == SL_ONE) ? one_word(rd_a_idx) : mem[addr(rd_a_slot, rd_a_idx)];
    rd_b_data <= (rd_b_slot == SL_ONE) ? one_word(rd_b_idx) : mem[addr(rd_b_slot, rd_b_idx)];
    rd_c_data <= (rd_c_slot == SL_ONE) ? one_word(rd_c_idx) : mem[addr(rd_c_slot, rd_c_idx)];
  end

  assert property (@(posedge clk) we |-> (wr_idx < NW_MAX && (wr_slot < NSLOT || wr_slot == SL_ONE)));

endmodule
