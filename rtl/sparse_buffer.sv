// sparse_buffer: stores an encryption input as a sparse vector.
//
// The plaintexts handed to encryption are encoded from floating-point values
// and have few non-zero words, so instead of a full NW_MAX-word array only
// (index, value) pairs of the non-zero words are kept, ENTRIES of them.
// Writing: `clear` empties the buffer; each `we` with a non-zero wr_data adds
// one entry (zero words need not be written and are dropped). A write beyond
// ENTRIES entries sets `overflow`, sticky until the next clear.
// Reading: rd_data is the dense word at rd_idx (the value of the matching
// entry, 0 if none), combinationally. top_idx is the largest index held
// (0 when empty), so an exponent scan can start at the highest non-zero word.
// Storing the input sparsely is the paper's; the entry count, the write rule
// and the top_idx output are this design's.
module sparse_buffer
  import he_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  we,
  input  widx_t wr_idx,
  input  word_t wr_data,
  input  widx_t rd_idx,
  output word_t rd_data,
  output widx_t top_idx,
  output logic  overflow
);
  localparam int unsigned CW = $clog2(ENTRIES + 1);

  widx_t          idx_q [ENTRIES];
  word_t          val_q [ENTRIES];
  logic [CW-1:0]  count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
      top_idx  <= '0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
      top_idx  <= '0;
    end else if (we && wr_data != '0) begin
      if (count == CW'(ENTRIES)) begin
        overflow <= 1'b1;
      end else begin
        count <= count + 1'b1;
        if (wr_idx > top_idx) top_idx <= wr_idx;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!clear && we && wr_data != '0 && count != CW'(ENTRIES)) begin
      idx_q[count[$clog2(ENTRIES)-1:0]] <= wr_idx;
      val_q[count[$clog2(ENTRIES)-1:0]] <= wr_data;
    end
  end

  always_comb begin
    rd_data = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (CW'(e) < count && idx_q[e] == rd_idx) rd_data |= val_q[e];
  end

endmodule
