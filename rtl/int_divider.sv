// int_divider: integer divider for the Paillier L function, L(u) = (u-1)/n.
//
// Restoring binary long division of a DW-bit dividend by a DV-bit divisor,
// one quotient bit per clock, most significant first: the remainder is
// shifted left by one bit taking in the next dividend bit, and the divisor is
// subtracted when it fits. DW clocks after `start` the quotient is complete
// and `done` pulses; the remainder is kept as well.
// Interface: dividend and divisor are written word by word through the
// ld_* port while idle (`clear` zeroes both first, so short values need only
// their own words); the quotient and remainder are read combinationally by
// word index after done.
// The paper only names an integer divisor in each processor. A bit-serial
// restoring divider is this design's choice; it runs the full DV-bit compare
// and subtract in one clock, wider than the 32-bit words used elsewhere,
// because it is used once per decryption and takes about 0.01% of its time.
module int_divider
  import he_pkg::*;
#(
  parameter int unsigned NW_MAX = 64      // dividend words; divisor has NW_MAX/2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  ld_dvd_we,
  input  logic  ld_dvs_we,
  input  widx_t ld_idx,
  input  word_t ld_data,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  widx_t rd_idx,
  output word_t quo_data,
  output word_t rem_data
);
  localparam int unsigned DW = K * NW_MAX;
  localparam int unsigned DV = K * NW_MAX / 2;
  localparam int unsigned CW = $clog2(DW + 1);

  logic [DW-1:0] dvd;      // dividend, shifted out MSB first; quotient shifted in
  logic [DV-1:0] dvs;
  logic [DV-1:0] rem;
  logic [CW-1:0] cnt;
  logic [DV:0]   trial, diff;

  always_comb begin
    trial = {rem, dvd[DW-1]};
    diff  = trial - {1'b0, dvs};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      rem  <= '0;
      dvd  <= '0;
      dvs  <= '0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        dvd <= '0;
        dvs <= '0;
      end else if (ld_dvd_we) begin
        dvd[K*ld_idx +: K] <= ld_data;
      end else if (ld_dvs_we) begin
        dvs[K*ld_idx +: K] <= ld_data;
      end
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= CW'(DW);
        rem  <= '0;
      end else if (busy) begin
        if (diff[DV]) begin          // trial < divisor: quotient bit 0
          rem <= trial[DV-1:0];
          dvd <= {dvd[DW-2:0], 1'b0};
        end else begin
          rem <= diff[DV-1:0];
          dvd <= {dvd[DW-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    quo_data = dvd[K*rd_idx +: K];
    rem_data = (rd_idx < NW_MAX / 2) ? rem[K*rd_idx +: K] : '0;
  end

  assert property (@(posedge clk) disable iff (!rst_n) (ld_dvd_we || ld_dvs_we || clear) |-> !busy);

endmodule
