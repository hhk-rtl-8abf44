// hhk_ibi_timer -- inter-beat interval timer.
//
// For every accepted beat after the first one in a window it emits
// IBI(n) = t(n+1) - t(n), the distance in sample periods (1/128 s) between
// consecutive beat timestamps, provided beat n was marked as matched to a
// beat of the peer site (beat_match; tie it high for single-site use). It
// stops after MAX_IBI intervals (64 intervals
// fill the 128-bit raw key string at 2 bits each) and raises full.
//
// The interval definition and the limit of 64 intervals per window follow the
// published design. Timestamps wrap modulo 2^16, which is harmless because the
// 15 360-sample window is shorter than the wrap.
//
// Interface: beat_valid/beat_ts from the beat detector; ibi_valid pulses one
// clock after the beat that closes an interval. clear starts a new window.
module hhk_ibi_timer
  import hhk_pkg::ts_t;
#(
  parameter int unsigned MAX_IBI = hhk_pkg::MAX_IBI
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       beat_valid,
  input  ts_t                        beat_ts,
  input  logic                       beat_match,
  output logic                       ibi_valid,
  output ts_t                        ibi,
  output logic [$clog2(MAX_IBI+1)-1:0] ibi_count,
  output logic                       full
);

  localparam int unsigned CW = $clog2(MAX_IBI + 1);

  ts_t  prev_q;
  logic have_prev_q;
  logic prev_match_q;

  assign full = (ibi_count == CW'(MAX_IBI));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q      <= '0;
      have_prev_q <= 1'b0;
      prev_match_q <= 1'b0;
      ibi_valid   <= 1'b0;
      ibi         <= '0;
      ibi_count   <= '0;
    end else begin
      ibi_valid <= 1'b0;
      if (clear) begin
        have_prev_q <= 1'b0;
        ibi_count   <= '0;
      end else if (beat_valid) begin
        prev_q       <= beat_ts;
        prev_match_q <= beat_match;
        have_prev_q  <= 1'b1;
        if (have_prev_q && prev_match_q && !full) begin
          ibi_valid <= 1'b1;
          ibi       <= beat_ts - prev_q;
          ibi_count <= ibi_count + CW'(1);
        end
      end
    end
  end

endmodule
