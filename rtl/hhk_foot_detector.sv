// hhk_foot_detector -- beat detector on the band-passed PPG stream.
//
// A beat is declared at sample n-1 when that sample is a local maximum
// (y[n-1] > y[n-2] and y[n-1] >= y[n]), its prominence over the lowest sample
// seen since the previous local maximum reaches the programmable threshold
// prom_th, and at least REFRACT samples (400 ms at 128 Hz, i.e. 150 BPM) have
// passed since the previous accepted beat. The output is the beat's timestamp,
// the index of the sample within the window (sample 0 is the first sample
// after clear).
//
// The local-maximum rule, the fixed prominence threshold and the 400 ms
// refractory period follow the published algorithm. The published text calls
// the detected points both "beat foot points" and "local maxima"; this design
// follows the algorithm listing and detects maxima. Measuring prominence
// causally, as the rise from the minimum since the previous local maximum
// (accepted or not), the tie rule (>= on the falling
// side) and the first-come handling of two peaks inside one refractory period
// are this design's choices.
//
// Interface: one sample per in_valid. beat_valid pulses one clock after the
// in_valid of the sample that follows the peak, with beat_ts = that sample's
// index minus one. beat_count counts accepted beats since clear.
module hhk_foot_detector
  import hhk_pkg::q15_t, hhk_pkg::ts_t, hhk_pkg::TS_W;
#(
  parameter int unsigned REFRACT = hhk_pkg::REFRACT_SAMPLES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  q15_t        in_sample,
  input  logic [15:0] prom_th,
  output logic        beat_valid,
  output ts_t         beat_ts,
  output logic [15:0] beat_count
);

  ts_t          idx_q;        // index of the sample now arriving
  q15_t         y1_q, y2_q;   // previous two samples
  logic [1:0]   seen_q;       // saturating count of samples seen (0..2)
  q15_t         trough_q;     // minimum since the last local maximum
  ts_t          last_q;       // timestamp of the last accepted beat
  logic         have_last_q;

  logic               is_peak, prom_ok, refr_ok, accept;
  logic signed [16:0] prom;
  ts_t                peak_ts, since;

  always_comb begin
    peak_ts = idx_q - ts_t'(1);
    since   = peak_ts - last_q;
    is_peak = (seen_q == 2'd2) && (y1_q > y2_q) && (y1_q >= in_sample);
    prom    = 17'(y1_q) - 17'(trough_q);
    prom_ok = prom >= $signed({1'b0, prom_th});
    refr_ok = !have_last_q || (since >= TS_W'(REFRACT));
    accept  = in_valid && is_peak && prom_ok && refr_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q       <= '0;
      y1_q        <= '0;
      y2_q        <= '0;
      seen_q      <= '0;
      trough_q    <= '0;
      last_q      <= '0;
      have_last_q <= 1'b0;
      beat_valid  <= 1'b0;
      beat_ts     <= '0;
      beat_count  <= '0;
    end else begin
      beat_valid <= 1'b0;
      if (clear) begin
        idx_q       <= '0;
        seen_q      <= '0;
        have_last_q <= 1'b0;
        beat_count  <= '0;
      end else if (in_valid) begin
        idx_q <= idx_q + ts_t'(1);
        y2_q  <= y1_q;
        y1_q  <= in_sample;
        if (seen_q != 2'd2) seen_q <= seen_q + 2'd1;
        if (accept) begin
          beat_valid  <= 1'b1;
          beat_ts     <= peak_ts;
          last_q      <= peak_ts;
          have_last_q <= 1'b1;
          beat_count  <= beat_count + 16'd1;
        end
        if (seen_q == 2'd0 || (in_valid && is_peak) || in_sample < trough_q) begin
          trough_q <= in_sample;
        end
      end
    end
  end

endmodule
