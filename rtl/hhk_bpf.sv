// hhk_bpf -- causal, multiplier-free Q15 band-pass prefilter for raw PPG.
//
// The filter removes baseline wander and high-frequency noise from the 16-bit
// PPG stream before beat detection, passing roughly the 0.5-4 Hz cardiac band
// at a 128 Hz sample rate. It is a cascade of three first-order IIR sections
// whose coefficients are powers of two, so every tap is a shift and an add:
//
//   baseline  b  += (x  - b ) >>> HP_SHIFT     high-pass output  h = x - b
//   low-pass  l1 += (h  - l1) >>> LP_SHIFT
//   low-pass  l2 += (l1 - l2) >>> LP_SHIFT     output y = sat16(l2 >>> GUARD)
//
// With HP_SHIFT = 5 the high-pass corner is about 0.64 Hz; two low-pass
// sections with LP_SHIFT = 2 give a combined corner near 3.8 Hz. States carry
// GUARD extra fraction bits below Q15 so that small signals are not lost in
// the shifts. The causal IIR structure, Q15 arithmetic, the absence of
// multipliers and the 0.5-4 Hz band follow the published design; the section
// structure, shift values and guard bits are this design's own choice, as the
// published text gives no coefficients.
//
// Interface: one sample per in_valid pulse; out_valid follows one clock later
// with the filtered Q15 value. clear resets the filter state; the first sample
// after clear (or reset) preloads the baseline so the DC level of the sensor
// does not produce a start-up transient.
module hhk_bpf
  import hhk_pkg::*;
#(
  parameter int unsigned HP_SHIFT = 5,
  parameter int unsigned LP_SHIFT = 2,
  parameter int unsigned GUARD    = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  q15_t in_sample,
  output logic out_valid,
  output q15_t out_sample
);

  localparam int unsigned W = 16 + GUARD + 2;   // state width, two bits of headroom

  logic signed [W-1:0] base_q, lp1_q, lp2_q;
  logic                primed_q;

  logic signed [W-1:0] x_ext, diff, lp1_d, lp2_d, y_ext;

  always_comb begin
    x_ext = W'(in_sample) <<< GUARD;
    diff  = primed_q ? (x_ext - base_q) : '0;
    lp1_d = lp1_q + ((diff  - lp1_q) >>> LP_SHIFT);
    lp2_d = lp2_q + ((lp1_d - lp2_q) >>> LP_SHIFT);
    y_ext = lp2_d >>> GUARD;
  end

  function automatic q15_t sat16(input logic signed [W-1:0] v);
    if (v > W'(32767))       return 16'sh7fff;
    else if (v < -W'(32768)) return 16'sh8000;
    else                     return q15_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q     <= '0;
      lp1_q      <= '0;
      lp2_q      <= '0;
      primed_q   <= 1'b0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        base_q   <= '0;
        lp1_q    <= '0;
        lp2_q    <= '0;
        primed_q <= 1'b0;
      end else if (in_valid) begin
        if (!primed_q) begin
          base_q   <= x_ext;
          primed_q <= 1'b1;
        end else begin
          base_q <= base_q + (diff >>> HP_SHIFT);
        end
        lp1_q      <= lp1_d;
        lp2_q      <= lp2_d;
        out_valid  <= 1'b1;
        out_sample <= sat16(y_ext);
      end
    end
  end

endmodule
