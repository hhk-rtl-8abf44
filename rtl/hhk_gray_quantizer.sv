// hhk_gray_quantizer -- equal-frequency 2-bit Gray quantizer for IBIs.
//
// Each interval is compared with three programmable bin edges (edge[0] <=
// edge[1] <= edge[2], in sample periods) to find its bin 0..3, and the bin is
// written as a 2-bit Gray code (00, 01, 11, 10), so a value that crosses a
// bin boundary between the two nodes flips only one bit. Interval k fills
// raw_bits[2k] (Gray MSB) and raw_bits[2k+1] (Gray LSB); the string is
// NBITS = 128 bits long for 64 intervals. Bits not yet written stay 0.
//
// Four equal-frequency bins and the Gray mapping follow the published design.
// The published edges are dataset-wide percentiles whose values are not
// given, so the edges are inputs (set by software); the bit ordering within
// the string is this design's choice.
//
// Interface: ibi_valid/ibi in; raw_bits is updated one clock later; nbits
// counts the bits written. clear starts a new window.
module hhk_gray_quantizer
  import hhk_pkg::ts_t, hhk_pkg::gray2;
#(
  parameter int unsigned NBITS = hhk_pkg::POLAR_N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        ibi_valid,
  input  ts_t                         ibi,
  input  ts_t                         edges [3],
  output logic [NBITS-1:0]            raw_bits,
  output logic [$clog2(NBITS+1)-1:0]  nbits
);

  localparam int unsigned CW = $clog2(NBITS + 1);

  logic [1:0] bin, code;

  always_comb begin
    bin  = 2'(ibi >= edges[0]) + 2'(ibi >= edges[1]) + 2'(ibi >= edges[2]);
    code = gray2(bin);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_bits <= '0;
      nbits    <= '0;
    end else if (clear) begin
      raw_bits <= '0;
      nbits    <= '0;
    end else if (ibi_valid && (nbits <= CW'(NBITS - 2))) begin
      raw_bits[nbits[CW-2:0] +: 2] <= {code[0], code[1]};
      nbits <= nbits + CW'(2);
    end
  end

endmodule
