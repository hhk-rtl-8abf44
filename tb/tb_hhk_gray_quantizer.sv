// tb_hhk_gray_quantizer -- self-checking testbench for the Gray quantizer.
//
// Random intervals, including values exactly on the bin edges, are
// quantized; the expected string is built from an explicit table of the four
// codes (bin 0 -> 00, 1 -> 01, 2 -> 11, 3 -> 10, MSB first in the string).
// Checks the string after every interval, the bit count, saturation at 128
// bits, and clear.
module tb_hhk_gray_quantizer;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, ibi_valid = 1'b0;
  ts_t ibi = '0;
  ts_t edges [3];
  logic [POLAR_N-1:0] raw_bits;
  logic [7:0] nbits;
  int checks = 0, failures = 0;

  hhk_gray_quantizer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static logic [POLAR_N-1:0] expv = '0;
    static logic [1:0] table_code [4] = '{2'b00, 2'b01, 2'b11, 2'b10};
    int v, bin;
    edges[0] = 16'd92; edges[1] = 16'd102; edges[2] = 16'd112;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 70; k++) begin
      case (k % 7)
        0: v = 92;  1: v = 101; 2: v = 112; 3: v = 91;
        default: v = $urandom_range(60, 140);
      endcase
      bin = (v < 92) ? 0 : (v < 102) ? 1 : (v < 112) ? 2 : 3;
      if (k < 64) begin
        expv[2 * k]     = table_code[bin][1];
        expv[2 * k + 1] = table_code[bin][0];
      end
      @(negedge clk);
      ibi = ts_t'(v);
      ibi_valid = 1'b1;
      @(negedge clk);
      ibi_valid = 1'b0;
      checks++;
      if (raw_bits !== expv || nbits != 8'((k < 64 ? k + 1 : 64) * 2)) begin
        failures++;
        $display("FAIL k=%0d v=%0d bits=%h exp=%h nbits=%0d", k, v, raw_bits, expv, nbits);
      end
    end
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    checks++;
    if (raw_bits !== '0 || nbits != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
