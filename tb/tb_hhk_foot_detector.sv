// tb_hhk_foot_detector -- self-checking testbench for the beat detector.
//
// Builds a synthetic band-passed pulse train in an array: triangular pulses at
// known sample positions, with some pulses followed 20 samples later by a
// secondary bump (must be rejected by the 400 ms refractory period) and some
// small ripples between pulses (must be rejected by the prominence
// threshold). The expected beat list is the list of main pulse apexes, known
// by construction. Every reported timestamp and the final count are checked,
// as is the one-clock delay of beat_valid.
module tb_hhk_foot_detector;
  import hhk_pkg::*;

  localparam int NS = 6000;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  q15_t in_sample = '0;
  logic [15:0] prom_th = 16'd200;
  logic beat_valid;
  ts_t beat_ts;
  logic [15:0] beat_count;
  int checks = 0, failures = 0;

  hhk_foot_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sig [NS];
  int exp_ts [$];
  int got_ts [$];

  // add a triangle of given height and half-width centred on c
  task automatic tri_add(input int c, input int h, input int w);
    for (int k = -w; k <= w; k++)
      if (c + k >= 0 && c + k < NS) sig[c + k] += h - (h * (k < 0 ? -k : k)) / w;
  endtask

  always @(posedge clk) if (beat_valid) got_ts.push_back(int'(beat_ts));

  initial begin
    static int pos, n_echo = 0, n_ripple = 0;
    for (int i = 0; i < NS; i++) sig[i] = -1000;
    pos = 40;
    while (pos < NS - 200) begin
      tri_add(pos, 3000, 15);
      exp_ts.push_back(pos);
      if ($urandom_range(0, 2) == 0) begin tri_add(pos + 20, 1500, 4); n_echo++; end
      if ($urandom_range(0, 2) == 0) begin tri_add(pos + 60, 100, 3); n_ripple++; end
      pos += $urandom_range(70, 160);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      in_sample = q15_t'(sig[i]);
      in_valid  = 1'b1;
      @(negedge clk);
      in_valid  = 1'b0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (got_ts.size() != exp_ts.size() || beat_count != 16'(exp_ts.size())) begin
      failures++;
      $display("FAIL %0d beats reported (count %0d), %0d expected", got_ts.size(), beat_count, exp_ts.size());
    end
    for (int i = 0; i < exp_ts.size() && i < got_ts.size(); i++) begin
      checks++;
      if (got_ts[i] != exp_ts[i]) begin
        failures++;
        $display("FAIL beat %0d at %0d, expected %0d", i, got_ts[i], exp_ts[i]);
      end
    end
    checks++;
    if (n_echo == 0 || n_ripple == 0) begin failures++; $display("FAIL stimulus lacks echoes or ripples"); end
    // clear restarts the sample index
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    got_ts.delete();
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_sample = q15_t'(sig[i]);
      in_valid  = 1'b1;
      @(negedge clk);
      in_valid  = 1'b0;
    end
    checks++;
    if (got_ts.size() < 1 || got_ts[0] != exp_ts[0]) begin
      failures++;
      $display("FAIL after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
