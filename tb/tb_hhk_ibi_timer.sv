// tb_hhk_ibi_timer -- self-checking testbench for the inter-beat interval timer.
//
// Feeds random increasing beat timestamps (gaps of 40..200 samples, with idle
// clocks between beats) and checks each emitted interval against the
// difference of the timestamps, that no interval is produced for the first
// beat, that exactly 64 intervals are produced for 80 beats and full is set,
// that clear starts a fresh window, and that only intervals opened by a
// beat marked as matched are produced when beat_match is randomised.
module tb_hhk_ibi_timer;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, beat_valid = 1'b0;
  ts_t beat_ts = '0;
  logic beat_match = 1'b1;
  logic ibi_valid;
  ts_t ibi;
  logic [6:0] ibi_count;
  logic full;
  int checks = 0, failures = 0;

  hhk_ibi_timer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ts [$];
  int mt [$];
  int got [$];
  bit rand_match = 1'b0;
  always @(posedge clk) if (ibi_valid) got.push_back(int'(ibi));

  task automatic run_window(input int nbeats, input int t0);
    int t = t0;
    ts.delete();
    mt.delete();
    got.delete();
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int i = 0; i < nbeats; i++) begin
      ts.push_back(t);
      @(negedge clk);
      beat_ts = ts_t'(t);
      beat_match = rand_match ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      mt.push_back(int'(beat_match));
      beat_valid = 1'b1;
      @(negedge clk);
      beat_valid = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      t += $urandom_range(40, 200);
    end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_window(80, 65000);    // also crosses the 16-bit timestamp wrap
    checks++;
    if (got.size() != 64 || ibi_count != 7'd64 || !full) begin
      failures++;
      $display("FAIL %0d intervals, count %0d, full %0d", got.size(), ibi_count, full);
    end
    for (int i = 0; i < got.size(); i++) begin
      checks++;
      if (got[i] != ((ts[i + 1] - ts[i]) & 32'hffff)) begin
        failures++;
        $display("FAIL ibi %0d = %0d, expected %0d", i, got[i], ts[i + 1] - ts[i]);
      end
    end
    run_window(10, 17);
    checks++;
    if (got.size() != 9 || ibi_count != 7'd9 || full) begin
      failures++;
      $display("FAIL short window: %0d intervals", got.size());
    end
    for (int i = 0; i < got.size(); i++) begin
      checks++;
      if (got[i] != ts[i + 1] - ts[i]) begin failures++; $display("FAIL short window ibi %0d", i); end
    end
    rand_match = 1'b1;
    for (int w = 0; w < 4; w++) begin
      automatic int exp_ibi [$];
      run_window(90, 1000 * w);
      for (int i = 0; i + 1 < ts.size(); i++)
        if (mt[i] != 0 && exp_ibi.size() < 64) exp_ibi.push_back(ts[i + 1] - ts[i]);
      checks++;
      if (got.size() != exp_ibi.size() || int'(ibi_count) != exp_ibi.size()) begin
        failures++;
        $display("FAIL matched window %0d: %0d intervals, expected %0d", w, got.size(), exp_ibi.size());
      end else begin
        for (int i = 0; i < got.size(); i++) begin
          checks++;
          if (got[i] != exp_ibi[i]) begin failures++; $display("FAIL matched ibi %0d", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
