// tb_hhk_ts_matcher -- self-checking testbench for the cross-location matcher.
//
// A random ascending peer list (gaps 40..200 samples) is loaded, then local
// beats built from the peer beats with offsets of up to +/-60 samples, plus
// some beats far from any peer beat, are presented at random spacing. The
// expected flag is computed by brute force over the whole peer list
// (nearest peer beat within 38 samples). Also checks pass-through with en low,
// the peer and match counters, an empty peer list and clear.
module tb_hhk_ts_matcher;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b1;
  logic peer_we = 1'b0, beat_in_valid = 1'b0;
  ts_t  peer_ts = '0, beat_in_ts = '0;
  logic ready, beat_out_valid, beat_out_match;
  ts_t  beat_out_ts;
  logic [8:0] peer_count;
  logic [15:0] match_count;
  int checks = 0, failures = 0;

  hhk_ts_matcher dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int peers [$];

  function automatic bit ref_match(input int t);
    int best = 1 << 30;
    foreach (peers[j]) begin
      int d = (t > peers[j]) ? t - peers[j] : peers[j] - t;
      if (d < best) best = d;
    end
    return best <= 38;
  endfunction

  task automatic present(input int t, output bit m, output int lat);
    while (!ready) @(negedge clk);
    beat_in_ts = ts_t'(t);
    beat_in_valid = 1'b1;
    @(negedge clk);
    beat_in_valid = 1'b0;
    lat = 1;
    while (!beat_out_valid) begin @(negedge clk); lat++; end
    m = beat_out_match;
    checks++;
    if (beat_out_ts != ts_t'(t)) begin failures++; $display("FAIL timestamp passed wrongly"); end
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
  endtask

  initial begin
    int t, exp_matches;
    bit m;
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      do_clear();
      peers.delete();
      t = $urandom_range(0, 100);
      for (int j = 0; j < 120; j++) begin
        peers.push_back(t);
        @(negedge clk); peer_we = 1'b1; peer_ts = ts_t'(t);
        @(negedge clk); peer_we = 1'b0;
        t += $urandom_range(40, 200);
      end
      checks++;
      if (peer_count != 9'd120) begin failures++; $display("FAIL peer count %0d", peer_count); end
      exp_matches = 0;
      for (int j = 0; j < 120; j++) begin
        int lt;
        if ($urandom_range(0, 4) == 0) continue;          // local site missed a beat
        lt = peers[j] + int'($urandom_range(0, 120)) - 60;
        if (lt < 0) lt = 0;
        if (j > 0 && lt <= peers[j - 1] + 20) continue;
        present(lt, m, lat);
        checks++;
        if (m != ref_match(lt)) begin
          failures++;
          $display("FAIL t=%0d match=%0d expected %0d", lt, m, ref_match(lt));
        end
        if (ref_match(lt)) exp_matches++;
        repeat ($urandom_range(0, 4)) @(negedge clk);
      end
      checks++;
      if (match_count != 16'(exp_matches)) begin failures++; $display("FAIL match count"); end
    end
    // en low: pass-through, one clock
    en = 1'b0;
    present(12345, m, lat);
    checks++;
    if (!m || lat != 1) begin failures++; $display("FAIL bypass m=%0d lat=%0d", m, lat); end
    // empty list never matches
    en = 1'b1;
    do_clear();
    present(500, m, lat);
    checks++;
    if (m || peer_count != 0) begin failures++; $display("FAIL empty list"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
