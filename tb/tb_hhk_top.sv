// tb_hhk_top -- end-to-end testbench: two HHK nodes agree on a key.
//
// Two hhk_top instances at their default parameters play node A (head) and
// node B (wrist). The testbench synthesises a PPG record for each: a DC level
// plus one raised-cosine pulse per heartbeat, each followed 26 samples later
// by a smaller secondary (dicrotic-like) wave, and a small ripple later in
// the cycle. Beat-to-beat intervals are drawn from {80, 97, 107, 125} samples
// (windows 1-3),
// one per quantizer bin and at least 5 samples from any bin edge, so the
// expected Gray string of each node is known by construction. Node B sees the
// same beats 6 samples later, with a few beats moved by 8 samples so that
// some of its intervals fall into a neighbouring bin.
//
// Each window streams 15 360 samples (120 s at 128 Hz) to each node over
// AXI4-Lite. Node A's window closes by itself at the sample limit; node B's
// is closed by command. Then A encodes a random message, the helper moves to
// B, and B decodes. Window 1 has few disagreeing bits and must yield B's
// m_hat = m with decode_ok; window 2 has many and must end with decode_ok = 0.
// Window 3 drops a few pulses from one node or the other (missed beats; the
// long gap may also yield a spurious detection) and enables cross-location
// matching. The window is first streamed with matching off to collect each
// node's beat timestamps; it is then streamed again with each node given the
// other's list, so only intervals opened by a matched beat enter the key
// string, the two strings stay aligned and the key must still be recovered.
// Window 4 models a slow (about 45 BPM) heart: intervals of 140-200 samples
// give about 90 beats per window, the quantizer edges and the prominence
// threshold are reprogrammed over AXI, and the key must be recovered.
// The decoded result is also compared with an independent reference SC
// decoder. Counted mechanisms (each must occur): refractory rejection,
// prominence rejection, the 64-interval limit, automatic window close,
// commanded window close, ignored out-of-window samples, corrected bit errors,
// a rejected (decode_ok = 0) reconciliation, matched beats and unmatched
// beats.
module tb_hhk_top;
  import hhk_pkg::*;
  import hhk_ref_pkg::*;

  localparam int NS = 15360;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  awaddr [2], araddr [2];
  logic        awvalid [2], wvalid [2], bready [2], arvalid [2], rready [2];
  logic [31:0] wdata [2];
  logic        awready [2], wready [2], bvalid [2], arready [2], rvalid [2];
  logic [1:0]  bresp [2], rresp [2];
  logic [31:0] rdata [2];
  logic        key_ready [2], decode_ok [2];

  int checks = 0, failures = 0;

  for (genvar g = 0; g < 2; g++) begin : g_node
    hhk_top dut (
      .clk, .rst_n,
      .s_awaddr(awaddr[g]), .s_awvalid(awvalid[g]), .s_awready(awready[g]),
      .s_wdata(wdata[g]), .s_wstrb(4'hf), .s_wvalid(wvalid[g]), .s_wready(wready[g]),
      .s_bresp(bresp[g]), .s_bvalid(bvalid[g]), .s_bready(bready[g]),
      .s_araddr(araddr[g]), .s_arvalid(arvalid[g]), .s_arready(arready[g]),
      .s_rdata(rdata[g]), .s_rresp(rresp[g]), .s_rvalid(rvalid[g]), .s_rready(rready[g]),
      .key_ready(key_ready[g]), .decode_ok(decode_ok[g])
    );
  end

  always #5 clk = ~clk;

  initial begin
    #400_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters (probing the detectors of both nodes) -----------
  int n_refract = 0, n_prom = 0;
  always @(negedge clk) begin
    if (g_node[0].dut.u_foot.in_valid && g_node[0].dut.u_foot.is_peak) begin
      if (g_node[0].dut.u_foot.prom_ok && !g_node[0].dut.u_foot.refr_ok) n_refract++;
      if (!g_node[0].dut.u_foot.prom_ok) n_prom++;
    end
    if (g_node[1].dut.u_foot.in_valid && g_node[1].dut.u_foot.is_peak) begin
      if (g_node[1].dut.u_foot.prom_ok && !g_node[1].dut.u_foot.refr_ok) n_refract++;
      if (!g_node[1].dut.u_foot.prom_ok) n_prom++;
    end
  end

  // detected beat timestamps of each node in the current window
  int det [2][$];
  always @(negedge clk) begin
    if (g_node[0].dut.u_foot.beat_valid) det[0].push_back(int'(g_node[0].dut.u_foot.beat_ts));
    if (g_node[1].dut.u_foot.beat_valid) det[1].push_back(int'(g_node[1].dut.u_foot.beat_ts));
  end

  // ---- AXI4-Lite master ----------------------------------------------------
  task automatic wr(input int nd, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr[nd] = a; awvalid[nd] = 1'b1; wdata[nd] = d; wvalid[nd] = 1'b1; bready[nd] = 1'b1;
    while (!(awready[nd] && wready[nd])) @(negedge clk);
    awvalid[nd] = 1'b0; wvalid[nd] = 1'b0;
    while (!bvalid[nd]) @(negedge clk);
    @(negedge clk);
    bready[nd] = 1'b0;
  endtask

  task automatic rd(input int nd, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr[nd] = a; arvalid[nd] = 1'b1; rready[nd] = 1'b1;
    while (!arready[nd]) @(negedge clk);
    arvalid[nd] = 1'b0;
    while (!rvalid[nd]) @(negedge clk);
    d = rdata[nd];
    @(negedge clk);
    rready[nd] = 1'b0;
  endtask

  task automatic rd128(input int nd, input logic [7:0] a, output logic [127:0] v);
    logic [31:0] d;
    for (int w = 0; w < 4; w++) begin
      rd(nd, a + 8'(4 * w), d);
      v[32 * w +: 32] = d;
    end
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- stimulus --------------------------------------------------------------
  int ibi_set [4] = '{80, 97, 107, 125};
  int edge_set [3] = '{92, 102, 112};
  int sig [2][NS];
  int beats_a [$];
  int beats_b [$];

  task automatic add_pulse(input int nd, input int c, input int h, input int w);
    for (int k = -w; k <= w; k++)
      if (c + k >= 0 && c + k < NS)
        sig[nd][c + k] += int'(h * 0.5 * (1.0 + $cos(3.14159265 * k / w)));
  endtask

  task automatic build_window(input int n_moved, input bit drop);
    int t;
    beats_a.delete();
    beats_b.delete();
    t = 100;
    while (t < NS - 20) begin
      beats_a.push_back(t);
      t += ibi_set[$urandom_range(0, 3)];
    end
    foreach (beats_a[i]) beats_b.push_back(beats_a[i] + 6);
    // move n_moved distinct beats of node B (among the first 64 intervals)
    for (int m = 0; m < n_moved; m++) beats_b[2 + 2 * m] += 8;
    // missed beats: pulses absent from one site only
    if (drop) begin
      beats_a.delete(10);
      beats_a.delete(39);
      beats_b.delete(25);
    end
    for (int nd = 0; nd < 2; nd++) begin
      for (int i = 0; i < NS; i++) sig[nd][i] = 12000 + int'($urandom_range(0, 6)) - 3;
    end
    foreach (beats_a[i]) begin
      add_pulse(0, beats_a[i], 3000, 14);
      add_pulse(0, beats_a[i] + 26, 2000, 8);
      add_pulse(0, beats_a[i] + 60, 80, 4);
    end
    foreach (beats_b[i]) begin
      add_pulse(1, beats_b[i], 2400, 14);
      add_pulse(1, beats_b[i] + 26, 1600, 8);
      add_pulse(1, beats_b[i] + 60, 80, 4);
    end
  endtask

  function automatic logic [127:0] expected_bits(input int bt [$]);
    logic [127:0] v = '0;
    for (int k = 0; k < 64; k++) begin
      int ibi = bt[k + 1] - bt[k];
      int bin = (ibi < edge_set[0]) ? 0 : (ibi < edge_set[1]) ? 1 : (ibi < edge_set[2]) ? 2 : 3;
      logic [1:0] code = (bin == 0) ? 2'b00 : (bin == 1) ? 2'b01 : (bin == 2) ? 2'b11 : 2'b10;
      v[2 * k] = code[1];
      v[2 * k + 1] = code[0];
    end
    return v;
  endfunction

  // reference of the matching rule: keep intervals opened by a beat whose
  // nearest peer beat is within the tolerance
  function automatic logic [127:0] expected_matched(input int own [$], input int peer [$],
                                                    output int nmatch);
    int bt [$];
    nmatch = 0;
    foreach (own[i]) begin
      int best = 1 << 30;
      foreach (peer[j]) if ((own[i] > peer[j] ? own[i] - peer[j] : peer[j] - own[i]) < best)
        best = own[i] > peer[j] ? own[i] - peer[j] : peer[j] - own[i];
      if (best <= int'(MATCH_TOL)) begin
        nmatch++;
        // an interval [own[i], own[i+1]] is represented by its two ends
        if (i + 1 < own.size() && bt.size() < 128) begin
          bt.push_back(0);
          bt.push_back(own[i + 1] - own[i]);
        end
      end
    end
    begin
      int seq [$];
      seq.push_back(0);
      for (int k = 0; k < 64; k++) seq.push_back(seq[k] + bt[2 * k + 1]);
      return expected_bits(seq);
    end
  endfunction

  int d_off [2] = '{0, 0};
  int peer [2][$];

  // ---- one key-agreement round -----------------------------------------------
  int n_corrected = 0, n_rejected = 0, n_full = 0, n_autoclose = 0, n_cmdclose = 0, n_ignored = 0;
  int n_matched = 0, n_unmatched = 0;

  task automatic run_window(input int n_moved, input bit expect_ok, input bit match);
    logic [31:0] st, d;
    logic [127:0] bits_a, bits_b, helper, rv, uref, exp_a, exp_b;
    logic [41:0] m, mh;
    int nerr, nm_a, nm_b;
    build_window(n_moved, match);
    det[0].delete();
    det[1].delete();
    wr(0, A_CTRL, 32'h1);
    wr(1, A_CTRL, 32'h1);
    wr(0, A_MATCH, 32'(match));
    wr(1, A_MATCH, 32'(match));
    if (match) begin
      // first pass without matching: learn the timestamps each node detects
      wr(0, A_MATCH, 32'h0);
      wr(1, A_MATCH, 32'h0);
      for (int i = 0; i < NS; i++)
        fork
          wr(0, A_SAMPLE, 32'(sig[0][i]));
          wr(1, A_SAMPLE, 32'(sig[1][i]));
        join
      peer[0] = det[1];
      peer[1] = det[0];
      det[0].delete();
      det[1].delete();
      wr(0, A_CTRL, 32'h1);
      wr(1, A_CTRL, 32'h1);
      wr(0, A_MATCH, 32'h1);
      wr(1, A_MATCH, 32'h1);
      foreach (peer[0][j]) wr(0, A_PEER_TS, 32'(peer[0][j]));
      foreach (peer[1][j]) wr(1, A_PEER_TS, 32'(peer[1][j]));
    end
    for (int i = 0; i < NS; i++) begin
      fork
        wr(0, A_SAMPLE, 32'(sig[0][i]));
        if (i < NS - 10) wr(1, A_SAMPLE, 32'(sig[1][i]));
      join
    end
    // node A closed by itself; extra samples must be ignored
    rd(0, A_STATUS, st);
    check(st[0] == 1'b0, "node A window closes at 15360 samples");
    if (st[0] == 1'b0) n_autoclose++;
    wr(0, A_SAMPLE, 32'd5);
    rd(0, A_SAMPLE, d);
    check(d == 32'(NS), "sample count stops at the window length");
    if (d == 32'(NS)) n_ignored++;
    rd(1, A_STATUS, st);
    check(st[0] == 1'b1, "node B window still open");
    wr(1, A_CTRL, 32'h2);
    rd(1, A_STATUS, st);
    check(st[0] == 1'b0, "node B window closed by command");
    if (st[0] == 1'b0) n_cmdclose++;
    for (int nd = 0; nd < 2; nd++) begin
      rd(nd, A_STATUS, st);
      check(st[14:8] == 7'd64 && st[5], "64 intervals collected, limit reached");
      check(int'(st[31:16]) == det[nd].size(), $sformatf("node %0d beat count %0d", nd, st[31:16]));
      if (!match)
        check(det[nd].size() == (nd == 0 ? beats_a.size() : beats_b.size()), "one detection per pulse");
      if (st[5] && int'(st[31:16]) > 65) n_full++;
    end
    rd128(0, A_RAW_BITS, bits_a);
    rd128(1, A_RAW_BITS, bits_b);
    if (!match) begin
      // measure each node's detection offset for later windows
      for (int nd = 0; nd < 2; nd++) begin
        bit same = (det[nd].size() == (nd == 0 ? beats_a.size() : beats_b.size()));
        if (same) begin
          d_off[nd] = det[nd][0] - (nd == 0 ? beats_a[0] : beats_b[0]);
          foreach (det[nd][i])
            if (det[nd][i] - (nd == 0 ? beats_a[i] : beats_b[i]) != d_off[nd]) same = 1'b0;
        end
        check(same, $sformatf("node %0d beat timestamps at a constant offset (%0d)", nd, d_off[nd]));
      end
      exp_a = expected_bits(beats_a);
      exp_b = expected_bits(beats_b);
    end else begin
      check(det[0].size() == peer[1].size() && det[1].size() == peer[0].size(), "both passes detect the same beats");
      exp_a = expected_matched(det[0], det[1], nm_a);
      exp_b = expected_matched(det[1], det[0], nm_b);
      rd(0, A_MATCH, d);
      check(d[0] && int'(d[12:4]) == det[1].size() && int'(d[31:16]) == nm_a,
            $sformatf("node A peers %0d matched %0d (expected %0d)", d[12:4], d[31:16], nm_a));
      n_matched += int'(d[31:16]);
      n_unmatched += det[0].size() - int'(d[31:16]);
      rd(1, A_MATCH, d);
      check(d[0] && int'(d[12:4]) == det[0].size() && int'(d[31:16]) == nm_b,
            $sformatf("node B peers %0d matched %0d (expected %0d)", d[12:4], d[31:16], nm_b));
      n_matched += int'(d[31:16]);
      n_unmatched += det[1].size() - int'(d[31:16]);
    end
    check(bits_a == exp_a, "node A raw bits");
    check(bits_b == exp_b, "node B raw bits");
    nerr = $countones(bits_a ^ bits_b);
    // node A: commit to a random message
    m = 42'({$urandom, $urandom});
    wr(0, A_MSG0, m[31:0]);
    wr(0, A_MSG1, 32'(m[41:32]));
    wr(0, A_CTRL, 32'h4);
    do rd(0, A_STATUS, st); while (!st[2]);
    rd128(0, A_HELPER, helper);
    check(helper == (bits_a ^ polar_encode(msg_to_u(m), POLAR_N)), "helper = b_A xor c");
    // node B: reconcile
    for (int w = 0; w < 4; w++) wr(1, A_HELPER_IN + 8'(4 * w), helper[32 * w +: 32]);
    wr(1, A_CTRL, 32'h8);
    do rd(1, A_STATUS, st); while (!st[3]);
    rd128(1, A_R_VEC, rv);
    rd(1, A_M_HAT, d);       mh[31:0]  = d;
    rd(1, A_M_HAT + 8'h4, d); mh[41:32] = d[9:0];
    check(rv == (bits_b ^ helper), "r = b_B xor h");
    uref = sc_reference(rv);
    check(mh == u_to_msg(uref), "m_hat matches reference SC decoder");
    rd(1, A_KEYINFO, d);
    check(d[15:0] == 16'd1028, $sformatf("key latency %0d clocks", d[15:0]));
    check(decode_ok[1] == expect_ok, $sformatf("decode_ok=%0d with %0d bit disagreements", decode_ok[1], nerr));
    if (expect_ok) check(mh == m, "node B recovers node A's message");
    if (expect_ok && mh == m && nerr > 0) n_corrected++;
    if (!decode_ok[1]) n_rejected++;
    $display("window: %0d beats at node A, %0d disagreeing bits, decode_ok=%0d, key match=%0d, distance=%0d",
             det[0].size(), nerr, decode_ok[1], mh == m, d[23:16]);
  endtask

  initial begin
    for (int nd = 0; nd < 2; nd++) begin
      awaddr[nd] = '0; araddr[nd] = '0; awvalid[nd] = 0; wvalid[nd] = 0; bready[nd] = 0;
      arvalid[nd] = 0; rready[nd] = 0; wdata[nd] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int nd = 0; nd < 2; nd++) wr(nd, A_PROM_TH, 32'd400);
    run_window(2, 1'b1, 1'b0);
    run_window(24, 1'b0, 1'b0);
    run_window(2, 1'b1, 1'b1);
    // slow heart (about 45 BPM): about 90 beats per window, as in a resting
    // recording; the quantizer edges are reprogrammed to match
    ibi_set = '{140, 160, 180, 200};
    edge_set = '{150, 170, 190};
    for (int nd = 0; nd < 2; nd++) begin
      wr(nd, A_EDGE0, 32'd150);
      wr(nd, A_EDGE1, 32'd170);
      wr(nd, A_EDGE2, 32'd190);
      wr(nd, A_PROM_TH, 32'd1000);
    end
    run_window(2, 1'b1, 1'b0);
    $display("mechanisms: refractory=%0d prominence=%0d ibi_limit=%0d autoclose=%0d cmdclose=%0d ignored=%0d corrected=%0d rejected=%0d matched=%0d unmatched=%0d",
             n_refract, n_prom, n_full, n_autoclose, n_cmdclose, n_ignored, n_corrected, n_rejected,
             n_matched, n_unmatched);
    check(n_refract > 0, "refractory rejection happened");
    check(n_prom > 0, "prominence rejection happened");
    check(n_full > 0, "64-interval limit reached with beats to spare");
    check(n_autoclose > 0 && n_cmdclose > 0 && n_ignored > 0, "window close paths exercised");
    check(n_corrected > 0, "bit errors corrected by the polar code");
    check(n_rejected > 0, "a reconciliation was rejected");
    check(n_matched > 0 && n_unmatched > 0, "beats matched and left unmatched across sites");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
