// tb_hhk_keygen_ctrl -- self-checking testbench for the fuzzy-commitment control.
//
// Node A's raw string b_A and message m are random. After an encode command
// the helper must equal b_A xor PolarEncode(m). A decode command is then
// issued with b_B = b_A xor e for error patterns of 0 to 30 bits and for an
// unrelated b_B: r_vec must equal b_B xor h, m_hat must equal the reference
// SC decoder's result (and m itself when e = 0), the Hamming distance and
// decode_ok must follow the distance rule, and the latencies to helper_ready
// (9 clocks) and key_ready (1 028 clocks, counting the command clock) are checked.
module tb_hhk_keygen_ctrl;
  import hhk_pkg::*;
  import hhk_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic [POLAR_N-1:0] raw_bits = '0, helper_in = '0;
  logic [POLAR_K-1:0] msg = '0;
  logic [7:0] dist_max = 8'd24;
  logic cmd_encode = 1'b0, cmd_decode = 1'b0;
  logic busy, helper_ready, decode_ok, key_ready;
  logic [POLAR_N-1:0] helper_out, r_vec;
  logic [POLAR_K-1:0] m_hat;
  logic [7:0] ham_dist;
  logic [15:0] key_cycles;
  int checks = 0, failures = 0;
  int n_ok = 0, n_fail = 0;

  hhk_keygen_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [POLAR_N-1:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic pulse_wait(input bit enc, output int lat);
    @(negedge clk);
    if (enc) cmd_encode = 1'b1; else cmd_decode = 1'b1;
    @(negedge clk);
    cmd_encode = 1'b0;
    cmd_decode = 1'b0;
    lat = 1;
    while (enc ? !helper_ready : !key_ready) begin
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    logic [POLAR_N-1:0] bA, bB, e, c, h, uref, cref;
    int lat, nerr, d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 24; t++) begin
      bA = rand128();
      msg = 42'({$urandom, $urandom});
      raw_bits = bA;
      pulse_wait(1'b1, lat);
      c = polar_encode(msg_to_u(msg), POLAR_N);
      h = bA ^ c;
      checks++;
      if (helper_out !== h) begin failures++; $display("FAIL t=%0d helper", t); end
      checks++;
      if (lat != 9) begin failures++; $display("FAIL encode latency %0d", lat); end
      // node B
      e = '0;
      nerr = (t < 4) ? 0 : (t < 22) ? (t - 4) * 2 : 0;
      for (int q = 0; q < nerr; q++) e[$urandom_range(0, POLAR_N - 1)] = 1'b1;
      bB = (t >= 22) ? rand128() : (bA ^ e);
      raw_bits  = bB;
      helper_in = h;
      pulse_wait(1'b0, lat);
      uref = sc_reference(bB ^ h);
      cref = polar_encode(uref, POLAR_N);
      d = $countones((bB ^ h) ^ cref);
      checks++;
      if (r_vec !== (bB ^ h)) begin failures++; $display("FAIL t=%0d r_vec", t); end
      checks++;
      if (m_hat !== u_to_msg(uref)) begin failures++; $display("FAIL t=%0d m_hat vs reference", t); end
      checks++;
      if (ham_dist != 8'(d) || decode_ok != (d <= 24)) begin
        failures++;
        $display("FAIL t=%0d distance %0d (exp %0d) ok %0d", t, ham_dist, d, decode_ok);
      end
      if (nerr == 0 && t < 22) begin
        checks++;
        if (m_hat !== msg || !decode_ok) begin failures++; $display("FAIL t=%0d clean decode", t); end
      end
      checks++;
      if (lat != 1028 || key_cycles != 16'd1028) begin
        failures++;
        $display("FAIL decode latency %0d key_cycles %0d", lat, key_cycles);
      end
      if (decode_ok) n_ok++; else n_fail++;
    end
    checks++;
    if (n_ok == 0 || n_fail == 0) begin failures++; $display("FAIL decode_ok never %0d", n_ok == 0); end
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    checks++;
    if (key_ready || helper_ready) begin failures++; $display("FAIL clear"); end
    $display("decode_ok=1: %0d, decode_ok=0: %0d", n_ok, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
