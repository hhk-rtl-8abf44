// tb_hhk_bpf -- self-checking testbench for the band-pass prefilter.
//
// Part 1 compares every output sample with a golden model of the three
// shift-and-add sections written with 64-bit integers, for a random input.
// Part 2 measures the steady-state gain for sinusoids: in band (1.5 Hz) it
// must exceed 0.6, out of band (0.05 Hz and 20 Hz) it must be below 0.3, and
// a DC offset must be removed. It also checks the one-clock output latency.
module tb_hhk_bpf;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  q15_t in_sample = '0;
  logic out_valid;
  q15_t out_sample;
  int checks = 0, failures = 0;

  hhk_bpf dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // golden model state (GUARD = 8, HP 5, LP 2)
  longint b, l1, l2;
  bit primed;

  function automatic longint floor_div(input longint a, input int sh);
    longint d = longint'(1) << sh;
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  function automatic int model_step(input int x);
    longint xe = longint'(x) * 256;
    longint df, y;
    if (!primed) begin
      df = 0;
      b  = xe;
      primed = 1;
    end else begin
      df = xe - b;
      b  = b + floor_div(df, 5);
    end
    l1 = l1 + floor_div(df - l1, 2);
    l2 = l2 + floor_div(l1 - l2, 2);
    y  = floor_div(l2, 8);
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    return int'(y);
  endfunction

  task automatic push(input int x, output int y);
    @(negedge clk);
    in_sample = q15_t'(x);
    in_valid  = 1'b1;
    @(negedge clk);
    in_valid  = 1'b0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL out_valid not one clock after in_valid"); end
    y = int'(out_sample);
  endtask

  task automatic restart();
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    b = 0; l1 = 0; l2 = 0; primed = 0;
  endtask

  task automatic sine_gain(input real f_hz, input int n, output real g);
    int y, peak;
    real amp = 8000.0;
    peak = 0;
    restart();
    for (int i = 0; i < n; i++) begin
      push(int'(amp * $sin(2.0 * 3.14159265 * f_hz * i / 128.0)), y);
      if (i > n / 2 && (y > peak || -y > peak)) peak = (y > 0) ? y : -y;
    end
    g = peak / amp;
  endtask

  initial begin
    int y, ym;
    real g;
    b = 0; l1 = 0; l2 = 0; primed = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1: bit-exact against the golden model
    for (int i = 0; i < 3000; i++) begin
      automatic int x = (i < 1000) ? 12000 + $urandom_range(0, 4000) : int'($urandom_range(0, 65535)) - 32768;
      push(x, y);
      ym = model_step(x);
      checks++;
      if (y != ym) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d y=%0d model=%0d", i, y, ym);
      end
    end
    // 2: frequency response
    sine_gain(1.5, 1200, g);
    checks++;
    if (g < 0.6) begin failures++; $display("FAIL passband gain %f at 1.5 Hz", g); end
    sine_gain(20.0, 600, g);
    checks++;
    if (g > 0.3) begin failures++; $display("FAIL stopband gain %f at 20 Hz", g); end
    sine_gain(0.05, 6000, g);
    checks++;
    if (g > 0.3) begin failures++; $display("FAIL stopband gain %f at 0.05 Hz", g); end
    restart();
    for (int i = 0; i < 800; i++) push(20000, y);
    checks++;
    if (y > 2 || y < -2) begin failures++; $display("FAIL DC not removed, y=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
