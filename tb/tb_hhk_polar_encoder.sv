// tb_hhk_polar_encoder -- self-checking testbench for the polar encoder.
//
// The expected codeword is computed as a vector-matrix product with the
// generator G = F^(x)7, whose entry G[i][j] is 1 exactly when the bits of j
// are a subset of the bits of i (natural order, F = [1 0; 1 1]). Random
// messages, all-zero and all-one messages are encoded; the codeword and the
// 8-clock latency from start to done are checked, and busy must hold while
// encoding.
module tb_hhk_polar_encoder;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [POLAR_K-1:0] msg = '0;
  logic busy, done;
  logic [POLAR_N-1:0] cw;
  int checks = 0, failures = 0;

  hhk_polar_encoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [POLAR_N-1:0] gen_mul(input logic [POLAR_N-1:0] u);
    logic [POLAR_N-1:0] x = '0;
    for (int j = 0; j < POLAR_N; j++)
      for (int i = 0; i < POLAR_N; i++)
        if (u[i] && ((i & j) == j)) x[j] = ~x[j];
    return x;
  endfunction

  function automatic logic [POLAR_N-1:0] place(input logic [POLAR_K-1:0] m);
    logic [POLAR_N-1:0] u = '0;
    int j = 0;
    for (int i = 0; i < POLAR_N; i++)
      if (INFO_MASK[i]) begin u[i] = m[j]; j++; end
    return u;
  endfunction

  initial begin
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if ($countones(INFO_MASK) != POLAR_K) begin
      failures++;
      $display("FAIL information set has %0d bits", $countones(INFO_MASK));
    end
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      msg   = (t == 0) ? '0 : (t == 1) ? '1 : 42'({$urandom, $urandom});
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done) begin
        checks++;
        if (!busy && !done) begin failures++; $display("FAIL busy low while encoding"); end
        @(negedge clk);
        lat++;
      end
      checks++;
      if (cw !== gen_mul(place(msg))) begin
        failures++;
        $display("FAIL t=%0d cw=%h exp=%h", t, cw, gen_mul(place(msg)));
      end
      checks++;
      if (lat != 8) begin
        failures++;
        $display("FAIL latency %0d, expected 8", lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
