// tb_hhk_sc_decoder -- self-checking testbench for the SC polar decoder.
//
// A reference decoder written in a different form is used: for every bit i it
// recomputes the leaf LLR top-down from the channel, and takes the partial sum
// of each left sibling by polar-encoding the already decided bits of that
// sibling from scratch (no partial-sum propagation). The DUT must match it bit
// for bit on u_hat and c_hat for random codewords with 0..40 random errors and
// for fully random words. It also checks that error-free and lightly corrupted
// codewords decode to the transmitted message, and that a decode takes 1 025
// clocks.
module tb_hhk_sc_decoder;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [POLAR_N-1:0] r = '0;
  logic busy, done;
  logic [POLAR_N-1:0] u_hat, c_hat;
  logic [POLAR_K-1:0] m_hat;
  logic [15:0] cycles;

  int checks = 0, failures = 0;

  hhk_sc_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [POLAR_N-1:0] enc_n(input logic [POLAR_N-1:0] u, input int n);
    logic [POLAR_N-1:0] x = u;
    for (int h = 1; h < n; h = h * 2)
      for (int j = 0; j < n; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  function automatic int fmin(input int a, input int b);
    int ma = a < 0 ? -a : a;
    int mb = b < 0 ? -b : b;
    int m  = ma < mb ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic logic [POLAR_N-1:0] ref_decode(input logic [POLAR_N-1:0] rr);
    logic [POLAR_N-1:0] uh = '0;
    int L [POLAR_N];
    int Ln [POLAR_N];
    for (int i = 0; i < POLAR_N; i++) begin
      for (int k = 0; k < POLAR_N; k++) L[k] = rr[k] ? -1 : 1;
      for (int d = 1; d <= 7; d++) begin
        int n  = POLAR_N >> d;
        int nd = i >> (7 - d);
        if ((nd % 2) == 0) begin
          for (int k = 0; k < n; k++) Ln[k] = fmin(L[k], L[k + n]);
        end else begin
          logic [POLAR_N-1:0] sub = '0, beta;
          for (int k = 0; k < n; k++) sub[k] = uh[(nd - 1) * n + k];
          beta = enc_n(sub, n);
          for (int k = 0; k < n; k++) Ln[k] = beta[k] ? L[k + n] - L[k] : L[k + n] + L[k];
        end
        for (int k = 0; k < n; k++) L[k] = Ln[k];
      end
      uh[i] = INFO_MASK[i] && (L[0] < 0);
    end
    return uh;
  endfunction

  task automatic run(input logic [POLAR_N-1:0] word, output int ncyc);
    @(negedge clk);
    r = word;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    ncyc = 1;
    while (!done) begin
      @(negedge clk);
      ncyc++;
    end
  endtask

  function automatic logic [POLAR_N-1:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [POLAR_K-1:0] m;
    logic [POLAR_N-1:0] c, e, w, uref;
    int ncyc, nerr;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      m = 42'({$urandom, $urandom});
      c = enc_n(msg_to_u(m), POLAR_N);
      e = '0;
      nerr = (t < 10) ? (t % 3) : (t < 50 ? $urandom_range(0, 40) : 0);
      for (int q = 0; q < nerr; q++) e[$urandom_range(0, POLAR_N - 1)] = 1'b1;
      w = (t >= 50) ? rand128() : (c ^ e);
      run(w, ncyc);
      uref = ref_decode(w);
      checks++;
      if (u_hat !== uref) begin
        failures++;
        $display("FAIL t=%0d u_hat=%h ref=%h", t, u_hat, uref);
      end
      checks++;
      if (c_hat !== enc_n(uref, POLAR_N)) begin
        failures++;
        $display("FAIL t=%0d c_hat mismatch", t);
      end
      checks++;
      if (m_hat !== u_to_msg(uref)) begin
        failures++;
        $display("FAIL t=%0d m_hat mismatch", t);
      end
      if (t < 10) begin
        checks++;
        if (m_hat !== m) begin
          failures++;
          $display("FAIL t=%0d %0d errors not corrected", t, nerr);
        end
      end
      checks++;
      if (ncyc != 1025 || cycles != 16'd1025) begin
        failures++;
        $display("FAIL t=%0d latency %0d (cycles=%0d), expected 1025", t, ncyc, cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
