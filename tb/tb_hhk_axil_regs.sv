// tb_hhk_axil_regs -- self-checking testbench for the AXI4-Lite register file.
//
// An AXI4-Lite master task pair writes and reads registers, with AW and W
// sometimes presented on different clocks and BREADY/RREADY sometimes held
// low. Checks: reset values, read-back of every configuration register,
// the one-clock sample and command pulses, the mapping of every status and
// result field (driven with random values) to its address and bit position,
// OKAY responses, and that unmapped addresses read 0.
module tb_hhk_axil_regs;
  import hhk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  s_awaddr = '0, s_araddr = '0;
  logic        s_awvalid = 1'b0, s_wvalid = 1'b0, s_bready = 1'b0, s_arvalid = 1'b0, s_rready = 1'b0;
  logic [31:0] s_wdata = '0;
  logic [3:0]  s_wstrb = 4'hf;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic        sample_valid;
  q15_t        sample;
  logic        peer_we;
  ts_t         peer_ts;
  int          n_peer = 0;
  ts_t         last_peer;
  hhk_cmd_t    cmd;
  hhk_cfg_t    cfg;
  hhk_stat_t   stat;
  int checks = 0, failures = 0;
  int n_sample_pulses = 0, n_cmd_pulses = 0;
  q15_t last_sample;
  hhk_cmd_t last_cmd;

  hhk_axil_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (sample_valid) begin n_sample_pulses++; last_sample = sample; end
    if (cmd != '0) begin n_cmd_pulses++; last_cmd = cmd; end
    if (peer_we) begin n_peer++; last_peer = peer_ts; end
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    bit split = 1'($urandom_range(0, 1));
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1'b1;
    if (!split) begin s_wdata = d; s_wvalid = 1'b1; end
    if (split) begin @(negedge clk); s_wdata = d; s_wvalid = 1'b1; end
    while (!(s_awready && s_wready)) @(negedge clk);
    s_awvalid = 1'b0; s_wvalid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_bready = 1'b1;
    while (!s_bvalid) @(negedge clk);
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("FAIL bresp"); end
    @(negedge clk);
    s_bready = 1'b0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1'b1;
    while (!s_arready) @(negedge clk);
    s_arvalid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_rready = 1'b1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    checks++;
    if (s_rresp != 2'b00) begin failures++; $display("FAIL rresp"); end
    @(negedge clk);
    s_rready = 1'b0;
  endtask

  task automatic expect_rd(input logic [7:0] a, input logic [31:0] exp, input string what);
    logic [31:0] d;
    axi_read(a, d);
    checks++;
    if (d !== exp) begin failures++; $display("FAIL %s: read %h expected %h", what, d, exp); end
  endtask

  initial begin
    logic [31:0] v;
    stat = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    expect_rd(A_PROM_TH, 32'd32, "PROM_TH reset");
    expect_rd(A_EDGE0, 32'd92, "EDGE0 reset");
    expect_rd(A_EDGE1, 32'd102, "EDGE1 reset");
    expect_rd(A_EDGE2, 32'd112, "EDGE2 reset");
    expect_rd(A_DIST_MAX, 32'd24, "DIST_MAX reset");
    // configuration read-back
    for (int i = 0; i < 4; i++) begin
      logic [7:0] a;
      logic [31:0] d;
      case (i) 0: a = A_PROM_TH; 1: a = A_EDGE0; 2: a = A_EDGE1; default: a = A_EDGE2; endcase
      d = 32'($urandom_range(0, 65535));
      axi_write(a, d);
      expect_rd(a, d, "config read-back");
    end
    axi_write(A_DIST_MAX, 32'd17);
    checks++;
    if (cfg.dist_max != 8'd17) begin failures++; $display("FAIL dist_max"); end
    axi_write(A_MSG0, 32'hdeadbeef);
    axi_write(A_MSG1, 32'h0000_02a5);
    checks++;
    if (cfg.msg != 42'h2a5_deadbeef) begin failures++; $display("FAIL msg %h", cfg.msg); end
    expect_rd(A_MSG1, 32'h2a5, "MSG1");
    for (int w = 0; w < 4; w++) axi_write(A_HELPER_IN + 8'(4 * w), 32'h1111_1111 * (w + 1));
    checks++;
    if (cfg.helper_in != 128'h44444444_33333333_22222222_11111111) begin failures++; $display("FAIL helper_in"); end
    expect_rd(A_HELPER_IN + 8'h8, 32'h33333333, "HELPER_IN word 2");
    // sample and command pulses
    axi_write(A_SAMPLE, 32'h0000_8123);
    axi_write(A_CTRL, 32'h0000_0005);
    repeat (2) @(negedge clk);
    checks++;
    if (n_sample_pulses != 1 || last_sample != 16'h8123) begin failures++; $display("FAIL sample pulse"); end
    checks++;
    if (n_cmd_pulses != 1 || !last_cmd.win_start || !last_cmd.encode || last_cmd.decode || last_cmd.win_close) begin
      failures++; $display("FAIL cmd pulse");
    end
    // peer timestamps and matching control
    axi_write(A_PEER_TS, 32'h0000_1234);
    axi_write(A_MATCH, 32'h1);
    checks++;
    if (n_peer != 1 || last_peer != 16'h1234 || !cfg.match_en) begin failures++; $display("FAIL peer/match"); end
    stat.peer_count = 9'd300; stat.match_count = 16'd77;
    expect_rd(A_MATCH, {16'd77, 3'd0, 9'd300, 3'd0, 1'b1}, "MATCH");
    // status and results
    stat.win_open = 1; stat.busy = 0; stat.helper_ready = 1; stat.key_ready = 0;
    stat.decode_ok = 1; stat.ibi_full = 1; stat.ibi_count = 7'd64; stat.beat_count = 16'd90;
    stat.sample_count = 16'd15360; stat.key_cycles = 16'd1028; stat.ham_dist = 8'd13;
    stat.helper_out = {$urandom, $urandom, $urandom, $urandom};
    stat.raw_bits   = {$urandom, $urandom, $urandom, $urandom};
    stat.r_vec      = {$urandom, $urandom, $urandom, $urandom};
    stat.m_hat      = 42'({$urandom, $urandom});
    expect_rd(A_STATUS, {16'd90, 1'b0, 7'd64, 2'b00, 1'b1, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1}, "STATUS");
    expect_rd(A_SAMPLE, 32'd15360, "sample count");
    expect_rd(A_KEYINFO, {8'd0, 8'd13, 16'd1028}, "KEYINFO");
    for (int w = 0; w < 4; w++) begin
      expect_rd(A_HELPER + 8'(4 * w), stat.helper_out[32 * w +: 32], "HELPER");
      expect_rd(A_RAW_BITS + 8'(4 * w), stat.raw_bits[32 * w +: 32], "RAW_BITS");
      expect_rd(A_R_VEC + 8'(4 * w), stat.r_vec[32 * w +: 32], "R_VEC");
    end
    expect_rd(A_M_HAT, stat.m_hat[31:0], "M_HAT0");
    expect_rd(A_M_HAT + 8'h4, 32'(stat.m_hat[41:32]), "M_HAT1");
    expect_rd(8'h7C, 32'd0, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
