// hhk_top -- HHK PPG key-generation core with its AXI4-Lite interface.
//
// One instance runs at one body-worn node. During a window the host writes
// raw 16-bit PPG samples into the SAMPLE register; each sample flows through
// the band-pass prefilter (hhk_bpf), the beat detector (hhk_foot_detector),
// the cross-location matcher (hhk_ts_matcher, active when MATCH.match_en is
// set and the peer site's beat timestamps were loaded into PEER_TS), the
// inter-beat-interval timer (hhk_ibi_timer) and the Gray quantizer
// (hhk_gray_quantizer), which builds the 128-bit raw bit string b from up to
// 64 intervals. When the window closes, node A encodes a 42-bit message into
// a polar codeword and publishes h = b xor c; node B takes the peer's helper,
// forms r = b xor h and runs the SC decoder (both in hhk_keygen_ctrl). The
// decoded message, decode_ok and key_ready are read back over AXI.
//
// Window handling: CTRL.win_start clears the datapath and opens a window;
// samples written while no window is open are ignored. The window closes on
// CTRL.win_close or automatically after WINDOW_SAMPLES samples (120 s at
// 128 Hz). The block chain and the window length follow the published design;
// the window handshake and the automatic close are this design's choices.
//
// Timing: a sample written over AXI reaches the filter output 1 clock after
// sample_valid, a beat is reported 1 clock later, passes the matcher in 1
// clock (matching off) or a few clocks (matching on), its interval follows 1
// clock later and its Gray code 1 clock after that. helper_ready follows CTRL.encode by 9
// clocks, key_ready follows CTRL.decode by 1 027 clocks.
//
// rst_n is also the disable condition of the sub-blocks' assertions; lint tools
// report that as a synchronous use of the asynchronous reset, which is
// harmless because assertions are not synthesized.
module hhk_top
  import hhk_pkg::*;
#(
  parameter int unsigned WINDOW_LEN = hhk_pkg::WINDOW_SAMPLES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        key_ready,     // also visible as an interrupt-style pin
  output logic        decode_ok
);

  logic      sample_valid;
  q15_t      sample;
  logic      peer_we;
  ts_t       peer_ts;
  hhk_cmd_t  cmd;
  hhk_cfg_t  cfg;
  hhk_stat_t stat;

  hhk_axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .sample_valid, .sample, .peer_we, .peer_ts, .cmd, .cfg, .stat
  );

  // ---- acquisition window --------------------------------------------------
  logic        win_open_q;
  logic [15:0] sample_cnt_q;
  logic        clear, in_valid;

  assign clear    = cmd.win_start;
  assign in_valid = sample_valid && win_open_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_open_q   <= 1'b0;
      sample_cnt_q <= '0;
    end else if (cmd.win_start) begin
      win_open_q   <= 1'b1;
      sample_cnt_q <= '0;
    end else begin
      if (in_valid) sample_cnt_q <= sample_cnt_q + 16'd1;
      if (cmd.win_close || (in_valid && sample_cnt_q == 16'(WINDOW_LEN - 1)))
        win_open_q <= 1'b0;
    end
  end

  // ---- IBI datapath --------------------------------------------------------
  logic        f_valid;
  q15_t        f_sample;
  logic        beat_valid;
  ts_t         beat_ts;
  logic [15:0] beat_count;
  logic        m_valid, m_match, m_ready;
  ts_t         m_ts;
  logic [8:0]  peer_count;
  logic [15:0] match_count;
  logic        ibi_valid;
  ts_t         ibi;
  logic [6:0]  ibi_count;
  logic        ibi_full;
  logic [POLAR_N-1:0] raw_bits;
  logic [7:0]  nbits;
  ts_t         edges [3];

  assign edges[0] = cfg.edge0;
  assign edges[1] = cfg.edge1;
  assign edges[2] = cfg.edge2;

  hhk_bpf u_bpf (
    .clk, .rst_n, .clear, .in_valid, .in_sample(sample),
    .out_valid(f_valid), .out_sample(f_sample)
  );

  hhk_foot_detector u_foot (
    .clk, .rst_n, .clear, .in_valid(f_valid), .in_sample(f_sample),
    .prom_th(cfg.prom_th), .beat_valid, .beat_ts, .beat_count
  );

  hhk_ts_matcher #(.DEPTH(PEER_DEPTH), .TOL(MATCH_TOL)) u_match (
    .clk, .rst_n, .clear, .en(cfg.match_en), .peer_we, .peer_ts,
    .beat_in_valid(beat_valid), .beat_in_ts(beat_ts), .ready(m_ready),
    .beat_out_valid(m_valid), .beat_out_ts(m_ts), .beat_out_match(m_match),
    .peer_count, .match_count
  );

  hhk_ibi_timer u_ibi (
    .clk, .rst_n, .clear, .beat_valid(m_valid), .beat_ts(m_ts), .beat_match(m_match),
    .ibi_valid, .ibi, .ibi_count, .full(ibi_full)
  );

  hhk_gray_quantizer u_quant (
    .clk, .rst_n, .clear, .ibi_valid, .ibi, .edges, .raw_bits, .nbits
  );

  // ---- fuzzy commitment ----------------------------------------------------
  logic               kg_busy, helper_ready;
  logic [POLAR_N-1:0] helper_out, r_vec;
  logic [POLAR_K-1:0] m_hat;
  logic [7:0]         ham_dist;
  logic [15:0]        key_cycles;

  hhk_keygen_ctrl u_keygen (
    .clk, .rst_n, .clear, .raw_bits, .msg(cfg.msg), .helper_in(cfg.helper_in),
    .dist_max(cfg.dist_max), .cmd_encode(cmd.encode), .cmd_decode(cmd.decode),
    .busy(kg_busy), .helper_out, .helper_ready, .r_vec, .m_hat,
    .decode_ok, .key_ready, .ham_dist, .key_cycles
  );

  always_comb begin
    stat.win_open     = win_open_q;
    stat.busy         = kg_busy;
    stat.helper_ready = helper_ready;
    stat.key_ready    = key_ready;
    stat.decode_ok    = decode_ok;
    stat.ibi_full     = ibi_full;
    stat.ibi_count    = ibi_count;
    stat.beat_count   = beat_count;
    stat.sample_count = sample_cnt_q;
    stat.key_cycles   = key_cycles;
    stat.ham_dist     = ham_dist;
    stat.helper_out   = helper_out;
    stat.raw_bits     = raw_bits;
    stat.r_vec        = r_vec;
    stat.m_hat        = m_hat;
    stat.peer_count   = peer_count;
    stat.match_count  = match_count;
  end

  logic unused_bits;
  assign unused_bits = ^{nbits, m_ready};

endmodule
