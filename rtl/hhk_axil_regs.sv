// hhk_axil_regs -- AXI4-Lite slave register file of the HHK core.
//
// A host streams raw PPG samples, sets the detector and quantizer
// configuration, exchanges helper data and reads the key through 32-bit
// registers (map in hhk_pkg, A_* constants). A write to SAMPLE pushes one
// sample into the datapath (sample_valid for one clock), a write to PEER_TS
// appends one peer-site beat timestamp (peer_we); a write to CTRL
// issues one-clock command pulses (hhk_cmd_t). Multi-word values (128-bit
// strings, 42-bit message) are little-endian: word 0 holds bits 31:0.
//
// Protocol: one write and one read may be outstanding. A write is accepted
// when both AW and W are valid (awready and wready rise together for one
// clock), and B follows on the next clock with OKAY. A read is accepted when
// AR is valid and no R is pending; R follows on the next clock with OKAY.
// Unmapped addresses read as 0 and ignore writes. Byte strobes are not
// honoured: every write replaces the whole register.
//
// The published design names an AXI4-Lite control interface and reports that
// samples are streamed into it; the register map, the strobe policy and the
// reset values are this design's choices.
//
// rst_n is also the disable condition of this file's assertions; lint tools
// report that as a synchronous use of the asynchronous reset, which is
// harmless because assertions are not synthesized.
module hhk_axil_regs
  import hhk_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // core side
  output logic        sample_valid,
  output q15_t        sample,
  output logic        peer_we,
  output ts_t         peer_ts,
  output hhk_cmd_t    cmd,
  output hhk_cfg_t    cfg,
  input  hhk_stat_t   stat
);

  logic wr_fire, rd_fire;
  assign wr_fire = s_awvalid && s_wvalid && !s_bvalid && !s_awready;
  assign rd_fire = s_arvalid && !s_rvalid && !s_arready;

  // ---- write channel ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_awready    <= 1'b0;
      s_wready     <= 1'b0;
      s_bvalid     <= 1'b0;
      sample_valid <= 1'b0;
      sample       <= '0;
      peer_we      <= 1'b0;
      peer_ts      <= '0;
      cmd          <= '0;
      cfg.prom_th  <= PROM_TH_RST;
      cfg.edge0    <= EDGE0_RST;
      cfg.edge1    <= EDGE1_RST;
      cfg.edge2    <= EDGE2_RST;
      cfg.dist_max <= DIST_MAX_RST;
      cfg.msg      <= '0;
      cfg.helper_in <= '0;
      cfg.match_en <= 1'b0;
    end else begin
      s_awready    <= 1'b0;
      s_wready     <= 1'b0;
      sample_valid <= 1'b0;
      peer_we      <= 1'b0;
      cmd          <= '0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_awready <= 1'b1;
        s_wready  <= 1'b1;
        s_bvalid  <= 1'b1;
        unique case (s_awaddr)
          A_CTRL:     cmd <= hhk_cmd_t'(s_wdata[3:0]);
          A_SAMPLE: begin
            sample       <= q15_t'(s_wdata[15:0]);
            sample_valid <= 1'b1;
          end
          A_PROM_TH:  cfg.prom_th  <= s_wdata[15:0];
          A_EDGE0:    cfg.edge0    <= s_wdata[15:0];
          A_EDGE1:    cfg.edge1    <= s_wdata[15:0];
          A_EDGE2:    cfg.edge2    <= s_wdata[15:0];
          A_DIST_MAX: cfg.dist_max <= s_wdata[7:0];
          A_MATCH:    cfg.match_en <= s_wdata[0];
          A_PEER_TS: begin
            peer_ts <= s_wdata[15:0];
            peer_we <= 1'b1;
          end
          A_MSG0:     cfg.msg[31:0]  <= s_wdata;
          A_MSG1:     cfg.msg[POLAR_K-1:32] <= s_wdata[POLAR_K-33:0];
          A_HELPER_IN + 8'h0: cfg.helper_in[31:0]   <= s_wdata;
          A_HELPER_IN + 8'h4: cfg.helper_in[63:32]  <= s_wdata;
          A_HELPER_IN + 8'h8: cfg.helper_in[95:64]  <= s_wdata;
          A_HELPER_IN + 8'hC: cfg.helper_in[127:96] <= s_wdata;
          default: ;
        endcase
      end
    end
  end

  // ---- read channel -------------------------------------------------------
  function automatic logic [31:0] word_of(input logic [POLAR_N-1:0] v, input logic [1:0] w);
    return v[32*w +: 32];
  endfunction

  logic [31:0] rd_mux;
  always_comb begin
    rd_mux = '0;
    unique case (s_araddr)
      A_STATUS:   rd_mux = {stat.beat_count, 1'b0, stat.ibi_count, 2'b0, stat.ibi_full,
                            stat.decode_ok, stat.key_ready, stat.helper_ready, stat.busy,
                            stat.win_open};
      A_SAMPLE:   rd_mux = {16'd0, stat.sample_count};
      A_PROM_TH:  rd_mux = {16'd0, cfg.prom_th};
      A_EDGE0:    rd_mux = {16'd0, cfg.edge0};
      A_EDGE1:    rd_mux = {16'd0, cfg.edge1};
      A_EDGE2:    rd_mux = {16'd0, cfg.edge2};
      A_DIST_MAX: rd_mux = {24'd0, cfg.dist_max};
      A_MSG0:     rd_mux = cfg.msg[31:0];
      A_MSG1:     rd_mux = 32'(cfg.msg[POLAR_K-1:32]);
      A_KEYINFO:  rd_mux = {8'd0, stat.ham_dist, stat.key_cycles};
      A_MATCH:    rd_mux = {stat.match_count, 3'd0, stat.peer_count, 3'd0, cfg.match_en};
      A_M_HAT:      rd_mux = stat.m_hat[31:0];
      A_M_HAT + 8'h4: rd_mux = 32'(stat.m_hat[POLAR_K-1:32]);
      default: begin
        // 128-bit strings: four words from a 16-byte aligned base
        if (s_araddr[1:0] == 2'b00) begin
          unique case ({s_araddr[7:4], 4'h0})
            A_HELPER_IN: rd_mux = word_of(cfg.helper_in, s_araddr[3:2]);
            A_HELPER:    rd_mux = word_of(stat.helper_out, s_araddr[3:2]);
            A_RAW_BITS:  rd_mux = word_of(stat.raw_bits, s_araddr[3:2]);
            A_R_VEC:     rd_mux = word_of(stat.r_vec, s_araddr[3:2]);
            default:     rd_mux = '0;
          endcase
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_arready <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      s_arready <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_arready <= 1'b1;
        s_rvalid  <= 1'b1;
        s_rdata   <= rd_mux;
      end
    end
  end

  assign s_bresp = 2'b00;
  assign s_rresp = 2'b00;

  // ---- handshake rules -----------------------------------------------------
  // A response, once raised, stays valid with stable data until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid)
    else $error("BVALID dropped before BREADY");
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("RVALID/RDATA changed before RREADY");

  logic unused_strb;
  assign unused_strb = ^s_wstrb;

endmodule
