// hhk_keygen_ctrl -- polar fuzzy-commitment control with encoder and decoder.
//
// Runs the two halves of the key agreement on the 128-bit raw bit string b of
// the closed window:
//   encode (node A): c = PolarEncode(m) for the 42-bit message m, then the
//                    public helper h = b xor c;
//   decode (node B): r = b xor h_peer, m_hat = SCDecode(r).
// After decoding, the decoder's re-encoded codeword c_hat is compared with r:
// decode_ok is set when they differ in at most dist_max positions, i.e. when
// the peer's bit string lies close enough to a codeword to trust the result.
// key_ready is set when m_hat and decode_ok are valid.
//
// The commitment equations follow the published protocol. The published text
// names a decode_ok flag but not its rule; the distance test is this design's
// choice, as are the command handshake and the latency counter.
//
// Interface: cmd_encode / cmd_decode are one-clock pulses taken when busy is
// low. Counting the clock that presents the command as clock 1,
// helper_ready is high from clock 9 and key_ready from clock 1 028 (one clock
// to latch r, 1 025 decoder clocks, one compare clock, one to register);
// key_cycles reports that count. clear drops the ready flags for a new
// window.
//
// rst_n is also the disable condition of this file's assertions; lint tools
// report that as a synchronous use of the asynchronous reset, which is
// harmless because assertions are not synthesized.
//
// The decoder's full u_hat vector and its own cycle count are left unused:
// the message comes from m_hat and this controller counts the whole latency.
module hhk_keygen_ctrl
  import hhk_pkg::POLAR_N, hhk_pkg::POLAR_K;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [POLAR_N-1:0] raw_bits,
  input  logic [POLAR_K-1:0] msg,
  input  logic [POLAR_N-1:0] helper_in,
  input  logic [7:0]         dist_max,
  input  logic               cmd_encode,
  input  logic               cmd_decode,
  output logic               busy,
  output logic [POLAR_N-1:0] helper_out,
  output logic               helper_ready,
  output logic [POLAR_N-1:0] r_vec,
  output logic [POLAR_K-1:0] m_hat,
  output logic               decode_ok,
  output logic               key_ready,
  output logic [7:0]         ham_dist,
  output logic [15:0]        key_cycles
);

  typedef enum logic [1:0] {C_IDLE, C_ENC, C_DEC, C_CHECK} cstate_t;
  cstate_t state_q;

  logic               enc_start, enc_busy, enc_done;
  logic [POLAR_N-1:0] cw;
  logic               dec_start, dec_busy, dec_done;
  logic [POLAR_N-1:0] u_hat, c_hat;
  logic [POLAR_K-1:0] dec_m_hat;
  logic [15:0]        dec_cycles;
  logic [15:0]        cnt_q;

  assign enc_start = (state_q == C_IDLE) && cmd_encode;
  logic dec_go_q;   // start pulse for the decoder, one clock after r_vec is latched
  assign dec_start = dec_go_q;

  hhk_polar_encoder u_polar_enc (
    .clk, .rst_n, .start(enc_start), .msg, .busy(enc_busy), .done(enc_done), .cw
  );

  hhk_sc_decoder u_sc_dec (
    .clk, .rst_n, .start(dec_start), .r(r_vec), .busy(dec_busy), .done(dec_done),
    .u_hat, .m_hat(dec_m_hat), .c_hat, .cycles(dec_cycles)
  );

  // distance between r and the re-encoded decision
  logic [7:0] popc;
  always_comb begin
    popc = '0;
    for (int k = 0; k < POLAR_N; k++) popc = popc + 8'(r_vec[k] ^ c_hat[k]);
  end

  assign busy = (state_q != C_IDLE) || enc_busy || dec_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= C_IDLE;
      helper_out   <= '0;
      helper_ready <= 1'b0;
      r_vec        <= '0;
      m_hat        <= '0;
      decode_ok    <= 1'b0;
      key_ready    <= 1'b0;
      ham_dist         <= '0;
      key_cycles   <= '0;
      cnt_q        <= '0;
      dec_go_q     <= 1'b0;
    end else begin
      dec_go_q <= 1'b0;
      cnt_q    <= cnt_q + 16'd1;
      unique case (state_q)
        C_IDLE: begin
          if (clear) begin
            helper_ready <= 1'b0;
            key_ready    <= 1'b0;
            decode_ok    <= 1'b0;
          end else if (cmd_encode) begin
            helper_ready <= 1'b0;
            cnt_q        <= 16'd2;
            state_q      <= C_ENC;
          end else if (cmd_decode) begin
            key_ready <= 1'b0;
            decode_ok <= 1'b0;
            r_vec     <= raw_bits ^ helper_in;
            dec_go_q  <= 1'b1;
            cnt_q     <= 16'd2;
            state_q   <= C_DEC;
          end
        end
        C_ENC: begin
          if (enc_done) begin
            helper_out   <= raw_bits ^ cw;
            helper_ready <= 1'b1;
            state_q      <= C_IDLE;
          end
        end
        C_DEC: begin
          if (dec_done) begin
            m_hat   <= dec_m_hat;
            state_q <= C_CHECK;
          end
        end
        C_CHECK: begin
          ham_dist       <= popc;
          decode_ok  <= (popc <= dist_max);
          key_ready  <= 1'b1;
          key_cycles <= cnt_q;
          state_q    <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // A command must not arrive while a previous one is running.
  property p_no_cmd_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !(cmd_encode || cmd_decode);
  endproperty
  a_no_cmd_when_busy: assert property (p_no_cmd_when_busy)
    else $error("command issued while busy");

endmodule
