// hhk_pkg -- constants shared by the HHK PPG key-generation datapath.
//
// Sampling at 128 Hz, a 120 s acquisition window (15 360 samples), a 400 ms
// refractory period (150 BPM), up to 64 inter-beat intervals per window giving
// 128 Gray-coded bits, and a (N=128, K=42) polar code: these numbers follow the
// published architecture. The information-bit set of the polar code is not
// published; INFO_MASK below is this design's choice. It holds the 42 indices
// with the smallest Bhattacharyya parameter for a binary symmetric channel with
// crossover 0.1 (Z0 = 2*sqrt(p(1-p))), using the recursion Z_left = 2Z - Z^2,
// Z_right = Z^2 in natural (not bit-reversed) index order. Bit i of the mask is
// 1 when u[i] carries a message bit.
package hhk_pkg;

  localparam int unsigned FS_HZ           = 128;
  localparam int unsigned WINDOW_SAMPLES  = 120 * FS_HZ;         // 120 s: 15 360
  localparam int unsigned REFRACT_SAMPLES = 400 * FS_HZ / 1000;  // 400 ms: 51 (truncated)
  localparam int unsigned TS_W            = 16;      // sample-index timestamp width
  localparam int unsigned MAX_IBI         = 64;      // IBIs accumulated per window
  localparam int unsigned POLAR_N         = 128;
  localparam int unsigned POLAR_LOGN      = 7;
  localparam int unsigned POLAR_K         = 42;

  localparam logic [POLAR_N-1:0] INFO_MASK = 128'hfffe_fee8_fec0_8000_f880_0000_0000_0000;

  typedef logic signed [15:0] q15_t;      // Q15 sample: 16-bit signed, 15 fraction bits
  typedef logic [TS_W-1:0]    ts_t;       // timestamp / IBI in sample periods

  // Gray code of a 2-bit bin index: 0->00, 1->01, 2->11, 3->10.
  function automatic logic [1:0] gray2(input logic [1:0] bin);
    return bin ^ (bin >> 1);
  endfunction

  // Place the K message bits on the information positions of u, in
  // ascending index order (message bit 0 on the lowest information index).
  function automatic logic [POLAR_N-1:0] msg_to_u(input logic [POLAR_K-1:0] msg);
    logic [POLAR_N-1:0] u;
    int unsigned j;
    u = '0;
    j = 0;
    for (int unsigned i = 0; i < POLAR_N; i++) begin
      if (INFO_MASK[i]) begin
        u[i] = msg[j];
        j++;
      end
    end
    return u;
  endfunction

  // Inverse of msg_to_u: gather the information positions of u.
  function automatic logic [POLAR_K-1:0] u_to_msg(input logic [POLAR_N-1:0] u);
    logic [POLAR_K-1:0] msg;
    int unsigned j;
    msg = '0;
    j = 0;
    for (int unsigned i = 0; i < POLAR_N; i++) begin
      if (INFO_MASK[i]) begin
        msg[j] = u[i];
        j++;
      end
    end
    return msg;
  endfunction

  // ---- register interface ------------------------------------------------
  // Byte addresses of the AXI4-Lite registers (32-bit words).
  localparam logic [7:0] A_CTRL      = 8'h00;  // W : command pulses, see hhk_cmd_t
  localparam logic [7:0] A_STATUS    = 8'h04;  // R : flags and counters
  localparam logic [7:0] A_SAMPLE    = 8'h08;  // W : push one Q15 sample; R: samples in window
  localparam logic [7:0] A_PROM_TH   = 8'h0C;  // RW: beat prominence threshold (Q15 LSBs)
  localparam logic [7:0] A_EDGE0     = 8'h10;  // RW: bin edges in sample periods
  localparam logic [7:0] A_EDGE1     = 8'h14;
  localparam logic [7:0] A_EDGE2     = 8'h18;
  localparam logic [7:0] A_DIST_MAX  = 8'h1C;  // RW: decode_ok distance limit
  localparam logic [7:0] A_MSG0      = 8'h20;  // RW: message bits 31:0
  localparam logic [7:0] A_MSG1      = 8'h24;  // RW: message bits 41:32
  localparam logic [7:0] A_KEYINFO   = 8'h28;  // R : [15:0] key latency clocks, [23:16] distance
  localparam logic [7:0] A_MATCH     = 8'h2C;  // RW: bit 0 match_en; R: [31:16] matched beats, [8:0]<<4 peer count
  localparam logic [7:0] A_HELPER_IN = 8'h30;  // RW: 4 words, peer helper, word 0 = bits 31:0
  localparam logic [7:0] A_HELPER    = 8'h40;  // R : 4 words, own helper h = b xor c
  localparam logic [7:0] A_RAW_BITS  = 8'h50;  // R : 4 words, raw bit string b
  localparam logic [7:0] A_R_VEC     = 8'h60;  // R : 4 words, r = b xor h_peer
  localparam logic [7:0] A_M_HAT     = 8'h70;  // R : 2 words, decoded message
  localparam logic [7:0] A_PEER_TS   = 8'h78;  // W : append one peer-site beat timestamp
  localparam int unsigned PEER_DEPTH = 256;    // peer timestamps held per window
  localparam int unsigned MATCH_TOL  = 300 * FS_HZ / 1000;  // 300 ms: 38 (truncated)

  // Reset values of the configuration registers (assumed, see README).
  localparam logic [15:0] PROM_TH_RST  = 16'd32;
  localparam ts_t         EDGE0_RST    = 16'd92;
  localparam ts_t         EDGE1_RST    = 16'd102;
  localparam ts_t         EDGE2_RST    = 16'd112;
  localparam logic [7:0]  DIST_MAX_RST = 8'd24;

  // CTRL register bits; each is a one-clock pulse toward the core.
  typedef struct packed {
    logic decode;      // bit 3: node B, decode r = b xor h_peer
    logic encode;      // bit 2: node A, helper h = b xor PolarEncode(m)
    logic win_close;   // bit 1: close the acquisition window
    logic win_start;   // bit 0: clear the datapath and open a window
  } hhk_cmd_t;

  // Configuration held in the register file.
  typedef struct packed {
    logic [15:0]        prom_th;
    ts_t                edge0, edge1, edge2;
    logic [7:0]         dist_max;
    logic [POLAR_K-1:0] msg;
    logic [POLAR_N-1:0] helper_in;
    logic               match_en;
  } hhk_cfg_t;

  // Status and results returned to the register file.
  typedef struct packed {
    logic               win_open;
    logic               busy;
    logic               helper_ready;
    logic               key_ready;
    logic               decode_ok;
    logic               ibi_full;
    logic [6:0]         ibi_count;
    logic [15:0]        beat_count;
    logic [15:0]        sample_count;
    logic [15:0]        key_cycles;
    logic [7:0]         ham_dist;
    logic [POLAR_N-1:0] helper_out;
    logic [POLAR_N-1:0] raw_bits;
    logic [POLAR_N-1:0] r_vec;
    logic [POLAR_K-1:0] m_hat;
    logic [8:0]         peer_count;
    logic [15:0]        match_count;
  } hhk_stat_t;

endpackage
