// hhk_sc_decoder -- sequential successive-cancellation decoder, N = 128.
//
// Decodes the hard-decision word r (one bit per code bit, as produced by
// r = b_B xor h) into the estimate u_hat of the polar input vector, bit by bit
// in index order. Channel bits become LLRs of +CH_LLR (bit 0) or -CH_LLR
// (bit 1). The decoding tree has levels 0 (the 128 channel LLRs) to 7 (one
// leaf per u bit). A single processing element computes one LLR per clock:
//
//   f(a, b)        = sign(a) sign(b) min(|a|, |b|)          (left child)
//   g(a, b, beta)  = b + (beta ? -a : a), saturated         (right child)
//
// where a and b are the parent LLRs k and k + n of a node of size 2n, and
// beta is the partial sum (re-encoded bits) of the already decoded left
// sibling. After each leaf decision the partial sums are propagated upward in
// one clock: while the finished node is a right child, the parent's partial
// sum is [beta_left xor beta_right, beta_right]; at the first left child the
// vector is stored for the g steps of its sibling. Frozen positions
// (INFO_MASK bit 0) are decided as 0; others as 1 when the leaf LLR is
// negative. After the last bit the propagated vector is the re-encoded
// codeword c_hat, used downstream to judge decoding success.
//
// Bit i starts at the level 7 - tz(i) (tz = trailing zeros of i; level 1 for
// i = 0), so a decode takes 7 x 128 PE clocks plus one decision clock per bit
// and one start clock: 1 025 clocks. Successive cancellation with partial-sum
// propagation, N = 128, K = 42, and a sequential schedule follow the published
// design; the published decoder needs about 32 000 clocks, so its schedule
// must differ from this one in ways the text does not describe. The LLR
// width, the hard-decision input, the min-sum f function and the tie rule
// (LLR 0 decides 0) are this design's choices.
//
// Interface: start (with r) is accepted when not busy; done pulses for one
// clock with u_hat, m_hat (the 42 information bits, lowest index first) and
// c_hat valid; they hold until the next start. cycles counts the clocks of
// the last decode.
module hhk_sc_decoder
  import hhk_pkg::POLAR_N, hhk_pkg::POLAR_K, hhk_pkg::INFO_MASK, hhk_pkg::u_to_msg;
#(
  parameter int unsigned LLR_W  = 9,
  parameter int unsigned CH_LLR = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [POLAR_N-1:0] r,
  output logic               busy,
  output logic               done,
  output logic [POLAR_N-1:0] u_hat,
  output logic [POLAR_K-1:0] m_hat,
  output logic [POLAR_N-1:0] c_hat,
  output logic [15:0]        cycles
);

  localparam int unsigned NL   = 7;            // tree depth, log2(N)
  localparam int unsigned HALF = POLAR_N / 2;

  typedef logic signed [LLR_W-1:0] llr_t;
  typedef enum logic [1:0] {S_IDLE, S_CALC, S_DECIDE} state_t;

  state_t             state_q;
  logic [POLAR_N-1:0] r_q;
  llr_t               llr_q  [1:NL][HALF];     // LLRs of the active node per level
  logic [HALF-1:0]    beta_q [1:NL];           // partial sums of left siblings
  logic [6:0]         bit_q;                   // index of the bit being decoded
  logic [2:0]         lvl_q;                   // level being computed (1..7)
  logic [5:0]         k_q;                     // element within that level
  logic               is_g_q;                  // first node on this level is a right child

  localparam llr_t LLR_MAX = llr_t'((1 << (LLR_W - 1)) - 1);
  localparam llr_t LLR_MIN = -LLR_MAX;

  function automatic llr_t ch_llr(input logic bit_in);
    return bit_in ? -llr_t'(CH_LLR) : llr_t'(CH_LLR);
  endfunction

  function automatic llr_t f_op(input llr_t a, input llr_t b);
    llr_t ma, mb, m;
    ma = a[LLR_W-1] ? -a : a;
    mb = b[LLR_W-1] ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return (a[LLR_W-1] ^ b[LLR_W-1]) ? -m : m;
  endfunction

  function automatic llr_t g_op(input llr_t a, input llr_t b, input logic beta);
    logic signed [LLR_W:0] s;
    s = beta ? (LLR_W+1)'(b) - (LLR_W+1)'(a) : (LLR_W+1)'(b) + (LLR_W+1)'(a);
    if (s > (LLR_W+1)'(LLR_MAX))      return LLR_MAX;
    else if (s < (LLR_W+1)'(LLR_MIN)) return LLR_MIN;
    else                              return llr_t'(s);
  endfunction

  // ---- processing element ------------------------------------------------
  logic [6:0] n_cur;          // node size at the level being computed
  llr_t       pa, pb, pe_out;

  always_comb begin
    n_cur = 7'(POLAR_N >> lvl_q);
    if (lvl_q == 3'd1) begin
      pa = ch_llr(r_q[7'(k_q)]);
      pb = ch_llr(r_q[7'(k_q) + n_cur]);
    end else begin
      pa = llr_q[lvl_q - 3'd1][k_q];
      pb = llr_q[lvl_q - 3'd1][6'(7'(k_q) + n_cur)];
    end
    pe_out = is_g_q ? g_op(pa, pb, beta_q[lvl_q][k_q]) : f_op(pa, pb);
  end

  // ---- leaf decision and partial-sum propagation --------------------------
  logic               u_dec;
  logic [2:0]         store_lvl;
  logic               store_en;
  logic [HALF-1:0]    store_vec;
  logic [POLAR_N-1:0] ps, ps_nxt;

  always_comb begin
    ps_nxt    = '0;
    u_dec     = INFO_MASK[bit_q] && llr_q[NL][0][LLR_W-1];
    ps        = '0;
    ps[0]     = u_dec;
    store_en  = 1'b0;
    store_lvl = 3'd1;
    store_vec = '0;
    for (int d = NL; d >= 1; d--) begin
      if (!store_en) begin
        if (!bit_q[NL - d]) begin
          // finished node is a left child: keep its partial sum
          store_en  = 1'b1;
          store_lvl = 3'(d);
          store_vec = ps[HALF-1:0];
        end else begin
          ps_nxt = '0;
          for (int k = 0; k < HALF; k++) begin
            if (k < (POLAR_N >> d)) begin
              ps_nxt[k]                 = beta_q[d][k] ^ ps[k];
              ps_nxt[k + (POLAR_N >> d)] = ps[k];
            end
          end
          ps = ps_nxt;
        end
      end
    end
  end

  // level at which bit i+1 starts: 7 - trailing zeros of (i + 1)
  logic [6:0] nxt_bit;
  logic [2:0] nxt_lvl;
  always_comb begin
    nxt_bit = bit_q + 7'd1;
    nxt_lvl = 3'd1;
    for (int t = NL - 1; t >= 0; t--) begin
      if (nxt_bit[t]) nxt_lvl = 3'(NL - t);
    end
  end

  // ---- control ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      r_q     <= '0;
      bit_q   <= '0;
      lvl_q   <= 3'd1;
      k_q     <= '0;
      is_g_q  <= 1'b0;
      done    <= 1'b0;
      u_hat   <= '0;
      c_hat   <= '0;
      cycles  <= '0;
      for (int d = 1; d <= NL; d++) begin
        beta_q[d] <= '0;
        for (int k = 0; k < HALF; k++) llr_q[d][k] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            r_q     <= r;
            bit_q   <= '0;
            lvl_q   <= 3'd1;
            k_q     <= '0;
            is_g_q  <= 1'b0;
            cycles  <= 16'd1;
            state_q <= S_CALC;
          end
        end
        S_CALC: begin
          cycles             <= cycles + 16'd1;
          llr_q[lvl_q][k_q]  <= pe_out;
          if (7'(k_q) == n_cur - 7'd1) begin
            k_q    <= '0;
            is_g_q <= 1'b0;          // deeper levels start with a left child
            if (lvl_q == 3'(NL)) state_q <= S_DECIDE;
            else                 lvl_q   <= lvl_q + 3'd1;
          end else begin
            k_q <= k_q + 6'd1;
          end
        end
        S_DECIDE: begin
          cycles       <= cycles + 16'd1;
          u_hat[bit_q] <= u_dec;
          if (store_en) beta_q[store_lvl] <= store_vec;
          if (bit_q == 7'(POLAR_N - 1)) begin
            c_hat   <= ps;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            bit_q   <= nxt_bit;
            lvl_q   <= nxt_lvl;
            k_q     <= '0;
            is_g_q  <= 1'b1;
            state_q <= S_CALC;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy  = (state_q != S_IDLE);
  assign m_hat = u_to_msg(u_hat);

endmodule
