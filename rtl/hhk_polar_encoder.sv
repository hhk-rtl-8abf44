// hhk_polar_encoder -- N = 128 polar encoder, one butterfly stage per clock.
//
// Computes the codeword c = u * F^(x)7, with F = [1 0; 1 1], where u carries
// the 42 message bits on the information positions of hhk_pkg::INFO_MASK and
// zeros on the frozen positions. Stage s (s = 0..6) XORs every bit j whose
// index has bit s clear with bit j + 2^s: fixed-address XORs with no memory.
// Natural index order is used (no bit reversal), so c[k] for k < 64 is the
// XOR of the two half-size codewords and c[k+64] is the right half-codeword.
//
// Timing: the edge that samples start loads u and the seven following edges
// apply stages 0..6; counting the clock that presents start as clock 1, done
// and the valid codeword appear in clock 8, the published eight-cycle latency.
// The seven-stage butterfly and the eight-cycle latency follow the published
// design; the load cycle and handshake are this design's choice. cw holds its
// value until the next start.
module hhk_polar_encoder
  import hhk_pkg::POLAR_N, hhk_pkg::POLAR_K, hhk_pkg::POLAR_LOGN, hhk_pkg::msg_to_u;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [POLAR_K-1:0] msg,
  output logic               busy,
  output logic               done,
  output logic [POLAR_N-1:0] cw
);

  logic [2:0]         stage_q;   // butterfly stage to apply next
  logic [POLAR_N-1:0] stage_out;

  // One butterfly stage with half-span 2^stage_q.
  always_comb begin
    stage_out = cw;
    for (int unsigned s = 0; s < POLAR_LOGN; s++) begin
      if (stage_q == 3'(s)) begin
        for (int unsigned j = 0; j < POLAR_N; j++) begin
          if (((j >> s) & 1) == 0) stage_out[j] = cw[j] ^ cw[j + (1 << s)];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      stage_q <= '0;
      cw      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cw      <= msg_to_u(msg);
        stage_q <= '0;
        busy    <= 1'b1;
      end else if (busy) begin
        cw      <= stage_out;
        stage_q <= stage_q + 3'd1;
        if (stage_q == 3'(POLAR_LOGN - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
