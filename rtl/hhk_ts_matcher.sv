// hhk_ts_matcher -- cross-location beat alignment.
//
// For each local beat at time t, finds the nearest beat of the peer body site
// in a list of peer timestamps and marks the local beat as matched when the
// distance is at most TOL samples (300 ms at 128 Hz). Only intervals that
// start at a matched beat are later turned into key bits, which removes the
// beat-desynchronisation errors of a plain sequential comparison. With en low
// every beat passes as matched (single-site operation).
//
// The peer list is written in ascending time order (peer_we/peer_ts) after a
// clear and before the beats it must cover arrive; it holds up to DEPTH
// timestamps in a register array. Because both lists are sorted, the nearest
// peer beat is always one of two neighbours of a moving pointer: on each beat
// the pointer advances one entry per clock while the next peer timestamp is
// not later than t, then the two neighbours are compared. The pointer never
// moves back, so a whole window costs at most one clock per peer entry plus
// two per beat.
//
// The nearest-beat rule and the 300 ms tolerance follow the published
// algorithm. How the peer's timestamps reach the node is not described in
// the published text; here they are written by software. The list depth, the
// pointer search and the handshake are this design's choices.
//
// Interface: beat_in_valid/beat_in_ts must only arrive while ready is high;
// beat_out_valid, beat_out_ts and beat_out_match follow two or more clocks
// later (one clock when en is low).
//
// rst_n is also the disable condition of this file's assertions; lint tools
// report that as a synchronous use of the asynchronous reset, which is
// harmless because assertions are not synthesized.
module hhk_ts_matcher
  import hhk_pkg::ts_t;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned TOL   = 38
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       en,
  input  logic                       peer_we,
  input  ts_t                        peer_ts,
  input  logic                       beat_in_valid,
  input  ts_t                        beat_in_ts,
  output logic                       ready,
  output logic                       beat_out_valid,
  output ts_t                        beat_out_ts,
  output logic                       beat_out_match,
  output logic [$clog2(DEPTH+1)-1:0] peer_count,
  output logic [15:0]                match_count
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {M_IDLE, M_SEARCH, M_DECIDE} mstate_t;

  ts_t          peer_mem [DEPTH];
  mstate_t      state_q;
  logic [AW-1:0] ptr_q;
  ts_t          t_q;

  logic          has_next;
  ts_t           p0, p1;
  localparam int unsigned TS_W_L = 17;
  logic [TS_W_L-1:0] d0, d1;
  logic          near_ok;

  always_comb begin
    has_next = (CW'(ptr_q) + CW'(1)) < peer_count;
    p0 = peer_mem[ptr_q];
    p1 = peer_mem[AW'(ptr_q + AW'(1))];
    d0 = (t_q >= p0) ? TS_W_L'(t_q - p0) : TS_W_L'(p0 - t_q);
    d1 = (p1 >= t_q) ? TS_W_L'(p1 - t_q) : TS_W_L'(t_q - p1);
    near_ok = (peer_count != '0) &&
              ((d0 <= TS_W_L'(TOL)) || (has_next && (d1 <= TS_W_L'(TOL))));
  end

  always_ff @(posedge clk) begin
    if (peer_we && (peer_count < CW'(DEPTH))) peer_mem[peer_count[AW-1:0]] <= peer_ts;
  end

  assign ready = (state_q == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= M_IDLE;
      ptr_q          <= '0;
      t_q            <= '0;
      peer_count     <= '0;
      match_count    <= '0;
      beat_out_valid <= 1'b0;
      beat_out_ts    <= '0;
      beat_out_match <= 1'b0;
    end else begin
      beat_out_valid <= 1'b0;
      if (clear) begin
        state_q     <= M_IDLE;
        ptr_q       <= '0;
        peer_count  <= '0;
        match_count <= '0;
      end else begin
        if (peer_we && (peer_count < CW'(DEPTH))) peer_count <= peer_count + CW'(1);
        unique case (state_q)
          M_IDLE: begin
            if (beat_in_valid) begin
              if (!en) begin
                beat_out_valid <= 1'b1;
                beat_out_ts    <= beat_in_ts;
                beat_out_match <= 1'b1;
              end else begin
                t_q     <= beat_in_ts;
                state_q <= M_SEARCH;
              end
            end
          end
          M_SEARCH: begin
            if (has_next && (p1 <= t_q)) ptr_q <= ptr_q + AW'(1);
            else                         state_q <= M_DECIDE;
          end
          M_DECIDE: begin
            beat_out_valid <= 1'b1;
            beat_out_ts    <= t_q;
            beat_out_match <= near_ok;
            if (near_ok) match_count <= match_count + 16'd1;
            state_q <= M_IDLE;
          end
          default: state_q <= M_IDLE;
        endcase
      end
    end
  end

  a_beat_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                      beat_in_valid |-> ready)
    else $error("beat arrived while the matcher was searching");

endmodule
