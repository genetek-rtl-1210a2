// myers_worker: edit distance of one query-target pair with Myers's
// bit-vector algorithm, one column of the dynamic-programming matrix per
// clock cycle.
//
// The query (up to LMAX bases, two bits each) is held across the whole
// width of the bit vectors VP and VN, so every row of a column is updated
// at once. For target base P[j] the worker forms the match vector
// Peq = (Q[i] == P[j]) for all i, then applies the recurrence of Myers:
//   X  = Peq | VN;  D0 = ((VP + (X & VP)) ^ VP) | X
//   HN = VP & D0;   HP = VN | ~(VP | D0)
//   X  = HP << 1;   VN = X & D0;  VP = (HN << 1) | ~(X | D0)
// and moves the score up when HP[m-1] is set or down when HN[m-1] is set.
// The score starts at m (query length) and its value after the last
// target column is the result, as in the paper's Algorithm 1. With no
// carry-in to the shifts the top row of the matrix is zero, so the result
// is the smallest number of edits that turns the query into a substring of
// the target ending at its last base. Rows above m-1 hold don't-care bits:
// carries and shifts only move upwards, so they never reach row m-1.
//
// Timing: the inner loop is a three-stage pipeline with one column per
// cycle (initiation interval 1), as in the paper: stage 0 takes the next
// target base from a shift register, stage 1 updates VP/VN, stage 2
// updates the score. A pair accepted in cycle 0 yields out_valid in cycle
// n+3 (n = target length); the worker accepts a new pair after its result
// has been taken. The Peq vector is formed on the fly from the stored
// query instead of being precomputed per base: this is this design's choice.
//
// Interface: in_pair = {id, tlen, qlen, target, query} (sequence base k in
// bits 2k+1:2k); out_res = {id, score}. Lengths are expected in 1..LMAX
// (qlen) and 0..LMAX (tlen); a zero-length target returns the query
// length (out_valid then comes in cycle 2).
module myers_worker
  import genetek_pkg::*;
#(
  parameter int unsigned LMAX  = LMAX_DEF,
  localparam int unsigned LEN_W  = $clog2(LMAX + 1),
  localparam int unsigned PAIR_W = 4 * LMAX + 2 * LEN_W + ID_W,
  localparam int unsigned RES_W  = LEN_W + ID_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PAIR_W-1:0] in_pair,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [RES_W-1:0]  out_res
);
  typedef struct packed {
    logic [ID_W-1:0]    id;
    logic [LEN_W-1:0]   tlen;
    logic [LEN_W-1:0]   qlen;
    logic [2*LMAX-1:0]  t;
    logic [2*LMAX-1:0]  q;
  } pair_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  pair_t            p;
  state_e           state;
  logic [2*LMAX-1:0] q_r;      // query, held for the whole comparison
  logic [2*LMAX-1:0] t_sh;     // target, shifted two bits per column
  logic [LMAX-1:0]   top_mask; // one-hot on row m-1
  logic [LEN_W-1:0]  cnt;      // target bases still to issue
  logic [ID_W-1:0]   id_r;
  logic [LMAX-1:0]   vp, vn;
  logic [LEN_W-1:0]  score;
  // pipeline registers
  logic              v0, v1;
  logic [1:0]        c0;       // stage 0 -> 1: target base
  logic              hp_top, hn_top;  // stage 1 -> 2

  assign p = pair_t'(in_pair);

  // Stage 1: one column of Myers's recurrence
  logic [LMAX-1:0] peq, x, d0, hn, hp, xs, vn_nx, vp_nx;
  always_comb begin
    for (int i = 0; i < LMAX; i++) peq[i] = (q_r[2*i +: 2] == c0);
    x     = peq | vn;
    d0    = ((vp + (x & vp)) ^ vp) | x;
    hn    = vp & d0;
    hp    = vn | ~(vp | d0);
    xs    = hp << 1;
    vn_nx = xs & d0;
    vp_nx = (hn << 1) | ~(xs | d0);
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_res   = {id_r, score};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      v0 <= 1'b0;
      v1 <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          q_r      <= p.q;
          t_sh     <= p.t;
          cnt      <= p.tlen;
          id_r     <= p.id;
          top_mask <= LMAX'(1) << (p.qlen - 1'b1);
          vp       <= '1;
          vn       <= '0;
          score    <= p.qlen;
          state    <= S_RUN;
        end
        S_RUN: begin
          // stage 0: issue the next target base
          v0 <= (cnt != '0);
          if (cnt != '0) begin
            c0   <= t_sh[1:0];
            t_sh <= t_sh >> 2;
            cnt  <= cnt - 1'b1;
          end
          // stage 1: column update
          v1 <= v0;
          if (v0) begin
            vp     <= vp_nx;
            vn     <= vn_nx;
            hp_top <= |(hp & top_mask);
            hn_top <= |(hn & top_mask);
          end
          // stage 2: score
          if (v1) begin
            if (hp_top)      score <= score + 1'b1;
            else if (hn_top) score <= score - 1'b1;
          end
          // stage 2 finishes in this cycle if v1 is set
          if (cnt == '0 && !v0) state <= S_DONE;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_res));
endmodule
