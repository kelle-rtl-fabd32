// kelle_systolic_evictor: finds the token to evict while the array computes
// attention scores.
//
// Structure (one row per RSA row): a score register S[i] preloaded with the
// importance score of the token held by row i, an adder, a comparator and a
// register M[i] of the running minimum {score, index}. M is a chain: row i
// compares its freshly updated score with M[i-1] and keeps the smaller
// (earlier row on a tie). Because the array completes row i one cycle
// before row i+1, score update and minimum search proceed down the column in
// step with the array and add no latency of their own.
//
// Operation for one group of ROWS tokens:
//   1. preload: S[i] <= pre_score[i], cand[i] <= pre_cand[i] (0 for empty
//      slots and for protected initial/recent tokens). If new_search is also
//      set the minimum carried from earlier groups is cleared.
//   2. score_vld[i] with score[i] (a complete q.k, not passed through
//      softmax): S[i] <= sat(S[i] + incr(score[i])), M[i] <= min(M[i-1], S[i])
//      if cand[i], else M[i-1]. upd_vld[i]/upd_score[i] report the new S[i]
//      one cycle later so it can be written back to the register file.
//   3. after the last row the group's minimum is kept as the carry into the
//      next group (for tokens beyond ROWS). Every row must see score_vld
//      once per group, also rows of empty slots (cand 0), so the chain
//      advances. min_vld/min_idx/min_score give
//      the overall minimum so far; min_vld is 0 when no candidate was seen.
//
// From the paper: S column, M chain, top-to-bottom propagation, summing
// q.k without softmax, 4-bit scores. The figure prints "-inf" at the top of
// the M chain; for a minimum search the chain must start from "no
// candidate", implemented here as an invalid entry (equivalent to +inf).
// Score quantisation (incr, shift QSHIFT) and the candidate mask are choices
// of this design.
module kelle_systolic_evictor
  import kelle_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned IDX_W  = 7,    // width of the token slot index
  parameter int unsigned QSHIFT = 16    // q.k >> QSHIFT = score increment
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             preload,
  input  logic             new_search,
  input  logic [IDX_W-1:0] group_base,  // slot index of row 0
  input  score_t           pre_score [ROWS],
  input  logic             pre_cand  [ROWS],
  input  logic             score_vld [ROWS],
  input  acc_t             score     [ROWS],
  output logic             upd_vld   [ROWS],
  output score_t           upd_score [ROWS],
  output logic             min_vld,
  output logic [IDX_W-1:0] min_idx,
  output score_t           min_score
);
  typedef struct packed {
    logic             vld;
    score_t           s;
    logic [IDX_W-1:0] idx;
  } min_t;

  score_t s_q    [ROWS];
  logic   cand_q [ROWS];
  min_t   m_q    [ROWS];
  min_t   carry_q;
  logic [IDX_W-1:0] base_q;

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    score_t s_new;
    min_t   m_in, here;
    logic   take;
    assign m_in  = (i == 0) ? carry_q : m_q[(i == 0) ? 0 : i-1];
    assign s_new = score_add(s_q[i], score_incr(score[i], QSHIFT));
    assign here  = '{vld: 1'b1, s: s_new, idx: base_q + IDX_W'(i)};
    // comparator: M[i-1] > S[i] (or no candidate yet) -> S[i] is the new minimum
    assign take  = cand_q[i] && (!m_in.vld || (m_in.s > s_new));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_q[i]       <= '0;
        cand_q[i]    <= 1'b0;
        m_q[i]       <= '0;
        upd_vld[i]   <= 1'b0;
        upd_score[i] <= '0;
      end else begin
        upd_vld[i] <= 1'b0;
        if (preload) begin
          s_q[i]    <= pre_score[i];
          cand_q[i] <= pre_cand[i];
          if (new_search) m_q[i] <= '0;
        end else if (score_vld[i]) begin
          s_q[i]       <= s_new;
          m_q[i]       <= take ? here : m_in;
          upd_vld[i]   <= 1'b1;
          upd_score[i] <= s_new;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry_q <= '0;
      base_q  <= '0;
    end else if (preload) begin
      base_q <= group_base;
      // the minimum found so far becomes the carry into the next group
      if (new_search) carry_q <= '0;
      else            carry_q <= m_q[ROWS-1];
    end
  end

  // The bottom of the chain holds the running result once the last row has
  // been processed; between groups it equals the carry.
  assign min_vld   = m_q[ROWS-1].vld;
  assign min_idx   = m_q[ROWS-1].idx;
  assign min_score = m_q[ROWS-1].s;
endmodule
