// kelle_eviction_ctrl: the eviction controller of the KV cache (AERP).
//
// It keeps, for every cached layer-head lh, the number of filled slots and,
// for every slot, the sequence position of the token stored there and its
// storage format (KV vectors, or the input vector x of a popular token).
//
// Candidate query (combinational): for the ROWS slots of group grp of
// layer-head lh it returns cand[r] = slot filled and neither one of the
// first N_SINK tokens of the sequence nor within the N_RECENT most recent
// positions (pos + N_RECENT > cur_pos). Only candidates take part in the
// systolic evictor's minimum search, so initial and recent tokens are never
// evicted. fmt_x[r] gives each slot's storage format.
//
// Commit (one cycle, results registered with done): the new token at
// position cur_pos goes into the next free slot while the head's budget of
// NSLOTS tokens is not reached; otherwise into slot min_idx found by the
// systolic evictor, and evicted is raised. no_victim is raised, and nothing
// is written, if the cache is full and the evictor had no candidate.
// Popularity: store_x is set when the token is retained in more than half
// of the H heads (retain_mask), theta > 50%, and is recorded as the slot's
// format for the rest of its life.
//
// From the paper: eviction of the minimum-score token, initial and recent
// tokens kept, the >50% popularity rule, the fixed format once stored.
// Slot bookkeeping and the window test are this design's choice.
module kelle_eviction_ctrl #(
  parameter int unsigned LH       = 64,   // cached layer-heads
  parameter int unsigned NSLOTS   = 128,  // token budget N' per head
  parameter int unsigned ROWS     = 32,
  parameter int unsigned H        = 32,   // attention heads (popularity)
  parameter int unsigned N_SINK   = 10,
  parameter int unsigned N_RECENT = 64,
  parameter int unsigned POS_W    = 16,
  localparam int unsigned LHW     = $clog2(LH),
  localparam int unsigned SW      = $clog2(NSLOTS),
  localparam int unsigned GW      = (NSLOTS > ROWS) ? $clog2(NSLOTS / ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_all,
  input  logic [LHW-1:0]   lh,
  input  logic [POS_W-1:0] cur_pos,
  // candidate query
  input  logic [GW-1:0]    grp,
  output logic             cand   [ROWS],
  output logic             fmt_x  [ROWS],
  output logic [SW:0]      count,
  // commit of the new token
  input  logic             commit,
  input  logic             min_vld,
  input  logic [SW-1:0]    min_idx,
  input  logic [H-1:0]     retain_mask,
  output logic             done,
  output logic [SW-1:0]    wr_slot,
  output logic             evicted,
  output logic             store_x,
  output logic             no_victim
);
  logic [POS_W-1:0] pos_q [LH][NSLOTS];
  logic             fmt_q [LH][NSLOTS];
  logic [SW:0]      cnt_q [LH];

  assign count = cnt_q[lh];

  for (genvar r = 0; r < ROWS; r++) begin : g_cand
    logic [SW-1:0]  slot;
    logic [POS_W:0] p;
    assign slot     = SW'(grp * ROWS + r);
    assign p        = {1'b0, pos_q[lh][slot]};
    assign cand[r]  = ((SW+1)'(slot) < cnt_q[lh]) &&
                      (p >= (POS_W+1)'(N_SINK)) &&
                      (p + (POS_W+1)'(N_RECENT) <= {1'b0, cur_pos});
    assign fmt_x[r] = fmt_q[lh][slot];
  end

  logic popular;
  always_comb popular = ($countones(retain_mask) * 2) > H;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LH; i++) cnt_q[i] <= '0;
      done      <= 1'b0;
      wr_slot   <= '0;
      evicted   <= 1'b0;
      store_x   <= 1'b0;
      no_victim <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear_all) begin
        for (int i = 0; i < LH; i++) cnt_q[i] <= '0;
      end else if (commit) begin
        done      <= 1'b1;
        store_x   <= popular;
        evicted   <= 1'b0;
        no_victim <= 1'b0;
        if (cnt_q[lh] < (SW+1)'(NSLOTS)) begin
          wr_slot   <= cnt_q[lh][SW-1:0];
          cnt_q[lh] <= cnt_q[lh] + 1'b1;
        end else if (min_vld) begin
          wr_slot <= min_idx;
          evicted <= 1'b1;
        end else begin
          no_victim <= 1'b1;
        end
      end
    end
  end

  // slot tables: no reset, a slot is only read once count covers it
  always_ff @(posedge clk) begin
    if (!clear_all && commit) begin
      if (cnt_q[lh] < (SW+1)'(NSLOTS)) begin
        pos_q[lh][cnt_q[lh][SW-1:0]] <= cur_pos;
        fmt_q[lh][cnt_q[lh][SW-1:0]] <= popular;
      end else if (min_vld) begin
        pos_q[lh][min_idx] <= cur_pos;
        fmt_q[lh][min_idx] <= popular;
      end
    end
  end
endmodule
