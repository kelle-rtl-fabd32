// kelle_top: the Kelle accelerator executing one decoding step of
// self-attention for one head, with attention-based eviction (AERP) and
// two-dimensional adaptive refresh (2DRP) of the KV cache eDRAM.
//
// Blocks: an N x N reconfigurable systolic array (RSA) with its partial-sum
// accumulator and the systolic evictor beside it, the softmax unit of the
// SFU, the weight SRAM, the activation eDRAM, the KV cache eDRAM (32 banks
// split into Key/Value x MSB/LSB), the importance-score register file, the
// eviction controller, two 2DRP refresh controllers (MSB banks, LSB banks),
// a refresh controller with one uniform interval for the activation eDRAM,
// and the Kelle scheduler that orders the step.
//
// One step (start, for layer-head lh, new token at position cur_pos):
//   MM_Q, MM_K  q = x*Wq, k = x*Wk for this head: C/N x D/N weight tiles,
//               x in activation eDRAM words 0..C/N-1, results (>>> PROJ_SHIFT,
//               saturated) to words Q_BASE.., K_BASE..
//   MM_QK       q.k for every cached slot and for the new token. Key vectors
//               are loaded as array rows (row r = slot g*N+r), q streams in;
//               complete scores go, row by row, to the systolic evictor
//               (importance update + minimum search over unprotected slots),
//               to the softmax (online max and denominator) and to a score
//               buffer. Updated importance scores go back to the register file.
//   SM          softmax normalisation of the buffered scores.
//   MM_V        v = x*Wv.
//   MM_AV       y = sum_n p_n v_n with the array transposed (value vectors as
//               rows, probabilities stream in from the left); y >>> 15 to
//               words Y_BASE..
//   UPDATE      the eviction controller picks the slot (free slot, or the
//               evictor's minimum when the head holds NSLOTS tokens), the new
//               k and v are written there, its importance score (its own
//               q.k, quantised) is written to the register file.
// The refresh controllers run all the time and refresh only while the
// scheduler does not use the KV cache.
//
// Host side: the off-chip DRAM, its controller and PHY are not part of this
// RTL. In their place the host writes weights (w_*) and activations (a_*)
// while the accelerator is idle and reads y back the same way.
//
// Departures (see README): a popular token's format is decided and recorded
// (store_x) but its K and V are still written, and no recomputation from
// stored input vectors is performed; the weight and KV loads are not
// overlapped.
module kelle_top
  import kelle_pkg::*;
#(
  parameter int unsigned N          = 32,        // RSA is N x N
  parameter int unsigned C          = 4096,      // model dimension
  parameter int unsigned D          = 128,       // head dimension
  parameter int unsigned H          = 32,        // heads
  parameter int unsigned NSLOTS     = 128,       // KV budget N' per head
  parameter int unsigned LH         = 64,        // cached layer-heads
  parameter int unsigned NB         = 8,         // banks per KV bank group
  parameter int unsigned N_SINK     = 10,
  parameter int unsigned N_RECENT   = 64,
  parameter int unsigned SRAM_DEPTH = 65536,     // 2 MB of 32-byte words
  parameter int unsigned ACT_DEPTH  = 4096,      // 256 KB of 64-byte words
  parameter int unsigned PROJ_SHIFT = 8,
  parameter int unsigned QSHIFT     = 16,
  parameter int unsigned SM_SHIFT   = 12,
  parameter int unsigned HST_MIN    = 8,
  parameter int unsigned INT_MSB_HST = 360_000,    // 0.36 ms at 1 GHz
  parameter int unsigned INT_MSB_LST = 1_440_000,  // 1.44 ms
  parameter int unsigned INT_LSB_HST = 5_400_000,  // 5.4 ms
  parameter int unsigned INT_LSB_LST = 7_200_000,  // 7.2 ms
  parameter int unsigned INT_ACT     = 45_000,     // 45 us retention
  localparam int unsigned KV_DEPTH  = LH * NSLOTS,
  localparam int unsigned KAW       = $clog2(KV_DEPTH),
  localparam int unsigned SAW       = $clog2(SRAM_DEPTH),
  localparam int unsigned AAW       = $clog2(ACT_DEPTH),
  localparam int unsigned LHW       = $clog2(LH),
  localparam int unsigned SW        = $clog2(NSLOTS),
  localparam int unsigned NG        = NSLOTS / N,   // slot groups per head
  localparam int unsigned XW        = C / N,        // words of x
  localparam int unsigned DW        = D / N,        // words of a head vector
  localparam int unsigned Q_BASE    = XW,
  localparam int unsigned K_BASE    = XW + DW,
  localparam int unsigned V_BASE    = XW + 2*DW,
  localparam int unsigned Y_BASE    = XW + 3*DW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host: weight SRAM
  input  logic                 w_en,
  input  logic [SAW-1:0]       w_addr,
  input  logic [N*WGT_W-1:0]   w_wdata,
  // host: activation eDRAM
  input  logic                 a_en,
  input  logic                 a_we,
  input  logic [AAW-1:0]       a_addr,
  input  logic [N*DATA_W-1:0]  a_wdata,
  output logic [N*DATA_W-1:0]  a_rdata,
  // step control
  input  logic                 clear,
  input  logic                 start,
  input  logic [LHW-1:0]       lh,
  input  logic [15:0]          cur_pos,
  input  logic [H-1:0]         retain_mask,
  output logic                 busy,
  output logic                 done,
  output logic [SW-1:0]        wr_slot,
  output logic                 evicted,
  output logic                 store_x,
  output logic                 no_victim,
  output logic [SW:0]          count,
  // statistics
  output logic [31:0]          msb_ref_count,
  output logic [31:0]          lsb_ref_count,
  output logic [31:0]          act_ref_count,
  output logic [31:0]          ref_stall_cycles,
  output logic [31:0]          msb_expired_hst,
  output logic [31:0]          msb_expired_lst,
  output logic [31:0]          lsb_expired_hst,
  output logic [31:0]          lsb_expired_lst,
  output logic [31:0]          life_q,
  output logic [31:0]          life_k,
  output logic [31:0]          life_v
);
  // ------------------------------------------------------------------
  // scheduler
  sched_op_e op;
  logic      op_start, op_done, kv_busy, step_done, sched_busy;

  kelle_scheduler u_sched (
    .clk, .rst_n, .start(start && !sched_busy), .op_done, .op, .op_start,
    .busy(sched_busy), .kv_busy, .step_done, .life_q, .life_k, .life_v);

  assign busy = sched_busy;
  assign done = step_done;

  // ------------------------------------------------------------------
  // datapath state
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_FETCH2, S_LOAD, S_STREAM, S_WAIT, S_WRITE,
    S_SM_FIN, S_SM_RUN, S_SM_DRAIN, S_UPD_COMMIT, S_UPD_RD, S_UPD_WR, S_DONE
  } st_e;

  st_e st;
  logic [$clog2(XW+1)-1:0]  it_q;        // inner loop counter
  logic [$clog2(NG+2)-1:0]  g_q;         // slot group (NG = new token)
  logic [$clog2(DW+1)-1:0]  t_q;         // head-dimension tile
  logic [$clog2(N+1)-1:0]   lr_q;        // load row counter
  logic [$clog2(NSLOTS+3)-1:0] sm_q;     // softmax index
  logic [$clog2(2*DW+2)-1:0] u_q;        // update read counter
  data_t                    vec_q [N];   // vector streamed into the array
  acc_t                     sbuf [NSLOTS+1];
  prob_t                    pbuf [NSLOTS+1];
  score_t                   new_score_q;
  data_t                    kbuf [D];
  data_t                    vbuf [D];
  logic [SW:0]              cnt_snap;    // filled slots at the start of the step

  // matrix selection for projections: 0 Q, 1 K, 2 V
  logic [1:0] mat;
  always_comb begin
    case (op)
      OP_MM_K: mat = 2'd1;
      OP_MM_V: mat = 2'd2;
      default: mat = 2'd0;
    endcase
  end
  wire is_proj = (op == OP_MM_Q) || (op == OP_MM_K) || (op == OP_MM_V);

  // groups that hold tokens: 0 .. last_g-1, then the new-token group NG
  logic [$clog2(NG+2)-1:0] used_groups;
  always_comb used_groups = ($clog2(NG+2))'((cnt_snap + (SW+1)'(N-1)) / (SW+1)'(N));
  function automatic logic [$clog2(NG+2)-1:0] next_group(logic [$clog2(NG+2)-1:0] g);
    if (g + 1 >= used_groups) return ($clog2(NG+2))'(NG);
    else                      return g + 1'b1;
  endfunction
  wire [$clog2(NG+2)-1:0] first_group = (used_groups == 0) ? ($clog2(NG+2))'(NG) : '0;

  // ------------------------------------------------------------------
  // memories
  logic                 sram_en, sram_we;
  logic [SAW-1:0]       sram_addr;
  logic [N*WGT_W-1:0]   sram_rdata;
  kelle_weight_sram #(.DEPTH(SRAM_DEPTH), .LANES(N)) u_wsram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(w_wdata), .rdata(sram_rdata));

  logic                 act_en, act_we;
  logic [AAW-1:0]       act_addr;
  logic [N*DATA_W-1:0]  act_wdata, act_rdata;
  logic                 act_ref_req, act_ref_gnt, act_ref_done;
  logic [AAW-1:0]       act_ref_addr, act_rf_addr;
  kelle_edram_bank #(.DEPTH(ACT_DEPTH), .WIDTH(N*DATA_W)) u_act (
    .clk, .rst_n, .en(act_en), .we(act_we), .addr(act_addr), .wdata(act_wdata),
    .rdata(act_rdata), .ref_req(act_ref_req), .ref_addr(act_ref_addr),
    .ref_gnt(act_ref_gnt), .ref_done(act_ref_done), .ref_count(act_ref_count));
  assign a_rdata = act_rdata;

  logic          kv_en, kv_we_k, kv_we_v;
  logic [KAW-1:0] kv_addr;
  data_t         kv_rk [D];
  data_t         kv_rv [D];
  logic          msb_req, msb_gnt, msb_done, lsb_req, lsb_gnt, lsb_done;
  logic [KAW-1:0] msb_addr, lsb_addr;
  kelle_kv_cache #(.D(D), .NB(NB), .DEPTH(KV_DEPTH)) u_kv (
    .clk, .rst_n, .en(kv_en), .we_k(kv_we_k), .we_v(kv_we_v), .addr(kv_addr),
    .wdata_k(kbuf), .wdata_v(vbuf), .rdata_k(kv_rk), .rdata_v(kv_rv),
    .msb_ref_req(msb_req), .msb_ref_addr(msb_addr), .msb_ref_gnt(msb_gnt), .msb_ref_done(msb_done),
    .lsb_ref_req(lsb_req), .lsb_ref_addr(lsb_addr), .lsb_ref_gnt(lsb_gnt), .lsb_ref_done(lsb_done),
    .msb_ref_count, .lsb_ref_count);

  // score register file
  logic          rf_we, rf_wvalid;
  logic [KAW-1:0] rf_waddr, rf_gaddr, rf_ra, rf_rb;
  score_t        rf_wscore, rf_sa, rf_sb;
  logic          rf_va, rf_vb;
  score_t        rf_gscore [N];
  logic          rf_gvalid [N];
  kelle_score_rf #(.DEPTH(KV_DEPTH), .ROWS(N)) u_rf (
    .clk, .rst_n, .clear_all(clear && !sched_busy), .we(rf_we), .waddr(rf_waddr),
    .wvalid(rf_wvalid), .wscore(rf_wscore), .gaddr(rf_gaddr), .gscore(rf_gscore),
    .gvalid(rf_gvalid), .raddr_a(rf_ra), .rscore_a(rf_sa), .rvalid_a(rf_va),
    .raddr_b(rf_rb), .rscore_b(rf_sb), .rvalid_b(rf_vb));

  // ------------------------------------------------------------------
  // refresh controllers
  logic [31:0] msb_stall, lsb_stall, act_stall;
  logic [31:0] unused_cnt [8];
  logic        unused_sw [3];
  kelle_refresh_ctrl #(.DEPTH(KV_DEPTH), .INT_HST(INT_MSB_HST), .INT_LST(INT_MSB_LST),
                       .HST_MIN(HST_MIN)) u_ref_msb (
    .clk, .rst_n, .enable(!kv_busy), .rf_raddr(rf_ra), .rf_valid(rf_va), .rf_score(rf_sa),
    .ref_req(msb_req), .ref_addr(msb_addr), .ref_gnt(msb_gnt), .sweeping(unused_sw[0]),
    .expired_hst(msb_expired_hst), .expired_lst(msb_expired_lst),
    .refreshed_hst(unused_cnt[0]), .refreshed_lst(unused_cnt[1]),
    .stall_cycles(msb_stall), .overruns(unused_cnt[2]));
  kelle_refresh_ctrl #(.DEPTH(KV_DEPTH), .INT_HST(INT_LSB_HST), .INT_LST(INT_LSB_LST),
                       .HST_MIN(HST_MIN)) u_ref_lsb (
    .clk, .rst_n, .enable(!kv_busy), .rf_raddr(rf_rb), .rf_valid(rf_vb), .rf_score(rf_sb),
    .ref_req(lsb_req), .ref_addr(lsb_addr), .ref_gnt(lsb_gnt), .sweeping(unused_sw[1]),
    .expired_hst(lsb_expired_hst), .expired_lst(lsb_expired_lst),
    .refreshed_hst(unused_cnt[3]), .refreshed_lst(unused_cnt[4]),
    .stall_cycles(lsb_stall), .overruns(unused_cnt[5]));
  // activation eDRAM: every word, one interval (all entries in one group)
  kelle_refresh_ctrl #(.DEPTH(ACT_DEPTH), .INT_HST(INT_ACT), .INT_LST(INT_ACT),
                       .HST_MIN(0)) u_ref_act (
    .clk, .rst_n, .enable(1'b1), .rf_raddr(act_rf_addr), .rf_valid(1'b1), .rf_score('0),
    .ref_req(act_ref_req), .ref_addr(act_ref_addr), .ref_gnt(act_ref_gnt), .sweeping(unused_sw[2]),
    .expired_hst(unused_cnt[6]), .expired_lst(unused_cnt[7]),
    .refreshed_hst(), .refreshed_lst(), .stall_cycles(act_stall), .overruns());
  assign ref_stall_cycles = msb_stall + lsb_stall;

  // ------------------------------------------------------------------
  // array, accumulator, evictor, softmax
  rsa_mode_e mode;
  assign mode = (op == OP_MM_AV) ? RSA_TRANSPOSE : RSA_NORMAL;

  logic            ld_vld;
  logic [$clog2(N)-1:0] ld_row;
  data_t           ld_data [N];
  logic            in_vld;
  acc_t            row_out [N];
  logic            row_vld [N];
  acc_t            col_out [N];
  logic            col_vld [N];

  kelle_rsa #(.ROWS(N), .COLS(N)) u_rsa (
    .clk, .rst_n, .mode, .load_valid(ld_vld), .load_row(ld_row), .load_data(ld_data),
    .in_valid(in_vld), .in_top(vec_q), .in_left(vec_q),
    .row_out, .row_vld, .col_out, .col_vld);

  logic  acc_first, acc_last;
  logic  acc_in_vld [N];
  acc_t  acc_in [N];
  acc_t  acc_sum [N];
  logic  acc_sum_vld [N];
  data_t acc_q [N];
  for (genvar l = 0; l < N; l++) begin : g_accin
    assign acc_in_vld[l] = (mode == RSA_NORMAL) ? row_vld[l] : col_vld[l];
    assign acc_in[l]     = (mode == RSA_NORMAL) ? row_out[l] : col_out[l];
  end
  kelle_accumulator #(.LANES(N)) u_acc (
    .clk, .rst_n, .first(acc_first), .last(acc_last),
    .shift((op == OP_MM_AV) ? 6'd15 : 6'(PROJ_SHIFT)),
    .in_vld(acc_in_vld), .in_data(acc_in), .sum(acc_sum), .sum_vld(acc_sum_vld), .q(acc_q));

  // eviction controller
  logic            ev_cand [N];
  logic            ev_fmt  [N];
  logic            ev_commit, ev_done;
  logic            se_min_vld;
  logic [SW-1:0]   se_min_idx;
  score_t          se_min_score;
  logic [SW-1:0]   ev_slot;
  kelle_eviction_ctrl #(.LH(LH), .NSLOTS(NSLOTS), .ROWS(N), .H(H), .N_SINK(N_SINK),
                        .N_RECENT(N_RECENT)) u_evc (
    .clk, .rst_n, .clear_all(clear && !sched_busy), .lh, .cur_pos,
    .grp(g_q[((NG > 1) ? $clog2(NG) : 1)-1:0]), .cand(ev_cand), .fmt_x(ev_fmt), .count,
    .commit(ev_commit), .min_vld(se_min_vld), .min_idx(se_min_idx), .retain_mask,
    .done(ev_done), .wr_slot(ev_slot), .evicted, .store_x, .no_victim);
  assign wr_slot = ev_slot;

  // systolic evictor
  logic   se_preload;
  logic   se_cand [N];
  logic   se_vld  [N];
  logic   se_upd_vld [N];
  score_t se_upd [N];
  for (genvar r = 0; r < N; r++) begin : g_se
    assign se_cand[r] = ev_cand[r] && rf_gvalid[r];
    assign se_vld[r]  = acc_sum_vld[r] && (op == OP_MM_QK) && (g_q != ($clog2(NG+2))'(NG));
  end
  kelle_systolic_evictor #(.ROWS(N), .IDX_W(SW), .QSHIFT(QSHIFT)) u_se (
    .clk, .rst_n, .preload(se_preload), .new_search(g_q == 0),
    .group_base(SW'(g_q * N)), .pre_score(rf_gscore), .pre_cand(se_cand),
    .score_vld(se_vld), .score(acc_sum), .upd_vld(se_upd_vld), .upd_score(se_upd),
    .min_vld(se_min_vld), .min_idx(se_min_idx), .min_score(se_min_score));

  // softmax
  logic  sm_clear, sm_acc_vld, sm_fin, sm_norm_vld, sm_prob_vld;
  acc_t  sm_acc_score, sm_norm_score;
  prob_t sm_prob;
  kelle_softmax #(.SM_SHIFT(SM_SHIFT)) u_sm (
    .clk, .rst_n, .clear(sm_clear), .acc_vld(sm_acc_vld), .acc_score(sm_acc_score),
    .finalize(sm_fin), .norm_vld(sm_norm_vld), .norm_score(sm_norm_score),
    .prob_vld(sm_prob_vld), .prob(sm_prob));

  // ------------------------------------------------------------------
  // per-row handling of complete q.k scores (rows finish one per cycle)
  logic                         row_hit;
  logic [$clog2(N)-1:0]         row_idx;
  logic [$clog2(NSLOTS+1)-1:0]  row_slot;
  logic                         row_ok;
  always_comb begin
    row_hit = 1'b0;
    row_idx = '0;
    for (int r = 0; r < N; r++)
      if (acc_sum_vld[r] && !row_hit) begin
        row_hit = 1'b1;
        row_idx = ($clog2(N))'(r);
      end
    if (g_q == ($clog2(NG+2))'(NG)) begin
      row_slot = ($clog2(NSLOTS+1))'(NSLOTS);
      row_ok   = (row_idx == 0);
    end else begin
      row_slot = ($clog2(NSLOTS+1))'(g_q * N + row_idx);
      row_ok   = (($clog2(NSLOTS+1)+1)'(row_slot) < ($clog2(NSLOTS+1)+1)'(cnt_snap));
    end
    sm_acc_vld   = (op == OP_MM_QK) && row_hit && row_ok;
    sm_acc_score = acc_sum[row_idx];
  end

  // write-back of updated importance scores, one cycle after the score
  logic            wb_en_q;
  logic [$clog2(N)-1:0] wb_row_q;
  logic [KAW-1:0]  wb_addr_q;

  // ------------------------------------------------------------------
  // main datapath control
  wire [KAW-1:0] head_base = KAW'(lh) * KAW'(NSLOTS);
  wire last_group = (g_q == ($clog2(NG+2))'(NG));

  // combinational memory / array controls
  always_comb begin
    sram_en = 1'b0; sram_we = 1'b0; sram_addr = w_addr;
    act_en = 1'b0; act_we = 1'b0; act_addr = a_addr; act_wdata = a_wdata;
    kv_en = 1'b0; kv_we_k = 1'b0; kv_we_v = 1'b0; kv_addr = head_base;
    ld_vld = 1'b0; ld_row = '0;
    for (int c = 0; c < N; c++) ld_data[c] = '0;
    in_vld = 1'b0;
    se_preload = 1'b0;
    sm_clear = 1'b0; sm_fin = 1'b0; sm_norm_vld = 1'b0; sm_norm_score = '0;
    ev_commit = 1'b0;
    rf_we = 1'b0; rf_waddr = wb_addr_q; rf_wvalid = 1'b1; rf_wscore = se_upd[wb_row_q];
    rf_gaddr = head_base + KAW'(g_q * N);
    acc_first = 1'b0; acc_last = 1'b0;

    if (!sched_busy) begin
      sram_en = w_en; sram_we = w_en; sram_addr = w_addr;
      act_en = a_en; act_we = a_we; act_addr = a_addr; act_wdata = a_wdata;
    end

    // accumulator sequencing flags for the current pass
    if (is_proj) begin
      acc_first = (it_q == 0);
      acc_last  = (it_q == ($clog2(XW+1))'(XW-1));
    end else if (op == OP_MM_QK) begin
      acc_first = (t_q == 0);
      acc_last  = (t_q == ($clog2(DW+1))'(DW-1));
    end else if (op == OP_MM_AV) begin
      acc_first = (g_q == first_group);
      acc_last  = last_group;
    end

    // importance-score write-back from the evictor
    if (wb_en_q) rf_we = 1'b1;

    case (st)
      S_FETCH: begin
        if (is_proj) begin
          act_en = 1'b1; act_addr = AAW'(it_q);
        end else if (op == OP_MM_QK) begin
          act_en = 1'b1; act_addr = AAW'(Q_BASE + t_q);
          if (t_q == 0 && !last_group) se_preload = 1'b1;
        end
      end
      S_LOAD: begin
        if (lr_q < ($clog2(N+1))'(N)) begin
          if (is_proj) begin
            sram_en   = 1'b1;
            sram_addr = SAW'(mat * D * XW + (t_q * N + 32'(lr_q)) * XW + it_q);
          end else if (last_group) begin
            act_en   = 1'b1;
            act_addr = AAW'(((op == OP_MM_QK) ? K_BASE : V_BASE) + t_q);
          end else begin
            kv_en   = 1'b1;
            kv_addr = head_base + KAW'(g_q * N + lr_q);
          end
        end
        if (lr_q != 0) begin
          ld_vld = 1'b1;
          ld_row = ($clog2(N))'(lr_q - 1);
          for (int c = 0; c < N; c++) begin
            if (is_proj)
              ld_data[c] = data_t'(signed'(sram_rdata[c*WGT_W +: WGT_W]));
            else if (last_group)
              ld_data[c] = (lr_q == 1) ? data_t'(act_rdata[c*DATA_W +: DATA_W]) : '0;
            else if (op == OP_MM_QK)
              ld_data[c] = kv_rk[t_q * N + c];
            else
              ld_data[c] = kv_rv[t_q * N + c];
          end
        end
      end
      S_STREAM: in_vld = 1'b1;
      S_WRITE: begin
        act_en = 1'b1; act_we = 1'b1;
        if (is_proj)
          act_addr = AAW'(((op == OP_MM_Q) ? Q_BASE : (op == OP_MM_K) ? K_BASE : V_BASE) + t_q);
        else
          act_addr = AAW'(Y_BASE + t_q);
        for (int c = 0; c < N; c++) act_wdata[c*DATA_W +: DATA_W] = acc_q[c];
      end
      S_SM_FIN: sm_fin = 1'b1;
      S_SM_RUN: begin
        if (sm_q <= ($clog2(NSLOTS+3))'(NSLOTS)) begin
          sm_norm_vld   = 1'b1;
          sm_norm_score = sbuf[sm_q];
        end
      end
      S_UPD_COMMIT: ev_commit = 1'b1;
      S_UPD_RD: begin
        if (u_q < ($clog2(2*DW+2))'(2*DW)) begin
          act_en = 1'b1;
          act_addr = AAW'(K_BASE + u_q);   // K words then V words, contiguous
        end
      end
      S_UPD_WR: begin
        if (!no_victim) begin
          kv_en = 1'b1; kv_we_k = 1'b1; kv_we_v = 1'b1;
          kv_addr = head_base + KAW'(ev_slot);
          rf_we = 1'b1; rf_waddr = head_base + KAW'(ev_slot);
          rf_wvalid = 1'b1; rf_wscore = new_score_q;
        end
      end
      default: ;
    endcase
    if (op_start && op == OP_MM_QK) sm_clear = 1'b1;
  end

  // state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      op_done     <= 1'b0;
      it_q        <= '0;
      g_q         <= '0;
      t_q         <= '0;
      lr_q        <= '0;
      sm_q        <= '0;
      u_q         <= '0;
      new_score_q <= '0;
      cnt_snap    <= '0;
      wb_en_q     <= 1'b0;
      wb_row_q    <= '0;
      wb_addr_q   <= '0;
      for (int c = 0; c < N; c++) vec_q[c] <= '0;
    end else begin
      op_done <= 1'b0;

      // evictor write-back pipeline and score buffer
      wb_en_q <= 1'b0;
      if (op == OP_MM_QK && row_hit) begin
        if (row_ok) sbuf[row_slot] <= acc_sum[row_idx];
        if (!last_group && row_ok) begin
          wb_en_q   <= 1'b1;
          wb_row_q  <= row_idx;
          wb_addr_q <= head_base + KAW'(row_slot);
        end
        if (last_group && row_idx == 0)
          new_score_q <= score_incr(acc_sum[0], QSHIFT);
      end

      case (st)
        S_IDLE: begin
          if (op_start) begin
            it_q <= '0; t_q <= '0; lr_q <= '0; sm_q <= '0; u_q <= '0;
            if (op == OP_MM_Q) cnt_snap <= count;
            case (op)
              OP_MM_QK: begin g_q <= first_group; st <= S_FETCH; end
              OP_MM_AV: begin g_q <= first_group; st <= S_FETCH; end
              OP_SM:     st <= S_SM_FIN;
              OP_UPDATE: st <= S_UPD_COMMIT;
              default:   begin g_q <= '0; st <= S_FETCH; end
            endcase
          end
        end
        S_FETCH: st <= S_FETCH2;
        S_FETCH2: begin
          for (int c = 0; c < N; c++) begin
            if (op == OP_MM_AV) begin
              // probabilities of the rows' slots, 0 for empty slots
              if (last_group)
                vec_q[c] <= (c == 0) ? data_t'(pbuf[NSLOTS]) : '0;
              else if (($clog2(NSLOTS+1)+1)'(g_q * N + c) < ($clog2(NSLOTS+1)+1)'(cnt_snap))
                vec_q[c] <= data_t'(pbuf[g_q * N + c]);
              else
                vec_q[c] <= '0;
            end else begin
              vec_q[c] <= data_t'(act_rdata[c*DATA_W +: DATA_W]);
            end
          end
          lr_q <= '0;
          st   <= S_LOAD;
        end
        S_LOAD: begin
          if (lr_q == ($clog2(N+1))'(N)) st <= S_STREAM;
          else lr_q <= lr_q + 1'b1;
        end
        S_STREAM: st <= S_WAIT;
        S_WAIT: begin
          if (acc_in_vld[N-1]) begin
            // pass finished; advance loops
            if (is_proj) begin
              if (it_q == ($clog2(XW+1))'(XW-1)) st <= S_WRITE;
              else begin it_q <= it_q + 1'b1; st <= S_FETCH; end
            end else if (op == OP_MM_QK) begin
              if (t_q == ($clog2(DW+1))'(DW-1)) begin
                t_q <= '0;
                if (last_group) st <= S_DONE;
                else begin g_q <= next_group(g_q); st <= S_FETCH; end
              end else begin
                t_q <= t_q + 1'b1; st <= S_FETCH;
              end
            end else begin  // MM_AV: groups inner, tiles outer
              if (last_group) st <= S_WRITE;
              else begin g_q <= next_group(g_q); st <= S_FETCH; end
            end
          end
        end
        S_WRITE: begin
          if (t_q == ($clog2(DW+1))'(DW-1)) st <= S_DONE;
          else begin
            t_q  <= t_q + 1'b1;
            it_q <= '0;
            g_q  <= (op == OP_MM_AV) ? first_group : '0;
            st   <= S_FETCH;
          end
        end
        S_SM_FIN: begin sm_q <= '0; st <= S_SM_RUN; end
        S_SM_RUN: begin
          if (sm_q == ($clog2(NSLOTS+3))'(NSLOTS + 1)) st <= S_DONE;
          sm_q <= sm_q + 1'b1;
        end
        S_UPD_COMMIT: begin u_q <= '0; st <= S_UPD_RD; end
        S_UPD_RD: begin
          if (u_q != 0) begin
            for (int c = 0; c < N; c++) begin
              if (u_q <= ($clog2(2*DW+2))'(DW))
                kbuf[32'(u_q - 1'b1) * N + c] <= data_t'(act_rdata[c*DATA_W +: DATA_W]);
              else
                vbuf[(32'(u_q) - 1 - DW) * N + c] <= data_t'(act_rdata[c*DATA_W +: DATA_W]);
            end
          end
          if (u_q == ($clog2(2*DW+2))'(2*DW)) st <= S_UPD_WR;
          u_q <= u_q + 1'b1;
        end
        S_UPD_WR: st <= S_DONE;
        S_DONE: begin
          op_done <= 1'b1;
          st      <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase

      // softmax results into the probability buffer (one cycle latency)
      if (sm_prob_vld) begin
        if (($clog2(NSLOTS+3)+1)'(sm_q - 1'b1) < ($clog2(NSLOTS+3)+1)'(cnt_snap) ||
            (sm_q - 1'b1) == ($clog2(NSLOTS+3))'(NSLOTS))
          pbuf[sm_q - 1'b1] <= sm_prob;
        else
          pbuf[sm_q - 1'b1] <= '0;
      end
    end
  end

  // the host must not touch the memories during a step
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    sched_busy |-> !(w_en || a_en));
endmodule
