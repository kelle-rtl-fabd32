// tb_kelle_top: end-to-end test of the Kelle accelerator at reduced size.
//
// The testbench loads random 8-bit weights into the weight SRAM and, for a
// sequence of decoding steps on two layer-heads, a random input vector x
// into activation eDRAM, starts the step and compares the attention output
// y, the chosen slot, the eviction flag and the popularity decision with a
// behavioural reference model written here: projections, q.k, importance
// scores with the initial/recent protection, minimum search, base-2
// softmax with the same fixed-point rules, probabilities times V, and the
// cache update. Refresh intervals are shortened so that both 2DRP
// controllers expire and refresh while steps are running.
// Mechanisms counted (each must occur): cache fill without eviction,
// eviction, protection of an initial or recent token that had the lowest
// score, popular token (store_x), MSB and LSB refreshes, HST and LST
// interval expiries, refresh held off while the KV cache was busy,
// activation eDRAM refresh.
module tb_kelle_top;
  import kelle_pkg::*;

  localparam int N = 4, C = 16, D = 8, H = 4, NSLOTS = 8, LH = 2, NB = 8;
  localparam int N_SINK = 1, N_RECENT = 2;
  localparam int SRAM_DEPTH = 256, ACT_DEPTH = 64;
  localparam int PROJ_SHIFT = 6, QSHIFT = 17, SM_SHIFT = 12, HST_MIN = 8;
  localparam int XW = C / N, DW = D / N;
  localparam int Q_BASE = XW, K_BASE = XW + DW, V_BASE = XW + 2*DW, Y_BASE = XW + 3*DW;
  localparam int NSTEPS = 40;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic                 w_en;
  logic [$clog2(SRAM_DEPTH)-1:0] w_addr;
  logic [N*8-1:0]       w_wdata;
  logic                 a_en, a_we;
  logic [$clog2(ACT_DEPTH)-1:0] a_addr;
  logic [N*16-1:0]      a_wdata, a_rdata;
  logic                 clear, start;
  logic [0:0]           lh;
  logic [15:0]          cur_pos;
  logic [H-1:0]         retain_mask;
  logic                 busy, done, evicted, store_x, no_victim;
  logic [2:0]           wr_slot;
  logic [3:0]           count;
  logic [31:0] msb_ref_count, lsb_ref_count, act_ref_count, ref_stall_cycles;
  logic [31:0] msb_expired_hst, msb_expired_lst, lsb_expired_hst, lsb_expired_lst;
  logic [31:0] life_q, life_k, life_v;

  kelle_top #(
    .N(N), .C(C), .D(D), .H(H), .NSLOTS(NSLOTS), .LH(LH), .NB(NB),
    .N_SINK(N_SINK), .N_RECENT(N_RECENT), .SRAM_DEPTH(SRAM_DEPTH), .ACT_DEPTH(ACT_DEPTH),
    .PROJ_SHIFT(PROJ_SHIFT), .QSHIFT(QSHIFT), .SM_SHIFT(SM_SHIFT), .HST_MIN(HST_MIN),
    .INT_MSB_HST(300), .INT_MSB_LST(700), .INT_LSB_HST(900), .INT_LSB_LST(1300),
    .INT_ACT(200)
  ) dut (.*);

  int checks = 0, failures = 0;
  int n_fill = 0, n_evict = 0, n_protect = 0, n_popular = 0;

  // reference state
  int  W  [3][D][C];
  int  x  [C];
  int  ck [LH][NSLOTS][D];
  int  cv [LH][NSLOTS][D];
  int  cs [LH][NSLOTS];
  int  cp [LH][NSLOTS];
  int  cnt [LH];
  int  pos_next [LH];

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int rq(longint v, int sh);
    return sat16(v >>> sh);
  endfunction
  function automatic int incr(longint v);
    longint s = v >>> QSHIFT;
    if (s < 0) return 0;
    if (s > 15) return 15;
    return int'(s);
  endfunction
  int LUT [16] = '{32768, 31379, 30048, 28774, 27554, 26386, 25268, 24196,
                   23170, 22188, 21247, 20347, 19484, 18658, 17867, 17109};
  function automatic longint e2n(longint e);
    longint n = e >>> 4;
    if (e < 0) return 32768;
    if (n >= 16) return 0;
    return longint'(LUT[e & 15]) >>> n;
  endfunction

  task automatic host_write_act(int addr, int vals[N]);
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = addr[$clog2(ACT_DEPTH)-1:0];
    for (int c = 0; c < N; c++) a_wdata[c*16 +: 16] = vals[c][15:0];
    @(negedge clk);
    a_en = 0; a_we = 0;
  endtask

  task automatic host_read_act(int addr, output int vals[N]);
    @(negedge clk);
    a_en = 1; a_we = 0; a_addr = addr[$clog2(ACT_DEPTH)-1:0];
    @(negedge clk);
    a_en = 0;
    for (int c = 0; c < N; c++) vals[c] = int'($signed(a_rdata[c*16 +: 16]));
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_step(int h);
    int q[D], k[D], v[D], y[D];
    longint qk[NSLOTS+1];
    int newsc[NSLOTS];
    longint m, d, recip, acc;
    bit have;
    int order[$];
    int prob[NSLOTS+1];
    int exp_slot, exp_evict, minv, mins, glob_min;
    int popular, pos;
    int vals[N];

    pos = pos_next[h];
    pos_next[h]++;
    // new input vector
    for (int i = 0; i < C; i++) x[i] = $urandom_range(0, 255) - 128;
    for (int w = 0; w < XW; w++) begin
      for (int c = 0; c < N; c++) vals[c] = x[w*N + c];
      host_write_act(w, vals);
    end
    // projections
    for (int o = 0; o < D; o++) begin
      longint sq = 0, sk = 0, sv = 0;
      for (int i = 0; i < C; i++) begin
        sq += longint'(x[i]) * W[0][o][i];
        sk += longint'(x[i]) * W[1][o][i];
        sv += longint'(x[i]) * W[2][o][i];
      end
      q[o] = rq(sq, PROJ_SHIFT); k[o] = rq(sk, PROJ_SHIFT); v[o] = rq(sv, PROJ_SHIFT);
    end
    // scores
    for (int s = 0; s < cnt[h]; s++) begin
      qk[s] = 0;
      for (int dd = 0; dd < D; dd++) qk[s] += longint'(q[dd]) * ck[h][s][dd];
    end
    qk[NSLOTS] = 0;
    for (int dd = 0; dd < D; dd++) qk[NSLOTS] += longint'(q[dd]) * k[dd];
    // importance update and minimum search over unprotected slots
    minv = 99; mins = -1; glob_min = 99;
    for (int s = 0; s < cnt[h]; s++) begin
      newsc[s] = cs[h][s] + incr(qk[s]);
      if (newsc[s] > 15) newsc[s] = 15;
      cs[h][s] = newsc[s];
      if (newsc[s] < glob_min) glob_min = newsc[s];
      if (cp[h][s] >= N_SINK && cp[h][s] + N_RECENT <= pos && newsc[s] < minv) begin
        minv = newsc[s]; mins = s;
      end
    end
    // softmax, same order as the hardware: slots 0..cnt-1 then the new token
    for (int s = 0; s < cnt[h]; s++) order.push_back(s);
    order.push_back(NSLOTS);
    have = 0; m = 0; d = 0;
    foreach (order[j]) begin
      longint xs = qk[order[j]] >>> SM_SHIFT;
      if (!have) begin m = xs; d = 32768; have = 1; end
      else if (xs > m) begin d = ((d * e2n(xs - m)) >>> 15) + 32768; m = xs; end
      else d = d + e2n(m - xs);
    end
    recip = (longint'(1) << 30) / d;
    foreach (order[j]) begin
      longint p = (e2n(m - (qk[order[j]] >>> SM_SHIFT)) * recip) >>> 15;
      prob[order[j]] = (p > 32767) ? 32767 : int'(p);
    end
    for (int c = 0; c < D; c++) begin
      acc = 0;
      for (int s = 0; s < cnt[h]; s++) acc += longint'(prob[s]) * cv[h][s][c];
      acc += longint'(prob[NSLOTS]) * v[c];
      y[c] = rq(acc, 15);
    end
    // expected update
    popular = 0;
    retain_mask = H'($urandom);
    popular = ($countones(retain_mask) * 2 > H);
    if (cnt[h] < NSLOTS) begin exp_slot = cnt[h]; exp_evict = 0; end
    else begin exp_slot = mins; exp_evict = 1; end

    // run
    @(negedge clk);
    lh = h[0]; cur_pos = pos[15:0]; start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);

    for (int w = 0; w < DW; w++) begin
      host_read_act(Y_BASE + w, vals);
      for (int c = 0; c < N; c++)
        check(vals[c] == y[w*N + c], $sformatf("head %0d pos %0d y[%0d] got %0d exp %0d",
                                               h, pos, w*N + c, vals[c], y[w*N + c]));
    end
    check(evicted == exp_evict[0], $sformatf("pos %0d evicted %0d exp %0d", pos, evicted, exp_evict));
    check(int'(wr_slot) == exp_slot, $sformatf("pos %0d slot %0d exp %0d", pos, wr_slot, exp_slot));
    check(store_x == popular[0], "popularity decision");
    check(!no_victim, "victim found");
    if (exp_evict) n_evict++; else n_fill++;
    if (exp_evict && glob_min < minv) n_protect++;
    if (popular) n_popular++;

    // reference update
    for (int dd = 0; dd < D; dd++) begin
      ck[h][exp_slot][dd] = k[dd];
      cv[h][exp_slot][dd] = v[dd];
    end
    cs[h][exp_slot] = incr(qk[NSLOTS]);
    cp[h][exp_slot] = pos;
    if (cnt[h] < NSLOTS) cnt[h]++;
    check(int'(count) == cnt[h], "slot count");
  endtask

  initial begin
    w_en = 0; a_en = 0; a_we = 0; w_addr = '0; w_wdata = '0; a_addr = '0; a_wdata = '0;
    clear = 0; start = 0; lh = 0; cur_pos = 0; retain_mask = '0;
    for (int h = 0; h < LH; h++) begin cnt[h] = 0; pos_next[h] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    // weights: word mat*D*XW + out*XW + tile holds W[mat][out][tile*N + lane]
    for (int mt = 0; mt < 3; mt++)
      for (int o = 0; o < D; o++)
        for (int t = 0; t < XW; t++) begin
          for (int l = 0; l < N; l++) begin
            W[mt][o][t*N + l] = $urandom_range(0, 255) - 128;
            w_wdata[l*8 +: 8] = W[mt][o][t*N + l][7:0];
          end
          w_addr = (mt*D*XW + o*XW + t);
          w_en = 1;
          @(negedge clk);
        end
    w_en = 0;
    for (int s = 0; s < NSTEPS; s++) run_step((s % 4 == 3) ? 1 : 0);

    $display("mechanisms: fill=%0d evict=%0d protect=%0d popular=%0d msb_ref=%0d lsb_ref=%0d act_ref=%0d stall=%0d exp: mh=%0d ml=%0d lh=%0d ll=%0d life q/k/v=%0d/%0d/%0d",
             n_fill, n_evict, n_protect, n_popular, msb_ref_count, lsb_ref_count, act_ref_count,
             ref_stall_cycles, msb_expired_hst, msb_expired_lst, lsb_expired_hst, lsb_expired_lst,
             life_q, life_k, life_v);
    check(n_fill > 0, "fill happened");
    check(n_evict > 0, "eviction happened");
    check(n_protect > 0, "protection of initial/recent token happened");
    check(n_popular > 0, "popular token happened");
    check(msb_ref_count > 0, "MSB refresh happened");
    check(lsb_ref_count > 0, "LSB refresh happened");
    check(act_ref_count > 0, "activation refresh happened");
    check(ref_stall_cycles > 0, "refresh held off while KV busy");
    check(msb_expired_hst > 0 && msb_expired_lst > 0, "MSB HST and LST expiries");
    check(lsb_expired_hst > 0 && lsb_expired_lst > 0, "LSB HST and LST expiries");
    check(life_k < life_q, "K lifetime shorter than Q lifetime");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
