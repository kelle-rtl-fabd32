// tb_kelle_eviction_ctrl: a reduced configuration (2 layer-heads, 8 slots,
// 4 rows, 4 heads, 1 initial token, recent window 2) driven with a stream
// of new tokens. A reference model of the slot tables computes which slots
// are eviction candidates (filled, not an initial token, not in the recent
// window); the bench checks the candidate flags, then picks one candidate at
// random as the evictor's minimum and checks where the token is written,
// whether it evicts, whether the popularity vote asks for storing x, and the
// no-victim case. done must follow commit by one cycle.
module tb_kelle_eviction_ctrl;
  localparam int LH = 2, NS = 8, R = 4, H = 4, NSINK = 1, NREC = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear_all, commit, min_vld, done, evicted, store_x, no_victim;
  logic [0:0] lh, grp;
  logic [15:0] cur_pos;
  logic cand [R]; logic fmt_x [R];
  logic [3:0] count;
  logic [2:0] min_idx, wr_slot;
  logic [H-1:0] retain_mask;
  kelle_eviction_ctrl #(.LH(LH), .NSLOTS(NS), .ROWS(R), .H(H), .N_SINK(NSINK), .N_RECENT(NREC)) dut (.*);
  int checks = 0, failures = 0;
  int mpos [LH][NS]; bit mfmt [LH][NS]; int mcnt [LH];
  int pos [LH];
  int n_evict = 0, n_fill = 0, n_novic = 0, n_x = 0;

  initial begin
    int cl [$];
    int pick, h;
    bit pop;
    clear_all = 0; commit = 0; min_vld = 0; min_idx = '0; lh = '0; grp = '0; cur_pos = '0; retain_mask = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < LH; l++) begin mcnt[l] = 0; pos[l] = 0; end
    for (int it = 0; it < 200; it++) begin
      if (it == 120) begin
        clear_all = 1; @(negedge clk); clear_all = 0;
        for (int l = 0; l < LH; l++) begin mcnt[l] = 0; pos[l] = 0; end
      end
      h = $urandom_range(0, LH - 1);
      lh = 1'(h); cur_pos = 16'(pos[h]);
      cl.delete();
      for (int g = 0; g < NS / R; g++) begin
        grp = 1'(g);
        #0.5;
        for (int r = 0; r < R; r++) begin
          int s; bit exp_c;
          s = g * R + r;
          exp_c = (s < mcnt[h]) && (mpos[h][s] >= NSINK) && (mpos[h][s] + NREC <= pos[h]);
          if (exp_c) cl.push_back(s);
          checks++;
          if (cand[r] !== exp_c || (s < mcnt[h] && fmt_x[r] !== mfmt[h][s])) begin
            failures++; $display("FAIL cand lh %0d slot %0d got %0d exp %0d", h, s, cand[r], exp_c);
          end
        end
      end
      checks++;
      if (count !== 4'(mcnt[h])) begin failures++; $display("FAIL count"); end
      retain_mask = H'($urandom);
      pop = $countones(retain_mask) * 2 > H;
      min_vld = cl.size() > 0;
      pick = min_vld ? cl[$urandom_range(0, cl.size() - 1)] : 0;
      min_idx = 3'(pick);
      commit = 1;
      @(negedge clk);
      commit = 0;
      checks++;
      if (!done || store_x !== pop) begin failures++; $display("FAIL done/store_x"); end
      if (pop) n_x++;
      if (mcnt[h] < NS) begin
        checks++;
        if (wr_slot !== 3'(mcnt[h]) || evicted || no_victim) begin failures++; $display("FAIL fill"); end
        mpos[h][mcnt[h]] = pos[h]; mfmt[h][mcnt[h]] = pop; mcnt[h]++; n_fill++;
      end else if (min_vld) begin
        checks++;
        if (wr_slot !== 3'(pick) || !evicted || no_victim) begin failures++; $display("FAIL evict"); end
        mpos[h][pick] = pos[h]; mfmt[h][pick] = pop; n_evict++;
      end else begin
        checks++;
        if (!no_victim || evicted) begin failures++; $display("FAIL no_victim"); end
        n_novic++;
      end
      pos[h]++;
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("FAIL done not a pulse"); end
    end
    checks++;
    if (n_evict == 0 || n_fill == 0 || n_x == 0) begin failures++; $display("FAIL coverage"); end
    $display("fill %0d evict %0d no_victim %0d store_x %0d", n_fill, n_evict, n_novic, n_x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
