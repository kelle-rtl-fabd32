// tb_kelle_refresh_ctrl: a 16-entry score file with fixed random contents,
// short retention intervals (HST 100 cycles, LST 250 cycles) and a memory
// that grants refresh requests at random, while the KV cache is marked busy
// (enable low) a third of the time. Checks:
//   - each interval counter expires exactly every INT cycles;
//   - no request is made while enable is low (refresh waits for the cache);
//   - every granted refresh hits a valid entry of the group being swept;
//   - each completed sweep refreshed every entry of its group exactly once;
//   - stall cycles were counted.
module tb_kelle_refresh_ctrl;
  import kelle_pkg::*;
  localparam int DEPTH = 16, IH = 100, IL = 250, HMIN = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic enable, rf_valid, ref_req, ref_gnt, sweeping;
  logic [3:0] rf_raddr, ref_addr;
  score_t rf_score;
  logic [31:0] expired_hst, expired_lst, refreshed_hst, refreshed_lst, stall_cycles, overruns;
  kelle_refresh_ctrl #(.DEPTH(DEPTH), .INT_HST(IH), .INT_LST(IL), .HST_MIN(HMIN)) dut (.*);
  int checks = 0, failures = 0;
  bit v [DEPTH]; int s [DEPTH];
  int hits [DEPTH];
  int n_hst = 0, n_lst = 0, sweeps_hst = 0, sweeps_lst = 0;
  longint cyc = 0;
  bit cur_hst;

  always_comb begin
    rf_valid = v[rf_raddr];
    rf_score = score_t'(s[rf_raddr]);
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      v[i] = $urandom_range(0, 3) != 0; s[i] = $urandom_range(0, 15); hits[i] = 0;
    end
    n_hst = 0; n_lst = 0;
    for (int i = 0; i < DEPTH; i++) if (v[i]) begin if (s[i] >= HMIN) n_hst++; else n_lst++; end
  end

  always @(negedge clk) begin
    enable  <= $urandom_range(0, 2) != 0;
    ref_gnt <= $urandom_range(0, 1) == 1;
  end

  // monitor: sample on the rising edge what the controller asked and got
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ref_req && !enable) begin failures++; $display("FAIL request while cache busy"); end
    if (ref_req && ref_gnt) begin
      bit is_hst;
      is_hst = rf_score >= score_t'(HMIN);
      checks++;
      if (!v[ref_addr] || (dut.grp_q == GRP_HST) != is_hst) begin
        failures++; $display("FAIL refresh of wrong entry %0d", ref_addr);
      end
      cur_hst = (dut.grp_q == GRP_HST);
      hits[ref_addr]++;
    end
  end

  // sweep end: every entry of the group refreshed once
  always @(negedge sweeping) if (rst_n) begin
    for (int i = 0; i < DEPTH; i++) begin
      bit in_grp;
      in_grp = v[i] && ((s[i] >= HMIN) == (dut.grp_q == GRP_HST));
      checks++;
      if (hits[i] != (in_grp ? 1 : 0)) begin failures++; $display("FAIL sweep entry %0d hits %0d", i, hits[i]); end
      hits[i] = 0;
    end
    if (dut.grp_q == GRP_HST) sweeps_hst++; else sweeps_lst++;
  end

  initial begin
    enable = 0; ref_gnt = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      checks++;
      if (expired_hst != 32'(cyc / IH) || expired_lst != 32'(cyc / IL)) begin
        failures++; $display("FAIL interval at %0d: %0d %0d", cyc, expired_hst, expired_lst);
      end
    end
    checks++;
    if (sweeps_hst == 0 || sweeps_lst == 0 || stall_cycles == 0) begin
      failures++; $display("FAIL coverage %0d %0d %0d", sweeps_hst, sweeps_lst, stall_cycles);
    end
    checks++;
    if (overruns != 0) begin failures++; $display("FAIL overruns"); end
    $display("sweeps hst %0d lst %0d refreshed %0d/%0d stalls %0d", sweeps_hst, sweeps_lst, refreshed_hst, refreshed_lst, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
