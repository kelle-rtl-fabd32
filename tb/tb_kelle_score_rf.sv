// tb_kelle_score_rf: random writes of {valid, score}; checks the group read
// of 8 aligned entries and both single read ports against a shadow copy,
// and that clear_all invalidates every entry.
module tb_kelle_score_rf;
  import kelle_pkg::*;
  localparam int DEPTH = 64, R = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear_all, we, wvalid, rvalid_a, rvalid_b;
  logic [5:0] waddr, gaddr, raddr_a, raddr_b;
  score_t wscore, rscore_a, rscore_b;
  score_t gscore [R]; logic gvalid [R];
  kelle_score_rf #(.DEPTH(DEPTH), .ROWS(R)) dut (.*);
  int checks = 0, failures = 0;
  int sh_s [DEPTH]; bit sh_v [DEPTH];

  initial begin
    clear_all = 0; we = 0; wvalid = 0; waddr = '0; wscore = '0; gaddr = '0; raddr_a = '0; raddr_b = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin sh_v[i] = 0; sh_s[i] = 0; end
    for (int i = 0; i < 600; i++) begin
      if (i == 300) begin
        clear_all = 1; @(negedge clk); clear_all = 0;
        for (int j = 0; j < DEPTH; j++) sh_v[j] = 0;
      end
      we = 1; waddr = 6'($urandom); wvalid = $urandom_range(0, 3) != 0; wscore = score_t'($urandom);
      @(negedge clk); we = 0;
      sh_v[waddr] = wvalid;
      sh_s[waddr] = wscore;
      gaddr = 6'($urandom); raddr_a = 6'($urandom); raddr_b = 6'($urandom);
      #0.5;
      for (int r = 0; r < R; r++) begin
        int a;
        a = (int'(gaddr) / R) * R + r;
        checks++;
        if (gvalid[r] !== sh_v[a] || (sh_v[a] && gscore[r] !== score_t'(sh_s[a]))) begin
          failures++; $display("FAIL group %0d", a);
        end
      end
      checks++;
      if (rvalid_a !== sh_v[raddr_a] || (sh_v[raddr_a] && rscore_a !== score_t'(sh_s[raddr_a]))) failures++;
      checks++;
      if (rvalid_b !== sh_v[raddr_b] || (sh_v[raddr_b] && rscore_b !== score_t'(sh_s[raddr_b]))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
