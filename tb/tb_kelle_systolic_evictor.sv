// tb_kelle_systolic_evictor: several searches over 1..4 groups of 8 rows.
// Scores are preloaded, complete q.k values arrive one row per cycle as
// from the array, some rows are not candidates. Checks every updated
// importance score (saturating 4-bit add of the quantised increment) and
// the final minimum {index, score} (lowest index on a tie) against a
// reference search, and that the minimum is ready in the cycle after the
// last row's score, without extra search cycles.
module tb_kelle_systolic_evictor;
  import kelle_pkg::*;
  localparam int R = 8, QS = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic preload, new_search;
  logic [6:0] group_base;
  score_t pre_score [R]; logic pre_cand [R];
  logic score_vld [R]; acc_t score [R];
  logic upd_vld [R]; score_t upd_score [R];
  logic min_vld; logic [6:0] min_idx; score_t min_score;
  kelle_systolic_evictor #(.ROWS(R), .IDX_W(7), .QSHIFT(QS)) dut (.*);
  int checks = 0, failures = 0;

  initial begin
    preload = 0; new_search = 0; group_base = '0;
    for (int r = 0; r < R; r++) begin pre_score[r] = '0; pre_cand[r] = 0; score_vld[r] = 0; score[r] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int srch = 0; srch < 60; srch++) begin
      int groups, bestv, besti;
      groups = $urandom_range(1, 4);
      bestv = 99; besti = -1;
      for (int g = 0; g < groups; g++) begin
        int s0 [R]; int sc [R]; bit cd [R]; int ns [R];
        @(negedge clk);
        preload = 1; new_search = (g == 0); group_base = 7'(g * R);
        for (int r = 0; r < R; r++) begin
          s0[r] = $urandom_range(0, 15); cd[r] = ($urandom_range(0, 3) != 0);
          pre_score[r] = score_t'(s0[r]); pre_cand[r] = cd[r];
        end
        @(negedge clk); preload = 0;
        for (int r = 0; r < R; r++) begin
          int inc;
          sc[r] = $urandom_range(0, 400) - 100;
          inc = sc[r] >>> QS; if (inc < 0) inc = 0; if (inc > 15) inc = 15;
          ns[r] = s0[r] + inc; if (ns[r] > 15) ns[r] = 15;
          if (cd[r] && ns[r] < bestv) begin bestv = ns[r]; besti = g * R + r; end
        end
        for (int r = 0; r < R; r++) begin
          score_vld[r] = 1; score[r] = acc_t'(sc[r]);
          @(negedge clk);
          score_vld[r] = 0;
          checks++;
          if (!upd_vld[r] || upd_score[r] != score_t'(ns[r])) begin
            failures++; $display("FAIL upd row %0d got %0d exp %0d", r, upd_score[r], ns[r]);
          end
        end
      end
      // the minimum is ready right after the last row
      checks++;
      if ((besti < 0 && min_vld) || (besti >= 0 && (!min_vld || min_idx != 7'(besti) || min_score != score_t'(bestv)))) begin
        failures++; $display("FAIL min got v%0d %0d/%0d exp %0d/%0d", min_vld, min_idx, min_score, besti, bestv);
      end
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
