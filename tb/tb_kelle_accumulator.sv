// tb_kelle_accumulator: sequences of random partial sums over 1..6 passes per
// lane, lanes arriving staggered; checks the running sum presented in the
// last pass and the requantised lane value against sums computed here.
module tb_kelle_accumulator;
  import kelle_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic first, last;
  logic [5:0] shift;
  logic in_vld [L]; acc_t in_data [L];
  acc_t sum [L]; logic sum_vld [L]; data_t q [L];
  kelle_accumulator #(.LANES(L)) dut (.*);
  int checks = 0, failures = 0;

  initial begin
    longint ref_s [L];
    first = 0; last = 0; shift = 6'd4;
    for (int l = 0; l < L; l++) begin in_vld[l] = 0; in_data[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int seq = 0; seq < 40; seq++) begin
      int passes;
      passes = $urandom_range(1, 6);
      shift = 6'($urandom_range(0, 12));
      for (int l = 0; l < L; l++) ref_s[l] = 0;
      for (int p = 0; p < passes; p++) begin
        first = (p == 0); last = (p == passes - 1);
        for (int l = 0; l < L; l++) begin
          longint v;
          v = longint'($urandom_range(0, 2000000)) - 1000000;
          ref_s[l] += v;
          in_vld[l] = 1; in_data[l] = acc_t'(v);
          #0.5;
          checks++;
          if (sum_vld[l] !== last || (last && sum[l] !== acc_t'(ref_s[l]))) begin
            failures++; $display("FAIL lane %0d sum %0d exp %0d", l, sum[l], ref_s[l]);
          end
          @(negedge clk);
          in_vld[l] = 0;
        end
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (q[l] !== requant(acc_t'(ref_s[l]), shift)) begin
          failures++; $display("FAIL q lane %0d got %0d", l, q[l]);
        end
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
