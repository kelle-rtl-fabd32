// tb_kelle_softmax: random score sets of 1..40 values. The probabilities are
// checked against the exact softmax in base 2 computed here with real
// arithmetic (tolerance 2% of 1.0 plus 3% relative, from the 16-entry
// table and truncations), and their sum against 1.0 within 2%.
module tb_kelle_softmax;
  import kelle_pkg::*;
  localparam int SH = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear, acc_vld, finalize, norm_vld, prob_vld;
  acc_t acc_score, norm_score;
  prob_t prob;
  kelle_softmax #(.SM_SHIFT(SH)) dut (.*);
  int checks = 0, failures = 0;

  initial begin
    clear = 0; acc_vld = 0; finalize = 0; norm_vld = 0; acc_score = '0; norm_score = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int set = 0; set < 50; set++) begin
      int n; longint sc [40]; real mx, den, ex, got, psum;
      n = $urandom_range(1, 40);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      mx = -1.0e30;
      for (int i = 0; i < n; i++) begin
        sc[i] = longint'($urandom_range(0, 20000)) - 10000;
        acc_vld = 1; acc_score = acc_t'(sc[i]);
        @(negedge clk);
      end
      acc_vld = 0;
      // exact reference: x = score / 2^SH / 16 in base-2 exponent units
      for (int i = 0; i < n; i++) if (real'(sc[i] >>> SH) / 16.0 > mx) mx = real'(sc[i] >>> SH) / 16.0;
      den = 0.0;
      for (int i = 0; i < n; i++) den += 2.0 ** (real'(sc[i] >>> SH) / 16.0 - mx);
      finalize = 1; @(negedge clk); finalize = 0;
      psum = 0.0;
      for (int i = 0; i < n; i++) begin
        norm_vld = 1; norm_score = acc_t'(sc[i]);
        @(negedge clk);
        norm_vld = 0;
        ex  = 2.0 ** (real'(sc[i] >>> SH) / 16.0 - mx) / den;
        got = real'(prob) / 32768.0;
        psum += got;
        checks++;
        if (!prob_vld || (got - ex > 0.02 + 0.03 * ex) || (ex - got > 0.02 + 0.03 * ex)) begin
          failures++; $display("FAIL set %0d i %0d got %f exp %f", set, i, got, ex);
        end
      end
      checks++;
      if (psum < 0.98 || psum > 1.02) begin failures++; $display("FAIL sum %f", psum); end
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
