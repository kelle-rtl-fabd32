// tb_kelle_pe: checks one processing element in both data-flow modes.
// Random operands; the expected partial sum psum_in + act*w and the
// forwarding of the streamed operand and valid bit are computed here and
// compared one cycle later.
module tb_kelle_pe;
  import kelle_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  rsa_mode_e mode;
  logic load_en, vld_n, vld_w, vld_o, psum_vld_o;
  data_t load_w, act_n, act_w, act_o;
  acc_t psum_w, psum_n, psum_o;
  kelle_pe dut (.*);
  int checks = 0, failures = 0;

  initial begin
    data_t w;
    mode = RSA_NORMAL; load_en = 0; load_w = '0; act_n = '0; act_w = '0;
    vld_n = 0; vld_w = 0; psum_w = '0; psum_n = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      data_t a; acc_t p; logic v; acc_t exp_p;
      w = data_t'($urandom);
      @(negedge clk); load_en = 1; load_w = w;
      @(negedge clk); load_en = 0;
      mode = (i % 2) ? RSA_TRANSPOSE : RSA_NORMAL;
      a = data_t'($urandom); p = acc_t'($signed({$urandom, $urandom}) >>> 30); v = $urandom_range(0, 1);
      act_n = (mode == RSA_NORMAL) ? a : data_t'($urandom);
      act_w = (mode == RSA_NORMAL) ? data_t'($urandom) : a;
      vld_n = (mode == RSA_NORMAL) ? v : ~v;
      vld_w = (mode == RSA_NORMAL) ? ~v : v;
      psum_w = (mode == RSA_NORMAL) ? p : acc_t'($urandom);
      psum_n = (mode == RSA_NORMAL) ? acc_t'($urandom) : p;
      exp_p = p + acc_t'(a) * acc_t'(w);
      @(negedge clk);
      checks++; if (psum_o !== exp_p) begin failures++; $display("FAIL psum %0d exp %0d", psum_o, exp_p); end
      checks++; if (act_o !== a || vld_o !== v || psum_vld_o !== v) begin failures++; $display("FAIL fwd"); end
    end
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
