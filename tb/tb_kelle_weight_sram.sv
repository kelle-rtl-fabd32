// tb_kelle_weight_sram: random writes and reads of 4-lane 8-bit words
// against a shadow copy; read data must appear one cycle after the read
// and hold while the SRAM is idle.
module tb_kelle_weight_sram;
  localparam int DEPTH = 64, L = 4;
  logic clk = 0;
  always #1 clk = ~clk;
  logic en, we;
  logic [5:0] addr;
  logic [L*8-1:0] wdata, rdata;
  kelle_weight_sram #(.DEPTH(DEPTH), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  logic [L*8-1:0] shadow [DEPTH];
  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 6'(i); wdata = $urandom; shadow[i] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      logic [5:0] a;
      a = 6'($urandom);
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk); en = 1; we = 1; addr = a; wdata = $urandom; shadow[a] = wdata;
      end else begin
        @(negedge clk); en = 1; we = 0; addr = a;
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== shadow[a]) begin failures++; $display("FAIL read %0d", a); end
        @(negedge clk);
        checks++;
        if (rdata !== shadow[a]) begin failures++; $display("FAIL hold %0d", a); end
      end
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
