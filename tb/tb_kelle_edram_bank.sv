// tb_kelle_edram_bank: random reads, writes and refresh requests against a
// shadow copy of the memory. Checks read data, that refresh never alters
// data (including a write into the row whose write-back is pending), that a
// refresh is granted only in a cycle without an access, and that every
// grant is followed by exactly one ref_done.
module tb_kelle_edram_bank;
  localparam int DEPTH = 64, WIDTH = 24;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic en, we, ref_req, ref_gnt, ref_done;
  logic [5:0] addr, ref_addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [31:0] ref_count;
  kelle_edram_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] shadow [DEPTH];
  int grants = 0, dones = 0;

  always @(posedge clk) if (rst_n) begin
    if (ref_gnt) grants++;
    if (ref_done) dones++;
  end

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0; ref_req = 0; ref_addr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 6'(i); wdata = WIDTH'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int i = 0; i < 3000; i++) begin
      int kind;
      logic rd; logic [5:0] ra;
      kind = $urandom_range(0, 9);
      ref_req = ($urandom_range(0, 1) == 1); ref_addr = 6'($urandom);
      rd = 0;
      if (kind < 3) begin
        en = 1; we = 1; addr = 6'($urandom); wdata = WIDTH'($urandom); shadow[addr] = wdata;
      end else if (kind < 6) begin
        en = 1; we = 0; addr = 6'($urandom); rd = 1; ra = addr;
      end else begin
        en = 0; we = 0;
      end
      #0.5;
      checks++;
      if (ref_gnt && en) begin failures++; $display("FAIL grant during access"); end
      @(negedge clk);
      if (rd) begin
        checks++;
        if (rdata !== shadow[ra]) begin failures++; $display("FAIL read %0d got %h exp %h", ra, rdata, shadow[ra]); end
      end
    end
    en = 0; we = 0; ref_req = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 6'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== shadow[i]) begin failures++; $display("FAIL final %0d", i); end
    end
    checks++;
    if (grants != dones || grants == 0 || ref_count != 32'(dones)) begin
      failures++; $display("FAIL grants %0d dones %0d count %0d", grants, dones, ref_count);
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
