// tb_kelle_kv_cache: the KV cache at its full size (D = 128, 8 banks per
// group, 8192 words, 4 MB). Writes random key and value vectors to random
// addresses, reads them back and compares; checks that the MSB byte of
// element e sits in the Key-MSB bank e/16 and the LSB byte in the Key-LSB
// bank (by peeking at the bank arrays); runs MSB and LSB refreshes in
// between and checks that they leave the data intact and are counted.
module tb_kelle_kv_cache;
  import kelle_pkg::*;
  localparam int D = 128, DEPTH = 8192;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic en, we_k, we_v;
  logic [12:0] addr, msb_ref_addr, lsb_ref_addr;
  data_t wdata_k [D]; data_t wdata_v [D]; data_t rdata_k [D]; data_t rdata_v [D];
  logic msb_ref_req, msb_ref_gnt, msb_ref_done, lsb_ref_req, lsb_ref_gnt, lsb_ref_done;
  logic [31:0] msb_ref_count, lsb_ref_count;
  kelle_kv_cache dut (.*);
  int checks = 0, failures = 0;
  logic [12:0] addrs [16];
  int kref [16][D]; int vref [16][D];

  initial begin
    en = 0; we_k = 0; we_v = 0; addr = '0; msb_ref_req = 0; lsb_ref_req = 0;
    msb_ref_addr = '0; lsb_ref_addr = '0;
    for (int e = 0; e < D; e++) begin wdata_k[e] = '0; wdata_v[e] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      addrs[i] = 13'(i * 509 + 3);
      for (int e = 0; e < D; e++) begin
        kref[i][e] = $urandom_range(0, 65535); vref[i][e] = $urandom_range(0, 65535);
        wdata_k[e] = kref[i][e][15:0]; wdata_v[e] = vref[i][e][15:0];
      end
      @(negedge clk); en = 1; we_k = 1; we_v = 1; addr = addrs[i];
      @(negedge clk); en = 0; we_k = 0; we_v = 0;
    end
    // refresh the written rows in both halves
    for (int i = 0; i < 16; i++) begin
      msb_ref_req = 1; msb_ref_addr = addrs[i]; lsb_ref_req = 1; lsb_ref_addr = addrs[i];
      do @(negedge clk); while (!(msb_ref_gnt && lsb_ref_gnt) && 0);
      @(negedge clk);
    end
    msb_ref_req = 0; lsb_ref_req = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (msb_ref_count == 0 || lsb_ref_count == 0) begin failures++; $display("FAIL no refresh counted"); end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); en = 1; addr = addrs[i];
      @(negedge clk); en = 0;
      for (int e = 0; e < D; e++) begin
        checks++;
        if (rdata_k[e] !== kref[i][e][15:0] || rdata_v[e] !== vref[i][e][15:0]) begin
          failures++; $display("FAIL addr %0d e %0d k %h/%h v %h/%h", addrs[i], e, rdata_k[e], kref[i][e][15:0], rdata_v[e], vref[i][e][15:0]);
        end
      end
      // bank placement: element 17 -> Key-MSB bank 1 byte 1, Key-LSB bank 1 byte 1
      checks++;
      if (dut.g_grp[0].g_bank[1].u_bank.mem[addrs[i]][15:8] !== kref[i][17][15:8] ||
          dut.g_grp[2].g_bank[1].u_bank.mem[addrs[i]][15:8] !== kref[i][17][7:0] ||
          dut.g_grp[1].g_bank[7].u_bank.mem[addrs[i]][127:120] !== vref[i][127][15:8]) begin
        failures++; $display("FAIL bank placement");
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
