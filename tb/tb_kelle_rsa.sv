// tb_kelle_rsa: checks the reconfigurable systolic array at its full 32x32
// size. Normal mode: a random tile is loaded, a batch of two vectors (the
// current token and one recomputed token) is streamed on consecutive
// cycles, every row output is compared with sum_c W[r][c]*x[c] and its
// arrival cycle with the expected COLS + r (+1 for the second vector).
// Transpose mode: col_out[c] against sum_r W[r][c]*a[r] at ROWS + c.
module tb_kelle_rsa;
  import kelle_pkg::*;
  localparam int R = 32, C = 32;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  rsa_mode_e mode;
  logic load_valid, in_valid;
  logic [4:0] load_row;
  data_t load_data [C];
  data_t in_top [C];
  data_t in_left [R];
  acc_t row_out [R]; logic row_vld [R];
  acc_t col_out [C]; logic col_vld [C];
  kelle_rsa #(.ROWS(R), .COLS(C)) dut (.*);
  int checks = 0, failures = 0;
  int W [R][C];
  int xv [2][C];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_tile();
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      load_valid = 1; load_row = r[4:0];
      for (int c = 0; c < C; c++) begin W[r][c] = $urandom_range(0, 65535) - 32768; load_data[c] = W[r][c][15:0]; end
    end
    @(negedge clk); load_valid = 0;
  endtask

  initial begin
    longint t0;
    int seen [R];
    mode = RSA_NORMAL; load_valid = 0; in_valid = 0; load_row = '0;
    for (int c = 0; c < C; c++) begin load_data[c] = '0; in_top[c] = '0; in_left[c] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // ---- normal mode, batch of two vectors
      mode = RSA_NORMAL;
      load_tile();
      for (int b = 0; b < 2; b++) for (int c = 0; c < C; c++) xv[b][c] = $urandom_range(0, 65535) - 32768;
      @(negedge clk);
      in_valid = 1; for (int c = 0; c < C; c++) in_top[c] = xv[0][c][15:0];
      t0 = cyc;
      @(negedge clk);
      for (int c = 0; c < C; c++) in_top[c] = xv[1][c][15:0];
      @(negedge clk); in_valid = 0;
      for (int r = 0; r < R; r++) seen[r] = 0;
      repeat (2 * (R + C) + 4) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) if (row_vld[r]) begin
          longint e;
          int b;
          e = 0;
          b = seen[r];
          for (int c = 0; c < C; c++) e += longint'(W[r][c]) * xv[b][c];
          checks++;
          if (row_out[r] !== acc_t'(e) || (cyc - t0) != C + r + b) begin
            failures++;
            $display("FAIL normal row %0d vec %0d got %0d exp %0d at %0d exp %0d", r, b, row_out[r], e, cyc - t0, C + r + b);
          end
          seen[r]++;
        end
      end
      for (int r = 0; r < R; r++) begin checks++; if (seen[r] != 2) failures++; end
      // ---- transpose mode
      mode = RSA_TRANSPOSE;
      load_tile();
      for (int r = 0; r < R; r++) xv[0][r] = $urandom_range(0, 65535) - 32768;
      @(negedge clk);
      in_valid = 1; for (int r = 0; r < R; r++) in_left[r] = xv[0][r][15:0];
      t0 = cyc;
      @(negedge clk); in_valid = 0;
      for (int c = 0; c < C; c++) seen[c] = 0;
      repeat (R + C + 4) begin
        @(negedge clk);
        for (int c = 0; c < C; c++) if (col_vld[c]) begin
          longint e;
          e = 0;
          for (int r = 0; r < R; r++) e += longint'(W[r][c]) * xv[0][r];
          checks++;
          if (col_out[c] !== acc_t'(e) || (cyc - t0) != R + c) begin
            failures++;
            $display("FAIL transpose col %0d got %0d exp %0d at %0d", c, col_out[c], e, cyc - t0);
          end
          seen[c]++;
        end
      end
      for (int c = 0; c < C; c++) begin checks++; if (seen[c] != 1) failures++; end
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
