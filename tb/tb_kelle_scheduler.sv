// tb_kelle_scheduler: runs several decoding steps, answering each operation
// with op_done after a random number of cycles. Checks the order of
// operations (MM_Q, MM_K, MM_QK, SM, MM_V, MM_AV, UPDATE), that op_start is
// a one-cycle pulse on entry to each operation, that kv_busy covers exactly
// the KV-cache operations, that step_done follows UPDATE, and the three
// lifetime counters against the cycle counts seen by the bench.
module tb_kelle_scheduler;
  import kelle_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start, op_done, op_start, busy, kv_busy, step_done;
  sched_op_e op;
  logic [31:0] life_q, life_k, life_v;
  kelle_scheduler dut (.*);
  int checks = 0, failures = 0;
  sched_op_e order [7] = '{OP_MM_Q, OP_MM_K, OP_MM_QK, OP_SM, OP_MM_V, OP_MM_AV, OP_UPDATE};
  longint cyc = 0;
  longint t_end [7];

  always @(posedge clk) cyc++;

  initial begin
    start = 0; op_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int step = 0; step < 20; step++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int k = 0; k < 7; k++) begin
        int d;
        bit exp_kv;
        checks++;
        if (op !== order[k] || !op_start || !busy) begin
          failures++; $display("FAIL step %0d op %0d got %s start %0d", step, k, op.name(), op_start);
        end
        exp_kv = (order[k] == OP_MM_QK) || (order[k] == OP_MM_AV) || (order[k] == OP_UPDATE);
        d = $urandom_range(0, 12);
        repeat (d) begin
          @(negedge clk);
          checks++;
          if (op_start || op !== order[k] || kv_busy !== exp_kv) begin failures++; $display("FAIL hold %s", order[k].name()); end
        end
        op_done = 1;
        @(posedge clk); t_end[k] = cyc;
        @(negedge clk); op_done = 0;
      end
      checks++;
      if (!step_done || busy) begin failures++; $display("FAIL step_done"); end
      checks++;
      if (life_q != 32'(t_end[2] - t_end[0]) || life_k != 32'(t_end[2] - t_end[1]) ||
          life_v != 32'(t_end[5] - t_end[4])) begin
        failures++; $display("FAIL lifetimes %0d %0d %0d exp %0d %0d %0d", life_q, life_k, life_v,
          t_end[2] - t_end[0], t_end[2] - t_end[1], t_end[5] - t_end[4]);
      end
      @(negedge clk);
      checks++;
      if (step_done) begin failures++; $display("FAIL step_done not a pulse"); end
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
