// kelle_scheduler: the Kelle scheduler, the order of operations of one
// decoding step of self-attention.
//
// On start it issues, one after another, MM_Q, MM_K, MM_QK (with the
// systolic evictor), SM (softmax), MM_V, MM_AV (probabilities times V) and
// UPDATE (eviction and write of the new token's K and V). Each operation is
// started with a one-cycle op_start and ends when the datapath answers
// op_done. MM_V is placed after the softmax, right before the values are
// consumed, and K is consumed by MM_QK right after MM_K: the new token's K
// and V are used as soon as they are produced, which shortens their
// lifetime in eDRAM (the baseline order computes Q, K and V first).
//
// kv_busy is high during the operations that read or write the KV cache
// (MM_QK, MM_AV, UPDATE); refresh is held off while it is set.
// The lifetime counters measure, in cycles, how long the produced Q, K and
// V waited in activation memory: from the end of the operation producing
// them to the end of the operation consuming them.
//
// The order follows the paper's schedule figure for Kelle. Overlapping the
// weight SRAM loads with KV cache loads, which that schedule also shows, is
// not done here: one array serves all operations and loads its tiles in turn.
module kelle_scheduler
  import kelle_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        op_done,
  output sched_op_e   op,
  output logic        op_start,
  output logic        busy,
  output logic        kv_busy,
  output logic        step_done,
  output logic [31:0] life_q,
  output logic [31:0] life_k,
  output logic [31:0] life_v
);
  logic [31:0] tq, tk, tv;
  logic        q_live, k_live, v_live;

  function automatic sched_op_e next_op(sched_op_e o);
    case (o)
      OP_MM_Q:  return OP_MM_K;
      OP_MM_K:  return OP_MM_QK;
      OP_MM_QK: return OP_SM;
      OP_SM:    return OP_MM_V;
      OP_MM_V:  return OP_MM_AV;
      OP_MM_AV: return OP_UPDATE;
      default:  return OP_IDLE;
    endcase
  endfunction

  assign busy    = (op != OP_IDLE);
  assign kv_busy = (op == OP_MM_QK) || (op == OP_MM_AV) || (op == OP_UPDATE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op        <= OP_IDLE;
      op_start  <= 1'b0;
      step_done <= 1'b0;
      tq <= '0; tk <= '0; tv <= '0;
      q_live <= 1'b0; k_live <= 1'b0; v_live <= 1'b0;
      life_q <= '0; life_k <= '0; life_v <= '0;
    end else begin
      op_start  <= 1'b0;
      step_done <= 1'b0;
      if (q_live) tq <= tq + 1;
      if (k_live) tk <= tk + 1;
      if (v_live) tv <= tv + 1;
      if (op == OP_IDLE) begin
        if (start) begin
          op       <= OP_MM_Q;
          op_start <= 1'b1;
        end
      end else if (op_done) begin
        case (op)
          OP_MM_Q:  begin q_live <= 1'b1; tq <= '0; end
          OP_MM_K:  begin k_live <= 1'b1; tk <= '0; end
          OP_MM_QK: begin q_live <= 1'b0; k_live <= 1'b0; life_q <= tq + 1; life_k <= tk + 1; end
          OP_MM_V:  begin v_live <= 1'b1; tv <= '0; end
          OP_MM_AV: begin v_live <= 1'b0; life_v <= tv + 1; end
          default: ;
        endcase
        op <= next_op(op);
        if (next_op(op) == OP_IDLE) step_done <= 1'b1;
        else                        op_start  <= 1'b1;
      end
    end
  end

  a_done_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    op_done |-> op != OP_IDLE);
endmodule
