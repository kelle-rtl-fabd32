// kelle_accumulator: per-lane partial-sum accumulator behind the RSA.
//
// A dot product longer than the array (a 4096-element input vector, a
// 128-element head) is split into tiles of 32. Each pass of the array gives
// one partial sum per lane; this block adds it into lane register acc[l]
// (first pass of a sequence: overwrite). During the last pass it also
// presents the completed sum, combinationally, as sum[l] with sum_vld[l],
// in the cycle the array delivers that lane's partial, so the systolic
// evictor and softmax can consume complete scores row by row.
// q[l] is acc[l] shifted right by `shift` and saturated to 16 bits, the
// form written back to activation memory.
//
// Interface: first/last describe the current pass and must be held for the
// whole pass. Timing: in_vld[l] -> acc[l] one cycle later; sum is
// combinational. The paper names the accumulator only; this is the simplest
// form that fits the tiled data flow.
module kelle_accumulator
  import kelle_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        first,
  input  logic        last,
  input  logic [5:0]  shift,
  input  logic        in_vld  [LANES],
  input  acc_t        in_data [LANES],
  output acc_t        sum     [LANES],
  output logic        sum_vld [LANES],
  output data_t       q       [LANES]
);
  acc_t acc [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      sum[l]     = first ? in_data[l] : acc[l] + in_data[l];
      sum_vld[l] = in_vld[l] && last;
      q[l]       = requant(acc[l], 32'(shift));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         acc[l] <= '0;
      else if (in_vld[l]) acc[l] <= sum[l];
    end
  end
endmodule
