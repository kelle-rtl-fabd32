// kelle_score_rf: register file of importance scores, one entry per KV
// cache address ({layer-head, slot}), each a valid bit and a 4-bit score.
//
// Ports: one write port (we, waddr, wvalid, wscore); a group read of ROWS
// consecutive entries starting at a ROWS-aligned address (gaddr), used to
// preload the systolic evictor; two single-entry read ports for the MSB and
// LSB refresh controllers, which look up each entry's refresh group while
// sweeping. clear_all invalidates every entry. Reads are combinational.
//
// 4-bit scores in a register file beside the banks follow the paper; the
// valid bit and the read ports are this design's choice.
module kelle_score_rf
  import kelle_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned ROWS  = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear_all,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic          wvalid,
  input  score_t        wscore,
  input  logic [AW-1:0] gaddr,
  output score_t        gscore [ROWS],
  output logic          gvalid [ROWS],
  input  logic [AW-1:0] raddr_a,
  output score_t        rscore_a,
  output logic          rvalid_a,
  input  logic [AW-1:0] raddr_b,
  output score_t        rscore_b,
  output logic          rvalid_b
);
  score_t     score_q [DEPTH];
  logic       valid_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) valid_q[i] <= 1'b0;
    end else if (clear_all) begin
      for (int i = 0; i < DEPTH; i++) valid_q[i] <= 1'b0;
    end else if (we) begin
      valid_q[waddr] <= wvalid;
    end
  end

  always_ff @(posedge clk) begin
    if (we) score_q[waddr] <= wscore;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_grp
    logic [AW-1:0] a;
    assign a         = {gaddr[AW-1:$clog2(ROWS)], ($clog2(ROWS))'(r)};
    assign gscore[r] = score_q[a];
    assign gvalid[r] = valid_q[a];
  end

  assign rscore_a = score_q[raddr_a];
  assign rvalid_a = valid_q[raddr_a];
  assign rscore_b = score_q[raddr_b];
  assign rvalid_b = valid_q[raddr_b];
endmodule
