// kelle_refresh_ctrl: one refresh controller of the 2D adaptive refresh
// policy (2DRP). The accelerator has two, one for the MSB banks and one for
// the LSB banks of the KV cache, each with its own pair of intervals.
//
// Tokens are split into two groups by importance score: high-score tokens
// (HST, score >= HST_MIN) and low-score tokens (LST). A free-running counter
// per group counts that group's refresh interval (INT_HST, INT_LST cycles).
// When one expires the group's refresh becomes pending and the controller
// sweeps all DEPTH addresses: it looks each one up in the score register
// file (rf_raddr -> rf_valid, rf_score), skips empty entries and entries of
// the other group, and for each entry of the group raises ref_req until the
// banks grant it. Requests are only raised while enable is high (the KV
// cache is not being used by the computation), so refresh stays off the
// critical path; stall_cycles counts cycles a sweep waited for that.
// A group that expires again before its sweep finished is counted in
// overruns. HST sweeps go first when both are pending.
//
// Timing: one address per cycle for skipped entries; a refreshed entry takes
// at least two cycles (the banks' read and write back).
//
// From the paper: two groups per bank half by attention score, one counter
// per group, iterating over the entries, reading the score from the
// register file, refresh when the vectors are not in use. Default intervals
// are the paper's MSB intervals at 1 GHz (HST 0.36 ms, LST 1.44 ms); the
// LSB controller is given 5.4 ms and 7.2 ms by the top. The threshold
// HST_MIN is this design's choice.
module kelle_refresh_ctrl
  import kelle_pkg::*;
#(
  parameter int unsigned DEPTH   = 8192,
  parameter int unsigned INT_HST = 360_000,
  parameter int unsigned INT_LST = 1_440_000,
  parameter int unsigned HST_MIN = 8,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  output logic [AW-1:0] rf_raddr,
  input  logic          rf_valid,
  input  score_t        rf_score,
  output logic          ref_req,
  output logic [AW-1:0] ref_addr,
  input  logic          ref_gnt,
  output logic          sweeping,
  output logic [31:0]   expired_hst,
  output logic [31:0]   expired_lst,
  output logic [31:0]   refreshed_hst,
  output logic [31:0]   refreshed_lst,
  output logic [31:0]   stall_cycles,
  output logic [31:0]   overruns
);
  logic [31:0]   cnt_q [2];
  logic [1:0]    pend_q;
  logic          busy_q;
  rgroup_e       grp_q;
  logic [AW-1:0] addr_q;

  logic    hit;
  rgroup_e ent_grp;
  logic    advance;

  assign rf_raddr = addr_q;
  assign ref_addr = addr_q;
  assign sweeping = busy_q;
  always_comb begin
    ent_grp = (rf_score >= score_t'(HST_MIN)) ? GRP_HST : GRP_LST;
    hit     = busy_q && rf_valid && (ent_grp == grp_q);
    ref_req = hit && enable;
    advance = busy_q && (!hit || (ref_req && ref_gnt));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q[0]      <= '0;
      cnt_q[1]      <= '0;
      pend_q        <= '0;
      busy_q        <= 1'b0;
      grp_q         <= GRP_HST;
      addr_q        <= '0;
      expired_hst   <= '0;
      expired_lst   <= '0;
      refreshed_hst <= '0;
      refreshed_lst <= '0;
      stall_cycles  <= '0;
      overruns      <= '0;
    end else begin
      logic [1:0] pend_n;
      pend_n = pend_q;
      // interval counters
      if (cnt_q[0] == INT_HST - 1) begin
        cnt_q[0]    <= '0;
        expired_hst <= expired_hst + 1;
        if (pend_n[0]) overruns <= overruns + 1;
        pend_n[0] = 1'b1;
      end else cnt_q[0] <= cnt_q[0] + 1;
      if (cnt_q[1] == INT_LST - 1) begin
        cnt_q[1]    <= '0;
        expired_lst <= expired_lst + 1;
        if (pend_n[1]) overruns <= overruns + 1;
        pend_n[1] = 1'b1;
      end else cnt_q[1] <= cnt_q[1] + 1;

      // sweep
      if (!busy_q) begin
        if (pend_n[0]) begin
          busy_q <= 1'b1;
          grp_q  <= GRP_HST;
          addr_q <= '0;
          pend_n[0] = 1'b0;
        end else if (pend_n[1]) begin
          busy_q <= 1'b1;
          grp_q  <= GRP_LST;
          addr_q <= '0;
          pend_n[1] = 1'b0;
        end
      end else begin
        if (hit && !enable) stall_cycles <= stall_cycles + 1;
        if (ref_req && ref_gnt) begin
          if (grp_q == GRP_HST) refreshed_hst <= refreshed_hst + 1;
          else                  refreshed_lst <= refreshed_lst + 1;
        end
        if (advance) begin
          if (addr_q == AW'(DEPTH - 1)) busy_q <= 1'b0;
          else                          addr_q <= addr_q + 1'b1;
        end
      end
      pend_q <= pend_n;
    end
  end
endmodule
