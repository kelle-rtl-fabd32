// kelle_pe: one processing element of the reconfigurable systolic array.
//
// The PE holds a stationary 16-bit operand (a weight, sign-extended from 8
// bits, or one element of a key or value vector) and performs one
// multiply-accumulate per cycle on the operand streaming past it. It keeps
// two registers besides the stationary one: the streamed operand with its
// valid bit, which is passed on to the next PE, and the partial sum.
//
// Reconfiguration (in-place transposed multiplication): in RSA_NORMAL the
// streamed operand arrives from the PE above and the partial sum from the
// PE to the left; in RSA_TRANSPOSE the streamed operand arrives from the
// left and the partial sum from above. The registered outputs feed both
// neighbours, the array picks the ones it needs. The mode must not change
// while data is in flight.
//
// Timing: one cycle from inputs to registered outputs. load_en writes the
// stationary operand. Weight-stationary data flow and reconfigurability
// follow the paper; 16-bit operands and the two-direction mux are choices
// of this design (see the README on the 8-bit MAC statement).
module kelle_pe
  import kelle_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  rsa_mode_e mode,
  input  logic      load_en,
  input  data_t     load_w,
  // streamed operand: from above (normal) or from the left (transpose)
  input  data_t     act_n,
  input  logic      vld_n,
  input  data_t     act_w,
  input  logic      vld_w,
  // partial sum: from the left (normal) or from above (transpose)
  input  acc_t      psum_w,
  input  acc_t      psum_n,
  output data_t     act_o,
  output logic      vld_o,
  output acc_t      psum_o,
  output logic      psum_vld_o
);
  data_t w_q;
  data_t act_in;
  logic  vld_in;
  acc_t  psum_in;

  always_comb begin
    act_in  = (mode == RSA_NORMAL) ? act_n  : act_w;
    vld_in  = (mode == RSA_NORMAL) ? vld_n  : vld_w;
    psum_in = (mode == RSA_NORMAL) ? psum_w : psum_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q        <= '0;
      act_o      <= '0;
      vld_o      <= 1'b0;
      psum_o     <= '0;
      psum_vld_o <= 1'b0;
    end else begin
      if (load_en) w_q <= load_w;
      act_o      <= act_in;
      vld_o      <= vld_in;
      psum_o     <= psum_in + acc_t'(act_in) * acc_t'(w_q);
      psum_vld_o <= vld_in;
    end
  end
endmodule
