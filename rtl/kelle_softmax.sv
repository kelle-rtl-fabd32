// kelle_softmax: softmax unit of the SFU with online maximum (Softermax
// style), base 2.
//
// Pass 1 (acc_vld, one score per cycle, as the scores come out of the
// array): x = score >>> SM_SHIFT is read as a base-2 exponent with 4
// fractional bits. The unit keeps the running maximum m and the running
// denominator d = sum 2^(x_i - m) (1.0 = 2**15). When a new maximum
// arrives the old denominator is rescaled by 2^(m_old - m_new) first, so
// the scores are read only once in this pass and never stored for a max
// search.
// finalize: one cycle, computes recip = 2**30 / d.
// Pass 2 (norm_vld): prob = 2^(x - m) * recip >> 15, registered, one cycle
// latency, unsigned with 1.0 = 2**15, clamped to 2**15-1 so it can be fed
// to the array as a signed 16-bit operand.
//
// 2^(-e) for e >= 0 is a 16-entry table of 2^(-f/16) (f = fractional
// part, entry f = round(2**15 * 2**(-f/16))) followed by a right shift by
// the integer part. Online max follows the paper (which cites Softermax);
// base 2, the table and the fixed-point formats are this design's choice.
module kelle_softmax
  import kelle_pkg::*;
#(
  parameter int unsigned SM_SHIFT = 12
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  acc_vld,
  input  acc_t  acc_score,
  input  logic  finalize,
  input  logic  norm_vld,
  input  acc_t  norm_score,
  output logic  prob_vld,
  output prob_t prob
);
  localparam logic [15:0] EXP2_LUT [16] = '{
    16'd32768, 16'd31379, 16'd30048, 16'd28774, 16'd27554, 16'd26386,
    16'd25268, 16'd24196, 16'd23170, 16'd22188, 16'd21247, 16'd20347,
    16'd19484, 16'd18658, 16'd17867, 16'd17109};

  typedef logic signed [31:0] lg_t;

  // 2^(-e/16) * 2**15 for e >= 0
  function automatic logic [15:0] exp2neg(lg_t e);
    lg_t n;
    n = e >>> 4;
    if (e < 0)        return 16'd32768;
    else if (n >= 16) return 16'd0;
    else              return EXP2_LUT[e[3:0]] >> n[3:0];
  endfunction

  function automatic lg_t to_log2(acc_t s);
    acc_t v;
    v = s >>> SM_SHIFT;
    if (v > acc_t'(32'sh3fff_ffff))       return lg_t'(32'sh3fff_ffff);
    else if (v < -acc_t'(32'sh3fff_ffff)) return -lg_t'(32'sh3fff_ffff);
    else                                  return lg_t'(v);
  endfunction

  lg_t         m_q;
  logic [31:0] d_q;
  logic        have_q;
  logic [31:0] recip_q;

  lg_t         x1, x2;
  logic [15:0] e_new, e_norm;
  logic [63:0] d_scaled, p_full;

  always_comb begin
    x1       = to_log2(acc_score);
    x2       = to_log2(norm_score);
    e_new    = exp2neg(m_q - x1);        // not a new max: add 2^(x1-m)
    // new max: rescale the old denominator by 2^(m_old - x1)
    d_scaled = ((64'(d_q) * 64'(exp2neg(x1 - m_q))) >> 15);
    e_norm   = exp2neg(m_q - x2);
    p_full   = (64'(e_norm) * 64'(recip_q)) >> 15;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q      <= '0;
      d_q      <= '0;
      have_q   <= 1'b0;
      recip_q  <= '0;
      prob_vld <= 1'b0;
      prob     <= '0;
    end else begin
      prob_vld <= 1'b0;
      if (clear) begin
        have_q <= 1'b0;
        d_q    <= '0;
        m_q    <= '0;
      end else if (acc_vld) begin
        have_q <= 1'b1;
        if (!have_q) begin
          m_q <= x1;
          d_q <= 32'd32768;
        end else if (x1 > m_q) begin
          m_q <= x1;
          d_q <= d_scaled[31:0] + 32'd32768;
        end else begin
          d_q <= d_q + 32'(e_new);
        end
      end
      if (finalize) recip_q <= (d_q == 0) ? 32'd0 : (32'd1 << 30) / d_q;
      if (norm_vld) begin
        prob_vld <= 1'b1;
        prob     <= (p_full > 64'd32767) ? prob_t'(16'd32767) : prob_t'(p_full[15:0]);
      end
    end
  end
endmodule
