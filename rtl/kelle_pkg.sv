// kelle_pkg: types, constants and fixed-point helpers shared by the Kelle
// attention accelerator.
//
// Number formats. Activations, queries, keys and values are 16-bit signed
// fixed point; weights are 8-bit signed. Products are accumulated in
// ACC_W-bit signed partial sums. Importance scores are 4-bit unsigned, as in
// the register file of the memory subsystem. Softmax probabilities are
// unsigned with 1.0 = 2**15 (clamped to 2**15-1 before they re-enter the
// array as signed 16-bit operands).
//
// Which numbers follow the paper: 16-bit activations and KV vectors, 8-bit
// weights, 4-bit importance scores, the bit split into MSB (15:8) and LSB
// (7:0) halves. The accumulator width, the score quantisation shift and the
// softmax fixed-point format are choices of this design.
package kelle_pkg;

  localparam int unsigned DATA_W  = 16;   // activation / KV element width
  localparam int unsigned WGT_W   = 8;    // weight width
  localparam int unsigned ACC_W   = 40;   // partial-sum width
  localparam int unsigned SCORE_W = 4;    // importance score width
  localparam int unsigned PROB_W  = 16;   // softmax probability width (1.0 = 2**15)

  typedef logic signed [DATA_W-1:0]  data_t;
  typedef logic signed [WGT_W-1:0]   wgt_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic        [SCORE_W-1:0] score_t;
  typedef logic        [PROB_W-1:0]  prob_t;

  // Data flow of the reconfigurable systolic array.
  //   RSA_NORMAL:    streamed operand enters at the top and moves down,
  //                  partial sums move right; row r yields sum_c W[r][c]*x[c].
  //   RSA_TRANSPOSE: streamed operand enters at the left and moves right,
  //                  partial sums move down; column c yields sum_r W[r][c]*a[r].
  typedef enum logic {RSA_NORMAL = 1'b0, RSA_TRANSPOSE = 1'b1} rsa_mode_e;

  // Refresh groups of 2DRP inside one bank half (MSB or LSB banks).
  typedef enum logic {GRP_HST = 1'b0, GRP_LST = 1'b1} rgroup_e;

  // Operations of one decoding step in the order the Kelle scheduler issues them.
  typedef enum logic [2:0] {
    OP_IDLE   = 3'd0,
    OP_MM_Q   = 3'd1,
    OP_MM_K   = 3'd2,
    OP_MM_QK  = 3'd3,
    OP_SM     = 3'd4,
    OP_MM_V   = 3'd5,
    OP_MM_AV  = 3'd6,
    OP_UPDATE = 3'd7
  } sched_op_e;

  // Saturate a partial sum, shifted right arithmetically by sh, to 16 bits.
  function automatic data_t requant(acc_t v, int unsigned sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction

  // Quantise one attention score q.k (not passed through softmax) to the
  // 4-bit increment added to a token's importance score: shift right,
  // clamp negatives to 0 and large values to 15.
  function automatic score_t score_incr(acc_t v, int unsigned sh);
    acc_t s;
    s = v >>> sh;
    if (s < 0)                          return '0;
    else if (s > acc_t'(2**SCORE_W-1))  return '1;
    else                                return score_t'(s[SCORE_W-1:0]);
  endfunction

  // Saturating 4-bit addition of importance scores.
  function automatic score_t score_add(score_t a, score_t b);
    logic [SCORE_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[SCORE_W] ? '1 : s[SCORE_W-1:0];
  endfunction

endpackage
