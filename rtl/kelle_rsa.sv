// kelle_rsa: the reconfigurable systolic array (RSA), ROWS x COLS PEs,
// weight stationary.
//
// Loading: load_valid with load_row = r writes load_data[c] into PE(r,c);
// one row per cycle, so a full tile takes ROWS cycles.
//
// Normal mode (matrix-vector, e.g. x*W, or q*K^T with key vectors as rows):
// a vector in_top[0..COLS-1] is accepted with in_valid. Column c is delayed
// by c cycles inside the array (input skew), the value moves down and the
// partial sum of row r moves right. row_out[r] = sum_c W[r][c]*in_top[c]
// appears with row_vld[r] COLS+r cycles after in_valid, so rows complete
// one per cycle from top to bottom, the order the systolic evictor relies
// on. Vectors may be given on consecutive cycles (a batch, as when a
// recomputed token's input vector is appended to the current one).
//
// Transpose mode (e.g. probabilities times V with value vectors as rows):
// in_left[0..ROWS-1] enters at the left, row r delayed by r cycles;
// col_out[c] = sum_r W[r][c]*in_left[r] appears with col_vld[c] ROWS+c
// cycles after in_valid.
//
// The skew registers, the per-row valid flags and the edge ports are choices
// of this design; the paper gives the 32x32 size, weight stationarity,
// staggered input and in-place transposition.
module kelle_rsa
  import kelle_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  rsa_mode_e               mode,
  input  logic                    load_valid,
  input  logic [$clog2(ROWS)-1:0] load_row,
  input  data_t                   load_data [COLS],
  input  logic                    in_valid,
  input  data_t                   in_top    [COLS],
  input  data_t                   in_left   [ROWS],
  output acc_t                    row_out   [ROWS],
  output logic                    row_vld   [ROWS],
  output acc_t                    col_out   [COLS],
  output logic                    col_vld   [COLS]
);
  // skewed edge inputs
  data_t top_sk  [COLS];
  logic  top_vk  [COLS];
  data_t left_sk [ROWS];
  logic  left_vk [ROWS];

  // skew for the top edge: column c delayed by c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_top_skew
    if (c == 0) begin : g_nodelay
      assign top_sk[c] = in_top[c];
      assign top_vk[c] = in_valid && (mode == RSA_NORMAL);
    end else begin : g_delay
      data_t d_q [c];
      logic  v_q [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) begin
            d_q[i] <= '0;
            v_q[i] <= 1'b0;
          end
        end else begin
          d_q[0] <= in_top[c];
          v_q[0] <= in_valid && (mode == RSA_NORMAL);
          for (int i = 1; i < c; i++) begin
            d_q[i] <= d_q[i-1];
            v_q[i] <= v_q[i-1];
          end
        end
      end
      assign top_sk[c] = d_q[c-1];
      assign top_vk[c] = v_q[c-1];
    end
  end

  // skew for the left edge: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_left_skew
    if (r == 0) begin : g_nodelay
      assign left_sk[r] = in_left[r];
      assign left_vk[r] = in_valid && (mode == RSA_TRANSPOSE);
    end else begin : g_delay
      data_t d_q [r];
      logic  v_q [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            d_q[i] <= '0;
            v_q[i] <= 1'b0;
          end
        end else begin
          d_q[0] <= in_left[r];
          v_q[0] <= in_valid && (mode == RSA_TRANSPOSE);
          for (int i = 1; i < r; i++) begin
            d_q[i] <= d_q[i-1];
            v_q[i] <= v_q[i-1];
          end
        end
      end
      assign left_sk[r] = d_q[r-1];
      assign left_vk[r] = v_q[r-1];
    end
  end

  // PE grid
  data_t act_q  [ROWS][COLS];
  logic  vld_q  [ROWS][COLS];
  acc_t  psum_q [ROWS][COLS];
  logic  pv_q   [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      data_t a_n, a_w;
      logic  v_n, v_w;
      acc_t  p_w, p_n;
      assign a_n = (r == 0) ? top_sk[c]  : act_q[(r == 0) ? 0 : r-1][c];
      assign v_n = (r == 0) ? top_vk[c]  : vld_q[(r == 0) ? 0 : r-1][c];
      assign a_w = (c == 0) ? left_sk[r] : act_q[r][(c == 0) ? 0 : c-1];
      assign v_w = (c == 0) ? left_vk[r] : vld_q[r][(c == 0) ? 0 : c-1];
      assign p_w = (c == 0) ? '0 : psum_q[r][(c == 0) ? 0 : c-1];
      assign p_n = (r == 0) ? '0 : psum_q[(r == 0) ? 0 : r-1][c];
      kelle_pe u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .mode      (mode),
        .load_en   (load_valid && (load_row == r[$clog2(ROWS)-1:0])),
        .load_w    (load_data[c]),
        .act_n     (a_n),
        .vld_n     (v_n),
        .act_w     (a_w),
        .vld_w     (v_w),
        .psum_w    (p_w),
        .psum_n    (p_n),
        .act_o     (act_q[r][c]),
        .vld_o     (vld_q[r][c]),
        .psum_o    (psum_q[r][c]),
        .psum_vld_o(pv_q[r][c])
      );
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row_out
    assign row_out[r] = psum_q[r][COLS-1];
    assign row_vld[r] = pv_q[r][COLS-1] && (mode == RSA_NORMAL);
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col_out
    assign col_out[c] = psum_q[ROWS-1][c];
    assign col_vld[c] = pv_q[ROWS-1][c] && (mode == RSA_TRANSPOSE);
  end

  // The data flow must not be switched while operands are in the array.
  property p_mode_stable;
    @(posedge clk) disable iff (!rst_n)
      (vld_q[ROWS-1][COLS-1] || pv_q[ROWS-1][COLS-1]) |-> $stable(mode);
  endproperty
  a_mode_stable: assert property (p_mode_stable);
endmodule
