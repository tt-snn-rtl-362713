// os_cluster_spike: output-stationary systolic array of ROWS x COLS PEs for
// cluster 1: 1x1 sub-convolution w(1) on binary input spikes, built from spike_pe (no multipliers).
//
// Row r computes output pixel r of a tile and column c output channel c, so
// the array produces C[r][c] = sum_k A[r][k] * B[k][c] with the reduction
// index k streamed in one step per cycle. The caller presents the k-th
// operands aligned (a_vec for all rows, b_vec for all columns, in_valid,
// in_first on k = 0); the cluster skews row r by r cycles and column c by
// c cycles itself. busy stays high while any operand is still moving; once
// it is low the results sit in the PEs. drain then shifts the accumulators
// down one row per cycle: out_vec is the bottom row, so drain cycle d gives
// the outputs of pixel row ROWS-1-d. Latency of one tile: K + ROWS + COLS
// cycles of compute plus ROWS drain cycles. The output-stationary dataflow
// and 32 PEs follow the paper; the 4x8 shape and the drain are own choices.
module os_cluster_spike
  import ttsnn_pkg::*;
#(
  parameter int unsigned ROWS = OS_ROWS,
  parameter int unsigned COLS = OS_COLS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic  a_vec [ROWS],
  input  w8_t  b_vec [COLS],
  input  logic drain,
  output logic busy,
  output acc_t out_vec [COLS]
);
  // ---- input skew ----
  logic  a_sk [ROWS];
  logic v_sk [ROWS];
  logic f_sk [ROWS];
  w8_t  b_sk [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_rskew
    if (r == 0) begin : g_0
      always_comb begin a_sk[0] = a_vec[0]; v_sk[0] = in_valid; f_sk[0] = in_first; end
    end else begin : g_n
      logic  ad [r];
      logic vd [r];
      logic fd [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin ad[i] <= '0; vd[i] <= 1'b0; fd[i] <= 1'b0; end
        end else begin
          ad[0] <= a_vec[r]; vd[0] <= in_valid; fd[0] <= in_first;
          for (int i = 1; i < r; i++) begin ad[i] <= ad[i-1]; vd[i] <= vd[i-1]; fd[i] <= fd[i-1]; end
        end
      end
      always_comb begin a_sk[r] = ad[r-1]; v_sk[r] = vd[r-1]; f_sk[r] = fd[r-1]; end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_cskew
    if (c == 0) begin : g_0
      always_comb b_sk[0] = b_vec[0];
    end else begin : g_n
      w8_t bd [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) bd[i] <= '0;
        end else begin
          bd[0] <= b_vec[c];
          for (int i = 1; i < c; i++) bd[i] <= bd[i-1];
        end
      end
      always_comb b_sk[c] = bd[c-1];
    end
  end

  // ---- PE grid ----
  logic  a_o [ROWS][COLS];
  logic v_o [ROWS][COLS];
  logic f_o [ROWS][COLS];
  w8_t  b_o [ROWS][COLS];
  acc_t acc [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic  a_i;
      logic v_i, f_i;
      w8_t  b_i;
      acc_t up;
      always_comb begin
        a_i = (c == 0) ? a_sk[r] : a_o[r][(c == 0) ? 0 : c-1];
        v_i = (c == 0) ? v_sk[r] : v_o[r][(c == 0) ? 0 : c-1];
        f_i = (c == 0) ? f_sk[r] : f_o[r][(c == 0) ? 0 : c-1];
        b_i = (r == 0) ? b_sk[c] : b_o[(r == 0) ? 0 : r-1][c];
        up  = (r == 0) ? '0      : acc[(r == 0) ? 0 : r-1][c];
      end
      spike_pe u_pe (
        .clk, .rst_n, .drain,
        .a_in(a_i), .v_in(v_i), .first_in(f_i), .b_in(b_i), .acc_above(up),
        .a_out(a_o[r][c]), .v_out(v_o[r][c]), .first_out(f_o[r][c]),
        .b_out(b_o[r][c]), .acc(acc[r][c])
      );
    end
  end

  always_comb begin
    busy = in_valid;
    for (int r = 0; r < ROWS; r++) begin
      busy |= v_sk[r];
      for (int c = 0; c < COLS; c++) busy |= v_o[r][c];
    end
    for (int c = 0; c < COLS; c++) out_vec[c] = acc[ROWS-1][c];
  end
endmodule
