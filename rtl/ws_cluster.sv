// ws_cluster: weight-stationary systolic array of ROWS x COLS ws_pe, used
// twice, as cluster 2 (3x1 sub-convolution w(2)) and cluster 3 (1x3
// sub-convolution w(3)), which run side by side on the same stream.
//
// PE (r, c) serves input rank channel chunk*ROWS + r and output rank
// channel grp*COLS + c. Its scratch pad holds the weights of all its
// (grp, chunk, tap) triples at index sel = (grp*NCHUNK + chunk)*3 + tap, so
// the weights of the whole layer stay in the array. Every cycle the caller
// presents one input vector a_vec (ROWS activations of one neighbour pixel
// = one tap, one chunk of rank channels), the scratch-pad index in_sel and
// the tags first/last/grp. Rows are skewed inside the cluster; partial sums
// run down the columns; an accumulator below each column adds the
// consecutive steps from first to last (all taps and chunks of one output
// pixel and group) and the result is de-skewed, so out_vec carries COLS
// finished outputs of one pixel and group, out_valid high, ROWS + COLS
// cycles after the cycle in which the last step was presented. One step per cycle, no stalls.
// Weights are written row by row through ld_* (one row of COLS weights per
// cycle); this may overlap with another cluster's work.
// The weight-stationary dataflow, 32 PEs and the 32-byte scratch pad follow
// the paper; the 8x4 shape, the sel layout and the column accumulators are
// this design's choice.
module ws_cluster
  import ttsnn_pkg::*;
#(
  parameter int unsigned ROWS  = WS_ROWS,
  parameter int unsigned COLS  = WS_COLS,
  parameter int unsigned GRP_W = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // scratch-pad load
  input  logic               ld_en,
  input  logic [$clog2(ROWS)-1:0] ld_row,
  input  logic [SEL_W-1:0]   ld_sel,
  input  w8_t                ld_data [COLS],
  // compute stream
  input  logic               in_valid,
  input  logic [SEL_W-1:0]   in_sel,
  input  logic               in_first,
  input  logic               in_last,
  input  logic [GRP_W-1:0]   in_grp,
  input  w8_t                a_vec [ROWS],
  output logic               busy,
  output logic               out_valid,
  output logic [GRP_W-1:0]   out_grp,
  output acc_t               out_vec [COLS]
);
  localparam int unsigned TAG_W = GRP_W + 2;  // {first, last, grp}

  typedef struct packed {
    logic             v;
    logic [SEL_W-1:0] sel;
    logic [TAG_W-1:0] tag;
  } ctl_t;

  ctl_t ctl_in;
  always_comb ctl_in = '{v: in_valid, sel: in_sel, tag: {in_first, in_last, in_grp}};

  // ---- row skew ----
  w8_t  a_sk [ROWS];
  ctl_t c_sk [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_rskew
    if (r == 0) begin : g_0
      always_comb begin a_sk[0] = a_vec[0]; c_sk[0] = ctl_in; end
    end else begin : g_n
      w8_t  ad [r];
      ctl_t cd [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin ad[i] <= '0; cd[i] <= '0; end
        end else begin
          ad[0] <= a_vec[r]; cd[0] <= ctl_in;
          for (int i = 1; i < r; i++) begin ad[i] <= ad[i-1]; cd[i] <= cd[i-1]; end
        end
      end
      always_comb begin a_sk[r] = ad[r-1]; c_sk[r] = cd[r-1]; end
    end
  end

  // ---- PE grid ----
  w8_t              a_o   [ROWS][COLS];
  logic             v_o   [ROWS][COLS];
  logic [SEL_W-1:0] sel_o [ROWS][COLS];
  logic [TAG_W-1:0] tag_o [ROWS][COLS];
  acc_t             ps_o  [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      w8_t              a_i;
      logic             v_i;
      logic [SEL_W-1:0] s_i;
      logic [TAG_W-1:0] t_i;
      acc_t             p_i;
      always_comb begin
        if (c == 0) begin
          a_i = a_sk[r]; v_i = c_sk[r].v; s_i = c_sk[r].sel; t_i = c_sk[r].tag;
        end else begin
          a_i = a_o[r][(c == 0) ? 0 : c-1];   v_i = v_o[r][(c == 0) ? 0 : c-1];
          s_i = sel_o[r][(c == 0) ? 0 : c-1]; t_i = tag_o[r][(c == 0) ? 0 : c-1];
        end
        p_i = (r == 0) ? '0 : ps_o[(r == 0) ? 0 : r-1][c];
      end
      ws_pe #(.TAG_W(TAG_W)) u_pe (
        .clk, .rst_n,
        .ld_en(ld_en && (ld_row == r)), .ld_sel, .ld_data(ld_data[c]),
        .a_in(a_i), .v_in(v_i), .sel_in(s_i), .tag_in(t_i), .psum_in(p_i),
        .a_out(a_o[r][c]), .v_out(v_o[r][c]), .sel_out(sel_o[r][c]),
        .tag_out(tag_o[r][c]), .psum_out(ps_o[r][c])
      );
    end
  end

  // ---- column accumulators and de-skew ----
  logic             res_v   [COLS];
  logic [GRP_W-1:0] res_g   [COLS];
  acc_t             res     [COLS];
  logic             dsk_v   [COLS];
  logic [GRP_W-1:0] dsk_g   [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_cacc
    acc_t colacc;
    logic bv, bf, bl;
    logic [GRP_W-1:0] bg;
    acc_t sum;
    always_comb begin
      bv  = v_o[ROWS-1][c];
      {bf, bl, bg} = tag_o[ROWS-1][c];
      sum = bf ? ps_o[ROWS-1][c] : colacc + ps_o[ROWS-1][c];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        colacc <= '0; res_v[c] <= 1'b0; res_g[c] <= '0; res[c] <= '0;
      end else begin
        res_v[c] <= bv && bl;
        if (bv) begin
          colacc <= sum;
          if (bl) begin res[c] <= sum; res_g[c] <= bg; end
        end
      end
    end
    // delay column c by COLS-1-c so that all columns leave together
    localparam int unsigned D = COLS - 1 - c;
    if (D == 0) begin : g_nod
      always_comb begin out_vec[c] = res[c]; dsk_v[c] = res_v[c]; dsk_g[c] = res_g[c]; end
    end else begin : g_d
      acc_t             dd [D];
      logic             dv [D];
      logic [GRP_W-1:0] dg [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < D; i++) begin dd[i] <= '0; dv[i] <= 1'b0; dg[i] <= '0; end
        end else begin
          dd[0] <= res[c]; dv[0] <= res_v[c]; dg[0] <= res_g[c];
          for (int i = 1; i < D; i++) begin dd[i] <= dd[i-1]; dv[i] <= dv[i-1]; dg[i] <= dg[i-1]; end
        end
      end
      always_comb begin out_vec[c] = dd[D-1]; dsk_v[c] = dv[D-1]; dsk_g[c] = dg[D-1]; end
    end
  end

  always_comb begin
    out_valid = dsk_v[0];
    out_grp   = dsk_g[0];
    busy = in_valid;
    for (int r = 0; r < ROWS; r++) begin
      busy |= c_sk[r].v;
      for (int c = 0; c < COLS; c++) busy |= v_o[r][c];
    end
    for (int c = 0; c < COLS; c++) busy |= res_v[c] | dsk_v[c];
  end

  // all columns of one result must leave in the same cycle
  for (genvar c = 1; c < COLS; c++) begin : g_chk
    a_aligned: assert property (@(posedge clk) disable iff (!rst_n) dsk_v[c] == dsk_v[0]);
  end
endmodule
