// ttsnn_top: multi-cluster systolic-array accelerator for the forward pass
// of a tensor-train (TT) decomposed spiking convolution layer.
//
// A 3x3 convolution with weights W (O x I x 3 x 3) is replaced by four small
// sub-convolutions: w(1) 1x1 (I -> R), then w(2) 3x1 and w(3) 1x3 (R -> R)
// computed in parallel on the same input and added, then w(4) 1x1 (R -> O):
//   y_t = [(x_t * w1 * w2) + (x_t * w1 * w3)] * w4        (parallel TT, PTT)
//   y_t =  (x_t * w1) * w4                                (half TT, HTT)
// and the result drives leaky integrate-and-fire neurons. Each
// sub-convolution has its own 32-PE cluster:
//   cluster 1  os_cluster_spike  output-stationary, spike inputs, no multipliers
//   cluster 2  ws_cluster        weight-stationary, 3x1 kernel
//   cluster 3  ws_cluster        weight-stationary, 1x3 kernel
//   adder array adder_array      merges clusters 2 and 3
//   cluster 4  os_cluster_mac    output-stationary, 8-bit multipliers
//   LIF units  lif_array         8 neurons per cycle
// with SRAM global buffers: input spikes (32 kB), filter (144 kB, four
// banks), output buffer behind cluster 1 (32 kB), membrane potentials
// (32 kB) and output spikes (32 kB). ttsnn_ctrl sequences them as a
// three-stage pipeline: the output buffer holds two timesteps (halves of
// OBUF_D/2 pixels), so cluster 1 computes timestep t+1 while clusters 2/3
// read timestep t, and two staging buffers between the adder array and
// cluster 4 let clusters 2/3 work on the next 4-pixel tile while cluster 4
// and the LIF units finish the current one. A half_mask bit per timestep selects PTT or
// HTT for that timestep.
//
// Host interface: while idle the host writes the input spike buffer
// (word (t*NPT + pt)*I + k holds the spikes of pixels pt*4..pt*4+3 at input
// channel k, bit r = pixel pt*4+r) and the filter buffer (layouts in
// filter_buffer), sets cfg and pulses start; done rises when the layer is
// finished. The results are read through the spike and MemP read ports
// (data one cycle after the address): word (t*H*W + pixel)*(O/8) + ot holds
// output channels ot*8..ot*8+7, spikes as bits, potentials (Q8.8, before
// reset) as 16-bit fields. Data layouts, tiling and interface are this
// design's choice; the cluster structure, dataflows, buffer sizes and
// precisions follow the paper.
module ttsnn_top
  import ttsnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // control
  input  layer_cfg_t         cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // host write: input spike buffer
  input  logic               insp_wr_en,
  input  logic [INSP_AW-1:0] insp_wr_addr,
  input  logic [INSP_W-1:0]  insp_wr_data,
  // host write: filter buffer
  input  logic               fb_wr_en,
  input  logic [1:0]         fb_wr_bank,
  input  logic [FB_AW4-1:0]  fb_wr_addr,
  input  logic [63:0]        fb_wr_data,
  // host read: output spikes and membrane potentials
  input  logic               spk_rd_en,
  input  logic [SPK_AW-1:0]  spk_rd_addr,
  output logic [SPK_W-1:0]   spk_rd_data,
  input  logic               memp_rd_en,
  input  logic [MEMP_AW-1:0] memp_rd_addr,
  output logic [MEMP_W-1:0]  memp_rd_data,
  // statistics
  output logic [15:0]        cnt_full_t,
  output logic [15:0]        cnt_half_t,
  output logic [15:0]        cnt_overlap,
  output logic [31:0]        cnt_pipe,
  output logic [31:0]        cnt_pipe_ob,
  output logic [31:0]        cycles
);
  // ---------------- controller ----------------
  state_t state;
  bstate_t bstate;
  logic stg_wbuf, stg_rbuf;
  logic c1_busy, ws2_busy, ws3_busy, add_valid, c4_busy;
  logic insp_re, w1_re, c1_valid_q, c1_first_q, c1_drain, obuf_we, obuf_lane;
  logic [INSP_AW-1:0] insp_raddr;
  logic [FB_AW8-1:0]  w1_raddr, w4_raddr;
  logic [OBUF_AW-1:0] obuf_waddr, ob_raddr0, ob_raddr1;
  logic w23_re, ld_en_q;
  logic [FB_AW4-1:0]  w23_raddr;
  logic [2:0] ld_row_q;
  logic [SEL_W-1:0] ld_sel_q, ws_sel_q;
  logic ob_re0, ob_re1, ws_valid_q, ws_first_q, ws_last_q, ws_ch_q, ws_pad2_q, ws_pad3_q;
  logic [3:0] ws_tag_q;
  logic cp_valid_q;
  logic [1:0] cp_px_q;
  logic w4_re, c4_valid_q, c4_first_q, c4_drain;
  logic [3:0] c4_k_q;
  logic memp_re, lif_valid_q, lif_first_t_q, res_we_q2;
  logic [MEMP_AW-1:0] memp_raddr, res_waddr_q2;

  ttsnn_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .c1_busy, .ws_busy(ws2_busy | ws3_busy), .add_valid, .c4_busy,
    .busy, .done, .state, .bstate,
    .insp_re, .insp_raddr, .w1_re, .w1_raddr, .c1_valid_q, .c1_first_q, .c1_drain,
    .obuf_we, .obuf_waddr, .obuf_lane,
    .w23_re, .w23_raddr, .ld_en_q, .ld_row_q, .ld_sel_q,
    .ob_re0, .ob_raddr0, .ob_re1, .ob_raddr1,
    .ws_valid_q, .ws_sel_q, .ws_first_q, .ws_last_q, .ws_tag_q, .ws_ch_q,
    .ws_pad2_q, .ws_pad3_q, .cp_valid_q, .cp_px_q,
    .w4_re, .w4_raddr, .c4_valid_q, .c4_first_q, .c4_k_q, .c4_drain,
    .memp_re, .memp_raddr, .lif_valid_q, .lif_first_t_q, .res_we_q2, .res_waddr_q2,
    .stg_wbuf, .stg_rbuf,
    .cnt_full_t, .cnt_half_t, .cnt_overlap, .cnt_pipe, .cnt_pipe_ob, .cycles
  );

  // ---------------- input spike buffer ----------------
  logic               insp_re_a [1];
  logic [INSP_AW-1:0] insp_ra_a [1];
  logic [INSP_W-1:0]  insp_rd_a [1];
  always_comb begin insp_re_a[0] = insp_re; insp_ra_a[0] = insp_raddr; end
  gbuf_sram #(.WIDTH(INSP_W), .DEPTH(INSP_D), .NRD(1)) u_insp (
    .clk, .we(insp_wr_en), .waddr(insp_wr_addr), .wdata(insp_wr_data), .wmask('1),
    .re(insp_re_a), .raddr(insp_ra_a), .rdata(insp_rd_a));

  // ---------------- filter buffer ----------------
  logic [63:0] w1_data, w4_data;
  logic [31:0] w2_data, w3_data;
  filter_buffer u_fb (
    .clk, .wr_en(fb_wr_en), .wr_bank(fb_wr_bank), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data),
    .rd1_en(w1_re), .rd1_addr(w1_raddr), .rd1_data(w1_data),
    .rd23_en(w23_re), .rd23_addr(w23_raddr), .rd2_data(w2_data), .rd3_data(w3_data),
    .rd4_en(w4_re), .rd4_addr(w4_raddr), .rd4_data(w4_data));

  // ---------------- cluster 1 ----------------
  logic c1_a [OS_ROWS];
  w8_t  c1_b [OS_COLS];
  acc_t c1_out [OS_COLS];
  always_comb begin
    for (int r = 0; r < OS_ROWS; r++) c1_a[r] = insp_rd_a[0][r];
    for (int c = 0; c < OS_COLS; c++) c1_b[c] = w1_data[8*c +: 8];
  end
  os_cluster_spike u_c1 (
    .clk, .rst_n, .in_valid(c1_valid_q), .in_first(c1_first_q),
    .a_vec(c1_a), .b_vec(c1_b), .drain(c1_drain), .busy(c1_busy), .out_vec(c1_out));

  // ---------------- output buffer (o = x * w1, 8-bit) ----------------
  logic [OBUF_W-1:0]  ob_wdata, ob_wmask;
  logic               ob_re_a [2];
  logic [OBUF_AW-1:0] ob_ra_a [2];
  logic [OBUF_W-1:0]  ob_rd_a [2];
  always_comb begin
    ob_wdata = '0;
    ob_wmask = '0;
    for (int c = 0; c < OS_COLS; c++) begin
      ob_wdata[(int'(obuf_lane) * OS_COLS + c) * 8 +: 8] = requant8(c1_out[c], cfg.sh1);
      ob_wmask[(int'(obuf_lane) * OS_COLS + c) * 8 +: 8] = 8'hff;
    end
    ob_re_a[0] = ob_re0; ob_ra_a[0] = ob_raddr0;
    ob_re_a[1] = ob_re1; ob_ra_a[1] = ob_raddr1;
  end
  gbuf_sram #(.WIDTH(OBUF_W), .DEPTH(OBUF_D), .NRD(2)) u_obuf (
    .clk, .we(obuf_we), .waddr(obuf_waddr), .wdata(ob_wdata), .wmask(ob_wmask),
    .re(ob_re_a), .raddr(ob_ra_a), .rdata(ob_rd_a));

  // ---------------- clusters 2 and 3 ----------------
  w8_t  ld2 [WS_COLS], ld3 [WS_COLS];
  w8_t  a2 [WS_ROWS], a3 [WS_ROWS];
  logic ws2_ov, ws3_ov;
  logic [3:0] ws2_grp, ws3_grp;
  acc_t ws2_out [WS_COLS], ws3_out [WS_COLS];
  always_comb begin
    for (int c = 0; c < WS_COLS; c++) begin
      ld2[c] = w2_data[8*c +: 8];
      ld3[c] = w3_data[8*c +: 8];
    end
    for (int r = 0; r < WS_ROWS; r++) begin
      a2[r] = ws_pad2_q ? '0 : ob_rd_a[0][(int'(ws_ch_q) * WS_ROWS + r) * 8 +: 8];
      a3[r] = ws_pad3_q ? '0 : ob_rd_a[1][(int'(ws_ch_q) * WS_ROWS + r) * 8 +: 8];
    end
  end
  ws_cluster #(.GRP_W(4)) u_c2 (
    .clk, .rst_n, .ld_en(ld_en_q), .ld_row(ld_row_q), .ld_sel(ld_sel_q), .ld_data(ld2),
    .in_valid(ws_valid_q), .in_sel(ws_sel_q), .in_first(ws_first_q), .in_last(ws_last_q),
    .in_grp(ws_tag_q), .a_vec(a2), .busy(ws2_busy), .out_valid(ws2_ov), .out_grp(ws2_grp),
    .out_vec(ws2_out));
  ws_cluster #(.GRP_W(4)) u_c3 (
    .clk, .rst_n, .ld_en(ld_en_q), .ld_row(ld_row_q), .ld_sel(ld_sel_q), .ld_data(ld3),
    .in_valid(ws_valid_q), .in_sel(ws_sel_q), .in_first(ws_first_q), .in_last(ws_last_q),
    .in_grp(ws_tag_q), .a_vec(a3), .busy(ws3_busy), .out_valid(ws3_ov), .out_grp(ws3_grp),
    .out_vec(ws3_out));

  // ---------------- adder array ----------------
  logic [3:0] add_grp;
  acc_t add_sum [WS_COLS];
  w8_t  add_sum8 [WS_COLS];
  adder_array #(.N(WS_COLS), .GRP_W(4)) u_add (
    .clk, .rst_n, .in_valid(ws2_ov), .in_grp(ws2_grp), .a(ws2_out), .b(ws3_out),
    .shift(cfg.sh23), .out_valid(add_valid), .out_grp(add_grp), .sum(add_sum), .sum8(add_sum8));

  // clusters 2 and 3 run in lock-step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (ws2_ov == ws3_ov) && (!ws2_ov || ws2_grp == ws3_grp));

  // ---------- staging registers (z, 2 buffers x 4 pixels x RMAX) ----------
  // The producer writes buffer stg_wbuf while cluster 4 reads stg_rbuf.
  w8_t stg [2][OS_ROWS][RMAX];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int p = 0; p < OS_ROWS; p++)
          for (int j = 0; j < RMAX; j++) stg[b][p][j] <= '0;
    end else if (add_valid) begin
      for (int j = 0; j < WS_COLS; j++)
        stg[stg_wbuf][add_grp[3:2]][int'(add_grp[1:0]) * WS_COLS + j] <= add_sum8[j];
    end else if (cp_valid_q) begin
      for (int j = 0; j < RMAX; j++) begin
        stg[stg_wbuf][cp_px_q][j]        <= ob_rd_a[0][8*j +: 8];
        stg[stg_wbuf][cp_px_q + 2'd1][j] <= ob_rd_a[1][8*j +: 8];
      end
    end
  end

  // ---------------- cluster 4 ----------------
  w8_t  c4_a [OS_ROWS];
  w8_t  c4_b [OS_COLS];
  acc_t c4_out [OS_COLS];
  always_comb begin
    for (int r = 0; r < OS_ROWS; r++) c4_a[r] = stg[stg_rbuf][r][c4_k_q];
    for (int c = 0; c < OS_COLS; c++) c4_b[c] = w4_data[8*c +: 8];
  end
  os_cluster_mac u_c4 (
    .clk, .rst_n, .in_valid(c4_valid_q), .in_first(c4_first_q),
    .a_vec(c4_a), .b_vec(c4_b), .drain(c4_drain), .busy(c4_busy), .out_vec(c4_out));

  // ---------------- MemP buffer and LIF units ----------------
  acc_t y_q [OS_COLS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int c = 0; c < OS_COLS; c++) y_q[c] <= '0;
    else if (c4_drain) for (int c = 0; c < OS_COLS; c++) y_q[c] <= c4_out[c];
  end

  logic               mp_re_a [2];
  logic [MEMP_AW-1:0] mp_ra_a [2];
  logic [MEMP_W-1:0]  mp_rd_a [2];
  logic [MEMP_W-1:0]  mp_wdata;
  acc_t u_prev [OS_COLS], u_new [OS_COLS];
  logic lif_ov;
  logic [OS_COLS-1:0] spk_new;
  always_comb begin
    mp_re_a[0] = memp_re;    mp_ra_a[0] = memp_raddr;
    mp_re_a[1] = memp_rd_en; mp_ra_a[1] = memp_rd_addr;
    memp_rd_data = mp_rd_a[1];
    for (int c = 0; c < OS_COLS; c++) begin
      u_prev[c] = mp_rd_a[0][ACC_W*c +: ACC_W];
      mp_wdata[ACC_W*c +: ACC_W] = u_new[c];
    end
  end
  lif_array #(.N(OS_COLS)) u_lif (
    .clk, .rst_n, .in_valid(lif_valid_q), .first_t(lif_first_t_q), .y(y_q), .u_prev,
    .vth(cfg.vth), .out_valid(lif_ov), .spike(spk_new), .u(u_new));

  a_lif_timing: assert property (@(posedge clk) disable iff (!rst_n) lif_ov == res_we_q2);

  gbuf_sram #(.WIDTH(MEMP_W), .DEPTH(MEMP_D), .NRD(2)) u_memp (
    .clk, .we(res_we_q2), .waddr(res_waddr_q2), .wdata(mp_wdata), .wmask('1),
    .re(mp_re_a), .raddr(mp_ra_a), .rdata(mp_rd_a));

  // ---------------- output spike buffer ----------------
  logic              sp_re_a [1];
  logic [SPK_AW-1:0] sp_ra_a [1];
  logic [SPK_W-1:0]  sp_rd_a [1];
  always_comb begin
    sp_re_a[0] = spk_rd_en; sp_ra_a[0] = spk_rd_addr; spk_rd_data = sp_rd_a[0];
  end
  gbuf_sram #(.WIDTH(SPK_W), .DEPTH(SPK_D), .NRD(1)) u_spk (
    .clk, .we(res_we_q2), .waddr(SPK_AW'(res_waddr_q2)), .wdata(spk_new), .wmask('1),
    .re(sp_re_a), .raddr(sp_ra_a), .rdata(sp_rd_a));
endmodule
