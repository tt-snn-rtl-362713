// tb_layer_common.svh: body shared by the layer-level testbenches of the
// TT-SNN accelerator: the DUT instance, a reference model of one layer in
// plain integer arithmetic and the run_layer task, which draws random
// spikes and weights, loads them through the host ports, runs the layer
// and compares every output spike and membrane potential.
// Included inside a testbench module.
  localparam int MT = 8, MP = 64, MI = 64, MR = 16, MO = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done;
  logic insp_wr_en; logic [INSP_AW-1:0] insp_wr_addr; logic [INSP_W-1:0] insp_wr_data;
  logic fb_wr_en; logic [1:0] fb_wr_bank; logic [FB_AW4-1:0] fb_wr_addr; logic [63:0] fb_wr_data;
  logic spk_rd_en; logic [SPK_AW-1:0] spk_rd_addr; logic [SPK_W-1:0] spk_rd_data;
  logic memp_rd_en; logic [MEMP_AW-1:0] memp_rd_addr; logic [MEMP_W-1:0] memp_rd_data;
  logic [15:0] cnt_full_t, cnt_half_t, cnt_overlap;
  logic [31:0] cnt_pipe, cnt_pipe_ob, cycles;

  ttsnn_top dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_full = 0, n_half = 0, n_overlap = 0, n_pipe = 0, n_pipe_ob = 0, n_pad = 0, n_sat = 0, n_spk = 0, n_reset = 0;

  // reference data
  bit   x  [MT][MP][MI];
  w8_t  w1 [MI][MR];
  w8_t  w2 [MR][MR][3];   // [co][ci][tap]
  w8_t  w3 [MR][MR][3];
  w8_t  w4 [MR][MO];
  w8_t  o  [MP][MR];
  w8_t  z  [MP][MR];
  acc_t uref [MT][MP][MO];
  bit   sref [MT][MP][MO];

  function automatic w8_t rq(input acc_t v, input int sh);
    acc_t s = v >>> sh;
    if (s > 127)  begin n_sat++; return 8'sd127;  end
    if (s < -128) begin n_sat++; return -8'sd128; end
    return s[7:0];
  endfunction
  function automatic acc_t sadd(input acc_t a, input acc_t b);
    int s = int'(a) + int'(b);
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return 16'sh8000;
    return acc_t'(s);
  endfunction
  function automatic w8_t rnd8(input int lo, input int hi);
    return w8_t'(lo + int'($urandom_range(hi - lo)));
  endfunction

  task automatic reference(input int H, W, I, R, O, T, input logic [MT-1:0] hm,
                           input int sh1, sh23, input acc_t vth);
    int np = H * W;
    for (int t = 0; t < T; t++) begin
      for (int p = 0; p < np; p++)
        for (int r = 0; r < R; r++) begin
          acc_t a = 0;
          for (int i = 0; i < I; i++) if (x[t][p][i]) a += acc_t'(w1[i][r]);
          o[p][r] = rq(a, sh1);
        end
      for (int p = 0; p < np; p++) begin
        int py = p / W, pxx = p % W;
        for (int co = 0; co < R; co++) begin
          if (hm[t]) z[p][co] = o[p][co];
          else begin
            acc_t a2 = 0, a3 = 0;
            for (int tp = 0; tp < 3; tp++) begin
              int ny = py + tp - 1, nx = pxx + tp - 1;
              if (co == 0 && (ny < 0 || ny >= H || nx < 0 || nx >= W)) n_pad++;
              for (int ci = 0; ci < R; ci++) begin
                if (ny >= 0 && ny < H) a2 += acc_t'(o[ny*W + pxx][ci]) * acc_t'(w2[co][ci][tp]);
                if (nx >= 0 && nx < W) a3 += acc_t'(o[py*W + nx][ci]) * acc_t'(w3[co][ci][tp]);
              end
            end
            z[p][co] = rq(sadd(a2, a3), sh23);
          end
        end
      end
      for (int p = 0; p < np; p++)
        for (int oc = 0; oc < O; oc++) begin
          acc_t y = 0, up;
          for (int r = 0; r < R; r++) y += acc_t'(z[p][r]) * acc_t'(w4[r][oc]);
          if (t == 0) up = 0;
          else if (uref[t-1][p][oc] >= vth) begin up = 0; n_reset++; end
          else up = uref[t-1][p][oc];
          uref[t][p][oc] = sadd(up >>> TAU_SHIFT, y);
          sref[t][p][oc] = (uref[t][p][oc] >= vth);
          if (sref[t][p][oc]) n_spk++;
        end
    end
  endtask

  task automatic run_layer(input int H, W, I, R, O, T, input logic [MT-1:0] hm,
                           input int sh1, sh23);
    int np = H * W, npt = np / OS_ROWS, nch = R / WS_ROWS, ngrp = R / WS_COLS;
    int t0;
    acc_t vth = VTH_DEFAULT;
    // random data
    for (int t = 0; t < T; t++) for (int p = 0; p < np; p++) for (int i = 0; i < I; i++)
      x[t][p][i] = ($urandom_range(99) < 40);
    for (int i = 0; i < I; i++) for (int r = 0; r < R; r++) w1[i][r] = rnd8(-8, 7);
    for (int a = 0; a < R; a++) for (int b = 0; b < R; b++) for (int tp = 0; tp < 3; tp++) begin
      w2[a][b][tp] = rnd8(-4, 3); w3[a][b][tp] = rnd8(-4, 3);
    end
    for (int r = 0; r < R; r++) for (int oc = 0; oc < O; oc++) w4[r][oc] = rnd8(-8, 7);
    reference(H, W, I, R, O, T, hm, sh1, sh23, vth);

    // load input spikes
    @(negedge clk);
    for (int t = 0; t < T; t++) for (int pt = 0; pt < npt; pt++) for (int k = 0; k < I; k++) begin
      insp_wr_en = 1'b1;
      insp_wr_addr = INSP_AW'((t * npt + pt) * I + k);
      for (int r = 0; r < OS_ROWS; r++) insp_wr_data[r] = x[t][pt*OS_ROWS + r][k];
      @(negedge clk);
    end
    insp_wr_en = 1'b0;
    // load filters
    for (int rt = 0; rt < R / OS_COLS; rt++) for (int k = 0; k < I; k++) begin
      fb_wr_en = 1'b1; fb_wr_bank = 2'd0; fb_wr_addr = FB_AW4'(rt * I + k);
      for (int j = 0; j < 8; j++) fb_wr_data[8*j +: 8] = w1[k][rt*8 + j];
      @(negedge clk);
    end
    for (int bank = 1; bank <= 2; bank++)
      for (int g = 0; g < ngrp; g++) for (int ch = 0; ch < nch; ch++) for (int tp = 0; tp < 3; tp++)
        for (int r = 0; r < WS_ROWS; r++) begin
          int sel = (g * nch + ch) * 3 + tp;
          fb_wr_en = 1'b1; fb_wr_bank = 2'(bank); fb_wr_addr = FB_AW4'(sel * WS_ROWS + r);
          fb_wr_data = '0;
          for (int j = 0; j < WS_COLS; j++)
            fb_wr_data[8*j +: 8] = (bank == 1) ? w2[g*WS_COLS + j][ch*WS_ROWS + r][tp]
                                               : w3[g*WS_COLS + j][ch*WS_ROWS + r][tp];
          @(negedge clk);
        end
    for (int ot = 0; ot < O / OS_COLS; ot++) for (int k = 0; k < R; k++) begin
      fb_wr_en = 1'b1; fb_wr_bank = 2'd3; fb_wr_addr = FB_AW4'(ot * R + k);
      for (int j = 0; j < 8; j++) fb_wr_data[8*j +: 8] = w4[k][ot*8 + j];
      @(negedge clk);
    end
    fb_wr_en = 1'b0;

    // configure and start
    cfg = '{h: 7'(H), w: 7'(W), cin: 10'(I), rank: 5'(R), cout: 10'(O), tsteps: 4'(T),
            half_mask: hm, sh1: 4'(sh1), sh23: 4'(sh23), vth: vth};
    start = 1'b1; t0 = 0;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); t0++; end
    $display("layer H=%0d W=%0d I=%0d R=%0d O=%0d T=%0d mask=%b: %0d cycles (full %0d, half %0d, fill overlap %0d, c4 pipelined %0d, c1 pipelined %0d)",
             H, W, I, R, O, T, hm, cycles, cnt_full_t, cnt_half_t, cnt_overlap, cnt_pipe, cnt_pipe_ob);
    n_full += int'(cnt_full_t); n_half += int'(cnt_half_t); n_overlap += int'(cnt_overlap);
    n_pipe += int'(cnt_pipe); n_pipe_ob += int'(cnt_pipe_ob);
    checks++;
    if (int'(cnt_full_t) + int'(cnt_half_t) != T) begin
      failures++; $display("FAIL timestep count");
    end

    // read back
    for (int t = 0; t < T; t++) for (int p = 0; p < np; p++) for (int ot = 0; ot < O / 8; ot++) begin
      int a = (t * np + p) * (O / 8) + ot;
      spk_rd_en = 1'b1; spk_rd_addr = SPK_AW'(a);
      memp_rd_en = 1'b1; memp_rd_addr = MEMP_AW'(a);
      @(negedge clk);
      for (int j = 0; j < 8; j++) begin
        acc_t ug = memp_rd_data[16*j +: 16];
        checks += 2;
        if (ug !== uref[t][p][ot*8 + j]) begin
          failures++;
          if (failures < 10) $display("FAIL u t=%0d p=%0d o=%0d got %0d exp %0d", t, p, ot*8+j, ug, uref[t][p][ot*8+j]);
        end
        if (spk_rd_data[j] !== sref[t][p][ot*8 + j]) begin
          failures++;
          if (failures < 10) $display("FAIL spike t=%0d p=%0d o=%0d", t, p, ot*8+j);
        end
      end
    end
    spk_rd_en = 1'b0; memp_rd_en = 1'b0;
  endtask

