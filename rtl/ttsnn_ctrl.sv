// ttsnn_ctrl: sequencer of the multi-cluster accelerator for the forward
// pass of one TT-decomposed convolution layer over all its timesteps.
//
// Three state machines run at the same time, joined by two double
// buffers: the output buffer is split in two halves (timestep parity), and
// the top holds two staging buffers of 4 pixels x RMAX channels; each half
// and each staging buffer has a full flag here.
//   cluster-1 side (state), for each timestep t, once half t%2 is empty:
//     1. cluster 1 computes o = x_t * w(1) for every pixel tile (4 pixels)
//        and rank tile (8 channels): I cycles of streaming, a wait for the
//        array to empty, 4 drain cycles that write o (re-quantised) into
//        output-buffer half t%2; then the half is marked full;
//   middle side (bstate), for each full half in timestep order, per pixel
//   tile once staging buffer pbuf is empty:
//     2. full (PTT) timestep: clusters 2 and 3 read o in parallel (vertical
//        and horizontal neighbours) for every output pixel, group, chunk and
//        tap, and the adder array merges their results into staging buffer
//        pbuf; half (HTT) timestep, half_mask[t] = 1: clusters 2 and 3 are
//        skipped and o itself is copied into pbuf; then pbuf is marked full
//        and the other buffer is taken next; after the last tile the
//        output-buffer half is marked empty;
//   last side (cstate), for each full staging buffer cbuf in the same order:
//     3. cluster 4 computes y = z * w(4) for every output channel tile: R
//        cycles of streaming, a wait, 4 drain cycles that feed the LIF
//        units; spikes and potentials are written to the output spike and
//        MemP buffers two cycles later; then cbuf is marked empty.
// So cluster 1 works on timestep t+1 while clusters 2/3 consume timestep t,
// and clusters 2/3 fill the next tile while cluster 4 works on the current
// one. done rises when all three sides are finished and the last result is
// written.
// Right after start, the scratch pads of clusters 2 and 3 are filled from
// the filter buffer while cluster 1 streams its first tiles, so the weight
// load is hidden; the weights then stay for all timesteps.
// At rank <= 16 the w(2)/w(3) cores occupy 3*(R/4)*(R/8)*8 <= 192 words
// of their 9216-word banks, so the upper 6 bits of w23_raddr stay zero.
// Every buffer read is issued one cycle before its data is used; the *_q
// outputs are the control aligned with that data. Counters report how many
// full and half timesteps ran, how many weight-fill cycles overlapped
// cluster 1, how many cycles cluster 4 streamed while cluster 1 or clusters
// 2/3 also streamed (cnt_pipe), how many cycles cluster 1 streamed while
// clusters 2/3 also streamed (cnt_pipe_ob), and the cycles of the layer.
// The order of the three stages, the parallel clusters 2/3, the HTT bypass,
// the hidden weight fill and the overlapped (pipelined) running follow the
// paper; the tiling, the double buffers with their hand-off flags and all
// timing are this design's choice.
module ttsnn_ctrl
  import ttsnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  layer_cfg_t cfg,
  input  logic c1_busy,
  input  logic ws_busy,
  input  logic add_valid,
  input  logic c4_busy,
  output logic busy,
  output logic done,
  output state_t state,
  output bstate_t bstate,
  // staging buffers: written by the producer, read by cluster 4
  output logic               stg_wbuf,
  output logic               stg_rbuf,
  // cluster 1
  output logic               insp_re,
  output logic [INSP_AW-1:0] insp_raddr,
  output logic               w1_re,
  output logic [FB_AW8-1:0]  w1_raddr,
  output logic               c1_valid_q,
  output logic               c1_first_q,
  output logic               c1_drain,
  output logic               obuf_we,
  output logic [OBUF_AW-1:0] obuf_waddr,
  output logic               obuf_lane,
  // scratch-pad fill of clusters 2 and 3
  output logic               w23_re,
  output logic [FB_AW4-1:0]  w23_raddr,
  output logic               ld_en_q,
  output logic [2:0]         ld_row_q,
  output logic [SEL_W-1:0]   ld_sel_q,
  // clusters 2 and 3
  output logic               ob_re0,
  output logic [OBUF_AW-1:0] ob_raddr0,
  output logic               ob_re1,
  output logic [OBUF_AW-1:0] ob_raddr1,
  output logic               ws_valid_q,
  output logic [SEL_W-1:0]   ws_sel_q,
  output logic               ws_first_q,
  output logic               ws_last_q,
  output logic [3:0]         ws_tag_q,     // {pixel in tile, group}
  output logic               ws_ch_q,      // rank chunk (lane half)
  output logic               ws_pad2_q,    // cluster 2 tap is zero padding
  output logic               ws_pad3_q,    // cluster 3 tap is zero padding
  // half timestep: copy o into staging
  output logic               cp_valid_q,
  output logic [1:0]         cp_px_q,      // port 0 -> px, port 1 -> px+1
  // cluster 4
  output logic               w4_re,
  output logic [FB_AW8-1:0]  w4_raddr,
  output logic               c4_valid_q,
  output logic               c4_first_q,
  output logic [3:0]         c4_k_q,
  output logic               c4_drain,
  // LIF units and result buffers
  output logic               memp_re,
  output logic [MEMP_AW-1:0] memp_raddr,
  output logic               lif_valid_q,
  output logic               lif_first_t_q,
  output logic               res_we_q2,
  output logic [MEMP_AW-1:0] res_waddr_q2,
  // statistics
  output logic [15:0]        cnt_full_t,
  output logic [15:0]        cnt_half_t,
  output logic [15:0]        cnt_overlap,
  output logic [31:0]        cnt_pipe,      // cluster 4 streams with an earlier stage
  output logic [31:0]        cnt_pipe_ob,   // cluster 1 streams with clusters 2/3
  output logic [31:0]        cycles
);
  // ---- derived layer sizes ----
  int unsigned npix, npt, nrt, ngrp, nch, notile, nsel;
  always_comb begin
    npix   = int'(cfg.h) * int'(cfg.w);
    npt    = npix / OS_ROWS;
    nrt    = int'(cfg.rank) / OS_COLS;
    nch    = int'(cfg.rank) / WS_ROWS;
    ngrp   = int'(cfg.rank) / WS_COLS;
    notile = int'(cfg.cout) / OS_COLS;
    nsel   = 3 * ngrp * nch;
  end

  // ---- cluster-1 counters ----
  logic [3:0] t;
  logic [1:0] rt;
  logic [8:0] pt;
  logic [9:0] k;
  logic [1:0] d;
  logic [1:0] ob_full;         // output-buffer halves holding a timestep

  // ---- middle (clusters 2/3) counters ----
  logic [3:0] bt;
  logic [8:0] bpt;
  logic [1:0] px, g, tap;
  logic       ch;
  logic [6:0] cy, cx;          // coordinates of the current phase-2 pixel
  logic       cp_i;
  logic       pbuf;            // staging buffer the middle side fills

  // ---- consumer counters ----
  cstate_t    cstate;
  logic [3:0] ct;
  logic [8:0] cpt;
  logic [4:0] ck;
  logic [1:0] cd;
  logic [6:0] ot;
  logic       cbuf;            // staging buffer cluster 4 reads
  logic [1:0] stg_full;

  // ---- scratch-pad loader ----
  logic             ld_active;
  logic [SEL_W-1:0] lsel;
  logic [2:0]       lrow;

  // ---- issue-side combinational control ----
  int unsigned pix_b, pix_d4, cpix_d4, a_w1, a_in;
  int signed   ny, nx;
  logic        pad2, pad3;
  always_comb begin
    pix_b  = int'(bpt) * OS_ROWS + int'(px) + int'(bt[0]) * OBUF_HALF;
    pix_d4 = int'(pt) * OS_ROWS + (OS_ROWS - 1 - int'(d));
    cpix_d4 = int'(cpt) * OS_ROWS + (OS_ROWS - 1 - int'(cd));
    a_in   = (int'(t) * npt + int'(pt)) * int'(cfg.cin) + int'(k);
    a_w1   = int'(rt) * int'(cfg.cin) + int'(k);
    ny     = int'(cy) + int'(tap) - 1;
    nx     = int'(cx) + int'(tap) - 1;
    pad2   = (ny < 0) || (ny >= int'(cfg.h));
    pad3   = (nx < 0) || (nx >= int'(cfg.w));

    insp_re    = (state == S_C1_FEED);
    insp_raddr = INSP_AW'(a_in);
    w1_re      = (state == S_C1_FEED);
    w1_raddr   = FB_AW8'(a_w1);

    c1_drain   = (state == S_C1_DRAIN);
    obuf_we    = (state == S_C1_DRAIN);
    obuf_waddr = OBUF_AW'(pix_d4 + int'(t[0]) * OBUF_HALF);
    obuf_lane  = rt[0];

    w23_re     = ld_active;
    w23_raddr  = FB_AW4'(int'(lsel) * WS_ROWS + int'(lrow));

    ob_re0     = (bstate == B_FEED) || (bstate == B_COPY);
    ob_re1     = ob_re0;
    if (bstate == B_COPY) begin
      ob_raddr0 = OBUF_AW'(int'(bpt) * OS_ROWS + 2 * int'(cp_i) + int'(bt[0]) * OBUF_HALF);
      ob_raddr1 = OBUF_AW'(int'(bpt) * OS_ROWS + 2 * int'(cp_i) + 1 + int'(bt[0]) * OBUF_HALF);
    end else begin
      ob_raddr0 = OBUF_AW'(int'(pix_b) + (int'(tap) - 1) * int'(cfg.w));  // 3x1: rows
      ob_raddr1 = OBUF_AW'(int'(pix_b) + (int'(tap) - 1));                // 1x3: columns
    end

    w4_re      = (cstate == C_FEED);
    w4_raddr   = FB_AW8'(int'(ot) * int'(cfg.rank) + int'(ck));

    c4_drain   = (cstate == C_DRAIN);
    memp_re    = (cstate == C_DRAIN) && (ct != 0);
    memp_raddr = MEMP_AW'(((int'(ct) - 1) * npix + int'(cpix_d4)) * notile + int'(ot));

    stg_wbuf   = pbuf;
    stg_rbuf   = cbuf;
    busy       = (state != S_IDLE);
  end

  // ---- aligned (one cycle later) control ----
  logic [MEMP_AW-1:0] res_waddr_q1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1_valid_q <= 1'b0; c1_first_q <= 1'b0;
      ld_en_q <= 1'b0; ld_row_q <= '0; ld_sel_q <= '0;
      ws_valid_q <= 1'b0; ws_sel_q <= '0; ws_first_q <= 1'b0; ws_last_q <= 1'b0;
      ws_tag_q <= '0; ws_ch_q <= 1'b0; ws_pad2_q <= 1'b0; ws_pad3_q <= 1'b0;
      cp_valid_q <= 1'b0; cp_px_q <= '0;
      c4_valid_q <= 1'b0; c4_first_q <= 1'b0; c4_k_q <= '0;
      lif_valid_q <= 1'b0; lif_first_t_q <= 1'b0;
      res_waddr_q1 <= '0; res_we_q2 <= 1'b0; res_waddr_q2 <= '0;
    end else begin
      c1_valid_q <= (state == S_C1_FEED);
      c1_first_q <= (k == 0);
      ld_en_q    <= ld_active;
      ld_row_q   <= lrow;
      ld_sel_q   <= lsel;
      ws_valid_q <= (bstate == B_FEED);
      ws_sel_q   <= SEL_W'((int'(g) * nch + int'(ch)) * 3 + int'(tap));
      ws_first_q <= (ch == 1'b0) && (tap == 2'd0);
      ws_last_q  <= (int'(ch) == nch - 1) && (tap == 2'd2);
      ws_tag_q   <= {px, g};
      ws_ch_q    <= ch;
      ws_pad2_q  <= pad2;
      ws_pad3_q  <= pad3;
      cp_valid_q <= (bstate == B_COPY);
      cp_px_q    <= {cp_i, 1'b0};
      c4_valid_q <= (cstate == C_FEED);
      c4_first_q <= (ck == 0);
      c4_k_q     <= ck[3:0];
      lif_valid_q   <= (cstate == C_DRAIN);
      lif_first_t_q <= (ct == 0);
      res_waddr_q1  <= MEMP_AW'((int'(ct) * npix + int'(cpix_d4)) * notile + int'(ot));
      res_we_q2     <= lif_valid_q;
      res_waddr_q2  <= res_waddr_q1;
    end
  end

  // ---- scratch-pad loader: runs from start, alongside cluster 1 ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_active <= 1'b0; lsel <= '0; lrow <= '0;
    end else if (start && state == S_IDLE) begin
      ld_active <= 1'b1; lsel <= '0; lrow <= '0;
    end else if (ld_active) begin
      if (lrow == 3'(WS_ROWS - 1)) begin
        lrow <= '0;
        if (int'(lsel) == nsel - 1) ld_active <= 1'b0;
        else                        lsel <= lsel + 1'b1;
      end else begin
        lrow <= lrow + 1'b1;
      end
    end
  end

  // ---- cluster-1 side ----
  logic       prod_stream;
  logic [1:0] flush;
  logic       set_full, clr_full, set_ob, clr_ob;
  assign prod_stream = (state == S_C1_FEED) || (bstate == B_FEED) || (bstate == B_COPY);
  assign set_ob      = (state == S_C1_HAND);
  assign clr_ob      = (bstate == B_HAND) && (int'(bpt) == npt - 1);
  assign set_full    = (bstate == B_HAND);
  assign clr_full    = (cstate == C_DRAIN) && (cd == 2'(OS_ROWS - 1)) && (int'(ot) == notile - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      t <= '0; rt <= '0; pt <= '0; k <= '0; d <= '0; flush <= '0;
      cnt_overlap <= '0; cnt_pipe <= '0; cnt_pipe_ob <= '0; cycles <= '0;
    end else begin
      if (state != S_IDLE) cycles <= cycles + 1;
      if (ld_active && state == S_C1_FEED) cnt_overlap <= cnt_overlap + 1'b1;
      if (prod_stream && cstate == C_FEED) cnt_pipe <= cnt_pipe + 1;
      if (state == S_C1_FEED && (bstate == B_FEED || bstate == B_COPY)) cnt_pipe_ob <= cnt_pipe_ob + 1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_C1_FEED; done <= 1'b0;
          t <= '0; rt <= '0; pt <= '0; k <= '0; d <= '0;
          cnt_overlap <= '0; cnt_pipe <= '0; cnt_pipe_ob <= '0; cycles <= '0;
        end
        S_C1_FEED: begin
          if (int'(k) == int'(cfg.cin) - 1) begin k <= '0; state <= S_C1_WAIT; end
          else k <= k + 1'b1;
        end
        S_C1_WAIT: if (!c1_busy && !c1_valid_q) begin d <= '0; state <= S_C1_DRAIN; end
        S_C1_DRAIN: begin
          d <= d + 1'b1;
          if (d == 2'(OS_ROWS - 1)) begin
            if (int'(pt) == npt - 1) begin
              pt <= '0;
              if (int'(rt) == nrt - 1) begin rt <= '0; state <= S_C1_HAND; end
              else begin rt <= rt + 1'b1; state <= S_C1_FEED; end
            end else begin
              pt <= pt + 1'b1; state <= S_C1_FEED;
            end
          end
        end
        S_C1_HAND: begin   // half t%2 is marked full this cycle
          if (int'(t) == int'(cfg.tsteps) - 1) begin flush <= '0; state <= S_FLUSH; end
          else begin t <= t + 1'b1; state <= S_C1_NEXT; end
        end
        S_C1_NEXT: if (!ob_full[t[0]]) state <= S_C1_FEED;
        S_FLUSH: if (bstate == B_IDLE && cstate == C_IDLE && ob_full == 2'b00 && stg_full == 2'b00) begin
          // the last results are written two cycles after the last drain
          flush <= flush + 1'b1;
          if (flush == 2'd2) begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- middle side: clusters 2/3 or HTT copy ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bstate <= B_IDLE; bt <= '0; bpt <= '0; px <= '0; g <= '0; tap <= '0;
      ch <= 1'b0; cy <= '0; cx <= '0; cp_i <= 1'b0; pbuf <= 1'b0;
      cnt_full_t <= '0; cnt_half_t <= '0;
    end else if (state == S_IDLE) begin
      bstate <= B_IDLE; bt <= '0; bpt <= '0; pbuf <= 1'b0;
      if (start) begin cnt_full_t <= '0; cnt_half_t <= '0; end
    end else begin
      unique case (bstate)
        B_IDLE: if (ob_full[bt[0]] && !ld_active) begin
          bpt <= '0; cy <= '0; cx <= '0;
          if (cfg.half_mask[bt[2:0]]) cnt_half_t <= cnt_half_t + 1'b1;
          else                        cnt_full_t <= cnt_full_t + 1'b1;
          bstate <= B_NEXT;
        end
        B_NEXT: if (!stg_full[pbuf]) begin
          px <= '0; g <= '0; ch <= 1'b0; tap <= '0; cp_i <= 1'b0;
          bstate <= cfg.half_mask[bt[2:0]] ? B_COPY : B_FEED;
        end
        B_FEED: begin
          // loop order, fastest first: tap, chunk, group, pixel
          if (tap != 2'd2) tap <= tap + 1'b1;
          else begin
            tap <= '0;
            if (int'(ch) != nch - 1) ch <= 1'b1;
            else begin
              ch <= 1'b0;
              if (int'(g) != ngrp - 1) g <= g + 1'b1;
              else begin
                g <= '0;
                px <= px + 1'b1;
                if (int'(cx) == int'(cfg.w) - 1) begin cx <= '0; cy <= cy + 1'b1; end
                else cx <= cx + 1'b1;
                if (px == 2'(OS_ROWS - 1)) bstate <= B_WAIT;
              end
            end
          end
        end
        B_WAIT: if (!ws_busy && !ws_valid_q && !add_valid) bstate <= B_HAND;
        B_COPY: begin
          cp_i <= ~cp_i;
          if (cp_i) bstate <= B_HAND;   // the last copy is written this cycle
        end
        B_HAND: begin
          pbuf <= ~pbuf;
          if (int'(bpt) != npt - 1) begin bpt <= bpt + 1'b1; bstate <= B_NEXT; end
          else begin bpt <= '0; bt <= bt + 1'b1; bstate <= B_IDLE; end
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end

  // ---- output-buffer half flags ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ob_full <= 2'b00;
    else if (state == S_IDLE) ob_full <= 2'b00;
    else begin
      if (set_ob) ob_full[t[0]]  <= 1'b1;
      if (clr_ob) ob_full[bt[0]] <= 1'b0;
    end
  end

  // ---- staging buffer flags ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stg_full <= 2'b00;
    else if (state == S_IDLE) stg_full <= 2'b00;
    else begin
      if (set_full) stg_full[pbuf] <= 1'b1;
      if (clr_full) stg_full[cbuf] <= 1'b0;
    end
  end

  // ---- consumer: cluster 4 and LIF units ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate <= C_IDLE; ct <= '0; cpt <= '0; ck <= '0; cd <= '0; ot <= '0; cbuf <= 1'b0;
    end else if (state == S_IDLE) begin
      cstate <= C_IDLE; ct <= '0; cpt <= '0; ck <= '0; cd <= '0; ot <= '0; cbuf <= 1'b0;
    end else begin
      unique case (cstate)
        C_IDLE: if (stg_full[cbuf]) begin ck <= '0; ot <= '0; cstate <= C_FEED; end
        C_FEED: begin
          if (int'(ck) == int'(cfg.rank) - 1) begin ck <= '0; cstate <= C_WAIT; end
          else ck <= ck + 1'b1;
        end
        C_WAIT: if (!c4_busy && !c4_valid_q) begin cd <= '0; cstate <= C_DRAIN; end
        C_DRAIN: begin
          cd <= cd + 1'b1;
          if (cd == 2'(OS_ROWS - 1)) begin
            if (int'(ot) != notile - 1) begin ot <= ot + 1'b1; cstate <= C_FEED; end
            else begin
              ot <= '0; cbuf <= ~cbuf; cstate <= C_IDLE;
              if (int'(cpt) != npt - 1) cpt <= cpt + 1'b1;
              else begin cpt <= '0; ct <= ct + 1'b1; end
            end
          end
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  // the two sides never touch the same staging buffer's flag at once
  a_flag_sides: assert property (@(posedge clk) disable iff (!rst_n)
                                 (set_full && clr_full) |-> (pbuf != cbuf));
  // the middle side only fills an empty staging buffer
  a_fill_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                 (bstate == B_FEED || bstate == B_COPY) |-> !stg_full[pbuf]);
  // cluster 1 only writes an output-buffer half nobody still reads
  a_ob_empty: assert property (@(posedge clk) disable iff (!rst_n)
                               (state == S_C1_DRAIN) |-> !ob_full[t[0]]);
  a_ob_sides: assert property (@(posedge clk) disable iff (!rst_n)
                               (set_ob && clr_ob) |-> (t[0] != bt[0]));

  // a new layer may only start when the sequencer is idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (state == S_IDLE));
endmodule
