// ttsnn_pkg: sizes and helper functions shared by the TT-SNN training
// accelerator (forward pass of one tensor-train decomposed convolution layer).
//
// The numbers that follow the hardware table of the design are: four
// clusters of 32 PEs, a 32-byte scratch pad per PE, 8-bit multipliers,
// 16-bit accumulators and the global buffer sizes (144 kB filter buffer,
// four 32 kB buffers, 272 kB in total). The array shapes (4x8 and 8x4), the
// rank tile of 8 channels, the fixed-point scale and the saturating
// re-quantisation are choices of this implementation.
package ttsnn_pkg;

  // ---- from the hardware table ---------------------------------------
  localparam int unsigned N_CLUSTER     = 4;
  localparam int unsigned PE_PER_CLUSTER = 32;
  localparam int unsigned SPAD_BYTES    = 32;
  localparam int unsigned ACC_W         = 16;
  localparam int unsigned MUL_W         = 8;
  localparam int unsigned FILTER_BUF_BYTES = 144 * 1024;
  localparam int unsigned GBUF_BYTES    = 32 * 1024;   // each of the four other buffers

  // ---- array shapes (own choice, 32 PEs each) -----------------------
  localparam int unsigned OS_ROWS = 4;   // output-stationary: pixel rows
  localparam int unsigned OS_COLS = 8;   // output-stationary: channel columns
  localparam int unsigned WS_ROWS = 8;   // weight-stationary: input rank channels
  localparam int unsigned WS_COLS = 4;   // weight-stationary: output rank channels

  // Largest TT rank whose 3-tap kernels stay resident in the 32-byte
  // scratch pads: 3 taps * (R/WS_COLS) groups * (R/WS_ROWS) chunks <= 32.
  localparam int unsigned RMAX     = 16;
  localparam int unsigned NSEL     = 3 * (RMAX / WS_COLS) * (RMAX / WS_ROWS); // 24
  localparam int unsigned SEL_W    = $clog2(SPAD_BYTES);
  localparam int unsigned TMAX     = 8;  // timesteps per layer held on chip

  // ---- LIF neuron (tau_m = 0.25, V_th = 0.5 in Q8.8) ----------------
  localparam int unsigned FRAC_BITS = 8;
  localparam int unsigned TAU_SHIFT = 2;                 // 0.25 = 2^-2
  localparam logic signed [ACC_W-1:0] VTH_DEFAULT = 16'sd128; // 0.5 * 2^8


  // ---- buffer geometries (words x width) ----------------------------
  localparam int unsigned INSP_W  = OS_ROWS;                 // 4 spikes / word
  localparam int unsigned INSP_D  = GBUF_BYTES * 8 / INSP_W; // 65536
  localparam int unsigned OBUF_W  = RMAX * 8;                // one pixel's rank vector
  localparam int unsigned OBUF_D  = GBUF_BYTES * 8 / OBUF_W; // 2048 pixels
  localparam int unsigned MEMP_W  = OS_COLS * ACC_W;         // 8 potentials / word
  localparam int unsigned MEMP_D  = GBUF_BYTES * 8 / MEMP_W; // 2048
  localparam int unsigned SPK_W   = OS_COLS;                 // 8 spikes / word
  localparam int unsigned SPK_D   = GBUF_BYTES * 8 / SPK_W;  // 32768
  localparam int unsigned INSP_AW = $clog2(INSP_D);
  localparam int unsigned OBUF_AW = $clog2(OBUF_D);
  localparam int unsigned OBUF_HALF = OBUF_D / 2;   // one half per timestep parity
  localparam int unsigned MEMP_AW = $clog2(MEMP_D);
  localparam int unsigned SPK_AW  = $clog2(SPK_D);
  localparam int unsigned FB_AW8  = $clog2(FILTER_BUF_BYTES / 4 / OS_COLS);
  localparam int unsigned FB_AW4  = $clog2(FILTER_BUF_BYTES / 4 / WS_COLS);

  // ---- layer configuration, set by the host before start ------------
  // h, w: feature map (h*w a multiple of OS_ROWS, at most OBUF_D/2);
  // cin: input channels I; rank: TT rank R (8 or 16, pad with zero
  // weights otherwise); cout: output channels O (multiple of OS_COLS);
  // tsteps: timesteps T; half_mask[t] = 1 runs timestep t as a half (HTT)
  // sub-convolution, 0 as a full (PTT) one; sh1 / sh23: re-quantisation
  // shifts after cluster 1 and after the adder array; vth: threshold.
  typedef struct packed {
    logic [6:0]      h;
    logic [6:0]      w;
    logic [9:0]      cin;
    logic [4:0]      rank;
    logic [9:0]      cout;
    logic [3:0]      tsteps;
    logic [TMAX-1:0] half_mask;
    logic [3:0]      sh1;
    logic [3:0]      sh23;
    logic [ACC_W-1:0] vth;
  } layer_cfg_t;

  // ---- controller states --------------------------------------------
  // cluster-1 side: o = x_t * w(1) into one half of the output buffer
  typedef enum logic [2:0] {
    S_IDLE, S_C1_FEED, S_C1_WAIT, S_C1_DRAIN, S_C1_HAND, S_C1_NEXT, S_FLUSH
  } state_t;
  // middle side: clusters 2/3 (or the HTT copy) from one output-buffer half
  // into one of the two staging buffers
  typedef enum logic [2:0] {
    B_IDLE, B_NEXT, B_FEED, B_WAIT, B_COPY, B_HAND
  } bstate_t;
  // last side: cluster 4 and the LIF units on a full staging buffer
  typedef enum logic [1:0] {
    C_IDLE, C_FEED, C_WAIT, C_DRAIN
  } cstate_t;

  typedef logic signed [MUL_W-1:0] w8_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Arithmetic shift right then saturate to the 8-bit multiplier operand.
  function automatic w8_t requant8(input acc_t v, input logic [3:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > 16'sd127)       return 8'sd127;
    else if (s < -16'sd128) return -8'sd128;
    else                    return s[7:0];
  endfunction

  // 16-bit saturating addition.
  function automatic acc_t sat_add16(input acc_t a, input acc_t b);
    logic signed [ACC_W:0] s;
    s = {a[ACC_W-1], a} + {b[ACC_W-1], b};
    if (s > 17'sd32767)       return 16'sh7fff;
    else if (s < -17'sd32768) return 16'sh8000;
    else                      return s[ACC_W-1:0];
  endfunction

endpackage
