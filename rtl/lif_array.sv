// lif_array: N leaky integrate-and-fire neurons (the LIF units after
// cluster 4).
//
// For each lane: the stored potential of the previous timestep u_prev is
// reset to 0 if it fired (u_prev >= vth), then leaked by tau_m = 0.25 (an
// arithmetic shift right by TAU_SHIFT = 2) and the new synaptic input y
// (cluster-4 output) is added with 16-bit saturation: u = tau*u' + y. The
// neuron spikes when u >= vth. On the first timestep of a layer (first_t)
// the previous potential is taken as 0. The potential is returned before
// the reset, so that the membrane-potential buffer keeps what the backward
// pass needs, and the reset is re-derived when it is read back.
// Values are Q8.8 fixed point, so the paper's V_th = 0.5 is 128.
// One register stage: out_valid follows in_valid by one cycle.
// The neuron equation, tau_m and V_th follow the paper; Q8.8 and storing the
// pre-reset potential are this design's choice.
module lif_array
  import ttsnn_pkg::*;
#(
  parameter int unsigned N = OS_COLS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   first_t,
  input  acc_t   y      [N],
  input  acc_t   u_prev [N],
  input  acc_t   vth,
  output logic   out_valid,
  output logic [N-1:0] spike,
  output acc_t   u      [N]
);
  acc_t u_nxt [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      acc_t up;
      up = (first_t || (u_prev[i] >= vth)) ? '0 : u_prev[i];
      u_nxt[i] = sat_add16(up >>> TAU_SHIFT, y[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      spike     <= '0;
      for (int i = 0; i < N; i++) u[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N; i++) begin
          u[i]     <= u_nxt[i];
          spike[i] <= (u_nxt[i] >= vth);
        end
      end
    end
  end
endmodule
