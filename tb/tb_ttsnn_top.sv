// tb_ttsnn_top: end-to-end test of the TT-SNN layer accelerator at its
// default sizes (the top has no parameters; the layer shape is run-time
// configuration).
//
// For each test layer the bench draws random spikes and TT-core weights,
// loads them through the host ports, starts the layer and, when done rises,
// reads back every output spike and membrane potential and compares them
// with a reference computed here in plain integer arithmetic: 1x1 conv of
// the spikes, re-quantisation, 3x1 and 1x3 convs with zero padding, their
// saturating sum and re-quantisation (full timesteps) or the 1x1 output
// itself (half timesteps), the final 1x1 conv and the LIF recurrence
// u = 0.25*u' + y, spike when u >= V_th, reset to 0. It also checks that
// every mechanism happened: full (PTT) and half (HTT) timesteps, the weight
// fill overlapping cluster 1, cluster 4 streaming while an earlier stage
// also streams and cluster 1 streaming (next timestep) while clusters 2/3
// stream (pipelining), zero padding, saturation, spikes and resets.
module tb_ttsnn_top;
  import ttsnn_pkg::*;

  `include "tb_layer_common.svh"

  initial begin
    start = 1'b0; insp_wr_en = 1'b0; fb_wr_en = 1'b0; spk_rd_en = 1'b0; memp_rd_en = 1'b0;
    insp_wr_addr = '0; insp_wr_data = '0; fb_wr_bank = '0; fb_wr_addr = '0; fb_wr_data = '0;
    spk_rd_addr = '0; memp_rd_addr = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // HTT: full sub-convolutions at t = 1, 2, half at t = 3, 4 (rank 16)
    run_layer(4, 8, 16, 16, 16, 4, 8'b0000_1100, 2, 4);
    // PTT: all timesteps full (rank 8)
    run_layer(4, 4, 8, 8, 8, 2, 8'b0000_0000, 2, 4);
    // other HTT arrangement (H F H F), rank 16, 24 output channels
    run_layer(2, 6, 12, 16, 24, 4, 8'b0000_0101, 1, 1);
    // one timestep, one pixel tile: the weight fill outlasts cluster 1
    run_layer(2, 2, 4, 16, 8, 1, 8'b0000_0001, 1, 3);
    // one full timestep, one pixel tile
    run_layer(1, 4, 4, 8, 16, 1, 8'b0000_0000, 1, 2);
    $display("mechanisms: full=%0d half=%0d overlap=%0d c4_pipelined=%0d c1_pipelined=%0d pad=%0d sat=%0d spikes=%0d resets=%0d",
             n_full, n_half, n_overlap, n_pipe, n_pipe_ob, n_pad, n_sat, n_spk, n_reset);
    checks += 9;
    if (n_pipe == 0) failures++;
    if (n_pipe_ob == 0) failures++;
    if (n_full == 0) failures++;
    if (n_half == 0) failures++;
    if (n_overlap == 0) failures++;
    if (n_pad == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_spk == 0) failures++;
    if (n_reset == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
