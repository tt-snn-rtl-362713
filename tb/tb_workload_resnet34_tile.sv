// tb_workload_resnet34_tile: runs, end to end, the largest tile of a
// rank-16 layer of the ResNet34 / N-Caltech101 network (T = 6) that the
// default buffers hold: 8x8 pixels, 64 input and 32 output channels. It runs
// once with half sub-convolutions at t = 5, 6 (HTT) and once with full ones
// (PTT), checks every spike and potential against the shared reference
// model and reports the cycle counts of both, so that the HTT saving can
// be seen.
module tb_workload_resnet34_tile;
  import ttsnn_pkg::*;

  `include "tb_layer_common.svh"

  initial begin
    start = 1'b0; insp_wr_en = 1'b0; fb_wr_en = 1'b0; spk_rd_en = 1'b0; memp_rd_en = 1'b0;
    insp_wr_addr = '0; insp_wr_data = '0; fb_wr_bank = '0; fb_wr_addr = '0; fb_wr_data = '0;
    spk_rd_addr = '0; memp_rd_addr = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // rank-16 ResNet34 layer tile: 8x8 pixels, 64 -> 32 channels, T = 6
    // HTT as in the paper's N-Caltech101 runs: half sub-convolutions at t = 5, 6
    run_layer(8, 8, 64, 16, 32, 6, 8'b0011_0000, 3, 5);
    // the same tile with PTT (full sub-convolutions at every timestep)
    run_layer(8, 8, 64, 16, 32, 6, 8'b0000_0000, 3, 5);
    $display("mechanisms: full=%0d half=%0d overlap=%0d pad=%0d sat=%0d spikes=%0d resets=%0d",
             n_full, n_half, n_overlap, n_pad, n_sat, n_spk, n_reset);
    checks += 3;
    if (n_full == 0) failures++;
    if (n_half == 0) failures++;
    if (n_spk == 0) failures++;
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
