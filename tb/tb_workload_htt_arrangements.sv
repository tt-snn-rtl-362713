// tb_workload_htt_arrangements: the four ways of placing two half (HTT)
// timesteps among four (FFHH, HHFF, HFHF, FHFH; F = full, H = half,
// first timestep first), as compared for ResNet18 on CIFAR10 with T = 4.
// The network's own ranks (24 and up) exceed what clusters 2/3 hold, so
// each arrangement runs on a rank-16 layer tile of 8x8 pixels, 32 input and
// 32 output channels. Every spike and potential is checked against the
// shared reference model; each run must show exactly two full and two half
// timesteps, and the cycle counts of the four arrangements are reported.
module tb_workload_htt_arrangements;
  import ttsnn_pkg::*;

  `include "tb_layer_common.svh"

  // half_mask bit t is timestep t+1; 1 = half
  localparam logic [7:0] ARR [4] = '{8'b0000_1100, 8'b0000_0011, 8'b0000_0101, 8'b0000_1010};
  localparam string      NAME [4] = '{"FFHH", "HHFF", "HFHF", "FHFH"};

  initial begin
    start = 1'b0; insp_wr_en = 1'b0; fb_wr_en = 1'b0; spk_rd_en = 1'b0; memp_rd_en = 1'b0;
    insp_wr_addr = '0; insp_wr_data = '0; fb_wr_bank = '0; fb_wr_addr = '0; fb_wr_data = '0;
    spk_rd_addr = '0; memp_rd_addr = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    for (int a = 0; a < 4; a++) begin
      $display("arrangement %s", NAME[a]);
      run_layer(8, 8, 32, 16, 32, 4, ARR[a], 3, 4);
      checks++;
      if (cnt_full_t != 16'd2 || cnt_half_t != 16'd2) begin
        failures++;
        $display("FAIL %s: %0d full, %0d half timesteps", NAME[a], cnt_full_t, cnt_half_t);
      end
    end
    $display("mechanisms: full=%0d half=%0d spikes=%0d resets=%0d", n_full, n_half, n_spk, n_reset);
    checks += 2;
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
