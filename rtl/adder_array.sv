// adder_array: merges the two parallel sub-convolution results of the PTT
// module, z = (o * w(2)) + (o * w(3)), lane by lane.
//
// Each cycle with in_valid it adds the N outputs of cluster 2 to the N
// outputs of cluster 3 (16-bit, saturating) and re-quantises the sum to the
// 8-bit operand that cluster 4's multipliers take: arithmetic shift right by
// shift, then saturation to [-128, 127]. The grp tag travels with the data.
// One register stage: out_valid follows in_valid by one cycle. The element
// wise merge before cluster 4 follows the paper; saturation and the
// re-quantisation shift are this design's choice.
module adder_array
  import ttsnn_pkg::*;
#(
  parameter int unsigned N     = WS_COLS,
  parameter int unsigned GRP_W = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [GRP_W-1:0] in_grp,
  input  acc_t             a [N],     // from cluster 2
  input  acc_t             b [N],     // from cluster 3
  input  logic [3:0]       shift,
  output logic             out_valid,
  output logic [GRP_W-1:0] out_grp,
  output acc_t             sum [N],
  output w8_t              sum8 [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_grp   <= '0;
      for (int i = 0; i < N; i++) begin sum[i] <= '0; sum8[i] <= '0; end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_grp <= in_grp;
        for (int i = 0; i < N; i++) begin
          sum[i]  <= sat_add16(a[i], b[i]);
          sum8[i] <= requant8(sat_add16(a[i], b[i]), shift);
        end
      end
    end
  end
endmodule
