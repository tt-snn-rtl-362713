// mac_pe: processing element of cluster 4 (output-stationary, 8-bit input).
//
// Same dataflow as spike_pe, but the left input is an 8-bit signed
// activation and the PE multiplies it with the 8-bit signed weight coming
// from above (8-bit multiplier, 16-bit accumulator, as in the paper's
// hardware table). The accumulator wraps on overflow (two's complement);
// valid/first tags, wrap-around and the shift-down drain are this design's
// choice. All outputs are registered: one cycle per hop.
module mac_pe
  import ttsnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic drain,
  input  w8_t  a_in,
  input  logic v_in,
  input  logic first_in,
  input  w8_t  b_in,
  input  acc_t acc_above,
  output w8_t  a_out,
  output logic v_out,
  output logic first_out,
  output w8_t  b_out,
  output acc_t acc
);
  acc_t prod;
  always_comb prod = acc_t'(a_in) * acc_t'(b_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; v_out <= 1'b0; first_out <= 1'b0; b_out <= '0; acc <= '0;
    end else begin
      a_out     <= a_in;
      v_out     <= v_in;
      first_out <= first_in;
      b_out     <= b_in;
      if (drain)         acc <= acc_above;
      else if (v_in)     acc <= first_in ? prod : acc + prod;
    end
  end
endmodule
