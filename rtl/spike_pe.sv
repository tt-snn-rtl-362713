// spike_pe: processing element of cluster 1 (output-stationary, spike input).
//
// The input of the first sub-convolution is a binary spike, so the PE has no
// multiplier: when the spike is 1 it adds the 8-bit weight to its 16-bit
// accumulator, otherwise it adds nothing. The spike (with its valid and
// "first" tags) moves one PE to the right and the weight one PE down per
// cycle, as in a classic output-stationary systolic array. A valid input
// with first=1 starts a new output (the accumulator is overwritten instead
// of added to). With drain=1 the accumulator takes the value of the PE
// above, so the results leave the array through the bottom row, one row per
// cycle. The spike-gated accumulate and the 16-bit accumulator follow the
// paper; the tag signals and the shift-down drain are this design's choice.
// All outputs are registered: latency one cycle per hop.
module spike_pe
  import ttsnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic drain,
  input  logic a_in,       // spike from the left
  input  logic v_in,       // spike is valid
  input  logic first_in,   // first term of a new output
  input  w8_t  b_in,       // weight from above
  input  acc_t acc_above,  // accumulator of the PE above (drain path)
  output logic a_out,
  output logic v_out,
  output logic first_out,
  output w8_t  b_out,
  output acc_t acc
);
  acc_t term;
  always_comb term = a_in ? acc_t'(b_in) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= 1'b0; v_out <= 1'b0; first_out <= 1'b0; b_out <= '0; acc <= '0;
    end else begin
      a_out     <= a_in;
      v_out     <= v_in;
      first_out <= first_in;
      b_out     <= b_in;
      if (drain)         acc <= acc_above;
      else if (v_in)     acc <= first_in ? term : acc + term;
    end
  end
endmodule
