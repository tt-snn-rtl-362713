// ws_pe: weight-stationary processing element of clusters 2 and 3.
//
// The PE keeps its weights in a 32-byte scratch pad (the scratch pad size
// per PE of the paper's hardware table). For the 3x1 / 1x3 sub-convolutions
// a PE owns one (input rank channel, output rank channel) pair per group and
// chunk, and the scratch pad holds the three kernel taps of every pair it
// serves. Each cycle an 8-bit activation arrives from the left together
// with a select index naming the scratch-pad weight to use; the PE adds
// activation*weight to the partial sum coming from above and passes the sum
// down, and passes activation and tag to the right. The scratch pad is
// written through ld_en/ld_sel/ld_data before the layer starts.
// Multiply with 8-bit operands and a 16-bit wrapping partial sum; the tag
// format is this design's choice. Registered outputs: one cycle per hop.
module ws_pe
  import ttsnn_pkg::*;
#(
  parameter int unsigned TAG_W = 8   // tag bits carried with the data
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ld_en,
  input  logic [SEL_W-1:0] ld_sel,
  input  w8_t              ld_data,
  input  w8_t              a_in,
  input  logic             v_in,
  input  logic [SEL_W-1:0] sel_in,
  input  logic [TAG_W-1:0] tag_in,
  input  acc_t             psum_in,
  output w8_t              a_out,
  output logic             v_out,
  output logic [SEL_W-1:0] sel_out,
  output logic [TAG_W-1:0] tag_out,
  output acc_t             psum_out
);
  w8_t spad [SPAD_BYTES];

  always_ff @(posedge clk) begin
    if (ld_en) spad[ld_sel] <= ld_data;
  end

  acc_t prod;
  always_comb prod = acc_t'(a_in) * acc_t'(spad[sel_in]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; v_out <= 1'b0; sel_out <= '0; tag_out <= '0; psum_out <= '0;
    end else begin
      a_out    <= a_in;
      v_out    <= v_in;
      sel_out  <= sel_in;
      tag_out  <= tag_in;
      psum_out <= v_in ? psum_in + prod : psum_in;
    end
  end
endmodule
