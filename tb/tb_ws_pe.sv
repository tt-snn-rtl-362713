// tb_ws_pe: self-checking test of ws_pe. The scratch pad is filled with
// random weights, then random activations with random scratch-pad indices
// and incoming partial sums are applied; the bench predicts psum_out =
// psum_in + a * spad[sel] (or psum_in when not valid) and the forwarding of
// activation, index and tag. Weights are rewritten on the fly as well.
module tb_ws_pe;
  import ttsnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_en, v_in, v_out;
  logic [SEL_W-1:0] ld_sel, sel_in, sel_out;
  w8_t ld_data, a_in, a_out;
  logic [7:0] tag_in, tag_out;
  acc_t psum_in, psum_out;
  int checks = 0, failures = 0;
  w8_t m_spad [SPAD_BYTES];

  ws_pe dut (.*);

  initial begin
    ld_en = 0; v_in = 0; ld_sel = '0; sel_in = '0; ld_data = '0; a_in = '0; tag_in = '0; psum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < SPAD_BYTES; i++) begin
      @(negedge clk); ld_en = 1; ld_sel = SEL_W'(i); ld_data = w8_t'($urandom); m_spad[i] = ld_data;
    end
    for (int n = 0; n < 2000; n++) begin
      acc_t exp_ps;
      @(negedge clk);
      ld_en = ($urandom_range(15) == 0);
      ld_sel = SEL_W'($urandom); ld_data = w8_t'($urandom);
      v_in = $urandom_range(3) != 0;
      sel_in = SEL_W'($urandom); a_in = w8_t'($urandom);
      tag_in = 8'($urandom); psum_in = acc_t'($urandom);
      exp_ps = v_in ? psum_in + acc_t'(a_in) * acc_t'(m_spad[sel_in]) : psum_in;
      @(posedge clk); #1;
      if (ld_en) m_spad[ld_sel] = ld_data;
      checks += 3;
      if (psum_out !== exp_ps) begin failures++; if (failures < 5) $display("FAIL psum %0d exp %0d", psum_out, exp_ps); end
      if (a_out !== a_in || sel_out !== sel_in) failures++;
      if (tag_out !== tag_in || v_out !== v_in) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
