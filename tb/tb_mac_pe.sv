// tb_mac_pe: self-checking test of mac_pe. Random operands, valid
// and first flags, and drain cycles are applied; a model kept in the bench
// predicts the accumulator and the forwarded operands every cycle.
module tb_mac_pe;
  import ttsnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic drain, v_in, first_in, v_out, first_out;
  w8_t a_in, a_out;
  w8_t b_in, b_out;
  acc_t acc_above, acc;
  int checks = 0, failures = 0;

  mac_pe dut (.*);

  acc_t m_acc;
  initial begin
    drain = 0; v_in = 0; first_in = 0; a_in = '0; b_in = '0; acc_above = '0;
    m_acc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      drain = ($urandom_range(9) == 0);
      v_in = $urandom_range(3) != 0;
      first_in = ($urandom_range(7) == 0);
      a_in = w8_t'($urandom);
      b_in = w8_t'($urandom);
      acc_above = acc_t'($urandom);
      begin
        automatic w8_t a = a_in;
        automatic w8_t b = b_in;
        if (drain) m_acc = acc_above;
        else if (v_in) m_acc = first_in ? (acc_t'(a) * acc_t'(b)) : m_acc + (acc_t'(a) * acc_t'(b));
      end
      @(posedge clk); #1;
      checks += 4;
      if (acc !== m_acc) begin failures++; if (failures < 5) $display("FAIL acc %0d exp %0d", acc, m_acc); end
      if (a_out !== a_in) failures++;
      if (b_out !== b_in) failures++;
      if (v_out !== v_in || first_out !== first_in) failures++;
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
