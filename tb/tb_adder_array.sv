// tb_adder_array: self-checking test of adder_array. Random pairs of
// 16-bit vectors (with many values near the limits, so that saturation of
// the sum and of the 8-bit re-quantisation both occur) and random shifts
// are applied; the bench checks the registered sum, its 8-bit version and
// the tag one cycle later.
module tb_adder_array;
  import ttsnn_pkg::*;
  localparam int N = WS_COLS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [1:0] in_grp, out_grp;
  acc_t a [N], b [N], sum [N];
  w8_t sum8 [N];
  logic [3:0] shift;
  int checks = 0, failures = 0, nsat = 0;

  adder_array dut (.*);

  function automatic acc_t rv();
    case ($urandom_range(3))
      0: return acc_t'(32000 + $urandom_range(767));
      1: return acc_t'(-32000 - int'($urandom_range(768)));
      default: return acc_t'($urandom_range(4000)) - 16'sd2000;
    endcase
  endfunction

  initial begin
    in_valid = 0; in_grp = '0; shift = '0;
    for (int i = 0; i < N; i++) begin a[i] = '0; b[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      acc_t es [N];
      w8_t  e8 [N];
      @(negedge clk);
      in_valid = 1; in_grp = 2'($urandom); shift = 4'($urandom_range(6));
      for (int i = 0; i < N; i++) begin
        int s, q;
        a[i] = rv(); b[i] = rv();
        s = int'(a[i]) + int'(b[i]);
        if (s > 32767) begin s = 32767; nsat++; end
        if (s < -32768) begin s = -32768; nsat++; end
        es[i] = acc_t'(s);
        q = s >>> shift;
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        e8[i] = w8_t'(q);
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_grp !== in_grp) failures++;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (sum[i] !== es[i]) begin failures++; if (failures < 5) $display("FAIL sum %0d exp %0d", sum[i], es[i]); end
        if (sum8[i] !== e8[i]) begin failures++; if (failures < 5) $display("FAIL sum8 %0d exp %0d", sum8[i], e8[i]); end
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks += 2;
    if (out_valid) failures++;
    if (nsat == 0) failures++;
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
