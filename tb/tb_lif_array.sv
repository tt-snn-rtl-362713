// tb_lif_array: self-checking test of lif_array. Eight neurons are run over
// many timesteps, the bench feeding back the stored (pre-reset) potential as
// the membrane buffer would, with random synaptic inputs. The bench model is
// u = 0.25 * (fired ? 0 : u_prev) + y, saturating, spike when u >= 0.5
// (128 in Q8.8), u_prev = 0 on the first timestep. It checks every spike
// and potential and that both firing/reset and leaking without a spike
// occurred.
module tb_lif_array;
  import ttsnn_pkg::*;
  localparam int N = OS_COLS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, first_t, out_valid;
  acc_t y [N], u_prev [N], u [N], vth;
  logic [N-1:0] spike;
  int checks = 0, failures = 0, nfire = 0, nleak = 0;

  lif_array dut (.*);

  acc_t m_u [N];
  initial begin
    in_valid = 0; first_t = 0; vth = VTH_DEFAULT;
    for (int i = 0; i < N; i++) begin y[i] = '0; u_prev[i] = '0; m_u[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      acc_t eu [N];
      logic [N-1:0] es;
      @(negedge clk);
      in_valid = 1;
      first_t = (n % 6 == 0);
      for (int i = 0; i < N; i++) begin
        int up, s;
        u_prev[i] = m_u[i];
        y[i] = ($urandom_range(19) == 0) ? acc_t'(30000) : acc_t'(int'($urandom_range(200)) - 60);
        up = (first_t || u_prev[i] >= vth) ? 0 : int'(u_prev[i]);
        s = (up >>> 2) + int'(y[i]);
        if (s > 32767) s = 32767;
        eu[i] = acc_t'(s);
        es[i] = (eu[i] >= vth);
        if (es[i]) nfire++;
        else if (!first_t && up != 0) nleak++;
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (u[i] !== eu[i]) begin failures++; if (failures < 5) $display("FAIL u %0d exp %0d", u[i], eu[i]); end
        if (spike[i] !== es[i]) failures++;
        m_u[i] = u[i];
      end
    end
    checks += 2;
    if (nfire == 0) failures++;
    if (nleak == 0) failures++;
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
