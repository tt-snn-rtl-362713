// tb_ws_cluster: self-checking test of ws_cluster at its default 8x4 shape.
// The scratch pads are filled with random weights; then outputs made of
// 1 to 6 steps (random scratch-pad index and random activations per step)
// are streamed back to back and with gaps. A scoreboard holds, for every
// output, sum over steps and rows of a[r] * spad[r][c][sel] and its tag; the
// monitor compares each out_valid vector with it and checks that it leaves
// exactly ROWS + COLS cycles after the output's last step went in.
module tb_ws_cluster;
  import ttsnn_pkg::*;
  localparam int ROWS = WS_ROWS, COLS = WS_COLS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_en, in_valid, in_first, in_last, busy, out_valid;
  logic [$clog2(ROWS)-1:0] ld_row;
  logic [SEL_W-1:0] ld_sel, in_sel;
  w8_t ld_data [COLS];
  logic [1:0] in_grp, out_grp;
  w8_t a_vec [ROWS];
  acc_t out_vec [COLS];
  int checks = 0, failures = 0;

  ws_cluster dut (.*);

  w8_t spad [ROWS][COLS][SPAD_BYTES];
  typedef struct { acc_t v [COLS]; logic [1:0] g; int t_last; } exp_t;
  exp_t q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = q.pop_front();
      if (cyc - e.t_last != ROWS + COLS) begin
        failures++; $display("FAIL latency %0d", cyc - e.t_last);
      end
      checks++;
      if (out_grp !== e.g) failures++;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (out_vec[c] !== e.v[c]) begin
          failures++;
          if (failures < 6) $display("FAIL col %0d got %0d exp %0d", c, out_vec[c], e.v[c]);
        end
      end
    end
  end

  initial begin
    ld_en = 0; in_valid = 0; in_first = 0; in_last = 0; ld_row = '0; ld_sel = '0; in_sel = '0;
    in_grp = '0;
    for (int c = 0; c < COLS; c++) ld_data[c] = '0;
    for (int r = 0; r < ROWS; r++) a_vec[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SPAD_BYTES; s++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ld_en = 1; ld_row = 3'(r); ld_sel = SEL_W'(s);
      for (int c = 0; c < COLS; c++) begin ld_data[c] = w8_t'($urandom); spad[r][c][s] = ld_data[c]; end
    end
    @(negedge clk);
    ld_en = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int steps = 1 + $urandom_range(5);
      automatic exp_t e;
      for (int c = 0; c < COLS; c++) e.v[c] = 0;
      e.g = 2'($urandom);
      for (int s = 0; s < steps; s++) begin
        if ($urandom_range(7) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (s == 0); in_last = (s == steps - 1);
        in_sel = SEL_W'($urandom_range(SPAD_BYTES - 1)); in_grp = e.g;
        for (int r = 0; r < ROWS; r++) a_vec[r] = w8_t'($urandom);
        for (int c = 0; c < COLS; c++)
          for (int r = 0; r < ROWS; r++) e.v[c] += acc_t'(a_vec[r]) * acc_t'(spad[r][c][in_sel]);
        if (s == steps - 1) begin e.t_last = cyc; q.push_back(e); end
        @(negedge clk);
      end
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
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
