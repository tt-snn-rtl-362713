// tb_os_cluster_mac: self-checking test of os_cluster_mac at its default
// 4x8 shape. Several tiles with random reduction length K and random
// operands are streamed in (with idle gaps), the bench waits for busy to
// fall, checks that this takes exactly ROWS+COLS-1 cycles after the last
// operand, drains the array and compares each drained row with the matrix
// product computed here (16-bit wrap-around).
module tb_os_cluster_mac;
  import ttsnn_pkg::*;
  localparam int ROWS = OS_ROWS, COLS = OS_COLS, MK = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_first, drain, busy;
  w8_t  a_vec [ROWS];
  w8_t  b_vec [COLS];
  acc_t out_vec [COLS];
  int checks = 0, failures = 0;

  os_cluster_mac dut (.*);

  w8_t  A [ROWS][MK];
  w8_t  B [MK][COLS];

  initial begin
    in_valid = 0; in_first = 0; drain = 0;
    for (int r = 0; r < ROWS; r++) a_vec[r] = '0;
    for (int c = 0; c < COLS; c++) b_vec[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 20; tile++) begin
      automatic int K = 1 + $urandom_range(MK - 1);
      int lat;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < ROWS; r++) A[r][k] = w8_t'($urandom);
        for (int c = 0; c < COLS; c++) B[k][c] = w8_t'($urandom);
      end
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0);
        for (int r = 0; r < ROWS; r++) a_vec[r] = A[r][k];
        for (int c = 0; c < COLS; c++) b_vec[c] = B[k][c];
        if (k > 0 && $urandom_range(5) == 0) begin   // idle gap
          in_valid = 0; in_first = 0;
          @(negedge clk);
          in_valid = 1; in_first = (k == 0);
        end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0;
      for (int r = 0; r < ROWS; r++) a_vec[r] = w8_t'($urandom);
      lat = 0;
      while (busy) begin @(negedge clk); lat++; end
      checks++;
      if (lat != ROWS + COLS - 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int d = 0; d < ROWS; d++) begin
        drain = 1;
        #1;
        for (int c = 0; c < COLS; c++) begin
          automatic acc_t e = 0;
          for (int k = 0; k < K; k++) e += acc_t'(A[ROWS-1-d][k]) * acc_t'(B[k][c]);
          checks++;
          if (out_vec[c] !== e) begin
            failures++;
            if (failures < 6) $display("FAIL tile %0d row %0d col %0d got %0d exp %0d", tile, ROWS-1-d, c, out_vec[c], e);
          end
        end
        @(negedge clk);
      end
      drain = 0;
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
