// tb_filter_buffer: self-checking test of filter_buffer at its default
// 144 kB size. Random words are written to all four banks (including the
// last word of each bank); then all read ports are exercised in the same
// cycles and compared with a reference copy, which also shows that a write
// to one bank leaves the others alone.
module tb_filter_buffer;
  import ttsnn_pkg::*;
  localparam int D8 = 4608, D4 = 9216;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en, rd1_en, rd23_en, rd4_en;
  logic [1:0] wr_bank;
  logic [FB_AW4-1:0] wr_addr, rd23_addr;
  logic [FB_AW8-1:0] rd1_addr, rd4_addr;
  logic [63:0] wr_data, rd1_data, rd4_data;
  logic [31:0] rd2_data, rd3_data;
  int checks = 0, failures = 0;

  filter_buffer dut (.*);

  logic [63:0] m1 [D8], m4 [D8];
  logic [31:0] m2 [D4], m3 [D4];

  initial begin
    wr_en = 0; rd1_en = 0; rd23_en = 0; rd4_en = 0; wr_bank = '0; wr_addr = '0; rd23_addr = '0;
    rd1_addr = '0; rd4_addr = '0; wr_data = '0;
    // write 64 words per bank plus the last word of each bank
    for (int b = 0; b < 4; b++) for (int a = 0; a <= 64; a++) begin
      automatic int addr = (a == 64) ? ((b == 1 || b == 2) ? D4 - 1 : D8 - 1) : a;
      @(negedge clk);
      wr_en = 1; wr_bank = 2'(b); wr_addr = FB_AW4'(addr); wr_data = {$urandom, $urandom};
      case (b)
        0: m1[addr] = wr_data;
        1: m2[addr] = wr_data[31:0];
        2: m3[addr] = wr_data[31:0];
        default: m4[addr] = wr_data;
      endcase
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      rd1_en = 1; rd23_en = 1; rd4_en = 1;
      rd1_addr  = ($urandom_range(9) == 0) ? FB_AW8'(D8 - 1) : FB_AW8'($urandom_range(63));
      rd4_addr  = ($urandom_range(9) == 0) ? FB_AW8'(D8 - 1) : FB_AW8'($urandom_range(63));
      rd23_addr = ($urandom_range(9) == 0) ? FB_AW4'(D4 - 1) : FB_AW4'($urandom_range(63));
      @(posedge clk); #1;
      checks += 4;
      if (rd1_data !== m1[rd1_addr]) failures++;
      if (rd2_data !== m2[rd23_addr]) failures++;
      if (rd3_data !== m3[rd23_addr]) failures++;
      if (rd4_data !== m4[rd4_addr]) begin failures++; if (failures < 5) $display("FAIL w4 %0d", rd4_addr); end
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
