// tb_gbuf_sram: self-checking test of gbuf_sram at its default word width
// and depth (128 bits x 2048, one of the 32 kB buffers) with two read
// ports. Random bit-masked writes and random reads on both ports are mixed
// with a reference copy of the memory; every read is checked one cycle
// after its address, including a read of the address being written.
module tb_gbuf_sram;
  localparam int WIDTH = 128, DEPTH = 2048, AW = 11;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [AW-1:0] waddr;
  logic [WIDTH-1:0] wdata, wmask;
  logic re [2];
  logic [AW-1:0] raddr [2];
  logic [WIDTH-1:0] rdata [2];
  int checks = 0, failures = 0;

  gbuf_sram #(.NRD(2)) dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  function automatic logic [WIDTH-1:0] r128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    we = 0; waddr = '0; wdata = '0; wmask = '0;
    for (int p = 0; p < 2; p++) begin re[p] = 0; raddr[p] = '0; end
    // initialise a window of addresses through the write port
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = r128(); wmask = '1; ref_mem[a] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      logic [WIDTH-1:0] exp_d [2];
      logic do_rd [2];
      @(negedge clk);
      we = 1'($urandom_range(1));
      waddr = AW'($urandom_range(255)); wdata = r128(); wmask = r128();
      for (int p = 0; p < 2; p++) begin
        re[p] = 1'($urandom_range(1));
        raddr[p] = ($urandom_range(3) == 0) ? waddr : AW'($urandom_range(255));
        do_rd[p] = re[p];
        exp_d[p] = ref_mem[raddr[p]];
      end
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = (ref_mem[waddr] & ~wmask) | (wdata & wmask);
      for (int p = 0; p < 2; p++) if (do_rd[p]) begin
        checks++;
        if (rdata[p] !== exp_d[p]) begin failures++; if (failures < 5) $display("FAIL port %0d addr %0d", p, raddr[p]); end
      end
    end
    // top of the address range
    @(negedge clk); we = 1; waddr = AW'(DEPTH - 1); wdata = r128(); wmask = '1; ref_mem[DEPTH-1] = wdata;
    @(negedge clk); we = 0; re[0] = 1; raddr[0] = AW'(DEPTH - 1);
    @(posedge clk); #1;
    checks++;
    if (rdata[0] !== ref_mem[DEPTH-1]) failures++;
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
