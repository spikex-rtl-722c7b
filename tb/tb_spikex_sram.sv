// tb_spikex_sram: checks the global-buffer memory at its full 54 KB size.
//
// Random writes and reads against a reference array, including reads of the
// word written in the same cycle (the old word must come back), one-cycle
// read latency, and read data holding while `re` is low.
module tb_spikex_sram;
  import spikex_pkg::*;
  localparam int DEPTH = GLB_BYTES * 8 / 16, AW = $clog2(DEPTH);
  logic clk = 0, we = 0, re = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] waddr, raddr; logic [15:0] wdata, rdata;
  spikex_sram dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [15:0] ref_mem [int];
  initial begin
    waddr = 0; raddr = 0; wdata = 0;
    // fill a window of addresses, plus the first and last word
    for (int a = 0; a < 600; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a < 2 ? (a == 0 ? 0 : DEPTH - 1) : $urandom_range(0, DEPTH - 1));
      wdata = 16'($urandom); ref_mem[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      int a; logic [15:0] e;
      @(negedge clk);
      a = $urandom_range(0, 1) ? $urandom_range(0, DEPTH - 1) : 0;
      if (!ref_mem.exists(a)) begin ref_mem[a] = 16'($urandom); we = 1; waddr = AW'(a); wdata = ref_mem[a];
        @(negedge clk); we = 0; end
      e = ref_mem[a];
      re = 1; raddr = AW'(a);
      // simultaneous write of a new value to the same address
      we = 1; waddr = AW'(a); wdata = 16'($urandom);
      @(negedge clk);
      ref_mem[a] = wdata;
      we = 0; re = 0;
      checks++;
      if (rdata != e) begin failures++; $display("addr %0d: %h exp %h", a, rdata, e); end
      raddr = AW'($urandom);
      @(negedge clk);
      checks++;
      if (rdata != e) begin failures++; $display("read data did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
