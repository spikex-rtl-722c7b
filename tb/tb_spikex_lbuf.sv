// tb_spikex_lbuf: checks the double-buffered local buffer.
//
// With the IFM configuration (16-bit words, 2 KB banks, COLS read ports):
// words written to one bank must not appear in the other, every read port
// returns its own address one cycle later, unwritten or cleared words read
// as zero, and clearing one bank leaves the other intact.
module tb_spikex_lbuf;
  import spikex_pkg::*;
  localparam int NRD = COLS, DEPTH = LBUF_BYTES * 8 / TW_WORD, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, clear = 0, cbank = 0, we = 0, wbank = 0, rbank = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] waddr; twword_t wdata; logic [AW-1:0] raddr [NRD]; twword_t rdata [NRD];
  spikex_lbuf #(.WIDTH(TW_WORD), .NRD(NRD)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  twword_t ref_mem [2][DEPTH]; bit ref_v [2][DEPTH];

  task automatic check_reads(input int n);
    for (int i = 0; i < n; i++) begin
      int b; int a [NRD];
      @(negedge clk);
      b = $urandom_range(0, 1); rbank = b[0];
      for (int p = 0; p < NRD; p++) begin a[p] = $urandom_range(0, 63); raddr[p] = AW'(a[p]); end
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] != (ref_v[b][a[p]] ? ref_mem[b][a[p]] : '0)) begin
          failures++; $display("bank %0d port %0d addr %0d: %h", b, p, a[p], rdata[p]);
        end
      end
    end
  endtask

  initial begin
    waddr = 0; wdata = 0;
    for (int p = 0; p < NRD; p++) raddr[p] = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) begin ref_v[b][a] = 0; ref_mem[b][a] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int b, a;
      @(negedge clk);
      b = $urandom_range(0, 1); a = $urandom_range(0, 63);
      we = 1; wbank = b[0]; waddr = AW'(a); wdata = twword_t'($urandom);
      ref_mem[b][a] = wdata; ref_v[b][a] = 1;
    end
    @(negedge clk); we = 0;
    check_reads(200);
    @(negedge clk); clear = 1; cbank = 1; @(negedge clk); clear = 0;
    for (int a = 0; a < DEPTH; a++) ref_v[1][a] = 0;
    check_reads(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
