// tb_spikex_ofm_buf: checks the parallel-in, serial-out output buffer.
//
// Random columns of ROWS spike words are loaded with a neuron and window;
// the bench checks that exactly ROWS words come out, one per cycle, in row
// order, tagged with the loaded neuron and window, and that busy covers them.
module tb_spikex_ofm_buf;
  import spikex_pkg::*;
  localparam int N = ROWS;
  logic clk = 0, rst_n = 0, load = 0;
  always #5 clk = ~clk;
  twword_t in_data [N]; pos_t in_pos; tw_t in_tw;
  logic out_valid; logic [$clog2(N)-1:0] out_row; pos_t out_pos; tw_t out_tw;
  twword_t out_data; logic busy;
  spikex_ofm_buf dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  twword_t exp_d [N]; int n;
  initial begin
    for (int r = 0; r < N; r++) in_data[r] = 0;
    in_pos = 0; in_tw = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 50; trial++) begin
      @(negedge clk);
      for (int r = 0; r < N; r++) begin in_data[r] = twword_t'($urandom); exp_d[r] = in_data[r]; end
      in_pos = pos_t'($urandom); in_tw = tw_t'($urandom_range(0, NTW_MAX-1));
      load = 1; @(negedge clk); load = 0;
      n = 0;
      while (out_valid && n < 2 * N) begin
        checks++;
        if (out_row != n[$clog2(N)-1:0] || out_data != exp_d[n] || out_pos != in_pos || out_tw != in_tw || !busy) begin
          failures++; $display("trial %0d word %0d: row %0d data %h exp %h", trial, n, out_row, out_data, exp_d[n]);
        end
        n++;
        @(negedge clk);
      end
      checks++;
      if (n != N || busy) begin failures++; $display("trial %0d: %0d words", trial, n); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
