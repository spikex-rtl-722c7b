// tb_spikex_filter_buf: checks the row skew of the weight feeder.
//
// A random weight vector and valid bit are pushed on every beat (with random
// idle cycles between beats); after each beat, row r must show the vector
// pushed r beats earlier (row 0 shows the current input).
module tb_spikex_filter_buf;
  import spikex_pkg::*;
  localparam int N = ROWS, NB = 200;
  logic clk = 0, rst_n = 0, beat = 0, v_in = 0;
  always #5 clk = ~clk;
  weight_t w_in [N]; weight_t w_out [N]; logic v_out [N];
  spikex_filter_buf dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  weight_t hist_w [NB][N]; logic hist_v [NB];
  initial begin
    for (int r = 0; r < N; r++) w_in[r] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      for (int r = 0; r < N; r++) begin w_in[r] = weight_t'($urandom); hist_w[b][r] = w_in[r]; end
      v_in = $urandom_range(0, 1); hist_v[b] = v_in;
      #1; // row 0 is combinational: check before the beat
      checks++;
      if (w_out[0] != w_in[0] || v_out[0] != v_in) failures++;
      beat = 1; @(negedge clk); beat = 0;
      // after beat b, the next beat's rows r>0 see the value of beat b+1-r
      for (int r = 1; r < N; r++) if (b + 1 - r >= 0) begin
        checks++;
        if (w_out[r] != hist_w[b+1-r][r] || v_out[r] != hist_v[b+1-r]) begin
          failures++; $display("beat %0d row %0d: %h exp %h", b, r, w_out[r], hist_w[b+1-r][r]);
        end
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
