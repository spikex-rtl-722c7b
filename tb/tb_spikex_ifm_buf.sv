// tb_spikex_ifm_buf: checks the column skew of the spike-word feeder.
//
// A random spike-word vector and valid bit are pushed on every beat (with random
// idle cycles between beats); after each beat, column r must show the vector
// pushed r beats earlier (column 0 shows the current input).
module tb_spikex_ifm_buf;
  import spikex_pkg::*;
  localparam int N = COLS, NB = 200;
  logic clk = 0, rst_n = 0, beat = 0;
  always #5 clk = ~clk;
  twword_t s_in [N]; logic v_in [N]; twword_t s_out [N]; logic v_out [N];
  spikex_ifm_buf dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  twword_t hist_s [NB][N]; logic hist_v [NB][N];
  initial begin
    for (int r = 0; r < N; r++) begin s_in[r] = 0; v_in[r] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      for (int r = 0; r < N; r++) begin s_in[r] = twword_t'($urandom); hist_s[b][r] = s_in[r]; end
      for (int r = 0; r < N; r++) begin v_in[r] = $urandom_range(0, 1); hist_v[b][r] = v_in[r]; end
      #1; // row 0 is combinational: check before the beat
      checks++;
      if (s_out[0] != s_in[0] || v_out[0] != v_in[0]) failures++;
      beat = 1; @(negedge clk); beat = 0;
      // after beat b, the next beat's rows r>0 see the value of beat b+1-r
      for (int r = 1; r < N; r++) if (b + 1 - r >= 0) begin
        checks++;
        if (s_out[r] != hist_s[b+1-r][r] || v_out[r] != hist_v[b+1-r][r]) begin
          failures++; $display("beat %0d row %0d: %h exp %h", b, r, s_out[r], hist_s[b+1-r][r]);
        end
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
