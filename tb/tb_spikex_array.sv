// tb_spikex_array: self-checking test of the 8x8 systolic PE array.
//
// Random weights W[r][k] and spike words S[c][k] are streamed in, one input k
// per beat, with ROWS+COLS-2 empty drain beats. The columns are then updated
// one at a time and every PE's spike word and potential is compared with a
// reference LIF model of sum_k W[r][k]*S[c][k][t]. Some columns are marked
// invalid and must integrate nothing.
module tb_spikex_array;
  import spikex_pkg::*;
  localparam int NR = ROWS, NC = COLS, K = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tws_t tws = 5; logic [3:0] leak_shift = 2; vmem_t vth = 60;
  logic clr = 0, beat = 0, wv_in = 0;
  weight_t w_in [NR]; twword_t s_in [NC]; logic sv_in [NC];
  logic upd_start [NC]; vmem_t u_in [NR]; logic [11:0] lead = 0;
  logic upd_done [NC]; logic busy;
  twword_t spikes [NR][NC]; vmem_t u_out [NR][NC];

  spikex_array dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [NR][K]; twword_t S [NC][K]; logic cv [NC];
  int tws_set [3] = '{3, 5, 10};

  task automatic do_beat(input bit valid, input int k);
    for (int r = 0; r < NR; r++) w_in[r] = valid ? weight_t'(W[r][k]) : '0;
    wv_in = valid;
    for (int c = 0; c < NC; c++) begin
      s_in[c] = valid ? S[c][k] : '0;
      sv_in[c] = valid && cv[c];
    end
    beat = 1'b1;
    @(negedge clk); beat = 1'b0;
    repeat (int'(tws)) @(negedge clk);
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin upd_start[c] = 0; sv_in[c] = 0; s_in[c] = 0; end
    for (int r = 0; r < NR; r++) begin u_in[r] = 0; w_in[r] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      @(negedge clk);
      tws = tws_t'(tws_set[trial % 3]);
      for (int r = 0; r < NR; r++) for (int k = 0; k < K; k++) W[r][k] = int'($urandom_range(0, 80)) - 30;
      for (int c = 0; c < NC; c++) begin
        cv[c] = ($urandom_range(0, 4) != 0);
        for (int k = 0; k < K; k++) S[c][k] = twword_t'($urandom) & twword_t'($urandom);
      end
      clr = 1; @(negedge clk); clr = 0;
      for (int k = 0; k < K; k++) do_beat(1'b1, k);
      for (int d = 0; d < NR + NC - 2; d++) do_beat(1'b0, 0);
      for (int c = 0; c < NC; c++) begin
        for (int r = 0; r < NR; r++) u_in[r] = vmem_t'(r);
        upd_start[c] = 1; @(negedge clk); upd_start[c] = 0;
        while (!upd_done[c]) @(negedge clk);
        for (int r = 0; r < NR; r++) begin
          int u, v; twword_t e;
          u = r; e = '0;
          for (int t = 0; t < int'(tws); t++) begin
            int cc;
            cc = 0;
            if (cv[c]) for (int k = 0; k < K; k++) if (S[c][k][t]) cc += W[r][k];
            v = (u - (u >>> leak_shift)) + cc;
            if (v >= int'(vth)) begin e[t] = 1; u = 0; end else u = v;
          end
          checks++;
          if (spikes[r][c] != e || int'(u_out[r][c]) != u) begin
            failures++;
            $display("trial %0d PE(%0d,%0d): spikes %h exp %h u %0d exp %0d", trial, r, c, spikes[r][c], e, u_out[r][c], u);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
