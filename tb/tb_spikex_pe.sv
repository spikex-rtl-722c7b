// tb_spikex_pe: self-checking test of one processing element.
//
// For random window sizes (2, 3, 5, 10), weights, spike words, thresholds,
// leak settings, starting potentials and lead steps, the bench integrates a
// random number of beats, runs the Vmem update and compares the spike word
// and final potential with a reference LIF model computed here. It also
// checks that the forwarded weight/spike registers follow the inputs and
// that the update takes lead + tws + 1 cycles.
module tb_spikex_pe;
  import spikex_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tws_t tws; logic [3:0] leak_shift; vmem_t vth;
  logic clr = 0, beat = 0, wv_in = 0, sv_in = 0, upd_start = 0;
  weight_t w_in; twword_t s_in;
  weight_t w_out; logic wv_out; twword_t s_out; logic sv_out;
  vmem_t u_in; logic [11:0] lead;
  logic upd_busy, upd_done; twword_t spikes; vmem_t u_out;

  spikex_pe dut (.*);

  int checks = 0, failures = 0;

  function automatic int sat16(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction
  function automatic int lk(int u, int s);
    if (s == 0) return u;
    return u - (u >>> s);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int acc [TWS_MAX];
  int u_ref, v, nb, cyc;
  twword_t spk_ref;
  int tws_set [4] = '{2, 3, 5, 10};

  initial begin
    tws = 2; leak_shift = 0; vth = 100; w_in = 0; s_in = 0; u_in = 0; lead = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 300; trial++) begin
      @(negedge clk);
      tws        = tws_t'(tws_set[$urandom_range(0, 3)]);
      leak_shift = 4'($urandom_range(0, 4));
      vth        = vmem_t'($urandom_range(20, 300));
      clr = 1'b1;
      @(negedge clk); clr = 1'b0;
      for (int t = 0; t < TWS_MAX; t++) acc[t] = 0;
      nb = $urandom_range(1, 12);
      for (int b = 0; b < nb; b++) begin
        w_in  = weight_t'($urandom_range(0, 255));
        s_in  = twword_t'($urandom);
        wv_in = ($urandom_range(0, 7) != 0);
        sv_in = ($urandom_range(0, 7) != 0);
        if (wv_in && sv_in)
          for (int t = 0; t < int'(tws); t++) if (s_in[t]) acc[t] = sat16(acc[t] + int'(w_in));
        beat = 1'b1;
        @(negedge clk); beat = 1'b0;
        checks++;
        if (w_out != w_in || s_out != s_in || wv_out != wv_in || sv_out != sv_in) begin
          failures++; $display("forward mismatch trial %0d", trial);
        end
        repeat (int'(tws) - 1) @(negedge clk);
      end
      @(negedge clk);
      // update
      u_in = vmem_t'($urandom_range(0, 200) - 100);
      lead = 12'($urandom_range(0, 3) == 0 ? $urandom_range(1, 20) : 0);
      u_ref = int'(u_in);
      for (int i = 0; i < int'(lead); i++) u_ref = lk(u_ref, int'(leak_shift));
      spk_ref = '0;
      for (int t = 0; t < int'(tws); t++) begin
        v = sat16(lk(u_ref, int'(leak_shift)) + acc[t]);
        if (v >= int'(vth)) begin spk_ref[t] = 1'b1; u_ref = 0; end
        else u_ref = v;
      end
      upd_start = 1'b1;
      @(negedge clk); upd_start = 1'b0;
      cyc = 1;
      while (!upd_done && cyc < 5000) begin @(negedge clk); cyc++; end
      checks++;
      if (spikes != spk_ref || int'(u_out) != u_ref) begin
        failures++;
        $display("trial %0d tws=%0d: spikes %h exp %h, u %0d exp %0d", trial, tws, spikes, spk_ref, u_out, u_ref);
      end
      checks++;
      if (cyc != int'(lead) + int'(tws) + 1) begin
        failures++; $display("update latency %0d, expected %0d", cyc, int'(lead) + int'(tws) + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
