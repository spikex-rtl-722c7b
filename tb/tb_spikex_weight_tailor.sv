// tb_spikex_weight_tailor: checks activation-induced weight tailoring.
//
// For random SP-MB tag vectors, channel counts and inputs per channel, the
// bench collects the emitted input indices (with random back-pressure) and
// compares them with the list of inputs of the tagged channels, in order. It
// also checks the count of tailored (skipped) channels and the cycle count:
// one cycle per emitted index or stall, one per channel visited, and three
// more for the end-of-list check, the final state and the done pulse.
module tb_spikex_weight_tailor;
  import spikex_pkg::*;
  localparam int NIC = 16;
  logic clk = 0, rst_n = 0, start = 0, k_ready = 0;
  always #5 clk = ~clk;
  logic [NIC-1:0] ic_tags; logic [$clog2(NIC_MAX+1)-1:0] nic; logic [$clog2(K_MAX+1)-1:0] kpc;
  logic k_valid, busy, done; k_t k; ic_t ic; logic [$clog2(NIC_MAX+1)-1:0] tailored;
  spikex_weight_tailor #(.NIC(NIC)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int expk [$]; int expc [$];
  initial begin
    ic_tags = 0; nic = 0; kpc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int n, kp, skipped, got, cyc, stalls;
      bit bp;
      n = $urandom_range(1, NIC); kp = $urandom_range(1, 9); bp = trial % 2;
      @(negedge clk);
      ic_tags = NIC'($urandom) & NIC'($urandom);
      nic = n[$clog2(NIC_MAX+1)-1:0]; kpc = kp[$clog2(K_MAX+1)-1:0];
      expk.delete(); expc.delete(); skipped = 0;
      for (int i = 0; i < n; i++)
        if (ic_tags[i]) for (int j = 0; j < kp; j++) begin expk.push_back(i * kp + j); expc.push_back(i); end
        else skipped++;
      start = 1; @(negedge clk); start = 0;
      got = 0; cyc = 1; stalls = 0;
      while (!done && cyc < 10000) begin
        k_ready = bp ? ($urandom_range(0, 1) == 1) : 1'b1;
        if (k_valid && !k_ready) stalls++;
        if (k_valid && k_ready) begin
          checks++;
          if (got >= expk.size() || int'(k) != expk[got] || int'(ic) != expc[got]) begin
            failures++; $display("trial %0d idx %0d: k %0d ic %0d", trial, got, k, ic);
          end
          got++;
        end
        @(negedge clk); cyc++;
      end
      k_ready = 0;
      checks++;
      if (got != expk.size() || int'(tailored) != skipped) begin
        failures++; $display("trial %0d: got %0d of %0d, tailored %0d exp %0d", trial, got, expk.size(), tailored, skipped);
      end
      checks++;
      if (cyc != expk.size() + stalls + n + 3) begin
        failures++; $display("trial %0d: %0d cycles, expected %0d", trial, cyc, expk.size() + stalls + n + 3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
