// tb_spikex_top: end-to-end test of the accelerator at its default sizes.
//
// Several layer tiles are run through the whole flow: tile data written
// through the external port, tagged, loaded into a local-buffer bank with
// weight tailoring, computed by the array under agile NTWU dispatch, stored
// back to the global buffer and read out. For every tile the output spike
// words of all ROWS output channels, neurons and windows are compared with a
// reference leaky integrate-and-fire model that runs time point by time
// point over the whole time stride, with no knowledge of windows, tags or
// skipping; one time stride is run as three consecutive time tiles that
// carry the membrane potentials over. The tiles are chosen so that every mechanism occurs: the high
// temporal and the high spatial density mode, skipped (inactive) NTWUs and
// the leak carried across them, tailored (silent) input channels, skipped
// time blocks in the load, an output-buffer stall, a continued time stride,
// both buffer banks, and host writes into one GLB slot while the tile of the
// other slot runs (the writes would corrupt the result if the slots or their
// tags were shared).
// Each is counted, and one that never happened counts as a failure.
module tb_spikex_top;
  import spikex_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic ext_valid = 0, ext_ready; logic [1:0] ext_op; pos_t ext_pos; ic_t ext_ic; k_t ext_k;
  tw_t ext_tw; logic [$clog2(ROWS)-1:0] ext_row; logic [15:0] ext_wdata;
  logic ext_rvalid; logic [15:0] ext_rdata;
  logic cmd_load = 0, cmd_store = 0, load_bank = 0, cmd_run = 0, run_bank = 0, run_cont = 0, ext_bank = 0;
  logic mc_busy, mc_done, gc_busy, gc_done;
  dispatch_mode_e mode;
  logic [31:0] n_groups, n_beats, stall_cycles, n_updates, w_words_fetched, ifm_words_fetched;
  logic [$clog2(NIC_MAX+1)-1:0] chans_tailored;
  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_ntwus;

  spikex_top dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Tile data.
  int W [ROWS][K_MAX];
  twword_t S [NPOS_MAX][K_MAX][3*NTW_MAX];

  // Mechanism counters.
  int m_temporal = 0, m_spatial = 0, m_skip_ntwu = 0, m_tailor = 0, m_tb_skip = 0;
  int m_stall = 0, m_bank [2] = '{0, 0}, m_leak_gap = 0, m_cont = 0, m_overlap = 0;

  task automatic ext(input logic [1:0] op, input int p, input int ic, input int k, input int tw,
                     input int row, input logic [15:0] d);
    @(negedge clk);
    while (!ext_ready) @(negedge clk);
    ext_valid = 1; ext_op = op; ext_pos = pos_t'(p); ext_ic = ic_t'(ic); ext_k = k_t'(k);
    ext_tw = tw_t'(tw); ext_row = ($clog2(ROWS))'(row); ext_wdata = d;
    @(negedge clk);
    ext_valid = 0;
  endtask

  task automatic wait_pulse(input bit which_gc);
    int n; n = 0;
    while (!(which_gc ? gc_done : mc_done) && n < 2000000) begin @(negedge clk); n++; end
  endtask

  function automatic int lk(int u, int s);
    return (s == 0) ? u : u - (u >>> s);
  endfunction

  task automatic run_tile(input int npos, input int nic, input int kpc, input int ntw, input int tws,
                          input int density, input int silent_ic, input int silent_p, input bit bank,
                          input int nseg = 1);
    int K, total_words, vth, ls, n_active, ntw_all;
    int spk_exp [ROWS][NPOS_MAX][3*NTW_MAX];
    ntw_all = ntw * nseg;
    K = nic * kpc; vth = $urandom_range(40, 90); ls = $urandom_range(1, 3);
    // random tile; channel silent_ic and neuron silent_p never fire; quiet gaps in time
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) W[r][k] = int'($urandom_range(0, 60)) - 15;
    for (int p = 0; p < npos; p++) for (int k = 0; k < K; k++) for (int t = 0; t < ntw_all; t++) begin
      twword_t m;
      m = twword_t'((1 << tws) - 1);
      S[p][k][t] = '0;
      if (k / kpc != silent_ic && p != silent_p && (t % 4) != 2 && ($urandom_range(0, 99) < density))
        S[p][k][t] = twword_t'($urandom) & twword_t'($urandom) & m;
    end
    // reference LIF over the whole time stride
    for (int r = 0; r < ROWS; r++) for (int p = 0; p < npos; p++) begin
      int u; u = 0;
      for (int t = 0; t < ntw_all; t++) begin
        spk_exp[r][p][t] = 0;
        for (int i = 0; i < tws; i++) begin
          int c, v;
          c = 0;
          for (int k = 0; k < K; k++) if (S[p][k][t][i]) c += W[r][k];
          v = lk(u, ls) + c;
          if (v >= vth) begin spk_exp[r][p][t] |= (1 << i); u = 0; end else u = v;
        end
      end
    end
    // the time stride is run as nseg consecutive tiles of ntw windows
    for (int seg = 0; seg < nseg; seg++) begin
    int t0; t0 = seg * ntw;
    n_active = 0;
    for (int p = 0; p < npos; p++) for (int t = 0; t < ntw; t++) begin
      bit a; a = 0;
      for (int k = 0; k < K; k++) a |= (S[p][k][t0+t] != 0);
      n_active += a;
    end
    // configure and load
    @(negedge clk);
    cfg.tws = tws_t'(tws); cfg.ntw = ntw[$bits(cfg.ntw)-1:0]; cfg.npos = npos[$bits(cfg.npos)-1:0];
    cfg.nic = nic[$bits(cfg.nic)-1:0]; cfg.kpc = kpc[$bits(cfg.kpc)-1:0];
    cfg.vth = vmem_t'(vth); cfg.leak_shift = 4'(ls);
    ext_bank = bank; run_bank = bank;
    ext(2'd3, 0, 0, 0, 0, 0, 0);
    for (int p = 0; p < npos; p++) for (int k = 0; k < K; k++) for (int t = 0; t < ntw; t++)
      ext(2'd0, p, k / kpc, k, t, 0, S[p][k][t0+t]);
    for (int k = 0; k < K; k++) for (int j = 0; j < ROWS / 2; j++)
      ext(2'd1, 0, 0, k, 0, 2 * j, {8'(W[2*j+1][k]), 8'(W[2*j][k])});
    checks++;
    if (int'(active_ntwus) != n_active) begin failures++; $display("active NTWUs %0d exp %0d", active_ntwus, n_active); end
    @(negedge clk); load_bank = bank; cmd_load = 1; @(negedge clk); cmd_load = 0;
    wait_pulse(0);
    total_words = npos * K * ntw;
    if (chans_tailored != 0) m_tailor++;
    if (int'(ifm_words_fetched) < total_words - (silent_ic < nic ? npos * kpc * ntw : 0)) m_tb_skip++;
    checks++;
    if (int'(w_words_fetched) != 4 * kpc * (nic - int'(chans_tailored))) begin
      failures++; $display("fetched %0d weight words", w_words_fetched);
    end
    // run
    @(negedge clk); run_bank = bank; run_cont = (seg > 0); cmd_run = 1; @(negedge clk); cmd_run = 0;
    // double buffering: meanwhile the host writes into the other GLB slot
    ext_bank = !bank;
    ext(2'd3, 0, 0, 0, 0, 0, 0);
    for (int i = 0; i < 24; i++) begin
      ext(2'd0, i % npos, 0, 0, i % ntw, 0, 16'h3ff);
      ext(2'd1, 0, 0, i % K, 0, 0, 16'h7f7f);
    end
    if (gc_busy) m_overlap++;
    ext_bank = bank;
    while (gc_busy) @(negedge clk);
    if (seg > 0) m_cont++;
    if (mode == MODE_TEMPORAL) m_temporal++; else m_spatial++;
    if (n_active < npos * ntw) m_skip_ntwu++;
    if (stall_cycles != 0) m_stall++;
    if (int'(n_updates) < npos * ntw && int'(n_updates) > npos) m_leak_gap++;
    m_bank[bank]++;
    checks++;
    if (int'(n_updates) != n_active) begin failures++; $display("updates %0d exp %0d", n_updates, n_active); end
    // store and read back
    @(negedge clk); load_bank = bank; cmd_store = 1; @(negedge clk); cmd_store = 0;
    wait_pulse(0);
    for (int r = 0; r < ROWS; r++) for (int p = 0; p < npos; p++) for (int t = 0; t < ntw; t++) begin
      @(negedge clk);
      while (!ext_ready) @(negedge clk);
      ext_valid = 1; ext_op = 2'd2; ext_pos = pos_t'(p); ext_tw = tw_t'(t); ext_row = ($clog2(ROWS))'(r);
      @(negedge clk); ext_valid = 0;
      checks++;
      if (!ext_rvalid || int'(ext_rdata) != spk_exp[r][p][t0+t]) begin
        failures++;
        if (failures < 20) $display("tile npos=%0d tws=%0d seg=%0d: out(r%0d,p%0d,tw%0d) = %h exp %h",
                                    npos, tws, seg, r, p, t, ext_rdata, spk_exp[r][p][t0+t]);
      end
    end
    $display("tile npos=%0d K=%0d ntw=%0d tws=%0d: mode=%s groups=%0d beats=%0d active=%0d stalls=%0d tailored=%0d ifm_words=%0d/%0d",
             npos, K, ntw, tws, mode.name(), n_groups, n_beats, n_active, stall_cycles, chans_tailored,
             ifm_words_fetched, total_words);
    end
  endtask

  initial begin
    cfg = '0; ext_op = 0; ext_pos = 0; ext_ic = 0; ext_k = 0; ext_tw = 0; ext_row = 0; ext_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    //        npos nic kpc ntw tws dens silent_ic silent_p bank
    run_tile(2,   4,  3,  40,  2,  70,  99,  99, 1'b0);   // dense, few neurons: temporal mode
    run_tile(16,  3,  2,  8,   5,  15,  1,   3,  1'b1);   // sparse, many neurons: spatial mode
    run_tile(4,   2,  9,  12,  10, 20,  99,  0,  1'b0);   // 3x3 kernels, TWS 10
    run_tile(8,   4,  4,  7,   3,  10,  2,   99, 1'b1);   // TWS 3
    run_tile(3,   2,  4,  6,   4,  30,  99,  1,  1'b0, 3); // 18 windows as 3 time tiles
    checks++; if (m_temporal == 0) begin failures++; $display("temporal mode never ran"); end
    checks++; if (m_spatial == 0) begin failures++; $display("spatial mode never ran"); end
    checks++; if (m_skip_ntwu == 0) begin failures++; $display("no NTWU was skipped"); end
    checks++; if (m_tailor == 0) begin failures++; $display("no channel was tailored"); end
    checks++; if (m_tb_skip == 0) begin failures++; $display("no time block was skipped"); end
    checks++; if (m_stall == 0) begin failures++; $display("the OFM buffer never stalled"); end
    checks++; if (m_leak_gap == 0) begin failures++; $display("no leak across skipped windows"); end
    checks++; if (m_overlap == 0) begin failures++; $display("no write overlapped a run"); end
    checks++; if (m_cont == 0) begin failures++; $display("no run continued a time stride"); end
    checks++; if (m_bank[0] == 0 || m_bank[1] == 0) begin failures++; $display("a bank was never used"); end
    $display("mechanisms: temporal=%0d spatial=%0d ntwu_skip=%0d tailor=%0d tb_skip=%0d stall=%0d leak_gap=%0d cont=%0d overlap=%0d bank0=%0d bank1=%0d",
             m_temporal, m_spatial, m_skip_ntwu, m_tailor, m_tb_skip, m_stall, m_leak_gap, m_cont, m_overlap, m_bank[0], m_bank[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
