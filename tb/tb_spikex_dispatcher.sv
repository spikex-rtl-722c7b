// tb_spikex_dispatcher: checks agile NTWU dispatch in both density modes.
//
// Random NTWU tag maps are generated, dense (so that the average number of
// active NTWUs per neuron exceeds the array width: high temporal density
// mode) and sparse (high spatial density mode). The expected groups are
// built here from the rules: temporal mode gives each neuron its own groups
// of up to COLS active windows in time order; spatial mode chunks the list of
// all active NTWUs (neuron-major) into groups of COLS. The bench checks the
// mode, every slot of every group, the group count, back-pressure on
// grp_ready, and that an all-silent map yields no group.
module tb_spikex_dispatcher;
  import spikex_pkg::*;
  localparam int NC = COLS, NTW = 40, NP = 12;
  logic clk = 0, rst_n = 0, start = 0, grp_ready = 0;
  always #5 clk = ~clk;
  logic [$clog2(NPOS_MAX+1)-1:0] npos; logic [$clog2(NTW_MAX+1)-1:0] ntw;
  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt;
  pos_t rd_pos; logic [NTW-1:0] tags; dispatch_mode_e mode;
  slot_t slots [NC]; logic grp_valid, busy, done;
  spikex_dispatcher #(.NC(NC), .NTW(NTW)) dut (.*);

  logic [NTW-1:0] map [NP];
  assign tags = map[rd_pos];

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_p [$]; int exp_t [$]; int exp_g [$];   // expected slots with group number
  int n_temporal = 0, n_spatial = 0;

  task automatic run(input int density, input int np, input int nt);
    int cnt, g, inrow, got_groups, idx;
    dispatch_mode_e em;
    exp_p.delete(); exp_t.delete(); exp_g.delete();
    cnt = 0;
    for (int p = 0; p < NP; p++) for (int t = 0; t < NTW; t++) begin
      map[p][t] = ($urandom_range(0, 99) < density) && p < np && t < nt;
      cnt += map[p][t];
    end
    em = (cnt > NC * np) ? MODE_TEMPORAL : MODE_SPATIAL;
    g = 0; inrow = 0;
    for (int p = 0; p < np; p++) begin
      for (int t = 0; t < nt; t++) if (map[p][t]) begin
        if (inrow == NC) begin g++; inrow = 0; end
        exp_p.push_back(p); exp_t.push_back(t); exp_g.push_back(g); inrow++;
      end
      if (em == MODE_TEMPORAL && inrow != 0) begin g++; inrow = 0; end
    end
    @(negedge clk);
    npos = np[$clog2(NPOS_MAX+1)-1:0]; ntw = nt[$clog2(NTW_MAX+1)-1:0];
    active_cnt = cnt[$clog2(NPOS_MAX*NTW_MAX+1)-1:0];
    start = 1; @(negedge clk); start = 0;
    got_groups = 0; idx = 0;
    while (!done) begin
      if (grp_valid && $urandom_range(0, 2) != 0) begin
        checks++;
        if (mode != em) begin failures++; $display("mode %0d exp %0d", mode, em); end
        for (int c = 0; c < NC; c++) begin
          bit ev; ev = (idx < exp_p.size()) && exp_g[idx] == got_groups;
          checks++;
          if (slots[c].valid != ev || (ev && (int'(slots[c].pos) != exp_p[idx] || int'(slots[c].tw) != exp_t[idx]))) begin
            failures++;
            $display("group %0d slot %0d: v%0d p%0d t%0d", got_groups, c, slots[c].valid, slots[c].pos, slots[c].tw);
          end
          if (ev) idx++;
        end
        got_groups++;
        grp_ready = 1; @(negedge clk); grp_ready = 0;
      end else @(negedge clk);
    end
    checks++;
    if (idx != exp_p.size() || got_groups != (exp_p.size() ? exp_g[exp_g.size()-1] + 1 : 0)) begin
      failures++; $display("dispatched %0d of %0d NTWUs in %0d groups", idx, exp_p.size(), got_groups);
    end
    if (em == MODE_TEMPORAL) n_temporal++; else n_spatial++;
  endtask

  initial begin
    npos = 0; ntw = 0; active_cnt = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      run(trial % 2 ? 60 : 8, $urandom_range(1, NP), $urandom_range(8, NTW));
    end
    run(0, NP, NTW);                  // nothing active
    checks++;
    if (n_temporal == 0 || n_spatial == 0) begin failures++; $display("a mode never occurred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
