// tb_spikex_tagger: checks the hierarchical activity tags.
//
// Random sparse spike words are written for random (neuron, channel, window);
// a reference model keeps the NTWU and per-channel TW tags, and derives TB
// tags (OR over TW_PER_TB windows) and TS / SP-MB tags (OR over all windows).
// All tag outputs and the active-NTWU count are compared after the writes,
// then `clear` must zero everything. The paper's three-neuron example
// (four windows, two per block) is checked explicitly first.
module tb_spikex_tagger;
  import spikex_pkg::*;
  localparam int NPOS = 8, NTW = 12, NIC = 6, TPB = 2, NTB = 6;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  always #5 clk = ~clk;
  pos_t wr_pos, rd_pos; ic_t wr_ic, rd_ic; tw_t wr_tw; twword_t wr_data;
  logic [NTW-1:0] ntwu_tags, tw_tags; logic [NTB-1:0] tb_tags; logic [NIC-1:0] ts_tags;
  logic [$clog2(NPOS*NTW+1)-1:0] active_cnt;
  spikex_tagger #(.NPOS(NPOS), .NTW(NTW), .NIC(NIC), .TPB(TPB)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit ref_ntwu [NPOS][NTW]; bit ref_tw [NIC][NTW];

  task automatic wr(input int p, input int ic, input int tw, input twword_t d);
    @(negedge clk);
    wr_en = 1; wr_pos = pos_t'(p); wr_ic = ic_t'(ic); wr_tw = tw_t'(tw); wr_data = d;
    if (d != 0) begin ref_ntwu[p][tw] = 1; ref_tw[ic][tw] = 1; end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_all();
    int cnt;
    cnt = 0;
    for (int p = 0; p < NPOS; p++) for (int t = 0; t < NTW; t++) cnt += ref_ntwu[p][t];
    checks++;
    if (int'(active_cnt) != cnt) begin failures++; $display("active %0d exp %0d", active_cnt, cnt); end
    for (int p = 0; p < NPOS; p++) begin
      rd_pos = pos_t'(p); #1;
      for (int t = 0; t < NTW; t++) begin
        checks++;
        if (ntwu_tags[t] != ref_ntwu[p][t]) begin failures++; $display("ntwu tag %0d,%0d", p, t); end
      end
    end
    for (int i = 0; i < NIC; i++) begin
      bit ts; ts = 0;
      rd_ic = ic_t'(i); #1;
      for (int b = 0; b < NTB; b++) begin
        bit tb; tb = 0;
        for (int t = b * TPB; t < (b + 1) * TPB; t++) begin
          tb |= ref_tw[i][t];
          checks++;
          if (tw_tags[t] != ref_tw[i][t]) begin failures++; $display("tw tag %0d,%0d", i, t); end
        end
        ts |= tb;
        checks++;
        if (tb_tags[b] != tb) begin failures++; $display("tb tag %0d,%0d", i, b); end
      end
      checks++;
      if (ts_tags[i] != ts) begin failures++; $display("ts tag %0d", i); end
    end
  endtask

  initial begin
    rd_pos = 0; rd_ic = 0; wr_pos = 0; wr_ic = 0; wr_tw = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // Example: Sa fires in windows 2,3; Sb never; Sc in windows 0,2 (channels 0,1,2).
    wr(0, 0, 2, 16'h0009); wr(0, 0, 3, 16'h0011); wr(0, 2, 0, 16'h0012); wr(0, 2, 2, 16'h000d);
    wr(0, 1, 1, 16'h0000);
    rd_ic = 0; #1; checks++; if (tw_tags[3:0] != 4'b1100 || tb_tags[1:0] != 2'b10 || !ts_tags[0]) failures++;
    rd_ic = 1; #1; checks++; if (tw_tags[3:0] != 4'b0000 || tb_tags[1:0] != 2'b00 || ts_tags[1]) failures++;
    rd_ic = 2; #1; checks++; if (tw_tags[3:0] != 4'b0101 || tb_tags[1:0] != 2'b11 || !ts_tags[2]) failures++;
    for (int n = 0; n < 150; n++) begin
      twword_t d;
      d = ($urandom_range(0, 2) == 0) ? twword_t'(1 << $urandom_range(0, 9)) : '0;
      wr($urandom_range(0, NPOS-1), $urandom_range(0, NIC-2), $urandom_range(0, NTW-1), d);
    end
    check_all();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int p = 0; p < NPOS; p++) for (int t = 0; t < NTW; t++) ref_ntwu[p][t] = 0;
    for (int i = 0; i < NIC; i++) for (int t = 0; t < NTW; t++) ref_tw[i][t] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
