// tb_spikex_mem_ctrl: checks the memory controller with real buffers.
//
// A tile with some silent input channels and silent time blocks is written
// through the external port into the global buffer. After `cmd_load` the
// bench reads back the IFM and weight local-buffer bank directly: words of
// active channels in active time blocks must equal what was written, all
// others (tailored) must read as zero, and the number of weight and spike
// words fetched must match the active part only. It also checks the SP-MB
// tags. Then it fills the OFM local buffer, runs `cmd_store` and reads the
// words back through the external port. This is done for both GLB slots and
// local-buffer banks, and at the end the SP-MB tags of each slot are read
// again to check that the other slot's tile did not disturb them.
module tb_spikex_mem_ctrl;
  import spikex_pkg::*;
  localparam int GLB_AW = $clog2(GLB_BYTES / 2), IFM_AW = $clog2(LBUF_BYTES / 2);
  localparam int W_AW = $clog2(LBUF_BYTES * 8 / (ROWS * W_BITS)), OFM_AW = $clog2(LBUF_BYTES / 2);
  localparam int NPOS = 4, NIC = 5, KPC = 3, NTW = 12, K = NIC * KPC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic ext_valid = 0, ext_ready; logic [1:0] ext_op; pos_t ext_pos; ic_t ext_ic; k_t ext_k;
  tw_t ext_tw; logic [$clog2(ROWS)-1:0] ext_row; logic [15:0] ext_wdata; logic ext_rvalid;
  logic [15:0] ext_rdata;
  logic cmd_load = 0, cmd_store = 0, bank = 0, busy, done, ext_bank = 0, run_bank = 0;
  logic glb_we, glb_re; logic [GLB_AW-1:0] glb_waddr, glb_raddr; logic [15:0] glb_wdata, glb_rdata;
  logic lb_bank, lb_clear, ifm_we, w_we; logic [IFM_AW-1:0] ifm_waddr; twword_t ifm_wdata;
  logic [W_AW-1:0] w_waddr; logic [ROWS*W_BITS-1:0] w_wdata;
  logic [OFM_AW-1:0] ofm_raddr; twword_t ofm_rdata;
  pos_t tag_rd_pos = 0; logic [NTW_MAX-1:0] ntwu_tags; logic [NIC_MAX-1:0] spmb_tags;
  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt;
  logic [31:0] w_words_fetched, ifm_words_fetched; logic [$clog2(NIC_MAX+1)-1:0] chans_tailored;

  spikex_mem_ctrl dut (.*);
  spikex_sram #(.WIDTH(16)) u_glb (.clk, .we(glb_we), .waddr(glb_waddr), .wdata(glb_wdata),
    .re(glb_re), .raddr(glb_raddr), .rdata(glb_rdata));

  // local buffers with a bench-side read port
  logic [IFM_AW-1:0] ifm_ra [1]; twword_t ifm_rd [1];
  logic [W_AW-1:0] w_ra [1]; logic [ROWS*W_BITS-1:0] w_rd [1];
  logic [OFM_AW-1:0] ofm_ra [1]; twword_t ofm_rd [1];
  logic ofm_we = 0; logic [OFM_AW-1:0] ofm_wa; twword_t ofm_wd;
  assign ofm_ra[0] = ofm_raddr; assign ofm_rdata = ofm_rd[0];
  spikex_lbuf #(.WIDTH(TW_WORD)) u_ifm (.clk, .rst_n, .clear(lb_clear), .cbank(lb_bank), .we(ifm_we),
    .wbank(lb_bank), .waddr(ifm_waddr), .wdata(ifm_wdata), .rbank(bank), .raddr(ifm_ra), .rdata(ifm_rd));
  spikex_lbuf #(.WIDTH(ROWS*W_BITS)) u_w (.clk, .rst_n, .clear(lb_clear), .cbank(lb_bank), .we(w_we),
    .wbank(lb_bank), .waddr(w_waddr), .wdata(w_wdata), .rbank(bank), .raddr(w_ra), .rdata(w_rd));
  spikex_lbuf #(.WIDTH(TW_WORD)) u_ofm (.clk, .rst_n, .clear(1'b0), .cbank(1'b0), .we(ofm_we),
    .wbank(bank), .waddr(ofm_wa), .wdata(ofm_wd), .rbank(lb_bank), .raddr(ofm_ra), .rdata(ofm_rd));

  int checks = 0, failures = 0;
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  twword_t S [NPOS][K][NTW]; logic [7:0] W [ROWS][K]; bit ic_act [NIC]; bit tb_act [NIC][NTW/2];

  task automatic ext(input logic [1:0] op, input int p, input int ic, input int k, input int tw,
                     input int row, input logic [15:0] d);
    @(negedge clk);
    while (!ext_ready) @(negedge clk);
    ext_valid = 1; ext_op = op; ext_pos = pos_t'(p); ext_ic = ic_t'(ic); ext_k = k_t'(k);
    ext_tw = tw_t'(tw); ext_row = ($clog2(ROWS))'(row); ext_wdata = d;
    @(negedge clk); ext_valid = 0;
  endtask

  bit ic_saved [2][NIC];

  initial begin
    int n_act_k, n_ifm;
    cfg = '0; cfg.ntw = NTW; cfg.npos = NPOS; cfg.nic = NIC; cfg.kpc = KPC; cfg.tws = 4;
    ext_op = 0; ext_pos = 0; ext_ic = 0; ext_k = 0; ext_tw = 0; ext_row = 0; ext_wdata = 0;
    ifm_ra[0] = 0; w_ra[0] = 0; ofm_wa = 0; ofm_wd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      bank = b[0]; ext_bank = b[0]; run_bank = b[0];
      for (int i = 0; i < NIC; i++) begin
        ic_act[i] = 0;
        for (int j = 0; j < NTW / 2; j++) tb_act[i][j] = 0;
      end
      for (int p = 0; p < NPOS; p++) for (int k = 0; k < K; k++) for (int t = 0; t < NTW; t++) begin
        int ic; ic = k / KPC;
        S[p][k][t] = (ic != 1 + b && (t / 2) % 3 != 1 && $urandom_range(0, 2) == 0) ? twword_t'($urandom_range(1, 1023)) : '0;
        if (S[p][k][t] != 0) begin ic_act[ic] = 1; tb_act[ic][t / 2] = 1; end
      end
      for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) W[r][k] = 8'($urandom);
      ext(2'd3, 0, 0, 0, 0, 0, 0);
      for (int p = 0; p < NPOS; p++) for (int k = 0; k < K; k++) for (int t = 0; t < NTW; t++)
        ext(2'd0, p, k / KPC, k, t, 0, S[p][k][t]);
      for (int k = 0; k < K; k++) for (int j = 0; j < ROWS / 2; j++) ext(2'd1, 0, 0, k, 0, 2 * j, {W[2*j+1][k], W[2*j][k]});
      for (int i = 0; i < NIC; i++) begin
        checks++; if (spmb_tags[i] != ic_act[i]) begin failures++; $display("SP-MB tag %0d", i); end
      end
      for (int i = 0; i < NIC; i++) ic_saved[b][i] = ic_act[i];
      @(negedge clk); cmd_load = 1; @(negedge clk); cmd_load = 0;
      while (!done) @(negedge clk);
      n_act_k = 0; n_ifm = 0;
      for (int k = 0; k < K; k++) begin
        logic [ROWS*W_BITS-1:0] e;
        e = '0;
        if (ic_act[k / KPC]) begin
          n_act_k++;
          for (int r = 0; r < ROWS; r++) e[r*8 +: 8] = W[r][k];
        end
        w_ra[0] = W_AW'(k); @(negedge clk);
        checks++; if (w_rd[0] != e) begin failures++; $display("bank %0d weight word %0d: %h exp %h", b, k, w_rd[0], e); end
        for (int p = 0; p < NPOS; p++) for (int t = 0; t < NTW; t++) begin
          bit fetched; fetched = ic_act[k / KPC] && tb_act[k / KPC][t / 2];
          n_ifm += fetched;
          ifm_ra[0] = IFM_AW'((p * K + k) * NTW + t); @(negedge clk);
          checks++;
          if (ifm_rd[0] != (fetched ? S[p][k][t] : '0)) begin failures++; $display("ifm word p%0d k%0d t%0d", p, k, t); end
        end
      end
      checks++;
      if (int'(w_words_fetched) != 4 * n_act_k || int'(ifm_words_fetched) != n_ifm || chans_tailored == 0) begin
        failures++; $display("fetch counts: w %0d exp %0d, ifm %0d exp %0d", w_words_fetched, 4 * n_act_k, ifm_words_fetched, n_ifm);
      end
      // OFM store path
      for (int a = 0; a < ROWS * NPOS * NTW; a++) begin
        @(negedge clk); ofm_we = 1; ofm_wa = OFM_AW'(a); ofm_wd = twword_t'(a * 7 + b);
      end
      @(negedge clk); ofm_we = 0; cmd_store = 1; @(negedge clk); cmd_store = 0;
      while (!done) @(negedge clk);
      for (int r = 0; r < ROWS; r++) for (int p = 0; p < NPOS; p++) for (int t = 0; t < NTW; t++) begin
        int a; a = (r * NPOS + p) * NTW + t;
        @(negedge clk);
        while (!ext_ready) @(negedge clk);
        ext_valid = 1; ext_op = 2'd2; ext_pos = pos_t'(p); ext_tw = tw_t'(t); ext_row = ($clog2(ROWS))'(r);
        @(negedge clk); ext_valid = 0;
        checks++;
        if (!ext_rvalid || ext_rdata != 16'(a * 7 + b)) begin failures++; $display("OFM read %0d: %h", a, ext_rdata); end
      end
    end
    // each GLB slot keeps its own tags: the silent channel differs per slot
    for (int b = 0; b < 2; b++) begin
      @(negedge clk); run_bank = b[0]; #1;
      for (int i = 0; i < NIC; i++) begin
        checks++;
        if (spmb_tags[i] != ic_saved[b][i]) begin failures++; $display("slot %0d SP-MB tag %0d lost", b, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
