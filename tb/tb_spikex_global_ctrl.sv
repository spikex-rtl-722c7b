// tb_spikex_global_ctrl: checks tile sequencing by the global controller.
//
// The controller drives a real PE array, OFM buffer and local buffers. The
// bench writes a tile straight into the IFM and weight local buffers, serves
// the activity tags from its own model (NTWU tags, SP-MB tags, active count),
// runs `cmd_run` and compares every output spike word in the OFM local
// buffer with a reference LIF model over the whole time stride. Dense and
// sparse tiles exercise both dispatch modes; it also checks that the number
// of column updates equals the number of active NTWUs and that the number of
// array beats is groups x (active inputs + ROWS + COLS - 2).
module tb_spikex_global_ctrl;
  import spikex_pkg::*;
  localparam int IFM_AW = $clog2(LBUF_BYTES / 2), W_AW = $clog2(LBUF_BYTES * 8 / (ROWS * W_BITS));
  localparam int OFM_AW = $clog2(LBUF_BYTES / 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg; logic cmd_run = 0, cont = 0, bank = 0, busy, done;
  pos_t tag_rd_pos; logic [NTW_MAX-1:0] ntwu_tags; logic [NIC_MAX-1:0] spmb_tags;
  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt;
  logic lb_bank; logic [IFM_AW-1:0] ifm_raddr [COLS]; twword_t ifm_rdata [COLS];
  logic [W_AW-1:0] w_raddr [1]; logic [ROWS*W_BITS-1:0] w_rdata [1];
  logic ofm_clear, ofm_we; logic [OFM_AW-1:0] ofm_waddr; twword_t ofm_wdata;
  logic arr_clr, arr_beat, arr_wv; weight_t arr_w [ROWS]; twword_t arr_s [COLS]; logic arr_sv [COLS];
  logic arr_upd [COLS]; vmem_t arr_u_in [ROWS]; logic [11:0] arr_lead; logic arr_done [COLS];
  twword_t arr_spk [ROWS][COLS]; vmem_t arr_u_out [ROWS][COLS]; logic arr_busy;
  logic ob_load, ob_valid, ob_busy; twword_t ob_data [ROWS]; pos_t ob_pos, ob_opos; tw_t ob_tw, ob_otw;
  logic [$clog2(ROWS)-1:0] ob_row; twword_t ob_odata;
  dispatch_mode_e mode; logic [31:0] n_groups, n_beats, stall_cycles, n_updates;

  spikex_global_ctrl dut (.*);
  spikex_array u_arr (.clk, .rst_n, .tws(cfg.tws), .leak_shift(cfg.leak_shift), .vth(cfg.vth),
    .clr(arr_clr), .beat(arr_beat), .w_in(arr_w), .wv_in(arr_wv), .s_in(arr_s), .sv_in(arr_sv),
    .upd_start(arr_upd), .u_in(arr_u_in), .lead(arr_lead), .upd_done(arr_done), .busy(arr_busy),
    .spikes(arr_spk), .u_out(arr_u_out));
  spikex_ofm_buf u_ob (.clk, .rst_n, .load(ob_load), .in_data(ob_data), .in_pos(ob_pos), .in_tw(ob_tw),
    .out_valid(ob_valid), .out_row(ob_row), .out_pos(ob_opos), .out_tw(ob_otw), .out_data(ob_odata),
    .busy(ob_busy));

  logic ifm_we = 0, w_we = 0; logic [IFM_AW-1:0] ifm_wa; twword_t ifm_wd; logic [W_AW-1:0] w_wa;
  logic [ROWS*W_BITS-1:0] w_wd; logic [OFM_AW-1:0] ofm_ra [1]; twword_t ofm_rd [1];
  spikex_lbuf #(.WIDTH(TW_WORD), .NRD(COLS)) u_ifm (.clk, .rst_n, .clear(1'b0), .cbank(1'b0),
    .we(ifm_we), .wbank(bank), .waddr(ifm_wa), .wdata(ifm_wd), .rbank(lb_bank), .raddr(ifm_raddr), .rdata(ifm_rdata));
  spikex_lbuf #(.WIDTH(ROWS*W_BITS)) u_w (.clk, .rst_n, .clear(1'b0), .cbank(1'b0),
    .we(w_we), .wbank(bank), .waddr(w_wa), .wdata(w_wd), .rbank(lb_bank), .raddr(w_raddr), .rdata(w_rdata));
  spikex_lbuf #(.WIDTH(TW_WORD)) u_ofm (.clk, .rst_n, .clear(ofm_clear), .cbank(lb_bank),
    .we(ofm_we), .wbank(lb_bank), .waddr(ofm_waddr), .wdata(ofm_wdata), .rbank(bank), .raddr(ofm_ra), .rdata(ofm_rd));

  int checks = 0, failures = 0;
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int W [ROWS][K_MAX]; twword_t S [NPOS_MAX][K_MAX][NTW_MAX];
  logic [NTW_MAX-1:0] tagmap [NPOS_MAX];
  assign ntwu_tags = tagmap[tag_rd_pos];
  int n_temporal = 0, n_spatial = 0;

  function automatic int lk(int u, int s);
    return (s == 0) ? u : u - (u >>> s);
  endfunction

  task automatic run_tile(input int npos, input int nic, input int kpc, input int ntw, input int tws,
                          input int density, input bit b);
    int K, vth, ls, n_act, act_k;
    int spk_exp [ROWS][NPOS_MAX][NTW_MAX];
    K = nic * kpc; vth = $urandom_range(40, 90); ls = $urandom_range(0, 3);
    bank = b;
    spmb_tags = '0; n_act = 0;
    for (int p = 0; p < NPOS_MAX; p++) tagmap[p] = '0;
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) W[r][k] = int'($urandom_range(0, 60)) - 15;
    for (int p = 0; p < npos; p++) for (int k = 0; k < K; k++) for (int t = 0; t < ntw; t++) begin
      S[p][k][t] = (k / kpc != 0 && $urandom_range(0, 99) < density)
                 ? twword_t'($urandom) & twword_t'($urandom) & twword_t'((1 << tws) - 1) : '0;
      if (S[p][k][t] != 0) begin tagmap[p][t] = 1; spmb_tags[k / kpc] = 1; end
    end
    for (int p = 0; p < npos; p++) for (int t = 0; t < ntw; t++) n_act += tagmap[p][t];
    act_k = 0;
    for (int k = 0; k < K; k++) act_k += spmb_tags[k / kpc];
    active_cnt = n_act[$bits(active_cnt)-1:0];
    for (int r = 0; r < ROWS; r++) for (int p = 0; p < npos; p++) begin
      int u; u = 0;
      for (int t = 0; t < ntw; t++) begin
        spk_exp[r][p][t] = 0;
        for (int i = 0; i < tws; i++) begin
          int c, v; c = 0;
          for (int k = 0; k < K; k++) if (S[p][k][t][i]) c += W[r][k];
          v = lk(u, ls) + c;
          if (v >= vth) begin spk_exp[r][p][t] |= (1 << i); u = 0; end else u = v;
        end
      end
    end
    // fill local buffers directly
    for (int p = 0; p < npos; p++) for (int k = 0; k < K; k++) for (int t = 0; t < ntw; t++) begin
      @(negedge clk); ifm_we = 1; ifm_wa = IFM_AW'((p * K + k) * ntw + t); ifm_wd = S[p][k][t];
    end
    @(negedge clk); ifm_we = 0;
    for (int k = 0; k < K; k++) begin
      @(negedge clk); w_we = 1; w_wa = W_AW'(k);
      for (int r = 0; r < ROWS; r++) w_wd[r*8 +: 8] = 8'(W[r][k]);
    end
    @(negedge clk); w_we = 0;
    cfg.tws = tws_t'(tws); cfg.ntw = ntw[$bits(cfg.ntw)-1:0]; cfg.npos = npos[$bits(cfg.npos)-1:0];
    cfg.nic = nic[$bits(cfg.nic)-1:0]; cfg.kpc = kpc[$bits(cfg.kpc)-1:0];
    cfg.vth = vmem_t'(vth); cfg.leak_shift = 4'(ls);
    cmd_run = 1; @(negedge clk); cmd_run = 0;
    while (!done) @(negedge clk);
    if (mode == MODE_TEMPORAL) n_temporal++; else n_spatial++;
    checks++;
    if (int'(n_updates) != n_act) begin failures++; $display("updates %0d exp %0d", n_updates, n_act); end
    checks++;
    if (int'(n_beats) != int'(n_groups) * (act_k + ROWS + COLS - 2)) begin
      failures++; $display("beats %0d for %0d groups, %0d inputs", n_beats, n_groups, act_k);
    end
    for (int r = 0; r < ROWS; r++) for (int p = 0; p < npos; p++) for (int t = 0; t < ntw; t++) begin
      ofm_ra[0] = OFM_AW'((r * npos + p) * ntw + t); @(negedge clk);
      checks++;
      if (int'(ofm_rd[0]) != spk_exp[r][p][t]) begin
        failures++;
        if (failures < 20) $display("out(r%0d,p%0d,tw%0d) = %h exp %h", r, p, t, ofm_rd[0], spk_exp[r][p][t]);
      end
    end
  endtask

  initial begin
    cfg = '0; spmb_tags = '0; active_cnt = 0; ofm_ra[0] = 0; ifm_wa = 0; ifm_wd = 0; w_wa = 0; w_wd = 0;
    for (int p = 0; p < NPOS_MAX; p++) tagmap[p] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_tile(2, 3, 4, 30, 3, 60, 1'b0);
    run_tile(12, 3, 3, 8, 4, 10, 1'b1);
    run_tile(3, 2, 9, 15, 2, 25, 1'b0);
    checks++;
    if (n_temporal == 0 || n_spatial == 0) begin failures++; $display("a dispatch mode never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
