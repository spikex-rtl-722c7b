// spikex_global_ctrl: sequences the PE array through one tile of a layer.
//
// A tile is a set of up to ROWS output channels (one per PE row) over npos
// neurons per channel and ntw time windows of tws time points, with K = nic*kpc
// synaptic inputs per neuron. On `cmd_run` the controller:
//  1 clears the OFM local-buffer bank and the membrane-state store (or, with
//    `cont`, keeps the store so that the tile continues the time stride of
//    the previous run: its window 0 follows the previous run's last window),
//    and starts the NTWU dispatcher, which picks the temporal or spatial density mode
//    and hands out groups of up to COLS active NTWUs (one per column);
//  2 for each group: clears the PE scratchpads and streams the inputs k of the
//    channels with a set SP-MB tag (the weight tailor skips the others): per
//    input it reads the 8 row weights from the weight local buffer and the
//    spike word of (pos_c, k, tw_c) for every column c from the IFM local
//    buffer, and issues one array beat. ROWS+COLS-2 empty beats drain the
//    systolic skew. Beats are tws+1 cycles apart;
//  3 updates the columns one after another: each PE of column c starts from
//    the membrane potential its neuron had at the end of its last processed
//    window (from the membrane-state store, or 0), leaks across the skipped
//    time points in between, and produces the window's spikes; the new
//    potential and window go back into the store, and the column's spike words
//    go through the OFM buffer into the OFM local buffer at
//    (row*npos + pos)*ntw + tw. The next column's update overlaps the drain;
//    a finished column waits (`stall_cycles`) only if the OFM buffer is
//    still draining the previous one.
// Windows that are never dispatched produce no spikes; their OFM words read
// as zero because the bank was cleared. `done` pulses when the tile is
// finished. Statistics: groups, beats, stall cycles, column updates
// and the dispatch mode.
// From the paper: layer-by-layer processing, NTWU dispatch, the three PE
// steps and zero-skipping. This design's choices: the tile format, the
// membrane-state store, the column-serial update and time tiling with
// `cont`. A neuron's last window is kept relative to the current run, clamped
// at -512; the leak-only steps in front of a window are clamped at 4095, so
// a neuron silent for more than 4095 time points decays by 4095 steps only.
module spikex_global_ctrl
  import spikex_pkg::*;
#(
  parameter int unsigned NR     = ROWS,
  parameter int unsigned NC     = COLS,
  parameter int unsigned IFM_AW = $clog2(LBUF_BYTES / 2),
  parameter int unsigned W_AW   = $clog2(LBUF_BYTES * 8 / (ROWS * W_BITS)),
  parameter int unsigned OFM_AW = $clog2(LBUF_BYTES / 2)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  input  logic                cmd_run,
  input  logic                cont,       // keep membrane state (time tiling)
  input  logic                bank,
  output logic                busy,
  output logic                done,
  // tags
  output pos_t                tag_rd_pos,
  input  logic [NTW_MAX-1:0]  ntwu_tags,
  input  logic [NIC_MAX-1:0]  spmb_tags,
  input  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt,
  // IFM and weight local buffers (read side)
  output logic                lb_bank,
  output logic [IFM_AW-1:0]   ifm_raddr [NC],
  input  twword_t             ifm_rdata [NC],
  output logic [W_AW-1:0]     w_raddr   [1],
  input  logic [NR*W_BITS-1:0] w_rdata  [1],
  // OFM local buffer (write side)
  output logic                ofm_clear,
  output logic                ofm_we,
  output logic [OFM_AW-1:0]   ofm_waddr,
  output twword_t             ofm_wdata,
  // PE array
  output logic                arr_clr,
  output logic                arr_beat,
  output weight_t             arr_w    [NR],
  output logic                arr_wv,
  output twword_t             arr_s    [NC],
  output logic                arr_sv   [NC],
  output logic                arr_upd  [NC],
  output vmem_t               arr_u_in [NR],
  output logic [11:0]         arr_lead,
  input  logic                arr_done [NC],
  input  twword_t             arr_spk  [NR][NC],
  input  vmem_t               arr_u_out[NR][NC],
  // OFM buffer
  output logic                ob_load,
  output twword_t             ob_data [NR],
  output pos_t                ob_pos,
  output tw_t                 ob_tw,
  input  logic                ob_valid,
  input  logic [$clog2(NR)-1:0] ob_row,
  input  pos_t                ob_opos,
  input  tw_t                 ob_otw,
  input  twword_t             ob_odata,
  input  logic                ob_busy,
  // status
  output dispatch_mode_e      mode,
  output logic [31:0]         n_groups,
  output logic [31:0]         n_beats,
  output logic [31:0]         stall_cycles,
  output logic [31:0]         n_updates
);
  typedef enum logic [3:0] {
    G_IDLE, G_START, G_WAITGRP, G_FEED_RD, G_FEED_BEAT, G_FEED_WAIT,
    G_DRAIN, G_UPD, G_UPD_WAIT, G_UPD_CAP, G_FIN
  } gstate_e;
  gstate_e st;

  // Dispatcher.
  slot_t disp_slots [NC];
  logic  disp_start, disp_valid, disp_ready, disp_busy, disp_done;
  spikex_dispatcher #(.NC(NC)) u_disp (
    .clk, .rst_n, .start(disp_start), .npos(cfg.npos), .ntw(cfg.ntw),
    .active_cnt, .rd_pos(tag_rd_pos), .tags(ntwu_tags), .mode,
    .slots(disp_slots), .grp_valid(disp_valid), .grp_ready(disp_ready),
    .busy(disp_busy), .done(disp_done));

  // Weight tailor for the input stream.
  logic tl_start, tl_valid, tl_ready, tl_busy, tl_done;
  k_t   tl_k;
  ic_t  tl_ic;
  logic [$clog2(NIC_MAX+1)-1:0] tl_tailored;
  spikex_weight_tailor u_tailor (
    .clk, .rst_n, .start(tl_start), .ic_tags(spmb_tags), .nic(cfg.nic), .kpc(cfg.kpc),
    .k_valid(tl_valid), .k_ready(tl_ready), .k(tl_k), .ic(tl_ic),
    .busy(tl_busy), .done(tl_done), .tailored(tl_tailored));

  // Membrane-state store: potential per (row, neuron), last window per neuron.
  vmem_t vst_u  [NR][NPOS_MAX];
  typedef logic signed [9:0] rtw_t;       // window relative to the current run
  rtw_t  vst_tw [NPOS_MAX];
  logic [$clog2(NTW_MAX+1)-1:0] prev_ntw;  // windows of the previous run
  logic  run_cont;
  logic  [NPOS_MAX-1:0] vst_vld;

  slot_t grp [NC];
  logic [$clog2(NC)-1:0]      col;
  logic [$clog2(NC+NR+1)-1:0] drain;
  tws_t                       wcnt;
  logic                       disp_finished;
  logic [$clog2(K_MAX+1)-1:0] kk;
  assign kk = ($clog2(K_MAX+1))'(cfg.nic * cfg.kpc);

  slot_t cur;
  assign cur = grp[col];

  always_comb begin
    disp_start = (st == G_START);
    disp_ready = (st == G_WAITGRP) && disp_valid;
    tl_start   = (st == G_WAITGRP) && disp_valid;
    tl_ready   = (st == G_FEED_RD) && tl_valid;
    arr_clr    = (st == G_WAITGRP) && disp_valid;
    ofm_clear  = (st == G_START);
    lb_bank    = bank;
    w_raddr[0] = W_AW'(tl_k);
    for (int c = 0; c < NC; c++)
      ifm_raddr[c] = IFM_AW'((32'(grp[c].pos) * 32'(kk) + 32'(tl_k)) * 32'(cfg.ntw) + 32'(grp[c].tw));
    // beat with data (G_FEED_BEAT) or empty drain beat (G_DRAIN)
    arr_beat = (st == G_FEED_BEAT) || (st == G_DRAIN && wcnt == '0 && drain != '0);
    arr_wv   = (st == G_FEED_BEAT);
    for (int r = 0; r < NR; r++) arr_w[r] = w_rdata[0][r*W_BITS +: W_BITS];
    for (int c = 0; c < NC; c++) begin
      arr_s[c]  = ifm_rdata[c];
      arr_sv[c] = (st == G_FEED_BEAT) && grp[c].valid;
    end
    // column update
    for (int c = 0; c < NC; c++) arr_upd[c] = (st == G_UPD) && cur.valid && (32'(col) == c);
    for (int r = 0; r < NR; r++) arr_u_in[r] = vst_vld[cur.pos] ? vst_u[r][cur.pos] : '0;
    begin
      int gap;
      gap = (32'(cur.tw) - int'(vst_tw[cur.pos]) - 1) * int'(cfg.tws);
      arr_lead = !vst_vld[cur.pos] ? '0 : (gap > 4095) ? 12'd4095 : 12'(gap);
    end
    // OFM buffer
    ob_load = (st == G_UPD_CAP) && !ob_busy;
    for (int r = 0; r < NR; r++) ob_data[r] = arr_spk[r][col];
    ob_pos  = cur.pos;
    ob_tw   = cur.tw;
    ofm_we    = ob_valid;
    ofm_waddr = OFM_AW'((32'(ob_row) * 32'(cfg.npos) + 32'(ob_opos)) * 32'(cfg.ntw) + 32'(ob_otw));
    ofm_wdata = ob_odata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; col <= '0; drain <= '0; wcnt <= '0; done <= 1'b0; disp_finished <= 1'b0;
      vst_vld <= '0; prev_ntw <= '0; run_cont <= 1'b0;
      for (int p = 0; p < NPOS_MAX; p++) vst_tw[p] <= '0;
      n_groups <= '0; n_beats <= '0; stall_cycles <= '0; n_updates <= '0;
      for (int c = 0; c < NC; c++) grp[c] <= '0;
    end else begin
      done <= 1'b0;
      if (disp_done) disp_finished <= 1'b1;
      if (arr_beat) n_beats <= n_beats + 1;
      case (st)
        G_IDLE: if (cmd_run) begin
          st <= G_START;
          run_cont <= cont;
          n_groups <= '0; n_beats <= '0; stall_cycles <= '0; n_updates <= '0;
        end
        G_START: begin
          if (!run_cont) vst_vld <= '0;
          for (int p = 0; p < NPOS_MAX; p++)
            vst_tw[p] <= (int'(vst_tw[p]) - int'(prev_ntw) < -512) ? -10'sd512
                       : rtw_t'(int'(vst_tw[p]) - int'(prev_ntw));
          prev_ntw <= cfg.ntw;
          disp_finished <= 1'b0;
          st <= G_WAITGRP;
        end
        G_WAITGRP: begin
          if (disp_valid) begin
            for (int c = 0; c < NC; c++) grp[c] <= disp_slots[c];
            n_groups <= n_groups + 1;
            st <= G_FEED_RD;
          end else if (disp_finished && !disp_busy) begin
            st <= G_FIN;
          end
        end
        G_FEED_RD: begin
          if (tl_valid) st <= G_FEED_BEAT;            // read issued this cycle
          else if (!tl_busy && !tl_start) begin     // all active inputs sent
            drain <= ($clog2(NC+NR+1))'(NR + NC - 2);
            wcnt  <= '0;
            st    <= G_DRAIN;
          end
        end
        G_FEED_BEAT: begin
          wcnt <= cfg.tws - 1'b1;
          st   <= (cfg.tws > 1) ? G_FEED_WAIT : G_FEED_RD;
        end
        G_FEED_WAIT: begin
          wcnt <= wcnt - 1'b1;
          if (wcnt == 1) st <= G_FEED_RD;
        end
        G_DRAIN: begin
          // one empty beat every tws cycles, then let the last one integrate
          if (wcnt != '0) wcnt <= wcnt - 1'b1;
          else if (drain != '0) begin
            drain <= drain - 1'b1;
            wcnt  <= cfg.tws;
          end else begin
            col <= '0;
            st  <= G_UPD;
          end
        end
        G_UPD: begin
          if (!cur.valid) st <= G_WAITGRP;          // slots are packed from column 0
          else st <= G_UPD_WAIT;
        end
        G_UPD_WAIT: if (arr_done[col]) st <= G_UPD_CAP;
        G_UPD_CAP: if (ob_busy) begin
          stall_cycles <= stall_cycles + 1;       // previous column still draining
        end else begin
          for (int r = 0; r < NR; r++) vst_u[r][cur.pos] <= arr_u_out[r][col];
          vst_tw[cur.pos]  <= rtw_t'({1'b0, cur.tw});
          vst_vld[cur.pos] <= 1'b1;
          n_updates <= n_updates + 1;
          if (32'(col) == NC - 1) st <= G_WAITGRP;
          else begin
            col <= col + 1'b1;
            st  <= G_UPD;
          end
        end
        default: begin   // G_FIN: wait for the last output words
          if (!ob_busy) begin
            done <= 1'b1;
            st   <= G_IDLE;
          end
        end
      endcase
    end
  end

  assign busy = (st != G_IDLE);

  // A tile run needs a dispatched group to hold at least one valid slot.
  a_group_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (st == G_WAITGRP && disp_valid) |-> disp_slots[0].valid);
endmodule
