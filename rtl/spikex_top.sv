// spikex_top: the SpikeX sparse spiking-neural-network accelerator.
//
// Blocks: the memory controller (with two activity taggers and a weight
// tailor), the 54 KB global buffer of two tile slots, three double-buffered 2 KB local buffers
// (IFM, weight, OFM), the global controller (with the NTWU dispatcher, a
// weight tailor and the membrane-state store), the 8x8 systolic PE array
// (with its filter and IFM edge buffers) and the OFM buffer.
// Use, per layer tile, with one bank b for all four steps (GLB slot b and
// local-buffer bank b):
//   1 write `cfg`; with `ext_bank` = b send OP_CLEAR, then the tile's spike
//     words (OP_WR_IFM) and weights (OP_WR_W) through the external port,
//     which stands for the off-chip DRAM side of the memory controller;
//   2 pulse `cmd_load` with `load_bank` = b: the active part of the tile is
//     copied from GLB slot b into bank b of the IFM and weight local buffers;
//   3 pulse `cmd_run` with `run_bank` = b, held during the run: the array computes the
//     tile into that bank of the OFM local buffer. With `run_cont` set the
//     run continues the previous run's time stride: a long time stride is
//     cut into consecutive tiles of the same neurons and output channels,
//     and the membrane potentials carry over from one to the next;
//   4 pulse `cmd_store` with `load_bank` = b, then read the output spike
//     words with OP_RD_OFM and `ext_bank` = b.
// Both memory levels are double-buffered: while a tile runs on bank b, the
// next tile can be written into slot 1-b and loaded into bank 1-b. The two
// tiles share `cfg`, so they must have the same shape.
// `mc_busy`/`mc_done` and `gc_busy`/`gc_done` report the two controllers;
// the remaining outputs are statistics.
module spikex_top
  import spikex_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  // external (off-chip memory side) port
  input  logic                ext_valid,
  input  logic                ext_bank,   // GLB slot of external requests
  output logic                ext_ready,
  input  logic [1:0]          ext_op,
  input  pos_t                ext_pos,
  input  ic_t                 ext_ic,
  input  k_t                  ext_k,
  input  tw_t                 ext_tw,
  input  logic [$clog2(ROWS)-1:0] ext_row,
  input  logic [15:0]         ext_wdata,
  output logic                ext_rvalid,
  output logic [15:0]         ext_rdata,
  // commands
  input  logic                cmd_load,
  input  logic                cmd_store,
  input  logic                load_bank,
  input  logic                cmd_run,
  input  logic                run_bank,   // also selects the tags the run reads
  input  logic                run_cont,   // continue the previous run's time stride
  output logic                mc_busy,
  output logic                mc_done,
  output logic                gc_busy,
  output logic                gc_done,
  // statistics
  output dispatch_mode_e      mode,
  output logic [31:0]         n_groups,
  output logic [31:0]         n_beats,
  output logic [31:0]         stall_cycles,
  output logic [31:0]         n_updates,
  output logic [31:0]         w_words_fetched,
  output logic [31:0]         ifm_words_fetched,
  output logic [$clog2(NIC_MAX+1)-1:0] chans_tailored,
  output logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_ntwus
);
  localparam int unsigned GLB_AW = $clog2(GLB_BYTES / 2);
  localparam int unsigned IFM_AW = $clog2(LBUF_BYTES / 2);
  localparam int unsigned W_AW   = $clog2(LBUF_BYTES * 8 / (ROWS * W_BITS));
  localparam int unsigned OFM_AW = $clog2(LBUF_BYTES / 2);

  // Global buffer.
  logic              glb_we, glb_re;
  logic [GLB_AW-1:0] glb_waddr, glb_raddr;
  logic [15:0]       glb_wdata, glb_rdata;
  spikex_sram #(.WIDTH(16)) u_glb (
    .clk, .we(glb_we), .waddr(glb_waddr), .wdata(glb_wdata),
    .re(glb_re), .raddr(glb_raddr), .rdata(glb_rdata));

  // Memory controller.
  logic              mc_bank, lb_clear, ifm_we, w_we;
  logic [IFM_AW-1:0] ifm_waddr;
  twword_t           ifm_wdata;
  logic [W_AW-1:0]   w_waddr;
  logic [ROWS*W_BITS-1:0] w_wdata;
  logic [OFM_AW-1:0] ofm_raddr [1];
  twword_t           ofm_rdata [1];
  pos_t              tag_rd_pos;
  logic [NTW_MAX-1:0] ntwu_tags;
  logic [NIC_MAX-1:0] spmb_tags;

  spikex_mem_ctrl u_mc (
    .clk, .rst_n, .cfg,
    .ext_valid, .ext_ready, .ext_op, .ext_pos, .ext_ic, .ext_k, .ext_tw, .ext_row,
    .ext_wdata, .ext_rvalid, .ext_rdata,
    .ext_bank, .run_bank,
    .cmd_load, .cmd_store, .bank(load_bank), .busy(mc_busy), .done(mc_done),
    .glb_we, .glb_waddr, .glb_wdata, .glb_re, .glb_raddr, .glb_rdata,
    .lb_bank(mc_bank), .lb_clear, .ifm_we, .ifm_waddr, .ifm_wdata,
    .w_we, .w_waddr, .w_wdata,
    .ofm_raddr(ofm_raddr[0]), .ofm_rdata(ofm_rdata[0]),
    .tag_rd_pos, .ntwu_tags, .spmb_tags, .active_cnt(active_ntwus),
    .w_words_fetched, .ifm_words_fetched, .chans_tailored);

  // Local buffers.
  logic              gc_bank;
  logic [IFM_AW-1:0] ifm_raddr [COLS];
  twword_t           ifm_rdata [COLS];
  logic [W_AW-1:0]   w_raddr [1];
  logic [ROWS*W_BITS-1:0] w_rdata [1];
  logic              ofm_clear, ofm_we;
  logic [OFM_AW-1:0] ofm_waddr;
  twword_t           ofm_wdata;

  spikex_lbuf #(.WIDTH(TW_WORD), .NRD(COLS)) u_ifm_lbuf (
    .clk, .rst_n, .clear(lb_clear), .cbank(mc_bank),
    .we(ifm_we), .wbank(mc_bank), .waddr(ifm_waddr), .wdata(ifm_wdata),
    .rbank(gc_bank), .raddr(ifm_raddr), .rdata(ifm_rdata));

  spikex_lbuf #(.WIDTH(ROWS*W_BITS), .NRD(1)) u_w_lbuf (
    .clk, .rst_n, .clear(lb_clear), .cbank(mc_bank),
    .we(w_we), .wbank(mc_bank), .waddr(w_waddr), .wdata(w_wdata),
    .rbank(gc_bank), .raddr(w_raddr), .rdata(w_rdata));

  spikex_lbuf #(.WIDTH(TW_WORD), .NRD(1)) u_ofm_lbuf (
    .clk, .rst_n, .clear(ofm_clear), .cbank(gc_bank),
    .we(ofm_we), .wbank(gc_bank), .waddr(ofm_waddr), .wdata(ofm_wdata),
    .rbank(mc_bank), .raddr(ofm_raddr), .rdata(ofm_rdata));

  // PE array.
  logic    arr_clr, arr_beat, arr_wv, arr_busy;
  weight_t arr_w [ROWS];
  twword_t arr_s [COLS];
  logic    arr_sv [COLS];
  logic    arr_upd [COLS];
  vmem_t   arr_u_in [ROWS];
  logic [11:0] arr_lead;
  logic    arr_done [COLS];
  twword_t arr_spk [ROWS][COLS];
  vmem_t   arr_u_out [ROWS][COLS];

  spikex_array u_array (
    .clk, .rst_n, .tws(cfg.tws), .leak_shift(cfg.leak_shift), .vth(cfg.vth),
    .clr(arr_clr), .beat(arr_beat), .w_in(arr_w), .wv_in(arr_wv),
    .s_in(arr_s), .sv_in(arr_sv), .upd_start(arr_upd), .u_in(arr_u_in), .lead(arr_lead),
    .upd_done(arr_done), .busy(arr_busy), .spikes(arr_spk), .u_out(arr_u_out));

  // OFM buffer.
  logic    ob_load, ob_valid, ob_busy;
  twword_t ob_data [ROWS];
  pos_t    ob_pos, ob_opos;
  tw_t     ob_tw, ob_otw;
  logic [$clog2(ROWS)-1:0] ob_row;
  twword_t ob_odata;

  spikex_ofm_buf u_ofm_buf (
    .clk, .rst_n, .load(ob_load), .in_data(ob_data), .in_pos(ob_pos), .in_tw(ob_tw),
    .out_valid(ob_valid), .out_row(ob_row), .out_pos(ob_opos), .out_tw(ob_otw),
    .out_data(ob_odata), .busy(ob_busy));

  // Global controller.
  spikex_global_ctrl u_gc (
    .clk, .rst_n, .cfg, .cmd_run, .cont(run_cont), .bank(run_bank), .busy(gc_busy), .done(gc_done),
    .tag_rd_pos, .ntwu_tags, .spmb_tags, .active_cnt(active_ntwus),
    .lb_bank(gc_bank), .ifm_raddr, .ifm_rdata, .w_raddr, .w_rdata,
    .ofm_clear, .ofm_we, .ofm_waddr, .ofm_wdata,
    .arr_clr, .arr_beat, .arr_w, .arr_wv, .arr_s, .arr_sv, .arr_upd, .arr_u_in,
    .arr_lead, .arr_done, .arr_spk, .arr_u_out,
    .ob_load, .ob_data, .ob_pos, .ob_tw, .ob_valid, .ob_row, .ob_opos, .ob_otw,
    .ob_odata, .ob_busy,
    .mode, .n_groups, .n_beats, .stall_cycles, .n_updates);

  // The array's update never overlaps a new group: the controller waits.
  a_no_beat_during_update: assert property (@(posedge clk) disable iff (!rst_n)
    arr_beat |-> !arr_busy);
endmodule
