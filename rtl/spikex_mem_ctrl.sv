// spikex_mem_ctrl: memory controller between the external memory port, the
// global buffer (GLB) and the local buffers (LBUF).
//
// External side (the off-chip DRAM transfers, or a host, drive it; one request
// per cycle while `ext_ready`):
//   OP_WR_IFM  time-window spike word of (pos, input k of channel ic, tw)
//   OP_WR_W    two weights of input k: rows 2j (low byte) and 2j+1, j = row/2
//   OP_RD_OFM  read back the output spike word of (row, pos, tw)
//   OP_CLEAR   clear the activity tags before a new tile
// Every IFM word written goes through the activity tagger, which builds the
// NTWU, TW, TB and SP-MB (per input channel) tags of the tile.
// The GLB is double-buffered: it holds two tile slots, one per local-buffer
// bank, each with its own set of activity tags. External requests go to slot
// `ext_bank`; `cmd_load` and `cmd_store` use slot `bank`; the tags of slot
// `run_bank` go to the global controller. A tile can thus be written into one
// slot while the tile of the other slot is loaded, run or stored.
// Slot layout (16-bit words, slot b starting at b*SLOT_WORDS): IFM at 0, word
// (pos*K + k)*ntw + tw with K = nic*kpc; weights at W_BASE, 4 words per input
// k; OFM at OFM_BASE, word (row*npos + pos)*ntw + tw. The local buffers use
// the same offsets. A slot is half of the GLB; a tile uses at most 3072 of its
// words, as much as the local buffers hold.
// `cmd_load` copies one tile from the GLB into bank `bank` of the IFM and
// weight local buffers, with activation-induced weight tailoring: the weight
// tailor yields only the inputs of channels whose SP-MB tag is set, so the
// weights and spikes of silent channels are never read; within an active
// channel, spike words of time blocks with a zero TB tag are skipped too. The
// bank is cleared first, so what was skipped reads as zero.
// `cmd_store` copies the tile's output spikes from OFM local-buffer bank
// `bank` into the GLB.
// Timing: two cycles per word moved; `done` pulses at the end of a command.
// From the paper: tag-based fetching of active SP-MBs and of the weights of
// their channels only. This design's choices: the layout, the operations and
// the per-word timing.
module spikex_mem_ctrl
  import spikex_pkg::*;
#(
  parameter int unsigned GLB_AW  = $clog2(GLB_BYTES / 2),
  parameter int unsigned IFM_AW  = $clog2(LBUF_BYTES / 2),
  parameter int unsigned W_AW    = $clog2(LBUF_BYTES * 8 / (ROWS * W_BITS)),
  parameter int unsigned OFM_AW  = $clog2(LBUF_BYTES / 2),
  parameter int unsigned W_BASE   = 1024,
  parameter int unsigned OFM_BASE = 2048
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  // external port
  input  logic                  ext_valid,
  input  logic                  ext_bank,   // GLB slot of the request
  output logic                  ext_ready,
  input  logic [1:0]            ext_op,
  input  pos_t                  ext_pos,
  input  ic_t                   ext_ic,
  input  k_t                    ext_k,
  input  tw_t                   ext_tw,
  input  logic [$clog2(ROWS)-1:0] ext_row,
  input  logic [15:0]           ext_wdata,
  output logic                  ext_rvalid,
  output logic [15:0]           ext_rdata,
  // commands
  input  logic                  cmd_load,
  input  logic                  cmd_store,
  input  logic                  bank,
  output logic                  busy,
  output logic                  done,
  // GLB
  output logic                  glb_we,
  output logic [GLB_AW-1:0]     glb_waddr,
  output logic [15:0]           glb_wdata,
  output logic                  glb_re,
  output logic [GLB_AW-1:0]     glb_raddr,
  input  logic [15:0]           glb_rdata,
  // IFM and weight local buffers (write side)
  output logic                  lb_bank,
  output logic                  lb_clear,
  output logic                  ifm_we,
  output logic [IFM_AW-1:0]     ifm_waddr,
  output twword_t               ifm_wdata,
  output logic                  w_we,
  output logic [W_AW-1:0]       w_waddr,
  output logic [ROWS*W_BITS-1:0] w_wdata,
  // OFM local buffer (read side)
  output logic [OFM_AW-1:0]     ofm_raddr,
  input  twword_t               ofm_rdata,
  // tags for the global controller
  input  logic                  run_bank,   // slot whose tags are read
  input  pos_t                  tag_rd_pos,
  output logic [NTW_MAX-1:0]    ntwu_tags,
  output logic [NIC_MAX-1:0]    spmb_tags,
  output logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt,
  // statistics
  output logic [31:0]           w_words_fetched,
  output logic [31:0]           ifm_words_fetched,
  output logic [$clog2(NIC_MAX+1)-1:0] chans_tailored
);
  localparam logic [1:0] OP_WR_IFM = 2'd0, OP_WR_W = 2'd1, OP_RD_OFM = 2'd2, OP_CLEAR = 2'd3;
  localparam int unsigned TPB = TW_PER_TB;
  localparam int unsigned NTB = (NTW_MAX + TPB - 1) / TPB;
  localparam int unsigned SLOT_WORDS = GLB_BYTES / 4;   // half of the GLB
  localparam int unsigned CNT_W = $clog2(NPOS_MAX*NTW_MAX+1);

  function automatic logic [31:0] slot_base(input logic b);
    return b ? 32'(SLOT_WORDS) : 32'd0;
  endfunction

  typedef enum logic [3:0] {
    M_IDLE, M_LCLR, M_LNEXT, M_WRD, M_WCAP, M_IRD, M_ICAP, M_KNEXT, M_SRD, M_SCAP, M_SWR, M_DONE
  } mstate_e;
  mstate_e st;

  // Derived sizes.
  logic [$clog2(K_MAX+1)-1:0] kk;          // inputs per neuron, nic*kpc
  assign kk = ($clog2(K_MAX+1))'(cfg.nic * cfg.kpc);

  function automatic logic [31:0] ifm_off(input pos_t p, input k_t k, input tw_t t);
    return (32'(p) * 32'(kk) + 32'(k)) * 32'(cfg.ntw) + 32'(t);
  endfunction

  // Tagger on the external write path.
  logic ext_fire, tag_wr;
  assign ext_ready = (st == M_IDLE);
  assign ext_fire  = ext_valid && ext_ready;
  assign tag_wr    = ext_fire && ext_op == OP_WR_IFM;

  logic [NTB-1:0]     ch_tb_tags;
  logic [NIC_MAX-1:0] ld_spmb_tags;
  ic_t                tag_rd_ic;
  logic               bank_q;

  // One tagger per GLB slot.
  logic [NTW_MAX-1:0] t_ntwu [2];
  logic [NTW_MAX-1:0] t_tw   [2];
  logic [NTB-1:0]     t_tb   [2];
  logic [NIC_MAX-1:0] t_ts   [2];
  logic [CNT_W-1:0]   t_cnt  [2];
  for (genvar b = 0; b < 2; b++) begin : g_tag
    spikex_tagger u_tagger (
      .clk, .rst_n, .clear(ext_fire && ext_op == OP_CLEAR && ext_bank == 1'(b)),
      .wr_en(tag_wr && ext_bank == 1'(b)), .wr_pos(ext_pos), .wr_ic(ext_ic), .wr_tw(ext_tw),
      .wr_data(ext_wdata), .rd_pos(tag_rd_pos), .ntwu_tags(t_ntwu[b]),
      .rd_ic(tag_rd_ic), .tw_tags(t_tw[b]), .tb_tags(t_tb[b]),
      .ts_tags(t_ts[b]), .active_cnt(t_cnt[b]));
  end
  assign ntwu_tags    = t_ntwu[run_bank];
  assign spmb_tags    = t_ts[run_bank];
  assign active_cnt   = t_cnt[run_bank];
  assign ld_spmb_tags = t_ts[bank_q];
  assign ch_tb_tags   = t_tb[bank_q];

  // Weight tailoring over the SP-MB tags.
  logic tl_start, tl_valid, tl_ready, tl_done, tl_busy;
  k_t   tl_k;
  ic_t  tl_ic;
  spikex_weight_tailor u_tailor (
    .clk, .rst_n, .start(tl_start), .ic_tags(ld_spmb_tags), .nic(cfg.nic), .kpc(cfg.kpc),
    .k_valid(tl_valid), .k_ready(tl_ready), .k(tl_k), .ic(tl_ic),
    .busy(tl_busy), .done(tl_done), .tailored(chans_tailored));

  assign tag_rd_ic = tl_ic;

  // Walk state.
  k_t   cur_k;
  logic [1:0] wj;
  logic [ROWS*W_BITS-1:0] wacc;
  pos_t cp;
  tw_t  ct;
  logic [OFM_AW:0] sa;                     // store address
  logic [OFM_AW:0] s_end;
  logic [31:0] ioff;
  logic        tb_active;
  logic        last_pt;
  logic        ext_rd_pend;

  assign ioff      = ifm_off(cp, cur_k, ct);
  assign tb_active = ch_tb_tags[32'(ct) / TPB];
  assign last_pt   = (32'(ct) + 1 >= 32'(cfg.ntw)) && (32'(cp) + 1 >= 32'(cfg.npos));
  assign s_end     = (OFM_AW+1)'(32'(ROWS) * 32'(cfg.npos) * 32'(cfg.ntw));

  always_comb begin
    glb_we = 1'b0; glb_waddr = '0; glb_wdata = ext_wdata;
    glb_re = 1'b0; glb_raddr = '0;
    tl_start = 1'b0; tl_ready = 1'b0;
    lb_clear = 1'b0;
    ifm_we = 1'b0; ifm_waddr = IFM_AW'(ioff); ifm_wdata = glb_rdata;
    w_we = 1'b0; w_waddr = W_AW'(cur_k); w_wdata = wacc;
    ofm_raddr = OFM_AW'(sa);
    case (st)
      M_IDLE: if (ext_fire) begin
        case (ext_op)
          OP_WR_IFM: begin
            glb_we    = 1'b1;
            glb_waddr = GLB_AW'(slot_base(ext_bank) + ifm_off(ext_pos, ext_k, ext_tw));
          end
          OP_WR_W: begin
            glb_we    = 1'b1;
            glb_waddr = GLB_AW'(slot_base(ext_bank) + W_BASE + 32'(ext_k) * 4 + 32'(ext_row >> 1));
          end
          OP_RD_OFM: begin
            glb_re    = 1'b1;
            glb_raddr = GLB_AW'(slot_base(ext_bank) + OFM_BASE + (32'(ext_row) * 32'(cfg.npos) + 32'(ext_pos))
                                * 32'(cfg.ntw) + 32'(ext_tw));
          end
          default: ;
        endcase
      end
      M_LCLR:  begin lb_clear = 1'b1; tl_start = 1'b1; end
      M_WRD:   begin glb_re = 1'b1; glb_raddr = GLB_AW'(slot_base(bank_q) + W_BASE + 32'(cur_k) * 4 + 32'(wj)); end
      M_IRD:   begin glb_re = 1'b1; glb_raddr = GLB_AW'(slot_base(bank_q) + ioff); end
      M_ICAP:  ifm_we = 1'b1;
      M_KNEXT: begin
        w_we     = 1'b1;
        tl_ready = 1'b1;
      end
      M_SWR:   begin glb_we = 1'b1; glb_waddr = GLB_AW'(slot_base(bank_q) + OFM_BASE + 32'(sa)); glb_wdata = ofm_rdata; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; cur_k <= '0; wj <= '0; wacc <= '0; cp <= '0; ct <= '0; sa <= '0;
      bank_q <= 1'b0; done <= 1'b0; ext_rd_pend <= 1'b0;
      w_words_fetched <= '0; ifm_words_fetched <= '0;
    end else begin
      done        <= 1'b0;
      ext_rd_pend <= ext_fire && ext_op == OP_RD_OFM;
      case (st)
        M_IDLE: begin
          if (cmd_load) begin
            bank_q <= bank; st <= M_LCLR;
            w_words_fetched <= '0; ifm_words_fetched <= '0;
          end else if (cmd_store) begin
            bank_q <= bank; sa <= '0; st <= M_SRD;
          end
        end
        M_LCLR:  st <= M_LNEXT;
        M_LNEXT: begin
          if (tl_valid) begin
            cur_k <= tl_k; wj <= '0; st <= M_WRD;
          end else if (!tl_busy) st <= M_DONE;
        end
        M_WRD:   st <= M_WCAP;
        M_WCAP: begin
          wacc <= {glb_rdata, wacc[ROWS*W_BITS-1:16]};
          w_words_fetched <= w_words_fetched + 1;
          wj   <= wj + 1'b1;
          if (wj == 2'd3) begin cp <= '0; ct <= '0; st <= M_IRD; end
          else st <= M_WRD;
        end
        M_IRD: begin
          if (!tb_active) begin            // tailored time block: skip the word
            if (last_pt) st <= M_KNEXT;
            else if (32'(ct) + 1 >= 32'(cfg.ntw)) begin ct <= '0; cp <= cp + 1'b1; end
            else ct <= ct + 1'b1;
          end else st <= M_ICAP;
        end
        M_ICAP: begin
          ifm_words_fetched <= ifm_words_fetched + 1;
          if (last_pt) st <= M_KNEXT;
          else begin
            st <= M_IRD;
            if (32'(ct) + 1 >= 32'(cfg.ntw)) begin ct <= '0; cp <= cp + 1'b1; end
            else ct <= ct + 1'b1;
          end
        end
        M_KNEXT: st <= M_LNEXT;
        M_SRD:   st <= (sa >= s_end) ? M_DONE : M_SCAP;
        M_SCAP:  st <= M_SWR;               // OFM local-buffer read latency
        M_SWR: begin
          sa <= sa + 1'b1;
          st <= M_SRD;
        end
        default: begin done <= 1'b1; st <= M_IDLE; end
      endcase
    end
  end

  assign busy = (st != M_IDLE);
  // Read data of OP_RD_OFM follows one cycle later.
  assign ext_rvalid = ext_rd_pend;
  assign ext_rdata  = glb_rdata;
  // The local-buffer bank used by the current command.
  assign lb_bank = bank_q;
endmodule
