// spikex_tagger: hierarchical activity tags of the spiking input of a tile.
//
// Spike data enter the accelerator as time-window (TW) words. As each word is
// written, the tagger ORs its bits into two tag sets:
//  * the NTWU tag of (neuron pos, window tw): 1 iff some synaptic input of
//    that postsynaptic neuron fired inside the window. Only NTWUs with a
//    non-zero tag are dispatched to the PE array.
//  * the TW tag of (input channel ic, window tw). One level up, the time-block
//    (TB) tag of a channel is the OR of its TW tags over TW_PER_TB windows, and
//    the time-stride (TS) tag is the OR of all its TB tags. A channel's TS tag
//    is the tag of its spatiotemporal memory block (SP-MB): all the input of
//    that channel to the tile's neurons over all time blocks. A zero SP-MB tag
//    lets the memory controller skip the channel's spikes and weights.
// `active_cnt` counts NTWU tags that are set. `clear` zeroes every tag.
// Timing: a write updates the tags at the next clock edge; reads are
// combinational.
// From the paper: tags per granularity, the bitwise-OR hierarchy and the
// SP-MB tag per input channel. This design's choice: tags are built on the
// write path, and TW_PER_TB is fixed at 2 (as drawn in the paper's example).
module spikex_tagger
  import spikex_pkg::*;
#(
  parameter int unsigned NPOS = NPOS_MAX,
  parameter int unsigned NTW  = NTW_MAX,
  parameter int unsigned NIC  = NIC_MAX,
  parameter int unsigned TPB  = TW_PER_TB,
  localparam int unsigned NTB = (NTW + TPB - 1) / TPB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 wr_en,
  input  pos_t                 wr_pos,
  input  ic_t                  wr_ic,
  input  tw_t                  wr_tw,
  input  twword_t              wr_data,
  // NTWU tags of one neuron, for the dispatcher
  input  pos_t                 rd_pos,
  output logic [NTW-1:0]       ntwu_tags,
  // per-channel tags
  input  ic_t                  rd_ic,
  output logic [NTW-1:0]       tw_tags,
  output logic [NTB-1:0]       tb_tags,
  output logic [NIC-1:0]       ts_tags,     // SP-MB tags
  output logic [$clog2(NPOS*NTW+1)-1:0] active_cnt
);
  logic [NTW-1:0] ntwu_q [NPOS];
  logic [NTW-1:0] twtag_q [NIC];
  logic           hit;

  assign hit = wr_en && (wr_data != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPOS; p++) ntwu_q[p] <= '0;
      for (int i = 0; i < NIC; i++) twtag_q[i] <= '0;
      active_cnt <= '0;
    end else if (clear) begin
      for (int p = 0; p < NPOS; p++) ntwu_q[p] <= '0;
      for (int i = 0; i < NIC; i++) twtag_q[i] <= '0;
      active_cnt <= '0;
    end else if (hit) begin
      ntwu_q[wr_pos][wr_tw]  <= 1'b1;
      twtag_q[wr_ic][wr_tw]  <= 1'b1;
      if (!ntwu_q[wr_pos][wr_tw]) active_cnt <= active_cnt + 1'b1;
    end
  end

  // TB tag = OR of TW tags; TS (SP-MB) tag = OR of TB tags.
  logic [NTB-1:0] tb_all [NIC];
  for (genvar i = 0; i < NIC; i++) begin : g_ic
    for (genvar b = 0; b < NTB; b++) begin : g_tb
      localparam int unsigned HI = (b * TPB + TPB > NTW) ? NTW - 1 : b * TPB + TPB - 1;
      assign tb_all[i][b] = |twtag_q[i][HI : b * TPB];
    end
    assign ts_tags[i] = |tb_all[i];
  end

  always_comb begin
    ntwu_tags = ntwu_q[rd_pos];
    tw_tags   = twtag_q[rd_ic];
    tb_tags   = tb_all[rd_ic];
  end
endmodule
