// spikex_array: the ROWS x COLS systolic PE array with its edge feeders.
//
// Weights enter each row from the left through the filter buffer and move one
// PE to the right per beat; time-window spike words enter each column from the
// top through the IFM buffer and move one PE down per beat. Row r holds one
// weight set (an output channel, or a neuron of a dense layer); column c holds
// one dispatched NTWU. PE (r, c) therefore integrates the NTWU of column c for
// the weights of row r, reusing each weight across the time points of its
// window, across the columns of its row (other windows of the same neuron) and,
// in spatial dispatch mode, across other neurons that share the weights.
// `clr` and `beat` go to every PE. After the last beat plus ROWS+COLS-2 drain
// beats the controller updates one column at a time: `upd_start[c]` starts
// the Vmem update of every PE in column c with `u_in[r]` and `lead`, and
// `upd_done[c]` reports completion; `spikes[r][c]` and `u_out[r][c]` then hold
// the column's results.
// The array shape (8x8) and the flow directions are the paper's; the
// column-serial update and the port set are this design's choices.
module spikex_array
  import spikex_pkg::*;
#(
  parameter int unsigned NR = ROWS,
  parameter int unsigned NC = COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  tws_t        tws,
  input  logic [3:0]  leak_shift,
  input  vmem_t       vth,
  input  logic        clr,
  input  logic        beat,
  input  weight_t     w_in  [NR],   // unskewed, one per row, same k
  input  logic        wv_in,
  input  twword_t     s_in  [NC],   // unskewed, one per column, same k
  input  logic        sv_in [NC],
  input  logic        upd_start [NC],
  input  vmem_t       u_in  [NR],
  input  logic [11:0] lead,
  output logic        upd_done [NC],
  output logic        busy,
  output twword_t     spikes [NR][NC],
  output vmem_t       u_out  [NR][NC]
);
  weight_t fw [NR];
  logic    fv [NR];
  twword_t is [NC];
  logic    iv [NC];

  spikex_filter_buf #(.N(NR)) u_filter (
    .clk, .rst_n, .beat, .w_in, .v_in(wv_in), .w_out(fw), .v_out(fv));
  spikex_ifm_buf #(.N(NC)) u_ifm (
    .clk, .rst_n, .beat, .s_in, .v_in(sv_in), .s_out(is), .v_out(iv));

  // Horizontal (weight) and vertical (spike) links between PEs.
  weight_t wl [NR][NC+1];
  logic    wlv[NR][NC+1];
  twword_t sl [NR+1][NC];
  logic    slv[NR+1][NC];
  logic    ubusy [NR][NC];
  logic    udone [NR][NC];

  for (genvar r = 0; r < NR; r++) begin : g_left
    assign wl[r][0]  = fw[r];
    assign wlv[r][0] = fv[r];
  end
  for (genvar c = 0; c < NC; c++) begin : g_top
    assign sl[0][c]  = is[c];
    assign slv[0][c] = iv[c];
  end

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      spikex_pe u_pe (
        .clk, .rst_n, .tws, .leak_shift, .vth, .clr, .beat,
        .w_in(wl[r][c]),   .wv_in(wlv[r][c]),
        .s_in(sl[r][c]),   .sv_in(slv[r][c]),
        .w_out(wl[r][c+1]), .wv_out(wlv[r][c+1]),
        .s_out(sl[r+1][c]), .sv_out(slv[r+1][c]),
        .upd_start(upd_start[c]), .u_in(u_in[r]), .lead,
        .upd_busy(ubusy[r][c]), .upd_done(udone[r][c]),
        .spikes(spikes[r][c]), .u_out(u_out[r][c]));
    end
  end

  // All PEs of a column run the same update schedule; row 0 reports it.
  always_comb begin
    busy = 1'b0;
    for (int c = 0; c < NC; c++) begin
      upd_done[c] = udone[0][c];
      for (int r = 0; r < NR; r++) busy |= ubusy[r][c];
    end
  end
endmodule
