// spikex_lbuf: double-buffered local buffer (L1) next to the PE array.
//
// Two banks of BANK_BYTES (2 KB) each. While the array reads one bank, the
// memory controller can fill the other; the owner of each side picks its bank
// with `wbank` / `rbank`. Every word has a valid bit: `clear` with `cbank`
// invalidates a whole bank in one cycle, and an invalid word reads as zero.
// That lets a bank that only received the active (tagged) blocks of a tile
// return zeros for everything that was skipped, without writing them.
// NRD synchronous read ports (data one cycle after the address) feed the
// columns of the array in parallel; there is one write port.
// Instances: the IFM local buffer (16-bit time-window words, COLS read ports),
// the weight local buffer (one 64-bit word holds the 8 row weights of one
// input) and the OFM local buffer (16-bit spike words).
// From the paper: the 2 KB size and the double buffering. This design's
// choices: the valid bits, the port counts and widths.
module spikex_lbuf
  import spikex_pkg::*;
#(
  parameter int unsigned WIDTH      = TW_WORD,
  parameter int unsigned BANK_BYTES = LBUF_BYTES,
  parameter int unsigned NRD        = 1,
  localparam int unsigned DEPTH     = BANK_BYTES * 8 / WIDTH,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             cbank,
  input  logic             we,
  input  logic             wbank,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rbank,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);
  logic [WIDTH-1:0] mem [2][DEPTH];
  logic [DEPTH-1:0] vld [2];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld[0] <= '0;
      vld[1] <= '0;
    end else begin
      if (clear) vld[cbank] <= '0;
      if (we)    vld[wbank][waddr] <= 1'b1;
    end
  end

  for (genvar i = 0; i < NRD; i++) begin : g_rd
    always_ff @(posedge clk) begin
      rdata[i] <= vld[rbank][raddr[i]] ? mem[rbank][raddr[i]] : '0;
    end
  end
endmodule
