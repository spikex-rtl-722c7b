// spikex_sram: on-chip memory with one write port and one read port.
//
// Used as the 54 KB global buffer (GLB): 27,648 words of 16 bits by default.
// The GLB holds the spiking input, weights and spiking output of the tile that
// the local buffers are working on, with the regions placed by the memory
// controller. Reads are synchronous (data one cycle after `re`). A write and a
// read of the same address in one cycle return the old word.
// From the paper: the global buffer and its 54 KB size. This design's
// choices: the word width and the two-port organisation.
module spikex_sram
  import spikex_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = GLB_BYTES * 8 / WIDTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
