// spikex_ofm_buf: output spike buffer on the bottom edge of the PE array.
//
// When a column of PEs finishes its Vmem update, the controller loads the
// column's ROWS spike words (one per output channel, each covering the
// NTWU's time window) together with the NTWU's neuron and window in one cycle.
// The buffer then drains them, one word per cycle starting with row 0, as
// write requests for the OFM local buffer (`out_valid`, `out_row`, `out_pos`,
// `out_tw`, `out_data`). `busy` is high until the last word has left;
// `load` while busy is a protocol error (asserted).
// From the paper: the OFM buffer below the array. This design's choice: the
// parallel-in, serial-out behaviour.
module spikex_ofm_buf
  import spikex_pkg::*;
#(
  parameter int unsigned NR = ROWS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load,
  input  twword_t in_data [NR],
  input  pos_t    in_pos,
  input  tw_t     in_tw,
  output logic    out_valid,
  output logic [$clog2(NR)-1:0] out_row,
  output pos_t    out_pos,
  output tw_t     out_tw,
  output twword_t out_data,
  output logic    busy
);
  twword_t q [NR];
  logic [$clog2(NR+1)-1:0] cnt;   // words left

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_row <= '0; out_pos <= '0; out_tw <= '0;
      for (int r = 0; r < NR; r++) q[r] <= '0;
    end else if (load) begin
      for (int r = 0; r < NR; r++) q[r] <= in_data[r];
      cnt     <= ($clog2(NR+1))'(NR);
      out_row <= '0;
      out_pos <= in_pos;
      out_tw  <= in_tw;
    end else if (cnt != '0) begin
      cnt     <= cnt - 1'b1;
      out_row <= out_row + 1'b1;
    end
  end

  assign out_valid = (cnt != '0);
  assign out_data  = q[out_row];
  assign busy      = out_valid;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);
endmodule
