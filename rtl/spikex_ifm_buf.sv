// spikex_ifm_buf: spike-word feeder on the top edge of the PE array.
//
// Each integration beat delivers one time-window spike word per PE column: the
// word of synaptic input k, for the NTWU (neuron, time window) dispatched to
// that column. Column c is delayed by c beats through a shift register that
// advances only on `beat`, matching the row skew of the filter buffer so that
// spike word and weight of the same k meet in every PE. Column 0 passes
// straight through. Each word carries a valid bit (an empty column slot or a
// fill/drain beat is invalid and adds nothing).
// Timing: outputs change one cycle after a `beat` and hold between beats.
// The paper names the IFM buffer on the array edge and gives the top-to-bottom
// spike flow; the skew registers are this design's choice.
module spikex_ifm_buf
  import spikex_pkg::*;
#(
  parameter int unsigned N = COLS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    beat,
  input  twword_t s_in  [N],
  input  logic    v_in  [N],
  output twword_t s_out [N],
  output logic    v_out [N]
);
  twword_t dly_s [N][N];
  logic    dly_v [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++)
        for (int j = 0; j < N; j++) begin dly_s[c][j] <= '0; dly_v[c][j] <= 1'b0; end
    end else if (beat) begin
      for (int c = 0; c < N; c++) begin
        dly_s[c][0] <= s_in[c];
        dly_v[c][0] <= v_in[c];
        for (int j = 1; j < N; j++) begin
          dly_s[c][j] <= dly_s[c][j-1];
          dly_v[c][j] <= dly_v[c][j-1];
        end
      end
    end
  end

  always_comb begin
    s_out[0] = s_in[0];
    v_out[0] = v_in[0];
    for (int c = 1; c < N; c++) begin
      s_out[c] = dly_s[c][c-1];
      v_out[c] = dly_v[c][c-1];
    end
  end
endmodule
