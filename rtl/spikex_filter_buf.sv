// spikex_filter_buf: weight feeder on the left edge of the PE array.
//
// Each integration beat delivers one weight per PE row (one output channel per
// row, all for the same synaptic input k). Row r is delayed by r beats through
// a shift register that advances only on `beat`, so that the weight meets, in
// every PE of the row, the spike word that travelled down the array for the
// same k. This is the usual input skew of a systolic array. Row 0 passes
// straight through. The weight's valid bit travels with it.
// Timing: outputs change one cycle after a `beat` and hold between beats.
// The paper names the filter buffer on the array edge and gives the
// left-to-right weight flow; the skew registers are this design's reading of
// how a systolic array is fed.
module spikex_filter_buf
  import spikex_pkg::*;
#(
  parameter int unsigned N = ROWS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    beat,
  input  weight_t w_in  [N],
  input  logic    v_in,
  output weight_t w_out [N],
  output logic    v_out [N]
);
  // Stage j of row r holds what row r must present j beats from now.
  weight_t dly_w [N][N];
  logic    dly_v [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin dly_w[r][j] <= '0; dly_v[r][j] <= 1'b0; end
    end else if (beat) begin
      for (int r = 0; r < N; r++) begin
        dly_w[r][0] <= w_in[r];
        dly_v[r][0] <= v_in;
        for (int j = 1; j < N; j++) begin
          dly_w[r][j] <= dly_w[r][j-1];
          dly_v[r][j] <= dly_v[r][j-1];
        end
      end
    end
  end

  // Row r reads stage r-1 (r beats behind the input at the next beat).
  always_comb begin
    w_out[0] = w_in[0];
    v_out[0] = v_in;
    for (int r = 1; r < N; r++) begin
      w_out[r] = dly_w[r][r-1];
      v_out[r] = dly_v[r][r-1];
    end
  end
endmodule
