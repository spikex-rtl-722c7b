// spikex_pe: one SpikeX processing element.
//
// A PE computes one neuro-temporal work unit (NTWU): one postsynaptic neuron
// over one time window (TW) of `tws` time points, in the three steps of the
// leaky integrate-and-fire model.
//   1 Synaptic integration. On each `beat` the PE latches a weight (from the
//     left) and a TW spike word (from above) into its two input registers and
//     forwards both to its right and lower neighbours. Over the next `tws`
//     cycles the single reusable adder adds, for time point t, either the
//     weight or 0 (a 2:1 mux selected by spike bit t) into scratchpad entry
//     C[t]. One weight thus serves every time point of the window.
//   2 Vmem update. On `upd_start` the PE takes the membrane potential left by
//     the neuron's previous TW (`u_in`), first applies `lead` leak-only steps
//     for skipped time points, then for t = 0..tws-1 forms
//     v = lambda*u + C[t], one time point per cycle, with a second adder.
//   3 Spike generation. The comparator fires when v >= Vth; the potential is
//     then reset to 0, otherwise u = v. `spikes` bit t is the output of time
//     point t; `u_out` is the potential after the last time point.
// Timing: beats must be at least `tws` cycles apart; `upd_done` pulses
// lead + tws + 1 cycles after `upd_start`.
// From the paper: the mux-fed reusable adder, the Vmem scratchpad, the
// sequential update and the comparator against a Vth register. This design's
// own choices: lambda = 1 - 2^-leak_shift, saturating 16-bit arithmetic,
// firing on v >= Vth, and the lead-step handling of skipped windows.
module spikex_pe
  import spikex_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  tws_t        tws,
  input  logic [3:0]  leak_shift,
  input  vmem_t       vth,
  // step 1: synaptic integration
  input  logic        clr,        // clear scratchpad before a new NTWU
  input  logic        beat,       // latch new weight / spikes
  input  weight_t     w_in,
  input  logic        wv_in,      // weight valid
  input  twword_t     s_in,
  input  logic        sv_in,      // spike word valid
  output weight_t     w_out,      // to right neighbour
  output logic        wv_out,
  output twword_t     s_out,      // to lower neighbour
  output logic        sv_out,
  // steps 2 and 3: Vmem update and spike generation
  input  logic        upd_start,
  input  vmem_t       u_in,
  input  logic [11:0] lead,       // leak-only steps before the window
  output logic        upd_busy,
  output logic        upd_done,
  output twword_t     spikes,
  output vmem_t       u_out
);

  // Input registers (REG in front of the mux in the PE schematic).
  weight_t w_reg;
  twword_t s_reg;
  logic    wv_reg, sv_reg;

  vmem_t   scratch [TWS_MAX];     // C[t] of the current window
  tws_t    icnt;                  // integration time point
  logic    integ;                 // integrating

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_reg  <= '0; s_reg <= '0; wv_reg <= 1'b0; sv_reg <= 1'b0;
    end else if (beat) begin
      w_reg  <= w_in; s_reg <= s_in; wv_reg <= wv_in; sv_reg <= sv_in;
    end
  end

  assign w_out  = w_reg;
  assign wv_out = wv_reg;
  assign s_out  = s_reg;
  assign sv_out = sv_reg;

  // Reusable adder: scratch[t] + (spike[t] ? weight : 0).
  vmem_t addend;
  always_comb begin
    addend = '0;
    if (integ && wv_reg && sv_reg && s_reg[icnt])
      addend = vmem_t'(w_reg);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= 1'b0;
      icnt  <= '0;
      for (int i = 0; i < TWS_MAX; i++) scratch[i] <= '0;
    end else begin
      if (clr) begin
        for (int i = 0; i < TWS_MAX; i++) scratch[i] <= '0;
        integ <= 1'b0;
        icnt  <= '0;
      end else begin
        if (integ) begin
          scratch[icnt] <= sat_add(scratch[icnt], addend);
          if (icnt == tws - 1'b1) integ <= 1'b0;
          icnt <= icnt + 1'b1;
        end
        if (beat) begin
          integ <= 1'b1;
          icnt  <= '0;
        end
      end
    end
  end

  // Sequential Vmem update and spike generation.
  typedef enum logic [1:0] {U_IDLE, U_LEAD, U_RUN, U_DONE} ustate_e;
  ustate_e     ust;
  vmem_t       u;
  logic [11:0] lcnt;
  tws_t        ucnt;
  vmem_t       v;
  logic        fire;

  always_comb begin
    v    = sat_add(leak(u, leak_shift), scratch[ucnt]);
    fire = (v >= vth);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ust <= U_IDLE; u <= '0; lcnt <= '0; ucnt <= '0; spikes <= '0;
    end else begin
      case (ust)
        U_IDLE: if (upd_start) begin
          u      <= u_in;
          lcnt   <= lead;
          ucnt   <= '0;
          spikes <= '0;
          ust    <= (lead != '0) ? U_LEAD : U_RUN;
        end
        U_LEAD: begin
          u    <= leak(u, leak_shift);
          lcnt <= lcnt - 1'b1;
          if (lcnt == 12'd1) ust <= U_RUN;
        end
        U_RUN: begin
          u            <= fire ? '0 : v;
          spikes[ucnt] <= fire;
          ucnt         <= ucnt + 1'b1;
          if (ucnt == tws - 1'b1) ust <= U_DONE;
        end
        default: ust <= U_IDLE;   // U_DONE: one-cycle done pulse
      endcase
    end
  end

  assign upd_busy = (ust != U_IDLE);
  assign upd_done = (ust == U_DONE);
  assign u_out    = u;

  // A new beat must not cut short the integration of the previous one.
  a_beat_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    beat |-> !integ || (icnt == tws - 1'b1));

endmodule
