// spikex_dispatcher: agile spatiotemporal dispatch of active NTWUs.
//
// An NTWU (neuro-temporal work unit) is the work of one postsynaptic neuron
// over one time window. Only NTWUs whose activity tag is set are dispatched;
// the rest are skipped. The dispatcher packs active NTWUs into groups of up
// to COLS slots, one slot per PE column; all rows of the array share a group
// (the rows are output channels that see the same spikes).
// Mode choice, made once per tile at `start`:
//  * high temporal density (default): chosen when the average number of
//    active NTWUs per neuron, active_cnt / npos, exceeds the array width.
//    A group then holds NTWUs of a single neuron only (its active windows in
//    time order), so a group ends early when the neuron runs out of them.
//  * high spatial density: otherwise. A group is filled with active NTWUs of
//    consecutive neurons (neuron-major, window ascending) as long as columns
//    are free; these neurons share the row's weights.
// Scanning reads the NTWU tag vector of one neuron at a time from the tagger
// (`rd_pos`/`tags`) and finds the next set tag with a priority encoder, one
// slot per cycle. A group is offered with `grp_valid` and taken with
// `grp_ready`; `done` pulses after the last group.
// From the paper: the two modes, the switching rule and what each mode puts
// in a group. This design's choices: the scan order and one slot per cycle.
module spikex_dispatcher
  import spikex_pkg::*;
#(
  parameter int unsigned NC  = COLS,
  parameter int unsigned NTW = NTW_MAX
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [$clog2(NPOS_MAX+1)-1:0] npos,
  input  logic [$clog2(NTW_MAX+1)-1:0]  ntw,
  input  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_cnt,
  output pos_t           rd_pos,
  input  logic [NTW-1:0] tags,
  output dispatch_mode_e mode,
  output slot_t          slots [NC],
  output logic           grp_valid,
  input  logic           grp_ready,
  output logic           busy,
  output logic           done
);
  typedef enum logic [1:0] {D_IDLE, D_SCAN, D_EMIT, D_DONE} dstate_e;
  dstate_e st;
  pos_t    p;
  logic [$clog2(NTW_MAX+1)-1:0] twn;        // next window to look at
  logic [$clog2(NC+1)-1:0]      c;          // slots filled
  logic [$clog2(NC)-1:0]        ci;         // slot to fill
  assign ci = c[$clog2(NC)-1:0];
  logic    last;                            // no more neurons after this group

  // Next active window of neuron p at or after twn.
  logic    found;
  tw_t     fidx;
  always_comb begin
    found = 1'b0;
    fidx  = '0;
    for (int i = NTW - 1; i >= 0; i--)
      if (tags[i] && i >= int'(twn) && i < int'(ntw)) begin
        found = 1'b1;
        fidx  = tw_t'(i);
      end
  end

  assign rd_pos    = p;
  assign grp_valid = (st == D_EMIT);
  assign busy      = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; p <= '0; twn <= '0; c <= '0; last <= 1'b0; done <= 1'b0;
      mode <= MODE_TEMPORAL;
      for (int i = 0; i < NC; i++) slots[i] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        D_IDLE: if (start) begin
          // temporal mode iff active_cnt / npos > NC
          mode <= (32'(active_cnt) > 32'(NC) * 32'(npos)) ? MODE_TEMPORAL : MODE_SPATIAL;
          p    <= '0; twn <= '0; c <= '0; last <= 1'b0;
          for (int i = 0; i < NC; i++) slots[i] <= '0;
          st   <= (npos == '0) ? D_DONE : D_SCAN;
        end
        D_SCAN: begin
          if (found) begin
            slots[ci] <= '{valid: 1'b1, pos: p, tw: fidx};
            twn      <= fidx + 1'b1;
            c        <= c + 1'b1;
            if (32'(c) == NC - 1) st <= D_EMIT;
          end else begin
            // neuron p exhausted
            twn <= '0;
            if (32'(p) + 1 >= 32'(npos)) begin
              last <= 1'b1;
              st   <= (c != '0) ? D_EMIT : D_DONE;
            end else begin
              p <= p + 1'b1;
              if (mode == MODE_TEMPORAL && c != '0) st <= D_EMIT;
            end
          end
        end
        D_EMIT: if (grp_ready) begin
          for (int i = 0; i < NC; i++) slots[i] <= '0;
          c  <= '0;
          st <= last ? D_DONE : D_SCAN;
        end
        default: begin    // D_DONE
          done <= 1'b1;
          st   <= D_IDLE;
        end
      endcase
    end
  end

  a_grp_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    grp_valid |-> slots[0].valid);
endmodule
