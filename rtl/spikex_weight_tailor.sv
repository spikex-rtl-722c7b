// spikex_weight_tailor: activation-induced weight tailoring.
//
// The synaptic inputs of a tile are grouped by input channel: channel ic owns
// inputs k = ic*kpc .. ic*kpc+kpc-1 (for a convolution, kpc is the kernel
// area; for a dense layer, 1). Each channel's spikes form one spatiotemporal
// memory block (SP-MB) with a 1-bit activity tag. This unit walks the
// channels in order and emits, one per cycle under a valid/ready handshake,
// the input indices k of channels whose tag is 1; channels with a zero tag
// are skipped in a single cycle, so their weights are never requested.
// The memory controller uses it to decide which weights (and spike blocks) to
// fetch into the local buffers; the global controller uses it to decide which
// inputs to stream through the array. `tailored` counts skipped channels.
// Timing: after `start`, the first index is offered on the next cycle; a
// skipped channel costs one cycle; `done` pulses once after the last index.
// From the paper: fetching only the weights of channels with an active SP-MB
// tag. This design's choice: the in-order walk and the handshake.
module spikex_weight_tailor
  import spikex_pkg::*;
#(
  parameter int unsigned NIC = NIC_MAX
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [NIC-1:0] ic_tags,
  input  logic [$clog2(NIC_MAX+1)-1:0] nic,
  input  logic [$clog2(K_MAX+1)-1:0]   kpc,
  output logic           k_valid,
  input  logic           k_ready,
  output k_t             k,
  output ic_t            ic,
  output logic           busy,
  output logic           done,
  output logic [$clog2(NIC_MAX+1)-1:0] tailored
);
  typedef enum logic [1:0] {T_IDLE, T_CHAN, T_EMIT, T_DONE} tstate_e;
  tstate_e st;
  logic [$clog2(NIC_MAX+1)-1:0] ic_q;
  logic [$clog2(K_MAX+1)-1:0]   j;
  logic [$clog2(K_MAX+1)-1:0]   kbase;

  assign k_valid = (st == T_EMIT);
  assign k       = k_t'(kbase + j);
  assign ic      = ic_t'(ic_q);
  assign busy    = (st != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; ic_q <= '0; j <= '0; kbase <= '0; tailored <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          ic_q <= '0; j <= '0; kbase <= '0; tailored <= '0;
          st   <= T_CHAN;
        end
        T_CHAN: begin
          if (ic_q >= nic || kpc == '0) st <= T_DONE;
          else if (ic_tags[ic_t'(ic_q)]) begin
            j  <= '0;
            st <= T_EMIT;
          end else begin
            tailored <= tailored + 1'b1;        // skip the whole channel
            ic_q     <= ic_q + 1'b1;
            kbase    <= kbase + kpc;
          end
        end
        T_EMIT: if (k_ready) begin
          if (j == kpc - 1'b1) begin
            ic_q  <= ic_q + 1'b1;
            kbase <= kbase + kpc;
            st    <= T_CHAN;
          end else begin
            j <= j + 1'b1;
          end
        end
        default: begin
          done <= 1'b1;
          st   <= T_IDLE;
        end
      endcase
    end
  end
endmodule
