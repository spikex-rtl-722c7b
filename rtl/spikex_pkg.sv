// spikex_pkg: sizes, types and small helpers shared by the SpikeX accelerator.
//
// The array is 8x8 and weights are 8 bit, as in the evaluated configuration. A
// time window (TW) holds at most TWS_MAX = 10 time points (the largest window
// size evaluated); a TW of spikes travels as one 16-bit word, bit t being time
// point t of the window. Membrane potentials are 16-bit signed, and local
// buffers are 2 KB per bank. The word widths, the Vmem width, the tile limits
// (NPOS_MAX, NTW_MAX, NIC_MAX, K_MAX) and the leak encoding are this design's
// own choices.
package spikex_pkg;

  // Array geometry and data widths.
  parameter int unsigned ROWS      = 8;    // PE rows: output channels sharing spikes
  parameter int unsigned COLS      = 8;    // PE columns: dispatched NTWUs
  parameter int unsigned W_BITS    = 8;    // weight width
  parameter int unsigned TWS_MAX   = 10;   // largest time window size
  parameter int unsigned TW_WORD   = 16;   // stored width of one TW spike word
  parameter int unsigned VMEM_BITS = 16;   // membrane potential width

  // Memory hierarchy.
  parameter int unsigned GLB_BYTES  = 55296; // 54 KB global buffer
  parameter int unsigned LBUF_BYTES = 2048;  // 2 KB per local-buffer bank

  // Tile limits (this design's choice).
  parameter int unsigned NPOS_MAX  = 64;   // neurons per output channel in a tile
  parameter int unsigned NTW_MAX   = 150;  // time windows per time stride (300 / 2)
  parameter int unsigned NIC_MAX   = 64;   // input channels (SP-MBs) in a tile
  parameter int unsigned K_MAX     = 256;  // synaptic inputs per neuron in a tile
  parameter int unsigned TW_PER_TB = 2;    // time windows per time block

  typedef logic signed [W_BITS-1:0]    weight_t;
  typedef logic signed [VMEM_BITS-1:0] vmem_t;
  typedef logic [TW_WORD-1:0]          twword_t;
  typedef logic [$clog2(NPOS_MAX)-1:0] pos_t;
  typedef logic [$clog2(NTW_MAX)-1:0]  tw_t;
  typedef logic [$clog2(K_MAX)-1:0]    k_t;
  typedef logic [$clog2(NIC_MAX)-1:0]  ic_t;
  typedef logic [$clog2(TWS_MAX+1)-1:0] tws_t;

  // Dispatch modes of the NTWU scheduler.
  typedef enum logic {
    MODE_TEMPORAL = 1'b0,  // one neuron per group, its TWs across the columns
    MODE_SPATIAL  = 1'b1   // NTWUs of several neurons sharing weights per group
  } dispatch_mode_e;

  // One column slot of a dispatch group: NTWU(pos, tw).
  typedef struct packed {
    logic valid;
    pos_t pos;
    tw_t  tw;
  } slot_t;

  // Layer-tile configuration, written by the host before a run.
  typedef struct packed {
    tws_t                      tws;        // time window size, 1..TWS_MAX
    logic [$clog2(NTW_MAX+1)-1:0]  ntw;    // time windows in the time stride
    logic [$clog2(NPOS_MAX+1)-1:0] npos;   // neurons per output channel
    logic [$clog2(NIC_MAX+1)-1:0]  nic;    // input channels
    logic [$clog2(K_MAX+1)-1:0]    kpc;    // synaptic inputs per input channel
    vmem_t                     vth;        // firing threshold
    logic [3:0]                leak_shift; // lambda = 1 - 2^-leak_shift, 0: no leak
  } cfg_t;

  // Leaky decay lambda*u with lambda = 1 - 2^-s (s = 0 means lambda = 1).
  function automatic vmem_t leak(input vmem_t u, input logic [3:0] s);
    if (s == 4'd0) return u;
    return u - (u >>> s);
  endfunction

  // Saturating add of a weight to a membrane value.
  function automatic vmem_t sat_add(input vmem_t a, input vmem_t b);
    logic signed [VMEM_BITS:0] s;
    s = {a[VMEM_BITS-1], a} + {b[VMEM_BITS-1], b};
    if (s[VMEM_BITS] != s[VMEM_BITS-1])
      return s[VMEM_BITS] ? {1'b1, {(VMEM_BITS-1){1'b0}}} : {1'b0, {(VMEM_BITS-1){1'b1}}};
    return s[VMEM_BITS-1:0];
  endfunction

endpackage
