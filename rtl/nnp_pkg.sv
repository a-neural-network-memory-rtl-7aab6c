// nnp_pkg: types, constants and fixed-point helpers shared by the neural
// network prefetcher.
//
// Number format. Neuron values and weights are 8-bit signed fixed point with
// FRAC fractional bits (ONE = 1.0 = 64), partial sums and accumulators are
// 16-bit signed with the same scaling. The paper asks for 8-bit precision with
// 16-bit accumulators; it names an 8-bit floating-point format for the weights,
// which is replaced here by 8-bit fixed point (this design's choice).
//
// Output-layer layout (this design's choice; the paper only says the 32 output
// neurons are split into two delta subsets plus one confidence neuron):
//   out[15:0]  delta of subset 1 (min-MSE association), two's complement
//   out[30:16] delta of subset 2 (context-hash association), two's complement
//   out[31]    confidence neuron
// Deltas count cache lines (LINE_BITS = 6, 64-byte lines).
package nnp_pkg;

  localparam int CTX_BITS  = 128;   // context state vector (Fig. 5)
  localparam int ADDR_BITS = 32;
  localparam int VAL_BITS  = 8;     // weights and neuron values
  localparam int ACC_BITS  = 16;    // accumulators
  localparam int FRAC      = 6;
  localparam int LINE_BITS = 6;
  localparam int D1_BITS   = 16;    // subset 1 delta width
  localparam int D2_BITS   = 15;    // subset 2 delta width
  localparam int D2_LSB    = 16;
  localparam int CONF_IDX  = 31;

  typedef logic signed [VAL_BITS-1:0] val_t;
  typedef logic signed [ACC_BITS-1:0] acc_t;
  typedef logic [CTX_BITS-1:0]        ctx_t;
  typedef logic [ADDR_BITS-1:0]       addr_t;

  localparam val_t ONE  = val_t'(1 << FRAC);
  localparam val_t HALF = val_t'(1 << (FRAC - 1));

  // Array operating modes.
  typedef enum logic [1:0] {
    M_FWD   = 2'd0,   // row sums: psum flows left to right, x enters per column
    M_TRANS = 2'd1,   // column sums: psum flows top to bottom, e enters per row
    M_UPD   = 2'd2    // in-place weight update w += e_row * x_col
  } arr_mode_e;

  // One memory access as seen by the prefetcher.
  typedef struct packed {
    addr_t       addr;      // byte address
    addr_t       lip;       // linear instruction pointer of the load/store
    logic [7:0]  data;      // low byte of the data fetched
    logic        rw;        // 1 = write
    logic [2:0]  amode;     // addressing mode
    logic        l1_hit;    // L1 hit
    logic        pf_hit;    // hit on a line brought in by a prefetch
  } mem_access_t;

  // One-cycle event pulses of the prefetcher, for performance counters.
  typedef struct packed {
    logic access;        // an access was accepted
    logic stall;         // an access waited: the prefetcher was busy
    logic pred;          // a prediction was recorded in the prefetch queue
    logic issue;         // a prediction was sent to memory
    logic shadow;        // a prediction was kept as shadow prefetch only
    logic pf_drop;       // a prefetch was lost: output FIFO full
    logic train;         // an association training pass started
    logic filtered;      // a candidate was removed by the hit filter
    logic hash_match;    // subset 2 trained on a context-hash match
    logic fb_pos;        // positive feedback training started
    logic fb_neg;        // negative feedback training started
    logic fb_lost;       // feedback lost: feedback FIFO full
    logic limit_raised;  // maximal delta limit raised
  } nnp_events_t;

  function automatic val_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return val_t'(127);
    else if (v < -32'sd128) return val_t'(-128);
    else                    return val_t'(v);
  endfunction

  function automatic acc_t sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)        return acc_t'(32767);
    else if (v < -32'sd32768)  return acc_t'(-32768);
    else                       return acc_t'(v);
  endfunction

  // ReLU followed by saturation to the 8-bit neuron range.
  function automatic val_t relu8(input acc_t a);
    if (a < 0)              return '0;
    else if (a > 16'sd127)  return val_t'(127);
    else                    return val_t'(a);
  endfunction

  // Product of two fixed-point values, rescaled by 2^-sh with round-to-nearest.
  function automatic logic signed [31:0] mulsh(input val_t a, input val_t b, input int sh);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return (p + (32'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  // Slope of the ReLU used for back-propagation: 1 for a positive neuron,
  // 1/8 for a neuron clamped at 0 (keeps a dead neuron trainable).
  function automatic val_t relu_grad(input val_t err, input val_t neuron);
    return (neuron > 0) ? err : val_t'(err >>> 3);
  endfunction

endpackage
