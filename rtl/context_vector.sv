// context_vector: builds the 128-bit context state vector of a memory access.
//
// The vector has the layout of the paper's context figure, most significant
// field first:
//   [127:96] access address (32 b)
//   [95:64]  LIP history: bits [8:1] of the last 4 access LIPs, newest lowest
//   [63:12]  delta history: bits [14:2] of the last 4 address deltas, newest lowest
//   [11:4]   data fetched (8 b)
//   [3]      read/write
//   [2:0]    addressing mode
// The histories are shift registers. The vector of an access already contains
// that access's own LIP and its delta to the previous access (this design's
// choice: the paper does not say whether the current access is in the history).
// ctx is combinational from the access; the histories advance on the clock
// edge at which acc_valid is high. Reset clears the histories.
module context_vector
  import nnp_pkg::*;
#(
  parameter int HIST     = 4,    // entries per history (Fig. 5)
  parameter int LIP_LO   = 1,    // LIP bits [8:1]
  parameter int LIP_W    = 8,
  parameter int DELTA_LO = 2,    // delta bits [14:2]
  parameter int DELTA_W  = 13
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acc_valid,
  input  mem_access_t acc,
  output ctx_t        ctx
);

  logic [HIST-1:0][LIP_W-1:0]   lip_hist, lip_next;
  logic [HIST-1:0][DELTA_W-1:0] dlt_hist, dlt_next;
  addr_t                        prev_addr;
  addr_t                        delta;

  always_comb begin
    delta    = acc.addr - prev_addr;
    lip_next = {lip_hist[HIST-2:0], acc.lip[LIP_LO +: LIP_W]};
    dlt_next = {dlt_hist[HIST-2:0], delta[DELTA_LO +: DELTA_W]};
    ctx      = {acc.addr, lip_next, dlt_next, acc.data, acc.rw, acc.amode};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lip_hist  <= '0;
      dlt_hist  <= '0;
      prev_addr <= '0;
    end else if (acc_valid) begin
      lip_hist  <= lip_next;
      dlt_hist  <= dlt_next;
      prev_addr <= acc.addr;
    end
  end

  // The fields must fill the 128-bit vector exactly.
  initial assert ($bits(ctx_t) == ADDR_BITS + HIST*LIP_W + HIST*DELTA_W + 8 + 1 + 3)
    else $error("context fields do not add up to the vector width");

endmodule
