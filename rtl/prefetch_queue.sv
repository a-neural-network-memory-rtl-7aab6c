// prefetch_queue: record of every prediction made (issued prefetches and
// shadow prefetches alike), used to turn demand accesses into feedback.
//
// push adds a prediction: its line address, the context that predicted it, the
// output subset and delta it came from, and whether it was issued to memory.
// Entries are written round-robin; when the queue is full the oldest entry is
// overwritten, and if that entry was never hit it produces negative feedback
// (a drop-off). lookup compares a demand line address with all entries: on a
// hit the first matching entry (and any duplicate of the same line) is
// removed, and the feedback is positive when the entry's depth, the number of
// predictions pushed after it, is at least USEFUL_MIN (the prefetch had time
// to be useful) and negative when it is smaller.
//
// Interface: push and lookup are single-cycle strobes and must not coincide.
// Feedback appears one cycle later as a one-cycle pulse fb_valid with
// fb_positive, fb_ctx, fb_subset, fb_delta; useful_hit pulses with a positive
// hit on an entry that was issued. The queue, the feedback kinds and the
// depth rule follow the paper; the depth, USEFUL_MIN and the handling of
// duplicates are this design's choices (the paper borrows its depth weighting
// from earlier work without giving it).
module prefetch_queue
  import nnp_pkg::*;
#(
  parameter int DEPTH      = 32,   // assumed
  parameter int USEFUL_MIN = 4     // assumed
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  addr_t                      push_addr,
  input  ctx_t                       push_ctx,
  input  logic                       push_subset,   // 0 = subset 1, 1 = subset 2
  input  logic signed [D1_BITS-1:0]  push_delta,
  input  logic                       push_issued,
  input  logic                       lookup,
  input  addr_t                      lookup_addr,
  output logic                       fb_valid,
  output logic                       fb_positive,
  output ctx_t                       fb_ctx,
  output logic                       fb_subset,
  output logic signed [D1_BITS-1:0]  fb_delta,
  output logic                       useful_hit,
  output logic                       drop_event     // a never-hit entry was overwritten
);

  localparam int PW = $clog2(DEPTH);
  localparam int LW = ADDR_BITS - LINE_BITS;

  logic [DEPTH-1:0]          v;
  logic [LW-1:0]             q_line  [DEPTH];
  ctx_t                      q_ctx   [DEPTH];
  logic                      q_sub   [DEPTH];
  logic signed [D1_BITS-1:0] q_delta [DEPTH];
  logic                      q_iss   [DEPTH];
  logic [7:0]                q_stamp [DEPTH];
  logic [PW-1:0]             head;
  logic [7:0]                stamp;

  logic [DEPTH-1:0]          match;
  logic                      hit;
  logic [PW-1:0]             hit_idx;

  always_comb begin
    match   = '0;
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < DEPTH; i++) begin
      match[i] = v[i] && q_line[i] == lookup_addr[ADDR_BITS-1:LINE_BITS];
      if (match[i] && !hit) begin
        hit     = 1'b1;
        hit_idx = PW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v           <= '0;
      head        <= '0;
      stamp       <= '0;
      fb_valid    <= 1'b0;
      fb_positive <= 1'b0;
      fb_ctx      <= '0;
      fb_subset   <= 1'b0;
      fb_delta    <= '0;
      useful_hit  <= 1'b0;
      drop_event  <= 1'b0;
    end else begin
      fb_valid   <= 1'b0;
      useful_hit <= 1'b0;
      drop_event <= 1'b0;
      if (push) begin
        if (v[head]) begin
          fb_valid    <= 1'b1;
          fb_positive <= 1'b0;
          fb_ctx      <= q_ctx[head];
          fb_subset   <= q_sub[head];
          fb_delta    <= q_delta[head];
          drop_event  <= 1'b1;
        end
        v[head]       <= 1'b1;
        q_line[head]  <= push_addr[ADDR_BITS-1:LINE_BITS];
        q_ctx[head]   <= push_ctx;
        q_sub[head]   <= push_subset;
        q_delta[head] <= push_delta;
        q_iss[head]   <= push_issued;
        q_stamp[head] <= stamp;
        head          <= (head == PW'(DEPTH - 1)) ? '0 : head + 1'b1;
        stamp         <= stamp + 1'b1;
      end else if (lookup && hit) begin
        v           <= v & ~match;
        fb_valid    <= 1'b1;
        fb_positive <= (stamp - q_stamp[hit_idx]) >= 8'(USEFUL_MIN);
        fb_ctx      <= q_ctx[hit_idx];
        fb_subset   <= q_sub[hit_idx];
        fb_delta    <= q_delta[hit_idx];
        useful_hit  <= q_iss[hit_idx] && (stamp - q_stamp[hit_idx]) >= 8'(USEFUL_MIN);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && lookup))
    else $error("prefetch_queue: push and lookup in the same cycle");

endmodule
