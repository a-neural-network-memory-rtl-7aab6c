// assoc_queue: the association queue, a FIFO of the recent accesses.
//
// Every access pushes one entry at the head: its context state S0, its address
// A0, whether it missed in L1 (after the hit filter rule: a hit on a line
// brought in by a prefetch counts as a miss) and the hidden and output neuron
// values the network produced for S0. Once the queue holds DEPTH entries, each
// push also pops the oldest entry S_n, which is then trained with an address
// chosen among the D most recent ones (rec_*; index 0 is the newest).
//
// Interface: push is a single-cycle strobe. The popped entry (tail_*) is shown
// combinationally in the cycle of the push, together with pop_valid, so the
// caller latches it on that edge. rec_* show the state after the last push.
// Storage is a plain array (the paper's 128 entries of 128-bit state plus
// 8-bit neuron values); DEPTH and D follow the paper, D's value is assumed.
module assoc_queue
  import nnp_pkg::*;
#(
  parameter int DEPTH = 128,   // paper: 128 entries
  parameter int D     = 4,     // candidate window A0..A(D-1), assumed
  parameter int NN    = 32     // neurons per layer
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               push,
  input  ctx_t               push_ctx,
  input  addr_t              push_addr,
  input  logic               push_miss,
  input  val_t [NN-1:0]      push_hid,
  input  val_t [NN-1:0]      push_out,
  output logic               pop_valid,
  output ctx_t               tail_ctx,
  output addr_t              tail_addr,
  output val_t [NN-1:0]      tail_hid,
  output val_t [NN-1:0]      tail_out,
  output addr_t [D-1:0]      rec_addr,
  output logic  [D-1:0]      rec_miss,
  output logic  [D-1:0]      rec_valid,
  output logic               full
);

  localparam int PW = $clog2(DEPTH);

  ctx_t          q_ctx  [DEPTH];
  addr_t         q_addr [DEPTH];
  logic          q_miss [DEPTH];
  val_t [NN-1:0] q_hid  [DEPTH];
  val_t [NN-1:0] q_out  [DEPTH];

  logic [PW-1:0] head;          // next slot to write; also the oldest when full
  logic [PW:0]   count;

  assign full      = (count == (PW+1)'(DEPTH));
  assign pop_valid = push && full;
  assign tail_ctx  = q_ctx[head];
  assign tail_addr = q_addr[head];
  assign tail_hid  = q_hid[head];
  assign tail_out  = q_out[head];

  always_comb begin
    for (int k = 0; k < D; k++) begin
      logic [PW-1:0] idx;
      idx          = head - PW'(k + 1);
      rec_addr[k]  = q_addr[idx];
      rec_miss[k]  = q_miss[idx];
      rec_valid[k] = count > (PW+1)'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      count <= '0;
    end else if (push) begin
      head <= head + 1'b1;
      if (!full) count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      q_ctx[head]  <= push_ctx;
      q_addr[head] <= push_addr;
      q_miss[head] <= push_miss;
      q_hid[head]  <= push_hid;
      q_out[head]  <= push_out;
    end
  end

endmodule
