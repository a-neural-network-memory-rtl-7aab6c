// nn_prefetcher: neural network memory prefetcher driven by program context.
//
// For every memory access the prefetcher forms a 128-bit context vector S0
// (address, recent instruction pointers, recent address deltas, data, access
// type), asks the network for the address deltas most associated with such a
// context, and trains the network on-line to associate older contexts with
// addresses that really followed them. The steps per access are:
//
//   prediction  S0 is inferred; the output layer yields two deltas (subset 1:
//               min-MSE associations, subset 2: context-hash associations) and
//               a confidence. Each distinct delta becomes a prefetch candidate
//               A0 + delta; all candidates enter the prefetch queue, and those
//               with confidence above threshold are also sent to memory
//               (pf_*), the rest stay shadow prefetches.
//   queueing    {S0, A0, missed, neuron values} is pushed into the 128-entry
//               association queue; once it is full the oldest entry S_n pops.
//   training    The association selector picks, among the most recent
//               addresses, the target of each subset for S_n (hit filter,
//               maximal delta limit, min popcount distance to S_n's own
//               output, context-hash match) and the network takes one
//               back-propagation step from S_n's stored neuron values.
//   feedback    The demand address is looked up in the prefetch queue. A hit
//               at a useful depth retrains the predicting context towards that
//               delta with high confidence; a hit too early, or a prediction
//               that drops off the queue unhit, retrains its confidence
//               towards zero. Feedback passes re-infer the stored context
//               first. They are queued in a small FIFO and run before the next
//               access is accepted.
//
// Interface: acc_valid/acc_ready take one access; acc_ready is low while the
// prefetcher is busy (each access costs roughly 200-500 cycles of the array,
// so the core side should drop accesses it cannot hand over). pf_valid/pf_ready
// deliver prefetch line addresses. limit shows the maximal delta limit in
// bytes and ev carries one-cycle event pulses.
// The step order follows the paper's workflow; running the steps one after
// another on one array, the FIFOs and the busy handshake are this design's
// choices.
module nn_prefetcher
  import nnp_pkg::*;
#(
  parameter int N          = 32,     // array size, hidden and output neurons
  parameter int N_IN       = 128,    // context vector bits
  parameter int AQ_DEPTH   = 128,    // association queue entries
  parameter int D          = 4,      // association candidates A0..A(D-1)
  parameter int PQ_DEPTH   = 32,     // prefetch queue entries
  parameter int USEFUL_MIN = 4,      // prefetch queue depth of a useful hit
  parameter int HASH_ENT   = 256,    // context hash entries
  parameter int MD_PERIOD  = 1024,   // accesses per max-delta period
  parameter int LR_SHIFT   = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         acc_valid,
  output logic         acc_ready,
  input  mem_access_t  acc,
  output logic         pf_valid,
  input  logic         pf_ready,
  output addr_t        pf_addr,
  output addr_t        limit,
  output nnp_events_t  ev
);

  typedef enum logic [3:0] {
    S_IDLE, S_INF, S_PUSH1, S_PUSH2, S_SEL, S_TRN, S_FB, S_FBI, S_FBT
  } state_e;

  typedef struct packed {
    logic                      positive;
    logic                      subset;
    logic signed [D1_BITS-1:0] delta;
    ctx_t                      ctx;
  } fb_t;

  state_e state;

  // ---------------------------------------------------------------- context
  ctx_t        ctx_now, ctx0;
  mem_access_t acc_r;
  logic        miss_r;
  logic        take;

  assign acc_ready = (state == S_IDLE);
  assign take      = acc_valid && acc_ready;

  context_vector u_ctx (.clk, .rst_n, .acc_valid(take), .acc, .ctx(ctx_now));

  // ---------------------------------------------------------------- network
  logic          nn_start, nn_train, nn_busy, nn_done;
  ctx_t          nn_ctx;
  val_t [N-1:0]  nn_hid_in, nn_out_in, nn_target, nn_hid, nn_out;
  logic [N-1:0]  nn_mask;

  nn_unit #(.N(N), .N_IN(N_IN), .LR_SHIFT(LR_SHIFT)) u_nn (
    .clk, .rst_n, .start(nn_start), .op_train(nn_train), .ctx(nn_ctx),
    .hid_in(nn_hid_in), .out_in(nn_out_in), .target(nn_target), .mask(nn_mask),
    .busy(nn_busy), .done(nn_done), .hid(nn_hid), .out(nn_out)
  );

  // ------------------------------------------------------------ prediction
  logic [D1_BITS-1:0]         bits1;
  logic                       c1_valid, c2_valid, c_issue;
  logic signed [D1_BITS-1:0]  c1_delta;
  logic signed [D2_BITS-1:0]  c2_delta;
  addr_t                      c1_addr, c2_addr;

  pred_decode #(.N(N)) u_dec (
    .out(nn_out), .a0(acc_r.addr), .bits1,
    .cand1_valid(c1_valid), .cand1_delta(c1_delta), .cand1_addr(c1_addr),
    .cand2_valid(c2_valid), .cand2_delta(c2_delta), .cand2_addr(c2_addr),
    .issue(c_issue)
  );

  // ------------------------------------------------------ association queue
  logic                aq_push, aq_pop;
  ctx_t                tail_ctx, ctx_n;
  addr_t               tail_addr, addr_n;
  val_t [N-1:0]        tail_hid, tail_out, hid_n, out_n;
  addr_t [D-1:0]       rec_addr;
  logic  [D-1:0]       rec_miss, rec_valid;
  logic                aq_full, have_pop;

  assign aq_push = (state == S_PUSH1);

  assoc_queue #(.DEPTH(AQ_DEPTH), .D(D), .NN(N)) u_aq (
    .clk, .rst_n, .push(aq_push), .push_ctx(ctx0), .push_addr(acc_r.addr),
    .push_miss(miss_r), .push_hid(nn_hid), .push_out(nn_out),
    .pop_valid(aq_pop), .tail_ctx, .tail_addr, .tail_hid, .tail_out,
    .rec_addr, .rec_miss, .rec_valid, .full(aq_full)
  );

  // ---------------------------------------------------- association selector
  addr_t                      limit_lines;
  logic                       md_settled, md_raised;
  logic                       hv, sel1_valid, sel2_valid, hwr_en;
  logic signed [D1_BITS-1:0]  hdelta, sel1_delta, hwr_delta;
  logic signed [D2_BITS-1:0]  sel2_delta;
  logic [D-1:0]               usable;
  logic [D1_BITS-1:0]         bits1_n;

  always_comb
    for (int k = 0; k < D1_BITS; k++) bits1_n[k] = out_n[k] >= HALF;

  conf_hash #(.ENTRIES(HASH_ENT)) u_hash (
    .clk, .rst_n, .rd_ctx(ctx_n), .rd_valid(hv), .rd_delta(hdelta),
    .wr_en(hwr_en && state == S_SEL), .wr_ctx(ctx_n), .wr_delta(hwr_delta)
  );

  assoc_selector #(.D(D)) u_sel (
    .an_addr(addr_n), .cand_addr(rec_addr), .cand_miss(rec_miss),
    .cand_valid(rec_valid), .limit_lines, .nn_delta1(bits1_n),
    .hash_valid(hv), .hash_delta(hdelta),
    .sel1_valid, .sel1_delta, .sel2_valid, .sel2_delta,
    .hash_wr_en(hwr_en), .hash_wr_delta(hwr_delta), .usable
  );

  // ---------------------------------------------------------- prefetch queue
  logic                       pq_push, pq_sub, pq_iss;
  addr_t                      pq_addr;
  logic signed [D1_BITS-1:0]  pq_delta;
  logic                       fb_valid, fb_positive, fb_subset, useful_hit, drop_event;
  ctx_t                       fb_ctx;
  logic signed [D1_BITS-1:0]  fb_delta;

  always_comb begin
    pq_push  = 1'b0;
    pq_sub   = 1'b0;
    pq_addr  = c1_addr;
    pq_delta = c1_delta;
    pq_iss   = c_issue;
    if (state == S_PUSH1 && c1_valid) pq_push = 1'b1;
    if (state == S_PUSH2 && c2_valid) begin
      pq_push  = 1'b1;
      pq_sub   = 1'b1;
      pq_addr  = c2_addr;
      pq_delta = D1_BITS'(c2_delta);
    end
  end

  prefetch_queue #(.DEPTH(PQ_DEPTH), .USEFUL_MIN(USEFUL_MIN)) u_pq (
    .clk, .rst_n, .push(pq_push), .push_addr(pq_addr), .push_ctx(ctx0),
    .push_subset(pq_sub), .push_delta(pq_delta), .push_issued(pq_iss),
    .lookup(take), .lookup_addr(acc.addr),
    .fb_valid, .fb_positive, .fb_ctx, .fb_subset, .fb_delta,
    .useful_hit, .drop_event
  );

  // Prefetch output FIFO.
  logic pf_in_ready, pf_push;
  assign pf_push = pq_push && pq_iss;

  sync_fifo #(.W(ADDR_BITS), .DEPTH(4)) u_pf_fifo (
    .clk, .rst_n, .in_valid(pf_push), .in_ready(pf_in_ready), .in_data(pq_addr),
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf_addr)
  );

  // Feedback FIFO.
  logic fbq_ready, fbq_valid, fbq_pop;
  fb_t  fbq_in, fbq_out, fb_cur;
  assign fbq_in  = '{positive: fb_positive, subset: fb_subset, delta: fb_delta, ctx: fb_ctx};
  assign fbq_pop = (state == S_FB) && fbq_valid;

  sync_fifo #(.W($bits(fb_t)), .DEPTH(4)) u_fb_fifo (
    .clk, .rst_n, .in_valid(fb_valid), .in_ready(fbq_ready), .in_data(fbq_in),
    .out_valid(fbq_valid), .out_ready(fbq_pop), .out_data(fbq_out)
  );

  // ------------------------------------------------------- max delta control
  max_delta_fsm #(.PERIOD(MD_PERIOD)) u_md (
    .clk, .rst_n, .tick(take), .issued(pf_push), .useful(useful_hit),
    .limit, .limit_lines, .settled(md_settled), .raised(md_raised)
  );

  // ------------------------------------------------------ training targets
  val_t [N-1:0] tgt_assoc, tgt_fb;
  logic [N-1:0] msk_assoc, msk_fb;

  always_comb begin
    tgt_assoc = '0;
    msk_assoc = '0;
    tgt_fb    = '0;
    msk_fb    = '0;
    for (int k = 0; k < D1_BITS; k++) begin
      tgt_assoc[k] = sel1_delta[k] ? ONE : val_t'(0);
      msk_assoc[k] = sel1_valid;
    end
    for (int k = 0; k < D2_BITS; k++) begin
      tgt_assoc[D2_LSB + k] = sel2_delta[k] ? ONE : val_t'(0);
      msk_assoc[D2_LSB + k] = sel2_valid;
    end
    // Feedback: confidence towards 1 or 0; a positive one also retrains the
    // delta of the subset that made the prediction.
    tgt_fb[CONF_IDX] = fb_cur.positive ? ONE : val_t'(0);
    msk_fb[CONF_IDX] = 1'b1;
    if (fb_cur.positive) begin
      if (!fb_cur.subset) begin
        for (int k = 0; k < D1_BITS; k++) begin
          tgt_fb[k] = fb_cur.delta[k] ? ONE : val_t'(0);
          msk_fb[k] = 1'b1;
        end
      end else begin
        for (int k = 0; k < D2_BITS; k++) begin
          tgt_fb[D2_LSB + k] = fb_cur.delta[k] ? ONE : val_t'(0);
          msk_fb[D2_LSB + k] = 1'b1;
        end
      end
    end
  end

  // ----------------------------------------------------- network requests
  always_comb begin
    nn_start  = 1'b0;
    nn_train  = 1'b0;
    nn_ctx    = ctx_now;
    nn_hid_in = nn_hid;
    nn_out_in = nn_out;
    nn_target = tgt_fb;
    nn_mask   = msk_fb;
    unique case (state)
      S_IDLE: nn_start = acc_valid;
      S_SEL: begin
        nn_start  = sel1_valid || sel2_valid;
        nn_train  = 1'b1;
        nn_ctx    = ctx_n;
        nn_hid_in = hid_n;
        nn_out_in = out_n;
        nn_target = tgt_assoc;
        nn_mask   = msk_assoc;
      end
      S_FB: begin
        nn_start = fbq_valid;
        nn_ctx   = fbq_out.ctx;
      end
      S_FBI: begin
        nn_start = nn_done;
        nn_train = 1'b1;
        nn_ctx   = fb_cur.ctx;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      acc_r    <= '0;
      ctx0     <= '0;
      miss_r   <= 1'b0;
      have_pop <= 1'b0;
      ctx_n    <= '0;
      addr_n   <= '0;
      hid_n    <= '0;
      out_n    <= '0;
      fb_cur   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (acc_valid) begin
          acc_r  <= acc;
          ctx0   <= ctx_now;
          miss_r <= !acc.l1_hit || acc.pf_hit;
          state  <= S_INF;
        end
        S_INF: if (nn_done) state <= S_PUSH1;
        S_PUSH1: begin
          have_pop <= aq_pop;
          if (aq_pop) begin
            ctx_n  <= tail_ctx;
            addr_n <= tail_addr;
            hid_n  <= tail_hid;
            out_n  <= tail_out;
          end
          state <= S_PUSH2;
        end
        S_PUSH2: state <= have_pop ? S_SEL : S_FB;
        S_SEL:   state <= (sel1_valid || sel2_valid) ? S_TRN : S_FB;
        S_TRN:   if (nn_done) state <= S_FB;
        S_FB: if (fbq_valid) begin
          fb_cur <= fbq_out;
          state  <= S_FBI;
        end else begin
          state <= S_IDLE;
        end
        S_FBI: if (nn_done) state <= S_FBT;
        S_FBT: if (nn_done) state <= S_FB;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- events
  always_comb begin
    ev              = '0;
    ev.access       = take;
    ev.stall        = acc_valid && !acc_ready;
    ev.pred         = pq_push;
    ev.issue        = pf_push && pf_in_ready;
    ev.shadow       = pq_push && !pq_iss;
    ev.pf_drop      = pf_push && !pf_in_ready;
    ev.train        = (state == S_SEL) && (sel1_valid || sel2_valid);
    ev.filtered     = (state == S_SEL) && |(rec_valid & ~rec_miss);
    ev.hash_match   = (state == S_SEL) && sel2_valid;
    ev.fb_pos       = (state == S_FB) && fbq_valid && fbq_out.positive;
    ev.fb_neg       = (state == S_FB) && fbq_valid && !fbq_out.positive;
    ev.fb_lost      = fb_valid && !fbq_ready;
    ev.limit_raised = md_raised;
  end

  // The network is only started when idle.
  assert property (@(posedge clk) disable iff (!rst_n) nn_start |-> !nn_busy)
    else $error("nn_prefetcher: network started while busy");

endmodule
