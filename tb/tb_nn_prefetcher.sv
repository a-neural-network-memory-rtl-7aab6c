// tb_nn_prefetcher: end-to-end test of the prefetcher with the full-size
// network (32x32 array, 128-bit context) and shortened queues (association
// queue 16, prefetch queue 16, max-delta period 64 accesses).
//
// The access stream interleaves two loops that walk small arrays again and
// again (strides of 3 and 2 cache lines, two instruction pointers each), so
// the same contexts recur and the network can learn the deltas between them.
// About a third of the accesses hit in L1. The driver holds each access until
// the prefetcher takes it and answers every prefetch request at once.
//
// Checks: each prefetch address is line aligned and within the 16-bit line
// delta of the access that produced it; the address sequence the core sees
// is what was driven; and each mechanism happens at least once: stall, issued
// prefetch, shadow prefetch, association training, hit filter, context-hash
// match, positive and negative feedback, maximal-delta raise.
`timescale 1ns/1ps
module tb_nn_prefetcher;
  import nnp_pkg::*;

  localparam int N_ACC = 1200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        acc_valid, acc_ready, pf_valid, pf_ready;
  mem_access_t acc;
  addr_t       pf_addr, limit;
  nnp_events_t ev;

  nn_prefetcher #(.AQ_DEPTH(16), .PQ_DEPTH(16), .MD_PERIOD(64)) dut (.*);

  int checks = 0, failures = 0;
  int n_access, n_stall, n_pred, n_issue, n_shadow, n_train, n_filtered, n_hash,
      n_fbpos, n_fbneg, n_raise, n_pfdrop, n_fblost, n_pf;
  addr_t last_addr;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_access   += ev.access;
    n_stall    += ev.stall;
    n_pred     += ev.pred;
    n_issue    += ev.issue;
    n_shadow   += ev.shadow;
    n_train    += ev.train;
    n_filtered += ev.filtered;
    n_hash     += ev.hash_match;
    n_fbpos    += ev.fb_pos;
    n_fbneg    += ev.fb_neg;
    n_raise    += ev.limit_raised;
    n_pfdrop   += ev.pf_drop;
    n_fblost   += ev.fb_lost;
    if (ev.access) last_addr = acc.addr;
    if (pf_valid && pf_ready) begin
      int dl;
      n_pf++;
      dl = int'(pf_addr >> 6) - int'(last_addr >> 6);
      check(pf_addr[5:0] == 0, "prefetch address line aligned");
      check(dl >= -32768 && dl < 32768, $sformatf("prefetch %h far from access %h", pf_addr, last_addr));
    end
  end

  // Access i of the stream.
  function automatic mem_access_t stream(int i);
    mem_access_t a;
    int j = i / 2;
    a = '0;
    if (i % 2 == 0) begin
      a.addr = 32'h0010_0000 + 32'((j % 24) * 192);
      a.lip  = (j % 2) ? 32'h0040_0104 : 32'h0040_0100;
    end else begin
      a.addr = 32'h0020_0000 + 32'((j % 20) * 128);
      a.lip  = 32'h0040_0230;
    end
    a.data   = a.addr[13:6];
    a.rw     = (i % 2);
    a.amode  = 3'd1;
    a.l1_hit = ($urandom_range(0, 2) == 0);
    a.pf_hit = 1'b0;
    return a;
  endfunction

  initial begin
    n_access = 0; n_stall = 0; n_pred = 0; n_issue = 0; n_shadow = 0; n_train = 0;
    n_filtered = 0; n_hash = 0; n_fbpos = 0; n_fbneg = 0; n_raise = 0; n_pfdrop = 0;
    n_fblost = 0; n_pf = 0; last_addr = '0;
    acc_valid = 0; acc = '0; pf_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_ACC; i++) begin
      @(negedge clk);
      acc = stream(i);
      acc_valid = 1;
      @(posedge clk);
      while (!acc_ready) @(posedge clk);
      @(negedge clk);
      acc_valid = 0;
    end
    // let the last access finish
    repeat (5) @(negedge clk);
    while (!acc_ready) @(negedge clk);
    check(n_access == N_ACC, $sformatf("%0d accesses taken", n_access));
    $display("accesses %0d stall-cycles %0d predictions %0d issued %0d shadow %0d pf-seen %0d",
             n_access, n_stall, n_pred, n_issue, n_shadow, n_pf);
    $display("trained %0d filtered %0d hash-match %0d fb+ %0d fb- %0d limit-raise %0d pf-drop %0d fb-lost %0d limit %h",
             n_train, n_filtered, n_hash, n_fbpos, n_fbneg, n_raise, n_pfdrop, n_fblost, limit);
    check(n_stall    > 0, "stall happened");
    check(n_issue    > 0, "prefetch issued");
    check(n_shadow   > 0, "shadow prefetch kept");
    check(n_train    > 0, "association training");
    check(n_filtered > 0, "hit filter");
    check(n_hash     > 0, "context-hash match");
    check(n_fbpos    > 0, "positive feedback");
    check(n_fbneg    > 0, "negative feedback");
    check(n_raise    > 0, "max delta raised");
    check(n_pf == n_issue, "every issued prefetch delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d accesses", n_access);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
