// tb_nn_prefetcher_kernels: the prefetcher at its default sizes on access
// traces shaped like two of the small benchmark kernels used to evaluate the
// design, each run from reset:
//
//   array  summing a long array: 4-byte loads at consecutive addresses from one
//          load instruction; 1,600 loads here, against a 1M-element array in
//          the original evaluation.
//   list   pointer chasing along a linked list whose nodes sit at scattered
//          addresses (a fixed permutation of 64 slots in an 8 KB pool);
//          each load returns the next pointer, so the data byte of
//          the context carries information about the next address. A ring of
//          64 nodes is walked repeatedly (1,600 loads), against a 200k-node
//          list in the original evaluation.
//
// The L1 cache is modelled crudely: a load hits if it is in the same line as
// the previous load of the same kernel, or if its line was prefetched (then it
// also reports pf_hit). Nothing is said about the real hit rates.
//
// Checks per kernel: every access is taken, every prefetch address is line
// aligned, the network is trained from associations, and predictions are
// made; the counts are printed for comparison between kernels.
`timescale 1ns/1ps
module tb_nn_prefetcher_kernels;
  import nnp_pkg::*;

  localparam int N_ACC  = 1600;
  localparam int N_NODE = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        acc_valid, acc_ready, pf_valid, pf_ready;
  mem_access_t acc;
  addr_t       pf_addr, limit;
  nnp_events_t ev;

  nn_prefetcher dut (.*);

  int checks = 0, failures = 0;
  int n_access, n_pred, n_issue, n_train, n_fbpos, n_fbneg, n_pf, n_pfhit;
  bit pf_lines [addr_t];
  addr_t node [N_NODE];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_access += ev.access;
    n_pred   += ev.pred;
    n_issue  += ev.issue;
    n_train  += ev.train;
    n_fbpos  += ev.fb_pos;
    n_fbneg  += ev.fb_neg;
    if (pf_valid && pf_ready) begin
      n_pf++;
      check(pf_addr[5:0] == 0, "prefetch address line aligned");
      pf_lines[pf_addr >> 6] = 1'b1;
    end
  end

  task automatic run_kernel(input int kind, input string name);
    addr_t prev_line, a;
    mem_access_t m;
    n_access = 0; n_pred = 0; n_issue = 0; n_train = 0; n_fbpos = 0; n_fbneg = 0;
    n_pf = 0; n_pfhit = 0;
    pf_lines.delete();
    prev_line = '1;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_ACC; i++) begin
      m = '0;
      if (kind == 0) begin
        a      = 32'h0100_0000 + 32'(i * 4);
        m.lip  = 32'h0040_1000;
        m.data = 8'(i * 7);
      end else begin
        a      = node[i % N_NODE];
        m.lip  = 32'h0040_2000;
        m.data = node[(i + 1) % N_NODE][7:0];
      end
      m.addr   = a;
      m.amode  = 3'd1;
      m.pf_hit = pf_lines.exists(a >> 6);
      m.l1_hit = ((a >> 6) == prev_line) || m.pf_hit;
      n_pfhit += int'(m.pf_hit && ((a >> 6) != prev_line));
      prev_line = a >> 6;
      @(negedge clk);
      acc = m;
      acc_valid = 1;
      @(posedge clk);
      while (!acc_ready) @(posedge clk);
      @(negedge clk);
      acc_valid = 0;
    end
    repeat (5) @(negedge clk);
    while (!acc_ready) @(negedge clk);
    $display("%s: accesses %0d predictions %0d issued %0d trained %0d fb+ %0d fb- %0d demand lines found prefetched %0d",
             name, n_access, n_pred, n_issue, n_train, n_fbpos, n_fbneg, n_pfhit);
    check(n_access == N_ACC, $sformatf("%s: %0d accesses taken", name, n_access));
    check(n_train > 0, $sformatf("%s: association training", name));
    check(n_pred > 0, $sformatf("%s: predictions made", name));
    check(n_pf == n_issue, $sformatf("%s: every issued prefetch delivered", name));
  endtask

  initial begin
    acc_valid = 0; acc = '0; pf_ready = 1;
    // list layout: node k in slot (37k mod 64) of an 8 KB pool, 128 B slots,
    // so successive nodes are scattered but within the initial maximal delta
    for (int k = 0; k < N_NODE; k++)
      node[k] = 32'h0200_0000 + 32'(((k * 37) % N_NODE) * 128);
    run_kernel(0, "array");
    run_kernel(1, "list");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
