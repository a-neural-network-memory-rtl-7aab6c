// tb_prefetch_queue: random pushes and demand lookups (DEPTH 8, USEFUL_MIN 3
// here) against a reference queue. Checks the feedback pulse of every push
// and lookup: negative for an unhit entry that is overwritten, positive for a
// hit at depth >= USEFUL_MIN, negative for an earlier hit, with the stored
// context, subset and delta, and useful_hit only for issued entries.
`timescale 1ns/1ps
module tb_prefetch_queue;
  import nnp_pkg::*;
  localparam int DEPTH = 8, UM = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, push_subset, push_issued, lookup;
  addr_t push_addr, lookup_addr;
  ctx_t push_ctx, fb_ctx;
  logic signed [15:0] push_delta, fb_delta;
  logic fb_valid, fb_positive, fb_subset, useful_hit, drop_event;
  prefetch_queue #(.DEPTH(DEPTH), .USEFUL_MIN(UM)) dut (.*);

  typedef struct { bit v; logic [25:0] line; ctx_t c; bit s; logic [15:0] d; bit iss; int st; } ent_t;
  ent_t q [DEPTH];
  int head = 0, stamp = 0;
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0, n_drop = 0;

  task automatic expect_fb(input bit v, input bit pos, input ent_t e, input bit use_);
    @(negedge clk);
    push = 0; lookup = 0;
    #1;
    checks++;
    if (fb_valid != v || (v && (fb_positive != pos || fb_ctx != e.c || fb_subset != e.s
        || fb_delta != e.d)) || useful_hit != use_) begin
      failures++;
      $display("FAIL: fb %0b/%0b pos %0b/%0b useful %0b/%0b", fb_valid, v, fb_positive, pos, useful_hit, use_);
    end
    if (v) begin if (pos) n_pos++; else n_neg++; end
  endtask

  initial begin : main
    ent_t e, hitent;
    int hi;
    push = 0; lookup = 0; push_addr = '0; lookup_addr = '0; push_ctx = '0; push_subset = 0;
    push_delta = '0; push_issued = 0;
    for (int i = 0; i < DEPTH; i++) q[i].v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        e.v = 1; e.line = 26'($urandom_range(0, 15)); e.c = {$urandom, $urandom, $urandom, $urandom};
        e.s = 1'($urandom); e.d = 16'($urandom); e.iss = 1'($urandom); e.st = stamp;
        push = 1; push_addr = {e.line, 6'($urandom)}; push_ctx = e.c; push_subset = e.s;
        push_delta = e.d; push_issued = e.iss;
        hitent = q[head];
        if (q[head].v) n_drop++;
        q[head] = e;
        head = (head + 1) % DEPTH;
        stamp++;
        expect_fb(hitent.v, 0, hitent, 0);
      end else begin
        logic [25:0] l;
        l = 26'($urandom_range(0, 15));
        lookup = 1; lookup_addr = {l, 6'($urandom)};
        hi = -1;
        for (int i = 0; i < DEPTH; i++) if (q[i].v && q[i].line == l && hi < 0) hi = i;
        if (hi >= 0) begin
          hitent = q[hi];
          for (int i = 0; i < DEPTH; i++) if (q[i].v && q[i].line == l) q[i].v = 0;
          expect_fb(1, (stamp - hitent.st) >= UM, hitent, hitent.iss && (stamp - hitent.st) >= UM);
        end else expect_fb(0, 0, hitent, 0);
      end
    end
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_drop == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
