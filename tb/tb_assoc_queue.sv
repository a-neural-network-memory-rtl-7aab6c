// tb_assoc_queue: pushes more entries than the queue holds (DEPTH 16 here)
// and checks against a software FIFO: the popped tail entry and pop_valid
// once full, the D most recent addresses and miss flags, and full.
`timescale 1ns/1ps
module tb_assoc_queue;
  import nnp_pkg::*;
  localparam int DEPTH = 16, D = 4, NN = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, push_miss, pop_valid, full;
  ctx_t push_ctx, tail_ctx;
  addr_t push_addr, tail_addr;
  val_t [NN-1:0] push_hid, push_out, tail_hid, tail_out;
  addr_t [D-1:0] rec_addr;
  logic [D-1:0] rec_miss, rec_valid;
  assoc_queue #(.DEPTH(DEPTH), .D(D), .NN(NN)) dut (.*);

  typedef struct { ctx_t c; addr_t a; logic m; val_t [NN-1:0] h, o; } ent_t;
  ent_t q [$];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : main
    push = 0; push_ctx = '0; push_addr = '0; push_miss = 0; push_hid = '0; push_out = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3 * DEPTH; t++) begin
      ent_t e;
      @(negedge clk);
      e.c = {$urandom, $urandom, $urandom, $urandom}; e.a = $urandom; e.m = 1'($urandom);
      e.h = {NN{8'($urandom)}}; e.o = {NN{8'($urandom)}};
      push = 1; push_ctx = e.c; push_addr = e.a; push_miss = e.m; push_hid = e.h; push_out = e.o;
      #1;
      check(full == (q.size() == DEPTH), "full flag");
      check(pop_valid == (q.size() == DEPTH), "pop_valid");
      if (q.size() == DEPTH) begin
        ent_t o;
        o = q.pop_front();
        check(tail_ctx == o.c && tail_addr == o.a && tail_hid == o.h && tail_out == o.o,
              $sformatf("popped entry at push %0d", t));
      end
      q.push_back(e);
      @(negedge clk);
      push = 0;
      #1;
      for (int k = 0; k < D; k++) begin
        check(rec_valid[k] == (q.size() > k), "rec_valid");
        if (q.size() > k)
          check(rec_addr[k] == q[q.size()-1-k].a && rec_miss[k] == q[q.size()-1-k].m,
                $sformatf("recent %0d at push %0d", k, t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
