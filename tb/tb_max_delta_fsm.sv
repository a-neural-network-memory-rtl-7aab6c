// tb_max_delta_fsm: drives periods of accesses with chosen issued/useful
// counts (PERIOD 8, 4 steps, 2 sweeps here) and checks the limit after every
// period against a reference of the rules: raise by 0x2000 when the useful
// share is under 25%, hold otherwise, wrap after the last step, and after two
// sweeps settle on the step with the most useful prefetches.
`timescale 1ns/1ps
module tb_max_delta_fsm;
  import nnp_pkg::*;
  localparam int PERIOD = 8, N_STEPS = 4, N_SWEEPS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, issued, useful, settled, raised;
  addr_t limit, limit_lines;
  max_delta_fsm #(.PERIOD(PERIOD), .N_STEPS(N_STEPS), .N_SWEEPS(N_SWEEPS)) dut (.*);

  int checks = 0, failures = 0, raises = 0;
  int k = 1, best_k = 1, best = 0, sweeps = 0;
  bit done_sweep = 0;
  always @(posedge clk) if (raised) raises++;

  task automatic period(input int n_iss, input int n_use);
    for (int c = 0; c < PERIOD; c++) begin
      @(negedge clk);
      tick = 1; issued = (c < n_iss); useful = (c < n_use);
    end
    @(negedge clk);
    tick = 0; issued = 0; useful = 0;
    // reference
    if (!done_sweep && (n_use * 100 < n_iss * 25 || n_iss == 0)) begin
      if (n_use > best) begin best = n_use; best_k = k; end
      if (k == N_STEPS) begin
        if (sweeps == N_SWEEPS - 1) begin done_sweep = 1; k = best_k; end
        else begin sweeps++; k = 1; end
      end else k++;
    end
    checks++;
    if (limit != addr_t'(k * 'h2000) || limit_lines != addr_t'(k * 'h2000 / 64) || settled != done_sweep) begin
      failures++;
      $display("FAIL: limit %h expected %h settled %0b", limit, k * 'h2000, settled);
    end
  endtask

  initial begin
    tick = 0; issued = 0; useful = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (limit != 'h2000) begin failures++; $display("FAIL: reset limit"); end
    period(8, 0);   // 0%  -> step 2
    period(8, 4);   // 50% -> hold
    period(8, 1);   // 12% -> step 3, best so far 1 at step 2
    period(0, 0);   // nothing issued -> step 4
    period(8, 0);   // -> wrap to 1, sweep 2
    period(8, 1);   // -> 2
    period(4, 0);   // -> 3
    period(8, 1);   // -> 4
    period(8, 1);   // end of sweep 2 -> settle on best
    period(8, 0);   // settled: hold
    checks++;
    if (raises != 6) begin failures++; $display("FAIL: %0d raises", raises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
