// tb_conf_hash: writes deltas for random contexts and reads them back,
// comparing with a reference table indexed by the XOR fold of the context;
// checks that entries start invalid and that a later write to the same index
// overwrites.
`timescale 1ns/1ps
module tb_conf_hash;
  import nnp_pkg::*;
  localparam int ENTRIES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ctx_t rd_ctx, wr_ctx;
  logic rd_valid, wr_en;
  logic signed [15:0] rd_delta, wr_delta;
  conf_hash #(.ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] rt [ENTRIES];
  bit rv [ENTRIES];
  function automatic int idx(ctx_t c);
    logic [3:0] h = 0;
    for (int b = 0; b < 128; b += 4) h ^= c[b +: 4];
    return int'(h);
  endfunction

  initial begin : main
    ctx_t c;
    wr_en = 0; rd_ctx = '0; wr_ctx = '0; wr_delta = '0;
    for (int i = 0; i < ENTRIES; i++) rv[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      c = {$urandom, $urandom, $urandom, $urandom};
      rd_ctx = c;
      #1;
      checks++;
      if (rd_valid != rv[idx(c)] || (rv[idx(c)] && rd_delta != rt[idx(c)])) begin
        failures++;
        $display("FAIL t=%0d valid %0b/%0b delta %h/%h", t, rd_valid, rv[idx(c)], rd_delta, rt[idx(c)]);
      end
      if ($urandom_range(0, 1)) begin
        wr_en = 1; wr_ctx = c; wr_delta = 16'($urandom);
        rv[idx(c)] = 1; rt[idx(c)] = wr_delta;
      end else wr_en = 0;
    end
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
