// tb_context_vector: checks the 128-bit context layout (address, LIP bits
// [8:1] history, delta bits [14:2] history, data, r/w, addressing mode)
// against a reference built from a software history of random accesses.
`timescale 1ns/1ps
module tb_context_vector;
  import nnp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid;
  mem_access_t acc;
  ctx_t ctx;
  context_vector dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] lips [$];
  logic [31:0] addrs [$];

  function automatic ctx_t ref_ctx(mem_access_t a);
    logic [31:0] la [4], da [4];
    ctx_t c;
    for (int k = 0; k < 4; k++) begin
      // k = 0 is the current access
      la[k] = (k == 0) ? a.lip : (lips.size() >= k ? lips[lips.size() - k] : 32'h0);
      if (k == 0) da[k] = a.addr - (addrs.size() >= 1 ? addrs[addrs.size() - 1] : 32'h0);
      else        da[k] = (addrs.size() >= k ? addrs[addrs.size() - k] : 32'h0)
                        - (addrs.size() >= k + 1 ? addrs[addrs.size() - k - 1] : 32'h0);
    end
    c[127:96] = a.addr;
    for (int k = 0; k < 4; k++) c[64 + 8*k +: 8]  = la[k][8:1];
    for (int k = 0; k < 4; k++) c[12 + 13*k +: 13] = da[k][14:2];
    c[11:4] = a.data;
    c[3]    = a.rw;
    c[2:0]  = a.amode;
    return c;
  endfunction

  initial begin
    acc_valid = 0; acc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      acc = mem_access_t'({$urandom, $urandom, $urandom});
      acc_valid = (t % 5 != 3);   // some idle cycles: history must not move
      #1;
      checks++;
      if (ctx !== ref_ctx(acc)) begin
        failures++;
        $display("FAIL t=%0d ctx=%h ref=%h", t, ctx, ref_ctx(acc));
      end
      if (acc_valid) begin
        lips.push_back(acc.lip);
        addrs.push_back(acc.addr);
      end
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
