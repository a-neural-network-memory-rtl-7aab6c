// tb_assoc_selector: random candidate sets against a reference of the
// selection rules: hit filter, non-zero delta, max-delta limit, min popcount
// distance to the network output for subset 1 (newest wins ties), first
// context-hash match for subset 2, and the hash write when nothing matched.
`timescale 1ns/1ps
module tb_assoc_selector;
  import nnp_pkg::*;
  localparam int D = 4;
  addr_t an_addr, limit_lines;
  addr_t [D-1:0] cand_addr;
  logic [D-1:0] cand_miss, cand_valid, usable;
  logic [15:0] nn_delta1;
  logic hash_valid, sel1_valid, sel2_valid, hash_wr_en;
  logic signed [15:0] hash_delta, sel1_delta, hash_wr_delta;
  logic signed [14:0] sel2_delta;
  assoc_selector #(.D(D)) dut (.*);

  int checks = 0, failures = 0;
  int hits_hash = 0, filtered = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int dl [D];
      bit ok [D];
      int e1, e2, bestpc;
      bit v1, v2;
      an_addr = $urandom & 32'hFFFF_FFC0 | 32'h0100_0000;
      limit_lines = $urandom_range(16, 400);
      for (int i = 0; i < D; i++) begin
        dl[i] = $urandom_range(0, 3) == 0 ? 0 : int'($urandom_range(0, 1000)) - 500;
        cand_addr[i] = an_addr + addr_t'(dl[i] * 64) + addr_t'($urandom_range(0, 63));
      end
      cand_miss  = D'($urandom);
      cand_valid = D'($urandom) | D'(1);
      nn_delta1  = 16'($urandom);
      hash_valid = $urandom_range(0, 1);
      hash_delta = 16'(dl[$urandom_range(0, D-1)]);
      #1;
      v1 = 0; v2 = 0; e1 = 0; e2 = 0; bestpc = 99;
      for (int i = 0; i < D; i++) begin
        int mag;
        mag = dl[i] < 0 ? -dl[i] : dl[i];
        ok[i] = cand_valid[i] && cand_miss[i] && dl[i] != 0 && mag <= int'(limit_lines);
        if (cand_valid[i] && !cand_miss[i]) filtered++;
        if (ok[i]) begin
          int pc;
          pc = $countones(16'(dl[i]) ^ nn_delta1);
          if (pc < bestpc) begin bestpc = pc; v1 = 1; e1 = dl[i]; end
          if (!v2 && hash_valid && 16'(dl[i]) == hash_delta) begin v2 = 1; e2 = dl[i]; end
        end
      end
      hits_hash += v2;
      checks++;
      if (sel1_valid != v1 || (v1 && int'(sel1_delta) != e1) || sel2_valid != v2
          || (v2 && int'(sel2_delta) != e2) || hash_wr_en != (v1 && !v2)
          || (hash_wr_en && int'(hash_wr_delta) != e1)) begin
        failures++;
        $display("FAIL t=%0d: sel1 %0b %0d (ref %0b %0d) sel2 %0b %0d (ref %0b %0d)", t,
                 sel1_valid, sel1_delta, v1, e1, sel2_valid, sel2_delta, v2, e2);
      end
    end
    checks++;
    if (hits_hash == 0 || filtered == 0) begin failures++; $display("FAIL: cases not covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
