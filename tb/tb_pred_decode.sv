// tb_pred_decode: random output vectors against a reference of bit rounding
// (>= 0.5), the distinctness thresholds (every bit <= 0.25 or >= 0.75), the
// zero-delta rule, the line-aligned address A0 + delta*64 and the confidence
// threshold.
`timescale 1ns/1ps
module tb_pred_decode;
  import nnp_pkg::*;
  val_t [31:0] out;
  addr_t a0, cand1_addr, cand2_addr;
  logic [15:0] bits1;
  logic cand1_valid, cand2_valid, issue;
  logic signed [15:0] cand1_delta;
  logic signed [14:0] cand2_delta;
  pred_decode dut (.*);
  int checks = 0, failures = 0, n_valid = 0;

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int d1, d2;
      bit dist1, dist2;
      logic [15:0] b1;
      logic [14:0] b2;
      a0 = $urandom;
      for (int k = 0; k < 32; k++) begin
        // mostly clear values, sometimes an ambiguous one
        int r;
        r = $urandom_range(0, 40);
        out[k] = (r == 0) ? val_t'($urandom_range(17, 47)) :
                 ($urandom_range(0, 1) ? val_t'($urandom_range(48, 127)) : val_t'($urandom_range(0, 16)));
      end
      #1;
      dist1 = 1; dist2 = 1;
      for (int k = 0; k < 16; k++) begin
        b1[k] = out[k] >= 32;
        if (out[k] > 16 && out[k] < 48) dist1 = 0;
      end
      for (int k = 0; k < 15; k++) begin
        b2[k] = out[16 + k] >= 32;
        if (out[16 + k] > 16 && out[16 + k] < 48) dist2 = 0;
      end
      d1 = int'($signed(b1));
      d2 = int'($signed(b2));
      checks++;
      if (cand1_valid != (dist1 && d1 != 0) || cand2_valid != (dist2 && d2 != 0)
          || int'(cand1_delta) != d1 || int'(cand2_delta) != d2
          || cand1_addr != addr_t'((int'(a0 >> 6) + d1) << 6)
          || cand2_addr != addr_t'((int'(a0 >> 6) + d2) << 6)
          || issue != (out[31] > 32) || bits1 != b1) begin
        failures++;
        $display("FAIL t=%0d", t);
      end
      n_valid += cand1_valid;
    end
    checks++;
    if (n_valid == 0) begin failures++; $display("FAIL: no valid candidate"); end
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
