// tb_systolic_array: self-checking test of the systolic array (8x8) with a
// simple weight memory model in the testbench.
// Checks: four forward phases issued back to back give four row-sum vectors
// N cycles after each issue, equal to a reference matrix-vector product; the
// transposed mode gives the column sums W^T e; the update mode writes
// w + e_i*x_j/2^LR into every lane of every column once.
`timescale 1ns/1ps
module tb_systolic_array;
  import nnp_pkg::*;
  localparam int N = 8, AW = 3, LR = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  arr_mode_e             mode;
  logic                  in_valid;
  logic [AW-1:0]         in_addr;
  val_t [N-1:0]          x_in, e_in;
  logic [N-1:0][AW-1:0]  w_addr;
  val_t [N-1:0][N-1:0]   w_rd, w_wdata;
  logic [N-1:0]          w_we;
  logic                  row_valid, col_valid;
  acc_t [N-1:0]          row_psum, col_psum;

  systolic_array #(.N(N), .AW(AW), .LR_SHIFT(LR)) dut (.*);

  // weight memory model: int'(memp[addr][col][row])
  val_t [7:0][N-1:0][N-1:0] memp;   // [addr][col][row], packed so reads follow writes
  always_comb for (int c = 0; c < N; c++) w_rd[c] = memp[w_addr[c]][c];
  int writes;
  always_ff @(posedge clk)
    for (int c = 0; c < N; c++)
      if (w_we[c]) begin
        writes++;
        memp[w_addr[c]][c] <= w_wdata[c];
      end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int clamp(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction
  function automatic int rsr(int p, int s);
    return (p + (1 << (s - 1))) >>> s;
  endfunction

  int xs [4][N];
  int exp_row [4][N];
  int got, cyc, t_issue, t_first;
  int e [N];
  int old [N][N];

  initial begin
    mode = M_FWD; in_valid = 0; in_addr = '0; x_in = '0; e_in = '0; writes = 0;
    for (int c = 0; c < N; c++) for (int a = 0; a < 8; a++) for (int r = 0; r < N; r++)
      memp[a][c][r] = val_t'($urandom_range(0, 255));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // ---- forward: four phases back to back
    for (int p = 0; p < 4; p++)
      for (int j = 0; j < N; j++) xs[p][j] = int'($urandom_range(0, 255)) - 128;
    for (int p = 0; p < 4; p++)
      for (int r = 0; r < N; r++) begin
        int ps; ps = 0;
        for (int j = 0; j < N; j++) ps = clamp(ps + rsr(int'(memp[p][j][r]) * xs[p][j], 6), -32768, 32767);
        exp_row[p][r] = ps;
      end
    fork
      begin
        for (int p = 0; p < 4; p++) begin
          @(negedge clk);
          in_valid = 1; in_addr = AW'(p);
          for (int j = 0; j < N; j++) x_in[j] = val_t'(xs[p][j]);
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        got = 0; cyc = 0; t_first = -1;
        @(negedge clk);
        while (got < 4 && cyc < 100) begin
          @(posedge clk); cyc++;
          if (row_valid) begin
            if (t_first < 0) t_first = cyc;
            for (int r = 0; r < N; r++)
              check(int'(row_psum[r]) == exp_row[got][r], $sformatf("fwd phase %0d row %0d: %0d vs %0d", got, r, row_psum[r], exp_row[got][r]));
            check(cyc == t_first + got, "phases leave on consecutive cycles");
            got++;
          end
        end
        check(got == 4, "all four phases returned");
        check(t_first == N + 1, $sformatf("first result %0d cycles after issue, expected %0d", t_first, N + 1));
      end
    join
    // ---- transposed: column sums with tile 5
    @(negedge clk);
    mode = M_TRANS; in_addr = 3'd5;
    for (int i = 0; i < N; i++) begin e[i] = int'($urandom_range(0, 255)) - 128; e_in[i] = val_t'(e[i]); end
    @(negedge clk);
    in_valid = 1; @(negedge clk); in_valid = 0;
    cyc = 1;
    while (!col_valid && cyc < 100) begin @(negedge clk); cyc++; end
    check(cyc == N, $sformatf("transposed latency %0d", cyc));
    for (int j = 0; j < N; j++) begin
      int ps; ps = 0;
      for (int i = 0; i < N; i++) ps = clamp(ps + rsr(int'(memp[5][j][i]) * e[i], 6), -32768, 32767);
      check(int'(col_psum[j]) == ps, $sformatf("trans col %0d: %0d vs %0d", j, col_psum[j], ps));
    end
    // ---- update tile 2
    @(negedge clk);
    mode = M_UPD; in_addr = 3'd2;
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++) old[c][r] = int'(memp[2][c][r]);
    for (int j = 0; j < N; j++) begin xs[0][j] = int'($urandom_range(0, 127)); x_in[j] = val_t'(xs[0][j]); end
    writes = 0;
    in_valid = 1; @(negedge clk); in_valid = 0;
    repeat (N + 2) @(negedge clk);
    check(writes == N, $sformatf("%0d column writes", writes));
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++)
      check(int'(memp[2][c][r]) == clamp(old[c][r] + rsr(e[r] * xs[0][c], 6 + LR), -128, 127),
            $sformatf("updated weight col %0d row %0d", c, r));
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
