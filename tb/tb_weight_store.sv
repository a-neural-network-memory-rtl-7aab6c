// tb_weight_store: checks the reset values (hash of bank, address and lane,
// -16..15), independent per-bank reads at different addresses and whole
// column-word writes, against a reference array (N 8, 32 inputs here).
`timescale 1ns/1ps
module tb_weight_store;
  import nnp_pkg::*;
  localparam int N = 8, N_IN = 32, AW = 3, TILES = N_IN / N + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0][AW-1:0] rd_addr, wr_addr;
  val_t [N-1:0][N-1:0] rd_data, wr_data;
  logic [N-1:0] we;
  weight_store #(.N(N), .N_IN(N_IN), .AW(AW)) dut (.*);

  int ref_w [N][TILES][N];
  int checks = 0, failures = 0;

  function automatic int init_ref(int c, int a, int r);
    logic [31:0] h;
    h = 32'(c * 131 + a * 977 + r * 29 + 7) * 32'h9E37_79B1;
    return int'(h[20:16]) - 16;
  endfunction

  task automatic check_all();
    for (int a = 0; a < TILES; a++) begin
      for (int c = 0; c < N; c++) rd_addr[c] = AW'((a + c) % TILES);
      #1;
      for (int c = 0; c < N; c++)
        for (int r = 0; r < N; r++) begin
          checks++;
          if (int'(rd_data[c][r]) != ref_w[c][(a + c) % TILES][r]) begin
            failures++;
            $display("FAIL bank %0d addr %0d lane %0d: %0d vs %0d", c, (a + c) % TILES, r,
                     int'(rd_data[c][r]), ref_w[c][(a + c) % TILES][r]);
          end
        end
    end
  endtask

  initial begin
    we = '0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    for (int c = 0; c < N; c++) for (int a = 0; a < TILES; a++) for (int r = 0; r < N; r++)
      ref_w[c][a][r] = init_ref(c, a, r);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        we[c] = 1'($urandom);
        wr_addr[c] = AW'($urandom_range(0, TILES - 1));
        for (int r = 0; r < N; r++) wr_data[c][r] = val_t'($urandom);
        if (we[c]) for (int r = 0; r < N; r++) ref_w[c][wr_addr[c]][r] = int'(wr_data[c][r]);
      end
      @(negedge clk);
      we = '0;
      check_all();
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
