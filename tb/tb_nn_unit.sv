// tb_nn_unit: self-checking test of the network unit at a reduced size
// (8x8 array, 32 inputs: four hidden-layer phases as at full size).
//
// A reference model in this file recomputes, from a snapshot of the weight
// store, the forward pass (16-bit saturating row sums of rounded 8-bit
// products, ReLU) and one training step (output error with the ReLU slope,
// output weight update, then the hidden error through the updated
// output weights and the hidden weight update),
// and the test compares the unit's outputs and the whole weight store with
// it. It also checks the inference latency, T + 2N + 4 cycles from start to
// done, which holds only if the hidden-layer phases are pipelined, and that
// repeated training on one context makes the rounded outputs reach the target.
`timescale 1ns/1ps
module tb_nn_unit;
  import nnp_pkg::*;

  localparam int N    = 8;
  localparam int N_IN = 32;
  localparam int T    = N_IN / N;
  localparam int LR   = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start, op_train, busy, done;
  logic [N_IN-1:0]   ctx;
  val_t [N-1:0]      hid_in, out_in, target, hid, out;
  logic [N-1:0]      mask;

  nn_unit #(.N(N), .N_IN(N_IN), .LR_SHIFT(LR)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------- reference arithmetic, written out independently
  int wh [N][N_IN];   // hidden weights [neuron][input]
  int wo [N][N];      // output weights [neuron][hidden]

  function automatic int clamp(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction
  function automatic int rshift_round(int p, int s);
    return (p + (1 << (s - 1))) >>> s;
  endfunction
  function automatic int relu(int a);
    return clamp(a, 0, 127);
  endfunction
  function automatic int slope(int err, int neuron);
    return neuron > 0 ? err : (err >>> 3);
  endfunction

  task automatic snapshot();
    for (int c = 0; c < N_IN; c++)
      for (int r = 0; r < N; r++) wh[r][c] = int'(dut.u_ws.bank[c % N][c / N][r]);
    for (int h = 0; h < N; h++)
      for (int k = 0; k < N; k++) wo[k][h] = int'(dut.u_ws.bank[h][T][k]);
  endtask

  task automatic ref_forward(input logic [N_IN-1:0] x, output int h_o[N], output int o_o[N]);
    for (int r = 0; r < N; r++) begin
      int acc = 0;
      for (int p = 0; p < T; p++) begin
        int ps = 0;
        for (int j = 0; j < N; j++)
          ps = clamp(ps + rshift_round(wh[r][p*N+j] * (x[p*N+j] ? 64 : 0), 6), -32768, 32767);
        acc = clamp(acc + ps, -32768, 32767);
      end
      h_o[r] = relu(acc);
    end
    for (int k = 0; k < N; k++) begin
      int ps = 0;
      for (int j = 0; j < N; j++)
        ps = clamp(ps + rshift_round(wo[k][j] * h_o[j], 6), -32768, 32767);
      o_o[k] = relu(ps);
    end
  endtask

  task automatic ref_train(input logic [N_IN-1:0] x, input int h_i[N], input int o_i[N],
                           input int tg[N], input logic [N-1:0] m);
    int d[N], e[N];
    for (int k = 0; k < N; k++)
      d[k] = m[k] ? clamp(slope(clamp(tg[k] - o_i[k], -128, 127), o_i[k]), -128, 127) : 0;
    for (int k = 0; k < N; k++)
      for (int h = 0; h < N; h++)
        wo[k][h] = clamp(wo[k][h] + rshift_round(d[k] * h_i[h], 6 + LR), -128, 127);
    for (int h = 0; h < N; h++) begin
      int ps = 0;
      for (int k = 0; k < N; k++)
        ps = clamp(ps + rshift_round(wo[k][h] * d[k], 6), -32768, 32767);
      e[h] = slope(clamp(ps, -128, 127), h_i[h]);
    end
    for (int h = 0; h < N; h++)
      for (int i = 0; i < N_IN; i++)
        wh[h][i] = clamp(wh[h][i] + rshift_round(e[h] * (x[i] ? 64 : 0), 6 + LR), -128, 127);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int lat;
  task automatic run_op(input bit tr);
    @(negedge clk);
    op_train = tr;
    start    = 1;
    @(negedge clk);
    start = 0;
    lat   = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
  endtask

  int h_ref[N], o_ref[N], tg[N];
  logic [N-1:0] tbits;

  initial begin
    start = 0; op_train = 0; ctx = '0; hid_in = '0; out_in = '0; target = '0; mask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- forward pass against the reference, several contexts
    for (int t = 0; t < 6; t++) begin
      ctx = {$urandom, $urandom, $urandom, $urandom};
      snapshot();
      ref_forward(ctx, h_ref, o_ref);
      run_op(0);
      check(lat == T + 2*N + 4, $sformatf("inference latency %0d, expected %0d", lat, T + 2*N + 4));
      for (int i = 0; i < N; i++) begin
        check(int'(hid[i]) == h_ref[i], $sformatf("hid[%0d]=%0d ref %0d", i, hid[i], h_ref[i]));
        check(int'(out[i]) == o_ref[i], $sformatf("out[%0d]=%0d ref %0d", i, out[i], o_ref[i]));
      end
      // ---- one training step against the reference
      mask  = N'($urandom);
      tbits = N'($urandom);
      for (int k = 0; k < N; k++) begin
        tg[k]     = tbits[k] ? 64 : 0;
        target[k] = val_t'(tg[k]);
      end
      hid_in = hid;
      out_in = out;
      ref_train(ctx, h_ref, o_ref, tg, mask);
      run_op(1);
      for (int c = 0; c < N_IN; c++)
        for (int r = 0; r < N; r++)
          check(int'(dut.u_ws.bank[c % N][c / N][r]) == wh[r][c],
                $sformatf("hidden weight [%0d][%0d]", r, c));
      for (int h = 0; h < N; h++)
        for (int k = 0; k < N; k++)
          check(int'(dut.u_ws.bank[h][T][k]) == wo[k][h], $sformatf("output weight [%0d][%0d]", k, h));
    end

    // ---- learning: one context, one target, repeated
    ctx   = {$urandom, $urandom, $urandom, $urandom};
    tbits = 8'b1011_0110;
    mask  = '1;
    for (int k = 0; k < N; k++) target[k] = tbits[k] ? ONE : val_t'(0);
    for (int it = 0; it < 80; it++) begin
      run_op(0);
      hid_in = hid; out_in = out;
      run_op(1);
    end
    run_op(0);
    for (int k = 0; k < N; k++)
      check((out[k] >= HALF) == tbits[k], $sformatf("learned bit %0d: out=%0d", k, out[k]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
