// systolic_array: the N x N matrix multiplier at the heart of the network.
//
// Rows are neurons of the layer being computed, columns are elements of its
// input. A request (in_valid, in_addr, x_in, e_in) enters as a wavefront:
// column j sees it j cycles later, so the partial sum of row i, which moves one
// column per cycle, meets each column's operand on time. Consecutive requests
// can enter on consecutive cycles, which pipelines the phases of a layer.
//
//   M_FWD   Row sums. Column j multiplies its weight column (read from weight
//           bank j at the wavefront's address) by x_in[j]; row i's sum leaves
//           column N-1 N cycles after the request: row_valid, row_psum.
//   M_TRANS Column sums with the same stored weights, i.e. the product with
//           the transposed tile: e_in[i] enters row i i cycles late, sums move
//           down and leave row N-1 N cycles after the request: col_valid,
//           col_psum. The weight address is taken from in_addr, which must
//           stay constant until col_valid.
//   M_UPD   Weight update: when the wavefront reaches column j, lane i of bank
//           j's word at the wavefront address becomes
//           w + e_in[i]*x_in[j]*2^-LR_SHIFT (w_we/w_wdata). e_in must be held
//           until the last column is written, N-1 cycles after the request.
//
// Weights come from an external store through one read port per column
// (w_addr -> w_rd, combinational) and one write port per column. The skew
// registers and cell arrangement are this design's; the paper gives the
// 32x32 size, 8-bit products, 16-bit row accumulation and the pipelining of
// phases.
module systolic_array
  import nnp_pkg::*;
#(
  parameter int N        = 32,
  parameter int AW       = 3,
  parameter int LR_SHIFT = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  arr_mode_e             mode,
  input  logic                  in_valid,
  input  logic [AW-1:0]         in_addr,
  input  val_t [N-1:0]          x_in,
  input  val_t [N-1:0]          e_in,
  // weight store ports, one per column
  output logic [N-1:0][AW-1:0]  w_addr,
  input  val_t [N-1:0][N-1:0]   w_rd,      // [column][row]
  output logic [N-1:0]          w_we,
  output val_t [N-1:0][N-1:0]   w_wdata,   // [column][row]
  // results
  output logic                  row_valid,
  output acc_t [N-1:0]          row_psum,
  output logic                  col_valid,
  output acc_t [N-1:0]          col_psum
);

  // Column wavefront: valid, address and x operand delayed by j cycles.
  logic [N-1:0]         cval;
  logic [N-1:0][AW-1:0] caddr;
  val_t [N-1:0]         cx;
  // Row wavefront for M_TRANS: valid and e operand delayed by i cycles.
  logic [N-1:0]         rval;
  val_t [N-1:0]         re;

  assign cval[0]  = in_valid;
  assign caddr[0] = in_addr;
  assign cx[0]    = x_in[0];
  assign rval[0]  = in_valid;
  assign re[0]    = e_in[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cval[N-1:1] <= '0;
      rval[N-1:1] <= '0;
    end else begin
      cval[N-1:1] <= cval[N-2:0];
      rval[N-1:1] <= rval[N-2:0];
    end
  end

  always_ff @(posedge clk) caddr[N-1:1] <= caddr[N-2:0];

  // Operand skew: lane j of x (lane i of e) passes through j (i) registers.
  for (genvar j = 1; j < N; j++) begin : g_skew
    val_t xs [j];
    val_t es [j];
    always_ff @(posedge clk) begin
      xs[0] <= x_in[j];
      es[0] <= e_in[j];
      for (int k = 1; k < j; k++) begin
        xs[k] <= xs[k-1];
        es[k] <= es[k-1];
      end
    end
    assign cx[j] = xs[j-1];
    assign re[j] = es[j-1];
  end

  acc_t [N-1:0][N-1:0] ph;   // [row][col] horizontal partial sums
  acc_t [N-1:0][N-1:0] pv;   // [row][col] vertical partial sums

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      systolic_cell #(.LR_SHIFT(LR_SHIFT)) u_cell (
        .clk        (clk),
        .mode       (mode),
        .en_h       (cval[j]),
        .en_v       (rval[i]),
        .w          (w_rd[j][i]),
        .x          (cx[j]),
        .e          (re[i]),
        .e_u        (e_in[i]),
        .psum_left  ((j == 0) ? acc_t'(0) : ph[i][(j == 0) ? 0 : j-1]),
        .psum_up    ((i == 0) ? acc_t'(0) : pv[(i == 0) ? 0 : i-1][j]),
        .psum_right (ph[i][j]),
        .psum_down  (pv[i][j]),
        .w_new      (w_wdata[j][i])
      );
    end
  end

  always_comb begin
    for (int j = 0; j < N; j++) begin
      w_addr[j] = (mode == M_TRANS) ? in_addr : caddr[j];
      w_we[j]   = cval[j] && (mode == M_UPD);
    end
    for (int i = 0; i < N; i++) begin
      row_psum[i] = ph[i][N-1];
      col_psum[i] = pv[N-1][i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= 1'b0;
      col_valid <= 1'b0;
    end else begin
      row_valid <= cval[N-1] && (mode == M_FWD);
      col_valid <= rval[N-1] && (mode == M_TRANS);
    end
  end

endmodule
