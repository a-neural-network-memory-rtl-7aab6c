// weight_store: the network's weight storage, banked by array column.
//
// Bank j holds, for each tile address, the N weights of array column j (one
// per row). Addresses 0..N_IN/N-1 hold the hidden-layer tiles, hidden weight
// W_h[r][c] sitting in bank c mod N at address c / N; address N_IN/N holds the
// output layer, W_o[k][h] in bank h. Every bank has one combinational read
// port and one write port of a whole column word, which lets the array read a
// column per cycle in every mode and write back a column of updated weights.
//
// Reset loads small pseudo-random weights (a multiplicative hash of the
// position, range -16..15, i.e. -0.25..0.23), which breaks the symmetry
// between neurons. The paper gives 8-bit weights for a 128-32-32 network; the
// banking and the initial values are this design's choices.
module weight_store
  import nnp_pkg::*;
#(
  parameter int N    = 32,
  parameter int N_IN = 128,
  parameter int AW   = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0][AW-1:0] rd_addr,
  output val_t [N-1:0][N-1:0]  rd_data,   // [column][row]
  input  logic [N-1:0]         we,
  input  logic [N-1:0][AW-1:0] wr_addr,
  input  val_t [N-1:0][N-1:0]  wr_data
);

  localparam int TILES = N_IN / N + 1;

  val_t [N-1:0] bank [N][TILES];

  // Reset value of lane r of bank c at address a.
  function automatic val_t init_w(input int c, input int a, input int r);
    logic [31:0] h;
    h = 32'(c * 131 + a * 977 + r * 29 + 7) * 32'h9E37_79B1;
    return val_t'(32'(h[20:16]) - 32'sd16);
  endfunction

  always_comb begin
    for (int c = 0; c < N; c++) rd_data[c] = bank[c][rd_addr[c]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++)
        for (int a = 0; a < TILES; a++)
          for (int r = 0; r < N; r++)
            bank[c][a][r] <= init_w(c, a, r);
    end else begin
      for (int c = 0; c < N; c++)
        if (we[c]) bank[c][wr_addr[c]] <= wr_data[c];
    end
  end

  initial assert (N_IN % N == 0) else $error("N_IN must be a multiple of N");

endmodule
