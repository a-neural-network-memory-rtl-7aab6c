// sync_fifo: small synchronous FIFO with valid/ready handshakes on both sides.
// A word is written when in_valid && in_ready and leaves when out_valid &&
// out_ready; out_data shows the oldest word. in_ready is low when full.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   count;
  logic          do_wr, do_rd;

  assign in_ready  = count != (PW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rd];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wr <= (wr == PW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (do_rd) rd <= (rd == PW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      count <= count + (PW+1)'(do_wr) - (PW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wr] <= in_data;

endmodule
