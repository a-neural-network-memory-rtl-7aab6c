// conf_hash: the context hash ("Conf hash" of the association selector).
//
// A direct-mapped table indexed by a hash of the 128-bit context vector. Each
// entry holds the last delta associated with a context of that index and a
// valid bit; there is no tag, so contexts that share an index overwrite each
// other, and a conflicting association overwrites the entry (the paper notes
// the table lives shorter than the network's memory for exactly these
// reasons). The hash is an XOR fold of the context into IW bits and the table
// size is this design's choice; the paper gives neither.
//
// Interface: the read is combinational (rd_ctx -> rd_valid, rd_delta); a
// write takes effect at the clock edge. Reset clears the valid bits.
module conf_hash
  import nnp_pkg::*;
#(
  parameter int ENTRIES = 256,   // assumed
  parameter int DW      = D1_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ctx_t                 rd_ctx,
  output logic                 rd_valid,
  output logic signed [DW-1:0] rd_delta,
  input  logic                 wr_en,
  input  ctx_t                 wr_ctx,
  input  logic signed [DW-1:0] wr_delta
);

  localparam int IW = $clog2(ENTRIES);

  logic signed [DW-1:0] tab_delta [ENTRIES];
  logic [ENTRIES-1:0]   tab_valid;

  function automatic logic [IW-1:0] fold(input ctx_t c);
    logic [IW-1:0] h;
    h = '0;
    for (int b = 0; b < CTX_BITS; b += IW)
      h ^= IW'(c >> b);
    return h;
  endfunction

  logic [IW-1:0] rd_idx, wr_idx;
  assign rd_idx   = fold(rd_ctx);
  assign wr_idx   = fold(wr_ctx);
  assign rd_valid = tab_valid[rd_idx];
  assign rd_delta = tab_delta[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     tab_valid <= '0;
    else if (wr_en) tab_valid[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) tab_delta[wr_idx] <= wr_delta;
  end

endmodule
