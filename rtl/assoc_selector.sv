// assoc_selector: chooses the addresses the popped context S_n is trained to
// predict, one per output subset.
//
// Candidates are the D most recent addresses A0..A(D-1) of the association
// queue. Each candidate's delta to S_n's own address A_n is taken in cache
// lines. A candidate is usable when it is valid, missed in L1 (hit filter),
// its delta is not zero, its distance in bytes is within the dynamic maximal
// delta limit and the delta fits the subset's output width.
//   Subset 1 (min MSE): the usable candidate whose delta has the fewest bits
//     differing from the network's rounded output for S_n,
//     argmin_i popcount((A_i - A_n) xor NN_out(S_n)); ties go to the newest.
//   Subset 2 (context hash): the newest usable candidate whose delta equals
//     the delta stored in the context hash for S_n.
// When no candidate matches the hash, the subset-1 choice is written into the
// hash (hash_wr_*), so a recurring association will match next time.
// Purely combinational. The popcount rule, the hit filter and the hash
// preference follow the paper; the zero-delta exclusion, the newest-first tie
// break and what is written to the hash are this design's choices.
module assoc_selector
  import nnp_pkg::*;
#(
  parameter int D = 4
) (
  input  addr_t                      an_addr,
  input  addr_t [D-1:0]              cand_addr,
  input  logic  [D-1:0]              cand_miss,
  input  logic  [D-1:0]              cand_valid,
  input  addr_t                      limit_lines,
  input  logic  [D1_BITS-1:0]        nn_delta1,     // rounded NN output bits, subset 1
  input  logic                       hash_valid,
  input  logic signed [D1_BITS-1:0]  hash_delta,
  output logic                       sel1_valid,
  output logic signed [D1_BITS-1:0]  sel1_delta,
  output logic                       sel2_valid,
  output logic signed [D2_BITS-1:0]  sel2_delta,
  output logic                       hash_wr_en,
  output logic signed [D1_BITS-1:0]  hash_wr_delta,
  output logic  [D-1:0]              usable          // for observation
);

  localparam int PCW = $clog2(D1_BITS + 1);

  always_comb begin
    logic signed [ADDR_BITS-LINE_BITS:0] d;
    addr_t                               mag;
    logic [PCW-1:0]                      best_pc, pc;
    sel1_valid = 1'b0;
    sel1_delta = '0;
    sel2_valid = 1'b0;
    sel2_delta = '0;
    best_pc    = '1;
    pc         = '0;
    d          = '0;
    mag        = '0;
    usable     = '0;
    for (int i = 0; i < D; i++) begin
      d   = $signed({1'b0, cand_addr[i][ADDR_BITS-1:LINE_BITS]})
          - $signed({1'b0, an_addr[ADDR_BITS-1:LINE_BITS]});
      mag = (d < 0) ? addr_t'(-32'(d)) : addr_t'(32'(d));
      usable[i] = cand_valid[i] && cand_miss[i] && (d != 0) && (mag <= limit_lines)
                  && (d >= -(1 <<< (D1_BITS-1))) && (d < (1 <<< (D1_BITS-1)));
      if (usable[i]) begin
        pc = PCW'($countones(D1_BITS'(d) ^ nn_delta1));
        if (!sel1_valid || pc < best_pc) begin
          sel1_valid = 1'b1;
          sel1_delta = D1_BITS'(d);
          best_pc    = pc;
        end
        if (!sel2_valid && hash_valid && D1_BITS'(d) == hash_delta
            && d >= -(1 <<< (D2_BITS-1)) && d < (1 <<< (D2_BITS-1))) begin
          sel2_valid = 1'b1;
          sel2_delta = D2_BITS'(d);
        end
      end
    end
    hash_wr_en    = sel1_valid && !sel2_valid;
    hash_wr_delta = sel1_delta;
  end

endmodule
