// pred_decode: turns the output layer into prefetch candidates ("bit
// rounding" and address construction).
//
// Each output neuron of a delta subset is read as one bit: 1 when it is at or
// above 0.5. The subset's prediction is distinct when every one of its neurons
// is clearly on one side (at most LO or at least HI); an indistinct or zero
// delta produces no candidate. A candidate's address is the predicting access
// address A0 plus the delta in cache lines, aligned to the line. The
// confidence neuron decides whether candidates are issued to memory
// (conf > CONF_THR) or only kept as shadow prefetches for feedback.
// Purely combinational. The subset layout, the thresholds and line-granular
// deltas are this design's choices; the paper only asks for output bits
// "within valid thresholds" and a confidence above a threshold.
module pred_decode
  import nnp_pkg::*;
#(
  parameter int   N        = 32,
  parameter val_t LO       = val_t'(16),   // 0.25 (assumed)
  parameter val_t HI       = val_t'(48),   // 0.75 (assumed)
  parameter val_t CONF_THR = val_t'(32)    // 0.5  (assumed)
) (
  input  val_t [N-1:0]               out,
  input  addr_t                      a0,
  output logic [D1_BITS-1:0]         bits1,     // rounded subset-1 bits
  output logic                       cand1_valid,
  output logic signed [D1_BITS-1:0]  cand1_delta,
  output addr_t                      cand1_addr,
  output logic                       cand2_valid,
  output logic signed [D2_BITS-1:0]  cand2_delta,
  output addr_t                      cand2_addr,
  output logic                       issue       // confidence above threshold
);

  logic [D2_BITS-1:0] bits2;
  logic               dist1, dist2;

  always_comb begin
    dist1 = 1'b1;
    dist2 = 1'b1;
    for (int k = 0; k < D1_BITS; k++) begin
      bits1[k] = out[k] >= HALF;
      if (out[k] > LO && out[k] < HI) dist1 = 1'b0;
    end
    for (int k = 0; k < D2_BITS; k++) begin
      bits2[k] = out[D2_LSB + k] >= HALF;
      if (out[D2_LSB + k] > LO && out[D2_LSB + k] < HI) dist2 = 1'b0;
    end
    cand1_delta = $signed(bits1);
    cand2_delta = $signed(bits2);
    cand1_valid = dist1 && bits1 != '0;
    cand2_valid = dist2 && bits2 != '0;
    cand1_addr  = addr_t'((a0 >> LINE_BITS) + addr_t'(32'(cand1_delta))) << LINE_BITS;
    cand2_addr  = addr_t'((a0 >> LINE_BITS) + addr_t'(32'(cand2_delta))) << LINE_BITS;
    issue       = out[CONF_IDX] > CONF_THR;
  end

endmodule
