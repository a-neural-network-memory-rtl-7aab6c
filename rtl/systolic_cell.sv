// systolic_cell: one 8-bit multiply-accumulate cell of the systolic array.
//
// The cell sees the weight w of its position in the current weight tile, the
// column operand x (an input or hidden activation) and the row operand e (an
// error term). Depending on the array mode it
//   M_FWD:   psum_right <= psum_left + w*x   (row sums, psum moves rightwards)
//   M_TRANS: psum_down  <= psum_up   + w*e   (column sums, psum moves down)
//   M_UPD:   w_new = w + e_u*x * 2^-LR_SHIFT (gradient step, written back by
//            the weight store)
// Products are rescaled to the accumulator scale with round-to-nearest and the
// partial sums saturate at 16 bits. The two psum registers update only when
// their enable is high. The FMA of the paper's array figure is a floating-point
// unit; this cell is fixed point (this design's choice).
module systolic_cell
  import nnp_pkg::*;
#(
  parameter int LR_SHIFT = 3
) (
  input  logic      clk,
  input  arr_mode_e mode,
  input  logic      en_h,        // column wavefront valid
  input  logic      en_v,        // row wavefront valid
  input  val_t      w,
  input  val_t      x,
  input  val_t      e,           // row operand, skewed (M_TRANS)
  input  val_t      e_u,         // row operand, held (M_UPD)
  input  acc_t      psum_left,
  input  acc_t      psum_up,
  output acc_t      psum_right,
  output acc_t      psum_down,
  output val_t      w_new
);

  always_ff @(posedge clk) begin
    if (en_h && mode == M_FWD)
      psum_right <= sat16(32'(psum_left) + mulsh(w, x, FRAC));
    if (en_v && mode == M_TRANS)
      psum_down <= sat16(32'(psum_up) + mulsh(w, e, FRAC));
  end

  assign w_new = sat8(32'(w) + mulsh(e_u, x, FRAC + LR_SHIFT));

endmodule
