// pe: one processing element of the weight-stationary systolic array.
//
// Holds one int8 weight (written with w_en). Each cycle it multiplies the
// activation arriving from the left by its weight, adds the partial sum
// arriving from above, and registers both the activation (passed right) and
// the new partial sum (passed down). Weight-stationary operation is the
// paper's; widths are this design's choice (int8 x int8 into int32).
module pe
  import moca_pkg::*;
(
  input  logic  clk,
  input  logic  w_en,
  input  elem_t w_in,
  input  elem_t a_in,
  input  acc_t  psum_in,
  output elem_t a_out,
  output acc_t  psum_out
);
  elem_t w_q;

  always_ff @(posedge clk) begin
    if (w_en) w_q <= w_in;
    a_out    <= a_in;
    psum_out <= psum_in + ACC_W'(a_in) * ACC_W'(w_q);
  end
endmodule
