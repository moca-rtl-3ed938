// post_proc: the tile's Post-Processing Unit.
//
// Turns one accumulator row (DIM int32 sums) into one output-activation line
// (DIM int8 values) on its way to shared memory: arithmetic right shift by
// `shift`, optional ReLU, then saturation to [-128, 127]. Purely
// combinational. The paper only names this unit; the shift/ReLU/saturate
// function is this design's simplest choice for requantising int32 sums to
// int8 activations.
module post_proc
  import moca_pkg::*;
(
  input  acc_row_t   in_row,
  input  logic [4:0] shift,
  input  logic       relu,
  output line_t      out_line
);
  localparam acc_t MAXV = acc_t'(2**(IN_W-1) - 1);
  localparam acc_t MINV = -acc_t'(2**(IN_W-1));

  always_comb begin
    for (int n = 0; n < DIM; n++) begin
      acc_t v;
      v = in_row[n] >>> shift;
      if (relu && v < 0) v = '0;
      if (v > MAXV)      out_line[n] = elem_t'(MAXV);
      else if (v < MINV) out_line[n] = elem_t'(MINV);
      else               out_line[n] = elem_t'(v);
    end
  end
endmodule
