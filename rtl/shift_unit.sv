// shift_unit: the bit-wise shifter of an SLP processing element.
//
// A shift-layer weight is a signed power of two, w = s * 2^-p (DeepShift-Q:
// s = sign(w*), p = -round(log2|w*|)). It is held in 6 bits:
//   w[5] zero flag (s = 0), w[4] sign (1: s = -1), w[3:0] shift amount p.
// The 6-bit activation is placed at SHIFT_FRAC fractional bits and shifted
// right by p, so the result x * 2^-p is exact in the partial sum, which then
// carries SHIFT_FRAC fractional bits. Combinational.
// The right shift and sign flip follow the paper's Shift Unit; the bit layout
// of the weight and the fixed-point alignment are this design's choice.
module shift_unit
  import nasa_pkg::*;
(
  input  logic signed [LP_W-1:0]   x,
  input  logic        [LP_W-1:0]   w,
  output logic signed [PSUM_W-1:0] term
);
  logic signed [PSUM_W-1:0] aligned, shifted;
  always_comb begin
    aligned = PSUM_W'(x) <<< SHIFT_FRAC;
    shifted = aligned >>> w[3:0];
    if (w[5])      term = '0;
    else if (w[4]) term = -shifted;
    else           term = shifted;
  end
endmodule
