// requant: turns a PE partial sum into the activation stored for the next layer.
//
// y = sat_{out_bits}( relu ? max(psum >>> out_shift, 0) : psum >>> out_shift )
// The arithmetic shift rescales the accumulator (a shift layer's psum has
// SHIFT_FRAC fractional bits, so it needs out_shift >= SHIFT_FRAC), the optional
// ReLU clips negatives, and the result saturates to a signed out_bits-wide
// range (8 for a convolution consumer, 6 for a shift or adder consumer), sign-
// extended into the 8-bit buffer word. Combinational.
// The paper fixes the 8-bit and 6-bit formats; the shift, ReLU and
// saturation steps are this design's choice.
module requant
  import nasa_pkg::*;
(
  input  logic signed [PSUM_W-1:0] psum,
  input  logic        [5:0]        out_shift,
  input  logic        [3:0]        out_bits,
  input  logic                     relu,
  output logic        [ACT_W-1:0]  y,
  output logic                     saturated
);
  logic signed [PSUM_W-1:0] s, hi, lo;
  always_comb begin
    s  = psum >>> out_shift;
    if (relu && s < 0) s = '0;
    hi = (PSUM_W'(1) <<< (out_bits - 4'd1)) - 1;
    lo = -(PSUM_W'(1) <<< (out_bits - 4'd1));
    saturated = 1'b0;
    if (s > hi) begin
      s = hi;
      saturated = 1'b1;
    end else if (s < lo) begin
      s = lo;
      saturated = 1'b1;
    end
    y = s[ACT_W-1:0];
  end
endmodule
