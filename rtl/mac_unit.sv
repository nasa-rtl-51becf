// mac_unit: the multiplier of a CLP processing element.
//
// Computes the signed product of an 8-bit activation and an 8-bit weight and
// sign-extends it to the partial-sum width; the accumulation happens in the PE.
// Purely combinational. The operation is the paper's MAC unit; the widths follow
// its 8-bit quantisation of convolution layers.
module mac_unit
  import nasa_pkg::*;
(
  input  logic signed [ACT_W-1:0]  x,
  input  logic        [WGT_W-1:0]  w,
  output logic signed [PSUM_W-1:0] term
);
  logic signed [2*ACT_W-1:0] prod;
  always_comb begin
    prod = x * $signed(w);
    term = PSUM_W'(prod);
  end
endmodule
