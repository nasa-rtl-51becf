// adder_unit: the subtract-and-absolute stage of an ALP processing element.
//
// An adder layer measures similarity as the negative l1 distance, so each
// term is -|x - w| for a 6-bit activation x and a 6-bit weight w; the PE
// accumulates the terms. Combinational. The operation is the paper's adder
// layer; the 6-bit widths follow its quantisation of adder layers.
module adder_unit
  import nasa_pkg::*;
(
  input  logic signed [LP_W-1:0]   x,
  input  logic        [LP_W-1:0]   w,
  output logic signed [PSUM_W-1:0] term
);
  logic signed [LP_W:0] diff;
  always_comb begin
    diff = $signed({x[LP_W-1], x}) - $signed({w[LP_W-1], w});
    term = diff[LP_W] ? PSUM_W'(diff) : -PSUM_W'(diff);
  end
endmodule
