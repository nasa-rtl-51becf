// tb_shift_unit: exhaustive check of the shift unit (every 6-bit activation and weight code) against x * 2^(15-p) with sign and zero flags.
module tb_shift_unit;
  import nasa_pkg::*;
  import nasa_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [LP_W-1:0] x;
  logic [LP_W-1:0] w;
  logic signed [PSUM_W-1:0] term_o;
  shift_unit dut (.x, .w, .term(term_o));
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = -32; a < 32; a++)
      for (int b = 0; b < 64; b++) begin
        x = 6'(a); w = 6'(b);
        #1;
        checks++;
        if (int'(term_o) != term(LT_SHIFT, a, b)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d w=%0h got %0d exp %0d", a, b, term_o, term(LT_SHIFT, a, b));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
