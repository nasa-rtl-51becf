// tb_mac_unit: exhaustive check of the 8x8 signed multiplier against the reference product.
module tb_mac_unit;
  import nasa_pkg::*;
  import nasa_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [ACT_W-1:0] x;
  logic [WGT_W-1:0] w;
  logic signed [PSUM_W-1:0] term_o;
  mac_unit dut (.x, .w, .term(term_o));
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = -128; a < 128; a++)
      for (int b = 0; b < 256; b++) begin
        x = 8'(a); w = 8'(b);
        #1;
        checks++;
        if (int'(term_o) != term(LT_CONV, a, b)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d w=%0d got %0d", a, b, term_o);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
