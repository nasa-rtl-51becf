// tb_requant: random check of requantisation (shift, ReLU, saturation to 2..8 bits) and of its saturation flag against the reference.
module tb_requant;
  import nasa_pkg::*;
  import nasa_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [PSUM_W-1:0] psum;
  logic [5:0] sh;
  logic [3:0] bits;
  logic relu, sat;
  logic [ACT_W-1:0] y;
  requant dut (.psum, .out_shift(sh), .out_bits(bits), .relu, .y, .saturated(sat));
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int n_sat;
    n_sat = 0;
    for (int i = 0; i < 20000; i++) begin
      int v, e, sc;
      v = (i % 3 == 0) ? int'($urandom) : int'($urandom_range(4000)) - 2000;
      sc = (i % 5 == 0) ? $urandom_range(40) : $urandom_range(12);
      psum = v; sh = 6'(sc); bits = 4'(2 + $urandom_range(6)); relu = $urandom_range(1);
      #1;
      e = requant(v, sc, int'(bits), relu);
      checks++;
      if (s8(int'(y)) != e) begin
        failures++;
        if (failures < 10) $display("FAIL psum=%0d sh=%0d bits=%0d relu=%0d got %0d exp %0d", v, sc, bits, relu, s8(int'(y)), e);
      end
      checks++;
      begin
        int r;
        r = asr(v, sc);
        if (relu && r < 0) r = 0;
        if (sat != (r != e)) failures++;
      end
      if (sat) n_sat++;
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
