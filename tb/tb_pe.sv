// tb_pe: checks one processing element of each kind.
// Fills the weight register file, streams random activations with gaps,
// and checks the partial sum two cycles after the last activation against the
// reference sum; in_first must restart the sum.
module tb_pe;
  import nasa_pkg::*;
  import nasa_ref_pkg::*;
  localparam int D = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 wrf_we, in_valid, in_first;
  logic [5:0]           wrf_addr, in_k;
  logic [WGT_W-1:0]     wrf_data;
  logic signed [ACT_W-1:0] in_x;
  logic signed [PSUM_W-1:0] psum [3];

  for (genvar g = 0; g < 3; g++) begin : g_pe
    pe #(.KIND(layer_type_e'(g)), .RF_DEPTH(D)) dut (
      .clk, .rst_n, .wrf_we, .wrf_addr, .wrf_data, .in_valid, .in_first, .in_k, .in_x,
      .psum(psum[g])
    );
  end

  int wts [D];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wrf_we = 0; in_valid = 0; in_first = 0; wrf_addr = 0; in_k = 0; wrf_data = 0; in_x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 30; r++) begin
      int n, exp_s [3];
      int xs [D];
      for (int k = 0; k < D; k++) begin
        wts[k] = $urandom_range(255);
        @(negedge clk);
        wrf_we = 1; wrf_addr = 6'(k); wrf_data = 8'(wts[k]);
      end
      @(negedge clk);
      wrf_we = 0;
      n = 1 + $urandom_range(D - 1);
      for (int g = 0; g < 3; g++) exp_s[g] = 0;
      for (int k = 0; k < n; k++) begin
        int kk;
        kk = $urandom_range(D - 1);
        xs[k] = (r % 2) ? int'($urandom_range(63)) - 32 : int'($urandom_range(255)) - 128;
        for (int g = 0; g < 3; g++) begin
          int xv;
          xv = (g == 0) ? xs[k] : s6(xs[k]);
          exp_s[g] += term(layer_type_e'(g), xv, wts[kk]);
        end
        while ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_k = 6'(kk); in_x = 8'(xs[k]);
      end
      @(negedge clk);
      in_valid = 0;
      @(negedge clk);
      for (int g = 0; g < 3; g++) begin
        checks++;
        if (int'(psum[g]) != exp_s[g]) begin
          failures++;
          $display("FAIL round %0d kind %0d: got %0d exp %0d", r, g, psum[g], exp_s[g]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
