// tb_global_buffer: random reads and writes on both ports against a model
// array, checking one-cycle read latency on each port and that port A wins
// when both ports write the same word in one cycle.
module tb_global_buffer;
  import nasa_pkg::*;
  localparam int D = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_req_valid, b_req_valid, a_rsp_valid, b_rsp_valid;
  gb_req_t a_req, b_req;
  logic [ACT_W-1:0] a_rsp_data, b_rsp_data;
  global_buffer #(.DEPTH(D)) dut (.*);

  logic [ACT_W-1:0] model [D];
  logic             a_exp_v, b_exp_v;
  logic [ACT_W-1:0] a_exp, b_exp;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_coll;
    n_coll = 0;
    a_req_valid = 0; b_req_valid = 0; a_req = '0; b_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise through port B
    for (int i = 0; i < D; i++) begin
      b_req_valid = 1; b_req.we = 1; b_req.addr = 16'(i); b_req.wdata = 8'(i * 7);
      model[i] = 8'(i * 7);
      @(negedge clk);
    end
    b_req_valid = 0;
    a_exp_v = 0; b_exp_v = 0;
    for (int c = 0; c < 20000; c++) begin
      a_req_valid = $urandom_range(1); b_req_valid = $urandom_range(1);
      a_req.we = $urandom_range(1); b_req.we = $urandom_range(1);
      a_req.addr = 16'($urandom_range(D - 1));
      b_req.addr = ($urandom_range(3) == 0) ? a_req.addr : 16'($urandom_range(D - 1));
      a_req.wdata = 8'($urandom); b_req.wdata = 8'($urandom);
      a_exp_v = a_req_valid && !a_req.we;
      b_exp_v = b_req_valid && !b_req.we;
      a_exp = model[a_req.addr];
      b_exp = model[b_req.addr];
      @(posedge clk);
      #1;
      checks++;
      if (a_rsp_valid != a_exp_v || b_rsp_valid != b_exp_v) failures++;
      if (a_exp_v) begin checks++; if (a_rsp_data != a_exp) failures++; end
      if (b_exp_v) begin checks++; if (b_rsp_data != b_exp) failures++; end
      if (b_req_valid && b_req.we) model[b_req.addr] = b_req.wdata;
      if (a_req_valid && a_req.we) model[a_req.addr] = a_req.wdata;
      if (a_req_valid && b_req_valid && a_req.we && b_req.we && a_req.addr == b_req.addr) n_coll++;
      @(negedge clk);
    end
    checks++;
    if (n_coll == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
