// tb_noc: three random requesters share the buffer path and the weight path.
// Each requester holds a request until it is taken and keeps a queue of the
// words it expects back; every response must reach the requester that asked,
// in order, with the right data. Buffer writes must all arrive. It also
// checks the round-robin bound (a buffer request waits at most two cycles),
// that contention was flagged, and that the outstanding-read FIFO filled up.
module tb_noc;
  import nasa_pkg::*;
  localparam int N = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] c_gb_req_valid, c_gb_req_ready, c_gb_rsp_valid;
  gb_req_t c_gb_req [N];
  logic [ACT_W-1:0] c_gb_rsp_data;
  logic [N-1:0] c_w_req_valid, c_w_req_ready, c_w_rsp_valid;
  logic [DRAM_AW-1:0] c_w_req_addr [N];
  logic [WGT_W-1:0] c_w_rsp_data;
  logic gb_req_valid, gb_rsp_valid, dw_req_valid, dw_req_ready, dw_rsp_valid, gb_conflict;
  gb_req_t gb_req;
  logic [ACT_W-1:0] gb_rsp_data;
  logic [DRAM_AW-1:0] dw_req_addr;
  logic [WGT_W-1:0] dw_rsp_data;

  noc #(.N_CH(N), .W_OUTSTANDING(4)) dut (.*);

  logic io_rsp_valid, io_req_ready;
  logic [WGT_W-1:0] io_rsp_data;
  dram_model #(.DEPTH(4096), .LAT(6), .STALL_PCT(30)) u_dram (
    .clk, .rst_n,
    .w_req_valid(dw_req_valid), .w_req_addr(dw_req_addr), .w_req_ready(dw_req_ready),
    .w_rsp_valid(dw_rsp_valid), .w_rsp_data(dw_rsp_data),
    .io_req_valid(1'b0), .io_req('0), .io_req_ready, .io_rsp_valid, .io_rsp_data
  );

  // buffer model: reads return f(addr); writes are counted
  function automatic logic [7:0] f(input logic [15:0] a);
    return 8'(a * 13 + 5);
  endfunction
  int gb_writes = 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gb_rsp_valid <= 1'b0;
    else begin
      gb_rsp_valid <= gb_req_valid && !gb_req.we;
      gb_rsp_data  <= f(gb_req.addr);
      if (gb_req_valid && gb_req.we) gb_writes <= gb_writes + 1;
    end
  end

  logic [7:0] qg [N][$];
  logic [7:0] qw [N][$];
  int issued_w = 0, n_conf = 0, wait_gb [N], max_wait = 0, n_full = 0;
  bit running = 0;
  int outstanding = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        // buffer path: keep an untaken request, else maybe make a new one
        if (!c_gb_req_valid[i] && running && $urandom_range(2) != 0) begin
          c_gb_req_valid[i] = 1'b1;
          c_gb_req[i].we    = ($urandom_range(3) == 0);
          c_gb_req[i].addr  = 16'($urandom);
          c_gb_req[i].wdata = 8'($urandom);
        end
        if (!c_w_req_valid[i] && running && $urandom_range(1) != 0) begin
          c_w_req_valid[i] = 1'b1;
          c_w_req_addr[i]  = 24'($urandom_range(4095));
        end
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (gb_conflict) n_conf++;
      outstanding = outstanding + int'(dw_req_valid && dw_req_ready) - int'(dw_rsp_valid);
      if (outstanding == 4) n_full++;
      for (int i = 0; i < N; i++) begin
        if (c_gb_rsp_valid[i]) begin
          checks++;
          if (qg[i].size() == 0 || qg[i].pop_front() != c_gb_rsp_data) begin
            failures++; $display("FAIL: buffer response to %0d", i);
          end
        end
        if (c_w_rsp_valid[i]) begin
          checks++;
          if (qw[i].size() == 0 || qw[i].pop_front() != c_w_rsp_data) begin
            failures++; $display("FAIL: weight response to %0d", i);
          end
        end
        if (c_gb_req_valid[i] && c_gb_req_ready[i]) begin
          if (!c_gb_req[i].we) qg[i].push_back(f(c_gb_req[i].addr));
          else issued_w++;
          c_gb_req_valid[i] <= 1'b0;
          wait_gb[i] = 0;
        end else if (c_gb_req_valid[i]) begin
          wait_gb[i]++;
          if (wait_gb[i] > max_wait) max_wait = wait_gb[i];
        end
        if (c_w_req_valid[i] && c_w_req_ready[i]) begin
          qw[i].push_back(u_dram.mem[c_w_req_addr[i]]);
          c_w_req_valid[i] <= 1'b0;
        end
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c_gb_req_valid = '0; c_w_req_valid = '0;
    for (int i = 0; i < N; i++) begin c_gb_req[i] = '0; c_w_req_addr[i] = '0; wait_gb[i] = 0; end
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    running = 1;
    repeat (20000) @(negedge clk);
    running = 0;
    repeat (200) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (qg[i].size() != 0 || qw[i].size() != 0) begin failures++; $display("FAIL: requester %0d lost responses", i); end
    end
    checks++; if (gb_writes != issued_w) begin failures++; $display("FAIL: writes %0d of %0d", gb_writes, issued_w); end
    checks++; if (max_wait > N - 1) begin failures++; $display("FAIL: a request waited %0d cycles", max_wait); end
    checks++; if (n_conf == 0) begin failures++; $display("FAIL: no contention seen"); end
    checks++; if (n_full == 0) begin failures++; $display("FAIL: outstanding FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
