// tb_io_dma: random store-then-load commands between a buffer model and the
// DRAM model. Checks that every stored word reaches DRAM, every loaded word
// reaches the buffer, nothing outside the regions changes, and that commands
// with nothing to do still answer done.
module tb_io_dma;
  import nasa_pkg::*;
  localparam int GBD = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, load_en, store_en, done;
  logic [DRAM_AW-1:0] load_src, store_dst;
  logic [GB_AW-1:0] load_dst, store_src;
  logic [GB_AW:0] load_len, store_len;
  logic gb_req_valid, gb_rsp_valid;
  gb_req_t gb_req;
  logic [ACT_W-1:0] gb_rsp_data;
  logic d_req_valid, d_req_ready, d_rsp_valid;
  dram_req_t d_req;
  logic [WGT_W-1:0] d_rsp_data;

  io_dma dut (.*);

  logic w_req_ready, w_rsp_valid;
  logic [WGT_W-1:0] w_rsp_data;
  dram_model #(.DEPTH(1 << 14), .LAT(5), .STALL_PCT(30)) u_dram (
    .clk, .rst_n,
    .w_req_valid(1'b0), .w_req_addr('0), .w_req_ready, .w_rsp_valid, .w_rsp_data,
    .io_req_valid(d_req_valid), .io_req(d_req), .io_req_ready(d_req_ready),
    .io_rsp_valid(d_rsp_valid), .io_rsp_data(d_rsp_data)
  );

  logic [ACT_W-1:0] gbm [GBD];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gb_rsp_valid <= 1'b0;
    else begin
      gb_rsp_valid <= gb_req_valid && !gb_req.we;
      gb_rsp_data  <= gbm[gb_req.addr % GBD];
      if (gb_req_valid && gb_req.we) gbm[gb_req.addr % GBD] <= gb_req.wdata;
    end
  end

  logic [ACT_W-1:0] gb_ref [GBD];
  logic [WGT_W-1:0] dr_ref [1 << 14];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; load_en = 0; store_en = 0; load_src = 0; store_dst = 0;
    load_dst = 0; store_src = 0; load_len = 0; store_len = 0;
    for (int i = 0; i < GBD; i++) begin gbm[i] = 8'($urandom); gb_ref[i] = gbm[i]; end
    for (int i = 0; i < (1 << 14); i++) begin u_dram.mem[i] = 8'($urandom); dr_ref[i] = u_dram.mem[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 25; t++) begin
      int cyc;
      load_en   = (t % 4 != 1);
      store_en  = (t % 4 != 2);
      load_len  = (t == 3) ? 17'd0 : 17'(1 + $urandom_range(200));
      store_len = 17'(1 + $urandom_range(200));
      load_src  = 24'($urandom_range(4000));
      load_dst  = 16'($urandom_range(1000));
      store_src = 16'(2000 + $urandom_range(1000));
      store_dst = 24'(8000 + $urandom_range(4000));
      if (store_en) for (int i = 0; i < int'(store_len); i++) dr_ref[int'(store_dst) + i] = gb_ref[int'(store_src) + i];
      if (load_en)  for (int i = 0; i < int'(load_len); i++)  gb_ref[int'(load_dst) + i] = dr_ref[int'(load_src) + i];
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
      checks++;
      if (!done) failures++;
      @(negedge clk);
      for (int i = 0; i < GBD; i++) begin
        checks++;
        if (gbm[i] != gb_ref[i]) begin failures++; if (failures < 10) $display("FAIL t%0d gb[%0d]", t, i); end
      end
      for (int i = 7000; i < 13000; i++) begin
        checks++;
        if (u_dram.mem[i] != dr_ref[i]) begin failures++; if (failures < 10) $display("FAIL t%0d dram[%0d]", t, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
