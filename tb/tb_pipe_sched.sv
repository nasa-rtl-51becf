// tb_pipe_sched: checks the pipeline schedule with stand-in chunks and DMA.
// The stand-ins finish after random delays. For every step the test predicts
// which layers each chunk must run, in which order, on which frame parity and
// with which buffer regions, and which frame the DMA loads and stores; every
// start is compared with the prediction. It also checks the number of steps,
// the reported step length, that the three chunks overlap in time, and that
// bad configurations (buffer overflow, bad window, stride or map sizes,
// register-file overflow, broken layer chain) are refused with cfg_err.
module tb_pipe_sched;
  import nasa_pkg::*;
  localparam int MAXL = 72;
  localparam int GBD  = 4096;
  localparam int NL   = 7;
  localparam int NF   = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, start = 0, busy, done, cfg_err;
  logic [6:0] cfg_idx = '0;
  layer_desc_t cfg_desc = '0;
  logic [6:0] n_layers = '0;
  logic [DIM_W-1:0] n_frames = '0;
  logic [2:0] ch_start, ch_done;
  chunk_job_t ch_job [3];
  logic dma_start, dma_load_en, dma_store_en, dma_done, step_evt;
  logic [DRAM_AW-1:0] dma_load_src, dma_store_dst;
  logic [GB_AW-1:0] dma_load_dst, dma_store_src;
  logic [GB_AW:0] dma_load_len, dma_store_len;
  logic [31:0] step_cycles;

  pipe_sched #(.MAX_LAYERS(MAXL), .RF_DEPTH(256), .GB_DEPTH(GBD)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .start, .n_layers, .n_frames,
    .in_dram_base(24'h1000), .out_dram_base(24'h8000),
    .busy, .done, .cfg_err, .ch_start, .ch_job, .ch_done,
    .dma_start, .dma_load_en, .dma_load_src, .dma_load_dst, .dma_load_len,
    .dma_store_en, .dma_store_src, .dma_store_dst, .dma_store_len, .dma_done,
    .step_evt, .step_cycles
  );

  layer_desc_t net [NL];
  int half [NL+1], base [NL+1];

  // stand-in chunks and DMA
  int cnt [3], dcnt;
  bit run_c [3], run_d;
  int step_j = -1, step_start_cyc = 0, cyc = 0, n_steps = 0, n_overlap = 0;
  int exp_q [3][$];

  always @(posedge clk) begin
    cyc++;
    ch_done  <= '0;
    dma_done <= 1'b0;
    if (rst_n) begin
      if (step_evt) begin
        n_steps++;
        checks++;
        if (int'(step_cycles) != cyc - step_start_cyc) begin
          failures++; $display("FAIL step %0d: step_cycles %0d, measured %0d", step_j, step_cycles, cyc - step_start_cyc);
        end
      end
      if (dma_start) begin
        step_j++;
        step_start_cyc = cyc;
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (exp_q[c].size() != 0) begin failures++; $display("FAIL step %0d: chunk %0d skipped jobs", step_j, c); end
          exp_q[c] = {};
        end
        for (int l = 0; l < NL; l++)
          if (step_j - 1 - l >= 0 && step_j - 1 - l < NF) exp_q[int'(net[l].ltype)].push_back(l);
        // DMA command
        checks++;
        if (dma_load_en != (step_j < NF) ||
            (step_j < NF && (int'(dma_load_src) != 'h1000 + step_j * half[0] ||
                             int'(dma_load_dst) != base[0] + (step_j % 2) * half[0] ||
                             int'(dma_load_len) != half[0]))) begin
          failures++; $display("FAIL step %0d: DMA load command", step_j);
        end
        checks++;
        if (dma_store_en != (step_j - 1 - NL >= 0 && step_j - 1 - NL < NF) ||
            (dma_store_en && (int'(dma_store_dst) != 'h8000 + (step_j - 1 - NL) * half[NL] ||
                              int'(dma_store_src) != base[NL] + ((step_j - 1 - NL) % 2) * half[NL]))) begin
          failures++; $display("FAIL step %0d: DMA store command", step_j);
        end
        if (run_d) begin failures++; $display("FAIL: DMA restarted while busy"); end
        run_d = 1; dcnt = $urandom_range(40);
      end
      for (int c = 0; c < 3; c++) begin
        if (ch_start[c]) begin
          int l, f;
          checks++;
          if (run_c[c]) begin failures++; $display("FAIL: chunk %0d started while busy", c); end
          l = int'(ch_job[c].d.w_base) / 100;
          f = step_j - 1 - l;
          if (exp_q[c].size() == 0 || exp_q[c].pop_front() != l) begin
            failures++; $display("FAIL step %0d: chunk %0d got layer %0d", step_j, c, l);
          end
          checks++;
          if (int'(ch_job[c].in_base) != base[l] + (f % 2) * half[l] ||
              int'(ch_job[c].out_base) != base[l+1] + (f % 2) * half[l+1] ||
              ch_job[c].d.ltype != layer_type_e'(c)) begin
            failures++; $display("FAIL step %0d: layer %0d regions", step_j, l);
          end
          run_c[c] = 1; cnt[c] = 1 + $urandom_range(30);
        end else if (run_c[c]) begin
          cnt[c]--;
          if (cnt[c] == 0) begin run_c[c] = 0; ch_done[c] <= 1'b1; end
        end
      end
      if ((int'(run_c[0]) + int'(run_c[1]) + int'(run_c[2])) >= 2) n_overlap++;
      if (run_d && !dma_start) begin
        if (dcnt == 0) begin run_d = 0; dma_done <= 1'b1; end
        else dcnt--;
      end
    end
  end

  task automatic refuse(layer_desc_t d, string what);
    cfg(0, d);
    n_steps = 0;
    go(1, 1);
    checks++;
    if (!cfg_err || n_steps != 0) begin failures++; $display("FAIL: %s not refused", what); end
  endtask

  task automatic cfg(int idx, layer_desc_t d);
    @(negedge clk); cfg_we = 1; cfg_idx = 7'(idx); cfg_desc = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic go(int nl, int nf);
    @(negedge clk); n_layers = 7'(nl); n_frames = 16'(nf); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (2) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_type_e types [NL];
    int ch [NL+1];
    types = '{LT_CONV, LT_SHIFT, LT_SHIFT, LT_ADDER, LT_CONV, LT_ADDER, LT_CONV};
    for (int c = 0; c < 3; c++) begin run_c[c] = 0; cnt[c] = 0; end
    run_d = 0; dcnt = 0;
    ch_done = '0; dma_done = 0;
    for (int l = 0; l <= NL; l++) ch[l] = 2 + $urandom_range(20);
    ch[4] = ch[3];   // layer 3 is depthwise
    for (int l = 0; l < NL; l++) begin
      net[l] = '0;
      net[l].ltype = types[l];
      net[l].n_in = 16'(ch[l]); net[l].n_out = 16'(ch[l+1]); net[l].n_pix = 16'd4;
      net[l].w_base = 24'(100 * l);
      // layer 0: 3x3 stride 2 on a 4x4 map; later layers 2x2 maps, 1x1 or 3x3
      net[l].k_size = (l == 0 || l % 2 == 1) ? 3'd3 : 3'd1;
      net[l].stride = (l == 0) ? 2'd2 : 2'd1;
      net[l].in_h = (l == 0) ? 16'd4 : 16'd2;
      net[l].in_w = (l == 0) ? 16'd4 : 16'd2;
      net[l].out_w = 16'd2;
    end
    net[3].dw = 1'b1;
    half[0] = 16 * ch[0];
    base[0] = 0;
    for (int b = 1; b <= NL; b++) half[b] = 4 * ch[b];
    for (int b = 0; b < NL; b++) base[b+1] = base[b] + 2 * half[b];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) cfg(l, net[l]);
    go(NL, NF);
    checks++; if (cfg_err) begin failures++; $display("FAIL: valid network refused"); end
    checks++; if (n_steps != NF + NL + 1) begin failures++; $display("FAIL: %0d steps", n_steps); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL: chunks never overlapped"); end
    for (int c = 0; c < 3; c++) begin
      checks++; if (exp_q[c].size() != 0) begin failures++; $display("FAIL: chunk %0d left jobs", c); end
    end
    // refused configurations
    begin
      layer_desc_t d;
      // too large for the buffer: a valid 200x200 map
      d = net[0]; d.in_h = 16'd200; d.in_w = 16'd200; d.out_w = 16'd100; d.n_pix = 16'd10000;
      refuse(d, "buffer overflow");
      d = net[0]; d.stride = 2'd3;                        refuse(d, "stride 3");
      d = net[0]; d.k_size = 3'd2;                        refuse(d, "even window");
      d = net[0]; d.out_w = 16'd3;                        refuse(d, "wrong output width");
      d = net[0]; d.n_pix = 16'd6;                        refuse(d, "wrong pixel count");
      d = net[0]; d.k_size = 3'd7; d.n_in = 16'd6;        refuse(d, "register file overflow");
      d = net[0]; d.dw = 1'b1; d.n_out = d.n_in + 16'd1;  refuse(d, "depthwise width change");
      // broken chain: layer 1 input differs from layer 0 output
      cfg(0, net[0]);
      d = net[1]; d.n_in = net[0].n_out + 16'd1;
      cfg(1, d);
      n_steps = 0;
      go(2, 1);
      checks++; if (!cfg_err || n_steps != 0) begin failures++; $display("FAIL: broken chain not refused"); end
      cfg(1, net[1]);
      d = net[2]; d.in_w = 16'd4; d.in_h = 16'd1; d.out_w = 16'd4;
      cfg(2, d);
      n_steps = 0;
      go(3, 1);
      checks++; if (!cfg_err || n_steps != 0) begin failures++; $display("FAIL: map shape change not refused"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
