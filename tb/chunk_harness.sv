// chunk_harness: shared test environment for one chunk (CLP, SLP or ALP).
//
// Surrounds a chunk with a global-buffer model (one-cycle reads, random
// refusals) and a DRAM model (latency, random stalls), runs a series of random
// layers in both loop orders (1x1 and K x K windows, dense and depthwise,
// stride 1 and 2, with zero padding), and compares every output word with the integer
// reference model. Words around the output region must stay untouched. It also
// checks the number of weight-tile loads, which differs between the loop
// orders, and the cycle count of a layer against a lower bound of one
// buffer access per cycle. Prints the TB_RESULT line and ends the simulation.
module chunk_harness
  import nasa_pkg::*;
  import nasa_ref_pkg::*;
#(
  parameter layer_type_e KIND    = LT_CONV,
  parameter int          N_PE    = 24,
  parameter int          N_TESTS = 16
) ();
  localparam int GBD = 8192;
  localparam int OUT_BASE = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  chunk_job_t job;
  logic gb_req_valid, gb_req_ready, gb_rsp_valid;
  gb_req_t gb_req;
  logic [ACT_W-1:0] gb_rsp_data;
  logic w_req_valid, w_req_ready, w_rsp_valid;
  logic [DRAM_AW-1:0] w_req_addr;
  logic [WGT_W-1:0] w_rsp_data;
  logic wload_evt, sat_evt;

  chunk #(.KIND(KIND), .N_PE(N_PE)) dut (
    .clk, .rst_n, .start, .job, .busy, .done,
    .gb_req_valid, .gb_req, .gb_req_ready, .gb_rsp_valid, .gb_rsp_data,
    .w_req_valid, .w_req_addr, .w_req_ready, .w_rsp_valid, .w_rsp_data,
    .wload_evt, .sat_evt
  );

  logic io_rsp_valid, io_req_ready;
  logic [WGT_W-1:0] io_rsp_data;
  dram_model #(.DEPTH(1 << 16), .LAT(3), .STALL_PCT(25)) u_dram (
    .clk, .rst_n,
    .w_req_valid, .w_req_addr, .w_req_ready, .w_rsp_valid, .w_rsp_data,
    .io_req_valid(1'b0), .io_req('0), .io_req_ready, .io_rsp_valid, .io_rsp_data
  );

  // global-buffer model
  logic [ACT_W-1:0] gbm [GBD];
  always_ff @(negedge clk) gb_req_ready <= ($urandom_range(99) < 75);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gb_rsp_valid <= 1'b0;
    else begin
      gb_rsp_valid <= gb_req_valid && gb_req_ready && !gb_req.we;
      gb_rsp_data  <= gbm[gb_req.addr % GBD];
      if (gb_req_valid && gb_req_ready && gb_req.we) gbm[gb_req.addr % GBD] <= gb_req.wdata;
    end
  end

  int checks = 0, failures = 0, n_wload = 0, n_done = 0;
  always_ff @(posedge clk) begin
    if (rst_n && wload_evt) n_wload <= n_wload + 1;
    if (rst_n && done) n_done <= n_done + 1;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    job   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < N_TESTS; t++) begin
      int nin, nout, npix, tiles, exp_loads, wl0, cyc, ks, st, ih, iw, ow, oh, pd, rl, rd;
      bit dw;
      layer_desc_t d;
      logic [ACT_W-1:0] g_before, g_after;
      // test 0: 1x1 on one pixel and one channel; test 1: a 256-long
      // reduction; then random windows: K in {1,3,5}, stride 1 or 2, dense
      // or depthwise (every third test), maps up to 5x5.
      ks = (t < 2) ? 1 : 1 + 2 * $urandom_range(2);
      st = (t < 2) ? 1 : 1 + $urandom_range(1);
      dw = (t >= 2) && (t % 3 == 2);
      ih = (t < 2) ? 1 : 1 + $urandom_range(4);
      iw = (t == 0) ? 1 : (t == 1) ? 1 : 1 + $urandom_range(4);
      if (t == 3) begin ks = 3; st = 1; ih = 4; iw = 5; end  // a padded 3x3 case for sure
      nin  = (t == 0) ? 1 : (t == 1) ? 256 : dw ? 1 + $urandom_range(2 * N_PE + 5)
                                             : 1 + $urandom_range(256 / (ks * ks) - 1);
      if (!dw && nin > 40) nin = 40;
      nout = dw ? nin : (t == 0) ? 1 : 1 + $urandom_range(2 * N_PE + 5);
      oh = (ih - 1) / st + 1;
      ow = (iw - 1) / st + 1;
      npix = oh * ow;
      pd = (ks - 1) / 2;
      rl = ks * ks * (dw ? 1 : nin);
      d = '0;
      d.ltype = KIND;
      d.order = loop_order_e'(t % 2);
      d.n_in = DIM_W'(nin); d.n_out = DIM_W'(nout); d.n_pix = DIM_W'(npix);
      d.k_size = 3'(ks); d.stride = 2'(st); d.dw = dw;
      d.in_h = DIM_W'(ih); d.in_w = DIM_W'(iw); d.out_w = DIM_W'(ow);
      d.w_base = DRAM_AW'(100 + $urandom_range(1000));
      d.out_shift = (KIND == LT_SHIFT) ? 6'(13 + $urandom_range(6)) :
                    (KIND == LT_CONV)  ? 6'(4 + $urandom_range(6)) : 6'($urandom_range(4));
      d.out_bits = (t % 3 == 0) ? 4'd6 : 4'd8;
      d.relu = (t % 4 == 1);
      for (int i = 0; i < rl * nout; i++) begin
        int w;
        if (KIND == LT_SHIFT) w = ($urandom_range(7) == 0) ? 32 : $urandom_range(31);
        else w = $urandom_range(255);
        u_dram.mem[int'(d.w_base) + i] = 8'(w);
      end
      for (int i = 0; i < GBD; i++) gbm[i] = 8'($urandom_range(255));
      g_before = gbm[OUT_BASE + t - 1];
      g_after  = gbm[OUT_BASE + t + npix * nout];
      job.d = d; job.in_base = 16'(16 + t); job.out_base = 16'(OUT_BASE + t);
      wl0 = n_wload;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      // outputs
      for (int p = 0; p < npix; p++)
        for (int o = 0; o < nout; o++) begin
          int acc, e, g, oy, ox;
          acc = 0;
          oy = p / ow;
          ox = p % ow;
          for (int ky = 0; ky < ks; ky++)
            for (int kx = 0; kx < ks; kx++)
              for (int c = 0; c < (dw ? 1 : nin); c++) begin
                int iy, ix, ch, x;
                iy = oy * st + ky - pd;
                ix = ox * st + kx - pd;
                ch = dw ? o : c;
                x = (iy < 0 || iy >= ih || ix < 0 || ix >= iw) ? 0
                    : in_act(KIND, int'(gbm[16 + t + (iy * iw + ix) * nin + ch]));
                acc += term(KIND, x,
                            int'(u_dram.mem[int'(d.w_base) + o * rl + (ky * ks + kx) * (dw ? 1 : nin) + c]));
              end
          e = requant(acc, int'(d.out_shift), int'(d.out_bits), d.relu);
          g = s8(int'(gbm[OUT_BASE + t + p * nout + o]));
          checks++;
          if (g != e) begin
            failures++;
            if (failures < 10)
              $display("FAIL test %0d (K=%0d s=%0d dw=%0d) pix %0d out %0d: got %0d exp %0d",
                       t, ks, st, dw, p, o, g, e);
          end
        end
      // guard words before and after the output region are untouched
      checks++;
      if (gbm[OUT_BASE + t - 1] != g_before || gbm[OUT_BASE + t + npix * nout] != g_after) begin
        failures++;
        $display("FAIL test %0d: write outside the output region", t);
      end
      tiles = (nout + N_PE - 1) / N_PE;
      exp_loads = (d.order == LO_WS) ? tiles : tiles * npix;
      checks++;
      if (n_wload - wl0 != exp_loads) begin
        failures++;
        $display("FAIL test %0d: %0d weight loads, expected %0d", t, n_wload - wl0, exp_loads);
      end
      // at least one cycle per input read, output write and weight word
      rd = dw ? ks * ks * nout : tiles * ks * ks * nin;
      checks++;
      if (cyc < npix * rd + npix * nout + rl) begin
        failures++;
        $display("FAIL test %0d: finished in %0d cycles, faster than possible", t, cyc);
      end
    end
    checks++;
    if (n_done != N_TESTS) begin failures++; $display("FAIL: %0d done pulses", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
