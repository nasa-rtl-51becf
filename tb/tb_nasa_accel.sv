// tb_nasa_accel: end-to-end test of the accelerator at its default size.
//
// Runs a five-layer hybrid network Conv1 -> Shift2 -> Adder3 -> Shift4 -> Conv5
// (the layer mix of the pipeline example) on a 5x5 input map: a 3x3 stride-2
// convolution, a 1x1 shift layer, a 3x3 depthwise adder layer, a 1x1 shift
// layer and a 3x3 convolution, on several frames through the full
// pipeline, with random weights and inputs in a DRAM model that stalls at
// random, and compares every output byte with an integer reference model.
// It also checks the number of pipeline steps, that a bad configuration is
// refused, and counts the mechanisms that must occur: multi-tile layers, both
// loop orders, chunks running concurrently, buffer contention in the NoC,
// output saturation, pipeline fill and drain, DRAM back-pressure.
module tb_nasa_accel;
  import nasa_pkg::*;
  import nasa_ref_pkg::*;

  localparam int MAXL = 72;
  localparam int NL   = 5;
  localparam int NF   = 4;
  localparam int IH   = 5;            // input map IH x IH x CIN
  localparam int CIN  = 8;
  localparam int NPIX = 9;            // 3x3 map after the stride-2 layer
  localparam int COUT = 6;
  localparam int IN_BASE  = 24'h020000;
  localparam int OUT_BASE = 24'h030000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        cfg_we = 1'b0, start = 1'b0;
  logic [$clog2(MAXL)-1:0]     cfg_idx = '0;
  layer_desc_t                 cfg_desc = '0;
  logic [$clog2(MAXL+1)-1:0]   n_layers = '0;
  logic [DIM_W-1:0]            n_frames = '0;
  logic busy, done, cfg_err;
  logic dw_req_valid, dw_req_ready, dw_rsp_valid;
  logic [DRAM_AW-1:0] dw_req_addr;
  logic [WGT_W-1:0] dw_rsp_data, dio_rsp_data;
  logic dio_req_valid, dio_req_ready, dio_rsp_valid;
  dram_req_t dio_req;
  logic step_evt, gb_conflict;
  logic [31:0] step_cycles;
  logic [2:0] chunk_busy, wload_evt, sat_evt;

  nasa_accel dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .start, .n_layers, .n_frames,
    .in_dram_base(24'(IN_BASE)), .out_dram_base(24'(OUT_BASE)),
    .busy, .done, .cfg_err,
    .dw_req_valid, .dw_req_addr, .dw_req_ready, .dw_rsp_valid, .dw_rsp_data,
    .dio_req_valid, .dio_req, .dio_req_ready, .dio_rsp_valid, .dio_rsp_data,
    .step_evt, .step_cycles, .gb_conflict, .chunk_busy, .wload_evt, .sat_evt
  );

  dram_model #(.DEPTH(1 << 18), .LAT(4), .STALL_PCT(20)) u_dram (
    .clk, .rst_n,
    .w_req_valid(dw_req_valid), .w_req_addr(dw_req_addr), .w_req_ready(dw_req_ready),
    .w_rsp_valid(dw_rsp_valid), .w_rsp_data(dw_rsp_data),
    .io_req_valid(dio_req_valid), .io_req(dio_req), .io_req_ready(dio_req_ready),
    .io_rsp_valid(dio_rsp_valid), .io_rsp_data(dio_rsp_data)
  );

  int checks = 0, failures = 0;
  layer_desc_t net [NL];

  // event counters
  int n_steps = 0, n_conc = 0, n_conflict = 0, n_sat = 0, n_stall = 0, n_fill = 0;
  int n_wload [3];
  int max_busy_per_step = 0;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (step_evt) n_steps <= n_steps + 1;
      if ($countones(chunk_busy) >= 2) n_conc <= n_conc + 1;
      if (gb_conflict) n_conflict <= n_conflict + 1;
      if (|sat_evt) n_sat <= n_sat + 1;
      if ((dw_req_valid && !dw_req_ready) || (dio_req_valid && !dio_req_ready)) n_stall <= n_stall + 1;
      for (int c = 0; c < 3; c++) if (wload_evt[c]) n_wload[c] <= n_wload[c] + 1;
    end
  end

  // pipeline fill/drain: a step in which not every chunk has work
  int busy_in_step [3];
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < 3; c++) if (chunk_busy[c]) busy_in_step[c] <= 1;
      if (step_evt) begin
        if (busy_in_step[0] == 0 || busy_in_step[1] == 0 || busy_in_step[2] == 0) n_fill <= n_fill + 1;
        for (int c = 0; c < 3; c++) busy_in_step[c] <= 0;
      end
    end
  end

  function automatic layer_desc_t mk(layer_type_e t, loop_order_e o, int nin, int nout,
                                     int k, int st, bit dw, int ih, int wb, int sh, int bits,
                                     bit relu);
    layer_desc_t d;
    d = '0;
    d.ltype = t; d.order = o; d.n_in = DIM_W'(nin); d.n_out = DIM_W'(nout);
    d.k_size = 3'(k); d.stride = 2'(st); d.dw = dw;
    d.in_h = DIM_W'(ih); d.in_w = DIM_W'(ih); d.out_w = DIM_W'((ih - 1) / st + 1);
    d.n_pix = DIM_W'(((ih - 1) / st + 1) * ((ih - 1) / st + 1));
    d.w_base = DRAM_AW'(wb); d.out_shift = 6'(sh);
    d.out_bits = 4'(bits); d.relu = relu;
    return d;
  endfunction

  function automatic int rlen(layer_desc_t d);
    return int'(d.k_size) * int'(d.k_size) * (d.dw ? 1 : int'(d.n_in));
  endfunction

  task automatic write_cfg(int idx, layer_desc_t d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_idx = 7'(idx); cfg_desc = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic run(int nl, int nf);
    @(negedge clk);
    n_layers = 7'(nl); n_frames = 16'(nf); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    repeat (2) @(negedge clk);
  endtask

  // reference: all activations of one frame, layer by layer
  int act [NL+1][IH*IH][64];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wb;
    for (int c = 0; c < 3; c++) n_wload[c] = 0;
    for (int c = 0; c < 3; c++) busy_in_step[c] = 0;
    // network: sizes chosen so every chunk needs more than one tile somewhere
    wb = 0;
    net[0] = mk(LT_CONV,  LO_WS, CIN, 30, 3, 2, 1'b0, IH,  wb, 9, 6, 1'b0); wb += rlen(net[0]) * 30;
    net[1] = mk(LT_SHIFT, LO_OS,  30, 20, 1, 1, 1'b0,  3,  wb, 17, 6, 1'b0); wb += rlen(net[1]) * 20;
    net[2] = mk(LT_ADDER, LO_WS,  20, 20, 3, 1, 1'b1,  3,  wb, 4, 6, 1'b0); wb += rlen(net[2]) * 20;
    net[3] = mk(LT_SHIFT, LO_WS,  20, 28, 1, 1, 1'b0,  3,  wb, 16, 8, 1'b0); wb += rlen(net[3]) * 28;
    net[4] = mk(LT_CONV,  LO_OS,  28, COUT, 3, 1, 1'b0, 3, wb, 11, 8, 1'b1); wb += rlen(net[4]) * COUT;
    // weights
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < rlen(net[l]) * int'(net[l].n_out); i++) begin
        int w;
        if (net[l].ltype == LT_SHIFT) w = ($urandom_range(9) == 0) ? 32 : ($urandom_range(1) << 4) | $urandom_range(15);
        else if (net[l].ltype == LT_ADDER) w = $urandom_range(63);
        else w = $urandom_range(255);
        u_dram.mem[int'(net[l].w_base) + i] = 8'(w);
      end
    // inputs
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < IH * IH * CIN; i++) u_dram.mem[IN_BASE + f * IH * IH * CIN + i] = 8'($urandom_range(255));

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NL; l++) write_cfg(l, net[l]);
    run(NL, NF);

    checks++;
    if (cfg_err) begin failures++; $display("FAIL: cfg_err on a valid network"); end
    checks++;
    if (n_steps != NF + NL + 1) begin
      failures++; $display("FAIL: %0d pipeline steps, expected %0d", n_steps, NF + NL + 1);
    end

    // reference and compare
    for (int f = 0; f < NF; f++) begin
      for (int p = 0; p < IH * IH; p++)
        for (int k = 0; k < CIN; k++)
          act[0][p][k] = s8(int'(u_dram.mem[IN_BASE + f * IH * IH * CIN + p * CIN + k]));
      for (int l = 0; l < NL; l++) begin
        int ks, st, pd, ih, iw, ow, nin, rl;
        ks = int'(net[l].k_size); st = int'(net[l].stride); pd = (ks - 1) / 2;
        ih = int'(net[l].in_h); iw = int'(net[l].in_w); ow = int'(net[l].out_w);
        nin = int'(net[l].n_in); rl = rlen(net[l]);
        for (int p = 0; p < int'(net[l].n_pix); p++)
          for (int o = 0; o < int'(net[l].n_out); o++) begin
            int acc;
            acc = 0;
            for (int ky = 0; ky < ks; ky++)
              for (int kx = 0; kx < ks; kx++)
                for (int c = 0; c < (net[l].dw ? 1 : nin); c++) begin
                  int iy, ix, x;
                  iy = (p / ow) * st + ky - pd;
                  ix = (p % ow) * st + kx - pd;
                  x = (iy < 0 || iy >= ih || ix < 0 || ix >= iw) ? 0
                      : in_act(net[l].ltype, act[l][iy * iw + ix][net[l].dw ? o : c]);
                  acc += term(net[l].ltype, x,
                              int'(u_dram.mem[int'(net[l].w_base) + o * rl
                                              + (ky * ks + kx) * (net[l].dw ? 1 : nin) + c]));
                end
            act[l+1][p][o] = requant(acc, int'(net[l].out_shift), int'(net[l].out_bits), net[l].relu);
          end
      end
      for (int p = 0; p < NPIX; p++)
        for (int o = 0; o < COUT; o++) begin
          int got;
          got = s8(int'(u_dram.mem[OUT_BASE + f * NPIX * COUT + p * COUT + o]));
          checks++;
          if (got !== act[NL][p][o]) begin
            failures++;
            if (failures < 10) $display("FAIL: frame %0d pix %0d out %0d: got %0d exp %0d", f, p, o, got, act[NL][p][o]);
          end
        end
    end

    // a layer longer than the weight register file must be refused
    write_cfg(0, mk(LT_CONV, LO_WS, 300, 4, 1, 1, 1'b0, 1, 0, 0, 8, 1'b0));
    run(1, 1);
    checks++;
    if (!cfg_err) begin failures++; $display("FAIL: oversize layer not refused"); end

    // mechanisms
    $display("steps=%0d concurrent=%0d conflicts=%0d saturations=%0d dram_stalls=%0d fill_drain_steps=%0d wloads=%0d/%0d/%0d",
             n_steps, n_conc, n_conflict, n_sat, n_stall, n_fill, n_wload[0], n_wload[1], n_wload[2]);
    checks++; if (n_conc == 0)     begin failures++; $display("FAIL: chunks never ran concurrently"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL: no NoC buffer contention"); end
    checks++; if (n_sat == 0)      begin failures++; $display("FAIL: no saturation"); end
    checks++; if (n_stall == 0)    begin failures++; $display("FAIL: no DRAM back-pressure"); end
    checks++; if (n_fill == 0)     begin failures++; $display("FAIL: no pipeline fill/drain step"); end
    // weight loads per chunk: a WS layer loads each tile once per frame,
    // an OS layer once per tile and output pixel
    begin
      int exp_wl [3];
      int npe [3];
      npe = '{24, 24, 8};
      exp_wl = '{0, 0, 0};
      for (int l = 0; l < NL; l++) begin
        int c, tiles;
        c = int'(net[l].ltype);
        tiles = (int'(net[l].n_out) + npe[c] - 1) / npe[c];
        exp_wl[c] += NF * ((net[l].order == LO_WS) ? tiles : tiles * int'(net[l].n_pix));
      end
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (n_wload[c] != exp_wl[c]) begin
          failures++; $display("FAIL: chunk %0d weight loads %0d, expected %0d", c, n_wload[c], exp_wl[c]);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
