// nasa_accel: chunk-based accelerator for hybrid convolution/shift/adder DNNs.
//
// Three sub-processors ("chunks") share one memory system:
//   CLP  N_CLP PEs with multiply-accumulate units for convolution layers,
//   SLP  N_SLP PEs with shift-accumulate units for shift layers,
//   ALP  N_ALP PEs with subtract/absolute-accumulate units for adder layers.
// The memory hierarchy has four levels: off-chip DRAM (outside this module,
// reached through two ports), the global buffer, the NoC, and the register
// files inside every PE. The NoC arbitrates the chunks' global-buffer traffic
// and their weight reads from DRAM; io_dma moves network inputs and outputs
// between DRAM and the global buffer. pipe_sched runs the layers as a
// pipeline in which all three chunks work concurrently on different frames.
// The default PE split 24:24:8 follows the allocation rule N_CLP/O_conv =
// N_SLP/O_shift = N_ALP/O_adder for the operation mix of a hybrid-all model
// (about 24M multiplications, 24M shifts and 8M adder-layer operations per
// CIFAR-10 image); the total of 56 PEs, the buffer size and the register-
// file depth are this design's choices.
// Use: write the layer table (cfg_*), place weights and input frames in
// DRAM, pulse start, wait for done. Outputs of frame f are stored at
// out_dram_base + f * (n_pix * n_out of the last layer).
// Lint reports rst_n here as used both as an asynchronous reset and
// synchronously (SYNCASYNCNET): the synchronous use is the disable condition
// of the assertions inside the chunks and the NoC, and it is intended.
module nasa_accel
  import nasa_pkg::*;
#(
  parameter int N_CLP         = 24,
  parameter int N_SLP         = 24,
  parameter int N_ALP         = 8,
  parameter int RF_DEPTH      = 256,
  parameter int GB_DEPTH      = 65536,
  parameter int MAX_LAYERS    = 72,
  parameter int W_OUTSTANDING = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // configuration and control
  input  logic                            cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]   cfg_idx,
  input  layer_desc_t                     cfg_desc,
  input  logic                            start,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] n_layers,
  input  logic [DIM_W-1:0]                n_frames,
  input  logic [DRAM_AW-1:0]              in_dram_base,
  input  logic [DRAM_AW-1:0]              out_dram_base,
  output logic                            busy,
  output logic                            done,
  output logic                            cfg_err,
  // DRAM weight port (read only)
  output logic                            dw_req_valid,
  output logic [DRAM_AW-1:0]              dw_req_addr,
  input  logic                            dw_req_ready,
  input  logic                            dw_rsp_valid,
  input  logic [WGT_W-1:0]                dw_rsp_data,
  // DRAM input/output port
  output logic                            dio_req_valid,
  output dram_req_t                       dio_req,
  input  logic                            dio_req_ready,
  input  logic                            dio_rsp_valid,
  input  logic [WGT_W-1:0]                dio_rsp_data,
  // statistics
  output logic                            step_evt,
  output logic [31:0]                     step_cycles,
  output logic                            gb_conflict,
  output logic [2:0]                      chunk_busy,
  output logic [2:0]                      wload_evt,
  output logic [2:0]                      sat_evt
);
  // chunk <-> scheduler
  logic [2:0]  ch_start, ch_done;
  chunk_job_t  ch_job [3];
  // chunk <-> NoC
  logic [2:0]         c_gb_req_valid, c_gb_req_ready, c_gb_rsp_valid;
  gb_req_t            c_gb_req [3];
  logic [ACT_W-1:0]   c_gb_rsp_data;
  logic [2:0]         c_w_req_valid, c_w_req_ready, c_w_rsp_valid;
  logic [DRAM_AW-1:0] c_w_req_addr [3];
  logic [WGT_W-1:0]   c_w_rsp_data;
  // NoC / DMA <-> buffer
  logic               a_req_valid, a_rsp_valid, b_req_valid, b_rsp_valid;
  gb_req_t            a_req, b_req;
  logic [ACT_W-1:0]   a_rsp_data, b_rsp_data;
  // scheduler <-> DMA
  logic               dma_start, dma_load_en, dma_store_en, dma_done;
  logic [DRAM_AW-1:0] dma_load_src, dma_store_dst;
  logic [GB_AW-1:0]   dma_load_dst, dma_store_src;
  logic [GB_AW:0]     dma_load_len, dma_store_len;

  pipe_sched #(.MAX_LAYERS(MAX_LAYERS), .RF_DEPTH(RF_DEPTH), .GB_DEPTH(GB_DEPTH)) u_sched (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_desc,
    .start, .n_layers, .n_frames, .in_dram_base, .out_dram_base,
    .busy, .done, .cfg_err,
    .ch_start, .ch_job, .ch_done,
    .dma_start, .dma_load_en, .dma_load_src, .dma_load_dst, .dma_load_len,
    .dma_store_en, .dma_store_src, .dma_store_dst, .dma_store_len, .dma_done,
    .step_evt, .step_cycles
  );

  localparam int N_PE [3] = '{N_CLP, N_SLP, N_ALP};

  for (genvar c = 0; c < 3; c++) begin : g_chunk
    chunk #(.KIND(layer_type_e'(c)), .N_PE(N_PE[c]), .RF_DEPTH(RF_DEPTH)) u_chunk (
      .clk, .rst_n,
      .start       (ch_start[c]),
      .job         (ch_job[c]),
      .busy        (chunk_busy[c]),
      .done        (ch_done[c]),
      .gb_req_valid(c_gb_req_valid[c]),
      .gb_req      (c_gb_req[c]),
      .gb_req_ready(c_gb_req_ready[c]),
      .gb_rsp_valid(c_gb_rsp_valid[c]),
      .gb_rsp_data (c_gb_rsp_data),
      .w_req_valid (c_w_req_valid[c]),
      .w_req_addr  (c_w_req_addr[c]),
      .w_req_ready (c_w_req_ready[c]),
      .w_rsp_valid (c_w_rsp_valid[c]),
      .w_rsp_data  (c_w_rsp_data),
      .wload_evt   (wload_evt[c]),
      .sat_evt     (sat_evt[c])
    );
  end

  noc #(.N_CH(3), .W_OUTSTANDING(W_OUTSTANDING)) u_noc (
    .clk, .rst_n,
    .c_gb_req_valid, .c_gb_req, .c_gb_req_ready, .c_gb_rsp_valid, .c_gb_rsp_data,
    .c_w_req_valid, .c_w_req_addr, .c_w_req_ready, .c_w_rsp_valid, .c_w_rsp_data,
    .gb_req_valid(a_req_valid), .gb_req(a_req), .gb_rsp_valid(a_rsp_valid), .gb_rsp_data(a_rsp_data),
    .dw_req_valid, .dw_req_addr, .dw_req_ready, .dw_rsp_valid, .dw_rsp_data,
    .gb_conflict
  );

  global_buffer #(.DEPTH(GB_DEPTH)) u_gb (
    .clk, .rst_n,
    .a_req_valid, .a_req, .a_rsp_valid, .a_rsp_data,
    .b_req_valid, .b_req, .b_rsp_valid, .b_rsp_data
  );

  io_dma u_dma (
    .clk, .rst_n,
    .start(dma_start),
    .load_en(dma_load_en), .load_src(dma_load_src), .load_dst(dma_load_dst), .load_len(dma_load_len),
    .store_en(dma_store_en), .store_src(dma_store_src), .store_dst(dma_store_dst), .store_len(dma_store_len),
    .done(dma_done),
    .gb_req_valid(b_req_valid), .gb_req(b_req), .gb_rsp_valid(b_rsp_valid), .gb_rsp_data(b_rsp_data),
    .d_req_valid(dio_req_valid), .d_req(dio_req), .d_req_ready(dio_req_ready),
    .d_rsp_valid(dio_rsp_valid), .d_rsp_data(dio_rsp_data)
  );
endmodule
