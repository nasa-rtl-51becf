// pipe_sched: the temporal schedule of the chunk-based accelerator.
//
// The network's layers are held in a table of MAX_LAYERS descriptors. Every
// layer is bound to the chunk of its type (CLP, SLP or ALP). Time is cut into
// pipeline steps; in a step every chunk runs, one after another, all of its
// layers that have a frame to work on, while the other chunks do the same on
// other frames. Layer l works in step j on frame j-1-l, so the output a layer
// writes in one step is read by the next layer in the next step, and three
// chunks run concurrently on independent frames. A step ends when all three
// chunks and the DRAM transfer engine are done; its length is set by the
// busiest chunk.
//   Step j also loads frame j's input from DRAM and stores the output of frame
//   j-1-L (L layers) to DRAM. Steps run from j = 0 to n_frames + L.
// Every layer boundary b (b = 0: network input, b = L: network output) gets
// two halves in the global buffer, picked by frame parity, so a layer writes
// one half while its consumer reads the other. Before the first step a setup
// pass (one boundary per cycle) lays out these regions and checks the
// configuration: window size (K odd), stride (1 or 2), output map size
// against input map size, depthwise n_out == n_in, layer chain shapes,
// K*K*(dw ? 1 : n_in) <= RF_DEPTH weights per PE, and total size <= GB_DEPTH. A bad configuration raises cfg_err and ends the run at once.
// Interface: write descriptors with cfg_we/cfg_idx/cfg_desc while idle, then
// pulse start; done pulses at the end. step_evt pulses at the end of every
// step and step_cycles then holds its length.
// From the paper (its Fig. 5 schedule): one chunk per layer type, layers of a
// chunk run in sequence within a step, chunks run concurrently on independent
// data, a layer's output is the next layer's input in the following step.
// This design's own: the double-buffered regions, the setup pass and the DMA
// timing.
module pipe_sched
  import nasa_pkg::*;
#(
  parameter int MAX_LAYERS = 72,
  parameter int RF_DEPTH   = 256,
  parameter int GB_DEPTH   = 65536
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // layer table
  input  logic                         cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_idx,
  input  layer_desc_t                  cfg_desc,
  // run control
  input  logic                         start,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] n_layers,
  input  logic [DIM_W-1:0]             n_frames,
  input  logic [DRAM_AW-1:0]           in_dram_base,
  input  logic [DRAM_AW-1:0]           out_dram_base,
  output logic                         busy,
  output logic                         done,
  output logic                         cfg_err,
  // chunks, indexed by layer type
  output logic      [2:0]              ch_start,
  output chunk_job_t                   ch_job [3],
  input  logic      [2:0]              ch_done,
  // DRAM transfer engine
  output logic                         dma_start,
  output logic                         dma_load_en,
  output logic [DRAM_AW-1:0]           dma_load_src,
  output logic [GB_AW-1:0]             dma_load_dst,
  output logic [GB_AW:0]               dma_load_len,
  output logic                         dma_store_en,
  output logic [GB_AW-1:0]             dma_store_src,
  output logic [DRAM_AW-1:0]           dma_store_dst,
  output logic [GB_AW:0]               dma_store_len,
  input  logic                         dma_done,
  // statistics
  output logic                         step_evt,
  output logic [31:0]                  step_cycles
);
  localparam int LW = $clog2(MAX_LAYERS);
  localparam int NW = $clog2(MAX_LAYERS + 1);
  localparam int SW = 50;   // sizes, wide enough for products of dimensions

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_STEP} state_e;
  typedef enum logic [1:0] {C_SCAN, C_RUN, C_FIN} cstate_e;

  layer_desc_t      tbl      [MAX_LAYERS];
  logic [GB_AW-1:0] bnd_base [MAX_LAYERS+1];
  logic [GB_AW-1:0] bnd_half [MAX_LAYERS+1];

  state_e         state;
  cstate_e        cst [3];
  logic [NW-1:0]  cur [3];
  logic [NW-1:0]  L, b;
  logic [DIM_W-1:0] nf;
  logic [DRAM_AW-1:0] in_base_r, out_base_r;
  logic [DIM_W:0] j;            // step index
  logic           dma_fin;
  logic [SW-1:0]  acc;
  logic [31:0]    cyc;          // cycles spent in the current step

  always_ff @(posedge clk) begin
    if (cfg_we && state == S_IDLE) tbl[cfg_idx] <= cfg_desc;
  end

  // ---------------------------------------------------------- setup pass
  layer_desc_t   d_prev, d_b;
  logic [SW-1:0] half_b, next_acc;
  logic          bad_b;
  logic [DIM_W-1:0] oh_b, ow_b;       // output map size implied by the input map
  logic [SW-1:0]    rl_b;             // weights per PE, K*K*(dw ? 1 : n_in)
  always_comb begin
    d_b    = tbl[LW'(b < L ? b : '0)];
    d_prev = tbl[LW'(b != '0 ? b - 1'b1 : '0)];
    if (b == '0) half_b = SW'(d_b.in_h) * SW'(d_b.in_w) * SW'(d_b.n_in);
    else         half_b = SW'(d_prev.n_pix) * SW'(d_prev.n_out);
    next_acc = acc + (half_b << 1);
    oh_b     = ((d_b.in_h - 1'b1) >> (d_b.stride == 2'd2)) + 1'b1;
    ow_b     = ((d_b.in_w - 1'b1) >> (d_b.stride == 2'd2)) + 1'b1;
    rl_b     = SW'(d_b.k_size) * SW'(d_b.k_size) * (d_b.dw ? SW'(1) : SW'(d_b.n_in));
    bad_b    = 1'b0;
    if (b < L) begin
      if (d_b.n_in == '0 || d_b.n_out == '0 || d_b.n_pix == '0) bad_b = 1'b1;
      if (d_b.in_h == '0 || d_b.in_w == '0) bad_b = 1'b1;
      if (!d_b.k_size[0] || (d_b.stride != 2'd1 && d_b.stride != 2'd2)) bad_b = 1'b1;
      if (d_b.out_w != ow_b || SW'(d_b.n_pix) != SW'(oh_b) * SW'(ow_b)) bad_b = 1'b1;
      if (d_b.dw && d_b.n_out != d_b.n_in) bad_b = 1'b1;
      if (rl_b > SW'(RF_DEPTH)) bad_b = 1'b1;
      if (d_b.ltype != LT_CONV && d_b.ltype != LT_SHIFT && d_b.ltype != LT_ADDER) bad_b = 1'b1;
      if (b != '0 && (d_b.n_in != d_prev.n_out || d_b.in_w != d_prev.out_w
                      || SW'(d_b.in_h) * SW'(d_b.in_w) != SW'(d_prev.n_pix))) bad_b = 1'b1;
    end
    if (next_acc > SW'(GB_DEPTH)) bad_b = 1'b1;
  end

  // ---------------------------------------------------------- jobs
  // Layer l is active in step j when its frame j-1-l lies in [0, n_frames).
  function automatic logic active(input logic [NW-1:0] l, input logic [DIM_W:0] jj,
                                  input logic [DIM_W-1:0] n);
    logic [DIM_W+1:0] f;
    f = {1'b0, jj} - (DIM_W+2)'(l) - 1'b1;
    return ({1'b0, jj} >= (DIM_W+2)'(l) + 1'b1) && (f < (DIM_W+2)'(n));
  endfunction

  logic [2:0] act;
  always_comb begin
    for (int c = 0; c < 3; c++) begin
      layer_desc_t d;
      logic [DIM_W:0] f;
      logic [LW-1:0] li;
      logic [NW-1:0] li1;
      li  = LW'(cur[c] < L ? cur[c] : '0);
      li1 = NW'(li) + 1'b1;
      d  = tbl[li];
      f  = j - (DIM_W+1)'(cur[c]) - 1'b1;
      act[c] = (cur[c] < L) && d.ltype == layer_type_e'(c) && active(cur[c], j, nf);
      ch_job[c].d        = d;
      ch_job[c].in_base  = bnd_base[li] + (f[0] ? bnd_half[li] : '0);
      ch_job[c].out_base = bnd_base[li1] + (f[0] ? bnd_half[li1] : '0);
      ch_start[c] = (state == S_STEP) && (cst[c] == C_SCAN) && act[c];
    end
  end

  // ---------------------------------------------------------- DRAM transfers
  logic [DIM_W:0] g;   // frame whose output is stored in step j
  always_comb begin
    g             = j - (DIM_W+1)'(L) - 1'b1;
    dma_load_en   = j < {1'b0, nf};
    dma_load_src  = DRAM_AW'(in_base_r + DRAM_AW'(j) * DRAM_AW'(bnd_half[0]));
    dma_load_dst  = bnd_base[0] + (j[0] ? bnd_half[0] : '0);
    dma_load_len  = {1'b0, bnd_half[0]};
    dma_store_en  = (j >= (DIM_W+1)'(L) + 1'b1) && (g < {1'b0, nf});
    dma_store_src = bnd_base[L] + (g[0] ? bnd_half[L] : '0);
    dma_store_dst = DRAM_AW'(out_base_r + DRAM_AW'(g) * DRAM_AW'(bnd_half[L]));
    dma_store_len = {1'b0, bnd_half[L]};
  end

  logic all_fin;
  assign all_fin = (cst[0] == C_FIN) && (cst[1] == C_FIN) && (cst[2] == C_FIN) && dma_fin;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      cfg_err     <= 1'b0;
      L           <= '0;
      b           <= '0;
      nf          <= '0;
      in_base_r   <= '0;
      out_base_r  <= '0;
      j           <= '0;
      acc         <= '0;
      dma_start   <= 1'b0;
      dma_fin     <= 1'b0;
      step_evt    <= 1'b0;
      step_cycles <= '0;
      cyc         <= '0;
      for (int c = 0; c < 3; c++) begin
        cst[c] <= C_FIN;
        cur[c] <= '0;
      end
      for (int k = 0; k <= MAX_LAYERS; k++) begin
        bnd_base[k] <= '0;
        bnd_half[k] <= '0;
      end
    end else begin
      done      <= 1'b0;
      dma_start <= 1'b0;
      step_evt  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          L          <= n_layers;
          nf         <= n_frames;
          in_base_r  <= in_dram_base;
          out_base_r <= out_dram_base;
          b          <= '0;
          acc        <= '0;
          cfg_err    <= 1'b0;
          if (n_layers == '0 || n_frames == '0) begin
            cfg_err <= 1'b1;
            done    <= 1'b1;
          end else begin
            state <= S_SETUP;
          end
        end

        S_SETUP: begin
          if (bad_b) begin
            cfg_err <= 1'b1;
            done    <= 1'b1;
            state   <= S_IDLE;
          end else begin
            bnd_base[b] <= GB_AW'(acc);
            bnd_half[b] <= GB_AW'(half_b);
            acc         <= next_acc;
            if (b == L) begin
              j           <= '0;
              state       <= S_STEP;
              dma_start   <= 1'b1;
              dma_fin     <= 1'b0;
              cyc         <= '0;
              for (int c = 0; c < 3; c++) begin
                cst[c] <= C_SCAN;
                cur[c] <= '0;
              end
            end else begin
              b <= b + 1'b1;
            end
          end
        end

        S_STEP: begin
          cyc <= cyc + 1;
          if (dma_done) dma_fin <= 1'b1;
          for (int c = 0; c < 3; c++) begin
            unique case (cst[c])
              C_SCAN: begin
                if (cur[c] >= L)  cst[c] <= C_FIN;
                else if (act[c])  cst[c] <= C_RUN;
                else              cur[c] <= cur[c] + 1'b1;
              end
              C_RUN: if (ch_done[c]) begin
                cur[c] <= cur[c] + 1'b1;
                cst[c] <= C_SCAN;
              end
              default: ;
            endcase
          end
          if (all_fin) begin
            step_evt    <= 1'b1;
            step_cycles <= cyc + 1;
            if (j == {1'b0, nf} + (DIM_W+1)'(L)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              j           <= j + 1'b1;
              dma_start   <= 1'b1;
              dma_fin     <= 1'b0;
              cyc         <= '0;
              for (int c = 0; c < 3; c++) begin
                cst[c] <= C_SCAN;
                cur[c] <= '0;
              end
            end
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
