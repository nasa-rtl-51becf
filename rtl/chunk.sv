// chunk: one sub-processor of the accelerator -- CLP, SLP or ALP by KIND.
//
// A chunk is an array of N_PE processing elements of one kind plus the loop
// controller that runs a layer on them (see nasa_pkg::layer_desc_t for the
// layer arithmetic: K x K windows with zero padding, stride 1 or 2, dense or
// depthwise). Output channels are cut into tiles of N_PE; PE i of a tile
// starting at channel tb owns channel tb+i and keeps that channel's whole
// weight row, R = K*K*(dw ? 1 : n_in) words, in its register file.
//   LOADW  fetch the R weights of every active PE from DRAM, through the NoC
//          weight port, into the PE weight register files;
//   COMP   for the current output pixel walk the window (ky, kx) and the
//          channels c, one global-buffer read per cycle through the NoC.
//          Dense: every word is broadcast to all PEs of the tile (reduction
//          index (ky*K+kx)*n_in+c). Depthwise: the c loop runs over the
//          tile's channels and word c goes to PE c only (index ky*K+kx).
//          Taps outside the input map still issue a (harmless) read to keep
//          the response order simple; their data are replaced by zero;
//   DRAIN  one cycle for the PE pipeline to settle;
//   WRITE  requantise each active PE's psum and write it to Y[p][tb+i].
// The loop order is chosen per layer: weight stationary (tile outer, pixel
// inner, weights loaded once per tile) or output stationary (pixel outer,
// weights reloaded for every pixel and tile).
// Interface: pulse start with job valid while idle; done pulses for one
// cycle when the layer is finished. Both memory ports use valid/ready
// requests; responses come in request order (GB: one cycle, DRAM: any
// latency). The scheduler guarantees R <= RF_DEPTH and consistent sizes.
// Shift and adder chunks saturate incoming activations to 6 bits.
// Timing: a tile costs R weight reads, and every pixel of it K*K*n_in reads
// (dense) or K*K*n_act reads (depthwise) plus n_act writes, one per cycle when
// the NoC grants every cycle.
// From the paper: the three chunk kinds, their PE types, per-PE register
// files, weights read from DRAM through the NoC, activations from the global
// buffer, a loop order per layer. This design's own: the tiling, the window
// walk, the two loop orders built (the paper also searches row and input
// stationary, not built here), the one-word-per-cycle NoC ports, and the
// requantisation. The concurrent assertions use rst_n as a synchronous
// disable while the flops use it as an asynchronous reset; lint reports that
// mix (SYNCASYNCNET) and it is intended.
module chunk
  import nasa_pkg::*;
#(
  parameter layer_type_e KIND     = LT_CONV,
  parameter int          N_PE     = 24,
  parameter int          RF_DEPTH = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // job control
  input  logic                      start,
  input  chunk_job_t                job,
  output logic                      busy,
  output logic                      done,
  // global-buffer port (through the NoC)
  output logic                      gb_req_valid,
  output gb_req_t                   gb_req,
  input  logic                      gb_req_ready,
  input  logic                      gb_rsp_valid,
  input  logic [ACT_W-1:0]          gb_rsp_data,
  // weight port (DRAM through the NoC)
  output logic                      w_req_valid,
  output logic [DRAM_AW-1:0]        w_req_addr,
  input  logic                      w_req_ready,
  input  logic                      w_rsp_valid,
  input  logic [WGT_W-1:0]          w_rsp_data,
  // events
  output logic                      wload_evt,   // a weight tile load started
  output logic                      sat_evt      // a written output saturated
);
  localparam int KW = $clog2(RF_DEPTH);
  localparam int OW = $clog2(N_PE + 1);
  localparam int CW = DIM_W + 3;   // signed map coordinates

  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_COMP, S_DRAIN, S_WRITE} state_e;
  state_e state;

  chunk_job_t        j;
  logic [DIM_W-1:0]  tb;       // first output channel of the tile
  logic [DIM_W-1:0]  p;        // output pixel
  logic [DIM_W-1:0]  oy, ox;   // its position in the output map
  logic [DIM_W:0]    iss_k, rcv_k;   // weight word counters (LOADW)
  logic [OW-1:0]     iss_o, rcv_o, wr_o;
  logic [OW-1:0]     n_act;
  logic [DIM_W:0]    rem_out;
  logic              last_tile, last_pix;
  logic [DIM_W:0]    red_len;  // R, weights per PE
  logic [DIM_W-1:0]  n_c;      // length of the innermost (channel) loop
  logic [2:0]        pad;
  // window walk, issue side and receive side
  logic [DIM_W-1:0]  i_c, r_c;
  logic [2:0]        i_kx, i_ky, r_kx, r_ky;
  logic              i_done;
  logic [KW-1:0]     r_lin;

  always_comb begin
    rem_out   = {1'b0, j.d.n_out} - {1'b0, tb};
    n_act     = (rem_out < (DIM_W+1)'(N_PE)) ? OW'(rem_out) : OW'(N_PE);
    last_tile = rem_out <= (DIM_W+1)'(N_PE);
    last_pix  = ({1'b0, p} + 1'b1) >= {1'b0, j.d.n_pix};
    red_len   = (DIM_W+1)'(j.d.k_size) * (DIM_W+1)'(j.d.k_size)
                * (j.d.dw ? (DIM_W+1)'(1) : {1'b0, j.d.n_in});
    n_c       = j.d.dw ? DIM_W'(n_act) : j.d.n_in;
    pad       = (j.d.k_size - 3'd1) >> 1;
  end

  // input-map coordinate of a tap; out of the map means zero padding
  function automatic logic signed [CW-1:0] tap(input logic [DIM_W-1:0] o,
                                               input logic [1:0] s,
                                               input logic [2:0] k,
                                               input logic [2:0] pd);
    return $signed(CW'(o) * CW'(s)) + $signed(CW'(k)) - $signed(CW'(pd));
  endfunction

  // next output pixel in raster order
  logic [DIM_W-1:0] nxt_ox, nxt_oy;
  always_comb begin
    nxt_ox = ox + 1'b1;
    nxt_oy = oy;
    if (nxt_ox == j.d.out_w) begin
      nxt_ox = '0;
      nxt_oy = oy + 1'b1;
    end
  end

  logic signed [CW-1:0] i_iy, i_ix, r_iy, r_ix;
  logic                 i_in_map, r_in_map;
  always_comb begin
    i_iy     = tap(oy, j.d.stride, i_ky, pad);
    i_ix     = tap(ox, j.d.stride, i_kx, pad);
    r_iy     = tap(oy, j.d.stride, r_ky, pad);
    r_ix     = tap(ox, j.d.stride, r_kx, pad);
    i_in_map = (i_iy >= 0) && (i_iy < $signed(CW'(j.d.in_h)))
            && (i_ix >= 0) && (i_ix < $signed(CW'(j.d.in_w)));
    r_in_map = (r_iy >= 0) && (r_iy < $signed(CW'(j.d.in_h)))
            && (r_ix >= 0) && (r_ix < $signed(CW'(j.d.in_w)));
  end

  // ---------------------------------------------------------------- PE array
  logic signed [PSUM_W-1:0] psum [N_PE];
  logic                     bc_valid, bc_first;
  logic [KW-1:0]            bc_k;
  logic signed [ACT_W-1:0]  bc_x;

  always_comb begin
    bc_valid = (state == S_COMP) && gb_rsp_valid;
    bc_first = (r_lin == '0);
    bc_k     = r_lin;
    bc_x     = r_in_map ? $signed(gb_rsp_data) : '0;
    if (KIND != LT_CONV) begin
      if (bc_x > $signed(ACT_W'(2**(LP_W-1) - 1)))   bc_x = ACT_W'(2**(LP_W-1) - 1);
      else if (bc_x < -$signed(ACT_W'(2**(LP_W-1)))) bc_x = -ACT_W'(2**(LP_W-1));
    end
  end

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pe #(.KIND(KIND), .RF_DEPTH(RF_DEPTH)) u_pe (
      .clk, .rst_n,
      .wrf_we  (state == S_LOADW && w_rsp_valid && rcv_o == OW'(i)),
      .wrf_addr(KW'(rcv_k)),
      .wrf_data(w_rsp_data),
      .in_valid(bc_valid && (!j.d.dw || r_c == DIM_W'(i))),
      .in_first(bc_first),
      .in_k    (bc_k),
      .in_x    (bc_x),
      .psum    (psum[i])
    );
  end

  // ------------------------------------------------------------ requantise
  localparam int SW = (N_PE > 1) ? $clog2(N_PE) : 1;
  logic [ACT_W-1:0] q_y;
  logic             q_sat;
  logic [SW-1:0]    wr_sel;
  assign wr_sel = (wr_o < OW'(N_PE)) ? SW'(wr_o) : '0;
  requant u_rq (
    .psum(psum[wr_sel]), .out_shift(j.d.out_shift),
    .out_bits(j.d.out_bits), .relu(j.d.relu), .y(q_y), .saturated(q_sat)
  );

  // ------------------------------------------------------------ requests
  logic [DIM_W-1:0] i_ch;   // input channel of the issued tap
  always_comb begin
    i_ch         = j.d.dw ? tb + i_c : i_c;
    w_req_valid  = (state == S_LOADW) && (iss_o < n_act);
    w_req_addr   = DRAM_AW'(j.d.w_base + (DRAM_AW'(tb) + DRAM_AW'(iss_o)) * DRAM_AW'(red_len)
                            + DRAM_AW'(iss_k));
    gb_req_valid = 1'b0;
    gb_req       = '0;
    if (state == S_COMP && !i_done) begin
      gb_req_valid = 1'b1;
      gb_req.addr  = j.in_base;
      if (i_in_map)
        gb_req.addr = GB_AW'(j.in_base
                             + (GB_AW'(i_iy) * GB_AW'(j.d.in_w) + GB_AW'(i_ix)) * GB_AW'(j.d.n_in)
                             + GB_AW'(i_ch));
    end else if (state == S_WRITE) begin
      gb_req_valid = 1'b1;
      gb_req.we    = 1'b1;
      gb_req.addr  = GB_AW'(j.out_base + GB_AW'(p) * GB_AW'(j.d.n_out) + GB_AW'(tb) + GB_AW'(wr_o));
      gb_req.wdata = q_y;
    end
  end

  assign busy    = (state != S_IDLE);
  assign sat_evt = (state == S_WRITE) && gb_req_ready && q_sat;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      j         <= '0;
      tb        <= '0;
      p         <= '0;
      oy        <= '0;
      ox        <= '0;
      iss_k     <= '0;
      rcv_k     <= '0;
      iss_o     <= '0;
      rcv_o     <= '0;
      wr_o      <= '0;
      i_c       <= '0;
      i_kx      <= '0;
      i_ky      <= '0;
      i_done    <= 1'b0;
      r_c       <= '0;
      r_kx      <= '0;
      r_ky      <= '0;
      r_lin     <= '0;
      done      <= 1'b0;
      wload_evt <= 1'b0;
    end else begin
      done      <= 1'b0;
      wload_evt <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          j         <= job;
          tb        <= '0;
          p         <= '0;
          oy        <= '0;
          ox        <= '0;
          iss_k     <= '0;
          rcv_k     <= '0;
          iss_o     <= '0;
          rcv_o     <= '0;
          state     <= S_LOADW;
          wload_evt <= 1'b1;
        end

        S_LOADW: begin
          if (w_req_valid && w_req_ready) begin
            if (iss_k + 1'b1 == red_len) begin
              iss_k <= '0;
              iss_o <= iss_o + 1'b1;
            end else begin
              iss_k <= iss_k + 1'b1;
            end
          end
          if (w_rsp_valid) begin
            if (rcv_k + 1'b1 == red_len) begin
              rcv_k <= '0;
              rcv_o <= rcv_o + 1'b1;
              if (rcv_o + 1'b1 == n_act) state <= S_COMP;
            end else begin
              rcv_k <= rcv_k + 1'b1;
            end
          end
        end

        S_COMP: begin
          if (gb_req_valid && gb_req_ready) begin
            if (i_c + 1'b1 != n_c) i_c <= i_c + 1'b1;
            else begin
              i_c <= '0;
              if (i_kx + 1'b1 != j.d.k_size) i_kx <= i_kx + 1'b1;
              else begin
                i_kx <= '0;
                if (i_ky + 1'b1 != j.d.k_size) i_ky <= i_ky + 1'b1;
                else begin
                  i_ky   <= '0;
                  i_done <= 1'b1;
                end
              end
            end
          end
          if (gb_rsp_valid) begin
            if (!j.d.dw || r_c + 1'b1 == n_c) r_lin <= r_lin + 1'b1;
            if (r_c + 1'b1 != n_c) r_c <= r_c + 1'b1;
            else begin
              r_c <= '0;
              if (r_kx + 1'b1 != j.d.k_size) r_kx <= r_kx + 1'b1;
              else begin
                r_kx <= '0;
                if (r_ky + 1'b1 != j.d.k_size) r_ky <= r_ky + 1'b1;
                else begin
                  r_ky  <= '0;
                  r_lin <= '0;
                  state <= S_DRAIN;
                end
              end
            end
          end
        end

        S_DRAIN: begin
          wr_o   <= '0;
          i_done <= 1'b0;
          state  <= S_WRITE;
        end

        S_WRITE: if (gb_req_ready) begin
          if (wr_o + 1'b1 == n_act) begin
            iss_k <= '0;
            rcv_k <= '0;
            iss_o <= '0;
            rcv_o <= '0;
            if (j.d.order == LO_WS) begin
              if (!last_pix) begin
                p     <= p + 1'b1;
                ox <= nxt_ox;
                oy <= nxt_oy;
                state <= S_COMP;
              end else if (!last_tile) begin
                p         <= '0;
                oy        <= '0;
                ox        <= '0;
                tb        <= tb + DIM_W'(N_PE);
                state     <= S_LOADW;
                wload_evt <= 1'b1;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end else begin
              if (!last_tile) begin
                tb        <= tb + DIM_W'(N_PE);
                state     <= S_LOADW;
                wload_evt <= 1'b1;
              end else if (!last_pix) begin
                tb        <= '0;
                p         <= p + 1'b1;
                ox <= nxt_ox;
                oy <= nxt_oy;
                state     <= S_LOADW;
                wload_evt <= 1'b1;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          end else begin
            wr_o <= wr_o + 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // A response must never arrive for a request that was not made.
  a_w_rsp_in_loadw: assert property (@(posedge clk) disable iff (!rst_n)
    w_rsp_valid |-> state == S_LOADW)
    else $error("chunk: weight response outside LOADW");
  a_gb_rsp_in_comp: assert property (@(posedge clk) disable iff (!rst_n)
    gb_rsp_valid |-> state == S_COMP)
    else $error("chunk: buffer response outside COMP");
endmodule
