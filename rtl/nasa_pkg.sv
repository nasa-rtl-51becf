// nasa_pkg: types and constants shared by the chunk-based hybrid-DNN accelerator.
//
// Word widths follow the quantisation used for the hybrid models: 8-bit
// activations and weights for convolution layers, 6-bit for shift and adder
// layers. Activations live in the global buffer as 8-bit words and weights in
// DRAM as 8-bit words; shift and adder layers use the low 6 bits of a weight.
// The descriptor formats, the partial-sum width and the shift-weight encoding
// are this design's own choices.
package nasa_pkg;

  localparam int ACT_W      = 8;   // activation word in the global buffer
  localparam int WGT_W      = 8;   // weight word in DRAM
  localparam int LP_W       = 6;   // activation/weight width in shift and adder layers
  localparam int PSUM_W     = 32;  // partial-sum width in every PE
  localparam int SHIFT_FRAC = 15;  // fractional bits of a shift-layer partial sum
  localparam int DIM_W      = 16;  // layer dimension fields
  localparam int GB_AW      = 16;  // global-buffer word address
  localparam int DRAM_AW    = 24;  // DRAM byte address

  // Layer type T of a candidate block: convolution, shift or adder.
  typedef enum logic [1:0] {
    LT_CONV  = 2'd0,
    LT_SHIFT = 2'd1,
    LT_ADDER = 2'd2
  } layer_type_e;

  // Loop order a chunk uses for a layer: weight stationary keeps one tile
  // of weights in the PE register files for all pixels, output stationary
  // walks pixels outermost and reloads the weights for every pixel.
  typedef enum logic {
    LO_WS = 1'b0,
    LO_OS = 1'b1
  } loop_order_e;

  // One layer as the scheduler stores it. The input is an in_h x in_w map of
  // n_in channels, X[y][x][c]; the output has n_pix = out_h*out_w pixels of
  // n_out channels. With a K x K window (K = k_size, "same" zero padding of
  // (K-1)/2, stride 1 or 2), output pixel (oy,ox) and channel o get
  //   dense:     Y = sum_{ky,kx,c} f_T(X[oy*s+ky-pad][ox*s+kx-pad][c], W[o][ky][kx][c])
  //   depthwise: Y = sum_{ky,kx}   f_T(X[oy*s+ky-pad][ox*s+kx-pad][o], W[o][ky][kx])
  // with f_CONV = x*w, f_SHIFT = +-x*2^-p and f_ADDER = -|x-w|. A 1x1 layer
  // (K = 1, stride 1) is a per-pixel reduction, a fully connected layer is
  // a 1x1 layer on a 1x1 map. Weights are stored with c innermost.
  typedef struct packed {
    layer_type_e        ltype;
    loop_order_e        order;
    logic [DIM_W-1:0]   n_in;
    logic [DIM_W-1:0]   n_out;
    logic [DIM_W-1:0]   n_pix;
    logic [DRAM_AW-1:0] w_base;     // W[o][k] at w_base + o*R + k, R = K*K*(dw ? 1 : n_in)
    logic [5:0]         out_shift;  // arithmetic right shift of the psum
    logic [3:0]         out_bits;   // signed saturation width, 2..8
    logic               relu;
    logic [2:0]         k_size;     // K: 1, 3, 5 or 7
    logic [1:0]         stride;     // 1 or 2
    logic               dw;         // depthwise (needs n_out == n_in)
    logic [DIM_W-1:0]   in_h;       // input map height
    logic [DIM_W-1:0]   in_w;       // input map width
    logic [DIM_W-1:0]   out_w;      // output map width, (in_w-1)/stride+1
  } layer_desc_t;

  // A layer handed to one chunk, with its global-buffer regions.
  typedef struct packed {
    layer_desc_t      d;
    logic [GB_AW-1:0] in_base;   // X[y][x][c] at in_base + (y*in_w + x)*n_in + c
    logic [GB_AW-1:0] out_base;  // Y[p][o] at out_base + p*n_out + o
  } chunk_job_t;

  // Request on a global-buffer port. Reads answer one cycle after acceptance.
  typedef struct packed {
    logic             we;
    logic [GB_AW-1:0] addr;
    logic [ACT_W-1:0] wdata;
  } gb_req_t;

  // Request on a DRAM port. Reads answer in order, after any latency.
  typedef struct packed {
    logic               we;
    logic [DRAM_AW-1:0] addr;
    logic [WGT_W-1:0]   wdata;
  } dram_req_t;

endpackage
