// pe: one processing element of a chunk (CLP, SLP or ALP).
//
// Each PE holds its own register files: a weight RF of RF_DEPTH entries, an
// input register and a partial-sum register. The weight RF is written over
// the wrf_* port while the chunk loads a tile of weights. During compute the
// chunk broadcasts one activation per cycle with its reduction index k; the PE
// latches it in its input register, then reads W[k] from its RF, forms the
// term in its arithmetic unit (MAC, Shift Unit or Adder Unit, chosen by KIND)
// and adds it to the psum. in_first starts a new sum. The psum output holds
// the sum two cycles after the last activation was presented.
// The PE structure (W, Input, op, psum with feedback adder) follows the paper;
// the one-term-per-cycle timing and the RF depth are this design's choice.
// Shift and adder PEs use only the low 6 bits of a weight and of an
// activation (6-bit layers); lint reports the two upper bits unused there.
module pe
  import nasa_pkg::*;
#(
  parameter layer_type_e KIND     = LT_CONV,
  parameter int          RF_DEPTH = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight register-file write port
  input  logic                        wrf_we,
  input  logic [$clog2(RF_DEPTH)-1:0] wrf_addr,
  input  logic [WGT_W-1:0]            wrf_data,
  // broadcast activation
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic [$clog2(RF_DEPTH)-1:0] in_k,
  input  logic signed [ACT_W-1:0]     in_x,
  output logic signed [PSUM_W-1:0]    psum
);
  logic [WGT_W-1:0]         wrf [RF_DEPTH];
  logic signed [PSUM_W-1:0] term;
  logic [WGT_W-1:0]         w_k;
  // input register
  logic                        x_valid, x_first;
  logic [$clog2(RF_DEPTH)-1:0] x_k;
  logic signed [ACT_W-1:0]     x_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x_first <= 1'b0;
      x_k     <= '0;
      x_r     <= '0;
    end else begin
      x_valid <= in_valid;
      if (in_valid) begin
        x_first <= in_first;
        x_k     <= in_k;
        x_r     <= in_x;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wrf_we) wrf[wrf_addr] <= wrf_data;
  end

  assign w_k = wrf[x_k];

  generate
    if (KIND == LT_CONV) begin : g_mac
      mac_unit u_op (.x(x_r), .w(w_k), .term(term));
    end else if (KIND == LT_SHIFT) begin : g_shift
      shift_unit u_op (.x(x_r[LP_W-1:0]), .w(w_k[LP_W-1:0]), .term(term));
    end else begin : g_adder
      adder_unit u_op (.x(x_r[LP_W-1:0]), .w(w_k[LP_W-1:0]), .term(term));
    end
  endgenerate

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        psum <= '0;
    else if (x_valid) psum <= (x_first ? '0 : psum) + term;
  end
endmodule
