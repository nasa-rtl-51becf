// global_buffer: the on-chip buffer shared by the three chunks.
//
// A dual-port memory of DEPTH 8-bit words, written as an array. Port A faces
// the NoC (chunk reads of layer inputs and writes of layer outputs); port B
// faces DRAM (network inputs loaded and network outputs stored by io_dma).
// Both ports accept a request every cycle; a read returns its word on
// *_rsp_data with *_rsp_valid one cycle later. If both ports write the same
// word in one cycle, port A's value is kept; the scheduler never lets that
// happen. The buffer's role and its two connections follow the paper; its
// size (64 Ki words) and port timing are this design's choice.
module global_buffer
  import nasa_pkg::*;
#(
  parameter int DEPTH = 65536
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_req_valid,
  input  gb_req_t          a_req,
  output logic             a_rsp_valid,
  output logic [ACT_W-1:0] a_rsp_data,
  input  logic             b_req_valid,
  input  gb_req_t          b_req,
  output logic             b_rsp_valid,
  output logic [ACT_W-1:0] b_rsp_data
);
  localparam int AW = $clog2(DEPTH);
  logic [ACT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_req_valid && b_req.we) mem[AW'(b_req.addr)] <= b_req.wdata;
    if (a_req_valid && a_req.we) mem[AW'(a_req.addr)] <= a_req.wdata;
  end

  always_ff @(posedge clk) begin
    a_rsp_data <= mem[AW'(a_req.addr)];
    b_rsp_data <= mem[AW'(b_req.addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rsp_valid <= 1'b0;
      b_rsp_valid <= 1'b0;
    end else begin
      a_rsp_valid <= a_req_valid && !a_req.we;
      b_rsp_valid <= b_req_valid && !b_req.we;
    end
  end
endmodule
