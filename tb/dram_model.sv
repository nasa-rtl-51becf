// dram_model: behavioural model of the off-chip DRAM, for simulation only.
//
// Not synthesizable design: it stands in for the external memory. It has the
// accelerator's two DRAM ports: a read-only weight port and an input/output
// port that reads and writes. Each port accepts a request in a cycle unless
// the model stalls it (with probability STALL_PCT percent), and answers a read
// LAT cycles after acceptance, in order. The memory holds DEPTH bytes; the
// address wraps. Testbenches fill and inspect mem directly.
module dram_model
  import nasa_pkg::*;
#(
  parameter int DEPTH     = 1 << 18,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 20
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_req_valid,
  input  logic [DRAM_AW-1:0] w_req_addr,
  output logic               w_req_ready,
  output logic               w_rsp_valid,
  output logic [WGT_W-1:0]   w_rsp_data,
  input  logic               io_req_valid,
  input  dram_req_t          io_req,
  output logic               io_req_ready,
  output logic               io_rsp_valid,
  output logic [WGT_W-1:0]   io_rsp_data
);
  logic [WGT_W-1:0] mem [DEPTH];
  logic [LAT-1:0]   w_v, io_v;
  logic [WGT_W-1:0] w_d  [LAT];
  logic [WGT_W-1:0] io_d [LAT];
  int unsigned stalls;

  assign w_rsp_valid  = w_v[LAT-1];
  assign w_rsp_data   = w_d[LAT-1];
  assign io_rsp_valid = io_v[LAT-1];
  assign io_rsp_data  = io_d[LAT-1];

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_req_ready  <= 1'b0;
      io_req_ready <= 1'b0;
    end else begin
      w_req_ready  <= ($urandom_range(99) >= STALL_PCT);
      io_req_ready <= ($urandom_range(99) >= STALL_PCT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_v    <= '0;
      io_v   <= '0;
      stalls <= 0;
    end else begin
      w_v  <= {w_v[LAT-2:0],  w_req_valid && w_req_ready};
      io_v <= {io_v[LAT-2:0], io_req_valid && io_req_ready && !io_req.we};
      for (int i = LAT - 1; i > 0; i--) begin
        w_d[i]  <= w_d[i-1];
        io_d[i] <= io_d[i-1];
      end
      w_d[0]  <= mem[w_req_addr % DEPTH];
      io_d[0] <= mem[io_req.addr % DEPTH];
      if (io_req_valid && io_req_ready && io_req.we) mem[io_req.addr % DEPTH] <= io_req.wdata;
      if ((w_req_valid && !w_req_ready) || (io_req_valid && !io_req_ready)) stalls <= stalls + 1;
    end
  end
endmodule
