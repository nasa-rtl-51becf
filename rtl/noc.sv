// noc: the network on chip between the global buffer, DRAM and the chunks.
//
// Two shared paths, each arbitrated round-robin among the N_CH chunks:
//   buffer path  one chunk request per cycle goes to global-buffer port A;
//                a read's word comes back one cycle later and is steered to
//                the chunk that asked (the owner is registered with the grant).
//   weight path  one chunk weight read per cycle goes to the DRAM weight port;
//                DRAM answers in order after any latency, so the owner of
//                every outstanding read is kept in a FIFO of W_OUTSTANDING
//                entries and popped with each answer.
// A chunk's ready is high only in the cycle its request is taken. Response
// data are broadcast to all chunks unchanged; only the valid is steered.
// gb_conflict is high in cycles where more than one chunk wants the buffer,
// which is when chunks compete for it.
// From the paper: the NoC bridges the global buffer and the PE arrays and
// reads weights directly from DRAM. The arbitration, port widths and FIFO
// are this design's choice.
// The concurrent assertions use rst_n as a synchronous disable while the
// flops use it as an asynchronous reset; lint reports that mix
// (SYNCASYNCNET) and it is intended.
module noc
  import nasa_pkg::*;
#(
  parameter int N_CH          = 3,
  parameter int W_OUTSTANDING = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // chunk side, buffer path
  input  logic      [N_CH-1:0]     c_gb_req_valid,
  input  gb_req_t                  c_gb_req [N_CH],
  output logic      [N_CH-1:0]     c_gb_req_ready,
  output logic      [N_CH-1:0]     c_gb_rsp_valid,
  output logic      [ACT_W-1:0]    c_gb_rsp_data,
  // chunk side, weight path
  input  logic      [N_CH-1:0]     c_w_req_valid,
  input  logic      [DRAM_AW-1:0]  c_w_req_addr [N_CH],
  output logic      [N_CH-1:0]     c_w_req_ready,
  output logic      [N_CH-1:0]     c_w_rsp_valid,
  output logic      [WGT_W-1:0]    c_w_rsp_data,
  // global buffer port A
  output logic                     gb_req_valid,
  output gb_req_t                  gb_req,
  input  logic                     gb_rsp_valid,
  input  logic      [ACT_W-1:0]    gb_rsp_data,
  // DRAM weight port
  output logic                     dw_req_valid,
  output logic      [DRAM_AW-1:0]  dw_req_addr,
  input  logic                     dw_req_ready,
  input  logic                     dw_rsp_valid,
  input  logic      [WGT_W-1:0]    dw_rsp_data,
  // event
  output logic                     gb_conflict
);
  localparam int IW = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int FW = $clog2(W_OUTSTANDING);

  // ---------------------------------------------------------- buffer path
  logic          g_any;
  logic [IW-1:0] g_idx;
  logic [IW-1:0] rsp_owner;

  rr_arbiter #(.N(N_CH)) u_arb_gb (
    .clk, .rst_n, .req(c_gb_req_valid), .advance(1'b1),
    .gnt_any(g_any), .gnt_idx(g_idx)
  );

  always_comb begin
    gb_req_valid   = g_any;
    gb_req         = c_gb_req[g_idx];
    c_gb_req_ready = '0;
    if (g_any) c_gb_req_ready[g_idx] = 1'b1;
    c_gb_rsp_valid = '0;
    if (gb_rsp_valid) c_gb_rsp_valid[rsp_owner] = 1'b1;
    c_gb_rsp_data  = gb_rsp_data;
    gb_conflict    = (c_gb_req_valid & (c_gb_req_valid - 1'b1)) != '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rsp_owner <= '0;
    else if (g_any) rsp_owner <= g_idx;
  end

  // ---------------------------------------------------------- weight path
  logic          w_any;
  logic [IW-1:0] w_idx;
  logic [IW-1:0] fifo [W_OUTSTANDING];
  logic [FW-1:0] wp, rp;
  logic [FW:0]   cnt;
  logic          full, push, pop;

  assign full = (cnt == (FW+1)'(W_OUTSTANDING));

  rr_arbiter #(.N(N_CH)) u_arb_w (
    .clk, .rst_n, .req(c_w_req_valid), .advance(push),
    .gnt_any(w_any), .gnt_idx(w_idx)
  );

  always_comb begin
    dw_req_valid  = w_any && !full;
    dw_req_addr   = c_w_req_addr[w_idx];
    push          = dw_req_valid && dw_req_ready;
    pop           = dw_rsp_valid;
    c_w_req_ready = '0;
    if (push) c_w_req_ready[w_idx] = 1'b1;
    c_w_rsp_valid = '0;
    if (dw_rsp_valid) c_w_rsp_valid[fifo[rp]] = 1'b1;
    c_w_rsp_data  = dw_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == FW'(W_OUTSTANDING - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == FW'(W_OUTSTANDING - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= w_idx;
  end

  a_no_orphan_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> cnt != '0)
    else $error("noc: DRAM answered with nothing outstanding");
  // A chunk request that is not taken must stay up: the chunk holds it.
  for (genvar i = 0; i < N_CH; i++) begin : g_chk
    a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
      c_w_req_valid[i] && !c_w_req_ready[i] |=> c_w_req_valid[i])
      else $error("noc: weight request dropped before acceptance");
  end
endmodule
