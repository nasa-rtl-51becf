// rr_arbiter: round-robin arbiter used by the NoC.
//
// Grants one of N requesters per cycle, starting the search just after the
// requester granted last, so every requester is served within N grants.
// gnt_idx is combinational from req; the priority pointer moves only when
// advance is high (the granted request was accepted downstream).
module rr_arbiter #(
  parameter int N = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic                 gnt_any,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int IW = $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    gnt_any = 1'b0;
    gnt_idx = '0;
    for (int k = 1; k <= N; k++) begin
      logic [IW:0] c;
      c = (IW+1)'((int'(last) + k) % N);
      if (!gnt_any && req[IW'(c)]) begin
        gnt_any = 1'b1;
        gnt_idx = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last <= IW'(N - 1);
    else if (advance && gnt_any) last <= gnt_idx;
  end
endmodule
