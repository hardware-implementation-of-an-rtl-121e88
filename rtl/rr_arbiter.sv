// rr_arbiter: round-robin arbiter.  Grants one of N requesters per cycle,
// starting the search just after the requester granted last, so every
// requester is served within N grants.  grant is combinational from req;
// the pointer moves only when 'advance' is high (the grant was used).
// This is the fair and deterministic scheduling scheme named for the OPC UA
// engine; round-robin is this design's choice of such a scheme.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx,
  output logic                 any
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    grant = '0;
    grant_idx = '0;
    any = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (!any && req[i]) begin
        any = 1'b1;
        grant[i] = 1'b1;
        grant_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (advance && any) last <= grant_idx;
  end
endmodule
