// rr_arbiter: round-robin arbiter used by the routing, VC and switch allocators.
//
// grant is a one-hot (or zero) combinational function of req and an internal priority
// pointer. When advance is high at a clock edge and a grant was given, the pointer moves
// to the requester just after the winner, so every requester is served in turn.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx,
  output logic         any
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = (32'(ptr) + k) % N;
      if (!any && req[i]) begin
        any          = 1'b1;
        grant[i]     = 1'b1;
        grant_idx    = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ptr <= '0;
    else if (advance && any) ptr <= IW'((32'(grant_idx) + 1) % N);
endmodule
