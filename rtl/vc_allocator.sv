// vc_allocator: virtual-channel allocator of a NUM_PORTS x NUM_VC router.
//
// Requester r = port*NUM_VC + vc is an input VC whose head flit has been routed; it asks
// for exactly one output VC (req_port, req_vc), because Hermes fixes the VC class by the
// routing function (XY, YX or Up*/Down*). Every output VC that is not busy (still held
// by an earlier packet) is granted to one of its requesters by a round-robin arbiter.
// Combinational grant; the arbiters' pointers move at the clock edge.
module vc_allocator
  import hermes_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_PORTS,
  parameter int unsigned NVC    = NUM_VC,
  localparam int unsigned R = NPORTS*NVC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [R-1:0]      req,
  input  logic [R-1:0][2:0] req_port,
  input  logic [R-1:0][1:0] req_vc,
  input  logic [R-1:0]      busy,       // output VC o = port*NVC + vc is held
  output logic [R-1:0]      grant
);
  logic [R-1:0][R-1:0] cand, g;

  for (genvar o = 0; o < R; o++) begin : g_out
    for (genvar r = 0; r < R; r++) begin : g_req
      assign cand[o][r] = req[r] && !busy[o] &&
                          (32'(req_port[r]) == o / NVC) && (32'(req_vc[r]) == o % NVC);
    end
    rr_arbiter #(.N(R)) u_arb (
      .clk, .rst_n, .req(cand[o]), .advance(1'b1), .grant(g[o]), .grant_idx(), .any()
    );
  end

  always_comb begin
    grant = '0;
    for (int o = 0; o < R; o++) grant |= g[o];
  end
endmodule
