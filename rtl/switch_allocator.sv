// switch_allocator: separable input-first switch allocator.
//
// Stage 1: each input port picks one of its requesting VCs (round-robin). Stage 2: each
// output port picks one of the input ports whose chosen VC targets it (round-robin). The
// winners may send one flit each through the crossbar in the next cycle. A VC requests
// only if it is active, has a flit and its output VC has a credit (checked by the
// caller). Arbiter pointers move only for winners. Combinational outputs.
module switch_allocator
  import hermes_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_PORTS,
  parameter int unsigned NVC    = NUM_VC
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [NPORTS-1:0][NVC-1:0]       req,
  input  logic [NPORTS-1:0][NVC-1:0][2:0]  req_port,
  output logic [NPORTS-1:0][NVC-1:0]       vc_grant,   // one-hot per input port
  output logic [NPORTS-1:0]                out_valid,
  output logic [NPORTS-1:0][2:0]           out_sel     // input port feeding each output
);
  localparam int unsigned VW = $clog2(NVC > 1 ? NVC : 2);
  localparam int unsigned PW = $clog2(NPORTS > 1 ? NPORTS : 2);

  logic [NPORTS-1:0][NVC-1:0] s1_grant;
  logic [NPORTS-1:0][VW-1:0]  s1_idx;
  logic [NPORTS-1:0]          s1_any, in_won;
  logic [NPORTS-1:0][2:0]     s1_port;
  logic [NPORTS-1:0][NPORTS-1:0] s2_req, s2_grant;
  logic [NPORTS-1:0][PW-1:0]  s2_idx;

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    rr_arbiter #(.N(NVC)) u_arb (
      .clk, .rst_n, .req(req[i]), .advance(in_won[i]),
      .grant(s1_grant[i]), .grant_idx(s1_idx[i]), .any(s1_any[i])
    );
    assign s1_port[i] = req_port[i][s1_idx[i]];
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    for (genvar i = 0; i < NPORTS; i++) begin : g_r
      assign s2_req[o][i] = s1_any[i] && (32'(s1_port[i]) == o);
    end
    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(s2_req[o]), .advance(1'b1),
      .grant(s2_grant[o]), .grant_idx(s2_idx[o]), .any(out_valid[o])
    );
    assign out_sel[o] = 3'(s2_idx[o]);
  end

  always_comb begin
    in_won = '0;
    for (int o = 0; o < NPORTS; o++) in_won |= s2_grant[o];
    for (int i = 0; i < NPORTS; i++)
      vc_grant[i] = in_won[i] ? s1_grant[i] : '0;
  end
endmodule
