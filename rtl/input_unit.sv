// input_unit: one router input port with NUM_VC virtual-channel buffers.
//
// Each VC is IDLE, waiting for VC allocation (VA) or ACTIVE. Per cycle the port performs
// one routing computation (RC), round-robin among its IDLE VCs whose front flit is a
// head; the result (output port, output VC) is stored and the VC moves to VA. VC
// allocation happens outside (vc_allocator, va_grant); an ACTIVE VC competes in switch
// allocation outside, and sa_pop removes its front flit, which goes to the crossbar with
// its VC field rewritten to the allocated output VC. The VC returns to IDLE after its tail
// flit leaves. A packet routed to DROP (no valid Up*/Down* route) skips VA and SA and is
// drained one flit per cycle. freeze (router recovering) stops RC, so new head flits are
// frozen while flits of already-routed packets keep moving.
//
// Flow control: credit_out[v] pulses (registered) for every flit leaving VC v.
// Pipeline: a head written at edge t is routed in cycle t+1, VC-allocated in t+2 and
// switch-allocated in t+3 at the earliest. The four-stage pipeline and head-flit freeze
// are the paper's; one RC per port per cycle and the drop rule are this design's.
module input_unit
  import hermes_pkg::*;
#(
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned NODE_ID = 0,
  parameter int unsigned DEPTH   = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  flit_t                  in_flit,
  output logic [NUM_VC-1:0]      credit_out,
  input  logic                   freeze,
  input  logic [3:0]             port_faulty,
  // routing table read port
  output logic [ID_W-1:0]        tbl_dest,
  input  logic [3:0]             tbl_port,
  input  logic                   tbl_valid,
  // to the allocators
  output logic [NUM_VC-1:0]      va_req,
  output logic [NUM_VC-1:0]      vc_active,
  output logic [NUM_VC-1:0][2:0] vc_out_port,
  output logic [NUM_VC-1:0][1:0] vc_out_vc,
  output logic [NUM_VC-1:0]      vc_empty,
  input  logic [NUM_VC-1:0]      va_grant,
  input  logic [NUM_VC-1:0]      sa_pop,
  output flit_t                  pop_flit,     // flit of the VC popped by sa_pop
  // events
  output logic                   ev_escape,
  output logic                   ev_drop,
  output logic                   ev_frozen
);
  typedef enum logic [1:0] {VC_IDLE, VC_WAIT_VA, VC_ACTIVE} vc_state_e;

  vc_state_e                state  [NUM_VC];
  flit_t                    front  [NUM_VC];
  logic [NUM_VC-1:0]        rc_cand, rc_grant, rd_en, wr_en, drop_pop;
  logic [$clog2(NUM_VC)-1:0] rc_idx;
  logic                     rc_any;
  logic [2:0]               rc_port;
  logic [1:0]               rc_vc;
  logic                     rc_escape;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    assign wr_en[v] = in_flit.valid && (in_flit.vc == 2'(v));
    vc_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(wr_en[v]), .wr_flit(in_flit),
      .rd_en(rd_en[v]), .rd_flit(front[v]),
      .empty(vc_empty[v]), .full()
    );
    assign rc_cand[v]   = (state[v] == VC_IDLE) && !vc_empty[v] && !freeze;
    assign drop_pop[v]  = (state[v] == VC_ACTIVE) && (vc_out_port[v] == PORT_DROP) && !vc_empty[v];
    assign rd_en[v]     = sa_pop[v] || drop_pop[v];
    assign va_req[v]    = (state[v] == VC_WAIT_VA);
    assign vc_active[v] = (state[v] == VC_ACTIVE) && (vc_out_port[v] != PORT_DROP);
  end

  rr_arbiter #(.N(NUM_VC)) u_rc_arb (
    .clk, .rst_n, .req(rc_cand), .advance(1'b1),
    .grant(rc_grant), .grant_idx(rc_idx), .any(rc_any)
  );

  assign tbl_dest = head_dest(front[rc_idx]);

  route_compute #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NODE_ID(NODE_ID)) u_rc (
    .dest(tbl_dest), .in_vc(2'(rc_idx)), .port_faulty, .tbl_port, .tbl_valid,
    .out_port(rc_port), .out_vc(rc_vc), .escape(rc_escape)
  );

  always_comb begin
    pop_flit = '0;
    for (int v = 0; v < NUM_VC; v++)
      if (sa_pop[v]) begin
        pop_flit    = front[v];
        pop_flit.vc = vc_out_vc[v];
      end
  end

  assign ev_escape = rc_any && rc_escape;
  assign ev_drop   = rc_any && (rc_port == PORT_DROP);
  always_comb begin
    ev_frozen = 1'b0;
    for (int v = 0; v < NUM_VC; v++)
      if (freeze && state[v] == VC_IDLE && !vc_empty[v]) ev_frozen = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int v = 0; v < NUM_VC; v++) begin
        state[v]       <= VC_IDLE;
        vc_out_port[v] <= '0;
        vc_out_vc[v]   <= '0;
      end
      credit_out <= '0;
    end else begin
      credit_out <= rd_en;
      for (int v = 0; v < NUM_VC; v++) begin
        unique case (state[v])
          VC_IDLE:
            if (rc_grant[v]) begin
              vc_out_port[v] <= rc_port;
              vc_out_vc[v]   <= rc_vc;
              state[v]       <= (rc_port == PORT_DROP) ? VC_ACTIVE : VC_WAIT_VA;
            end
          VC_WAIT_VA:
            if (va_grant[v]) state[v] <= VC_ACTIVE;
          VC_ACTIVE:
            if (rd_en[v] && is_tail(front[v])) state[v] <= VC_IDLE;
          default: state[v] <= VC_IDLE;
        endcase
      end
    end

  // The routing unit only ever sees head flits at the front of an idle VC.
  always_ff @(posedge clk)
    if (rst_n)
      for (int v = 0; v < NUM_VC; v++)
        assert (!rc_grant[v] || is_head(front[v]))
          else $error("input_unit: non-head flit at the front of an idle VC");
endmodule
