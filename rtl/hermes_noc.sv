// hermes_noc: MESH_X x MESH_Y mesh network-on-chip with Hermes fault-tolerant routing.
//
// Each node is a hermes_router plus a network_interface. Neighbouring routers are joined
// by a data link (flits one way, per-VC credits the other way; the router's registered
// output is the one-cycle link stage) and by the 2-bit flag overlay (DRF, AF) carried on
// three lanes and majority-voted by a tmr_flag_link at the receiver. One
// global_clock_counter is shared by all routers: it time-slots the reconfiguration so
// that every node broadcasts once per N^2 cycles.
//
// Faults. link_faulty_h[y*(MESH_X-1)+x] marks the link between (x,y) and (x+1,y),
// link_faulty_v[y*MESH_X+x] the link between (x,y) and (x,y+1); a faulty link is unusable
// in both directions (the bidirectional Up*/Down* variant the design builds). When a
// link's fault bit rises, both routers it joins note a pending fault; the first of them
// whose broadcast window comes starts a reconfiguration, which freezes the network for
// N^2 cycles and rebuilds every Up*/Down* table. Fault detection itself is outside this
// design: the fault bits are inputs. flag_lane_fault[n][d] inverts one of the three lanes
// of the flag link arriving at node n from direction d, to model a broken overlay wire.
// Mesh-edge ports are tied faulty, so no flags or flits leave the mesh.
//
// Tile interface per node n: req_* injects a packet (see network_interface), rx_*
// reports a received packet. Status per node: sr (recovering), ar (alert), port_dir
// (up/down registers), reach_mask (destinations with a valid Up*/Down* route: partition
// information), and event pulses for testing and statistics.
module hermes_noc
  import hermes_pkg::*;
#(
  parameter int unsigned MESH_X    = 8,
  parameter int unsigned MESH_Y    = 8,
  parameter int unsigned DEPTH     = 6,
  parameter int unsigned PKT_FLITS = 6,
  parameter route_mode_e MODE      = MODE_H_O1TURN,
  localparam int unsigned NODES = MESH_X*MESH_Y,
  localparam int unsigned L = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [(MESH_X-1)*MESH_Y-1:0]           link_faulty_h,
  input  logic [MESH_X*(MESH_Y-1)-1:0]           link_faulty_v,
  input  logic [NODES-1:0][3:0]                  flag_lane_fault,
  input  logic [NODES-1:0]                       req_valid,
  input  logic [NODES-1:0][ID_W-1:0]             req_dest,
  input  logic [NODES-1:0][31:0]                 req_payload,
  output logic [NODES-1:0]                       req_ready,
  output logic [NODES-1:0]                       rx_valid,
  output logic [NODES-1:0][ID_W-1:0]             rx_src,
  output logic [NODES-1:0][15:0]                 rx_seq,
  output logic [NODES-1:0][7:0]                  rx_len,
  output logic [NODES-1:0]                       rx_ok,
  output logic [NODES-1:0][1:0]                  rx_vc,
  output logic [2*L-1:0]                         clk_count,
  output logic [NODES-1:0]                       sr,
  output logic [NODES-1:0]                       ar,
  output logic [NODES-1:0][3:0]                  port_dir,
  output logic [NODES-1:0][NODES-1:0]            reach_mask,
  output logic [NODES-1:0][NUM_PORTS-1:0]        ev_escape,
  output logic [NODES-1:0][NUM_PORTS-1:0]        ev_drop,
  output logic [NODES-1:0][NUM_PORTS-1:0]        ev_frozen,
  output logic [NODES-1:0][3:0]                  flag_mismatch
);
  global_clock_counter #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_clk (
    .clk, .rst_n, .count(clk_count)
  );

  flit_t [NODES-1:0][NUM_PORTS-1:0]             r_in, r_out;
  logic  [NODES-1:0][NUM_PORTS-1:0][NUM_VC-1:0] c_in, c_out;
  logic  [NODES-1:0][3:0]                       drf_o, af_o, drf_i, af_i, faulty;

  for (genvar n = 0; n < NODES; n++) begin : g_node
    localparam int unsigned X = n % MESH_X;
    localparam int unsigned Y = n / MESH_X;
    // neighbour node in each direction (only used when it exists)
    localparam int unsigned NB_N = (Y > 0)        ? n - MESH_X : n;
    localparam int unsigned NB_E = (X < MESH_X-1) ? n + 1      : n;
    localparam int unsigned NB_S = (Y < MESH_Y-1) ? n + MESH_X : n;
    localparam int unsigned NB_W = (X > 0)        ? n - 1      : n;
    localparam bit HAS_N = (Y > 0);
    localparam bit HAS_E = (X < MESH_X-1);
    localparam bit HAS_S = (Y < MESH_Y-1);
    localparam bit HAS_W = (X > 0);

    assign faulty[n][0] = HAS_N ? link_faulty_v[(HAS_N ? Y-1 : 0)*MESH_X + X] : 1'b1;
    assign faulty[n][2] = HAS_S ? link_faulty_v[Y*MESH_X + X]                 : 1'b1;
    assign faulty[n][1] = HAS_E ? link_faulty_h[Y*(MESH_X-1) + X]             : 1'b1;
    assign faulty[n][3] = HAS_W ? link_faulty_h[Y*(MESH_X-1) + (HAS_W ? X-1 : 0)] : 1'b1;

    // Data links: the neighbour's registered output feeds this input directly.
    assign r_in[n][0] = HAS_N ? r_out[NB_N][2] : '0;
    assign r_in[n][1] = HAS_E ? r_out[NB_E][3] : '0;
    assign r_in[n][2] = HAS_S ? r_out[NB_S][0] : '0;
    assign r_in[n][3] = HAS_W ? r_out[NB_W][1] : '0;
    assign c_in[n][0] = HAS_N ? c_out[NB_N][2] : '0;
    assign c_in[n][1] = HAS_E ? c_out[NB_E][3] : '0;
    assign c_in[n][2] = HAS_S ? c_out[NB_S][0] : '0;
    assign c_in[n][3] = HAS_W ? c_out[NB_W][1] : '0;

    // Flag overlay: the sender drives three lanes, the receiver votes.
    for (genvar d = 0; d < 4; d++) begin : g_flag
      localparam int unsigned NB  = (d == 0) ? NB_N : (d == 1) ? NB_E : (d == 2) ? NB_S : NB_W;
      localparam bit          HAS = (d == 0) ? HAS_N : (d == 1) ? HAS_E : (d == 2) ? HAS_S : HAS_W;
      localparam int unsigned OD  = (d + 2) % 4;
      logic [2:0][1:0] lanes;
      logic [1:0]      voted;
      logic [1:0] sent;
      assign sent     = HAS ? {af_o[NB][OD], drf_o[NB][OD]} : 2'b00;
      assign lanes[0] = flag_lane_fault[n][d] ? ~sent : sent;
      assign lanes[1] = sent;
      assign lanes[2] = sent;
      tmr_flag_link u_tmr (.lanes, .flags(voted), .mismatch(flag_mismatch[n][d]));
      assign drf_i[n][d] = voted[0];
      assign af_i[n][d]  = voted[1];
    end

    hermes_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NODE_ID(n), .DEPTH(DEPTH)) u_router (
      .clk, .rst_n, .clk_count, .port_faulty(faulty[n]),
      .in_flit(r_in[n]), .credit_out(c_out[n]), .out_flit(r_out[n]), .credit_in(c_in[n]),
      .drf_in(drf_i[n]), .af_in(af_i[n]), .drf_out(drf_o[n]), .af_out(af_o[n]),
      .sr(sr[n]), .ar(ar[n]), .port_dir(port_dir[n]), .reach_mask(reach_mask[n]),
      .ev_escape(ev_escape[n]), .ev_drop(ev_drop[n]), .ev_frozen(ev_frozen[n])
    );

    network_interface #(.NODE_ID(n), .PKT_FLITS(PKT_FLITS), .DEPTH(DEPTH), .MODE(MODE)) u_ni (
      .clk, .rst_n, .sr(sr[n]),
      .req_valid(req_valid[n]), .req_dest(req_dest[n]), .req_payload(req_payload[n]),
      .req_ready(req_ready[n]),
      .inj_flit(r_in[n][4]), .inj_credit(c_out[n][4]),
      .ej_flit(r_out[n][4]), .ej_credit(c_in[n][4]),
      .rx_valid(rx_valid[n]), .rx_src(rx_src[n]), .rx_seq(rx_seq[n]), .rx_len(rx_len[n]),
      .rx_ok(rx_ok[n]), .rx_vc(rx_vc[n])
    );
  end
endmodule
