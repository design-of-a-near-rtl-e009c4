// route_compute: Hermes routing function for one head flit (combinational).
//
// The VC a packet travels in tells which routing function it is under:
//  * VC0 (XY) and VC1 (YX): dimension-order routing towards the destination. If the
//    dimension-order output link is healthy it is taken and the packet stays in its VC.
//    If that link is faulty the packet switches to the Up*/Down* VC (VC2) and takes the
//    port from the Up*/Down* routing table. That switch is one-way: no packet ever leaves
//    VC2 again, which is what keeps the combination deadlock-free.
//  * VC2 (Up*/Down*): the port stored in the routing table for the destination.
//  * destination == this node: eject to the local port.
//  * Up*/Down* needed but the table entry is invalid (destination is in another,
//    physically disconnected sub-network): out_port = DROP, the packet is discarded
//    (this design's way of keeping such packets from blocking the network).
// The three sub-functions (XY, YX, Up*/Down*) and the one-way switch are the paper's.
module route_compute
  import hermes_pkg::*;
#(
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned NODE_ID = 0
) (
  input  logic [ID_W-1:0] dest,
  input  logic [1:0]      in_vc,
  input  logic [3:0]      port_faulty,
  input  logic [3:0]      tbl_port,   // one-hot N,E,S,W from the routing table
  input  logic            tbl_valid,
  output logic [2:0]      out_port,
  output logic [1:0]      out_vc,
  output logic            escape      // packet switches from XY/YX to Up*/Down* here
);
  localparam int unsigned MY_X = NODE_ID % MESH_X;
  localparam int unsigned MY_Y = NODE_ID / MESH_X;

  int unsigned dx, dy;
  logic [2:0]  x_port, y_port, dor_port, ud_port;

  always_comb begin
    dx = 32'(dest) % MESH_X;
    dy = 32'(dest) / MESH_X;
    x_port = (dx > MY_X) ? PORT_E : PORT_W;
    y_port = (dy > MY_Y) ? PORT_S : PORT_N;
    if (in_vc == VC_YX) dor_port = (dy != MY_Y) ? y_port : x_port;
    else                dor_port = (dx != MY_X) ? x_port : y_port;
    case (1'b1)  // first set bit; an invalid entry may hold anything
      tbl_port[0]: ud_port = PORT_N;
      tbl_port[1]: ud_port = PORT_E;
      tbl_port[2]: ud_port = PORT_S;
      tbl_port[3]: ud_port = PORT_W;
      default:     ud_port = PORT_DROP;
    endcase

    escape   = 1'b0;
    out_vc   = in_vc;
    out_port = PORT_L;
    if (32'(dest) == NODE_ID) begin
      out_port = PORT_L;
    end else if (in_vc != VC_UD && !port_faulty[dor_port[1:0]]) begin
      out_port = dor_port;
    end else begin
      escape = (in_vc != VC_UD);
      out_vc = VC_UD;
      out_port = tbl_valid ? ud_port : PORT_DROP;
    end
  end
endmodule
