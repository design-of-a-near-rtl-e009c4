// node_id_extractor: decodes the global clock counter for one router.
//
// The low L bits of the counter are the broadcast cycle, the next L bits are the ID of
// the node allowed to broadcast in the current window. The node may initiate its
// broadcast in the first cycle of its own window (slot == NODE_ID, cycle == 0): this is
// the comparator tree of the paper's 2x2 example, generalised to L bits. Non-root nodes
// learn the root's ID from bcast_node without the ID being transmitted. window_last
// (last cycle of a window) is this design's addition, used to stop a flag from spilling
// into the next window.
//
// Purely combinational.
module node_id_extractor #(
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned NODE_ID = 0,
  localparam int unsigned L = (MESH_X*MESH_Y > 1) ? $clog2(MESH_X*MESH_Y) : 1
) (
  input  logic [2*L-1:0] count,
  output logic [L-1:0]   bcast_node,
  output logic [L-1:0]   bcast_cycle,
  output logic           my_window,
  output logic           can_initiate,
  output logic           window_start,
  output logic           window_last
);
  localparam logic [L-1:0] MY_ID = L'(NODE_ID);

  always_comb begin
    bcast_node   = count[2*L-1:L];
    bcast_cycle  = count[L-1:0];
    my_window    = (bcast_node == MY_ID);
    window_start = (bcast_cycle == '0);
    window_last  = (bcast_cycle == '1);
    can_initiate = my_window && window_start;
  end
endmodule
