// hermes_pkg: types and constants shared by the Hermes fault-tolerant mesh NoC.
//
// Port numbering (all modules): 0=North, 1=East, 2=South, 3=West, 4=Local.
// Node numbering: id = y*MESH_X + x, with y growing towards the south, so node 0 is the
// north-west corner (the numbering of the 3x3 walk-through that motivates the design).
// Virtual channel classes: VC0 carries XY (dimension-order) traffic, VC1 carries YX
// traffic (only used by the O1TURN variant), VC2 is the single Up*/Down* escape VC.
// A flit is 128 data bits plus a type and a VC tag; a head flit carries destination,
// source and a sequence number in its low data bits. The 128-bit flit and the VC
// classes follow the paper; the header layout is this design's own choice.
package hermes_pkg;

  localparam int unsigned NUM_PORTS = 5;
  localparam int unsigned NUM_VC    = 3;
  localparam int unsigned FLIT_W    = 128;
  localparam int unsigned ID_W      = 8;   // node id field in the header (up to 256 nodes)

  localparam logic [2:0] PORT_N    = 3'd0;
  localparam logic [2:0] PORT_E    = 3'd1;
  localparam logic [2:0] PORT_S    = 3'd2;
  localparam logic [2:0] PORT_W    = 3'd3;
  localparam logic [2:0] PORT_L    = 3'd4;
  localparam logic [2:0] PORT_DROP = 3'd5;  // packet has no valid route: discard it

  localparam logic [1:0] VC_XY = 2'd0;
  localparam logic [1:0] VC_YX = 2'd1;
  localparam logic [1:0] VC_UD = 2'd2;

  typedef enum logic [1:0] {
    FLIT_HEAD     = 2'd0,
    FLIT_BODY     = 2'd1,
    FLIT_TAIL     = 2'd2,
    FLIT_HEADTAIL = 2'd3
  } flit_type_e;

  typedef struct packed {
    logic              valid;
    flit_type_e        ftype;
    logic [1:0]        vc;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Injection variants of Hermes: H-XY (2 VCs used) and H-O1TURN (3 VCs used).
  typedef enum logic {
    MODE_H_XY     = 1'b0,
    MODE_H_O1TURN = 1'b1
  } route_mode_e;

  function automatic logic is_head(flit_t f);
    return f.ftype == FLIT_HEAD || f.ftype == FLIT_HEADTAIL;
  endfunction

  function automatic logic is_tail(flit_t f);
    return f.ftype == FLIT_TAIL || f.ftype == FLIT_HEADTAIL;
  endfunction

  function automatic logic [ID_W-1:0] head_dest(flit_t f);
    return f.data[ID_W-1:0];
  endfunction

  function automatic logic [ID_W-1:0] head_src(flit_t f);
    return f.data[2*ID_W-1:ID_W];
  endfunction

  // Opposite direction of a mesh port (N<->S, E<->W).
  function automatic int unsigned opposite(int unsigned d);
    return (d + 2) % 4;
  endfunction

endpackage
