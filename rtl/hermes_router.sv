// hermes_router: a five-port, three-VC input-buffered wormhole router with the Hermes
// fault-tolerance logic.
//
// Datapath (base router). Pipeline per hop: routing computation (RC), VC allocation
// (VA), switch allocation (SA), crossbar traversal (ST), then one cycle of link
// traversal: a head flit written into an input buffer at clock edge t is written into the
// next router's buffer at edge t+5 when nothing blocks it; body flits follow one per
// cycle. Flow control is credit based, one credit counter per output VC, initialised to
// the downstream buffer depth. VC0 carries XY traffic, VC1 YX traffic and VC2 the
// Up*/Down* escape traffic; route_compute moves a packet to VC2 when its dimension-order
// link is faulty.
//
// Hermes logic. node_id_extractor decodes the shared global counter; reconfig_ctrl holds
// the Status Register (SR, recovering) and Alert Register (AR); updown_logic holds the
// four up/down port direction registers; flag_forwarding drives the DRF/AF flag pair of
// each of the four mesh directions one cycle after a flag is received; routing_table is
// the Up*/Down* table filled from received DRF flags. While SR is set, head flits are
// frozen (no new routing) and the network interface stops injecting (sr output).
//
// Interfaces: in_flit/out_flit and credit_in/credit_out per port (0=N,1=E,2=S,3=W,
// 4=local); drf_in/af_in/drf_out/af_out per mesh direction; port_faulty per mesh
// direction (1 = link unusable, tie 1 at the mesh edge). out_flit and credit_out are
// registered. The pipeline depth and the Hermes blocks follow the paper; allocator
// policies and the header format are this design's choices.
module hermes_router
  import hermes_pkg::*;
#(
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned NODE_ID = 0,
  parameter int unsigned DEPTH   = 6,
  localparam int unsigned NODES = MESH_X*MESH_Y,
  localparam int unsigned L = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [2*L-1:0]                     clk_count,
  input  logic [3:0]                         port_faulty,
  input  flit_t [NUM_PORTS-1:0]              in_flit,
  output logic  [NUM_PORTS-1:0][NUM_VC-1:0]  credit_out,
  output flit_t [NUM_PORTS-1:0]              out_flit,
  input  logic  [NUM_PORTS-1:0][NUM_VC-1:0]  credit_in,
  input  logic [3:0]                         drf_in,
  input  logic [3:0]                         af_in,
  output logic [3:0]                         drf_out,
  output logic [3:0]                         af_out,
  output logic                               sr,
  output logic                               ar,
  output logic [3:0]                         port_dir,
  output logic [NODES-1:0]                   reach_mask,
  output logic [NUM_PORTS-1:0]               ev_escape,
  output logic [NUM_PORTS-1:0]               ev_drop,
  output logic [NUM_PORTS-1:0]               ev_frozen
);
  localparam int unsigned R = NUM_PORTS*NUM_VC;
  localparam int unsigned CW = $clog2(DEPTH+1);

  // ---------------- Hermes reconfiguration logic ----------------
  logic [L-1:0] bcast_node, bcast_cycle;
  logic my_window, can_initiate, window_start, window_last;
  logic fault_pending, root_now, first_drf, enter_recovery;
  logic [3:0] rx_mask_now, dir_next;

  node_id_extractor #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NODE_ID(NODE_ID)) u_nid (
    .count(clk_count), .bcast_node, .bcast_cycle, .my_window, .can_initiate,
    .window_start, .window_last
  );

  reconfig_ctrl #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_ctrl (
    .clk, .rst_n, .drf_in, .af_in, .port_faulty, .my_window, .window_start, .can_initiate,
    .sr, .ar, .fault_pending, .root_now, .first_drf, .enter_recovery, .rx_mask_now
  );

  updown_logic u_ud (
    .clk, .rst_n, .enter_recovery, .as_root(root_now), .drf_in, .dir(port_dir), .dir_next
  );

  flag_forwarding u_ff (
    .clk, .rst_n, .root_now, .first_drf, .window_last, .drf_in, .dir(dir_next),
    .rx_mask(rx_mask_now), .port_faulty, .drf_out, .af_out
  );

  logic [NUM_PORTS-1:0][ID_W-1:0] tbl_dest;
  logic [NUM_PORTS-1:0][3:0]      tbl_port;
  logic [NUM_PORTS-1:0]           tbl_valid;

  routing_table #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NUM_READ(NUM_PORTS)) u_tbl (
    .clk, .rst_n, .invalidate(enter_recovery), .wr_en(first_drf), .wr_idx(bcast_node),
    .drf_in, .rd_idx(tbl_dest), .rd_port(tbl_port), .rd_valid(tbl_valid),
    .valid_mask(reach_mask)
  );

  // ---------------- Input units ----------------
  logic  [NUM_PORTS-1:0][NUM_VC-1:0]      va_req, vc_active, vc_empty, va_grant, sa_pop;
  logic  [NUM_PORTS-1:0][NUM_VC-1:0][2:0] vc_out_port;
  logic  [NUM_PORTS-1:0][NUM_VC-1:0][1:0] vc_out_vc;
  flit_t [NUM_PORTS-1:0]                  pop_flit;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    input_unit #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NODE_ID(NODE_ID), .DEPTH(DEPTH)) u_in (
      .clk, .rst_n, .in_flit(in_flit[p]), .credit_out(credit_out[p]), .freeze(sr),
      .port_faulty, .tbl_dest(tbl_dest[p]), .tbl_port(tbl_port[p]), .tbl_valid(tbl_valid[p]),
      .va_req(va_req[p]), .vc_active(vc_active[p]), .vc_out_port(vc_out_port[p]),
      .vc_out_vc(vc_out_vc[p]), .vc_empty(vc_empty[p]), .va_grant(va_grant[p]),
      .sa_pop(sa_pop[p]), .pop_flit(pop_flit[p]),
      .ev_escape(ev_escape[p]), .ev_drop(ev_drop[p]), .ev_frozen(ev_frozen[p])
    );
  end

  // ---------------- Output VC state: busy flags and credits ----------------
  logic [NUM_PORTS-1:0][NUM_VC-1:0]          ovc_busy;
  logic [NUM_PORTS-1:0][NUM_VC-1:0][CW-1:0]  credits;

  // ---------------- VC allocation ----------------
  logic [R-1:0]      va_req_f, va_grant_f, busy_f;
  logic [R-1:0][2:0] va_port_f;
  logic [R-1:0][1:0] va_vc_f;

  always_comb
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        va_req_f[p*NUM_VC+v]  = va_req[p][v];
        va_port_f[p*NUM_VC+v] = vc_out_port[p][v];
        va_vc_f[p*NUM_VC+v]   = vc_out_vc[p][v];
        busy_f[p*NUM_VC+v]    = ovc_busy[p][v];
        va_grant[p][v]        = va_grant_f[p*NUM_VC+v];
      end

  vc_allocator u_va (
    .clk, .rst_n, .req(va_req_f), .req_port(va_port_f), .req_vc(va_vc_f),
    .busy(busy_f), .grant(va_grant_f)
  );

  // ---------------- Switch allocation ----------------
  logic [NUM_PORTS-1:0][NUM_VC-1:0] sa_req;
  logic [NUM_PORTS-1:0]             sa_out_valid;
  logic [NUM_PORTS-1:0][2:0]        sa_out_sel;

  always_comb
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++)
        sa_req[p][v] = vc_active[p][v] && !vc_empty[p][v] &&
                       (credits[vc_out_port[p][v]][vc_out_vc[p][v]] != '0);

  switch_allocator u_sa (
    .clk, .rst_n, .req(sa_req), .req_port(vc_out_port), .vc_grant(sa_pop),
    .out_valid(sa_out_valid), .out_sel(sa_out_sel)
  );

  // ---------------- SA/ST pipeline register, crossbar, output register ----------------
  flit_t [NUM_PORTS-1:0]      st_flit, xbar_out;
  logic  [NUM_PORTS-1:0]      st_valid;
  logic  [NUM_PORTS-1:0][2:0] st_sel;

  crossbar u_xbar (.in_flit(st_flit), .valid(st_valid), .sel(st_sel), .out_flit(xbar_out));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st_flit  <= '0;
      st_valid <= '0;
      st_sel   <= '0;
      out_flit <= '0;
    end else begin
      st_flit  <= pop_flit;
      st_valid <= sa_out_valid;
      st_sel   <= sa_out_sel;
      out_flit <= xbar_out;
    end

  // Credit counters and output-VC ownership. For every output VC: dec = a flit was
  // granted to it, rel = that flit is a tail (VC freed), set = VC allocated this cycle.
  logic [NUM_PORTS-1:0][NUM_VC-1:0] ovc_dec, ovc_rel, ovc_set;

  always_comb begin
    ovc_dec = '0;
    ovc_rel = '0;
    ovc_set = '0;
    for (int p = 0; p < NUM_PORTS; p++)
      for (int w = 0; w < NUM_VC; w++) begin
        if (sa_pop[p][w]) begin
          ovc_dec[vc_out_port[p][w]][vc_out_vc[p][w]] = 1'b1;
          if (is_tail(pop_flit[p])) ovc_rel[vc_out_port[p][w]][vc_out_vc[p][w]] = 1'b1;
        end
        if (va_grant[p][w]) ovc_set[vc_out_port[p][w]][vc_out_vc[p][w]] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VC; v++) begin
          credits[o][v]  <= CW'(DEPTH);
          ovc_busy[o][v] <= 1'b0;
        end
    end else begin
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VC; v++) begin
          credits[o][v] <= credits[o][v] - CW'(ovc_dec[o][v]) + CW'(credit_in[o][v]);
          if (ovc_set[o][v])      ovc_busy[o][v] <= 1'b1;
          else if (ovc_rel[o][v]) ovc_busy[o][v] <= 1'b0;
        end
    end

  // A credit counter never exceeds the downstream buffer depth.
  always_ff @(posedge clk)
    if (rst_n)
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VC; v++)
          assert (32'(credits[o][v]) <= DEPTH) else $error("hermes_router: credit overflow");
endmodule
