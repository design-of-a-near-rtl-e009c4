// routing_table: the Up*/Down* routing table of a router ("fill routing table logic").
//
// N entries, one per possible root/destination, each a one-hot 4-bit direction
// (N, E, S, W) plus a valid bit. In a broadcast window whose root is wr_idx, the first DRF
// flag(s) received write the entry: the direction the flag came from is the way back to
// that root. If flags arrive on several ports in the same cycle one is kept, with
// priority N > E > S > W (this design's choice). invalidate clears every valid bit in one
// cycle when the router enters recovery; a write in the same cycle is still performed.
// An entry that stays invalid after reconfiguration marks a node that cannot be reached:
// valid_mask exposes this partition information.
//
// The table is flip-flops, not an SRAM macro, because the whole table is invalidated in a
// single cycle. NUM_READ combinational read ports serve the routing units of the input
// ports. Writes take effect at the next clock edge.
module routing_table #(
  parameter int unsigned MESH_X   = 8,
  parameter int unsigned MESH_Y   = 8,
  parameter int unsigned NUM_READ = 5,
  localparam int unsigned NODES = MESH_X*MESH_Y,
  localparam int unsigned L = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              invalidate,
  input  logic                              wr_en,
  input  logic [L-1:0]                      wr_idx,
  input  logic [3:0]                        drf_in,
  input  logic [NUM_READ-1:0][hermes_pkg::ID_W-1:0] rd_idx,
  output logic [NUM_READ-1:0][3:0]          rd_port,
  output logic [NUM_READ-1:0]               rd_valid,
  output logic [NODES-1:0]                  valid_mask
);
  logic [3:0]       entry [NODES];
  logic [NODES-1:0] valid;
  logic [3:0]       wr_onehot;

  always_comb begin
    wr_onehot = '0;
    if      (drf_in[0]) wr_onehot = 4'b0001;
    else if (drf_in[1]) wr_onehot = 4'b0010;
    else if (drf_in[2]) wr_onehot = 4'b0100;
    else if (drf_in[3]) wr_onehot = 4'b1000;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid <= '0;
    else begin
      if (invalidate) valid <= '0;
      if (wr_en && (32'(wr_idx) < NODES)) valid[wr_idx] <= 1'b1;
    end

  always_ff @(posedge clk)
    if (wr_en && (32'(wr_idx) < NODES)) entry[wr_idx] <= wr_onehot;

  always_comb begin
    for (int r = 0; r < NUM_READ; r++) begin
      rd_port[r]  = '0;
      rd_valid[r] = 1'b0;
      if (32'(rd_idx[r]) < NODES) begin
        rd_port[r]  = entry[rd_idx[r][L-1:0]];
        rd_valid[r] = valid[rd_idx[r][L-1:0]];
      end
    end
  end

  assign valid_mask = valid;
endmodule
