// global_clock_counter: the chip-wide free-running counter that time-slots Hermes
// reconfiguration.
//
// The counter is 2*L bits wide, L = ceil(log2(MESH_X*MESH_Y)). Its low L bits are the
// cycle inside a broadcast window and its high L bits name the node that broadcasts
// ("is root") in that window, so one full wrap of the counter (2^(2L) = N^2 cycles for a
// power-of-two node count) lets every node broadcast once. The split of the counter
// follows the paper; the reset value (zero) and leaving out any unused higher bits are
// this design's choices. One instance drives every router in the mesh.
//
// Interface: clk, rst_n (asynchronous active-low), count (registered, +1 per cycle).
module global_clock_counter #(
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8,
  localparam int unsigned L = (MESH_X*MESH_Y > 1) ? $clog2(MESH_X*MESH_Y) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic [2*L-1:0] count
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) count <= '0;
    else        count <= count + 1'b1;
endmodule
