// flag_forwarding: decides, per output direction, which reconfiguration flag a router
// sends in the next cycle over the 2-bit overlay network.
//
// * As root (first cycle of its own window) the node sends a DRF flag on every healthy
//   port and an AF flag on every faulty port.
// * On its first DRF reception of a window the node forwards the DRF on every healthy
//   port Y that has not received a flag in this window, provided the Up*/Down* turn is
//   legal: a flag that came in on a "down" port may go anywhere, one that came in on an
//   "up" port only to "down" ports (an up-to-up turn is forbidden). Faulty ports that
//   have not received a flag get an AF flag, with no turn restriction.
// * Nothing is sent from the last cycle of a window (this design's guard so a late flag
//   cannot be taken for one of the next window).
// The rules are the paper's; dir uses the paper's encoding 0 = up, 1 = down.
//
// Timing: registered outputs, so a flag seen in cycle t is forwarded in cycle t+1
// (single-cycle flag forwarding per hop).
module flag_forwarding (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       root_now,
  input  logic       first_drf,
  input  logic       window_last,
  input  logic [3:0] drf_in,
  input  logic [3:0] dir,          // directions valid this cycle (after tagging)
  input  logic [3:0] rx_mask,      // ports that received any flag in this window
  input  logic [3:0] port_faulty,  // 1 = link of that port is faulty
  output logic [3:0] drf_out,
  output logic [3:0] af_out
);
  logic [3:0] legal, drf_d, af_d;

  always_comb begin
    for (int y = 0; y < 4; y++)
      legal[y] = |(drf_in & (dir | {4{dir[y]}}));
    drf_d = '0;
    af_d  = '0;
    if (root_now) begin
      drf_d = ~port_faulty;
      af_d  = port_faulty;
    end else if (first_drf) begin
      drf_d = legal & ~port_faulty & ~rx_mask;
      af_d  = port_faulty & ~rx_mask;
    end
    if (window_last) begin
      drf_d = '0;
      af_d  = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      drf_out <= '0;
      af_out  <= '0;
    end else begin
      drf_out <= drf_d;
      af_out  <= af_d;
    end
endmodule
