// updown_logic: the four Up*/Down* port direction registers of a router (N, E, S, W).
//
// Encoding: 0 = up (towards the root of the first broadcast), 1 = down. When the node
// enters recovery by receiving its first DRF flag, the port(s) the flag arrived on are
// marked up and all other ports down. When the node enters recovery as the root it marks
// every port down. The registers then keep their value for the rest of the
// reconfiguration; later broadcasts only read them. This follows the paper's "tagging
// link directions" step; the reset value (all down) is this design's choice.
//
// dir_next is the value the registers take at the next edge, so the flag forwarding
// logic can use the new directions in the same cycle they are set.
module updown_logic (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enter_recovery,  // first DRF reception or root initiation
  input  logic       as_root,         // entering as the root
  input  logic [3:0] drf_in,          // DRF flags received this cycle
  output logic [3:0] dir,             // registered directions, 1 = down
  output logic [3:0] dir_next
);
  always_comb begin
    dir_next = dir;
    if (enter_recovery) dir_next = as_root ? 4'b1111 : ~drf_in;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dir <= 4'b1111;
    else        dir <= dir_next;
endmodule
