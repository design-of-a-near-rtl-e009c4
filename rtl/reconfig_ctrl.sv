// reconfig_ctrl: the Status Register (SR), the Alert Register (AR) and the bookkeeping
// that orders a Hermes reconfiguration at one router.
//
// SR: 0 = normal, 1 = recovering. AR: 0 = normal, 1 = alert.
// * A node enters recovery either when its first DRF flag of a reconfiguration arrives,
//   or when it initiates as root in the first cycle of its own broadcast window because a
//   link attached to it has newly failed (fault_pending) or because it is in alert state
//   (it is the root of a detached sub-network). Entering invalidates the routing table
//   (done by the caller with enter_recovery) and marks the port directions.
// * Recovery lasts N^2 cycles counted from the entry cycle (N^2 = 2^(2L), one full wrap of
//   the global counter); SR then returns to normal on its own.
// * While recovering, the node broadcasts again as root in its own window (serial,
//   time-slotted broadcasts), and in any other window it handles only the first DRF it
//   receives (routing-table update and forwarding).
// * After reset no link is remembered as faulty, so ports tied faulty (mesh edge) count as
//   new faults: the network configures all tables once after reset.
// * An AF flag received while SR is normal sets AR; a DRF resets it; AF flags are ignored
//   while recovering. AR is also cleared when the node initiates as sub-network root.
// * rx_mask_now lists the ports that have received any flag in the current window,
//   including this cycle; a node never sends on such a port.
// The SR/AR rules, the serial schedule and the N^2 duration follow the paper. The
// "pending fault" bit, DRF-over-AF priority in one cycle, and counting the duration from
// the entry cycle are this design's choices.
//
// Timing: flags are sampled in the cycle they are seen; all state is updated at the next
// clock edge. Outputs root_now, first_drf, enter_recovery are combinational.
module reconfig_ctrl #(
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8,
  localparam int unsigned L = (MESH_X*MESH_Y > 1) ? $clog2(MESH_X*MESH_Y) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] drf_in,
  input  logic [3:0] af_in,
  input  logic [3:0] port_faulty,
  input  logic       my_window,
  input  logic       window_start,
  input  logic       can_initiate,
  output logic       sr,
  output logic       ar,
  output logic       fault_pending,
  output logic       root_now,
  output logic       first_drf,
  output logic       enter_recovery,
  output logic [3:0] rx_mask_now
);
  localparam logic [2*L-1:0] REC_INIT = {{(2*L-1){1'b1}}, 1'b0};  // N^2 - 2

  logic [2*L-1:0] rec_cnt;
  logic           fwd_done;
  logic [3:0]     rx_mask;
  logic [3:0]     faulty_q;
  logic           fwd_done_eff;

  always_comb begin
    fwd_done_eff   = window_start ? 1'b0 : fwd_done;
    rx_mask_now    = (window_start ? 4'b0 : rx_mask) | drf_in | af_in;
    root_now       = can_initiate && (sr || fault_pending || ar);
    first_drf      = (|drf_in) && !fwd_done_eff && !my_window;
    enter_recovery = !sr && (root_now || first_drf);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr            <= 1'b0;
      ar            <= 1'b0;
      rec_cnt       <= '0;
      fwd_done      <= 1'b0;
      rx_mask       <= '0;
      faulty_q      <= '0;
      fault_pending <= 1'b0;
    end else begin
      faulty_q <= port_faulty;
      fwd_done <= fwd_done_eff || first_drf || root_now;
      rx_mask  <= rx_mask_now;

      if (enter_recovery) begin
        sr      <= 1'b1;
        rec_cnt <= REC_INIT;
      end else if (sr) begin
        if (rec_cnt == '0) sr <= 1'b0;
        else               rec_cnt <= rec_cnt - 1'b1;
      end

      if (first_drf)               ar <= 1'b0;
      else if (root_now && !sr)    ar <= 1'b0;
      else if ((|af_in) && !sr)    ar <= 1'b1;

      if (|(port_faulty & ~faulty_q)) fault_pending <= 1'b1;
      else if (enter_recovery)        fault_pending <= 1'b0;
    end
  end
endmodule
