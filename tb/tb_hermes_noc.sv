// End-to-end testbench for hermes_noc on a 3x3 mesh (N = 9, global counter 2x4 bits,
// a reconfiguration lasts 256 cycles). It replays the fault scenario of the paper's
// walk-through figure, with node k at (k%3, k/3):
//  start    after reset the mesh-edge ports look like new faults, so the network
//           configures its tables once (the first node whose window comes initiates).
//  phase A  fault-free: uniform random traffic between all nodes, every packet delivered.
//  phase B  links 4-5 and 7-8 fail. Node 4 starts a reconfiguration in its window; all
//           nodes freeze and rebuild their Up*/Down* tables. Then random traffic again:
//           XY/YX packets whose dimension-order link is faulty escape to the Up*/Down* VC
//           and still arrive.
//  phase C  link 1-2 fails while packets are in flight: node 1 starts a second
//           reconfiguration, heads are frozen and injection is held off. Node 2 receives
//           only AF flags (alert), then restarts the reconfiguration as root of the
//           detached sub-network {2,5,8}. Partition tables, port directions and the
//           alert register are checked; traffic across the partition is dropped, traffic
//           inside each partition still arrives.
// One lane of two flag links is inverted for the whole run: the TMR voter must mask it.
// The scoreboard holds (source, sequence number) -> destination for every accepted
// packet; each reception must match an entry with a consistent body (rx_ok).
// Mechanism counters: reconfigurations, frozen head cycles, injection stalls, escapes,
// drops, alerts, TMR-masked lane errors, deliveries on the XY and on the YX VC.
// Each must be non-zero, otherwise it counts as a failure.
module tb_hermes_noc;
  import hermes_pkg::*;
  localparam int X = 3, Y = 3, NODES = 9;
  logic clk = 0, rst_n = 0;
  logic [(X-1)*Y-1:0] link_faulty_h = '0;
  logic [X*(Y-1)-1:0] link_faulty_v = '0;
  logic [NODES-1:0][3:0] flag_lane_fault = '0;
  logic [NODES-1:0] req_valid = '0, req_ready, rx_valid, rx_ok, sr, ar;
  logic [NODES-1:0][ID_W-1:0] req_dest = '0, rx_src;
  logic [NODES-1:0][31:0] req_payload = '0;
  logic [NODES-1:0][15:0] rx_seq;
  logic [NODES-1:0][7:0] rx_len;
  logic [NODES-1:0][1:0] rx_vc;
  logic [7:0] clk_count;
  logic [NODES-1:0][3:0] port_dir, flag_mismatch;
  logic [NODES-1:0][NODES-1:0] reach_mask;
  logic [NODES-1:0][NUM_PORTS-1:0] ev_escape, ev_drop, ev_frozen;

  hermes_noc #(.MESH_X(X), .MESH_Y(Y)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_reconf = 0, n_frozen = 0, n_stall = 0, n_escape = 0, n_drop = 0, n_alert = 0;
  int n_tmr = 0, n_vc0 = 0, n_vc1 = 0, n_rx = 0, n_sent = 0;
  int exp_dest[int];               // key src*65536+seq
  int sent_seq[NODES];
  int pending[NODES][$];           // destinations waiting to be injected
  logic [NODES-1:0] sr_q = '0, ar_q = '0;

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s t=%0t", what, $time); end
  endtask

  // injection driver and monitors
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++) begin
      if (req_valid[n] && req_ready[n]) begin
        exp_dest[n*65536 + sent_seq[n]] = req_dest[n];
        sent_seq[n]++; n_sent++;
        void'(pending[n].pop_front());
      end
      if (req_valid[n] && !req_ready[n] && sr[n]) n_stall++;
      if (rx_valid[n]) begin
        automatic int key = int'(rx_src[n])*65536 + int'(rx_seq[n]);
        chk(exp_dest.exists(key) && exp_dest[key] == n && rx_ok[n] && rx_len[n] == 6,
            $sformatf("delivery at %0d from %0d seq %0d", n, rx_src[n], rx_seq[n]));
        exp_dest.delete(key);
        n_rx++;
        if (rx_vc[n] == 0) n_vc0++;
        if (rx_vc[n] == 1) n_vc1++;
      end
      n_escape += $countones(ev_escape[n]);
      n_drop   += $countones(ev_drop[n]);
      n_frozen += $countones(ev_frozen[n]);
      n_tmr    += $countones(flag_mismatch[n]);
      if (sr[n] && !sr_q[n] && n == 0) n_reconf++;
      if (ar[n] && !ar_q[n]) n_alert++;
    end
    sr_q <= sr; ar_q <= ar;
  end
  always @(negedge clk) for (int n = 0; n < NODES; n++) begin
    req_valid[n] <= pending[n].size() > 0;
    req_dest[n]  <= pending[n].size() > 0 ? ID_W'(pending[n][0]) : '0;
    req_payload[n] <= $urandom;
  end

  task automatic traffic(int count, logic [NODES-1:0] srcs);
    for (int k = 0; k < count; k++) begin
      automatic int s = $urandom_range(NODES-1);
      automatic int d = $urandom_range(NODES-1);
      if (srcs[s] && d != s) pending[s].push_back(d);
    end
  endtask
  task automatic drain(int cycles);
    repeat (cycles) @(negedge clk);
  endtask
  // expected remaining entries: packets whose destination is outside the source's partition
  function automatic int undeliverable(logic [NODES-1:0] part);
    int c = 0;
    foreach (exp_dest[k]) if (part[k/65536] != part[exp_dest[k]]) c++;
    return c;
  endfunction

  initial begin #3000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam logic [NODES-1:0] PART_B = 9'b100100100;   // nodes 2, 5, 8
  initial begin
    flag_lane_fault[4][0] = 1'b1;    // lane 0 of the flag link 1 -> 4 inverted
    flag_lane_fault[0][1] = 1'b1;    // lane 0 of the flag link 1 -> 0 inverted
    repeat (2) @(negedge clk); rst_n = 1;
    // start-up: mesh-edge ports count as new faults, so the first window's owner that
    // sees one (node 1 at count 16; node 0's window has just passed) configures the tables
    while (!sr[1]) @(negedge clk);
    chk(clk_count == 8'd17, "start-up configuration by node 1");
    // ---- phase A: fault-free ----
    traffic(120, '1);
    drain(1500);
    chk(exp_dest.size() == 0, $sformatf("phase A all delivered (%0d left)", exp_dest.size()));
    chk(n_vc0 > 0 && n_vc1 > 0, "O1TURN uses both the XY and the YX VC");
    // ---- phase B: links 4-5 and 7-8 fail ----
    while (clk_count != 8'd40) @(negedge clk);
    link_faulty_h[1*2+1] = 1'b1;   // 4-5
    link_faulty_h[2*2+1] = 1'b1;   // 7-8
    while (!sr[4]) @(negedge clk);
    chk(clk_count == 8'd65, "node 4 initiates at the start of its window (count 64)");
    while (sr != 0) @(negedge clk);
    for (int n = 0; n < NODES; n++)        // a node holds no entry for itself
      chk(reach_mask[n] == (9'h1ff & ~(9'd1 << n)), "connected: every node reaches every other");
    chk(port_dir[4] == 4'b1111, "root 4 marks all ports down");
    chk(port_dir[1] == 4'b1011 && port_dir[3] == 4'b1101, "neighbours of the root: port toward 4 up");
    traffic(150, '1);
    drain(2000);
    chk(exp_dest.size() == 0, $sformatf("phase B all delivered (%0d left)", exp_dest.size()));
    chk(n_escape > 0, "escapes to Up*/Down* happened");
    // ---- phase C: link 1-2 fails with traffic in flight ----
    while (clk_count != 8'd250) @(negedge clk);
    link_faulty_h[0*2+1] = 1'b1;   // 1-2
    traffic(60, ~PART_B);
    traffic(60, PART_B);
    while (!sr[1]) @(negedge clk);
    chk(clk_count == 8'd17, "node 1 initiates in its window (count 16)");
    chk(!sr[2], "node 2 does not receive DRF from the other part");
    while (clk_count != 8'd31) @(negedge clk);
    chk(ar[2] && ar[5] && ar[8], "detached nodes 2, 5, 8 in alert after AF only");
    chk(sr[0] && sr[3] && sr[4] && sr[6] && sr[7], "main part recovering");
    while (clk_count != 8'd40) @(negedge clk);
    chk(sr[2] && sr[5] && sr[8] && !ar[2], "node 2 restarts as sub-network root");
    while (sr != 0) @(negedge clk);
    for (int n = 0; n < NODES; n++)
      chk(reach_mask[n] == ((PART_B[n] ? PART_B : ~PART_B) & ~(9'd1 << n)),
          $sformatf("partition table of %0d: %b", n, reach_mask[n]));
    chk(port_dir[1] == 4'b1111 && port_dir[2] == 4'b1111, "both roots all down");
    chk(port_dir[0] == 4'b1101, $sformatf("node 0: east (toward root 1) up %b", port_dir[0]));
    chk(port_dir[5] == 4'b1110, "node 5: north (toward root 2) up");
    chk(ar == 0, "alerts cleared after the sub-network reconfiguration");
    // cross-partition traffic
    pending[0].push_back(5); pending[4].push_back(8); pending[2].push_back(6);
    pending[3].push_back(4); pending[8].push_back(2);
    drain(2500);
    chk(exp_dest.size() == undeliverable(PART_B) && exp_dest.size() >= 3,
        $sformatf("only cross-partition packets missing (%0d left, %0d expected)",
                  exp_dest.size(), undeliverable(PART_B)));
    chk(n_drop >= 3, "cross-partition packets dropped");
    for (int n = 0; n < NODES; n++) chk(pending[n].size() == 0, "all injected");
    chk(n_reconf == 3, $sformatf("start-up + two fault reconfigurations at node 0 (%0d)", n_reconf));
    $display("mechanisms: reconf=%0d frozen=%0d stall=%0d escape=%0d drop=%0d alert=%0d tmr=%0d vc0=%0d vc1=%0d sent=%0d rx=%0d",
             n_reconf, n_frozen, n_stall, n_escape, n_drop, n_alert, n_tmr, n_vc0, n_vc1, n_sent, n_rx);
    chk(n_reconf > 0, "mechanism: reconfiguration");
    chk(n_frozen > 0, "mechanism: head flit frozen during recovery");
    chk(n_stall > 0,  "mechanism: injection held during recovery");
    chk(n_escape > 0, "mechanism: escape to Up*/Down*");
    chk(n_drop > 0,   "mechanism: drop of unroutable packet");
    chk(n_alert > 0,  "mechanism: alert");
    chk(n_tmr > 0,    "mechanism: TMR-masked flag lane");
    chk(n_vc0 > 0 && n_vc1 > 0, "mechanism: O1TURN XY and YX");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
