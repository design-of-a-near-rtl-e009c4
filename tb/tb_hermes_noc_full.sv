// Full-size testbench: hermes_noc with every parameter at its default (8x8 mesh, 3 VCs,
// O1TURN, 6-flit buffers and packets, 64-entry tables, N^2 = 4096-cycle reconfiguration).
// One complete operation:
//  1. After reset the start-up configuration (edge ports seen as new faults) builds the
//     Up*/Down* tables of all 64 nodes; every node must reach every other node.
//  2. Uniform random traffic; every packet is delivered intact.
//  3. The link between nodes 27 and 28 fails. Node 27 initiates a reconfiguration at the
//     start of its window (global count 27*64); all 64 nodes recover for 4096 cycles and
//     injection is held meanwhile. Afterwards the tables still reach everyone.
//  4. Traffic that needs the failed link (e.g. 24 -> 31, 27 -> 28) escapes to the
//     Up*/Down* VC and is delivered; random traffic again, all delivered.
// Scoreboard and counters as in the reduced end-to-end testbench.
module tb_hermes_noc_full;
  import hermes_pkg::*;
  localparam int NODES = 64;
  logic clk = 0, rst_n = 0;
  logic [55:0] link_faulty_h = '0;
  logic [55:0] link_faulty_v = '0;
  logic [NODES-1:0][3:0] flag_lane_fault = '0;
  logic [NODES-1:0] req_valid = '0, req_ready, rx_valid, rx_ok, sr, ar;
  logic [NODES-1:0][ID_W-1:0] req_dest = '0, rx_src;
  logic [NODES-1:0][31:0] req_payload = '0;
  logic [NODES-1:0][15:0] rx_seq;
  logic [NODES-1:0][7:0] rx_len;
  logic [NODES-1:0][1:0] rx_vc;
  logic [11:0] clk_count;
  logic [NODES-1:0][3:0] port_dir, flag_mismatch;
  logic [NODES-1:0][NODES-1:0] reach_mask;
  logic [NODES-1:0][NUM_PORTS-1:0] ev_escape, ev_drop, ev_frozen;

  hermes_noc dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_reconf = 0, n_stall = 0, n_escape = 0, n_drop = 0, n_sent = 0, n_rx = 0;
  int exp_dest[int];
  int sent_seq[NODES];
  int pending[NODES][$];
  logic sr_q = 0;

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s t=%0t", what, $time); end
  endtask

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
      end
      n_escape += $countones(ev_escape[n]);
      n_drop   += $countones(ev_drop[n]);
    end
    if (sr[0] && !sr_q) n_reconf++;
    sr_q <= sr[0];
  end
  always @(negedge clk) for (int n = 0; n < NODES; n++) begin
    req_valid[n] <= pending[n].size() > 0;
    req_dest[n]  <= pending[n].size() > 0 ? ID_W'(pending[n][0]) : '0;
    req_payload[n] <= $urandom;
  end

  task automatic traffic(int count);
    for (int k = 0; k < count; k++) begin
      automatic int s = $urandom_range(NODES-1);
      automatic int d = $urandom_range(NODES-1);
      if (d != s) pending[s].push_back(d);
    end
  endtask
  task automatic check_tables(string when);
    for (int n = 0; n < NODES; n++)
      chk(reach_mask[n] == ~(64'd1 << n), $sformatf("%s: table of %0d complete", when, n));
  endtask

  initial begin #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. start-up configuration
    while (sr == 0) @(negedge clk);
    while (sr != 0) @(negedge clk);
    check_tables("start-up");
    // 2. traffic
    traffic(300);
    repeat (2500) @(negedge clk);
    chk(exp_dest.size() == 0, $sformatf("all delivered before the fault (%0d left)", exp_dest.size()));
    // 3. link 27-28 fails (row 3, between x=3 and x=4)
    link_faulty_h[3*7+3] = 1'b1;
    while (!sr[27]) @(negedge clk);
    chk(clk_count == 12'(27*64 + 1), "node 27 initiates at the start of its window");
    chk(port_dir[27] == 4'b1111, "root marks all ports down");
    while (sr != 0) @(negedge clk);
    check_tables("after fault");
    // 4. traffic across the failed link and random traffic
    pending[24].push_back(31); pending[27].push_back(28); pending[28].push_back(26);
    traffic(300);
    repeat (3000) @(negedge clk);
    chk(exp_dest.size() == 0, $sformatf("all delivered after the fault (%0d left)", exp_dest.size()));
    chk(n_escape >= 3, "escapes around the failed link");
    chk(n_drop == 0, "nothing dropped in a connected network");
    chk(n_reconf == 2, $sformatf("start-up and fault reconfiguration (%0d)", n_reconf));
    $display("full size: reconf=%0d stall=%0d escape=%0d sent=%0d rx=%0d",
             n_reconf, n_stall, n_escape, n_sent, n_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
