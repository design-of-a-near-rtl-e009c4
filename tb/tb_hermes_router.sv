// Testbench for hermes_router, node 27 (x=3, y=3) of the 8x8 mesh, full size.
//  1. Zero-load hop latency: a head written into the local input buffer at edge t
//     leaves on the east output register after edge t+4 (RC, VA, SA, ST), i.e. it reaches
//     the next router's buffer at edge t+5 including the one-cycle link.
//  2. Credit back-pressure: with no credits returned only 6 flits (buffer depth) per
//     output VC leave; a third packet waits; after credits return all 18 leave in order.
//  3. New fault on the west link: the router becomes root in its own window (global
//     count 27*64), sends DRF on N, E, S and AF on W the next cycle, and enters recovery.
//  4. Recovery: DRF arriving from the south in node 26's window fills table entry 26 and
//     is forwarded (N, E as DRF; W as AF); the recovery lasts N^2 = 4096 cycles counting
//     the initiation cycle (SR is visible for the following 4095).
//  5. After recovery: an XY packet to node 26 meets the faulty west link and escapes to
//     the Up*/Down* VC through the south port; a VC2 packet to a node without a table
//     entry is dropped; a packet for node 27 is ejected on the local port.
module tb_hermes_router;
  import hermes_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] clk_count = 0;
  logic [3:0] port_faulty = 0, drf_in = 0, af_in = 0, drf_out, af_out, port_dir;
  flit_t [4:0] in_flit, out_flit;
  logic [4:0][2:0] credit_out, credit_in;
  logic sr, ar;
  logic [63:0] reach_mask;
  logic [4:0] ev_escape, ev_drop, ev_frozen;
  logic hold_east = 0;
  int checks = 0, failures = 0, drops = 0, escapes = 0, sr_len = 0;
  flit_t got[5][$];
  hermes_router #(.NODE_ID(27)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) clk_count <= rst_n ? clk_count + 1'b1 : '0;
  // output monitor and credit return (east held back on request)
  logic [2:0] east_owed = 0;
  logic [1:0] east_pend[$];
  always @(posedge clk) begin
    credit_in <= '0;
    for (int p = 0; p < 5; p++)
      if (out_flit[p].valid) begin
        got[p].push_back(out_flit[p]);
        if (p == 1 && hold_east) east_pend.push_back(out_flit[p].vc);
        else credit_in[p][out_flit[p].vc] <= 1'b1;
      end
    if (!hold_east && east_pend.size() > 0) credit_in[1][east_pend.pop_front()] <= 1'b1;
    drops += $countones(ev_drop);
    escapes += $countones(ev_escape);
    if (sr) sr_len++;
  end
  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 12) $display("FAIL %s t=%0t", what, $time); end
  endtask
  function automatic flit_t mk(int vc, flit_type_e ty, int dest, int k);
    flit_t f; f = '0; f.valid = 1; f.vc = 2'(vc); f.ftype = ty;
    f.data[7:0] = 8'(dest); f.data[15:8] = 8'd99; f.data[39:32] = 8'(k); return f;
  endfunction
  task automatic send_pkt(int port, int vc, int dest, int len);
    for (int k = 0; k < len; k++) begin
      in_flit[port] = mk(vc, (len == 1) ? FLIT_HEADTAIL : (k == 0) ? FLIT_HEAD :
                              (k == len-1) ? FLIT_TAIL : FLIT_BODY, dest, k);
      @(negedge clk);
    end
    in_flit[port] = '0;
  endtask
  task automatic wait_count(int c);
    while (clk_count != 12'(c)) @(negedge clk);
  endtask
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_flit = '0;
    @(negedge clk); rst_n = 1; @(negedge clk);
    // ---- 1. latency ----
    in_flit[4] = mk(0, FLIT_HEADTAIL, 28, 0);
    @(negedge clk); in_flit[4] = '0;                  // written at edge t
    repeat (4) begin chk(!out_flit[1].valid, "not yet out"); @(negedge clk); end
    chk(out_flit[1].valid && head_dest(out_flit[1]) == 28 && out_flit[1].vc == 0,
        "head on east output register after t+4");
    @(negedge clk);
    // ---- 2. back-pressure ----
    foreach (got[p]) got[p].delete();
    hold_east = 1;
    send_pkt(4, 0, 31, 6);
    send_pkt(4, 1, 30, 6);                            // YX, same row: also east
    repeat (20) @(negedge clk);
    send_pkt(4, 0, 29, 6);                            // VC0 again: no credits left for it
    repeat (30) @(negedge clk);
    chk(got[1].size() == 12, $sformatf("6 flits per output VC without credits (%0d)", got[1].size()));
    hold_east = 0;
    repeat (60) @(negedge clk);
    chk(got[1].size() == 18, $sformatf("18 flits after credits (%0d)", got[1].size()));
    for (int k = 0; k < 18 && k < got[1].size(); k++)
      chk(got[1][k].data[39:32] == 8'(k % 6) && got[1][k].vc == 2'(k / 6 == 1 ? 1 : 0), "order");
    // ---- 3. root broadcast after a new fault ----
    port_faulty = 4'b1000;                             // west link fails
    wait_count(27*64);
    chk(!sr, "not recovering before own window");
    @(negedge clk);
    chk(drf_out == 4'b0111 && af_out == 4'b1000 && sr, "root sends DRF N,E,S and AF W");
    chk(port_dir == 4'b1111, "root marks all ports down");
    @(negedge clk);
    chk(drf_out == 0 && af_out == 0, "root sends once");
    // ---- 4. DRF from the south in node 26's window (next round) ----
    wait_count(26*64 + 3);
    drf_in = 4'b0100; @(negedge clk); drf_in = 0;
    chk(drf_out == 4'b0011 && af_out == 4'b1000, "forward DRF from a down port: N,E DRF; W AF");
    chk(reach_mask[26], "table entry 26 valid");
    while (sr) @(negedge clk);
    // initiation cycle (SR still 0) + 4095 cycles with SR set = N^2 cycles
    chk(sr_len == 4095, $sformatf("recovery lasts N^2 cycles (%0d)", sr_len));
    // ---- 5. routing after recovery ----
    foreach (got[p]) got[p].delete();
    send_pkt(4, 0, 26, 2);                            // XY west, west faulty -> escape
    in_flit[0] = '0;
    send_pkt(0, 2, 40, 3);                            // VC2, no entry for 40 -> drop
    send_pkt(1, 1, 27, 2);                            // for this node -> eject
    repeat (20) @(negedge clk);
    chk(escapes >= 1 && got[2].size() == 2 && got[2][0].vc == 2'd2, "escape to Up*/Down* via south");
    chk(drops == 1 && got[3].size() == 0, "unroutable packet dropped");
    chk(got[4].size() == 2 && got[4][0].vc == 2'd1, "ejected locally");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
