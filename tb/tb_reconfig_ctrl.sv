// Testbench for reconfig_ctrl in a 2x2 mesh (L = 2, windows of 4 cycles, N^2 = 16) for
// node 1. Scenarios: a new link fault makes the node root at its window (count 4) and
// SR stays set for exactly 16 cycles; an AF while normal sets AR and the alerted node
// then initiates at its window, clearing AR; AF flags are ignored while recovering; only
// the first DRF of a window is handled; a DRF while normal enters recovery and resets AR.
module tb_reconfig_ctrl;
  logic clk = 0, rst_n = 0;
  logic [3:0] drf_in = 0, af_in = 0, port_faulty = 0, rx_mask_now;
  logic [3:0] count = 0;
  logic my_window, window_start, can_initiate;
  logic sr, ar, fault_pending, root_now, first_drf, enter_recovery;
  int checks = 0, failures = 0, sr_cycles;
  reconfig_ctrl #(.MESH_X(2), .MESH_Y(2)) dut (.*);
  assign my_window    = count[3:2] == 2'd1;
  assign window_start = count[1:0] == 2'd0;
  assign can_initiate = my_window && window_start;
  always #5 clk = ~clk;
  always @(posedge clk) count <= rst_n ? count + 1'b1 : 4'd0;
  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (count=%0d)", what, count); end
  endtask
  task automatic to_count(int c);   // advance to the negedge where count == c
    do @(negedge clk); while (count != 4'(c));
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    to_count(1);
    chk(!sr && !ar, "idle after reset");
    port_faulty = 4'b0010;            // east link fails
    @(negedge clk); chk(fault_pending, "fault pending");
    to_count(4);
    chk(root_now && enter_recovery, "root at own window");
    sr_cycles = 0;
    @(negedge clk);
    while (sr) begin sr_cycles++; @(negedge clk); end
    chk(sr_cycles == 15, $sformatf("sr high 15 cycles after entry (%0d)", sr_cycles));
    chk(!fault_pending, "pending cleared");
    // next own window: nothing pending, no broadcast
    to_count(4); chk(!root_now, "no root when idle");
    // AF while normal -> alert
    to_count(9); af_in = 4'b0100; @(negedge clk); af_in = 0;
    chk(ar && !sr, "alert set");
    to_count(4); chk(root_now && enter_recovery, "alerted node initiates");
    @(negedge clk); chk(sr && !ar, "alert cleared on initiation");
    // AF ignored while recovering
    to_count(9); af_in = 4'b0001; @(negedge clk); af_in = 0; chk(!ar, "AF ignored in recovery");
    // first DRF of a window only (window of node 2: counts 8..11)
    to_count(13); drf_in = 4'b1000; #1; chk(first_drf, "first drf handled");
    @(negedge clk); drf_in = 4'b0001; #1; chk(!first_drf, "second drf ignored");
    chk(rx_mask_now == 4'b1001, "rx mask");
    @(negedge clk); drf_in = 0;
    // wait for recovery to end, then AF then DRF while normal
    while (sr) @(negedge clk);
    to_count(10); af_in = 4'b0010; @(negedge clk); af_in = 0; chk(ar, "alert again");
    drf_in = 4'b0010; #1; chk(first_drf && enter_recovery, "drf enters recovery");
    @(negedge clk); drf_in = 0; chk(sr && !ar, "drf resets alert");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
