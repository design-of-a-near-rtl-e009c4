// Testbench for updown_logic: reset value, marking on a first DRF (reception ports up,
// others down), marking as root (all down), and holding the value otherwise.
module tb_updown_logic;
  logic clk = 0, rst_n = 0, enter_recovery = 0, as_root = 0;
  logic [3:0] drf_in = 0, dir, dir_next;
  int checks = 0, failures = 0;
  updown_logic dut (.*);
  always #5 clk = ~clk;
  task automatic chk(logic [3:0] exp, string what);
    checks++;
    if (dir !== exp) begin failures++; $display("FAIL %s dir=%b exp=%b", what, dir, exp); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); chk(4'b1111, "reset");
    rst_n = 1;
    // first DRF arrives on the East port (Fig. 2: node 0 receives from node 1)
    drf_in = 4'b0010; enter_recovery = 1;
    #1; checks++; if (dir_next !== 4'b1101) failures++;
    @(negedge clk); enter_recovery = 0; chk(4'b1101, "first drf east");
    // later flags do not change the marking
    drf_in = 4'b0101;
    repeat (3) @(negedge clk); chk(4'b1101, "hold");
    // two ports at once (node 3 of Fig. 2: north and east)
    drf_in = 4'b0011; enter_recovery = 1;
    @(negedge clk); enter_recovery = 0; chk(4'b1100, "two ports");
    // root: everything down
    drf_in = 4'b0000; enter_recovery = 1; as_root = 1;
    @(negedge clk); enter_recovery = 0; as_root = 0; chk(4'b1111, "root");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
