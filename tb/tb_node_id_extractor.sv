// Testbench for node_id_extractor: sweeps the whole 12-bit counter of an 8x8 mesh for
// node 37 and checks the decoded slot, cycle and the initiate condition (slot == 37 and
// cycle == 0, true for exactly one counter value).
module tb_node_id_extractor;
  logic [11:0] count;
  logic [5:0]  bcast_node, bcast_cycle;
  logic        my_window, can_initiate, window_start, window_last;
  int checks = 0, failures = 0, initiates = 0;
  node_id_extractor #(.NODE_ID(37)) dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 4096; c++) begin
      count = 12'(c);
      #1;
      checks++;
      if (bcast_node != 6'(c / 64) || bcast_cycle != 6'(c % 64) ||
          my_window != (c / 64 == 37) || window_start != (c % 64 == 0) ||
          window_last != (c % 64 == 63) || can_initiate != (c == 37*64)) begin
        failures++;
        if (failures < 5) $display("FAIL count=%0d", c);
      end
      if (can_initiate) initiates++;
    end
    checks++; if (initiates != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
