// Testbench for global_clock_counter: checks the counter against a cycle count over more
// than one full wrap (4096 cycles for the 8x8 default) and checks its reset value.
module tb_global_clock_counter;
  logic clk = 0, rst_n = 0;
  logic [11:0] count;
  int checks = 0, failures = 0;
  global_clock_counter dut (.clk, .rst_n, .count);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    checks++; if (count !== 0) failures++;
    @(negedge clk) rst_n = 1;
    for (int c = 1; c <= 5000; c++) begin
      @(negedge clk);
      checks++;
      if (count != 12'(c)) begin failures++; if (failures < 5) $display("FAIL c=%0d count=%0d", c, count); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
