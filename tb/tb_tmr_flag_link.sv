// Testbench for tmr_flag_link: all 64 combinations of three 2-bit lanes, compared with
// a bit-count majority, plus the mismatch flag.
module tb_tmr_flag_link;
  logic [2:0][1:0] lanes;
  logic [1:0] flags;
  logic mismatch;
  int checks = 0, failures = 0;
  tmr_flag_link dut (.*);
  initial begin
    for (int a = 0; a < 64; a++) begin
      logic [1:0] exp;
      lanes = 6'(a);
      #1;
      for (int b = 0; b < 2; b++)
        exp[b] = (int'(lanes[0][b]) + int'(lanes[1][b]) + int'(lanes[2][b])) >= 2;
      checks++;
      if (flags != exp || mismatch != !(lanes[0] == lanes[1] && lanes[1] == lanes[2])) begin
        failures++; $display("FAIL lanes=%b flags=%b", lanes, flags);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
