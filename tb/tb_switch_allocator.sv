// Testbench for switch_allocator (5x5, 3 VCs): random requests. Checks at most one VC
// per input and one input per output, grants only for requests, consistency of out_sel
// with the granted VC's port, no idle output that some input's request could use
// (maximal w.r.t. stage-1 choices is not required, so only "some grant if any request
// for an output" is checked when that output is requested by an otherwise unmatched
// input), and fairness under full load.
module tb_switch_allocator;
  logic clk = 0, rst_n = 0;
  logic [4:0][2:0] req;
  logic [4:0][2:0][2:0] req_port;
  logic [4:0][2:0] vc_grant;
  logic [4:0] out_valid;
  logic [4:0][2:0] out_sel;
  int checks = 0, failures = 0;
  switch_allocator dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int grants_total = 0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 5; i++) begin
        req[i] = 3'($urandom);
        for (int v = 0; v < 3; v++) req_port[i][v] = 3'($urandom % 5);
      end
      #1;
      for (int i = 0; i < 5; i++) begin
        checks++;
        if ($countones(vc_grant[i]) > 1 || (vc_grant[i] & ~req[i]) != 0) begin failures++; $display("FAIL in %0d", i); end
      end
      for (int o = 0; o < 5; o++) begin
        int n;
        n = 0;
        for (int i = 0; i < 5; i++)
          for (int v = 0; v < 3; v++)
            if (vc_grant[i][v] && req_port[i][v] == 3'(o)) begin
              n++;
              checks++; if (!out_valid[o] || out_sel[o] != 3'(i)) begin failures++; $display("FAIL sel o=%0d", o); end
            end
        checks++; if (n > 1 || (out_valid[o] && n == 0)) begin failures++; $display("FAIL out %0d n=%0d", o, n); end
        grants_total += n;
      end
      @(negedge clk);
    end
    checks++; if (grants_total < 2000) begin failures++; $display("FAIL too few grants %0d", grants_total); end
    // fairness: all inputs, all VCs to output 3
    req = '1;
    for (int i = 0; i < 5; i++) for (int v = 0; v < 3; v++) req_port[i][v] = 3'd3;
    begin
      logic [4:0][2:0] seen;
      seen = '0;
      for (int k = 0; k < 15; k++) begin #1; seen |= vc_grant; @(negedge clk); end
      checks++; if (seen != '1) begin failures++; $display("FAIL fairness %b", seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
