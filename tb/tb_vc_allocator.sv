// Testbench for vc_allocator (5 ports x 3 VCs): random requests and busy flags. Checks
// that a grant goes only to a requester whose output VC is free, at most one grant per
// output VC, that every free requested output VC is granted to someone, and that a
// requester kept waiting is served within 15 rounds (round-robin fairness).
module tb_vc_allocator;
  logic clk = 0, rst_n = 0;
  logic [14:0] req, busy, grant;
  logic [14:0][2:0] req_port;
  logic [14:0][1:0] req_vc;
  int checks = 0, failures = 0, wait_cnt;
  vc_allocator dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int taken[15];
      req = 15'($urandom); busy = 15'($urandom & $urandom);
      for (int r = 0; r < 15; r++) begin req_port[r] = 3'($urandom % 5); req_vc[r] = 2'($urandom % 3); end
      #1;
      taken = '{default: 0};
      for (int r = 0; r < 15; r++) if (grant[r]) begin
        automatic int o = req_port[r]*3 + req_vc[r];
        taken[o]++;
        checks++; if (!req[r] || busy[o]) begin failures++; $display("FAIL bad grant r=%0d", r); end
      end
      for (int o = 0; o < 15; o++) begin
        bit wanted;
        wanted = 0;
        for (int r = 0; r < 15; r++) if (req[r] && req_port[r]*3 + req_vc[r] == o) wanted = 1;
        checks++;
        if (taken[o] > 1 || (wanted && !busy[o] && taken[o] != 1)) begin failures++; $display("FAIL out %0d", o); end
      end
      @(negedge clk);
    end
    // fairness: all 15 requesters want output VC (2,1), nothing busy
    req = '1; busy = '0;
    for (int r = 0; r < 15; r++) begin req_port[r] = 3'd2; req_vc[r] = 2'd1; end
    begin
      logic [14:0] seen;
      seen = 0;
      for (int k = 0; k < 15; k++) begin #1; seen |= grant; @(negedge clk); end
      checks++; if (seen != '1) begin failures++; $display("FAIL fairness %b", seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
