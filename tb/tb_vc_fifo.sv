// Testbench for vc_fifo (6 flits): random pushes and pops under a full/empty-respecting
// policy, compared against a queue model; checks empty/full flags and data order.
module tb_vc_fifo;
  import hermes_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, empty, full;
  flit_t wr_flit, rd_flit;
  flit_t q[$];
  int checks = 0, failures = 0, maxfill = 0;
  vc_fifo dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_flit = '0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 6)) begin
        failures++; if (failures < 5) $display("FAIL flags size=%0d", q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rd_flit !== q[0]) begin failures++; if (failures < 5) $display("FAIL data"); end
      end
      wr_en = !full && ($urandom % 3 != 0);
      rd_en = !empty && ($urandom % 2 == 0);
      wr_flit = '0; wr_flit.valid = 1; wr_flit.data = {$urandom, $urandom, $urandom, $urandom};
      wr_flit.ftype = flit_type_e'($urandom % 4);
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_flit);
      if (q.size() > maxfill) maxfill = q.size();
      @(negedge clk);
    end
    checks++; if (maxfill != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
