// Testbench for routing_table (8x8, 64 entries): fills entries from DRF flags with
// random ports, checks one-hot priority N>E>S>W, reads on all five ports, checks that
// invalidate clears every entry while a same-cycle write survives, and the valid mask.
module tb_routing_table;
  logic clk = 0, rst_n = 0, invalidate = 0, wr_en = 0;
  logic [5:0] wr_idx = 0;
  logic [3:0] drf_in = 0;
  logic [4:0][7:0] rd_idx = '0;
  logic [4:0][3:0] rd_port;
  logic [4:0] rd_valid;
  logic [63:0] valid_mask;
  logic [3:0] model [64];
  logic [63:0] mvalid;
  int checks = 0, failures = 0;
  routing_table dut (.*);
  always #5 clk = ~clk;
  function automatic logic [3:0] prio(logic [3:0] f);
    for (int i = 0; i < 4; i++) if (f[i]) return 4'(1 << i);
    return 4'b0;
  endfunction
  task automatic check_reads();
    for (int k = 0; k < 20; k++) begin
      for (int r = 0; r < 5; r++) rd_idx[r] = 8'($urandom % 70);
      #1;
      for (int r = 0; r < 5; r++) begin
        automatic int i = rd_idx[r];
        automatic logic ev = (i < 64) ? mvalid[i] : 1'b0;
        checks++;
        if (rd_valid[r] !== ev || (ev && rd_port[r] !== model[i])) begin
          failures++; if (failures < 6) $display("FAIL read idx=%0d", i);
        end
      end
    end
    checks++; if (valid_mask !== mvalid) failures++;
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    mvalid = '0;
    @(negedge clk); rst_n = 1;
    check_reads();
    for (int t = 0; t < 200; t++) begin
      wr_en = 1; wr_idx = 6'($urandom); drf_in = 4'($urandom % 15 + 1);
      model[wr_idx] = prio(drf_in); mvalid[wr_idx] = 1;
      @(negedge clk);
    end
    wr_en = 0;
    check_reads();
    invalidate = 1; wr_en = 1; wr_idx = 6'd9; drf_in = 4'b1100;
    mvalid = '0; mvalid[9] = 1; model[9] = 4'b0100;
    @(negedge clk); invalidate = 0; wr_en = 0;
    check_reads();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
