// Testbench for flag_forwarding: random stimulus against a reference written from the
// Up*/Down* forwarding rules (down->any, up->down only, no send on a port that received
// a flag, AF on faulty ports, nothing from the last cycle of a window, root sends on all
// ports), checked one cycle later because the outputs are registered.
module tb_flag_forwarding;
  logic clk = 0, rst_n = 0;
  logic root_now = 0, first_drf = 0, window_last = 0;
  logic [3:0] drf_in = 0, dir = 0, rx_mask = 0, port_faulty = 0, drf_out, af_out;
  int checks = 0, failures = 0;
  flag_forwarding dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [3:0] exp_drf, exp_af;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      root_now    = ($urandom % 8) == 0;
      first_drf   = !root_now && ($urandom % 2);
      window_last = ($urandom % 10) == 0;
      drf_in      = 4'($urandom);
      dir         = 4'($urandom);
      port_faulty = 4'($urandom);
      rx_mask     = drf_in | 4'($urandom & $urandom);
      exp_drf = 0; exp_af = 0;
      if (root_now) begin
        exp_drf = ~port_faulty; exp_af = port_faulty;
      end else if (first_drf) begin
        for (int y = 0; y < 4; y++) begin
          bit ok;
          ok = 0;
          for (int x = 0; x < 4; x++)
            if (drf_in[x] && !(dir[x] == 1'b0 && dir[y] == 1'b0)) ok = 1;  // no up->up
          if (!rx_mask[y]) begin
            if (port_faulty[y]) exp_af[y] = 1;
            else if (ok)        exp_drf[y] = 1;
          end
        end
      end
      if (window_last) begin exp_drf = 0; exp_af = 0; end
      @(negedge clk);
      checks++;
      if (drf_out !== exp_drf || af_out !== exp_af) begin
        failures++;
        if (failures < 6) $display("FAIL t=%0d drf=%b/%b af=%b/%b", t, drf_out, exp_drf, af_out, exp_af);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
