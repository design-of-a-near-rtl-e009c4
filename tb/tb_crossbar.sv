// Testbench for crossbar: random selections, each output compared with the selected
// input flit, or an empty flit when the output is not valid.
module tb_crossbar;
  import hermes_pkg::*;
  flit_t [4:0] in_flit, out_flit;
  logic [4:0] valid;
  logic [4:0][2:0] sel;
  int checks = 0, failures = 0;
  crossbar dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 5; i++) begin
        in_flit[i] = '0; in_flit[i].valid = 1; in_flit[i].data = {$urandom, $urandom, $urandom, $urandom};
        in_flit[i].vc = 2'($urandom % 3);
        sel[i] = 3'($urandom % 5); valid[i] = $urandom % 2;
      end
      #1;
      for (int o = 0; o < 5; o++) begin
        checks++;
        if (out_flit[o] !== (valid[o] ? in_flit[sel[o]] : flit_t'('0))) begin
          failures++; if (failures < 5) $display("FAIL o=%0d", o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
