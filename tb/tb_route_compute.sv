// Testbench for route_compute at node 27 (x=3, y=3) of an 8x8 mesh: every destination,
// every input VC and random link faults, against a reference XY/YX/Up*-Down* model
// (healthy dimension-order port kept; faulty one switches to VC2 and the table port;
// invalid table entry drops; own ID ejects).
module tb_route_compute;
  import hermes_pkg::*;
  logic [7:0] dest; logic [1:0] in_vc; logic [3:0] port_faulty, tbl_port;
  logic tbl_valid; logic [2:0] out_port; logic [1:0] out_vc; logic escape;
  int checks = 0, failures = 0;
  route_compute #(.NODE_ID(27)) dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 4000; t++) begin
      int dx, dy, xp, yp, dor, ep, ev; bit esc;
      dest = 8'($urandom % 64); in_vc = 2'($urandom % 3);
      port_faulty = 4'($urandom); tbl_valid = $urandom % 4 != 0;
      tbl_port = 4'(1 << ($urandom % 4));
      #1;
      dx = dest % 8; dy = dest / 8;
      xp = dx > 3 ? 1 : 3; yp = dy > 3 ? 2 : 0;
      if (in_vc == 1) dor = (dy != 3) ? yp : xp; else dor = (dx != 3) ? xp : yp;
      esc = 0; ev = in_vc;
      if (dest == 27) ep = 4;
      else if (in_vc != 2 && !port_faulty[dor]) ep = dor;
      else begin
        esc = in_vc != 2; ev = 2;
        ep = !tbl_valid ? 5 : tbl_port[0] ? 0 : tbl_port[1] ? 1 : tbl_port[2] ? 2 : 3;
      end
      checks++;
      if (out_port != 3'(ep) || out_vc != 2'(ev) || escape != esc) begin
        failures++;
        if (failures < 6) $display("FAIL dest=%0d vc=%0d f=%b port=%0d/%0d", dest, in_vc, port_faulty, out_port, ep);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
