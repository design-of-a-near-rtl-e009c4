// Testbench for network_interface (node 3, 6-flit packets, 6-flit buffers).
// Injection: 200 packets through a model router input that returns credits after a
// random delay; checks flit order/types/header fields, that no more than 6 flits per VC
// are ever outstanding, that the O1TURN variant uses XY and YX about equally, and that
// the H-XY variant uses only VC0. Recovery: req_ready is low while sr is high.
// Ejection: interleaved packets on three VCs are reassembled; rx_* and credits checked.
module tb_network_interface;
  import hermes_pkg::*;
  logic clk = 0, rst_n = 0, sr = 0;
  logic req_valid = 0, req_ready, req_ready2;
  logic [7:0] req_dest = 0; logic [31:0] req_payload = 0;
  flit_t inj_flit, inj_flit2, ej_flit;
  logic [2:0] inj_credit = 0, inj_credit2 = 0, ej_credit, ej_credit2;
  logic rx_valid, rx_ok; logic [7:0] rx_src, rx_len; logic [15:0] rx_seq; logic [1:0] rx_vc;
  int checks = 0, failures = 0, outstanding[3], nvc[3], fidx = 0, pk_rx = 0, credits_back = 0, xy2 = 0;
  int exp_dest[$];
  network_interface #(.NODE_ID(3)) dut (.clk, .rst_n, .sr, .req_valid, .req_dest, .req_payload,
    .req_ready, .inj_flit, .inj_credit, .ej_flit, .ej_credit, .rx_valid, .rx_src, .rx_seq,
    .rx_len, .rx_ok, .rx_vc);
  network_interface #(.NODE_ID(3), .MODE(MODE_H_XY)) dut_xy (.clk, .rst_n, .sr,
    .req_valid, .req_dest, .req_payload, .req_ready(req_ready2), .inj_flit(inj_flit2),
    .inj_credit(inj_credit2), .ej_flit('0), .ej_credit(ej_credit2), .rx_valid(), .rx_src(),
    .rx_seq(), .rx_len(), .rx_ok(), .rx_vc());
  always #5 clk = ~clk;
  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask
  // model of the router's local input: take each flit, give the credit back later
  logic [2:0] pend [$];
  always @(posedge clk) if (rst_n) begin
    inj_credit <= 0;
    inj_credit2 <= 0;
    if (inj_flit2.valid) begin inj_credit2[inj_flit2.vc] <= 1; if (inj_flit2.vc == 0) xy2++; end
    if (pend.size() > 0 && $urandom % 3 == 0) inj_credit <= pend.pop_front();
    if (inj_flit.valid) begin
      automatic int v = inj_flit.vc;
      automatic flit_type_e ety = (fidx == 0) ? FLIT_HEAD : (fidx == 5) ? FLIT_TAIL : FLIT_BODY;
      pend.push_back(3'(1 << v));
      outstanding[v]++;
      chk(outstanding[v] <= 6, "credit respected");
      chk(inj_flit.ftype == ety, "flit type");
      chk(head_dest(inj_flit) == 8'(exp_dest[0]) && head_src(inj_flit) == 8'd3 &&
          inj_flit.data[39:32] == 8'(fidx), "flit fields");
      chk(v == 0 || v == 1, "injects on XY or YX only");
      if (fidx == 0) nvc[v]++;
      fidx = (fidx == 5) ? 0 : fidx + 1;
      if (fidx == 0) void'(exp_dest.pop_front());
    end
    for (int v = 0; v < 3; v++) if (inj_credit[v]) outstanding[v]--;
    if (rx_valid) begin pk_rx++; chk(rx_ok && rx_len == 8'd6, "rx packet ok"); end
    credits_back += $countones(ej_credit);
  end
  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    @(negedge clk); credits_back = 0;
    for (int p = 0; p < 200; p++) begin
      req_valid = 1; req_dest = 8'($urandom % 64); req_payload = $urandom;
      @(posedge clk); while (!req_ready) @(posedge clk);
      exp_dest.push_back(req_dest);
      @(negedge clk); req_valid = 0;
      if (p == 100) begin
        sr = 1;
        repeat (5) begin @(negedge clk); end
        chk(!req_ready, "no injection while recovering");
        sr = 0;
      end
    end
    repeat (200) @(negedge clk);
    chk(exp_dest.size() == 0, "all packets sent");
    chk(nvc[0] > 60 && nvc[1] > 60, $sformatf("O1TURN split %0d/%0d", nvc[0], nvc[1]));
    chk(xy2 > 0, "H-XY variant injected");
    // ejection: three packets from node 9 interleaved over VC0..VC2
    for (int k = 0; k < 6; k++)
      for (int v = 0; v < 3; v++) begin
        flit_t f; f = '0; f.valid = 1; f.vc = 2'(v);
        f.ftype = (k == 0) ? FLIT_HEAD : (k == 5) ? FLIT_TAIL : FLIT_BODY;
        f.data[7:0] = 8'd3; f.data[15:8] = 8'd9; f.data[31:16] = 16'(v); f.data[39:32] = 8'(k);
        ej_flit = f; @(negedge clk);
      end
    ej_flit = '0;
    repeat (3) @(negedge clk);
    chk(pk_rx == 3, "three packets reassembled");
    chk(credits_back == 18, "ejection credits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // the H-XY variant never uses VC1 or VC2
  always @(posedge clk) if (inj_flit2.valid) chk(inj_flit2.vc == 0, "H-XY uses VC0 only");
endmodule
