// Testbench for input_unit at node 27 (x=3, y=3) of the 8x8 mesh.
//  1. Pipeline timing: a head written at edge t requests VC allocation from cycle t+1
//     (RC takes one cycle), is active one cycle after the VA grant.
//  2. Random traffic on all three VCs with random VA grants and switch pops: popped flits
//     must come out per VC in order, with the VC field rewritten to the allocated output
//     VC; each packet's output port/VC is compared with an XY/YX/Up*-Down* reference
//     model including faulty links (escape to VC2); credits must match flits removed.
//  3. Unroutable packet (invalid table entry): drained without switch pops, drop seen.
//  4. Freeze: no routing while freeze is high.
module tb_input_unit;
  import hermes_pkg::*;
  logic clk = 0, rst_n = 0, freeze = 0;
  flit_t in_flit;
  logic [2:0] credit_out, va_req, vc_active, vc_empty, va_grant, sa_pop;
  logic [2:0][2:0] vc_out_port; logic [2:0][1:0] vc_out_vc;
  logic [3:0] port_faulty = 0, tbl_port;
  logic [7:0] tbl_dest; logic tbl_valid;
  flit_t pop_flit;
  logic ev_escape, ev_drop, ev_frozen;
  logic tbl_ok = 1;
  int checks = 0, failures = 0, credits = 0, pops = 0, escapes = 0, drops = 0, routed = 0;
  flit_t sent[3][$];
  input_unit #(.NODE_ID(27)) dut (.*);
  always #5 clk = ~clk;
  // routing table model: port = one-hot of (dest % 4)
  assign tbl_port  = 4'(1 << (tbl_dest % 4));
  assign tbl_valid = tbl_ok;
  always @(posedge clk) begin
    credits += $countones(credit_out);
    if (ev_escape) escapes++;
    if (ev_drop) drops++;
  end
  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask
  function automatic flit_t mk(int vc, flit_type_e ty, int dest, int k);
    flit_t f; f = '0; f.valid = 1; f.vc = 2'(vc); f.ftype = ty;
    f.data = {96'(k), 8'(27), 8'(dest)}; f.data[127:96] = $urandom; return f;
  endfunction
  function automatic void ref_route(int dest, int vc, output int p, output int ov);
    int dx = dest % 8, dy = dest / 8, xp, yp, dor;
    xp = dx > 3 ? 1 : 3; yp = dy > 3 ? 2 : 0;
    dor = (vc == 1) ? ((dy != 3) ? yp : xp) : ((dx != 3) ? xp : yp);
    ov = vc;
    if (dest == 27) p = 4;
    else if (vc != 2 && !port_faulty[dor]) p = dor;
    else begin ov = 2; p = tbl_ok ? dest % 4 : 5; end
  endfunction
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_flit = '0; va_grant = 0; sa_pop = 0;
    @(negedge clk); rst_n = 1; @(negedge clk); credits = 0;
    // ---- 1. timing ----
    in_flit = mk(0, FLIT_HEADTAIL, 30, 0);
    @(negedge clk); in_flit = '0;           // written at the edge just passed
    chk(va_req == 0, "no VA request in RC cycle");
    @(negedge clk);
    chk(va_req == 3'b001, "VA request one cycle after write");
    chk(vc_out_port[0] == 3'd1 && vc_out_vc[0] == 2'd0, "XY east");
    va_grant = 3'b001; @(negedge clk); va_grant = 0;
    chk(vc_active == 3'b001, "active after VA grant");
    sa_pop = 3'b001; #1; chk(pop_flit.vc == 0 && head_dest(pop_flit) == 30, "pop flit");
    @(negedge clk); sa_pop = 0;
    @(negedge clk); chk(vc_active == 0 && credits == 1, "idle and credit after tail");
    // ---- 2. random traffic ----
    credits = 0;
    port_faulty = 4'b0010;   // east link faulty: XY packets going east escape
    fork
      begin : producer
        for (int pk = 0; pk < 60; pk++) begin
          automatic int vc = $urandom % 3, dest = $urandom % 64, len = 1 + $urandom % 4;
          for (int k = 0; k < len; k++) begin
            automatic flit_type_e ty = (len == 1) ? FLIT_HEADTAIL : (k == 0) ? FLIT_HEAD : (k == len-1) ? FLIT_TAIL : FLIT_BODY;
            automatic flit_t f = mk(vc, ty, dest, pk*8 + k);
            // respect buffer space (6 flits) using the model queue
            while (sent[vc].size() >= 6) @(negedge clk);
            in_flit = f; sent[vc].push_back(f);
            @(negedge clk); in_flit = '0;
            if ($urandom % 2) @(negedge clk);
          end
        end
      end
      begin : consumer
        automatic int idle = 0;
        while (idle < 200) begin
          va_grant = 0; sa_pop = 0;
          for (int v = 0; v < 3; v++) if (va_req[v] && $urandom % 2) begin
            automatic int p, ov; automatic flit_t h = sent[v][0];
            ref_route(head_dest(h), v, p, ov);
            chk(is_head(h), "VA for a head");
            chk(vc_out_port[v] == 3'(p) && vc_out_vc[v] == 2'(ov), $sformatf("route dest=%0d vc=%0d", head_dest(h), v));
            va_grant[v] = 1; routed++;
          end
          begin
            automatic int v = $urandom % 3;
            if (vc_active[v] && !vc_empty[v] && $urandom % 4 != 0) begin
              automatic flit_t exp = sent[v].pop_front();
              sa_pop[v] = 1; #1;
              exp.vc = vc_out_vc[v];
              chk(pop_flit == exp, "popped flit in order");
              pops++;
            end
          end
          if (sent[0].size() + sent[1].size() + sent[2].size() == 0) idle++; else idle = 0;
          @(negedge clk);
        end
      end
    join
    va_grant = 0; sa_pop = 0;
    @(negedge clk); @(negedge clk);
    chk(credits == pops, $sformatf("credits %0d == pops %0d", credits, pops));
    chk(escapes > 0, "some packets escaped to Up*/Down*");
    chk(routed >= 60, "all packets routed");
    // ---- 3. drop ----
    tbl_ok = 0; credits = 0;
    in_flit = mk(2, FLIT_HEAD, 5, 0); @(negedge clk);
    in_flit = mk(2, FLIT_BODY, 5, 1); @(negedge clk);
    in_flit = mk(2, FLIT_TAIL, 5, 2); @(negedge clk); in_flit = '0;
    repeat (6) @(negedge clk);
    chk(drops == 1 && credits == 3 && vc_empty == 3'b111 && va_req == 0, "unroutable packet drained");
    tbl_ok = 1;
    // ---- 4. freeze ----
    freeze = 1;
    in_flit = mk(1, FLIT_HEADTAIL, 0, 0); @(negedge clk); in_flit = '0;
    repeat (20) begin @(negedge clk); chk(va_req == 0 && ev_frozen, "frozen head"); end
    freeze = 0; @(negedge clk); @(negedge clk);
    chk(va_req == 3'b010 && vc_out_port[1] == 3'd0, "routed after unfreeze (YX north)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
