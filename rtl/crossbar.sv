// crossbar: NPORTS x NPORTS flit crossbar.
//
// Output o carries the flit of input sel[o] when valid[o] is set, otherwise an empty
// (valid = 0) flit. Combinational; the router registers its outputs.
module crossbar
  import hermes_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_PORTS
) (
  input  flit_t [NPORTS-1:0]      in_flit,
  input  logic  [NPORTS-1:0]      valid,
  input  logic  [NPORTS-1:0][2:0] sel,
  output flit_t [NPORTS-1:0]      out_flit
);
  always_comb
    for (int o = 0; o < NPORTS; o++) begin
      out_flit[o] = '0;
      if (valid[o] && 32'(sel[o]) < NPORTS) out_flit[o] = in_flit[sel[o]];
    end
endmodule
