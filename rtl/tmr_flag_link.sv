// tmr_flag_link: receiving end of one triplicated link of the 2-bit flag overlay network.
//
// Hermes sends its reconfiguration flags (bit 0 = DRF, bit 1 = AF) between neighbouring
// routers on a separate 2-bit network that must not fail, so each link is carried on
// three copies (lanes) and the receiver takes the bitwise 2-of-3 majority. A single
// broken lane is thus masked. The sender simply drives the same flags on all lanes.
// Triple modular redundancy is the paper's; the bitwise voter is the usual way to build
// it. Combinational.
module tmr_flag_link (
  input  logic [2:0][1:0] lanes,   // three received copies of {AF, DRF}
  output logic [1:0]      flags,   // voted {AF, DRF}
  output logic            mismatch // lanes disagree (a lane is broken)
);
  always_comb begin
    flags    = (lanes[0] & lanes[1]) | (lanes[0] & lanes[2]) | (lanes[1] & lanes[2]);
    mismatch = (lanes[0] != lanes[1]) || (lanes[0] != lanes[2]);
  end
endmodule
