// network_interface: packet injection and ejection between a tile and its router.
//
// Injection: a request (dest, payload) is accepted when the interface is idle and the
// router is not recovering (sr low: Hermes stops injection during reconfiguration).
// The packet is sent as PKT_FLITS flits (head, bodies, tail; a single flit is a
// head-tail) on one VC: under H-O1TURN the VC is XY (VC0) or YX (VC1) with equal
// probability, picked by a 16-bit LFSR; under H-XY it is always VC0. A flit leaves only
// when the router's local input VC has a credit; a packet once started is completed even
// if recovery begins (the router freezes it at its head). Every flit carries
// {payload, flit index, sequence number, source, destination} in its low bits so the
// receiver can check it.
//
// Ejection: flits from the router's local output are always accepted and a credit is
// returned for each one on the next cycle. Flits of packets on different VCs may
// interleave; each VC is reassembled separately. On a tail flit rx_valid pulses with the
// packet's source, sequence number, length and whether all its flits were consistent.
//
// The O1TURN choice and the injection stop follow the paper; the LFSR, the header layout
// and the always-accepting ejection are this design's choices.
module network_interface
  import hermes_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned PKT_FLITS = 6,
  parameter int unsigned DEPTH     = 6,
  parameter route_mode_e MODE      = MODE_H_O1TURN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sr,
  // tile side, injection
  input  logic              req_valid,
  input  logic [ID_W-1:0]   req_dest,
  input  logic [31:0]       req_payload,
  output logic              req_ready,
  // router local input port
  output flit_t             inj_flit,
  input  logic [NUM_VC-1:0] inj_credit,
  // router local output port
  input  flit_t             ej_flit,
  output logic [NUM_VC-1:0] ej_credit,
  // tile side, ejection
  output logic              rx_valid,
  output logic [ID_W-1:0]   rx_src,
  output logic [15:0]       rx_seq,
  output logic [7:0]        rx_len,
  output logic              rx_ok,
  output logic [1:0]        rx_vc
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [15:0]             lfsr;
  logic [15:0]             seq;
  logic                    busy;
  logic [7:0]              fidx;
  logic [1:0]              cur_vc;
  logic [ID_W-1:0]         cur_dest;
  logic [31:0]             cur_payload;
  logic [NUM_VC-1:0][CW-1:0] credits;
  logic                    send;

  assign req_ready = !busy && !sr;
  assign send      = busy && (credits[cur_vc] != '0);

  function automatic logic [FLIT_W-1:0] pack(logic [ID_W-1:0] d, logic [ID_W-1:0] s,
                                             logic [15:0] q, logic [7:0] i, logic [31:0] pl);
    logic [FLIT_W-1:0] w;
    w = '0;
    w[ID_W-1:0]      = d;
    w[2*ID_W-1:ID_W] = s;
    w[31:16]         = q;
    w[39:32]         = i;
    w[71:40]         = pl;
    return w;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lfsr     <= 16'hACE1 ^ 16'(NODE_ID * 16'h9E37);
      seq      <= '0;
      busy     <= 1'b0;
      fidx     <= '0;
      cur_vc   <= '0;
      cur_dest <= '0;
      cur_payload <= '0;
      inj_flit <= '0;
      for (int v = 0; v < NUM_VC; v++) credits[v] <= CW'(DEPTH);
    end else begin
      inj_flit <= '0;
      if (req_valid && req_ready) begin
        busy        <= 1'b1;
        fidx        <= '0;
        cur_dest    <= req_dest;
        cur_payload <= req_payload;
        cur_vc      <= (MODE == MODE_H_O1TURN && lfsr[0]) ? VC_YX : VC_XY;
        lfsr        <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      end
      if (send) begin
        inj_flit.valid <= 1'b1;
        inj_flit.vc    <= cur_vc;
        inj_flit.data  <= pack(cur_dest, ID_W'(NODE_ID), seq, fidx, cur_payload);
        if (PKT_FLITS == 1)                inj_flit.ftype <= FLIT_HEADTAIL;
        else if (fidx == 0)                inj_flit.ftype <= FLIT_HEAD;
        else if (32'(fidx) == PKT_FLITS-1) inj_flit.ftype <= FLIT_TAIL;
        else                               inj_flit.ftype <= FLIT_BODY;
        fidx <= fidx + 1'b1;
        if (32'(fidx) == PKT_FLITS-1) begin
          busy <= 1'b0;
          seq  <= seq + 1'b1;
        end
      end
      for (int v = 0; v < NUM_VC; v++)
        credits[v] <= credits[v] - CW'(send && cur_vc == 2'(v)) + CW'(inj_credit[v]);
    end

  // Ejection and per-VC reassembly.
  logic [NUM_VC-1:0][7:0]      rcount;
  logic [NUM_VC-1:0][ID_W-1:0] rsrc;
  logic [NUM_VC-1:0][15:0]     rseq;
  logic [NUM_VC-1:0]           rok;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ej_credit <= '0;
      rx_valid  <= 1'b0;
      rx_src    <= '0;
      rx_seq    <= '0;
      rx_len    <= '0;
      rx_ok     <= 1'b0;
      rx_vc     <= '0;
      rcount    <= '0;
      rsrc      <= '0;
      rseq      <= '0;
      rok       <= '0;
    end else begin
      ej_credit <= '0;
      rx_valid  <= 1'b0;
      if (ej_flit.valid) begin
        automatic int unsigned v = 32'(ej_flit.vc);
        automatic logic ok_now;
        ej_credit[v] <= 1'b1;
        ok_now = (ej_flit.data[ID_W-1:0] == ID_W'(NODE_ID)) &&
                 (ej_flit.data[39:32] == (is_head(ej_flit) ? 8'd0 : rcount[v]));
        if (!is_head(ej_flit))
          ok_now = ok_now && rok[v] && (ej_flit.data[2*ID_W-1:ID_W] == rsrc[v]) &&
                   (ej_flit.data[31:16] == rseq[v]);
        rcount[v] <= is_head(ej_flit) ? 8'd1 : rcount[v] + 1'b1;
        rsrc[v]   <= ej_flit.data[2*ID_W-1:ID_W];
        rseq[v]   <= ej_flit.data[31:16];
        rok[v]    <= ok_now;
        if (is_tail(ej_flit)) begin
          rx_valid <= 1'b1;
          rx_src   <= ej_flit.data[2*ID_W-1:ID_W];
          rx_seq   <= ej_flit.data[31:16];
          rx_len   <= is_head(ej_flit) ? 8'd1 : rcount[v] + 1'b1;
          rx_ok    <= ok_now;
          rx_vc    <= ej_flit.vc;
        end
      end
    end
endmodule
