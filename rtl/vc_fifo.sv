// vc_fifo: flit buffer of one virtual channel of an input port.
//
// A DEPTH-entry circular FIFO of flits with first-word fall-through: rd_flit shows the
// oldest flit whenever empty is low. A write and a read may happen in the same cycle.
// Writing when full or reading when empty is a protocol error (credit flow control
// prevents it) and is flagged by assertions. DEPTH defaults to 6 flits, the buffer size
// of the synthesised routers.
module vc_fifo
  import hermes_pkg::*;
#(
  parameter int unsigned DEPTH = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  flit_t wr_flit,
  input  logic  rd_en,
  output flit_t rd_flit,
  output logic  empty,
  output logic  full
);
  localparam int unsigned PW = $clog2(DEPTH > 1 ? DEPTH : 2);
  flit_t         mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;

  assign empty   = (count == '0);
  assign full    = (32'(count) == DEPTH);
  assign rd_flit = mem[rd_ptr];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_ptr] <= wr_flit;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= (32'(wr_ptr) == DEPTH-1) ? '0 : wr_ptr + 1'b1;
      if (rd_en) rd_ptr <= (32'(rd_ptr) == DEPTH-1) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(wr_en) - (PW+1)'(rd_en);
    end

  // Flow-control rules: never write a full buffer, never read an empty one.
  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(wr_en && full && !rd_en)) else $error("vc_fifo: write to full buffer");
      assert (!(rd_en && empty))          else $error("vc_fifo: read from empty buffer");
    end
endmodule
