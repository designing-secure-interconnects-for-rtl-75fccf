// flit_fifo: small synchronous FIFO of flits, used as a router input buffer.
//
// DEPTH entries held in a register array with read and write pointers and
// an occupancy count.  The write side is a valid/ready sink: in_ready is high
// whenever the FIFO is not full, and depends only on the stored count, so no
// combinational path runs from a downstream ready to an upstream ready.  The
// read side shows the oldest entry on head with head_valid, and pop removes
// it at the next rising edge.  A flit written into an empty FIFO is visible
// on head one cycle later.  The buffer depth is this design's choice.
module flit_fifo
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst,
  input  flit_t in_fwd,       // in_fwd.valid is the write request
  output logic  in_ready,
  output flit_t head,         // head.valid == FIFO not empty
  input  logic  pop
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t [DEPTH-1:0] mem;
  logic  [AW-1:0]    wp, rp;
  logic  [AW:0]      cnt;
  logic              wr, rd;

  assign in_ready = (cnt != (AW+1)'(DEPTH));
  assign wr       = in_fwd.valid && in_ready;
  assign rd       = pop && (cnt != '0);

  always_comb begin
    head       = mem[rp];
    head.valid = (cnt != '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (wr) begin
        mem[wp] <= in_fwd;
        wp      <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

endmodule
