// noc_router: packet router with a configurable routing table.
//
// NPORTS bidirectional ports, each a valid/ready flit link (see noc_pkg).
// Every input port has a flit_fifo buffer.  The head flit of a packet (sop)
// carries the destination IP in data[DEST_W-1:0]; the routing table maps that
// destination to an output port, and the rest of the packet, up to the flit
// with eop, follows the same output (wormhole switching).  Each output port
// has a round-robin arbiter over the inputs that request it.  Once an output
// has shown a flit it stays with that input until the packet's eop flit has
// been accepted, so an output never withdraws or changes a flit it is
// offering (the valid/ready rule asserted on every input).
//
// The routing table resets to RT_INIT and can be rewritten one entry per
// cycle through rt_we/rt_dest/rt_port (the boot-time reconfiguration the
// routers of an SoC NoC allow).  A destination may be routed to any port,
// including the one it came in on.
//
// Timing: a flit accepted on an input is offered at its output on the next
// cycle, so each router adds one cycle per hop when nothing is blocked, and
// an output passes one flit per cycle.  out_fwd depends only on registers,
// never on out_ready.
//
// A router with a routing table, packets framed by start/end-of-packet and
// valid/ready handshakes is what the NoC is described with; its buffering,
// arbitration and wormhole policy are this design's own.
module noc_router
  import noc_pkg::*;
#(
  parameter int unsigned NPORTS     = 4,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter rt_t         RT_INIT    = '0
) (
  input  logic                clk,
  input  logic                rst,
  input  flit_t [NPORTS-1:0]  in_fwd,
  output logic  [NPORTS-1:0]  in_ready,
  output flit_t [NPORTS-1:0]  out_fwd,
  input  logic  [NPORTS-1:0]  out_ready,
  // routing table write port
  input  logic                rt_we,
  input  dest_t               rt_dest,
  input  port_t               rt_port
);

  typedef logic [PORT_W-1:0] in_idx_t;

  rt_t                 table_q;
  flit_t [NPORTS-1:0]  head;
  logic  [NPORTS-1:0]  pop;
  // per input: inside a packet, and the output it is bound to
  logic  [NPORTS-1:0]  in_pkt;
  port_t [NPORTS-1:0]  cur_port;
  port_t [NPORTS-1:0]  req_port;
  // per output: locked to an input, its owner, round-robin pointer
  logic    [NPORTS-1:0] lock;
  in_idx_t [NPORTS-1:0] owner;
  in_idx_t [NPORTS-1:0] rr;
  logic    [NPORTS-1:0] gnt_v;
  in_idx_t [NPORTS-1:0] gnt;

  // ---------------- routing table ----------------
  always_ff @(posedge clk) begin
    if (rst)        table_q          <= RT_INIT;
    else if (rt_we) table_q[rt_dest] <= rt_port;
  end

  // ---------------- input buffers ----------------
  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    flit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .in_fwd  (in_fwd[i]),
      .in_ready(in_ready[i]),
      .head    (head[i]),
      .pop     (pop[i])
    );
    assign req_port[i] = in_pkt[i] ? cur_port[i] : table_q[flit_dest(head[i])];
  end

  // ---------------- output arbitration ----------------
  always_comb begin
    in_idx_t c;
    c     = '0;
    gnt_v = '0;
    gnt   = '0;
    for (int unsigned o = 0; o < NPORTS; o++) begin
      if (lock[o]) begin
        gnt_v[o] = 1'b1;
        gnt[o]   = owner[o];
      end else begin
        // round robin, starting at rr[o]
        for (int unsigned k = 0; k < NPORTS; k++) begin
          c = in_idx_t'((int'(rr[o]) + k) % NPORTS);
          if (!gnt_v[o] && head[c].valid && req_port[c] == port_t'(o)) begin
            gnt_v[o] = 1'b1;
            gnt[o]   = c;
          end
        end
      end
    end
  end

  always_comb begin
    pop = '0;
    for (int unsigned o = 0; o < NPORTS; o++) begin
      out_fwd[o] = '0;
      for (int unsigned i = 0; i < NPORTS; i++) begin
        if (gnt_v[o] && gnt[o] == in_idx_t'(i) && head[i].valid) begin
          out_fwd[o] = head[i];
          if (out_ready[o]) pop[i] = 1'b1;
        end
      end
    end
  end

  // ---------------- state ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      lock     <= '0;
      owner    <= '0;
      rr       <= '0;
      in_pkt   <= '0;
      cur_port <= '0;
    end else begin
      for (int unsigned o = 0; o < NPORTS; o++) begin
        if (out_fwd[o].valid) begin
          if (out_ready[o] && out_fwd[o].eop) begin
            lock[o] <= 1'b0;
            rr[o]   <= in_idx_t'((int'(gnt[o]) + 1) % NPORTS);
          end else begin
            lock[o]  <= 1'b1;
            owner[o] <= gnt[o];
          end
        end
      end
      for (int unsigned i = 0; i < NPORTS; i++) begin
        if (pop[i]) begin
          in_pkt[i]   <= !head[i].eop;
          cur_port[i] <= req_port[i];
        end
      end
    end
  end

  // ---------------- handshake rules ----------------
  // An upstream sender keeps a flit stable until it is accepted.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    a_in_hold : assert property (@(posedge clk) disable iff (rst)
      in_fwd[i].valid && !in_ready[i] |=> in_fwd[i].valid && $stable(in_fwd[i]))
      else $error("router input %0d dropped or changed a flit before it was accepted", i);
    a_out_hold : assert property (@(posedge clk) disable iff (rst)
      out_fwd[i].valid && !out_ready[i] |=> out_fwd[i].valid && $stable(out_fwd[i]))
      else $error("router output %0d changed a flit before it was accepted", i);
  end

endmodule
