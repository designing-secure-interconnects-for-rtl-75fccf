// secure_noc_top: the example SoC interconnect with both obfuscations.
//
// Five routers in a tree serve nine IPs:
//
//      IP2        IP4        IP6          IP10
//       |          |          |            |
//  IP1--R2--------R3---------R1-----------R4--IP8
//       |          |          |
//      IP3        IP5        R5--IP9
//
// Router R1 is obfuscated with ObNoCs: its four outgoing links pass through a
// two-stage MUX-DEMUX switch (u_obn_out) and its four incoming links through
// a second one (u_obn_in).  Their 32 select bits come from the activation
// package register u_ap_reg, loaded serially through ap_in while load_en is
// high (32 cycles, most significant bit first).  Only the activation package
// AP_CORRECT (32'he4e4e46c) joins R1's ports to IP6, R3, R4 and R5 as
// intended; other packages give other legal topologies or non-functional
// ones.  Until a package is loaded the register is zero, which is not the
// intended topology.
//
// Every other router has its port connections obfuscated by a POTENT
// permutation switch: R2 and R3 (4 ports, 5-bit keys), R4 (3 ports, 3-bit
// key) and R5 (2 ports, 1-bit key).  Their keys come from the routing key
// box u_key_box, a second serial register (14 bits, key_in/key_load_en).
// Only KEYS_CORRECT gives the intended connections; keys beyond n!-1 block
// a router completely.
//
// Routing tables start as the intended routes (noc_pkg RT_R1..RT_R5) and can
// be rewritten through rt_we/rt_router/rt_dest/rt_port (router number 1..5).
//
// IP ports: ip_tx_* is the IP sending into the NoC, ip_rx_* the NoC
// delivering to the IP, index k for IP number IP_ID[k].  A flit takes one
// cycle per router on its path when nothing blocks it; the switches add no
// cycles.
//
// The tree, the routers and IPs chosen for each link and the obfuscated
// router R1 follow the ObNoCs example SoC; the 32-bit package follows its
// activation package size and value.  Combining it with POTENT switches on
// the other routers, and the keys chosen for them, are this design's own.
module secure_noc_top
  import noc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  // activation package loader (AP_in, LOAD_en)
  input  logic                 ap_in,
  input  logic                 load_en,
  // routing key box loader
  input  logic                 key_in,
  input  logic                 key_load_en,
  // routing table writes
  input  logic                 rt_we,
  input  logic [2:0]           rt_router,
  input  dest_t                rt_dest,
  input  port_t                rt_port,
  // IP ports
  input  flit_t [NUM_IP-1:0]   ip_tx_fwd,
  output logic  [NUM_IP-1:0]   ip_tx_ready,
  output flit_t [NUM_IP-1:0]   ip_rx_fwd,
  input  logic  [NUM_IP-1:0]   ip_rx_ready
);

  // ------------------------------------------------------------------
  // Key registers
  // ------------------------------------------------------------------
  logic [AP_W-1:0]     ap;
  logic [KEYBOX_W-1:0] keys;

  ap_load_reg #(.WIDTH(AP_W)) u_ap_reg (
    .clk, .rst, .load_en(load_en), .ap_in(ap_in), .ap_out(ap));

  ap_load_reg #(.WIDTH(KEYBOX_W)) u_key_box (
    .clk, .rst, .load_en(key_load_en), .ap_in(key_in), .ap_out(keys));

  // ------------------------------------------------------------------
  // Router port signals (router side of the switches)
  // ------------------------------------------------------------------
  flit_t [3:0] r1_in, r1_out, r2_in, r2_out, r3_in, r3_out;
  logic  [3:0] r1_in_rdy, r1_out_rdy, r2_in_rdy, r2_out_rdy, r3_in_rdy, r3_out_rdy;
  flit_t [2:0] r4_in, r4_out;
  logic  [2:0] r4_in_rdy, r4_out_rdy;
  flit_t [1:0] r5_in, r5_out;
  logic  [1:0] r5_in_rdy, r5_out_rdy;

  // Link side of the switches: *_lo leaves the switch, *_li enters it.
  flit_t [3:0] p2_lo, p2_li, p3_lo, p3_li;
  logic  [3:0] p2_lo_rdy, p2_li_rdy, p3_lo_rdy, p3_li_rdy;
  flit_t [2:0] p4_lo, p4_li;
  logic  [2:0] p4_lo_rdy, p4_li_rdy;
  flit_t [1:0] p5_lo, p5_li;
  logic  [1:0] p5_lo_rdy, p5_li_rdy;
  flit_t [3:0] ob_lo, ob_li;               // R1 links: 0 IP6, 1 R3, 2 R4, 3 R5
  logic  [3:0] ob_lo_rdy, ob_li_rdy;

  // ------------------------------------------------------------------
  // Routers
  // ------------------------------------------------------------------
  logic [5:1] rt_sel;
  always_comb begin
    rt_sel = '0;
    if (rt_we && rt_router >= 3'd1 && rt_router <= 3'd5) rt_sel[rt_router] = 1'b1;
  end

  noc_router #(.NPORTS(4), .RT_INIT(RT_R1)) u_r1 (
    .clk, .rst, .in_fwd(r1_in), .in_ready(r1_in_rdy), .out_fwd(r1_out),
    .out_ready(r1_out_rdy), .rt_we(rt_sel[1]), .rt_dest, .rt_port);
  noc_router #(.NPORTS(4), .RT_INIT(RT_R2)) u_r2 (
    .clk, .rst, .in_fwd(r2_in), .in_ready(r2_in_rdy), .out_fwd(r2_out),
    .out_ready(r2_out_rdy), .rt_we(rt_sel[2]), .rt_dest, .rt_port);
  noc_router #(.NPORTS(4), .RT_INIT(RT_R3)) u_r3 (
    .clk, .rst, .in_fwd(r3_in), .in_ready(r3_in_rdy), .out_fwd(r3_out),
    .out_ready(r3_out_rdy), .rt_we(rt_sel[3]), .rt_dest, .rt_port);
  noc_router #(.NPORTS(3), .RT_INIT(RT_R4)) u_r4 (
    .clk, .rst, .in_fwd(r4_in), .in_ready(r4_in_rdy), .out_fwd(r4_out),
    .out_ready(r4_out_rdy), .rt_we(rt_sel[4]), .rt_dest, .rt_port);
  noc_router #(.NPORTS(2), .RT_INIT(RT_R5)) u_r5 (
    .clk, .rst, .in_fwd(r5_in), .in_ready(r5_in_rdy), .out_fwd(r5_out),
    .out_ready(r5_out_rdy), .rt_we(rt_sel[5]), .rt_dest, .rt_port);

  // ------------------------------------------------------------------
  // ObNoCs switches around R1
  // ------------------------------------------------------------------
  obnocs_switch #(.WIRING(OBN_WIRING_OUT)) u_obn_out (
    .sel(ap[OBN_SEL_W-1:0]),
    .src_fwd(r1_out), .src_ready(r1_out_rdy),
    .dst_fwd(ob_lo),  .dst_ready(ob_lo_rdy));

  obnocs_switch #(.WIRING(OBN_WIRING_IN)) u_obn_in (
    .sel(ap[AP_W-1:OBN_SEL_W]),
    .src_fwd(ob_li),  .src_ready(ob_li_rdy),
    .dst_fwd(r1_in),  .dst_ready(r1_in_rdy));

  // ------------------------------------------------------------------
  // POTENT switches on R2..R5
  // ------------------------------------------------------------------
  potent_switch #(.N(4), .CORRECT_KEY(KEY_R2)) u_p2 (
    .key(keys[4:0]),
    .rt_out_fwd(r2_out), .rt_out_ready(r2_out_rdy),
    .rt_in_fwd(r2_in),   .rt_in_ready(r2_in_rdy),
    .link_out_fwd(p2_lo), .link_out_ready(p2_lo_rdy),
    .link_in_fwd(p2_li),  .link_in_ready(p2_li_rdy));
  potent_switch #(.N(4), .CORRECT_KEY(KEY_R3)) u_p3 (
    .key(keys[9:5]),
    .rt_out_fwd(r3_out), .rt_out_ready(r3_out_rdy),
    .rt_in_fwd(r3_in),   .rt_in_ready(r3_in_rdy),
    .link_out_fwd(p3_lo), .link_out_ready(p3_lo_rdy),
    .link_in_fwd(p3_li),  .link_in_ready(p3_li_rdy));
  potent_switch #(.N(3), .CORRECT_KEY(KEY_R4)) u_p4 (
    .key(keys[12:10]),
    .rt_out_fwd(r4_out), .rt_out_ready(r4_out_rdy),
    .rt_in_fwd(r4_in),   .rt_in_ready(r4_in_rdy),
    .link_out_fwd(p4_lo), .link_out_ready(p4_lo_rdy),
    .link_in_fwd(p4_li),  .link_in_ready(p4_li_rdy));
  potent_switch #(.N(2), .CORRECT_KEY(KEY_R5)) u_p5 (
    .key(keys[13]),
    .rt_out_fwd(r5_out), .rt_out_ready(r5_out_rdy),
    .rt_in_fwd(r5_in),   .rt_in_ready(r5_in_rdy),
    .link_out_fwd(p5_lo), .link_out_ready(p5_lo_rdy),
    .link_in_fwd(p5_li),  .link_in_ready(p5_li_rdy));

  // ------------------------------------------------------------------
  // Links.  IP index k is IP_ID[k]: 0 IP1, 1 IP2, 2 IP3, 3 IP4, 4 IP5,
  // 5 IP6, 6 IP8, 7 IP9, 8 IP10.
  // ------------------------------------------------------------------
  // R2 links: IP1, IP2, IP3, R3
  for (genvar k = 0; k < 3; k++) begin : g_r2_ip
    assign p2_li[k]       = ip_tx_fwd[k];
    assign ip_tx_ready[k] = p2_li_rdy[k];
    assign ip_rx_fwd[k]   = p2_lo[k];
    assign p2_lo_rdy[k]   = ip_rx_ready[k];
  end
  // R3 links: IP4, IP5, R2, R1
  for (genvar k = 0; k < 2; k++) begin : g_r3_ip
    assign p3_li[k]         = ip_tx_fwd[3+k];
    assign ip_tx_ready[3+k] = p3_li_rdy[k];
    assign ip_rx_fwd[3+k]   = p3_lo[k];
    assign p3_lo_rdy[k]     = ip_rx_ready[3+k];
  end
  // R2 <-> R3
  assign p3_li[2]     = p2_lo[3];
  assign p2_lo_rdy[3] = p3_li_rdy[2];
  assign p2_li[3]     = p3_lo[2];
  assign p3_lo_rdy[2] = p2_li_rdy[3];
  // R3 <-> R1 (R1 link 1)
  assign ob_li[1]     = p3_lo[3];
  assign p3_lo_rdy[3] = ob_li_rdy[1];
  assign p3_li[3]     = ob_lo[1];
  assign ob_lo_rdy[1] = p3_li_rdy[3];
  // IP6 on R1 link 0
  assign ob_li[0]       = ip_tx_fwd[5];
  assign ip_tx_ready[5] = ob_li_rdy[0];
  assign ip_rx_fwd[5]   = ob_lo[0];
  assign ob_lo_rdy[0]   = ip_rx_ready[5];
  // R4 links: IP10, IP8, R1 (R1 link 2)
  assign p4_li[0]       = ip_tx_fwd[8];
  assign ip_tx_ready[8] = p4_li_rdy[0];
  assign ip_rx_fwd[8]   = p4_lo[0];
  assign p4_lo_rdy[0]   = ip_rx_ready[8];
  assign p4_li[1]       = ip_tx_fwd[6];
  assign ip_tx_ready[6] = p4_li_rdy[1];
  assign ip_rx_fwd[6]   = p4_lo[1];
  assign p4_lo_rdy[1]   = ip_rx_ready[6];
  assign ob_li[2]       = p4_lo[2];
  assign p4_lo_rdy[2]   = ob_li_rdy[2];
  assign p4_li[2]       = ob_lo[2];
  assign ob_lo_rdy[2]   = p4_li_rdy[2];
  // R5 links: IP9, R1 (R1 link 3)
  assign p5_li[0]       = ip_tx_fwd[7];
  assign ip_tx_ready[7] = p5_li_rdy[0];
  assign ip_rx_fwd[7]   = p5_lo[0];
  assign p5_lo_rdy[0]   = ip_rx_ready[7];
  assign ob_li[3]       = p5_lo[1];
  assign p5_lo_rdy[1]   = ob_li_rdy[3];
  assign p5_li[1]       = ob_lo[3];
  assign ob_lo_rdy[3]   = p5_li_rdy[1];

endmodule
