// noc_pkg: types and constants shared by the obfuscated NoC.
//
// A link carries one flit per cycle with a valid/ready handshake in the
// style of the Avalon-ST router ports of a Platform-Designer interconnect
// (sink_valid, sink_startofpacket, sink_endofpacket, sink_data, src_ready).
// The forward bundle (valid, sop, eop, data) is the struct flit_t; ready
// travels on its own wire in the opposite direction.  A flit is accepted on a
// rising clock edge where valid and ready are both high.
//
// The 130-bit data width is the width of sink_data quoted for the
// pre-synthesis router.  Where the destination ID sits inside the data word,
// how wide it is, and the numbering of the IPs are this design's choices:
// the destination is held in data[DEST_W-1:0] and IPs are numbered 1..15.
package noc_pkg;

  localparam int unsigned DATA_W  = 130;  // sink_data width of the router
  localparam int unsigned DEST_W  = 4;    // destination IP field width
  localparam int unsigned NDEST   = 1 << DEST_W;
  localparam int unsigned PORT_W  = 2;    // routers have at most 4 ports

  typedef logic [DEST_W-1:0] dest_t;
  typedef logic [PORT_W-1:0] port_t;

  // Forward half of a link.
  typedef struct packed {
    logic              valid;
    logic              sop;
    logic              eop;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Routing table: one output port per destination ID.
  typedef port_t [NDEST-1:0] rt_t;

  function automatic dest_t flit_dest(input flit_t f);
    return f.data[DEST_W-1:0];
  endfunction

  // ---------------------------------------------------------------------
  // ObNoCs MUX-DEMUX switch wiring.
  //
  // A switch has OBN_PORTS signals and OBN_STAGES stages of OBN_PORTS 4x1
  // MUXes.  wire_map_t[m][i] names the signal of the previous stage that
  // drives input i of MUX m (the fixed, design-time result of the
  // RandomizeConnections step).  Each MUX has a 2-bit select, so a stage
  // takes 8 select bits and a two-stage switch 16.
  // ---------------------------------------------------------------------
  localparam int unsigned OBN_PORTS  = 4;
  localparam int unsigned OBN_STAGES = 2;
  localparam int unsigned OBN_SEL_W  = OBN_STAGES * OBN_PORTS * PORT_W; // 16

  typedef port_t [OBN_PORTS-1:0][OBN_PORTS-1:0] wire_map_t;
  typedef wire_map_t [OBN_STAGES-1:0] obn_wiring_t;

  // Wiring of the switch on R1's outgoing side (R1 output ports -> links).
  // All MUXes of a stage share one scrambled input order, so a package is
  // legal (one-to-one) exactly when each stage's four selects are a
  // permutation of 0..3, as the wrong-but-functional packages of the ObNoCs
  // study are.  Stage 0 order (1,2,0,3), stage 1 order (2,0,3,1).
  localparam obn_wiring_t OBN_WIRING_OUT = '{
    0: '{0: '{0: 2'd1, 1: 2'd2, 2: 2'd0, 3: 2'd3},
         1: '{0: 2'd1, 1: 2'd2, 2: 2'd0, 3: 2'd3},
         2: '{0: 2'd1, 1: 2'd2, 2: 2'd0, 3: 2'd3},
         3: '{0: 2'd1, 1: 2'd2, 2: 2'd0, 3: 2'd3}},
    1: '{0: '{0: 2'd2, 1: 2'd0, 2: 2'd3, 3: 2'd1},
         1: '{0: 2'd2, 1: 2'd0, 2: 2'd3, 3: 2'd1},
         2: '{0: 2'd2, 1: 2'd0, 2: 2'd3, 3: 2'd1},
         3: '{0: 2'd2, 1: 2'd0, 2: 2'd3, 3: 2'd1}}
  };

  // Wiring of the switch on R1's incoming side (links -> R1 input ports).
  // Stage 0 order (1,2,3,0), stage 1 order (3,0,1,2).
  localparam obn_wiring_t OBN_WIRING_IN = '{
    0: '{0: '{0: 2'd1, 1: 2'd2, 2: 2'd3, 3: 2'd0},
         1: '{0: 2'd1, 1: 2'd2, 2: 2'd3, 3: 2'd0},
         2: '{0: 2'd1, 1: 2'd2, 2: 2'd3, 3: 2'd0},
         3: '{0: 2'd1, 1: 2'd2, 2: 2'd3, 3: 2'd0}},
    1: '{0: '{0: 2'd3, 1: 2'd0, 2: 2'd1, 3: 2'd2},
         1: '{0: 2'd3, 1: 2'd0, 2: 2'd1, 3: 2'd2},
         2: '{0: 2'd3, 1: 2'd0, 2: 2'd1, 3: 2'd2},
         3: '{0: 2'd3, 1: 2'd0, 2: 2'd1, 3: 2'd2}}
  };

  // The activation package that realises the intended topology with the
  // wirings above.  It is the value shown as the correct package in the
  // ObNoCs simulation study, 32'he4e4e46c.  Layout:
  //   [7:0]   outgoing switch, stage 0    [15:8]  outgoing switch, stage 1
  //   [23:16] incoming switch, stage 0    [31:24] incoming switch, stage 1
  // and within a stage byte, MUX m uses bits [2m+1:2m].
  localparam int unsigned      AP_W       = 2 * OBN_SEL_W;  // 32
  localparam logic [AP_W-1:0]  AP_CORRECT = 32'he4e4e46c;

  // ---------------------------------------------------------------------
  // POTENT obfuscation switch helpers.
  // ---------------------------------------------------------------------
  function automatic int unsigned factorial(input int unsigned n);
    int unsigned f = 1;
    for (int unsigned i = 2; i <= n; i++) f = f * i;
    return f;
  endfunction

  // ---------------------------------------------------------------------
  // The example SoC: five routers in a tree, nine IPs.
  //
  //   R2: port 0 IP1, 1 IP2, 2 IP3, 3 R3
  //   R3: port 0 IP4, 1 IP5, 2 R2,  3 R1
  //   R1: port 0 IP6, 1 R3,  2 R4,  3 R5      (ObNoCs-obfuscated)
  //   R4: port 0 IP10, 1 IP8, 2 R1
  //   R5: port 0 IP9, 1 R1
  //
  // IPs are numbered as in the example (there is no IP7).  The top's IP
  // ports are indexed 0..8 in the order of IP_ID.
  // ---------------------------------------------------------------------
  localparam int unsigned NUM_IP = 9;
  typedef dest_t [NUM_IP-1:0] ip_id_t;
  localparam ip_id_t IP_ID = '{0: 4'd1, 1: 4'd2, 2: 4'd3, 3: 4'd4, 4: 4'd5,
                               5: 4'd6, 6: 4'd8, 7: 4'd9, 8: 4'd10};

  // Routing tables of the intended topology (destination IP -> port).
  localparam rt_t RT_R1 = '{6: 2'd0, 1: 2'd1, 2: 2'd1, 3: 2'd1, 4: 2'd1, 5: 2'd1,
                            8: 2'd2, 10: 2'd2, 9: 2'd3, default: 2'd1};
  localparam rt_t RT_R2 = '{1: 2'd0, 2: 2'd1, 3: 2'd2, default: 2'd3};
  localparam rt_t RT_R3 = '{4: 2'd0, 5: 2'd1, 1: 2'd2, 2: 2'd2, 3: 2'd2, default: 2'd3};
  localparam rt_t RT_R4 = '{10: 2'd0, 8: 2'd1, default: 2'd2};
  localparam rt_t RT_R5 = '{9: 2'd0, default: 2'd1};

  // POTENT keys, loaded through the routing key box (a second ap_load_reg).
  //   [4:0] R2 switch (4 ports)   [9:5]  R3 switch (4 ports)
  //   [12:10] R4 switch (3 ports) [13]   R5 switch (2 ports)
  localparam int unsigned KEYBOX_W    = 14;
  localparam int unsigned KEY_R2      = 9;
  localparam int unsigned KEY_R3      = 17;
  localparam int unsigned KEY_R4      = 4;   // 3'b100
  localparam int unsigned KEY_R5      = 1;
  localparam logic [KEYBOX_W-1:0] KEYS_CORRECT =
    {1'(KEY_R5), 3'(KEY_R4), 5'(KEY_R3), 5'(KEY_R2)};

endpackage
