// obnocs_switch: ObNoCs programmable MUX-DEMUX switch for one direction of
// the links of an obfuscated router.
//
// PORTS (4) signals enter, PORTS leave.  The switch has STAGES (2) stages,
// each made of PORTS 4x1 MUXes.  Input i of MUX m in stage s is hard-wired to
// signal WIRING[s][m][i] of the previous stage (stage 0 reads src_fwd); the
// order of these connections is fixed at design time and scrambled so that
// the wiring alone does not reveal the topology.  The 2-bit select of every
// MUX comes from the activation package: sel[s*8 + 2m +: 2] for MUX m of stage
// s.  The first stage plays the DEMUX role (a router port may reach any of
// the four links) and the second the MUX role, as in the ObNoCs switch.
// With the correct activation package the composite mapping is the intended
// one (dst m <- src m).  With the default wirings, where the MUXes of a
// stage share one input order, any package whose stage bytes are
// permutations gives another legal one-to-one mapping (4! per stage, 576
// for two stages); other packages send one source to several destinations,
// which makes the network non-functional.
//
// The forward bundle (valid, sop, eop, data) goes through the MUXes.  The
// ready of each destination is sent back along the same selected paths,
// stage by stage: a signal is ready when at least one MUX of the next stage
// selects it and every MUX that selects it is ready.  For a legal package
// this is simply the ready of the one destination a source reaches.  For a
// non-functional package a source seen by several destinations waits until
// all of them can take the flit, so no receiver ever sees a flit change
// before it was accepted; an unselected source stalls.  The backward ready
// path is this design's choice; the MUX network and its activation-package
// control follow ObNoCs.
//
// Purely combinational; adds no cycle to the link.
module obnocs_switch
  import noc_pkg::*;
#(
  parameter int unsigned PORTS  = OBN_PORTS,
  parameter int unsigned STAGES = OBN_STAGES,
  parameter obn_wiring_t WIRING = OBN_WIRING_OUT
) (
  input  logic [STAGES*PORTS*PORT_W-1:0] sel,
  input  flit_t [PORTS-1:0]              src_fwd,
  output logic  [PORTS-1:0]              src_ready,
  output flit_t [PORTS-1:0]              dst_fwd,
  input  logic  [PORTS-1:0]              dst_ready
);

  // Index of the previous-stage signal that MUX m of stage s passes on.
  function automatic port_t picked(input int unsigned s, input int unsigned m,
                                   input logic [STAGES*PORTS*PORT_W-1:0] sv);
    port_t ms;
    ms = sv[(s*PORTS + m)*PORT_W +: PORT_W];
    return WIRING[s][m][ms];
  endfunction

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    flit_t [PORTS-1:0] f_in, f_out;     // forward, into / out of the stage
    logic  [PORTS-1:0] r_in, r_out;     // ready, towards f_in / from f_out

    if (s == 0) begin : g_first
      assign f_in      = src_fwd;
      assign src_ready = r_in;
    end else begin : g_chain
      assign f_in                = g_stage[s-1].f_out;
      assign g_stage[s-1].r_out  = r_in;
    end
    if (s == STAGES-1) begin : g_last
      assign dst_fwd = f_out;
      assign r_out   = dst_ready;
    end

    // Forward: one 4x1 MUX per output of the stage.
    for (genvar m = 0; m < PORTS; m++) begin : g_mux
      assign f_out[m] = f_in[picked(s, m, sel)];
    end
    // Backward: a stage input is ready when at least one MUX passes it on
    // and every MUX that passes it on is ready.
    always_comb begin
      logic [PORTS-1:0] any_sel, all_rdy;
      any_sel = '0;
      all_rdy = '1;
      for (int unsigned m = 0; m < PORTS; m++) begin
        any_sel[picked(s, m, sel)] = 1'b1;
        if (!r_out[m]) all_rdy[picked(s, m, sel)] = 1'b0;
      end
      r_in = any_sel & all_rdy;
    end
  end

endmodule
