// tb_obnocs_switch: self-checking test of the ObNoCs MUX-DEMUX switch.
//
// Two switches are tested side by side, wired as the outgoing and the
// incoming switch of the obfuscated router, and fed the two halves of an
// activation package.  Each source carries a distinct data word, so the
// mapping a package realises can be read off the destinations.  Checks:
//  * the correct package 32'he4e4e46c maps every destination to its own
//    source on both switches (intended topology);
//  * the six wrong packages W1..W6 of the ObNoCs simulation study give
//    one-to-one mappings (legal topologies) that are not the intended one,
//    and the two packages IL1, IL2 give a mapping that is not one-to-one
//    (non-functional);
//  * random packages whose stage bytes are permutations are always legal,
//    all 4!*4! = 576 such packages of one switch are legal, and together
//    they reach every one of the 24 one-to-one mappings;
//  * for random packages, forward data and backward ready agree with a
//    reference model built from the switch wiring tables.
module tb_obnocs_switch;
  timeunit 1ns; timeprecision 1ps;
  import noc_pkg::*;

  logic [AP_W-1:0]        ap;
  flit_t [OBN_PORTS-1:0]  src_o, dst_o, src_i, dst_i;
  logic  [OBN_PORTS-1:0]  srdy_o, drdy_o, srdy_i, drdy_i;
  int checks = 0, failures = 0;

  obnocs_switch #(.WIRING(OBN_WIRING_OUT)) u_out (
    .sel(ap[OBN_SEL_W-1:0]), .src_fwd(src_o), .src_ready(srdy_o),
    .dst_fwd(dst_o), .dst_ready(drdy_o));
  obnocs_switch #(.WIRING(OBN_WIRING_IN)) u_in (
    .sel(ap[AP_W-1:OBN_SEL_W]), .src_fwd(src_i), .src_ready(srdy_i),
    .dst_fwd(dst_i), .dst_ready(drdy_i));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef int map_t [OBN_PORTS];

  // Reference: which source reaches destination m, from the wiring tables.
  function automatic map_t ref_map(input obn_wiring_t w, input logic [OBN_SEL_W-1:0] sel);
    map_t mp;
    for (int m = 0; m < OBN_PORTS; m++) begin
      int idx = m;
      for (int s = OBN_STAGES-1; s >= 0; s--)
        idx = w[s][idx][sel[(s*OBN_PORTS + idx)*2 +: 2]];
      mp[m] = idx;
    end
    return mp;
  endfunction

  // Reference ready, stage by stage: a signal is ready when some MUX of the
  // next stage selects it and all MUXes that select it are ready.
  function automatic logic [OBN_PORTS-1:0] ref_ready(input obn_wiring_t w,
      input logic [OBN_SEL_W-1:0] sel, input logic [OBN_PORTS-1:0] drdy);
    logic [OBN_PORTS-1:0] r, rn;
    r = drdy;
    for (int s = OBN_STAGES-1; s >= 0; s--) begin
      for (int q = 0; q < OBN_PORTS; q++) begin
        bit any = 0, all = 1;
        for (int m = 0; m < OBN_PORTS; m++)
          if (w[s][m][sel[(s*OBN_PORTS + m)*2 +: 2]] == q) begin
            any = 1;
            if (!r[m]) all = 0;
          end
        rn[q] = any && all;
      end
      r = rn;
    end
    return r;
  endfunction

  // Observed mapping: which source's data word appears at destination m.
  function automatic map_t seen_map(input flit_t [OBN_PORTS-1:0] src,
                                    input flit_t [OBN_PORTS-1:0] dst);
    map_t mp;
    for (int m = 0; m < OBN_PORTS; m++) begin
      mp[m] = -1;
      for (int s = 0; s < OBN_PORTS; s++) if (dst[m] == src[s]) mp[m] = s;
    end
    return mp;
  endfunction

  function automatic bit is_bijection(input map_t mp);
    bit [OBN_PORTS-1:0] hit = '0;
    for (int m = 0; m < OBN_PORTS; m++) begin
      if (mp[m] < 0) return 0;
      hit[mp[m]] = 1'b1;
    end
    return &hit;
  endfunction

  function automatic bit is_identity(input map_t mp);
    for (int m = 0; m < OBN_PORTS; m++) if (mp[m] != m) return 0;
    return 1;
  endfunction

  task automatic drive_sources();
    for (int s = 0; s < OBN_PORTS; s++) begin
      src_o[s] = '{valid: 1'b1, sop: 1'($urandom), eop: 1'($urandom),
                   data: {$urandom, $urandom, $urandom, $urandom, 2'(s)}};
      src_i[s] = '{valid: 1'b1, sop: 1'($urandom), eop: 1'($urandom),
                   data: {$urandom, $urandom, $urandom, $urandom, 2'(s)}};
    end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (ap=%h)", what, ap); end
  endtask

  // Compare forward mapping and backward ready with the reference model.
  task automatic check_against_model();
    map_t mo, mi, so, si;
    logic [OBN_PORTS-1:0] exp_o, exp_i;
    mo = ref_map(OBN_WIRING_OUT, ap[OBN_SEL_W-1:0]);
    mi = ref_map(OBN_WIRING_IN,  ap[AP_W-1:OBN_SEL_W]);
    drive_sources(); #1;
    for (int m = 0; m < OBN_PORTS; m++) begin
      check(dst_o[m] == src_o[mo[m]], $sformatf("out switch data at dst %0d", m));
      check(dst_i[m] == src_i[mi[m]], $sformatf("in switch data at dst %0d", m));
    end
    for (int t = 0; t < 4; t++) begin
      drdy_o = 4'($urandom); drdy_i = 4'($urandom); #1;
      exp_o = ref_ready(OBN_WIRING_OUT, ap[OBN_SEL_W-1:0], drdy_o);
      exp_i = ref_ready(OBN_WIRING_IN,  ap[AP_W-1:OBN_SEL_W], drdy_i);
      check(srdy_o == exp_o, "out switch ready");
      check(srdy_i == exp_i, "in switch ready");
      // for a legal package a source is ready exactly when its destination is
      if (is_bijection(mo)) begin
        logic [OBN_PORTS-1:0] e;
        e = '0;
        for (int m = 0; m < OBN_PORTS; m++) if (drdy_o[m]) e[mo[m]] = 1'b1;
        check(srdy_o == e, "out switch ready, legal package");
      end
    end
  endtask

  typedef struct { string name; logic [31:0] pkg; int kind; } pkg_t; // kind 0 correct, 1 legal, 2 non-functional
  pkg_t study [9] = '{
    '{"R",   32'he4e4e46c, 0},
    '{"W1",  32'hb427e46c, 1}, '{"W2", 32'hb4e4276c, 1}, '{"W3", 32'he4e4e463, 1},
    '{"W4",  32'he4e4276c, 1}, '{"W5", 32'hd8e4e46c, 1}, '{"W6", 32'he4e1e46c, 1},
    '{"IL1", 32'hcdd432a3, 2}, '{"IL2", 32'hcda332d4, 2}};

  initial begin
    map_t mo, mi;
    int n_correct = 0, n_legal = 0, n_nonfunc = 0;
    drdy_o = '1; drdy_i = '1;

    check(AP_CORRECT == 32'he4e4e46c, "package constant");

    foreach (study[k]) begin
      ap = study[k].pkg;
      drive_sources(); #1;
      mo = seen_map(src_o, dst_o);
      mi = seen_map(src_i, dst_i);
      case (study[k].kind)
        0: begin
          check(is_identity(mo) && is_identity(mi), {study[k].name, " intended topology"});
          n_correct++;
        end
        1: begin
          check(is_bijection(mo) && is_bijection(mi), {study[k].name, " legal"});
          check(!(is_identity(mo) && is_identity(mi)), {study[k].name, " not intended"});
          n_legal++;
        end
        default: begin
          check(!(is_bijection(mo) && is_bijection(mi)), {study[k].name, " non-functional"});
          n_nonfunc++;
        end
      endcase
      check_against_model();
    end
    check(n_correct == 1 && n_legal == 6 && n_nonfunc == 2, "1 + 6 + 2 packages");

    // Random packages, and random permutation packages (always legal).
    for (int t = 0; t < 300; t++) begin
      ap = $urandom;
      check_against_model();
    end
    for (int t = 0; t < 100; t++) begin
      logic [7:0] b [4];
      for (int q = 0; q < 4; q++) begin
        int p [4] = '{0, 1, 2, 3};
        p.shuffle();
        b[q] = {2'(p[3]), 2'(p[2]), 2'(p[1]), 2'(p[0])};
      end
      ap = {b[3], b[2], b[1], b[0]};
      drive_sources(); #1;
      check(is_bijection(seen_map(src_o, dst_o)) && is_bijection(seen_map(src_i, dst_i)),
            "permutation selects give a legal topology");
    end

    // All 4! * 4! = 576 permutation packages of one switch are legal.
    begin
      bit seen [int];
      int perms [24][4];
      int np = 0;
      int nlegal = 0;
      for (int a = 0; a < 4; a++) for (int b2 = 0; b2 < 4; b2++)
        for (int c = 0; c < 4; c++) for (int d = 0; d < 4; d++)
          if (a != b2 && a != c && a != d && b2 != c && b2 != d && c != d) begin
            perms[np] = '{a, b2, c, d}; np++;
          end
      for (int x = 0; x < 24; x++) for (int y = 0; y < 24; y++) begin
        int key;
        key = 0;
        ap = '0;
        for (int m = 0; m < 4; m++) begin
          ap[2*m +: 2]     = 2'(perms[x][m]);
          ap[8 + 2*m +: 2] = 2'(perms[y][m]);
        end
        drive_sources(); #1;
        mo = seen_map(src_o, dst_o);
        for (int m = 0; m < 4; m++) key = key * 4 + mo[m];
        if (is_bijection(mo)) begin seen[key] = 1; nlegal++; end
      end
      check(np == 24, "24 permutations of 4");
      check(nlegal == 576, $sformatf("legal packages of one switch %0d", nlegal));
      check(seen.num() == 24, $sformatf("distinct end-to-end mappings %0d", seen.num()));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
