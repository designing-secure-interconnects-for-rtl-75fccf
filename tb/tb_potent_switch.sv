// tb_potent_switch: self-checking test of the POTENT obfuscation switch.
//
// Three switches are tested: 4 ports with a 5-bit key (correct key 9),
// 3 ports with a 3-bit key (correct key 3'b100) and 2 ports with a 1-bit
// key (correct key 1).  For every key the test drives distinct data on all
// router outputs and link inputs, reads off the connection pattern, and
// checks that:
//  * the correct key gives the identity (intended connections);
//  * every key below n! gives a one-to-one pattern, both directions and the
//    ready signals agree with it, and the n! keys give n! different
//    patterns (24 for 4 ports);
//  * the key after the correct one gives the next permutation in
//    lexicographic order (last two ports exchanged);
//  * every key from n! up (24..31 for 4 ports, 6..7 for 3 ports) blocks the
//    switch: all outputs and readies are zero.
module tb_potent_switch;
  timeunit 1ns; timeprecision 1ps;
  import noc_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- 4 ports ----------------
  logic [4:0]  k4;
  flit_t [3:0] ro4, ri4, lo4, li4;
  logic  [3:0] ror4, rir4, lor4, lir4;
  potent_switch #(.N(4), .CORRECT_KEY(9)) u4 (
    .key(k4), .rt_out_fwd(ro4), .rt_out_ready(ror4), .rt_in_fwd(ri4), .rt_in_ready(rir4),
    .link_out_fwd(lo4), .link_out_ready(lor4), .link_in_fwd(li4), .link_in_ready(lir4));

  // ---------------- 3 ports ----------------
  logic [2:0]  k3;
  flit_t [2:0] ro3, ri3, lo3, li3;
  logic  [2:0] ror3, rir3, lor3, lir3;
  potent_switch #(.N(3), .CORRECT_KEY(4)) u3 (
    .key(k3), .rt_out_fwd(ro3), .rt_out_ready(ror3), .rt_in_fwd(ri3), .rt_in_ready(rir3),
    .link_out_fwd(lo3), .link_out_ready(lor3), .link_in_fwd(li3), .link_in_ready(lir3));

  // ---------------- 2 ports ----------------
  logic        k2;
  flit_t [1:0] ro2, ri2, lo2, li2;
  logic  [1:0] ror2, rir2, lor2, lir2;
  potent_switch #(.N(2), .CORRECT_KEY(1)) u2 (
    .key(k2), .rt_out_fwd(ro2), .rt_out_ready(ror2), .rt_in_fwd(ri2), .rt_in_ready(rir2),
    .link_out_fwd(lo2), .link_out_ready(lor2), .link_in_fwd(li2), .link_in_ready(lir2));

  function automatic flit_t rand_flit(input int tag);
    return '{valid: 1'b1, sop: 1'($urandom), eop: 1'($urandom),
             data: {$urandom, $urandom, $urandom, $urandom, 2'(tag)}};
  endfunction

  // The key sweep, expanded once per switch size (the port arrays of the
  // three switches have different widths).
  `define POTENT_SWEEP(N, KW, CK, KEY, RO, RI, LO, LI, ROR, RIR, LOR, LIR) \
  begin \
    string pats [string]; \
    int nf = 1; \
    for (int q = 2; q <= N; q++) nf *= q; \
    for (int kk = 0; kk < (1 << KW); kk++) begin \
      int perm [N]; \
      string sig; \
      bit ok; \
      KEY = KW'(kk); \
      for (int j = 0; j < N; j++) begin RO[j] = rand_flit(j); LI[j] = rand_flit(j); end \
      LOR = '0; RIR = '0; #1; \
      if (kk >= nf) begin \
        ok = (LO == '0) && (RI == '0) && (ROR == '0) && (LIR == '0); \
        LOR = '1; RIR = '1; #1; \
        ok &= (ROR == '0) && (LIR == '0); \
        check(ok, $sformatf("N=%0d null key %0d blocks", N, kk)); \
      end else begin \
        sig = ""; ok = 1; \
        for (int j = 0; j < N; j++) begin \
          perm[j] = -1; \
          for (int p = 0; p < N; p++) if (LO[j] == RO[p]) perm[j] = p; \
          sig = {sig, $sformatf("%0d", perm[j])}; \
        end \
        for (int j = 0; j < N; j++) begin \
          ok &= (perm[j] >= 0); \
          for (int j2 = 0; j2 < j; j2++) ok &= (perm[j] != perm[j2]); \
        end \
        check(ok, $sformatf("N=%0d key %0d one-to-one", N, kk)); \
        if (ok) begin \
          for (int j = 0; j < N; j++) \
            check(RI[perm[j]] == LI[j], $sformatf("N=%0d key %0d inbound link %0d", N, kk, j)); \
          for (int j = 0; j < N; j++) begin \
            LOR = '0; LOR[j] = 1'b1; RIR = '0; RIR[perm[j]] = 1'b1; #1; \
            check(ROR == (N'(1) << perm[j]) && LIR == (N'(1) << j), \
                  $sformatf("N=%0d key %0d ready of link %0d", N, kk, j)); \
          end \
          pats[sig] = "1"; \
          if (kk == CK) begin \
            bit id = 1; \
            for (int j = 0; j < N; j++) id &= (perm[j] == j); \
            check(id, $sformatf("N=%0d correct key gives identity", N)); \
          end \
          if (kk == (CK + 1) % nf && N > 1) begin \
            bit nx = 1; \
            for (int j = 0; j < N-2; j++) nx &= (perm[j] == j); \
            nx &= (perm[N-2] == N-1) && (perm[N-1] == N-2); \
            check(nx, $sformatf("N=%0d key after correct is next permutation", N)); \
          end \
        end \
      end \
    end \
    check(pats.num() == nf, $sformatf("N=%0d distinct permutations %0d of %0d", N, pats.num(), nf)); \
  end

  initial begin
    `POTENT_SWEEP(4, 5, 9, k4, ro4, ri4, lo4, li4, ror4, rir4, lor4, lir4)
    `POTENT_SWEEP(3, 3, 4, k3, ro3, ri3, lo3, li3, ror3, rir3, lor3, lir3)
    `POTENT_SWEEP(2, 1, 1, k2, ro2, ri2, lo2, li2, ror2, rir2, lor2, lir2)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
