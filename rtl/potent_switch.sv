// potent_switch: POTENT obfuscation switch (Omega) for the n ports of one
// router.
//
// The switch sits between a router's N ports and the N links (IPs or
// neighbouring routers) attached to it, and decides by a key which link is
// joined to which port.  The N! permutations of the N connections are
// numbered by the key: keys 0 .. N!-1 each select one permutation, and the
// designer's key CORRECT_KEY selects the identity, which is the intended
// topology.  Keys N! .. 2^KEY_W-1 are the "ZERO" keys: every output of the
// switch is held at 0, so nothing passes.  For N = 4 this is the 24
// permutations and 5-bit key of POTENT (keys 24..31 null).
//
// Key k < N! selects permutation number r = (k - CORRECT_KEY) mod N!, where
// permutation r is the r-th in lexicographic order (r = 0 is the identity)
// and is decoded in the factorial number system.  perm[j] is the router port
// joined to link j.  Both directions of a connection follow the same
// permutation: link_out_* carry the router's outgoing flits (ready comes
// back), link_in_* the flits entering the router.  The numbering of keys to
// permutations and the placement of the identity at CORRECT_KEY are this
// design's choices; the permutation switch, its key width and the null keys
// follow POTENT.
//
// Purely combinational; adds no cycle to the link.
module potent_switch
  import noc_pkg::*;
#(
  parameter int unsigned N           = 4,
  parameter int unsigned KEY_W       = $clog2(factorial(N)),
  parameter int unsigned CORRECT_KEY = 9
) (
  input  logic [KEY_W-1:0] key,
  // router side
  input  flit_t [N-1:0]    rt_out_fwd,    // router output ports
  output logic  [N-1:0]    rt_out_ready,
  output flit_t [N-1:0]    rt_in_fwd,     // router input ports
  input  logic  [N-1:0]    rt_in_ready,
  // link side
  output flit_t [N-1:0]    link_out_fwd,  // towards the attached IP/router
  input  logic  [N-1:0]    link_out_ready,
  input  flit_t [N-1:0]    link_in_fwd,   // from the attached IP/router
  output logic  [N-1:0]    link_in_ready
);

  localparam int unsigned NF = factorial(N);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  typedef logic [IW-1:0] idx_t;

  logic            key_ok;
  idx_t [N-1:0]    perm;

  // Decode the key into a permutation (factorial number system).
  always_comb begin
    int unsigned r, f, d, c;
    logic [N-1:0] used;
    key_ok = (int'(key) < int'(NF));
    r      = key_ok ? (int'(key) + NF - CORRECT_KEY) % NF : 0;
    used   = '0;
    perm   = '0;
    for (int unsigned j = 0; j < N; j++) begin
      f = factorial(N - 1 - j);
      d = r / f;
      r = r % f;
      // the d-th port not yet used
      c = 0;
      for (int unsigned p = 0; p < N; p++) begin
        if (!used[p]) begin
          if (c == d) begin
            perm[j] = idx_t'(p);
          end
          c++;
        end
      end
      used[perm[j]] = 1'b1;
    end
  end

  always_comb begin
    link_out_fwd  = '0;
    rt_out_ready  = '0;
    rt_in_fwd     = '0;
    link_in_ready = '0;
    if (key_ok) begin
      for (int unsigned j = 0; j < N; j++) begin
        link_out_fwd[j]       = rt_out_fwd[perm[j]];
        rt_out_ready[perm[j]] = link_out_ready[j];
        rt_in_fwd[perm[j]]    = link_in_fwd[j];
        link_in_ready[j]      = rt_in_ready[perm[j]];
      end
    end
  end

endmodule
