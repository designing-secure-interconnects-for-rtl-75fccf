// tb_noc_router: self-checking test of the packet router.
//
// A 4-port router with routing table "destination d -> port d mod 4".
// Directed tests first: a single flit through an idle router takes exactly
// one cycle from input to output; a routing-table write takes effect; two
// inputs competing for one output are served in turn (round robin); and a
// blocked output makes the input stall, then drains.  Then random traffic:
// every input sends packets of 1..4 flits to random destinations while the
// outputs apply random back-pressure.  A scoreboard checks that each flit
// leaves on the port its destination is routed to, that flits keep their
// order and content per input/output pair, that the flits of a packet leave
// one output back to back without other packets in between, and that every
// flit sent is received.  Flit data: [3:0] destination, [5:4] input port,
// [21:6] sequence number, the rest random.
module tb_noc_router;
  timeunit 1ns; timeprecision 1ps;
  import noc_pkg::*;

  localparam int unsigned NP = 4;

  function automatic rt_t mk_table();
    rt_t t;
    for (int d = 0; d < NDEST; d++) t[d] = port_t'(d % NP);
    return t;
  endfunction
  localparam rt_t RT = mk_table();

  logic clk = 0, rst = 1;
  flit_t [NP-1:0] in_fwd, out_fwd;
  logic  [NP-1:0] in_ready, out_ready;
  logic  rt_we = 0;
  dest_t rt_dest = '0;
  port_t rt_port = '0;
  int checks = 0, failures = 0;

  noc_router #(.NPORTS(NP), .RT_INIT(RT)) dut (
    .clk, .rst, .in_fwd, .in_ready, .out_fwd, .out_ready, .rt_we, .rt_dest, .rt_port);

  always #5 clk = ~clk;

  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0d] %s", cycle, what); end
  endtask

  // ---------------- scoreboard ----------------
  rt_t          model_rt = RT;        // the table as the test believes it is
  flit_t        expq [NP][NP][$];     // [input][output] flits in order
  int           cur_in [NP];          // input currently sending on output, -1 none
  int unsigned  n_sent = 0, n_recv = 0;
  int unsigned  acc_cycle [NP];       // cycle a flit was last accepted per input
  int unsigned  out_cycle [NP];       // cycle a flit last left per output
  int           last_src [NP];        // input of the last flit per output

  initial foreach (cur_in[o]) cur_in[o] = -1;

  // Accepted at an input: the destination port is decided from the table
  // for a head flit; body flits follow the head's port.
  int pkt_port [NP];
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < NP; i++) begin
      if (in_fwd[i].valid && in_ready[i]) begin
        int o;
        if (in_fwd[i].sop) pkt_port[i] = int'(model_rt[flit_dest(in_fwd[i])]);
        o = pkt_port[i];
        expq[i][o].push_back(in_fwd[i]);
        n_sent++;
        acc_cycle[i] = cycle;
      end
    end
    for (int o = 0; o < NP; o++) begin
      if (out_fwd[o].valid && out_ready[o]) begin
        int i;
        i = int'(out_fwd[o].data[5:4]);
        n_recv++;
        out_cycle[o] = cycle;
        last_src[o]  = i;
        if (cur_in[o] >= 0) check(cur_in[o] == i, $sformatf("packet interleaved on output %0d", o));
        if (expq[i][o].size() == 0) begin
          check(0, $sformatf("unexpected flit on output %0d from input %0d: %h", o, i, out_fwd[o]));
        end else begin
          flit_t e;
          e = expq[i][o].pop_front();
          check(out_fwd[o] == e, $sformatf("flit content/order input %0d output %0d", i, o));
        end
        cur_in[o] = out_fwd[o].eop ? -1 : i;
      end
    end
  end

  // ---------------- sources ----------------
  logic [NP-1:0] acc_q;
  always @(posedge clk) for (int i = 0; i < NP; i++) acc_q[i] <= in_fwd[i].valid && in_ready[i];

  int unsigned seq [NP];
  bit          run_random = 0;
  int          left [NP];              // flits left in the current random packet
  dest_t       pdest [NP];

  function automatic flit_t mk_flit(input int i, input dest_t d, input bit sop, input bit eop);
    flit_t f;
    f.valid = 1'b1; f.sop = sop; f.eop = eop;
    f.data  = {$urandom, $urandom, $urandom, $urandom, 2'b0};
    f.data[3:0]  = sop ? d : dest_t'($urandom);
    f.data[5:4]  = 2'(i);
    f.data[21:6] = 16'(seq[i]);
    seq[i]++;
    return f;
  endfunction

  always @(negedge clk) if (run_random) begin
    for (int i = 0; i < NP; i++) begin
      if (!in_fwd[i].valid || acc_q[i]) begin
        if (left[i] == 0 && $urandom_range(0, 3) != 0) begin
          left[i]  = $urandom_range(1, 4);
          pdest[i] = dest_t'($urandom);
          in_fwd[i] = mk_flit(i, pdest[i], 1'b1, left[i] == 1);
          left[i]--;
        end else if (left[i] > 0) begin
          in_fwd[i] = mk_flit(i, pdest[i], 1'b0, left[i] == 1);
          left[i]--;
        end else in_fwd[i] = '0;
      end
    end
    out_ready = NP'($urandom);
  end

  // send one single-flit packet from input i and wait until it is accepted
  task automatic send1(input int i, input dest_t d);
    @(negedge clk) in_fwd[i] = mk_flit(i, d, 1'b1, 1'b1);
    do @(posedge clk); while (!(in_fwd[i].valid && in_ready[i]));
    @(negedge clk) in_fwd[i] = '0;
  endtask

  // send n single-flit packets from input i with no gap between them
  task automatic stream(input int i, input dest_t d, input int n);
    @(negedge clk) in_fwd[i] = mk_flit(i, d, 1'b1, 1'b1);
    repeat (n) begin
      do @(posedge clk); while (!(in_fwd[i].valid && in_ready[i]));
      @(negedge clk) in_fwd[i] = mk_flit(i, d, 1'b1, 1'b1);
    end
    seq[i]--;                     // the last flit made is never sent
    in_fwd[i] = '0;
  endtask

  initial begin
    int unsigned t0;
    int a0, a1;
    in_fwd = '0; out_ready = '1;
    foreach (left[i]) left[i] = 0;
    foreach (seq[i]) seq[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;

    // 1. one cycle per hop through an idle router
    send1(1, 4'd6);               // 6 mod 4 = port 2
    t0 = acc_cycle[1];
    repeat (3) @(posedge clk);
    check(out_cycle[2] == t0 + 1, $sformatf("hop latency %0d", out_cycle[2] - t0));

    // 2. routing table write: destination 6 now goes to port 0
    @(negedge clk) begin rt_we = 1; rt_dest = 4'd6; rt_port = 2'd0; end
    @(negedge clk) rt_we = 0;
    model_rt[6] = 2'd0;
    send1(3, 4'd6);
    repeat (3) @(posedge clk);
    check(out_cycle[0] == acc_cycle[3] + 1 && last_src[0] == 3, "table write takes effect");

    // 3. round robin: inputs 0 and 1 both stream back to back to output 3;
    //    the output must alternate between them
    a0 = 0; a1 = 0;
    fork
      stream(0, 4'd3, 12);
      stream(1, 4'd7, 12);
      begin
        int last;
        last = -1;
        repeat (4) @(posedge clk);
        repeat (16) begin
          @(posedge clk);
          if (out_fwd[3].valid && out_ready[3]) begin
            if (out_fwd[3].data[5:4] == 2'd0) a0++; else a1++;
            check(int'(out_fwd[3].data[5:4]) != last, "round robin alternates");
            last = int'(out_fwd[3].data[5:4]);
          end
        end
      end
    join
    check(a0 + a1 == 16 && (a0 - a1 <= 1) && (a1 - a0 <= 1),
          $sformatf("round robin share %0d/%0d", a0, a1));
    repeat (20) @(posedge clk);

    // 4. back-pressure: output 1 blocked, the input stalls, then drains
    @(negedge clk) out_ready[1] = 1'b0;
    fork
      repeat (4) send1(2, 4'd5);
      begin
        repeat (12) @(posedge clk);
        check(expq[2][1].size() >= 2 && !in_ready[2], "input stalls behind a blocked output");
        @(negedge clk) out_ready[1] = 1'b1;
      end
    join
    repeat (5) @(posedge clk);
    check(expq[2][1].size() == 0, "blocked output drains");

    // 5. random traffic with random back-pressure
    model_rt = RT;
    @(negedge clk) begin rt_we = 1; rt_dest = 4'd6; rt_port = 2'(6 % NP); end
    @(negedge clk) rt_we = 0;
    run_random = 1;
    repeat (20000) @(posedge clk);
    // stop sources at packet boundaries, then drain
    wait (left[0] == 0 && left[1] == 0 && left[2] == 0 && left[3] == 0);
    run_random = 0;
    @(negedge clk);
    for (int i = 0; i < NP; i++) if (!in_fwd[i].valid || acc_q[i]) in_fwd[i] = '0;
    out_ready = '1;
    repeat (10) @(negedge clk) for (int i = 0; i < NP; i++) if (acc_q[i]) in_fwd[i] = '0;
    repeat (50) @(posedge clk);
    check(n_sent == n_recv && n_sent > 1000, $sformatf("sent %0d received %0d", n_sent, n_recv));
    for (int i = 0; i < NP; i++) for (int o = 0; o < NP; o++)
      check(expq[i][o].size() == 0, $sformatf("queue %0d->%0d empty", i, o));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
