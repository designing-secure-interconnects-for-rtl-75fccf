// tb_secure_noc_top: end-to-end test of the obfuscated example SoC
// interconnect, with every parameter at its default.
//
// The nine IPs are modelled by the test: each can send packets (valid/ready
// held until accepted) and receive them (with optional back-pressure).
// Flit data: [3:0] destination IP number, [7:4] sending IP index,
// [23:8] packet number, [25:24] flit index, the rest random.
//
// Phases:
//  1. Locked: after reset the activation package register and the key box
//     are zero; traffic between the IPs is not delivered as intended.
//  2. Activation: the 32-bit package 32'he4e4e46c and the POTENT keys are
//     shifted in serially (32 and 14 cycles).
//  3. Every IP sends one packet to every other IP, one at a time: each
//     arrives at the right IP, and takes one cycle per router on its path
//     (computed from the tree, independently of the RTL).
//  4. Random multi-flit traffic from all IPs at once with random receive
//     back-pressure: every packet arrives complete, in order and unmixed
//     at the right IP.
//  5. The six wrong but legal packages W1..W6 and the two non-functional
//     packages IL1, IL2 of the ObNoCs study: each one mis-delivers or loses
//     traffic.
//  6. A wrong POTENT key on R2 mis-delivers traffic; a null key (24..31)
//     blocks R2's IPs completely.
//  7. A routing-table rewrite redirects traffic.
// Each mechanism is counted and a failure is counted for one that never
// happened.
module tb_secure_noc_top;
  timeunit 1ns; timeprecision 1ps;
  import noc_pkg::*;

  logic clk = 0, rst = 1;
  logic ap_in = 0, load_en = 0, key_in = 0, key_load_en = 0;
  logic rt_we = 0;
  logic [2:0] rt_router = '0;
  dest_t rt_dest = '0;
  port_t rt_port = '0;
  flit_t [NUM_IP-1:0] ip_tx_fwd, ip_rx_fwd;
  logic  [NUM_IP-1:0] ip_tx_ready, ip_rx_ready;

  secure_noc_top dut (.*);

  always #5 clk = ~clk;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0d] %s", cycle, what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- topology model (independent of the RTL) ----------------
  // router of each IP index: IP1..3 R2, IP4..5 R3, IP6 R1, IP8 R4, IP9 R5, IP10 R4
  int ip_router [NUM_IP] = '{2, 2, 2, 3, 3, 1, 4, 5, 4};
  int ip_num    [NUM_IP] = '{1, 2, 3, 4, 5, 6, 8, 9, 10};
  int parent    [6]      = '{0, 0, 3, 1, 1, 1};    // tree rooted at R1

  function automatic int depth(input int r);
    int d = 0;
    while (r != 1) begin r = parent[r]; d++; end
    return d;
  endfunction
  function automatic int routers_on_path(input int a, input int b);
    int n = 1;
    while (a != b) begin
      if (depth(a) >= depth(b)) a = parent[a]; else b = parent[b];
      n++;
    end
    return n;
  endfunction
  function automatic int idx_of_num(input int num);
    for (int k = 0; k < NUM_IP; k++) if (ip_num[k] == num) return k;
    return -1;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_ap_load = 0, n_key_load = 0, n_delivered_ok = 0, n_latency_ok = 0;
  int n_multiflit = 0, n_tx_stall = 0, n_rx_backpressure = 0;
  int n_locked_wrong = 0, n_legal_wrong = 0, n_nonfunc = 0;
  int n_potent_wrong = 0, n_potent_null = 0, n_rt_rewrite = 0;

  // ---------------- packet bookkeeping ----------------
  int unsigned pkt_no = 0;
  int          pkt_dest_idx [int];     // expected receiving IP index
  int          pkt_len      [int];
  int unsigned pkt_tx_cycle [int];     // cycle the head flit was accepted
  int          pkt_rx_count [int];     // flits received (at any IP)
  int          pkt_rx_idx   [int];     // IP that received the head
  int unsigned pkt_rx_cycle [int];
  int          rx_cur       [NUM_IP];  // packet being received, -1 none
  int          n_wrong_ip = 0, n_bad_flit = 0;

  always @(posedge clk) if (!rst) begin
    for (int k = 0; k < NUM_IP; k++) begin
      if (ip_tx_fwd[k].valid && !ip_tx_ready[k]) n_tx_stall++;
      if (ip_rx_fwd[k].valid && !ip_rx_ready[k]) n_rx_backpressure++;
      if (ip_rx_fwd[k].valid && ip_rx_ready[k]) begin
        int p, fi;
        p  = int'(ip_rx_fwd[k].data[23:8]);
        fi = int'(ip_rx_fwd[k].data[25:24]);
        if (!pkt_len.exists(p)) n_bad_flit++;
        else begin
          if (fi == 0) begin
            if (rx_cur[k] != -1) n_bad_flit++;
            pkt_rx_idx[p]   = k;
            pkt_rx_cycle[p] = cycle;
          end else if (rx_cur[k] != p) n_bad_flit++;
          if (fi != pkt_rx_count[p]) n_bad_flit++;
          if (ip_rx_fwd[k].eop != (fi == pkt_len[p] - 1)) n_bad_flit++;
          if (k != pkt_dest_idx[p]) n_wrong_ip++;
          pkt_rx_count[p]++;
          rx_cur[k] = ip_rx_fwd[k].eop ? -1 : p;
        end
      end
    end
  end

  // ---------------- IP senders ----------------
  bit abort = 0;

  task automatic send_pkt(input int k, input int dest_num, input int len);
    int p;
    p = int'(pkt_no); pkt_no++;
    pkt_dest_idx[p] = idx_of_num(dest_num);
    pkt_len[p]      = len;
    pkt_rx_count[p] = 0;
    pkt_rx_idx[p]   = -1;
    if (len > 1) n_multiflit++;
    for (int f = 0; f < len; f++) begin
      flit_t fl;
      fl.valid = 1'b1; fl.sop = (f == 0); fl.eop = (f == len - 1);
      fl.data  = {$urandom, $urandom, $urandom, $urandom, 2'b0};
      fl.data[3:0]   = (f == 0) ? dest_t'(dest_num) : dest_t'($urandom);
      fl.data[7:4]   = 4'(k);
      fl.data[23:8]  = 16'(p);
      fl.data[25:24] = 2'(f);
      @(negedge clk);
      if (abort) return;
      ip_tx_fwd[k] = fl;
      do begin
        @(posedge clk);
        if (abort) begin ip_tx_fwd[k] = '0; return; end
      end while (!ip_tx_ready[k]);
      if (f == 0) pkt_tx_cycle[p] = cycle;
      @(negedge clk) ip_tx_fwd[k] = '0;
    end
  endtask

  task automatic clear_books();
    pkt_dest_idx.delete(); pkt_len.delete(); pkt_tx_cycle.delete();
    pkt_rx_count.delete(); pkt_rx_idx.delete(); pkt_rx_cycle.delete();
    foreach (rx_cur[k]) rx_cur[k] = -1;
    n_wrong_ip = 0; n_bad_flit = 0;
  endtask

  // all packets received complete at the intended IP?
  function automatic int n_correct();
    int c = 0;
    foreach (pkt_len[p])
      if (pkt_rx_count[p] == pkt_len[p] && pkt_rx_idx[p] == pkt_dest_idx[p]) c++;
    return c;
  endfunction

  // ---------------- loaders ----------------
  task automatic load_ap(input logic [AP_W-1:0] pkg);
    int en_cycles = 0;
    for (int b = AP_W-1; b >= 0; b--) begin
      @(negedge clk) begin load_en = 1; ap_in = pkg[b]; end
      @(posedge clk) en_cycles++;
    end
    @(negedge clk) load_en = 0;
    check(dut.ap == pkg && en_cycles == 32, $sformatf("package loaded in %0d cycles", en_cycles));
    n_ap_load++;
  endtask

  task automatic load_keys(input logic [KEYBOX_W-1:0] keys);
    for (int b = KEYBOX_W-1; b >= 0; b--) begin
      @(negedge clk) begin key_load_en = 1; key_in = keys[b]; end
      @(posedge clk);
    end
    @(negedge clk) key_load_en = 0;
    check(dut.keys == keys, "keys loaded");
    n_key_load++;
  endtask

  // Reset the NoC (drops all flits in flight and clears the key registers).
  task automatic noc_reset();
    abort = 1;
    @(negedge clk) rst = 1;
    repeat (3) @(negedge clk);
    ip_tx_fwd = '0;
    rst = 0; abort = 0;
    clear_books();
  endtask

  // Every IP sends one packet to every IP of the list, all IPs at once;
  // give the network `cycles` cycles, then stop.  Returns packets correct.
  task automatic burst(input int cycles, output int sent, output int good);
    fork
      begin
        for (int k = 0; k < NUM_IP; k++) begin
          fork
            automatic int kk = k;
            begin
              for (int j = 0; j < NUM_IP; j++)
                if (j != kk) send_pkt(kk, ip_num[(kk + j) % NUM_IP], 1);
            end
          join_none
        end
        wait fork;
      end
      repeat (cycles) @(posedge clk);
    join_any
    sent = pkt_len.num();
    good = n_correct();
    // stop: reset the NoC first, so no sender withdraws a flit it offered
    @(negedge clk) rst = 1;
    abort = 1;
    repeat (2) @(posedge clk);
    disable fork;
    abort = 0;
  endtask

  typedef struct { string name; logic [31:0] pkg; bit legal; } study_t;
  study_t study [8] = '{
    '{"W1", 32'hb427e46c, 1}, '{"W2", 32'hb4e4276c, 1}, '{"W3", 32'he4e4e463, 1},
    '{"W4", 32'he4e4276c, 1}, '{"W5", 32'hd8e4e46c, 1}, '{"W6", 32'he4e1e46c, 1},
    '{"IL1", 32'hcdd432a3, 0}, '{"IL2", 32'hcda332d4, 0}};

  initial begin
    int sent, good;
    ip_tx_fwd = '0; ip_rx_ready = '1;
    foreach (rx_cur[k]) rx_cur[k] = -1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;

    // 1. locked
    burst(600, sent, good);
    $display("locked: %0d of %0d packets correct", good, sent);
    check(good < sent, "interconnect without activation package is not the intended one");
    if (good < sent) n_locked_wrong++;
    noc_reset();

    // 2. activation
    load_ap(AP_CORRECT);
    load_keys(KEYS_CORRECT);

    // 3. all pairs, one packet at a time
    for (int s = 0; s < NUM_IP; s++) begin
      for (int d = 0; d < NUM_IP; d++) begin
        if (s != d) begin
          int p;
          p = int'(pkt_no);
          send_pkt(s, ip_num[d], 1);
          repeat (8) @(posedge clk);
          check(pkt_rx_count[p] == 1 && pkt_rx_idx[p] == d,
                $sformatf("IP%0d -> IP%0d delivered", ip_num[s], ip_num[d]));
          if (pkt_rx_count[p] == 1 && pkt_rx_idx[p] == d) n_delivered_ok++;
          check(pkt_rx_cycle[p] - pkt_tx_cycle[p] == routers_on_path(ip_router[s], ip_router[d]),
                $sformatf("IP%0d -> IP%0d latency %0d, %0d routers", ip_num[s], ip_num[d],
                          pkt_rx_cycle[p] - pkt_tx_cycle[p], routers_on_path(ip_router[s], ip_router[d])));
          if (pkt_rx_cycle[p] - pkt_tx_cycle[p] == routers_on_path(ip_router[s], ip_router[d]))
            n_latency_ok++;
        end
      end
    end

    // 4. random concurrent multi-flit traffic with receive back-pressure
    fork
      begin
        for (int k = 0; k < NUM_IP; k++) begin
          fork
            automatic int kk = k;
            begin
              repeat (40) begin
                int d;
                do d = $urandom_range(0, NUM_IP-1); while (d == kk);
                send_pkt(kk, ip_num[d], $urandom_range(1, 4));
                repeat ($urandom_range(0, 3)) @(posedge clk);
              end
            end
          join_none
        end
        wait fork;
      end
      begin
        forever @(negedge clk) ip_rx_ready = NUM_IP'($urandom) | NUM_IP'($urandom);
      end
    join_any
    disable fork;
    @(negedge clk) ip_rx_ready = '1;
    repeat (100) @(posedge clk);
    check(n_correct() == pkt_len.num() && n_wrong_ip == 0 && n_bad_flit == 0,
          $sformatf("random traffic: %0d of %0d packets correct, %0d wrong IP, %0d bad flits",
                    n_correct(), pkt_len.num(), n_wrong_ip, n_bad_flit));
    n_delivered_ok += n_correct();

    // 5. wrong activation packages
    foreach (study[i]) begin
      noc_reset();
      load_ap(study[i].pkg);
      load_keys(KEYS_CORRECT);
      burst(800, sent, good);
      $display("%s: %0d of %0d packets correct", study[i].name, good, sent);
      check(good < sent, {study[i].name, " does not realise the intended topology"});
      if (good < sent) begin
        if (study[i].legal) n_legal_wrong++; else n_nonfunc++;
      end
    end

    // 6. POTENT keys: wrong key on R2, then a null key on R2
    noc_reset();
    load_ap(AP_CORRECT);
    load_keys({KEYS_CORRECT[KEYBOX_W-1:5], 5'd10});
    burst(800, sent, good);
    $display("R2 key 10: %0d of %0d packets correct", good, sent);
    check(good < sent, "wrong POTENT key changes the topology");
    if (good < sent) n_potent_wrong++;
    noc_reset();
    load_ap(AP_CORRECT);
    load_keys({KEYS_CORRECT[KEYBOX_W-1:5], 5'd27});
    begin
      int stuck;
      stuck = 0;
      fork
        send_pkt(0, 2, 1);
        repeat (50) @(posedge clk);
      join_any
      if (!ip_tx_ready[0] && ip_tx_fwd[0].valid) stuck = 1;
      @(negedge clk) rst = 1;
      abort = 1; repeat (2) @(posedge clk); disable fork; abort = 0;
      check(stuck == 1, "null POTENT key blocks the router's IPs");
      n_potent_null += stuck;
    end

    // 7. routing table rewrite: on R2, destination IP2 -> port 0 (IP1)
    noc_reset();
    load_ap(AP_CORRECT);
    load_keys(KEYS_CORRECT);
    @(negedge clk) begin rt_we = 1; rt_router = 3'd2; rt_dest = 4'd2; rt_port = 2'd0; end
    @(negedge clk) rt_we = 0;
    begin
      int p;
      p = int'(pkt_no);
      send_pkt(3, 2, 1);                         // IP4 -> IP2
      repeat (10) @(posedge clk);
      check(pkt_rx_count[p] == 1 && pkt_rx_idx[p] == 0,
            $sformatf("rewritten route delivers to IP1 (got %0d flits at index %0d)", pkt_rx_count[p], pkt_rx_idx[p]));
      if (pkt_rx_idx[p] == 0) n_rt_rewrite++;
    end

    // mechanisms
    $display("mechanisms: ap_load=%0d key_load=%0d delivered=%0d latency_ok=%0d multiflit=%0d",
             n_ap_load, n_key_load, n_delivered_ok, n_latency_ok, n_multiflit);
    $display("            tx_stall=%0d rx_backpressure=%0d locked_wrong=%0d legal_wrong=%0d",
             n_tx_stall, n_rx_backpressure, n_locked_wrong, n_legal_wrong);
    $display("            nonfunctional=%0d potent_wrong=%0d potent_null=%0d rt_rewrite=%0d",
             n_nonfunc, n_potent_wrong, n_potent_null, n_rt_rewrite);
    check(n_ap_load > 0, "mechanism: activation package load");
    check(n_key_load > 0, "mechanism: key box load");
    check(n_delivered_ok > 0 && n_latency_ok == NUM_IP * (NUM_IP - 1), "mechanism: intended delivery");
    check(n_multiflit > 0, "mechanism: multi-flit packets");
    check(n_tx_stall > 0, "mechanism: sender stall (contention)");
    check(n_rx_backpressure > 0, "mechanism: receiver back-pressure");
    check(n_locked_wrong > 0, "mechanism: locked before activation");
    check(n_legal_wrong == 6, "mechanism: six legal wrong packages");
    check(n_nonfunc == 2, "mechanism: two non-functional packages");
    check(n_potent_wrong > 0, "mechanism: wrong POTENT key");
    check(n_potent_null > 0, "mechanism: null POTENT key");
    check(n_rt_rewrite > 0, "mechanism: routing table rewrite");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
