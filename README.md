# A topology-obfuscated network-on-chip: ObNoCs switches and POTENT key switches

A network-on-chip's topology tells you which IP talks to which, how traffic
is prioritised and how the SoC is built. An untrusted foundry, assembly house
or test facility that holds the layout or the silicon can read that topology
off the wires. This RTL hides the topology behind key-controlled switches. The
routers are not wired to their neighbours directly. Every obfuscated
connection goes through programmable multiplexers, and their select lines come
from a register that is loaded serially after fabrication. With the right bits
(the *activation package*), the network is the one the designer intended. With
other bit patterns it becomes some other network. Many of those other networks
are still perfectly working networks, so the silicon alone cannot tell the
attacker which one was meant.

Two published methods are combined here, both by Halder et al.:

* **ObNoCs**: a two-stage MUX-DEMUX switch on every link of a chosen
  router, controlled by a 32-bit activation package.
* **POTENT**: a permutation switch between a router's ports and the links
  attached to them, controlled by a short key. The correct key gives the
  identity permutation, other keys give other permutations, and keys past
  n!−1 shut the router off.

The RTL builds the five-router example SoC interconnect from the ObNoCs work,
with router R1 obfuscated by ObNoCs. The other four routers are obfuscated by
POTENT switches. Everything is synthesizable SystemVerilog. Each block has a
self-checking testbench, and one end-to-end testbench runs the whole
interconnect at its default size.

## The example interconnect

```
      IP2        IP4        IP6          IP10
       |          |          |            |
IP1 --R2---------R3---------R1-----------R4-- IP8
       |          |          |
      IP3        IP5        R5-- IP9
```

Five routers form a tree and serve nine IPs (there is no IP7 in the example).
The port numbering used throughout the RTL is:

| router | port 0 | port 1 | port 2 | port 3 | obfuscation |
|---|---|---|---|---|---|
| R1 | IP6 | R3 | R4 | R5 | ObNoCs, 2 × 8 4×1 MUXes, 32-bit package |
| R2 | IP1 | IP2 | IP3 | R3 | POTENT, 4 ports, 5-bit key |
| R3 | IP4 | IP5 | R2 | R1 | POTENT, 4 ports, 5-bit key |
| R4 | IP10 | IP8 | R1 | – | POTENT, 3 ports, 3-bit key |
| R5 | IP9 | R1 | – | – | POTENT, 2 ports, 1-bit key |

The R1 port order follows the ObNoCs example: select value 00 joins R1 to
IP6, 01 to R3 and 10 to R4. The IP cores are not part of the RTL. The top
module `secure_noc_top` brings out one link per IP: `ip_tx_*` carries traffic
from the IP into the network and `ip_rx_*` carries traffic from the network to
the IP. Array index k belongs to IP number `IP_ID[k]` = 1, 2, 3, 4, 5, 6, 8, 9,
10.

## How the ObNoCs switch hides R1's links

Each direction of R1's four links passes through one `obnocs_switch`. There is
one switch for R1's outputs and one for its inputs. A switch has two stages of
four 4×1 MUXes:

```
 src[0..3] ──► stage 0: MUX0..MUX3 ──► stage 1: MUX0..MUX3 ──► dst[0..3]
               each MUX sees all 4       each MUX sees all 4
               src, in a scrambled       stage-0 outputs, in a
               order                     scrambled order
```

* The **wiring** is fixed when the chip is designed. It is the parameter
  `WIRING[stage][mux][input]` and decides which signal drives each MUX input.
  It plays the role of the "randomize connections" step of ObNoCs: the input
  order is scrambled so that the netlist shows no preferred connection. In the
  default wirings (`OBN_WIRING_OUT`, `OBN_WIRING_IN` in `noc_pkg`), all four
  MUXes of a stage share one scrambled order.
* The **selects** are programmable. Each MUX takes 2 bits, a stage takes 8,
  a switch takes 16 and R1's two switches take 32. These 32 bits are the
  activation package.

Package layout (bit 0 is the last bit shifted in):

| bits | switch | stage |
|---|---|---|
| [7:0] | R1 outgoing | 0 |
| [15:8] | R1 outgoing | 1 |
| [23:16] | R1 incoming | 0 |
| [31:24] | R1 incoming | 1 |

Within a stage byte, MUX m uses bits [2m+1:2m].

The correct package is **32'he4e4e46c**. This is the value the ObNoCs
simulation study shows for its correctly-keyed device. The wirings were chosen
so that this value gives the identity mapping (dst m ← src m) on both
switches. Note that the correct selects are not the identity: 8'h6c means
MUX0..3 select inputs 0, 3, 2, 1. The scrambled wiring undoes that.

Because every MUX of a stage has the same input order, the package bytes fall
into three classes:

* **Intended**: only `e4e4e46c`.
* **Legal but wrong**: every stage byte is a permutation of 0..3 (for example
  `b427e46c`, `b4e4276c`, `e4e4e463`, `e4e4276c`, `d8e4e46c` and `e4e1e46c`,
  the six wrong-but-working packages of the study). Each switch is then
  one-to-one, so R1 is joined to IP6, R3, R4 and R5 in some other order. The
  result is a working network that is not the intended one. A switch has
  4!·4! = 576 such packages, and together they reach all 24 one-to-one
  mappings. Each mapping is reached by 24 packages, because two
  permutations in a row are again one permutation. The ObNoCs work counts
  576 legal topologies for two stages; in this RTL that is the number of
  legal packages, not of distinct link arrangements.
* **Non-functional**: some stage byte repeats a select (for example
  `cdd432a3` and `cda332d4`). One source then reaches several destinations
  and another reaches none.

After reset the register is zero, which is non-functional. The chip does
nothing useful until the package has been loaded.

**Flow control through the switch.** The valid/sop/eop/data bundle travels
forward through the MUXes. Ready travels backwards, stage by stage. A signal
is ready when at least one MUX of the next stage selects it and every MUX
that selects it is ready. For a legal package this is just the ready of the
one destination that the source reaches. For a non-functional package, a
source seen by several receivers holds its flit until all of them can take it.
So even a wrong package never breaks the rule that an offered flit stays
stable until accepted. A source that no MUX selects stalls. The switch is
purely combinational and adds no cycle.

## The POTENT permutation switch

`potent_switch` joins a router's N ports to the N links attached to it.
Link j goes to router port `perm[j]`, and both directions of the connection
follow the same permutation. The key chooses the permutation:

* Keys 0 .. N!−1 each give one permutation. Key k gives the permutation of
  lexicographic rank (k − CORRECT_KEY) mod N!, so `CORRECT_KEY` gives the
  identity (the intended connections). The next key swaps the last two ports,
  and so on.
* Keys N! .. 2^KEY_W−1 are null keys. All outputs and readies of the switch
  are 0, so nothing passes through that router.

With N = 4 there are 24 permutations, a 5-bit key and null keys 24..31. With
N = 3 there are 6 permutations and a 3-bit key. With N = 2 there are 2
permutations and a 1-bit key. The decode is a small combinational circuit
(factorial number system); the switch adds no cycle.

The keys of the four switches come from the *routing key box*, a second
serial register of 14 bits:

| bits | switch | key width | correct key (`noc_pkg`) |
|---|---|---|---|
| [4:0] | R2 | 5 | 9 |
| [9:5] | R3 | 5 | 17 |
| [12:10] | R4 | 3 | 3'b100 |
| [13] | R5 | 1 | 1 |

## Loading the keys

`ap_load_reg` is a serial-in, parallel-out register, built like a scan chain.
While `load_en` is high, each clock shifts `ap_in` into bit 0, so a package is
sent most significant bit first. The 32-bit package takes 32 enabled cycles
and the 14-bit key box takes 14. When the enable is low the register holds.
`rst` clears it. The bring-up sequence is:

1. Hold `rst` high for a cycle, then release it.
2. Shift the 32 package bits on `ap_in` with `load_en` high (MSB first).
3. Shift the 14 key bits on `key_in` with `key_load_en` high.
4. Optionally, rewrite routing-table entries with `rt_we`, `rt_router`
   (1..5), `rt_dest` and `rt_port`, one entry per cycle.

Both registers may be reloaded at any time. Flits already inside the routers
then follow the new connections, so reset the network before switching
between configurations.

## Routers and links

A link is the `flit_t` struct {valid, sop, eop, data[129:0]} plus a ready
wire going the other way. A flit moves on a clock edge where valid and ready
are both high. An offered flit must stay unchanged until it is accepted; every
router input and output checks this with an assertion. The 130-bit data width
is the width of the vendor router's `sink_data`. The head flit (sop) carries
the destination IP number in `data[3:0]`.

`noc_router` has:

* a 2-flit FIFO on every input;
* a routing table that maps each destination to an output port, resets to the
  intended routes (`RT_R1`..`RT_R5`) and can be rewritten;
* a round-robin arbiter per output;
* wormhole locking: once an output starts a packet, it stays with that input
  until the eop flit has gone.

An output never withdraws a flit it has offered. Its valid and data depend
only on registers, so no combinational path runs through a router from ready
to valid. Each router adds exactly one cycle when nothing blocks. The
switches add none, so a flit takes as many cycles as there are routers on its
path. For example, IP1 → IP9 crosses R2, R3, R1 and R5 and takes 4 cycles.

## Simulating

Everything runs with plain Verilator 5. Packages are read first, and `-y rtl`
finds the other modules. From the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/noc_pkg.sv tb/tb_secure_noc_top.sv --top-module tb_secure_noc_top
./obj_dir/Vtb_secure_noc_top
```

Replace the testbench name to run another. Every testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ap_load_reg` | The register contents after every shifted bit; the package is complete after exactly 32 cycles and not before; hold while disabled; reset. |
| `tb_obnocs_switch` | The nine packages of the ObNoCs study come out as 1 intended, 6 legal and 2 non-functional. Data and ready for 300 random packages match a reference model of the wiring. All 576 permutation packages are legal and reach all 24 mappings. |
| `tb_potent_switch` | All 32 / 8 / 2 keys of the 4-, 3- and 2-port switches: the correct key gives the identity; n! distinct one-to-one patterns in both directions, with ready; lexicographic order; null keys block. |
| `tb_noc_router` | One cycle per hop; a table write takes effect; round-robin alternation; back-pressure and drain. 20,000 cycles of random multi-flit traffic with a scoreboard for routing, order, content and packets not interleaving. |
| `tb_secure_noc_top` | The full interconnect at default size. Traffic does not go as intended before activation; serial loading. All 72 IP pairs arrive at the right IP with latency equal to the router count. Random concurrent multi-flit traffic under back-pressure arrives complete and correct. Each of the six wrong legal and two non-functional packages mis-delivers traffic. A wrong POTENT key mis-delivers and a null key blocks. A routing-table rewrite redirects traffic. The test counts each of these mechanisms and fails if one never happened. |

The end-to-end test finishes in well under a second.

## What follows the source work and what is this design's own

Taken from the ObNoCs and POTENT work:

* the five-router tree and the IPs on each router;
* R1 as the obfuscated router and its port order;
* the two-stage switch of 4×1 MUXes, with 16 MUXes and 32 package bits per
  router;
* the correct package value and the nine study packages;
* serial package loading with AP_in, LOAD_en, CLK and RST;
* the 4-port permutation switch with a 5-bit key and null keys 24..31, and
  the 3-bit keys of 3-port switches;
* the 130-bit router data width and the link signal set.

This design's own choices:

* **Router internals.** The source routers come from a vendor tool, so FIFO
  depth, arbitration, wormhole switching, the destination field and the
  routing-table write port are all new here.
* **Wiring of the ObNoCs MUXes.** Each stage shares one scrambled input order.
  This was chosen because it makes the study's packages fall into the legal
  and non-functional classes exactly as reported.
* **Package bit layout, shift direction and synchronous reset.**
* **The enable on `ap_load_reg`.** The source gates the clock with LOAD_en;
  here an ordinary clock enable does the same job.
* **The backward ready path through the switches.**
* **The numbering of POTENT keys and the correct key values.** The exception
  is 3'b100, which is the correct key shown for a 3-port switch in the POTENT
  example.
* **Combining the two techniques in one interconnect.** The source evaluates
  them on different SoCs. Here R1 uses ObNoCs and R2..R5 use POTENT.

Known departures and limits:

* **Null keys on 3-port switches.** POTENT's switch-generation algorithm makes
  keys beyond n!−1 null. Its own 3-port example figure applies keys 110 and
  111 and still shows a topology. The RTL follows the algorithm, so on a
  3-port switch keys 6 and 7 are null. That figure also gives one switch the
  same key (011) in two panels with two different IP orders. So it cannot
  serve as a key-to-permutation table, and the lexicographic numbering used
  here is this design's own.
* **Where POTENT applies its switch.** POTENT inserts its switch into the
  gate-level netlist after synthesis, precisely so that synthesis cannot
  optimise it away. Here it is RTL. Whether a given synthesis flow keeps both
  switch types intact must be checked on the netlist.
* **The ALU.** The ObNoCs study judges topologies by an ALU result. That ALU
  is not modelled; the testbenches judge by where packets arrive.
* **Benchmark SoCs.** The benchmark SoCs (12 to 16 routers, with processors,
  memories and peripherals), the "obfuscation levels" with up to 16 ObNoCs
  routers, and the 9-router POTENT example topology are not built. Only one
  router uses ObNoCs here.
* **Chiplet interconnects.** The chiplet extension (authentication, encryption
  and obfuscation of die-to-die links over UCIe/CXL) exists only as research
  goals, with no mechanism to implement, and is not included.
* **Key storage in the field.** Storing the package in the field (for example
  in a tamper-proof ROM) is outside the scope. The package enters through the
  `ap_in` pin.

## Changing the design

* **Topology constants.** Routing tables, wirings, the correct package,
  correct keys and IP numbering all live in `rtl/noc_pkg.sv`.
* **Changing a wiring.** If you change a wiring, recompute the package. For
  each destination m, follow stage 1 MUX m back to the stage-0 MUX it selects,
  then to the source that MUX selects. Choose the selects so that this source
  is m.
* **Changing a correct key.** Change `KEY_R2`..`KEY_R5`; the switch's
  `CORRECT_KEY` parameter follows.
* **More ObNoCs routers.** Any router with four ports can be obfuscated by
  ObNoCs: put two `obnocs_switch` instances on its links and widen the
  package register by 32 bits.
* **Other sizes.** `potent_switch` works for any N; its key width is
  ceil(log2 N!). `obnocs_switch` is written for 4×1 MUXes, with `STAGES`
  adjustable. Each extra stage multiplies the number of legal packages by 24.
