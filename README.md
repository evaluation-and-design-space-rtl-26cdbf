# A dataflow NoC pair for image-analysis systems on FPGA

Image-analysis hardware moves data very unevenly. Large amounts of pixel and
spectral data flow from storage into the processing units. Only a handful of
commands and results flow between those units and the controller. This RTL
builds the two networks such a system needs, one for each kind of traffic:

* **A data NoC.** It is a small fat tree: 4 storage modules feed 4 processing
  nodes through 2 parallel crossbar switches. Traffic moves as typed packets,
  cut into 8-bit flits. Each output has virtual-channel (VC) FIFOs. Packets
  are wormhole-routed on fixed routes.
* **A command/result ring.** It links the control module to every other
  module. The control module keeps four 4-flit packets circulating. A command
  packet is taken by the module it addresses. An empty packet picks up a
  result on its way back.

Every module runs on its own clock (globally asynchronous, locally
synchronous). Both networks cross clock domains on their own.

The design follows the published "version 2" of a time-division-multiplexed
fat-tree NoC, built for a multispectral art-authentication application. The
sizes (data types, widths, FIFO depth, number of switches, VCs and modules)
are that application's. The paper gives the block structure and the sizes but
leaves most of the insides open. Everything it leaves open has been decided
here. Each decision is listed in the comment at the top of its file, and
collected under "Departures and own choices" below.

## Structure

```
 storage module s (s = 0..3)        main switches            processing node m (m = 0..3)
 ┌──────────┐   ┌────┐  ┌─────────┐   ┌──────────┐   ┌──────────────┐   ┌────────┐
 │ src port ├──►│ NA ├─►│Fifo_in0 ├──►│          ├──►│Fifo_out0<2m> │──►│        │
 │  k = 0   │   └────┘  └─────────┘   │ switch 0 ├──►│Fifo_out0<2m+1│──►│ output │
 │          │                         │ (CCN+AU) │   └──────────────┘   │ switch ├─► pm port m
 │ src port │   ┌────┐  ┌─────────┐   ├──────────┤   ┌──────────────┐   │   m    │
 │  k = 1   ├──►│ NA ├─►│Fifo_in1 ├──►│ switch 1 ├──►│Fifo_out1<2m> │──►│        │
 └──────────┘   └────┘  └─────────┘   │          ├──►│Fifo_out1<2m+1│──►│        │
                                      └──────────┘   └──────────────┘   └────────┘
  src_clk[s]        noc_clk                noc_clk      noc_clk → pm_clk[m]   pm_clk[m]
```

| file | role |
|---|---|
| `image_analysis_top` | top: data NoC and command ring, with every module's ports brought out |
| `tdm_noc_top` | data NoC: 8 network adapters, 8 input FIFOs, 2 main switches, 16 output VC FIFOs, 4 output switches |
| `network_adapter` | turns a module's data word into a packet and then a flit stream (`adaptor_pack`, `vc_fifo` as packet FIFO, `adaptor_type`, `adaptor_tdm`, `adaptor_flit`) |
| `main_switch` | crossbar of 4 inputs onto 8 VCs: `ccn` (coordination, crossbar) and `arbitration_unit` (VC states, round robin) |
| `output_switch` | per processing node: merges its 4 VCs, one whole packet at a time |
| `vc_fifo` | bi-synchronous FIFO used for every buffer |
| `command_ring` | `ring_master` (control side) and 9 `ring_node` stations |
| `hs4_tx`, `hs4_rx` | send and receive units of a station's asynchronous wrapper |
| `noc_pkg` | packet, header, ring and VC-state types; the packet-size table |

## Packets and flits

A data packet is one header byte, a data field and the tail byte `FF`, in that
order, most significant bit first:

```
 header (8)                           data (56 / 48 / 48 / 8)      tail (8)
 [7:6] id  [5:4] p  [3:0] int_length  BCD digits, opaque to the NoC  8'hFF
```

* `id` is the data type.
* `p` is the destination processing node.
* `int_length` is where the decimal point falls in the data.

The four types of the application:

| id | type | data bits | packet bits | flits (8-bit) |
|---|---|---|---|---|
| 00 | coefficient (colour-space coefficients) | 56 | 72 | 9 |
| 01 | original-image data | 48 | 64 | 8 |
| 10 | compared-image data | 48 | 64 | 8 |
| 11 | result | 8 | 24 | 3 |

The flit count is `ceil((16 + data bits) / FLIT_W)`. Every block that has to
know where a packet ends gets it from the `id` field of the header flit, using
`noc_pkg::nb_flits`. No block searches for the `FF` tail. Counting is used
because a header can also read `FF` (id 11, p 3, int_length 15).

When `FLIT_W` is not 8, the header stays in the top 8 bits of the first flit.
The last flit is zero-padded. At 16 bits, for example, the packets are 5, 4, 4
and 2 flits long.

## Network adapter: where the time-division multiplexing happens

Each storage module has two adapters, one per main switch. An adapter works
in four steps:

1. It registers the word as a packet (`adaptor_pack`).
2. It queues the packet in a 32-entry bi-synchronous packet FIFO. This FIFO
   is also where the data leaves the module clock.
3. In the NoC clock domain, `adaptor_type` reads the flit count from the
   queued header.
4. `adaptor_tdm` opens Nb_flit consecutive flit slots for the packet, and
   `adaptor_flit` shifts the packet out, one flit per slot.

This gives the time-division multiplexing of the design's name: a packet
owns the link for exactly Nb_flit slots. The next packet loads in the same
cycle as the last flit of the previous one, so an adapter that is never
stalled sends one flit per NoC cycle without gaps.

Storage module *s* is taken to carry data type *s*, one of the application's
four types per storage module. Its adapters are sized for that type's data
width. All source ports are 56 bits wide. A narrower adapter uses only the
low bits of its port.

## Main switch: CCN and arbitration unit

A main switch takes the heads of its four input FIFOs and writes into eight
output VCs. Those are two VCs for each processing node; VC `v` belongs to
node `v / 2`.

The **CCN** (central coordination node) keeps one route per input. For each
input:

1. It sees a header at the head of the input and shows its destination
   (`P_enc`) to the AU.
2. When granted, it records the route (input → VC) and the packet's flit count.
3. From the next cycle on, it moves one flit per cycle through the crossbar.
   It moves a flit only when the input FIFO is not empty and the AU lets the
   VC advance.
4. It releases the route after the last flit.

All four inputs can cross at once when they use different VCs.

The **AU** (arbitration unit) keeps a four-state machine for each VC:

| state | meaning | leaves when |
|---|---|---|
| IDLE | free, FIFO drained | granted → READY |
| READY | granted, header not yet written | a flit is written → BUSY (→ EMPTY for a 1-flit packet) |
| BUSY | packet flowing | its last flit is written → EMPTY |
| EMPTY | no packet in flight, FIFO still draining | granted again → READY; drained → IDLE |

For each destination node there is a round-robin arbiter over the inputs whose
header targets that node. Each cycle it grants at most one input, to an IDLE
VC if there is one, otherwise to an EMPTY one. Priority then passes to the
input after the winner. A VC carries one packet at a time, but several
packets can queue in its FIFO. Waiting for a VC to drain before granting it
again would leave a 32-flit FIFO holding at most one 9-flit packet.

A VC may take a flit (`vc_can_advance`) when it is READY or BUSY and its FIFO
is not full. This is the per-cycle flow control.

## Output switch

Each processing node has an output switch. It gathers the node's four VCs,
two from each main switch. When idle, it picks a non-empty VC in round-robin
order and sends its header in the same cycle. It then stays on that VC until
the packet's last flit, so packets reach the node whole. On the node's
interface:

* `pm_valid` and `pm_ready` form the handshake.
* `pm_sop` marks the header flit and `pm_eop` the last flit.

## Clock domains and latency

| domain | blocks |
|---|---|
| `src_clk[s]` | `adaptor_pack`, write side of the packet FIFO; ring station of storage module s |
| `noc_clk` | adapter flit side, both sides of the input FIFOs, main switches, write side of the output VCs |
| `pm_clk[m]` | read side of node m's VCs, output switch m; ring station of processing node m |
| `ctrl_clk`, `acq_clk` | ring stations of the control and acquisition modules |

`vc_fifo` is a Gray-pointer FIFO. Each pointer passes through a 2-flip-flop
synchroniser (`SYNC_STAGES`). The input FIFOs run both sides on `noc_clk`, but
they are still bi-synchronous, so their synchroniser latency remains.

Route latency on an idle network is measured in the testbenches. A header
written into an input FIFO at NoC edge 0 reaches its output VC at edge 4:

* 2 cycles for the input FIFO's synchroniser,
* 1 cycle for the registered grant,
* 1 cycle to cross the switch.

The source paper counts 3 cycles: store, cross, store. Its count has no
synchroniser and an unregistered grant.

After the route is set, every flit takes one NoC cycle per stage. A packet of
n flits leaves an adapter in n NoC cycles.

## Command/result ring

* **Packets.** Four 8-bit flits: a header `{kind[1:0], addr[5:0]}` and three
  payload flits. `kind` is 00 empty, 01 command, 10 result. The control module
  has address 0; stations have addresses 1..9. The ring runs control → storage
  0..3 → processing 0..3 → acquisition → control.
* **Links.** Each link is a bundled 8-bit flit with a four-phase req/ack
  handshake. `hs4_tx` puts the data out and raises `req`. It lowers `req` after
  seeing `ack` high, then waits for `ack` low. `hs4_rx` takes the data when
  it sees `req` high, and does not acknowledge the next flit until its module
  has taken the current one. Both synchronise the other side's signal through
  two flip-flops. One flit costs about 2 × (SYNC_STAGES + 1) cycles of each
  side's clock.
* **Stations (`ring_node`).** A station looks at each passing header:
  * A command addressed to it is taken. `cmd_valid` pulses with the 24-bit
    payload, and the packet goes on as an empty packet.
  * An empty packet is filled if the module offers a result (`res_valid`):
    the header becomes `{RESULT, own address}` and `res_taken` pulses.
  * Anything else passes unchanged.
* **Control side (`ring_master`).** It keeps at most `N_PKTS` = 4 packets in
  flight. Each time one returns, it sends a new one: a command if one waits,
  otherwise an empty packet. It reports each returning result with the
  sender's address.

## Parameters (defaults)

| parameter | default | where |
|---|---|---|
| `N_SRC` | 4 | storage modules (data sources) |
| `N_SW` | 2 | main switches in parallel |
| `N_PM` | 4 | processing nodes |
| `VC_PER_PM` | 2 | VCs per node in each main switch |
| `FLIT_W` | 8 | flit width |
| `DEPTH` | 32 | depth of every FIFO (packet FIFOs count packets, the others count flits); power of two |
| `DATA_W` | 56 | width of the top's data ports (the widest type) |
| `N_PKTS` | 4 | packets circulating on the ring |
| `SYNC_STAGES` | 2 | synchroniser flip-flops (FIFOs, handshakes) |

## Departures and own choices

These follow the paper: the structure above, all the sizes in the tables, the
header fields, the tail `FF`, the five NA sub-blocks, CCN/AU and the round
robin, bi-synchronous VCs, the ring with four 4-flit packets, and the
four-phase handshake with two-flip-flop synchronisers. The following are
this design's own choices or departures:

* **Adapter placement.** The paper counts the adapter, with its
  multiplexer, as the third part of a router, beside the CCN and AU. Here the
  adapters sit at the sources, one per source and main switch, in front of
  the input FIFOs. The input FIFOs then do the multiplexing into the switch.
* **Header widths.** The paper's NA drawing gives `P` and `int_length` 3 bits
  each. Its bit-level packet tables give 2 and 4 bits. This design uses the
  tables' 2 and 4.
* **The NA's derived clock.** The paper draws a derived clock, `Clk_o`, from
  the slot counter to the packet FIFO. Here it is a clock enable (`load`) in
  the NoC clock domain.
* **Flit count source.** `adaptor_type` reads the id of the queued packet, not
  the external id pin.
* **VC state meanings and reuse.** The paper names the four VC states but does
  not define them. The meanings and the reuse of a draining (EMPTY) VC are
  this design's.
* **Packet end.** Packet ends are found by counting flits, not by matching `FF`.
* **Output switches.** The paper only draws and names them; all of their
  behaviour is this design's.
* **VC-to-node wiring.** The paper's drawing of which output FIFO feeds which
  node's switch is not followed wire by wire. VCs 2m and 2m+1 of each switch
  go to node m.
* **Splitting between adapters.** How a storage module splits its words
  between its two adapters is left to the module: each adapter has its own
  port.
* **Ring details.** The ring's header format, the take/fill rules and the
  injection rule are this design's. The paper calls the ring "circuit
  switched". Here that is taken to mean a fixed path with no routing
  decision: each station relays every flit through its wrapper, one
  handshake per link.
* **Ring stations.** The wrapper of each module is built as one ring station:
  a receive unit, the take/fill logic and a send unit.
* **Wider flits.** The paper keeps 8-bit header and tail fields and
  "extends" them to wider flits without saying how. Here, with wider flits,
  the packet is simply cut into flits from its most significant bit down, so
  the header is the top byte of the first flit.
* **Adapter rate.** The paper counts 8 cycles to cut a 64-bit packet into
  flits, plus one for the header. Here the header is the first of those 8
  flits, and back-to-back packets leave without a gap.
* **Latency.** It is 4 NoC cycles per hop rather than the paper's 3 (see
  above).
* **FIFO depth.** It must be a power of two. The paper's exploration points
  14, 30, 62, 63, 89 and 120 cannot be set exactly; 8, 16, 32 and 64 can.
* **No separate single-switch version.** The paper also describes a smaller
  "version 1": one switch, no adapters, and every packet one 24-bit word. It
  is not built as its own design. The nearest setting is `N_SW = 1` with
  `FLIT_W = 24`, which is simulated: a result packet is then one flit. The
  adapters remain in that setting.
* **Modules not built.** The storage, processing, acquisition and control
  modules are not part of the RTL. The paper does not describe their
  insides. Their ports are the top's ports.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and stops through a cycle-count watchdog
if the design hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/noc_pkg.sv -y rtl \
          tb/tb_image_analysis_top.sv --top-module tb_image_analysis_top -Mdir obj
./obj/Vtb_image_analysis_top
```

Replace the testbench name to run another one. The system testbenches clock
the storage modules at 100 MHz, the NoC at 250 MHz, the processing nodes at
50 MHz, the control module at 150 MHz and the acquisition module at
76.9 MHz. Those are the module clocks of the reference application; the NoC
clock is simply made the fastest.

| testbench | what it shows |
|---|---|
| `tb_image_analysis_top` | the whole architecture at default parameters: 481 data packets from 8 adapters to 4 nodes, 27 ring commands and results, idle-network route latency, and that each mechanism (contention, full VC, adapter back-pressure, node stall, all VC states, command take, result fill) happened |
| `tb_tdm_noc_top` | the data NoC alone, same traffic and counters |
| `tb_tdm_noc_wide` | the data NoC with 16-bit flits, same traffic and counters |
| `tb_tdm_noc_single` | the data NoC with one main switch and 24-bit flits |
| `tb_vc_fifo` | fill/drain to exactly 32, order under random two-clock traffic, latency |
| `tb_network_adapter` | packet/flit contents for all types, gap-free flit rate, stalls |
| `tb_adaptor_*` | flit counts, packet assembly, slot counting, flit order |
| `tb_arbitration_unit`, `tb_ccn`, `tb_main_switch` | grants, VC choice, round robin, state sequence, routing and packet integrity under contention and full VCs |
| `tb_output_switch` | whole packets, sop/eop, round robin, one flit per cycle |
| `tb_hs4_link`, `tb_ring_node`, `tb_ring_master`, `tb_command_ring` | four-phase protocol rules, take/fill/pass, four packets in flight, every command and result across 10 clock domains |

## How far to trust it

* **What the testbenches show.** Every block is checked against reference
  values computed in its testbench. Each testbench was also run against a
  deliberately broken copy of its block, and it failed every time.
* **Clock domains.** They are simulated with unrelated clock periods. The
  simulator has no metastability model, so the synchronisers are checked for
  protocol and ordering only.
* **Timing and area.** No FPGA timing closure or resource figures exist for
  this RTL. The paper's frequencies and utilisation figures belong to its own
  implementation.
