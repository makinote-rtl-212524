# Ethernet stream subsystem for an FPGA emulation shell

A RISC-V system emulated on a data-centre FPGA card needs a network port
that its operating system can use like any other Ethernet interface. On the
Makinote platform (a cluster of 96 AMD/Xilinx Alveo U55C cards built for
pre-silicon emulation of RISC-V designs; see the paper *Makinote: An
FPGA-Based HW/SW Platform for Pre-Silicon Emulation of RISC-V Designs*) this is
done by an FPGA "shell" that wraps the user design. For Ethernet over QSFP, the
shell places a 100G/10G Ethernet MAC and an AXI DMA engine between the
transceivers and the card's HBM. Frames travel MAC -> DMA -> memory and back.

When such a chain does not work, you need to know which link is broken. The
shell therefore does not wire the MAC straight to the DMA engine. Both
directions pass through an **AXI-Stream switch**, and two **loopback FIFOs**
join the switches. Software can then run each half of the chain alone:

* **Ethernet loopback**: frames received from the network are sent straight
  back out. Only the transceivers, the MAC and the FIFOs are exercised.
* **DMA loopback**: data the DMA engine reads from memory is handed back to
  it as received data. The Ethernet core is bypassed, so the DMA engine, its
  driver and the memory path can be tested without a cable.

This repository holds synthesizable SystemVerilog for that stream datapath and
its control fabric: the FIFOs, the two switches, the AXI4-Lite interconnect and
the top level that joins them. The MAC/PHY, the DMA engine, the transceivers
and the HBM are vendor hard or soft IP. They are not included; the top level
brings out their streams and control buses as ports.

## Structure

```
                 MAC Rx stream                           MAC Tx stream
                      |                                        ^
                 +---------+                              +---------+
                 | Rx FIFO |                              | Tx FIFO |
                 +---------+                              +---------+
                      | in0                                out0 ^
                 +-----------+  out1  +-------------+ in1 +-----------+
                 |    Rx     |------->| Eth loopback|---->|    Tx     |
                 |  switch   |        |    FIFO     |     |  switch   |
                 |           |  in1   +-------------+ out1|           |
                 |           |<-------|DMA loopback |<----|           |
                 +-----------+        |    FIFO     |     +-----------+
                      | out0          +-------------+       in0 ^
                      v                                         |
                DMA S2MM stream                          DMA MM2S stream
                (to memory)                              (from memory)

  AXI4-Lite --> AXI interconnect --> window 0: MAC control   (port out)
                                     window 1: DMA control   (port out)
                                     window 2: Rx switch registers
                                     window 3: Tx switch registers
```

Every stream is AXI4-Stream with `tdata` (256 bits by default), `tkeep`, `tlast`,
`tvalid` and `tready`. The whole subsystem runs on one clock, with a synchronous
active-low reset.

| module              | role |
|---------------------|------|
| `eth_subsystem`     | top level: four FIFOs, two switches, interconnect |
| `axis_switch`       | routed 2x2 stream switch with AXI4-Lite registers |
| `axis_fifo`         | first-word-fall-through stream FIFO (Rx, Tx and both loopback FIFOs) |
| `axil_interconnect` | AXI4-Lite address decoder, one master to four slaves |
| `eth_shell_pkg`     | response codes, address map, switch register map |

## Operating modes

Each switch has two inputs and two outputs. Index 0 is the main path and
index 1 the loopback FIFO:

| switch | in0 | in1 | out0 | out1 |
|--------|-----|-----|------|------|
| Rx     | Rx FIFO (from MAC) | DMA loopback FIFO | DMA S2MM | Ethernet loopback FIFO |
| Tx     | DMA MM2S | Ethernet loopback FIFO | Tx FIFO (to MAC) | DMA loopback FIFO |

A route word for output *m* holds a source input in bits [7:0] and a disable
flag in bit 31. The three modes are:

| mode | Rx out0 | Rx out1 | Tx out0 | Tx out1 |
|------|---------|---------|---------|---------|
| normal (reset state) | in0 | disabled | in0 | disabled |
| Ethernet loopback    | disabled | in0 | in1 | disabled |
| DMA loopback         | in1 | disabled | disabled | in0 |

The modes can also be mixed. For example, Rx out0 <- in0 together with Tx
out1 <- in0 receives from the network normally while DMA transmit data is
looped back.

## Changing routes safely

The hardest part of the design is switching routes while traffic is flowing.
AXI-Stream packets span many beats. If a route changed between two beats of a
packet, one frame would end up split across two destinations. The switch
avoids this as follows.

1. Writes to a `ROUTE` register change only a *staged* copy. The switch keeps
   using the *active* copy.
2. Writing 1 to bit 0 of `CTRL` requests a commit. `CTRL` bit 0 reads 1 until
   the commit has been applied.
3. While a commit is pending, the switch lets any packet that has already
   started run to its `tlast`. It starts no new packet: an input that is
   between packets sees `tready` low.
4. In the first cycle in which no input is inside a packet, the staged routes
   become active, all at once. Traffic then resumes on the new routes.

An input can feed only one output. If the staged routes name one input for two
outputs (or name an input that does not exist), the lower-numbered output gets
it and the other output is disabled. `CTRL` bit 1 then reads 1, up to the next
commit. An input that no output selects is held: its `tready` stays low, so
data waits instead of being dropped. The exception is a source that cannot be
held, which is outside this design (see below).

A driver should therefore program both switches, commit both, and poll `CTRL`
until bit 0 clears. The commit of each switch waits only for its own inputs.

## Register and address map

The AXI4-Lite bus is 64 bits wide. The address map uses 64 KiB windows:

| address bits [17:16] | unit |
|----------------------|------|
| 0 | Ethernet MAC (forwarded on `ext_axil_*[0]`, offset within the window) |
| 1 | DMA engine (forwarded on `ext_axil_*[1]`) |
| 2 | Rx switch |
| 3 | Tx switch |

If any address bit above bit 17 is set, the interconnect answers DECERR itself
and does not forward the access. Switch registers sit in the low 32 bits of a
64-bit word. A write takes effect when byte strobes 3..0 are all set.

| offset | name | access | content |
|--------|------|--------|---------|
| 0x00 | CTRL | W: bit0 = commit; R: bit0 = commit pending, bit1 = last commit had a conflict |
| 0x40 + 8*m | ROUTE(m) | R/W | staged route of output m |
| 0x80 + 8*m | ACTIVE(m) | R | route output m uses now |
| 0xC0 + 8*m | PKTS(m) | R | packets (`tlast` beats) sent on output m, 32-bit, wrapping |

## Timing

* `axis_fifo` has a block-RAM-style memory with a registered read and one
  output register. A beat written into an empty FIFO appears on its output
  2 cycles later. The FIFO moves one beat per cycle in and out at the same
  time. It accepts DEPTH beats into memory plus one into the output register
  before `s_tready` falls.
* The switches are combinational. They add no latency, and a ready signal
  passes straight through them.
* The latencies through the whole subsystem are therefore: MAC Rx -> DMA S2MM,
  2 cycles; DMA MM2S -> MAC Tx, 2 cycles; Ethernet loopback (MAC Rx -> MAC Tx),
  6 cycles; DMA loopback (MM2S -> S2MM), 2 cycles.
* The interconnect registers every transaction. A control write or read takes
  a few cycles plus the latency of the slave.

At 256 bits per beat, the datapath carries 256 x f<sub>clk</sub> bits/s. The
shell's example configuration clocks the user side at 50 MHz, which gives
12.8 Gb/s. That is enough for the 10G mode and for the 4-lane Aurora link
(about 3.5 Gb/s was measured on the platform). It is not enough for 100 Gb/s
line rate, which would need at least 391 MHz at this width, or a wider
`DATA_W`.

## The Aurora variant

For its FPGA-to-FPGA Aurora 64B/66B link, the shell reuses the same structure
with the Ethernet core replaced by the Aurora core. It drops the Tx FIFO and
both loopback FIFOs, because that core handles clock synchronisation
differently. Setting `AURORA_LAYOUT = 1` builds this variant. The Tx switch
then drives the link core directly, and the loopback ports of both switches
are tied off. A loopback route can still be programmed, but it carries nothing:
the source it would drain is simply held. In the shell's diagram, the Aurora
variant has no control link to the link core either. Window 0 of the
interconnect still exists, but then nothing needs to be connected to it.

## Where this RTL comes from, and where it departs

The following follow the published shell: the set of blocks, their connections
(the switch–FIFO–switch loopbacks, and the single AXI4-Lite port feeding MAC,
DMA and both switches through an interconnect), the purpose of each loopback,
the 64-bit AXI4-Lite control bus, the 256-bit stream width of the Aurora
variant, and the removal of the dotted blocks in that variant.

The following are choices made here, because the shell's description does not
give them:

* **Stream width:** 256 bits for Ethernet too.
* **FIFO depth:** 512 beats, which holds a 9000-byte jumbo frame (282 beats).
* **FIFO type:** single-clock FIFOs with no packet mode and no frame dropping.
* **Switch routing:** the route, commit and conflict rules above, plus the
  packet counters.
* **Address map:** as given above.
* **Reset state and reset style:** as given above.
* **One clock domain.** The real shell most likely crosses clock domains in
  its Rx/Tx FIFOs; the description gives no detail, so none is modelled here.
* **Back-pressure on the MAC receive stream.** The MAC's receive stream is
  assumed to accept back-pressure (`mac_rx_tready`). A real 100G MAC usually
  cannot be stalled. With such a MAC, a full Rx FIFO (or an Rx switch with no
  route for in0) would have to drop frames, and that logic is not included.
* **Vendor cores:** the MAC/PHY, the AXI DMA engine (with its HBM AXI-MM ports,
  buffer descriptors and interrupts), QSFP/GTY transceivers, PCIe QDMA, HBM
  controller, UART, JTAG and the information ROM are not included. Neither are
  the emulated RISC-V system and the cluster.

## Simulating

Every file is plain SystemVerilog (IEEE 1800-2017). The testbenches check
themselves and end with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/eth_shell_pkg.sv \
          tb/eth_subsystem_tb.sv --top-module eth_subsystem_tb -Mdir obj_top
./obj_top/Veth_subsystem_tb
```

Replace the testbench and top name to run the others. Each testbench does the
following:

* `tb/axis_fifo_tb.sv` (16-entry FIFO): ordering and content against a
  reference queue, 2-cycle latency, capacity DEPTH+1, full-rate streaming, and
  random stalls on both sides.
* `tb/axis_switch_tb.sv`: routes after reset, same-cycle pass-through, crossed
  routes, a commit that must wait for a half-sent packet and hold back new
  ones, conflict handling, and packet counters.
* `tb/axil_interconnect_tb.sv`: random reads and writes to four slave models
  that answer with random delays. It checks window decoding, offsets, byte
  strobes, response pass-through and DECERR.
* `tb/eth_subsystem_tb.sv`: the top level at its default sizes, with the
  testbench acting as MAC, DMA engine and their register files. It checks the
  normal, Ethernet-loopback and DMA-loopback modes beat by beat, including
  source, order, `tkeep` and `tlast`. It also checks the per-path latencies, Rx
  and Tx FIFO back-pressure at 513 beats, a mode switch requested while a
  packet is half through, the MAC and DMA control windows, and an unmapped
  address. It counts each of these mechanisms and fails if one never occurs.
* `tb/eth_subsystem_aurora_tb.sv`: the `AURORA_LAYOUT = 1` build. It checks
  that the Tx path has no FIFO and that loopback routes carry nothing.

Each module contains concurrent assertions for the AXI-Stream and AXI-Lite
hold rules (a valid that is not yet accepted stays valid and stable). They are
active under `--assert`.
