# Octopus: an in-network deep-learning accelerator in SystemVerilog

Octopus sits next to a switch's data plane and runs small neural networks
on live traffic. Packets stream past a hardware feature extractor, which
keeps per-flow statistics. When a flow (or a single packet) has given enough
information, its features go to one of two compute engines:

- a **VPE**, a small VLIW vector processor for latency-critical per-packet
  models;
- an **AryPE**, a systolic array for throughput-bound per-flow models.

The two engines share an on-chip memory fabric. They can split one model
between them, for example the array does the large matrix products and the
vector unit adds up the partial blocks. A control processor loads programs
and weights, and turns the results into forwarding rules.

This RTL covers the feature extractor, the memory fabric, both engines and
their control register files. The control processor itself (an off-the-shelf
RISC-V core with SPI/CAN peripherals) is not included. Its bus is a port of
`octopus_top`.

## Clocking and common conventions

- **One clock.** The whole design runs on one clock with an active-low
  asynchronous reset. The reference implementation runs the extractor at
  125 MHz and the engines at 222 MHz; here no clock-domain crossing is
  modelled.
- **Data format.** All data are signed Int-8. A 128-bit memory word holds 16
  of them.
- **Requantisation.** Wide sums are brought back to Int-8 in one way
  everywhere (`octopus_pkg::requant`): an arithmetic right shift by a
  programmable amount, an optional ReLU, then saturation.
- **Address map.** Memory uses one 16-bit word address space:

| Words | Memory |
|---|---|
| 0x0000–0x3FFF | computing bank 0, 16k × 128 bit |
| 0x4000–0x7FFF | computing bank 1, 16k × 128 bit |
| 0x8000–0x9FFF | feature memory, 8k × 128 bit |

A flow's feature address is `0x8000 | flow_index`. Engines hand these
addresses around, so an engine program can load from feature memory and
computing memory alike.

## Feature extractor (`feature_extractor`)

Each packet takes four cycles, which gives 31.25 Mpkt/s at 125 MHz:

1. **Accept.** `fe_parser` decodes the header window into the 5-tuple and a
   13-byte *meta* register. The meta register holds size, direction, flags,
   protocol, TTL, port bytes and the packet's index in its flow. Byte 7 is
   the arrival interval. `flow_hash` (CRC-16/CCITT folded to 13 bits) gives
   the flow index, and the feature word at that index is read.
2. **Lookup.** `flow_tracker` returns the flow's state:
   - new if its packet count is zero, otherwise a hit;
   - last timestamp and packet index;
   - frozen or not;
   - whether this packet reaches the threshold *n*.

   The interval is `(ts − last_ts) >> ts_shift`, saturated, and zero for a
   new flow. The entry is updated.
3. **ALU.** `alu_cluster` builds the new 16-byte feature word. ALU *i* writes
   byte *i*. Its operands are one history byte (`hsel`) and one meta byte
   (`msel`). The operations are add, subtract, max, min and write, all
   unsigned and saturating, and each can be made conditional on packet
   direction. A further operation, *write-indexed*, writes only when the
   packet index equals `hsel`. It builds "sizes of the first n packets"
   vectors.
4. **Write.** The word goes to feature memory through its private port.
   - If the flow just reached the threshold, its address is pushed into two
     FIFOs: *ready*, read by the VPE's `fa` instruction, and *in-flight*.
     The entry is then frozen, and later packets of the flow are dropped.
   - A threshold reached while a FIFO is full leaves the flow unfrozen. Its
     next packet tries again.

**Payload mode.** Instead of statistics, payload mode stores
`payload_reg`'s first 16 payload bytes of packet *k* in word `base + k`. A
flow then owns 2^`pay_shift` words.

**Releasing a flow.** A FIN from the engine chosen by `fin_src` pops the
in-flight FIFO, clears that table entry and reports the address on
`dec_vld/dec_addr`. The release happens in a cycle where no packet is being
accepted.

After reset the table is cleared by an 8192-cycle sweep (`init_busy`).

Configuration registers:

| Address | Contents |
|---|---|
| 0 | threshold |
| 1 | timestamp shift |
| 2 | payload mode (bit 0), `pay_shift` (bits 3:1) |
| 3 | payload length |
| 4 | FIN source: bit 0 VPE, bit 1 AryPE |
| 16–31 | one 13-bit micro-operation per ALU: `{cond_en, cond_dir, op[2:0], hsel[3:0], msel[3:0]}` |

## Memory fabric (`mem_fabric`)

The fabric is three true-dual-port RAMs (`tdp_ram`, read-before-write) with
five request ports:

| Master | Requester |
|---|---|
| 0, 1 | VPE: loads, stores |
| 2, 3 | AryPE: writes, reads |
| 4 | control domain |

Routing and arbitration:

- Bank port A is reserved for the VPE.
- Bank port B serves AryPE first, then the control domain.
- Feature memory port B serves any master. Port A belongs to the extractor.
- Each RAM port uses fixed priority, lowest master number first. Grants are
  combinational and read data returns one cycle after the grant.

So the VPE and AryPE can both work in the same bank, or each in its own
bank, with no conflict. That is what the ping-pong buffers between them
need.

## VPE (`vpe`)

### Registers and caches

- dRf: eight 128-bit data registers.
- adRf: eight 16-bit address registers.
- iCache: 1024 VLIW words.
- pCache: 512 words of 512 bits. Each word is eight 64-bit lane slices.

### The VLIW word

A 38-bit word (`octopus_pkg::vliw_t`) has four fields, issued together:

| Field | Operations |
|---|---|
| SIMDU | `prd` (eight-wide dot product per lane) or `prds` (two four-wide products per lane), on bytes 0–7 of a dRf register |
| VU | `vadd` (saturating) or `vem` (element-wise multiply, requantised), on two dRf registers |
| Mif | `fa` (wait for a ready flow, write its address into an adRf register) or `ld` (load a word into dRf, optional post-increment) |
| control | `fin` (raise FIN, report an adRf register as the result address, then stop or restart) |

- SIMDU and VU results go either to a dRf register or to memory at an adRf
  address, with optional post-increment.
- Every `prd`/`prds` takes the next pCache word as its weights, starting at
  `PBASE`, so a layer's weights are simply laid out in program order.
- Result placement: `prd` puts lane *j* in byte *j*. `prds` puts lane *j*'s
  two sums in bytes *j* and 8+*j*.

### Timing

A word takes three cycles:

- **DEC** reads operands, issues the load and starts SIMDU/VU. It stalls
  while `fa` finds no flow or a load is not granted.
- **EX** captures load data.
- **WB** stores and writes registers. Each store takes one extra cycle per
  missed grant; two stores in one word take two cycles.

The next word is fetched during WB.

### Register ordering

All fields read registers as they were before the word. Register writes
land in the order SIMDU, VU, Mif. One exception: an `fa` or a load
post-increment changes adRf in DEC, so that word's store address and FIN
address already see the new value.

**Auto-restart.** In auto-restart mode, FIN reloads adRf and jumps back to
`START_PC`. The typical loop is `fa … fin` once per flow, with no help from
the control processor.

### The MLP example

The per-packet MLP 6-12-6-3-2 is one `fa`, one `ld` and five `prd` plus one
`prds`, with one `vadd` that joins the two halves of the 12-input layer. It
runs in 26 cycles from `fa` to FIN (117 ns at 222 MHz).

## AryPE (`arype`, `systolic_array`)

### The array

A K×K array (K = 16) of Int-8 MAC cells (`sa_mac`) is weight-stationary:

- Cell (r, c) holds W[c][r].
- Input rows enter skewed, one column later per cycle.
- Partial sums flow right and are de-skewed at the output.

A row issued at cycle t comes out at t + 2K − 1, and a new row can enter
every cycle.

### Instructions

Instructions are 22 bits:

- `LD $p` shifts in the tile held in pCache words adRf[p] … adRf[p]+K−1.
  Word c is row c of W.
- `MM l, $x, $y` streams l rows from adRf[x] and writes l requantised rows
  to adRf[y].
- `FIN $x` reports adRf[x].

Post-increment bits let a program walk through blocks.

### Memory conflicts

During MM the read channel issues one row per cycle, and results return on
the write channel 2K cycles later. Writes always win; a refused read is a
bubble in the array. When input and output share a bank, streams longer than
2K therefore slow down to about half rate once results start coming back.

## Control register files (`ctrl_rf`)

Each engine has one, reached by the host:

| Register | Contents |
|---|---|
| 0 | start (bit 0, a pulse), auto-restart (bit 1) |
| 1 | busy, sticky FIN flag (write 1 to bit 1 to clear), result address in bits 31:16 |
| 2 | start PC |
| 3 | pCache base |
| 4 | shift (bits 4:0), ReLU (bit 8) |
| 5 | FIN count |
| 8–15 | adRf initial values |

The FIN flags are also the top's `vpe_irq` and `ary_irq`.

## Host port (`octopus_top`)

The host port is a request/grant bus with 128-bit data. `host_addr[23:20]`
selects the target:

| Value | Target |
|---|---|
| 0 | feature extractor registers |
| 1 | VPE CtrlRf |
| 2 | AryPE CtrlRf |
| 3 | VPE iCache |
| 4 | VPE pCache: word in `addr[10:2]`, 128-bit quarter in `addr[1:0]` |
| 5 | AryPE iCache |
| 6 | AryPE pCache |
| 8 | memory, at the word address in `addr[15:0]` |

- Register and cache accesses are granted at once. Memory accesses wait for
  the fabric.
- Read data arrives with `host_rvalid` one cycle after the grant.
- The caches cannot be read back.

## Departures from the reference design

- **Single clock** instead of 125/222 MHz domains.
- **No GeLU.** The SIMDU lane has ReLU and identity only.
- **Hash and table.** The flow hash is a plain CRC. Colliding flows share an
  entry, and nothing resolves this.
- **Meta layout.** The meta register layout, the extra ALU operations
  (write-indexed, direction condition) and the payload-mode layout are this
  design's own.
- **MLP instruction mix.** The reference MLP example uses four `prd` and two
  `prds`. With four-wide sub-lanes the six-input third layer does not fit a
  sub-lane, so here it uses `prd`, and only the last layer uses `prds`.
- **Collaboration is sequenced by the host.** VPE and AryPE have no hardware
  handshake for overlapped ping-pong aggregation. Either engine's FIN tells
  the control processor, which starts the other; the buffers and concurrent
  bank access are in place.
- **AryPE weights.** `LD` reads weights only from pCache. A product whose
  stationary operand is computed data, such as Q·Kᵀ in attention, needs the
  host to copy it into pCache. The same holds for weight sets larger than
  pCache (1024 × 128 bit).
- **Feature width.** A flow owns one 16-byte feature word, so per-flow
  vectors hold at most 16 entries; the reference CNN uses 20 arrival
  intervals. In payload mode, 16 words per flow leave room for 512 flows.
- **No pooling or softmax hardware.** The VU adds, multiplies and
  requantises element-wise but has no max or exponential. Max-pooling
  between CNN layers, and softmax, are left to the control processor.
- **Sizes not given in the reference**, chosen here: FIFO depth 1024, VU
  width 8, cache depths, and register counts of 8.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`).
Each one ends with `TB_RESULT checks=N failures=M`, has a watchdog, and
compares against an independent reference written in the testbench:

- a CRC, a parser model and ALU models;
- a flow-table model with FIFOs and FIN recycling;
- a memory model with random grant refusal;
- an instruction-level VPE model that replays random VLIW programs;
- matrix products for the array.

The top-level bench `tb_octopus_top` runs at full size. It plays both the
switch and the control processor:

1. Twelve flows run through the extractor into the MLP on the VPE. The
   bench checks each inference against a reference, and checks that each
   flow is released with the right address.
2. AryPE multiplies input blocks by two weight tiles, with one output
   sharing the input bank to force bubbles, while the host competes for the
   bank port. The VPE then aggregates the two partial results with `vadd`
   and `vem`.

It counts these events and fails if any never happened:

- in the extractor: new flows, hits, threshold pushes, frozen drops and
  releases;
- in the VPE: `fa` waits, `prd`, `prds`, `vadd`, `vem`, loads and stores;
- in AryPE: `LD`, `MM` and bubbles;
- on the host port: host waits.

Two more full-size benches run pieces of larger models. In both, the bench
also acts as the control processor for the steps that have no hardware.

- `tb_cnn_layers` runs the first two layers of a flow-level 1D-CNN. The
  input is 20 arrival intervals; each layer has 32 kernels of size 3.
  - Layer 1 runs on the VPE. Each `prds` evaluates eight kernels on two
    adjacent windows, one window per sub-lane.
  - The bench does the max-pooling and the img2col rearrangement.
  - Layer 2, (10, 96) × (96, 32), runs on AryPE as twelve 16 × 16 blocks.
    The VU then adds the six partial results of each row.
  - Measured: 153 cycles for layer 1, 796 for the layer-2 blocks and 423
    for the aggregation.
- `tb_transformer_attention` runs self-attention for one flow. The input is
  16 payload bytes from each of 15 packets; the projections are 16 × 64.
  - Q, K and V are computed on AryPE.
  - The bench copies Kᵀ into pCache, then AryPE computes Q·Kᵀ in four blocks
    and the VU sums them.
  - The bench computes the softmax, then AryPE computes A·V.
  - Measured: 1660 engine cycles in total.

To run one bench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_vpe \
        rtl/octopus_pkg.sv $(ls rtl/*.sv | grep -v octopus_pkg) tb/tb_vpe.sv
    ./obj_dir/Vtb_vpe

`tb/tb_util.svh` holds the check macros. `tb/tb_pkt_lib.svh` builds test
frames.
