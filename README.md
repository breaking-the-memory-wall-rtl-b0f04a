# A near-memory inference accelerator on a logic-over-DRAM stack

Neural-network inference spends most of its energy and time moving weights and
activations between memory and multipliers. This design removes the separate memory
chip and the SRAM caches. The chip is a logic die bonded face to face onto a DRAM die,
with dense die-to-die wiring. Every compute unit on the logic die reads and writes its
own DRAM arrays, which sit directly underneath it. There is no SRAM buffer anywhere on
the data path: the only memory is DRAM ("one kind of memory for the whole chip").

DRAM is dense but slow, so the design works around its latency in three ways:

* **Arrays are pooled per unit.** Each unit drives several arrays at once and
  interleaves consecutive words across them. While one array is still in its row cycle,
  the next word comes from another one.
* **Weights stay put.** A vector processing unit (VPU) loads a tile of weights into
  registers once. It then uses that tile for every item of a batch before loading the
  next tile.
* **Features are broadcast.** One data serving unit (DSU) reads a feature vector once
  and drives it to all VPUs in the same cycle. Each VPU computes a different set of
  output channels. Partial sums never leave their VPU.

The RTL here describes the logic die together with behavioural models of the DRAM
arrays bonded beneath it. The default size has 32,768 multiply-accumulators and
4.5 Gb of DRAM.

## Organisation

```
            SPI host            processor (not in RTL)       NVM (not in RTL)
               |                        |                        |
          spi_slave                proc_* port             nvm_* port
               |                        |                        |
               +------ ctrl_bus --------+                  repair_loader
                          |                                      | repair entries
   HSP bytes           uce  (registers, DMA, muxes,              v   to every PHY
  <-> hsp_port <-----> function select, layer sequencer)
                     /            |              \
        access/serve           broadcast          weight-load requests, result read-out
              |              (1 of N_DSU)                    |
   +----------+----------+        |         +----------------+----------------+
   | dsu 0 .. N_DSU-1    | ---------------> | vpu 0 .. N_VPU-1                 |
   |  dram_pool          | <--- results --- |  dram_pool (weights)             |
   |   dram_array x 4    |                  |   dram_array x 8                 |
   +---------------------+                  +----------------------------------+
```

| Module | Role |
|---|---|
| `sunrise_top` | Logic-die top: wires all units together. The processor, NVM and host pins are its ports. |
| `uce` | Unified Control Engine. It holds the configuration registers and moves all data. It contains the DMA, the data-path multiplexers (which DSU serves, which one receives, which VPU is read out), the function selector and the layer sequencer. |
| `vpu` | Holds an OC x VEC weight tile. Computes OC dot products of length VEC per cycle and keeps a partial sum for each batch item and channel. Applies the output function on read-out. |
| `dsu` | A DRAM pool plus a serve engine that streams strided feature vectors onto the broadcast bus. A second port carries DMA traffic and result write-back. |
| `dram_pool` | The DRAM PHY of one unit. It interleaves words across the unit's arrays and stalls a request when its array is busy. It remaps repaired rows to spare rows and returns read data in order, with a tag. |
| `dram_array` | Behavioural model of one DRAM array, including its spare rows, read latency and row-cycle time. |
| `repair_loader` | At power-up, copies the defect list from the NVM into the PHYs' repair tables. |
| `spi_slave` | Host command interface. Turns SPI frames into control-bus register accesses. |
| `hsp_port` | High-speed data port. Packs host bytes into DRAM words and unpacks them again. |
| `ctrl_bus` | Shared register bus. Has two masters, SPI and the processor; SPI has priority. |
| `sunrise_pkg` | Widths, the register map, function codes, bus and defect-record types. |

## Sizes

| Parameter | Default | Origin |
|---|---|---|
| MACs in total | 32,768 = `N_VPU` 16 x `OC` 64 x `VEC` 32 | total from the paper; the split is a design choice |
| DRAM in total | 4.5 Gb = 144 arrays x 131,072 words x 256 bit | total from the paper; the split is a design choice |
| Arrays per VPU / per DSU | 8 / 4 | design choice |
| DSUs | 4 | design choice |
| Operands / partial sums | int8 / int32 | design choice |
| DRAM word | `VEC` bytes = 256 bit | design choice |
| Array timing | `RL` = 3 cycles read latency, `T_RC` = 4 cycles row cycle | design choice |
| Repair | 4 spare rows of 8 words per array; 4 repair entries per unit | design choice |
| Batch depth `MAX_B` | 8 items of partial sums per VPU | design choice |

The published chip figures that this configuration reproduces are the MAC count, the
DRAM capacity, and the presence of the SPI command port, the HSP data port, the
processor and the NVM-based DRAM repair. No clock frequency is published. The quoted
25 TOPS peak implies roughly 380 MHz for 32,768 MACs. The 200 MB/s HSP rate matches one
byte per clock at 200 MHz.

## How a layer runs

This is the central mechanism and the part that most needs explaining. A layer is a
matrix-vector product for each item of a batch: `y[b] = f(W x[b])`. Large layers are
split into passes of at most `N_VPU*OC` = 1,024 output channels, with any number of
inputs and up to `MAX_B` batch items.

**Data layout.** Inputs are cut into `KCH` chunks of `VEC` elements.

* Batch item `b`, chunk `k` is one DRAM word in the source DSU, at address
  `FBASE + b*KCH + k`.
* VPU `j` holds output channels `j*OC .. j*OC+OC-1`. Row `o` of chunk `k` is one word in
  that VPU's own DRAM, at address `WBASE + k*OC + o`. Every VPU uses the same addresses,
  each in its own arrays.
* Results are written to the destination DSU, at address
  `OBASE + b*N_VPU*OC/VEC + j*OC/VEC + w`. Word `w` holds channels `w*VEC .. w*VEC+VEC-1`
  of VPU `j`.

This output layout is exactly the input layout of a layer with
`KCH = N_VPU*OC/VEC`. Layers therefore chain without any reshuffling: swap `SRC_DSU` and
`DST_DSU`, then start again.

**Sequence** (run by the `uce`). For each chunk `k`:

1. **Weight load.** The UCE sends the same `OC` read requests to every VPU's PHY in
   lock step. Every PHY sees identical traffic, so all of them accept and answer in the
   same cycles. The tag of each answer carries the row number, and the VPU writes that
   row into its weight registers.
2. **Feed.** The source DSU's serve engine reads chunk `k` of every batch item (stride
   `KCH`) and broadcasts each vector with its batch index. On every broadcast vector, each
   VPU adds OC dot products into that item's partial sums. When `k = 0` it overwrites the
   sums instead of adding, which clears them.

After the last chunk comes **write-back**. For each batch item, VPU and word, the UCE
selects that VPU's read-out and writes it to the destination DSU. On the way out each
partial sum is shifted right arithmetically by `FUNC[12:8]`. It then passes through
unchanged or through ReLU (`FUNC[1:0]` = 0 / 1) and is saturated to int8.

**Timing.**

* A weight load takes about `OC` cycles plus the read latency. Consecutive rows fall in
  different arrays, so they stream at one word per cycle.
* A feed takes `B` cycles when `KCH` is not a multiple of the DSU's array count.
  Otherwise every vector of the chunk falls in the same array, and each one waits out
  the row cycle (`T_RC` cycles per vector). These waits show on the `dram_stall`
  output. The `STALLS` register counts only the waits of the UCE's own requests: weight
  loads, write-back and DMA.
* Write-back takes `B*N_VPU*OC/VEC` cycles.

The MACs are idle during weight loads. Utilisation is therefore roughly
`B / (OC + B + few)` per chunk, about 10 % at `B = 8`. The published description does
not say how weight loading is hidden, so this design does not double-buffer the tile.
That is the first thing to add for sustained throughput near the peak.

## DRAM pools and repair

`dram_pool` splits a word address into three fields:

* the low `log2(N_BANKS)` bits select the array;
* the remaining bits are the word within the array;
* of those, the low `log2(ROW_WORDS)` bits are the column and the rest are the row.

Each array stays busy for `T_RC` cycles after an access. A request to a busy array is
held with `req_ready` low. Reads return exactly `RL` cycles after acceptance, in order,
with the request's tag. Only one array is addressed per cycle, so answers never collide.
An assertion checks this.

Repair uses row redundancy. Every array has `N_REPAIR` spare rows beyond its normal
capacity. Repair-table entry `i` names an (array, row) pair. Accesses to that row go to
spare row `i` of the same array. The tables are loaded once after reset from 32-bit NVM
records, laid out as {valid, unit[4:0], array[2:0], slot[1:0], row[20:0]}. Unit ids
count the DSUs first, then the VPUs. `init_done` rises when the list has been read.
Until then the UCE ignores commands.

## Control and data interfaces

**Registers** (word index on the control bus; all 32-bit):

| # | Name | Meaning |
|---|---|---|
| 0 | CTRL | write bit0 = run layer, bit1 = DMA HSP -> DRAM, bit2 = DMA DRAM -> HSP |
| 1 | STATUS | bit0 busy, bit1 repair done |
| 2, 3 | SRC_DSU, DST_DSU | serving and receiving DSU |
| 4, 5, 6 | FBASE, WBASE, OBASE | word addresses (see layout) |
| 7, 8 | KCH, BATCH | input chunks; batch items (1..MAX_B) |
| 9 | FUNC | [1:0] function (0 pass, 1 ReLU), [12:8] right shift |
| 10, 11, 12 | DMA_UNIT, DMA_ADDR, DMA_LEN | target unit id, start word, length in words |
| 13, 14 | STALLS, LAYERS | cycles the UCE's own requests waited on a busy array; layers completed |

The UCE ignores configuration writes and new commands while it is busy.

**SPI** uses mode 0. A frame is one CS_N-low period of 40 clocks: a command byte
`{write, 0, reg[5:0]}` followed by 32 data bits, MSB first. For a read, the register is
fetched right after the command byte and shifted out on MISO during the data bits. SCLK
is oversampled, so it must run at no more than 1/8 of the core clock.

**HSP** is a byte stream in each direction with valid/ready, one byte per clock. The
first byte of each word goes to the least significant position.

**Processor port.** The on-chip processor is not part of this RTL. Its bus-master pins
(`proc_req`, `proc_acc`, `proc_gnt`, `proc_rdata`) are top-level ports. Firmware running
on it would issue the same register accesses that the host issues over SPI.

## What follows the published description and what is added

These parts follow the published description:

* a logic die over pooled, per-unit DRAM, with no SRAM on the data path;
* DSU and VPU pools, with features stored in DSUs, broadcast to all VPUs, and results
  returned to the DSUs;
* weight-stationary computation on vectors, with partial sums kept inside each VPU;
* one central controller containing the DMA, the data-path multiplexers and the
  function selector, configured by firmware over a shared bus;
* DRAM repair from an NVM defect list applied at power-up;
* an SPI command port and a 200 MB/s data port;
* the totals of 32,768 MACs and 4.5 Gb.

These parts are this design's own choices, because no published detail exists for
them:

* every width, encoding and handshake;
* the unit counts and tile shape;
* the array timing;
* the interleaving and the repair scheme;
* the register map;
* the order of operations within a layer;
* the SPI framing and HSP protocol. The real HSP is a proprietary interface.

**Not in this RTL:**

* The 13-bit processor. Its instruction set is not published.
* The NVM, which is a process-specific part. The testbenches model it.
* The hybrid bond and TSVs, which are physical structures. Here they are just wires
  between a PHY and its arrays.
* Firmware.
* Any support for convolution beyond matrix-vector passes. Convolutions have to be
  lowered to such passes (im2col) before they reach the chip.

**Where this RTL falls short of the published chip:**

* **Memory bandwidth.** The chip is quoted at 1.8 TB/s between the units and their
  arrays, and a block diagram of the chip prints 2 TB/s. This RTL follows the 1.8 in
  its numbers. Here each pool accepts one 32-byte access per cycle. That gives 20 pools x
  32 B = 640 B per cycle, about 0.24 TB/s at the implied 381 MHz. Reaching 1.8 TB/s
  would need about 144 x 32 B per cycle, meaning every array busy every cycle. That
  requires a pool that issues to all of its arrays in parallel.
* **DSU-to-VPU bandwidth.** The quoted figure is 13 TB/s. Here one 32-byte vector per
  cycle is broadcast to 16 VPUs, which is 512 B per cycle delivered, about 0.2 TB/s.
* **Throughput.** Weight loads are not overlapped with computation, as explained under
  "How a layer runs". The classifier-layer test measures 7.2 % MAC use. At 7 to 10 %
  MAC use and 381 MHz, ResNet-50 at batch 8 would run at roughly 200 to 300 images/s,
  against the quoted 1500.
* **Sparse tensors.** Vectors were chosen as the basic data unit partly to exploit
  sparse tensors. No skipping of zero vectors is built.

`dram_array` only models the DRAM macro's behaviour. It is written as a synthesizable
array so the whole design simulates, but a real implementation would use the DRAM
process's macro.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_vpu -o sim \
    rtl/sunrise_pkg.sv $(ls rtl/*.sv | grep -v sunrise_pkg) tb/tb_vpu.sv
./obj_dir/sim +verilator+rand+reset+2
```

| Testbench | What it shows |
|---|---|
| `tb_dram_array` | Data, an exact read latency of `RL`, and the row-cycle busy time. |
| `tb_dram_pool` | A sequential stream goes at one word per cycle with no stall. A same-array stride stalls `T_RC-1` cycles per access. Tags come back in order. A repaired row is served from its spare row even after the original row is corrupted. |
| `tb_vpu` | Dot products, accumulation across chunks, shift, ReLU and saturation, all against a reference. |
| `tb_dsu` | Strided serving, batch indices and first flags, and that the access port is held off while serving. |
| `tb_uce` | The UCE with 2 VPUs and 2 DSUs: register read-back, DMA in and out, and two chained layers checked bit-exactly against a reference. Starts while busy and starts before repair are ignored. |
| `tb_repair_loader`, `tb_spi_slave`, `tb_hsp_port`, `tb_ctrl_bus` | Each interface against a model of its other side. |
| `tb_sunrise_top` | End to end at reduced size (2 VPUs, 2 DSUs, VEC=4, OC=8): NVM repair, HSP DMA, two chained layers configured over SPI while the processor port polls, and results read back over HSP. Counts each mechanism and fails if any never happened: stall, repair hit, bus contention, both DSU directions, both output functions, multi-chunk accumulation, DMA in and out. |
| `tb_resnet50_fc` | ResNet-50's classifier layer (2048 inputs, 1000 classes, batch 8) on the full-size top. Weights are loaded straight into the arrays. All 8,000 scores are checked, and the cycle count is checked against bounds. It measures 6,850 cycles, 7.2 % MAC use and 1,344 feed-stall cycles. Its feature stride of 64 is a multiple of the DSU array count, so every vector waits a row cycle. |
| `tb_sunrise_top_full` | The same flow with every parameter at its default: 16 VPUs, 32,768 MACs, 4.5 Gb of arrays. It needs about 0.6 GB of host memory and a few minutes. |

The DRAM arrays start with random contents, so every value that is read is first written.

## Changing it

* `OC` must be a multiple of `VEC` and at most 512, because the tag carries the row
  number.
* `log2(MAX_B) + 2` bits must fit in `TAG_W`, because the serve tag carries the batch index and two flags.
* At most 32 units (DSUs plus VPUs) are allowed, since the unit id is 5 bits.
* Repair records address at most 8 arrays and 4 slots per unit.
* Making `VPU_BANKS` at least `T_RC` lets weight loads stream at full rate.
* Choosing `KCH` so that it is not a multiple of `DSU_BANKS` avoids feed stalls.
