# A Galapagos node for an I-BERT encoder cluster

BERT-base has 12 encoder layers. A multi-FPGA platform can hold all of them on chip if each
encoder runs as a *cluster* of about six FPGAs. Each FPGA holds some of the encoder's
streaming kernels (Linear layers, attention, Softmax, LayerNorm, GELU). Kernels talk only
through AXI-Stream packets, and the packets cross FPGA boundaries through a 100G network.

This repository holds the RTL for one FPGA of such a cluster. It covers:

- the **fabric** that moves packets between kernels: switches, a router with two routing
  tables, and the inter-cluster messaging layer (GMI);
- the **integer compute kernels** of one attention path: Linear, Quant, attention
  dot-product, softmax matrix multiply, Scatter and Gather.

The fabric follows the Galapagos "cluster of clusters" extension. A cluster is a set of
kernels with contiguous kernel IDs, reached inside the cluster by kernel ID. Traffic between
clusters always enters the receiving cluster through one **Gateway kernel**, which decodes a
one-byte header and forwards, broadcasts or gathers the payload.

All arithmetic is integer-only, in the style of I-BERT:

- INT8 activations and weights;
- INT32 accumulation;
- a requantisation step (Quant) after each matrix multiply.

## 1. Packets and addressing

Every link is AXI-Stream carrying one `flit_t` per cycle (`rtl/gp_pkg.sv`):

| field  | bits | use |
|--------|------|-----|
| tdata  | 512  | payload: 64 INT8 values or 16 INT32 values |
| tid    | 8    | kernel ID of the sender |
| tdest  | 8    | destination kernel ID, or a cluster ID for inter-cluster packets |
| tlast  | 1    | last flit of a packet |
| tuser  | 17   | bit 16 = inter-cluster flag; bits 15:0 carried unchanged |

A matrix row of H = 768 INT8 values is one packet of 12 flits.

Valid/ready handshakes apply per flit. Every module uses a synchronous, active-low reset
(`rst_n`).

A packet going to another cluster:

1. gets a **header flit** in front of its payload: `tdata[7:0]` holds the destination kernel
   ID inside the other cluster;
2. is addressed with `tdest` = the destination *cluster* ID;
3. has `tuser[16]` set.

The router uses that bit to choose which table to look up:

- bit clear: the **intra-cluster table**, indexed by kernel ID, 256 entries;
- bit set: the **gateway table**, indexed by cluster ID, 256 entries, which holds the IP of
  that cluster's gateway FPGA.

If the IP found is the FPGA's own, the packet loops back to the local input switch.
Otherwise it leaves on the network port together with the IP.

## 2. One node (`galapagos_node`)

```
 net_in ─┐                                              ┌─> net_out (+ IP)
         ├─ merge ─ Input ─ FIFOs ─ kernels ─ Output ─ Router
 loop  ──┘          Switch                    Switch     │
   ^─────────────────────────── local IP ────────────────┘
```

The kernels on this FPGA carry the encoder cluster's kernel IDs:

| ID | kernel | input | output to |
|----|--------|-------|-----------|
| 0  | Gateway (decoder, forwarding, Broadcast, Gather, switch) | inter-cluster messages | broadcast copies to 1, 2, 3, 29; forwarded packets |
| 1  | Linear + Quant (Q projection, 768×768 weights on chip) | input rows | 34 |
| 34 | Scatter | Q rows | one 64-column slice per head to kernels 4…15 |
| 4  | Attention dot-product, head 0 | Q slices (TID 34), K rows (TID 35) | scores on `sm_*` |
| 16 | Softmax matrix multiply + Quant, head 0 | V rows, softmax rows on `p_*` | 37 |
| 37 | Gather | the 12 head outputs (TIDs 16…27) | a 768-column row for kernel 28 |
| –  | GMI header attacher | encoder output on `ln_*` | gateway of the next cluster (broadcast ID 39) |

Kernels with other IDs live on other FPGAs and are reached through the router. The testbench
plays them.

Three kernels are not built, and their streams are brought out as ports:

- Softmax, whose input is the `sm_*` output and whose output is the `p_*` input;
- LayerNorm, whose output feeds the `ln_*` input;
- GELU.

**Kernel FIFOs.** Each kernel input has an `axis_fifo` of 1536 flits, which holds one
128×768 INT8 matrix. The dot-product has two FIFOs: Q and K share one switch port, so they are
split by TID before the FIFOs.

The FIFOs matter for more than speed. The input switch is a single path: a packet that cannot
enter its kernel blocks every packet behind it. Without deep FIFOs, the node deadlocks.

- Q rows reach the dot-product before its K matrix is complete.
- Head 0's output rows reach the Gather before the other heads' slices.

The Gather has the same problem inside it. It keeps a queue of 128 chunks per source, so one
head can run a whole matrix ahead of the others.

**Switches.**

- The output switch (`axis_arbiter`) is round-robin, and a granted input keeps the grant
  until TLAST, so packets never interleave.
- It ends in a 2-entry buffer. The buffer cuts the ready path of the loop
  router → loopback → input switch → kernel → output switch, which would otherwise be
  combinational.
- The same arbiter merges network input with loopback traffic, and it is the switch inside
  the Gateway.

## 3. The GMI kernels

- **Header attacher.** Sends one header flit, then the payload. Every flit is addressed to
  the destination cluster with the inter-cluster flag set.
- **Packet decoder** (the front of the Gateway).
  - Takes the header flit and removes it.
  - Re-addresses the payload to the kernel ID from the header and clears the flag.
  - Steers the payload by that ID: virtual IDs 39 (Broadcast) and 40 (Gather) go to the
    Gateway's own GMI modules. Any other ID is point-to-point and is forwarded.
- **Broadcast.** Stores a packet of up to 16 flits, then sends it once to each destination.
  A longer packet raises `overflow`.
- **Scatter.** Flit *i* of a packet goes to destination *i*, so a 12-flit row becomes 12
  one-flit packets, one per head.
- **Gather.** Identifies the source by TID and holds a queue of chunks per source. Row *r*
  leaves, in source order, when every source has delivered its chunk *r*.

## 4. Compute kernels

**Linear** (`linear`, built from `mm_tile` and `mm_pe`).

- A tile is a chain of 4 PEs. Each PE multiplies 16 INT8 pairs and adds the sum to its
  predecessor's partial sum, so a tile finishes a 64-element dot product per cycle.
- There are 16 tiles. Tile *t* holds the weight columns *c* with *c* mod 16 = *t*. Each
  column is stored as 12 words of 512 bits.
- For a stored input row, the 16 tiles work on 16 output columns at a time, one input chunk
  per cycle. The bias is then added, and 16 INT32 results leave as one beat.

Cost per row:

- 12 cycles to receive the row;
- 48 × 12 = 576 cycles to compute;
- 2 pipeline cycles;
- 590 cycles in total.

For comparison, the published implementation measured a packet interval of 767 cycles.

Weights and biases are loaded through write ports. The original design builds them into the
bitstream instead.

**Quant.**

- Computes y = sat8((x·mult + 2^(shift−1)) >> shift) with a runtime multiplier and shift.
- Packs 64 results per flit and ends a packet every ROW values.
- This dyadic form is one reasonable reading of "the same as I-BERT software".

**Attention dot-product** (S = Q·Kᵀ, one head, K = 64).

- The K rows are spread over 16 PEs: PE *p* holds rows *p*, *p*+16, and so on.
- Each Q row is broadcast to all PEs. In each cycle every PE produces one score, so 16 scores
  come out per cycle as one flit.
- The K side is padded with zero rows up to 16·⌈M/16⌉, at one cycle per padding row, and
  the padding scores are removed again.
- The sequence length M is a runtime input, 1…128. `pad_cycles` counts the padding rows.

**Softmax matrix multiply** (O = P·V, one head, N = 64).

- V is stored first.
- Each of the 16 PEs takes one row of P. In each cycle all PEs read the same V row and update
  a whole 64-wide output row.
- A group of 16 output rows costs M cycles.
- P is padded to whole groups of 16 rows. `pad_rows` counts the padding rows.
- The output goes through a Quant to INT8 and then to the Gather.

## 5. How far it is tested

Each module has a self-checking testbench in `tb/` that compares against an independent
model written in the testbench. Where a latency is stated above, it is checked. Some
testbenches reduce the sizes to stay short:

- Linear: H = 128;
- attention modules: M_MAX = 32 or 80.

`tb_galapagos_node` runs the whole node with **every parameter at its default** and a
20-token sequence. It checks every flit that leaves the node against a bit-exact model:

- broadcast copies;
- scattered Q slices;
- all 400 scores;
- gathered rows, including head 0's Quant(P·V) slice;
- the header packet to the next cluster.

It also checks that each mechanism actually happened:

- broadcast;
- forwarding;
- remote scatter;
- loopback;
- padding in both attention modules;
- both Gathers;
- inter-cluster routing;
- network back-pressure;
- FIFO buffering.

The run takes about a minute of simulation.

Simulate any testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/gp_pkg.sv tb/tb_galapagos_node.sv --top tb_galapagos_node
./obj_dir/Vtb_galapagos_node
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## 6. Where this design departs from, or adds to, the original

- **Per-FPGA mapping is a choice.** The original places the encoder's kernels on six FPGAs
  but does not list which kernel sits on which FPGA. This node's set of kernels is one
  plausible FPGA of the cluster.
- **Gateway sub-blocks.** Forwarding is folded into the packet decoder, because it only
  re-addresses the payload. The Gateway's Broadcast destinations are 1, 2, 3 and 29. The
  virtual IDs 39 and 40 follow the 39 kernel IDs 0…38 of the cluster.
- **Parallelism and timing are this design's.** The number of tiles, PEs per tile, lanes per
  PE and attention PEs are choices. So is a PE finishing a 64-wide dot product in one cycle.
- **Quant and Softmax formats.** The requantisation formula is the dyadic form above, and the
  softmax output is taken as INT8. Neither is stated in the original.
- **Gather queue depth** (one matrix per source) and the **unmapped-destination drop** in the
  input switch are additions. Both prevent stalls that the original does not discuss.
- **Not built:**
  - Softmax, LayerNorm and GELU (integer-only I-BERT functions, specified elsewhere);
  - the Galapagos bridge, the network bridge, the UDP core and the 100G Ethernet MAC, which
    are existing platform and vendor components;
  - the Versal ACAP variant with AIE tiles, which exists only as an estimate.
- **Only one node.** A whole 12-encoder system would take 72 FPGAs. Its latency and
  throughput therefore come from the original measurements, not from this RTL.
