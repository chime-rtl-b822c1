# CHIME near-memory logic in SystemVerilog

CHIME runs on-device multimodal language models on two different 3D memories at once. It
puts them in one 2.5D package joined by a UCIe die-to-die link:

- a 200-layer monolithic-3D DRAM stack, which is fast and has high endurance;
- an 8-layer monolithic-3D RRAM stack, which is dense and non-volatile.

Each memory stack sits on its own logic die full of near-memory processors. The two dies split
each transformer layer between them:

- The **DRAM die** runs everything except the feed-forward network: QKV projection, streaming
  attention with an online softmax, and normalisation. The KV cache and the attention weights
  live in DRAM.
- The **RRAM die** holds the large FFN weights permanently. It runs the whole FFN (two GEMMs
  and an activation) next to them.

Only two small vectors cross the link in each layer step:

- the attention output, **AttnOut** (DRAM → RRAM);
- the FFN output, **FFNOut** (RRAM → DRAM).

This repository gives synthesizable RTL for both logic dies, the DMA across the link and the
command dispatchers. It also gives behavioural models of the two memory arrays, which are
analog macros and are not designed here. Self-checking testbenches cover every block and the
whole system.

## 1. The two-cut-point step

Within one decoding step `t` of one layer, the order is:

```
DRAM die:  Attention(t) ──AttnOut(t)──►                   wait ─► Attention(t+1) ...
RRAM die:            wait ─► FFN(t) ──FFNOut(t)──► (to DRAM)
```

In hardware, each die has a command dispatcher (`stream_dispatch`). It takes an in-order stream
of commands from the host.

- A command marked `sync` is held until the other die has reached its cut point.
- The top level counts completed transfers in each direction: `attn_out_cnt` and `ffn_out_cnt`.
- The DRAM die's sync condition is `attn_out_cnt == ffn_out_cnt`: every AttnOut it sent has
  come back as FFNOut.
- The RRAM die's sync condition is `attn_out_cnt > ffn_out_cnt`: there is an AttnOut it has not
  yet answered.

This is the whole inter-die protocol. There is no other shared state. `dram_stall_cnt` and
`rram_stall_cnt` count the cycles each die waited.

## 2. Processing unit (`nmp_pu`)

Both dies are built from the same processing unit (PU), one per memory channel. The parameter
`IS_DRAM` selects the flavour.

| | DRAM PU | RRAM PU |
|---|---|---|
| PEs per PU | 16 | 16 |
| multipliers per PE (`N_MAC`) | 4 (2×2 tensor core) | 16 (4×4) |
| shared-memory word | 64 bit = 4 FP16 | 256 bit = 16 FP16 |
| shared memory | 2560 words = 20 KB | 2560 words = 80 KB |
| PE double buffer | 1 KB | 8 KB |
| special-function unit | 256-lane SIMD SFPE | Taylor-series SiLU unit |
| PUs per die | 16 (one per DRAM channel) | 16 (two per RRAM layer controller) |

A PU contains:

- **shared memory** (`nmp_sram`): two-port, with a one-cycle registered read. Port A serves the
  PU's own datapath. Port B takes, in this priority order, words arriving over the ring,
  activation results, and the die-to-die DMA.
- **16 PEs** (`nmp_pe`). Each PE has:
  - a matrix register file (MRF) of 64 weight rows;
  - `N_MAC` FP16 multipliers and an adder tree;
  - an accumulator;
  - a double-buffered result memory. The PE writes results into one half while the PU drains
    the other half, and a `swap` pulse exchanges the halves.
- **a reducer** (`nmp_reducer`): a balanced FP16 add-or-max tree with one register stage. It
  sums the 16 PE results, or reduces a whole SFPE vector to a scalar.
- **a ring router** (`ring_router`): the 16 PUs of a die form a unidirectional, bufferless
  ring. A flit carries one shared-memory word and its destination address. Traffic already on
  the ring always wins over injection, and ejection is never refused, so the ring cannot
  deadlock.
- **the SFPE** (DRAM PU, `sfpe`), with 256 lanes, 8 vector registers and 8 scalar registers:
  - operations ADD, SUB, MUL, MAX, EXP, DIV, MOV and RSQRT (1/√|a|);
  - the second operand is either a vector or a scalar broadcast to every lane;
  - one instruction per cycle; the result can be used in the next cycle.
- **the Taylor unit** (RRAM PU, `taylor_act`): SiLU, x·σ(x) = x / (1 + e^(−x)), computed in a
  3-stage pipeline that takes one word per cycle.

### PU commands

The published design describes *fused kernels* but not the instruction set of a PU. This RTL
decomposes the kernels into the commands below (`chime_pkg::pu_op_e`). A PU runs one command
at a time and pulses `done` at the end.

| command | effect |
|---|---|
| `WLOAD` | `len` rows from memory address `maddr` into the MRF of PE `pu` |
| `MLOAD` / `MSTORE` | memory ↔ shared memory, `len` words |
| `GEMV` | broadcast shared-memory words `src..src+len-1` to all PEs, one word per cycle. PE *j* forms the dot product with its MRF rows. The buffers are then swapped and drained. The 16 results are stored at `dst` (`sum=0`), or added by the reducer into one value (`sum=1`). |
| `VLOAD` / `VSTORE` | shared memory ↔ SFPE vector register (64 words) |
| `SFPE` | one SFPE instruction |
| `SETS` | scalar register ← immediate |
| `VREDUCE` | scalar register ← sum or max of a vector register |
| `ACT` | Taylor SiLU over `len` words, one word per cycle |
| `SEND` | `len` words over the ring to shared memory `dst` of PU `pu` |

The fused kernels map onto these commands as follows:

- **QKV projection:** `WLOAD` + `GEMV`, plus SFPE `ADD` for the bias.
- **Streaming attention:** `GEMV` for the scores. The online softmax is a block-wise running
  maximum `m` and running sum `l`, with the partial results rescaled by `exp(m_old − m_new)`.
  It is done with `VREDUCE MAX`, `SUB`, `EXP`, `MUL`, `VREDUCE SUM` and `DIV`.
- **FFN:** `WLOAD` + `GEMV` + `ACT` + `GEMV` on the RRAM die.

`tb_chime_top` contains the exact command list of a two-block online softmax.

## 3. Memory-side controllers

### DRAM channel (`dram_chan_ctrl`)

Each DRAM channel has 16 banks, a 32 Kb row buffer per bank and a 64-bit data port.

- **Address layout:** column = `addr[8:0]`, row = `addr[24:9]`, bank = `addr[28:25]`.
- **Open rows:** the controller keeps each bank's row open.
- **Row hit:** costs `HIT_CYC` cycles.
- **Row miss:** the 200 layers are split into five latency tiers. Access time grows with height
  as (3 + 0.8·L) ns for tier L = 1..5. The tier is taken from the row number (rows split evenly).
  The wait in cycles is `ceil((3000 + 800·L) / CLK_PS)`.
- **Response time:** a read or write is answered `tier latency + 3` cycles after it is accepted
  on a miss, or `HIT_CYC + 3` cycles on a hit.
- Hot KV-cache blocks belong in the lowest tier. That placement is the host's job: it chooses
  the rows.

### RRAM layer controller (`rram_mem_ctrl`)

Each controller serves the two PUs of its layer through 16 memory segments. Each segment has a
512-bit line and a 20-bit address, split here as 4 bits of segment number and 16 bits of line.

- A segment stays busy for the read latency (2.3 ns → 3 cycles at 1 GHz) or the write latency
  (11 ns → 11 cycles).
- Different segments work in parallel.
- The two ports are arbitrated round-robin.
- A response arrives `latency + 3` cycles after the request is accepted.

### 256-bit words on 512-bit lines

RRAM PU words are 256 bit. PU word `w` is half `w[0]` of line `w[20:1]`.

- A store to an even half is held in the top level and acknowledged at once.
- The following odd-half store writes the full line once.

The RRAM is used write-once, so stores must come in (even, odd) pairs.

## 4. Die-to-die DMA (`ucie_dma`)

A single engine moves data between the shared memory of a DRAM PU and that of an RRAM PU.
`to_dram` selects the direction.

- **AttnOut:** four 64-bit DRAM words are packed into one 256-bit RRAM word, in lane order.
- **FFNOut:** each 256-bit RRAM word is split back into four 64-bit DRAM words.
- **Link model:** the UCIe link is a `LINK_LAT`-stage pipeline that carries 64 bits per cycle.
- **Timing:** `done` comes exactly `n + LINK_LAT + 2` cycles after `start`, for `n` 64-bit words.
- **Arbitration:** the two dispatchers share the engine, and the DRAM side wins ties.

## 5. Top level (`chime_top`)

`chime_top` holds:

- 16 DRAM PUs with their channel controllers;
- 16 RRAM PUs with 8 layer controllers;
- the two dispatchers and the DMA engine.

The host and the memory arrays are outside, on ports:

- `dcmd` / `rcmd`: valid/ready streams of `host_cmd_t`. `kind` selects a PU broadcast (to the
  PUs in `mask`) or a DMA transfer.
- `dram_arr[16]` with `dram_arr_rdata`: activate / read / write to the bank arrays of each
  channel. Read data comes back one cycle later.
- `rram_seg[8][16]` with `rram_seg_rdata`: enable / write / 16-bit line / 512-bit data per
  segment. Read data comes back one cycle later.
- status outputs:
  - `idle`;
  - cut-point counters `attn_out_cnt` and `ffn_out_cnt`;
  - stall counters `dram_stall_cnt` and `rram_stall_cnt`;
  - `row_hit_cnt` and `row_miss_cnt`;
  - `db_swap_cnt`, `ring_flit_cnt`, `rram_write_cnt` and `link_word_cnt`.

## 6. Arithmetic

All datapaths use FP16 and share one set of functions in `chime_pkg`:

- subnormals are flushed to zero;
- results are rounded to nearest even;
- overflow saturates to ±infinity.

The exponential works in Q16 fixed point:

1. It computes `x·log2(e)` and splits it into an integer `k` and a fraction `f`.
2. It evaluates `2^f` with a fifth-order Taylor polynomial, coefficients (ln 2)^i / i!, by
   Horner's rule.
3. It scales the result by `2^k`.

The relative error of the SFPE exponential and of the SiLU unit is below about 0.3 %. The
testbenches compare against double precision with tolerances of that order.

## 7. Where this RTL departs from the published description

The published description does not fix these points, or contradicts itself on them. This
design's choices are:

- **SFPE width:** 256 lanes, following the configuration table. One drawing prints "32-SIMD".
- **PE multipliers:** the drawings show 16 multipliers in every PE. The DRAM PE uses the
  table's 2×2 = 4.
- **RRAM PU SRAM:** the RRAM PU's shared memory is the table's 80 KB. The text's "1 MB SRAM" is
  read as the NMP's total.
- **Activation function:** not named; SiLU is used. The exponent unit is the one named in the
  RRAM PU drawing, "pipelined Taylor series approximation".
- **SUB and MOV:** added to the SFPE. They are needed to express the online-softmax update.
  `RSQRT` is also added; see below.
- **Undefined interfaces:** the PU command set, the host command format, the blocking dispatch,
  the memory address layouts and the (even, odd) store pairing on RRAM lines are this design's
  own.
- **Ring width:** a ring flit carries one shared-memory word, 64 or 256 bit. The stated
  128 GB/s per link would need 1024 bit per cycle at 1 GHz.
- **Link model:** the die-to-die link is 64 bit per cycle with a fixed latency. The UCIe PHY,
  its protocol and its bandwidth are not modelled.
- **Reciprocal square root added:** the *Normalize* step of the fused normalisation needs
  1/σ, and none of the drawn SFPE units computes it. This design adds an `RSQRT` operation to
  the SFPE. It uses a two-piece linear first guess and three fixed-point Newton steps, and is
  accurate to about one FP16 unit in the last place. The scalar path for a LayerNorm is:
  `VREDUCE` the sum of squares into the scalar file, broadcast it with `MOV`, scale by 1/n,
  add ε, then apply `RSQRT`. Every lane then holds 1/σ.
- **No bias adds on the RRAM die:** the RRAM PU has no SFPE, so its bias adds (`+b_1`, `+b_2`
  in the fused FFN kernel) have no unit there. They must be folded into the weights, or the
  DRAM die adds them after FFNOut.
- **Sizes with no published value:** MRF depth (64 rows), register-file sizes (8 + 8), link
  latency (4) and row-hit time (1 cycle) are parameters chosen here.

## 8. What is not here

- **Memory arrays:** the M3D DRAM and RRAM arrays are process-specific analog macros. This
  includes MATs, sense amplifiers, H-trees, staircase wordlines and MIV-stitched bitlines. Their
  digital ports are brought out of `chime_top`. `tb/m3d_dram_array_model.sv` and
  `tb/m3d_rram_seg_model.sv` are behavioural stand-ins: sparse storage, and a check that columns
  are accessed only in open rows.
- **Physical layer:** the UCIe PHY, hybrid bonding, MIVs and the interposer are physical parts
  with no logic.
- **Mapping software:** the host software that generates command streams is not here. It covers
  data layout, KV tiering and migration, and kernel fusion. The testbenches play its role for
  small programs.
- **Host-side mechanisms:** the KV-cache tier migration and RRAM offload of cold blocks are
  policies of that software. The hardware offers only what they need: tier latencies, MLOAD and
  MSTORE, and write-once line stores.

## 9. Model sizes

The capacities are 2 GiB of RRAM and 5 × 1.25 GiB of DRAM. The sizes are FP16; the backbone
dimensions come from the public model cards.

- **FFN weights** take 3·d·d_ffn·L·2 bytes:
  - FastVLM 0.6B (Qwen2-0.5B): 0.58 GiB.
  - MobileVLM 1.7B: 1.55 GiB.
  - FastVLM 1.7B: 2.15 GiB.
  - MobileVLM 3B: 3.16 GiB.

  The last two exceed the RRAM. Their remainder (0.15 and 1.16 GiB) has to stay in DRAM and run
  on DRAM PUs.
- **DRAM use:** everything else, including a KV cache of 2·L·kv_heads·head_dim·2 bytes per
  token, stays under 4 GiB of DRAM at 4k tokens for every model.
- **Compute per layer and token:** a QKV projection of d·(d + 2·kv_dim) MACs takes
  d·(d + 2·kv_dim) / 1024 cycles on the 16 × 16 × 4 DRAM multipliers. The FFN of 3·d·d_ffn MACs
  takes 3·d·d_ffn / 4096 cycles on the RRAM die.
- **Link traffic:** AttnOut and FFNOut are 2·d bytes each way, d/4 link words.

## 10. Simulation and verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Example with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/chime_pkg.sv tb/tb_fp16_pkg.sv \
    -y rtl -y tb tb/tb_chime_top.sv --top-module tb_chime_top && ./obj_dir/Vtb_chime_top
```

| testbench | what it shows |
|---|---|
| `tb_nmp_sram` | both ports, registered reads, random traffic |
| `tb_nmp_reducer` | sum and max trees against double precision; one-cycle latency |
| `tb_taylor_act` | SiLU accuracy over the FP16 range; latency of exactly 3 cycles |
| `tb_nmp_pe` | dot products in both PE sizes; double-buffer overlap of compute and drain |
| `tb_sfpe` | every operation including `RSQRT`, scalar broadcast, load/read ports |
| `tb_ring_router` | 4-node ring, random traffic: every flit delivered once, hop latency, injection back-pressure |
| `tb_dram_chan_ctrl` | row hits and misses in all five tiers; exact latency of each |
| `tb_rram_mem_ctrl` | read and write latency; segment parallelism; two-port arbitration |
| `tb_ucie_dma` | both directions; packing order; `done` exactly `n + LINK_LAT + 2` cycles after start |
| `tb_nmp_pu` | all commands in both flavours; GEMV and ACT at one word per cycle |
| `tb_stream_dispatch` | ordering, blocking, sync stalls against random PUs and DMA |
| `tb_chime_top` | two full layer steps across both dies at reduced size (2 + 2 PUs, 4 PEs, 16 lanes) |

The end-to-end testbench runs this program:

1. **DRAM die:**
   1. Load the input and score blocks.
   2. Load projection weights from two DRAM rows in different tiers.
   3. Run the GEMV.
   4. Run a two-block online softmax on the SFPE.
   5. Send the result over the ring.
   6. Transfer AttnOut.
2. **RRAM die:**
   1. Wait for AttnOut.
   2. Load weights from RRAM.
   3. Run the GEMV.
   4. Apply SiLU.
   5. Store one RRAM line.
   6. Send FFNOut back.
3. **Next step:** the DRAM die's second step waits for that FFNOut.

Results are checked against a double-precision reference. The run also fails if any of the
following never happened:

- a row hit or a row miss;
- two different tiers;
- a double-buffer swap;
- a ring delivery;
- either cut point;
- a stall on either die;
- an RRAM write.

**Size simulated.** The largest configuration simulated end to end is the one in `tb_chime_top`:
2 DRAM-side and 2 RRAM-side PUs, 4 PEs per PU and 16 SFPE lanes, with 16-row matrix register files,
256-word shared memories and 8-word double buffers. Every other parameter is at its default, including
the PE MAC counts, the DRAM tiers and latencies, the RRAM segments and the link latency. The
default-size top (16 + 16 PUs, 16 PEs, 256 lanes) passes lint and elaboration. It is not part of
the regression. Each PU instance carries its own ring address as a parameter, so Verilator
generates a separate copy of the PU for every instance. The resulting C++ model takes well over
half an hour to compile on a four-core machine. To run it, instantiate `chime_top` in
`tb_chime_top` without a parameter list and set `ND = NR = NPE = 16`, `LN = 256` and
`DROWS = 6400`, and raise `WATCHDOG` to 400000.

Every block was also checked against a deliberately broken copy of itself, with one line
changed. Each testbench reported failures for its broken copy.
