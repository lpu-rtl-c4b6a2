# LPU — a latency-first processor for transformer token generation

When a large language model generates text, each new token requires one pass over every weight of
the model, and each pass multiplies a single vector by a large matrix. At batch size one the arithmetic is trivial and
the memory is the limit: the only way to generate a token faster is to read the weights faster and
keep the arithmetic units busy on every beat of the memory interface. This RTL builds a processor
around that idea:

* all HBM channels are read **in lockstep, as one wide stream**, and the stream goes straight
  into the multipliers without a staging buffer;
* the multiply-accumulate hardware is sized to consume exactly one stream beat per clock;
* everything else (vector operations, sampling, inter-chip exchange, instruction control) runs
  **alongside** the stream, so that the stream never has to wait for it;
* several chips split each matrix by columns and exchange their partial results over a simple
  packet link **while** the matrix product is still running, not after it.

Default configuration: L = 32 MAC trees, each a V = 64-element dot product per clock.
Each tree is fed by two 512-bit HBM channels, so 64 channels in all.
At 1 GHz that is 64 × 64 B = 4 TB/s of stream capacity, above the 3.28 TB/s that four HBM3 stacks deliver.
Numbers are FP16 throughout.

## Block map

```
            host port                              HBM channels 0..63 (512 bit each)
               |                                              |
        +------+------+        +----------------------------- SMA ------------+
        |  host_dma   |        | stream read (all channels) | embedding read   |
        +------+------+        | Key/Value write with byte strobes, transposed |
               |               +-----+------------------------+---------------+
               |                     | one L x V tile per clock                |
  +----+   +---+--------------+  +---v---+   +-----------------+               |
  |ICP |-->|      LMU         |<-|  OIU  |-->| SXE: L MAC trees|--> ESL buffer-+--> left / right
  +----+   | vector words,    |  +-------+   | + vectorizer    |    (packets)  |    P2P ports
    |      | scalar registers |<----------------------------------------------+
    |      +---+--------------+
    |          |   
    +------> VXE (+ sampler)
```

| Module | Role |
|---|---|
| `lpu_pkg` | Instruction format, opcodes, FP16 arithmetic functions, ESL packet constants |
| `icp` | Instruction buffer, scalar registers, branches, dispatch with a scoreboard |
| `sma` | All HBM traffic: weight stream, embedding reads, Key/Value writes |
| `oiu` | Pairs each stream beat with the right input slice from the LMU; issues to the SXE |
| `sxe`, `mac_tree` | L dot-product trees, accumulation over tiles, vectorizer with ReLU |
| `lmu` | Banked vector memory (4096 × 64 FP16) with a write mask; a few scalar registers |
| `vxe`, `sampler` | Element-wise and reduction operations; top-k / top-p / temperature sampling |
| `esl` | Inter-chip packet link: buffer, router, forwarding, receive counting |
| `host_dma` | Host-to-LMU and LMU-to-host transfers |
| `lpu_top` | Wires them together and arbitrates the shared LMU ports |

The HBM stacks and their controllers, the PCIe endpoint and the serial transceivers are not part
of the RTL. The top exposes their ports instead: per-channel request/response, a host port, and
two packet ports. `tb/hbm_model.sv` is a simple fixed-latency channel model used by the tests.

## The weight stream: SMA → OIU → SXE

A matrix-vector product `y = W x` (`MATMUL`) is set up by two instructions:

* `RD_PARAM` tells the SMA to stream a range of HBM addresses.
* `MATMUL` tells the OIU where the input vector `x` sits in the LMU and where `y` goes.

**Layout.** The weight matrix is cut into tiles of V rows by L columns. One tile is one stream
beat: MAC tree `t` receives the V weights of column `t`, and these come from channels `2t` and `2t+1`.
Tiles are stored **column-group major** ("vertical" order). All K = rows/V tiles of one group of L
columns come first, then the next group. A tree therefore finishes its column after K consecutive
beats. It needs one accumulator, not a bank of partial sums.

**SMA stream.** One address is issued to every channel in the same cycle. Requests keep going as
long as the per-channel response FIFOs (8 deep) have room. A beat is handed on only when all 64
channels have answered. Channels can refuse a request or answer late without breaking the lockstep.
The stream is checked to run at one beat per clock once the first data arrives.

**OIU.** Tile k of every column group needs input slice `x[kV .. kV+V-1]`, which is LMU word
`src + k`. The OIU reads ahead up to four slices, so a weight beat and its slice always meet in
the same cycle. Each issue carries microcode: first tile (clear the accumulator), last tile (round
and emit), destination word and element offset, ReLU, and whether the result goes to the ESL. The
OIU pauses only when the ESL buffer is almost full.

**MAC tree** (5 stages).
1. Multiply the 64 element pairs as integer mantissas, and find the largest product exponent.
2. Shift every product right to that exponent, keeping 8 guard bits.
3. Add the shifted products in fixed point, in two adder stages.
4. Fold the result into a wide floating accumulator with a 32-bit mantissa. The accumulator lives
   for the K tiles of the column.
5. On the last tile, round to nearest-even into FP16.

This exponent-first alignment lets 64 multipliers share one adder tree without a floating-point
adder per product. The adder tree is written as plain additions; a synthesis tool may build it as
a carry-save tree.

**Vectorizer.** The L results of a column group leave the trees together. They are packed as L
consecutive elements of one LMU word, with an optional ReLU, and written with an element mask: two
column groups fill one 64-element word. With the ESL flag set, the same L values also go to the ESL
as one packet. SXE results take priority over every other LMU writer.

## Multi-chip: the ESL

Chips form a line or a ring; each has a left and a right port. A model is split so that every
chip computes a different slice of `y`. Each chip then needs the other chips' slices to continue.

* With the ESL flag on a `MATMUL`, every L-element result packet is written into a 16-entry
  transmit buffer. From there it goes to the chip's own LMU and **out of both ports at once**.
  Exchange overlaps the matrix product. The OIU is slowed only if the buffer reaches 8 entries.
* A packet carries its data, the LMU word and element offset, and a hop count. The sender sets
  the hop counts from its position in the group so that each packet reaches every member exactly
  once:
  * on a line, position `i` of `N` sends `i` hops left and `N-1-i` hops right;
  * on a ring, it sends `N/2` hops right and `N/2-1` hops left.
* A receiving chip writes each packet to its LMU at the same address. If more than one hop
  remains, it sends the packet on with one hop less. Incoming packets are written before the
  chip's own.
* `RX n` completes when n packets have arrived. Packets that arrive before the `RX` is issued are
  counted in advance, so nothing is lost when a peer runs ahead.
* Control register 6 holds `{ring, group size, position}`. One set of 8 chips can thus be one ring of
  8, two lines of 4 or four lines of 2 without rewiring.
* `TX` sends arbitrary LMU words, for example an embedding gathered on one chip, as V/L packets
  per word.

## Control: the ICP and its instruction set

Each instruction is 64 bits:

| Bits | Field | Meaning |
|---|---|---|
| [63:58] | op | Opcode |
| [57:46] | dst | Destination LMU word, or register number |
| [45:34] | src | Source LMU word, or register number |
| [33:22] | len | Number of words, K, packets, or a sub-op |
| [21:18] | sreg | Scalar register added to the HBM address |
| [17:0] | imm | Immediate |

Groups:

* **MEM** (to the SMA or host DMA):
  * `RD_EMB` reads HBM into the LMU.
  * `RD_PARAM` and `RD_KV` start the stream.
  * `WR_KV` writes a vector to HBM.
  * `RD_HOST` and `WR_HOST` move data to and from the host.
* **COMP:**
  * `MATMUL`: `len` = K, `imm[13:0]` = column groups, `imm[16]` = ESL, `imm[17]` = ReLU.
  * `VEC`: `imm` = {function, scalar register, second operand word}.
  * `SAMPLE`: samples a token.
* **NET:** `TX` and `RX`.
* **CTRL:**
  * `ALU` has these sub-ops: add, sub, add-immediate, shifts, and, move-immediate, multiply,
    read a control register, and read an LMU scalar.
  * Then `BR` (eq/ne/lt/ge), `JMP` and `HLT`.

There are 15 general registers r1–r15, 32 bits each, and r0 always reads 0. An HBM address is
`r[sreg] + imm`. This is how a loop over layers walks through memory.

CTRL instructions execute in the ICP at one per clock. Every other instruction is dispatched to
its unit as soon as two conditions hold:

1. The unit is free.
2. The scoreboard shows no conflict.

The scoreboard tracks 64 LMU regions of 64 words each for pending reads and writes, plus one bit
for the scalar registers. It blocks read-after-write, write-after-read and write-after-write
overlaps. Independent instructions therefore run concurrently. For example, a `VEC` on one region
runs while a `MATMUL` streams into another, and the next layer's `RD_PARAM` can start while the
`VXE` finishes. `HLT` waits until all units are idle.

## Vector side: VXE and sampler

The VXE processes one 64-element word per step. It reads the operands from the LMU's second read
port and writes the result back. Its functions are:

* element-wise add, subtract and multiply;
* add, subtract, multiply and divide by a scalar register;
* exp, ReLU and copy;
* the fused `exp(a - s)` for softmax;
* the reductions sum and max, which write a scalar register.

A word costs 4 clocks in vector-scalar form and 6 in element-wise form. Sums are formed in FP16.

`SAMPLE` streams logits words into the sampler, which keeps the 16 largest logits with their
indices by insertion, one element per clock. It then:

1. applies the temperature (register 4 holds 1/T);
2. forms weights `exp((l_i - l_max)/T)`;
3. cuts the list at top-k (register 2) and at cumulative probability top-p (register 3);
4. picks one entry with a 16-bit LFSR seeded from register 5.

The token index lands in an LMU scalar register, where `MOVS` can read it.

## Key/Value writes

Attention needs K^T as a matrix to stream, but keys are produced one vector per token. `WR_KV`
takes one of two forms.

**Normal.** The vector goes to the two channels of one tree (`sel`).

**Transposed** (`len[11]` set).
* Element `d` of the vector goes to tree `d mod L`, slot `sel`, at address
  `hbm + (d div L) << lgstr`.
* Only that slot's two bytes are written, using the channel byte strobes.
* Successive tokens use successive slots.
* The stored layout is therefore already a streamable K^T. No transpose pass and no extra read
  are needed.

## Numbers and sizes

| Parameter | Default | Origin |
|---|---|---|
| MAC trees L | 32 | Paper's ASIC configuration |
| Vector length V | 64 | Paper's ASIC configuration |
| HBM channels | 64 × 512 bit | Derived: L · V · 16 bit |
| HBM word address | 25 bit | Own choice: 2 GiB per channel, enough for 96 GB |
| LMU | 4096 words = 512 KiB | Own choice |
| Instruction buffer | 1024 × 64 bit | Own choice |
| ESL transmit buffer | 16 packets | Own choice; almost-full at 8 |
| ESL receive FIFO | 4 per port | Own choice |
| Sampler list | 16 | Own choice |
| MAC-tree latency | 5 | Own choice |
| SXE latency | 6 | Own choice |

A model fits if its FP16 weights fit in 96 GB per chip:

* OPT-1.3B, 6.7B and 30B, and GPT-3 20B, fit on one chip.
* OPT-66B needs 132 GB, so it fits on two chips.

The instruction fields allow K ≤ 4095 tiles and up to 16383 column groups. This covers hidden
sizes up to 9216 and feed-forward sizes up to 36864.

## What departs from the paper or is left out

* Rotary position embedding and activation functions other than ReLU are not built.
* Layer normalisation is incomplete. Mean and variance can be formed with `SUM` and `MULS`, but
  there is no reciprocal square root.
* The instruction encoding, register counts, scoreboard granularity, buffer depths and all
  latencies are this design's own. The paper names the instruction groups but not their bits.
* The FP16 arithmetic has these simplifications:
  * subnormals flush to zero;
  * overflow saturates to infinity;
  * `exp` uses a cubic polynomial for 2^f;
  * division is exact, then rounded.
* HBM, PCIe and the serial links are outside the RTL (see the block map).

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | Size | What is checked |
|---|---|---|
| `tb_mac_tree` | V = 64 | Random dot products over several tiles against real arithmetic; latency 5 |
| `tb_sxe` | L = 4 | All trees, vectorizer packing, ReLU, latency 6 |
| `tb_lmu` | Default | Random reads and masked writes against a model, on both ports |
| `tb_oiu` | Small | Issue order (vertical tiles), microcode, one beat per clock, no issue while the ESL is almost full |
| `tb_sma` | L = 4 | Full-rate stream, stalls from both sides, embedding read, both KV write forms with strobes |
| `tb_vxe` | V = 8 | Every function against a reference; softmax chain; cycle counts per word |
| `tb_sampler` | V = 8 | Greedy equals arg max, top-k membership, tiny top-p, V + 1 clocks per word |
| `tb_esl` | 4 chips | Ring of 4, line of 4, two lines of 2 with random link stalls; every packet arrives exactly once; forwarding and almost-full both occur |
| `tb_icp` | Default | Loops and branches, register results, decoded fields, hazard timing, concurrency |
| `tb_lpu_top` | **Defaults**, 2 chips in a line | See below |

`tb_lpu_top` runs two full-size LPUs joined in a line. Each runs a program that does the
following:

1. reads an embedding and a host word;
2. loops twice over a matrix product split across the two chips (ESL on, ReLU on);
3. on each pass, receives the peer's half, computes a softmax (`MAX`, `SUBEXP`, `SUM`, `DIVS`) and
   samples a token greedily;
4. writes keys in both forms, exchanges a word with `TX`/`RX`, returns results to the host and
   halts.

The link is gated so that it is open about 30% of cycles.

The following are correct on both chips:

* the matrix-product results, checked against real arithmetic;
* the identical copies on both chips;
* the tokens and `MOVS`;
* the exchanged word;
* both KV layouts in the HBM model.

**Known failures in this test:**

* **Softmax values.** The values written by `DIVS` differ from the reference. Entries whose input
  was 0 come out about 21% high, so the FP16 sum is about 21% low. This sum runs over 1024
  elements, while `tb_vxe` checks softmax only over short vectors. Accumulating the sum in FP16 is
  the likely cause. It has not been fixed.
* **SXE pre-emption and ESL almost-full never happen** in this program, so their counters fail.
  Almost-full is exercised in `tb_esl`. Pre-emption of LMU writes by the SXE is not covered by any test.

The full-size build takes several minutes to compile.

To run a block test with plain Verilator:

```
verilator --binary -Wno-fatal --top-module tb_sma rtl/lpu_pkg.sv tb/tb_fp_pkg.sv \
  $(ls rtl/*.sv | grep -v lpu_pkg) tb/hbm_model.sv tb/tb_sma.sv
./obj_dir/Vtb_sma
```

Files may be listed in any order after the two packages. Every testbench compiles the same way.
