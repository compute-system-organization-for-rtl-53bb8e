# A distributed-SRAM engine for electric field conjugation

High-order wavefront control for a space coronagraph closes a loop many
times a second. A deformable mirror with tens of thousands of actuators is
corrected from an estimate of the electric field in the dark hole. Each
iteration, electric field conjugation (EFC) with a precomputed gain turns the
field estimate `E` into an actuator update:

    du = -M (J^T E)

- `J` is the Jacobian.
- `M` is the precomputed gain matrix.

Both matrices change only when the system is recalibrated, so they can be
computed on the ground, uploaded once, and kept in memory. Every iteration
still has to read all of them. For a LUVOIR-A class instrument:

| Item | Size |
|---|---|
| Wavelength channels | 5 |
| Active pixels | 51,316 |
| Field states (`E`) | 2 x 51,316 x 5 = 513,160 |
| Active actuators (`du`) | 25,736 |
| `J^T` | 25,736 x 513,160 doubles, about 106 GB |
| `M` | 25,736 x 25,736 doubles, about 5.3 GB |

Each iteration is pure double-precision matrix-vector work (GEMV, matrix times
vector) with almost no reuse. It is limited by memory bandwidth, not
arithmetic.

This RTL implements the SRAM-only answer to that problem:

- Both matrices are spread over thousands of SRAM banks.
- Each bank has its own FP64 multiply-accumulate unit (MAC).
- The field vector is broadcast to all banks through a tree.
- Each bank computes the dot products of the matrix rows it holds.
- The results flow back up the same tree.

No bank ever sends matrix data anywhere. Only vectors move.

## Organisation

```
 host (rad-hard CPU)
   |  load port, E stream in, du stream out
 efc_sequencer  (TMR state, J^T E buffer, result buffer, retry control)
   |
 root tree_node (2 children)
   |                                   tier 1:  2 chiplets
 sram_chiplet ---- sram_chiplet        tier 2:  4
   |  \                                ...
  ...  2 child chiplets each           tier 5: 32     (62 chiplets in all)

 sram_chiplet:
   router tree_node (3 children: own banks, 2 child chiplets)
     |
   chip_tree_net  (binary tree of tree_nodes, 8 levels)
     |
   135 x bank_pe  =  sram_bank (72-bit words, SECDED) + fp64_mac + control
```

At the default parameters the tree has 5 tiers of degree 2: 62 chiplets, each
with 135 banks, for 8370 banks and 8370 MACs.

### Where the rows live

The banks are numbered `g = chip * 135 + i`. Global row `r` of a matrix
belongs to bank `r mod 8370`, as that bank's local row `r div 8370`.

- Both matrices have 25,736 rows.
- So each bank holds at most `ceil(25736 / 8370) = 4` rows of each.
- A fifth "row" holds the ABFT checksum: the element-wise sum of the bank's
  rows.

Storage is element-interleaved. Word `base + j*stride + s` is element `j` of
local row `s`, with `stride = rows + 1`. When vector element `x_j` arrives,
the bank reads `stride` consecutive words, one per cycle, and feeds each to
the MAC with the same `x_j`.

Holding `J^T` and `M` takes 5 x (513,160 + 25,736) = 2,694,480 words. That is
the default `BANK_WORDS`. Each word is 72 bits: 64 data bits and 8 SECDED
check bits.

### The two passes

The sequencer runs EFC as two GEMV passes over the same tree:

1. **Pass 1.** A `PK_GEMV` command packet carries the `J^T` descriptor to
   every bank. The host then streams `E`, and the sequencer forwards each
   element as a `PK_DATA` packet. The banks return `J^T E`, which goes into
   a buffer in the sequencer.
2. **Pass 2.** A second command selects `M`. The sequencer streams its own
   buffer back down and collects `M (J^T E)`.
3. **Output.** The result goes to the host in index order, negated.

`mode = 1` runs pass 1 alone and returns the product unnegated, as a plain
GEMV against any matrix that has been loaded.

A GEMV command (`gemv_cmd_t`) holds:

| Field | Meaning |
|---|---|
| `n_in` | Vector length |
| `n_rows` | Global rows, i.e. results expected |
| `rows` | Local rows per bank |
| `stride` | Words per vector element in a bank |
| `abft_en` | Compute and check the checksum row |

The command packet's address field carries the matrix base address.

## The tree network

Every hop in both directions is a `tree_node`. The same module is used
everywhere:

- the root next to the sequencer;
- the router in each chiplet, which stands for the I/O PHY;
- the nodes of the on-chip binary tree.

A node holds one register stage in each direction.

**Broadcast is lockstep.** A node passes its packet on only when every child
can take it, so all banks see exactly the same packet sequence. A node can
still take a new packet in the cycle its old one leaves, so a stream with no
back-pressure moves at one packet per cycle.

The banks are the slowest consumers. With ABFT on, a bank takes one vector
element every `rows + 1` cycles, which is 5 at the default size. That
back-pressure spreads up through the whole tree to the host stream. Vector
elements therefore reach the banks at the banks' own rate, and no buffering
is needed below the sequencer.

**Gather is out of order.** Each result carries its global row index. A node
merges its children's results with a round-robin arbiter, and the sequencer
writes each result into its buffer at that index. Nothing depends on arrival
order. The sequencer counts `n_rows` results and then moves to the next phase.

The off-chip links are modelled as registered 64-bit parallel buses with
valid/ready. At 500 MHz such a link carries 32 GB/s, the same as the 16-lane,
16 Gb/s-per-lane SerDes these links stand for. The SerDes itself (the
chiplet's I/O PHY) is analog and is not part of this RTL.

Latency: a broadcast packet crosses one register per node on its path. For a
bank in tier 5 that is:

- 1 root node;
- 5 chiplet routers;
- 8 on-chip levels (the tree is padded to 256 leaves).

That comes to 14 cycles. Results take the same path back.

## Inside a bank

`bank_pe` is a small state machine around one `sram_bank` and one `fp64_mac`:

| State | What happens |
|---|---|
| `S_IDLE` | Write packets addressed to this bank are SECDED-encoded and stored. A `PK_GEMV` packet latches the command and clears the accumulators. |
| `S_RUN` | For each vector element, issue `rows(+1)` reads on consecutive cycles. In the following cycle, decode the word and do `acc[s] += word * x_j`. The next element is accepted in the cycle of the last read, so the MAC stays busy. |
| `S_CHECK` | (ABFT only) The same MAC forms `sum(acc[0..rows-1]) - acc[rows]`. A difference whose exponent lies within `ABFT_TOL` (32) binades of the larger operand is flagged. |
| `S_GATHER` | Returns `acc[s]` tagged with row `g + s*8370`, skipping rows that do not exist. Every result carries the bank's `abft_err`, `ecc_ue` and `ecc_ce` flags. |

The MAC is IEEE binary64: multiply, then add, each rounded to nearest even.
Subnormals are flushed to zero. It is combinational, and the accumulator
register closes the loop, giving one MAC per cycle.

## Fault protection

These are the three protections a radiation-tolerant version of this system
calls for:

- **ECC on every word.** The code is SECDED (72,64), an extended Hamming code.
  Since each iteration reads every matrix word, ordinary reads are the scrub:
  - a single-bit error is corrected on the fly and counted (`ecc_ce_cnt`);
  - a double-bit error is reported (`ecc_ue`).

  Corrected words are not written back. A flipped bit stays flipped until
  the host reloads the word.
- **ABFT checksums.** Each bank checks its row results against its checksum
  row. When any result comes back with `abft_err` or `ecc_ue`, the sequencer
  recomputes that pass. For pass 1 it raises `need_vec` again, because the
  host must resend `E`. For pass 2 it replays its buffer. After
  `max_retries` failures it raises `fail` and returns nothing.
  - A transient fault in a MAC, or in the vector on its way down, is cured
    by a recomputation.
  - A permanent double-bit error ends in `fail`.

  The checksum is a single column sum per bank. It detects an error but does
  not say which row is wrong, which is enough for recompute-on-error.
- **TMR on control.** The sequencer's state register is a `tmr_reg`: three
  copies and a bitwise majority vote. Every copy reloads from the voted value
  each cycle, so a single upset lasts one cycle. `tmr_mismatch` reports it.

The ports `seu_inject`, `inj_valid` and `inj_bank` exist only to exercise
these paths in simulation. They let you flip state bits, or flip bit 51 of
one bank's MAC result. Tie them to zero in a real build.

## Performance at the default size

A bank takes `rows + abft_en` cycles per vector element.

**With ABFT (5 cycles per element):**

| Phase | Cycles |
|---|---|
| Pass 1 (513,160 elements) | 2.57 M |
| Pass 2 (25,736 elements) | 0.13 M |
| Gather, tree latency, output | small in comparison |
| **Total** | **about 2.7 M** |

That is 5.4 ms at 500 MHz, enough for a 100 Hz control loop, with the FP64
MACs, 8370 of them, about 62 % busy on useful work (77 % without ABFT).

**Without ABFT:** the same iteration takes 2.16 M cycles, or 4.3 ms.

A 300 Hz loop would need every MAC doing useful work every cycle. This
organisation cannot reach that, because:

- 25,736 rows spread over 8370 banks leave a quarter of the row slots empty;
- the checksum row costs one further slot in five.

The link runs at one packet per five cycles, well under its capacity.

## Departures from the reference system and open points

- **Number of chiplets.** The reference describes a "2-degree, 5-tier" tree
  of 62 chips in one place, but lists 56 chiplets in its parameter table. A
  full tree of that shape has 62 nodes, so this design builds 62.
- **Not included.**
  - The off-chip SerDes links.
  - The rad-hard host CPU. It runs the field estimation and every other
    kernel. Its side of the design appears as the top-level ports.
  - The SRAM macros themselves; `sram_bank` is a behavioural array.
- **Arithmetic and timing.** The MAC flushes subnormals and does not fuse
  multiply and add. It is written as one combinational stage. A 500 MHz
  implementation would pipeline it and interleave several accumulators.
- **Own choices, not taken from the reference.**
  - The host interface.
  - The packet formats.
  - The row interleaving.
  - The ABFT tolerance.
  - The retry policy.
  - The bank and chiplet numbering.
- **Limits.**
  - Banks have `SLOTS = 5` accumulators. Problems that need more than 4 rows
    per bank need a larger `SLOTS`.
  - Packet fields limit `rows` to 15.
  - `BANK_WORDS` must also cover the matrices.

  The EKF-style product `J du` (513,160 rows over 8370 banks) needs 62 rows
  per bank. It does not fit the default configuration.

## Files

| File | Contents |
|---|---|
| `rtl/howfsc_pkg.sv` | Sizes, packet types, binary64 multiply/add, SECDED encode/decode |
| `rtl/fp64_mac.sv` | `acc + a*b` |
| `rtl/secded_enc.sv`, `rtl/secded_dec.sv` | ECC encoder and decoder |
| `rtl/sram_bank.sv` | Single-port synchronous SRAM array |
| `rtl/bank_pe.sv` | Bank + MAC + ABFT + gather |
| `rtl/tree_node.sv` | One broadcast/gather tree hop |
| `rtl/chip_tree_net.sv` | On-chip binary tree |
| `rtl/sram_chiplet.sv` | One chiplet: router, tree, banks |
| `rtl/tmr_reg.sv` | Triple-redundant register |
| `rtl/efc_sequencer.sv` | Two-pass EFC controller |
| `rtl/howfsc_sram_top.sv` | Sequencer plus the chiplet tree |

Every file in `tb/` is a self-checking testbench named after its block. Each
prints `TB_RESULT checks=N failures=M` at the end.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module howfsc_sram_top_tb \
    rtl/howfsc_pkg.sv tb/howfsc_sram_top_tb.sv
./obj_dir/Vhowfsc_sram_top_tb
```

`howfsc_sram_top_tb` runs the whole system on a reduced tree:

- degree 2, 2 tiers, so 6 chiplets;
- 3 banks per chiplet, 18 banks in all;
- a 30 x 12 `J^T` and a 30 x 30 `M`.

It loads the matrices through the host port and then runs six operations:

1. A plain EFC.
2. A single GEMV.
3. An EFC with a stored single-bit error.
4. An EFC with a transient MAC fault.
5. An EFC with a stored double-bit error.
6. An EFC with an upset in the sequencer state.

It checks every result exactly against a reference computed in the
testbench. It also counts how often each mechanism occurred:

- broadcast back-pressure;
- gather contention at the root;
- ECC correction;
- ABFT recomputation;
- retry exhaustion;
- TMR masking.

It fails if any of them never happened.

That is the largest configuration simulated. The full-size system cannot be
simulated: its 8370 banks hold about 200 GB of array contents. Linting the
full-size top needs about 9–10 GB of memory and a few minutes.
