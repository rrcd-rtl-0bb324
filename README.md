# RRCD: register redirection by compressibility for a GPU register file run below Vmin

A GPU register file can be run below its safe minimum supply voltage (Vmin) to save
energy, but then a sizeable share of its SRAM cells fail permanently. About a third of
the 256 vector-register entries of a slice contain one or more faulty 64-byte blocks.
Error-correcting codes strong enough for that many faults are large and slow.

RRCD (Register Redirection based on Compressed Data) gets around this by relying on a
property of GPU programs: many vector registers hold regular data. Examples are one
value in every lane, thread ids, and array addresses. Such a register compresses into a
few bytes, small enough for one 64 B block. A defective entry usually still has
reliable blocks, and each of those can hold one compressed register. So RRCD never
fixes a logical register to a physical entry. A small table records where each register
currently lives:

* an **uncompressed** register always goes to a **fully reliable entry** (4 good blocks);
* a **compressed** register goes to **one block**, preferably in a **defective entry**,
  so that reliable entries stay free for uncompressed registers;
* when nothing fits, the register is **spilled** to a reserved half of the LDS (the
  compute unit's scratch-pad memory).

A register moves when a write changes its compressibility. No compiler support and no
ISA change are needed.

This repository holds synthesizable SystemVerilog for the register-file path of one
SIMD unit with RRCD. It also has a self-checking testbench for each unit and an
end-to-end testbench at full size.

## Organisation of the slice

| item | value |
|---|---|
| entries per slice | 256 |
| entry | 64 components x 32 bit = 256 B = 4 blocks of 64 B |
| block | 16 lanes x 32 bit (one SIMD pass) |
| ports | 2 read (sources `fnt0`, `fnt1`), 1 write (destination), one block per cycle each |
| wavefront | up to 64 threads; one instruction reads/writes a register as 4 blocks in 4 cycles |
| register window | each wavefront owns `win_size` contiguous physical registers from a base |

A register without RRCD is read at entry `base[wf] + idx`. With RRCD that number only
selects a **row of the redirection table (TR)**. The row says where the data really is.

## The redirection table row

```
 12   11   10   9..8    7..0
 v    c    m    blq     entry
```

* `v`: the row is valid (the register has been written).
* `c`: the register is stored compressed in block `blq` of slice entry `entry`.
* `m`: the register is in the LDS spill partition. `entry` is then its slot number.
* Otherwise the register is uncompressed and fills all four blocks of `entry`.

There are 256 rows of 13 bits, 416 bytes in all (`redirection_table.sv`). The table is
read combinationally in the translation stage, next to the base-register table and its
adders (`reg_translate.sv`).

## Compressed form of a register

Lane `i` (0..63) of a compressible register satisfies

```
value[i] = base + (i mod K) * d1 + (i div K) * dr,     K in {2, 4, 8, 16, 32, 64}
```

* `K = 64` with `d1 = 0` is one value broadcast to all lanes.
* `K = 64` alone is a constant stride, such as thread ids or vector addresses.
* A smaller `K` adds a second step between groups of `K` lanes. This is the layout of
  matrix addresses, tiles and sliding windows.

The compressed word is `{kcode[2:0], base, d1, dr}`: 99 bits, stored in the low bits of
a 64 B block (`comp_t` in `rrcd_pkg.sv`). The paper quotes an average of 4.88 B per
compressed register. Its exact format is not published, so this encoding and the
restriction to power-of-two group sizes are this implementation's own choices. The
power-of-two restriction lets the whole check run in parallel.

**Compressor** (`compressor.sv`). It sees one 16-lane block per cycle and tests all six
group sizes at once:

* `base` and `d1` come from lanes 0 and 1.
* `dr` comes from lane `K`. That lane is in block 0 for K <= 8, in block 1 for K = 16,
  and in block 2 for K = 32.
* A candidate survives while every lane seen so far matches it.
* After block 0 the unit reports `c_first`: some candidate fits so far. This is the
  speculative `c_compr` bit.
* After block 3 it reports `c_final` and the compressed word. When several candidates
  survive, the largest `K` is taken.

**Decompressor** (`decompressor.sv`). It latches the word from the single block read
from the slice. It then produces block `k` with one multiply-add per lane: block 0 in
the same cycle, blocks 1 to 3 in the next three cycles.

## Write path: speculative compression and the destination buffer

This is the most involved part (`wb_stage.sv`). The SIMD unit delivers the result
register as four blocks. Whether the register compresses is only known after the fourth
block, but where it goes depends on that answer. The stage works as follows:

0. **Compression stage.** Every result block first passes through the compressor
   and is held, with the compressor's verdicts, in a one-block stage register. The
   writeback decisions below are taken one cycle later, as in the published pipeline
   where compression has a stage of its own ahead of writeback.
1. **Block 0 reaches writeback.** The stage takes the destination's physical number
   from the in-order destination queue and reads its TR row. The compressor's verdict
   on block 0 is `c_compr`.
2. **`c_compr = 0` (not compressible).** The register is written straight through, one
   block per cycle. It stays in its entry if it already held an uncompressed register
   in the slice. Otherwise `rsel` selects the new reliable entry that the USR offers.
   If no reliable entry is free, the register goes to an LDS slot: it keeps its old
   slot if it was already spilled, or takes a new one.
3. **`c_compr = 1` (speculatively compressible).** Blocks 0 to 3 are collected in the
   **destination register buffer (BRD)** (`dest_reg_buffer.sv`), which is one entry
   (256 B) in size. At block 3:
   * if the whole register compresses, the compressed word is written **once** (one
     block-sized access). It goes to the register's own block if the register was
     already compressed in the slice, otherwise to the block the USR offers;
   * if it does not compress (**misprediction, `misp`**), the register is treated as
     uncompressed. The BRD is drained into its entry over four cycles. `wb_stall` is
     high for those four cycles, and the next register's blocks wait: `wb_ready` goes
     low once the compression stage holds one of them. This is the pipeline stall;
   * if it compresses but no block is free, it is spilled like an uncompressed
     register. It is drained from the BRD in the same way.
4. **Commit**, in the cycle of the last write:
   * the TR row is rewritten;
   * a newly taken location is marked busy in the USR bitmap;
   * the old location is released;
   * one event pulse on `ev` records the kind of write: `regular` (in place),
     `redir_entry`, `redir_block` (a new redirection), `lds`, `misp`, or `overflow`.

A register that is in the LDS moves back into the slice on its next write, as soon as a
location is free.

Timing: with no misprediction, a register is accepted at one block per cycle with no
bubbles, and its last block is written one cycle after it is accepted. A misprediction
costs four extra cycles. A compressed write takes one slice access; an uncompressed one
takes four.

## Choosing a location: the redirection selection unit (USR)

`usr.sv` keeps one bit per slice block (256 x 4). At start-up the fault map from
post-fabrication test is loaded into it:

* faulty blocks are marked busy for good and are never handed out;
* an entry with any faulty block is marked defective.

Two priority encoders, lowest index first, offer locations in every cycle:

* **1024 inputs, for a compressed register.** It offers a free block of a defective
  entry. If there is none, it offers a free block of a reliable entry that already
  holds compressed registers. If there is none of those either, it offers block 0 of
  an empty reliable entry.
* **256 inputs, for an uncompressed register.** It offers a reliable entry whose four
  blocks are all free.

A third encoder, over a 128-bit map, hands out LDS spill slots. 128 slots of 256 B is
half of a 64 KB LDS.

In the published design the encoders work "preventively" while the instruction moves
down the pipeline, so that writeback only has to choose between the old and the new
location. Here the encoders are combinational on the registered bitmap, so their offer
is already current when block 0 reaches writeback. The behaviour is the same.

## Read path

`operand_read.sv` reads both sources in the four cycles after issue:

| source state | slice/LDS access |
|---|---|
| uncompressed (`c=0,m=0`) | block `k` of `entry` in cycle `k` |
| compressed (`c=1`) | block `blq` of `entry`, once, in cycle 0 |
| spilled (`m=1`) | block `k` of LDS slot `entry` in cycle `k` |

The slice and the LDS return data one cycle after the request. In that cycle the `c` bit
switches a 2:1 multiplexer between the raw block and the decompressor output. The
result is registered and leaves as `op0`/`op1` with `op_blk = k`. Block 0 is valid after
the second clock edge that follows the edge accepting the issue. A new instruction is
accepted every four cycles.

## Faulty bits that do not need redirection: ECP

An entry with a single faulty bit counts as reliable. `ecp.sv` keeps one pointer per
entry: a valid bit and the 11-bit position of the faulty bit. It also keeps one spare
cell per entry. The unit works on the slice ports:

* when the block that contains the faulty bit is written, the bit's value is also
  stored in the spare cell;
* when that block is read, the spare's value replaces the faulty bit.

The pointers are loaded through the `ecp_*` port. The fault map (`fmap_*`) marks only
the blocks that ECP cannot repair. In the tested reliability model those are the
entries with two or more faulty bits, spread one faulty bit per block.

## Wavefront windows

`alloc_*` writes a wavefront's base register. `rel_*` releases a finished wavefront's
window. The release walks its `win_size` TR rows, one per cycle: each valid row's
location is freed in the USR and the row is invalidated. New writebacks wait while the
walk runs. Because the TR redirects every register, a window's registers may end up
anywhere in the slice, whatever their physical numbers.

## Top-level interface (`rrcd_top.sv`)

| port group | direction | use |
|---|---|---|
| `fmap_we/entry/bits` | in | fault map, one entry (4 block bits) per strobe |
| `ecp_we/entry/valid/pos` | in | ECP pointer per entry |
| `alloc_we/wf/base`, `win_size` | in | wavefront placement, window size |
| `rel_valid/ready/wf`, `rel_busy` | in/out | window release |
| `iss_valid/ready/wf/idc0/idc1/has_dest/idcd` | in/out | instruction issue |
| `op_valid/blk`, `op0`, `op1` | out | source blocks to the SIMD unit |
| `wb_valid/ready/data` | in/out | result blocks, block 0 first, oldest destination first |
| `lds_rd_en/addr/data[2]`, `lds_we/waddr/wdata` | out/in | LDS spill partition, address `{slot, block}`, read latency 1 |
| `ev`, `ev_redir_defective`, `c_compr`, `misp`, `rsel`, `wb_stall` | out | events, control bits, misprediction stall |
| `free_entries`, `defective_entries` | out | status |

The caller must respect two rules:

* Load the fault map and the ECP pointers before the first write.
* Do not issue a read of a register whose writeback has not yet committed. There is no
  forwarding. The SIMD unit and the LDS are not part of this RTL.

## Sizes and parameters

| parameter | default | origin |
|---|---|---|
| `NUM_ENTRIES` (slice entries, TR rows, bitmap rows) | 256 | published design |
| block width / blocks per entry | 512 bit / 4 | published design |
| TR row | 13 bit (1+1+1+2+8) | published design |
| block encoder / entry encoder inputs | 1024 / 256 | published design |
| `NUM_WF` (base-table rows) | 256 | pipeline figure of the published design (its configuration table says 16 wavefronts per CU) |
| `SPILL_SLOTS` | 128 | own choice: half of the 64 KB LDS in 256 B slots |
| compressed word | 99 bit | own choice (published average: 4.88 B) |
| `DQ_DEPTH` (destination queue) | 4 | own choice |

All sizes are simulated at their defaults.

## Departures from the published description

* The compressed word is written with block 3, not with block 0. The group step for
  K = 16 and K = 32 is only known by then. This also means a misprediction never
  leaves a stale compressed block behind.
* The destination's TR row is read when its first result block reaches writeback, not
  in the translation stage. This keeps the row correct when two in-flight instructions
  write the same register.
* The compressed-data encoding, the pattern set (power-of-two groups), the fall-back
  order of the block encoder, the spill-slot allocator and the storage of spilled
  registers (always uncompressed) are not given in the published description and were
  chosen here.
* When no slice location and no spill slot is left, the register is dropped and
  `ev.overflow` is raised. The published design does not say what happens then. With
  the default sizes it cannot happen: 156 or more reliable entries plus 128 slots is
  more than 256 registers.
* The slice array is ideal. Low-voltage operation, the separate supply domains and
  the sub-Vmin SRAM behaviour are outside the RTL. Inside the design, faults exist only
  as the fault map and the ECP pointers. The two end-to-end testbenches apply the drawn
  faults to the array themselves (see below).

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Each
one has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rrcd_pkg.sv tb/tb_patterns.sv tb/tb_rrcd_top.sv --top-module tb_rrcd_top -o sim
./obj_dir/sim
```

Replace `tb_rrcd_top` with any other testbench: `tb_compressor`, `tb_decompressor`,
`tb_usr`, `tb_wb_stage`, `tb_operand_read`, `tb_rf_slice`, `tb_redirection_table`,
`tb_reg_translate`, `tb_dest_reg_buffer`, `tb_ecp` or `tb_rrcd_scenarios`. `tb_patterns.sv` builds reference
registers by adding `d1` lane by lane and a group step at each group boundary. This is
an independent way of writing the same patterns, which the compressor and decompressor
tests check against.

`tb_rrcd_top` runs the whole design at its default size:

* a fault map drawn from the "common" reliability scenario (per entry: 34 % no faulty
  bit, 33 % one, 20 % two, 10 % three, 3 % four or more);
* 8 wavefronts x 32 registers, occupying all 256 physical registers;
* about 3 000 instructions whose results are random mixes of broadcast, strided,
  grouped, mispredicting and random registers;
* occasional window releases.

The testbench also models the faulty cells, since the slice array in the RTL is ideal:

* a write to a block that the map marks faulty counts as a failure;
* in an entry with a single faulty bit, that bit is inverted in the array after every
  write to its block. Only the ECP spare bit can then return the right value.

It checks every source block against a reference copy of all registers. It also counts,
and requires at least once, each mechanism: in-place writes, redirections to reliable
and to defective entries, LDS spills and LDS reads, mispredictions with their
four-cycle stall, compressed reads, writes over a cell repaired by the spare bit,
releases and issue back-pressure. It runs in about
ten seconds.

`tb_rrcd_scenarios` runs the same kind of traffic under each of the three published
reliability scenarios. Per entry, the share of entries with 0 / 1 / 2 / 3 / 4+ faulty
bits is:

* common: 34 / 33 / 20 / 10 / 3 %;
* clustered: 43 / 20 / 12 / 10 / 15 %;
* dispersed: 26 / 35 / 23 / 12 / 4 %.

Each scenario is run at three register-file occupancies, with a reset before each run.
The occupancies are the lowest, the average and the highest reported for the evaluated
programs:

* 54 %: 6 wavefronts x 23 registers;
* 74 %: 8 x 24;
* 93 %: 7 x 34.

Each run has 1 200 instructions, checks every source block, and applies the drawn
faults to the array as above. It also checks the design's count of defective entries
against the map.

For each run the testbench prints how the writes were served, in the manner of the
published write breakdown:

* regular;
* redirected to a reliable entry;
* redirected to a block, and how many of those landed in a defective entry;
* spilled to the LDS;
* mispredicted.

With the synthetic data used here, about half the writes are regular, and about a fifth
go to blocks of defective entries. The LDS is used only at 93 % occupancy, for 2-3 % of
the writes. The mix of register contents is synthetic, so these shares are not the
published application results.
