# GRIM-Filter in the logic layer of a 3D-stacked memory

Read mappers of the seed-and-extend kind find, for every short DNA read, a
list of candidate locations in the reference genome, and then run an expensive
alignment (edit-distance) step on every one of them. Most candidates turn out
to be wrong. GRIM-Filter is a cheap test, run before alignment, that rejects
candidate locations which provably cannot match within the allowed error rate.
It is a pure counting job over a large precomputed table, so it is
memory-bound; this design puts it next to the DRAM, in the logic layer
under the DRAM layers of an HBM2-like stack. There a whole DRAM row reaches
thousands of small counters every cycle.

This repository holds synthesizable SystemVerilog for the filter logic, a
behavioural model of the DRAM side for simulation, and self-checking
testbenches. The algorithm and the parameters come from the GRIM-Filter
paper by J. S. Kim et al. The micro-architecture fills in
what that paper leaves open: handshakes, the vault split, the seed buffer and
the cycle-level control. The sections below mark which parts are which.

## The idea: bins, tokens and existence bits

* The reference genome is cut into **bins**: short stretches of a few hundred
  bases. Neighbouring bins overlap, so that any read of `READ_LEN` bases lies
  entirely inside at least one bin.
* A **token** is a string of `TOKEN_LEN` = 5 bases, so there are
  4^5 = 1024 different tokens.
* Every bin has a 1024-bit **bitvector**. Bit *r* of the bitvector is 1 if
  token *r* occurs somewhere in the bin. The bitvectors are computed once per
  reference genome, offline, and stored in the DRAM stack. At 450 x 2^16 bins
  they take about 3.8 GB.

To test whether location *z* could match read *r*:

1. take the 96 overlapping tokens of the 100-base read;
2. for each token, look up its existence bit in the bitvector of the bin
   holding *z*;
3. add the bits up, giving the **accumulation sum**;
4. keep *z* (send it to alignment) if the sum is at least the threshold,
   otherwise drop it.

### The threshold

An exact match has all `READ_LEN-(n-1)` tokens present. One substitution or
deletion can spoil up to `n` consecutive tokens, and an insertion up to
`n-1`. With error tolerance `e`, at most `ceil(READ_LEN*e)` errors are
allowed, so

    threshold = READ_LEN - (n-1) - n * ceil(READ_LEN * e)

For 100-base reads and n = 5, e = 0.00, 0.01, ..., 0.05 give 96, 91, 86,
81, 76, 71. A sum below the threshold guarantees that no acceptable alignment
exists in the bin, so the filter never drops a true match. A sum above it
guarantees nothing; alignment decides. `threshold_calc` computes this
equation from `e` given in thousandths (`e_milli`). Two details:

* The ceiling covers the product `READ_LEN*e`, as the paper's text says.
  The paper's equation figure draws it around `read_length` alone; that
  version is not followed.
* The result saturates at 0.

## How the table is laid out in DRAM, and why that makes it fast

The bitvectors are stored **column-major**. In a bank, bitvector *k* fills
column *k*, and its bit *r* sits in row *r*. A single row read therefore
returns the existence bit of **one token for many consecutive bins**. HBM2
moves 4096 bits per cycle from a memory layer to the logic layer, so one
read covers a **bin window** of 4096 bins. The logic layer has one small
counter per bin of the window, and all of them count the same token in the
same cycle.

In this RTL the window is split over `NUM_VAULTS` = 8 vaults of
`BINS_PER_VAULT` = 512 bins. A row request carries `{window, token row}`.
The response is 4096 bits: bit *b* belongs to bin `window*4096 + b`, and
vault *v* takes bits `v*512 .. v*512+511`. The paper gives only the 4096-bit
total. The 8 x 512 split is a choice of this design; 8 is the channel count
of an HBM2 stack.

## Block structure

```
grim_filter_top
 |- filter_bitmask_generator      in-memory part: one window -> one bitmask
 |   |- token_extractor           read -> 96 token row numbers, 1 per cycle
 |   |- threshold_calc            e -> accumulation sum threshold
 |   `- grim_vault_logic x 8      one per vault
 |       |- row_data_register     512-bit copy of the row from the bank
 |       |- grim_logic_module x 512   incrementer + accumulator + comparator
 |       `- (bitmask register)    seed location filter bits of the vault
 |- sync_fifo                     seed buffer, 256 entries
 `- seed_location_checker         keeps seeds whose bin bit is 1
```

`grim_pkg` holds the shared constants, the base code and reference
functions for the token count and the threshold.

### Per-bin logic module

The paper gives this block's insides: an incrementer, an accumulator and a
comparator, `ACC_W` = ceil(log2(100)) = 7 bits wide. `clear` zeroes the
accumulator at the start of a window. Each cycle in which the row data
register holds a fresh row, the module adds its bit. `filter_bit` is
`active && sum >= threshold`. The `active` input marks a bin that holds at
least one of the read's seed locations. In an empty bin the counter stays at
zero and the bit stays 0, since the bin has nothing to align. The paper says
only that modules on empty bins wait in lockstep with the rest; the gating is
this design's choice.

### Filter bitmask generator: one window, cycle by cycle

The generator is the only controller in the design. Its states are
`IDLE -> LOAD -> RUN -> COMPARE -> OUT`.

| step | what happens | cycles |
|---|---|---|
| command | read (2 bits per base, base *i* at bits 2i+1:2i), window index, `e_milli`, seed count `nseeds`; all accumulators cleared | 1 |
| LOAD | one seed bin offset per cycle; each sets that bin's `active` bit | `nseeds` |
| RUN | `token_extractor` issues one row request per cycle (row = token value, first base most significant: AAAAA = 0, AAAAC = 1, TTTTT = 1023); each response is latched in every vault's row data register and counted one cycle later | 96 + memory latency + stalls |
| COMPARE | every module's comparison is copied into the vault bitmask registers | 1 |
| OUT | the 4096-bit bitmask is offered to the checker and written to the bitmask buffer in DRAM | until taken |

Without back-pressure, the bitmask is offered exactly `96 + L + 2` cycles
after the first row request, where `L` is the memory latency: one row per
cycle, as the paper states for HBM2. A command with `nseeds = 0` is an empty
window. The paper says such windows are not checked, so the generator reads
no row and produces an all-zero bitmask at once.

### Seed location checker and the overlap with alignment

The mapper's seed locations (32-bit genome position plus bin offset in the
window) go into the seed buffer at the same time as their bin offsets reach
the generator. Once a bitmask is ready, the checker copies it together with
the seed count. It then takes that many seeds from the buffer, in order. A
seed whose bin bit is 1 is passed on through `out_*`; any other seed is
dropped. Both the check and the output run at one seed per cycle.

Because the checker holds its own copy of the bitmask, the generator can
start the next window while the mapper is still consuming the kept seeds of
the previous one. This is the overlap of filtering with alignment that the
paper relies on. If the checker has not finished when the next bitmask is
ready, the generator waits in `OUT` (`ev_out_stall`). The paper avoids that
stall with a 512 KB bitmask buffer in DRAM. This design writes every bitmask
to that buffer through the `bmw_*` port, but the checker reads only its own
single-entry copy.

In the paper, the checker runs as software on the host CPU. Here it is
logic with the same function, so the top is complete from seeds in to kept
seeds out.

## Top-level interface (`grim_filter_top`)

| port group | dir | meaning |
|---|---|---|
| `cmd_valid/ready`, `cmd_read_seq[199:0]`, `cmd_window[12:0]`, `cmd_e_milli[9:0]`, `cmd_nseeds[8:0]` | in | one read against one 4096-bin window |
| `seed_valid/ready`, `seed_loc[31:0]`, `seed_bin_off[11:0]` | in | exactly `cmd_nseeds` seeds after the command; at most 256 per command |
| `mem_req_valid/ready`, `mem_req_window`, `mem_req_row[9:0]` | out | bitvector row read, all vaults in lockstep |
| `mem_rsp_valid`, `mem_rsp_data[4095:0]` | in | one response per request, in order, always accepted |
| `bmw_valid`, `bmw_window`, `bmw_data[4095:0]` | out | bitmask written to the DRAM bitmask buffer |
| `out_valid/ready`, `out_loc[31:0]` | out | seed locations to align |
| `ev_skip`, `ev_mem_stall`, `ev_out_stall`, `ev_keep`, `ev_discard` | out | one-cycle event pulses |

All streams use valid/ready, and a transfer happens when both are high.
Reset is active-low and asynchronous. The host supplies the bin offset of
each seed: the paper uses `bin_num(z)` but does not define the bin geometry.
Assertions check the rules of the memory port and of the checker's output.

## What is outside this RTL

* **The DRAM stack.** This covers the banks, row buffers and TSVs, and the
  bitmask buffer, which is a region of the DRAM. It connects through `mem_*`
  and `bmw_*`. `tb/dram_bitvector_model.sv` is a behavioural stand-in with
  fixed latency and random stalls.
* **The read mapper.** This is the host software that finds the seeds and
  does the alignment, together with its reference segment storage.
* **Bitvector generation.** It is a one-time offline scan of the genome. The
  testbenches do the same scan to fill the model.

## Parameters and sizes

The defaults are the paper's main configuration: `TOKEN_LEN` 5, `READ_LEN`
100, `NUM_BINS` 450 x 2^16, and a 4096-bin window in 8 x 512 vault slices.
No size was scaled down. After coarse synthesis the full top has about 57 k
word-level cells and 46 k flip-flop bits. Most of both are the 4096 seven-bit
accumulators and the 4096-bit row and bitmask registers. The 256 x 44-bit
seed buffer adds 11 k memory bits.

All 10 evaluated read sets (100-base reads) run at the default parameters,
with e = 0.00 to 0.05. The 13-bit window index covers the paper's whole
sweep of bin counts, up to 500 x 2^16 = 8000 windows. The token-size sweep
(4 and 6) needs `TOKEN_LEN` changed.

## Differences from the paper, in one place

* The seed location checker is logic, not host software.
* It holds one bitmask, so the generator can stall. The paper's DRAM buffer
  never stalls.
* Bins without seeds are gated: they count nothing and answer 0.
* The vault split, handshakes, seed count per command, the 256-entry seed
  buffer and the thousandths encoding of `e` are all this design's own.
* The threshold uses `ceil(READ_LEN*e)` (the paper's text), not the
  equation figure's placement of the ceiling.
* Timing is cycle-level RTL. The paper's speed-ups come from a DRAM timing
  simulator, and nothing here reproduces them.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_grim_filter_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/grim_pkg.sv tb/tb_grim_filter_top.sv -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_grim_filter_top` | **whole design at the default (full) size**: random 819 kbase genome in 8192 overlapping 200-base bins (stride 100), reads copied from it with `ceil(100e)` substitutions plus random reads, 24 commands; every bitmask and every kept location against a reference model, no true location ever dropped, 96 row requests per window, `96+L+2` cycles per unstalled window, and each mechanism (skip, DRAM stall, checker stall, keep, discard) seen |
| `tb_filter_bitmask_generator` | generator at 2x8 bins, 20-base reads, 3-base tokens: bitmasks, request rows, skip, latency, holding under back-pressure |
| `tb_grim_vault_logic` | sums per bin, two-cycle row-to-sum timing, bitmask hold and compare |
| `tb_grim_logic_module` | counting, empty-bin gating, `>=` comparison, 96 fits in 7 bits |
| `tb_row_data_register` | load, hold, valid timing |
| `tb_token_extractor` | token values and order, one per cycle, last flag, back-pressure |
| `tb_threshold_calc` | the equation for all e from 0 to 1.000, and the paper's six values |
| `tb_seed_location_checker` | kept locations and order, one seed per cycle, bitmask refusal while busy |

The full-size end-to-end test compiles in about half a minute and runs in
seconds.
