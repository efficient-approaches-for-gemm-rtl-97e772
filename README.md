# Int8 GEMM accelerator on AI Tensor Blocks

This is synthesizable SystemVerilog for a matrix-multiplication (GEMM) accelerator built around
the AI Tensor Blocks (TBs) of the Intel Stratix 10 NX FPGA. It follows the TB-based design in
"Efficient Approaches for GEMM Acceleration on Leading AI-Optimized FPGAs" (Taka, Gourounas,
Gerstlauer, Marculescu, Arora).

The accelerator computes `C = A x B` for int8 `A` (M x K) and `B` (K x N) with 32-bit results.
It reads its operands from on-chip buffers, and these buffers are large enough for the whole
problem up to a "native" size. By default the native size is 639 x 2720 x 1008. The main idea
is to keep a small block of `A` stationary inside every tensor block. A new block of `B` then
streams past it every clock cycle. Meanwhile the next block of `A` is loaded into a second
register bank, through the blocks' dedicated cascade wires, so the load is hidden behind the
computation.

Behaviour models of the tensor block itself are included, because the TB is a hard block whose
int8 cascade mode can be written as ordinary logic. On a real device `tensor_block` would be
replaced by the vendor primitive in the same configuration.

## 1. The tensor block in int8 cascade mode (`tensor_block`)

One TB holds **two banks of three 80-bit operand registers**. One operand word is ten int8
values, with element `e` in bits `[8e+7:8e]`. There are also **three ten-element dot-product
engines**:

* Engine `r` multiplies operand register `r` of the selected bank by the 80-bit `data_in` word.
  `data_in` is broadcast to all three engines.
* Three 32-bit adders add the three dot products to `casc_accum_in`, which is the partial sums
  of the block above. The result leaves on `casc_accum_out`.
* `data_out` carries the low 24 bits of each sum. Only the last block of an array uses it.

Timing, as modelled:

| path | latency |
|---|---|
| `data_in` → `casc_accum_out` | 2 cycles (dot-product register, sum register) |
| `casc_accum_in` → `casc_accum_out` | 2 cycles (input register, sum register) |
| `casc_data_in` → `casc_data_out` (operand loading) | 3 cycles (three load registers) |

Because the cascade path also takes two cycles, **block `t+1` must receive its `data_in` two
cycles after block `t`**. The sum then meets the right partial sum.

Operand loading uses *cascade mode*. Words enter the first block of an array and shift down the
cascade chain, three registers per block. When every block's three load registers hold that
block's words, a one-cycle `load_commit` copies them into the bank named by `load_bank`. The
dot engines keep using the other bank (`comp_bank`) all the while.

With `LOAD_PORT = 1` the module is the first block of an array (TB0). This block only registers
`data_in` onto the cascade chain and contributes zero sums. Every array thus gives up one TB to
loading.

## 2. Layout: arrays, reduction groups, Np blocks

Four parameters describe the compute layout. The defaults are the highest-throughput point of
the original design-space exploration: `18 x 16 x 4 x 3`, which uses 3456 TBs.

| parameter | default | meaning |
|---|---|---|
| `ARRAY_LEN` (TB_len) | 18 | TBs per array. The first loads operands; the other 17 compute. |
| `KP` | 16 | arrays per *reduction group*. Each works on a different slice of K. |
| `NP` | 4 | reduction groups per *Np block*. They share the same A but take different B columns. |
| `MP` | 3 | Np blocks. Each takes different A rows but the same B columns. |

Each compute TB holds a 3 x 10 block of `A`: 3 rows, 10 consecutive k. Each cycle it multiplies
that block by a 10 x 1 block of `B`. One array therefore covers `(ARRAY_LEN-1)*10 = 170` values
of k. A reduction group covers `DK = 170*KP = 2720`. The arrays' 24-bit outputs are summed by
a soft-logic adder tree (`reduction_adder_tree`) into three 32-bit values per cycle.

One pass of the whole layout is the *compute tile*:

    DM x DK x DN = (3*MP) x ((ARRAY_LEN-1)*KP*10) x NP = 9 x 2720 x 4

M, K and N must be multiples of this tile. The host pads with zeros otherwise.

Broadcast pattern (`nx_gemm_accel`):

* A partition `mp*KP+kp` feeds array `kp` of **every** reduction group in Np block `mp`.
  There are `MP*KP` A partitions.
* B partition `(np*KP+kp)*(ARRAY_LEN-1)+t-1` feeds block `t` of array `kp` in reduction group
  `np` of **every** Np block. There are `(ARRAY_LEN-1)*KP*NP` B partitions.
  The B broadcast has far higher fan-out than the A broadcast, which makes `MP` the most
  expensive parameter to raise.
* Reduction group `(mp, np)` writes three C partitions, one per A row.

## 3. Schedule (`gemm_controller`)

A product is split into **phases**, one for each pair of M tile `mt` and K tile `kt`. The order
is `p = mt*k_tiles + kt`, with K innermost. In phase `p`:

1. Every TB holds the A block of `(mt, kt)` in bank `p % 2`.
2. Over `jn = N/NP` cycles the controller reads one B word per cycle from every B partition,
   for column `j = 0..jn-1`. Reduction group `np` handles output column `j*NP + np`.
3. Each reduction-group sum is accumulated into C at address `mt*jn + j`. When `kt = 0` the sum
   is written rather than added, so C never needs a clearing pass.

**Skew.** Block `t` needs its B word `2*(t-1)` cycles after block 1. The controller therefore
delays the B read enable and address per block, and the bank select along with them. The RAMs
of block `t` are read later instead of the data being delayed, which costs 9-bit address
registers rather than 80-bit data registers.

**Hidden A loads.** The A words of phase `q` are read in reverse storage order, at
`3*(ARRAY_LEN-1)` words per array. They walk down the cascade chains and are committed into
bank `q % 2` at `3*(ARRAY_LEN-1) + 2` cycles after the first read. The load of phase `q` starts
as soon as phase `q-1` issues its first column. The bank it overwrites belonged to phase `q-2`,
which has drained by the time of the commit. Phase `q` may issue its first column in the
commit cycle itself, because block 1 first reads the bank one cycle later, when its B word
arrives. The load of phase `q+1` may start in that same cycle.

The load is fully hidden when `jn >= 3*(ARRAY_LEN-1) + 3 = 3*ARRAY_LEN` (54 for the defaults). This matches
the sizing rule `N >= 3*ARRAY_LEN*NP` of the original design. With a smaller `jn` the next phase
waits for its load. The controller counts such cycles in `stall_cycles`, and `hidden_loads`
counts the loads that overlapped computation.

**Latency.** From the B read for block 1 to the C write takes `2*ARRAY_LEN` cycles: 1 for the
RAM, `2*(ARRAY_LEN-1)` for the array and 1 for the adder tree. C is read one cycle earlier, so
read-modify-write runs at one accumulation per cycle on a simple dual-port RAM.

**Run time.** A product of `P = m_tiles*k_tiles` phases without stalls or pipeline stages takes:

    cycles = P*jn + 3*(ARRAY_LEN-1) + 2 + 2*ARRAY_LEN + 4      (start pulse to done pulse)

At the default native size that is 71*252 + 93 = 17,985 cycles. At the 349 MHz that the
original implementation reached, this is 68.0 TOPs, the throughput reported for this
configuration.

## 4. Buffers and data layout

All buffers are simple dual-port RAMs (`sdp_ram`), which stand for M20K blocks. A and B have
twice the depth so they can be double-buffered. C is split into two halves per partition
(`c_buffer_partition`).

| buffer | partitions | width | depth per half (default) |
|---|---|---|---|
| A | `MP*KP` = 48 | 80 | `(M/DM)*(K/DK)*3*(ARRAY_LEN-1)` = 3621 |
| B | `(ARRAY_LEN-1)*KP*NP` = 1088 | 80 | `(K/DK)*(N/NP)` = 252 |
| C | `MP*NP*3` = 36 (x2 halves) | 32 | `(M/DM)*(N/NP)` = 17,892 |

These are the partition counts and depths of the original design. Its C count of
`MP*NP*3*2` includes the two halves. At the defaults, each half holds 1.74 MB of A, 2.74 MB of B and 2.58 MB of C.

Word layout, where `h` is the buffer half, `e = 0..9` the element in a word, `t = 1..ARRAY_LEN-1`
the block in an array, and `r = 0..2` the row:

* **A**, partition `mp*KP+kp`, address `h*A_HALF + (mt*k_tiles+kt)*3*(ARRAY_LEN-1) + 3*(t-1) + r`:
  `A[mt*DM + 3*mp + r][kt*DK + (kp*(ARRAY_LEN-1) + t-1)*10 + e]`
* **B**, partition `(np*KP+kp)*(ARRAY_LEN-1) + t-1`, address `h*B_HALF + kt*jn + j`:
  `B[kt*DK + (kp*(ARRAY_LEN-1) + t-1)*10 + e][j*NP + np]`
* **C**, partition `(mp*NP+np)*3 + r`, address `mt*jn + j`:
  `C[mt*DM + 3*mp + r][j*NP + np]`

Note that the B layout depends on `jn`, the N extent of the product being run.

## 5. Interface and operating sequence (`nx_gemm_accel`)

* **Load units** (`buffer_load_unit`, one for A and one for B). Pulse `*_ld_start` with a word
  address `*_ld_base` (which selects the half) and a word count. Then stream words with
  `*_in_valid`/`*_in_ready`. Stream word `i` goes to partition `i % PARTS`, address
  `base + i/PARTS`. The units only write.
* **Compute.** Pulse `start` with `m_tiles = M/DM`, `k_tiles = K/DK`, `jn = N/NP` (at least 2),
  `ab_half` (the A/B half to read) and `c_half` (the C half to accumulate into). `busy` stays
  high until the one-cycle `done` pulse.
* **Store unit** (`c_store_unit`). Pulse `c_st_start` with base and count. Words come out on
  `c_out_valid`/`c_out_ready`: word `i` is C partition `i % 36`, address `base + i/36`, read
  from the half that compute is **not** using. The unit only reads, and moves one word every two
  cycles.

A typical overlapped sequence looks like this:

1. Load product `n+1` into the free A/B half while product `n` computes.
2. Store product `n-1` from the free C half at the same time.
3. When all three are finished, flip `ab_half` and `c_half`.

`ab_half` and `c_half` must not change while a unit is active.

**Pipeline stages.** `ADDR_PIPE` adds register stages on the A and B read enables and addresses.
`DATA_PIPE` adds stages on the read data. Both shorten the long broadcast wires. The controller
moves the commit, the bank selects and the C latency later by `S = ADDR_PIPE + DATA_PIPE`. A
product then takes `2*S` more cycles, and a load is hidden for `jn >= 3*ARRAY_LEN + S`. The
end-to-end testbench runs with `S = 3`.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tensor_block_tb` | Dot products of both banks plus the cascade input. The 2-cycle latency, the 3-cycle load path and the TB0 variant. |
| `tensor_array_tb` | Two A sets loaded through TB0 into both banks, the second while the first computes. 32 skewed B columns checked against 40-term sums. |
| `reduction_adder_tree_tb` | Signed sums of 16 x 3 inputs, including extreme values. |
| `sdp_ram_tb` | Write/read against a model, read-during-write and data hold. |
| `c_buffer_partition_tb` | Overwrite on the first K tile, back-to-back accumulation, and store reads of the other half. |
| `gemm_controller_tb` | The exact A/B/C address sequences, commit timing, skew, bank alternation, and stall counts for `jn = 16`, `jn = 2` and `jn = 3*ARRAY_LEN` (the smallest `jn` that hides every load). |
| `buffer_load_unit_tb`, `c_store_unit_tb` | Round-robin order and handshakes under random stalls. |
| `nx_gemm_accel_tb` | End to end on a small layout (`4 x 2 x 2 x 2`, native 12 x 120 x 32, one address and two data pipeline stages). Three products are checked against a reference. This covers K accumulation, both banks, hidden loads (0 stall cycles), an exposed load (13 stall cycles, `3*ARRAY_LEN + S - jn`, at `jn = 2`), loading during compute, storing during compute, and a constant overhead, which shows one column per cycle. |
No testbench here runs the default 3456-block configuration. Verilator needs more than ten
minutes of C++ compilation for it. The largest product simulated at the default parameters
(`18 x 16 x 4 x 3`, native 639 x 2720 x 1008) was 18 x 2720 x 216: two M tiles, one K tile and
`jn = 54`, taken through load, compute and store. All 3888 C words matched a reference
product. The run took 201 cycles from start to done, as the run-time formula predicts. It
had no stall cycles, so the second A load was fully hidden at the smallest allowed `jn`. The full native product has not been simulated. Loading and storing it through the
one-word streams takes about 1.7 million cycles.

Running a testbench with plain Verilator from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/nx_pkg.sv tb/nx_gemm_accel_tb.sv --top-module nx_gemm_accel_tb -j 8
    ./obj_dir/Vnx_gemm_accel_tb

The full-size build compiles 3456 TB instances and takes several minutes of C++ compilation.

## 7. Where this RTL departs from, or goes beyond, the original design

* **Taken from the original:** the four layout parameters and their roles, and the broadcast
  pattern. Also the TB port widths and the 2-cycle-per-block cascade. Also the 3-cycle-per-block
  cascade loading with ping-pong banks and the soft adder tree per reduction group. Also the
  partition counts and depths, the simple dual-port buffers with double buffering, the
  write-only load units and the read-only store unit. Also the optional register stages on the
  address and data paths (`ADDR_PIPE`, `DATA_PIPE`), although no stage counts are published for
  the original builds, so both default to 0 here.
* **Own choices, because the original does not describe them:**
  * The controller's schedule and the per-block skew by delayed read addresses.
  * The commit pulse that moves loaded operands into a bank.
  * The overwrite-on-first-K-tile accumulation.
  * The word layouts in the buffers, the valid/ready streams, and the round-robin partition order.
  * Runtime product sizes. The original generator fixed them when it generated the RTL.
  * A single pipeline register in the adder tree.
* **Not included:**
  * The replicated control logic that the original used to raise clock frequency.
  * Off-chip HBM2 and its controller. Their streams are ports.
  * Requantisation of C to 8 bits. The original assumes it when it computes off-chip bandwidth,
    but does not describe it.
  * Tiling of problems larger than the native size, which is left to the host.
* **The Versal ACAP accelerator** of the same work (an AI Engine array with HLS-written
  programmable-logic buffers) is a separate design and is not part of this RTL.
