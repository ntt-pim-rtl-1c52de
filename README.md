# NTT-PIM: a number-theoretic transform computed inside a DRAM bank

A number-theoretic transform (NTT) is an FFT over integers modulo a prime
q. Lattice cryptography and homomorphic encryption spend much of their time
in NTTs. An NTT touches every word log N times and does very little
arithmetic per word, so on a CPU its cost is mostly memory traffic.

This design moves the NTT into a DRAM bank:
- A small **compute unit (CU)** sits next to the bank's column path and
  works on data held in **atom buffers**.
- An atom is the unit one column access moves: 32 bytes, or eight 32-bit
  coefficients.
- The bank's global sense amplifiers already hold one atom and serve as the
  *primary* buffer. A few *secondary* buffers of the same size are added.
- The memory controller turns one NTT request into ordinary DRAM commands
  (activate, precharge, column read and write into a buffer) plus two
  compute commands:
  - **C1**: a complete 8-point NTT inside one atom.
  - **C2**: eight butterflies between two atoms.

The work is organised around DRAM rows (**row-centric mapping**). A row
holds 256 coefficients (32 atoms). All butterflies of the first
log2(256) = 8 stages stay inside one row, so each row is opened once and
finished:
- C1 covers the first 3 stages, atom by atom.
- C2 covers the next 5 stages, on atom pairs within the row.

Only the later stages pair atoms from different rows. There, extra buffers
let the controller read several atoms from one row, switch rows once, read
their partners, compute, and write everything back with one more switch.
The same buffers also let reads for the next operation overlap the current
compute (**pipelining**).

The RTL contains:
- the bank extension: atom buffers, CU, and the command decoder;
- the controller side: the mapping generator and a timing-aware command
  issuer;
- a top level that takes an NTT request and drives the DRAM cell array
  through ports.

The cell array itself is unmodified DRAM. The testbenches supply it as a
behavioural model that checks every timing rule.

## The bank and its commands

One command goes out per cycle on the bank's command bus (`pim_cmd_t` in
`rtl/ntt_pim_pkg.sv`). The bank never answers: the controller knows every
latency and spaces the commands itself.

| command | fields | effect |
|---|---|---|
| ACT | row | open a row (the array's own operation) |
| PRE | - | close the open row |
| RD (CU-read) | col, buf_a | atom `col` of the open row into buffer `buf_a`, arriving CL cycles later |
| WR (CU-write) | col, buf_a | buffer `buf_a` into atom `col` of the open row |
| C1 | buf_a | 8-point NTT in place in buffer `buf_a` (15 cycles) |
| C2 | buf_a, buf_b, tw_reset | 8 butterflies between buffers `buf_a` (P) and `buf_b` (S) (10 cycles) |
| LDP | psel, phi, pdata | load 16 bits of a CU parameter (q, omega_0 or r_omega) |

How the bank handles these commands:
- Buffer 0 stands for the global sense amplifiers. Buffers 1 to NB-1 are the
  secondary buffers. The default is NB = 4.
- Any buffer can serve as either operand of a compute command.
- A read can still be in flight when the next command arrives. For each
  read, the bank keeps the destination buffer in a small FIFO until the
  data returns (`pim_bank`).

## Inside the compute unit

The CU (`compute_unit`) has five parts:
- **Butterfly unit** (`butterfly_unit`): computes x = a + w*b and
  y = a - w*b mod q. It starts one butterfly per cycle. The multiplier is a
  Montgomery multiplier with R = 2^32, so twiddles are kept in Montgomery
  form (w*2^32 mod q).
- **Twiddle generator** (`twiddle_factor_gen`): produces one twiddle per
  butterfly by repeated multiplication, so no twiddle table is stored.
- **Parameter registers** (`cu_param_regs`): hold q, omega_0 and r_omega,
  loaded 16 bits at a time. After q is loaded, four Newton iterations derive
  the Montgomery constant -q^-1 mod 2^32. After r_omega is loaded, two
  squarings derive r_omega^2 and r_omega^4.
- **Crossbar** (`cu_crossbar`): connects any word of any buffer to either
  operand register, and routes both results back to any word.
- **Sequencer**: issues the butterflies of a command and tracks hazards.

**Pipeline and latency.** A butterfly's life is:
1. Operands are selected and registered.
2. The product w*b is registered.
3. The sum and difference are written back to the buffers at the end of
   this cycle.

A word is therefore readable again three cycles after its butterfly was
issued.
- **C2** is 8 independent butterflies: issue takes 8 cycles and the last
  result lands 2 cycles later, so C2 takes 10 cycles.
- **C1** has 3 stages of 4 butterflies, and stage s+1 reads words that
  stage s wrote. An 8-bit pending mask holds back a butterfly while either
  of its operands is still in flight. With the issue order used (blocks,
  then j), this stalls once per C1, for one cycle, at the start of the
  third stage. So C1 takes 12 issue cycles + 1 stall + 2 cycles for the
  last result = 15 cycles.

Both numbers are the published latencies. The CU's `busy` output is high for
exactly these 10 or 15 cycles, counted from the cycle the command is on the
bus.

**Twiddle schedules.**
- **C2**, butterfly j: the twiddle is omega_0 * r_omega^j.
  - A twiddle block wider than one atom needs twiddles r_omega^8,
    r_omega^9, ... for the next atom pair.
  - A C2 with `tw_reset = 0` therefore continues the sequence left by the
    previous C2 instead of restarting at omega_0.
  - This saves reloading omega_0 for every atom pair of a stage.
- **C1**, stage s (span m = 2^s): butterfly j of a block uses
  omega_0 * (r_omega^(8/2m))^j.
  - The sequence restarts at omega_0 in every block of 2m words.
  - The step r_omega^(8/2m) is one of the three stored powers
    r_omega, r_omega^2 and r_omega^4.
  - With omega_0 = 1 and r_omega a primitive 8th root of unity, C1 is
    exactly the 8-point NTT of an atom in bit-reversed order.

## Mapping an NTT onto the bank (`ntt_cmd_gen`)

**Request format.**
- The request gives:
  - log2 N;
  - the first row of the polynomial;
  - q;
  - a primitive N-th root of unity w_N in Montgomery form;
  - the Montgomery one, 2^32 mod q.
- The coefficients are stored from column 0 of that row, 256 per row, in
  bit-reversed order. Bit reversal is left to software.
- The result is the natural-order cyclic NTT, X[k] = sum x[n] w_N^(nk),
  written in place.

**Parameter preparation.** At the start, the generator derives -q^-1 by
Newton iteration and computes the table w_N^(2^i) by repeated squaring.

**Command program.** The generator then emits the program in three phases:

1. **Intra-atom and intra-row, row by row.** For each row (or the whole
   polynomial if N < 256):
   - Load r_omega = w_N^(N/8) and run C1 on every atom.
   - Then for each stage s = 3 ... min(log N, 8) - 1, load
     r_omega = w_N^(N/2^(s+1)) and run C2 on all atom pairs
     2^(s-3) atoms apart.
   - The row stays open throughout.
2. **Inter-row** (N > 256): for each remaining stage, load r_omega, then
   process the pairs in ascending order.
3. **Final precharge.**

**Grouping for pipelining.** Work is issued in groups:
- **C1:** up to NB atoms per group — read all, compute all, write all.
- **C2 within a row:** up to NB/2 pairs, with reads ordered as
  lower0, upper0, lower1, upper1, ...
- **C2 across rows:** a group is at most NB/2 pairs and never wider than
  one row of lower atoms. Its order is:
  1. Read all lower atoms.
  2. Switch rows.
  3. Read all upper atoms.
  4. Compute.
  5. Write the upper atoms back while their row is open.
  6. Switch back and write the lower atoms.

  One group thus costs two row switches however many pairs it holds. This
  is why more buffers reduce the number of activations.

**Row switches.** The generator adds them itself: before a read or write to
a row that is not open, it emits PRE (if a row is open) and then ACT.

**Twiddle restarts.** A C2 restarts its twiddle sequence exactly when its
lower atom is the first atom of a twiddle block; otherwise it continues.

## Issue timing (`cmd_timer`)

The generator's commands are in program order with no timing. The issuer
holds one command at a time. It puts that command on the bus in the first
cycle in which every rule below holds:

| rule | value (cycles) |
|---|---|
| ACT after PRE | tRP = 14 |
| PRE after ACT / after the last CU-write | tRAS = 34 / tWR = 16 |
| RD/WR after ACT / after RD/WR | tRCD = 14 / tCCD = 2 |
| RD/WR/C1/C2 on a buffer after a RD into it | CL + 1 = 15 |
| RD/WR/C1/C2 on a buffer after a C1 / C2 on it | 15 / 10 |
| C1/C2 after the previous C1/C2 | 15 / 10 |
| C1/C2 after the last LDP | 8 |
| LDP after C1/C2 | 15 / 10 |

How the issuer works:
- Each rule is a down-counter, loaded at issue with the delay minus one.
- Issue is in order, but a command does not wait for earlier commands to
  complete. Reads for the next group therefore go out while the CU is still
  busy whenever their buffers are free, and that is all the pipelining
  needs.
- tWR is counted from the write command.
- Only the rules of the table above are applied. There is no
  read-to-precharge or write-to-read rule.

The DRAM timing values are parameters of the top (`T_CL`, `T_CCD`, `T_RP`,
`T_RAS`, `T_RCD`, `T_WR`). The defaults are the HBM2E values at 1200 MHz.

## Top level (`ntt_pim_top`)

The top contains three blocks: `ntt_cmd_gen` → `cmd_timer` → `pim_bank`.

Request interface:
- `req_valid` is a one-cycle pulse with the request fields
  (`req_logn`, `req_base_row`, `req_q`, `req_w_n`, `req_one_m`).
- `busy` is high until the NTT is complete.
- `done` pulses when the last command has been issued and every timing
  counter has expired, so the result is in the array.

Array interface (to the unmodified cell array):
- `dram_act`, `dram_pre`, `dram_row`: row operations.
- `dram_rd`, `dram_wr`, `dram_col`, `dram_wdata`: column operations.
- `dram_rvalid`, `dram_rdata`: read data, CL cycles after the read.

Observation:
- `cmd_bus` shows each command as it is issued.
- `cu_busy` shows when the CU is running.

Parameters: `NB` (atom buffers, default 4, at least 2), `ROWS` (default
32,768, so up to N = 2^23 in one bank) and the six DRAM timings.

## Measured latency

Every size passes the test against a direct evaluation of the transform,
and the DRAM model reports no timing violation. Measured latencies, in
microseconds at 1200 MHz unless stated:

| N | 2 buffers | 4 buffers | 6 buffers | 2 buffers, 600 MHz | 2 buffers, 300 MHz |
|---|---|---|---|---|---|
| 256 | 2.75 (3.90) | 1.94 (2.50) | 1.73 (1.94) | 3.92 | 6.87 |
| 512 | 8.64 (14.16) | 5.59 (8.33) | 4.74 (6.58) | 11.27 | 17.99 |
| 1024 | 23.59 (38.19) | 14.63 (21.62) | 12.03 (16.89) | 29.41 | 44.54 |
| 2048 | 59.80 (95.84) | 36.17 (53.03) | 29.20 (41.18) | 72.61 | 106.25 |
| 4096 | 144.86 (230.45) | 86.19 (124.95) | 68.67 (96.62) | 172.81 | 246.90 |
| 8192 | 340.26 | 200.10 | 157.93 | 400.84 | 562.69 |

Numbers in parentheses are the published ones. The published table labels
them ns, but its latency chart for the same data is in µs, and µs is the
only reading consistent with DRAM timing.

The trends match the published evaluation:
- More buffers are faster at every N.
- The gain from extra buffers grows with N, because the inter-row stages
  dominate at large N.
- A fourfold lower clock slows N = 8192 down by 1.65×. The CU cycles stretch
  but the DRAM time in nanoseconds does not.

This design is 20–40 % faster than the published numbers. Possible reasons:
- The issuer applies only the rules of the timing table above.
- The published schedule's exact grouping is not known.

The absolute numbers should therefore be read as a model result, not as a
reproduction.

For the 300 and 600 MHz columns, the DRAM timings are the 1200 MHz cycle
counts scaled by the clock and rounded up, because the DRAM's latency in
nanoseconds does not change. The CU keeps its 15- and 10-cycle latencies.

## Where this design departs from the published description

1. **Butterfly form.** The published butterfly diagram and pseudo-code
   compute P = a + b and S = (a - b)·w (the Gentleman–Sande form). Combined
   with the published stage order (small span first) and per-index twiddles,
   that form does not produce an NTT; a 4-point example shows the mismatch.
   The butterfly here is the Cooley–Tukey form, x = a + w·b and
   y = a − w·b. This form is consistent with the stated Cooley–Tukey basis
   and with bit-reversed input.
2. **C1 twiddles.** The published C1 pseudo-code keeps one running twiddle
   per stage. Here C1 restarts at omega_0 in every block and uses the step
   r_omega^(8/2m), as described above, because that is what an 8-point NTT
   needs.
3. **C2 twiddle continuation** (`tw_reset`) is an addition. Without it, each
   C2 would need its own omega_0 load.
4. **Parameter passing.** The published design places each 16-bit value in
   a global buffer shared by all banks, and the bank then loads it into a
   CU register. Here the 16 bits travel in the load command itself. The
   global buffer is existing DRAM logic shared by all banks and is not
   built.
5. **Derived constants.** The Montgomery constant and the powers of r_omega
   are derived in hardware from q and r_omega. Twiddle parameters are
   passed in Montgomery form. The published text does not say how these are
   obtained.
6. **Buffers** are flip-flops, not the 6T SRAM cells (plus inverters) the
   published area estimate assumes.
7. **Single bank**, as evaluated. Several banks working in parallel on
   independent NTTs are not modelled.
8. **Nb = 1** (the primary buffer alone) is a published baseline but is not
   supported: C2 needs two buffers, so `NB >= 2` is required.
9. **No buffer-hit shortcut between stages.** The published analysis notes
   that an atom still held in a buffer at the end of one stage could be
   reused by the next stage, saving its write and read. Here every stage
   writes all its atoms back and reads them again, which keeps the groups
   independent.
10. **Latencies** are lower than published (see above). The pipeline
   latencies of C1 and C2 match exactly.

## Files

Design files, in `rtl/`:
- `ntt_pim_pkg.sv`: widths, command word, enums, and the Montgomery,
  modular-add and Newton functions.
- `butterfly_unit.sv`, `twiddle_factor_gen.sv`, `cu_param_regs.sv`,
  `cu_crossbar.sv`, `compute_unit.sv`: the compute unit.
- `atom_buffer.sv`, `pim_bank.sv`: buffers and the bank's command decoder.
- `ntt_cmd_gen.sv`, `cmd_timer.sv`: controller side.
- `ntt_pim_top.sv`: top level.

Test files, in `tb/`:
- `tb_util_pkg.sv`: plain 64-bit reference arithmetic (two NTT-friendly
  primes, power, Montgomery conversion, bit reversal).
- `dram_bank_model.sv`: behavioural DRAM bank. It stores data, models the
  row buffer and the CL read pipeline, and counts any violation of the
  timing rules.
- `tb_<block>.sv`: one self-checking testbench per design module.
- `tb_ntt_pim_top.sv`: end-to-end test at the default parameters. It covers
  N = 8 ... 4096 with two moduli and nonzero base rows, checks every output
  coefficient, and counts that each mechanism occurred.
- `tb_ntt_workloads.sv`: the buffer-count and clock sweeps of the table
  above.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/ntt_pim_pkg.sv tb/tb_util_pkg.sv tb/tb_ntt_pim_top.sv \
    --top-module tb_ntt_pim_top -Mdir obj_top
./obj_top/Vtb_ntt_pim_top
```

To run another test, replace `tb_ntt_pim_top` with its name. Run times:
- the end-to-end test: under a second;
- the workload sweep: about 25 s, most of it compilation.

To change the number of buffers or the timing, override the top's
parameters, for example `ntt_pim_top #(.NB(6)) ...`. The mapper and the
issuer adapt to any NB ≥ 2.
