# Pseudo-ring memory self-test in SystemVerilog

A pseudo-ring test (π-test) checks a memory by making the memory itself behave as
a linear feedback shift register. Take K consecutive cells on some path through
the memory and treat them as the stages of a K-stage LFSR. One shift reads those
cells, combines them in a small XOR network and writes the result into the next
cell on the path. The "register" then sits one cell further on. The data never
move. Instead, a virtual register slides over them and leaves the LFSR sequence
behind it in the array. When it has crossed the whole memory (one π-iteration),
its state is compared with the state a fault-free memory would give.

A fault changes a value that the next shifts read back. Because the LFSR is linear
and its state transition is invertible, one wrong word keeps the final state wrong
through every later shift. So a single comparison at the end of the iteration
catches the fault. Nothing is compared while the test runs. This makes the
hardware cost small: an XOR block, a K-word register, an address sequencer and a
comparator.

This RTL builds three structures that use the idea:

| structure | memory | modules |
|---|---|---|
| single-port RAM test, ring or scan scheme, with signature analyzer | `sp_ram` | `prt_controller`, `addr_gen`, `glfsr_feedback`, `signature_analyzer` |
| two-port RAM test using the address registers as counters | `tp_ram` | `tp_prt` |
| register file with address and data scan chains | inside `regfile_prt` | `regfile_prt`, `glfsr_feedback` or `glfsr_feedback_lanes` |

`prt_top` puts all three side by side.

## Arithmetic: a GLFSR over GF(2^4)

For a word-oriented memory, each cell is one element of the field GF(2^m), where m
is the cell width. The virtual register is then a generalised LFSR (GLFSR) whose
stages are whole words. The default field is GF(2^4), with the generator
polynomial p(x) = 1 + x + x^4. The default feedback polynomial over that field is
q(z) = 1 + 2z + 2z^2, which gives a two-stage register. The next cell is

    w(i+2) = 2·r(i+1) ⊕ 2·r(i)        (products in GF(2^4) modulo p(x))

The multiplication by a constant folds into a few XOR gates (`gf_mul_const`).
`glfsr_feedback` is the XOR block: the XOR of `COEF[j]·stage[j]`. `stage[0]` is the
most recently written cell and `stage[K-1]` the oldest.

q(z) is primitive. Starting from the cells (0, 1), the memory fills with

    0, 1, 2, 6, 8, F, E, 2, B, 1, ...

and the pair (0, 1) comes back after exactly 255 shifts. So on a path of T + K
cells, with T a multiple of 255, the final state equals the seed. Otherwise the
expected final state is simply the sequence value at the last two positions.

The signature analyzer is also a two-stage GLFSR over GF(2^4), using
q(z) = 1 + z + 9z^2. For each word d it absorbs:

    LSW' = LSW ⊕ 9·MSW ⊕ d,   MSW' = LSW

That is the checksum register of a software version of the method. In the
function `LSW ⊕ 9·MSW`, the row is MSW and the column is LSW; its 16×16 table is
`tb/fig4_table.hex`, and the testbenches use that table as their reference.

The field (`M`, `P`), the number of stages `K` and the coefficients `COEF` are
parameters. `M = 1`, `P = 1'b1` gives an ordinary bit-wide LFSR over GF(2). For
example, `K = 4`, `COEF = 4'b1100` implements p(x) = 1 + x + x^4 on a bit-oriented
RAM.

## Single-port RAM: ring and scan schemes (`prt_controller`)

Each iteration is set by four controls, sampled at `start`:

* **polynomial**: the `COEF` parameter, fixed when the design is built. Build with
  `PROG_POLY = 1` to take the coefficients from the `coef` input at each start
  instead. That costs K general GF(2^m) multipliers (`gf_mul`,
  `glfsr_feedback_prog`) rather than constant ones.
* **seed** (`seed`): the first K cells of the path.
* **trajectory** (`traj`, from `addr_gen`): counting up, counting down, or
  pseudorandom. Pseudorandom is a maximal-length Fibonacci LFSR of width AW, with
  the all-zero state inserted so that every address is visited exactly once.
* **data inversion** (`inv_in`, `inv_out`): complement every word written and/or
  every word read. With both set, the array holds the complement of the LFSR
  sequence. An all-zero LFSR state then appears as an all-ones background. With
  only one set, the automaton becomes non-linear.

An iteration has four phases: initialise (write the seed), push (one shift per
remaining cell), unload (fill ShReg, a K-word shift register that copies the
virtual register, with the final state) and analyse (`pass = (final_state == expected)`).

The path normally covers all 2^AW cells. `last_pos` can end it earlier, at
trajectory position `last_pos`. This serves a special case. When the number of shifts, `last_pos + 1 − K`, is a multiple of the
period of q(z), a fault-free memory returns the virtual register to its seed.
Setting `cmp_init` then compares the final state with the seed and needs no
`expected` at all. For example, with the default polynomial (period 255), use
`last_pos = 2041`: that is 2040 shifts, 8 periods.

The two schemes differ in where the stages of the virtual register live.

**Ring scheme.** Only the feedback stage is a memory cell. ShReg holds the last K
words *as read back from the RAM*. For each cell t on the path:

    clock 1  write  A(t) ← XOR-block(ShReg)      (seed word for t < K)
    clock 2  read   A(t)
    clock 3  ShReg ← {ShReg, q}                  (word also goes to the signature analyzer)
    clock 4  GenA steps to A(t+1)

A cell that does not store what was written puts a wrong word into ShReg, and the
LFSR carries it to the end. An iteration over N cells takes 4N + 2 clocks, from the
edge that accepts `start` to the edge that raises `done`.

**Scan scheme.** All K stages are memory cells. Before each write the controller
re-reads the K previous cells of the path, A(t-K) to A(t-1). It keeps the last K
addresses for this. The Select logic steers each returning word into its ShReg
stage. Each shift costs K reads, one wait for the last read, one write and one
step: K + 3 clocks. The K seed cells cost 2 clocks each, and unloading re-reads
the last K cells. Total: 2K + (N−K)(K+3) + K + 3 clocks, which is 10 237 for
N = 2048, K = 2.

Because it reads every cell K times after writing it, the scan scheme exercises
read-after-write at distances of up to K cells. The ring scheme reads each cell
once, straight after its write, and relies on the signature analyzer for faults
that the virtual register may not see. In both schemes every word read (after
output inversion) goes to the signature analyzer through `rd_valid`/`rd_data`.
`prt_top` clears the analyzer when an iteration starts.

**Computing `expected`.** Let f = `inv_in ⊕ inv_out`, applied to every bit.

1. x(0) = `seed[K-1]`, …, x(K-1) = `seed[0]`.
2. For t ≥ K: x(t) = Σ COEF[j]·y(t-1-j), where y(t) = x(t) ⊕ f.
3. `expected[j]` = y(N-1-j).
4. After the iteration, cell A(t) holds x(t) ⊕ `inv_in`.

## How many faults an iteration catches

`tb/tb_fault_coverage.sv` repeats a classic experiment. It applies three iterations
to a bit-oriented 32 × 1 RAM, using the degree-2 LFSR over GF(2) (`M = 1`,
`COEF = 2'b11`, period 3). Three iterations are k + 1 for a degree-k polynomial.
The three runs are up with seed (0, 1), down with seed (0, 1), and up with seed
(1, 1). These seeds make every cell receive both a 0 and a 1.

The testbench injects one functional fault at a time. A fault counts as detected
if the final state or the signature of any of the three iterations differs from
the fault-free run. It covers seven single-cell fault models at every cell and six
coupling fault models on 64 random cell pairs each. The results:

| | single-cell faults | two-cell (coupling) faults |
|---|---|---|
| ring scheme | 167 / 224 (75 %) | 0 / 384 |
| scan scheme | 197 / 224 (88 %) | 10 / 384 (3 %) |

Stuck-at faults are always caught. In the ring scheme as built here, each cell is
read back in the clock after it is written. A cell corrupted later by a coupled
neighbour is therefore never read again before the next iteration overwrites it.
The scan scheme reads a cell up to K shifts after writing it, so it catches only
couplings between cells that lie close together on the path.

The original evaluation of the method reports an average coverage of 0.91 for
single-cell faults and 0.86 for two-cell faults. Those figures come from a
different fault list and unpublished seeds. This RTL does not reproduce the
two-cell figure. Reaching it would need reads farther from the writes than either
scheme makes here.

## Two-port RAM (`tp_ram`, `tp_prt`)

With as many ports as register stages, no ShReg is needed: both stages are read in
the same clock. The only change to an ordinary two-port RAM is that its address
registers RgAddrA and RgAddrB can count as well as load (`tp_ram`). One shift is
the march element {r(i), r(i+1), w(i+2)} and takes two clocks:

    R: port A reads i, port B reads i+1;        RgAddrB counts to i+2
    W: port B writes XOR-block(A, B) into i+2;  RgAddrA counts to i+1

The seed goes into cells 0 and 1 through both ports in one clock. Unloading reads
the last two cells. An iteration takes 2(N−2) + 4 clocks. Because the addresses
come from counters, the path is counting up or counting down (`down`). Inversion
works as in the single-port controller.

## Register file (`regfile_prt`)

The register file gets two chains:

* **Address chain.** On `addr_shift`, RgWrAddr takes `addr_in` and RgRdAddr takes
  the old RgWrAddr. The read address is therefore always the one written one
  address step earlier. `addr_out` continues the chain.
* **Data chain.** The loop is DOut → RgScan (two stages) → XOR block → DIn.
  * A clock with RdEn shifts the word at RgRdAddr into RgScan.
  * A clock with WrEn writes the XOR of RgScan's stages at RgWrAddr.

The XOR block comes in two kinds, chosen by the `XOR_TYPE` parameter
(`RF_XOR_TYPE` on `prt_top`):

* **Type 1 (default).** One GLFSR over GF(2^4) with the q(z) of the RAM tests. It
  mixes the bits of a word, so it suits faults between words.
* **Type 2.** The word is split into lanes of `LM` bits (`glfsr_feedback_lanes`).
  Each lane is its own two-stage LFSR over GF(2^LM), with its own coefficients in
  `LCOEF`, so the lanes may differ. This suits faults inside a word. With the
  default one-bit lanes and q(z) = 1 + z + z^2, the block costs one 2-input XOR
  gate per bit. That matches the method's figure of m XOR gates, which the GLFSR
  type cannot meet.

The chains have separate enables, so the register file has no sequencer. The test
sequence is prepared off-line and applied to the chain ports (`rf_*` on
`prt_top`).

A plain iteration over addresses A(0…R-1) runs as follows:

1. In ordinary mode, write x(0) and x(1) to A(0) and A(1).
2. Set `test_mode`. Load RgScan stage 0 with x(0) (`scan_load`) and shift A(1)
   into the address chain.
3. For each t ≥ 2: `addr_shift` with A(t), then RdEn, then WrEn.
4. One final `addr_shift` and RdEn leave the final state in `scan_state`.

`tb/tb_regfile_prt.sv` is a worked example.

## Top level (`prt_top`)

* **Single-port RAM.** `start`/`scheme`/`traj`/`inv_in`/`inv_out`/`seed`/`expected`/
  `cmp_init`/`last_pos`/`coef` start an iteration. All of them are sampled at
  `start`, and `coef` is used only when the design is built with `PROG_POLY = 1`.
  `done` pulses once, and `pass`, `final_state` and `signature` hold until the next start. While `busy` is high, a multiplexer gives the RAM port
  to the controller. Otherwise the RAM is an ordinary memory on `mem_en`,
  `mem_rw` (1 = write), `mem_a`, `mem_d` and `mem_q`, with read data one clock
  after the read.
* **Two-port RAM.** `tp_*` works the same way. Its ordinary ports are
  `tpa_*`/`tpb_*`: load the address register, then access.
* **Register file.** `rf_*` are its ordinary ports and its chains.

All control inputs are synchronous to `clk`. `rst_n` is an asynchronous,
active-low reset of the controllers and registers. The arrays are not reset:
every test writes a cell before reading it.

Default sizes are 2048 cells of 4 bits (1 kB) for each RAM and 32 words of 4 bits
for the register file. Every size is a parameter. The pseudorandom trajectory has
LFSR taps tabulated for widths 2 to 24.

## What follows the method, and what is this design's own

Taken from the method:

* the ring and scan schemes with their ShReg, Select and XOR block;
* GenA's three trajectories;
* the four control parameters;
* the four phases of an iteration;
* the two-port scheme that counts with the address registers and needs no ShReg;
* the register file's address chain (RgWrAddr → RgRdAddr) and data chain
  (DOut → two-stage RgScan → XOR → DIn);
* both kinds of XOR block: a GLFSR over GF(2^m), or a group of LFSR lanes;
* both polynomials and the field.

This design's own choices:

* all cycle-level timing and handshakes, and the one-clock RAM read latency;
* a parallel seed load of RgScan instead of a serial scan-in;
* `expected` given as an input: the expected state is worked out off-line;
* `last_pos`, which sets the iteration length for the Init = Fin comparison;
* the LFSR that generates the pseudorandom trajectory;
* using the checksum GLFSR as the signature analyzer;
* port B winning a same-cell write collision in `tp_ram`;
* allowing output inversion alone.

Not built:

* a run-time choice of the field polynomial p(x) (q(z) can be chosen at run time
  with `PROG_POLY = 1`);
* an IEEE 1149.1 access port;
* the software version of the test that runs on a microcontroller.

One inconsistency in the source material was resolved by computation. The worked
example of the two-stage GLFSR shows the cells 0, 1, 2, 6, F, E. The polynomial
stated with it gives 0, 1, 2, 6, 8, F, E, and the RTL follows the polynomial.

Trust: the testbenches check every module against models written independently of
the RTL:

* exhaustive GF(2^4) products;
* the printed sum table;
* the period of 255;
* every trajectory visiting every address once;
* final states, signatures and memory contents for every scheme, trajectory and
  inversion at full size;
* exact clock counts;
* detection of injected stuck-at faults;
* the fault-coverage experiment above.

Nothing here has been taken through a physical implementation.

## Files and simulation

`rtl/`: `prt_pkg` (shared enums, defaults, LFSR taps), `gf_mul_const`,
`glfsr_feedback`, `glfsr_feedback_lanes`, `addr_gen`, `sp_ram`,
`signature_analyzer`, `prt_controller`, `tp_ram`, `tp_prt`, `regfile_prt` and
`prt_top`.
`rtl/` also holds `gf_mul` and `glfsr_feedback_prog`, the run-time-polynomial
variants.

`tb/` holds:

* one self-checking testbench per module (`tb_<module>.sv`);
* the reference package `tb_gf_pkg`;
* `fault_ram`, a RAM model with an injectable stuck-at fault;
* `fault_bit_ram`, a bit RAM model with 13 functional fault models, and its
  experiment `tb_fault_coverage`;
* `tb_prt_top_rf_lanes`, the top with the lane-type XOR block in its register file;
* `fig4_table.hex`, the printed sum table.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one from the
directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_prt_top \
        -y rtl -y tb +libext+.sv rtl/prt_pkg.sv tb/tb_gf_pkg.sv tb/tb_prt_top.sv
    ./obj_dir/Vtb_prt_top

`-Wno-fatal` keeps the width warnings of the testbench models from stopping the
build. The RTL itself lints with only unused-signal and unused-parameter warnings.

`tb_prt_top` runs the whole design at its default sizes: 24 single-port iterations,
4 two-port iterations and one register file iteration, in well under a second. At
the end it checks that every mechanism occurred at least once: both schemes, all
three trajectories, every inversion setting, a pass, a reported mismatch, the
ordinary ports, both two-port directions, and an Init = Fin iteration.
