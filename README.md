# A transport-triggered FFT processor

This is a small programmable processor that computes complex FFTs of
2^6 to 2^14 points (64 to 16384). It is a *transport triggered architecture*
(TTA). An instruction does not name operations. It names data transports
(*moves*) on ten parallel 32-bit buses. Moving a value into a function unit's
*trigger* port starts that unit's operation. Moving a value into an *operand*
port only stores it. Reading a unit's *result* port puts its latest result on
a bus.

The FFT is a mixed radix-4/radix-2, decimation-in-time, in-place transform.
Its whole inner loop is a single instruction that keeps all ten buses busy.
The instruction runs from a small loop buffer while the instruction memory is
switched off. Every cycle, one complex sample flows through a software
pipeline:

address generator → load → complex multiply by twiddle → butterfly → store.

A 1024-point FFT takes 5137 cycles from `start` until `busy` falls.

Samples are complex numbers packed as `{im[31:16], re[15:0]}`, two's
complement, Q1.15.

## Datapath units

Every unit has a result register `r`. The latency is one cycle unless noted.
All units freeze while the global `stall` (the memory lock) is high.

| unit | module | operand port | trigger port | result |
|---|---|---|---|---|
| ADD | `fu_add` | addend | value | o + t; in the FFT it is the loop counter, `r → t` each cycle |
| SH | `fu_sh` | shift amount | value; three trigger ports: shl, shr, shru | shifted value (not used by the FFT) |
| RF | `tta_rf` | – | – | 8 × 32-bit registers; one read port (combinational) and one write port |
| AG | `fu_ag` | log2 N | linear counter c | memory address of sample c |
| TFG | `fu_tfg` | log2 N | linear counter c | twiddle factor for c, 4 cycles later; `rx2` flag |
| DLY | `fu_dly` | – | address | the address pushed 8 triggers earlier |
| CMUL | `fu_cmul` | twiddle w | sample a | a·w / 2 |
| CADD | `fu_cadd` | rx2 (from the 1-bit bus) | sample | one butterfly output per trigger |
| LSU | `lsu_sched` | write data | read address / write address | read data, 3 cycles |

### Counter-driven addressing (AG)

The counter runs through `c = 0 … M-1`, where `M = stages · N`. The FFT
has ⌈n/2⌉ stages for N = 2^n. Write `stage = c >> n`. Write `idx = c mod N`
as `{r, q}`, where `q` is the two low bits. Then:

* **Radix-4 stage s.** The address is `{r[n-3:2s], q, r[2s-1:0]}`. The two
  index bits `q` are inserted at bit position 2s. Four consecutive counter
  values therefore give the four inputs of one radix-4 butterfly.
* **Radix-2 stage.** This is the last stage, and only when n is odd. The
  address is `{q0, r, q1}`. Consecutive counter values give the two inputs of
  two radix-2 butterflies: (q1 = 0, q0 = 0/1) and (q1 = 1, q0 = 0/1).

The result is written to the same address it was read from, so the transform
is in place. The input must be stored in mixed-radix digit-reversed order:

* For odd n, the lowest bit of the sample index becomes the top address bit.
* The remaining base-4 digits are then reversed.

The output then appears in natural order. `fft_tb_pkg::in_addr()` gives the
mapping.

### Twiddle generation (TFG and ROM)

The twiddle exponent is counted in units of 2π/Nmax (Nmax = 16384):

* Radix-4 stage s: `e = q · j · Nmax / 4^(s+1)`, where `j = r mod 4^s` is the
  position inside the butterfly group.
* Radix-2 stage: `e = q0 · (2r + q1) · Nmax / N`.

The ROM (`twiddle_rom`) holds only one octant: cos and sin at 0 … π/4, which
is Nmax/8 + 1 = 2049 words of `{sin, cos}`. The TFG folds `e` into the octant
and then undoes the fold on the ROM word:

* it swaps cos and sin;
* it negates the parts that need it.

The result is `w = exp(-2πi·e/Nmax)`. The unit is a four-stage pipeline:

1. exponent;
2. octant fold and ROM address;
3. ROM read;
4. unfold.

The ROM is computed at elaboration time from `$sin`/`$cos`.

### The butterfly (CADD)

CADD receives the samples of one butterfly one per trigger, already
multiplied by their twiddles. It counts triggers modulo 4 and collects four
samples. With the next four triggers it emits the four outputs of the
previous group. This is why the adder's results lag its inputs by four
triggers.

For radix-4, output k is `Σ x_m · (-i)^(k·m)`, divided by 4. The `rx2` flag
arrives over the separate 1-bit bus. When it is set, the group is two radix-2
butterflies `(a ± b)/2` and `(c ± d)/2`.

Scaling: CMUL halves every product. In total, each radix-4 stage divides by
8 and the radix-2 stage divides by 4. An N-point transform is therefore scaled
by `8^-(n div 2) · 4^-(n mod 2)`, which keeps every intermediate value in range for
any input.

## Instruction format and interconnect

The instruction word has 133 bits:

* 32-bit immediate;
* 1 bit for the 1-bit bus move (TFG.rx2 → CADD.rx2);
* ten slots, one per bus. Each slot is a 5-bit destination code and a 5-bit
  source code.

The codes are listed in `fft_tta_pkg` (`src_e`, `dst_e`):

* Sources are the immediate, the eight unit results and the eight registers.
* Destinations are the unit input ports and four control-unit ports: jump,
  loop count, loop buffer and halt.

`tta_ic` decodes the slots into per-port write enables and data. Every bus
can reach every port. Assertions check two rules:

* at most one bus writes a port in a cycle;
* all register reads in a cycle name the same register.

## Control unit and loop buffer

`gcu` fetches one word per cycle from `imem`. A word fetched in cycle k
executes in cycle k+1. A jump has one delay slot.

Writing L to the loop-buffer port starts a loop. The next L words form a body
that runs K times in all, where K was written to the loop-count port. The
body runs in two phases:

1. The first pass runs from the instruction memory. Each word is copied into
   the 4-entry `loop_buffer`.
2. The remaining K-1 passes come from the loop buffer. During these passes the
   instruction memory is not enabled at all. This is where the low fetch
   energy of the kernel comes from. `lb_replay` shows this state.

Writing to the halt port stops the program, and `busy` falls once the
memory accesses still queued have drained.

## The FFT program

`fft_tb_pkg::build_fft_prog(n)` builds the program: 24 words for every size (the original program has 33).

| words | content |
|---|---|
| 0–3 | setup: n to AG and TFG; counter operand 1 and start value −1; K = M − 9 |
| 4–12 | prologue: the kernel's moves switched on one pipeline step at a time. Word 12 also starts the loop buffer with L = 1 |
| 13 | the kernel, executed K times from the loop buffer |
| 14–22 | epilogue: the moves switched off as the pipeline drains |
| 23 | halt |

The kernel's schedule, for counter value c moved in cycle t:

```
t   : ADD.r -> ADD.t, AG.t, TFG.t
t+1 : AG.r  -> LSUr.t, DLY.t
t+4 : LSUr.r -> CMUL.t ; TFG.r -> CMUL.o
t+5 : CMUL.r -> CADD.t ; TFG.rx2 -> CADD.rx2 (1-bit bus)
t+9 : CADD.r -> LSUw.o ; DLY.r -> LSUw.t
```

There is one subtlety at the end of the program:

* CADD is triggered four extra times to flush its last group.
* DLY keeps shifting until the last store address has come out.

The run takes `4 + 9 + (M − 9) + 9 + 1 + 3` cycles. The final 3 cycles are
the fetch latency plus draining the write queue.

A stage reads addresses that the previous stage may still be writing. Every
sample is stored 9 cycles after it is read. Its next read, in the next stage,
comes many cycles later. The testbenches check every size from 64 to 16384
points, so no hazard goes unnoticed.

## Memory system

### Pairing scheduler (`lsu_sched`)

The load and store units do not access memory one word at a time. The
scheduler holds the first read of a pair until the second read arrives in the
next cycle. It then issues both reads as one request. The result of the first
read is delivered 3 cycles after its trigger, and the second is delivered
right behind it. Writes are paired the same way.

A read pair has priority over a write pair. A completed write pair waits in a
two-entry queue while a read pair uses the memory. `wq_wait` shows this
state. An assertion checks that the queue never overflows.

This 3-cycle read latency holds only when reads come in consecutive pairs, as
they do in the FFT kernel.

### Parallel memory logic (`par_mem`)

The data memory consists of two single-port modules. A sample address goes to
module `^addr` (the XOR of all its bits) at word `addr >> 1`.

Every FFT butterfly touches addresses that differ in one base-4 digit, so the
pairs the scheduler forms normally fall in different modules. When both
accesses of a pair fall in the same module, `par_mem` raises the global
`lock` for one cycle and serves the two accesses one after the other:
port A first, then B. The whole core freezes during the lock. `par_mem` holds
the read outputs so that the frozen pipeline sees stable data. With the
kernel above, no conflict occurs in any FFT size. Locks do occur in the mixed
test program of the end-to-end testbench.

### Data memory banks (`dmem_bank`, `dmem_block`)

Each module holds 8192 words, built from nine blocks of 32, 32, 64, … and
4096 words. An access enables only the block its address falls in, so small
FFTs never wake the large blocks.

Each block is a plain synchronous array:

* data read in one cycle is available in the next cycle;
* the output holds while the block is idle or written.

In silicon these blocks would be SRAM macros.

### Host access

While `busy` is low, the host ports `h_dmem_*` access the data memory through
port A of `par_mem`, using sample addresses. The host ports `h_imem_*` load
the program.

## Top level

`fft_tta_top` (parameters: `LOG2_NMAX = 14`, `IMEM_AW = 6`) connects
everything. To run an FFT:

1. Load the program through `h_imem_*`.
2. Store the samples, digit-reversed, through `h_dmem_*`.
3. Pulse `start` and wait for `busy` to fall.
4. Read the results in natural order.

Four status outputs are there for observation: `lock`, `imem_fetch`,
`lb_replay` and `rx2_stage`.

## Simulation

Each unit has a self-checking testbench `tb/tb_<module>.sv`. Each compares
against values computed independently in the bench and ends with a
`TB_RESULT checks=… failures=…` line.

The end-to-end bench logic is in `tb/fft_bench.sv`, with program helpers in
`tb/fft_tb_pkg.sv`. Two top-level benches use it:

* **`tb_fft_tta_top`**: `LOG2_NMAX = 10`, all sizes 64…1024. It runs these
  checks:
  * a mixed program that exercises SH, RF, a jump delay slot, memory-conflict
    locks and a write-queue wait;
  * FFTs of a tone and of random data, compared with a direct DFT
    (tolerance ±4 LSB) and with the exact cycle count;
  * a count of each mechanism (lock, replay with the instruction memory idle,
    radix-2 stage, write-queue wait), failing if one never occurs.
* **`tb_fft_tta_full`**: the top at its default parameters, with
  4096-, 8192- and 16384-point FFTs.

With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_fft_tta_top rtl/fft_tta_pkg.sv tb/fft_tb_pkg.sv \
  tb/tb_fft_tta_top.sv -o sim
./obj_dir/sim
```

Replace the top-module name to run any other bench. The package files must be
given first. `-Wno-fatal` keeps Verilator's width and style lint warnings from
stopping the build.

## Where this design departs from the original description

These points follow from choices made here, not from the processor it is
modelled on:

* **Instruction word.** This design uses 133 bits with a plain slot encoding.
  The original encoding was much denser (51 bits), because its sockets connect
  only some buses. Here every bus reaches every port.
* **Program length.** The prologue and epilogue are 9 instructions each
  (13 in the original), and setup is 4 instructions (6 in the original).
  This comes from this design's unit latencies. The kernel is still one
  instruction. A 1024-point FFT takes 5137 cycles, against 5130.
* **Butterfly row.** One row of the radix-4 butterfly table in the original
  description (output 1) is not a DFT-4 row as printed. The standard row
  `a − ib − c + id` is used.
* **Memory module selection.** The module is chosen by the parity of the
  address, taken here as the XOR of all its bits. The original only says
  "parity". Because the address generator only permutes counter bits, it
  keeps this parity, so consecutive counter values always fall in different
  modules. Each conflict costs one lock cycle.
* **Widths and depths not given in the original, chosen here:**
  * DLY depth 8;
  * loop buffer of 4 entries;
  * instruction memory of 64 words;
  * scheduler read latency 3;
  * twiddle word format.
* **Additions.** The halt port and the host ports are additions. The optional
  switch that turns the pairing scheduler off is not built.
* **Arithmetic.** It truncates; it does not round. Results of the simulated
  FFTs are within 2 LSB of the scaled exact DFT.
* **Not modelled.** Power, area and the SRAM energy models of the original
  evaluation. The memory blocks are behavioural arrays of the sizes given.
