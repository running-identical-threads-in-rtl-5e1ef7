# Identical threads on a C-slow retimed core: SEU detection and on-the-fly recovery

C-slow retiming (CSR) cuts the combinational logic of a sequential design into
C slices and puts a register level (a "CR", C-slow retiming register) between
consecutive slices. The retimed circuit then holds C independent copies of the
original design. They share the logic in time slices, and each copy advances
one original clock cycle every C clock cycles ("micro-cycles"). The usual use
is throughput: C different threads on one piece of logic.

This design uses CSR for fault tolerance instead. Every copy gets the same
input, so all C threads compute the same thing and the core is a C-times
redundant system for little more than the area of one copy. A single event
upset (SEU) hits the shared logic or registers at one instant, when only one
thread is using them, so it corrupts one thread copy. Comparing the copies
detects the upset. With C = 3 a majority vote names the failing copy, and the
copy can be rewritten from a good one without stopping the design.

The RTL covers three flavours of the idea:

| core | registers | detects | names the failing copy | recovers |
|---|---|---|---|---|
| `csr_core` (standard CSR) | OR + (C-1) CR levels, state carried along | yes (consecutive threads compared) | no | no |
| `csr_rec_core` (CSRrec, C = 3) | 3 state copies R0..R2 + 2 CR levels | yes (majority decoder) | yes | yes, on the fly |
| `csr_min_core` (CSRmin) | C state copies + (C-1) partial-result levels | yes (majority decoder) | for C >= 3 | no |

`csr_top` puts one of them (CSRrec by default) between a port to a
triplicated external memory and a majority voter on the outputs.

## The logic being retimed

The method applies to any synchronous design. In the published experiments
it was applied to two third-party 32-bit processors, which are not part of
this RTL. Here a small stand-in design is retimed instead: one W-bit state
register S (W = 32) with input I and output O = S ^ I. Its next-state
function is a chain of C slices (`cl_slice`):

    x0 = stage(0, I, S)
    xk = stage(k, x(k-1), S)      k = 1 .. C-1
    S' = x(C-1)
    stage(k, a, s) = rotl(a ^ s, k + 1) + (2k + 1)

Every slice reads the state S as well as the previous partial result. That
matters for CSR: it is what makes the standard retimed core carry a copy of S
along every CR level (the "shift-register" CRs that CSRmin removes). Any
single flipped bit in a slice operand changes the slice result, so every
upset reaches the state.

## Standard CSR with a comparator (`csr_core`)

    I --> CL0 --> CR0 --> CL1 --> CR1 --> ... --> CL(C-1) --> OR --+
           ^                                                        |
           +--------------------------------------------------------+
          (S also travels CR0.s -> CR1.s -> ... to feed CL1..CL(C-1))

Each micro-cycle a different thread is in each slice. OR is loaded every
micro-cycle, each time with the result of a different thread. Two
consecutive results belong to the same original cycle unless the writing
thread is the first of its group. So the value entering OR is compared with
the value OR holds in C-1 of every C micro-cycles. The comparison is
registered, and a mismatch gives a one-cycle `seu` pulse one micro-cycle
later. The core only detects: the copies are independent, so the failing
thread stays wrong. At the top level, the output voter still masks it.

## CSRrec: three copies and on-the-fly recovery (`csr_rec_core`)

The single original register is replaced by three registers R0, R1, R2
(`rn_bank`). Each has its own write enable (its "hold"), and a read
multiplexer hands one of them to slice 0. CR0 and CR1 hold the partial
results together with the state they belong to. `recovery_fsm` drives the
enables and the multiplexer.

### Normal rotation

| phase | slice 0 reads | written at the end of the cycle | comparison |
|---|---|---|---|
| 0 | R2 | R0 | all three copies compared |
| 1 | R0 | R1 | |
| 2 | R1 | R2 | |

Each thread owns one copy. A thread reads its copy, spends two micro-cycles
in CR0 and CR1, and writes its result back into the same copy three
micro-cycles later. In a phase-0 cycle the three copies hold the same
original cycle and can be compared. The three threads of one original cycle
enter slice 0 in phases 1, 2, 0. That group of three (`grp`) is also the
index of the input word they must see.

### Detection

In every phase-0 cycle `majority_decoder` compares R0, R1 and R2. Its result
is registered: the comparison takes one micro-cycle. In the following
phase-1 cycle the FSM knows which copy, if any, is failing. A failing copy
can hold more than a wrong state. Its thread may already have carried the
wrong state into CR0/CR1 and may be about to write a wrong result again. Each
of the three cases therefore needs its own sequence, built only from the
hold signals and the read multiplexer.

### The three recovery sequences

Times are given relative to the comparison cycle `t` (phase 0).

**R2 failing.** The thread that owns R2 read its wrong state in cycle `t`.
Its wrong result would be written back into R2 at the end of `t+2`.

| cycle | phase | reads | writes | why |
|---|---|---|---|---|
| t+1 | 1 | R0 | **R1 and R2** | the good result of R1's thread also overwrites R2 |
| t+2 | 2 | R1 | **none** | R2 is held; the failing thread's result is dropped |

**R1 failing.** R1's thread is in CR1 at `t+1` and writes its wrong result
into R1 at the end of `t+1`. Then R1 would be read in `t+2`.

| cycle | phase | reads | writes | why |
|---|---|---|---|---|
| t+1 | 1 | R0 | R1 | unchanged (R1 gets the wrong value again) |
| t+2 | 2 | **R0** instead of R1 | **R2 and R1** | R1's thread continues from R0's good state; R1 is overwritten with the good result of R2's thread |

**R0 failing.** R0's thread writes its wrong result into R0 at the end of
`t`, and R0 would be read in `t+1`. Here one delay cycle is inserted.

| cycle | phase | reads | writes | why |
|---|---|---|---|---|
| t+1 | **0 again** | R2 (again) | R0 | R0 gets the good result in CR1; R2's state enters the pipeline twice |
| t+2 | 1 | R0 | R1 | rotation continues one cycle later |
| t+3 | 2 | R1 | R2 | |
| t+4 | 0 | R2 | R0 | next comparison |

In every case the copies agree again at the next comparison. The core never
stops, and no state is saved or restored. Because the threads are
identical, a good copy of one thread is a valid state for another. During
the delay cycle `grp` steps back by one, so the repeated thread sees the
same input word again. That group then takes four micro-cycles instead of
three. If two or three copies differ there is no majority. `fatal` is then
set and stays set until reset, and no recovery is tried.

The FSM has three states: normal, "hold R2 next cycle" and "fix R1 next
cycle". The R0 case needs no state, because it happens in the phase-1
cycle right after the comparison. Hardware cost over standard CSR: two more
W-bit registers, the three-way comparator, the read multiplexer and this
FSM.

## CSRmin: fewest registers (`csr_min_core`)

With identical threads, any register that holds the right original cycle can
feed a slice. CSRmin drops the CRs that carry the state along. Copy Rk feeds
slice k directly, and only the partial results are registered:

    CR0      <= CL0(I, R0)
    CRk      <= CLk(CR(k-1), Rk)            k = 1 .. C-2
    R[phase] <= CL(C-1)(CR(C-2), R(C-1))    phase = 0, 1, .., C-1, 0, ..

The write pointer steps R0, R1, ..., R(C-1), one copy per micro-cycle. The
timing works out so that a thread entering slice 0 in phase p finds, in
every later slice, a copy that still (or already) holds its original cycle.
The threads entering in phase 0 finish an original cycle while the others
start the next one. In every phase-0 cycle all copies hold the same state
and are compared. For C >= 3 the majority decoder names the failing copy.
For C = 2 only a mismatch is reported. The copies are shared between
threads, so a wrong copy soon spreads into the others. That is why CSRmin
detects but does not recover.

## Memory port and output voter

`mem_port`: every thread copy has its own section of a triplicated external
memory, so a corrupted memory word misleads only one thread. The thread id
goes into the address. With `TID_LSB = 1` (the default) it takes the least
significant bits, so the three copies of a word lie side by side and could be
read in one burst. With `TID_LSB = 0` it takes the most significant bits,
which gives three separate sections. Each incoming word is also latched and
compared with the next thread's copy of the same word. A difference gives
`in_seu`. The word is passed on unchanged: the thread that took a bad word
drifts from the others, and the core's own comparison then detects and
repairs it.

`out_voter`: each original cycle, the C threads put out C copies of the
output. The voter shifts them into a C-deep register. When `grp` changes it
votes the last C samples and puts out one word per original cycle, with
`out_fixed` set if a copy was outvoted. The outside world therefore never
sees a single failing copy, even while the core is still recovering or, for
standard CSR, while a thread stays wrong.

## Top-level interface (`csr_top`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | micro-cycle clock, asynchronous active-low reset |
| mem_addr | out | AW+2 | memory address {word, thread} (or {thread, word}) |
| mem_rdata | in | W | memory data, read asynchronously in the same cycle |
| inj_cr | in | 2 x W | XOR masks flipping CR0/CR1 bits, for fault experiments; tie to 0 |
| out_data, out_valid, out_grp | out | W, 1, AW | voted output of original cycle out_grp (pulse) |
| out_fixed, out_nomaj | out | 1 | a copy was outvoted / no majority at the output |
| seu, seu_bad | out | 1, 3 | core comparison found a difference / failing copy (pulse) |
| seu_fatal | out | 1 | no majority in the core (sticky for CSRrec) |
| rec | out | 3 | recovery of R0/R1/R2 starts (pulse) |
| in_seu | out | 1 | copies of an incoming memory word differ (pulse) |
| state | out | 3 x W | the three state copies |

Parameters: `W` = 32, `AW` = 8 (256 input words per thread copy),
`VARIANT` (`VAR_REC`, `VAR_CSR` or `VAR_MIN`, from `csr_pkg`), `TID_LSB` = 1,
and `RESET_STATE` = 0. C is 3 in the top. `csr_core` and `csr_min_core` take
any C >= 2 on their own.

Timing: one original cycle takes three micro-cycles, four if the R0
recovery inserts its delay cycle. The voted output of an original cycle
appears two micro-cycles after its last thread has left slice 0. After
reset, writes into the state registers are held off for C-1 micro-cycles so
that all threads start from `RESET_STATE`.

## What follows the published method and what is this design's own

Taken from the method: the slicing and CR structure, the comparison of
consecutive threads, the three-copy register with holds and read
multiplexer, the read/write rotation, the three recovery sequences with
their cycle timing, the one-cycle pipelined comparison, the CSRmin update
rule, the thread id in the address MSBs or LSBs, the incoming-word
comparator, and the output majority vote.

This design's own choices:
- the example logic, the widths and the memory size;
- the grouping of threads into original cycles (`grp`);
- the reset and start-up sequence;
- the asynchronous memory read;
- the sampling scheme of the voter;
- the `fatal` and no-majority flags;
- the fault-injection inputs.

Departures and limits:
- Only the stand-in logic is retimed, not a processor. Retiming a real
  design means rewriting it as slices the same way; no tool for that is
  included.
- CSRrec exists only for C = 3. Sequences for more copies are not defined
  here.
- The comparison covers the whole state. In a large design it would cover
  chosen key registers only.
- Write enables stand in for the gated clocks an ASIC would use for the
  holds.
- The alternative of clocking every other C-level on the opposite clock
  edge is not built.
- Power and area behaviour is not modelled.
- CSRmin only detects. After an upset the wrong value spreads through the
  shared copies until all of them are wrong. Its outputs cannot be trusted
  after a detection until the design restarts from a known state.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
an independent reference model (`tb/csr_ref_pkg.sv`: the original,
un-retimed design computed one original cycle at a time):

- `tb_cl_slice`, `tb_majority_decoder` (C = 3 and 5), `tb_rn_bank`,
  `tb_mem_port`, `tb_out_voter`: unit checks with random data.
- `tb_recovery_fsm`: the normal rotation and the three recovery sequences,
  cycle by cycle, written out from the tables above; also the sticky fatal
  flag.
- `tb_csr_core` and `tb_csr_min_core`, each for C = 2, 3, 4 and 5: every
  micro-cycle's output against the reference, a group rate of one per C
  micro-cycles, and detection of upsets injected into random CR levels. For
  CSRmin with C >= 3, exactly one failing copy must be named.
- `tb_csr_rec_core`: 24 upsets aimed so that R0, R1 and R2 each fail 8
  times. Each must be named correctly and recovered. The next comparison
  must come 3 micro-cycles after the detecting one (4 when R0 failed) and
  find all copies equal to the reference. A double upset must set `fatal`.
- `tb_csr_top`: end to end, at the default parameters. It runs 240
  original cycles with a triplicated memory model, 6 CR upsets and 6
  corrupted memory words. Every voted output is checked, and the test
  counts that detection, all three recoveries, the incoming-word compare
  and output outvoting each happened.
- `tb_csr_top_variants`: the top with the standard-CSR and CSRmin cores.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator 5:

    verilator --binary --timing --assert --top-module tb_csr_top \
        -Irtl -Itb -y rtl -y tb +libext+.sv rtl/csr_pkg.sv tb/csr_ref_pkg.sv tb/tb_csr_top.sv
    ./obj_dir/Vtb_csr_top

All runs finish in well under a second.

## Files

`rtl/`: `csr_pkg` (variant enum), `cl_slice`, `majority_decoder`,
`rn_bank`, `recovery_fsm`, `csr_core`, `csr_rec_core`, `csr_min_core`,
`mem_port`, `out_voter`, `csr_top`. `tb/`: `csr_ref_pkg` and one `tb_<module>`
per module, plus `tb_csr_top_variants`.
