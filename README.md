# Ozone: a zero-timing-leakage execution resource — SystemVerilog model

Timing side channels leak secrets through how long code takes. The time can
depend on the code's own control flow and on data-dependent cache hits. It also
depends on contention with other threads for caches, branch predictors and
execution units. Most defences only make that variation smaller. Ozone removes
it. A short, security-sensitive piece of code runs as a special hardware thread.
That thread:

* executes a fixed instruction trace: the compiler if-converts every branch
  except fixed-count loops, and conditional stores become conditional moves;
* has the core to itself for the whole run, so no other thread can contend
  with it or interrupt it;
* reaches memory only through private, uncached scratchpads, one for
  instructions and one for data, each with a fixed access latency;
* starts from the same microarchitectural state every time. A pipeline flush
  comes first, the thread has its own registers, and its branch predictor
  always predicts taken and holds no state;
* runs for a number of cycles fixed at thread creation, which a watchdog timer
  enforces. The result is handed back only if the code finishes in the very
  cycle the timer expires. A thread that finishes early or late is terminated.

The last point makes the timing a contract, not a measurement. An invocation
always ends exactly `num_cycles` cycles after it starts. If the code does not
take exactly that long, the caller gets no result.

This repository holds RTL for the hardware that Ozone adds to a core. It does
not hold the core. The Ozone work used a simulated out-of-order x86 core, and
that core, its caches, its main branch predictor and DRAM appear here only as
ports. The compiler side (if-conversion, control-flow verification, placing
code and data in the scratchpads) is software and is not here either.

## The pieces

| Module | Role | Size at defaults |
|---|---|---|
| `ozone_pkg` | shared constants, the 80-bit context type, state and status enums | – |
| `ozone_ctrl` | the Ozone mode bit and the invocation sequencer | 2-bit state, 1 early-finish flag |
| `ozone_ctx_reg` | the 80-bit thread context and its valid bit | 81 flops |
| `ozone_wdt` | watchdog down-counter | 32 bits |
| `ozone_arch_regs` | the Ozone thread's own register set, cleared at every invoke | 16 x 64 bits |
| `ozone_bpred` | stateless always-taken predictor; blocks main-predictor updates in Ozone mode | combinational |
| `ozone_ispm` | instruction scratchpad | 32 KiB, 4096 x 64 |
| `ozone_dspm` | data scratchpad, byte-writable | 64 KiB, 8192 x 64 |
| `ozone_mem_route` | sends the core's fetch and data ports to the scratchpads (Ozone mode) or the caches (otherwise) | combinational + 4 flops |
| `ozone_top` | all of the above wired between the core, the caches and the OS | |

The 32 KiB and 64 KiB scratchpads are the sizes the cost estimate of the
original design gives for dedicated scratchpads. That estimate counts 1 mode
bit and 80 context bits (about 11 bytes) when the scratchpads are borrowed from
a cache way, and 96 KiB when they are dedicated. This RTL builds the dedicated
version. It also spends flops the estimate leaves out: the 32-bit watchdog
counter, the controller state and the result register. The Ozone register set
(1 Kib) is what the original design calls the extra thread state, which it
counts apart.

## One invocation, cycle by cycle

The OS side first calls *create*. It writes the context: `num_cycles`,
`ispm_size`, `dspm_size` and `entry_pc` (layout below). Through the host ports
of `ozone_top` (`ih_*`, `dh_*`) it zeroes and loads the scratchpads with the
code, read-only data, inputs and stack. The host ports work only outside Ozone
mode. A host request made during a run is refused, `ih_err`/`dh_err` rises one
cycle later, and memory is left unchanged.

`invoke` then starts the sequence in `ozone_ctrl`:

```
cycle   state   what happens
  0     IDLE    invoke sampled with a valid context -> mode bit set at this edge
  1..   FLUSH   flush_req held until the core answers flush_done
  F     INIT    one cycle: state_clear zeroes the Ozone registers,
                core_start (core fetches from ISPM_BASE + entry_pc next cycle),
                wdt_start loads num_cycles; pred_init only if STATIC_BP = 0
  F+1   RUN     Ozone code, cycle 1 of num_cycles
  ...
  F+N   RUN     WDT expire (cycle N): core_kill; outcome decided here
  F+N+1 IDLE    mode bit clear, result_valid pulse with status and retval
```

The flush takes as long as the previous thread needs to drain. It happens
before the watchdog starts, so it cannot change when the result appears
relative to the start of the Ozone code (`core_start`). From that edge the
answer always comes `num_cycles + 1` cycles later.

The outcome in the expiry cycle:

* `core_done` high in that very cycle, and not before: `ST_OK`, and `retval`
  takes register 0 of the Ozone register set.
* `core_done` came earlier: the core has been frozen by `core_halt` since then,
  and the result is `ST_TERMINATED`.
* `core_done` has not come at all: `ST_TERMINATED`.
* `invoke` with no context: answered at once with `ST_NOCTX`.

From the edge that sets the mode bit to the edge that clears it, `irq_mask`
and `smt_stall` are high. They tell the core to hold off interrupts and to
issue nothing from other hardware threads.

### Why an early finisher is held until expiry

The original design says only that the thread is stopped at expiry and that a
result comes back only if completion and expiry coincide. This RTL also delays
the *terminated* answer to the expiry cycle. A failing invocation then takes as
long as a passing one, and how early the code finished cannot leak through the
time of the error report.

## The thread context (80 bits)

The original design gives the context as 80 bits and lists what it must hold,
but not its layout. This RTL uses:

| bits | field | meaning |
|---|---|---|
| 79:48 | `num_cycles` | exact cycle budget; 32 bits cover RSA's 9.5 M cycles with room to spare |
| 47:32 | `ispm_size` | bytes of ISPM allocated to the thread |
| 31:15 | `dspm_size` | bytes of DSPM allocated, with stack (17 bits, so 65536 fits) |
| 14:0 | `entry_pc` | byte offset of the first instruction in the ISPM |

The sizes are the windows `ozone_mem_route` enforces. The context cannot be
changed while a run is in progress.

## Memory in Ozone mode

The scratchpads sit at fixed addresses: `ISPM_BASE = 0xF000_0000` and
`DSPM_BASE = 0xF010_0000` (`ozone_pkg`). In Ozone mode, `ozone_mem_route`
sends fetches to the ISPM and loads and stores to the DSPM, and never raises
a cache request. An address outside `[BASE, BASE + size)` of the window
allocated in the context is dropped, and `addr_fault` is high in the request
cycle. A dropped read returns zero with the usual one-cycle latency, so even a
faulting access keeps the fixed timing. The compiler places all Ozone code and
data in the scratchpads, so on correct code this never fires. Both scratchpads
answer every read in the next cycle. Outside Ozone mode, both ports go straight
to the caches and come back when the cache says `*_rvalid`.

## Branch prediction

Ozone code branches only on fixed-count loops. `ozone_bpred` predicts every
branch taken to its decoded target. The one misprediction per loop exit costs
the same every run. In Ozone mode the core's updates to its main (tournament)
predictor are gated off, so an Ozone thread neither reads nor trains state that
other threads can probe. Outside Ozone mode the main predictor's prediction and
updates pass through unchanged. With `STATIC_BP = 0`, `ozone_ctrl` raises
`pred_init` in the INIT cycle for a predictor that has state. The default
always-taken predictor needs no such step.

## Interface of `ozone_top` to a core

A core that adopts Ozone has to do the following:

* answer `flush_req` with `flush_done` once its pipeline is empty;
* on `core_start`, fetch from `ISPM_BASE + entry_pc` using the Ozone register
  ports `rf_*` instead of its own;
* give every instruction a fixed latency (the original design assumes this of
  the core);
* raise `core_done` in the cycle its last instruction completes;
* stop while `core_halt` is high, and abandon the thread on `core_kill`;
* respect `irq_mask` and `smt_stall`.

`rf_we` has an effect only in Ozone mode.

## Departures from the original design and choices made here

* The original design is given at the level of an architecture sketch and a
  simulator model. The handshakes, encodings, widths, the 64-bit scratchpad
  word, the one-cycle scratchpad latency, the base addresses and the context
  layout are this design's own.
* The Ozone register set is assumed to be 16 x 64 bits, like the x86-64 core of
  the original evaluation. Register 0 carries the return value.
* Out-of-window accesses are checked in hardware. The original design relies
  on the compiler alone.
* Only the configuration with dedicated scratchpads and one thread context is
  built. Borrowing a cache way for the scratchpads, letting normal threads use
  the scratchpads when no Ozone thread exists, and several thread contexts are
  named in the original design as options, and are not built here.
* The terminated answer is held until expiry (see above).
* The `ST_NOCTX` refusal and the host-port refusal flags are additions.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_ozone_wdt`: expiry in exactly the N-th cycle for many N; stop; restart.
* `tb_ozone_ctx_reg`: create, destroy, the lock during a run, the 80-bit width.
* `tb_ozone_ctrl`: around 35 invocations with random flush delays, budgets and
  completion cycles. It checks every control output cycle by cycle and the
  `N + 1` answer latency.
* `tb_ozone_bpred`: always-taken in Ozone mode, pass-through otherwise, update
  gating.
* `tb_ozone_ispm`, `tb_ozone_dspm`: full-size arrays against a reference model.
  Covers one-cycle latency, byte enables and host refusal.
* `tb_ozone_arch_regs`: random traffic against a model, and clear.
* `tb_ozone_mem_route`: routing, window faults, and that no cache request is
  made in Ozone mode.
* `tb_ozone_top`: end to end, at the default sizes. A small behavioural core,
  `tb/ozone_core_model.sv` with the test instruction set in
  `tb/ozone_toy_isa_pkg.sv`, runs a constant-time secret-indexed table lookup
  loaded by the testbench acting as the OS. The test covers:
  * the measured code length, 262 cycles, against a hand count;
  * 12 runs with random secrets and tables, all returning the right entry in
    exactly the same number of cycles;
  * termination when the budget is one cycle short or long, or too loose;
  * faulting loads;
  * host refusal during a run;
  * main-predictor gating;
  * cache use by the normal thread.

  It counts each mechanism and fails if any one never happens.

Five more testbenches run small versions of workloads that have been attacked
through timing:

* `tb_ozone_aes_round`: the first AES round, the target of Bernstein's cache
  attack. The four 256-entry T-tables are computed in the testbench from the
  S-box (GF(2^8) inversion plus the affine map) and loaded into the DSPM. The
  Ozone code then does the 16 secret-indexed lookups directly, with no
  masking: the fixed-latency scratchpad makes direct lookups safe. Plaintext
  byte 0 is swept over all 256 values, with two random keys for each. All 512
  runs must give the reference column words and take exactly 303 cycles.
* `tb_ozone_aes256`: AES-256 in CBC and in XTS mode. Two Ozone programs sit
  side by side in the ISPM, and the OS moves between them by re-creating the
  context with the other entry point and cycle count. Each program does the
  key expansion from the secret key itself. Every block takes 13 T-table
  rounds in a fixed-count loop and a final S-box round. CBC chains two blocks.
  XTS encrypts the sector number under the second key to get the tweak, and
  doubles the tweak in GF(2^128) between blocks with shift-and-mask code and a
  conditional move. The reference is a byte-level AES with no tables, checked
  against the AES-256 vector of FIPS-197, which also goes through the CBC
  program. Each mode runs 1024 random keys and inputs. Every run must match
  the reference and take exactly 8265 cycles (CBC) or 13277 (XTS). Those
  counts are summed from the instruction latencies of the generated code.
* `tb_ozone_rsa`: RSA private-key exponentiation, smaller than the 1024-bit
  original: a 256-bit modulus and exponent in four 64-bit limbs. It uses 4-bit
  windows from the top of the exponent. Each window costs four Montgomery
  squarings and one Montgomery multiplication by a table entry. The entry is
  chosen by reading all 16 and keeping one with conditional moves, and the
  final subtraction inside each Montgomery product is always computed. Eight
  random keys, among them all-ones and all-zero exponents, must match plain
  wide-integer square-and-multiply in exactly 318905 cycles.
* `tb_ozone_keymap`: keyboard-code-to-character mapping, as in the GDK
  library. It is a binary search turned into ten fixed halving steps with
  conditional moves, over 784 codes padded to 1024 entries. All 784 codes
  must map correctly in exactly 195 cycles.
* `tb_ozone_sha512`: SHA-512 of passwords of 1 to 128 bytes, always doing the
  work of the 128-byte case so the time does not reveal the length. The padding
  is built byte by byte with conditional moves, both 1024-bit blocks are always
  compressed, and the digest after the right block is picked at the end by
  conditional moves. The testbench derives the round constants and initial hash
  from the first 80 primes and checks a reference model against the known
  digest of "abc". One random password of each length must hash correctly in
  exactly 24362 cycles. That count is summed from the instruction latencies of
  the generated code, independent of the simulation.

The behavioural core is a test fixture and not part of the design. Its test
instruction set has no relation to the x86 code the original evaluation ran.

To run a testbench with Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_ozone_top -y rtl -y tb +libext+.sv -Irtl \
    rtl/ozone_pkg.sv tb/tb_ozone_top.sv -o sim
./obj_dir/sim
```

Replace `tb_ozone_top` with any other testbench name. Every module is
synthesizable. The scratchpads are plain arrays, so a synthesis flow infers
memories from them, or a memory macro can be put in their place.
