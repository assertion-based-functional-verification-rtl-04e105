# MBIST for a single-port SRAM: a hardwired March C controller with a retention pause

Embedded memories have no pins of their own, so a chip that contains them has
to test them itself. This design is a memory built-in self-test (MBIST) for a
256-word × 32-bit single-port SRAM. Its core is a small hardwired controller,
a finite-state machine with 13 states. It runs a fixed test: the March C
algorithm with an extra *pause* element. March C finds stuck-at, transition,
address-decoder and (non-linked) coupling faults in `10n` memory operations.
The pause finds data-retention faults: cells that lose their value when left
alone for a while.

The controller does not touch the data itself. It drives a handful of control
signals (`en`, `rw`, `g_patt`) into small datapath blocks that produce the
address, the data word and the memory strobes. A comparator returns one bit,
`match`, and the controller turns it into `pass`/`fail` one clock later. When
the last pass is over, it raises `done`.

The controller's state sequence, state encoding, register updates and reset
values follow a published SystemVerilog controller. The datapath blocks
around it (address counter, pattern generator, read/write generator,
comparator, test collar, memory) are described there only by what they do.
This RTL gives them the simplest form that does that job. Where this design
departs from the published controller is listed in
[Departures from the published controller](#departures-from-the-published-controller).

## The test

A *march element* applies a list of operations to every address in turn,
going either up (address 0 to n−1) or down. The algorithm here is

    { ⇕(w0); ⇑(r0,w1); ⇓(r1,w0); pause; ⇓(r0,w1); ⇑(r1,w0); ⇓(r0) }

The controller executes every element as **separate full sweeps**. It does not
interleave the operations per address. For example, the element ⇑(r0,w1) is
one state that reads 0 at every address from 0 to 255. A second state then
writes 1 at every address from 0 to 255. This gives 11 passes. Each pass is
one FSM state and lasts exactly `2**C_SIZE` clocks (256 at the default size):

| # | state  | dir  | op    | data | code | reads graded as |
|---|--------|------|-------|------|------|-----------------|
| 0 | wdn0   | down | write | 0    | 1    |                 |
| 1 | rup0   | up   | read  | 0    | 2    | F1              |
| 2 | wup1   | up   | write | 1    | 3    |                 |
| 3 | rdn1   | down | read  | 1    | 4    | F2              |
| 4 | wdna0  | down | write | 0    | 5    |                 |
| 5 | pause  | (up) | none  | –    | 6    |                 |
| 6 | rdn0   | down | read  | 0    | 7    | F3              |
| 7 | wdn1   | down | write | 1    | 8    |                 |
| 8 | rup1   | up   | read  | 1    | 9    | F4              |
| 9 | wup0   | up   | write | 0    | 10   |                 |
| 10| rdna0  | down | read  | 0    | 11   | F5              |

`s_idle` has code 0 and `s_done` code 12. A full test takes
`1 + 11·2**C_SIZE` clocks from the first clock edge that sees `t_mode` high
to the edge that enters `s_done`: 2817 clocks at the default size. Of these,
`10n` are memory operations, the cost usually quoted for March C, and `n` are
the pause.

**The pause.** The pause is one full sweep of the address counter with no
memory access. It sits between the last write of zeros (`wdna0`) and the next
read of zeros (`rdn0`). A cell that cannot hold a 0 for 256 clocks fails in
`rdn0`. The length is tied to the counter: to get a longer retention interval,
the counter would have to be made wider. Nothing else in the design sets
this length.

**What each read pass catches.** The five read passes, F1 to F5 in the table
above, form a *syndrome*. This is the set of read passes that see a mismatch,
and it tells apart the classic faults. The end-to-end testbench injects the
faults below into the memory array and checks that the syndromes come out as
in the fault table that goes with this controller:

| fault                         | F1..F5 | notes |
|-------------------------------|--------|-------|
| stuck-at-0                    | 01010  | both reads of 1 |
| stuck-at-1                    | 10101  | all three reads of 0 |
| transition 0→1 impossible     | 01010  | |
| transition 1→0 impossible     | 10101  | only if the cell held 1 before the test; from a cleared cell the first read cannot see it (00101) |
| 0 decays to 1 during the pause| 00100  | caught by `rdn0`, the read right after the pause |

Running the elements as full sweeps has a cost. A coupling fault, in which a
write to one cell disturbs another, is seen only if the disturbed cell is
read after the disturbing write and before the cell is written again. With
full sweeps, the write pass of an element rewrites every cell before the next
read pass starts. So a good part of the coupling-fault coverage that
interleaved March C has depends here on which of the two cells comes first in
the sweep. The testbench's two idempotent coupling faults (a rising write to
word 10 clears a bit of word 5, or of word 20) are each caught by one read
pass, not by several.

Address-decoder faults fare worse. Every write pass writes the same word to
all addresses. So when a write to one address also lands in a second word,
that word only ever receives the value its own write gives it anyway. The
testbench makes writes to address 60 also write word 40. No read pass sees
this (syndrome 00000). The fault table's claim that "all reads detect
coupling and address faults" therefore does not hold for this execution
order. An interleaved March C, or data backgrounds that differ per address,
would be needed to catch such faults.

## Datapath and timing

    t_mode ─┐                           ┌──────────── sys_* (system port)
            ▼                           ▼
       ┌─────────┐ cnt_ctrl ┌────────┐count ┌─────────────┐   ┌─────────┐
       │mbist_   │─────────►│addr_gen│─────►│             │   │         │
       │ctrl     │◄─────────┴────────┘      │ test_collar │──►│ sram_sp │
       │ (FSM)   │ g_patt  ┌───────────┐    │ (t_mode     │   │ 256x32  │
       │         │────────►│pattern_gen│───►│  selects)   │   │         │
       │         │ rw,en,  ┌──────┐cs,we    │             │   │         │
       │         │ hold───►│rw_gen│────────►│             │   │         │
       │         │         └──────┘ rd      └─────────────┘   └────┬────┘
       │         │ match  ┌────────────┐◄── pattern (expected)     │ rdata
       │         │◄───────│sig_analyzer│◄──────────────────────────┘
       └─────────┘        └────────────┘
        done pass fail state

One memory access happens per clock, and everything the access needs is
combinational from registers:

* `count` (the address), `en`, `rw`, `g_patt` and the state are flip-flops.
* `pattern = {32{g_patt}}`, the strobes `cs`/`we`/`rd` and the collar's
  multiplexer follow within the cycle.
* The memory writes on the clock edge that ends the cycle. Its read port is
  asynchronous, so `rdata` belongs to the address of the current cycle.
* The analyzer compares `rdata` with `pattern` in the same cycle. The
  controller registers `match` on the clock edge that ends the cycle.

So `pass`/`fail` show the result of a read one clock after it. They are not
sticky: each read overwrites them, and they keep their value through write
passes and the pause. A tester that needs a single verdict has to watch
`fail` during the whole test.

    clk        _/‾\_/‾\_/‾\_/‾\_
    count       fb | fa | f9 | f8      (rdn1, going down)
    match       1  | 0  | 1  | 1       word fa read back wrong
    fail        0  | 0  | 1  | 0       one clock later
    pass        1  | 1  | 0  | 1

The asynchronous read port is what a register-array model gives. A real SRAM
macro usually registers its output. With such a macro, `match` would arrive
one clock later. The controller would then need to grade reads with a
one-cycle delay and let each read pass run one extra clock.

## Controller interface

| signal            | dir | meaning |
|-------------------|-----|---------|
| `clk`             | in  | clock, rising edge |
| `rst`             | in  | asynchronous, active high. Puts the FSM in `s_idle`, with `en=0`, `done=0`, `pass=1`, `fail=0`, `rw=1`, `g_patt=1`, and clears the address counter. The memory contents are not reset |
| `t_mode`          | in  | test request. High in `s_idle` starts a test on the next clock. Low during a test aborts it to `s_idle`. High in `s_done` holds `done` |
| `match`           | in  | 1 when the word read this cycle equals the expected word |
| `en`              | out | high from the clock after `t_mode` until the test ends |
| `rw`              | out | 1 read, 0 write. Changes only when a pass ends |
| `g_patt`          | out | data value of the current pass |
| `hold`            | out | high during the pause. Masks every memory strobe |
| `cnt_ctrl`, `count` | out/in | commands to the address counter, and its value read back |
| `done`            | out | set on entering `s_done`, cleared when `t_mode` drops there |
| `pass`, `fail`    | out | result of the most recent read |

The controller leaves a pass on the clock at which the counter reaches the
end of its sweep: 0 going down, all ones going up. In the same clock it loads
the start value of the next pass. At the default size the counter runs
255→0 in `wdn0`, 0→255 in `rup0`, 0→255 in `wup1`, and so on. After the last
read, at address 0 in `rdna0`, the counter steps down once more and wraps to
255.

The address counter is a separate block, `addr_gen`. The controller steers
it with a 4-bit command (`mbist_pkg::cnt_ctrl_t`):

* `load` loads all ones (`load_max=1`) or zero.
* Otherwise, `step` moves the counter by one, up if `up=1`.

The controller computes the command combinationally from its state, `count`
and `t_mode`.

`mbist_ctrl` contains SystemVerilog assertions taken from the properties
written for the controller:

* `en` is low in idle and high in every pass.
* `wdn0` writes zeros.
* `pass` and `fail` are never both high.
* The pause keeps the write direction.
* Each pass has the right `rw` and data value.
* Each pass starts at 0 (up passes and the pause) or all ones (down passes).
* Every state change goes to the next state or back to `s_idle`.

They are written so that they also hold while `rst` is applied. They rely on
a reset that reaches the flip-flops as a rising edge, as any simulation of an
asynchronous reset does.

## Departures from the published controller

The published controller and its accompanying text disagree in several
places. This RTL resolves them as follows:

* **Element order and directions.** The algorithm as written elsewhere
  lists `⇑(r1,w0); ⇑(r0,w1); ⇓(r1,w0)` and the pause last. The state machine,
  and this RTL, go down, down, up and place the pause after `wdna0`.
* **Full sweeps.** A state diagram that goes with the controller suggests
  alternating read and write per address. The controller code and its
  per-state specification sweep each operation over all addresses. This RTL
  follows the code (see [The test](#the-test) for what this costs).
* **The pause does not access memory.** In the published code `en=1` and
  `rw=0` stay set during the pause, which would keep writing zeros. The
  `hold` output and its use in `rw_gen` are additions that make the pause
  really idle.
* **Abort on `t_mode`.** The published code ignores `t_mode` once a test has
  started. Here, `t_mode` falling aborts the test. The description says
  state changes happen "unless t_mode and reset signal change", and the
  collar hands the memory back to the system when `t_mode` is low.
* **`done` is cleared** when `s_done` is left. In the published code only
  reset clears it.
* **The address counter** is in `addr_gen`, not inside the controller. The
  counter sequence is unchanged.
* **Unused inputs.** The published controller has `signature` and `mem_out`
  inputs that it never reads. They are dropped here, and the comparison lives
  in `sig_analyzer`.
* **Datapath blocks are this design's own.** The blocks around the controller
  are simple implementations of their described function. These are:
  - a solid 0/1 data background;
  - plain strobe decoding;
  - an equality comparator that reports `match=1` outside reads;
  - a `t_mode`-controlled port multiplexer as the test collar;
  - a register-array memory.

## Files

| file | contents |
|------|----------|
| `rtl/mbist_pkg.sv` | state encoding `state_t`, counter command `cnt_ctrl_t`, `next_state()` |
| `rtl/mbist_ctrl.sv` | the 13-state controller, with embedded assertions |
| `rtl/addr_gen.sv` | loadable up/down address counter |
| `rtl/pattern_gen.sv` | `g_patt` → 32-bit data word |
| `rtl/rw_gen.sv` | `en`/`rw`/`hold` → `cs`/`we`/`rd` |
| `rtl/sig_analyzer.sv` | comparator → `match` |
| `rtl/test_collar.sv` | system / BIST port multiplexer |
| `rtl/sram_sp.sv` | single-port memory model, synchronous write, asynchronous read |
| `rtl/mbist_top.sv` | all of the above wired together |
| `tb/march_ref_pkg.sv` | reference table of the 11 passes, independent of the RTL |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_mbist_top.sv` | end-to-end test at the default size |

Parameters: `C_SIZE` (address bits, default 8) and `DATA_W` (word width,
default 32). The test length and the pause both scale as `2**C_SIZE`.

## Verification

Every testbench compares against values it computes itself. Each one prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if the design hangs.

* **`tb_mbist_ctrl`** checks the controller together with `addr_gen`. It runs
  two complete tests with random `match` and checks every clock against the
  pass table: state, address, `en`, `rw`, `g_patt` and `hold`, plus
  `pass`/`fail` one clock after each read. It also checks:
  - the exact test length;
  - that `done` holds while `t_mode` stays high and clears when it drops;
  - an abort in `rdn0`;
  - an asynchronous reset in `wup1`.
* **`tb_mbist_top`** runs the whole design at its default size (256 × 32) on
  a fault-free memory and with each injected fault above. A reference copy of
  the memory, with the same fault, predicts every read. Every clock it checks
  the state, the memory strobes and address, the write data and
  `pass`/`fail`. It also checks:
  - the test length;
  - the syndromes;
  - that system writes are ignored during a test;
  - that the memory is all zeros afterwards, read through the system port;
  - an abort followed by system access;
  - a reset during the pause.
  
  The testbench counts every one of these mechanisms and fails if any of them
  never occurred.
* The datapath blocks have exhaustive or randomized testbenches of their own.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/mbist_pkg.sv tb/march_ref_pkg.sv tb/tb_mbist_top.sv \
        --top-module tb_mbist_top -o sim
    obj_dir/sim

For the other blocks, swap in their testbench and top module. The
`march_ref_pkg.sv` file is needed only by `tb_mbist_ctrl` and
`tb_mbist_top`. Each testbench runs in well under a second.

What was not verified: timing on silicon or against a real SRAM macro;
address-decoder faults other than the one simulated; and the fault-coverage
claims for coupling faults beyond the two cases simulated.
