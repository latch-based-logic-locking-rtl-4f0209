# Latch-based logic locking in SystemVerilog

Logic locking hides what a chip does from the foundry that makes it. It
adds elements to the circuit that only behave correctly once a secret key is
loaded after manufacture. Latch-based logic locking does this without
touching the logic gates on the critical path. Instead it takes a group of
connected flip-flops and rebuilds each one as two level-sensitive latches.
The key decides, for every latch, which half of the clock it is transparent
in, or whether it is transparent all the time or held at zero. Extra decoy
latches, some with decoy logic in front of them, are mixed in among the
real ones.

With the right key the circuit behaves exactly like the original, clock for
clock. A wrong key moves data through the group on the wrong clock phases.
That changes how many clock cycles a value needs from input to output, or
it turns a decoy on. The result is a circuit that computes something else.
Every latch is one of four things, and an attacker who has the netlist must
work out which: a positive-phase latch, a negative-phase latch, a
path-delay decoy or a logic decoy.

This repository holds synthesizable RTL for the locking hardware:

- the per-latch key decoder;
- the programmable latch;
- the logic decoy;
- the scan test point that keeps a latch testable.

It also holds a small locked circuit that wires these parts together the
way the insertion flow would, and testbenches for all of them.

## The programmable latch and its four modes

Each latch has a small control block (`latch_cc`). It turns two key bits,
Key0 and Key1, and the system clock into the latch's enable and reset pins:

| Key0 Key1 | reset | latch enable | the latch is …                              |
|-----------|-------|--------------|---------------------------------------------|
| 0 0       | 1     | 0            | a constant 0 (logic decoy switched off)     |
| 0 1       | 0     | CLK          | a positive-phase latch (open while CLK = 1) |
| 1 0       | 0     | !CLK         | a negative-phase latch (open while CLK = 0) |
| 1 1       | 0     | 1            | a clear buffer, always open (delay decoy)   |

`prog_latch` is the latch together with its control block. The same cell
plays three roles, which differ only in their correct key:

- **Converted flip-flop.** A positive-edge flip-flop is a negative-phase
  latch (the master) followed by a positive-phase latch (the slave). The
  correct keys are `10`, then `01`.
- **Path-delay decoy.** An extra latch placed on a net that has timing
  slack. Its correct key is `11`, so it only adds a little delay.
- **Logic-decoy latch.** It stores the output of a cone of decoy logic. Its
  correct key is `00`, so it outputs 0. Its output is merged into real logic
  so that a 0 changes nothing.

## Why a wrong phase changes the function: cycle delay

The number of clock cycles a value needs to cross a group of latches is
fixed by the *phase changes* along its path. Walk a path from a launching
flip-flop to a capturing flip-flop:

1. The launching flip-flop's output counts as a positive phase, `P`.
2. Append `P` for every positive-phase latch on the path and `N` for every
   negative-phase latch. Skip clear latches. A latch held in reset breaks
   the path.
3. End with the capturing flip-flop, which is `N` (its master) and then `P`
   (its slave).
4. Count the changes between neighbouring letters. Half that count is the
   number of cycles.

The unlocked path through one converted flip-flop reads `P N P N P`. That is
four changes, so two cycles: one from the input flip-flop to the converted
one, and one from there to the output. Put both halves of the converted
flip-flop on the same phase, or make them clear, or swap them, and the
sequence collapses to `P N P`. The path then has one cycle, and the output
shows each result one clock early.

Keys that give every path the same count are equivalent. For example, a
path-delay decoy right after the positive-phase slave can be `11`, `01` or
`10` without changing the function, because neither phase adds a change.
The testbench of the locked group computes its expected latency from the
key with this rule. It does not use a hard-coded number.

In real silicon a wrong key can also break timing. A latch that is open
when its input should already be held shifts signal arrival by up to half a
cycle. A zero-delay simulation cannot show this, so only the cycle-count
and logic effects are modelled here.

## The locked group (`latch_lock_top`)

The technique transforms an existing design; it was demonstrated on cores
such as FIR and IIR filters, DES3 and AES. The RTL needs a concrete
circuit to lock, so `latch_lock_top` uses a small stand-in. The stand-in has
`LANES` lanes (default 4) of 8-bit words. Unlocked, each lane is:

```
din -> [FF] -> cl_a -> [FF] -> cl_b -> cl_c -> cl_d -> [FF] -> dout
                         |
                         +--> cl_b of the next lane
```

`cl_b` also reads the register of the previous lane. This makes the middle
registers one interconnected group. The `cl_*` functions live in
`llock_pkg` and are arbitrary mixing logic.

The locked version turns each middle register into a latch pair, L1 and
L2, with `cl_b` between them. This is where retiming would put them. It
then adds one decoy for every two real latches:

```
even lane:  [FF] - cl_a - L1 - cl_b - L2 - cl_c - DD - cl_d - [FF]
                                                   ^ path-delay decoy
odd lane:   [FF] - cl_a - L1 - cl_b - L2 -(xor)- cl_c ------ cl_d - [FF]
                          |                 ^
                          |          logic decoy latch
                          +--> cone(L1 of this lane, L2 of next lane)
```

Each latch output passes through a scan test point before it goes
anywhere else.

**Key layout.** The latches are numbered `j = 3*lane + {0: L1, 1: L2,
2: decoy}`. Latch `j` takes `key[2j]` as Key0 and `key[2j+1]` as Key1. The
correct key for the default four lanes is `24'h279279`. Each lane takes 6
bits: `6'h39` for an even lane (L1 `10`, L2 `01`, DD `11`) and `6'h09` for
an odd lane (L1 `10`, L2 `01`, decoy `00`).

**Timing.** `din` is sampled on the rising edge. With the correct key,
`dout` shows the lane's result two rising edges later, as the unlocked
circuit does. The boundary flip-flops and the latches have no reset.
Their power-up contents wash out after two cycles.

## Keeping the latches testable

A latch cannot be stitched into a scan chain as it is. Instead every latch
gets a `scan_test_point`, made of a scan register and two multiplexers:

- **Capture mux.** It sits off the data path. With `scan_en` low, the
  register loads the latch output on every rising edge. With `scan_en`
  high, it shifts one bit per clock from `scan_in` towards `scan_out`, MSB
  last.
- **Functional mux.** This is the only gate added to the data path. In test
  mode it replaces the latch output with the register contents.

All test points form one chain, latch 0 first. Shifting the whole chain
(`3 * LANES * 8` bits) reads every latch (observe) or sets every latch
output (control).

After test, scan is shut off by a one-time fuse, which this RTL does not
contain. Its state enters as `scan_fuse_blown`. When it is 1, `scan_en`,
`test_mode`, `scan_in` and `scan_out` are all forced to 0. The chain can
then neither set latch values nor show them. Without that, the chain would
expose the locked state to anyone holding an unlocked part.

## Simulation notes

- The latch output has a `#1` delay that synthesis ignores. It stands for
  the latch's clock-to-output delay. Without it, a latch that opens on a
  rising edge could pass its new value to a flip-flop that samples on that
  same edge. In zero-delay simulation that is a race, which real hardware
  resolves in favour of the old value. Keep the clock period well above the
  longest chain of open latches (at most 3 time units here). The
  testbenches use a 10-unit period.
- Nothing has an x state in a two-state simulator. The latches start with
  random contents, so checks begin after a short flush.

To run the end-to-end test with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  +libext+.sv --top-module tb_latch_lock_top rtl/llock_pkg.sv tb/tb_latch_lock_top.sv
./obj_dir/Vtb_latch_lock_top
```

The other testbenches (`tb_latch_cc`, `tb_prog_latch`, `tb_logic_decoy`,
`tb_scan_test_point`) run the same way. Each prints
`TB_RESULT checks=N failures=M` at the end.

## What the tests cover

`tb_latch_lock_top` runs the default design (no parameter overrides). It
compares `dout` with a reference model every cycle. It requires each of
these to happen at least once:

- the correct key reproduces the unlocked function;
- a path-delay decoy on either phase gives an equivalent key;
- four wrong phase assignments cut the latency to one cycle, and the output
  then differs from the unlocked function;
- a real latch or a delay decoy held in reset gives a constant output;
- a logic decoy switched on gives the value its cone predicts;
- scan reads out every latch value;
- scan drives every latch output;
- a blown fuse makes scan do nothing.

`tb_latch_lock_top_k258` runs the same checks on a 43-lane group. That group
has 129 latches, a 258-bit key and a 1032-bit scan chain, just above the
largest amount of locking the technique was evaluated with (256 key bits).
Both testbenches share their checks through `tb/tb_latch_lock_checks.svh`.

Each block-level testbench checks its block against a reference it computes
by itself: the truth table, latch transparency and hold, the cone value,
and shift, capture and control.

## Departures and limits

- **The circuit being locked.** The lanes, the `cl_*` logic, the placement
  of the decoys and the XOR merge of the logic decoy are illustrative
  choices. The scheme is meant to be applied by a tool to an existing
  netlist after retiming. That flow, with community detection to choose
  the group, latch retiming and random decoy insertion, is a synthesis
  procedure and not hardware, so it is not here.
- **Key bits per latch.** One introductory example of the technique uses a
  single key bit per latch, which only picks the phase. This RTL uses the
  full two-bit scheme with the clear and reset modes.
- **Key size.** The default key has 24 bits. The key size is `6 * LANES`,
  so sizes such as 32 or 256 bits can only be approached (36, 258 bits).
- **No latch loops.** The stand-in has no path from a latch back to
  itself. Keys that would close a transparent loop therefore cannot occur
  here, and the loop-breaking rule (at least one phase change around every
  cycle) is not exercised.
- **Word width.** The programmable latches are vectors of identical 1-bit
  latches that share one control block. A netlist-level insertion would key
  every bit separately.
- **Not included:**
  - the tamper-proof key memory;
  - the scan-disable fuse;
  - shared observation points for the added clock-gating logic;
  - an LSSD-style test scheme.
