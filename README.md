# Feedback-shift-register program counters

A processor's program counter (PC) has to produce a new instruction address on every
clock cycle. The usual PC is a binary (radix-2) incrementer. On an FPGA that is a
carry chain, and its delay grows with the PC width N. When the rest of the processor
is fast, the PC's increment path can end up as the critical path.

The increment does not have to be "+1". A PC only needs to step through a long, fixed
cycle of distinct addresses. It must also be loadable (for jumps), resettable and
readable every cycle. A maximum-cycle linear feedback shift register (FSR) does this.
It visits all 2^N-1 non-zero N-bit values before it repeats. Its next state is a
shifted copy of its present state with one XOR gate on a few bits. The logic depth is
therefore one gate whatever N is, so the PC's delay stays the same as it grows wider.

The cost is that the addresses come in a pseudo-random order. Instruction k of a
straight-line program lives at address σ^k(s0): the reset address s0 with the
increment σ applied k times. An assembler that knows σ places the code accordingly.
With a small on-chip instruction memory this order does no harm. With an instruction
cache it is a problem, because consecutive instructions fall in different cache
lines. The *hybrid* PC fixes this. Its low bits are a small binary counter that steps
through one cache line in order, and its high bits are an FSR that picks the next
line.

This RTL provides both PCs: the pure FSR PC and the hybrid PC.

## Files

| file | contents |
|------|----------|
| `rtl/pc_pkg.sv` | counter-kind enum, MFSR tap table `mfsr_taps(N)` for N = 4..32 |
| `rtl/mfsr_next.sv` | N-bit MFSR increment (combinational) |
| `rtl/hybrid_next.sv` | hybrid increment: 3 radix-2 bits plus an (N-3)-bit MFSR (combinational) |
| `rtl/pc_circuit.sv` | top level: PC register, LOAD multiplexer, counter selected by `KIND` |
| `tb/tb_mfsr_next.sv` | proves maximum cycle and the structure rules for every width 4..32 |
| `tb/tb_hybrid_next.sv` | hybrid increment against a reference; full cycle of a 10-bit hybrid |
| `tb/tb_pc_circuit.sv` | end-to-end test of 10-bit hybrid and MFSR PCs, counting each mechanism |
| `tb/tb_pc_full.sv` | the default 32-bit hybrid PC through reset, runs, stalls, jumps |
| `tb/tb_pc_sweep.sv` | both PC kinds at every width 8..32, full cycles up to 16 bits |

## The PC circuit

```
              +-----------+
   pc ------->|  counter  |--- counted ---+
   ^          | (KIND)    |               |      +------------+
   |          +-----------+               +-0-\  |  PC reg    |
   |                                          MUX-->D        Q|---+--> pc
   |   data ------------------------------+-1-/  |  CE  R     |   |
   |   load ---------------------------- sel     +--^---^-----+   |
   |   enable -----------------------------------------+   |      |
   |   rst ------------------------------------------------+      |
   +--------------------------------------------------------------+
```

`pc_circuit` is a register with a clock enable and a synchronous reset. A two-way
multiplexer feeds it.

| port | dir | width | function |
|------|-----|-------|----------|
| `clk` | in | 1 | all actions happen on its rising edge |
| `rst` | in | 1 | synchronous reset to `RESET_VALUE`; works whatever `enable` is |
| `enable` | in | 1 | clock enable: the PC changes only while it is high |
| `load` | in | 1 | with `enable` high, take `data` instead of the increment |
| `data` | in | N | absolute jump target |
| `pc` | out | N | present PC, straight from the register |

There is no pipelining. `pc` takes its new value at the clock edge where the operation
is applied:

| `rst` | `enable` | `load` | `pc` after the edge |
|:-----:|:--------:|:------:|---------------------|
| 1 | x | x | `RESET_VALUE` |
| 0 | 0 | x | `pc` (stall; a `load` is ignored) |
| 0 | 1 | 1 | `data` |
| 0 | 1 | 0 | σ(`pc`) |

The only logic between the register and itself is the counter and the multiplexer.
For the MFSR PC that is one XOR and one 2:1 mux per bit. This is the constant-delay
path that motivates the design.

| parameter | default | meaning |
|-----------|---------|---------|
| `N` | 32 | PC width. The widths studied run from 8 to 32. |
| `KIND` | `PC_HYBRID` | `PC_HYBRID` or `PC_MFSR` |
| `LOW_BITS` | 3 | radix-2 bits of the hybrid PC (eight 32-bit words per 32-byte line) |
| `RESET_VALUE` | 8 for hybrid, 1 for MFSR | first address after reset; must not be in the zero line |

## The MFSR increment (`mfsr_next`)

Any FSR with a primitive characteristic polynomial would do: Fibonacci, Galois, ring
generator. This design uses the *multiple feedback shift register* (MFSR) form, which
keeps both the gate count and the wiring small:

* The N bits form a ring: `next[0] = q[N-1]` and `next[i] = q[i-1]`.
* At most two stages have an XOR in front of them. A tap `(src, dst)` means
  `next[dst] = q[dst-1] ^ q[src]`.
* No stage has more than two inputs. No flip-flop output drives more than two loads.
  There are at most two XOR gates.

The 8-bit reference counter has taps (3,1) and (6,5), with stages numbered 0..7 along
the ring:

```
next = { q6, q5, q4^q6, q3, q2, q1, q0^q3, q7 }     (bit 7 ... bit 0)
sequence from 1: 01 02 04 08 12 24 48 b2 65 ea f7 cf ...  (255 states, then 01 again)
```

### Where the tap table comes from

`pc_pkg::mfsr_taps(N)` holds one tap set per width from 4 to 32. Apart from N = 8,
each entry was found by a search. The entry for width N is the first tap set, taking
one tap before two and then (src, dst) in increasing order, whose N×N transition
matrix M over GF(2) satisfies

    M^(2^N-1) = I   and   M^((2^N-1)/p) != I  for every prime p dividing 2^N-1.

M then has order exactly 2^N-1, and F2[M] is the field GF(2^N). So every non-zero
state lies on a single cycle of length 2^N-1. This condition is the same as saying
that the characteristic polynomial of M is primitive. `tb_mfsr_next` repeats this
proof on the hardware itself. It reads M out of the circuit by applying unit vectors,
factors 2^N-1 by trial division, and exponentiates. Any other maximum-cycle tap set
can replace a table entry, for example to suit the placement on a particular FPGA.
The testbench will then prove or reject it.

### The zero address

A linear FSR maps the all-zero state to itself, so a pure MFSR PC never produces
address 0. That costs one address out of 2^N. Reset therefore goes to 1, not 0. If
the PC is loaded with 0 it stays at 0 until the next load or reset. Recovering that
one address would need a zero detector across all N bits, which brings back the
logarithmic delay the design set out to avoid.

## The hybrid increment (`hybrid_next`)

```
 pc = [ line : N-3 bits, MFSR ][ word : 3 bits, radix-2 ]
 next.word = word + 1 (mod 8)
 next.line = (word == 7) ? mfsr(line) : line
```

This combines two counters. The low counter C_8 runs on every step. The line counter
takes one step each time the low counter passes its last value. If the line counter
has a cycle of length n and the word counter a cycle of length m, the pair has a cycle
of length n·m. Here that is 8·(2^(N-3)-1) addresses. Within a line the eight words
come out in address order, so a cache line that has been fetched is used in full
before the PC leaves it. Example for N = 8 (a 5-bit MFSR with tap (0,3)):

```
08 09 0a 0b 0c 0d 0e 0f 50 51 52 53 54 55 56 57 a0 a1 ...
```

A 3-bit binary increment and a "word == 7" detector each fit in one 4-input LUT. The
hybrid therefore keeps a logic depth that does not depend on N, only slightly more
than the pure MFSR.

**The zero line.** When the MFSR part is zero it stays zero. The low bits then cycle
through the eight words of line 0 for ever. The count sequence never enters line 0,
which leaves it free for data outside the program order, such as an interrupt vector
table. That is why the hybrid resets to address 8: line 1, word 0. A jump into line 0
is allowed, but the program must jump out again within eight instructions.

## Using it in a processor

* **Straight-line code.** Place instruction k of a block that starts at address a at
  σ^k(a). σ is `mfsr_next` or `hybrid_next` at the chosen width.
* **Absolute jumps** work as usual: drive the target on `data` together with `load`
  and `enable`.
* **PC-relative branches** need "a + b", which for this counter means σ^b(a). That is
  not a cheap operation. A processor with a pure FSR PC should use absolute branch
  targets only. With the hybrid PC, an offset inside the current line is plain binary
  arithmetic on the low three bits.
* **Stalls**: drop `enable`.
* Example configurations: a 10-bit MFSR PC (`N=10, KIND=PC_MFSR`) covers 1023
  instruction words, the size of PC used in two small 16-bit soft processors. A 30-bit
  MFSR PC addresses 2^30-1 32-bit words of a 32-bit byte address space.

## Choices not fixed by the method

These parts follow the published method: the PC structure (counter, LOAD multiplexer,
register with clock enable and reset), the MFSR form and its limits of one XOR level,
fan-in 2 and fan-out 2, the 8-bit taps, the hybrid split with three radix-2 bits, and
the unused zero line. The points below are this design's own.

* **LOAD with ENABLE low is ignored.** ENABLE is the register's clock enable and LOAD
  only steers the multiplexer. A design that wants jumps during a stall has to OR the
  two signals outside.
* **Reset** is synchronous, overrides `enable`, and goes to the first non-zero
  address (see above). A register that simply clears would lock a pure MFSR PC at 0.
* **Default configuration**: hybrid, 32 bits, 3 low bits. Set `KIND = PC_MFSR` for a
  pure FSR PC.
* **Tap sets** for widths other than 8 are this design's own (see the tap-table
  section). MFSR widths outside 4..32 stop elaboration with an error. For a
  hybrid PC the limit is 7..35 bits.
* The `a_no_lockup` assertion in `pc_circuit` checks that a counting step never takes
  the PC from a non-zero line (or address) into the zero one.

What this RTL does not contain: a processor, an instruction memory or cache, and the
assembler that orders code for the FSR sequence. Radix-2 PCs and the other FSR forms
appear only as points of comparison and are not provided either.

## Simulation

Every testbench checks its own results. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/pc_pkg.sv rtl/mfsr_next.sv \
    rtl/hybrid_next.sv rtl/pc_circuit.sv tb/tb_pc_circuit.sv --top-module tb_pc_circuit
./obj_dir/Vtb_pc_circuit
```

Use the same command for `tb_pc_full` and `tb_hybrid_next`. `tb_mfsr_next` needs only
`pc_pkg.sv` and `mfsr_next.sv`.

* `tb_mfsr_next` covers all 29 widths. For each it checks linearity, that zero maps to
  zero, fan-in and fan-out of at most 2, at most two XOR gates, and that the order of
  the transition matrix is exactly 2^N-1. Widths up to 16 are also walked through
  their whole cycle. The 8-bit circuit is compared with the equations above for all
  256 states.
* `tb_hybrid_next` checks every state of a 10-bit hybrid and random states at 12 and
  32 bits. It walks the 10-bit cycle: 1016 distinct addresses, none in line 0, each
  line in word order. It also checks that line 0 traps.
* `tb_pc_circuit` runs a 10-bit hybrid PC and a 10-bit MFSR PC against a cycle-accurate
  model. It covers a full cycle of each (1016 and 1023 steps), 4000 cycles of random
  reset, load, enable and data, and the zero line and zero address. It fails if any of
  these mechanisms never occurred: reset, stall, load, load ignored, in-line step,
  line change, full wrap, zero-line trap, zero-address lock.
* `tb_pc_full` uses the default 32-bit hybrid PC. It runs 4096 and 1024 consecutive
  fetches with no repeated address and correct line order, stalls, jumps with and
  without ENABLE, a jump into line 0, and a reset during operation.
* `tb_pc_sweep` instantiates both PC kinds at every width from 8 to 32 bits. It counts
  for 65536 cycles: every instance of up to 16 bits must return to its reset address
  after exactly its cycle length, and no wider one may return at all. It then applies
  20000 cycles of random control. Every instance is compared with a reference model
  on every cycle.
