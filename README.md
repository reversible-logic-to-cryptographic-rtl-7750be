# Reversible-gate arithmetic for a public-key crypto-ALU

Differential power analysis recovers a key by correlating a chip's supply
current with the data it processes. Logic that never destroys information
(reversible logic) can in principle switch without dissipating the
`kT ln 2` per erased bit, which would remove the signal such an attack
needs. This design builds the power-hungry part of a public-key
crypto-processor entirely from reversible gates. That part is the
arithmetic: long additions, multi-operand carry-save additions and
Montgomery modular multiplication. The sequencing control stays ordinary
logic, because it handles no secret data.

The RTL is a *functional* model of that gate network. Every adder, latch
and multiplexer is written as an instance of a reversible gate (TSG,
Fredkin or Feynman), with the gate's garbage outputs kept. Simulating it
checks that the reversible construction computes the right thing, and its
netlist can be counted gate by gate. A CMOS synthesis of these files will
of course not be reversible. The energy argument needs a reversible
(adiabatic / charge-recovery) circuit implementation, which is outside the
scope of RTL.

## The three gates

| gate | inputs | outputs | used for |
|---|---|---|---|
| `tsg_gate` (4x4) | A B C D | P=A, Q=A'C' ⊕ B', R=Q ⊕ D, S=Q·D ⊕ (AB ⊕ C) | full adders |
| `fredkin_gate` (3x3) | x1 x2 x3 | y1=x1, y2=x1'x2+x1x3, y3=x1x2+x1'x3 | latches, AND, 2:1 mux |
| `feynman_gate` (2x2) | a b | p=a, q=a ⊕ b | fan-out copy (b=0), inverter (b=1) |

Each gate is a bijection on its input patterns. In particular, a reversible
circuit cannot fan a wire out, so every copy of a signal (clock
distribution included) goes through a Feynman gate with b=0.

**TSG full adder** (`tsg_full_adder`). With C=0 the TSG gate reduces to
Q=A⊕B, R=A⊕B⊕Cin (sum) and S=(A⊕B)·Cin ⊕ AB (carry). A full adder is
therefore one gate with two garbage outputs (A and A⊕B). Every adder in
the design is built from this cell.

## Adders

* `rev_cpa` is a ripple-carry adder with one TSG full adder per bit. Its
  default width is 4; the ALU instantiates it at N, N+2 and N+3 bits.
* `csa_4to2` is a one-bit slice of a 4:2 compressor made of two full
  adders. The first adds i1, i2, i3, and its carry leaves the slice as
  `cout`. The second adds that sum to i4 and the neighbour's `cin`.
  Because `cout` does not depend on `cin`, a row of slices
  (`csa_4to2_row`) has no carry ripple:
  `i1+i2+i3+i4+cin = sum + 2(carry+cout)`.
* `csa_5to2` chains three full adders. It has two inter-slice carries
  (`cin1/cout1`, `cin2/cout2`); `csa_5to2_row` is the row.

## Reversible storage

A D latch obeys Q⁺ = D·E + E'·Q. This is exactly output y3 of a Fredkin
gate driven with (E, D, Q). `rev_d_latch` is that Fredkin gate, plus a
Feynman gate that copies the result so that one copy can be fed back to
the Fredkin gate's third input.

The feedback wire is where the bit is stored. A literal combinational loop
is a poor thing to give simulators and synthesis tools. The RTL therefore
writes the storage node as an `always_latch` that samples D while E=1, and
feeds that node to the Fredkin gate in place of the looped-back copy. The
latch's outputs are the same function of (E, D, stored bit) as in the gate
network.

Built from the latch:

* `rev_register` is W latches on one clock line. The default is 4 bits.
  It is transparent while `cp`=1 and holds while `cp`=0.
* `rev_ms_dff` is a master latch on CP and a slave latch on CP'. CP' comes
  from a Feynman gate with b=1. The flip-flop takes D at the **falling**
  edge of CP.
* `rev_shift_register` is a chain of `rev_ms_dff` that shifts right: `si`
  enters the top stage and `so = q[0]`. The clock is distributed by a
  chain of Feynman copy gates. A Fredkin multiplexer in front of each
  stage adds a parallel load (`load`=1 takes `pin`). This load is an
  addition of this design; the multiplier needs it.

## Montgomery multiplier (`rev_mont_mult`)

`rev_mont_mult` computes `P = X·Y·2^-N mod M` for odd M and X, Y < M. It
uses the bit-serial carry-save form of Montgomery's algorithm. S and C
together hold the running value as a redundant (carry-save) pair:

```
S = C = 0
for i = 0 .. N-1:
    S,C = S + C + x_i·Y        -- CSA 1
    S,C = S + C + s_0·M        -- CSA 2, s_0 = LSB of S after CSA 1
    S = S/2 ; C = C/2
P = S + C ; if P >= M: P = P - M
```

**Why the halving is exact.** A carry vector always has LSB 0. The parity
of S+C is therefore s_0, and adding s_0·M (M odd) makes S+C even. CSA 2's
carry vector again has LSB 0, so its sum vector's LSB is 0 too. Both
vectors can then be halved by dropping a bit, with nothing lost.

**Widths.** S+C < 2M is kept as an invariant, and each intermediate sum
is < 4M. S, C and both CSAs are therefore W = N+2 bits wide.

**Datapath.**

```
 X ─►[shift reg X]─ so = x_i ──┐
                               ▼  Fredkin AND (x_i·Y)
 [shift reg S/2]──►┌──────────────┐
 [shift reg C/2]──►│ CSA 1 (TSG)  │──► [latch reg S] [latch reg C] ──► s_0
                   └──────────────┘                │                    │
                                                   ▼                    ▼ Fredkin AND (s_0·M)
                                           ┌──────────────┐
                                           │ CSA 2 (TSG)  │── >>1 ─► hold/clear/next muxes ─► shift regs S/2, C/2
                                           └──────────────┘
 shift regs S/2, C/2 ─► rev_cpa (S+C) ─► rev_cpa (P + ~M + 1) ─► carry = P>=M ─► Fredkin mux ─► p
```

Each CSA is a row of TSG full adders. The ANDs x_i·Y and s_0·M are Fredkin
gates with one data input at 0. M is inverted by Feynman gates with b=1.
The final correction selects P or P−M with Fredkin multiplexers, controlled
by the carry-out of the subtraction.

**Two-phase clocking.** This is the part of the design that needs the most
care. There is one loop iteration per period of `cp`:

* Rising edge of `cp`: the sequencer (ordinary `always_ff`) advances.
  * The S/C latch registers, enabled by CP', close and hold CSA 1's
    result.
  * The shift registers' master latches open. CSA 2 and the next-value
    multiplexers settle into them.
* Falling edge of `cp`:
  * The masters close and the slaves pass the new S/2, C/2 (and the
    shifted X) to the outputs.
  * The S/C latches open again, so CSA 1 recomputes from the new values
    while `cp` is low.

No data path goes from a latch to another latch that is open in the same
phase, so the loop is race-free. Static timing tools and yosys still see
the loop through the opposite-phase latch pairs and report it as a
combinational loop. That report is expected.

**Sequencer.** It has four states:

* IDLE
* INIT: clears S and C and loads X (one cycle).
* RUN: N cycles.
* DONE: holds S and C, so `p` stays valid.

A `start` pulse taken on a rising edge in IDLE or DONE begins an
operation. `done` rises N+2 rising edges later. `x` is captured at start;
`y` and `m` must be held while `busy`. An assertion flags an even
modulus. `rst_n` resets only the sequencer: the datapath is cleared by
INIT.

## The crypto-ALU (`rev_crypto_alu`, top)

The top combines the reversible arithmetic into one unit. N defaults to
1024 bits, the RSA operand size. `result` is N+3 bits wide.

| `op` | result | hardware | timing |
|---|---|---|---|
| `OP_ADD` | a + b + cin | `rev_cpa` N bits | combinational, `done`=1 |
| `OP_ADD4` | a+b+c+d+cin | `csa_4to2_row` (N+3) + `rev_cpa` | combinational, `done`=1 |
| `OP_ADD5` | a+b+c+d+e+cin | `csa_5to2_row` (N+3) + `rev_cpa` | combinational, `done`=1 |
| `OP_MONTMUL` | a·b·2^-N mod m | `rev_mont_mult` | `start`, `done` after N+2 cycles |

Operands are zero-extended to N+3 bits, so the compressor rows never
produce a carry-out. `cin` enters column 0 of the rows. A modular square
is `OP_MONTMUL` with a = b. A full RSA exponentiation needs an external
square-and-multiply controller, which issues two multiplications per
exponent bit. Operands must also be converted into and out of the
Montgomery domain (multiply by R² mod m, then by 1). Neither is built here;
`tb/rev_modexp_tb.sv` shows the sequence.

## What follows the source design and what does not

Taken from the published construction:

* the TSG, Fredkin and Feynman gate equations;
* the TSG full adder;
* the 4-bit ripple adder, extended here to any width;
* the 4:2 and 5:2 slice wiring;
* the Fredkin/Feynman latch;
* the 4-bit latch register;
* the master-slave flip-flop, including CP' on the slave;
* the 4-stage right shift register;
* the multiplier's structure: two CSAs, S/C registers, s_0 taken from
  register S, and shift registers for the halving.

This design's own choices:

* the parallel load of the shift register;
* the two-phase clock scheme and the one-iteration-per-cycle timing;
* the sequencer, its latency and the handshake;
* the S/C widths (N+2);
* the final adder/subtractor form;
* the ALU's operation set and ports;
* the `always_latch` form of the latch's storage node.

The published schematic of the multiplier was not available. Its structure
was reconstructed from the description of its data flow.

Not built:

* the systolic-array alternative, with its New-gate half adder and four
  cell types, whose details are published elsewhere;
* the exponentiation loop.

## Verification

Every module has a self-checking testbench in `tb/` (`<module>_tb.sv`).
Each prints `TB_RESULT checks=<n> failures=<n>`.

* **Gates and compressor slices:** tested exhaustively. The tests also
  check reversibility (TSG outputs all distinct), the Fredkin gate's
  conservation of ones, and the absence of carry ripple through the
  compressor slices.
* **Storage elements:** compared with reference latches and edge-triggered
  models under random stimulus. The tests include data changes while a
  latch is closed and between clock edges.
* `rev_mont_mult_tb` (N=24): random moduli, plus extremes such as
  M=2^N−1, X=Y=M−1 and X=0. It checks `P·2^N ≡ X·Y (mod M)` and P < M
  with wide arithmetic, the latency N+2, and that the result holds.
* `rev_crypto_alu_tb` (N=32, 80 operations): random operations and
  operands checked against wide arithmetic. It also counts that each
  operation, an operation switch, an adder carry-out, a five-operand sum
  needing all N+3 bits, and a taken final subtraction each occur at least
  once.
* `rev_modexp_tb`: the ALU (N=128) used for modular exponentiation.
  The testbench acts as the controller: Montgomery-domain conversion,
  then left-to-right square-and-multiply with 32-bit exponents. Results
  are compared with a plain square-and-multiply.
* `rev_crypto_alu_full_tb`: the top at its default N=1024. It runs all
  three additions and two complete 1024-bit Montgomery multiplications
  (random operands, and M−1 squared). Building it with verilator takes
  several minutes because of the size of the flattened gate network; the
  simulation itself takes about a second.

To run one, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rev_pkg.sv tb/rev_crypto_alu_tb.sv --top-module rev_crypto_alu_tb
./obj_dir/Vrev_crypto_alu_tb
```

Verilator finds the other modules in `rtl/` by file name (`-y rtl` works
too). It prints UNOPTFLAT warnings for the latch loops in the multiplier.
These are expected: the loops pass through latches of opposite phase, and
the simulation settles.

## Changing it

* **Operand width:** set `N` on `rev_crypto_alu` or `rev_mont_mult`.
  Everything else follows from it. Latency is N+2 cycles.
* **Faster multiplication:** a radix-4 variant would need a 4:2 or 5:2
  compressor row in place of each CSA, to add more partial products per
  cycle. The slices are already here.
* **Registering the additions:** feed their results through a
  `rev_register` or `rev_shift_register` if a pipelined ALU is wanted.
