# ADRA: a computing-in-memory macro with asymmetric dual-row activation

## The idea

Digital computing-in-memory (CiM) usually reads two rows at once by raising
both wordlines to the same gate voltage. The senseline of each column then
carries the sum of two cell currents, and two sense amplifiers turn that sum
into the OR and the AND of the two stored bits. Addition can be built from OR
and AND, but the two mixed cases (A,B) = (0,1) and (1,0) give the same current
and cannot be told apart. Anything that is not symmetric in A and B, such as
subtraction or comparison, then needs a second read.

Asymmetric dual-row activation (ADRA) raises the two wordlines to two
*different* gate voltages: the row holding operand A to VGREAD1 = 0.83 V and
the row holding operand B to VGREAD2 = 1 V. A low-resistance cell passes more
current at the higher gate voltage, so the four bit pairs give four different
senseline currents:

| A | B | senseline current      | OR | B | AND |
|---|---|------------------------|----|---|-----|
| 0 | 0 | I_HRS1 + I_HRS2        | 0  | 0 | 0   |
| 1 | 0 | I_LRS1 + I_HRS2        | 1  | 0 | 0   |
| 0 | 1 | I_HRS1 + I_LRS2        | 1  | 1 | 0   |
| 1 | 1 | I_LRS1 + I_LRS2        | 1  | 1 | 1   |

Three sense amplifiers per column, with references between neighbouring
levels, deliver OR, B and AND. One OAI gate recovers A from them. Both
operands are therefore read in one array access, and a small compute module
under each column can add *or subtract* them in the same cycle. Comparison
falls out of subtraction. The array is a 1T-FeFET non-volatile memory, but
nothing in the digital periphery depends on that.

## Organisation of the macro

`adra_cim_macro` is a ROWS x COLS array (default 1024 x 1024) storing
NW = COLS / WORD_BITS words per row (default 32 words of 32 bits). Word `w`
occupies columns `w*WORD_BITS` to `w*WORD_BITS+WORD_BITS-1`, with bit 0 in the
lowest column. Every column has its own periphery (full parallelism):

```
 request ─► adra_controller ─┬─► adra_row_decoder (1) ─┐
                             ├─► adra_row_decoder (2) ─┴► adra_wordline_driver ─► wl_mv[ROWS]
                             └─► adra_bitline_driver ──────────────────────────► rbl_mv/sl_mv[COLS]
                                                                                      │
                                             fefet_array ◄───────────────────────────┘
                                                  │ i_sl_na[COLS]
                            NW x adra_word_periphery (per column: 3 x adra_sense_amp,
                                  adra_a_decode; per word: adra_addsub of N+1
                                  adra_compute_module, adra_zero_detect)
                                                  │
                                         result registers ─► rsp_*
```

Decoder 1 feeds the VGREAD1 row (operand A, `req_row_a`); decoder 2 feeds
the VGREAD2 row (operand B, `req_row_b`). The analog parts (wordline and
bitline drivers, the FeFET array, the sense amplifiers) are behavioural
models that pass voltages in millivolts and currents in nanoamperes as
integers. Everything from the sense-amplifier outputs onwards is
synthesizable gate-level logic.

## Recovering A: the OAI gate

With OR, AND and B available, A is

    A = ~( ~(A&B) & (B | ~(A|B)) )

that is, an OAI gate fed by the complement outputs of the AND and OR
amplifiers and by the B amplifier (`adra_a_decode`). For (0,0) and (0,1) both
factors are 1 and A = 0; for (1,0) the OR factor is 0 and for (1,1) the NAND
factor is 0, so A = 1. The published form of this equation has A&~B where
~(A&B) stands here. Taken literally that version is 0 for every input, so it
cannot be what was meant. This macro uses the form above, which is the only
one built from the three sense outputs that returns A.

## The add/subtract compute module

`adra_compute_module` sits under each column. Its inputs are the sense
outputs OR, AND, B and their complements, together with SELECT and a carry
in. It works as follows:

* NOR(B, ~(A|B)) = A & ~B, which is the generate term of A + ~B.
* NOR(AND, ~(A|B)) = A ^ B. Its inverse is the propagate term of A + ~B.
* Two 2:1 multiplexers driven by SELECT pick (generate, propagate):
  (A&B, A^B) for addition (SELECT = 0), or (A&~B, ~(A^B)) for subtraction
  (SELECT = 1).
* SUM = propagate ^ CIN. CARRY is the inverted AOI21 of (propagate & CIN) and
  generate.

Compared with an adder-only cell, this costs one NOR, one inverter and two
multiplexers. The cell also brings out A ^ B, so the macro returns bitwise
XOR at no extra cost.

## Words, overflow and comparison

`adra_addsub` chains N+1 compute modules. Stage 0 takes SELECT as its carry
in: 0 for addition, and 1 for subtraction, which completes the two's
complement of B. Stage N has the same sense inputs as stage N-1. This
sign-extends both N-bit operands, so the (N+1)-bit result `rsp_sum[w]` is
always exact. Operands are signed two's complement.

For a subtraction:

* `rsp_lt[w]` is the SUM of stage N, the sign of A - B. It is 1 when A < B.
* `rsp_eq[w]` comes from `adra_zero_detect`. That block inverts the N low
  difference bits and ANDs them in a tree of N-1 two-input AND gates.
* A > B is the case where neither flag is set.

`rsp_lt` and `rsp_eq` have no meaning after an addition.

## Interface and timing

Requests use a valid/ready handshake. A request is taken in a cycle where
`req_valid && req_ready`.

| `req_op`   | rows used                  | result (one cycle later, `rsp_valid`) |
|------------|----------------------------|---------------------------------------|
| `OP_READ`  | `req_row_a` at VGREAD2     | the word on `rsp_b`                   |
| `OP_ADD`   | A = `req_row_a`, B = `req_row_b` | `rsp_a`, `rsp_b`, `rsp_and/or/xor`, `rsp_sum` = A+B |
| `OP_SUB`   | same                       | as above with `rsp_sum` = A-B, plus `rsp_lt`, `rsp_eq` |
| `OP_WRITE` | `req_row_a`, data `req_wdata` | none; takes 2 cycles                |

Reads, additions and subtractions each use one array access. The
decoders, drivers and sense amplifiers are driven directly from the
accepted request. The results are registered at the end of that cycle and
appear with `rsp_valid` in the next cycle. One such request can be taken
every cycle. A write first drives the row to VRESET (-5 V), which clears
every cell of the row. It then drives the row to VSET (3.7 V), with the
columns that must stay '0' raised to an inhibit level. During that second
cycle `req_ready` is low.

`req_word_en` selects the words taking part in a read or CiM access. Only
the bitlines of those words are driven. The others draw no current and read
as zero. This is the parallelism P = (selected words) / (words per row) of
the design, and it can range from a single word to the whole row. Writes
always write the whole row. `OP_ADD` and `OP_SUB` need two different rows,
and the controller asserts this. A request held off by `req_ready` must keep
its fields stable.

Reset (`rst_n`, active low) is synchronous. It clears the controller and the
result registers but not the array, which is non-volatile.

## The analog models

* `fefet_array` is the 1T-FeFET array. At a clock edge, a cell becomes '1'
  (low-resistance state) when its gate-source voltage is above
  VC = 2.2 V, and '0' when it is below -VC. VC is the coercive field of
  2.2 MV/cm times the 10 nm ferroelectric thickness. For a read, a column
  whose RBL - SL equals VREAD = 1 V sums the currents of its cells at
  VGREAD1 or VGREAD2. Other rows contribute nothing, because leakage is not
  modelled.
* The cell currents in `adra_pkg` (I_HRS1 = 1, I_LRS1 = 1500, I_HRS2 = 15,
  I_LRS2 = 3000 nA) are illustrative. The logic relies only on their
  ordering and on gaps above a 1 uA sense margin. The references are placed
  at the midpoints: 765, 2258 and 3750 nA.
* `adra_sense_amp` is an ideal comparator with true and complement outputs.
* `adra_wordline_driver` and `adra_bitline_driver` convert selects and the
  write phase into voltages.

The models are meant to exercise the digital periphery under
realistic-looking conditions. They do not predict energy or timing. The
evaluated voltage-sensing schemes (a precharged or discharged bitline)
change energy and leakage, not the logic, and are not modelled. Neither is
the shared, column-multiplexed periphery.

## What is taken from the design and what is chosen here

The following come from the design:

* the two-voltage activation
* the bias voltages
* the three sense references and their order
* the OAI recovery of A (with the correction above)
* the gates of the compute module and the meaning of SELECT
* the N+1-stage chain with its carry in and sign extension
* comparison by sign bit and an AND tree of N-1 gates
* the 1024 x 1024 array with 32-bit words

The following are choices made here:

* the numeric cell currents and the inhibit voltage (1.85 V)
* the reset-then-set order of the write, done in two cycles
* the valid/ready controller, the one-cycle result register and the opcode
  set
* standard reads use the VGREAD2 row and the B amplifier
* bit order within a word
* inverting the difference bits before the zero tree
* whole-row writes

The row decoders are plain behavioural decoders, because their structure is
not specified.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/adra_pkg.sv \
    tb/tb_adra_cim_macro.sv --top-module tb_adra_cim_macro -o sim
./obj_dir/sim
```

* `tb_adra_cim_macro` runs the macro end to end at 32 x 64 cells with 8-bit
  words. It uses a reference copy of the memory. It also counts that every
  mechanism occurs: reads, additions, subtractions, all three comparison
  outcomes, use of the extra stage, writes with their stall cycle, partial
  parallelism and back-to-back issue.
* `tb_adra_cim_macro_full` runs the default 1024 x 1024 macro. It writes
  three rows, then issues a read, a subtraction and an addition back to back
  and checks every word. It takes under half a minute.
* `tb_adra_workloads` runs 32-bit subtraction and comparison on 256 x 256
  and 512 x 512 arrays, sweeping the number of selected words.

To change the size, override `ROWS`, `COLS` and `WORD_BITS` on
`adra_cim_macro`. COLS must be a multiple of WORD_BITS. To change the
electrical operating point, edit the constants in `adra_pkg`. The references
follow the cell currents automatically.
