# CiM-HE: homomorphic-encryption arithmetic inside SRAM arrays

Homomorphic encryption (here the B/FV scheme) turns every plaintext into a
pair of large polynomials. With ring degree n = 8192 and coefficients modulo
q = 2^218, a single ciphertext `c = (c[0], c[1])` is about 440 KB. A processor
spends most of its time moving those coefficients. This design does the
coefficient arithmetic where the coefficients are stored. A bank of small
SRAM arrays holds the ciphertexts, and every array computes on its own rows
with logic placed at the bit lines: sense amplifiers, adders, a shifter and
copy buffers. All arrays take the same command at once. So one command adds,
subtracts, scales or multiplies every coefficient of a ciphertext pair in
parallel.

The key to the design is data placement. Coefficients of the same degree from
different ciphertexts sit in the same columns of the same array, one
ciphertext per row. A coefficient-wise operation on two ciphertexts is then an
operation on two rows of every array. That operation is what an SRAM can do
cheaply by turning on two word lines together.

Because q is a power of two, reduction modulo q and division by powers of two
need no multiplier and no modular-reduction circuit. They are masks, flags and
shifts.

## Storage layout

| quantity | value |
|---|---|
| arrays per bank | 4096 in the published bank; 2048 by default here (`ARRAYS`, see "Parameters and sizes") |
| array size | 8 rows x 1024 columns (`ROWS`, `COLS`) |
| ciphertext rows | 6 (rows 0-5) |
| scratch rows | 2 (rows 6 and 7, 0.25 KB per array) |
| coefficient slot | 256 bits = four 64-bit words (`WORD_BITS`), enough for k = 218 |
| slots per row | 4 (`WORDS`) |
| bank size | 4 MB at 4096 arrays (2 MB at the default) |

Arrays `0 .. ARRAYS/2-1` hold `c[0]` and the rest hold `c[1]`. Row y of every
array belongs to ciphertext y. With n = 8192 and 4096 arrays this gives one
full row of the bank per ciphertext: 2 x 8192 coefficients = 4096 arrays x 4
slots, and six ciphertexts are resident at a time. At the 2048-array default
a ciphertext takes two rows (three resident), and a HomAdd is two commands,
one per row pair.

All arithmetic stays inside a 256-bit slot. Carries, shifts and flags never
cross from one coefficient to the next.

## One array, one micro-operation per cycle

`cimhe_array` is the unit of computation. Its datapath runs in this order:

```
 row decoder A ─┐
 row decoder B ─┤ (two word lines)
                ▼
   SRAM 8x1024 ──BL = AND, BLB = NOR──▶ sense amplifiers ──▶ AND / OR / NOR / XOR
                                               │                 + horizontal-OR flag per slot
                                               ▼
                              carry-select adders (g = AND, p = XOR, carry-in)
                                               ▼
               operation selector: ADD | Horiz. OR | OR (READ) | NOR (NOT)
                                               ▼
                     5-level log shifter (mask S1..S15) ──▶ OUT_bar
                                               ▼
                                 output latch (re-inverts)
                                               ▼
       IPCB: column i → column i  /  IPMB: column i → column i+F  /  constants
                                               ▼
                           write back to a row (per-slot write enables)
```

In every clock cycle the controller (`cimhe_sequencer`) issues one
micro-operation (`uop_t`). There are six kinds:

| kind | action |
|---|---|
| `U_COMPUTE` | Activate one or two rows, pick an operation, shift, and capture the result in the output latch. |
| `U_COPY` | In-place copy buffer (IPCB): write the latch back to the same columns of a destination row. |
| `U_MOVE` | In-place move buffer (IPMB): write latch column i into column i+F of the destination row. F is one slot (256 columns), so each slot moves into the next one. Slot 0 keeps its old content. |
| `U_CONST` | Bit-line drivers write the same constant to every slot of a row. The constant is 0, a single 1 at bit `pos`, or the low mask `2^pos - 1`. This is how the masks and q (= a single 1 at bit k) reach the scratch rows. |
| `U_LOADB` | Copy the latch into the controller's multiplier register b'. |
| `U_NOP` | No action. |

Writes are predicated per coefficient slot (`pred_e`). A slot can be written:

- always,
- only where its captured flag is 1,
- only where the flag is 0,
- or only where the current multiplier bit b'(i) is 1.

This is how the design realises the "if flag then subtract q" steps. No array
ever branches: every array runs exactly the same cycles, so the whole bank
stays in lock step.

### The shift mask

Each of the five shifter levels has three select bits:

- bit 3l takes column i+d, a right shift;
- bit 3l+1 takes column i−d, a left shift;
- bit 3l+2 passes column i straight through.

The level amounts d are 1, 4, 16, 32 and 64, level 0 first. Exactly one bit of
each triple must be set, and an assertion checks it. Bits shifted in are zero.
For example:

- `15'b001_001_001_001_001` is a right shift by 117.
- `SMASK_PASS` is no shift.
- `SMASK_SHL1` is a left shift by one.

The assignment of S1..S15 to the three paths is this implementation's choice.

## Primitives and their schedules

A host issues `cmd_t` commands to the bank. Each command carries:

- the primitive;
- the source rows a and b, and the destination row;
- k, where q = 2^k;
- k', where the divisor is 2^k' (`P_SCALE` only);
- one host micro-operation (`P_UOP` only).

Rows 6 and 7 (S0 and S1) are the controller's scratch. `done` pulses one cycle
after the last micro-operation.

### Reduction into [-q/2, q/2) (12 cycles)

This step ends every arithmetic primitive:

1. Write the low mask `2^k-1` to S1, AND it with the value, and copy the
   result back. This keeps the k low bits.
2. Write a single 1 at bit k−1 to S1. AND it with the value; the horizontal OR
   of the result is the sign flag of each slot.
3. Copy the value to the destination.
4. Write q to S1. Compute NOT q, then value + NOT q + 1 (value − q).
5. Write that difference to the destination, but only in the slots whose flag
   is 1.

### Primitive schedules

| primitive | schedule | cycles |
|---|---|---|
| `P_ADD` (PolyAdd; HomAdd when applied to a ciphertext row) | a+b → S0, then reduce | 14 |
| `P_SUB` (PolySub; HomSub) | NOT b → S1, then a + S1 + carry-in 1 → S0, then reduce | 16 |
| `P_REDUCE` | copy a → S0, then reduce | 14 |
| `P_SCALE` (PolyScale, round(a / 2^k')) | see below | 2 + 2·rounds + 3 + 12 |
| `P_MULT` (coefficient-wise Shift-Add) | see below | 19 + 4k |
| `P_UOP` | one host micro-operation | 1 |

**PolyScale:**

1. AND a with a 1 at bit k'−1. The horizontal OR gives the rounding flag.
2. Run right-shift rounds. Each round starts with all five levels on
   (117 bits). While that is more than the shift still needed, the largest
   active level is switched off. For example, 127 = 117 + 5 + 5, so k' = 127
   takes three rounds.
3. Add 1 in the slots whose rounding flag is set.
4. Reduce.

**Shift-Add multiplication:**

1. Read b into b'.
2. Clear the destination (out) and copy a into S0 (a').
3. Repeat k times:
   - compute out + a', and write the sum to out only in the slots whose
     b'(i) is 1;
   - shift a' left by one.
4. Reduce.

Each slot has its own multiplier, so four independent products are formed per
array.

### Polynomial multiplication (Karatsuba)

Karatsuba multiplication is a schedule of the primitives above; it has no
hardware of its own:

- split the operands with IPMB moves;
- add the halves;
- form three Shift-Add products;
- subtract;
- shift with the log shifter;
- add.

The host runs that schedule with `P_ADD`, `P_SUB`, `P_MULT` and `P_UOP`
commands. The end-to-end testbench runs the textbook toy case, A = 11 and
B = 6 with 2-bit halves. It follows these steps, ending with 66 in every
array's slot 1:

1. Align the halves by an IPMB move.
2. Form Low+High.
3. Form R1.
4. Form R2 and R3 in one `P_MULT`, because they lie in different slots.
5. Compute R1 − R3 − R2.
6. Shift by nk and 2nk.
7. Do the final additions.

A full PolyMult over 8192 coefficients also needs coefficients moved between
arrays. The bank has no such path apart from the host port, so it is not part
of this RTL.

## Interface of the bank (`cimhe_bank`, the top)

| port | direction | meaning |
|---|---|---|
| `cmd_valid`, `cmd` | in | Command broadcast to all arrays. It is accepted when `ready` is high. |
| `ready`, `done` | out | `ready`: all arrays are idle. `done`: one-cycle pulse when they finish. |
| `host_we`, `host_array`, `host_row`, `host_data` | in | Write one 1024-bit row of one array. Use it only while `ready` is high; an assertion checks this. |
| `rd_array` | in | Selects the array to read. |
| `rd_data`, `rd_flags` | out | Output latch and captured flags of the selected array. |

To read a row, issue `P_UOP` with a `U_COMPUTE` / `SEL_OR` micro-operation on
that row, then look at `rd_data`.

The host port and the command encoding belong to this implementation. In the
original system the bank sits in the L3 cache level of a CPU, and that
connection is not specified.

## Where this RTL departs from the published description

- **Multiplication loop.** The published Shift-Add listing shifts a' only when
  the multiplier bit is 0, and never after an add. That does not compute a
  product. The RTL uses the standard loop: conditionally add, then always
  shift.
- **Extra reduction step.** Reduction first ANDs with a k-bit low mask. Only
  then does it test bit k−1. Without this, sums and products wider than k bits
  would reduce wrongly. The published steps start from a value already in
  [0, q).
- **Predication instead of branching.** Flag-dependent steps are done with
  per-slot write enables. The published text has the controller choose the
  next step from the flag. With four coefficients per array and thousands of
  arrays, the flags differ from slot to slot, so predication is the
  interpretation that works.
- **Modelled, not designed, parts.**
  - The dual-word-line read is the digital equivalent: AND on BL, NOR on BLB.
    The cell-level circuit is not modelled.
  - The carry-select adder uses 64-bit blocks.
  - The IPMB offset F is one 256-bit slot.
  - How constants get into the scratch rows is not specified; here the
    bit-line drivers write them.
  - Each array has its own controller, since the controller is described
    as one of every array's peripherals; its command and micro-operation
    encodings are this design's own.
- **Bank size.** 2048 arrays by default instead of 4096, for tool memory
  (see below); the layout and every array are unchanged.
- **Scaling of negative values.** PolyScale treats the stored slot as an
  unsigned 256-bit value; the rounding rule is the published one (add 1 when
  bit k'−1 is set), but the sign of a coefficient in [-q/2, 0) is not
  handled separately.
- **Left shifts.** Left shifts are used by Shift-Add and Karatsuba. The
  shifter provides them in the same levels as right shifts.
- **Not implemented.** The host CPU, the DRAM and data movement between
  arrays.

## Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `ARRAYS` | 2048 (published: 4096) | arrays per bank |
| `ROWS` | 8 | rows per array (6 data + 2 scratch) |
| `COLS` | 1024 | columns per array |
| `WORD_BITS` | 256 | coefficient slot width, k ≤ WORD_BITS − 1 |
| `MOVE_F` | WORD_BITS | IPMB offset, a multiple of `WORD_BITS` |

k can be up to 511 (`POS_W` = 9). A larger q, such as a 438-bit modulus, needs
`WORD_BITS = 512` and then gets 2 slots per row.

The bank is `ARRAYS` copies of a 1024-bit datapath, and tools that flatten
the hierarchy pay for every copy: Verilator's lint needs about 6.7 MB per
array (3.4 GB at 512 arrays, 6.8 GB at 1024), so about 27.5 GB at 4096, and a
synthesis run of the same file adds several more. To keep lint, elaboration
and synthesis of the top together within 32 GB, the default is 2048 arrays;
set `ARRAYS = 4096` for the published bank, nothing else depends on it. A
simulation build of the full-size bank was not attempted. The largest
configuration simulated is the 4-array bank of `tb_cimhe_bank` (4 x 8 x 1024 cells, full 256-bit slots,
k = 218). Every array runs identical logic, so the array count only changes
how many copies run in parallel.

## Testbenches

Every block has a self-checking testbench in `tb/`. Each one compares against
results computed with ordinary SystemVerilog arithmetic, stops on a watchdog,
and prints `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_cimhe_row_decoder` | every address, with enable on and off |
| `tb_cimhe_sram` | single and dual row reads (AND/NOR) and per-slot writes |
| `tb_cimhe_sense_amp` | AND/OR/NOR/XOR and per-slot horizontal OR |
| `tb_cimhe_csla` | random and carry-chain sums with both carry-ins |
| `tb_cimhe_op_selector` | all four selections |
| `tb_cimhe_log_shifter` | shifts of 117, 69 and left 1, random legal masks, against `>>` and `<<` |
| `tb_cimhe_copy_move` | IPCB, IPMB, constants, predicates and host-write priority |
| `tb_cimhe_sequencer` | the exact micro-operation stream of add, scale by 2^127 (masks for 117, 5, 5), Shift-Add predication and reduction; flag capture |
| `tb_cimhe_array` | every primitive on random coefficients for several k and k', with the cycle count of each, plus an IPMB move |
| `tb_cimhe_bank` | end to end (below) |
| `tb_cimhe_mean` | the arithmetic-mean workload: six ciphertexts summed by five HomAdd commands on a 4-array bank |

`tb_cimhe_bank` is the end-to-end test on a 4-array bank. It writes two random
ciphertexts and checks every coefficient of every array after:

- HomAdd,
- HomSub,
- PolyScale by 2^127,
- the coefficient-wise product.

It then runs the toy Karatsuba multiplication. It counts the following
mechanisms, and fails if any of them never happened:

- flag-predicated subtraction taken and skipped;
- rounding up and down;
- a multi-round shift;
- IPMB moves;
- multiplier bits 0 and 1;
- all arrays finishing together.

To simulate with plain Verilator, run from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_cimhe_bank rtl/cimhe_pkg.sv tb/tb_cimhe_bank.sv
./obj_dir/Vtb_cimhe_bank +verilator+rand+reset+2
```

## Lint notes

Some warnings remain, and they are harmless:

- Parts of the micro-operation struct are not used by every block; for
  example, the array does not look at the unused kinds' fields.
- The adders' carry-outs are unused, because arithmetic is modulo the slot
  width.
- The reset is used both in logic and in assertion `disable iff` clauses.
