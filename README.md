# Bit-parallel in-memory computing in a 6T SRAM with reconfigurable precision

This is synthesizable SystemVerilog for an SRAM that computes on its own
contents. The cells are ordinary 6T cells. Two word lines can be raised at the
same time, and the two bitlines of every column then deliver `A AND B` and
`NOR(A, B)` of the two stored bits. A small column circuit turns those two
values into logic results, a full-adder sum and a carry. It also passes a
carry and a shifted sum to its left neighbour. So a whole word is added in one
access, with the carry rippling across the columns ("bit-parallel"), instead of
one bit per cycle ("bit-serial").

Subtraction takes two accesses: a NOT, then an add with carry-in 1. An N-bit
multiplication takes N+2 accesses. It uses a left-shift add-and-shift
algorithm that the column circuit runs in one access per multiplier bit.
Elements can be 2, 4 or 8 bits wide. The precision is set by where the carry
chain is cut.

The memory has four banks. Each bank is a 128 x 128 array with 4:1 column
interleaving, which gives 32-bit words. Below the main array sit three extra
"dummy" rows for intermediate results, and a bitline separator between the
two. The column circuits sit below the dummy rows.

The circuit techniques that make this fast in silicon are analog and are not
part of this RTL:

- a short, fully driven word-line pulse, which avoids read disturbance;
- a bitline booster, which finishes the small discharge the short pulse leaves;
- single-ended sense amplifiers;
- self-timed phase control.

The RTL models their logic result: a fully resolved bitline. One
read–compute–write-back access counts as one clock cycle.

## 1. What one access computes

A cell storing 0 pulls down BLT, and a cell storing 1 pulls down BLB. With the
word lines of rows A and B raised, every column therefore senses:

| word lines | BLT (`sa_q`) | BLB |
|---|---|---|
| none | 1 | 1 |
| one (row A) | A | ~A |
| two (rows A, B) | A & B | ~(A \| B) |

`sram_array` models exactly this as a wired-AND over the raised rows. The
write happens at the rising clock edge of the same cycle, into the row chosen
for write-back. Only the addressed column of each group of four is written.

## 2. The Y-path: from AND/NOR to sum, carry and logic

Each group of four interleaved columns has one column peripheral unit
(`ypath`), so a bank has 32. Y-path `j` handles bit `j` of the word. Its core
is `fa_logics`, a transmission-gate adder. Both carry candidates and both sum
candidates exist before the carry arrives, and a switch control `LSEL` picks
between them:

```
A|B   = ~NOR            XNOR = AND | NOR        XOR = ~XNOR
C[N]  = LSEL ? A|B  : AND         (~C[N] is its inverse)
S[N]  = LSEL ? XNOR : XOR
```

There are two ways to drive `LSEL`:

- **Carry-in.** `LSEL` is the carry `C[N-1]` from the Y-path on the right.
  `C[N]` and `S[N]` are then the full-adder carry and sum. The carry only
  steers switches, which is why the ripple is fast.
- **Constant.** `LSEL` is the constant `LogicSEL`. `C`, `~C` and `S` then give
  AND/OR, NAND/NOR and XOR/XNOR. With one word line they give A, ~A and 0,
  which provide COPY, NOT and a row of zeros.

Three multiplexers and one flip-flop complete the Y-path:

| mux | selects | used by |
|---|---|---|
| MX2 | `LSEL` = carry `C[N-1]` or `LogicSEL` | arithmetic / logic |
| MX0 | `S[N]` passed left = FA sum, or the flip-flop (multiplier bit 0) | MULT |
| MX1 | write-back = Logic (`C`, `~C` or `S`), Add (own sum), Shift (`C[N-1]`), Add&Shift (`S[N-1]`) | every op |

A shift works as follows. With one word line and `LogicSEL = 0`, `C[N]` is the
column's own bit. MX1 of the left neighbour writes back `C[N-1]`, so the word
moves left by one bit. Add-and-shift works the same way with the sum: every
column writes back the sum of its right neighbour.

The flip-flop captures `S[N-1]` on every add-and-shift cycle. In silicon it
holds that value between the compute phase and the write-back phase of one
access. Here one access is one clock cycle, so the write-back takes `S[N-1]`
directly, and the flip-flop keeps the same value for the next step. It
therefore always holds the accumulator bit just written into this column,
which is what multiplication needs (section 4).

## 3. Precision: cutting the chain

The bank connects `C[N-1]`/`S[N-1]` of Y-path `j` to `C[N]`/`S[N]` of Y-path
`j-1`, except where `j` is a multiple of the segment length `seg`. At those
points the carry-in is the micro-op's `cin`: 0 normally, and 1 for the second
cycle of SUB. The shifted-in sum there is 0.

| command | seg | elements per 32-bit word |
|---|---|---|
| ADD, SUB, SHL, ADDSHIFT at N bits | N | 32/N (16, 8, 4) |
| MULT at N bits | 2N | 32/(2N) products (8, 4, 2) |

A product is 2N bits wide. Its operands are stored as N-bit values
zero-extended in 2N-bit fields: the multiplier in one row and the multiplicand
in another. The upper N bits of each field must be zero. The largest supported
precision is 8 bits, so the longest chain is 16 Y-paths.

## 4. Multi-cycle commands

`imc_ctrl` issues one micro-op per cycle. D0, D1 and D2 are the three dummy
rows.

**SUB** (2 cycles), `row_a - row_b`:

1. NOT(`row_b`) → D0.
2. `row_a` + D0 with carry-in 1 into every element → `dst`.

This is two's complement subtraction. D0 is overwritten.

**MULT** (N+2 cycles), `row_a` = multiplier B, `row_b` = multiplicand A. The
algorithm is the left-shift multiplication: `acc = 0`, then for `i = N-1`
down to 1, `acc = (acc + B[i]·A) << 1`, then finally `acc = acc + B[0]·A`.

| cycle | word lines | write-back | other |
|---|---|---|---|
| 1 | `row_a` (one WL) | S = 0 → D0 | B loaded into the multiplier flip-flops, bit-reversed; Y-path flip-flops cleared |
| 2 | `row_b` (one WL) | COPY → D1 | |
| 3 | D0, D1 | ADD-SHIFT → D2 | multiplier bit B[N-1] |
| 4 … N+1 | D1, D2 | ADD-SHIFT → D2 | bits B[N-2] … B[1] |
| N+2 | D1, D2 | ADD → D2 | bit B[0]; the product is now in D2 |

The multiplier flip-flops (`mult_reg`) are two per group of four Y-paths. For
N-bit precision, N/2 such pairs are chained into one N-bit register per
product group, loaded bit-reversed, and shifted right each step. MX3 sends the
right-most bit to every Y-path of the group.

When that bit is 1, MX0 passes the FA sum `acc + A` to the left neighbour,
which writes it back shifted. When the bit is 0, MX0 passes the Y-path
flip-flop instead. That flip-flop holds the current accumulator bit, so the
accumulator is shifted without adding A. The same gating applies to the final
ADD.

Worked example (`tb_imc_mult_example`), 1010 × 1011 at 4 bits, accumulator in
D2 after each step:

```
step 1 (B3=1): (0000 + 1010) << 1      = 0010100
step 2 (B2=0): 0010100 << 1            = 0101000
step 3 (B1=1): (0101000 + 1010) << 1   = 1100100
final  (B0=1): 1100100 + 1010          = 01101110 = 110
```

## 5. Bitline separator and dummy rows

The three dummy rows share the bitlines with the main array, but a row of
switches (`bl_separator`) lies between the two. In a cycle that reads and
writes only dummy rows, the separator opens. Write-back then drives only the
short dummy segment. In silicon this saves write-back energy and delay. When a
main row is read or written, the separator closes and the two segments form
one wired-AND bitline. Main-array writes are blocked while it is open.

The rule "open exactly when no main-array row is touched" is this design's
reading of the description. `sep_open` is an output so the behaviour can be
observed. Of a MULT's cycles, steps 3 to N+2 run with the separator open.

## 6. Interface and timing

`imc_top` (parameter `NBANKS = 4`) has one command port, which is broadcast to
the banks whose bit is set in `bank_mask`. The selected banks execute the same
command in lock-step, each on its own data. A command is accepted when
`cmd_valid && cmd_ready`. `cmd_ready` is high only when all banks are idle.
The first micro-op runs in the cycle in which the command is accepted.
`done[b]` is high during the last cycle. READ data appears on `rdata[b]` with
`rvalid[b]` one cycle after acceptance. Reset (`rst_n`) is active low and
asynchronous. It clears the control flip-flops but not the SRAM cells.

`cmd_t` (in `imc_pkg`) has these fields:

- `op`;
- `prec` (`PREC2`/`PREC4`/`PREC8`);
- `row_a`, `row_b`, `dst`: row addresses. 0–127 are main rows; 128, 129 and
  130 are D0, D1 and D2;
- `col`: which of the 4 interleaved columns;
- `wdata`: 32 bits, used by WRITE.

Bit `j` of a word is stored in physical column `4j + col`.

| op | word lines | result in | cycles |
|---|---|---|---|
| READ | `row_a` | `rdata` | 1 |
| WRITE | – | `dst` ← `wdata` | 1 |
| AND NAND OR NOR XOR XNOR | `row_a`, `row_b` | `dst` | 1 |
| NOT, COPY | `row_a` | `dst` | 1 |
| SHL | `row_a` | `dst` ← `row_a << 1` per element | 1 |
| ADD | `row_a`, `row_b` | `dst` | 1 |
| ADDSHIFT | `row_a`, `row_b` | `dst` ← `(a+b) << 1` per element | 1 |
| SUB | `row_b`, then `row_a` + D0 | `dst` (D0 clobbered) | 2 |
| MULT | see section 4 | D2 (D0, D1 clobbered) | N+2 |

Results are written at the rising edge of their last cycle, so the next
command reads them. Results wrap modulo 2^N (2^2N for MULT). No carry-out or
overflow flag is produced.

Throughput with 4 banks and 8-bit data:

- ADD: 16 elements per cycle (0.0625 cycles per element);
- SUB: 0.125 cycles per element;
- MULT: 8 products per 10 cycles (1.25 cycles per product).

These figures are checked in `tb_imc_top`. Throughput scales with the
number of banks: 32 bit positions (Y-paths) per bank. `tb_imc_fig9` builds 4,
8, 16 and 32 banks (128 to 1024 positions) and confirms 1/(4·NBANKS) cycles
per 8-bit ADD, twice that per SUB, and 10/(2·NBANKS) per MULT.

## 7. Files

| file | contents |
|---|---|
| `rtl/imc_pkg.sv` | sizes, `op_e`, `cmd_t`, micro-op `uop_t` |
| `rtl/imc_top.sv` | 4 banks, broadcast command port |
| `rtl/imc_bank.sv` | one macro; carry-chain cutting |
| `rtl/imc_ctrl.sv` | command → micro-op sequencer |
| `rtl/wl_decoder.sv` | single/dual word-line decode, main vs dummy rows |
| `rtl/sram_array.sv` | 6T array behaviour (main 128 rows and dummy 3 rows) |
| `rtl/bl_separator.sv` | separator switches |
| `rtl/ypath.sv` | column unit: column select, MX0/MX1/MX2, flip-flop |
| `rtl/fa_logics.sv` | transmission-gate adder / logic |
| `rtl/mult_reg.sv` | multiplier flip-flops and MX3 |
| `tb/imc_ref_pkg.sv` | integer reference model shared by the bank/top testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_imc_mult_example` and `tb_imc_fig9` |
| `tb/fig9_runner.sv` | helper of `tb_imc_fig9`: one memory of NB banks running 8-bit ADD/SUB/MULT |

Every testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog. To run one, for example the whole memory at full size:

```
verilator --binary --timing --assert -Irtl -Itb rtl/imc_pkg.sv tb/imc_ref_pkg.sv \
          tb/tb_imc_top.sv --top-module tb_imc_top -o sim
obj_dir/sim
```

(`tb/imc_ref_pkg.sv` is only needed by `tb_imc_bank`, `tb_imc_top` and
`tb_imc_mult_example`.) All testbenches except `tb_imc_fig9` run at the default sizes. Each finishes in
well under a second once built. `tb_imc_fig9` builds memories of up to 32
banks, so its compile takes a few minutes.

`tb_imc_top` covers the whole design. It broadcasts every command at every
precision to all four banks and compares each bank against the reference. It
also counts, and requires, each of these events:

- a precision switch;
- multiplication steps with multiplier bit 1 and with bit 0;
- the separator open and closed;
- a command stalled behind a MULT;
- the SUB carry-in;
- shift and add-and-shift write-backs;
- all-bank execution.

Assertions (checked with `--assert`) guard the array access rules: at most
two word lines, one write-back row, and no main-array write while the
separator is open. They also guard the valid/ready rule at the top: a command
that has not been taken must stay on the port unchanged.

## 8. Where this departs from, or goes beyond, the description

- **Analog parts are not modelled.** These are the bitline booster, the
  precharge, the sense amplifiers, the write drivers and the WL pulse timing.
  The bitline is taken as fully resolved, and there is no read disturbance.
  Delay, frequency (about 2.25 GHz) and energy figures are therefore outside
  this RTL.
- **Memory size.** The size is stated both as "128 KB" and as 4 × 128 × 128
  bits. The second is 8 KB, and it is the one built.
- **Sum and logic node.** The sum path is built as XNOR = AND | NOR (an OR
  gate) followed by an inverter. The schematic labels that gate as an XOR.
  Either way, the outputs meet the full-adder equations.
- **MULT details chosen here.** The description does not specify these:
  - the Y-path flip-flops are cleared at the start;
  - the final ADD is also gated by B[0];
  - the zeros in D0 come from XOR-ing the multiplier row with itself during
    the cycle that loads the multiplier;
  - the product stays in dummy row D2.
- **Chosen here, not given in the description.** These are:
  - the command set encoding, the handshake and the broadcast to banks;
  - the row address map;
  - the bit-to-column mapping;
  - the choice of which FA-Logics node feeds MX1's logic input;
  - the plain READ/WRITE port.
- **Precision.** Only 2-, 4- and 8-bit precision exist, with no 16- or 32-bit
  mode. A wider precision would need a wider `seg` field and more multiplier
  flip-flops per group.
