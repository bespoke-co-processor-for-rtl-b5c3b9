# A bespoke MAC co-processor for a bit-serial RISC-V on flexible electronics

Flexible integrated circuits made of thin-film transistors on plastic are cheap to make and conform
to skin, so they suit disposable health-monitoring patches. They are also slow (a few hundred kHz),
hold only a few thousand gates, and draw a lot of static power. A small MLP classifier on such a
chip therefore needs hardware that does as much multiply-accumulate work per cycle as it can, in as
few gates as it can.

The design here adds a multiply-accumulate co-processor to SERV, a bit-serial RV32 core. The
co-processor has one unusual feature. **It has no weight inputs at all.** Each of its multipliers
multiplies by a constant fixed when the chip is made. Such a by-constant multiplier costs about a
third of a general one. Every instruction can then spend all 64 operand bits (`rs1` and `rs2`) on
activations: sixteen 4-bit activations per call. A general 4x4 multiplier would need eight bits per
product, so the same 64 bits would feed only eight of them. The chip is made for one trained model,
and its constants are chosen to match that model's weights.

The cost falls on software. A weight must be built from the constants that exist. The program
chooses which weighted sum each call computes by where it places each activation in the two
registers.

## Folding a weighted sum onto fixed constants

The co-processor has `K` multipliers with constants `C_0 .. C_{K-1}`. Each multiplier reads a fixed
`L`-bit field `I_j` of the operand registers:

```
        rs1 (reg A)                               rs2 (reg B)
 31                             0         31                             0
 | I_0 | I_1 | I_2 | ... | I_7 |          | I_8 | I_9 | ...      | I_15 |     L = 4, K = 16
 | I_0 | I_1 | ... | I_5 |..|             | I_6 | ... | I_11 |..|            L = 5, K = 12
   xC_0  xC_1                                xC_8 ...                          (".." = unused bits)
```

A call adds `sum_j C_j * I_j` to the running sum. A field that holds 0 contributes nothing. The
same activation may sit in several fields of one call. A weighted sum `sum_i w_i x_i` is therefore
computed as a list of calls, and each weight `w_i` is split among multipliers:

* **direct**: some free multiplier has `C_j = w_i`, so `x_i` goes into field `j`;
* **split in one call**: two free multipliers add up to `w_i` (for example 18 = 3 + 15), so `x_i`
  goes into both fields;
* **split across calls**: part of `w_i` is covered now and the rest in a later call. This is
  needed when the matching multipliers are busy or the weight has no cheap split.

Whenever a `+1` and a `-1` multiplier exist, any weight can be built. The number of calls, and so
the inference time, depends on how well the constant set fits the model's weights. A real flow
chooses the constants and the call schedule together, with a constraint solver run offline, and
emits the constants into the RTL parameters and the schedule into the program. No such solver is
part of this RTL. The testbenches carry a simple greedy scheduler (`tb/mlp_sched_pkg.sv`), which
tries direct, then a split in one call, then the largest same-sign partial product.

Example: four multipliers `-4, -3, 5, 7` and 16-bit fields (two per register). The weight vector
`4, 2, -8, 7, -3, -4, 5, 7` can be done in three calls:

```
call 1 (MLP_First): x2*(-4) + x4*(-3) + x6*5 + x3*7
call 2 (MLP_Comp) : x2*(-4) + x0*(-3) + x1*5 + x7*7
call 3 (MLP_Comp) : x5*(-4) + x1*(-3) +  0*5 + x0*7
```

Here `-8` is split across two calls, and `4 = -3 + 7` and `2 = 5 - 3` are split across calls too.
The greedy scheduler needs four calls for the same vector. This shows
that schedule quality matters, and that the hardware does not care which schedule it is given.

## Instructions and handshake

Co-processor instructions are R-type instructions (opcode `0110011`) with bit 25 set, that is,
`funct7 = 0000001`. `funct3` selects the operation:

| funct3 | name      | new sum                       |
|--------|-----------|-------------------------------|
| `000`  | MLP_First | `0 + sum_j C_j*I_j`           |
| `001`  | MLP_Comp  | `cur_sum + sum_j C_j*I_j`     |

Any other `funct3` with bit 25 set acts as MLP_Comp. The result, the updated `cur_sum`, is written
to `rd`. A neuron is one MLP_First followed by MLP_Comp calls, and the last call returns the whole
weighted sum. Bias, activation function and requantisation stay in software. The co-processor has
no post-processing.

SERV shifts operands in one bit per cycle. While it does so, the fields change every cycle and the
tree's output is garbage. The sequence of one call is:

```
cycle        0 .. 31           32          33            34 .. 65
core         shift rs1/rs2 in  ops_done=1  (stalled)     shift rdata into rd
cp_decode    is_cp             cp_valid=1  stall, rd_wen
coproc       (output ignored)  cur_sum<=   ready=1,
                                 tree sum  result=cur_sum
```

The decode extension (`cp_decode`) sees the instruction. When the core's FSM reports that both
operands are complete (`ops_done`), it issues `cp_valid`. From then on it holds the core (`stall`)
until the co-processor's `ready`. In that cycle it raises `rd_wen` so the result is written back.
The co-processor answers in exactly one cycle and can take a call in any cycle. A call therefore
costs the core's 64 or so serial transfer cycles plus one cycle of co-processor time.

## Co-processor datapath (`bespoke_coproc`)

* `K` instances of `bespoke_mult`. Each builds `x*C` as a sum of shifted copies of `x`, one for each
  set bit of `C` in `CW`-bit two's complement, with the sign bit weighted negatively. Because `C`
  is a parameter, only the adders it needs remain after synthesis.
* `adder_tree`: a balanced tree that adds the `K` sign-extended products and a base value, in
  32 bits.
* A multiplexer driven by `inst_id` (`funct3`) selects the base value: 0 for MLP_First, `cur_sum`
  otherwise.
* A multiplexer driven by `valid` writes the tree's sum into the 32-bit `cur_sum` register only on
  a call. At all other times `cur_sum` is kept.
* `ready` is `valid` delayed by one cycle. `result` is `cur_sum`.

All arithmetic is signed two's complement. `cur_sum` wraps modulo 2^32. No model here comes near
that: the largest sum is a few times 10^4.

## Configurations and constants

| parameter | default | meaning |
|-----------|---------|---------|
| `L`       | 4       | activation (field) width; 5 for the 5-bit configuration |
| `K`       | 16      | number of multipliers; 12 for the 5-bit configuration |
| `CW`      | 4       | constant width; weights are 4-bit, constants in [-8, 7] |
| `COEFS`   | `-8..-1, 1..7, 1` | `C_0 .. C_{K-1}` |

`K*L` must not exceed 64. With `L = 5` only six fields fit in each register, and the two low bits
of each register are unused. `mlp_cp_pkg` holds both configurations (`DEF_*`, `SPD_*`).

A chip for a real model would use the constants its schedule chose. Several copies of one constant
are allowed. The default set, every non-zero value of [-8, 7] once plus a second `+1`, is a generic
choice that can build any 4-bit weight. It is not a set tuned to any model. Per-model constant sets
were not available. Change `COEFS` (and `K`) on `flex_mlp_top` to build another chip.

## What surrounds this RTL

`flex_mlp_top` holds the two parts the accelerated system adds to the core: the decode extension
and the co-processor. The core itself is not included. That is SERV in an RV32E variant with 16
registers, a bit-serial ALU and an SPI link to off-chip program and data memory. Its side of the
interface appears as ports:

| port | dir | meaning |
|------|-----|---------|
| `instr` | in | instruction being executed |
| `rs1`, `rs2` | in | the core's operand registers (reg A, reg B) |
| `ops_done` | in | pulse: both operands are complete |
| `rdata` | out | value to write back |
| `rd_wen`, `rd_addr` | out | write-back trigger and destination |
| `stall` | out | hold the core while a call is outstanding |
| `is_cp` | out | instruction is a co-processor instruction |

The chips this design targets run at 150 kHz. The co-processor's logic is a few hundred gates, one
multiply-add level deep, well inside that clock period.

## Choices made here that are open in the source description

* Signed inputs. Post-ReLU 4-bit activations therefore span 0..7.
* The 32-bit accumulator.
* Synchronous reset of `cur_sum` and `ready`.
* The one-cycle `ready` pulse.
* The `ops_done` strobe that marks the end of the operand transfer.
* The rule that the core issues only when the co-processor can take a call. It is met by never
  issuing while a call is pending, since the co-processor itself can take a call in any cycle.
* The placement of fields when 32 is not a multiple of `L`.
* The balanced adder-tree shape.
* The shift-and-add form of the multipliers.
* The default constant set.
* In the testbenches: the greedy scheduler, and the requantisation (shift right by 3, clip to the
  positive range).

## Verification

Each block has a self-checking testbench that prints `TB_RESULT checks=N failures=M`:

* `tb_bespoke_mult`: every constant of [-8, 7] against every 4-bit input, plus 8-bit constants
  with 5-bit inputs. All cases are checked exhaustively against integer products.
* `tb_adder_tree`: 17-, 13- and 1-operand trees against a plain sum.
* `tb_cp_decode`:
  * detection over random instructions;
  * the handshake with random answer delays;
  * no second call while one is pending;
  * no stall or write-back for ordinary R-type instructions.
* `tb_bespoke_coproc`: random neurons on three configurations. These are the four-constant example
  above, 16x4-bit and 12x5-bit. The testbench checks:
  * the running sum after every call;
  * that random register contents with `valid` low change nothing;
  * that `ready` comes exactly one cycle after `valid`.

  It also runs two directed cases:
  * the four-constant example with a hand-made three-call schedule;
  * constants `3` and `15` (5-bit constants), with an activation placed in both of their fields,
    which must come out multiplied by 18.
* `tb_flex_mlp_top`: a full inference of a 34-9-6 MLP at default parameters, with a cycle model of
  the core doing serial operand transfer and serial write-back. Every neuron sum and the predicted
  class are checked. The testbench counts, and requires at least once, each of the following:
  * MLP_First and MLP_Comp calls;
  * direct weights, weights split in one call and weights split across calls;
  * stall cycles;
  * cycles in which `valid` is low;
  * ignored ordinary instructions.
* `tb_mlp_workloads`: one inference of each of nine healthcare MLP topologies. The weights are
  random, because the trained ones are not available. SPD runs on the 12x5-bit co-processor. Calls
  per inference with the greedy scheduler and the default constants:

| model | topology | MACs | calls | MACs/call |
|-------|----------|------|-------|-----------|
| AffectiveRoad | 63-9-3 | 594 | 59 | 10.1 |
| Arrhythmia | 279-9-11 | 2610 | 241 | 10.8 |
| Dermatology | 34-9-6 | 360 | 42 | 8.6 |
| DriveDB | 61-9-3 | 576 | 57 | 10.1 |
| ECG5000 | 140-3-5 | 435 | 45 | 9.7 |
| HAR | 561-7-6 | 3969 | 346 | 11.5 |
| SPD (5-bit) | 75-9-3 | 702 | 102 | 6.9 |
| StressInNurses | 72-9-3 | 675 | 69 | 9.8 |
| WESAD | 96-9-3 | 891 | 89 | 10.0 |

Fewer than 16 (or 12) products per call come from two sources: the ends of neurons, and weights
competing for the single multiplier of their value. Constants chosen for a model, with duplicates,
and a solver-made schedule would raise this figure. The RTL does not change for that.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/mlp_cp_pkg.sv tb/mlp_sched_pkg.sv tb/tb_flex_mlp_top.sv --top-module tb_flex_mlp_top
./obj_dir/Vtb_flex_mlp_top
```

Replace `tb_flex_mlp_top` with any other testbench name. Each runs in about a second.

## Files

* `rtl/mlp_cp_pkg.sv`: instruction fields, operation codes, default configurations
* `rtl/bespoke_mult.sv`: by-constant multiplier
* `rtl/adder_tree.sv`: balanced adder tree
* `rtl/bespoke_coproc.sv`: the co-processor
* `rtl/cp_decode.sv`: decode extension and handshake
* `rtl/flex_mlp_top.sv`: top level
* `tb/mlp_sched_pkg.sv`: scheduler, operand packing, reference dot product, instruction encoder
* `tb/tb_*.sv`: the testbenches above
