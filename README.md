# Parallel stochastic computing inside an MTJ memory

Stochastic computing (SC) represents a number in [0, 1] as a string of bits
whose fraction of ones is the value. Arithmetic then becomes trivial logic: an
AND gate multiplies two independent streams, an OR of two correlated streams
gives their maximum, a multiplexer with a 1/2 select adds and halves, and
polynomial approximations of sin, tanh, exp and similar functions become short
AND/NAND chains. The weakness is time. A serial SC circuit spends one clock per
bit, so an N-bit stream costs N cycles for every operation.

This design removes that cost by laying the N bits of a stream side by side in
a magnetic (MTJ) memory and operating on all of them in the same cycle. A
stream laid out in space is called a *bundle* here. The memory stores ordinary
M-bit binary words. In computation mode:

1. two rows are read;
2. each word is expanded into an N = 2^M bit bundle;
3. an N-lane stochastic computing unit (SCU) evaluates one SC operation on all
   lanes at once;
4. optionally, a parallel counter turns the result back into an M-bit word and
   writes it to a row.

In memory mode the same array is a plain read/write memory. An operation costs
1 to 3 memory cycles whatever N is. Converting back to binary costs
1.5·M² cycles.

The default size is M = 6. That gives 64-bit bundles, 64 parallel lanes, and
a 64-row × 6-bit array.

A wider array can hold P words side by side in each row (parameter `P`). One
command then processes P operand pairs at once.

## Block structure

```
 row addr_a --decoder 1--> bus1 --SA1--> bundle generator (pattern a) --\
                                                                        SCU --> bundle-to-binary converter --\
 row addr_b --decoder 2--> bus2 --SA2--> bundle generator (pattern b) --/ |                                  |
                                 |                                 result bundle                (saturate)  |
                                 +--> output register --> rdata                                             |
 cmd_wdata --> input register --> input MUX (CiM/Mem) <-----------------------------------------------------/
                                      |
                                      +--> array write port (row addr_d)
```

| Module | Role |
|---|---|
| `pimsc_pkg` | Operation, pattern and command enums; operation latencies; coefficient rounding |
| `mtj_array` | ROWS × M cell array with one write port and two read buses |
| `wl_decoder` | Address to one-hot write/read wordlines (two instances) |
| `sense_amp` | M-bit sense amplifier bank that latches a bus (SA1, SA2) |
| `bs_gen` | Word to bundle expansion with three placement patterns |
| `lim_cell` | Logic-in-memory gate: preparation then evaluation, giving NOR/OR/NAND/AND |
| `scu` | N-lane SC unit with all operations and their latencies |
| `s2b_converter` | XOR/AND-tree counter from bundle back to an M-bit word |
| `input_mux` | Array write data: input register (memory mode) or converter (compute mode) |
| `io_register` | Input and output registers |
| `pimsc_ctrl` | Command sequencer that drives CiM/Mem, decoders, SAs, SCU and converter |
| `pimsc_top` | Everything above, wired as in the diagram; P words per row with parameter `P` |

The MTJ cell itself is analog. Here it is one stored bit inside `mtj_array`.

## Turning a word into a bundle without random numbers

A classic SC generator compares the value with a random number for every bit.
This design is deterministic instead. Digit i of the word x is copied into
2^i fixed positions of the bundle, and one position is always 0. The bundle
therefore has exactly x ones, and the value is x/N. In the memory this
corresponds to writing the sensed digits into a row of cells and reading them
back. In RTL it is a fixed position map (`bs_gen`, combinational).

Where the copies sit is decided by a *placement pattern*:

- Two bundles made with the same pattern are correlated. Their ones are
  nested where possible.
- Bundles made with different patterns are close to independent.

With ruler(q) = M−1−(trailing zeros of q+1), and position N−1 tied to 0:

| Pattern | Position q copies digit |
|---|---|
| PAT_1 | ruler(q) |
| PAT_2 | ruler(bit-reverse of q) |
| PAT_3 | ruler(q rotated left by M/2 bits) |

For M = 3 the published 8-bit patterns are used exactly (top to bottom):

| Pattern | Digits |
|---|---|
| PAT_1 | x2 x1 x2 x0 x2 x1 x2 0 |
| PAT_2 | x2 x1 x0 x2 x2 0 x1 x2 |
| PAT_3 | x2 x1 x0 x2 x1 x2 x2 0 |

PAT_1 above is the same rule as the first of them. The rules used for PAT_2 and
PAT_3 at other sizes are this design's own; only the 8-bit examples are
published. Coefficient bundles inside the SCU use PAT_3. By convention,
operands use PAT_1 (X) and PAT_2 (the second copy X*).

**What correlation really buys with this encoding.** The AND of two same-pattern
bundles has as many ones as the bitwise AND of the two binary words. The same
holds for OR and XOR. So "min", "max" and "|x−y|" on correlated operands are
exact only when the binary words are nested (every 1 digit of the smaller word
is also set in the larger, e.g. 20 and 52). For other pairs they give the
bitwise AND/OR/XOR instead. The hardware implements the published operations
as stated, and the testbenches check exactly this behaviour.

## The stochastic computing unit

`scu` holds one lane per bundle bit. Its operations are listed below; a and b
are the two operand bundles, and c(k) is a coefficient bundle of value k.

| Operation | Gate form | Latency (memory cycles) |
|---|---|---|
| multiply (MUL) / min | a AND b | 1 |
| max / approximate add | a OR b | 1 |
| NEG | NOT a | 1 |
| scaled add | s ? b : a, s a fixed 1/2 select bundle | 2 |
| abs-subtract | (a OR b) AND (a NAND b) | 2 |
| Sinc | 2-stage chain | 2.5 |
| sin, cos, tanh, arctan, sigmoid, exp(−x), ln(1+x) | 3–5 stage NAND chains | 3 |

The one-gate operations use the logic-in-memory gate `lim_cell`. It programs
two MTJs in a preparation phase and senses them in an evaluation phase (one
tick each). A NOR-type sense amplifier gives NOR/OR, and a NAND-type one gives
NAND/AND.

The function chains are the Horner forms of truncated Maclaurin series. For
example:

sin x ≈ x·(1 − x²/6·(1 − x²/20·(1 − x²/42)))

Each "1 − c·u·(…)" is one NAND of the coefficient bundle c with u and the
inner result. The term x² is the AND of the two independent copies X and X*.
The coefficients are:

| Function | Coefficients |
|---|---|
| sin | 1/42, 1/20, 1/6 |
| cos | 1/56, 1/30, 1/12, 1/2 |
| tanh | 17/42, 2/5, 1/3 |
| arctan | 5/7, 3/5, 1/3 |
| Sinc | 1/42, 1/20, 1/6 |
| sigmoid | 1/10, 1/12, 1/2, 1/2 |
| exp(−x) | 1/5, 1/4, 1/3, 1/2 |
| ln(1+x) | 4/5, 3/4, 2/3, 1/2 |

Each coefficient is rounded to the nearest M-bit word.

Two places differ from the published gate chains:

- **exp(−x) and ln(1+x).** These are drawn with a single x input. With one
  copy, x AND x is x, the chain computes the wrong polynomial, and the mean
  error exceeds 0.1. Here the stages alternate between X and X*.
- **sigmoid.** The two 1/2 inputs of sigmoid must be independent. The second
  one is generated with PAT_2 (parameter `HALF2_PAT`).

The select of the scaled addition is not one of the generated coefficients.
It is a fixed bundle with bit q = q[M−1] XOR q[0]. Every digit group of a PAT_1
operand has position bit M−1 free and bit 0 fixed, and a PAT_2 operand the
other way round. So this select takes exactly half of each group of either
operand, apart from the single copy of digit 0. With the PAT_3 coefficient 1/2
as the select, the mean error at N = 64 was 3.4 %; with this one it is 0.39 %.

The chains are combinational from the captured operands. The result is
registered at the operation's latency, so every operation's `done` arrives at
exactly the published number of cycles.

Mean absolute error over all 64 inputs x/64 at M = 6, from the bit-exact model
that the testbenches check the RTL against:

| Function | sin | cos | tanh | atan | Sinc | sigmoid | exp(−x) | ln(1+x) |
|---|---|---|---|---|---|---|---|---|
| this RTL | 0.017 | 0.020 | 0.041 | 0.046 | 0.010 | 0.010 | 0.040 | 0.111 |
| published, N = 64 | 0.024 | 0.008 | 0.022 | 0.023 | 0.009 | 0.011 | 0.014 | 0.018 |

The published figures do not say which inputs or placement patterns were used.
ln(1+x) is clearly worse here. Its four stages alternate over only two operand
copies, and the coefficient bundles stay correlated with the operands.

## Back to binary: the XOR/AND counting tree

`s2b_converter` counts the ones of a bundle using only the two operations the
array is good at, XOR and AND. Each step works like this:

- A binary tree reduces the N inputs. Every node passes the XOR of its two
  children upwards and keeps their AND as a carry.
- The root XOR is the parity of the inputs, i.e. the next output bit.
- The N−1 carries each stand for a pair of ones. Together with one 0 they are
  the N inputs of the next step.

After M steps the output word is the count modulo 2^M.

The XOR is built as NOR(NOR(a,b), AND(a,b)):

- NOR and AND of a pair take one memory cycle.
- The last NOR takes half a cycle.
- The AND is the carry, so it comes for free.

A tree level therefore takes 1.5 cycles. Levels run one after another, with all
nodes of a level in parallel. One step takes 1.5·M cycles and a conversion takes
1.5·M² cycles:

| N | Conversion |
|---|---|
| 8 | 13.5 cycles |
| 64 | 54 cycles (108 ticks) |
| 256 | 96 cycles |

Note that published text gives 4.5 cycles per step, i.e. 4.5·log2 N in all.
That matches the 3-level tree drawn for N = 8, but not a deeper tree. This RTL
follows the tree, so at N = 64 it is twice the published figure.

A bundle of N ones (count 2^M) does not fit in M bits. For example, NOT of a
zero operand gives N ones. The converter ORs the last step's carries into
`ovf`, and the top then writes all ones (N−1) instead of wrapping to 0. Both
the flag and the saturation are this design's additions.

## Memory side, commands and timing

One clock tick is half a memory cycle. That makes the 2.5-cycle Sinc and the
1.5-cycle XOR exact. The engine takes one command at a time through
`cmd_valid`/`cmd_ready`, and `rsp_valid` pulses once when the command is done.

The commands are:

| Command | Mode | What it does | Ticks from accept to `rsp_valid` |
|---|---|---|---|
| MEM_WRITE | memory | input register ← `cmd_wdata`, then one write cycle on row `addr_d` | 4 |
| MEM_READ | memory | decoder 2 / SA2 read row `addr_a` into the output register (`rdata`) | 4 |
| COMPUTE | computation | read rows `addr_a`, `addr_b` in one cycle (decoder 1 / SA1, decoder 2 / SA2); expand with `pat_a`, `pat_b`; run `op` | 4 + L |
| COMPUTE, `to_binary` | computation | as above, then convert and write the word to row `addr_d` through the input MUX | 7 + L + 3·M² |

L is the SCU latency in ticks: 2, 4, 5 or 6.

The result bundle stays on `result_stream`. With `cmd_reuse` set, the next
COMPUTE takes it as operand A instead of the row read, so results can be
chained without converting. `cim_mode` is the CiM/Mem signal that switches
the input MUX between the input register and the converter.

The following are this design's choices, not published details:

- the command format;
- 64 rows;
- decoder 1 driving the write-back row;
- decoder 2 / SA2 serving plain reads, because the output register hangs off
  SA2;
- one memory cycle per array access;
- an asynchronous active-low reset.

## Accuracy at N = 16 and N = 64, with input noise

`tb_sc_accuracy` runs the SCU at both published lengths. It sweeps the operands
of the five basic operations and the input of the eight functions. Each
operand bundle bit is flipped with probability 0, 10 or 30 %, the way a soft
error in the stored bundle would. Every result is checked bit for bit against
the model. The mean absolute error (% of full scale) against the exact result
is:

| Operation | N=16, 0 % | 10 % | 30 % | N=64, 0 % | 10 % | 30 % |
|---|---|---|---|---|---|---|
| multiply | 2.02 | 6.09 | 13.07 | 0.57 | 4.93 | 12.33 |
| scaled add | 1.56 | 6.81 | 13.62 | 0.39 | 4.55 | 11.50 |
| min | 6.84 | 9.77 | 15.77 | 7.46 | 9.39 | 14.77 |
| max | 6.84 | 10.28 | 16.14 | 7.46 | 9.53 | 15.17 |
| abs-subtract | 13.67 | 17.87 | 22.97 | 14.91 | 17.93 | 23.17 |
| sin | 2.02 | 7.82 | 14.18 | 1.70 | 5.25 | 14.21 |
| cos | 3.96 | 3.21 | 9.26 | 1.98 | 2.25 | 7.45 |
| tanh | 5.26 | 11.68 | 16.88 | 4.13 | 7.11 | 13.65 |
| arctan | 5.69 | 9.84 | 14.16 | 4.61 | 7.22 | 14.21 |
| Sinc | 2.51 | 3.00 | 2.62 | 0.99 | 1.52 | 3.09 |
| sigmoid | 1.81 | 3.19 | 5.43 | 1.02 | 1.82 | 3.85 |
| exp(−x) | 5.56 | 9.84 | 12.32 | 4.03 | 6.78 | 10.15 |
| ln(1+x) | 10.43 | 8.47 | 12.96 | 11.13 | 11.82 | 12.25 |

Multiply, scaled addition, sin and sigmoid match or beat the published N = 64
figures (1.06, 0.95, 2.40 and 1.08 %). Sinc is close (0.87 %).

The rest fall short:

- min, max and abs-subtract are far off because correlated digit-copy bundles
  give bitwise results (see above).
- cos, tanh, arctan and exp(−x) are two to three times the published error.
- ln(1+x) is about six times the published error. Errors grow smoothly
with noise instead of collapsing.

Why the deeper chains lose accuracy: every Horner stage multiplies x (or x²)
by the output of the stage inside it, and that output already depends on the
same bundle. With deterministic bundles a bit ANDed with itself is unchanged.
So wherever a copy meets itself, x·(1 − c·x·…) evaluates as x·(1 − c·…). Two
copies (X and X*) are enough for one level. The four- and five-level chains of
exp(−x) and ln(1+x) cannot avoid reusing them. The effect is small for sin and
cos, whose coefficients are small.

Two alternatives were tried and not adopted:

- Position-permuted third and fourth copies of x brought ln(1+x) only to 6.6 %.
- Seven other placements of the coefficient bundles were all worse than PAT_3.

So part of the error also comes from the coefficient bundles being correlated
with the operands.

## Several words per row

An image workload has many independent pixels. With `P` > 1:

- a row holds P words (P·M cells);
- the sense amplifiers and the input and output registers are P·M bits wide;
- there are P generator pairs, SCUs and converters.

All lanes run the same command in lock step. The timing is unchanged, so
throughput grows by P. A memory with C columns available for bundles gives
P = ⌊C/N⌋; for example, 1024 columns at N = 256 give 4. The command ports
widen to match:

- `cmd_wdata`, `rdata` and `result_bin` are P·M bits, word p at `[p*M +: M]`;
- `result_stream` is P·N bits;
- `result_ovf` is P bits.

The default, P = 1, is the single-operation configuration whose latencies are
quoted above.

## Tone mapping at N = 256

`tb_tone_map` runs the image workload the design targets. It runs the engine at
M = 8 (N = 256) with P = 4 words per row, and applies an S-curve to every
intensity level of an 8-bit image. Before writing into the array, the host stretches each pixel:
x' = clip(0.5 + 1.2·(x − 0.5), 0, 1). This is binary arithmetic the engine does
not have.

The two curves are computed as follows:

- **sigmoid(x').** One COMPUTE with write-back.
- **(tanh(x') + 1)/2.** First tanh, kept as a bundle. Then a scaled addition
  that reuses that bundle with a row holding 255/256.

Since the curve acts on each pixel alone, the 256 levels fully describe any
256 × 256 image. The testbench reports the error over a gradient image that
holds every level 256 times:

| Curve | MAE | PSNR |
|---|---|---|
| sigmoid | 0.007 | 40.1 dB |
| tanh | 0.035 | 27.5 dB |

These PSNR figures are against the exact curves. The published 27.0 and
25.4 dB are against a fitted reference, so the two are not directly comparable.

The slope and centre parameters of the published curves are not modelled. The
blocks evaluate the functions on [0, 1] directly.

With four pixels per command, each pixel and curve takes about 27 memory
cycles, including the writes and reads. Most of that is the 96-cycle
conversion. A 256 × 256 frame with both curves therefore takes about 57
frames/s at a 200 MHz memory clock. The published 642.5 frames/s assumes the
shorter 4.5·log2 N conversion.

## How far to trust it, and where it departs

Each block has a self-checking testbench. Each was also run against a
deliberately broken copy of its module, to confirm the testbench catches the
fault. The reference model in `tb/tb_sc_model_pkg.sv` is written independently
of the RTL: it computes bundle positions differently and evaluates each lane
bit by bit.

`tb_pimsc_top` runs the whole engine at its default size. It covers:

- 64 writes;
- more than 130 reads;
- every operation with write-back;
- bundle-only chains with reuse;
- an overflow;
- CiM/Mem mode switches.

The departures and open points, in one list:

- **Placement patterns for M ≠ 3** are this design's own. The 8-bit patterns
  are the published ones.
- **min/max/abs-subtract on correlated bundles** give the bitwise AND/OR/XOR of
  the words. See above.
- **exp(−x) and ln(1+x)** alternate the two operand copies. sigmoid uses a
  second, independent 1/2 bundle. ln(1+x) is still about six times less
  accurate than published.
- **The scaled addition** uses a fixed select bundle, not a generated 1/2
  coefficient.
- **The converter** takes 1.5·M² cycles, not 4.5·M. It also adds an overflow
  flag and saturation.
- **Gate order inside the chains.** The SCU applies each operation's total
  latency. It does not issue the chain's gates as separate controller steps.
  The chains are logic in the peripheral, as the design describes them.
- **Not modelled:** the MTJ device, sense margins and power. Noise appears
  only as flipped bits in the accuracy testbench.
- **Reduced parallelism is not built.** That means processing one bundle in
  several narrower batches when the array is too narrow. The parallelism is
  always N lanes.

## Simulating and changing it

Any testbench runs with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pimsc_pkg.sv tb/tb_sc_model_pkg.sv tb/tb_pimsc_top.sv \
    --top-module tb_pimsc_top -Mdir obj_top
obj_top/Vtb_pimsc_top
```

Replace `tb_pimsc_top` with any testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=… failures=…`. A Verilator note about `rst_n` being
used both as an asynchronous reset and in assertion disable conditions is
expected.

To change the size, set `M` on `pimsc_top`. N follows as 2^M, and the
coefficients and patterns are computed from M. `ROWS` sets the array depth.
`tb_tone_map` shows an M = 8 instance.

The latencies live in `pimsc_pkg::op_latency_ticks`. The gate chains live in
`scu.sv`, and the reference model mirrors them in `tb_sc_model_pkg.sv`. Change
both together.
