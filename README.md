# FloatSD8 LSTM neuron circuit

An LSTM cell spends almost all of its arithmetic on multiplications: four
matrix-vector products for the gates, then two element-wise products for the
cell state and the output. This design makes every one of those
multiplications cheap by giving one operand at most two non-zero signed
digits. Multiplying by such a number takes two shifts and an add. No
multiplier array is needed.

- **Weights** are stored in *FloatSD8*: a 3-bit exponent plus a mantissa built
  from two signed-digit groups, 8 bits in all.
- **Activations** are 8-bit floating point (FP8: 1 sign, 5 exponent and 2
  mantissa bits). Accumulation is in FP16.
- **Gate values.** The outputs of the sigmoid gates (i, f, o) are themselves
  quantized to FloatSD8, so `f*c`, `i*g` and `o*tanh(c)` are FloatSD8 × FP8
  products too. Each of them runs on the same multiply-accumulate unit (MAC)
  that computes the matrix products.

The RTL here implements the LSTM inference circuit of Liu and Chiueh, *"Low-
Complexity LSTM Training and Inference with FloatSD8 Weight Representation"*
(IJCNN 2020 submission). That source gives:

- the block diagrams of the unit, the processing element and the MAC;
- the number formats;
- the two-region sigmoid quantization;
- the five-stage pipeline.

It does not give bit-level encodings, widths, handshakes or table contents.
Those are filled in here and are listed in the section
[What comes from the source design and what does not](#what-comes-from-the-source-design-and-what-does-not).

## Number formats (`floatsd8_pkg`)

| format   | bits | layout | value |
|----------|------|--------|-------|
| FP8      | 8    | s, e[4:0], m[1:0] | (-1)^s · 1.m · 2^(e-15); e = 0: 0.m · 2^-14 |
| FP16     | 16   | s, e[4:0], m[9:0] | IEEE binary16 layout, bias 15, subnormals |
| FloatSD8 | 8    | e[2:0], s, k[3:0] | (-1)^s · M(k) · 2^(e-9) |

FP8 and FP16 have **no Inf or NaN** here. An all-ones exponent is an
ordinary finite binade. A MAC result that overflows saturates to ±65504.

### FloatSD8

A FloatSD8 mantissa is a 3-digit signed-digit group (the MSG) followed by a
2-digit group. Each group has at most one non-zero digit, which can be +1 or
−1. With the MSG scaled by 4, the mantissa is

    M = (MSG digit ∈ {0, ±4, ±8, ±16}) + (second digit ∈ {0, ±1, ±2})

That gives 35 combinations but only 31 distinct values: 0, ±1…±10 and
±14…±18. The encoding used here is a sign bit plus a 4-bit magnitude index
`k`:

| k | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|---|---|----|----|----|----|----|----|
| M | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 14 | 15 | 16 | 17 | 18 |
| MSG + 2nd | 0+0 | 0+1 | 0+2 | 4−1 | 4+0 | 4+1 | 4+2 | 8−1 | 8+0 | 8+1 | 8+2 | 16−2 | 16−1 | 16+0 | 16+1 | 16+2 |

The exponent bias is 9. It was chosen so that the sigmoid table works out:
with bias 9, exactly 42 non-zero FloatSD8 values lie in (0, 0.5]. The
smallest positive value is 2^-9 and 1.0 is `8'hAD` (M = 16, e = 5).

## The FloatSD8 MAC (`floatsd8_mac`)

`result = round_FP16(addend + Σ_{p=0..3} x[p]·w[p])`: four FP8 × FloatSD8
products and one FP16 addend (a bias or the previous partial sum). The four
8-bit inputs and four 8-bit weights are each 32 bits in total, the same I/O
width as one FP32 operand pair. A new operation can start every cycle. The
result comes out 5 cycles later.

| stage | module | work |
|-------|--------|------|
| 1 | `fsd8_weight_decoder` ×4, `fsd8_pp_gen`, `fsd8_max_exp` | Split each weight into two signed power-of-two digits. Form the 8 partial products: the input's 3-bit significand with exponent `ex + digit position + we − 9`. Make the addend the 9th term. Find the largest exponent among the non-zero terms. |
| 2 | `fsd8_align` | Shift each 11-bit significand (plus 13 guard bits, 24 bits in all) right by its distance to the largest exponent, then apply the sign. |
| 3 | `fsd8_csa_tree` | Wallace tree of 3:2 compressors (9→6→4→3→2), then one 29-bit adder. |
| 4 | `fsd8_round_norm` | Magnitude, leading-one detection, normalization, round to nearest even at 11 bits. |
| 5 | `fsd8_subnormal` | Pack to FP16: exact zero gives +0, overflow saturates. A result below 2^-14 is rounded again from the *unrounded* normalized bits on the 2^-24 grid, so subnormal results are never rounded twice. |

**The alignment window is the one point where the MAC is not exactly
rounded.** Bits of a term that lie more than 23 places below the largest
term's leading bit are dropped (truncation toward zero) before the sum. When
all terms are within 13 binades of the largest one, the result is the
correctly rounded FP16 sum. Otherwise it can differ from the exact sum by a
few units of 2^(Emax−23). The testbench reference models exactly this rule,
so all MAC checks are bit-exact.

A valid bit and a `TAG_W`-bit tag travel through the pipeline with the data.
The PE uses the tag for the batch index. The LSTM unit uses it to carry o_t
past the cell MAC.

## Quantized activations (`sigmoid_lut`, `tanh_lut`, `gate_lut`)

Rounding σ(x) directly to FloatSD8 gives fine steps near 0 and coarse steps
near 1, because FloatSD8 spacing grows with magnitude. The sigmoid is
therefore quantized in two halves, using σ(x) = 1 − σ(−x):

    x ≤ 0 :  y = Q(σ(x))        → y_hi = Q,   y_lo = 0
    x > 0 :  y = 1 − Q(σ(−x))   → y_hi = +1,  y_lo = −Q

Here Q rounds to the nearest FloatSD8 value. Both halves need only
Q(σ(−|x|)), which takes 42 values from 0.5 down to 2^-9. Q never returns 0,
so the curve levels off at 1 − 2^-9 ≈ 0.998 for large x. The output is a
*pair* of FloatSD8 numbers. A gate value therefore becomes two (input,
weight) pairs of the next MAC, which is why the cell MAC needs all four of its
pairs.

The table works on |x| rather than on an address. Entry j holds the FloatSD8
code of level L_j and the threshold

    T_j = ln(1/m_j − 1),   m_j = (L_{j−1} + L_j)/2,

which is rounded **up** to the next FP16 value. For any FP16 input,
`|x| ≥ T_j` holds exactly when σ(−|x|) ≤ m_j. Comparing |x| with all 41
thresholds (15-bit unsigned compares, since positive FP16 numbers order like
integers) therefore gives the correctly rounded level for every one of the
65536 inputs. `tanh_lut` works the same way. Its levels are the 61 FP8 values
0…1.0, whose codes are simply 0…60. The thresholds are atanh of the
midpoints, and the input's sign is put back on the result.

`gate_lut` is the registered "Sigmoid / Tanh LUT" block of the unit. It
computes sigmoid pairs for i, f and o, and an FP8 tanh for g.

## Processing element (`processing_element`, `pe_controller`, `psum_regs`)

The PE is output-stationary. It builds one dot product per batch item and
keeps each running sum in a partial-sum register (8 registers). Operands
arrive as 4-element chunks in **chunk-major order**: chunk 0 of items
0…B−1, then chunk 1 of items 0…B−1, and so on. All items share the weights
of a chunk. For every accepted chunk, the controller provides:

- `index`: the item, which is also its partial-sum register;
- `initial`: high on chunk 0, where the MAC adds the bias instead of the
  stored sum;
- `last`: high on the final chunk, whose MAC result becomes `out_valid`.

A sum goes back into its register 6 cycles after issue: 5 in the MAC and
1 for the write. With B ≥ 6, an item comes round again only after its sum is
back, so the PE accepts one chunk per cycle and never stalls. With B ≤ 5 a
scoreboard (one busy bit per register, set on issue and cleared on
write-back) holds `in_ready` low until the sum is back. This includes the
first chunk of a new dot product, because one bit can track only one
operation in flight. Examples:

- B = 8, C chunks: exactly 8·C cycles.
- B = 3, 4 chunks: 21 cycles (3 + 3·6).

## The LSTM unit (`lstm_unit`, top level)

```
x chunk ─┬─ PE(W_i,b_i) ─┐            ┌──────────── o_t (as MAC tag) ───────────┐
         ├─ PE(W_g,b_g) ─┤  gate_lut  │                                          ▼
         ├─ PE(W_f,b_f) ─┼─► i,f,o ──►cell MAC: (c,f_hi)+(c,f_lo)+(g,i_hi)+(g,i_lo) ─► c_t ─► tanh_lut ─► out MAC: (tc,o_hi)+(tc,o_lo) ─► h_t
         └─ PE(W_o,b_o) ─┘    g(FP8)              ▲                                 │
                                        cell_state_mem (FP8 c per item) ◄── FP8 ───┘
```

The four PEs see the same input stream and stay in lock-step. An assertion
checks this. The cell state is kept in FP8, one entry per batch item: it
re-enters the MAC as an FP8 operand anyway. `tanh` is applied to the
full-precision FP16 c_t.

**Driving it.** One unit computes **one neuron** for up to 8 sequences. For
each time step, the caller must:

1. Set `cfg_batch` (1…8) and `cfg_chunks = ceil((E+H)/4)`. For the first
   time step of new sequences, also pulse `clear_state` (c_0 = 0).
2. Stream `[x_t ; h_{t−1}]` in FP8, chunk-major, with the neuron's four
   weight rows and biases. Follow `in_valid`/`in_ready`.
3. Collect `h_valid`/`h_index`/`h` (FP16). Each h appears **17 cycles** after
   the item's last chunk is accepted: PE 5 + LUT 1 + cell MAC 5 + tanh 1 +
   output MAC 5.
4. Round h_t to FP8 and feed it back as part of the next step's input. The
   unit has no feedback path of its own.

The cell memory holds one neuron's state. A layer of H neurons therefore
uses H units, or, if one unit is time-shared, needs its cell state kept per
neuron outside the unit.

## What comes from the source design and what does not

**From the source design:**

- the block structure (four PEs, sigmoid/tanh LUT, two FloatSD8 MACs, cell
  memory, tanh LUT);
- the PE with bias/partial-sum mux, index/initial controller and partial-sum
  registers;
- the five MAC stages and their order;
- FloatSD8 with a 3-digit and a 2-digit group (31 values, 8 bits);
- FP8 as 1/5/2 and FP16 accumulation;
- "regular" rounding;
- the two-region sigmoid with 42 levels and a FloatSD8 pair as output;
- batching over ≥ 6 items for full MAC use, and the wait otherwise.

**Chosen here:**

- the FloatSD8 bit layout and bias 9;
- the digit split of each magnitude;
- no Inf/NaN, with saturation on overflow;
- the 24-bit alignment window with truncation;
- the comparator form of the LUTs and the rounding of their thresholds;
- clamping Q at 2^-9;
- FP8 tanh output and FP8 cell storage;
- 8 partial-sum registers;
- the chunk order, the valid/ready handshake and the scoreboard;
- the extra register stages around the LUTs;
- the operand order in the cell and output MACs;
- the `clear_state` input.

**Not built:** the training scheme (backward pass, FP8 gradients, FP16/FP32
master-copy updates, loss scaling). The source evaluates it in software only.
Its hardware is an inference circuit. The 40 nm / 400 MHz area and power
figures concern synthesis and are not reproduced here.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. The reference
values come from `tb/fp_ref_pkg.sv`, which works with `real` numbers:
decoding of all formats, round-to-nearest-even to FP8/FP16, and a MAC model
that applies the alignment-window rule above.

- The LUTs and `fp16_to_fp8` are checked **exhaustively** over all 65536
  FP16 inputs. The sigmoid reference builds its 42 levels by enumerating
  FloatSD8.
- `floatsd8_mac`: 4000 random and directed operand sets, bit-exact, with a
  5-cycle latency check. Subnormal, saturated and zero results are counted.
- `processing_element` / `pe_controller`: batches of 1…8. Full rate is
  checked at B ≥ 6, stalls at B < 6, and a minimum of 6 cycles between
  issues of one item.
- `tb_lstm_unit`: runs the top at its default size. It covers 9 time steps
  over three runs (batch 8, 3 and 6) with recurrent h feedback, two
  `clear_state` pulses and the 17-cycle h latency. Every h_t is compared
  bit-exactly against the real-number recurrence. It also counts stalls,
  sigmoid inputs on both sides of zero, and non-zero c_{t−1} reads.
- `tb_lstm_layer`: a small inference workload. A layer of 8 neurons is
  built from 8 `lstm_unit` copies that share the input stream. It has 24
  inputs, a batch of 8 sequences and 12 time steps, with all h_t fed back
  as FP8. Every h_t is checked bit-exactly. The run is also compared with
  an unquantized LSTM that uses the same FloatSD8 weights and FP8 inputs
  but exact sigmoid/tanh and real-valued state. In the reference run the
  mean |h error| is about 0.011 and the largest about 0.07. The test fails
  above 0.05 mean or 0.25 maximum; these limits are this test's own.

Run any testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/floatsd8_pkg.sv tb/fp_ref_pkg.sv tb/tb_lstm_unit.sv \
        --top-module tb_lstm_unit
    ./obj_dir/Vtb_lstm_unit

Verilator finds the other modules through `-I` by file name: one module or
package per file, `rtl/<name>.sv`. All parameters default to the sizes above.
`NUM_PSUM` (partial-sum registers and batch slots) is the only size
parameter of the top.
