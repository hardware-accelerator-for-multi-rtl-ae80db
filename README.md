# An INT8 accelerator for the MHA and FFN ResBlocks of a Transformer

A Transformer layer has two residual blocks (ResBlocks):

- **MHA**, multi-head attention: per head i, `Q W_Qi`, `K W_Ki` and `V W_Vi`, then `softmax(mask(Q_i K_i^T / 8)) V_i`. The heads are concatenated, multiplied by `W_G`, added to the input Q and layer-normalised.
- **FFN**, the position-wise feed-forward block: `ReLU(X W1 + b1) W2 + b2`, added to X and layer-normalised.

Almost all of the work in both is matrix products whose shapes are multiples of 64. This design has one matrix unit for all of it: a systolic array (SA) of s × 64 INT8 multiply-accumulate cells. Every product is cut into GEMMs of shape (s × K) · (K × 64), and a controller issues those GEMMs in a fixed order. Around the array sit:

- the operand buffers,
- a bias/requantise/ReLU/residual stage,
- a softmax unit that works in the log domain and needs no divider,
- a LayerNorm unit that collects its statistics while the data stream in.

Defaults are s = 64 (sequence length) and h = 8 heads, so d_model = 64h = 512 and d_ff = 256h = 2048.

All RTL is SystemVerilog in `rtl/`. The self-checking testbenches are in `tb/`.

## Block overview

```
            +-------------+      A (s x 1 per cycle)  +---------------------+
 host  ---> | data_memory |-------------------------->|                     |
            | Q/X, K=V,   |                           |  systolic_array     |
            | Temp1, P    |    B (1 x 64 per cycle)   |  s x 64 INT8 MACs   |
            +-------------+   +---------------+------>|  (output-stationary)|
 host  ---> weight_memory ----+               |       +----------+----------+
            temp2_buffer -----+ (cols or rows)           one result column/cycle
                                                                   v
        bias_memory ----------------------------------> sa_output_path
        data_memory (residual Q/X) --------------------> + bias, >>shift, sat, ReLU, + residual
                                                                   |
                 +------------+-------------+-------------+--------+
                 v            v             v             v
              Temp1        Temp2         softmax        P buffer      layernorm --> out_*
                           (S x 64)   (mask_matrix)                  (rsqrt_lut)
                                       Y -> Temp1
```

`tfa_top` connects the blocks. `controller` sequences them.

## The systolic array and its timing

`systolic_array` is output-stationary.

- **Inputs.** In each cycle one k-slice enters: a column of A (s values) on the left and a row of B (64 values) on top. Row i of A is delayed i cycles and column j of B is delayed j cycles. PE(i,j) therefore sees A(i,k) and B(k,j) in cycle k+i+j.
- **Flags.** Every slice carries three flags: `valid`, `first` (clear the accumulator) and `last`. The flags travel with A along the rows.
- **Result capture.** When `last` reaches a PE, the PE copies its sum into a result register. The array can then start the next GEMM immediately, with no drain gap.
- **Read-out.** Column c of the whole array is final when `last` leaves PE(s−1, c). That event is one-hot over the columns and drives a multiplexer, so result columns leave in order 0…63, one per cycle.
- **Latency.** The first result column leaves K+s+1 cycles after the first slice entered.
- **Tags.** A small FIFO inside the array carries each GEMM's *tag* (destination, bias base, column base, shift, ReLU) next to its data.

Because the read-out takes 64 cycles, a GEMM with K < 64 has to start 64−K cycles late. Otherwise two GEMMs would read out in the same cycle. Assertions check this rule and the tag FIFO.

## GEMM schedule (controller)

The controller runs the steps below. K is the GEMM depth, i.e. the number of slices.

| ResBlock | step | A operand | B operand | K | result goes to |
|---|---|---|---|---|---|
| MHA, head i | 1 | Q | W_Qi | 64h | Temp1 |
| | 2 | K (=V) | W_Ki | 64h | Temp2 |
| | 3 | Temp1 | Temp2, read by columns | 64 | softmax (D = Q_i K_i^T) |
| | 4 | V (=K) | W_Vi | 64h | Temp2 |
| | 5 | Temp1 (= Y) | Temp2, read by rows | s | P, columns 64i… |
| MHA, then for each i | 6 | P | W_Gi | 64h | + b + Q_i → LayerNorm |
| FFN, i < 4h | | X | W1_i | 64h | ReLU → P, columns 64i… |
| FFN, i < h | | P | W2_i | 256h | + b + X_i → LayerNorm |

The array is fed without gaps except in four places. In each of these the controller waits for `pipe_idle` (nothing in flight between the memories and the array output):

- step 3 (it needs the Temp1 and Temp2 results),
- step 5 (it also waits for the softmax to finish writing Y into Temp1),
- the first `W_G` or `W2` GEMM (it needs all of P),
- the short step 5 when s < 64: it gets its 64−s padding cycles.

Step 4 overlaps the softmax. That works because the softmax stores D internally and writes Y back into Temp1, which step 4 does not read.

**Weight layout.** A weight word is one 64-wide row of a 64-column block (512 bits).

- MHA: block b starts at word b·64h, with b = 3i, 3i+1 and 3i+2 for W_Qi, W_Ki and W_Vi, and b = 3h+i for W_Gi.
- FFN: W1_i starts at i·64h and W2_i at 4h·64h + i·256h.
- The 64 biases of block b are at words 64b…64b+63. They are 32-bit values at accumulator scale.
- The weight memory is 512h² words deep (2 MiB at h = 8). That is exactly the FFN's W1 plus W2.

## Number formats and requantisation

Operands are INT8 and accumulators 32-bit. The sa_output_path works in three stages:

1. It adds the column's bias.
2. It shifts right arithmetically with round-half-up. The shift comes from `qcfg` and is set separately for Q, K, V, QK^T, PV, G, FFN1 and FFN2.
3. It saturates: to INT8 for the buffers, or to 16 bits for the softmax input D.

ReLU is applied for FFN sublayer 1. For the G GEMMs, the residual column of Q or X is added to the saturated INT8 value, which gives a 16-bit G.

Choosing the shifts is the user's calibration job. The testbench derives them from d_model.

## Softmax without a divider

The softmax gets D one column per cycle and processes the s rows in parallel lanes. Each lane computes

```
x_j = D(i,j) / 8                       (arithmetic shift by 3; 1/sqrt(64))
m   = max over unmasked j of x_j       (masked entries count as -inf)
L   = ln( sum over unmasked j of exp(x_j - m) )
Y(i,j) = exp(x_j - m - L)              (0 where masked)
```

This is the log-sum-exp form, so each lane needs only an EXP unit and an LN unit, no divider.

The EXP unit uses shifts and adds only:

- exp(z) = 2^(z·log2 e), with log2 e ≈ 1 + 1/2 − 1/16.
- z·log2 e is split into an integer part u and a fraction v.
- 2^v is approximated by 1+v, and the result is shifted by u.

The LN unit also uses shifts and adds:

- It finds the leading-one position w of the sum.
- It treats the mantissa linearly, so log2(x) ≈ w + k.
- It multiplies by ln 2 ≈ 1/2 + 1/8 + 1/16 + 1/256.

Formats:

| quantity | format |
|---|---|
| D | 16 bit, 4 fraction bits |
| x and exponents | 8 fraction bits |
| sum | Q.15 |
| Y | unsigned INT8, Q0.7 (1.0 saturates to 127) |

Timing: the sum pass takes s cycles after the last D column, and the ln step one cycle. The first Y column leaves s+3 cycles after the last D column, and the s columns follow back to back.

The linear approximations give an error of up to about 12 LSB of Q0.7 against an exact floating-point softmax. The unit testbench allows 14 LSB. The end-to-end testbench compares against a bit-exact model of the same arithmetic.

The attention mask comes from `mask_matrix`, which holds s × s bits. The host writes it row by row, and the softmax reads one column per cycle. A set bit means masked.

## LayerNorm in one pass

The LayerNorm output is Output(i,t) = (G(i,t) − E_i) · r_i · γ_t + β_t.

- E_i is the row mean.
- r_i = (E(G²)_i − E_i² + ε)^−½.

Each lane accumulates ΣG and ΣG² while the columns arrive, and the columns are stored as well. So when the last column of G arrives, only two short steps remain:

1. the mean and variance (division by d_model is a multiplication by 2²⁰/d_model),
2. the x^−½ lookup.

The output columns then stream out. The first leaves 5 cycles after the last G column, and there are 64h columns, one per cycle.

`rsqrt_lut` computes x^−½ as follows:

- It normalises x to m·2^e by its leading one.
- If e is odd, it folds one factor of 2 into m so that e becomes even.
- It reads a table of 2 × 32 entries, indexed by that parity and five mantissa bits.
- It shifts the entry by e/2.

The table entries are floor(2¹⁵/√m) at each interval's midpoint. They are computed during elaboration by an integer square-root function, not stored in a file.

Formats:

| quantity | format |
|---|---|
| G | 16-bit integer |
| E | 8 fraction bits |
| variance | 16 fraction bits |
| ε | 1 LSB of the variance |
| r | 26 bits, 16 fraction bits |
| γ | INT8, 6 fraction bits |
| β | INT8, 4 fraction bits |
| output | INT8, 4 fraction bits, rounded and saturated |

## Using the top level

1. Hold `rst_n` low, then release it.
2. Load the inputs. All host ports write on the clock edge while their enable is high.
   - `hw_act_*`: column t of Q (or X) with `hw_act_sel` = 0, or of K=V with `hw_act_sel` = 1. K and V are the same input, as in self-attention.
   - `hw_w_*`: one 64-element weight row per word, in the layout above. Element j is in bits 8j+7…8j.
   - `hw_b_*`: the biases.
   - `hw_m_*`: one mask row per write (MHA only).
   - `hw_ln_*`: γ_t and β_t.
3. Set `mode` (`MODE_MHA` / `MODE_FFN`) and the `qcfg` shifts, and pulse `start`.
4. Collect the results. The ResBlock output leaves on `out_valid` / `out_col` / `out_data[s]`, one column per cycle. `done` pulses with the last column.

Only one ResBlock is resident at a time: the weight and bias memories hold the weights of the block being run.

## Cycle counts

The controller adds 2 cycles per GEMM, plus the waits described above. At the defaults (s = 64, h = 8), the sum of the GEMM depths is:

- MHA: h(3·512 + 64 + 64) + h·512 = 17,408 slices.
- FFN: 4h·512 + h·2048 = 32,768 slices.

Measured at the defaults by `tb_tfa_full`, from `start` to `done`:

| ResBlock | k-slices | cycles | published cycles | time at 200 MHz |
|---|---|---|---|---|
| MHA | 17,408 | 20,362 | 21,344 | 101.8 µs |
| FFN | 32,768 | 33,626 | 42,099 | 168.1 µs |

The gap between slices and cycles is made up of the waits (2,340 stall cycles over both ResBlocks), two cycles per GEMM, the read-out of the last GEMM and the LayerNorm output stream. Both ResBlocks agree with the bit-exact model, and the largest LayerNorm output error against the real-valued reference is 1 LSB. At s = 8, h = 1 the end-to-end testbench measures 762 cycles for MHA and 740 for FFN.

## Where this design departs from, or fills in, the original description

- **Variance sign.** The source describes the variance once as E(G²) − E² and, in its equation and block diagram for the optimised unit, as E² − E(G²). Only the first is correct, and it is used here.
- **ε.** ε is one LSB of the Q.16 variance. The nominal 10⁻⁸ is below the resolution.
- **EXP and LN units.** Their insides are not given in the source beyond "linear approximation". The units here are a reconstruction using shifts and adds.
- **Softmax, last lane.** The block diagram compares the last lane with the first lane's maximum; every lane uses its own row maximum here.
- **Design choices the source does not specify:**
  - the array dataflow (skew, output registers, column read-out) and the tag FIFO,
  - all number formats, rounding and saturation,
  - the memory layouts and the host interface,
  - the controller's waits and padding,
  - the size of the x^−½ table.
- **Not modelled:** anything outside the two ResBlocks (embedding, weight transfer from off-chip).
- **Sequence length.** Only s ≤ 64 is supported.

## Verification

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M` and stops on a watchdog.

| testbench | what it checks |
|---|---|
| `tb_systolic_array` | random GEMMs of several depths, back to back and padded, against a reference product; the K+s+1 latency |
| `tb_sa_output_path` | bias, rounding, saturation, ReLU, residual and addresses against a model |
| `tb_data_memory`, `tb_temp2_buffer`, `tb_weight_memory`, `tb_bias_memory`, `tb_mask_matrix` | random write/read against a shadow copy |
| `tb_softmax_exp_unit`, `tb_softmax_ln_unit`, `tb_rsqrt_lut` | sweeps against real-valued functions |
| `tb_softmax` | random masked rows against real softmax; latency |
| `tb_layernorm` | random rows against real-valued LayerNorm; latency |
| `tb_controller` | the full GEMM list of both ResBlocks, operand addresses, waits and padding, against a datapath model |
| `tb_tfa_top` (s = 8, h = 1) | both ResBlocks end to end against a bit-exact model, LayerNorm within 2 LSB; counts stalls, padding cycles, ReLU clamps, G columns and softmax columns |
| `tb_tfa_full` | the same body at the defaults (s = 64, h = 8) |

The shared end-to-end body is `tb/tfa_tb_body.svh`.

Run a testbench with plain verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tfa_pkg.sv tb/tb_tfa_top.sv --top-module tb_tfa_top
./obj_dir/Vtb_tfa_top
```

The full-size build is large (4096 PEs and 2 MiB of weight memory). With `-j 6` the C++ build takes about 11 minutes; the simulation of both ResBlocks then takes about 25 seconds.

## Tool notes

- `tfa_top` declares `stall` and `pad`. They are controller status signals kept for observation; the testbenches count them hierarchically.
- Lint reports `rst_n` as used both asynchronously and synchronously. The synchronous use is only the `disable iff` of an assertion.
