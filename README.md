# LL-ViT encoder accelerator in SystemVerilog

A vision transformer encoder layer does two jobs. The **token mixer** (multi-head self-attention) relates tokens to each other. The **channel mixer** (a two-layer MLP) processes each token on its own. In a tiny ViT such as DeiT-T or I-ViT-T, the MLP holds most of the weights and about half of the multiply-accumulates.

LL-ViT replaces that MLP with a small network of **look-up-table (LUT) neurons**:

1. A thermometer code turns each int8 activation into bits.
2. Two layers of LUT neurons combine these bits.
3. A *conditional summation* adds one small learned value to every output channel for each LUT neuron that fires.

This channel mixer has no weight matrices and no multipliers. It maps onto FPGA logic LUTs, so only the attention weights remain to be stored. They fit on chip and are loaded once.

This repository implements that accelerator as RTL, together with the I-ViT style integer attention, softmax and LayerNorm around it. The hardware structure is:

- one dedicated block per encoder layer (12 for the I-ViT-T backbone);
- within each layer, the data order shown below;
- frames pipelined from layer to layer.

```
 in (int8 stream, N x D)                                                          out (int8 stream)
   |                                                                                  ^
   v                                                                                  |
 +---------------- encoder_layer 0 --------------------+   +-- layer 1 --+       +-- layer 11 --+
 | token_mixer -> i_layernorm -> channel_mixer_pe -> i_layernorm | -> |   ...       | -> ... -> |   ...        |
 |  (MHA on P x P    (Add&Norm 1)   (LUT channel      (Add&Norm 2)| +-------------+       +--------------+
 |   systolic array,                mixer, adds skip)             |
 |   adds residual)                                               |
 +----------------------------------------------------------------+
```

The default configuration is the paper's main one:

| Parameter | Meaning | Value |
|---|---|---|
| `N_TOKENS` | tokens: 14x14 patches of a 224x224 image plus the class token | 197 |
| `D_MODEL` | latent dimension | 192 |
| `N_LAYERS` | encoder layers | 12 |
| `N_HEADS` | attention heads | 3 |
| `SA_P` | systolic array is P x P | 32 |
| `THERMO_B` | thermometer bits per channel | 8 |
| `LUT1_N`, `LUT2_N` | LUT neurons in the two LUT layers | 768, 192 |
| `LUT_K` | inputs per LUT neuron | 6 |
| `ENC_W` | encoded-value precision (int4) | 4 |

All of these are in `rtl/llvit_pkg.sv`. The head count and the LUT fan-in are not published with the design: 3 heads is the usual DeiT-T value, and 6 inputs matches one FPGA LUT6.

## The LUT channel mixer (`channel_mixer_pe`)

This is the new part of the design and the part that most needs explaining.

**Why a whole row at once.** Each LUT neuron's inputs are learned connections to *any* bit of the previous layer. So no channel of the next layer can be computed before the whole token row is available. The processing element therefore works on one full token row (D channels) at a time, and rows follow each other in a pipeline.

**Stages.**

1. **Ping-pong buffer** (`pingpong_buffer`).
   - Elements of the next row arrive one per cycle into one bank.
   - The other bank holds the row currently being processed.
   - The processed row is also the skip (residual) input of the summation, so its bank is released only when the summation has taken its start.
2. **Thermometer encoder** (`thermometer_encoder`).
   - Channel c yields `THERMO_B` bits: `bit[c*TB+t] = (x_c > thr(c,t))`.
   - The thresholds increase with t.
   - There is one comparator per bit, 1536 in all.
3. **LUT layer 1** (`lut_layer`, 768 neurons).
   - Each neuron (`lut_neuron`) is a 2^K-entry truth table.
   - Its address is formed from K wires picked from the 1536 thermometer bits.
   - Input 0 is the address MSB.
   - The outputs are registered.
4. **LUT layer 2** (192 neurons).
   - Same structure, reading the 768 registered bits.
   - The result goes straight into the summation.
5. **Conditional summation** (`cond_sum`). For each output channel i it computes

   `y_i = skip_i + sum_j (lut_j ? W_ij : 0)`

   - `W_ij` are the learned int4 *encoded values*.
   - Each channel owns one 2:1 multiplexer (`W_ij` or 0) and one adder.
   - All D channels step through the 192 LUT outputs together, one per cycle.
   - The accumulator starts at the skip value, which makes the residual add free.
   - This deliberately trades latency for area: an adder tree per channel would be 192 times larger. The slower stages of the layer hide the extra time.
6. **Output bank.** The D sums (16 bits each) leave one element per cycle, with `out_last` on the last element of the row.

**Rate.** In steady state a row completes every `max(D, N2 + 2)` cycles, which is 194 cycles at the defaults. The testbench measures this exactly. When the next row arrives while the current one is still in the summation, it fills the free ping-pong bank; the top-level testbench counts how often this happens.

**Model constants.** In a trained model, the following are the learned parameters of the channel mixer:

- the LUT connections and truth tables;
- the thermometer thresholds.

They are fixed into the netlist, just as a generator would emit them from the trained model. No trained model comes with this RTL. The functions in `llvit_pkg` therefore compute placeholder constants at elaboration time:

- **Connections:** `lut_conn(layer, n, k, in_w) = mix32((layer<<24) ^ (n<<4) ^ k) mod in_w`.
- **Truth tables:** `lut_init(layer, n)` returns 64 bits of the same hash.
- **Thresholds:** `thermo_threshold(c, t, tb) = -128 + (t+1)*256/(tb+1) + (mix32(c ^ 0x01000000) mod 7) - 3`.

`mix32` is a 32-bit xorshift-multiply hash. To use a trained model, replace these three functions. Nothing else changes.

- Each encoder layer passes its index (`LID`) into these functions, so every layer has its own LUT network: LUT layers `2*LID+1` and `2*LID+2`.
- The encoded values `W_ij` are different: they are 36,864 int4 numbers per layer, held in a memory and written through the load port.

## The token mixer (`token_mixer`)

The attention block holds:

- one frame (N x D int8 activations);
- its four D x D weight matrices;
- the intermediate matrices Q, K, V, the score matrix, the probability matrix, the head outputs and the projection.

Every matrix product runs on a single `P x P` output-stationary systolic array (`systolic_array`, `systolic_pe`). The array skews its inputs internally. A tile of an `M x C x K` product goes through three phases:

- one cycle to clear the accumulators;
- `K + 2P - 2` cycles of feeding;
- one cycle in which all P x P results are requantised and written back.

In total a tile takes `K + 2P` cycles. The operations of a frame follow this order:

```
Q = X Wq,  K = X Wk,  V = X Wv                      (int8, >> 7)
for head h = 0..H-1 (DH = D/H = 64 columns):
    S_h = Q_h K_h^T      (int16, 4 fractional bits, >> 9; includes 1/sqrt(DH))
    ShiftMax, row by row  -> P_h (unsigned 8-bit, 256 = 1.0)
    O_h = P_h V_h        (int8, >> 8) into columns h*DH.. of O
R = O Wo                                            (int8, >> 7)
out = X + R          streamed out as 16-bit values (the "Add" of Add & Norm)
```

All requantisation uses arithmetic right shifts with saturation. Biases are not modelled.

With `Tn = ceil(N/P)`, `Td = ceil(D/P)` and `Tdh = ceil(DH/P)`, the compute time of one frame is

`4*Tn*Td*(D+2P) + H*(Tn^2*(DH+2P) + 38*N + Tn*Tdh*(N+2P))` cycles.

The testbench checks this count exactly. At the defaults the compute time is 95,244 cycles. Loading the frame takes another N*D = 37,824 cycles, and so does streaming out the result.

The token mixer accepts a new frame only after its output has left. It is by far the slowest stage, so the layer-to-layer pipeline is paced by it.

**ShiftMax** (`shiftmax`) is integer-only, in the I-ViT style. It works on one score row of N elements at a time:

1. Subtract the row maximum: `x~ = x - max <= 0`.
2. Multiply by log2(e) with shifts: `p = x~ + x~>>1 - x~>>4`.
3. Split `-p` into an integer part q and a fraction u.
4. Take `e = ((1 - u/2) >> q)`, kept with 15 fractional bits.
5. A 32-step restoring divider (`seq_div`) forms `factor = 2^31 / sum(e)`.
6. Each probability is `min(255, (e*factor) >> 23)`.

A row takes 37 cycles from start to done, and the token mixer spends 38 cycles per row.

## Integer LayerNorm (`i_layernorm`)

The normalisation avoids every division by D. With `S = sum x` and `Q = sum x^2` over a row:

`(x - mean)/std = (D*x - S) / sqrt(D*Q - S^2)`

Processing goes as follows:

1. S and Q accumulate while the row streams in.
2. A bit-serial integer square root (24 cycles) gives s.
3. A 22-cycle divider gives `factor = 2^21 / s`. It returns all ones when s = 0, that is for a constant row.
4. The row streams out as `z = ((D*x - S)*factor) >>> 16` (5 fractional bits) and `y = sat8(((z*gamma) >>> 6) + beta)`.
   - gamma has 6 fractional bits (64 = 1.0).
   - beta is int8.

One row costs about `2D + 50` cycles, so LayerNorm is slower than the channel mixer at D = 192. I-ViT itself uses a Newton iteration for the root; the bit-serial root is this design's choice.

## Encoder layer and the layer pipeline

`encoder_layer` connects its four stages with one-element-per-cycle valid/ready streams. The order is post-norm: attention, Add & Norm, channel mixer, Add & Norm.

- LayerNorm 1, the channel mixer and LayerNorm 2 work on successive token rows concurrently.
- The token mixer must hold the whole frame before it can produce any output.

`ll_vit_top` chains `N_LAYERS` encoder layers, each with its own systolic array, LUT network and weight memories. Several frames are therefore in flight, one per layer:

- When layer l+1 cannot take data, layer l stalls (back-pressure).
- `layer_busy[l]` shows which token mixers hold a frame.

### Top-level ports

| Port | Direction | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_data[7:0]` | in/out/in | embedded tokens of a frame, int8, row-major (token by token, channel by channel), one per handshake |
| `out_valid`, `out_ready`, `out_data[7:0]`, `out_last` | out/in/out/out | encoded tokens of the last layer, same order; `out_last` marks the last element of each token row |
| `wl_en`, `wl_layer[7:0]`, `wl_sel`, `wl_addr[15:0]`, `wl_data[7:0]` | in | weight load port, one write per cycle while `wl_en` is high |
| `layer_busy[L-1:0]` | out | token mixer of layer l holds a frame |

Load-port map (`wl_sel`, type `llvit_pkg::mem_sel_e`):

| `wl_sel` | Memory | `wl_addr` |
|---|---|---|
| 0..3 `MEM_WQ/WK/WV/WO` | D x D int8 matrices (`Q = X*Wq`) | `row*D + col` (row = input channel) |
| 4, 5 `MEM_G1/B1` | LayerNorm 1 gamma / beta | channel |
| 6, 7 `MEM_G2/B2` | LayerNorm 2 gamma / beta | channel |
| 8 `MEM_ENC` | channel-mixer encoded values `W_ij`, int4 in bits 3:0 | `j*D + i` (j = LUT, i = channel) |

A full model is 185,088 writes per layer, about 2.2 M cycles for 12 layers. All weights stay on chip afterwards.

Patch embedding and the classification head are outside the accelerator. Frames enter already embedded (class token included) and leave as the final encoder output.

## Cycle budget at the defaults

Each layer spends about 181 k cycles on a frame:

- the token mixer needs about 95 k cycles of compute plus 38 k cycles in and 38 k out;
- LayerNorm 1, the channel mixer and LayerNorm 2 follow one row behind.

Because the layers are pipelined, throughput is one frame per token-mixer period (about 0.9 ms at 200 MHz). The full-size simulation measures a single-frame latency through all 12 layers of 2,174,076 cycles from the last input element to the last output. That is about 10.9 ms at 200 MHz, against the 5.3 ms reported for the published FPGA implementation. The gap comes mainly from the element-serial links between stages: they move one int8 per cycle, where a production design would use wider buses.

## Departures from the published design, and assumptions

| Area | This design | Published design |
|---|---|---|
| Head count and LUT fan-in | 3 heads, 6 inputs per LUT | not given |
| Thermometer comparison | strict: `x > thr` | comparators; compare type not given |
| Model constants | hash-generated placeholders (see above); each layer gets its own LUT network through its layer index, while thermometer thresholds are shared by all layers | trained values emitted per layer |
| Systolic array | output-stationary dataflow with internal skew; one cycle writes back a whole tile | dataflow not given |
| Token-mixer schedule, shift amounts, absence of biases | this design's choices | not given |
| ShiftMax, I-LayerNorm | fixed-point formats, shift amounts and the bit-serial root are this design's choices | follow I-ViT only by name |
| Stage interfaces | element-serial valid/ready, so the cycle figures above are not the FPGA's | not given |
| Residual around the channel mixer | added inside the conditional summation by presetting each accumulator with the skip value; encoded values and skip share one scale | the summation equation has no skip term, but the hardware description says the adder "also accumulates the skip connections"; the hardware description is followed |
| Not built | patch embedding, classifier head, and the host or flash that supplies weights | described only by name or outside the accelerator |

## Files

`rtl/`:

| File | Contents |
|---|---|
| `llvit_pkg.sv` | sizes, load-port enum, placeholder model-constant functions, saturation helper |
| `lut_neuron.sv`, `lut_layer.sv` | LUT neuron and a layer of them with its learned wiring |
| `thermometer_encoder.sv` | comparator bank |
| `pingpong_buffer.sv` | two-bank row buffer |
| `cond_sum.sv` | conditional summation with encoded-value memory |
| `channel_mixer_pe.sv` | the LUT channel mixer |
| `systolic_pe.sv`, `systolic_array.sv` | P x P output-stationary array |
| `seq_div.sv` | restoring divider used by ShiftMax and LayerNorm |
| `shiftmax.sv` | integer softmax |
| `i_layernorm.sv` | integer LayerNorm |
| `token_mixer.sv` | multi-head attention with its memories and scheduler |
| `encoder_layer.sv` | one layer |
| `ll_vit_top.sv` | the stack |

`tb/`:

- `tb_ref_pkg.sv` holds integer reference models of every stage, written independently of the RTL structure: ShiftMax, LayerNorm, thermometer, LUT layers, channel mixer, matrix products, token mixer and the whole encoder layer. The exceptions are the placeholder model constants from `llvit_pkg`.
- There is one self-checking testbench per module. Each prints `TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.
  - Latencies and rates are checked where the design defines them: ShiftMax 37 cycles, channel-mixer row period, the token-mixer cycle formula, and summation length.
  - `tb_ll_vit_top` runs three frames through a reduced two-layer stack (N=5, D=16, H=2, P=4, LUT layers of 128 and 192 neurons) with random back-pressure. It checks every output element. It also counts input stalls, output back-pressure, frames overlapping in different layers, ping-pong fills while the other bank is held, and ShiftMax rows, and it fails if any of these never happens.
  - `tb_ll_vit_full` instantiates `ll_vit_top` with every parameter at its default. It loads all 12 layers through the load port, sends one 197 x 192 frame, and compares every output with the chained reference model. It takes about 4.4 M cycles: 2.2 M to load and 2.2 M for the frame.

### Simulating with Verilator

The packages must come first:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/llvit_pkg.sv tb/tb_ref_pkg.sv \
  rtl/lut_neuron.sv rtl/lut_layer.sv rtl/thermometer_encoder.sv rtl/pingpong_buffer.sv \
  rtl/cond_sum.sv rtl/channel_mixer_pe.sv rtl/systolic_pe.sv rtl/systolic_array.sv \
  rtl/seq_div.sv rtl/shiftmax.sv rtl/i_layernorm.sv rtl/token_mixer.sv \
  rtl/encoder_layer.sv rtl/ll_vit_top.sv \
  tb/tb_ll_vit_top.sv --top-module tb_ll_vit_top
./obj_dir/Vtb_ll_vit_top
```

Replace the last testbench file and `--top-module` to run any other test.

The full-size test is heavy. Verilating and compiling it takes several minutes (about 3.5 minutes with `-j 8`). Simulating its 4.4 M cycles takes another 4 to 6 minutes.

- The simulator is two-state, so every register that is read is reset.
- Testbenches drive inputs on the falling clock edge.
- To change a size, override the parameters of `ll_vit_top` or edit the constants in `llvit_pkg`.
- The reference models take the sizes as arguments.
