# Immutable Tensor Architecture: hardwired-weight Transformer inference device

## Design idea

Here a neural network is a fixed circuit, not a program. Every weight of the
model is a constant built into the logic. Each constant becomes its own
shift-and-add multiplier, and a weight of zero becomes no logic at all. There
is no weight memory, no weight loading and no instruction stream. Activations
flow from one hardwired layer to the next, and nothing the host sends can
change the weights or the model's structure.

The work is split with the host ("split brain"):

* The **device** holds everything static. For every layer it computes the
  Q/K/V projections and the SwiGLU feed-forward network (FFN), and at the end
  it computes the logits.
* The **host** holds everything that grows with the context: tokenization, the
  KV cache, softmax attention and sampling.

For each token and each layer, the device sends Q, K and V to the host. The
host adds K and V to its cache, computes attention and returns the attention
output. The device then runs that layer's FFN and passes the result to the
next layer.

The default configuration has the topology of Llama-2-7B: 32 layers on 8
chiplets of 4 layers each. The vector widths are scaled down; see "Scaling"
below.

## Block structure

```
 host link in ─► host_rx ─► ita_chiplet 0 ─► ... ─► ita_chiplet 7 ─► lm_head
 (rx stream)       │        (4 × ita_layer)        (4 × ita_layer)        │
                   │ attention  ▲   │ Q/K/V                               │ logits
                   └────────────┘   ▼                                     ▼
 host link out ◄─────────────── host_tx (round robin over 32 layers + logits)
```

| Module | Role |
|---|---|
| `ita_pkg` | Number formats, link tag, the weight set, CSD digit functions, saturation |
| `csd_const_mult` | One INT8 × hardwired-INT4 product, built as a canonical-signed-digit shift-add sum |
| `hardwired_matvec` | `y = W·x`: one constant multiplier per weight, an adder tree per row, scaling by 1/8, saturation, one register |
| `qkv_projection` | Three parallel matvec units for Wq, Wk and Wv (INT16 results) |
| `swiglu_gate` | `σ(h1) ⊙ h3`, where σ is a hard-Swish approximation of SiLU |
| `ffn_stage` | W1 and W3 (stage 1), then the gate and W2 (stage 2) |
| `ita_layer` | The per-layer controller: input, QKV, offer to host, wait for attention, FFN, output |
| `ita_chiplet` | A chain of 4 layers |
| `lm_head` | Hardwired projection to INT16 logits |
| `host_rx` | Turns the host element stream into token-input and per-layer attention vectors; detects framing errors |
| `host_tx` | Arbitrates among the layers' Q/K/V offers and the logits; serialises them into an element stream |
| `ita_device` | Top level |

## Number formats

* **Activations** are INT8 with 4 fractional bits, so they cover −8 to +7.9375.
* **Weights** are INT4 codes `q` that stand for `q/8`.
* A product therefore has 7 fractional bits. Each row sum is shifted right
  by 3 (floor), then saturated.
* **Elements on the host link** are INT16 with the same 4 fractional bits.
* The attention output arrives as INT16 and is saturated to INT8 before the
  FFN.
* **SiLU** is approximated by hard-Swish. In integer form, with `a` holding
  1/16 units: `s = a·clamp(a+48, 0, 96)/96`, then `g = sat8((s·h3) >>> 4)`.

## Weights

The paper does not give trained weight values. In their place,
`ita_pkg::weight(layer, matrix, row, col)` supplies a fixed pseudo-random
INT4 weight set, and about a quarter of its weights are zero. Those zeros
show pruning: each one produces no logic.

Every matvec instance takes its weights from this function at elaboration
time. To load a real model, replace the function, or the parameter of each
multiplier, with the trained and quantised values.

A CSD digit (canonical signed digit) is −1, 0 or +1. For each weight, the
digits are computed as the non-adjacent form, so a 4-bit code needs at most
two adders.

## Layer pipeline and timing

`ita_layer` handles one token at a time:

1. **Input.** `x_valid`/`x_ready` handshake.
2. **QKV.** One cycle to compute and register Q, K and V.
3. **Offer.** `qkv_valid` is high two cycles after the input handshake, and
   Q, K and V stay stable until `qkv_ready`.
4. **Attention wait.** The layer waits for `attn_valid`.
5. **FFN.** Two cycles.
6. **Output.** `y_valid` is high three cycles after the attention handshake,
   and `y` is held until `y_ready`.

All the layers run at the same time. A layer can work on token *t* while the
layer after it works on token *t−1*. That is how the pipeline fills once the
host keeps several sequences in flight.

Inside a layer, each matvec computes a whole dot product in one cycle. That
is the paper's single-cycle hardwired dot product.

## Host link protocol

Each direction is a stream of 16-bit elements with `valid`/`ready`. Every
element carries a tag `{kind[2:0], layer[5:0], last}`:

| kind | direction | meaning |
|---|---|---|
| 0 EMBED | host → device | token embedding for layer 0 (D elements) |
| 1 ATTN | host → device | attention output for `layer` (D elements) |
| 2/3/4 Q/K/V | device → host | projections of `layer` (D elements each, `last` on each vector's final element) |
| 5 LOGITS | device → host | VOCAB elements; `layer` = number of layers |

Rules:

* A vector must have exactly D elements (VOCAB for logits), and its kind and
  layer must not change within the vector. `last` must be set on the final
  element and only there.
* If a vector breaks these rules, `host_rx` drops elements up to the next
  `last` and sets the sticky output `rx_error`.
* Token inputs and attention outputs use separate receive registers. Because
  of this, a token waiting for layer 0 can never block the attention vector
  that layer 0 itself needs.
* **Host rule:** send the next token input only after the device has taken
  the previous one. The host can see this: the first Q/K/V vector of layer 0
  for that token has come back.

`host_tx` serves the 32 layers and the logits in round robin. It copies a
granted offer into a send buffer and releases the source in the same cycle.
It then sends one element per cycle, so a layer takes 3·D + 1 cycles.

## Scaling

Every weight is its own circuit, so a simulator or linter has to elaborate
the whole model. Measured costs per constant multiplier:

* about 47 KB of memory for Verilator lint;
* about 17 KB for slang.

The paper's model has about 6·10⁹ weights, far beyond any tool. The defaults
keep the depth and partitioning: 32 layers on 8 chiplets × 4, plus the
language-model head. The widths are reduced:

| Parameter | Paper | Default |
|---|---|---|
| D_MODEL | 4096 | 32 |
| D_FFN | 11008 | 86 (same ratio) |
| VOCAB | 32000 | 250 (about the same ratio to D_MODEL) |

At the defaults the design has about 370,000 hardwired weights. Verilator
lint needs roughly 18 GB for that, and slang roughly 6 GB. Every parameter
can be set back to the paper's values; only the tools' memory limits prevent
that.

The largest size simulated end to end is the full 32-layer, 8-chiplet
structure with D_MODEL = 4, D_FFN = 11 and VOCAB = 16 (`tb_ita_device`).
The unit testbenches use sizes of 4 to 20 per dimension. Checking the top at
the defaults did not fit in 16 GB:

* slang elaborated it in about 4 minutes;
* Verilator lint ran out of memory at the defaults, but passes at
  D_MODEL = 16 (93,000 weights, 4.4 GB).

## Departures from the paper and own choices

* **Q is sent with K and V.** The text says K and V go to the host. But
  the host computes softmax(QKᵀ/√d)·V, which needs Q, and Wq is one of the
  device's hardwired matrices. So each layer sends three vectors to the host,
  not two.
* **No attention output projection, normalisation or residual path.** The
  paper lists only Wq, Wk, Wv, W1, W2 and W3, and the stages
  QKV → attention → FFN. The attention output goes straight into the FFN.
* **No weight ROM.** The paper's figure shows a separate ROM block, while its
  text puts each weight inside its multiplier. This design follows the text.
* **Link details are this design's own.** The paper leaves these open:
  the link element format, the tags, framing-error handling, round-robin
  arbitration, and one element per cycle on the device side of the link.
* **Pruning.** The paper prunes weights below 2⁻⁶. That threshold is smaller
  than the INT4 step of 1/8, so pruning here means zero codes produce no
  logic.
* **Not built:**
  * the trained weights;
  * the PCIe/USB physical layer;
  * the 2.5D interposer, which logically is only the wires between chiplets;
  * power management;
  * the side-channel countermeasures, which the paper only names;
  * the clock source.

## Testbenches

Every block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The testbenches
compare against integer reference models in `tb/tb_ref_pkg.sv`, which read
the same weight function.

| Testbench | What it checks |
|---|---|
| `tb_csd_const_mult` | All 4096 activation × weight pairs exactly, plus that zero weights are pruned |
| `tb_hardwired_matvec` | Random and extreme vectors, saturation, latency |
| `tb_qkv_projection` | Q, K and V against the reference |
| `tb_swiglu_gate` | The gate over the whole INT8 range of h1 and a sweep of h3 |
| `tb_ffn_stage` | One result per cycle, latency 2 |
| `tb_ita_layer` | The full handshake sequence, exact latencies, stalls on every port, held outputs |
| `tb_ita_chiplet` | 8 tokens through 4 layers with a responding host |
| `tb_lm_head` | Logits, backpressure, hold until taken |
| `tb_host_rx` | Vector assembly, routing by layer, separate buffers, framing errors |
| `tb_host_tx` | Serialisation, tags, round-robin fairness, backpressure |
| `tb_ita_device` | End to end: a behavioural host with KV cache, softmax attention and greedy decoding runs two sequences of three tokens through all 32 layers. It checks every element on the link and the logits against a reference model, and counts backpressure, receive stalls, transmitter contention, blocked layer inputs, attention waits, pruned weights and a malformed vector that sets `rx_error`. |

To run a testbench with Verilator, work from the top directory:

```
verilator --binary --timing --assert -Wno-fatal -j 4 --Mdir obj -o sim \
  --top-module tb_ita_device -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/ita_pkg.sv tb/tb_ref_pkg.sv tb/tb_ita_device.sv
obj/sim
```
