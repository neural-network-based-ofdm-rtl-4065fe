# A neural-network OFDM receiver in SystemVerilog

This design is an 802.11a-style OFDM receiver for 16QAM, rate-1/2 packets. Three of the
classical receiver stages are replaced by neural networks:

- **channel estimation**: least squares on the FFT of the L-LTF preamble becomes two small MLPs
  that read the 160 time-domain preamble samples directly;
- **soft demapping**: the approximate-LLR distance computation becomes a 2-20-4 MLP per symbol;
- **forward error correction**: the Viterbi decoder becomes a three-layer bidirectional GRU
  followed by two dense layers.

The classical blocks around them stay: cyclic-prefix removal, serial-to-parallel conversion,
FFT, equalizer, parallel-to-serial conversion and deinterleaver. Each network can therefore be
swapped for its classical counterpart without touching the rest of the chain.

The networks are trained and compressed offline, so the hardware never trains anything. The
compression has two parts:

- **Block-based column-row (BCR) pruning.** Each weight matrix is cut into blocks, and inside
  every block whole columns and whole rows are removed.
- **Mixed-scheme quantization (MSQ).** Each weight row is quantized either to fixed point or to
  signed powers of two.

The hardware's job is to run the compressed networks fast. All three networks run on a single
reusable dense-layer engine, `nn_dense`. The engine takes the pruning masks and the per-row
quantization choice as loadable state, and it spends clock cycles only on the columns that
survived pruning.

## Signal path

```
 samples ─► rms_normalizer ─┬─ L-LTF (160) ─► channel_estimator_nn ──► H[52] ─┐
                            │                                                  ▼
                            └─ payload ─► cp_remover ─► serial_to_parallel ─► fft64 ─► equalizer
                                                                                          │ Y/H, |H|²
      bits ◄─ decoder_nn ◄─ deinterleaver ◄─ demapper_nn ◄─ parallel_to_serial ◄──────────┘
```

`nn_ofdm_rx` is the top. Every link between blocks is a valid/ready stream, and any block may
stall the one before it. Packet detection and timing synchronisation are not part of the
design. A packet therefore begins with a `pkt_start` pulse, with `n_sym` giving the number of
payload OFDM symbols. The first 160 samples after the pulse are the L-LTF (32-sample guard plus
two 64-sample symbols). After them come `n_sym` payload symbols of 80 samples each.

| Block | What it does | Cycles (100 MHz clock) |
|---|---|---|
| `rms_normalizer` | Sums \|x\|² over the L-LTF. Finds the Q8.8 gain that brings the mean power to 1.0 by a 16-step bit search. Scales the buffered L-LTF and then the payload by that gain. | 160 to collect, 16 to search, then 1 per sample |
| `channel_estimator_nn` | Two 160-512-256-52 MLPs (ReLU, ReLU, linear), one for Re(H) and one for Im(H), running in parallel. | 4 + Σ over layers of (kept columns + one per block row) |
| `cp_remover` | Drops samples 0..15 of every 80. | combinational |
| `serial_to_parallel` | Collects 64 samples into a frame. | 64 |
| `fft64` | Iterative radix-2 DIT: one butterfly per cycle, output = DFT/8. | 192 |
| `equalizer` | For the 52 used bins: eq = Y·conj(H)/\|H\|², csi = \|H\|². | 52 |
| `parallel_to_serial` | Sends the 48 data subcarriers (pilots ±7 and ±21 removed) with their csi. | 1 per symbol |
| `demapper_nn` | 2-20-4 MLP. Outputs llr = −z·csi·(1/σ²). | 39 per symbol unpruned |
| `deinterleaver` | 802.11a permutation over 192 LLRs. | 192 in, 192 out |
| `decoder_nn` | Input sigmoid(−LLR) in pairs, then a 3-layer bi-GRU with 256 units per direction, then 512→16 ReLU, 16→1. The bit is the sign of the output. | see below |

`h_ready` goes high when the channel estimate is in the equalizer. Until then the payload is
held back by deasserting `s_ready`. Nothing is lost: the sender simply waits about 144 µs at
full size and unpruned, or a few cycles when the estimator is pruned hard.

## Number formats

- **Samples, activations, biases and LLRs**: signed 16-bit Q7.8 (`rx_pkg::word_t`, one = 256).
  A complex value is `cplx_t {re, im}`.
- **Saturation**: every narrowing step saturates through `rx_pkg::sat`.
- **Weights**: `WB`-bit two's complement with `WB−2` fraction bits. `WB` is 8 in the channel
  estimator and the decoder and 4 in the demapper, as the compression left them.
- **Power-of-two weight rows**: a `WB`-bit sign|magnitude code. Magnitude 0 means the weight is
  zero. Any other magnitude m means ±2^−(m−1), applied as an arithmetic shift with no
  multiplier.
- **Accumulators**: wide. The bias is added at full precision, then the sum is rounded, shifted
  and saturated once per output.
- **Normalizer gain**: unsigned Q8.8, up to 255.996.
- **FFT output**: DFT/8, so a unit-power time signal gives bins of magnitude about 1.1 on the
  used subcarriers.

The nonlinearities are piecewise-linear:

- sigmoid uses slopes 1/4, 1/8 and 1/32, with breakpoints at 1, 2.375 and 5, saturating
  beyond 5;
- tanh(x) = 2·sigmoid(2x) − 1.

These are exact at the breakpoints and continuous. Their largest error is about 0.02.

## The dense-layer engine (`nn_dense`)

`nn_dense` computes y = act(W·x + b) for one layer. It has `OUT` rows and `IN` columns, is
divided into blocks of `BR` rows × `BC` columns, and has `BR` multiply-accumulate lanes. It
reads one input per cycle, `x[x_addr]`, and applies it to the `BR` rows of the current block
row at once.

### Per-block pruning state

Every block (br, bc) has two `BC`/`BR`-bit masks:

- **column-keep** (`cmask`): which of the block's columns survive;
- **row-keep** (`rmask`): which of its rows survive.

Every output row also has one MSQ flag, `pot`, saying whether the row is power-of-two coded.

### Sequencing

The sequencer walks block row by block row. Inside a block row it visits only the blocks that
have at least one kept column and one kept row; the others are skipped outright. Inside a
visited block it jumps from one kept column straight to the next, using a priority search over
the column mask. A pruned column therefore costs nothing, and neither does an empty block.

When the last kept column of a block row has been used, one extra cycle adds the biases,
applies ReLU or nothing, and presents the block row's `BR` outputs on `y_vec`, together with
`y_valid` and the index `y_br`.

The cost of a layer is

    cycles = Σ over block rows ( Σ over its non-empty blocks of kept columns  +  1 )

and `done` arrives that many cycles after `start`. With no pruning this is NBR·(IN+1). The
compression ratio the paper reports (2× for the channel estimator and the decoder) turns
directly into fewer cycles, with no idle lanes.

### Row pruning and MSQ per lane

A pruned row inside a block only zeroes that lane's product for the block's columns. This is
what makes the pruning "fine-grained but structured": the datapath stays a regular BR-wide
vector unit.

Each lane multiplies by its `WB`-bit weight if its row is fixed-point, or shifts if its row is
power-of-two. On an FPGA the fixed-point rows map to DSP multipliers and the power-of-two rows
to LUT shifters. That balance is the reason for mixing the two schemes per row.

### Load port

All engine state is written through one port, `ld_we`/`ld_sel`/`ld_addr`/`ld_data`:

| `ld_sel` | Memory | Address | Data |
|---|---|---|---|
| 0 | weights | br·IN + col | one column of a block row: `BR` codes, lane 0 in the low bits |
| 1 | biases | br | `BR` × 16-bit Q7.8 |
| 2 | power-of-two flags | br | `BR` bits |
| 3 | column-keep mask | br·NBC + bc | `BC` bits |
| 4 | row-keep mask | br·NBC + bc | `BR` bits |

Reset sets every mask to "keep all" and every row to fixed point. It does not clear the
weights, which are expected to be loaded before use.

## Channel estimator

The two MLPs, `mlp3` instances `u_re` and `u_im`, each chain three engines (160→512 ReLU,
512→256 ReLU, 256→52 linear), with a 16×16 block size. The hidden vectors sit in register
arrays between the layers.

The paper says each MLP takes 160 inputs. This design gives the real-part MLP the 160 I samples
of the normalized L-LTF and the imaginary-part MLP the 160 Q samples. Other arrangements (for
example both parts feeding both networks) would need a 320-input first layer.

`h_valid` rises four cycles after the slower of the two networks finishes. At full size and
with no pruning that is 14 392 cycles (144 µs at 100 MHz). Dropout is a training-only layer and
is not present.

## Demapper and LLR scaling

The demapper's output layer would be a sigmoid, giving p = P(bit = 1). The LLR is then
log((1−p)/p). For p = sigmoid(z) this is exactly −z. The hardware therefore skips both the
sigmoid and the logarithm and uses the negated pre-activation.

Scaling by channel quality and noise gives

    llr = sat( −z · csi · inv_nvar / 2^16 )

where csi = |H|² comes from the equalizer and `inv_nvar` = 1/σ² is a top-level input in Q7.8.
The noise-variance estimator is not described and is not built.

The network is 2→20 (ReLU) then 20→4, with 4-bit weights and 4-lane engines. It takes 39 cycles
per symbol without pruning; the paper applies no pruning to this network (1.0×). `m_logit`
exposes z for inspection.

## Decoder: bidirectional GRU scheduling

This is the largest and least obvious part.

### Input

Each soft bit becomes a probability, p = 1/(1+e^LLR) = sigmoid(−LLR), in Q7.8. Consecutive
pairs (p₂ₜ, p₂ₜ₊₁) form the 2-wide input of GRU step t. One decoded bit comes out per step,
which gives rate 1/2. A full packet of 16 512 soft bits is 8 256 steps; this is `MAXT`.

### One matrix per GRU direction

Each GRU layer has a forward and a backward direction, and each direction has its own engine.
The engine holds one stacked 4H × (GIN + H) matrix, where H = 256 and GIN is 2 for layer 0
and 512 for layers 1 and 2:

    rows 0 ..  H-1 :  [ W_ir | W_hr ]        → r pre-activation
    rows H .. 2H-1 :  [ W_iz | W_hz ]        → z pre-activation
    rows 2H.. 3H-1 :  [ W_in |  0   ]        → input part of n
    rows 3H.. 4H-1 :  [  0   | W_hn ]        → hidden part of n

Its input vector is [x_t ; h_{t−1}]. The two zero quadrants are simply pruned blocks: their
column masks are cleared, so they cost no cycles. They would be pruned in any case, because
PyTorch keeps b_hn inside the reset gate. A combine pass of H + 3 cycles then applies, one unit
per cycle,

    r = σ(·)   z = σ(·)   n = tanh(nx + r ⊙ nh)   h_t = (1 − z) ⊙ n + z ⊙ h_{t−1}

### Order of work

1. Layer 0 runs over the whole sequence. Its forward engine walks t = 0..T−1 while its
   backward engine walks t = T−1..0 at the same time.
2. Both write their hidden states into the sequence buffer `seqa` (T × 512: forward half, then
   backward half). The input probabilities have their own T × 2 buffer, `xin`.
3. Layer 1 reads `seqa` and writes `seqb`; layer 2 reads `seqb` and writes `seqa`.
4. Finally the dense part runs once per step, 512 → 16 ReLU and 16 → 1. The bit is 1 when the
   output is positive, which is the same as sigmoid(output) > 0.5. No output sigmoid is built.

Both sequence buffers are `MAXT` × 512 words of 16 bits (8.4 MB each at full size), written as plain
arrays, so a synthesis tool would map them to block RAM.

### Cycle counts

With C_L the engine cost of layer L from the formula above:

- per step and per layer: C_L + H + 3;
- per decoded bit in the dense part: 4 + C_h1 + C_h2.

Unpruned at full size, C_0 = 64·259 = 16 576 and C_1 = C_2 = 64·769 = 49 216. One step of all
three layers is then 115 785 cycles, and a whole 8 256-step packet about 0.96·10⁹ cycles
(9.6 s at 100 MHz).

The paper's figure of 210 µs for the decoder cannot be for a whole packet: its own FLOP count,
9·10¹⁰, would need 4·10¹⁴ FLOP/s for that. The paper does not say what its latency covers or
how parallel its FPGA design is.

`BR` and `BC` are parameters of every engine. Raising `BR` raises the number of lanes and
divides the cycle count; the default of 16 is this design's choice.

## How to check it with Verilator

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one:

- compares against a reference written independently in `tb/nn_ref_pkg.sv`, or against a DFT,
  the standard interleaver formula and so on;
- checks the cycle counts given above;
- prints `TB_RESULT checks=N failures=M`.

For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/rx_pkg.sv tb/nn_ref_pkg.sv \
        tb/tb_decoder_nn.sv -y rtl +libext+.sv --top-module tb_decoder_nn -o sim
    ./obj_dir/sim

`tb_nn_ofdm_rx` runs the top at its default (full) size, end to end, in under a minute. Its
transmitter model generates random coded bits, interleaves them, maps them to Gray 16QAM with
±1 pilots, applies the inverse DFT and adds the cyclic prefix, all after a random ±1 L-LTF.

Trained weights are not available. The testbench therefore loads hand-built weights with a
known function:

- **Channel estimator**: every block is pruned, so the estimate is the bias, i.e. the flat
  channel.
- **Demapper**: power-of-two hidden rows compute relu(±I) and relu(±Q). Its output rows compute
  the Gray-16QAM bit decisions.
- **Decoder**: in each layer one GRU unit passes the sign of its input through, with its update
  gate shut and the rest pruned. The output stage returns that sign.

Every decoded bit t must then equal coded bit 2t. The testbench sends packets of 1, 2 and 86
symbols; 86 symbols is the 4128-symbol, 16 512-soft-bit packet, the largest the design holds.
It counts payload stalls, skipped block rows, power-of-two products, gains other than 1, and
decoded ones and zeros, and fails if any of these never happened.

`tb_channel_estimator_nn` and `tb_decoder_nn` override the layer sizes (for example
`HID = 8`) to keep the bit-exact reference checks short. The engine and the schedule are the
same at any size.

## Where this design departs from the paper, or fills gaps

- **From the standard rather than the paper.** FFT size 64, cyclic prefix 16, 52 used and 48
  data subcarriers, pilots at ±7/±21 and the interleaver formula are 802.11a.
- **Channel-estimator inputs.** I samples feed the real-part MLP and Q samples the
  imaginary-part MLP, as explained above.
- **RMS normalization.** The normalization sits before the preamble/payload split, so both use
  the same gain. It is a bit search rather than a square root.
- **LLR and output sigmoid.** The LLR is −z, and the decoder decides on the sign, so neither
  the demapper's nor the decoder's output sigmoid is built. The decoder's input sigmoid is
  built.
- **Activations and formats.** Sigmoid and tanh are piecewise-linear. All fixed-point formats
  are this design's choice.
- **GRU layout.** The GRU follows PyTorch gate order and equations. Each direction's four gate
  matrices are stacked into one engine.
- **External inputs.** Packet start, symbol count and noise variance are inputs.
- **Weights.** Weights and masks are loaded, not built in. The testbench weights are for
  checking the datapath; they are not trained.
- **Pruning cost.** In `nn_dense`, pruned columns and empty blocks cost no cycles. The paper
  says BCR pruning gives acceleration but not how its hardware exploits it.
- **Latency.** The paper's latencies in its Table I come from its own FPGA build on an SDR.
  They are not reproduced here; see the cycle counts above.
