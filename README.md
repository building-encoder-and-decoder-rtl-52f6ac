# A neural-network constellation mapper and demapper for OFDM, in SystemVerilog

In a normal OFDM transmitter, groups of bits go through a fixed constellation
mapper such as QAM and then an IFFT. The receiver runs an FFT and a demapper.
This design puts a trained deep neural network (DNN) in place of the mapper,
and a second one in place of the demapper. The networks are learned off-chip,
for example to lower the peak-to-average power ratio or to cope with a
particular channel. The hardware does not need to know what the networks
learned. It must be able to:

- hold the weights and biases of both networks;
- accept new weights and biases at any time;
- evaluate both networks fast enough that each OFDM symbol is finished before
  the next one arrives.

This RTL is the digital part of that link: serial bits in, time-domain
samples out, and the way back. The DAC, the RF front end, the channel, the
ADC and the training are not part of it. Its boundary is two parallel sample
buses, one towards the DAC and one from the ADC.

## The link

```
 i_bit ─► serial_to_parallel ─► onehot_mapper ─► DNN encoder ─► IFFT ─► o_dac_re/im
          (32 bits/symbol)      (64 inputs)      64→512×4→32    16 pt    16 complex

 i_adc_re/im ─► FFT ─► DNN decoder ─► symbol_decision ─► parallel_to_serial ─► o_bit
  16 complex    16 pt  32→512×4→64    argmax per carrier  (32 bits/symbol)
```

Main configuration:

- 16 subcarriers, each carrying 2 bits (four symbol values). One OFDM symbol
  therefore holds 32 bits.
- The encoder input is one-hot: for every subcarrier, the input among its
  four that matches the symbol value is 1.0, and the other three are 0.
- The encoder outputs 32 real values. Values 2k and 2k+1 are the real and
  imaginary parts of subcarrier k.
- The decoder does the reverse. It turns 32 real FFT outputs into 64 scores.
  The symbol decision takes, for each subcarrier, the index of the largest of
  its four scores as the two received bits.
- Each network has five fully connected layers: an input layer, three middle
  layers and an output layer. Every hidden layer has 512 nodes.
- All data, weights and biases are 16-bit fixed point.

| Module | Role |
|---|---|
| `dnn_pkg` | widths, sizes, the Q3.12 type, rounding and saturation, the parameter-write struct |
| `clk_en_divider` | clock-enable strobe that sets the network clock rate |
| `serial_to_parallel`, `parallel_to_serial` | bit stream ↔ 32-bit symbol word |
| `onehot_mapper` | symbol word → 64 one-hot Q3.12 inputs |
| `dnn_param_mem` | weight and bias store of one layer |
| `dnn_layer` | one fully connected layer with its own parameter store |
| `dnn_fcnet` | a chain of layers: the encoder or the decoder |
| `ofdm_dft` | 16-point IFFT (transmit) or FFT (receive) |
| `symbol_decision` | argmax per subcarrier |
| `dnn_ofdm_top` | the whole link |

## Fixed-point format

Every value on a data bus is a signed 16-bit number with 1 sign bit,
3 integer bits and 12 fraction bits (Q3.12). This covers −8.0 to +7.99976,
and 1.0 is 4096. Weights and biases use the same format.

A neuron works as follows:

1. It multiplies 16×16 bits into Q6.24 products.
2. It adds them in a 48-bit accumulator. The accumulator cannot overflow for
   512 inputs.
3. It adds the bias, shifted left by 12.
4. It rounds half up back to 12 fraction bits, and saturates to the 16-bit
   range.
5. It applies the activation.

All hidden layers use ReLU. The output layers use ReLU as well (`OUT_RELU=1`
in `dnn_fcnet`), so every network output is non-negative. Set `OUT_RELU=0`
for a linear output layer.

## How a layer is computed: the timing core of the design

A 512×512 layer holds 262,144 weights. Computing all of them in one cycle
would take 262,144 multipliers. Computing one neuron at a time would take
512 cycles per layer, far beyond one symbol time. `dnn_layer` sits in
between. It finishes **NPAR neurons per enabled clock** (default 32). Each of
those neurons takes its whole dot product in that cycle.

One layer run goes like this:

1. On an enabled cycle where `i_in_en` is high and the layer is idle, the
   layer latches the input vector. In the same cycle it asks its
   `dnn_param_mem` for the weights and biases of neuron group 0.
2. The store answers one cycle later, with a registered read. From then on,
   the layer finishes the group the store has just delivered while the store
   reads the next group.
3. After `N_OUT/NPAR` groups, `o_out_en` goes high for one enabled cycle.
   `o_out` then holds the whole output vector. It keeps that value until the
   next run of the layer finishes.

A layer's latency is therefore `N_OUT/NPAR + 1` enabled cycles:

| Layer | Latency (enabled cycles) |
|---|---|
| any layer with 512 outputs | 17 |
| encoder output layer (32 outputs) | 2 |
| decoder output layer (64 outputs) | 3 |
| whole encoder | 4·17 + 2 = **70** |
| whole decoder | 4·17 + 3 = **71** |

Why these numbers work:

- At one information bit per clock, one OFDM symbol lasts 32 clocks. A layer
  takes 17 clocks at the full network rate, so every layer finishes within
  one symbol time.
- Each layer latches its input, so a network is a pipeline. While the second
  layer works on symbol *n*, the input layer may already work on symbol *n+1*.
- The whole encoder takes 70 clocks, longer than a symbol. That is fine,
  because up to five symbols are in flight, one per layer.

There are two timing requirements, and they differ:

- **Throughput.** A new symbol must be accepted every symbol time. The layer
  pipeline meets this at one bit per clock.
- **Latency.** The source design goes further and asks that the whole
  transmit-plus-receive path finish within one symbol. Here that path takes
  about 180 clocks: encoder 70, IFFT 17, FFT 17, decoder 71, plus a few
  register stages.
- So the latency requirement holds only when a symbol lasts at least about
  180 clocks, that is, when bits arrive no faster than one every 6 clocks.
  `i_bit_vld` allows any such rate. Raising NPAR shortens the latency.

`dnn_fcnet` enforces the spacing of those symbols with one rule:

- After it accepts a vector, `o_busy` stays high for II enabled cycles.
  II is the latency of the slowest layer: 17 for the defaults.
- Every layer has a fixed latency, so vectors that enter II apart stay at
  least II apart all along the chain.
- A layer is therefore never handed a new vector while it is busy. An
  assertion in `dnn_layer` checks this.

Throughput is set by NPAR:

- The encoder and decoder each have about 1.6·10⁴ multipliers at the
  default: 32 neurons × 512 inputs in each of the four 512-output layers.
- Halving NPAR halves the multipliers and nearly doubles the layer time. At
  NPAR=16, a 512-node layer takes 33 clocks. That is just over one symbol at
  one bit per clock.

All state in the networks changes only on cycles where the clock enable from
`clk_en_divider` is high (`i_clk_div`: 0 or 1 means every cycle, N means
every Nth). The layer times above are in enabled cycles. At a divide ratio
of N, a layer takes 17·N system clocks. Bits entering at one per system clock
then outrun the encoder for N ≥ 2, and the overflow flags described below
report it.

## Loading weights and biases

Both networks are loaded through one write port, `i_param`, of type
`param_wr_t`:

| Field | Meaning |
|---|---|
| `wr` | write strobe |
| `net` | 0 = encoder, 1 = decoder |
| `layer` | 0 = input layer … 4 = output layer |
| `bias` | 1 = bias of neuron `row`; 0 = weight (`row`, `col`) |
| `row`, `col` | neuron index and input index |
| `data` | Q3.12 value |

How writes behave:

- Each write stores one word, and writes out of range are ignored.
- Writes may come at any time, including while traffic flows. A symbol being
  computed at that moment may see a mix of old and new values.
- To switch cleanly, stop the traffic, or pulse `i_init`, before reloading.

The stores are register arrays inside each layer. Together they hold
1,675,360 words:

- encoder: 837,664 words;
- decoder: 837,696 words.

A product would put them in SRAM macros. The store reads one group of
NPAR × N_IN weights per cycle, so such an SRAM would need to be that wide.

## IFFT and FFT

`ofdm_dft` computes the 16-point transform directly:

- It does 16 complex multiplies per clock and produces one output bin per
  clock. The result is complete 17 clocks after `i_start`.
- Twiddles come from a cosine table in Q1.14. The sines come from the same
  table.
- Both directions scale by 1/4 (1/√16), so FFT(IFFT(X)) = X up to rounding.
- On transmit, subcarrier k gets `enc[2k] + j·enc[2k+1]`. The 16 time samples
  leave on `o_dac_re/im` with a one-cycle `o_dac_vld`.
- On receive, `i_adc_vld` starts the FFT. Output bin k gives decoder inputs
  2k (real part) and 2k+1 (imaginary part).

The DFT runs at the full clock, not the divided one. A radix-2 FFT would
need fewer multipliers. The direct form is used here for clarity.

## Rate matching, overflow and init

On transmit, bit 0 of a symbol is the first bit received.
`serial_to_parallel` emits a word every 32 valid bits. The top then handles
each word as follows:

1. The word goes into a one-word holding register.
2. It enters the encoder on the first enabled cycle when the encoder is not
   busy.
3. If another word completes while one is still held, the new word is
   dropped. The sticky flag `o_tx_overflow` is set.

The receive side works the same way. A received FFT result waits for the
decoder, and a second one sets `o_rx_overflow`. A decided word that finds
`parallel_to_serial` still sending also sets `o_rx_overflow`.
`parallel_to_serial` takes the next word in the same cycle as the last bit
of the current word, so back-to-back symbols come out as a gapless bit
stream.

`i_init` is a synchronous clear of all data-path state:

- it empties the layers, the holding registers and the converters;
- it clears both flags;
- it does not touch the weights.

`i_rst_n` is an asynchronous reset.

## What is this design's own choice

The source design gives the following:

- the system chain;
- the network shapes (5 layers, 512 hidden nodes, one-hot input, 16
  subcarriers, 4-QAM);
- the 16-bit fixed point with 3 integer bits;
- the layer interface (`i_clk`, `i_en`, `i_in`, `i_in_en`, `i_init`,
  `i_rst_n`, `o_out`, `o_out_en`), its flat 8192-bit buses, and the
  input/middle/output layer instance names;
- the need for a system clock divider;
- the requirement that each layer finish within one OFDM symbol;
- the requirement that parameters come from outside and can be replaced.

Everything else was chosen here:

- the NPAR group schedule and the input latch that make the layers a
  pipeline;
- the II spacing rule;
- rounding half up with saturation, and the 48-bit accumulator;
- ReLU on the output layer;
- the parameter bus and the register-array stores;
- the direct DFT and its 1/4 scaling;
- the bit order, the argmax decision, the holding registers, the overflow
  flags and the `i_init` behaviour.

Departures and limits:

- A waveform of the source design shows 8-bit layer buses (4096 bits for
  512 values). This RTL follows the 16-bit main configuration.
- `DATA_W` is not meant to be changed on its own. `FRAC_W`, the accumulator
  and the DFT table all assume 16-bit Q3.12.
- No trained weights are included. The tests use the hand-built known-answer
  set described below, so error rates of a trained link are not reproduced.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops on its own. Shared reference models
are in `tb/tb_ref_pkg.sv`:

- an integer model of a layer;
- a real-arithmetic DFT;
- the known-answer parameter set.

With the known-answer set, the encoder and decoder form a working 4-QAM link:

- The encoder puts bit 0 of a subcarrier on its real part and bit 1 on its
  imaginary part, as 0 or 1.0.
- The decoder scores each symbol value v as
  (v₀ ? I : 1−I) + (v₁ ? Q : 1−Q).
- All other layers pass their first 64 nodes through unchanged.

Example with plain Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb rtl/dnn_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_dnn_layer.sv --top-module tb_dnn_layer
./obj_dir/Vtb_dnn_layer
```

| Testbench | What it covers |
|---|---|
| `tb_dnn_layer` | random layer against the integer model, with and without ReLU; latency; slow clock enable; init; saturation |
| `tb_dnn_encoder`, `tb_dnn_decoder` | small networks against a chain of the model; pipelined inputs; II |
| `tb_ofdm_ifft`, `tb_ofdm_fft` | transform against the real DFT, within 2 LSB; 17-cycle latency |
| `tb_dnn_param_mem`, `tb_onehot_mapper`, `tb_symbol_decision`, `tb_serial_to_parallel`, `tb_parallel_to_serial`, `tb_clk_en_divider` | each block on its own |
| `tb_dnn_ofdm_top` | the whole link at 64 hidden nodes and NPAR=16 |
| `tb_dnn_ofdm_top_full` | the whole link at every default (512 hidden nodes, NPAR=32); about 15 s |

The two end-to-end benches loop the DAC bus back to the ADC bus through a
small behavioural channel, with a delay and ±3 LSB of noise. Both go through
these phases:

1. back-to-back symbols;
2. a divided network clock (divide by 4 in the small bench; the full-size
   bench repeats back-to-back traffic here, since 17 x 4 clocks per layer
   would exceed a 32-clock symbol);
3. a live parameter reload that must flip received bits;
4. a transmit overflow, then `i_init`;
5. a receive overflow;
6. traffic after init.

Both benches count each of these events and fail any that never happened.
