# A distributed-processing antenna node for massive MIMO

A massive-MIMO base station with hundreds of antennas cannot send every
antenna's raw samples to one central processor: the links and the central
computation would not keep up. This design moves almost all the baseband work
into the antennas themselves. Each antenna has its own small chip, a node.
The nodes are connected as a binary tree, with a central control unit (CCU) at
the root. The nodes do the following:

* OFDM modulation and demodulation, with an FFT/IFFT for every symbol;
* channel estimation;
* their share of the Gram matrix `H^H H`;
* their own row of the zero-forcing (or conjugate-beamforming) decoder and
  precoder;
* all per-subcarrier decoding and precoding.

Only two things cross the tree. Going up, nodes send partial sums, and each node adds its
children's sums to its own. Going down, the CCU broadcasts the inverted Gram
matrix `D = (H^H H)^-1` and the symbols to be transmitted. The CCU's only
heavy task is a `K x K` inversion per frame.

Every task in a node is a complex multiply followed by one or two
additions. So a node needs only **one processing element (PE)**, kept busy
every cycle by a fixed schedule at `f_clk = 12 f_sample` (368.64 MHz for a
20 MHz LTE-like carrier with 20 terminals).

This repository holds the RTL of one node (`mimo_node`) and its
testbenches. The CCU, the radio front end and the serial-link PHYs are not
part of it. Their digital sides are ports of the node.

## What a node computes

One TDD frame consists of these symbol periods, in order:

* `N_UL1` uplink symbols;
* the uplink pilot;
* `N_UL2` uplink symbols;
* a guard period;
* `N_DL` downlink symbols;
* a second guard period.

With the defaults (`N_UL1 = 0`, `N_UL2 = 2`, `N_DL = 2`) a frame is 7 symbol
periods of 144 + 2048 samples. Node *i* with antenna *i* runs these tasks
(K terminals, N_SC used subcarriers):

| task | what | PE operations |
|---|---|---|
| FFT / IFFT | radix-2 decimation-in-time, in place | N/2 · log2 N butterflies |
| CE | `h_k = y_pilot[k] / p` (one pilot subcarrier per terminal) | K multiplications |
| B_i | `B[j][k] = conj(h_j) h_k + B_left[j][k] + B_right[j][k]`, upper triangle, sent up | K(K+1)/2 three-input MACs |
| W/A | `v_j = sum_k D[j][k] conj(h_k)`, once D has come down | K² MACs |
| uplink | `y~[s][k] = v_k Y[s] + y~_left + y~_right` per subcarrier and terminal, sent up | N_SC · K three-input MACs |
| downlink | `x[s] = sum_k v_k q[s][k]` per subcarrier, then IFFT | N_SC · K MACs |

The same vector `v` serves as the decoding row and the precoding row, because the ZF
decoder is `A = D H^H` and the precoder is its transpose. In conjugate
beamforming (CB) mode, `v = conj(h)` comes straight out of the channel
estimation. B_i, the inversion and W/A are then skipped.

## The processing element

The PE (`pe.sv`) has a complex multiplier `P = W·A` and two adders:

```
Y1 = (B or ACC) ± P          ACC <= Y1 (when acc_en)
Y2 = (P or Y1) + (B or C)
```

Each of the node's tasks is one setting of the multiplexers:

| task | setting |
|---|---|
| butterfly | `Y2 = B + W·A` and `Y1 = B − W·A` |
| multiplication | `Y1 = 0 + W·A` |
| multiply-accumulate | `Y1 = ACC + W·A` |
| three-input sum up the tree | `Y2 = (W·A + left) + right` |

Two more control bits conjugate W or A, which the Gram matrix, the Hermitian
half of D and the IFFT need. A *scale* bit halves both outputs for the FFT
stages selected by the `fft_scale` input.

Numbers are 12+12-bit two's complement in Q2.10, so 1.0 = 1024.
Products are truncated by an arithmetic right shift of 10. Sums are kept
wide and saturated to 12 bits only at the outputs.

## Node structure and data flow

```
              twiddle ROM ─┐
       channel estimates ─┼─ W
      vector v / 1/p ─────┘           ┌──────────► parent (Y2)
                                   ┌──┴──┐
  sample memory / parent (D, q) ─ A │ PE  │ Y1, Y2 ─► sample memory, h / v memories
  sample memory / left child ──── B │     │
  right child ─────────────────── C └─────┘
```

* **Sample memory** (`sample_memory.sv`) holds three memories:
  * the radio input buffer, with `N_UL,buffered = 2` symbols of 6+6-bit ADC
    samples;
  * the FFT buffer, with 2048 words of 12+12 bits;
  * the radio output buffer, with 6+6-bit DAC words.

  Each is split into two banks (`bank_ram.sv`), so a butterfly reads two
  operands and writes two results in one cycle. A word's bank is the parity
  of its index bits. The two indices of a radix-2 butterfly differ in exactly
  one bit, so they always fall into different banks, in every stage.
* **Channel-estimate and vector memories** are K-word single-port memories
  (`sp_ram.sv`).
* **Twiddle ROM** (`twiddle_rom.sv`) holds the N/2 factors
  `round(1024·cos(2πm/N))` and `round(−1024·sin(2πm/N))`. They are computed
  at elaboration.
* **Parent link** (`down_link_rx.sv`) forwards every word to both children
  one cycle later. It keeps the K(K+1)/2 entries of D (upper triangle, row by
  row) in a small D memory. It queues the 2+2-bit symbols for the
  precoder, already mapped to 4-PAM levels ±0.25 and ±0.75 per component.
* **Child links** (`link_fifo.sv`) are 8-word queues. `ready` means there
  is room for one more word after the one that may already be in flight.
* **Radio interface** (`radio_if.sv`) keeps the frame timing from a
  `sample_strobe` and `frame_start`.
  * It writes each uplink or pilot symbol, without its cyclic prefix, into
    the next input-buffer slot.
  * It reports the end of each such symbol to the control unit.
  * It sends each downlink symbol to the DAC, cyclic prefix first.

## The control unit and its schedule

`node_ctrl.sv` is a job scheduler with a two-stage pipeline.

* **Issue:** addresses go to the memories and link queues.
* **Execute:** the operands arrive, the PE computes, and results are written
  or sent.

The PE takes one operation per cycle. One idle cycle separates FFT stages and
tasks, so that a result is written before it is read again.

When the PE is free, the next job is chosen in this order:

1. **Pilot job.** Runs after a pilot has been received: FFT, CE, and, in
   ZF mode, B_i.
   * In ZF mode, a pending W/A must be done first.
   * In CB mode, uplink symbols still waiting to be decoded with the old
     vector must be done first.
2. **Uplink job** for a symbol of the frame whose vector is current: FFT,
   then the N_SC·K sums sent up. Before that frame's downlink symbols are
   done, at most `N_UL,PB` such jobs may run.
3. **W/A job**, once all of D has arrived. Uplink symbols of the previous
   frame, decoded with the old vector, go first.
4. **Downlink job:** the N_SC·K MACs into the FFT buffer, at bit-reversed
   bin addresses, then the IFFT, whose last stage writes the output buffer.

An operation stalls when its child word, its downlink symbol or room on the
parent link is missing. It resumes when the word arrives.

For the LTE-like case, a frame is 7 × 2192 × 12 = 184 128 cycles. The work
of one ZF frame takes about 153 000 cycles:

* 5 FFTs of 11 × 1025 cycles;
* 4 × 24 000 MACs;
* about 630 more operations for CE, B_i and W/A.

The order of jobs follows the example schedule of the paper:

1. pilot FFT;
2. CE and B_i;
3. wait for the inverse;
4. W/A;
5. x and IFFT for the first downlink symbol, then the same for the second;
6. FFT and the uplink sums for the first uplink symbol, then the same for the
   second.

### Subcarriers and addresses

* **Used bins:** the N_SC used subcarriers are the N_SC/2 bins just below DC
  (N − N_SC/2 … N − 1) and the N_SC/2 bins just above it (1 … N_SC/2).
* **Pilots:** the pilot of terminal k is on used subcarrier k.
* **Bit reversal:** the uplink FFT reads the input buffer at bit-reversed
  sample addresses and produces bins in natural order. The precoder writes
  `x` at bit-reversed bin addresses, and the IFFT reads unused bins as zero.
* **Reusing the FFT buffer:** in ZF mode the channel estimate `h_k` is
  written back over the pilot bin it came from. B_i then reads `h_k` from
  there on the A input, while `conj(h_j)` comes from the estimate memory on W.

## Interfaces and timing of `mimo_node`

| port | meaning |
|---|---|
| `sample_strobe`, `frame_start` | one pulse per sample (every 12 cycles at full size); `frame_start` with the first sample of a frame |
| `adc_data` / `dac_data` | 6+6-bit converter words; `dac_data` changes one cycle after a strobe and is zero outside downlink symbols |
| `up_valid`, `up_ready`, `up_word` | `{kind, 12+12 data}` to the parent; kind 0 = Gram entry, 1 = uplink sum; a word is only sent if `up_ready` was high in the cycle before |
| `left_*`, `right_*` | the same words from the children, into 8-word queues |
| `dn_valid`, `dn_word` | `{kind, data}` from the parent: kind 0 = an entry of D, kind 1 = a symbol in bits [1:0] of each component; no back-pressure (the sender paces it) |
| `dn_fwd_*` | the parent's words, one cycle later, for both children |
| `zf_mode`, `has_left`, `has_right`, `fft_scale`, `inv_p` | configuration: ZF or CB, which children exist, FFT stages to halve, 1/p |
| `busy`, `stall`, `error` | status; `error` is sticky (queue overflow, too many D entries) |

Word order on the parent link:

* **Gram entries:** `j = 0..K−1`, `k = j..K−1`.
* **Uplink sums:** subcarrier-major, terminal-minor, for each uplink symbol
  in order.

Every node sends the same sequence, so a parent adds its children's words in
arrival order.

## Where this design departs from the paper, or fills gaps

* **Output buffer.** It holds two symbols, not one. The paper sizes it at
  N_FFT words, but its own schedule computes the next downlink symbol's
  IFFT while the previous one is being sent. The IFFT of symbol d therefore
  waits until symbol d−1 has started transmission.
* **Decoding vector.** The paper writes both `A = D H^H` and `A_i = D h_i`.
  This design uses `v = D conj(h_i)`, which is what `A = D H^H` gives for one
  antenna.
* **Butterfly sign.** The paper's operation figure places the minus sign on
  the B side of the butterfly adder. This design computes the usual
  `B ± W·A`.
* **Parent output.** The paper's node drawing connects Y1 to the parent
  output. Here Y2, which carries the three-input sum, goes to the parent.
* **D memory.** The memory for D (K(K+1)/2 words) is an addition. The
  paper lists no storage for it.
* **Own choices where the paper says nothing:**
  * the cyclic prefix length (144 samples, LTE normal prefix);
  * the Q2.10 number format, truncation and saturation;
  * the ADC/DAC scaling;
  * the 4-PAM symbol mapping;
  * the subcarrier mapping;
  * the bank assignment;
  * the link word formats and handshakes;
  * the queue depths;
  * the job priorities.
* **Not built:**
  * the CCU (and its matrix inversion);
  * the radio and converters;
  * the serial links;
  * the instruction-RAM alternative for the control unit;
  * configurations with more than one PE.

  Changing K, N_FFT or N_SC means re-elaborating with new parameters. A
  different clock ratio is set by the strobe rate.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pe` | 5000 random operations with all control combinations, including saturation and the accumulator |
| `tb_sp_ram`, `tb_bank_ram`, `tb_sample_memory` | the memories at full size against model arrays; bank_ram and sample_memory use butterfly address pairs |
| `tb_twiddle_rom` | all 1024 entries against cos/sin |
| `tb_link_fifo` | order, the ready threshold and overflow |
| `tb_down_link_rx` | forwarding, D storage and readback, symbol mapping and error flags |
| `tb_radio_if` | the frame timing: writes, slots, events, cyclic-prefix-first readout |
| `tb_mimo_node` | the reduced end-to-end test |
| `tb_mimo_node_full` | the full-size end-to-end test |

**The reduced end-to-end test** (`tb_mimo_node`) uses K = 2, a 16-point FFT, 8
subcarriers, 3 downlink symbols and 3 frames. It runs a ZF node with two
children beside a CB leaf node. The testbench plays the children, the parent
link (random back-pressure) and a behavioural CCU. The CCU returns a random
Hermitian D 40 cycles after the last Gram word.

A bit-exact reference model in the testbench predicts every Gram word, every
uplink sum and every DAC sample. The model includes an independent radix-2
FFT with the same rounding. The test also counts these mechanisms and fails
if any never occurs:

* parent back-pressure stalls;
* child-queue stalls;
* downlink-symbol stalls;
* IFFT waits for the output buffer;
* W/A computations;
* both modes.

The children in this test alternate between idle and busy bursts. A test run
ends when the radio stops, at the end of the last frame. With some random
seeds (about 3 in 20 runs with `+verilator+seed+N`), a long idle burst near
the end delays the ZF node's last uplink sums past that point. The run then
reports one failure for the missing sums. This is not a wrong result. Running
on would let the next frame overwrite input-buffer slots that the stalled
node has not yet processed. That is the intended overrun behaviour when
children fall behind the radio. The default seed passes.

**The full-size test** (`tb_mimo_node_full`) runs one LTE-like frame with every
parameter at its default:

* K = 20, 2048-point FFT, 1200 subcarriers;
* 12 clock cycles per sample;
* T_inv = 40 µs = 14 746 cycles.

It checks all 210 Gram words, 2 × 48 000 uplink sums and both downlink
symbols, about 173 000 checks in all. It takes roughly a minute and a half
with Verilator.

To run a testbench:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mimo_node \
    rtl/mimo_pkg.sv rtl/bank_ram.sv rtl/down_link_rx.sv rtl/link_fifo.sv \
    rtl/mimo_node.sv rtl/node_ctrl.sv rtl/pe.sv rtl/radio_if.sv \
    rtl/sample_memory.sv rtl/sp_ram.sv rtl/twiddle_rom.sv tb/tb_mimo_node.sv
./obj_dir/Vtb_mimo_node
```

### Lint notes

The children's `kind` bit travels through the child queues but is not used by
the node; Verilator reports it as unused. The `kind` bit is kept so that the
word format is the same on every link.
