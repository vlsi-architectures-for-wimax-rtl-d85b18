# A WiMAX convolutional-turbo-code receiver in SystemVerilog

WiMAX (IEEE 802.16e) protects its data with a double-binary convolutional
turbo code (CTC). The information bits are grouped in N couples (A, B), with
N between 24 and 2400. Two identical 8-state recursive encoders produce the
parity bits: one sees the couples in natural order, the other in an
interleaved order. The encoder makes six subblocks (A, B, Y1, W1, Y2, W2),
each N bits long. It permutes each subblock, writes them into a 6N-bit
circular buffer, and for each transmission sends a window of L bits starting
at offset F. When L < 6N the code is punctured. When L > 6N some bits are
repeated. The offset depends on the HARQ subpacket identifier SPID.

This RTL is the receive side of that chain. It takes soft values (LLRs) of
the transmitted bits and returns the decoded couples. It has three stages,
and they run concurrently on consecutive frames:

```
 LLRs, 4/cycle  +-----------------+   +------------------+   +-------------------------+
 -------------->| symbol          |-->| subblock         |-->| parallel CTC decoder    |--> couples
                | deselection (SD)|   | deinterleaver    |   | P = 1/2/4 SISOs, 8 iter |
                +-----------------+   +------------------+   +-------------------------+
                 4 input memories      1 address generator    double input buffer,
                 + 6N output buffer    6 LLRs per address     EI-MEM, crossbars, LIFO
```

Top module: `wimax_ctc_rx`. Shared types and tables: `wimax_pkg`.

## Frame sizes and the per-size tables

Everything that depends on the frame size comes from `wimax_pkg`. A 5-bit
index selects one of the 17 standard sizes, from N = 24 to N = 2400. For
each size the package gives:

* the subblock-interleaver parameters m and J;
* the CTC-interleaver parameters P0..P3;
* the decoder parallelism P;
* the window length W.

The N, m, J and P0..P3 values are those of the 802.16 standard.

P and W are choices of the architecture:

* **P** is 1 for N ≤ 180, 2 for N = 192..240, and 4 for N ≥ 480. This keeps
  throughput rising with N. It also avoids the one size (N = 108) where a
  2- or 4-way split would make two SISOs hit the same memory bank.
* **W** is the largest divisor of N/P that is at most 32. So every SISO
  segment is a whole number of windows, and all SISOs stay in lock-step.

## Symbol deselection (`sd_lf_gen`, `sd_unit`)

`sd_lf_gen` computes the subpacket length and start:

* L = 48·m·N_SCH, using shifts and one adder.
* F = (SPID·L) mod 6N, by subtracting 6N once per cycle until the result
  goes negative.

`sd_unit` has four input memories. Memory c holds positions c·6N to
c·6N + 6N − 1 of the received stream. So the c-th copy of any
circular-buffer bit sits at the same address in memory c. Each memory word
holds p = 4 LLRs.

A subpacket is processed in three phases:

1. **Clear.** The 6N-LLR output buffer is zeroed while L and F are computed.
   This is how punctured bits end up as LLR 0.
2. **Load.** The L received LLRs are written, four per cycle, at linear
   offset F onward. The input uses a valid/ready handshake.
3. **Combine.** One word is read from each of the four memories. Words that
   lie outside [F, F+L) are masked. The up-to-four copies are added,
   saturated to ±31, and written to the output buffer.

Clear and combine each take 6N/4 cycles. That matches the 12N/p cycles per
frame the architecture budgets for SD. The read port returns the six LLRs
(A, B, Y1, W1, Y2, W2) of one subblock position. Y1/Y2 and W1/W2 are
interlaced in the circular buffer.

Limitation: copies beyond the fourth (L > 24N) are dropped.

## Subblock deinterleaver (`sbi_addr_gen`, `subblock_deint`)

The standard's subblock permutation is

    T_k = 2^m · (k mod J) + BRO_m(floor(k / J)),

where BRO_m is m-bit bit reversal. Candidates with T_k ≥ N are skipped.

`sbi_addr_gen` builds this from:

* a k mod J counter and a k/J counter;
* a shift by m;
* eight hard-wired reversal networks (m = 3..10), selected by m;
* a comparison with N.

All six subblocks use the same permutation. So a single generator moves six
LLRs per valid address: from SD position i to natural couple T_i in the
decoder's input buffer. The worst case over all sizes is 191 candidates for
N = 144 couples.

## The parallel decoder (`ctc_decoder`)

### Trellis and SISO

The constituent code has 8 states. Each couple u = (A, B) gives 16 branch
metrics:

* `ctc_bmu` builds them from the A, B, Y, W channel LLRs and the three
  a-priori symbol LLRs.
* `ctc_smp` holds 8 add-compare-select elements for one recursion direction.
* `ctc_lo_proc` combines α, γ and β into the symbol LLRs, the extrinsic
  output and the hard decision.

Widths: channel LLRs 6 bit, extrinsic LLRs 8 bit, state metrics 12 bit.
State metrics wrap around (modulo arithmetic) and are compared by the sign of
their difference, so no explicit normalisation is needed.

`ctc_siso` runs max-log-MAP with a sliding window and one forward recursion
(SP = 1). Window w is read and its α recursion computed, while the β
recursion and outputs of window w−1 run from the buffered inputs and α
values. Outputs therefore come out one window late, and each window in
reverse order.

There are no dummy (training) recursions. Instead, border metrics from the
previous iteration initialise the next one:

* β at each window border;
* α at the segment start;
* β at the segment end.

Borders are stored separately for the natural and the interleaved
half-iteration. This is the design's main departure from a textbook sliding
window, and it is what keeps the latency at one window.

### Splitting a frame over P SISOs

The frame is cut into P segments of N/P couples, one per SISO. The segments
are circular: the code is tail-biting. The SISOs exchange border metrics on a
ring, which is closed after the last active SISO (`last_SISO`):

* SISO k takes α from SISO k−1;
* SISO k takes β from SISO k+1, modulo P.

### Interleaved addressing

The interleaver is built in two stages.

* **`ctc_serial_intl`** is the first stage. It produces one interleaved
  address per cycle, i = (P0·j + P'_j) mod N. It uses a small LUT of
  P0 mod N and the three non-trivial P'_j terms, an accumulator with mod-N
  correction, and a second adder with mod-N correction. Odd addresses also
  flag that A and B are exchanged.
* **`ctc_par_addr`** is the second stage. It splits i into:
  * the common word adx = i mod (N/P), using N/4, N/2 and 3N/4 from shifts
    and subtracters;
  * bank idx⁰ for SISO 0;
  * banks idx^k = (idx⁰ ± k) mod P for the other SISOs.

The sign is '−' when P0 mod 4 = 3, otherwise '+'. With that rule every size
is collision free. So all SISOs always read the same word of different banks,
in a circular-shift pattern.

### Data paths

`ctc_xbar` crossbars route addresses and data between SISOs and banks:

* radx: scatter addresses to banks;
* rdata: gather bank data to SISOs;
* wdata: scatter results back.

`addr_lifo` keeps each window's (word, bank, swap) so the reversed outputs
are written to the right place. It has two window-sized stacks, so one window
is pushed while the previous one is popped.

Memories:

* **`ei_mem`** holds the extrinsic LLRs: P banks × N/P words × 3·8 bit. At
  N = 2400 that is 57.6 kbit.
* **`ctc_in_buf`** holds the channel LLRs: double-buffered, 4 banks per half.
  The deinterleaver fills one half while the decoder reads the other.
* **`hd_packetizer`** keeps the decisions of the last half-iteration. It
  un-swaps A/B and serves them in natural order.

### Timing

A frame takes 2·I·(N/P + W + 1) cycles, with I = 8 iterations:

* N/P steps per half-iteration;
* W cycles of window latency;
* one idle cycle between half-iterations.

At 200 MHz this gives:

| N    | P | W  | cycles | throughput |
|------|---|----|--------|------------|
| 2400 | 4 | 30 | 10096  | 95 Mb/s    |
| 480  | 4 | 30 | 2416   | 79 Mb/s    |

`ctc_decoder` has a handshake at each end:

* **Input.** A frame is written through `in_we`/`in_addr`/`in_data` and
  committed with `in_frame_done`.
* **Output.** `dec_done` pulses when the frame is decoded, and `dec_size`
  gives its size. Couples can then be read on `hd_rd_i`/`hd_rd_bits` until
  the last half-iteration of the next frame.

## Top-level use (`wimax_ctc_rx`)

To send a subpacket:

1. Wait for `ready`.
2. Pulse `start` with `size`, `mod_order` (2, 4 or 6), `nsch` and `spid`.
3. Stream L/4 words of four 6-bit LLRs on `in_valid`/`in_ready`. Positive
   means bit 1.

When SD finishes, the top waits for a free decoder input buffer,
deinterleaves into it and hands the frame to the decoder. `ready` then
returns, so the next subpacket's SD and deinterleaving overlap the decoding
of the previous frame. Subpackets are decoded on their own: there is no HARQ
combining across SPIDs.

## Verification

Each block has a self-checking testbench in `tb/`. They share an independent
reference in `tb_ref_pkg`, which contains:

* an encoder that computes the circulation state;
* the interleaver formula;
* the subblock permutation;
* the transmitter's circular-buffer construction.

Coverage:

* The arithmetic blocks are compared exhaustively or randomly with integer
  models.
* `tb_ctc_siso` checks the first pass bit-exactly against a windowed
  max-log-MAP model.
* `tb_ctc_decoder` checks that noisy frames for P = 1, 2 and 4 decode without
  error, and that the cycle count per frame equals the formula above.

`tb_wimax_ctc_rx` runs the whole receiver end to end. It sends four
back-to-back frames (N = 24, 240, 480, 144) with noise. It counts each
mechanism and fails if any one never occurs:

* puncturing;
* repetition;
* a subpacket wrapping round the end of the buffer;
* P = 1, 2 and 4;
* A/B swaps;
* front end overlapping decoding.

`tb_wimax_ctc_rx_full` does the same at N = 2400 with the top at its
default parameters.

Run any testbench with plain verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/wimax_pkg.sv tb/tb_ref_pkg.sv tb/tb_wimax_ctc_rx.sv --top-module tb_wimax_ctc_rx
./obj_dir/Vtb_wimax_ctc_rx
```

Each testbench prints `TB_RESULT checks=… failures=…`.

## Where this design chooses for itself

These points are not fixed by the architecture description:

* the signed-bit LLR convention;
* the BMU normalisation to u = 00;
* no extrinsic scaling;
* border-metric initialisation from the previous iteration, instead of
  training;
* the ± rule of the bank index;
* the W(N) rule;
* the two-stack LIFO;
* asynchronous-read memories;
* the one-cycle gap between half-iterations;
* the valid/ready and frame handshakes;
* ±31 saturation of combined copies;
* dropping copies beyond four;
* no early stopping of the iterations.

The serial interleaver's LUT word is 42 bits wide: a 6-bit P0 mod N and
three 12-bit P'_j terms. The published diagram labels that LUT with 37 bits.

The memories are plain arrays, not SRAM macros.
