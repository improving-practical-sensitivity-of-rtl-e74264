# Digital base-band for a duty-cycled wake-up receiver

A wake-up receiver (WRx) is a very low-power radio that listens for a
*wake-up beacon* (WB) and powers up the main transceiver of a sensor node only
when the beacon is addressed to that node. To stay within a budget of tens of
microwatts, its analog front-end works with a high raw bit error rate (around
15 % at the sensitivity of the main receiver). This design is the digital
base-band (DBB) behind such a front-end: it recovers the beacon from the noisy
bit stream by correlation, so that a long, spread beacon buys back the
sensitivity the front-end gave away, while the digital logic itself costs
well under a microwatt.

The RTL follows the architecture of Seyed Mazloum et al., "Improving practical
sensitivity of energy optimized wake-up receivers: proof of concept in 65nm
CMOS". Block structure, filter lengths, thresholds and the decimator mapping
come from that paper; the controller, the handshakes between blocks, the
programming interface and all cycle-level timing are this implementation's
own, since the paper does not give them.

## The beacon

A beacon is a preamble followed by the destination and the source address:

| field | content | prototype size |
|---|---|---|
| preamble | a sequence with sharp autocorrelation, identical for all nodes | 31-bit m-sequence |
| destination address | L bits, each spread by a K-chip code | L = 8, K = 7 |
| source address | L bits, each spread by the same code | L = 8, K = 7 |

Every bit and chip is Manchester coded (here 1 → `10`, 0 → `01`), so the
preamble is 62 chips and every address bit 14 chips. An address bit of one is
sent as the spreading code, a zero as the inverted code. The front-end samples
the channel at κ = 4 times the chip rate, so the DBB sees
248 + 2·8·14·4 = 1144 samples per beacon. At 250 kbit/s the DBB clock is
1 MHz: one input sample per clock.

The preamble is only used to find the beacon and its timing; identity lives in
the address part. Because all nodes share the preamble and the spreading
code, only the address decoder differs from node to node, and a larger network
only needs a longer address decoder.

## Processing chain

```
 x_i (κ·bit rate) ──┬──> PMF ──sync, peak position──┐
                    │                               v
                    └──────────────────────────> decimator (κ:1) ──chips──> AMF ──address bits──> address decoder ──> wake_o
                                    controller: arms the PMF, makes the κ:1 strobe, restarts the search
```

| block | module | runs at | length (default) | threshold |
|---|---|---|---|---|
| preamble matched filter | `wur_pmf` | sample rate | 256 taps (248 used) | run-time input, 236 = 92 % |
| decimator | `wur_decimator` | sample rate, output at chip rate | 2κ−1 = 7-bit shift register | ⌈κ/2⌉ = 2 of 4 |
| address-spreading matched filter | `wur_amf` | chip rate, one decision per 14 chips | 16 taps | 8 |
| address decoder | `wur_addr_decoder` | address-bit rate | 8 taps | 8 (all bits) |
| controller | `wur_ctrl` | sample rate | – | – |
| top | `wur_dbb` | | | |

Shared constants (κ, lengths, the controller state type) are in `wur_pkg`.

## The binary matched filter

All three correlators are the same circuit, `wur_mf`: an input delay line
(SRI) holding the last J input bits, a coefficient register (SRF) holding the
known sequence, one XNOR per tap and a fully balanced adder tree
(`wur_adder_tree`) that counts the agreeing taps. The output y[n] therefore
runs from 0 (the input is the exact complement) to J (exact match), and a
comparator flags y[n] ≥ threshold. Since inputs and coefficients are single
bits, no multipliers are needed, and the depth of the adder tree, which sets
the critical path, grows only with log₂J.

The coefficient registers are programmed serially after reset: while the
block's `*_coef_en_i` is high, one bit per clock is shifted in. Feed the
sequence in the order it is transmitted; after J clocks the register holds it
time-reversed, which is what a matched filter needs. The PMF is loaded with
256 bits: 8 pad bits, then the 248 samples of the oversampled Manchester
preamble. The AMF is loaded with 16 chips: a 2-chip pad, then the 14 Manchester
chips of the spreading code. The decoder is loaded with the node address, most
significant (first transmitted) bit first.

About the pads: the PMF and AMF lengths are the preamble and code lengths
rounded up to a power of two. The extra taps look at whatever preceded the
field. With Manchester coding every complete chip pair in them agrees with a
pad pair in exactly half its positions, so they add an almost constant offset
(about 4 to the PMF, 1 to the AMF) rather than noise. The AMF threshold of 8 is
the midpoint between a matching bit (about 15) and an inverted one (about 1).

## Synchronisation: finding the clock phase

This is the least obvious part of the design. The front-end delivers four
samples per chip but gives no hint where a chip starts. The PMF correlates
every sample against the full oversampled preamble; the correlation peaks
when the last preamble sample has just entered the delay line. One sample
earlier or later, every chip edge in the preamble costs a match, so the peak
is sharp (about 46 matches lower per sample of misalignment for the
prototype preamble).

The PMF reacts to the first sample whose correlation reaches the threshold,
n0, and then watches κ samples, n0 … n0+κ−1. The largest correlation among
them is taken as the peak; its offset d = 0 … κ−1 is the clock phase (ties go
to the earlier sample). One clock after the window, `sync_o` pulses and
`peak_pos_o` holds d.

From then on the controller counts clocks modulo κ and the decimator sums
four samples per chip. Its shift register holds 2κ−1 samples,
x[n] … x[n−2κ+2], which contain every window of κ consecutive samples that
includes x[n−κ+1]. That middle sample is part of every possible window and is
wired straight to the adder; a multiplexer with κ inputs of κ−1 bits picks
the other samples of the window for the chosen phase (input p = κ−1−d).
The selected bits are registered, added, and compared with ⌈κ/2⌉, and the
result is latched once per κ clocks (`strobe` from the controller, standing for
a κ-divided clock).

Cycle by cycle: if the PMF first crossed the threshold in clock n0, the
controller's strobe is high in clocks n0+2κ+iκ, and chip i is the majority of
the four samples that end κ(i+1) samples after the peak. A chip therefore needs
no correlation at the sample rate, and the AMF runs at a quarter of the clock
rate and decides once per address bit.

## Address detection and wake-up

The AMF shifts in one chip per strobe, counts 14 chips, and in the next clock
registers its comparator output as the address bit. The address decoder shifts
in those bits, counts 8, and in the next clock pulses `addr_done_o`; if all 8
bits agreed with the node address it pulses `wake_o` in the same clock. The
controller then goes back to the preamble search (the source address is not
decoded here).

With no bit errors and the peak at the first window sample, `wake_o` comes
κ+5 = 9 clocks after the clock in which the last destination-address sample
entered the PMF. The DBB never stalls: it takes one sample per clock in every
state.

## Controller and listening

`wur_ctrl` has three states: `ST_IDLE` (listen window closed), `ST_SEARCH`
(PMF armed) and `ST_ADDR` (decimator, AMF and decoder active). `listen_i` is
the sleep/listen signal a node's sleep timer would drive; in a duty-cycled
network the listen window must last at least two beacon lengths plus the gap
between strobed beacons, so that one complete beacon falls into it. Dropping
`listen_i` returns to idle at once.

## Top-level interface (`wur_dbb`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (κ × bit rate), asynchronous active-low reset |
| `listen_i` | in | 1 | listen window open |
| `x_i` | in | 1 | oversampled bit decision from the front-end |
| `pmf_thr_i` | in | 9 | PMF threshold, 0 … 256 |
| `pmf_coef_en_i`, `pmf_coef_i` | in | 1 | serial loading of the preamble |
| `amf_coef_en_i`, `amf_coef_i` | in | 1 | serial loading of the spreading code |
| `adr_coef_en_i`, `adr_coef_i` | in | 1 | serial loading of the node address |
| `wake_o` | out | 1 | one-clock pulse: wake the main transceiver |
| `pmf_y_o`, `sync_o`, `peak_pos_o` | out | 9, 1, 2 | PMF correlation, sync pulse, clock phase |
| `abit_o`, `abit_valid_o` | out | 1 | detected address bits |
| `addr_done_o` | out | 1 | destination address decided (match or not) |
| `state_o` | out | 2 | controller state |

Parameters: `OSR` (κ, 4), `PMF_LEN` (256), `AMF_LEN` (16), `CHIPS` (chips per
address bit, 14), `NBITS` (address bits, 8). Going from 256 to 1024 nodes
means `NBITS = 10` and a 10-bit address; the rest is unchanged. A longer
preamble or code needs a longer `PMF_LEN` / `AMF_LEN` (and `CHIPS`).

## Where this departs from the paper, or goes beyond it

* The comparators detect y ≥ threshold. The paper speaks of y "larger than"
  the threshold but sets the address decoder threshold to L, which only ≥ can
  reach.
* Clock gating (ClkEn on the coefficient registers, the κ-divided clock of the
  decimator output) is replaced by synchronous clock enables.
* The adder tree is a balanced tree of behavioural adders; its first level is
  half adders, as in the paper, but the higher levels are not mapped to
  particular standard cells.
* The decimator's shift register is 2κ−1 bits, x[n] … x[n−2κ+2]. One
  sentence of the paper writes the span as x[n−(2κ+2)]; its figure and the
  stated register length agree with 2κ−1.
* Which κ samples the peak search compares, the coding of a zero address bit,
  the pad coefficients, the one-clock wake pulse, the controller, the listen
  input and all reset values are choices of this implementation.
* The PMF threshold of 92 % used in the tests is taken of 256 (236); the
  paper does not say whether its maximum means 256 taps or 248 preamble
  samples.
* The source address is not decoded. Detection and false-alarm probabilities
  are not reproduced; only the threshold that sets them is exposed.

## Verification

Each module has a self-checking testbench in `tb/` that computes the expected
outputs independently of the RTL (from the input history) and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_wur_mf` | correlation value and detection against a reference count, random data and thresholds |
| `tb_wur_pmf` | correlation and peak search at full size, with noisy beacons; exact sync timing for error-free beacons |
| `tb_wur_decimator` | majority over the selected window for every phase, strobe-to-output latency |
| `tb_wur_amf` | de-spread address bits against the reference and against the sent bits, with chip errors; decision latency |
| `tb_wur_addr_decoder` | wake only on a full address match; done latency; restart by clear |
| `tb_wur_ctrl` | state sequencing, PMF arming, strobe timing |
| `tb_wur_dbb` | whole DBB at default parameters: exact wake latency, beacons to other nodes, noisy beacons (up to 8 % sample errors) at lower thresholds with later peaks, listen window closed, strobed beacons with listening starting mid-beacon |

Running one with Verilator:

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
    rtl/wur_pkg.sv tb/tb_wur_dbb.sv --top-module tb_wur_dbb -o sim
./obj_dir/sim
```

The end-to-end test runs in seconds at the full default size.
