# An OFDM link that learns which channel to use

This design is a small OFDM radio link, closely modelled on IEEE 802.11a. It has a
hardware *multi-armed bandit* (MAB) learner that decides, slot by slot, which of K
wireless channels to transmit on. No one tells the link which channel is good. It finds out
by using the channels and measuring how much pilot power comes back. The learning algorithm can be
changed at run time, as can the number of channels it may choose from:

- **UCB**: the upper confidence bound.
- **UCB_V**: the variance-aware variant of UCB.
- **UCB_T**: a further variant.

In a system-on-chip this would be done by partial reconfiguration of an FPGA region per channel.
Here it is modelled by a configuration input per region.

Each time slot works the same way:

1. A processor writes a *feedback word* into the learner. The word says which channel was used
   in the last slot and what reward it earned.
2. The learner updates its statistics and names the channel for this slot.
3. The processor programs the emulated channel's fading coefficient for that channel. It picks
   QPSK or 16-QAM and starts the slot.
4. The transmitter sends a 320-sample preamble followed by one OFDM data symbol.
5. The receiver finds the frame, estimates the channel, equalises and demodulates the data. It
   returns the data bits and the slot's reward, R = received pilot power / transmitted pilot power.

```
            feedback word                              chan_wr (coefficient of channel I(n))
 processor ---------------> mab_core ---> sel_idx ---> processor
                                                          |
 tx_bits -> qam_mapper -> resource_mapper -> [IFFT] -> cp_add -> preamble_add -> fading_channel
                                                                                      |
 rx_bits <- qam_demapper <- chan_eq <- chan_est <- [FFT] <- rx_framer <- sync_autocorr <-+
                                          |
                                          +--> reward --> (next feedback word)
```

The 64-point IFFT and FFT are not part of the RTL. They are meant to be a vendor's FFT core, so
the top level brings out their ports (`ifft_*`, `fft_*`). The testbench connects a behavioural
model, `tb/fft64_model.sv`, to them.

## The bandit learner (`mab_core`)

### Statistics and the feedback word

For every channel k the learner keeps three values:

- **X(k)**: the sum of its rewards.
- **Y(k)**: the sum of its squared rewards.
- **T(k)**: how often it was played.

It also keeps the slot counter **n**. All of these live in the input processing unit (`ipu`).

The processor writes the statistics in one 32-bit word:

| bits | content |
|------|---------|
| 2:0 | channel used in the previous slot, 1-based (0 = none) |
| 3 | INIT: restart the experiment (X = Y = T = 0, n = 1) |
| 31:4 | reward as an unsigned 28-bit fraction, 0 ≤ R < 1 |

The index field is `$clog2(K_MAX+1)` bits wide, so the reward field shrinks if K_MAX grows past 7.

### INIT and LEARN modes

For the first K slots after an INIT word, the learner is in **INIT mode**. It picks the channel
itself, using a 3-bit maximal-length LFSR. Values above K are skipped, so each channel is tried
exactly once in a pseudo-random order.

After that it is in **LEARN mode**. The IPU hands X, Y, T and n to one quality-factor (QF) unit
per channel, using a single valid/ready handshake. Each unit computes a score Q(k), and a
comparator tree picks the largest. `learn` shows the mode.

### Quality factors

Let m = X/T be the mean reward and V = Y/T − m² the variance. The three units compute:

- UCB: `Q = m + sqrt(α ln n / T)`
- UCB_V: `Q = m + sqrt(α1 ln n · V / T) + α2 ln n / T`
- UCB_T: `Q = V + sqrt(α ln n / T)` (clamped at 0)

Properties shared by all three:

- α, α1 and α2 are run-time inputs. Useful values are 0.5 to 2.
- A channel that has never been played (T = 0) gets the largest possible Q.
- Every unit is combinational with a registered output, so its latency is one clock.

**Caution about UCB_T.** The formula above is implemented exactly as the design specification
states it, and it adds the exploration term to the *variance*, not to the mean. That makes UCB_T
prefer noisy channels. The workload testbench shows this: with means (0.5, 0.8, 0.61, 0.45, 0.9)
and variances (0.01, 0.02, 0.08, 0.06, 0.07), UCB_T settles on channel 3, which has the largest
variance, and not on channel 5. The prose of the specification says UCB_T should find the best
*mean*, as the well-known UCB-Tuned algorithm does (`m + sqrt(ln n/T · min(1/4, V + sqrt(2 ln n/T)))`).
If you want that behaviour, change the `q_c` line in `rtl/qf_ucbt.sv`.

### Fixed-point arithmetic

All scores use WL = 11 bits, unsigned, with 5 integer and 6 fractional bits (UQ5.6). Every
intermediate result is saturated back to WL bits.

- Both the reward and its square enter the sums truncated to 6 fractional bits.
- `ln n` is the position of the leading one of n plus the remaining bits read as a linear
  fraction, times ln 2 (Mitchell's approximation).
- This approximation under-estimates ln n by at most about 0.06. The testbenches allow exactly
  that error, plus truncation slack, when comparing with exact formulas.
- WL and the counter width are parameters. WL = 6 is known to be too coarse: many channels end
  up with equal scores.

The helper functions are in `rtl/mab_pkg.sv`. `WL` can be changed, but the 5 integer bits are
fixed by `INT_BITS`.

### Selection and ties

The comparator tree (`qf_selector` nodes in `channel_select`) compares `{act, Q}` with `>=`.
Input a always carries the lower channel numbers, so a tie goes to the lower index. `act` is 0
for a *blank* region, so an unavailable channel can never win. For K_MAX = 5 the tree is padded
to 8 leaves, and the padding leaves are inactive.

### Reconfiguration

`qf_rr` is one reconfigurable region. It contains all three QF units and a blank option, and the
`cfg` input chooses which one answers. This is a behavioural stand-in for loading a partial
bitstream. In silicon or on an FPGA only one of them would exist at a time, so the RTL is
larger than the intended design.

- **Changing the algorithm:** change `rr_cfg` between experiments.
- **Changing K:** set `k_active`. Regions with an index of `k_active` or more are forced blank.

Always start a new experiment with an INIT word after either change.

### Timing of one decision

The learner's latency from the feedback word to `sel_valid` depends on the mode:

- **LEARN mode:** about 5 clocks. That is 1 for the update, 1 for the QF units and 3 for the
  tree levels.
- **INIT mode:** 2 to 8 clocks, depending on how many LFSR steps are skipped.

`busy` is high from the feedback word until the choice is out. The processor must not write
the next word while `busy` is high; an assertion checks this.

## The PHY

### Sample format and handshakes

- Samples and symbols are complex values with 16-bit signed Q1.15 parts (`phy_pkg::cplx_t`).
- Blocks exchange data with a strobe/acknowledge pair. A beat moves when both `stb` and `ack`
  are high.
- Blocks that cannot stall have no `ack`: the preamble output, the channel, the synchroniser,
  the framer, the estimator and the equaliser.
- The FFT model always accepts input.

### Transmitter

- **`qam_mapper`:** maps the symbols.
  - QPSK: ±0.7071. I comes from bit 0 and Q from bit 1.
  - 16-QAM: levels ±0.3162 and ±0.9485. I comes from bits 0–1 and Q from bits 2–3, with
    00 → −0.9485, 01 → +0.3162, 10 → −0.3162 and 11 → +0.9485.
- **`resource_mapper`:** collects 48 data symbols and sends 64 IFFT bins in natural order.
  - Data occupies subcarriers −26…26, except DC and the pilots at ±7 and ±21. Data symbol 0
    goes to subcarrier −26, which is bin 38.
  - The pilots are +1, +1, +1 and −1 at −21, −7, +7 and +21 (`pilot_rom`).
  - Bins 27–37 are guard bins and are zero.
- **`cp_add`:** buffers one 64-sample IFFT output and sends 80 samples: the last 16 samples
  first, then all 64.
- **`preamble_add`:** on `slot_start`, sends the 320-sample 802.11a preamble from a ROM
  (`rtl/preamble.hex`), then passes NSYM × 80 payload samples.
  - The preamble is 10 short symbols of 16 samples, then a 32-sample prefix and two long
    symbols.
  - It is scaled by 1/64, the same scaling as the IFFT model, so preamble and data have
    comparable power.

### Emulated channel

`fading_channel` multiplies every sample by one complex coefficient per channel, with rounding
and saturation. Writing a coefficient also selects that channel. The processor draws a new
coefficient for the chosen channel every slot, for example from a Gaussian distribution with
that channel's mean and variance. No noise is added in hardware.

### Receiver

- **`sync_autocorr`** detects the repeating short preamble. It keeps the running lag-16
  correlation P and the energy R over a 32-sample window, and fires once when |P|² > 0.75·R².
  The test does not depend on the scale of the signal. On the stored preamble it fires at frame
  sample 42 or 43.
- **`rx_framer`** counts from the detection. It assumes detection at sample `DET_POS` = 46, so
  every 64-sample FFT window starts 4 samples early, inside its cyclic prefix. That is a cyclic
  shift, which the channel estimate absorbs. Any detection point from sample 30 to 46 therefore
  gives correct windows.

  The framer sends the FFT three windows: the two long training symbols, then each payload
  symbol. If the detector is changed, re-check `DET_POS`.
- **`chan_est`** forms the least-squares estimate H = Y·L per bin from each long training
  symbol, where L = ±1. It averages the two estimates and passes every payload bin on with its
  H. It also adds up the received and the known pilot power of the payload symbol and outputs
  the reward R = P_rx/P_tx as a 28-bit fraction, saturated just below 1. This fits straight into
  the feedback word.
- **`chan_eq`** is a zero-forcing equaliser: Y·conj(H)/|H|². It writes the 48 data bins into a
  buffer by data index and sends them in order 0…47.
- **`qam_demapper`** makes hard decisions: it compares against 0 for QPSK, and against 0 and
  ±0.6325 for 16-QAM.

### Top level (`irphy_top`)

`irphy_top` connects all of the above. From outside it looks like this:

| group | signals |
|-------|---------|
| learner | `k_active`, `rr_cfg[K_MAX]`, `alpha`, `alpha1`, `alpha2`, `fb_valid`/`fb_data` in; `sel_valid`, `sel_idx`, `mab_learn`, `mab_busy` out |
| slot control | `chan_wr`, `chan_wr_idx`, `chan_wr_coef`, `mod_sel`, `slot_start` |
| data | `tx_stb`/`tx_ack`/`tx_bits` in; `rx_stb`/`rx_bits` out; `reward_valid`/`reward` out |
| FFT cores | `ifft_in_*`, `ifft_out_*`, `fft_in_*`, `fft_out_*` |
| monitors | `air_stb`/`air_data` (channel output), `frame_det`, `tx_busy` |

One slot works as follows:

1. Write the coefficient.
2. Pulse `slot_start`. This also clears the receiver.
3. Offer 48 data words.
4. Wait for 48 `rx_stb` beats and one `reward_valid`.
5. Build the next feedback word `{reward, 1'b0, channel}`.

Parameters and their defaults:

- `K_MAX` = 5 channels.
- `WL` = 11.
- `CNT_W` = 16-bit counters.
- `NSYM` = 1 data symbol per slot.

## Where this design departs from its specification

| Topic | What the specification says | What this design does |
|-------|-------------------------|---------------------|
| Channel coding | An encoder and a decoder are named, but no code is given | Not built. Bits go straight to the mapper. |
| Frequency-offset estimation | Named only | Not built. The channel model adds no offset. |
| Synchronisation | Auto-correlation is named, with no numbers | Window 32, lag 16, threshold 0.75, calibrated framing offset. |
| Partial reconfiguration | Bitstreams are loaded through the configuration port | All units are instantiated; a configuration input selects one. |
| Number format | Only the word-length is given | UQ5.(WL−5), saturating, with Mitchell log2. |
| UCB_T | The formula and the prose disagree | The formula is implemented (see above). |
| K range | K ≤ 6 is claimed; some experiments use 7 channels | Default K_MAX = 5. Larger K needs a parameter change. The learner has been run at K_MAX = 7. |
| Modulation blocks | QPSK and QAM are separate swappable modules | One mapper and one demapper with a select input. |
| Processor software | A scheduler on the processor | The testbench plays the processor. |
| Bits per OFDM symbol | One passage says the coder gives 98 (QPSK) or 196 (16-QAM) bits per symbol; another says 48 symbols carry 96 or 192 bits | 48 data subcarriers, so 96 or 192 bits per OFDM symbol. |
| Clocking | Each block may get its own clock; 16-QAM runs at twice the QPSK clock | One clock for everything. The handshakes absorb the rate difference. |
| Bus signals | Wishbone with CYC, WE, STB, ACK and data | Streaming only: STB, ACK and data. There are no read cycles, so CYC and WE are left out. |
| Reward | Throughput in the demonstrations; the receiver also measures pilot power | The receiver reports pilot power P_rx/P_tx. The processor may send any reward in the feedback word. |
| Modulation choice | Made from the learned statistics of the chosen channel | `mod_sel` is an input; the testbench picks 16-QAM when the channel's running mean reward is above 0.5. |
| Pilot values, preamble, bit order | Not stated | Taken from IEEE 802.11a and 3GPP conventions. |

## How far it has been tested

Each block has a self-checking testbench in `tb/`. Each one compares against a reference
computed independently in the testbench, usually in double precision. Each one ends with a line
`TB_RESULT checks=N failures=M`.

- **`tb_irphy_top`** runs the whole link at default parameters. It runs three experiments:
  UCB with 5 channels, UCB_T with the last channel removed, and UCB_V with 5 channels. That is
  180 slots in total, using the channel statistics of a published adaptive-modulation
  demonstration. In every slot it checks every received bit and checks that the reward equals
  |h|². It counts INIT picks, LEARN picks, QPSK slots, 16-QAM slots, frame detections,
  algorithm switches and K changes, and it fails if any of them never happens.
- **`tb_mab_workloads`** plays 10 000 slots against four sets of channel statistics:
  - two with 5 channels, run with all three algorithms;
  - two with 7 channels, run with K_MAX = 7 and UCB.

  With UCB and 5 channels, the best channel gets about 87–92 % of the slots. In the 7-channel
  sets the means are close together, and the best channel still wins.
- **Not tested:** the noisy channels used in bit-error-rate measurements (no noise is added),
  and the design at WL = 6 or WL = 27.

## Simulating

Every testbench runs with plain Verilator from the repository root. The root matters because
the preamble ROM is loaded from `rtl/preamble.hex`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mab_pkg.sv rtl/phy_pkg.sv \
          tb/tb_irphy_top.sv --top-module tb_irphy_top -Mdir obj_top
./obj_top/Vtb_irphy_top
```

The same command works for every other `tb/tb_*.sv`. Each testbench finishes in seconds.
