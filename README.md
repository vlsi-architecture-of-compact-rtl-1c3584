# A non-RLL VLC beacon transmitter and receiver with a prescrambled (256,158) polar code

A visible-light beacon sends a fixed ID by switching an LED on and off.
Usually a run-length-limited (RLL) line code, such as Manchester or 4B6B, prevents visible flicker. It keeps ones and zeros balanced and bounds the runs, but it costs a third to a half of the channel rate.

This design drops the line code:
- A 4-bit additive scrambler whitens the frame.
- A non-systematic (256,158) polar code spreads each frame over 256 code bits.
- Together, these keep the share of lit bits near 50 % and the runs short, even for the small 158-bit beacon frame.

At the receiver, a 3-bit soft-decision filter turns raw ADC samples into log-likelihood ratios (LLRs) without knowing the channel's noise statistics. A successive-cancellation (SC) decoder then uses those soft values.

The RTL has the full digital path in both directions:

```
TX (x NUM_TX, one per LED):
     ID(128) -> frame_encap -> prescrambler -> s2p(158) -> frozen_inserter(256)
             -> polar_encoder -> p2s(256) -> ook_mod -> led_o   ... LED, air, photodiode, ADC ...
RX:  adc_data_i -> soft_decision_filter (threshold_adjust, 8 comparators, llr_lut, llr_transformer)
             -> sc_polar_decoder -> p2s(158) -> descrambler -> frame_decap -> ID, type, CRC ok
```

`vlc_system` is the top module. It holds a bank of `NUM_TX` = 8 transmitters (`vlc_tx_array`) and one `vlc_receiver`, which share only the clock and an active-low asynchronous reset.

- The bank is the beacon side: one chip drives many LEDs, and a central controller hands each transmitter its ID.
- The receiver is the user-device side.

The top module holds both halves only so that the whole link can be simulated. In a real installation they sit on different chips. The analog parts are outside the RTL: LED driver, LED, photodiode, receive amplifier and ADC. Their signals are the top's ports `led_o[t]` (one per LED) and `adc_data_i`/`adc_valid_i`/`rx_frame_start_i`.

## Frame and code

**Beacon frame (158 bits), sent MSB first:**

| bits | field | value |
|---|---|---|
| 157:152 | preamble | `101010` |
| 151:144 | frame type | input |
| 143:16 | ID | input |
| 15:0 | CRC-16-CCITT | poly 0x1021, init 0xFFFF, over type and ID, MSB first |

The field widths are the JEITA beacon layout. The preamble value and the CRC variant are choices made here, because the source gives only the widths. Both live in `vlc_pkg`.

**Prescrambler and descrambler.** These are additive scramblers with P(x) = x⁴ + x³ + 1:
- Four flip-flops r1..r4; one XOR forms the feedback r3⊕r4.
- Each frame bit is XORed with r4.
- The seed `1111` is reloaded at the first bit of every frame, so the same frame always gives the same codeword.
- The receiver's descrambler runs the identical sequence.

**Polar code.** The code is x = d·F^⊗8 with F = [[1,0],[1,1]], in natural (non-bit-reversed) index order. Equivalently, x_k is the XOR of all d_i whose index i has every 1 bit that k has.

The 158 scrambled frame bits go, in arrival order, into the information positions of d in ascending index. The other 98 positions are frozen to 0.

The frozen set is fixed in `vlc_pkg::FROZEN_MASK`, where bit i = 1 means frozen. It comes from the standard Bhattacharyya construction for an erasure channel with erasure probability 0.5:
- Start with z = 0.5 at the root. At each of the 8 levels, from the index MSB down, a 0 bit gives z ← 2z − z² and a 1 bit gives z ← z².
- The 158 indices with the smallest z carry data.
- Ties go to the larger index.

The block testbench of `frozen_inserter` recomputes this construction in real arithmetic and compares it with the mask. To use another frozen set, replace the constant. Encoder, inserter and decoder all read it from the package.

## Transmitter

Each block passes bits serially with `valid`/`sof`. The blocks in order:
- `frame_encap` serialises the frame.
- `prescrambler` is combinational apart from its four state bits.
- `s2p` collects the 158 bits.
- `frozen_inserter` scatters them into the 256-bit vector through fixed wiring plus one register.
- `polar_encoder` registers the output of a combinational XOR butterfly, `polar_enc_comb`, with (N/2)·log2 N = 1024 XORs.
- `p2s` shifts the codeword out, index 0 first.
- `ook_mod` drives `led_o`. It is 1 for LED on, and holds the idle level 1 between frames.

**Timing, with `BIT_CLKS = 1`:**
- The codeword is in the encoder register 160 clock edges after the first frame bit enters the S2P.
- It then leaves at one bit per clock.
- At 25 MHz this gives 256 bits / (160 + 256) clocks = 15.4 Mb/s.

Both figures are those reported for the original implementation. `BIT_CLKS` stretches each optical bit to a number of clocks, so a fast logic clock can drive a slow LED.

`tx_start_i[t]` is taken while `tx_ready_o[t]` is high. Each transmitter has one frame in flight at a time and ignores starts while busy.

The transmitters in the bank are fully independent: any subset can send at once, each with its own ID. A transmitter costs about 1.8 k generic cells, so large banks are cheap; the original FPGA estimate was around 60 per device.

## Soft-decision filter

The receiver must produce LLRs without knowing the noise mean and variance of the optical channel. The filter uses the signal's own extremes instead.

**Peaks and thresholds.** `threshold_adjust` measures the positive and negative peaks V+ and V− over the 256 samples of a codeword. It latches them at the end of the codeword and uses them for the following codewords. Until the first codeword completes, the peaks are the full ADC range.

From the peaks it forms seven thresholds:

  Vt = (V+ + V−)/2,  Vt±k = Vt ± k·(V+ − Vt)/4,  k = 1..3

The thresholds carry three fraction bits (8·Vt±k = 4(V+ + V−) ± k(V+ − V−)), so they are exact.

**Comparators and table.** Eight range comparators place each sample into one of eight bands, as a one-hot vector; band 0 is the highest voltage. `llr_lut` then maps the band, together with a 4-bit SNR code `rx_snr_i`, to a signed 9-bit LLR.

The table has 16 rows of 8 values. Every row resets to the same trained row:

| band | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| LLR | 1.2017 | 0.3630 | 0.2185 | 0.0656 | −0.0702 | −0.2116 | −0.3547 | −1.1943 |
| Q2.7 code | 154 | 46 | 28 | 8 | −9 | −27 | −45 | −153 |

Other rows can be written through `lut_wr_en_i`/`lut_wr_addr_i = {snr, band}`/`lut_wr_data_i`. Only one row of values is published, so the 16-row organisation and the write port are this design's own reading of "SNR-selected table".

**Quantisation and buffering.** `llr_transformer` rounds each LLR to 5 bits (q = sat((v + 4) >> 3)) and buffers the 256 values of a codeword. When the last one arrives, all 256 are presented in parallel to the decoder.

**Sign convention.** The LLR is ln P(0)/P(1), so a high voltage means bit 0. The transmitter lights the LED for a 1, so the receive path is assumed to invert (photodiode amplifier): a lit LED gives a low ADC code. If your front-end does not invert, invert `adc_data_i`.

**Frame alignment.** The receiver needs `rx_frame_start_i` on the first sample of each codeword, with one sample per code bit. Symbol timing recovery and frame synchronisation are not part of this design.

## SC decoder

This is the largest and least obvious block (`sc_polar_decoder`). A textbook SC decoder walks a tree of f/g nodes and stores intermediate LLRs in memory. This one has no intermediate storage.

**Structure.** The 256 input LLRs sit in a register. Eight layers of processing elements (PEs) are purely combinational and halve the vector at each layer (256 → 128 → … → 2). Each clock the network produces the decisions for one pair of bits (u_2i, u_2i+1), so a codeword takes 128 clocks.

**Per-layer f or g.** With j = 2i, layer l applies f or g according to bit (8 − l) of j:
- f is min-sum: f(a,b) = sign(a)·sign(b)·min(|a|,|b|).
- g(a,b,β) = b ± a, saturated to 8 bits.
- β is the partial sum of the already decoded left half of the current sub-tree.

**Partial sums.** A bank of polar encoders of sizes 128, 64, …, 2 forms β directly from the bits decoded so far: the encoder of size H encodes `u[base +: H]`, where base = j & ~(2H − 1). The same kind of combinational encoder as the transmitter's therefore doubles as the partial-sum generator. This avoids the usual partial-sum update network.

**Last PE.** The last PE emits both bits of a pair in one clock. It forms u_2i from f. Then g uses β = u_2i to form u_2i+1. Frozen bits are forced to 0. A bit is 1 when its LLR is negative.

**Timing.** `start_i` loads the LLRs. The 128 pairs follow on the next 128 clock edges, and the message register and `valid_o` come one edge later: 130 edges from load to output. From the first ADC sample of a codeword to the decoded message, the receiver takes 386 clocks (256 + 1 + 128 + 1). That matches the reported receiver latency, and gives 16.6 Mb/s at 25 MHz.

**Cost.** The critical path runs through all eight PE layers and the largest partial-sum encoder. That is why the original implementation ran the receiver at only about 29 MHz. Throughput was not a goal for a beacon receiver.

**After the decoder.** The 158 information bits are serialised by a second `p2s`, descrambled, and split by `frame_decap`. The frame outputs are the ID, the frame type, a preamble-match flag and a CRC-match flag. They appear with `rx_id_valid_o`, about 160 clocks after the decoder finishes.

A new codeword can stream into the LLR buffer while the previous one is still being decoded.

## Measured behaviour

**Flicker.** `tb_flicker_workload` sends 10,000 frames whose bits are 90 % ones, the worst case considered for this scheme.

| measure | prescrambled | without prescrambler |
|---|---|---|
| share of ones per codeword | 39.8 % – 64.1 % | 24.2 % – 73.4 % |
| longest run, over a 0 %–100 % sweep of zero density | 18 bits | up to 256 bits (all-zero frame) |

The originally reported prescrambled range is 41.25 % – 63.75 %. An 18-bit run at a 5 ms flicker limit means any bit rate above about 3.6 kb/s is flicker-free.

**Error rate.** `tb_ber_workload` sends frames through an AWGN channel into the receiver RTL, 200 frames per point. Eb/N0 is defined for on-off keying with mean energy A²/2.

| Eb/N0 (dB) | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|
| FER | 0.885 | 0.375 | 0.080 | 0.025 | 0 |

This follows the shape of the published curve for this code (about 0.75, 0.30, 0.05, 0.006, 0.0005). The remaining gap comes from two things: the noise convention is not published, and 3-bit soft decision with peak-based thresholds is used instead of exact LLRs.

## Where this differs from, or adds to, the original description

- **Chosen here.** These are not specified in the original:
  - frozen set;
  - preamble value and CRC variant;
  - scrambler seed and per-frame reload;
  - min-sum f and 8-bit PE words;
  - 5-bit quantisation rule;
  - Q2.7 table format;
  - peak measurement over one codeword;
  - all handshakes (valid/ready/sof) and reset values;
  - OOK polarity and idle level;
  - receive-side inversion.
- **Receiver P2S.** The original figure shows a P2S after the decoder. Here it serialises only the 158 information bits rather than all 256 decoded bits; the frozen bits carry nothing.
- **Resource counts.** Register and cell counts differ from the published FPGA/ASIC tables. No attempt was made to match them. In generic cells from an open-source synthesis flow:
  - one transmitter is about 1.8 k cells and 1.0 k flip-flops;
  - the receiver is about 11.1 k cells and 4.8 k flip-flops, of which the decoder is about 10 k cells;
  - the whole default top, with eight transmitters, is about 25.5 k cells and 13 k flip-flops.
- **Not included:**
  - the analog front-ends and the ADC;
  - the microcontroller that supplies IDs;
  - frame synchronisation at the receiver;
  - the LUT training procedure (only its published result is used);
  - the random multiple access and inter-frame flicker handling that a beacon transmitter may add. These are mentioned but not specified.
- **Bank interface.** Each transmitter in the bank has its own parallel start/type/ID inputs. The original only says that a controller pushes the IDs out over general-purpose I/O.

## Parameters

All defaults are in `rtl/vlc_pkg.sv`:

| parameter | default |
|---|---|
| `N` | 256 |
| `K` | 158 |
| `FROZEN_MASK` | see above |
| ADC width | 12 |
| SNR code | 4 bits |
| LUT words | 9 bits |
| channel LLRs | 5 bits |
| decoder PE words | 8 bits |
| scrambler seed | `1111` |

`NUM_TX` on `vlc_system`/`vlc_tx_array` sets the number of transmitters. `BIT_CLKS` on `vlc_system`/`vlc_tx_array`/`vlc_transmitter`/`ook_mod` sets the clocks per optical bit. Changing N or K also requires a new `FROZEN_MASK` and matching frame fields.

## Simulating

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=… failures=…`. Shared reference models are in `tb/tb_ref_pkg.sv`:
- a bit-level polar encoder;
- the real-valued frozen-set construction;
- the scrambler recurrence;
- a bitwise CRC;
- a recursive SC decoder with the same min-sum arithmetic.

The decoder is checked bit-exactly against the recursive SC reference model.

With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_vlc_system \
  -y rtl -y tb +libext+.sv rtl/vlc_pkg.sv tb/tb_ref_pkg.sv tb/tb_vlc_system.sv
./obj_dir/Vtb_vlc_system
```

Replace the top and file for any other testbench.

- **`tb_vlc_system`** is the end-to-end test, run at default parameters. It:
  - sends 14 beacon frames, moving the receiver from beacon to beacon while a neighbouring beacon sends at the same time;
  - passes them through a modelled inverting optical channel with varying swing and noise;
  - decodes them in the receiver.

  It counts clean frames, frames corrected by the decoder, a burst-corrupted frame rejected by the CRC, starts ignored while busy, threshold updates, and an SNR-row switch, and clocks with parallel transmission.
- **`tb_flicker_workload`** and **`tb_ber_workload`** produce the figures above. They take about 10 s and 30 s.
