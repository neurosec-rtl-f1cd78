# Neuromorphic audio-security pipeline in SystemVerilog

This is an FPGA datapath that protects a speech-denoising front end against
adversarial audio. The noisy audio and a clean reference stream in together,
either in plain form or as AES-128 blocks that are decrypted on entry.
Every frame is moved to the frequency domain. Optionally, a simulated FGSM or
PGD attack then perturbs the noisy magnitudes. The frame is examined twice:
once by an SNR test against the clean spectrum, and once by a small spiking
neural network (SNN). The design then writes out the denoised spectrum: in
plain form when the frame looks normal, and AES-128-encrypted when it was
judged attacked. In that case the neuromorphic core also enters a hard reset
and raises FGSM/PGD error flags. A monitor on the output counts what happens.
It can lock the output into permanent encryption when attacks become
frequent, and it stops any plaintext that should have been encrypted.

The RTL follows the architecture of the paper *NEUROSEC: FPGA-Based
Neuromorphic Audio Security* (Isik et al.). That paper describes the blocks
and how they connect, but gives almost no internals. Everything below the
block level (widths, frame size, neuron model, the SNR formula, how the two
detectors combine, block packing and timing) is this implementation's own
choice. Each choice is marked as such below and in the file headers.

## Data flow

```
             s_noisy ──► stft ──┐ |N|, arg N          ┌──► sft_mixer (composite Y) ──┐
 memory ──►                     ├─► attack_gen ─► x ──┤                              ├─► neuro_proc ─► decision
             s_clean ──► stft ──┘ |C|, C              └─► denoiser ─► sft_mixer (out)│   (SNR test + SNN)    │
                                                                        │            │                       │
                                                                        ▼            ▼                       ▼
                                                                   security_module: frame buffer ─► AES-128 if attacked/locked
                                                                        │
                                                                        ▼
                                                                   anomaly_detector ─► memory write (mem_*)
                                                     aes128_dec on its own port restores encrypted blocks read back
 e_data (encrypted pairs) ──► input_decrypt ──► replaces s_noisy/s_clean when cfg.in_encrypted is set
```

In the paper's block diagram the chain is: memory → FFT core → attack box
(FGSM, PGD) → perturbation detector (inside the neuromorphic processor) →
AES encryption → anomaly detection → memory. The modules keep that order.
The paper's processing flow adds a "decrypt data" step, which is
`aes128_dec`.

Audio may also arrive encrypted. With `cfg.in_encrypted` set, the samples
come from the `e_*` port instead of `s_*`. Each 128-bit block on that port is
AES-128 ciphertext (ECB, key `cfg.key`) of four sample pairs. Word w of the
plaintext, at bits 127−32w down to 96−32w, holds {noisy, clean}, and word 0
is the earliest pair. `input_decrypt` decrypts a block in 22 clocks and hands
the pairs to both STFTs. From there the frame is handled like any other. The
paper motivates this: it says audio is handled "once securely transmitted
and decrypted", and that the system "is designed to process encrypted data".
The block layout and the shared key are this design's choices. Switch
`cfg.in_encrypted` only between blocks, once `e_ready` or `s_ready` shows
the previous source has been drained.

## Number formats

| quantity | format |
|---|---|
| audio sample | 16-bit signed PCM, 16 kHz |
| bin real/imaginary part from the STFT | 16-bit signed, DFT scaled by 1/N |
| bin magnitude | 17-bit unsigned |
| bin argument | 16-bit binary angle (65536 = one turn, so it wraps naturally) |
| mixer output | 18-bit signed (a full-scale magnitude cannot overflow at any angle) |
| SNR | 16-bit signed Q8.8 dB |
| SNN weights, biases | 8-bit signed; membranes 16-bit signed |

The types live in `neurosec_pkg`, together with `cfg_t`, the run-time
configuration, and `decision_t`, the per-frame verdict.

## Spectrum path

**STFT (`stft` = `dft_frame` + `cordic`).** Samples fill one of two 64-sample
banks. The frames are rectangular and do not overlap. While one bank fills,
the other is transformed by a direct DFT: one complex multiply-accumulate per
clock against a Q1.15 twiddle table. The table is generated from `$cos`/`$sin`
at elaboration. Only bins 0…32 are produced, since the input is real. A
vectoring CORDIC (16 iterations, gain removed by ×19898/2^15) then gives each
bin's magnitude and argument. A frame takes (N/2+1)·(N+1) ≈ 2,150 clocks.
The paper uses a vendor FFT core at this point. The DFT stands in for it as
open logic with the same function.

**Attack generator (`attack_gen`).** The paper synthesises the attack by
comparing the noisy and clean magnitudes. So the gradient sign used here is
g = sign(|N| − |C|), which pushes a bin away from the clean target:

* FGSM: x = |N| + eps·g
* PGD: x₀ = |N|, then `pgd_steps` times x ← clip(x + alpha·sign(x − |C|), |N| ± eps)
* none: x = |N|

The result is clamped to the 17-bit range. There is one PGD iteration per
clock.

**Mixers (`sft_mixer`) and denoiser (`denoiser`).** A rotation-mode CORDIC
turns (magnitude, argument) back into re + j·im. One mixer forms the
*composite* bin Y from the attacked magnitude x and the noisy argument. The
SNR test uses Y. The other mixer forms the *output* bin from the denoised
magnitude and the same argument. The paper does not describe its denoising
model. The denoiser here is plain spectral subtraction, d = max(x − floor, 0),
with `cfg.noise_floor` as the floor. No inverse STFT follows, so the output is
a spectrum.

**Sequencing.** `neurosec_top` moves one bin at a time through
take → attack → denoise → both mixers → push (about 25 clocks). The bin
register holds the noisy argument and the clean bin while the magnitude is
processed. This is the "delay" of the noisy and clean streams that the paper
mentions. After the last bin of a frame, the sequencer waits until that frame
has been decided and written out. Meanwhile the STFTs keep buffering input.

## Detection: how a frame is judged

This is the least obvious part of the design.

**SNR test (`perturbation_detector`).** Over the frame's 33 bins it
accumulates S = Σ|C|² and E = Σ|Y − C|² in 48-bit registers. It then forms

    SNR = 10·log10(S/E) = 3.0103 · (log2 S − log2 E)

Each log2 is approximated as the position of the leading one plus the next
8 bits as a linear fraction. This is cheap, and the error stays below 0.26 dB.
The frame is flagged when |SNR − snr_ref| > snr_dev. The test is two-sided
because the paper speaks of a *deviation* from a threshold. The reference
defaults to 5.395 dB (`SNR_REF_DEFAULT`), the SNR at which the paper
characterises its system. The allowed deviation is yours to set; the
testbench uses ±3 dB. So the test works when the input's noise level is
known, as in a dataset with clean references. A frame whose composite equals
the clean spectrum exactly (E = 0) reads +128 dB and is flagged too.

**SNN detector (`snn_detector`, `spike_encoder`).** The 33 attacked
magnitudes of the frame are the network's features. Each one is rate-coded by
a 16-bit phase accumulator. Per time step, acc += min(mag·8, 65535), and the
carry is the spike. A magnitude of 8192 or more therefore fires on every
step. The network is fully connected and built of leaky integrate-and-fire
neurons. It has `N_LAYERS` hidden layers of `N_HID` neurons each. The default
is 33 → 16 → 3, one hidden layer. Each neuron updates as

    v ← v − v/16 + bias + Σ w(spiking inputs);   fire and set v = 0 when v ≥ 64

It runs for 16 time steps per frame. In each step the layers update in
order, and each layer sees the spikes its source layer produced in that same
step. Output spikes are counted, and the class is the output neuron with
the most spikes: 0 = clean, 1 = FGSM, 2 = PGD. Ties go to
the lower index. Membranes and encoder phases persist from frame to frame,
like a continuously running network, and only a hard reset clears them. The
schedule handles one synapse per clock. A frame therefore takes
T·(N_IN + N_HID·(N_IN+2) + (N_LAYERS−1)·N_HID·(N_HID+2) + N_OUT·(N_HID+2)) + 2
clocks, which is 10,354 at the default sizes.

Weights and biases sit in one 8-bit memory, loaded through
`w_we/w_addr/w_data`. Layer 0 is the first hidden layer and layer `N_LAYERS`
is the output layer. With WH = N_HID·N_IN and
B = WH + (N_LAYERS−1)·N_HID² + N_OUT·N_HID, the layout is:

| address | content | default (595 words) |
|---|---|---|
| j·N_IN + i | input i → layer 0 neuron j | j·33 + i |
| WH + (l−1)·N_HID² + j·N_HID + i | layer l−1 neuron i → layer l neuron j | 528 + o·16 + j for the outputs |
| B + l·N_HID + j | bias of layer l neuron j | 576 + j hidden, 592 + o outputs |

No trained weights come with the design. The paper reports a 94% detection
rate, but that depends on a trained network that is not published. With all
weights zero, the SNN's verdict is set entirely by the three output biases.
The end-to-end testbench uses this to steer the verdict.

**Decision and hard reset (`neuro_proc`).** A frame is *attacked* if the SNR
test fires OR the SNN's class is not "clean". The paper says the two work
"in tandem" but gives no rule; OR is this design's choice. For an attacked
frame:

* `dec.fgsm_err` or `dec.pgd_err` follows the SNN class, and the sticky
  outputs `err_fgsm` / `err_pgd` are set until `clr_flags`;
* an SNR-only detection shows as `dec.snr_flag` with neither error flag;
* the processor spends one clock in HARD_RESET. That clears all membranes,
  the encoder phases and the SNR accumulators, and counts `hard_resets`.

`dec_valid` pulses once per frame, about 10,360 clocks after the frame's last
bin.

## Output protection

**Security module (`security_module`, `aes128_enc`).** The 33 output bins are
stored as words {re[15:0], im[15:0]}, saturated from 18 bits. Bin 4b+w goes
to bits 127−32w of block b, and the words after bin 32 are zero, which gives
nine 128-bit blocks per frame. After the decision, the blocks leave in plain
form, or are AES-128-encrypted one by one (ECB) when the frame was attacked or
the anomaly lock is on. The cipher is iterative: one round per clock, key
expansion on the fly, and an S-box generated at elaboration from its GF(2⁸)
definition. It gives 11 clocks per block.

**Anomaly detector (`anomaly_detector`).** This block sits after the
encryption, as in the paper. It keeps performance counters: frames,
detections, blocks, encrypted blocks and withheld blocks. It raises the
sticky `alarm` on either of two events:

* `anom_th` or more attacked frames within a window of 32 frames. The window
  is this design's use of the paper's batch of 32. Setting `anom_th = 0`
  turns this test off.
* a plain block leaving for a frame that was judged attacked. That block is
  withheld from memory and `violation` is set. In this design it cannot
  happen unless the logic is faulty or tampered with.

The alarm is fed back to the security module as a lock: every later frame is
encrypted until `clr_flags`. The blocks that pass go through a registered
write stage, which adds one clock and moves one block per clock. They are
written to memory at `BASE_ADDR` + 16·n, with `mem_enc` marking the encrypted
ones.

**Decryption (`aes128_dec`).** A separate port (`d_start`, `d_din` →
`d_done`, `d_dout`) restores a block with the configured key. It takes
21 clocks: 10 to run the key schedule forward, then 10 inverse rounds with the
schedule stepped backwards.

## Timing

The end-to-end simulation at default sizes measures one frame every 12,538
clocks. That is the DFT of the next frame overlapped with the bin pipeline,
plus the 10,354-clock SNN, plus the block flush. At the 100 MHz clock the
paper reports for its FPGA, 64 samples at 16 kHz last 400,000 clocks, so the
design runs about 30× faster than real time. When samples arrive faster than
that, `s_ready` drops and the source waits. At the real rate of one sample
every 6,250 clocks, the input is never stalled, and each frame is decided
about 12,550 clocks after its last sample.

The same numbers bound the spike traffic. 16 kHz gives 250 frames per
second, each of 16 time steps. So the 33 encoder channels can emit at most
132,000 spikes/s, and the 16 hidden neurons at most 64,000 spikes/s.

## Top-level interface (`neurosec_top`)

| port | direction | meaning |
|---|---|---|
| `cfg` (`cfg_t`) | in | attack mode, eps, alpha, pgd_steps, noise floor, snr_ref, snr_dev, anom_th, AES key, input source (`in_encrypted`) |
| `s_valid`/`s_ready`/`s_noisy`/`s_clean` | in/out/in/in | sample pairs from memory |
| `e_valid`/`e_ready`/`e_data` | in/out/in | encrypted sample pairs from memory, four per block, used when `cfg.in_encrypted` is set |
| `w_we`/`w_addr`/`w_data` | in | SNN weight and bias load |
| `mem_valid`/`mem_ready`/`mem_addr`/`mem_data`/`mem_enc` | out/in/out/out/out | write-back |
| `d_start`/`d_din`/`d_busy`/`d_done`/`d_dout` | in/in/out/out/out | decryption |
| `dec_valid`/`dec` | out | per-frame decision (attack, snr_flag, fgsm_err, pgd_err, class, SNR) |
| `err_fgsm`, `err_pgd`, `anomaly_alarm`, `policy_violation` | out | sticky flags, cleared by `clr_flags` |
| `in_hard_reset`, `hard_resets`, `frames`, `detections`, `blocks_*`, `snn_counts` | out | status and counters |

Parameters: `N_FFT` (64), `N_HID` (16), `N_LAYERS` (1), `T_STEPS` (16),
`WINDOW` (32) and `BASE_ADDR`. The SNN input width follows from N_FFT/2+1. Every handshake is
valid/ready, reset is asynchronous and active low, and there is a single
clock.

## Where this departs from the paper, and what is missing

* **Memory.** The paper keeps the dataset, weights and patterns in DDR4 and
  writes results back there. The DRAM and its controller are not part of this
  RTL; their traffic is the `s_*`, `e_*`, `w_*` and `mem_*` ports.
* **FFT.** A vendor FFT core in the paper; an open DFT engine here. It is
  slower (O(N²)), but still well inside real time.
* **Sample rate.** The paper's characterisation table gives "16000 kHz"
  next to an 8000 Hz frequency response. This design assumes 16 kHz.
* **When to encrypt.** The paper says both that AES is applied *in response
  to a detected threat* and that the security module encrypts data *before
  it is processed*. This design follows the threat-driven flow and encrypts
  everything only after an anomaly lock. The paper's remark that the system
  processes encrypted data is met by decrypting encrypted input audio
  first. The spectrum path and the detectors work on the decrypted samples,
  not on ciphertext.
* **Denoising model and SNN weights.** Neither is given. The denoiser is
  spectral subtraction, and the SNN ships untrained. The paper's detection
  rate (94%), false-positive rate (6%), SNR (5.39 dB), THD and spike rate
  (7994.8 spikes/s) are results of its trained models and data. This RTL
  does not reproduce them.
* **Throughput comparison.** The paper's FPGA figures (4.306 GOP per
  inference, 72.81 ms, 59.16 GOP/s) belong to a network whose topology is not
  published. The SNN here does 9,216 synaptic operations per frame at one per
  clock, and is not sized for that workload.
* **Attack model.** The FGSM/PGD "gradient" is the sign of the noisy-minus-clean
  magnitude, the comparison the paper describes. PGD has no random start.
  The paper's threat model also names black-box attacks, but its attack
  block holds only FGSM and PGD and no black-box method is described. So
  none is generated here. Audio perturbed elsewhere can still be fed in as
  the noisy stream.
* **No inverse STFT.** The output is the spectrum the paper's mixer produces.

## Verification

Each block has a self-checking testbench in `tb/`, and two more run the
whole design. Each prints `TB_RESULT checks=N failures=M` and has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_aes128_enc`, `tb_aes128_dec` | FIPS-197 and SP 800-38A known-answer vectors plus random ones; 64 random encrypt–decrypt round trips; 11- and 21-clock latency |
| `tb_input_decrypt` | FIPS-197 and SP 800-38A ciphertexts with known plaintexts; 40 random blocks encrypted by `aes128_enc`; pair order and noisy/clean split; 22-clock latency; no new block taken while pairs are pending |
| `tb_stft` | bins, magnitudes and arguments against a floating-point DFT; frame time |
| `tb_attack_gen` | 600 random FGSM/PGD/none cases against the formulas; latency |
| `tb_denoiser`, `tb_sft_mixer` | formula and floating-point references; CORDIC error bound |
| `tb_perturbation_detector` | SNR within 0.3 dB of 10·log10(S/E); flag; latency; clear |
| `tb_spike_encoder` | exact spike counts floor(M·rate/65536) per channel; clear |
| `tb_snn_detector` | a 1-layer and a 2-layer network, each against a behavioural model: spike counts, class, frame time, hard reset |
| `tb_neuro_proc` | decisions for every mix of SNR and SNN verdicts; hard resets; sticky flags |
| `tb_security_module` | plain blocks, encrypted blocks (decrypted and compared); backpressure; spacing |
| `tb_anomaly_detector` | addresses, counters, rate alarm at the window end, withholding, clear |
| `tb_neurosec_top` | 36 frames at the default sizes through the whole design (see its header); every output bin against a floating-point model; every mechanism at least once; real-time frame period |
| `tb_workload_realtime` | 40 frames of broadband audio at 5.4 dB SNR, fed at exactly 16 kHz against 100 MHz: no input stall, decision latency, detection of every FGSM/PGD frame, no false positive, measured SNR, encryption per frame |

The end-to-end test takes the design through clean frames, FGSM and PGD frames,
SNN-only and SNR-only detections, hard resets, the anomaly alarm and lock,
input stalls, memory backpressure, decryption, and eight frames whose audio
arrives encrypted. The SNR and output
checks use tolerances that cover the fixed-point approximations: CORDIC
angles are 16-bit, with about 4 angle units of error, and log2 is linear
between powers of two.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -Irtl \
    rtl/neurosec_pkg.sv rtl/aes_pkg.sv tb/tb_neurosec_top.sv \
    --top-module tb_neurosec_top -Mdir obj && ./obj/Vtb_neurosec_top
```

Substitute any other testbench name. `tb_neurosec_top` runs in about a
second after a compile of about 15 s. `tb_workload_realtime` simulates
16 million clocks, which takes about 15 s more.

## Changing it

* The frame length is `N_FFT`. It must be a power of two, because the DFT's
  twiddle index wraps modulo N. The SNN's input count, the frame buffer and
  the weight memory's address width follow it, so the weights must be
  reloaded. Every stage has valid/ready backpressure, so the bin pipeline
  does not need to keep pace with the DFT. The top level has been simulated
  only at N_FFT = 64.
* The network depth, width and duration are `N_LAYERS`, `N_HID` and
  `T_STEPS`. The threshold, leak and rate shift are parameters of
  `snn_detector` and `spike_encoder`.
* The attack strength, denoise floor, SNR reference/deviation, anomaly
  threshold and AES key are run-time fields of `cfg`. Change them between
  frames, after `dec_valid`.
