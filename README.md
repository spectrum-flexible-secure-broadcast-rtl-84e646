# A secure broadcast ranging reflector in SystemVerilog

## The idea

An initiator wants the distance to many reflectors at once, and none of the
measurements should be open to distance-reduction attacks, in which an
attacker replays or anticipates a signal so that a node seems closer. The
scheme has three parts:

- **Secret waveforms.** Every waveform on the air is a secret pseudo-random
  BPSK sequence derived from a shared key K and the current time epoch
  tau = floor(t / dtau). An attacker cannot predict the sequence and so
  cannot send it early.
- **One request, a batch of answers.** The initiator broadcasts one request
  (REQ). Each reflector k that detects it answers with a batch of |B|
  responses RESP_n^k (n = 0..|B|-1).
- **Secret waits.** Response n is sent after a secret waiting period T_W,n,
  which is also derived from K, tau, k and n.

Because the waits are secret, an attacker cannot line up a forged response
with the one the initiator expects. Because the answers of many reflectors
fall at random times, they rarely collide. The initiator knows every
sequence and every wait, so it finds each response by correlation and
subtracts the known wait. It then gets |B| round-trip estimates per
reflector and combines them robustly.

The scheme is spectrum-flexible. A bandwidth B below the sample rate fS is
obtained by upsampling the chip sequence by U = fS / B (U = 1, 2 or 4 here).
The sample rate stays the same, and so does the timing resolution.

This repository holds the reflector's real-time part: everything between
the received and the transmitted baseband samples that must be
sample-accurate. These parts are not included and are expected from
elsewhere:

- the key schedule and PRF that compute the sequences and waits, which the
  host computes once per epoch;
- decoding of the synchronization frame;
- the RF hardware.

## Datapath

```
 rx --> req_detector --trig--> resp_scheduler --start--> tx_upsampler --> tx
            ^ request bits          ^ T_W,n                  ^ response bits
            +------------------- seq_buffer <---- host writes --+
 sync_load / sync_epoch --> epoch_timer --epoch_start--> resp_scheduler
```

The design processes one complex sample per clock cycle, and the clock is
the sample clock (10 ns at 100 MS/s). Every time in this design is
therefore counted in samples.

| Module | Role |
|---|---|
| `rng_pkg` | Shared types: `iq_t` sample, host bus `host_wr_t`, scheduler states. Also the default sizes and the detector latency formula. |
| `seq_buffer` | Holds the epoch's request bits, as a parallel L-bit output. Also the \|B\| response sequences and the \|B\| waits, each with a combinational read port. |
| `req_detector` | Normalized cross-correlation against the upsampled request, and the peak test. It emits `trig`. |
| `metric_divider` | Pipelined divider used by the detector to normalize. |
| `resp_scheduler` | Session control: arming, the wait timer, sending the \|B\| responses, and aborting at an epoch boundary. |
| `tx_upsampler` | BPSK mapping and interpolation by U. A response is exactly L·U samples. |
| `epoch_timer` | Epoch index tau, and the phase within the epoch. Loaded from a decoded SYNC. |
| `reflector_top` | Wires the above together, with status counters. |

Defaults:

| Name | Value | Meaning |
|---|---|---|
| L | 512 | symbols per sequence |
| \|B\| | 10 | responses per batch |
| L0 | 256 | peak window |
| alpha | 50 | peak ratio |
| U | 1, 2 or 4 | upsampling factor; maximum is 4 |
| dtau | 10^8 samples | epoch length: 1 s at 100 MS/s |

## The transmit waveform

Symbol m carries s_m = +1 for bit 1 and −1 for bit 0, on I only (Q = 0).
Sample j (j = 0..U−1) of symbol m is:

    y = AMP * ((U - j) * s_m + j * s_{m+1}) / U,      s_L = 0

This is linear interpolation between symbols. Two equivalent views:

- zero-stuffing by U, followed by a triangular low-pass FIR with 2U−1 taps;
- BPSK pulses shaped by a triangle of total width 2U samples.

Its spectrum falls off like sinc², with the first null at B = fS/U. With
U = 1 the waveform is plain BPSK.

The last symbol ramps toward zero. A response therefore lasts exactly L·U
samples and starts and ends cleanly.

## The request detector

This is the hardest part of the design.

### Correlating without a downsampler

The receiver works at the full sample rate against the upsampled pattern q.
This avoids the timing loss of a downsampler.

Correlating directly with q would need L·U multipliers. Instead, the
triangular shaping filter is moved to the received side:

    X_l = sum_m q_m' r_{l+m'}  =  sum_{m=0}^{L-1} s_m * g_{l+mU}

Here g is the received stream r filtered once by the same triangle
(weights U − |i|). The filter is symmetric, so its transpose is itself.

The hardware is then:

- a 2U−1 tap prefilter;
- a delay line of L·MAXU+1 prefiltered samples;
- an adder tree of L ±1 terms, whose taps are U apart.

U is a run-time input, `up_log2`. Changing it changes only which taps are
summed.

### Normalizing

The detection threshold must not depend on the received power, so the
correlation is normalized by the energy of the samples it used:

    E_l = sum_m |g_{l+mU}|^2

E_l is kept exactly by U running accumulators, one per sample phase. Each
accumulator adds the sample entering the correlated set and subtracts the
one leaving it.

The square root is avoided by comparing squared quantities. A pipelined
restoring divider (one quotient bit per stage) gives:

    metric_l = floor(2^FRAC * |X_l|^2 / E_l)  =  2^FRAC * L * |C_l|^2

Here C_l is the usual normalized correlation, in [0, 1]. For U = 1 this is
exactly the textbook normalized cross-correlation, squared. For U > 1 it
normalizes by the energy after the prefilter. This has the same scale
invariance and the same maximum (a perfect match gives L · 2^FRAC).

### Deciding the peak

The peak is placed at lag M, the first sample of the request's last symbol.
For U = 1 that is simply the last sample.

Lag M is declared a peak when all of the following hold:

1. it is the largest metric seen since it became the candidate;
2. no metric in the following L0 lags exceeds it;
3. its power is at least alpha times the mean power of the other 2·L0 lags
   in [M − L0, M + L0]:

       metric_M * 2*L0 >= alpha * sum_{l != M, |l-M| <= L0} metric_l

4. it is non-zero.

A candidate that fails condition 3 after L0 lags is dropped. Condition 2
costs L0 cycles of latency, because the detector must see the lags after
the peak before deciding.

Why not the stricter rule, "alpha times above every neighbour in the
window"? With U > 1 the main lobe spans several lags of comparable height.
With L = 512 the sidelobes of a random sequence are about 1/√512 of the
peak, so a 50× margin over the largest one is rarely reached. The
mean-power form keeps alpha's meaning: a peak must stand far above the
typical value around it. In the tests it detects reliably down to 0 dB SNR, and noise
alone never triggered it.

### Latency

The trigger pulse comes DET_LAT cycles after cycle M. DET_LAT is the sum of
these stages:

| Stage | Cycles |
|---|---|
| rx history | 1 |
| prefilter centre | MAXU − 1 |
| prefilter register | 1 |
| correlator and energy | 1 |
| power | 1 |
| divider | Q_W = log2(L) + FRAC + 1 |
| candidate age | L0 |
| trigger register | 1 |

At the defaults, DET_LAT = 282 cycles (2.82 µs). The value is computed by
`rng_pkg::det_latency` and compensated in the scheduler.

## Session timing

Time is split into epochs (`epoch_timer`). Each epoch serves at most one
session, and a session must begin and end inside its epoch:

| State | When |
|---|---|
| IDLE | until an epoch starts while the reflector is enabled and synchronized |
| SCAN | the detector is cleared and armed |
| WAIT | after `trig`; response n goes out when the wait timer reaches T_W,n |
| SEND | the upsampler sends L·U samples; then the timer restarts and the next response is scheduled |
| DONE | after response \|B\|−1, until the next epoch |

A new epoch start ends any session. A batch still in WAIT or SEND is
aborted: a running response is cut off at once and counted in `aborts`.
Loading a SYNC also starts an epoch, because the initiator sends its
request right after the SYNC.

The timing contract has M as the cycle in which the request's peak sample
was on `rx`, and E_{n−1} as the cycle of the last sample of response n−1.
Then:

- the first sample of response 0 is on `tx` in cycle M + T_W,0;
- the first sample of response n ≥ 1 is on `tx` in cycle E_{n−1} + 1 + T_W,n.

The initiator can therefore subtract T_W,n exactly. Every fixed delay
outside this module (the RF chain, cables) is a constant offset, and the
host calibrates it.

Two minimums follow from the pipeline:

- T_W,0 must be at least DET_LAT + 2 = 284 samples;
- T_W,n must be at least 1 for n ≥ 1.

A shorter wait is served as early as possible and pulses `late`, counted in
`late_count`. The host should pick the wait range W so that the minimum is
always met.

## Host interface

The host writes 32-bit words over `host_wr` (`en`, 12-bit word `addr`,
`data`), one word per cycle. The top two address bits select the region:

| addr[11:10] | Region | Word w holds |
|---|---|---|
| 0 | request | bits 32w .. 32w+31 of the request (bit m = symbol m, sent first) |
| 1 | responses | bits 32w .. 32w+31 of the concatenated responses; bit n·L + b is bit b of response n |
| 2 | waits | T_W,n for n = w, in samples, already reduced mod W (24 bits, up to 167 ms) |

There is a single bank. The host rewrites it between sessions, after a
session is DONE or before the epoch it belongs to starts.

Other host controls:

- `enable` allows sessions.
- `up_log2` selects U. Change it only between sessions: the detector is
  cleared at each epoch start.
- `sync_load`, `sync_epoch` and `sync_phase` carry an epoch decoded from a
  SYNC frame. `sync_phase` lets the host account for the decoding delay.

Status outputs:

- `epoch`, `synced`, `state`;
- the counters `sessions`, `aborts`, `late_count` and `det_count`;
- for the last detection, `peak_metric` and `peak_phase`: the epoch phase
  of cycle M, useful for diagnostics and for the reflector's own timestamp.

## Where this design departs from the source scheme

- **Clocking.** The reference implementation runs the FPGA logic from a
  200 MHz master clock with a 100 MS/s sample stream. Here the clock is the
  sample clock. A 2:1 clock-enable version would need `en` qualifiers on
  every register.
- **Interpolation filter.** The scheme only asks for a low-pass
  interpolator. The triangular filter was chosen because it is the
  simplest, and because it keeps the detector's matched filter short.
- **Peak rule.** alpha is applied to the power against the window mean, not
  against every neighbour (see above).
- **Normalization for U > 1.** It uses the energy of the prefiltered
  samples.
- **Minimum waits, late flag and abort.** These are this design's own
  policy.
- **Not here.** The PRF, SYNC decoding and encryption, and the initiator
  are not included. The initiator's response detectors, successive
  interference cancellation, subsample timing correction and median batch
  estimation run in software in the reference system.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | Size | What it checks |
|---|---|---|
| `tb_req_detector` | full size | U = 1, 2, 4, clean and at 0 dB SNR: exactly one trigger at exactly M + DET_LAT. A wrong pattern and a disarmed detector never trigger. |
| `tb_tx_upsampler` | L = 64 | Every sample against an independent model of the waveform. Burst length, `last`, and cancel. |
| `tb_seq_buffer` | L = 128, \|B\| = 10 | Every bit and wait read back after random host writes. |
| `tb_epoch_timer` | short epoch | Wrap, tau increment, SYNC load, `synced`. |
| `tb_resp_scheduler` | \|B\| = 4 | Exact start cycles against the timing contract, late waits, aborts, re-arming. |
| `tb_reflector_top` | all defaults | The whole reflector; see below. Takes a few seconds with Verilator. |

`tb_reflector_top` plays the host and the initiator through four sessions:

1. U = 1, clean channel;
2. U = 4 at 0 dB SNR;
3. a wrong request at U = 2, which must be ignored;
4. a too-short first wait, followed by a SYNC in the middle of the batch.

It checks the following:

- every response's first sample and its waveform;
- every wait against the timing contract;
- the counters.

It fails if any of these mechanisms never occurred: detection, full batch,
rejection, late wait, abort, and each of U = 1, 2 and 4.

To run a testbench with Verilator:

```
verilator --binary -j 0 --timing -Irtl -Itb -y rtl -y tb \
    rtl/rng_pkg.sv tb/tb_ref_pkg.sv tb/tb_reflector_top.sv \
    --top-module tb_reflector_top -o sim
./obj_dir/sim
```

The same command runs any other testbench: name its file and top module.
The full-size detector makes the design large: the correlator is an adder
tree of 512 terms, and its delay line holds L·MAXU+1 samples of about 21
bits. Lint and elaboration take well under a second, while synthesis takes
many minutes.

Parameters such as L, NB, L0 and EPOCH_CYC can be overridden on
`reflector_top` for faster experiments. L must be a multiple of 32, and
MAXU must be 2, 4 or 8.
