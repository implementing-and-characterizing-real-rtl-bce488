# Real-time broadband RFI excision with MAD and median-of-MAD thresholds

Radio telescopes look for signals far below the receiver noise. Impulsive
man-made interference breaks that assumption: sparks on power lines, corona
discharge and vehicle ignition produce bursts of strong impulses that raise the
power across the whole band. This RTL removes such bursts from the sampled time
series of each antenna input, before correlation or beamforming. The digitised
stream passes through it at the full sample rate.

The method needs no model of the interference. For each window of samples the
design estimates how wide the clean noise is, with a statistic that a minority
of outliers cannot move. It then replaces every sample that lies too far from
the window's centre. The statistic is the Median Absolute Deviation (MAD):

    M   = median(x)                   centre of the window
    D   = median(|x - M|)             MAD
    tau = M +/- n * 1.4826 * D        thresholds (1.4826*D = sigma for Gaussian noise)
    z   = K  if x >= tau_u or x <= tau_l,   z = x otherwise

A MAD stays valid as long as less than half of a window is interference. For
longer bursts there is a second estimator, the median of MADs (MoM). It takes
the median of the MADs of K successive shorter windows, so it tolerates bursts
of up to about half of K windows.

The replacement value K can be any of three options, each with its own
trade-off:
- **constant** (zero blanks the sample). This removes the most power.
- **threshold**. The sample is clipped to the threshold it crossed. This
  preserves the phase of cross-correlations better than blanking.
- **digital noise** with the estimated sigma.

## Block structure

```
                 gwb_rfi_top
 in_data[0..3]  +------------------+    +--------------------------------------------+
 ------------>  | input_copy_select| -> | rfi_channel  x4 (one per path)             | -> out_data[p]
 (ADC words)    | any input to any |    |  sample_buffer   4 banks, 1W + 2R           |    out_flag[p]
                | path, 1 register |    |  median_hist     x2 (M, and D)              |
                +------------------+    |  mom_estimator   (median_hist, 1 lane)      |
                                        |  rfi_threshold   tau = M +/- n*1.4826*D     |
                                        |  noise_gen       xorshift, Irwin-Hall sum   |
                                        |  rfi_replace     compare and replace        |
                                        +--------------------------------------------+
```

`rfi_pkg` holds the shared constants and types. The most important type is
the per-path configuration `chan_cfg_t`.

A board has four inputs and four filter paths. Any path can take any input,
which gives two useful arrangements:
- **Two antennas, each filtered and unfiltered.** Paths 0/1 take input 0 and
  paths 2/3 take input 1, with filtering disabled in one path of each pair. A
  disabled path outputs the raw samples with exactly the latency of a filtered
  one, so the two copies stay aligned for correlation.
- **One antenna copied to all four paths (1:4).** Different thresholds or
  replacement options act on the same signal side by side.

## How a window flows through a path

This is the part that needs the most explanation. Each sample must be compared
with thresholds computed from its own window. A path therefore stores the
window and makes three passes over it:

| pass | when (window w) | what |
|---|---|---|
| A | while w arrives | write w to bank `w mod 4`; count its samples in histogram X |
| - | next 256 words | scan histogram X, giving M |
| B | the following L words | read w back; count `|x - M|` in histogram DEV |
| - | next 256 words | scan DEV, giving D (and, in MoM mode, pass D on to the MoM unit) |
| C | the following L words | read w a second time; compare with tau(M, D or MoM); replace; output |

Here L is the window length in words (samples / LANES). All three passes run
at the same time on different windows. While window w is filtered, w+1 is in
pass B, and w+2 and w+3 are being written. The output is therefore a
continuous stream at the input rate. Each sample leaves after

    LATENCY = 2*L + 2*256 + 4  words

With the defaults this is 8708 words in MAD mode (L = 4096) and 2564 words in
MoM mode (L = 1024).

Pass C of window w overlaps the writing of window w+3, so four banks are
needed. The schedule also requires L >= 2*256 + 3 = 515 words. The module
checks this at elaboration.

Each pass starts when the previous result appears, and all timing is counted in
accepted words. `in_valid` acts as a clock enable for the whole path: a gap in
the input pauses everything, scans included, and the output resumes where it
left off.

### Counting-sort median (`median_hist`)

Samples are 8 bits wide, so a median needs no sorting network. Every value of
the window increments its bin in a 256-bin histogram. After the last word, the
bins are scanned from the lowest value upwards while a running total is kept.
The first bin at which the total reaches ceil(C/2) is the median; for an even
count C this is the lower median. The scan clears each bin as it reads it.

Two banks alternate, so the next window is counted while the previous one is
scanned. Each of the LANES samples of a word has its own histogram memory, and
the scan adds the lanes' counts of each bin. Every bank/lane memory is a
256-entry RAM with one write port and an asynchronous read port:
- **While it fills**, it is an increment counter.
- **While it is scanned**, it is read and cleared.

After reset, or after a restart, all memories are swept to zero in 256 clocks.
During the sweep `in_ready` is low and words are dropped.

The same module computes all three medians:
- M, from the samples, offset to unsigned;
- D, from the deviations, which range from 0 to 255;
- the MoM, on one lane with one MAD per window.

### Median of MADs (`mom_estimator`)

In MoM mode every window's MAD is collected. After each group of K MADs
their median is formed. It becomes the dispersion for all following windows
until the next group completes. The window's own median M is still used as the
centre. Until the first group of a run is complete, a window uses its own MAD.

A MoM cannot cover the same windows it filters, because that would mean storing
K windows (16.8 M samples). Groups do not overlap.

### Arithmetic

- Samples are 8-bit two's complement.
- n is unsigned Q4.4, so 2 sigma = 32 and 3 sigma = 48.
- 1.4826 is 6073/4096.
- The threshold offset is `(n * 6073 * D + 2^15) >> 16`, rounded to the
  nearest integer. Its error from n*1.4826*D is below one unit.
- Thresholds are kept at 14 bits, so they never wrap.
- Noise replacement is `M + (g * D * 657) >>> 16`, saturated to 8 bits. Here
  g is the sum of the four signed bytes of a 32-bit xorshift word: zero mean,
  sigma 147.8, close to Gaussian. 657/65536 = 1.4826/147.8, so the noise has
  the window's robust sigma.

The comparison includes its bounds (`x >= tau_u`, `x <= tau_l`). One
consequence is that a window with D = 0, whose thresholds collapse onto M, has
every sample replaced.

## Interface and configuration

`gwb_rfi_top` has the following ports. All of them are plain vectors, and
LANES = 4 samples per word by default.

| port | dir | meaning |
|---|---|---|
| `cfg[p]` | in | `chan_cfg_t` for path p |
| `in_valid`, `in_data[i][lane]` | in | one word on all four inputs at once |
| `in_ready[p]` | out | low for 256 clocks after reset or after a restart of path p |
| `out_valid[p]`, `out_data[p][lane]`, `out_flag[p][lane]` | out | output word of path p; `out_flag` marks replaced samples |
| `st_primed`, `st_med`, `st_mad`, `st_disp`, `st_mom_valid`, `st_restart` | out | status of the window being output |

The fields of `chan_cfg_t` are:

| field | meaning |
|---|---|
| `src_sel` | input feeding the path |
| `enable` | 0 gives the unfiltered copy |
| `est_mode` | `EST_MAD` or `EST_MOM` |
| `nmult` | n, Q4.4 |
| `repl` | `REPL_CONST`, `REPL_THRESH` or `REPL_NOISE` |
| `kconst` | the constant for `REPL_CONST` |

When the settings take effect:
- `nmult`, `repl`, `kconst` and `enable` are sampled once per window, when
  that window's pass C starts. The output never mixes two settings within a
  window.
- Changing `est_mode` restarts the path, because the two modes use different
  window lengths. Stored windows are dropped, the histograms are swept, and
  output resumes one LATENCY after the first word accepted.
- `src_sel` acts on the next word. Change it only when the path's output is not
  being relied upon.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NIN`, `NPATH` | 4, 4 | inputs and filter paths per board |
| `LANES` | 4 | samples per clock (800 Msps at 200 MHz) |
| `WIN_MAD` | 16384 | MAD window, samples |
| `WIN_MOM` | 4096 | window of each MAD in MoM mode, samples |
| `MOM_K` | 4096 | MADs per MoM |
| `SAMPLE_W` (package) | 8 | sample width |

Storage per path is 4 x (L_max = 4096) x 32 bits for the window store. On top
of that, each path has 2 x 2 x LANES histogram memories of 256 x 13 bits for
M and D, and 2 of 256 x 13 bits for the MoM.

The window sizes are the full published ones.

The source gives a sampling period of 1.25 ns (800 Msps). At that rate a MAD
window spans 20.5 us and a MoM group about 21 ms. The source also quotes
40 us and 40 ms as the longest bursts the two variants handle, which matches
a 2.5 ns period instead. The RTL does not depend on the period.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_median_hist` | medians of random, clustered, skewed and constant windows against a sorted copy; result timing; minimum-length back-to-back windows; clearing sweep |
| `tb_sample_buffer` | both read ports against a reference array, with ce gaps |
| `tb_rfi_threshold` | offsets against the rounding formula and against real arithmetic |
| `tb_noise_gen` | seeds, hold without ce, mean, sigma, range, lane independence |
| `tb_rfi_replace` | every replacement option and the bypass, against a rule-level model |
| `tb_mom_estimator` | MoM of groups with up to half their MADs inflated; timing; clear |
| `tb_input_copy_select` | routing in both test arrangements and at random |
| `tb_rfi_channel` | one path against a window-level reference model; see below |
| `tb_gwb_rfi_top` | the board end to end, at reduced window sizes; see below |
| `tb_gwb_rfi_top_full` | the board at its default sizes; see below |

`tb_rfi_channel` runs with bursty Gaussian-like input and predicts every output
sample and flag. It also checks:
- the latency of every word;
- blanking, clipping, noise and bypass;
- a configuration change in the middle of a window;
- a MAD to MoM restart;
- a burst longer than half a window, which MoM handles.

`tb_gwb_rfi_top` feeds two antennas with shared bursts and runs both test
arrangements. It checks that, with continuous input, each path outputs one word
per input word, and it switches one path to MoM. It counts each mechanism and
fails if any of them never occurs.

`tb_gwb_rfi_top_full` runs 4.2 M words per input, enough for the first MoM
(after 4096 windows) to be formed and applied. It compares all 67 M output
samples with the reference. It takes under a minute with Verilator.

`tb/rfi_ref_pkg.sv` is the reference model. It keeps each window and sorts it
to get the median and the MAD. It shares no structure with the RTL, only the
documented rounding of the threshold offset.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rfi_pkg.sv tb/rfi_ref_pkg.sv tb/tb_gwb_rfi_top.sv --top tb_gwb_rfi_top
./obj_dir/Vtb_gwb_rfi_top
```

The block testbenches need only `rtl/rfi_pkg.sv` and their own file. The
`-Irtl` option lets Verilator find the modules by name. Simulations are
two-state: every register that is read has a reset, and the window store is
written before it is read.

## What is this design's own

The source describes the method: the equations, the two estimators and their
sizes, the replacement options, four inputs per board, filtering at the
Nyquist rate, and the copy test arrangements. It does not describe the
hardware. The following are choices made here:

- **Datapath format.** 8-bit samples and 4 samples per clock.
- **Median hardware.** Counting-sort medians, with the three-pass,
  four-bank schedule described above.
- **MoM.** Groups of K that do not overlap (a block median, not a sliding
  one). Each MoM applies to later windows, and a window uses its own MAD until
  the first MoM exists.
- **Median definition.** The lower median for even counts.
- **Fixed-point formats.** As listed under Arithmetic.
- **Digital noise.** The xorshift/Irwin-Hall generator, with noise centred on M
  at the window's robust sigma. The source only names digital noise and refers
  elsewhere for its generator.
- **Control.** Restart on a mode change, and per-window sampling of the other
  settings.
- **Input handshake.** `in_valid` as a path-wide clock enable, and `in_ready`
  during the clearing sweep.

## Not included

The analog chain is outside this RTL: the RF and baseband conditioning, the
ADCs, and the analog interference emulator used for tests. So are the
GPU-based correlator and beamformer, the acquisition computer, and the offline
analysis, including the improvement metric 10*log10(S_U/S_F). `in_data` is the
ADC-side boundary and `out_data` the correlator-side boundary. No
timing-closure or resource figures for a particular FPGA have been produced.
