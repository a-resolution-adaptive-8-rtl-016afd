# Resolution-adaptive all-digital mmWave MU-MIMO receiver: RTL

A base station with many antennas serves several users at once on the same
frequency (massive MU-MIMO). At mmWave bandwidths the digital baseband has to
work on billions of samples per second. The receiver only stays within a
reasonable power budget if the converters and the arithmetic run at the lowest
resolution the current radio conditions allow. Few users and a clean channel
need fewer bits than many users and a dense constellation.

This RTL describes a 32-antenna receiver built around that idea. Its resolution
can be changed at run time in two places:

- **The ADCs** deliver 6-bit or 3-bit samples. 3-bit samples take half the
  cycles.
- **The spatial equalizer** computes `s_hat = X^H z` for up to 16 users. It
  uses 1 to 4 bits per entry of the equalization matrix `X^H`. Rows that are
  not needed are muted.

The equalizer is a *processing-in-memory* array (PPAC). Every storage cell
holding one bit of `X^H` also holds the XNOR that multiplies it with one bit of
`z`. It consumes `z` one bit-plane per clock cycle. A SAR ADC also produces one
bit per cycle, MSB first. So each converter is wired straight into the array,
with no sample buffer in between.

A second engine, BEACHES, cleans up channel estimates during training. It
takes an antenna-domain estimate to the beamspace with an FFT. There, mmWave
channels are sparse. It soft-thresholds the entries with a threshold chosen by
Stein's unbiased risk estimate (SURE), and returns with an IFFT.

At the published 312 MHz clock:

| Configuration | Equalizer throughput |
|---|---|
| 6-bit samples, 16 users, 16-QAM | 9.98 Gb/s |
| 3-bit samples, 16 users, 16-QAM | 20 Gb/s |

BEACHES denoises 9.75 M channel vectors per second. The RTL reaches these
cycle counts.

## Block structure

```
 y_re[32], y_im[32]                        ext_z / ext framing (test source)
      |                                               |
  64 x adc_channel  (pga_model -> 4 x sar_adc_model)  |
      | zbit[c][k]: converter k of channel c          |
      +-------------------- mux (zsrc_ext) -----------+
      |  z[k] = 64-bit bit-plane for instance k, framing bvalid/bfirst/blast[k]
      |                          ^
      |                       ti_ctrl (sampling clocks sw0..sw3, framing)
      v
  spatial_equalizer: 4 x ppac_instance (32 PEs each: 4 x ppac_row + accumulator)
      |                                    -> eq_result[k][0..31], eq_valid[k]
      v
  chest_capture (one sample, LS estimate with the pilot)
      v
  beaches: smul_fft -> vec_sreg -> cordic_vec -> sort_unit -> scan_unit -> tau*
                                       \-> fifo_buffer -------> soft_threshold
           -> cordic_rot -> vec_sreg -> smul_fft(inverse) -> vec_sreg -> hs, hs_idx
```

Shared constants, types and tables are in `ra_pkg`:

- `B = 32`, `U = 16`, `NINST = 4`, `XB_MAX = 4`, `ZB_MAX = 8`
- the widths
- the twiddle and arctangent tables
- the mid-rise decoding function

Each module's header comment documents its interface and timing.

## Numbers are ±1 digit strings

Everything in the datapath rests on one convention. A q-bit code `c` from the
ADC stands for the mid-rise value

```
z = 2c - (2^q - 1)  =  sum_{k<q} 2^k * d_k ,   d_k = +1 if bit k is 1, -1 if 0
```

For q = 6 the values are -63, -61, ..., 63, in units of half an LSB. Zero is
never produced. Every bit is therefore a ±1 digit, not a 0/1 digit. The
entries of `X^H` use the same form with 1 to 4 bits.

The product of two ±1 digits is +1 exactly when the bits agree, so it is an
XNOR. An inner product of two 64-entry ±1 vectors is
`2*popcount(xnor(x, z)) - 64`. That is what one PPAC row computes.

Multi-bit operands are handled in two different ways:

- **Across rows for `X^H`.** A processing element (PE) has four rows. Row k
  holds digit k of its `X^H` row vector. The row results are weighted by
  `<<k` and added.
- **Across time for `z`.** Bit-planes arrive MSB first. The PE accumulates
  `acc <- sum + 2*acc`, with the feedback forced to zero on the first
  bit-plane. After q cycles `acc = sum_b x_b z_b` exactly.

No conversion to two's complement is needed anywhere before the result.

### Complex arithmetic in real rows

The z bit-plane has 64 bits:

- bits 0..31 are the real parts of antennas 0..31;
- bits 32..63 are the imaginary parts.

Each user u has two PEs. The complex product is folded in by what is written
into them:

| PE | bits 0..31 | bits 32..63 | result |
|---|---|---|---|
| 2u | `xr` | `xi` | `Re(x_u^H z) = sum xr*zr + xi*zi` |
| 2u+1 | `~xi` | `xr` | `Im(x_u^H z) = sum xr*zi - xi*zr` |

Complementing the bits of a mid-rise number negates it, which is why `-xi` is
simply the bitwise complement of `xi`. The writer, i.e. the software computing
`X^H`, stores the table above. The hardware has no complex logic at all.

`X^H` is written one 64-bit row at a time through `x_we`, `x_pe`, `x_row`,
`x_mask` and `x_data`:

- A write goes to the same PE and row of all four instances.
- Each `x_mask` bit enables one group of four bit-cells.
- Writes may happen while the equalizer runs.

### Resolution of X^H and muting

`xres = 1..4` enables rows 0..xres-1. In a disabled row:

- the `z` inputs of the bit-cells are held at zero, so the XNOR array does not
  toggle;
- the row ALU substitutes the constant 32 for the popcount, so the row adds
  exactly 0 (`2*32 - 64`).

Whatever the muted rows still store is therefore irrelevant. The testbenches
deliberately leave random bits there.

## Time interleaving and bit framing

A sample period has `P = S + q` cycles: S sampling cycles plus q conversion
cycles.

| Mode | S | q | P | Samples/s per instance at 312 MHz |
|---|---|---|---|---|
| `res6 = 1` | 2 | 6 | 8 | 39 M |
| `res6 = 0` | 1 | 3 | 4 | 78 M |

Every channel has four converters behind one PGA. `ti_ctrl` gives converter k
the sampling clock `sw[k]` in cycles `[kS, kS+S-1]` of each P-cycle frame. The
four windows do not overlap and together fill `4S` cycles. Converter k then
delivers its q bits MSB first, one per cycle. Converter k of all 64 channels
feeds PPAC instance k.

`ti_ctrl` marks each instance's bit cycles:

- `bvalid[k]` for every bit cycle;
- `bfirst[k]` for the MSB cycle;
- `blast[k]` for the LSB cycle.

During its own sampling cycles an instance is idle. Six-bit timing
(S = 2, frame of 8 cycles, `s` = sampling, digits = bit index):

```
cycle in frame    0  1  2  3  4  5  6  7 | 0  1  2 ...
instance 0        s  s  5  4  3  2  1  0 | s  s  5
instance 1        1  0  s  s  5  4  3  2 | 1  0  s     (cycles 0-1: end of the previous sample)
instance 2        3  2  1  0  s  s  5  4 | 3  2  1
instance 3        5  4  3  2  1  0  s  s | 5  4  3
```

The four instances together finish four samples per frame:

| Mode | Vectors/s at 312 MHz |
|---|---|
| 6-bit | 4 · 312 MHz / 8 = 156 M |
| 3-bit | 4 · 312 MHz / 4 = 312 M |

With 16 users and 4 bits per 16-QAM symbol, that gives the 9.98 and 20 Gb/s
above. `eq_valid[k]` pulses two cycles after instance k's LSB cycle.
`eq_result[k][p]` then holds `X^H z` for PE p (see the layout above). In the
tests each instance delivers exactly one result every P cycles.

Changing the resolution takes three steps:

1. Drop `run`.
2. Change `res6`.
3. Raise `run` again.

A new run starts at cycle 0 of a frame. An instance reports nothing until its
converter has taken a fresh sample, so samples cut off by the stop are
discarded, not misreported.

**External z source.** `zsrc_ext = 1` replaces the ADC bits and framing by
`ext_z[k]` and `ext_bvalid`, `ext_bfirst`, `ext_blast[k]`. `ext_q` sets the
number of bits per z entry. This allows any z resolution up to 8 bits, which
the PPAC arithmetic supports but the ADCs do not produce. Gaps between bit
cycles are allowed.

## Channel estimation

During training one user sends a known QPSK pilot `phi` while the others are
silent, so `z ≈ phi*h + noise`. Channel estimation then runs in three stages.

### Capture

`cap_req` arms `chest_capture` with `cap_inst` (which instance) and `pilot`
(two sign bits: bit 0 set means `Re(phi) < 0`, bit 1 set means `Im(phi) < 0`).
It collects the next complete sample of that instance, bit-plane by
bit-plane. It then forms the least-squares estimate `conj(phi)*z`:

```
Re h~ = pr*zr + pi*zi,   Im h~ = pr*zi - pi*zr,   pr, pi in {+1, -1}
```

This is `z/phi` up to the constant factor |phi|^2 = 2. The estimate is handed
to BEACHES two cycles after the sample's last bit.

### BEACHES

A vector is accepted when `in_ready` is high, at most one every B = 32 cycles.
It then passes through these stages:

1. **Forward FFT** (`smul_fft`): fully parallel, 5 pipelined radix-2 stages.
   The output is unscaled, i.e. the plain DFT.
2. **Serialisation**: a shift register turns the vector into one beamspace
   entry per cycle.
3. **Vectoring CORDIC** (`cordic_vec`): magnitude `K*|h_b|` and angle per
   entry. K ≈ 1.6468 is the CORDIC gain, which is left in.
4. **Split into two branches.**
   - The (magnitude, angle) pair goes into a FIFO.
   - The magnitude also goes to the **sort unit**, an insertion sorter that
     keeps 32 registers in ascending order. It also computes each entry's
     reciprocal `floor(2^16/a)` and their sum.
5. **Scan unit.** It evaluates SURE for the candidate thresholds 0, a_1, …,
   a_B, one per cycle, and keeps the smallest. For sorted magnitudes and
   `tau = a_k`:

   ```
   SURE(tau) + B*N0 = sum_{j<=k} a_j^2 + (B-k)*tau^2 + N0*(2(B-k) - tau*sum_{j>k} 1/a_j)
   ```

   The comparison is done exactly in integers scaled by 2^16, in 96 bits. Ties
   keep the smaller threshold.
6. **Pop.** When `tau*` is known, the vector's 32 FIFO entries are popped in
   one burst. Each magnitude is soft-thresholded: `max(a - tau*, 0)`.
7. **Back to Cartesian** (`cordic_rot`): the rotation CORDIC rebuilds the
   complex entry. One constant multiplication by `round(2^16/K^2)` removes both
   CORDIC gains.
8. **Inverse transform.** A shift register collects the vector, the inverse
   FFT (halving after each stage, so exactly the IDFT) transforms it, and a
   last shift register streams the result out as `hs` with `hs_idx` = 0..31.

Timing:

- `tau`/`tau_valid` report each vector's threshold in CORDIC magnitude units.
- The latency from accepted vector to first output entry is 141 cycles.
- The output stream has no gaps when vectors come every 32 cycles.

`n0` is the beamspace noise variance in squared CORDIC magnitude units,
`K^2 * E|noise_b|^2`. It is sampled together with each accepted vector. For
white antenna-domain noise of variance `s2` per complex LS entry this is
`K^2 * 32 * s2`.

## Top-level interface (`ra_receiver`)

| Group | Ports |
|---|---|
| clock, reset | `clk`, `rst_n` (asynchronous, active low) |
| configuration | `run`, `res6`, `pga_gain` (log2 gain 0..5, i.e. 1x..32x), `xres` (1..4) |
| analog inputs | `y_re[32]`, `y_im[32]`: signed 16-bit, ±2^15 is ADC full scale after the PGA |
| test z source | `zsrc_ext`, `ext_q`, `ext_z[4]`, `ext_bvalid/bfirst/blast[4]` |
| X^H write | `x_we`, `x_pe`, `x_row`, `x_mask`, `x_data` |
| equalizer out | `eq_result[4][32]` (signed, 19 bits), `eq_valid[4]` |
| channel estimation | `cap_req`, `cap_inst`, `pilot`, `n0`, `cap_busy`, `hs`, `hs_idx`, `hs_valid`, `tau`, `tau_valid` |

The per-user scale factors of finite-alphabet equalization (`s_hat =
diag(mu) X^H z`) and the computation of `X^H` itself are left to the host.
The chip computes only `X^H z`.

## What is modelled and where it departs from the silicon

- **Analog parts are behavioural models.** They are written as synthesizable
  ideal logic, but they stand for the analog circuits:
  - `pga_model`: ideal gain 2^g, clipping at full scale;
  - `sar_adc_model`: an ideal uniform mid-rise quantizer that latches on its
    sampling clock and then gives one bit per cycle;
  - `adc_channel`: one PGA plus four converters.

  The RF chain, offsets, noise and timing of the real converters are not
  modelled.
- **Bit-cells are flip-flops, not latches behind clock gates.** The published
  bit-cell is a latch plus an XNOR, with a clock gate per group of four cells.
  Here each group of four cells is a flip-flop group with a write enable. The
  logic function and the per-group write mask are the same.
- **The FFT is a plain radix-2 FFT with constant twiddles.** It is not the
  specific streaming multiplierless architecture the published engine uses,
  which is described elsewhere. Twiddles have 10 fractional bits. The
  forward/inverse pair reproduces a floating-point DFT within a few LSB.
- **Several BEACHES internals are this design's choices:**
  - the word widths;
  - the CORDIC iteration count (14) and guard bits (3);
  - the insertion sorter;
  - the exact integer SURE comparison;
  - the FIFO depth (128 entries) and burst read;
  - the 1/K^2 correction.
- **Only the datapath is included.** The on-chip test SRAM, the pads and the
  configuration/readout interface are not part of the RTL. Configuration, the
  `X^H` write port and all results are plain top-level ports.
- **The capture and external-source control is this design's own.** This
  covers the `cap_req` protocol, the pilot sign bits, the `zsrc_ext` test
  source and the stop/restart behaviour of `run`. The published description
  only says that z feeds the channel estimator and that PPAC accepts z of up to
  8 bits.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. It compares
against values computed independently inside the testbench and ends with a
`TB_RESULT checks=… failures=…` line. Highlights:

- **`tb_ppac_row` … `tb_spatial_equalizer`**:
  - exact `X^H z` against integer reference sums;
  - all resolutions, with write masks and muted rows holding random data;
  - back-to-back samples on all four instances.
- **`tb_ti_ctrl`, `tb_adc_channel`**:
  - sampling-clock windows and framing in both modes;
  - the converter bit order against an ideal quantizer.
- **`tb_smul_fft`, `tb_cordic_vec`, `tb_cordic_rot`**: comparison with
  floating-point references.

  | Block | Max error |
  |---|---|
  | forward FFT | 4.6 LSB |
  | inverse FFT | 2.5 LSB |
  | vectoring CORDIC magnitude | 4 LSB |

- **`tb_sort_unit`, `tb_scan_unit`**:
  - sorted order and reciprocals;
  - `tau*` against an independent SURE search in exact arithmetic;
  - the floating-point SURE risk within 0.1 % of the best candidate.
- **`tb_beaches`**: sparse plane-wave channels with noise, fed at full rate.
  - one vector per 32 cycles and a gap-free output stream;
  - constant latency;
  - `tau*` SURE-optimal;
  - every output within a few LSB of a floating-point
    FFT/threshold/IFFT reference (2.1 LSB observed);
  - lower squared error than the noisy input.
- **`tb_ra_receiver`** runs the whole receiver at full size: 32 antennas, 16
  users, 64 ADC channels, 4 instances.
  - It exercises 6-bit and 3-bit modes with run-time switches, 1- to 4-bit
    `X^H` with muted rows, PGA gains with clipping, and the external source
    with 8- and 4-bit z.
  - It runs three channel-estimation captures through BEACHES.
  - It counts each of these and fails if one never occurred.
  - Equalizer outputs are checked exactly against the testbench's own
    PGA/quantizer/interleaving model.
  - It takes well under a second.

- **`tb_workload_detect`** detects real uplink data through the whole receiver.
  It uses a random Rayleigh channel and a zero-forcing matrix quantized to
  finite-alphabet `X^H` with a per-user scale, and slices the outputs.

  | Configuration | SNR | SER | Rate |
  |---|---|---|---|
  | 16 users, 16-QAM, 6-bit ADC, 4-bit `X^H` | 30 dB | 1.6e-4 | 4 vectors per 8 cycles |
  | 4 users, QPSK, 3-bit ADC, 1-bit `X^H` | 20 dB | 0 | one vector per cycle |

To run one testbench with Verilator (package first; modules are found through
`-I`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/ra_pkg.sv tb/tb_ra_receiver.sv \
          --top-module tb_ra_receiver -Mdir obj -o sim && obj/sim
```

Some warnings are expected, such as unused observation outputs or intentionally
dropped low bits. Add `-Wno-fatal` to let them through.

## Changing the design

- **Array size.** `B`, `U` and `NINST` live in `ra_pkg`; the PPAC modules also
  take `N` (bit-cells per row) and `NPE` as parameters.
- **Timing.** The framing arithmetic in `ti_ctrl` assumes four interleaved
  converters and the two resolutions above.
- **FFT size.** The FFT and the BEACHES timing assume a power-of-two B. The
  twiddle table in `ra_pkg` holds the first B/2 entries of
  `round(1024*cos(2*pi*k/B))` and `round(1024*sin(2*pi*k/B))` and must be
  regenerated from that formula for another B.
- **CORDIC accuracy.** It is set by `NIT` and the `ATAN` table
  (`round(2^16/(2*pi) * atan(2^-i))`).
