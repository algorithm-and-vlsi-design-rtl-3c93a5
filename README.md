# 1BOX: a streaming 1-bit data detector for massive MU-MIMO-OFDM

A base station with B antennas and only 1-bit ADCs sees each time-domain sample of each antenna
as a pair of signs (in-phase and quadrature). From those signs, the B×W×U channel estimate and the
noise level, the detector recovers the U users' symbols on all W subcarriers of one OFDM symbol.
Because the quantiser acts in the time domain and the users' symbols live in the frequency domain,
the problem does not split into W independent per-subcarrier problems. The 1BOX algorithm handles
the whole OFDM symbol at once. It solves a relaxed maximum-likelihood (ML) problem by projected
gradient descent, with the symbols kept inside a box, and it crosses between the two domains with
an FFT pair in every iteration.

This RTL is a streaming implementation of that detector, in SystemVerilog. Every unit handles one
sample per clock. The default configuration is B = 128 antennas, U = 8 users, W = 128 subcarriers
and K = 3 iterations.

## The iteration

Let S (W×U) be the symbol estimate, initially 0. Let H_b be antenna b's channel row on every
subcarrier, and r_b ∈ {±1 ± j}^W antenna b's sign samples. One iteration does the following.

| step | operation | unit |
|------|-----------|------|
| 1 | z_b = per-subcarrier product H_b · S, for each antenna b | MVM1 |
| 2 | α_b = (√2/σ̃) · r_b ⊙ IDFT(z_b) (unitary IDFT; ⊙ multiplies real by real and imaginary by imaginary) | FTF |
| 3 | V_b = DFT(r_b ⊙ ω̃(α_b)) | FTF |
| 4 | κG, with column w = κ · Σ_b conj(H_{b,w}) V_{b,w} | MVM2 |
| 5 | S ← clip(S + κG, ±s_max) in each real part | UPC |

Here ω̃ is the inverse Mills ratio φ(x)/Φ(x), made numerically safe as follows:

- it is 0 for x ≥ 4;
- it is −x for x ≤ −4;
- it comes from a 128-entry table in between.

σ̃ = max(σ, σ′) is the noise standard deviation, limited from below. Without that limit, a very
small σ makes α (and the gradient) explode. The step size is κ = 1/32. Because r_b holds only
signs, both products with r_b are conditional negations ("sign refinement"), not multiplications.

## Dataflow and schedule

```
             +--------------------------- UPC (S-MEM, CTRL, adder, clip, MUX) <-----------+
             |  S column w                                                         κG col w|
             v                                                                             |
 H-MEM --RD1--> MVM1 --z--> FTF: IFFT -> ×1/σ̃ -> SR(r) -> ω̃ LUT -> SR(r) -> FFT --V--> MVM2
   |                                  (r-RAM, 2 read ports, bit-reversed address)          ^
   +--RD2----------------------------------------------------------------------------------+
```

The controller (`upc_ctrl`) streams the B·W positions (b, w) of one iteration, antenna-major, one
per clock.

- **MVM1** (`mvm1`) forms one z value per clock.
- **FTF** (`ftf`) turns each W-sample antenna row of z into a W-sample row of V.
- **MVM2** (`mvm2`) multiplies every V_{b,w} by the U conjugated channel entries of (b, w). It adds
  the result into column w of its G memory. While antenna B's row passes, it emits κG column by
  column.
- **UPC** (`upc`) adds each κG column to the stored S column, clips the sum and writes it back.

**Overlapping iterations.** The stream of iteration k+1 starts on the clock after the first κG
column of iteration k arrives. The UPC therefore finishes column w of S one clock before MVM1 needs
it for antenna 1. During those W clocks the UPC output MUX passes the freshly clipped column
straight to MVM1. S-MEM is being rewritten in the same clocks, so it is not read. Antennas 2..B
then read S-MEM normally. An iteration therefore takes

    PERIOD = (B−1)·W + 2 + L_MVM1 + L_FTF + L_MVM2
    L_MVM1 = 2 + log2 U,  L_FTF = 2·(W + log2 W) + 4,  L_MVM2 = 4

At the defaults this is 16,541 clocks. A task (start sampled to done sampled) takes
K·PERIOD + W + 3 = 49,754 clocks, which the testbenches check exactly. The published FPGA design
reports 51,282 clocks for 128×8. Nearly all of that difference comes from its FFT cores (702
clocks of FTF latency, against 274 here). Its per-iteration formula, BW plus the unit latencies,
includes no overlap.

**Control signals from CTRL:**

- `orst` zeroes the UPC output register for the whole first iteration, which supplies S⁽⁰⁾ = 0
  without clearing S-MEM.
- `acc_rst` zeroes the register in front of the UPC adder while the first iteration's κG arrives,
  so stale S from the previous task is not accumulated.
- `mux_sel` selects the adder/clip path during update clocks.
- `we_grant` (top port `load_ready`) permits H-MEM and r-RAM writes while idle and during the last
  iteration. The next task can then be loaded behind the detector's reads, which run in address
  order b·W + w.

## The FTF path in detail

The FTF unit holds most of the design's subtle points.

**FFTs.** Both transforms are radix-2 single-path delay-feedback pipelines (`sdf_stage`), log2 W
stages each.

- Each stage keeps an H-deep delay line whose entries carry a tag: empty, first-half sample, or
  pending difference.
- Because of the tags, a stage needs no enable. It emits its butterfly outputs in order and drains
  itself after the input stops.
- Input must arrive in whole blocks of W contiguous samples. An assertion checks this.
- The IFFT (`ifft_sdf`) is decimation-in-frequency: natural order in, bit-reversed order out.
- The FFT (`fft_sdf`) is decimation-in-time: bit-reversed order in, natural order out.
- The pair therefore needs no reorder buffer. Instead, the address generator reads r-RAM at the
  bit-reversed time index of each IFFT output sample. The second sign refinement reads the same
  address two clocks later through the second r-RAM port.
- Twiddle factors are [2.14] constants, computed at elaboration by an integer Taylor series
  (`trig_q14` in `onebox_pkg`). No table file is needed.

**Scalings.** With odd log2 W, the IFFT halves in its first (log2 W − 1)/2 stages and the FFT in
its first (log2 W + 1)/2 stages. For W = 128 this gives 2⁻³ and 2⁻⁴.

- 2⁻³ = √2/√128 is the unitary IDFT together with the √2 of step 2.
- 2⁻⁴ is the unitary DFT divided by √2. That √2 belongs with the gradient step and is absorbed
  there, as in the published scaling schedule.

**1/σ̃ table** (`inv_sigma_lut`). σ enters as an 8-bit code in [1.7], so σ = code/128. Entry c
holds round(8192 / max(c, 65)), capped at 127, which is 1/σ̃ in [2.6]. This makes σ′ = 65/128, the
smallest σ whose inverse fits [2.6]. The table has 256 entries and is computed at elaboration.

**ω̃ table** (`omega_lut`). α is in [5.4], so between −4 and 4 the 128 table entries are indexed
by α + 64 directly. Entry i holds round(16·ω(−4 + i/16)), capped at 127. Entries are stored as
7-bit unsigned values, since ω > 0 and ω(−3.94) ≈ 4.2 does not fit a signed [3.4]. The 128 values
are in `rtl/omega_lut.hex`. Outside the table the output is 0 (x ≥ 4) or −x (x ≤ −4), saturated
to the [4.4] output.

## Fixed-point formats

The notation [i.f] means i integer bits (sign included) and f fractional bits, per real part.

| signal | format | note |
|--------|--------|------|
| H | [4.4] | H-MEM word = U complex entries |
| z | [5.5] | MVM1 sum truncated, saturated |
| IFFT output | [5.5] | internal width IN + 4 + log2 W + 1 |
| α | [5.4] | (IFFT × 1/σ̃) truncated, saturated |
| 1/σ̃ | [2.6] unsigned | |
| ω̃ | [4.4] | table [3.4] unsigned |
| V | [4.4] | FFT output, saturated |
| κG | [1.7] | rounded half-up, saturated |
| S | [2.7] | box bound `s_max` in [2.7]: 121 ≈ 3/√10 for unit-energy 16-QAM, 128 for PSK |

MVM2 keeps all 8 + 5 = 13 fractional bits of κ·conj(H)·V in its accumulators, so the shift by
log2(1/κ) costs no precision until the single rounding at the output. Truncating every product
instead, B times per sum, biased κG by tens of percent in simulation.

## Using the top level

`onebox_top` has parameters B, U, W and K. W must be a power of two, and the FFT scaling assumes
log2 W is odd. U must be a power of two.

1. **Load.** While `load_ready` is high, write H-MEM and r-RAM at address b·W + w, where w is the
   DFT bin of the subcarrier, or the time index for r.
   - `h_wr_data` holds the U channel entries of (b, w).
   - In `r_wr_data` a 1 bit means a negative sign.
   - Unused subcarriers (guard band) simply have H = 0.
   - The same applies to unused antennas or users, which lets a smaller system run on a larger
     instance.
2. **Start.** Pulse `start` while `busy` is low. Hold `sigma` and `s_max` until `done`.
3. **Result.** `s_valid` is high for W consecutive clocks, each carrying column `s_w` of S in
   `s_out`. `done` pulses one clock after the last column.
   - The next task's data may be written from the moment the last iteration starts. The writer
     must stay behind the read stream.
   - Scaling the result and slicing it to the constellation are left to the user.

## Differences from the published design

- **FFT cores.** The FFTs are this design's own SDF pipelines, not vendor cores. This is why the
  FTF latency is 274 instead of 702 clocks.
- **Output-register reset.** The UPC output register is held in reset for the whole first
  iteration, not only its first W clocks. Otherwise antennas 2..B of the first iteration would read
  S left over from the previous task.
- **Input formats and thresholds.** The following are choices where the description gives no value:
  - the σ input format and σ′;
  - the ω̃ table storage (unsigned);
  - the bit encoding of r;
  - `s_max` as an input.
- **MVM2 precision.** MVM2 keeps full precision in G-MEM, with one rounding at the output.
- **Not included.** Channel estimation, the RF/ADC front end, and output normalisation and slicing
  are outside this RTL.

## Verification

Each unit has a self-checking testbench in `tb/`. Each compares against values computed
independently in the testbench and checks the latencies given above.

| testbench | unit | what it checks |
|-----------|------|----------------|
| `tb_mvm1` | `mvm1` | exact dot products with saturation; latency 5 for U = 8 |
| `tb_mvm2` | `mvm2` | exact accumulated conj(H)·V with rounding and saturation; output order; latency 4 |
| `tb_ifft_sdf`, `tb_fft_sdf` | FFTs | against a direct DFT within 2 LSB, with a gap between frames; latency W + log2 W |
| `tb_ftf` | `ftf` | V rows against a real-valued model within 6 %; both σ cases; all three ω̃ regions; latency 274 |
| `tb_omega_lut` | `omega_lut` | every α code against φ/Φ evaluated by numerical integration |
| `tb_inv_sigma_lut` | `inv_sigma_lut` | all 256 σ codes |
| `tb_hmem`, `tb_r_ram` | memories | gated writes; both read ports; read-during-write |
| `tb_upc` | `upc` | update and clip; accumulator reset; output reset; read-back |
| `tb_upc_ctrl` | `upc_ctrl` | the full stream and handshake schedule; exact task length |

The end-to-end tests share `tb/onebox_tb_body.svh`:

- `tb_onebox_top` runs a reduced instance: B = 32, U = 2, W = 32, K = 6.
- `tb_onebox_full` runs the defaults with 16-QAM.
- `tb_onebox_8psk` runs the defaults with 8-PSK.
- `tb_onebox_64x4` runs a B = 64, U = 4, W = 128, K = 3 instance. It takes 25,175 clocks per
  task, against 26,706 reported for the published design.

Each test:

1. generates a random 4-tap channel, random 16-QAM data with a guard band, OFDM modulation, noise
   and 1-bit quantisation;
2. runs two tasks, one with σ below σ′ and one above, the second loaded during the first task's
   last iteration;
3. compares the result with a floating-point model of the same iteration (relative error below 8 %,
   slicer decisions at least 97 % equal, symbol error rate no worse than the model's by more than
   0.03);
4. checks the task length exactly;
5. counts the output reset, accumulator reset, MUX bypass, late loading, ω̃ regions and σ cases.

At full size, both tasks agree with the model to about 1.3 % relative error.

To run a testbench with Verilator, for example the full-size one:

```
verilator --binary --timing --assert -Irtl -Itb rtl/onebox_pkg.sv -y rtl \
          tb/tb_onebox_full.sv --top-module tb_onebox_full -Mdir obj_full
obj_full/Vtb_onebox_full
```

Run this from the directory that holds `rtl/` and `tb/`, because the ω̃ table is read by the
relative path `rtl/omega_lut.hex`. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<m>`.
