# A reconfigurable radar signal processing accelerator for 802.11ad ISAC

An IEEE 802.11ad base station already sends Golay-coded preambles. If the base
station listens to the echoes of a train of such packets on an antenna array, it
can work out where its users are and how fast they are moving, and it needs no
separate radar for that. This is integrated sensing and communication (ISAC).
The processing that turns the echoes into range, azimuth and Doppler
velocity is heavy. This RTL is the programmable-logic part of an accelerator
for it, written for a Zynq-class MPSoC. An ARM processor system (PS) runs the
rest.

The work is split in three parts:

1. **Matched filter (MF) IP.** It runs once per packet. One packet holds
   Q = 32 antennas x K = 1024 fast-time samples. The IP turns it into a
   range-azimuth image of I = 181 azimuths (-90..90 degrees in 1 degree steps)
   x K range bins.
2. **Processor (not in this RTL).** It searches the images for peaks and
   removes targets one by one (CLEAN). For every target it collects the
   target's cell from each of the N = 100 packets, which gives the slow-time
   vector.
3. **MUSIC IP.** It runs once per target. It estimates the target's Doppler
   frequency from the slow-time vector with the MUSIC subspace method. The
   pseudo-spectrum has D = 200 Doppler bins.

Three quantities can be changed at run time through AXI4-Lite:

- **Angular step.** Computing only every 2nd or 4th azimuth cuts the MF time
  about in proportion.
- **Number of packets N.** This sets the MUSIC problem size.
- **Number of Doppler bins D.** This trades velocity resolution for time.

This is the "reconfigurable" part of the design.

## Block structure

```
                 AXI4-Lite (PS)
                      |
               rsp_axil_regs ---- az_step, n_pkts, d_bins, status, counters
                      |
  packet  -->  matched_filter x NUM_MF  -->  image  (to PS: peak search, CLEAN)
  stream        |  mf_fft_stage   <-> external K-point FFT
                |  BRAM B (Q banks)
                |  mf_beamform    <-> external K-point IFFT
                                               |
  slow-time  --> music_doppler -------------> dB spectrum, Doppler peak bin
  vector         |  music_cov_evd <-> external EVD (QR) engine
                 |  BRAM I (S banks)
                 |  music_msg
```

`rsp_accel_top` connects these parts. It holds NUM_MF matched-filter
instances (1 by default; 2 for a faster variant), one MUSIC instance and
the register file. It also has one coefficient port that loads three fixed
tables:

- the beam weights (BRAM C);
- the Golay spectrum (BRAM D);
- the Doppler steering matrix (BRAM J).

The following parts are vendor IP and sit outside this RTL. Their streams are
ports of the top:

- the FFT, IFFT and EVD engines;
- the DMA engines;
- the AXI interconnect.

The memories are named BRAM A to L, after the order in which the data flows
through them:

| BRAM | block | contents | size at defaults |
|---|---|---|---|
| A | mf_fft_stage | received packet, antenna-major | Q*K = 32768 complex |
| B | matched_filter | fast-time spectra, one bank per antenna | Q banks x K |
| C | mf_beamform | beam weights w[q][i] | Q banks x I |
| D | mf_beamform | Golay spectrum G[k] | K |
| E | mf_beamform | range-azimuth image | I*K = 185344 complex |
| F, G | music_cov_evd | y and conj(y) | N_MAX |
| H | music_cov_evd | covariance sums (48-bit) | S_MAX^2 = 2500 |
| I | music_doppler | noise eigenvectors, one bank per element | S_MAX banks x S_MAX |
| J | music_msg | Doppler steering vectors | S_MAX banks x D_MAX |
| K | music_msg | MUSIC denominators | D_MAX |
| L | music_msg | dB spectrum | D_MAX |

Every complex memory is two `ram_sdp` instances, one for the real part and one
for the imaginary part (`cram`). Each has one write port and one registered
read port.

## Number formats

- **MF datapath.** Complex samples use the `<24,5>` word length: 24-bit two's
  complement with 5 integer bits (sign included) and 19 fractional bits. This
  is the word length the reference analysis chose for the MF. Each complex
  multiplier (`cmul`) works like this:
  - It forms the full 48-bit products.
  - It rounds half-up back to 19 fractional bits.
  - It saturates to 24 bits and raises `ovf` when it does.
- **Q-input adder.** `cadd` grows by log2(Q) bits. Its result is saturated
  back to `<24,5>` before the Golay multiplication.
- **Saturation flag.** All saturation events of an MF instance are OR-ed into
  a sticky flag, which is visible in the STATUS register.
- **MUSIC datapath.** MUSIC uses 32-bit words with 19 fractional bits, and
  48-bit sums in BRAM H and in the spectrum accumulator. **This is a departure.**
  The reference design computes MUSIC in single-precision floating point.
  MUSIC needs that range, because the eigenvector products span many
  decades. The fixed-point version works on the test scenes (the peaks land
  in the right bins), but its accuracy against the float version has not been
  characterised. Use a float datapath if you need the reference accuracy.
- **dB output.** The spectrum is signed Q8.8 dB, normalised so that the peak
  is 0 dB and clipped at -128 dB.

## Matched filter: from one packet to one image

### FFT stage (`mf_fft_stage`)

1. The packet arrives antenna-major (sample q*K+k) on an AXI-Stream slave and
   fills BRAM A.
2. A Mod-Q counter walks the antennas, with state names C0 to C3. For each
   antenna:
   - a Mod-K counter reads its K samples;
   - the samples go to the external FFT one per clock, with `last` on sample
     K-1;
   - the K results come back in natural order, with any latency and no
     back-pressure;
   - the results are written into bank q of BRAM B.

### Beamformer (`mf_beamform`)

Beamforming in the frequency domain followed by the matched filter is

    X[i][k] = conj(G[k]) * sum_q w[q][i] * B[q][k]

followed by an IFFT over k for every azimuth i.

1. Splitting BRAM B into Q banks lets all Q antennas of bin k be read in the
   same clock.
2. Q complex multipliers and one Q-input complex adder form the beam sum. The
   hardware therefore handles one (i, k) point per clock.
3. One more multiplier applies conj(G[k]). This is correlation with the
   transmitted Golay sequence, done in the frequency domain.
4. The K products of one azimuth stream into the IFFT. The K outputs come back
   and form row i of BRAM E.
5. After the last azimuth, the computed rows are streamed out on the image
   port, row by row.

**Angular step.** The azimuth counter advances by `az_step`, which is sampled
at the start of each packet. Step 1 gives 181 rows, step 2 gives 91, step 4
gives 46 and step 8 gives 23. Only computed rows are read out. Work per packet
is therefore ceil(I/step) x (2K + latency). This is where the run-time speed-up
of a coarse angular search comes from.

**Timing per azimuth:**

- 1 clock for C0;
- K clocks to feed the IFFT;
- the IFFT latency;
- K clocks to write the IFFT output;
- 1 clock to close.

The unit testbench checks this count to within 3 clocks.

**Overlap between packets.** `matched_filter` holds BRAM B between the two
stages, so the two stages can overlap:

- While the beamformer works on packet n, BRAM A can already accept packet
  n+1, and the FFT stage can start on it.
- The FFT stage holds back its first BRAM B write until the beamformer reports
  `b_free`.
- The image output of packet n has normal AXI-Stream back-pressure. A slow
  reader stalls only the read-out.

With NUM_MF > 1, whole packets are processed in parallel by separate
instances. Each instance has its own streams and FFT/IFFT ports. The beam and
Golay tables are written into all instances at once.

## MUSIC: from a slow-time vector to a Doppler bin

MUSIC works on the N-sample slow-time vector y of one target (one complex value
per packet). The N samples are cut into M = N/2+1 overlapping sub-arrays of
length S = N/2. Averaging their auto-covariances gives a well-conditioned S x S
matrix. This is spatial smoothing over the packet index.

The eigenvector with the largest eigenvalue spans the signal subspace and is
dropped. The other S-1 eigenvectors e_j span the noise subspace. A Doppler
steering vector v(d) of the true Doppler frequency is orthogonal to them, so
the pseudo-spectrum

    mu(d) = 1 / sum_j | v(d)^H e_j |^2

peaks there.

### Covariance and EVD (`music_cov_evd`)

1. y goes into BRAM F and conj(y) into BRAM G.
2. A Mod-M counter (the sub-array) and two Mod-S counters (row and column)
   drive one complex multiplier and an accumulator. Each clock adds
   y[m+r]*conj(y[m+c]) into H[r][c]. This takes M x S x S clocks: 127500 at
   N = 100.
3. H is scaled by 1/M. The reciprocal is computed once per run.
4. H streams to the external EVD engine row by row.
5. The engine returns S eigenvectors, column by column, with the largest
   eigenvalue first.
6. The first eigenvector is dropped. The remaining S-1 are written into BRAM I:
   bank = element, address = vector.

The EVD is a vendor QR-factorisation engine in the reference design. This
interface treats it as a black box that returns eigenvectors.

### Spectrum generation (`music_msg`)

1. For every Doppler bin d (Mod-D counter) and noise vector j (Mod-(S-1)
   counter), column d of BRAM J and vector j of BRAM I are read in one clock.
2. An S-input multiply-accumulate (S multipliers and an adder tree) gives
   z = v(d)^H e_j.
3. A second multiplier accumulates |z|^2 over j. The result, den(d), is stored
   in BRAM K.
4. The peak search keeps the bin with the smallest denominator. That bin has
   the largest mu, so no divider is needed.
5. Each bin is converted to dB relative to the peak:

       10 log10(mu(d)/mu_max) = -3.0103 * (log2 den(d) - log2 den_min)

   The log2 is a leading-one detector plus a piecewise-linear fraction. Its
   error is below about 0.1 dB.
6. The dB values go into BRAM L and are streamed out.

The spectrum costs D x (S-1) clocks: 9800 at N = 100, D = 200. D = 40 makes it
5 times shorter.

### Overlap between targets

- The covariance of the next target can be built while the spectrum of the
  current one is still being computed.
- The EVD hand-off of the next target waits (`i_free`) until the spectrum
  stage no longer reads BRAM I.
- N is taken with the first sample of a vector. D is taken when the spectrum
  starts.

## Register map (AXI4-Lite, 32-bit registers)

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | AZ_STEP | rw | angular step in degrees (reset 1) |
| 0x04 | N_PKTS | rw | N, even, 4..N_MAX (reset 100) |
| 0x08 | D_BINS | rw | D, 1..D_MAX (reset 200) |
| 0x0C | STATUS | ro / w1c | bit 0 MF busy, bit 1 MUSIC busy, bit 2 MF saturation seen (sticky, write 1 to clear) |
| 0x10 | DOPPLER | ro | peak Doppler bin of the last MUSIC run |
| 0x14 | MF_DONE | ro | packets finished by all MF instances |
| 0x18 | MU_DONE | ro | MUSIC runs finished |
| 0x1C | DEN_LO | ro | smallest denominator of the last run, bits 31:0 |
| 0x20 | DEN_HI | ro | the same, bits 47:32 |

- **Write handshake.** A write is taken when AWVALID and WVALID are both high.
  BVALID follows one clock later.
- **Read handshake.** A read is taken on ARVALID. RVALID follows one clock
  later.
- **Responses.** WSTRB is ignored, and every response is OKAY.
- **Saturation flag.** The saturation bit is set on the rising edge of an
  instance's saturation flag. It can therefore be cleared even while that flag
  is still high.

## Interfaces and conventions

- **Clock and reset.** The design uses a single clock. Its reset `rst_n` is
  synchronous and active-low.
- **Stream types.** The package `rsp_pkg` defines the stream types:
  - `cstream_t`: a `<24,5>` complex value, `valid` and `last`;
  - `mstream_t`: the same with the 32-bit MUSIC word.
- **Engine links.** The FFT, IFFT and EVD links use these stream types. They
  have no back-pressure, and any latency is accepted.
- **DMA-facing ports.** These are AXI-Stream with tvalid/tready:
  - packet in;
  - image out;
  - slow-time vector in;
  - spectrum out.
- **Coefficient port.** `coef_sel` selects the table: 0 = beam weights
  (bank q, address i), 1 = Golay spectrum (address k), 2 = Doppler steering
  (bank s, address d).
  - C and D take the low 24 bits of each half of `coef_data`.
  - J takes all 32 bits.
- **Where the tables come from.** The tables are the processor's to compute:
  - w[q][i] = exp(-j*pi*q*sin(phi_i)) for a half-wavelength array;
  - G is the K-point FFT of the zero-padded Golay sequence;
  - v_s(d) = exp(j*2*pi*f_d*s) over the Doppler grid.

## Departures and open points

- **MUSIC in fixed point.** MUSIC is fixed point (32-bit, 19 fractional bits)
  instead of single-precision float, as described above. The three MUSIC
  blocks should be read as a functional model of the float datapath.
- **External engines.** The FFT/IFFT and EVD engines, the DMA and the
  interconnect are not part of this RTL. The FFT-engine model in the
  testbenches is a floating-point FFT whose output is rounded to `<24,5>`.
  The EVD model is a Jacobi eigen-solver. Both only stand in for vendor cores.
  Their latency, scaling and ordering conventions must be matched when real
  cores are connected:
  - FFT and IFFT output in natural order;
  - output divided by a fixed power of two (the full-size test uses 2^-10
    forward and 2^-6 inverse);
  - eigenvectors sorted by decreasing eigenvalue.
- **No parallel variants inside one IP.** The reference architecture
  mentions serial-parallel variants. Two of them are not built here:
  - several FFT engines on partitioned BRAMs, and several CM/CA/IFFT units
    that process more than one azimuth at a time;
  - several CMs in the covariance stage.
  Each IP here is the serial form: one antenna FFT, one azimuth and one
  covariance element at a time. Parallelism comes only from NUM_MF whole
  MF instances.
- **Processor tasks.** Range-azimuth peak search, CLEAN, target scheduling
  and the choice of N, D and the angular step are processor tasks. They are
  not in this RTL.
- **Handshakes and pipeline depths.** The handshakes, the pipeline depths, the
  rounding points, the overlap of packets and targets, and the register map
  are this design's choices. The reference description does not fix them.
- **Zynq-specific parts.** Clock rate, BRAM mapping and DSP packing are left
  to synthesis. The design is written for the 300 MHz PL clock of the
  reference implementation, but it has not been timed here.

## Simulation

All testbenches are self-checking. Each ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. Each builds with
plain Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/rsp_pkg.sv tb/tb_pkg.sv tb/tb_rsp_accel_top.sv \
        --top-module tb_rsp_accel_top -o sim
    ./obj_dir/sim +verilator+rand+reset+2

The `+verilator+rand+reset+2` option starts every register that reset does
not clear at a random value. All tests pass that way. The behavioural engine
models ignore their inputs for the first two clocks, while the design is still
in reset.

| testbench | what it exercises | checks |
|---|---|---|
| tb_ram_sdp | read latency, read-during-write, random traffic | 664 |
| tb_cmul | rounding, saturation, conjugation against a model | 4002 |
| tb_cadd | Q-input sum against a model, extreme operands | 1000 |
| tb_mf_fft_stage | BRAM A/B order, FFT stream, cycle count | 139 |
| tb_mf_beamform | bit-exact IFFT input, DFT reference of the image, az_step 1 and 2, saturation, cycle count | 715 |
| tb_matched_filter | three packets back to back, image peak at the target, overlap of stages | 1163 |
| tb_music_cov_evd | bit-exact EVD input, BRAM I contents, N = 8/16/12, stall on i_free | 348 |
| tb_music_msg | bit-exact denominators, dB values within 0.3 dB, peak bin | 178 |
| tb_music_doppler | three vectors back to back, N/D changes | 176 |
| tb_rsp_axil_regs | random AXI-Lite traffic against a register model | 804 |
| tb_rsp_accel_top | whole top at Q=4, K=32, I=7, 2 MF IPs, N up to 16, D up to 32 | 4916 |
| tb_rsp_full | whole top at default parameters, 101 packets, MUSIC at N=100/D=200 and N=20/D=40 | 121 |

**Mechanisms the system tests count.** Both system tests count every
mechanism and fail if one never occurs:

- stalls on the image stream;
- a change of angular step;
- saturation;
- N/D reconfiguration;
- packets on two MF instances at the same time (reduced-size test only).

**Full-size test.** `tb_rsp_full` uses a 512-chip Golay pair zero-padded to
1024 samples and one point target at 14 degrees:

- Packets 0, 1 and 2 use steps 1, 2 and 4; the rest use step 8.
- The image peak must sit at the target cell with the expected height.
- MUSIC must put the peak at the target's Doppler bin.

It simulates about 15.1 million clock cycles and runs in about three minutes.

**Behavioural models.** The models used by the testbenches are in `tb/`:

- `fft_model.sv`: FFT/IFFT engine;
- `evd_model.sv`: Jacobi EVD engine;
- `tb_pkg.sv`: shared helpers.
