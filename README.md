# Ring-oscillator PUF with a Walsh-Hadamard transform and BCH key binding

A physical unclonable function (PUF) turns small, random manufacturing differences
into a device fingerprint. Here the fingerprint comes from a 16 x 16 array of ring
oscillators (ROs). Neighbouring ROs are correlated: they share the supply, the
temperature and the surrounding logic. Comparing raw frequencies therefore gives
biased, dependent bits. This design takes a different route:

1. It counts every RO for a fixed window.
2. It applies a two-dimensional Walsh-Hadamard transform (DWHT) to the 16 x 16
   counts. The transform decorrelates them, and it needs only additions.
3. It turns each of the 255 non-DC coefficients into one bit by comparing it with
   a stored boundary.
4. It binds a 131-bit secret key to those 255 noisy bits with a fuzzy commitment
   built on the binary BCH(255,131,37) code. The code corrects up to 18 bit errors.

The RTL follows a published FPGA implementation of this scheme. That implementation
runs on a Zynq SoC: an ARM processor drives the RO array over AXI4-Lite, and drives
the DWHT and the quantizer over AXI4-Stream. The processor is not part of this RTL.
Its three buses come out as ports of the top module, `ro_puf_top`, and the
testbenches play its part. The BCH encoder and decoder are not in the published
hardware. The publication describes the scheme and the code only, and this design
adds them as a fourth component.

## Data flow and timing

All timing is at the 54 MHz clock of the reference system.

| Step | Block | Cycles (54 MHz) | Reference figure |
|---|---|---|---|
| count one column of 16 ROs | `ro_measure` | 5400 (100 us) + ~10 | 100 us |
| count the whole array | 16 x the above | ~1.6 ms | 1.6 ms |
| 16 x 16 DWHT, stream in and out | `dwht` | 3329 | 66 us = 3564 |
| quantize 256 coefficients | `quantizer` | 767 | 14 us = 756 |
| enrollment (encode, XOR) | `fuzzy_commitment` | 133 | not given |
| reconstruction (XOR, decode) | `fuzzy_commitment` | 549 | not given |

The processor moves the data from step to step:

1. It starts each column measurement and reads the 16 counters.
2. It streams the 256 counts into the DWHT, then the 256 coefficients into the
   quantizer.
3. It passes the 255 bits to the fuzzy commitment block.

## The RO array and its counters (`ro_puf_array`, `ro_measure`, `ring_oscillator`)

Each RO is five inverters long and runs at 400 to 500 MHz. Each row has one 16-bit
counter. A multiplexer clocks that counter from the RO of the selected column, so
one measurement counts all 16 rows of a single column in parallel. A stop timer on
the system clock enables that column for `MEAS_CYCLES` cycles (default 5400, which
is 100 us). At 500 MHz a 16-bit counter overflows after 131 us, so the 100 us
window stays clear of overflow.

The counters run in the RO clock domains. The controller avoids sampling them while
they change:

- It clears them asynchronously for two cycles before the window.
- It waits `SETTLE_CYCLES` after disabling the column before it reports done.
- Only then does the processor read them.

Register map of the AXI4-Lite slave (8-bit addresses). The map is this design's
own:

| Address | Register | Fields |
|---|---|---|
| 0x00 | CTRL | write: bit 0 start, bits 11:8 column |
| 0x04 | STATUS | bit 0 busy, bit 1 done |
| 0x08 | MEAS_CYCLES | window length in clock cycles, read/write |
| 0x40 + 4r | COUNT[r] | counter of row r, 16 bits |

`ring_oscillator` is a behavioural model, not logic: a real RO is a
placement-dependent analog loop. Its half period is `N_INV x STAGE_DELAY_FS`. Each
time it is enabled, a new random offset within +-`NOISE_FS` is added, which models
measurement noise. `ro_puf_array` gives RO (r,c) a stage delay made of three parts:

- a base delay;
- a row and column gradient, the correlated part;
- a hash of `DEVICE_SEED` and the RO index, the device-unique part.

Change `DEVICE_SEED` to get a different "chip". On silicon or an FPGA, replace
`ring_oscillator` with the vendor's hard-placed inverter chain.

## The DWHT engine (`dwht`, `dwht_4p2d`, `dwht_index_rom`, `dwht_data_ram`)

This block is the hardest to follow. The 16 x 16 transform is built from one small
kernel, the 4-point 2D butterfly:

    y0 = (x0 + x1 + x2 + x3)/2    y1 = (x0 - x1 + x2 - x3)/2
    y2 = (x0 + x1 - x2 - x3)/2    y3 = (x0 - x1 - x2 + x3)/2

Take the four elements at (r0,c0), (r0,c1), (r1,c0) and (r1,c1), where r0 and r1
differ only in row bit p, and c0 and c1 differ only in column bit p. The butterfly
then applies a 2 x 2 Hadamard step along row bit p and column bit p together.
Running it for p = 0, 1, 2, 3 on all 64 such quadruples, in place, yields the full
separable 16 x 16 Walsh-Hadamard transform in natural order, scaled by 1/16:

    T(u,v) = 1/16 * sum_{r,c} x(r,c) * (-1)^(popcount(u&r) + popcount(v&c))

The schedule is stored, not computed at run time. `dwht_index_rom` holds 256
32-bit words, one per butterfly evaluation (4 passes x 64). Each word packs the
four 8-bit RAM addresses (16r + c): x0 in bits 7:0, x1 in 15:8, x2 in 23:16 and x3
in 31:24. The ROM fills itself from that formula at elaboration, so there is no
data file.

For each ROM word the FSM runs three steps:

1. Fetch the word (1 cycle).
2. Read the four addressed words of the single-port `dwht_data_ram` into the
   register bank. With the registered read this takes 5 cycles.
3. Write y0..y3 back to the same four addresses (4 cycles).

The address MUX chooses between the four ROM fields and the FSM's own counter. The
counter is used while loading and unloading. The data MUX chooses between the four
butterfly outputs and the input stream.

A frame takes 3329 cycles: 256 load, 10 x 256 compute, 2 x 256 output, and a
1-cycle turnaround.

Arithmetic:

- Words are 20 bits. The inputs are 16-bit signed. Each pass can add 2 bits and
  the halving removes 1, and four passes stay inside 20 bits.
- A counter value above 32767 is read as negative. This changes only the DC
  coefficient, because every other basis vector sums to zero, and the DC
  coefficient is discarded.
- The halving is an arithmetic shift. Each pass therefore rounds down, and the
  error compounds to at most 7.5 LSB of the exact T(u,v).

The input stream carries 16-bit words. The output stream carries the 20-bit
coefficient sign-extended to 32 bits, in row-major (u,v) order, with tlast on the
256th word. Output back-pressure is honoured.

## Quantizer (`quantizer`, `quant_boundary_rom`)

The quantizer extracts one bit per coefficient (K = 1). The first coefficient of
each frame is the DC term. It reflects the mean frequency, which an attacker can
guess, so it is read and dropped. Each of the other 255 coefficients is compared
with its own 20-bit boundary from a 255-word ROM, and the output bit is
`coefficient > boundary`. At K = 1 no histogram equalization and no Gray mapping are
needed.

The ideal boundary is the median of that coefficient over many devices. It has to
be characterised on real silicon. By default the ROM is all zeros, which is the
median of every AC coefficient when the ROs have no systematic pattern. The
`BOUNDARY_FILE` parameter loads 255 hex words instead.

The block takes 3 cycles per coefficient and emits one bit per beat, in bit 0 of an
8-bit word, with tlast on the 255th bit.

## Key binding (`fuzzy_commitment`, `bch_encoder`, `bch_decoder`)

- **Enrollment.** The block encodes the key S into a BCH codeword C and publishes
  the helper data M = X xor C, where X holds the 255 enrolled bits.
- **Reconstruction.** From a fresh reading Y, it decodes M xor Y = C xor (X xor Y).
  This succeeds while X and Y differ in at most 18 bits.

How the code is built:

- The field is GF(2^8) with primitive polynomial x^8+x^4+x^3+x^2+1.
- g(x) has degree 124. It is the least common multiple of the minimal polynomials
  of alpha^1 to alpha^36, and it is a constant in `bch_pkg`.
- The encoder is a systematic serial LFSR. It takes one message bit per cycle and
  raises done 132 cycles after start.

The decoder works in three phases:

1. Computes the 36 syndromes in parallel, one received bit per cycle (255 cycles).
2. Runs the inversionless Berlekamp-Massey algorithm (36 cycles).
3. Runs a serial Chien search that flips the bits it finds (255 cycles).

Done comes 548 cycles after start. The decoder declares failure in two cases:

- the error locator has a degree above 18;
- the number of roots does not match that degree.

It then returns the received word unchanged. With more than 18 errors it may also
decode to a wrong codeword without noticing, as any bounded-distance decoder can.

The primitive polynomial is this design's assumption, since the reference names
only the code. A different choice changes g(x) and the helper data, but not how
well the code corrects errors.

## Departures from the reference and open points

- The processor, DMA and DDR of the reference system are not built. The top
  exposes their buses.
- The BCH encoder, decoder and fuzzy-commitment controller are this design's own.
  Only the code parameters and the scheme come from the reference.
- The reference list of DWHT parts mentions "a second MUX to select the ROM input".
  Its block diagram instead shows that MUX feeding the data RAM. The diagram is
  followed here.
- The DWHT is 235 cycles faster than the reference's 66 us. The internal cycle
  split was not published, and this design chooses its own.
- The counter clock muxing is written as plain logic. On an FPGA, it and the ROs
  need placement constraints.
- The quantization boundaries are zero by default. See above.
- Only the 16 x 16 configuration is supported. The RO array is parameterised, but
  the DWHT schedule and the 255-bit code are built for 256 elements.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>`. For example:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/puf_pkg.sv rtl/bch_pkg.sv tb/bch_ref_pkg.sv tb/tb_dwht.sv \
        --top-module tb_dwht
    ./obj_dir/Vtb_dwht

`tb/bch_ref_pkg.sv` is an independent reference model of the code: table-based
GF(2^8) arithmetic, encoding by polynomial long division, and syndromes. The BCH
testbenches use it.

`tb_ro_puf_top` runs the whole flow end to end, with the counting window shortened
to 540 cycles so that it finishes in about a minute:

1. two measurements of the array;
2. transform;
3. quantization, with and without output back-pressure;
4. enrollment;
5. reconstruction with the natural noise, with 15 errors and with 25 errors.

It counts each mechanism (column measurements, stream stalls, dropped DC terms,
enrollment, reconstruction, corrected errors, decoding failure), and a mechanism
that never happened counts as a failure.

`tb_ro_puf_top_full` runs one complete operation with every parameter at its
default, including 1.6 ms of RO counting, and takes about six minutes. Most of that
time goes into simulating the oscillators.
