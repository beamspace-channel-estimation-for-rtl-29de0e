# BEACHES SURE-based beamspace denoiser in SystemVerilog

At millimetre-wave frequencies a basestation with a uniform linear array of
B antennas sees each user's channel vector as a sum of a few plane waves. In
the discrete Fourier (beamspace) domain such a vector is nearly sparse: most
of its energy sits in a handful of angular bins, while the channel-estimation
noise is spread evenly over all B bins. BEACHES (beamspace channel
estimation) removes noise by soft-thresholding the beamspace vector,

    h_k = y_k / |y_k| * max(|y_k| - tau, 0),

and chooses the threshold tau per vector without any tuning: it picks the tau
that minimises Stein's unbiased risk estimate (SURE) of the mean-square error.
SURE depends only on the observed magnitudes and the known noise variance E0,
and it can be minimised exactly by sorting the magnitudes and scanning them
once. This repository holds RTL for the part of the BEACHES VLSI architecture
that does this work, the SURE-based denoiser (SBD), with testbenches.

## Where the denoiser sits

The full processing chain streams one entry per clock cycle:

    antenna domain y --> [A2B: FFT (scaled 1/2 per stage) -> vectoring CORDIC]
                     --> polar |y_k|, phase
                     --> [SBD: sort-and-scan -> tau*, FIFO, subtract, mux]
                     --> polar |h_k|, phase
                     --> [B2A: rotation CORDIC -> unscaled IFFT] --> h

The antenna-to-beamspace (A2B) and beamspace-to-antenna (B2A) conversions are
built from standard FFT and CORDIC cores (vendor IP in the reference FPGA
implementation). They are not part of the RTL here; `beaches_sbd` is the top
and its ports are the polar streams those cores would produce and consume.
For simulation, `tb/a2b_model.sv` and `tb/b2a_model.sv` are floating-point
behavioural models of the two conversions, with the same scaling (the forward
transform divides by B, the inverse does not).

Because the forward FFT divides by B, the noise variance per beamspace entry
is E0/B. That is the number the denoiser is given on its `e0` port.

## The threshold search as hardware computes it

Sort the magnitudes so that y_1 <= y_2 <= ... <= y_B. Between two consecutive
sorted values SURE is a quadratic in tau. The hardware version of the
algorithm takes the candidate tau = y_k itself in step k (k = 1..B). It
multiplies SURE by B and drops its constant E0 term, neither of which moves
the minimum. What is evaluated is

    SURE_k = S_k + (B-k+1) y_k^2 - E0 y_k V_k - 2 E0 (k-1)
    S_k    = sum_{b<k}  y_b^2          (grows during the scan)
    V_k    = sum_{b>=k} 1/y_b          (shrinks during the scan)

and tau* is the y_k of the first strictly smallest SURE_k. Both running sums
are updated once per step, so the scan costs O(1) per entry. V_1, the sum of
all reciprocals, does not need the sorted order. It is accumulated while the
vector streams into the sorter, so it is ready when the first sorted value
comes out.

Reciprocals come from a 512-entry table (`recip_lut`): 1/x for the 9-bit
magnitude x, as a 12-bit number with 2 fraction bits, rounded to nearest;
x = 0 maps to the largest code. The table is computed by a constant function
at elaboration (`lut[i] = round(1024/i)`), so no data file is needed.

## The streaming sorter

The sorter (`sort_unit`) is a row of B processing elements (`sort_pe`), each
holding one magnitude. It keeps its contents in descending order, with PE-1
the largest and PE-B the smallest. Each new magnitude is broadcast to all PEs
in one cycle. Every PE compares it with its own value. If the new value is
larger, the PE's entry moves one place toward PE-B. A moving PE loads the
entry of the PE before it if that one moves too; otherwise it loads the new
value. That is one insertion-sort step per cycle, with no searching.

The subtle part is that two vectors share the array. Once the last (B-th)
entry of a vector is in, the array holds the vector fully sorted. From the
next cycle on, PE-B hands its value to the scan unit (smallest first) and
every entry shifts one PE down. At the same time the next vector loads into
the PEs that open up at the top. To keep the two apart, every entry carries a
1-bit vector tag, and the sorter flips its current tag with each vector's
last entry. A PE whose entry is empty, or whose tag is not the current one,
always counts as "moves". Old entries therefore march steadily toward PE-B
and out, and they never block the insertion of new ones. The new vector
always fills a contiguous block from PE-1, so after its B-th entry it again
occupies the whole array.

As a result the sorter takes one value and gives one value per cycle. The B
sorted values of a vector appear on B consecutive cycles, starting in the
cycle right after the vector's last input. Pauses in the input stream are
allowed, even inside a vector. The hardware cost is O(B^2) in area times
delay, which for hundreds of antennas is acceptable and avoids a separate
sort buffer.

## Scan pipeline and number formats

| quantity | format |
|---|---|
| beamspace magnitude, phase | 10 bits, 8 fraction bits (magnitude: sign bit always 0) |
| E0/B (`e0`) | 16 bits, 15 fraction bits |
| reciprocal | 12 bits, 2 fraction bits |
| antenna-domain entries (outside the SBD) | 16 bits, 8 fraction bits |

Inside the scan unit every product and sum keeps full precision. All SURE
terms are aligned to 25 fraction bits, the precision of E0*y*V, and the sum is
a 47-bit signed value at B = 256. Because of this, the choice of tau* is
bit-exact against a plain integer model (`tb/beaches_ref_pkg.sv`).

The phase is 10 bits in units of pi (so that +-pi fits in the format). The
denoiser never looks at it; it only delays it.

The scan pipeline (`scan_unit`) has five stages plus the compare register:

1. sorted value, its reciprocal, step index k
2. y^2, y*V, B-k+1, k-1; V updated
3. S + (B-k+1) y^2, E0*(y*V), 2 E0 (k-1); S updated
4. E0 y V + 2 E0 (k-1)
5. SURE_k, then compare with the running minimum

The E0*(y*V) multiplier in stage 3 is the widest operation and the likely
critical path.

## Timing

With vectors streamed back to back, entry k of a vector leaves the denoiser
exactly 2B+8 cycles after it entered. That is 520 cycles at B = 256. The
cycles break down as:

- input register: 1
- sort-and-scan: a vector's threshold is ready 2B+5 cycles after its first
  entry entered the sort-and-scan unit (B to load, B to flush through the
  scan, 5 of pipeline)
- FIFO read: 1
- soft-threshold register: 1

The FIFO (`sbd_fifo`) is exactly 2B+5 entries deep. It is full in steady
state: an entry is written in the cycle its predecessor 2B+5 places earlier
is read. When the threshold is ready, the read controller reads the vector's
B entries on B consecutive cycles and holds the threshold for them. If the
input pauses between vectors, the first entry of a vector leaves B+9 cycles
after its last entry entered, whatever the pause.

Throughput is one entry per cycle, i.e. f/B vectors per second.

## Interface of `beaches_sbd`

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock, asynchronous active-low reset |
| in_valid | in | 1 | a polar beamspace entry is present; every B valid entries form one vector |
| in_s | in | polar_t (20) | `mag` (10 bits, sign bit must be 0) and `phase` (10 bits) |
| e0 | in | 16 | noise variance E0/B of the scaled beamspace, 15 fraction bits; keep constant while vectors are in flight |
| out_valid | out | 1 | a denoised entry is present |
| out_first, out_last | out | 1 | first and last entry of a vector |
| out_s | out | polar_t | shrunk magnitude and the unchanged phase |
| tau_valid, tau | out | 1, 9 | the threshold of each vector, one pulse per vector |

There is no back-pressure: the consumer must accept one entry per cycle, as
the downstream CORDIC and IFFT do. `polar_t` and all widths are in
`rtl/beaches_pkg.sv`. Assertions flag a negative magnitude at the input and
FIFO overflow or underflow.

## Files

| file | content |
|---|---|
| `rtl/beaches_pkg.sv` | formats, `polar_t`, `sort_entry_t` |
| `rtl/sort_pe.sv`, `rtl/sort_unit.sv` | streaming sorter |
| `rtl/recip_lut.sv` | reciprocal table |
| `rtl/scan_unit.sv` | SURE scan and minimum search |
| `rtl/sas.sv` | sort-and-scan: sorter + scan |
| `rtl/sbd_fifo.sv` | FIFO buffer |
| `rtl/soft_threshold.sv` | subtract and zero mux |
| `rtl/beaches_sbd.sv` | the denoiser, top |
| `tb/beaches_ref_pkg.sv` | integer reference model of the threshold search |
| `tb/a2b_model.sv`, `tb/b2a_model.sv` | behavioural FFT+CORDIC models |
| `tb/tb_*.sv` | one self-checking testbench per module |

## How far it follows the published architecture

These parts follow the published architecture:

- the three-module chain and the contents of the SBD (sort-and-scan, FIFO of
  depth 2B+5, subtractor and multiplexer);
- the linear PE array with broadcast input, descending order and flushing
  from PE-B while the next vector loads;
- the scan datapath (running S, V initialised from the unsorted stream and
  decreased per step, the multiplier structure, minimum tracking with enabled
  registers);
- the simplified threshold candidates, the B-scaling without the E0 term, the
  fixed-point formats listed above, and the 512-entry reciprocal table;
- the SBD latency of 2B+8 cycles.

These parts are choices made here, because the published description leaves
them open:

- the vector tag and valid bit in each PE;
- when the flush starts: in the published description it is triggered by
  the first entry of the next vector, while here it starts right after a
  vector's last entry (the same cycle when vectors are back to back);
- the two read ports on the reciprocal table;
- full-precision intermediate word lengths;
- the exact pipeline placement;
- rounding of the table contents;
- the phase unit;
- the valid-only streaming interface with first/last markers;
- the asynchronous reset;
- tolerance of input pauses.

The published text also states the insertion rule once in ascending terms.
The descending order of the architecture figure is used, since only that
order lets the smallest value leave first.

The FFT, IFFT and CORDIC cores are not included, so the accuracy of those
cores (10-bit CORDIC) is only approximated by the floating-point models. The
default size is B = 256. The published FPGA results cover B = 64, 128, 256
and 512, all reachable through the parameter `B`.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. For example, the
end-to-end test at the default size:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/beaches_pkg.sv tb/beaches_ref_pkg.sv rtl/*.sv tb/a2b_model.sv \
      tb/b2a_model.sv tb/tb_beaches_sbd.sv --top-module tb_beaches_sbd
    ./obj_dir/Vtb_beaches_sbd

Put `rtl/beaches_pkg.sv` and `tb/beaches_ref_pkg.sv` first, then the modules
a testbench needs (or all of `rtl/`), then the testbench.

`tb_beaches_sbd` runs one channel matrix of 16 users at B = 256. Its vectors
alternate between one strong path plus two weak ones and six weaker paths,
with noise variance 0.25 per antenna entry. It checks:

- every denoised entry and every threshold, bit-exactly, against the
  reference model;
- the 2B+8 latency of every entry;
- that the antenna-domain estimate is closer to the true channel than the
  noisy observation.

In that run the mean-square error drops from 0.251 to 0.054, a factor of
about 4.6. The test also counts the design's mechanisms, and each must occur:

- flushing one vector while the next one loads;
- input pauses;
- the FIFO at full depth;
- entries zeroed and entries shrunk;
- thresholds above the smallest entry.

The per-module testbenches use smaller B (16 or 32) and random stimuli:

- `tb_sort_unit`: ties, back-to-back vectors and gaps, including gaps inside
  a vector;
- `tb_scan_unit`: the tau_valid timing (6 cycles after the last sorted
  value);
- `tb_sas`: the threshold timing (B+6 cycles after the last input);
- `tb_sbd_fifo`: a FIFO that is full and being read and written in the same
  cycle.

`tb_sbd_sizes` runs the denoiser at B = 64, 128, 256 and 512 side by side.
At every size it checks the thresholds and outputs bit-exactly and the
latency of 136, 264, 520 and 1032 cycles. Those are the SBD latencies
reported for the reference FPGA designs.

## Changing it

- Antenna count: set `B` on `beaches_sbd`. The FIFO depth (2B+5) and all scan
  word lengths follow from it.
- Number formats: change them in `beaches_pkg`. The reciprocal table formula
  in `recip_lut` assumes 8 magnitude and 2 reciprocal fraction bits (1024 =
  2^(8+2)). The reference model in `tb/beaches_ref_pkg.sv` hard-codes the
  alignment shifts (9 and 11) for these formats.
- Bit 9 of `out_s.mag` is always zero, because a magnitude is non-negative.
  It is kept so that the output has the same 10-bit format as the input.
