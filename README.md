# RLWE encryption accelerator with Razor-guarded voltage partitions

This is a small hardware engine for Ring-LWE public-key encryption at the classic
parameter set (n, q, s) = (256, 7681, 11.32). It is designed to run at reduced supply
voltage. The engine is split into fourteen subcomponents. These are grouped into
voltage partitions by the length of their critical paths. Each partition gets its own
core-voltage setting: slow groups get more voltage, fast groups get less. Every
subcomponent carries a Razor register, which is a flip-flop with a second, late-sampling
shadow copy. When a partition's logic misses its clock edge, the two copies disagree.
The error controller then raises that partition's voltage by one step. The
cryptographic part is a conventional NTT-based RLWE datapath. The low-power part is the
calibration of the partition voltages and the Razor feedback loop.

All arithmetic is in the ring R_q = Z_7681[x]/(x^256 + 1), with 13-bit coefficients.

## The three operations

The engine runs one of three operations per `start` pulse. It loads polynomials through
a valid/ready input stream and returns results through a valid/ready output stream.
Coefficients are streamed in index order, 0 to 255.

| `op` | Inputs (streamed) | Work | Outputs (streamed) |
|---|---|---|---|
| `OP_KEYGEN` | a, r2 | sample r1; p = r1 - a*r2 | p |
| `OP_ENCRYPT` | a, p, 256 message bits (bit 0 of `in_data`) | sample e1, e2, e3; c1 = a*e1 + e2; c2 = p*e1 + e3 + encode(m) | c1, c2 |
| `OP_DECRYPT` | c1, r2, c2 | m' = c1*r2 + c2; decode | 256 message bits (bit 0 of `out_data`) |

The secret r2 is supplied from outside; the engine does not generate it.
All error polynomials (r1, e1, e2, e3) come from the on-chip discrete Gaussian sampler.

Message encoding and decoding:
- A one bit is encoded as floor(q/2) = 3840, and a zero bit as 0.
- A coefficient x decodes to 1 when q/4 < x < 3q/4, i.e. when 1920 < x < 5761.

Decryption works because c1*r2 + c2 = m~ + (e1*r1 + e2*r2 + e3). The noise term stays
far below q/4 for this sigma.

Before the first key generation or encryption, the random generator must be seeded:
- Pulse `seed_load` with an 80-bit `key` and `iv`.
- Wait for `rng_ready`, which comes 1152 warm-up clocks later.

## Multiplication: a 512-point cyclic NTT and a fold

A negacyclic NTT would need a 512th root of unity and a pre- and post-twist by its
powers. This design takes a simpler route that needs only one twiddle sequence:

1. Each 256-coefficient factor is loaded into a 512-word slot in bit-reversed order.
   The upper half is zero-padded.
2. A 512-point cyclic NTT is run in place (`ntt_ctrl`), with root W = 17^15 mod 7681 =
   7146. A product of two 255-degree polynomials has degree at most 510, so this cyclic
   convolution gives the full, unreduced product.
3. The datapath multiplies the two spectra point by point. It scales each product by
   512^-1 mod q = 7666 and writes product i to address bitrev(i).
4. The same forward NTT is run again. A forward transform of a spectrum gives the
   inverse transform with indices negated, R[k] = c[-k mod 512]. No separate inverse
   twiddle table is needed.
5. The divider (`poly_div`) reduces modulo x^256 + 1, using x^256 = -1:
   out[i] = c[i] - c[i+256] = R[(-i) mod 512] - R[(256-i) mod 512].

The NTT is an iterative Cooley-Tukey transform with the twiddle loop outermost. Each
stage's twiddle starts at 1 and is advanced by multiplying with the stage root. The
nine stage roots (W^(256), W^(128), ...) form a small table computed at elaboration by
a constant function. Per butterfly the controller:
- reads both operands in one clock through the two ports of the same RAM,
- writes both results in the next clock.

This costs 2 clocks per butterfly, 256 × 9 × 2 = 4608 clocks for the butterflies,
plus twiddle updates. One transform takes 5120 clocks from start to done. A butterfly
needs two reads and two writes, and one dual-port RAM serves two accesses per clock.
So two clocks per butterfly is the limit while a polynomial lives in a single RAM.

The modular arithmetic lives in small combinational units:
- `poly_mul` computes the butterfly: prod = w·v mod q, u + prod and u - prod.
- `poly_add` is the modular adder.
- `sub_mod` computes a - b as a + (q - b), then a conditional subtract of q.

Reduction uses the `%` operator on a 26-bit product. This is simple and synthesizable,
but it is not a Barrett or Montgomery reducer.

## Memory map

There are two dual-port RAMs of 4096 × 13 bits each. Both are synchronous read-first.
If both ports write the same address, port B wins. Each RAM holds eight 512-word slots;
the address is {slot[2:0], index[8:0]}.

| RAM0 slot | Content | RAM1 slot | Content |
|---|---|---|---|
| 0 `A` | a, or c1 in decryption | 0 `E1` | e1, or r2 |
| 1 `P` | p | 1 `E2` | e2, or r1, or c2 |
| 2 `T1` | product workspace | 2 `E3` | e3 |
| 3 `T2` | product workspace | 3 `M` | encoded message |
| 4 `C1` | result c1 / p / m' | | |
| 5 `C2` | result c2 | | |

The datapath operands are placed as follows:
- The point-wise product and the add/subtract take X from RAM0 port A and Y from RAM1
  port A.
- The result goes back to port A of the chosen RAM.
- Subtraction computes Y - X. This gives r1 - a*r2 in key generation.
- The divider uses both ports of RAM0.

## The sequencer (convolution controller)

`conv_ctrl` holds one fixed micro-program per operation. The programs are 10 steps for
KEYGEN, 20 for ENCRYPT and 10 for DECRYPT. Each step names one unit and its arguments:
- the unit: reader, NTT, datapath or divider,
- which RAM, the source slots and the destination slot,
- the reader mode and whether a load is bit-reversed,
- the datapath operation.

The controller pulses that unit's `start` and waits for its `done`. While a step runs,
the top level gives the RAM ports to the unit named in `cur.unit`. An assertion checks
that at most one unit is busy at a time.

The encryption program, as an example:

```
load a, p (bit-reversed) ; load message bits (encoded) ; sample e1 (bit-reversed), e2, e3
NTT a ; NTT p ; NTT e1
T1 = a .* e1 ; T2 = p .* e1 ; NTT T1 ; NTT T2
C1 = fold(T1) ; C2 = fold(T2) ; C1 += e2 ; C2 += e3 ; C2 += m~
store C1 ; store C2
```

The `reader` does all the traffic between the streams and the RAMs. It has five modes:
- load coefficients,
- load message bits (encoding them),
- load Gaussian samples,
- store coefficients,
- store decoded bits.

Bit-reversed loads write all 512 words of the slot, including the zero padding.

## Gaussian sampler: Knuth-Yao column scan

The error polynomials are drawn from a discrete Gaussian with s = 11.32, i.e.
sigma = s/sqrt(2π) ≈ 4.52. The sampler walks the Knuth-Yao discrete distribution
generating tree. It does this column by column over a probability matrix stored in a
ROM (`kyrom`).

The matrix:
- Row x holds the first 90 bits of the binary expansion of P(|X| = x).
- That probability is ρ(0)/S for x = 0 and 2ρ(x)/S for x > 0, where
  ρ(x) = exp(-x²/2σ²) and S is the sum of ρ over all integers.
- 55 rows cover about 12 sigma.
- Each ROM word is one column: 55 bits plus a 6-bit increment of the column length.
  The column length is 1 + the highest row with a one seen so far.
- The table is 90 words and sits in `rtl/kyrom.hex`.

The walk uses three sub-blocks:
- `distance` keeps the distance d. At each new column it draws one random bit and sets
  d = 2d + bit.
- `scanner` fetches the column word and presents one matrix bit per clock. It takes
  3 clocks to fetch a word.
- `row_col_ctrl` holds the up-counter `column_length` and the down-counter
  `row_number`. `row_number` starts from the column length at each column. Each clock,
  d is reduced by the current bit, for rows column_length-1 down to 0.

Outcomes:
- If d becomes negative, the current row is the sample magnitude. One more random bit
  gives the sign, and a negative sample is output as q - x.
- If the column ends first (`row_number` reaches 0), the next column is fetched.
- A walk that runs off the 90th column is restarted.

Random bits come from a Trivium keystream generator (`trivium`): 288-bit state, one
bit per clock after 1152 warm-up clocks. Each column costs one random bit plus one
clock per scanned row.

## Razor registers and the voltage control loop

`razor_ff` is a register of width W:
- The main register R samples `d` on `clk`.
- The shadow register S samples the same `d` on `dclk`, which is `clk` delayed by the
  Razor window T_del. `dclk` is supplied from outside.
- On the next `clk` edge, `err` is registered as (R != S).

If data arrives after R has sampled but before S does, the two disagree and `err`
rises. The register only detects; it does not replay or correct.

The top level places one Razor register on a representative output of each of the
fourteen subcomponents. It is a monitoring copy; the units keep using their own
registers. The error flags of the subcomponents in one partition are ORed together.
Subcomponent index and monitored signal:

| # | Subcomponent | Monitored signal |
|---|---|---|
| 0 | RAM 1 | RAM0 port A read data |
| 1 | RAM 2 | RAM1 port A read data |
| 2 | row column controller | row_number |
| 3 | distance | d |
| 4 | reader | write data |
| 5 | poly_add | sum |
| 6 | datapath controller | write data |
| 7 | scanner | valid, bit |
| 8 | ROM | word |
| 9 | polynomial multiplier | butterfly sum |
| 10 | NTT controller | address |
| 11 | convolution controller | program counter |
| 12 | poly_div | write data |
| 13 | random number generator | keystream bit |

`error_ctrl` keeps one millivolt setting per partition:
- Each setting starts at its calibrated value.
- It rises by `VSTEP_MV` (10 mV) in every clock in which its partition flags an error.
- It saturates at 1050 mV.
- `boost[k]` pulses with each step. `vccint_mv[k]` and `boost` are meant for an
  external regulator; the supply itself is not part of the RTL.

### Calibration of the starting voltages

The starting voltages come from the critical path of each subcomponent and the
partition map. They are computed at elaboration by `rlwe_pkg::calib_mv`:

1. For each partition k, take the average critical path CP_k of its members.
2. VP_k = Vmin + CP_k · (Vmax - Vmin) / Σ CP_j, with Vmin = 950 mV and Vmax = 1050 mV.

The default partition map and critical paths come from a K-Means clustering of the
fourteen critical paths into five partitions. Partition 1 is the datapath controller
alone, at 8.603 ns.

| Partition | Members (#) | Avg. CP | Start voltage |
|---|---|---|---|
| 0 | 0-5 (RAMs, row/col ctrl, distance, reader, poly_add) | 2.121 ns | 960 mV |
| 1 | 6 (datapath controller) | 8.603 ns | 991 mV |
| 2 | 7-8 (scanner, ROM) | 3.493 ns | 966 mV |
| 3 | 9 (polynomial multiplier) | 5.327 ns | 975 mV |
| 4 | 10-13 (NTT ctrl, conv ctrl, poly_div, RND) | 1.408 ns | 956 mV |

Other clusterings are set through the top-level parameters `NPART`, `PART` and `CP_PS`,
for up to 8 partitions. The same formula gives these starting points for three other
clusterings of the same fourteen paths:

| Clustering | Partitions (members by #) | Start voltages |
|---|---|---|
| Mean-Shift | {0-5, 10-13} {6} {7, 8} {9} | 959, 994, 968, 977 mV |
| DBSCAN (merged) | {0-5, 10-13} {6} {7, 8, 9} | 962, 1009, 978 mV |
| Hierarchical (merged) | {0-5, 10-13} {6, 9} {7, 8} | 964, 1006, 978 mV |

The Mean-Shift values match the published ones (0.96, 1.00, 0.97, 0.98 V) to within
6 mV. For the two merged three-partition layouts, the published settings are 0.96,
0.98 and 0.97 V. These do not follow from the formula; the RTL uses the formula.

The voltage range is set by the top-level parameters `VMIN_MV` and `VMAX_MV`. They
default to 950 and 1050 mV, the guard band of the commercial device. A wider range of
500 to 1300 mV, typical of academic FPGA models, gives K-Means starting points of 581,
828, 633, 703 and 553 mV. Settings are 11 bits wide, so up to 2047 mV.

## Timing

Measured in simulation at the default sizes:

| Operation | Clocks |
|---|---|
| Key generation | 29,772 |
| Encryption (256-bit message) | about 61,000 |
| Decryption | about 21,000 |

These counts include streaming the inputs and outputs. In the test, both streams stall
at random, so the counts are slightly pessimistic.

Most of the time goes to three parts:
- Transforms: 5120 clocks each. Encryption runs five.
- The non-pipelined datapath: 4 clocks per point-wise product word over 512 words, and
  3 clocks per add/subtract word.
- Sampling three error polynomials.

At an assumed 100 MHz this is roughly 0.42 Mbit/s of encrypted message. That is an
order of magnitude below the ~7.2 Mbit/s reported for the original implementation.
Closing that gap needs pipelining of the butterfly and of the datapath (one coefficient
per clock), and overlapping sampling with the transforms.

Synthesis with a generic flow gives for the top:
- about 760 word-level cells,
- about 1,100 flip-flop bits,
- 106,496 RAM bits (2 × 4096 × 13), plus the 208-bit stage-root table and the ROM.

## Where this design departs from, or adds to, the original description

The original describes the blocks, mostly by function. It gives the sampler's counter
structure and the calibration formula in more detail. The following are this design's
own choices:

- **Multiplication method.** The original says only that the multiplier is FFT-based.
  The 512-point cyclic transform, the forward-only inverse and the fold are this
  design's.
- **Reduction polynomial.** The ring is taken as x^256 + 1. The original text says f
  has degree n - 1, which cannot be right for this scheme.
- **Partition voltages.** Several values are quoted for the K-Means partitions. The
  calibration formula, with the running sum reset for each partition, gives 960, 991,
  966, 975 and 956 mV. These match the worked example in the original
  (0.96, 0.995, 0.965, 0.975, 0.955 V), and the RTL uses them. Elsewhere the last
  partition is given as 0.95 V or 0.94 V, and the second as 1.00 V.
- **Razor use.** Razor registers are monitoring copies of one signal per subcomponent.
  The Razor window comes from an external `dclk`. The voltage step is 10 mV.
- **Randomness source.** Trivium feeds the Gaussian sampler for every error
  polynomial, not only e3.
- **Sub_mod and the ROM.** Both are built. Sub_mod also appears in one version of the
  fourteen-component list, where the ROM appears in the other.
- **Throughput.** About 0.42 Mbit/s against ~7.2 Mbit/s, as described above.
- **Out of scope.** The voltage regulator, the generation of the delayed clock, and
  the physical floorplan partitioning are outside the RTL. Their signals are ports of
  `rlwe_top`.

## Files

Files in `rtl/`:

| File | Contents |
|---|---|
| `rlwe_pkg.sv` | constants, RAM request and micro-instruction types, `bitrev`, `modpow`, `calib_mv` |
| `rlwe_top.sv` | top level: sequencer, RAM port multiplexing, Razor monitors, error controller |
| `conv_ctrl.sv` | sequencer programs |
| `reader.sv` | stream ↔ RAM, message encode/decode |
| `ntt_ctrl.sv` | in-place 512-point NTT |
| `datapath_ctrl.sv` | point-wise product, add and subtract over RAM slots |
| `poly_div.sv` | fold modulo x^256 + 1 |
| `poly_mul.sv` | modular arithmetic unit |
| `poly_add.sv` | modular arithmetic unit |
| `sub_mod.sv` | modular arithmetic unit |
| `dp_ram.sv` | dual-port RAM |
| `gaussian_sampler.sv`, `scanner.sv`, `row_col_ctrl.sv`, `distance.sv`, `kyrom.sv`, `kyrom.hex` | Knuth-Yao sampler |
| `trivium.sv` | keystream generator |
| `razor_ff.sv` | Razor register |
| `error_ctrl.sv` | voltage setting per partition |

Each module has its own self-checking testbench in `tb/<module>_tb.sv`. Shared check
macros are in `tb/tb_util.svh`. Each testbench prints a final line
`TB_RESULT checks=N failures=M` and has a watchdog.

The end-to-end test `rlwe_top_tb` runs at the default parameters:
- It seeds the generator and generates a key pair from a random a and a small secret
  r2. It checks that r1 = p + a*r2 (a negacyclic product computed in the testbench)
  has only small, Gaussian-sized coefficients.
- It runs two encrypt/decrypt rounds with random messages and checks all recovered bits.
- All input and output streams stall at random.
- During one window it delays `dclk` by 3 ns, so edge-aligned changes look like late
  arrivals. It requires Razor errors in that window and none outside it. It checks that
  every partition that saw errors was stepped up, capped at 1050 mV.
- It counts each mechanism: transforms, products, additions, subtractions, folds,
  samples, input and output stalls, Razor errors and voltage steps.

`partition_configs_tb` runs five copies of the top on the same seed and inputs: one per
clustering above, plus K-Means in the wide voltage range.
It then:
- checks that their outputs are identical,
- checks each starting voltage against the formula, computed in floating point,
- checks each final voltage against the Razor errors its partition saw.

## Simulating

Run from the repository root. The ROM is read as `rtl/kyrom.hex` relative to the
working directory.

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -yrtl -ytb \
    rtl/rlwe_pkg.sv tb/rlwe_top_tb.sv --top-module rlwe_top_tb -o sim
./obj_dir/sim
```

Any other testbench is run the same way, replacing `rlwe_top_tb`. The full end-to-end
test runs in under a second.

Linting with `-Wall` leaves only these warnings:
- unused package constants, per module,
- the deliberately unread Razor main-register copies,
- the unread butterfly outputs of the multiplier instance in the datapath,
- a synchronous/asynchronous reset note on the RAM, which is not reset.
