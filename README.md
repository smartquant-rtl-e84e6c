# SmartQuant: a CXL memory controller that serves weights at the precision the reader asks for

Inference hardware can compute at many precisions (FP16, FP8, FP4, ...), and the
importance of a transformer's weights changes from one input to the next, so it
pays to load each chunk of weights (an attention head, an MLP neuron) at a
precision chosen at run time. If the model sits in a CXL memory device as
ordinary FP16 words, a controller that converts on the fly still has to read
every bit from DRAM, so a 4-bit read costs as much as a 16-bit one.

SmartQuant fixes that with two ideas, both implemented here:

* **Bit-plane placement.** The FP16 model is stored as 16 bit-planes: plane *p*
  holds bit *15-p* of every weight, each plane in its own DRAM area. A read at
  *N* bits per weight fetches only about *N* of the 16 planes, so DRAM traffic
  (and energy and load time) scales with the precision.
* **A bloated logical address space.** The device shows the host one region per
  format: P1 (FP16), P2 (FP12), P3 (FP8), P4 (FP6), P5 (FP4), each holding the
  whole model packed at that width. Weights skipped by the host (FP0) take no
  space. To load a chunk of *l* weights at format *i*, the host simply reads
  *l·N_i* bits from region P_i with ordinary CXL.mem reads. No new command is
  needed. Only the *L·16* bits of FP16 exist physically.

This repository gives synthesizable SystemVerilog for the controller datapath
between a simplified CXL.mem transaction port and a DRAM line port. The CXL
link layers, the DDR5 controllers, PHYs and DRAM devices, and the host are not
part of it.

## Numbers and terms

| symbol | meaning | value here |
|---|---|---|
| L | weights in the model (`L_WEIGHTS`) | 30·10⁹ (an OPT-30b-sized model) |
| N_i | bits per weight in format i | 16, 12, 8, 6, 4, 0 |
| r_e, r_m | exponent / mantissa bits of a reduced format | see below |
| d_e, d_m | extra exponent / mantissa planes fetched for rounding | 0..2, per region, at run time |
| line | transfer unit on both sides | 64 bytes = 512 bits |
| block | 512 consecutive weights = one line of each plane | |

The full-precision word is IEEE half precision: sign, 5 exponent bits
`e[4:0]`, 10 mantissa bits `m[9:0]`. The reduced formats are FP12 = E5M6 and
FP8 = E5M2 (these are simply the top 12 and 8 bits of FP16), FP6 = E3M2 and
FP4 = E2M1. These splits are set in `rtl/sq_pkg.sv` (`fmt_desc`). They are a
choice of this design: the SmartQuant paper names only the formats.

## The logical address map

Regions lie end to end from address 0, in the order P1..P5. Region P_i holds
L·N_i bits. With the block as the unit, a block takes N_i lines in region i, so
the line address of line *j* of block *b* in region *i* is

    line = (L/512) · (N_1 + ... + N_{i-1}) + b · N_i + j,      0 ≤ j < N_i

and the byte address is `line · 64`. For L = 30·10⁹ (L/512 = 58,593,750
blocks):

| region | format | first line | lines |
|---|---|---|---|
| P1 | FP16 | 0 | 937,500,000 |
| P2 | FP12 | 937,500,000 | 703,125,000 |
| P3 | FP8  | 1,640,625,000 | 468,750,000 |
| P4 | FP6  | 2,109,375,000 | 351,562,500 |
| P5 | FP4  | 2,460,937,500 | 234,375,000 |

The whole space ends at line 2,695,312,500, which is byte 172.5·10⁹, against
60·10⁹ bytes of DRAM. Inside a line, packed weights run from the least
significant end: weight *w* of a block sits at bits `[w·N_i +: N_i]` of the
block's N_i·512-bit packed image, and line *j* is bits `[512j +: 512]` of that
image. With FP12 and FP6 a weight can straddle two lines. This is harmless
because the controller always builds whole blocks. `region_decoder` turns a line
address into (format, block, j). It compares the address with constant region
bounds and divides by a constant N_i in each region.

## Which bit-planes a read fetches

Plane *p* of block *b* is at DRAM line `DRAM_BASE + p · L/512 + b`, so every
plane is one contiguous L-bit area (`bitplane_map`). A read in format *i*
fetches 1 + (r_e + d_e) + (r_m + d_m) planes. The count is capped at the bits
that exist.

* sign: plane 0, always;
* mantissa: the r_m + d_m most significant mantissa planes (6, 7, ...);
* exponent, r_e = 5: all five planes 1..5;
* exponent, r_e < 5: the exponent MSB (plane 1), the r_e−1 exponent LSBs, and
  d_e of the *middle* exponent bits, starting from `e[3]` (plane 2).

With truncation (d_e = d_m = 0):

| format | planes fetched | count |
|---|---|---|
| FP16 | 0–15 | 16 |
| FP12 | 0–11 | 12 |
| FP8  | 0–7 | 8 |
| FP6  | 0, 1, 4, 5, 6, 7 | 6 |
| FP4  | 0, 1, 5, 6 | 4 |

So a block read at N_i bits moves exactly N_i DRAM lines instead of 16.

### Why the MSB and the low exponent bits are enough

Narrowing the exponent from 5 bits (bias 15) to r_e bits (bias 2^(r_e−1)−1)
means computing e' = e − 15 + bias'. For every value that fits in the narrower
range, the 5-bit exponent has the form `MSB, ~MSB, ..., ~MSB, low bits`, and e'
is just `MSB` followed by the low r_e−1 bits. Example for E3: 01101→001,
01111→011, 10000→100, 10011→111. So in-range values need no adder, and the
middle exponent planes never have to be read. For values out of range, the
middle bits break the pattern. Whichever middle planes are fetched (d_e of
them) reveal this: a middle bit of 1 under MSB = 1 means too large, and the
weight saturates to the largest magnitude. A middle bit of 0 under MSB = 0
means too small, and the weight is flushed to a signed zero. With d_e = 0 an
out-of-range value wraps around. That is plain truncation, the cheapest point
of the trade-off. It is only safe for chunks whose values lie in the narrow
format's range. Note that E3 and E2 formats cover only a few binades around 1.0.
This design applies no per-chunk scale factor.

## Conversion rules (`quant_convert`)

* **Truncation** (d_m = 0): keep the top r_m mantissa bits.
* **Rounding** (d_m = 1 or 2): round to nearest over the fetched bits, ties to
  even. The first extra plane is the guard bit and the second adds a sticky bit,
  so d_m = 2 tells a true tie from a value above half.
  Rounding works on `{exponent, mantissa}` as one integer, so a mantissa carry
  increments the exponent.
* Formats that keep 5 exponent bits (FP12, FP8) keep IEEE infinity/NaN codes:
  an all-ones exponent is never rounded, and rounding past the largest finite
  value gives infinity. FP6 and FP4 have no infinity and saturate instead.
* Values that land on target exponent 0 are not renormalised into target
  subnormals.

Only the fetched planes reach the converter. Unfetched bits are zero and are
never looked at. The testbenches check this against an independent arithmetic
model.

## How the controller serves requests (`smartquant_ctrl`)

The controller serves one host request at a time:

1. **Decode** the address (one cycle). An address past P5, or a write anywhere
   but P1, gets a response with `err` set and causes no DRAM access.
2. **Read, block-buffer hit.** The controller keeps one converted block (up to
   16 lines, 8192 bits) with its tag (format, block, d_e/d_m of the region). If
   the request falls in that block, the line is returned from the buffer.
3. **Read, miss.** `plane_fetch` issues one DRAM read per selected plane, one
   per cycle, with any number in flight. Data returns in order. Then
   `block_convert` rebuilds and converts 64 weights per cycle (8 cycles per
   block) and packs them into the buffer, and the lookup is retried and hits.
   Because a chunk is read sequentially, its first line costs the block's plane
   reads and the next N_i−1 lines are hits: **one DRAM line per host line.**
   The source states proportional DRAM efficiency as the goal, and this buffer
   is how this design reaches it with 64-byte host reads.
4. **Write.** The host loads the model by writing FP16 lines (32 weights each)
   to P1. `placement_writer` transposes each line into bytes `4j..4j+3` of the
   block's 16 plane lines, held in a one-block write buffer. The buffer is
   written to DRAM as 16 byte-enabled line writes in three cases: when all 16
   lines of the block are in, when a write to another block arrives, or before
   any read. So a read always sees every earlier write. A write also invalidates
   the read buffer if the buffer holds the same block. The write completion is
   sent once the line is in the write buffer.

Changing a region's d_e/d_m takes effect at the next miss. A buffered block
converted with the old setting no longer matches the tag.

### Timing

These counts are measured with an always-ready DRAM of read latency LAT. The
testbench checks the first two; the third was only observed:

* miss: P + LAT + 15 cycles from request acceptance to response valid, where P
  is the number of planes fetched (P + LAT + 2 for the fetch, 8 for the
  conversion, the rest for decode, retry and response);
* hit: 2 cycles;
* a read that must first flush the write buffer: 17 more cycles, at one write
  per cycle.

## Interfaces

All types are in `sq_pkg`.

* `host_req_valid/ready`, `host_req` (`host_req_t`): `op` (`HOST_RD` or
  `HOST_WR`), 52-bit byte `addr` (bits 5:0 ignored), 12-bit `tag`, 512-bit
  `wdata`. This is a stand-in for CXL.mem M2S Req/RwD after the link layers.
* `host_rsp_valid/ready`, `host_rsp` (`host_rsp_t`): `op`, `tag`, `err`,
  512-bit `rdata`. It stands in for S2M DRS (data) and NDR (completion). Once
  valid, the response holds until it is accepted. An assertion checks this.
* `dram_req_valid/ready`, `dram_req` (`dram_req_t`): `we`, 40-bit line `addr`,
  64 byte enables `be`, `wdata`. `dram_rsp_valid`, `dram_rsp_data`: read data in
  request order, no back-pressure. The DRAM controller behind this port is
  expected to interleave lines over channels and banks.
* `rcfg[6]` (`round_cfg_t`): d_e, d_m of each region.
* `stat_dram_rd_lines`, `stat_dram_wr_lines`, `stat_host_rd`, `stat_buf_hit`:
  32-bit counters.
* Reset: asynchronous, active low (`rst_n`).

Parameters of the top: `L_WEIGHTS` (default 30·10⁹, a multiple of 512) and
`LANES` (conversion lanes, default 64, divides 512).

## Files

`rtl/`:

| file | role |
|---|---|
| `sq_pkg.sv` | constants, format table, struct types |
| `region_decoder.sv` | logical address → (format, block, line in block) |
| `bitplane_map.sv` | plane set of a format; plane line addresses |
| `quant_convert.sv` | one-weight conversion from fetched planes |
| `block_convert.sv` | LANES converters, packing into the block buffer |
| `plane_fetch.sv` | DRAM reads of the selected plane lines |
| `placement_writer.sv` | FP16 host lines → bit-planes in DRAM |
| `smartquant_ctrl.sv` | top: request control, block buffer, DRAM port sharing |

`tb/`: one self-checking testbench per module (`<module>_tb.sv`), plus these
files:

* `sq_ref_pkg.sv`: an independent reference model of plane selection and
  conversion. It rebuilds the value the fetched planes show, then rebiases,
  saturates and rounds arithmetically.
* `dram_model.sv`: a sparse line memory with fixed latency and random stalls.
  It stands in for the DRAM side.
* `smartquant_ctrl_tb.sv`: runs the top end to end at its default size. It
  covers blocks at the start, middle and end of a 30·10⁹-weight model, every
  format, truncation and rounding, error cases and host back-pressure. It counts
  every mechanism: buffer hit and miss, full and partial write flush, flush
  before read, invalidation, setting change, rounding, saturation, flush to
  zero, error responses and back-pressure.
* `workload_opt30b_tb.sv`: loads ten chunks the size of an OPT-30b MLP neuron
  (7.2·10³ weights, rounded to 14 blocks) with format mixes averaging 1.6, 4.8
  and 8.0 bits per weight. It checks every line and that the DRAM lines read are
  14·ΣN_i. The DRAM traffic is 100 %, 60 % and 62 % of what fetching the same
  non-skipped chunks at full precision would cost. At 1.6 bits the only chunk
  loaded is an FP16 one, so there is no saving.

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

## Simulating

With Verilator 5 (the packages first):

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/sq_pkg.sv tb/sq_ref_pkg.sv rtl/*.sv tb/dram_model.sv \
      tb/smartquant_ctrl_tb.sv --top-module smartquant_ctrl_tb -Mdir obj
    ./obj/Vsmartquant_ctrl_tb

Replace the testbench and top module to run another test. Each test runs in
well under a second. The DRAM model is sparse, so the full 30·10⁹-weight
configuration simulates as fast as a small one. Lint with
`verilator --lint-only -Wall -Irtl rtl/sq_pkg.sv rtl/<module>.sv`.

## How far to trust it, and where it departs from the paper

Taken from the paper description:

* the region set and order;
* region sizes L·N_i, laid out contiguously;
* storage in 16 independent bit-planes;
* fetching 1+(r_e+d_e)+(r_m+d_m) planes;
* truncation when d_e = d_m = 0 and rounding when they are 1 or 2;
* FP0 chunks are never fetched;
* the evaluated model size (OPT-30b, 30·10⁹ weights).

This design's own choices:

* the exponent/mantissa split of FP12, FP8, FP6 and FP4;
* which exponent planes are read, and the use of the d_e planes for
  saturate/flush;
* round-to-nearest-even;
* the 64-byte line and the 512-weight block;
* the plane-major linear DRAM layout (the paper shows planes spread over
  pages of several banks but gives no mapping);
* the block buffer, and one request in service at a time;
* the whole write path (how the model gets into bit-plane form is not described
  in the paper);
* error responses, all handshakes and all latencies.

Not included:

* CXL PHY/link/transaction layers;
* the DDR5 channel controllers and PHYs, and the DRAM devices (4 channels of
  ten ×4 DDR5-4800 devices in the paper's evaluation);
* the host GPU and its importance predictors;
* the "traditional" full-word baseline the paper compares with.

The energy and latency figures of the paper come from DRAM simulation and are
not reproduced here. What is checked is the mechanism behind them: DRAM lines
read per block equal the planes of the format.

Known limits:

* One outstanding host request means no overlap between a block's conversion
  and the next block's fetch. A higher-throughput version would double-buffer
  the block.
* Values that become target subnormals are not renormalised.
* Only whole-line host transfers are supported (no partial-line writes).
* No per-chunk scale factor: FP6 and FP4 cover only values near 1.0 in magnitude.
