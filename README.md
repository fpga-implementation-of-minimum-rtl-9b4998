# MMBEBHE in hardware: brightness-preserving histogram equalisation with integer arithmetic

Plain histogram equalisation (HE) raises contrast, but it also moves the mean
brightness of an image, sometimes a lot. Bi-histogram equalisation avoids much
of that shift. It splits the grey levels at a threshold T and equalises the
two halves separately: levels 0..T are spread over 0..T and levels T+1..255
over T+1..255. *Minimum Mean Brightness Error* bi-histogram equalisation
(MMBEBHE) picks T so that the output mean brightness is as close as possible
to the input mean.

This RTL computes that in integer arithmetic only. It takes an 8-bit grey
image and its pixel count and returns a 256-entry map from input grey level
to output grey level. Writing `map[pixel]` in place of every pixel gives the
equalised image. The design is a sequence of small serial engines, one for
each step of the algorithm, run one after the other by a driver state machine.

## The computation, step by step

Take n pixels, L = 256 grey levels and histogram `freq[k]` (the number of
pixels of level k).

1. **Histogram** (`generate_hist`). Reads one pixel per clock. It adds one to
   `freq[pixel]` and adds the pixel to a running `sum`, the sum of all pixel
   values.
2. **Scaled mean brightness error** (`calculate_smbe`). For each level k it
   computes an integer SMBE(k). This number is proportional to the difference
   between the input mean and the output mean you would get with threshold k:
   - a level that does not occur in the image gets the marker `0x7fffffff`,
     so it can never be chosen;
   - the first level that does occur gets `L*(n - freq[k]) - 2*sum`;
   - every later level that occurs gets `prev + (n - L*freq[k])`, where `prev`
     is the last value computed.
3. **Threshold** (`find_threshold`). T is the level with the smallest
   |SMBE|. The comparison is strict, so on a tie the lowest level wins.
4. **Cumulative histograms** (`gen_cumu_hist`, called twice). The running sum
   of `freq` is taken over [0, T] and then over [T+1, 255]. Each half starts
   again from 0, so `cumu_freq[T]` is the pixel count of the lower sub-image
   and `cumu_freq[255]` that of the upper one.
5. **Map** (`create_map`, called twice). Each half [l, h] with pixel count m
   is mapped by

       map[k] = l + q + (r > m/2 ? 1 : 0),   q = (h-l)*cumu_freq[k] / m,
                                              r = (h-l)*cumu_freq[k] mod m

   This is HE's `X0 + (X_{L-1} - X0) * c(k)` with the fraction kept as an
   integer quotient and remainder. The remainder test does the rounding, and
   `m/2` is a right shift. A level of one half can only map inside that half,
   so pixels never cross the threshold.

Everything is 32-bit integer arithmetic, except the map product, which is
40 bits wide so it cannot overflow.

## The SMBE recursion and absent grey levels

Steps 2 and 3 are the least obvious part of the design. They are also where
it departs from textbook MMBEBHE.

Written over every grey level, the SMBE recursion is
`SMBE(k) = SMBE(k-1) + n - L*freq[k]`, which has the closed form

    SMBE(k) = n*(L + k) - L*C(k) - 2*sum,      C(k) = freq[0] + ... + freq[k].

At k = 255 this is `2n*((L-1)/2 - mean)`, as it should be.

The hardware keeps `prev` on a register whose enable is `freq[k] != 0`. So a
level that does not occur stores the marker and leaves `prev` alone, and
the `+ n` that the recursion would add for it is lost. Every SMBE above a
run of absent levels therefore comes out lower by n times the number of absent
levels below it. On images without empty grey levels the two forms agree. On
images with empty ranges they can choose very different thresholds:

| image (simulated)                    | T, default | T, every level |
|--------------------------------------|-----------:|---------------:|
| uniform over 60..230                 | 61         | 109            |
| 90 % in 0..60, 10 % in 200..255      | 228        | 55             |
| uniform over 180..250                | 180        | 181            |
| uniform over 0..255                  | 132        | 132            |

The default (`PREV_ON_ABSENT = 0`) is the register-enable behaviour, which is
how the original hardware is described. `PREV_ON_ABSENT = 1`, a parameter of
`calculate_smbe` and of the top, runs the recursion over every level. The
base case then sits at level 0 and `prev` advances by n on an absent level,
which still stores the marker. This gives textbook MMBEBHE thresholds.
Choose with this table in mind.

## Top level: `mmbebhe`

```
            load_en/addr/data                    start, img_size
                   |                                   |
                   v                                   v
              +---------+   pixel   +---------------------------------------+
              | img_arr |---------->| generate_hist -> calculate_smbe ->    |
              | 64 Ki x8|<--addr----| find_threshold -> gen_cumu_hist x2 -> |--> map[256]
              +---------+           | create_map x2        (driver FSM)     |--> threshold, busy, done
                                    +---------------------------------------+
```

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `load_en`, `load_addr`, `load_data` | in | 1, ADDR_W, 8 | write one pixel of the image buffer per cycle, only while the engine is idle |
| `start` | in | 1 | one-cycle pulse; `img_size` is sampled with it |
| `img_size` | in | 32 | number of pixels, 1 .. 2**ADDR_W |
| `busy` | out | 1 | engine running |
| `done` | out | 1 | map valid; held until the next `start` |
| `threshold` | out | 8 | T |
| `map` | out | 8 x 256 | the equalisation map |

The histogram, SMBE, cumulative and map arrays live as register arrays inside
the stage that writes them. The next stage reads them through a multiplexer
indexed by its own loop counter. `gen_cumu_hist` and `create_map` are each one
instance that the driver starts twice, with the bounds [0, T] and then
[T+1, 255]. Each call writes only its own half, so the two halves add up to
one array. If T = 255 the upper call has the bound [256, 255] and does
nothing; the bounds are 9 bits wide for that reason. If the upper sub-image
has no pixels (m = 0), the divider is bypassed and its levels map to T+1.
They never occur in the image.

### Handshake and timing

Every stage has the same interface:

- a one-cycle `start` pulse;
- `busy` while it runs;
- `done`, which rises at the end and stays high until the next start.

The driver starts a stage on the cycle after it sees the previous stage's
`done`, so each hand-over costs two cycles. Latencies, counted from the start
edge:

| stage | cycles | at 300 MHz |
|-------|--------|-----------|
| generate_hist | n + 2 (one pixel per clock) | 207.7 us for n = 62,304 |
| calculate_smbe | 257 | 0.86 us |
| find_threshold | 257 | 0.86 us |
| gen_cumu_hist, both calls | 258 | 0.86 us |
| create_map, both calls | 258 | 0.86 us |
| whole engine, start to `done` | n + 1046 | 222 us for n = 65,536 |

The original implementation reports about 2.6 us for each of the four
256-level stages at 300 MHz. That is roughly three cycles per level, but the
reason is not documented. This RTL does one level per clock, so those stages
are about three times faster. The histogram time agrees: 207.68 us was reported
for the F16 test image, which is about 62,300 pixels at one per clock.

`create_map`'s 40-bit divider is combinational and sets the clock period. If
you need a fast clock, this is the place to add a pipelined or iterative
divider. The loop then runs at one level per several clocks.

## What follows the original design and what is this design's own

The following come from the published description: the five stages and their
order; one pixel per clock in the histogram; the serial, recursive SMBE with
its 32-bit `prev` register, `first` sentinel and `0x7fffffff` marker; the two
signed/unsigned comparisons of the threshold search; `idx_l + idx_offset`
indexing with the `index <= idx_h` loop in the cumulative histogram; the map
by integer division, modulus and a half-count right shift; and the two calls
with bounds [0, T] and [T+1, 255].

Choices made here, where the description is silent or unclear:

- **Image buffer.** `img_arr` is a 2**16-pixel memory with a registered read
  port (block-RAM style) and a write port for loading.
- **Handshake and reset.** The start/busy/done handshake, and the synchronous
  reset that clears all state.
- **Stage rate.** One grey level per clock in the four 256-level stages.
- **Call order.** Both cumulative-histogram calls run before both map calls.
- **Sub-image pixel counts.** These are taken from `cumu_freq[T]` and
  `cumu_freq[255]`.
- **Rounding.** The map rounds up when the remainder is *greater than* half the
  count. The written description says "greater than". The original schematic
  shows a `>=` comparator whose operands are not legible. "Greater than" is
  also the only one of the two that keeps a one-pixel sub-image inside its
  bound.
- **Widths.** The bounds are 9 bits, the map entries 8 bits, and the map
  product 40 bits.
- **Empty sub-image.** The guard for m = 0.
- **SMBE option.** The `PREV_ON_ABSENT` option.
- **Module split.** The stages stay separate modules under one top; the
  original implementation flattened them into one module.

Storage also differs. Here the three 256 x 32 arrays and the map are flip-flops,
about 27,000 flip-flop bits in all. The original implementation reports
952 registers and 608 LUTs used as memory, so it kept those arrays in
distributed RAM. Each stage reads and writes at most one entry of an array
per cycle, except for the clear of the histogram on start. So the arrays can
be moved into single-port RAMs, which would also remove the wide read
multiplexers.

Limits:

- The 32-bit signed SMBE arithmetic is exact for fewer than 2**23 pixels.
- The image buffer sets the real limit, 2**ADDR_W pixels, 65,536 by default.
  A 512 x 512 image needs `ADDR_W = 18`.

## Files

| file | contents |
|------|----------|
| `rtl/mmbebhe_pkg.sv` | widths (8-bit pixels, 256 levels, 32-bit data), types, the absent-level marker |
| `rtl/img_arr.sv` | image buffer |
| `rtl/generate_hist.sv` | histogram and pixel sum |
| `rtl/calculate_smbe.sv` | SMBE per level (with `PREV_ON_ABSENT`) |
| `rtl/find_threshold.sv` | smallest-magnitude search |
| `rtl/gen_cumu_hist.sv` | bounded cumulative histogram |
| `rtl/create_map.sv` | bounded equalisation map |
| `rtl/mmbebhe.sv` | driver and top |
| `tb/mmbebhe_ref_pkg.sv` | software reference model of every stage |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_mmbebhe_eq7.sv` | end-to-end test with `PREV_ON_ABSENT = 1` |

Each file opens with a comment on what it does, its interface and its timing.

## Simulating

Every testbench checks against the reference model in `tb/mmbebhe_ref_pkg.sv`.
It prints `TB_RESULT checks=N failures=M` and stops; a watchdog ends a hung
run. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/mmbebhe_pkg.sv tb/mmbebhe_ref_pkg.sv tb/tb_mmbebhe.sv \
    --top-module tb_mmbebhe -Mdir obj_tb_mmbebhe
./obj_tb_mmbebhe/Vtb_mmbebhe
```

Replace `tb_mmbebhe` with any other testbench name.

- **Stage testbenches.** These drive their block with crafted arrays: sparse and
  dense histograms, ties, T = 0 and T = 255, empty halves, and a million-pixel
  case. Each checks every output entry and the exact cycle count.
- **`tb_mmbebhe`.** Runs the top at its default parameters on ten chosen
  images, including a 62,304-pixel one and a full 65,536-pixel one, and on 24
  images of random size (1 to 4,000 pixels) and random grey range. It checks the
  threshold, all 256 map entries, the cycle count `n + 1046`, and that no
  pixel crosses the threshold. It also counts how often each mechanism
  happened: absent levels, a threshold with negative and with non-negative
  SMBE, round-up, an empty upper sub-image, T = 255, and a full buffer. A
  mechanism that never happened counts as a failure. The whole run takes well
  under a second.

The testbenches are not run on the F16 or Hands images used in the original
evaluation, because those images are not available here. The 62,304-pixel run
uses a synthetic image of that size. How closely the output matches a
floating-point MMBEBHE has not been measured beyond the reference model in
`tb/`.
