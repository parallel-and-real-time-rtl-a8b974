# Four-channel real-time Toeplitz post-processing for a CV quantum random number generator

A continuous-variable quantum random number generator samples quantum vacuum noise.
Its ADC samples are only partly random: classical noise and the detector leak
information an adversary could know. A randomness extractor removes that part. It
multiplies every block of `n` raw bits by a fixed random `m x n` binary Toeplitz
matrix and keeps the `m` result bits, where `m/n` is set by the min-entropy of the
raw data. This RTL does that multiplication in real time for four independent
channels. Each channel is one 16-bit ADC at 250 MS/s, i.e. 4 Gb/s of raw data. The
default sizes are `m = 1729` with `n = 2464, 2464, 2432, 2432` for channels 0 to 3,
which gives about 11.3 Gb/s of extracted output in total.

Two ideas make this fit in a mid-range FPGA:

1. **Split the matrix into sub-matrices.** The `m x n` product is split into
   `n/k` products of an `m x k` sub-matrix with `k` raw bits. One sub-product is
   done per clock and the results are XOR-accumulated. `k` is the number of raw bits
   that arrive per processing clock: `k = C*a/J = 250 MHz * 16 / 125 MHz = 32`.
   The hash keeps up with the ADC exactly, with no buffering beyond a small FIFO.
2. **Keep sub-matrices in memory, not in a shift register.** A Toeplitz matrix is
   fixed by `m+n-1` seed bits. Sub-matrix `t` needs only the window of seed bits
   `t*k .. t*k+m+k-2`. Sliding that 1760-bit window through a shift register would
   cost a lot of logic. Instead, every window ("sub-seed") is precomputed once and
   stored as one word of a 1760-bit-wide block RAM. The extractor then reads one
   sub-seed per clock. `b` seeds (default 4) are stored per channel, and each hash
   picks one of them at random with an LFSR. Seeds can also be replaced while the
   core runs.

## Data flow

```
 ADC ch c (250 MHz, 16 b) -> raw_fifo -> toeplitz_extractor -> out_packer -\
                                  ^  (k = 32 b/clk)   |  (1729 b per hash)      |
                          seed_l2_mem <- subseed_gen <- seed_l1_mem <- host    |
                                                      |                         |
                                               seed_monitor -> csr             v
   x4 channels ---------------------------------------------------> stream_arbiter
                                                                           |
 host (PCIe AXI4 master) -> axi_arbiter -> seed_l1_mem / csr               v
                                  \-----> DDR3 read window         dma_writer -> DDR3 ring
```

`qrng_top` instantiates four channels (generate block `g_ch`) and the shared
blocks. The PCIe core, the DDR3 controller and memory, and the analog front end
with its ADCs are not part of the RTL. Their signals are ports of `qrng_top`:

| Port group | Meaning |
|---|---|
| `adc_clk`, `adc_rst_n`, `adc_data[4][16]`, `adc_valid[4]` | ADC samples, ADC clock domain |
| `s_aw* s_w* s_b* s_ar* s_r*` | AXI4 slave (32-bit data) driven by the PCIe core acting as master |
| `m_aw* m_w* m_b*` | AXI4 write master (128-bit), DMA of random data into DDR3 |
| `m_ar* m_r*` | AXI4 read master (32-bit), host reads forwarded to DDR3 |
| `hash_valid[4]`, `hash_seed[4]`, `seed_update_req[4]` | observation: hash finished, seed index it used, renewal due |

`clk` is the processing clock. The sizes assume 125 MHz, at which `k = 32` matches
the ADC rate. Both resets are active-low and asynchronous.

## The hash, bit by bit

Number the seed bits `s[0] .. s[m+n-2]` and the raw bits of one block
`x[0] .. x[n-1]`. Raw word `t` holds `x[t*k] .. x[t*k+k-1]`, with bit 0 being the
earliest sample's LSB. Result bit `r` (0 .. m-1) is

```
h[r] = XOR_{i=0..n-1}  s[r+i] AND x[i]
```

The matrix element `(r, i)` depends only on `r+i`. Written with the rows in reverse
order, this is the usual Toeplitz matrix, constant along its diagonals. Split `i`
into `i = t*k + j`. Sub-product `t` then uses only `s[t*k .. t*k+m+k-2]`, the
sub-seed `u_t`, and gives

```
p_t[r] = XOR_{j=0..k-1}  u_t[r+j] AND x[t*k+j]          (submatrix_mult)
h      = p_0 XOR p_1 XOR ... XOR p_{n/k-1}             (toeplitz_acc)
```

Column `j` of the sub-matrix is the slice `u_t[j +: m]`. In hardware this is `k`
AND gates and a `k`-input XOR per result bit, for 1729 rows in parallel.
`submatrix_mult` computes this in one clock and registers it. `toeplitz_acc` loads
its register with the first sub-product of a hash and XORs in the rest. After the
last one it presents the 1729-bit result with `out_valid` for one clock.

For `k` to work with every channel, it must divide `n`, `m+n-1` and `m+k-1`. At the
default sizes `2464/32 = 77`, `2432/32 = 76`, `4192/32 = 131`, `4160/32 = 130` and
`1760/32 = 55`. These ratios are what the seed memories are sized from.

## Seed memories and sub-seed generation (the least obvious part)

Each channel has two memories:

| Memory | Width | Depth (default) | Holds |
|---|---|---|---|
| level 1, `seed_l1_mem` | `k` = 32 | `b*(m+n-1)/k` = 524 (ch 0,1), 520 (ch 2,3) | `b` raw seeds, written by the host |
| level 2, `seed_l2_mem` | `m+k-1` = 1760 | `b*n/k` = 308 / 304 | all sub-seeds, one per word |

Seed `y` occupies level-1 words `y*(m+n-1)/k + w`. Bit `q` of word `w` is seed bit
`s[w*k+q]`. Sub-seed `t` of seed `y` is level-2 word `y*n/k + t`, and bit `e` of
that word is `u_t[e] = s[t*k+e]`.

So level-2 word `t` is the concatenation of level-1 words `t, t+1, ..., t+W-1`, with
`W = (m+k-1)/k = 55`. `subseed_gen` builds it with plain memory operations and no
wide shifting:

- For each seed `y`, each sub-seed `t` and each slice `p = 0 .. W-1`, it reads
  level-1 word `y*(m+n-1)/k + t + p`.
- It writes that word into level-2 word `y*n/k + t`.
- The write-data bus always carries the 32-bit word copied 55 times side by side.
  Only the four byte enables of slice `p` (bits `p*32 .. p*32+31`) are set.
- From one write to the next, the byte-enable pattern moves left by `k/8 = 4`
  positions. The write address stays the same for the `W` writes that fill one
  sub-seed.

This is why the level-2 memory has byte enables, and why the controller costs only
a counter, an address adder and a shifting enable mask. The write is registered one
clock behind the read. A full run of `b*(n/k)*W` writes takes
`4*77*55 + 2 = 16,942` clocks, about 136 us at 125 MHz.

Renewing the seeds therefore means:

1. The host writes new seeds into level 1 while extraction goes on. Extraction
   reads only level 2.
2. The host starts generation for the channel (CTRL bit `c`).
3. The controller rewrites level 2 in place.

**Caveat.** A hash that is being computed while its sub-seeds are rewritten can use
some old and some new sub-seeds. The result is still a linear hash of the raw bits,
but its matrix is neither seed. The host can avoid this by renewing while the ADC
data is held off. The end-to-end testbench does this for full renewals, and checks
regeneration of unchanged seeds while data keeps flowing.

## Extractor pipeline and random seed selection

`toeplitz_extractor` has three stages for each accepted raw word:

1. **Address.** On the first word of a hash, the level-2 read address is
   `y*n/k`. `y` is the seed index: the 16-bit LFSR value is split into `b` equal
   intervals, which means `y` is its top `log2(b)` bits. On the other words of the
   hash the address is the start address plus `t`. The LFSR steps every clock;
   its value is sampled when the first word of each hash arrives.
   The raw word is delayed by one clock to line up with the memory's registered
   read.
2. **Multiply.** `submatrix_mult`, registered.
3. **Accumulate.** `toeplitz_acc`.

There is no back-pressure. Every valid raw word is hashed. `out_valid` rises two
clocks after the edge that accepts the last word of a hash. With a word every clock,
the rate is one 1729-bit result per 77 (or 76) clocks. `out_seed` reports `y` with
each result, so a checker can recompute it. Until the channel's sub-seeds exist
(`seeds_ready`) and extraction is enabled, the extractor is held idle and raw data
is discarded.

The LFSR is a 16-bit Fibonacci register with taps `0xB400`, maximal length.
Each channel starts from its own constant. `lfsr.sv` holds maximal-length taps for
widths 3 to 16, 20, 24 and 32.

## Raw data path: `raw_fifo`

Two 16-bit samples in the ADC clock domain make one 32-bit word, with the first
sample in the low half. Words cross into `clk` through a 16-deep asynchronous FIFO.
It uses Gray-coded pointers and two-flop synchronisers. The read side is a
valid-only stream, because the extractor always accepts. If the FIFO is full, a word
is dropped and a sticky overflow flag is set. This can only happen if `clk` is
slower than `adc_clk*16/k`.

## Output path: packer, arbiter, DMA, DDR3 ring

1729 is not a multiple of any bus width. So `out_packer` joins each channel's
results into a continuous bit stream, with bit 0 of each result first, and cuts it
into 128-bit words. It has a one-deep holding register and a bit buffer. A result
that arrives while the holding register is still full is dropped and sets the
packer's sticky overflow flag. That needs DDR3 to stall for more than a whole hash
time.

`stream_arbiter` merges the four channels' 128-bit words round-robin. The words in
DDR3 are therefore interleaved by channel. Nothing is stored that tells which
channel a word came from. For a random-number stream this does not matter.

`dma_writer` buffers 64 words. Whenever 16 unclaimed words are present, it issues
an AXI4 INCR burst of 16 beats of 128 bits. Bursts go to consecutive addresses of a
256 MiB ring that starts at DDR3 address 0. Up to 4 bursts may wait for their write
response. `DMA_PTR` is the ring offset up to which every burst has been
acknowledged, so the host may read up to it. The writer does not flush: a partial
burst waits for more data. At the default rates one burst is filled about every
5.7 clocks, and 128 bits per clock at 125 MHz is 16 Gb/s against the 11.3 Gb/s
needed.

## Host port: `axi_arbiter` and `csr`

The PCIe core is the only master. The arbiter sends each transaction to one slave,
chosen by its address:

| Address | Read | Write |
|---|---|---|
| `addr[31] = 1` | DDR3 address `addr[30:0]`, forwarded on `m_ar*/m_r*` | rejected, SLVERR |
| `addr[31] = 0, addr[20] = 0` | 0 | level-1 seed memory of channel `addr[19:18]`, word `addr[17:2]` |
| `addr[31] = 0, addr[20] = 1` | register `addr[7:2]` | register `addr[7:2]` |

INCR bursts are supported for both local reads and writes. There is one
transaction of each direction at a time.

Registers (32 bits):

| Index | Name | Contents |
|---|---|---|
| 0 | CTRL | W bits 3:0: start sub-seed generation for channel 0..3 (pulse). Bit 8: extraction enable (R/W) |
| 1 | STATUS | 3:0 generation busy, 7:4 seeds ready, 11:8 seed renewal due, 15:12 packer overflow, 19:16 raw FIFO overflow, 20 DMA write error |
| 2, 3 | THRESH_LO/HI | renewal threshold in hashes (48 bits) |
| 4 | DMA_PTR | acknowledged ring offset |
| 8..11 | HASH_CNT0..3 | hashes since the channel's last generation (low 32 bits) |

### Seed renewal policy

Reusing a seed for `N` hashes makes the security parameter grow as
`N*eps_hash + eps_seed`. The intended operation starts near `1e-50` and renews when
`1e-36` is reached, about once every 24 hours. `seed_monitor` counts hashes per
channel since the last generation. It raises the channel's renewal-due bit once the
count reaches the threshold. The host converts its security limit into a hash
count. The reset value, 140,259,740,260, is 24 hours of hashes at 77 clocks per hash
and 125 MHz. Generation clears the count.

## Where this departs from, or goes beyond, the published description

These parts follow the published design:

- the channel count and matrix sizes;
- splitting the product into `m x k` sub-products accumulated by XOR;
- the two memory levels, their widths and depths, and byte-enable sub-seed
  generation;
- the random start address from an LFSR divided into `b` intervals;
- the sequence address;
- the AXI4 arbiter with the PCIe core as master;
- DMA into DDR3;
- threshold-triggered seed renewal.

These are this design's own choices:

- `k = 32`, from the 125 MHz processing clock. The clock is assumed; the formula
  `k = C*a/J` is not.
- `b = 4` and the LFSR (16 bits, taps `0xB400`, per-channel start values).
- the bit orders: raw word packing, seed-to-memory mapping, and result bit order.
- the FIFO depth, the packer gearbox, round-robin merging, DMA burst and ring
  format, the address map and registers, the 32-bit host data width, and separate
  DDR3 read and write ports.
- the threshold expressed as a hash count.
- the hash that spans a seed regeneration (see the caveat above).

Not in the RTL:

- the optical and analog front end and the ADCs;
- the PCIe core and PHY;
- the DDR3 controller and memory. A behavioural model of the DDR3 controller's AXI
  ports is in `tb/axi_ddr_model.sv`.

The timing measures of the original FPGA build are also left out: routing
high-fan-out nets through global clock buffers and duplicating registers to cut
fan-out. In this RTL the raw word and the sub-seed each drive all 1729 rows from one
register. Duplicating them is left to the synthesis tool's fan-out options.

The statistical tests of the output (NIST, DieHard, TestU01) run on the host. The
resource figures reported for the original Kintex-7 implementation cannot be checked
here.

## Files

| File | Content |
|---|---|
| `rtl/qrng_pkg.sv` | shared constants: sizes, widths, register indices |
| `rtl/qrng_top.sv` | top level |
| `rtl/raw_fifo.sv` | sample packer plus asynchronous FIFO |
| `rtl/seed_l1_mem.sv`, `rtl/seed_l2_mem.sv` | level-1 and level-2 seed memories (level 2 with byte enables) |
| `rtl/subseed_gen.sv` | sub-seed generation controller |
| `rtl/lfsr.sv` | seed-selection LFSR |
| `rtl/submatrix_mult.sv`, `rtl/toeplitz_acc.sv`, `rtl/toeplitz_extractor.sv` | hash pipeline |
| `rtl/seed_monitor.sv` | hash counter and renewal flag |
| `rtl/out_packer.sv`, `rtl/stream_arbiter.sv`, `rtl/dma_writer.sv` | output path |
| `rtl/axi_arbiter.sv`, `rtl/csr.sv` | host port and registers |
| `tb/tb_<block>.sv` | self-checking testbench per block |
| `tb/qrng_top_env.sv`, `tb/tb_qrng_top.sv`, `tb/tb_qrng_top_full.sv` | end-to-end test, reduced and default sizes |
| `tb/axi_ddr_model.sv` | behavioural DDR3 controller (AXI4 slave, sparse memory, stall input) |

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. A
watchdog ends a hung run. With Verilator 5, compile from the repository root, with
the package first:

```
verilator --binary --timing -Wno-fatal --top-module tb_toeplitz_extractor \
    rtl/qrng_pkg.sv rtl/*.sv tb/tb_toeplitz_extractor.sv
./obj_dir/Vtb_toeplitz_extractor
```

For the end-to-end tests, add `tb/qrng_top_env.sv tb/axi_ddr_model.sv`.

**Block tests.** The reference values are computed independently: a bit-level
Toeplitz product from the whole seed, a software LFSR, and a model FIFO. The extractor
test also checks the two-clock latency and the one-result-per-`n/k`-words rate. The
sub-seed test compares every level-2 word with the seed window it should hold.

**`tb_qrng_top`** runs the whole core at `m = 129`, `n = 256, 256, 224, 224`, `k = 32`.
It:

1. writes seeds over AXI and waits for generation;
2. streams random ADC samples;
3. recomputes every hash from the raw samples and the seed index the core reports;
4. checks every 128-bit word written to DDR3 against the four expected bit streams.

It then makes each mechanism happen and counts it:

- random seed choice;
- renewal-due flag;
- regeneration while running;
- full seed renewal;
- DMA bursts;
- DDR3 back-pressure;
- host reads through the DDR3 window;
- packer overflow under a long DDR3 stall.

Both end-to-end tests also check the rate. While samples arrive every ADC clock,
consecutive results of a channel must be exactly `n/k` processing clocks apart.

**`tb_qrng_top_full`** runs the same scenario with every parameter at its default
(`m = 1729`, full `n`). It checks every hash and every DMA word. It reports
`2.807 + 2.807 + 2.844 + 2.844 = 11.30 Gb/s` of output at a 125 MHz clock. It
builds in well under a minute.

## Changing sizes

`M`, `N_CH`, `K` and `B_SEEDS` are parameters of `qrng_top`. Keep `k` a multiple of
8 and of the ADC width. `k` must divide every `n`, `m+n-1` and `m+k-1`. `b` must be
a power of two, so that the LFSR intervals are equal. The packer needs `m >= 128`.
Set `clk` to `250 MHz * 16 / k` or faster.
