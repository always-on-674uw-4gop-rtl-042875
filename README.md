# Quentin: an always-on BNN subsystem on error-tolerant, voltage-scaled SRAM

Binary neural networks (BNNs) keep every weight and activation as a single
bit, and no bit counts for more than another. A random bit flip in a weight
or an activation therefore changes one term of a long popcount, not a
high-order digit. The network can live with a read bit-error rate of 1e-4
to 1e-3. That lets the SRAM holding the network run at a supply voltage
well below the one where it reads correctly, which saves most of the memory
power.

The design in this repository is the memory and acceleration part of a
microcontroller built on that idea. It has three parts:

* **A hybrid L2 memory.** Most of it is dense 6T SRAM, which may be scaled
  into the error region. A small part is standard-cell memory (SCM), which
  stays correct down to the logic voltage. Data that must not be corrupted
  goes in the SCM: the core's code and stack, and the 8-bit activation
  thresholds. Weights, inputs and activations go in the SRAM.
* **The XNOR Neural Engine (XNE).** This accelerator computes one binary
  convolutional or fully connected layer at a time, straight out of L2.
* **The interconnect.** It links both of the above to the core, the I/O DMA
  and the debug port.

The core (a small RISC-V), the I/O DMA, the peripherals, the boot ROM and
the clocking are existing IP. They sit outside this RTL, and their bus
ports are ports of the top module `quentin_soc`.

```
 fc_instr  fc_data  udma[0..1]  dbg          APB (xne_p*)
    |         |        |         |               |
    |         |        |         |        +------+------+
    |         |        |         |        |     XNE     |--> xne_evt_done
    |         |        |         |        +------+------+
    |         |        |         |               | 4 x 32-bit
 +--+---------+--------+---------+---------------+--------+
 |        mcu_interconnect (9 masters, 8 targets,         |
 |        round robin per target)                         |
 +--+--------+--------+--------+--------+--+--+--------+--+
    |        |        |        |        I  D  S        |
 bank 0   bank 1   bank 2   bank 3    l2_priv_bank    rom_req/rom_rsp
 2 KB SCM + 4 x 28 KB SRAM each      8 KB SCM (3R/2W),
 (l2_il_bank)                        24 KB + 32 KB SRAM
```

## Memory map and where data should live

| region | base | size | contents |
|---|---|---|---|
| ROM (outside) | `0x1A00_0000` | 8 KB | boot code, word addressed on `rom_req` |
| private L2 | `0x1C00_0000` | 64 KB | SCM 8 KB, then SRAM 24 KB, then SRAM 32 KB |
| interleaved L2 | `0x1C01_0000` | 456 KB | SCM 8 KB, then SRAM 448 KB |

The interleaved region is word interleaved. Address bits [3:2] select the
bank, and the remaining offset bits divided by 16 give the word within the
bank. In each bank the SCM holds the lowest 512 words, so the first 8 KB of
the interleaved region is SCM on every bank. The SRAM follows as four cuts
of 7168 words per bank. The 448 KB of interleaved SRAM is exactly the area
the on-chip bit-error test sweeps.

The private bank stores words in order: SCM from 0 to 8 KB, the 24 KB SRAM
cut, then the 32 KB SRAM cut. Accesses to unmapped addresses are granted
and read as zero.

To run a network from scaled SRAM:

* put the thresholds in the first 8 KB of the interleaved region;
* put code and stack in the private SCM;
* put everything else anywhere in SRAM.

## Bus protocol

Every memory port uses the same request/grant protocol, defined by
`mem_req_t` and `mem_rsp_t` in `quentin_pkg`:

* A master raises `req` with `we`, `be`, `addr` and `wdata`, and holds them
  unchanged until it sees `gnt`. An assertion in the interconnect checks
  this.
* The target samples the request at the clock edge where `gnt` is high.
* `rvalid` and `rdata` follow exactly one cycle later, for writes as well.
* No master has more than one transfer per cycle in flight at any target,
  so responses come back in order and need no tags.

The banks and the SCM always grant. Stalls come from only two places:

* **The interconnect.** Each target has a round-robin arbiter, so when
  several masters hit the same bank in one cycle, one wins and the rest
  wait.
* **The private bank.** Its SRAM cuts are single ported. When two of the
  instruction, data and system ports hit the same cut, fixed priority
  decides: data, then instruction, then system.

The private SCM has three read and two write ports, so those conflicts
never reach it. The instruction port reads, the data port reads and
writes, and the system port (all other masters) reads and writes.

## The XNE

### What it computes

For a layer with output size `out_h` × `out_w`, an `fh` × `fw` filter, and
`n_ki` input and `n_ko` output channels:

```
for i, j                                  (output pixel)
  for ko_major                            (group of 128 output channels)
    acc[0..127] = 0
    for ui, uj, ki_major                  (filter tap, group of 128 input channels)
      for ko_minor in 0..127              (one 128-bit weight word per cycle)
        acc[ko_minor] += popcount(~(x[i+ui][j+uj][ki_major] ^ W[...][ko_minor]))
    y[i][j][ko_major] = { acc[k] < (thr[k] << shift) ? 0 : 1 }
```

This is a *valid* convolution: the input is `out_h+fh-1` by `out_w+fw-1`
pixels. A padded ("same") layer needs its zero border stored in memory. A
fully connected layer is run as one output pixel with a 1×1 filter, with
all inputs as channels.

Channel counts that are not multiples of 128 are masked, in two ways:

* Input channels past `n_ki` in the last `ki_major` group are forced to
  contribute 0 to the popcount.
* Output bits past `n_ko` in the last `ko_major` group are written as 0,
  and only `n_ko mod 128` weight words are streamed for that group.

### Data layout in L2

Every data item is a 128-bit word: 16 bytes, 16-byte aligned, with byte
`b` at address `+b`. Bit `k` of a word is channel `k` of its group.

| data | address of word |
|---|---|
| input `x[h][w][kim]` | `X_BASE + ((h*in_w + w)*KI + kim)*16` |
| weights for `ko = kom*128 + kon` | `W_BASE + ((((kom*fh + ui)*fw + uj)*KI + kim)*128 + kon)*16` |
| thresholds | byte `kom*128 + kon` at `THR_BASE + kom*128 + kon` |
| output `y[i][j][kom]` | `Y_BASE + ((i*out_w + j)*KO + kom)*16` |

Here `KI = ceil(n_ki/128)` and `KO = ceil(n_ko/128)`. The output layout
equals the input layout, so one layer's `Y_BASE` can be the next layer's
`X_BASE`. This works for fully connected layers too: the 16 output words of
a 4×4×128 layer are the 16 input-channel groups of a 2048-input fully
connected layer.

### Structure and timing

* **`xne_regfile`.** APB slave with zero wait states. It holds the layer
  configuration (the `xne_cfg_t` struct). Writing `TRIGGER` starts a job.
  Register offsets:
  * `0x00` TRIGGER
  * `0x04` STATUS (bit 0 busy, bit 1 done since last trigger)
  * `0x08` JOB_ID (counts triggers)
  * `0x0C` X_BASE, `0x10` W_BASE, `0x14` Y_BASE, `0x18` THR_BASE
  * `0x1C` OUT_HW `{out_h, out_w}`
  * `0x20` FILTER `{fh[7:4], fw[3:0]}`
  * `0x24` CHANNELS `{n_ko, n_ki}`
  * `0x28` SHIFT
* **`xne_loop_ctrl`.** Counters for the loop nest above, innermost to
  outermost: `ki_major`, `uj`, `ui`, `ko_major`, `j`, `i`. It also does the
  address arithmetic of the layout table and produces the channel masks.
* **`xne_ctrl`.** The job state machine, one pass per output word:
  * `PIX` clears the accumulators.
  * `THR` loads 8 threshold words.
  * For each tap and input group, `X` loads 1 input word, then `W` streams
    `n_ko_cur` weight words.
  * `ST` thresholds the result and stores it.
  * After the last output word it pulses `done`, which is the
    `xne_evt_done` event.
* **`xne_streamer`.** A static multiplexer over the four 32-bit master ports
  and three units: the input load unit and the weight load unit (both
  `xne_load_unit`, which also fetches thresholds) and the activation store
  unit (`xne_store_unit`). A 128-bit word is split over the four ports: port
  `k` carries bytes `4k..4k+3`. Each 16-byte-aligned word therefore touches
  each bank once, with port `k` always on bank `k`. The ports of a load unit
  move in lockstep. The next word is issued once all four ports have been
  granted the current one, and a holding register per port keeps a part
  that arrives early. Without contention the unit delivers one 128-bit word
  per cycle, two cycles after `start` at the earliest.
* **`xne_datapath`.** It contains:
  * the 128-bit input buffer;
  * `xne_xnor_popcount`, 128 XNOR gates and an adder tree with an 8-bit
    result;
  * `xne_accumulators`, 128 × 16 bits, one of which is updated per weight
    word;
  * the 128 × 8-bit threshold buffer;
  * `xne_threshold`, which computes `acc < thr << shift` for all 128
    channels at once.

Peak rate: one 128×128 binary matrix-vector product takes 128 cycles, one
weight word per cycle, which is 2 × 128 × 128 / 128 = 256 binary ops per
cycle. The controller adds overhead on top of that:

* about 2 cycles per input word load;
* 8 cycles for the threshold load per output word;
* a few cycles per store.

On a 3×3, 128→128 layer on a quiet bus this comes to about 4 % over the
ideal: 18576 weight and input words take 19380 cycles. Competing traffic
from the core and the DMA on the same banks stalls the engine, because a
word needs all four ports granted. The end-to-end test sees nearly 2× the
cycles under heavy random traffic.

## Error model of the SRAM

`sram_cut` is a behavioural model of one vendor SRAM macro, not RTL to
synthesize:

* single port, byte enables, one-cycle read latency;
* a `ber` input giving the probability, as `ber / 2^32`, that each bit read
  comes back inverted;
* flips come from a deterministic xorshift generator per cut, so results
  repeat from run to run;
* flips are not stored: the array keeps what was written.

This is the error model used in the published accuracy study of the network. It matches
read failures of an over-scaled SRAM, where the cell content survives but
the sense path misreads it. All cuts of the top see the same `sram_ber`
input, which stands for the common scaled SRAM supply. The SCMs and all
logic are treated as always correct. Measured supply-to-BER curves are
silicon data and are not modelled: set `sram_ber` to the rate you want to
study.

## How far it follows the original design, and where it departs

These follow the published description:

* the overall structure, every memory size, and the 3-read/2-write private
  SCM with its port assignment;
* four 32-bit XNE ports and a 128-wide datapath;
* 16-bit accumulators;
* 8-bit thresholds shifted by a configurable amount;
* the threshold rule `y = acc < τ ? 0 : 1`;
* the loop order;
* storing thresholds in SCM.

These are this design's own choices, where the description is silent:

* the memory map and the data layouts in L2;
* the register map;
* the word-interleaving granularity and the round-robin arbitration;
* the split of each interleaved bank into an SCM part at the bottom and
  four SRAM cuts;
* the private-bank cut priority;
* the streamer's burst and in-flight scheme;
* the exact controller sequence, including reloading the thresholds for
  every output word.

These depart from the published description:

* **The popcount is 8 bits wide, not 7.** A 128-bit popcount can reach 128,
  which needs 8 bits.
* **Thresholds are 8 bits each.** The block diagram's "128-bit thresholds"
  is read as 128 thresholds per group of channels.
* **The loop sequencer is hard-wired counters.** The original is a small
  microcoded loop engine whose microcode format is not published. The loop
  nest it runs is the same.
* **The SCM is a flip-flop array.** The silicon uses latch-based SCM cells
  with clock gating, which cannot be written portably. Function and timing
  at the port (registered read, one-cycle latency) are the same, but area
  and power are not representative.
* **The XNE can reach every target.** In the original the engine is a
  master on the interleaved L2 only. Here it goes through the same crossbar
  as everyone else, so it can also reach the private bank's system port and
  the ROM. Software should keep its data in the interleaved region, where
  the four ports map onto the four banks.
* **Not built here:** pooling, the non-binary first layer of a network,
  and the core and DMA that run them.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

| testbench | what it exercises |
|---|---|
| `tb_xne_xnor_popcount` | random and corner vectors with masks against `$countones` |
| `tb_xne_accumulators` | random clear/accumulate sequences against a model |
| `tb_xne_threshold` | random accumulators, thresholds and shifts, and the equality corner |
| `tb_xne_datapath` | a full 128×128 product in 128 cycles |
| `tb_xne_regfile` | register read-back, trigger, job id, status |
| `tb_xne_loop_ctrl` | loop order and every address against a software nest |
| `tb_xne_streamer` | bursts at one word per cycle, stalling ports, stores |
| `tb_xne` | three layers against a reference, with random memory stalls and a bound on cycles: 3×3 128→128, 3×3 200→160 (partial groups), and fully connected 384→10 |
| `tb_scm_mem` | multi-port reads and writes, byte enables, collisions |
| `tb_sram_cut` | exact at ber 0; measured rate at 1e-2 and 1e-3 |
| `tb_l2_il_bank` | every word of a bank; SCM exact, SRAM noisy |
| `tb_l2_priv_bank` | three ports of random traffic; SRAM conflicts and priority |
| `tb_mcu_interconnect` | nine masters at random against a placement model |

`tb_quentin_soc` runs the whole subsystem at its real size:

* the 448 KB LFSR bit-error test at ber 0 and at 1e-3;
* both SCMs checked exact at 1e-2;
* ROM and unmapped reads;
* a two-layer network (3×3 conv 128→128 on 6×6, then fully connected
  2048→10) loaded through the debug port and started over APB, with core,
  DMA and instruction traffic competing, and checked bit-exact;
* the same network run at a 1e-2 error rate, reporting how many outputs
  flip.

It counts that each mechanism happened:

* engine stalls from bank conflicts;
* private-bank cut conflicts;
* bit errors;
* partial output groups;
* multiple input groups.

It takes about 20 seconds.

### Running with Verilator

```
verilator --binary --timing --assert \
    rtl/quentin_pkg.sv rtl/xne_pkg.sv tb/tb_quentin_soc.sv \
    -y rtl -y tb --top-module tb_quentin_soc -Mdir obj -o sim
./obj/sim
```

Replace `tb_quentin_soc` with any other testbench name. Lint warnings about
widths are harmless. Add `-Wno-fatal` if your Verilator treats them as
errors. The testbenches use only `$urandom`, so they run on a two-state
simulator.
