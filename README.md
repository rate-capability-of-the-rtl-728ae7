# VMM3a readout chain for the RD51 Scalable Readout System

This is synthesisable SystemVerilog for the continuous readout path of the
VMM3a front end in the RD51 Scalable Readout System (SRS). The chain starts at
the VMM3a ASIC's digital pins on a hybrid and ends at the byte stream that the
Front End Concentrator (FEC) card hands to its Gigabit Ethernet/UDP sender.
The design has two goals:

* read each VMM3a at the highest rate its token-passing interface allows
  (one 38-bit hit every 112.5 ns, 8.9 Mhits/s per ASIC);
* give every hit an absolute time, although the ASIC only sends a 12-bit
  bunch-crossing ID (BCID) that wraps every 92.16 µs and reaches the FEC a
  variable time after it was digitised.

The code follows the ESS version of the hybrid firmware (Spartan-6 on the
hybrid) and of the FEC firmware (Virtex-6 on the FEC), as described for the
VMM3a/SRS rate studies. The top module `srs_top` holds one FEC with `N_HYB`
hybrids (8 by default). Each hybrid carries two VMM3a. The ASICs themselves
stay outside as pins.

```
  VMM3a pins           hybrid_top (x N_HYB)                 serial links            fec_top
 ───────────── ┌───────────────────────────────────┐   444.4 Mbit/s 8b/10b  ┌─────────────────────────────┐
 CKTK  <────── │ token_gen  (CKTK, 20-clock cycle) │                        │ fec_hit_rx (per VMM)        │
 data0/1 ────> │ vmm_readout (flag, CKDT, 19x2 DDR)│                        │  -> latency_logic (per VMM) │
 CKDT  <────── │   -> async_fifo 1024x40           │                        │  -> async_fifo 48b (per VMM)│
               │   -> hit_tx -> enc8b10b -> oser10 │ ── data, one per VMM ─>│  -> fair_scheduler 125 MHz  │
 CKBC  <────── │ ckbc_gen (44.4 MHz)               │                        │  -> sync_fifo 48b (FEC FIFO)│
 CKTP  <────── │ cktp_gen (177.7 MHz)              │                        │  -> udp_splitter (6 bytes)  │
 SRST  <────── │ hybrid_cmd_decoder <- link_rx     │ <── command, one ───── │  -> sync_fifo 8b (UDP FIFO) │──> udp_data
 cfg   <────── │ vmm_config (1728-bit image)       │     per hybrid         │ fec_timebase, fec_cmd_tx    │
               └───────────────────────────────────┘                        └─────────────────────────────┘
```

## Clocks

All clocks are taken to come from one reference with fixed phase. They are
inputs of `srs_top`, and the testbenches generate them.

| clock | frequency | used for |
|---|---|---|
| `clk_fec` | 44.4 MHz (22.5 ns) | FEC time base, link word clock, hybrid base clock, CKBC reference |
| `clk_bc2` | 88.8 MHz | CKBC generation on the hybrid (toggle) |
| `clk_proc` | 177.7 MHz | hybrid readout process: token, CKDT, data capture, CKTP |
| `clk_bit` | 444.4 MHz | serialiser / deserialiser bit clock (10 bits per `clk_fec` cycle) |
| `clk_125` | 125 MHz | FEC readout side: scheduler, FEC FIFO, UDP FIFO |

Both ends of a link run on clocks from the same source. Alignment is therefore
only a matter of finding the 10-bit word boundary (bit slip on the K28.5
comma). No delay tuning is modelled.

## Hybrid: reading the VMM3a token ring

The VMM3a passes a token through its 64 channels. A token pulse on CKTK asks
the next channel that holds a hit to send it. If that channel has one, the ASIC
raises data0 as a flag. If the ring reaches its end without a hit, no flag
comes: this is an *empty token*.

**`token_gen`** divides `clk_proc` by 20. This gives one readout cycle of
112.5 ns, exactly 8.9 M cycles per second. CKTK is high for 5 process clocks
(28 ns): the last clock of one cycle and the first four of the next. The
`phase` output (0–19) drives the rest of the readout. CKTK stops while
acquisition is off.

**`vmm_readout`** samples data0 early in each cycle.
- If data0 carries the flag, it enables CKDT for ten process clocks.
- CKDT is the process clock gated by an enable that is re-timed on the falling
  edge, so no glitches occur.
- On the two edges of each CKDT pulse, one bit is taken from data0 and one from
  data1. This gives 19 bit pairs, the 38-bit hit. The bits alternate between
  the lines: data0 carries hit bits 37, 35, …, 1 (starting with the flag) and
  data1 carries bits 36, 34, …, 0.
- The hit is padded with two zeros to 40 bits.
- It is written to the FIFO in the first clock of the next cycle, while the
  next token is already going out.

One hit per 20 process clocks therefore sets the hybrid's rate limit of
8.9 Mhits/s per VMM3a. The empty token at the wrap costs one extra cycle. A
burst of N hits in distinct channels thus takes (N+1) × 112.5 ns, and a full
64-channel burst takes 7.3 µs.

**`async_fifo`** (1024 × 40) carries the hits from 177.7 MHz to 44.4 MHz. It
uses Gray-coded pointers with two-flop synchronisers and a first-word
fall-through read port. A hit that finds the FIFO full is dropped and counted.

**`hit_tx` → `enc8b10b` → `oserdes10`** send each hit as five data characters,
most significant byte first. K28.5 goes out whenever the FIFO is empty.

At 444.4 Mbit/s a hit uses 50 line bits (40 payload bits), which matches the
ASIC readout rate of 8.9 Mhits/s.

The original hardware uses DDR SERDES at 222.2 MHz. Here the serialiser is a
single-rate 444.4 MHz shift register; the line rate is the same.

**Command side.** `link_rx` deserialises and aligns the command line from the
FEC. `hybrid_cmd_decoder` then interprets it. A command is one data character
that follows a K28.5:

| byte | meaning |
|---|---|
| `0x01` / `0x02` | acquisition on / off (starts and stops CKBC, CKTK and readout) |
| `0x03` | soft reset: one-clock pulse on the VMM3a SRST pin (resets the BCID counter) |
| `0x04` | test pulse: one CKTP pulse of 32 process clocks (180 ns) from `cktp_gen` |
| `0x10`, *v*, 216 bytes | configuration image for VMM *v* (1728 bits) |

`vmm_config` stores the 216-byte image in RAM and then shifts it out. The
shift uses `sck = clk/2`, byte 0 first, MSB first, with `cs_n` low. `ckbc_gen`
toggles on 88.8 MHz to give a 50 % duty 44.4 MHz CKBC. The command codes, the
frame layout and the serial configuration port are this design's own.

## FEC: giving every hit an absolute time

### Word formats

The FEC writes 48-bit words. Bit 47 tells the two kinds apart.

```
hit    : [47:10] 38-bit VMM3a hit (flag=1, thr, ch[5:0], adc[9:0], tdc[7:0], bcid[11:0] Gray)
         [ 9: 5] VMM-ID   (2 x hybrid + VMM on the hybrid)
         [ 4: 0] overflow offset, 5-bit two's complement: 0..15, -1, or -16 (invalid)
marker : [47]    0
         [46:42] VMM-ID
         [41: 0] 42-bit FEC timestamp in BC periods (22.5 ns)
```

### Time base and soft reset (`fec_timebase`)

When acquisition starts, the FEC runs three counters on `clk_fec`:
- a 12-bit BC counter `bc`;
- an overflow counter `ovf` that counts BC wraps from 0 to 15;
- a 42-bit timestamp `ts`.

A hit from the ASIC arrives `L` BC periods after it was digitised. `L` (the
*reset latency*) covers the hybrid pipeline, the FIFO and the link. To line up
the ASIC's BCID with `bc`, the FEC sends the soft reset when
`bc = 4096 - reset_latency` (4049 for the usual 47). The soft reset restarts
the ASICs' BCID counters. After that, a hit digitised at BCID *b* arrives
close to `bc = b`.

From that moment on, `accept` is high and hits are used. Each time `ovf`
returns from 15 to 0 (every 16 × 4096 × 22.5 ns = 1.47 ms), the time base
pulses `marker`. That pulse writes one marker per VMM, carrying the timestamp
of the first BC of the new 16-overflow period.

### Latency logic (`latency_logic`, one per VMM)

This is the core of the time reconstruction. A hit reaches the FEC with a
latency. It stays near zero for isolated hits and grows to 64 × 112.5 ns ≈
7.2 µs (320 BC) for the last hit of a full burst. Because of that latency, the
FEC's `bc` may already have wrapped since the hit was digitised. The BCID is
Gray decoded and compared with `bc`:

| condition | meaning | offset written |
|---|---|---|
| `bc >= bcid` and `bc - bcid < max_latency` | same overflow period | `ovf` |
| `bc < bcid` and `bcid - bc <= latency_jitter` | hit a little "early" (link jitter) | `ovf` |
| `bc < bcid` and `bcid + max_latency > bc + 4096`, `ovf > 0` | digitised before the last wrap | `ovf - 1` |
| same, `ovf = 0` | digitised before the last wrap, which also started a new marker period | `-1` |
| otherwise | latency outside the allowed window | `-16` (invalid) |

The time of a valid hit in BC periods is then:

`t = marker_timestamp + offset × 4096 + bcid`

Here `marker_timestamp` is the most recent marker of that VMM. An offset of
−1 refers to the period before that marker.

Both latency tests are strict. A hit is valid exactly when its latency is below
`max_latency`, on either side of a wrap. Markers and hits share the VMM FIFO.
A hit that arrives in the same cycle as a marker waits one cycle. This is safe
because hits arrive at most every five cycles. Counters report how often each
row of the table was taken.

### From 16 FIFOs to one Gigabit link

Each VMM has its own 48-bit `async_fifo` from 44.4 MHz to 125 MHz.
`fair_scheduler` is a round robin on `clk_125`. In each cycle in which the FEC
FIFO is not full, it pops the first non-empty VMM FIFO after the one it served
last. Every busy VMM is therefore served once before any is served twice.

`udp_splitter` cuts each word from the FEC FIFO (`sync_fifo`, 1024 × 48) into
six bytes, most significant first, for the UDP FIFO (`sync_fifo`, 4096 × 8).
The module's output is the UDP FIFO's read port. An Ethernet/UDP framer reads
it at 125 MHz.

The byte rate sets the system limit:
- 125 MB/s / 6 = **20.8 M words/s per FEC**;
- that is enough for two VMM3a (one hybrid) at full rate;
- it is not enough for 16.

Under overload the VMM FIFOs fill. Further hits are then dropped at the FIFO
input and counted (`n_dropped`); words already stored are never corrupted.

`fec_cmd_tx` sends the commands to a hybrid, with priority soft reset >
acquisition change > test pulse > configuration stream. Between commands it
sends K28.5. Acquisition state, soft reset and test pulse go to all hybrids at
once. Configuration frames go to the hybrids selected by `cfg_valid`.

## Top-level use

`srs_top #(N_HYB = 8, BC_BITS = 12)` has plain ports.

Slow-control settings are plain inputs:
- `acq_on`;
- `reset_latency` (usually 47);
- `latency_jitter` (about 4);
- `max_latency` (320);
- `test_pulse`;
- the configuration byte stream.

VMM3a pins are per hybrid (`ckbc`, `cktp`, `vmm_srst`) or per VMM (`cktk`,
`ckdt`, `data0`, `data1`, `cfg_sck/sdi/cs_n`).

The output is the UDP byte stream (`udp_rd`, `udp_data`, `udp_empty`).
Status counters per VMM report:
- hits read on the hybrid;
- hits dropped;
- hits in each latency class;
- markers;
- scheduler stall cycles.

Start-up sequence:
1. Hold `rst` for a few `clk_fec` periods.
2. Wait until `hyb_cmd_locked` and `fec_link_locked` are high (about 1 µs).
3. Optionally load configurations.
4. Raise `acq_on`.

The soft reset follows automatically on the first pass of the BC counter
through `4096 - reset_latency`.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>`. All checks are made against models or
against measured cycle counts:
- the 8b/10b encoder against known code words and the running-disparity
  and run-length rules;
- the decoder against the standard tables and against every symbol the
  encoder produces;
- the FIFOs against queue models under random push and pop;
- the token generator's 20-clock cycle and 28 ns CKTK;
- the readout's 10 CKDT pulses per hit and its (N+1) × 112.5 ns burst time;
- the latency logic against a model that works on absolute hit and arrival
  times;
- the scheduler's fairness;
- the link's lock at every bit phase, and its loss of lock on a corrupted
  line.

`tb/vmm3a_model.sv` is a behavioural model of the ASIC's readout interface.
It models:
- the token ring with the empty token at the wrap;
- the flag on data0;
- the bit order on the two lines;
- the Gray-coded BCID;
- the SRST reset.

The hybrid, FEC and system testbenches use it.

`tb_srs_top` runs the whole chain end to end:
- configuration;
- calibration of the reset latency from measured arrival times;
- random hits with 16-hit bursts timed to straddle BC wraps;
- deliberately late hits;
- test pulses;
- a back-pressure window with the UDP reader stopped.

It rebuilds the time of every hit from the UDP byte stream (marker + offset ×
4096 + BCID). It checks that this time matches the generation time to within
one BC; the measured deviation is zero. It
also counts each mechanism and fails if any of them never occurred: soft
reset, empty tokens, markers, each offset class, invalid hits, scheduler
stalls, test pulses. `tb_srs_top_full` runs the same bench on `srs_top` with
default parameters (8 hybrids, 12-bit BCID).

Run any testbench with Verilator 5:

```
verilator --binary --timing -y rtl -y tb rtl/srs_pkg.sv tb/tb_srs_top_full.sv --top-module tb_srs_top_full
./obj_dir/Vtb_srs_top_full
```

## Where this design departs from the original firmware

- **Serialiser.** It is single-rate at 444.4 MHz instead of DDR at 222.2 MHz,
  with ideal sampling. There are no IODELAY taps and no eye centring; only bit
  slip is used.
- **Own formats.** These are this design's own:
  - the order of fields in the 38-bit hit;
  - the bit placement of the 48-bit words;
  - the command codes and configuration framing;
  - the configuration serial port.

  Only the field sizes are taken from the published scheme.
- **Invalid-hit code.** The invalid offset is the 5-bit code `10000`. Read as
  two's complement this is −16; read as unsigned it is 16.
- **Same-period latency test.** It is strict (`<`), like the published
  previous-period test.
- **Sizes and rates.** The FEC FIFO sizes (VMM FIFOs 1024, FEC FIFO 1024,
  UDP FIFO 4096) and the test-pulse width are chosen here. The hybrid FIFO
  depth (1024) and all clock rates follow the original.
- **Not included.** The VMM3a analogue and digital core, clock generation,
  Ethernet/UDP framing, the slow-control protocol and the DVMM/HDMI adapter.
  The ASIC's readout interface exists only as the behavioural model used by
  the testbenches.
