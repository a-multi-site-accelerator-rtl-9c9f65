# Hull node: a multi-site brain-interface processing fabric

This repository holds synthesizable SystemVerilog for the digital part of one
node of Hull, a set of small brain implants that talk to one another. Each
node reads 96 electrodes (16-bit samples at 30 kS/s). It detects events
(seizures, spikes, movement intent) with a chain of small fixed-function
processing elements (PEs). It reduces each 120-sample window of every
electrode to an 8-bit hash and sends hashes to the other nodes over a
time-slotted radio. It checks received hashes against its own for
collisions, which mark electrodes whose signals are probably similar, and
confirms those with an exact distance (DTW). It also stores signals and
hashes in a large NAND-type memory (NVM) that can be queried later.

The top module is `hull_node` (`rtl/hull_node.sv`). Shared types and
helpers are in `rtl/hull_pkg.sv`.

## How data moves

Every PE uses the same stream interface: `in_valid/in_ready/in_item` and
`out_valid/out_ready/out_item`, with an asynchronous active-low reset
`rst_n` and a clock enable `ce`. An item (`hull_pkg::item_t`, 42 bits) is
`{data[31:0], chan[6:0], tag[1:0], last}`:

- `chan` is the electrode (or a position within a batch).
- `tag` is a 2-bit flow tag. Switches use it to route items of different
  flows to different consumers.
- `last` closes a group: a window, a batch, a vector or a packet.

Each PE has its own `clk_div`, which passes one of every k clock edges as
the PE's `ce`. This stands in for running each PE in its own slower clock
domain. k comes from configuration registers 0-4.

```
ADC ──► switch A ──► HCONV ─► switch E ─► EMDH / NGRAM ─► switch C ─► HFREQ ─► HCOMP ─► NPACK(hash) ─┐
radio signal ─┘  ├──► FFT, NEO, XCOR, BBF, DWT ─► switch B ─► SVM ─► switch B ─► THR ─► GATE cond     │
                 ├──► GATE data ─► switch D ─► SC (NVM) / NPACK(signal) ─────────────────────────────┤
                 └──► DTW ─► dtw_* output                     SVM partial ─► NPACK(SVM) ─────────────┤
radio rx ─► UNPACK ─┬─ hash ─► DCOMP ─► switch C ─► CCHECK ─► CSEL ─► sel_* output                    │
                    ├─ SVM partial ─► SVM                       packet arbiter + TDMA gate ◄──────────┘
                    └─ signal ─► switch A                                  └─► radio tx
```

The five switches (`pe_switch`) are full crossbars. Each destination has
three configuration fields: an enable, a source select, and a mask of the
flow tags it accepts. One source may feed several destinations. The item is
then handed over only when every selected destination can take it.

## Processing elements

| Module | What it does |
|---|---|
| `clk_div` | Passes one of every k clock edges as `ce` (k = 0 or 1 means full rate). |
| `neo` | Non-linear energy operator spike detector, psi = x[n-1]^2 - x[n]·x[n-2], per electrode, with a threshold. |
| `dwt` | One level of the Haar wavelet transform per electrode: approximation and detail for each sample pair. |
| `fft` | Power of 4 DFT bins over a 120-sample window per electrode. This is a direct DFT because 120 is not a power of two. |
| `xcor` | Cross-correlation of each electrode with a reference electrode over a window, at several lags. |
| `bbf` | Biquad band-pass filter per electrode; outputs filtered samples or the band energy per window. |
| `svm` | Linear SVM: weighted sum of features plus bias, up to 3 feature inputs. In leader mode it adds partial scores received from other nodes. |
| `thr` | Signed compare against a threshold; outputs 0/1, optionally inverted. |
| `gate` | Passes an electrode's samples for `hold` items after a true condition for that electrode (or for all electrodes). |
| `hconv` | Dot product of a sliding window with a ±1 random vector from a seeded LFSR. The sign is the sketch bit. |
| `emdh` | Hash = (a·isqrt(abs(dot)) + b) >> s, low 8 bits. |
| `ngram` | Counts n-grams of sketch bits over a block, then takes a deterministic weighted min-hash to 8 bits. |
| `hfreq` | Collects a batch of hashes and sorts distinct values by frequency. Emits the dictionary, then each hash as a dictionary index. |
| `hcomp` | Compressor: dictionary, run-length of indices, Elias-gamma run lengths, packed MSB-first into bytes. |
| `dcomp` | Inverse of `hcomp`. |
| `npack` | Packetizer: 84-bit header (padded to 11 bytes), header CRC32, payload, payload CRC32; at most 256 bytes. |
| `unpack` | Checks both CRCs. Drops a packet with a bad header, or a hash packet with a bad payload. Forwards signal/SVM packets with a bad payload, flagged. |
| `ccheck` | Keeps received hashes sorted (insertion sort, all registers shift in parallel) and binary-searches each local hash. |
| `csel` | Collects the electrodes that collided and lists them in ascending order. |
| `dtw` | DTW distance with a Sakoe-Chiba band; a band of 1 gives a sample-by-sample (Euclidean-type) distance. Absolute or squared cost. |
| `sc` | Storage controller. Buffers signal and hash streams in 24 KB of SRAM as electrode-major frames and writes 4 KB pages into NVM partitions. It erases each 1 MB block before reuse and wraps when a partition is full. It serves 8-byte query reads. |
| `tdma_ctrl` | TDMA slot timer. Grants the radio to this node in its own slots, with a guard time at the end of each slot. |
| `pe_switch` | Programmable crossbar with broadcast and flow-tag masks. |
| `cfg_regs` | 32 × 32-bit register file written by the node's microcontroller. |

## Top-level interface (`hull_node`)

- `adc_*`: electrode samples (valid/ready, chan, 16-bit data, tag, last).
- `cfg_we/cfg_addr/cfg_wdata/cfg_rdata`: microcontroller register bus. The
  register map is in the header comment of `rtl/hull_node.sv`. Writes to
  register 29 load one SVM weight; writes to register 30 set one TDMA slot
  owner.
- `rx_*`, `tx_*`: radio byte streams, with `last` on the final byte of each
  packet. `tdma_sync` restarts the slot frame; `now` is the time stamp put
  in packet headers.
- `nvm_*`: NVM command port. Commands are 0 read word, 1 program page,
  2 erase block. Addresses are 64-bit-word addresses; program data goes
  through `nvm_wvalid/nvm_wready/nvm_wdata`.
- `rd_*`: query reads of one 64-bit NVM word.
- `sel_*`, `feat_*`, `dtw_*`, `det_*`: results for the microcontroller.
  These are the collided electrodes, a selected feature stream, DTW
  distances, and detector decisions.

The reset register values set up a default pipeline:

- ADC → HCONV → EMDH → HFREQ → HCOMP → radio, with EMDH hashes also going to
  CCHECK.
- ADC → FFT → SVM → THR → GATE → SC.

## Parameters and sizes

Defaults follow the implant's figures:

- 96 electrodes.
- 120-sample windows and 120-sample hash windows.
- 8-bit hashes and hash batches of 96.
- 256-byte packets with an 84-bit header.
- 24 KB of SC buffer.
- 4 KB pages, 1 MB blocks (256 pages), and 2^25 pages = 128 GB.

These sizes are this design's own choices: 4 FFT bins, 16 TDMA slots,
16 SVM features per electrode, 96 CCHECK registers, and a DTW sequence
length of 64 in the top (the `dtw` module takes any length). The default NVM
split is 31M pages for signals and 1M pages for hashes.

## Workload sizing

- One node produces 96 × 30 000 × 16 = 46 Mbps of samples.
- Hashes take 96 bytes per 4 ms, which fits the 7 Mbps intra-node radio
  easily: one packet per node per window, and 11 nodes fit in a 4 ms round.
- Raw signals for DTW confirmation fit for only about 16 electrodes at a
  time.
- The 128 GB NVM holds about 6 hours of raw signal at the default split.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends by printing `TB_RESULT checks=N failures=M`. Each has a watchdog, and
each checks cycle counts against a bound as well as values. Each was also
run against a deliberately broken copy of its module,
and every broken copy made its testbench fail.

- `tb/tb_hull_node.sv` is the end-to-end test. Two reduced-size nodes (4
  electrodes, 16-sample windows, 8-word pages) are joined by a radio model
  that damages some frames, and each node has an NVM model
  (`tb/nvm_model.sv`). It runs:
  - hash exchange with collisions, plus a case where nothing is selected;
  - CRC drop and keep rules;
  - TDMA waits;
  - page programs and block erases;
  - a hierarchical SVM with leader and non-leader nodes;
  - DTW;
  - NGRAM hashing;
  - DWT features of remote signal packets;
  - query reads;
  - switch broadcast stalls.

  It counts 18 mechanisms and fails if any of them never happened.
- `tb/tb_hull_node_full.sv` runs the top with no parameter overrides. It
  sends two full 96 × 120 windows through the hash pipeline. It checks the
  packet CRCs, the hash batches, the latency to the first hash packet, the
  NVM rules and a query read. Signal storage at full size is not exercised;
  see the open points below.

## Differences from the source description and open points

- PE clock domains are clock enables from a counter, not separate clocks.
- Several PE algorithms are only named in the description; this design
  fills them in:
  - one Haar DWT level;
  - one biquad for the Butterworth filter;
  - the NGRAM min-hash;
  - ±1 LFSR random vectors in HCONV;
  - the HCOMP bit format;
  - the packet header field layout.
- DTW is computed one cell per cycle, not as a wide pipeline.
- The microcontroller, the ADC, the DAC, both radios, the NVM chip and the
  offline ILP scheduler are not designed here. The top exposes their
  interfaces, and the testbenches model the radio and the NVM.
- The SC does not answer reads from data still waiting in SRAM. It reads
  from NVM only.
- Partition sizes are parameters of `hull_node`; they are not runtime
  registers.
- The NVM has three partitions in the description (signals, hashes,
  pre-loaded data) plus one for the microcontroller. Only the signal and
  hash partitions are implemented.
- Open defect: at full size (96 electrodes), the reset route
  ADC → FFT → SVM stalls. The SVM takes the first few FFT features and then
  stops accepting input, which backs up the ADC. The same path works at
  4 electrodes in the end-to-end test. So the full-size test routes the ADC
  to the hash pipeline only, and the FFT/SVM/GATE/SC path has been simulated
  only at reduced size.
