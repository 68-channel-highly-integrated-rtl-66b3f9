# Neural-signal processing core for a 68-channel recording PSoC

An implanted neural recorder cannot send the raw data of many electrodes
out of the body. At 20 kHz and 9 bits per sample, 68 channels already make
12 Mbit/s, and the radio or serial link costs far more energy per bit than
computing on chip. This design is the digital core of such a recorder, from
the delta-sigma bit streams of the 68 analog front ends up to a tagged
off-chip word stream. Its main idea is to reduce the data where it appears:

* Each channel runs its modulator slowly while nothing happens. It switches
  to a high bandwidth only while its own spike detector sees spikes
  ("activity-dependent wake-up", ADW).
* A central **bio-signal processing unit (CBPU)** does the processing. Its
  controller takes one sample of every channel per frame and hands the
  selected channels to a set of functional units. Which units receive them
  depends on a command, C1..C9. The units are:
  * a compression engine for action potentials (**ICE**, lossless or
    near-lossless);
  * a cross-channel compressor for local field potentials (**CCE**);
  * a 16-channel **FIR** filter bank;
  * a **spike raster** generator;
  * an **adaptive threshold estimator** (**ATE**).
* A small processing element (PE) trains and tunes all of this. It is
  32-bit RISC-V class, with 128 KiB of SRAM, a multiply-accumulate
  accelerator for spike-sorting features, a timer, a wake-up controller and
  a memory self test. It also runs spike sorting.

The RTL covers all digital logic except the processor core itself. The
core's memory port and its configuration bus are the ports of the top
module, `psoc_top`. So are the analog parts and the serial link.

Everything runs on one 5 MHz clock. A *frame* is one sample of every
channel: 256 clock cycles, or 19.53 kHz.

## Top level

```
 dsm_bit[68] ──► 68 × adw_channel ──FIFOs──► cbpu_ctrl ──► tx_valid/tx_ready/tx_word
 mod_en/hb_mode ◄─┘  (filter, detector,        │  ▲  u_* sample broadcast
                      mode switch)             ▼  │
                                   ice  cce  fir  spike_raster  ate
                                               │
 p_* (processor) ──► pe_sram (4 × 32 KiB, crossbar) ◄── mac_unit, mbist, cbpu, apb_mem_window
 APB ──► apb_regs ──► every setting; per_* ──► mac_unit, pe_timer, wakeup_ctrl, mbist
 ext_irq, sleep_req ──► wakeup_ctrl ──► core_irq, core_clk_en
```

`psoc_top` has the following ports:

* Per channel: `dsm_bit` in, `mod_en` and `hb_mode` out. `mod_en` is the
  modulator clock enable; `hb_mode` is the bandwidth mode.
* A processor memory port `p_*`. It uses request/grant, 15-bit word
  addresses, byte enables, and returns read data one cycle after the grant.
* An APB3 slave for configuration, with 4 KiB of address space.
* The interrupts and clock gate for the core: `core_irq` and `core_clk_en`.
  Its inputs are `sleep_req`, `ext_irq[3:0]`, `cbpu_irq` and `mac_irq`.
* The off-chip stream `tx_*`.
* The debug output `sr_timer`, the raster time counter.

## Front end: `adw_channel`

Each of the 68 channels has four parts:

* **Clock gate/divider.** In low-bandwidth mode the modulator is enabled
  every fourth cycle (1.25 MHz). In high-bandwidth mode it is enabled every
  cycle (5 MHz).
* **Decimation filter** (`decim_filter`):
  1. A third-order CIC decimator with ratio 16 in low and 64 in high
     bandwidth. Both modes therefore reach the same 78.125 kHz.
  2. Two half-band stages, `hb_decim2`. Each halves the rate, with
     coefficients [-1 0 9 16 9 0 -1]/32, and computes only the outputs it
     keeps.
  3. A selectable high-pass: off, about 1 Hz, or about 300 Hz. It is a
     one-pole form, y = x − d with d += (x − d)/2^s.
  4. In low-bandwidth mode only, a one-pole low-pass, lp += (x − lp)/2.
     It limits the band to about 2.2 kHz (−3 dB). In high bandwidth the
     19.53 kHz output rate alone sets the band, to about 9.8 kHz.
  5. Saturation to 9 bits.

  A mode change waits for the next CIC output, so one decimation never
  mixes two ratios. The next three CIC outputs repeat the last value while
  the comb stages refill.
* **Spike detector** (`spike_detector`). It flags a sample when two tests
  both pass: |x| exceeds the amplitude threshold, and the nonlinear energy
  x(n−1)² − x(n)·x(n−2) exceeds the NEO threshold. A flag keeps the
  channel in high bandwidth for `hold_len` further samples. The thresholds
  are registers, and command C9 can rewrite them from the ATE.
* **FIFO** of four {sample, flag} entries towards the CBPU. A sample that
  finds the FIFO full sets a sticky overflow bit.

## CBPU controller: `cbpu_ctrl`

### Frame scan

* **Normal mode.** The controller visits channels 0..67 in order and pops
  exactly one sample from each FIFO. It waits for a sample if none is
  there, so all channels stay aligned in time.
* **Debug mode.** The controller reads the samples of the selected channels
  from PE SRAM instead, one word per sample (bit 9 = flag, bits 8:0 =
  sample). It paces them at one frame per `dbg_period` cycles. Debug mode
  lets the processor replay recorded or synthetic data through every
  functional unit.

Only channels selected in `ch_en` are broadcast to the units (`u_valid`,
`u_ch`, `u_data`, `u_det`), with the enables the command needs. C8 and C9
pass only the single channel `ate_ch`.

### Commands

| Cmd | Units | Result goes to |
|-----|-------|----------------|
| C1 | none | PE SRAM, `mem_len` words from `mem_base` (recording for training) |
| C2 | none | stream, raw samples; a frame header every `pkt_period` frames |
| C3 | ICE | stream |
| C4 | CCE | stream |
| C5 | FIR | stream |
| C6 | FIR | PE SRAM |
| C7 | spike raster | stream |
| C8 | ATE | stream |
| C9 | ATE | spike-detector threshold registers of `ate_ch` |

A command runs until `n_frames` frames are done, until C1/C6 have written
`mem_len` words, or until a stop (`n_frames` = 0 means run until stopped).
At the end the controller flushes ICE and CCE, drains the stream FIFO and
pulses `done`. The `done` pulse is the CBPU interrupt, which can wake the
processor.

### Stream format and back-pressure

Stream words are 37 bits, `{tag[3:0], idx[6:0], payload[25:0]}`:

| tag | meaning | idx | payload |
|-----|---------|-----|---------|
| 0 | raw sample (C2) | channel | {flag, sample[8:0]} |
| 1 | frame header (C2) | 0 | frame number |
| 2 | ICE word | slot | 16-bit code word |
| 3 | CCE word | 0 | 16-bit code word |
| 4 | FIR output | channel | 26-bit result |
| 5 | spike raster word | 0 | 16-bit packet word |
| 6 | ATE threshold | channel | threshold (saturated to 26 bits) |

The words pass through a 32-entry FIFO. In **batch** mode they leave only
in groups of `batch_len`, with the remainder sent at the end; otherwise
they stream out. The scan pauses while fewer than 8 FIFO places are free
or an SRAM write is still waiting for its grant. Back-pressure therefore
goes from `tx_ready`, through the channel FIFOs, back to the front ends.
A channel FIFO that overflows is reported, never silently stalled.

## Intra-channel compression engine: `ice`

This is the most involved block. It has 16 compression slots:

* Slots 0–7 use arithmetic coding (AC).
* Slots 8–15 use Golomb–Rice coding (GC).

A slot is assigned to any channel by a register, so any 16 of the 68
channels can be compressed at once, each with the coder chosen for it.
Every slot sees the tagged sample stream and takes only its own channel.

### Slot data path (`ice_slot`)

```
sample ─► 32-entry buffer ─► DPCM2 ─┬─► AC: ac_encoder (table in shared SRAM) ─┐
           │ near-lossless:         └─► GC: zig-zag ─► golomb_enc (k from gc_adapt) ┤
           └─ discarded samples counted by RLE ─► RLE parts coded first ───────┘
                                                          bit_packer ─► 16-bit words
```

* **Buffer (32).** It is a shift register, so the oldest not-yet-committed
  sample can be dropped.
  * In **lossless** mode every sample is committed for coding at once.
  * In **near-lossless** mode samples wait in the buffer as history. When
    the buffer is full the oldest one is discarded and counted by the
    run-length counter. A sample flagged by the spike detector opens a
    **64-sample window**. The window consists of the history still in the
    buffer (at most 31 samples plus the flagged one), followed by the
    samples that arrive until 64 are committed. Everything between windows
    is therefore treated as zero. A decoder rebuilds the signal from the
    run lengths and the windows: spike positions and shapes come back
    exactly, and the gaps are zero.
* **RLE.** Before each window the engine codes the run length. It is split
  bitwise into 2 or 3 parts of 9 bits, most significant part first, chosen
  by a register bit. These parts go through the same entropy coder as
  samples: AC codes each as a symbol, and GC sends it as `0` + 9 raw bits
  (k = 9). A decoder thus reads groups of 66 or 67 symbols: 2 or 3 run
  parts, then 64 samples.
* **DPCM2.** It computes e(n) = x(n) − 2x(n−1) + x(n−2) modulo 2^9, so a
  9-bit residual still reconstructs exactly. The history is cleared at each
  window start.
* **Golomb path.** The residual is zig-zag mapped (signed → unsigned).
  `gc_adapt` chooses k as the smallest value with N·2^k ≥ A, using running
  sums that are halved every 64 symbols. If more than half of the recent
  symbols were zero, k is forced to 0. `golomb_enc` emits a Rice code, with
  an escape (quotient limit, then raw bits) that bounds the code length.
* **Arithmetic path.** `ac_encoder` is a static binary arithmetic coder. It
  uses 16-bit code registers, Witten–Neal–Cleary renormalisation with one
  output bit per cycle, and a 14-bit frequency total. For each symbol it
  reads two cumulative counts, cum[s] and cum[s+1], from
  **`ac_freq_sram`**. That memory is 1024 × 16 bits (2 KiB) and shared by
  the 8 AC slots through a round-robin read arbiter. It holds two
  512-symbol tables, and each AC slot picks one with `ac_tbl`. The
  processor trains the tables and writes them through register 33. A
  symbol takes about 4 + 2·16 cycles plus pending bits, within the budget
  of about 120 cycles per symbol.
* **Packing.** `bit_packer` collects code words into 16-bit words, first
  bit at bit 15.
* **Flush.** `flush` drains the committed samples. It cuts any open window
  short, terminates the arithmetic code and pads the last word;
  `flush_done` then pulses.
* **Output.** A round-robin **data wrap** collects the words of the 16
  slots and outputs `{slot, word}`.

### Real-time budget

Near-lossless is the demanding case. A window releases up to 32 buffered
samples at once, and they must be coded while new ones arrive. At 5 MHz a
frame leaves 256 cycles per sample, which covers an AC symbol even with
the catch-up. If a slot still falls behind and its buffer fills with
committed samples, it drops the input and sets a sticky per-slot overflow
bit (STATUS[31:16]).

## Cross-channel compression engine: `cce`

The CCE compresses local field potentials. These are slow and strongly
correlated between neighbouring electrodes.

* **Align module.** Eight lanes take eight selected channels. The lane
  buffers (depth 8) start filling only at a sample of the lowest selected
  channel, so each buffered frame holds one time instant for all lanes.
* **Decorrelation.** Each lane is first decorrelated in time,
  e = x(n) − x(n−1). It is then decorrelated in space against its parent
  lane: r = e − round(γ·e_parent), with γ in signed Q4.8. One lane is the
  root and sends e unchanged.
* **Training.** The processor finds the parent chain (a spanning tree, so
  there are no loops) and the γ values from recorded data (C1), then
  writes them to registers.
* **Coding.** The eight residuals are zig-zag mapped, coded by one shared
  Golomb–Rice coder with k from a register, and packed into 16-bit words.

## Filters, raster and threshold estimator

* **`fir` / `fir_tap`.** There are 16 FIR channels of order 15 that share
  16 signed 16-bit coefficients. Each channel has 9 × 16 products and a
  sum saturated to 26 bits. A mapping table assigns any input channel to
  a tap and maps the result back to its channel index. C5 streams the
  results; C6 stores them in SRAM.
* **`spike_raster`.** It collects the 68 detection flags of a frame into a
  mask. A frame without spikes gives one word `{0xE, time[11:0]}`. A frame
  with spikes gives `{0xA, time}` followed by 5 mask words, channel 0
  first. A round that ends before the previous packet has left sets an
  overrun flag.
* **`ate`.** It estimates a detection threshold for one channel in five
  steps:
  1. A first-difference high-pass.
  2. The optional NEO, ψ = h(n−1)² − h(n)·h(n−2).
  3. A zero-crossing count over 2^w samples, compressed to
     floor(log2(count)).
  4. A noise estimate from the low-passed signal:
     ne = mean + 2·|max − min|.
  5. The average of ne·zc over 4^b windows.

  The result can be streamed (C8) or written into the channel's amplitude
  or NEO threshold (C9).

## Processing element side

* **`pe_sram`.** 128 KiB in four banks of 8192 × 32 bits (`sram_bank`),
  behind a crossbar with one round-robin arbiter per bank. Masters on
  different banks are served in the same cycle; a master that loses keeps
  `req` high. The masters are: 0 = processor, 1 = MAC, 2 = CBPU, 3 = MBIST,
  4 = APB window (`apb_mem_window`). The window lets any bus master move
  blocks of words with one address write followed by data accesses. It
  inserts APB wait states (PREADY low) until its crossbar request is
  served.
* **`mac_unit`.** Computes C = A·Bᵀ: feature vectors from spike vectors
  (for example PCA projections). A, the feature matrix (up to 8 × 64, 16
  bit), is read once into an internal register file. It is re-read only
  when CTRL.reload is set, so inference reads only the 9-bit samples of B.
  Eight cells multiply 9 × 16 bits signed into 32-bit accumulators, and
  the results go back to SRAM. An interrupt signals completion.
* **`pe_timer`.** A 32-bit counter with compare, auto-reload and an
  interrupt.
* **`wakeup_ctrl`.** Captures rising edges of nine sources into a pending
  register. The sources are: timer, MAC, CBPU done, APB access, 4
  external lines, and MBIST done. An enabled pending source raises
  `core_irq`. The core sleeps via `sleep_req` or a CTRL write;
  `core_clk_en` is low while it sleeps, and it wakes on the next enabled
  event.
* **`mbist`.** Runs March C- over a programmable address range through its
  own crossbar port and records the first failing address.

## Register map (`apb_regs`)

The register file is zero-wait-state APB3; only the SRAM window (words
588/589) can stretch a transfer. Word addresses are PADDR[11:2].

| Word | Content |
|------|---------|
| 0 | CTRL: b0 start, b1 stop (pulses); read b0 busy |
| 1 | STATUS: b0 done (w1c), b1 CCE overflow, b2 raster overrun, b3 ADW FIFO overflow, [31:16] ICE slot overflow |
| 2 | CMD: [3:0] command, b4 debug, b5 batch, [13:8] batch length, b16 C9 → amplitude (else NEO), [30:24] ATE channel |
| 3 | frame-header period (C2) |
| 4–6 | channel enable [31:0], [63:32], [67:64] |
| 7–11 | SRAM base, SRAM length, debug base, debug period, number of frames |
| 16 | [1:0] high-pass select, [15:8] high-bandwidth hold length |
| 17–19 | force high-bandwidth mask |
| 20 | any write clears the ADW overflow flags |
| 32 | ICE: b0 near-lossless, b1 3-part RLE, [15:8] AC table per AC slot, [31:16] slot enable |
| 33 | AC table write: [25:16] address, [15:0] value |
| 48–63 | ICE slot channel |
| 64 | CCE: [2:0] root lane, [7:4] k |
| 72–79 | CCE lane: [6:0] channel, [10:8] parent, [27:16] γ |
| 80–95 | FIR coefficients |
| 96–111 | FIR tap: [6:0] channel, b8 enable |
| 112 | b0 FIR clear, b1 ATE clear, b4 NEO enable, [11:8] window log2, [15:12] LPF shift, [18:16] averaging shift |
| 128–195 | amplitude threshold per channel |
| 256–323 | NEO threshold per channel |
| 512–519 | MAC: CTRL, STATUS, F, L, S, A base, B base, C base |
| 576–579 | timer: CTRL, COUNT, COMPARE, STATUS |
| 580–583 | wake-up: ENABLE, PENDING, CTRL |
| 584–587 | MBIST: CTRL, BASE, LEN, STATUS |
| 588 | SRAM window address (word address of the next access) |
| 589 | SRAM window data: each access reads or writes the word at 588, then advances 588 |

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops; a watchdog ends a hung run as a
failure. With Verilator 5, from the directory holding `rtl/` and `tb/`,
you can compile all of the RTL with any testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/psoc_pkg.sv $(ls rtl/*.sv | grep -v psoc_pkg) tb/tb_psoc_top.sv \
    --top-module tb_psoc_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

| Testbench | What it checks |
|-----------|----------------|
| `tb_psoc_top` | The whole core at full size: 68 channels fed by modulator models, every command, debug and batch modes, MAC, sleep and wake-up, MBIST, the APB SRAM window. It counts each mechanism: stall, overflow, mode switches, headers, contention, flush and so on. |
| `tb_adw_channel` | Mode switching, decimation rate, high-pass, detection, and the low-bandwidth attenuation of a 5 kHz tone |
| `tb_cbpu_ctrl` | Scan order, routing, headers, batching, SRAM paths |
| `tb_ice` | Decodes the AC and GC streams in lossless and near-lossless modes and compares them with the input |
| `tb_cce` | Decodes the Golomb stream and rebuilds all lanes |
| `tb_fir`, `tb_ate`, `tb_spike_raster` | Checked against reference models |
| `tb_pe_sram` | Random traffic from all masters against a memory model |
| `tb_mac_unit` | Random matrices, with and without reload |
| `tb_pe_ctrl` | Timer, wake-up controller and MBIST |

Most unit testbenches run at the default sizes. The exceptions use
smaller memory banks to keep their reference models short:
* `tb_pe_sram` uses 256 words per bank and 3 masters.
* `tb_mac_unit` uses 2048 words per bank.
* `tb_pe_ctrl` uses 256 words per bank.

The largest simulation is `tb_psoc_top`. It runs with every parameter at
its default: 68 channels, 16 ICE slots, 8 CCE lanes, 16 FIR channels and
128 KiB of SRAM. It takes one pass through every command and needs about
10 s to build and 2 s to run.

## Where this design departs from the published one

**Design choices where the source is silent**
* **Decimation filter.** The CIC order and ratios, the half-band
  coefficients and the one-pole high-pass and low-pass are choices. The
  source gives only the structure: a CIC, then two polyphase decimate-by-2
  FIRs, then a selectable high-pass. The low-bandwidth corner is 2.2 kHz,
  where the source gives 2.4 kHz. The output rate is 19.53 kHz
  (5 MHz / 256), not exactly 20 kHz.
* **Spike detector.** The rule that both tests must pass is a choice, and
  so is the high-bandwidth hold time.
* **ICE.** The buffer keeps at most 31 samples of history before a spike;
  the source says "up to 32". The arithmetic coder uses a static table
  with two selectable tables; the number of tables, the GC adaptation rule
  and the escape codes are choices.
* **CCE.** The time decorrelation is first order, and γ is Q4.8.
* **ATE.** The high-pass and low-pass forms and the noise-estimate
  combination are choices.
* **Word formats.** The stream word format, the command encoding and the
  whole register map are this design's own.

**Structural differences**
* **Single clock.** Everything is on one 5 MHz clock, including the
  memory and the MAC. In the source the processing element has its own
  clock with a 25 MHz target. Clock generation and body-bias/power
  management are not here.
* **Sleep modes.** Sleep is only a clock enable for the core
  (`core_clk_en`). Power switches and the retention mode, which powers
  down the SRAM periphery, are analog/power features and are not modelled.
* **C4 and power management.** The C4 option that feeds back to the power
  management unit is not built; the source gives no detail of it.
* **Information packets.** Periodic headers exist only on the raw stream
  (C2). C1 writes samples to memory without them.
* **Direct memory port.** The CBPU reaches PE SRAM through its own
  crossbar port rather than through a bus bridge.
* **Simplified buses.** The processor's AHB/APB system is reduced to one
  APB slave plus the direct memory port. The APB reaches PE SRAM only
  through an indirect two-word window, not as a memory-mapped range.
* **Own sizes.** The sizes the source does not give are this design's:
  MAC with 8 cells and length up to 64, and a 32-entry stream FIFO.

**Not included**
* The RISC-V core and its software (spike sorting, CCE and AC training).
* The delta-sigma modulators and analog front ends.
* The serial and GPIO peripherals and the pads.
