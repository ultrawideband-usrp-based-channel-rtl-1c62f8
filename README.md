# Select-and-average block for an ultrawideband USRP channel sounder

A channel sounder sends the same sounding signal over and over and records what arrives. At
400 MHz bandwidth the receiver's radio delivers 500 million complex samples a second, far
more than a host link should carry. Most of that stream is not needed anyway. In each
channel snapshot only a window of repeated sounding signals is useful, and averaging
those repetitions sample by sample raises the signal-to-noise-and-interference ratio.

This RTL is the receiver-side FPGA block that does this. It sits in an RFNoC (Ettus
Research's RF Network-on-Chip) image between the radio block and the crossbar port that
leads to Ethernet and the host. For every snapshot it:

1. discards the first **P** samples, which cover the propagation delay plus one extra
   sounding signal so that the kept signals are circular convolutions of the channel with
   the sounding signal;
2. captures **M** consecutive sounding signals of **L** samples each and averages them,
   sample *i* of every signal into sample *i* of the result;
3. sends the averaged signal of L samples on towards the host;
4. discards the next **R** samples, then starts the next snapshot.

With the settings of the reference measurement, the host receives 1024 samples
(4 KiB) every 5 ms instead of 2.5 million samples.

```
 radio stream   |<---- P ---->|<------------- M x L ------------->|<------ R ------>|
 (2 samples/clk)|    skip     | sig 0 | sig 1 |  ...  | sig M-1   |      skip       |
 averager state |             |  IN   |ADD_IN |ADD_IN | ADD_OUT   |                 |
 output         |                                     |avg (L)--> |                 |
```

## Reference configuration

| Setting | Value | Meaning |
|---|---|---|
| L | 1024 samples | sounding signal length |
| P | 2048 samples | samples skipped before capture |
| M | 64 | number of averaged signals |
| K | 6 | right shift applied to every sample before adding |
| R | 2 432 416 samples | samples skipped until the next snapshot |
| clock | 250 MHz (`clk_radio2x`) | two samples per clock, 500 Msps |
| sample period | 2 ns | |

P + M·L + R = 2 500 000 samples = 5 ms, the snapshot repetition time. That period is
chosen so that a snapshot starts at every PPS edge. Transmitter and receiver can then start
on different PPS edges without talking to each other. These values are the reset values of
the settings registers and the defaults of the RTL parameters.

## Averaging by shift-then-add

Samples are complex shorts (sc16): 16-bit signed I and 16-bit signed Q. Dividing by M at
the end would need a wider accumulator. Instead, each incoming sample is first shifted
right by K bits, and the shifted samples are added. With M = 2^K, the sum of M values of
at most 2^(15−K) in magnitude stays inside 16 bits. The accumulator is therefore exactly
as wide as a sample. Two samples per clock give a 64-bit memory word.

The price is rounding. Each shifted term is floored (the shift is arithmetic) and loses
less than one unit of the result. The sum of M terms can therefore sit up to M − 1 units
below the exact mean: at most 63 counts for M = 64, K = 6. Nothing checks that M ≤ 2^K. A larger M wraps around silently
(16-bit modular adds, no saturation).

### The datapath (`sa_averager`)

```
            +----+     +---+     lower demux
 dataIn --->| >> |---->| + |----+----> BRAM (write, address i/2)
            +----+     +---+    |
                         ^      +----> dataOut
                         |
               upper mux: 0 or BRAM (read, address i/2)
```

The controller tags each captured beat with one of these modes:

| mode | operand | sum goes to | used for |
|---|---|---|---|
| `MODE_IN` | 0 | BRAM | first signal of the snapshot |
| `MODE_ADD_IN` | BRAM word | BRAM | signals 2 … M−1 |
| `MODE_ADD_OUT` | BRAM word | output | last signal |
| `MODE_IN_OUT` | 0 | output | M = 1 (no averaging) |

There is no clear cycle. `MODE_IN` overwrites whatever the previous snapshot left in the
memory.

**Pipeline and the read-modify-write hazard.** The BRAM has a synchronous read. When a beat
is accepted, its read address goes to the BRAM and the shifted data is registered (stage
A). One clock later the read word is there. The adder forms the sum, which is either
written back to the same address or loaded into the output register. So an output beat
appears two clocks after the input beat that completes it, and a new beat is taken every
clock.

A word is written back no later than the clock on which the *next* beat is accepted. It is
read again only L/2 beats later. For L/2 ≥ 2 the read therefore always sees the updated
word, and no forwarding path is needed. The controller clamps L/2 to at least 2 (L ≥ 4).

**Backpressure.** The output is a register with AXI-Stream valid/ready. If it holds a beat
that has not been taken, the pipeline freezes, including the BRAM read enable, so the read
word is kept. `in_ready` drops only then. During skip phases the controller absorbs the
radio stream itself, so the radio is stalled only if the host side blocks the output
during the last signal of a capture. In a real receiver that would be an overrun. The
design assumes the output path keeps up, and at 512 beats per 5 ms it easily does.

## Sample counting and the state machine (`sa_controller`)

The controller counts accepted beats, not samples. Every length is therefore used as
length/2, and odd values lose their low bit. Its phases are `IDLE → SKIP_P → CAPTURE →
SKIP_R → SKIP_P → …`. In `CAPTURE` a word counter runs 0 … L/2−1 and a signal counter
runs 0 … M−1. Together they select the mode and the BRAM address, and they raise the
last flag on word L/2−1.

* A skip phase of length zero is left out, so P = 0 or R = 0 is allowed.
* Settings are latched at the start of every snapshot. A register write during a
  snapshot takes effect at the next one.
* Clearing `enable` returns to `IDLE` at once. Setting it starts a snapshot with the
  first beat that arrives one clock later.
* Aligning the start with a PPS edge is not done here. The radio block upstream starts
  streaming at a timed command, so the first sample this block sees is the first sample
  after the edge.
* L/2 is clamped to [2, MAX_L/2] and M = 0 is treated as 1.

## Host interface (`sa_regs`)

The registers sit on a simplified RFNoC control port. A request is a one-clock `req_wr` or
`req_rd` pulse with a byte address and data. It is acknowledged by a one-clock `resp_ack`
on the next clock, with `resp_data` for reads. The port is assumed to be on the data clock.

| offset | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | rw | bit 0: enable (reset 0) |
| 0x04 | L | rw | samples per sounding signal (reset 1024) |
| 0x08 | P | rw | samples skipped before capture (reset 2048) |
| 0x0C | M | rw | signals averaged (reset 64) |
| 0x10 | K | rw | shift, bits 4:0 (reset 6) |
| 0x14 | R | rw | samples skipped after capture (reset 2 432 416) |
| 0x18 | STATUS | ro | bits 1:0: 0 idle, 1 skip P, 2 capture, 3 skip R |
| 0x1C | SNAPSHOTS | ro | snapshots completed since enable |
| 0x20 | MAX_L | ro | largest L the memory holds |

Unmapped addresses read 0 and ignore writes.

## Top level (`sa_block`)

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst` | in | 1 | one clock, synchronous active-high reset |
| `ctrlport_req_wr/rd/addr/data` | in | 1/1/20/32 | register requests |
| `ctrlport_resp_ack/data` | out | 1/32 | register responses |
| `s_axis_tdata/tvalid` | in | 64/1 | radio samples, two sc16 per beat |
| `s_axis_tready` | out | 1 | |
| `m_axis_tdata/tlast/tvalid` | out | 64/1/1 | averaged signal, L/2 beats, `tlast` on the last |
| `m_axis_tready` | in | 1 | |

Beat packing: the earlier sample of a pair is in bits 31:0. Within a sample, I is in the
upper 16 bits and Q in the lower 16 bits.

Parameters: `MAX_L` (default 1024) sets the BRAM to MAX_L/2 words of 64 bits, i.e. 32 Kbit,
one 36 Kbit block RAM. `RST_L`, `RST_P`, `RST_M`, `RST_K` and `RST_R` are the register reset
values. Synthesis gives about 180 word-level cells, 544 flip-flops and the one memory.

What lies outside: the radio block and RF front end, the RFNoC crossbar, the Ethernet
transport, and the host software that turns the averaged signals into impulse responses.
The CHDR packet headers and timestamps that the RFNoC shell adds around a block's stream
are not modelled here either; this block produces one `tlast`-terminated packet per
snapshot. The transmitter side needs no custom logic: the vendor replay block plays back a
5 ms waveform with ⌈(M·L+P)/L⌉ sounding signals followed by zeros.

## How far to trust it, and where it departs from the description it follows

Taken from the published design: skipping P, capturing M×L and skipping R, driven by a
sample counter; averaging by shift-by-K and add; a BRAM accumulator 64 bits wide holding
two samples per word; the three states IN, ADD_IN and ADD_OUT that steer a 0/BRAM
multiplexer and a BRAM/output demultiplexer; two samples per clock at 250 MHz; the host
setting L, P, K and M; the reference values above.

Choices made here where the description is silent:

* The arithmetic shift, the 16-bit wrap-around adds and the sample packing.
* The BRAM depth, sized for L = 1024.
* The two-stage pipeline and its latency, and the AXI-Stream handshakes with backpressure.
* The register map, and R being a register. The description names only L, P, K and M as
  host-settable, but R appears among the settings and is needed to find the next snapshot.
* Latching the settings per snapshot, and repeating snapshots while enabled.
* The extra `MODE_IN_OUT` for M = 1. Measurements without averaging are described, but
  only three states are named.
* Even-length restrictions, clamping, and a single clock domain.

The original is Verilog inside the vendor's RFNoC shell. This is a free-standing
SystemVerilog rendering of its function, not that source.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=F`. Each compares the outputs with values the testbench
computes on its own and stops itself with a watchdog.

| testbench | what it shows |
|---|---|
| `tb_sa_shifter`, `tb_sa_adder` | lane-wise floor shift and 16-bit wrap add, random and corner values |
| `tb_sa_bram` | fill/readback, hold while not enabled, read-during-write returns old word |
| `tb_sa_averager` | M signals with random gaps and backpressure against an accumulation model; 2-clock latency and 1 beat/clock at full rate |
| `tb_sa_controller` | every beat classified from its index alone (mode, address, last, skip), with P = 0, R = 0, M = 1 and M = 64 |
| `tb_sa_regs` | reset values, read-back, read-only status, one-clock acknowledge |
| `tb_sa_block` | end to end through the control port, MAX_L = 64, five configurations. Counts skip-P, IN, ADD_IN, ADD_OUT, M = 1, skip-R, output stall and input stall, and fails if one never occurs. Checks that the input is never stalled without backpressure |
| `tb_sa_block_full` | one full 5 ms snapshot at default size and reset settings: 1 250 000 clocks, 1024 averaged samples, bit-exact against the model; noise of ±2000 averaged down below ±1000 of the clean signal |
| `tb_sa_block_m1` | the same at M = 1, K = 0 (R lengthened to keep 5 ms): the captured signal is returned unchanged |

Running one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/sa_pkg.sv tb/tb_sa_block_full.sv \
          --top-module tb_sa_block_full
./obj_dir/Vtb_sa_block_full
```

The full-size runs take about a second of wall time. Some of the smaller testbenches mix
32- and 64-bit integers in their models. Verilator's width warnings then stop the build
unless `-Wno-fatal` is added. The RTL has assertions for the
AXI-Stream hold rule on the averager output, for captured beats not being withdrawn, and
for no simultaneous read and write on the control port. They are active with `--assert`.

## Files

* `rtl/sa_pkg.sv`: widths, the `sa_mode_e` enum, the `sa_cfg_t` settings struct
* `rtl/sa_shifter.sv`, `rtl/sa_adder.sv`, `rtl/sa_bram.sv`: the three parts of the averager
* `rtl/sa_averager.sv`: the averager datapath with its multiplexers and pipeline
* `rtl/sa_controller.sv`: sample counter and phase/state machine
* `rtl/sa_regs.sv`: settings and status registers
* `rtl/sa_block.sv`: top level
* `tb/`: the testbenches above
