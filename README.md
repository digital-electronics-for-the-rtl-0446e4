# Digital-board FPGA logic for an AMIGA underground muon counter

An AMIGA muon counter is a buried scintillator module with 64 bars. A
64-pixel PMT reads the bars, and 64 discriminators turn the pulses into
64 one-bit lines. Muons are counted by looking at those lines: a '1' means
the pixel was above threshold in that sample. The FPGA on the module's
digital board must do four things:

- sample all 64 lines at 320 MHz without a gap;
- keep the 6.4 µs around every surface-station trigger (T1);
- store the last 2048 such events in an external SRAM, tagged with the
  trigger's timestamp (LTS);
- hand an event back when the central system asks for it by timestamp (T3).

It also programs the 64 discriminator thresholds through eight SPI DACs. It
counts active samples per pixel so that software can adjust the thresholds.

This repository holds synthesizable SystemVerilog for that logic. It also
has a self-checking testbench for every block and an end-to-end testbench of
the whole FPGA at full size.

```
 disc[63:0] ─┬► front_end ──256b@80MHz──► event_acq ──(2 circular buffers in dp_ram_asym)
  (320 MHz)  │   (4-bit SR, latch,           │  ▲ t1_pulse, lts          │ 32-bit read port
 pattern_gen ┘    80 MHz register)           │  │                        ▼
 t1_line ───────────────────────────────► t1_rx        event_writer ──► ext_mem_ctrl ◄──► SRAM 8M x 32
                                             │             │ ts write        ▲
                                       cal_counters     ts_table ◄── t3_ctrl ┘──► t3_buffer
                                             │                          │            │
 uc bus ◄──────────────────────────────── uc_regs ◄───────────────────────┴────────────┘
 dac SPI ◄── dac_ctrl ◄── (DAC table in dac_ctrl, written through uc_regs)
```

Everything except the first stage of `front_end` runs on one 80 MHz clock.
The 320 MHz clock must have its rising edges aligned with those of the
80 MHz clock, as a PLL makes them.

## From 320 MHz to 80 MHz (`front_end`, `fe_bit`)

Each line goes through three registers:

- a 4-bit shift register clocked at 320 MHz;
- a 4-bit latch, also clocked at 320 MHz, but enabled only once every four
  cycles;
- a 4-bit register clocked at 80 MHz.

The enable comes from one 2-bit counter at 320 MHz shared by all channels:
its decoded state `10` loads every latch. The latch therefore holds a
complete four-sample history for four fast cycles, long enough for the
80 MHz register to take it safely.

Output `dout[64*k + c]` is sample `k` of channel `c`, with `k = 0` the
oldest. Each 80 MHz word is therefore four consecutive 64-bit samples. This
is the unit for all later counting, so the trigger position is known to one
80 MHz word (four samples, 12.5 ns). The latency from a sample to `dout` is
two to three 80 MHz cycles.

Only the counter is reset. The first word after reset can contain stale
bits.

## The circular buffers and the T1 bin (`event_acq`, `dp_ram_asym`)

This is the heart of the design and the part that needs the most care.

### Continuous writing

A trigger arrives only after the interesting part of the event has already
happened, so data is written all the time. A dual-port RAM holds two
buffers of 2048 samples, each 512 words of 256 bits. Its write port is
256 bits wide and takes one front-end word per cycle. Its read port is
32 bits wide and 4096 words deep per buffer; this is what feeds the
external memory. The most significant address bit on each port selects the
buffer.

A free-running 9-bit address counter writes the active buffer, so the
buffer always holds the last 2048 samples.

### Freezing an event

A set/reset flip-flop is set by T1. While it is clear, a down-counter is
held loaded with the post-trigger length. Once it is set, the counter
counts one per word. When the counter reaches the end, its carry does three
things:

- it stops the address counter of that buffer;
- it latches the buffer number and the address of the event's first (oldest)
  word, together with a new-event flag;
- it switches writing to the other buffer in the same cycle, so no sample
  is lost between events.

The post-trigger length comes from two registers, both counted in samples.
`POST_T1` defaults to 1536. `DELAY` defaults to 0 and compensates the cable
delay. The counter runs for `(POST_T1 − DELAY) / 4` words. With the
defaults, an event holds 512 samples before the trigger and 1536 after.

Measured end to end at the defaults, the sample taken at the moment the T1
edge arrives lands at position 506 of the 2048. The T1 path is a little
slower than the data path. `DELAY` or `POST_T1` can move the trigger bin
to any wanted position.

### Which buffer is written, and what is lost

The buffers are used strictly in turn, and the write-back engine always
takes the older frozen one first. If the other buffer is still waiting
to be copied when an event ends, acquisition pauses. Until the write-back
releases a buffer:

- T1s are not taken;
- they are counted in a `DROPPED` debug register.

Writing restarts in the released buffer. A T1 that arrives while an event
is still being counted is ignored.

### Tagging an event with its LTS

The LTS arrives on the T1 line 2.9 µs after the trigger, before the event
has finished (4.8 µs after T1 at the defaults). It is attached to the
buffer that trigger froze. Only the frame that follows an accepted trigger
is kept: the frame after a dropped or ignored T1 cannot overwrite a stored
event's timestamp.

A frozen buffer is offered to the write-back only when it has its LTS.

## The T1 line (`t1_rx`)

The surface station sends each trigger as a frame on a dedicated line:

- a rising edge marks the trigger bin;
- the line stays high for 200 ns, then low for 300 ns;
- the 24-bit LTS follows, MSB first, at 100 ns per bit;
- the whole frame lasts 2.9 µs.

The receiver runs at 80 MHz: 8 cycles per bit, 232 per frame. It
synchronizes the line with three flip-flops and turns the rising edge into
a one-cycle `t1_pulse`. It then samples each bit in the middle of its slot:
44 cycles after the edge for the MSB, then every 8 cycles. It ignores the
line until the frame is over, so timestamp bits are never mistaken for a
trigger.

## External memory, event ring and timestamp table (`ext_mem_ctrl`, `event_writer`, `ts_table`)

### The SRAM controller

The SRAM bank is 8 M words of 32 bits on a plain asynchronous bus: 23-bit
address, 32-bit data, CE#, RD# and WR#. `ext_mem_ctrl` runs every transfer
in 6 cycles (75 ns), and all its pins are registered:

- CE# is low for all six cycles;
- for a write, WR# is low in cycles 1–4 and the data bus is driven
  throughout;
- for a read, RD# is low throughout and the data are taken at the end.

The controller has two clients: the event write-back and the T3 reader.
Each word is arbitrated separately, and the write-back always wins. It has
to keep pace with acquisition, while a T3 read can wait.

### The event ring

Event `i` of the ring occupies addresses `{i[10:0], 12'b0}` to
`{i, 12'hFFF}`, so the ring holds 2048 events. `event_writer` handles each
frozen buffer in three steps:

1. It writes the LTS into `ts_table` at index `i` (2048 × 24 bits).
2. It copies the buffer's 4096 words, starting at the latched first word and
   wrapping around the buffer. The next buffer word is fetched while the
   current one is on the bus.
3. It releases the buffer and advances `i` modulo 2048.

When nothing competes for the bus, a copy takes exactly 4096 × 6 = 24576
cycles (307.2 µs). When the ring is full, the oldest event is overwritten.

Sample `n` of a stored event (`n = 0` oldest) is the 64-bit pair of
32-bit words `2n` (bits 31:0) and `2n + 1` (bits 63:32).

## T3 recall (`t3_ctrl`, `t3_buffer`)

The microcontroller writes the LTS it wants into two registers and sets
the T3 execution bit. `t3_ctrl` searches `ts_table` over the valid
entries, newest first, one entry per cycle. If it finds the LTS at index
`p`, it reads words `{p, 0}` to `{p, 4095}` into `t3_buffer`, a 4096 × 32
RAM that the microcontroller reads as 16-bit words. Then it raises `done`,
with `found` set or clear. `done` drives `uc_irq` and stays high until the
microcontroller acknowledges it.

A search takes at most 2050 cycles. A read takes 307.2 µs, or longer while
a write-back shares the bus.

## Threshold DACs (`dac_ctrl`)

Each of the eight analog boards has one TLV5630, an octuple 12-bit DAC.
`dac_ctrl` holds a table of 80 12-bit registers:

| Table entry | Contents |
|---|---|
| `8b + c` | threshold of channel `c` on board `b` |
| `64 + 2b` | CTRL0 of board `b` |
| `65 + 2b` | CTRL1 of board `b` |

On the DAC execution bit, the controller sends all 80 registers, board by
board. Each board gets CTRL0 (register 8), CTRL1 (register 9), then DAC A–H
(registers 0–7). Each register goes out as a 16-bit word `{address,
value}`, MSB first.

SCLK and DIN are shared by all boards, and each board has its own FS#, so
a faulty DAC cannot block the others. DIN changes while SCLK is high, and
the DAC takes it on the falling edge. SCLK runs at 10 MHz (`SCLK_HALF = 4`).
When the last word is sent, one common LDAC# pulse updates all 64 outputs
at once. The whole run takes 10564 cycles (132 µs).

## Calibration counters (`cal_counters`)

Each pixel has a 32-bit accumulator. It adds the number of active samples in
each 80 MHz word (0–4). A 64-bit counter counts 80 MHz cycles. On the latch
command, all 65 values are copied at once into holding registers, which the
microcontroller then reads at leisure.

The counters run from reset and wrap. The software computes each pixel's
rate from the difference between two readings, compares it with its set
point, and writes new thresholds. That loop is software and is not here.

## Built-in test pattern (`pattern_gen`)

For testing the acquisition chain without a detector, a register bit
switches the front end's 64 inputs from the discriminators to an internal
generator running at 320 MHz. Every line repeats a 64-cycle frame:

- bits 0–28: the 29-bit value of a free-running 320 MHz cycle counter at
  the start of the frame, MSB first;
- bits 29–34: the line's channel number, MSB first;
- bits 35–63: zeros.

A recalled event must then show whole frames with the same timestamp on
every line, the timestamp must advance by 64 from frame to frame, and each
line must carry its own number. This proves that samples were neither lost,
reordered nor swapped between channels. The timestamp also shows when the
event was taken. The generator's fields (a 29-bit timestamp and a 6-bit
channel number) come from the published hardware test; the frame layout is
this design's.

## Microcontroller bus and register map (`uc_regs`)

The FPGA appears as a memory of 32768 × 16-bit words on an asynchronous bus
(CS#, WE#, OE#):

- CS#, WE# and OE# pass two-flop synchronizers;
- a write is taken on the synchronized falling edge of WE#, so address and
  data must be stable for 3 cycles after WE# falls;
- read data are valid two cycles after the address.

Addresses not listed below read as 0.

| Address | Name | Access | Contents |
|---|---|---|---|
| 0x0000 | CTRL | W | execution bits: 0 DAC start, 1 calibration latch, 2 T3 start, 3 T3 acknowledge |
| 0x0001 | STATUS | R | 0 DAC busy, 1 T3 busy, 2 T3 done, 3 T3 found, 4 acquiring, 5 write-back busy |
| 0x0002 | POST_T1 | R/W | samples kept after T1 (reset 1536) |
| 0x0003 | DELAY | R/W | cable-delay compensation in samples (reset 0) |
| 0x0004/5 | T3_LTS | R/W | requested LTS, low 16 bits / high 8 bits |
| 0x0006 | T3_POS | R | ring index of the recalled event |
| 0x0007 | STORED | R | events in the ring (saturates at 2048) |
| 0x0008/9 | LAST_LTS | R | last LTS received (debug) |
| 0x000A | DROPPED | R | T1s lost while both buffers were full (debug) |
| 0x000B | TEST | R/W | bit 0: front end takes the internal test pattern (reset 0) |
| 0x0010–0x005F | DAC table | R/W | 80 × 12 bits, layout as above |
| 0x0100–0x017F | CAL | R | latched accumulators, channel `c` at 0x100 + 2c (low word first) |
| 0x0180–0x0183 | TIME | R | latched 64-bit time, low word first |
| 0x4000–0x5FFF | T3 buffer | R | recalled event; sample `n` is words 4n … 4n+3, low first |

The shared constants, structs and this map are in `amiga_pkg.sv`.

## Simulating

Every block has a testbench `tb/tb_<module>.sv`. Each one checks the block
against values it computes itself and ends by printing
`TB_RESULT checks=N failures=M`. Run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/amiga_pkg.sv tb/tb_event_acq.sv --top-module tb_event_acq
./obj_dir/Vtb_event_acq
```

Two files in `tb/` are behavioural models, not testbenches:

- `sram_model.sv` models the SRAM. It checks CE#/RD#/WR# usage and counts
  protocol errors.
- `ls_t1_tx.sv` sends T1 frames as the surface station does.

`tb_amiga_mc_fpga` runs the whole FPGA with every parameter at its default.
It takes about ten seconds. The testbench drives the 64 lines with its own
pattern: lines 0–28 are a sample counter, lines 29–63 a hash of it, so every sample is unique
and its place in time can be read back. The run does the following:

1. It programs and checks all 80 DAC words and the LDAC# pulse.
2. It sends three T1s about 12 µs apart. The second buffer takes over, and the
   third T1 is dropped.
3. It recalls the second event by its LTS and checks all 2048 samples, the
   trigger position and the 307.2 µs recall time.
4. It sends a fourth T1 and recalls the first event while the fourth is
   being written, so the two share the bus.
5. It asks for an LTS that was never sent, which must come back not found.
6. It latches the calibration counters and compares them with the pattern.
7. It switches to the internal test pattern, takes and recalls one more
   event, and checks that exactly one frame phase fits it.

The testbench counts each of these mechanisms and fails if one never
occurred.

## Where this design makes its own choices

The published description gives the front end and the circular-buffer
circuit in detail. For the rest it gives the function, sizes and rates but
not the circuit. The following are this design's choices:

- the bit order of the 256-bit bus, and the 32-bit slice order in the
  buffer RAM;
- sampling each LTS bit in the middle of its slot, and ignoring the line
  for the rest of the frame;
- strict buffer alternation, pausing and counting dropped T1s when both
  buffers are full, and ignoring a T1 during an event;
- the SRAM pin timing within the 75 ns cycle, and per-word arbitration
  with priority to the write-back;
- newest-first linear search of the timestamp table, and a sticky
  done/interrupt with an acknowledge bit;
- the DAC word order (control registers first), the 10 MHz SCLK and the
  table layout;
- the whole register map and the bus timing;
- the frame layout of the test pattern and the register bit that selects it;
- trigger-position resolution of one 80 MHz word. The published design
  quotes a one-bin uncertainty of 25 ns, and this design stays inside it.

Not included:

- the PLL: the clocks are inputs;
- the analog boards, the DACs themselves and the SRAM chips;
- the surface-station logic that sends the T1 line;
- all microcontroller software, including the threshold-calibration loop.
