# Event-driven camera interface for an always-on binary vision sensor

A camera node that must watch a scene all the time usually wakes its
processor for every frame, even when nothing moves. This design avoids
that. The sensor's own pixel-activity count decides when the processor
runs. A 128 x 64 contrast imager computes a frame difference on chip. In
its low-power **Idle** mode it reports only how many pixels changed. In
**Active** mode it streams the addresses of the changed pixels.

The logic here belongs in a small low-power FPGA placed between that
imager and a multicore microcontroller. It does three jobs:

* From a 32 kHz clock, it reads the sensor's change count once per frame.
  When the count passes a threshold, it switches the sensor to Active.
* In an Active frame, it turns on a fast clock, but only for the ~300 us
  readout. During that time it captures the address stream, converts it to
  (x, y) pixels, counts the pixels and stores up to 1024 of them.
* If the frame holds enough pixels, it powers the processor up, starts it,
  lets it read the pixels over SPI, and powers it down again when the
  processor signals end of computation (EOC).

When the scene is still, only the sensor, the 32 kHz logic and the
processor's always-on region draw power. The FPGA logic is in `rtl/`.
Self-checking testbenches, including a model of the sensor, are in `tb/`.

## System around the FPGA

```
   vision chip                       FPGA (this RTL)                          processor chip
 +-------------+  data[7:0],WE,EOR  +----------------------------------+   SPI   +-----------------+
 | 128x64      | -----------------> | DataPath: input stage -> DC FIFO |<------->| SPI master       |
 | contrast    |                    |   -> pixel counter -> storage    |         | cores, L2, ...   |
 | imager      | <----------------- | Control Unit (32 kHz)            |         |                  |
 +-------------+  frame,mode,rd,hi  |   ring oscillator, clock gate    |   EOC   |                  |
                                    | SPI slave                        |<--------| GPIO             |
                                    | power manager (32 kHz) ----------+-------->| fetch enable     |
                                    +----------------------------------+         +-----------------+
                                              | pg_en[1:0]   ^ pg_ack[1:0]
                                              v              |
                                     power switches for the FLL (1.0 V) and cluster (0.5 V) supplies
```

The top module is `smart_cam_fpga`. It contains `control_unit`,
`ring_osc`, `cam_datapath` (built from `clk_gate`, `input_stage`,
`dc_fifo`, `pixel_counter` and `storage_fifo`), `spi_slave` and
`power_manager`. `cam_pkg` holds the shared types: `pixel_t` is
{sign, x[5:0], y[6:0]} and `packet_t` is four pixels plus a valid count.
It also holds the SPI register map and the reset values.

## One frame, step by step

The Control Unit counts `fperiod` cycles of the 32.768 kHz clock per frame.
The reset value is 3277, which gives 10 frames/s. It pulses `sen_frame_o`
at each frame start. `expose` cycles later (reset value 1638, half a frame)
the frame is read:

| Sensor mode | What happens at readout time | Decision |
|---|---|---|
| Idle | `sen_rd_o` high. The 14-bit change count is read from the 8-bit bus in two cycles: low byte, then high byte with `sen_cnt_hi_o`. | If count > threshold, `sen_mode_o` goes to Active for the next frame. |
| Active, processor idle | The datapath reset is pulsed. The ring oscillator is enabled. One cycle later the datapath clock gate opens and `sen_rd_o` rises. The CU waits for the datapath's `done` flag, closes the gate, and stops the oscillator one cycle later. | If counted pixels > threshold, a one-cycle `wake` goes to the power manager and the data-ready status is set. Otherwise the sensor goes back to Idle. |
| Active, processor busy | Nothing is read; the skip counter is incremented. | Sensor stays Active. |

With the sensor model's ~300 us readout, the oscillator runs for about
430 us per Active frame. That is under 0.5 % of a 100 ms frame. The
overhead comes from the synchronizers and the 32 kHz granularity.

The power manager is a three-state machine:

* **idle**: both power-gate enables low.
* **power-up**: entered on `wake`. Both enables high.
* **active**: entered when both power switches acknowledge. `fetch_en`
  high, so the processor boots from its retained L2 memory.
* Back to **idle** on a rising edge of EOC. The regions are switched off.

The processor's boot time and SPI transfer therefore fall in the frames
after the readout. The sensor stays in Active mode all the while.

## The datapath and its four clocks

This is the part that needs the most care. The sensor sends a pixel every
12.5 ns (80 Mpixel/s peak). The low-voltage FPGA fabric cannot close timing
at 80 MHz, and the ring oscillator runs at 25 MHz. The rate is bridged like
this:

1. **Input stage, clocked by the sensor's own strobes.** A rising
   Write-Enable edge captures the byte {sign, y[6:0]}. A rising End-Of-Row
   edge increments the row counter, which is the pixel's x coordinate.
   Three pixels are held in a register. On the fourth WE edge, the three
   held pixels plus the one on the bus are written as one packet into the
   dual-clock FIFO, on that same edge. That is at most 20 Mpacket/s.
2. **Dual-clock FIFO.** It uses Gray-coded pointers with two-flop
   synchronizers and holds 16 packets. Its write clock is the WE strobe,
   which only ticks while pixels arrive. So the write side may see the read
   pointer late, and full is pessimistic. If it ever were full, the packet
   is dropped and counted (`drops`, STATUS bit 3). At the default sizes
   this does not happen. The test streams 3000-pixel frames at the peak
   rate without a drop.
3. **Pixel counter, on the gated 25 MHz clock.** It pops one packet per
   cycle, which is 100 Mpixel/s of drain capacity. It adds the packet's
   pixel count and writes the packet to storage. End of frame is 64 EOR
   pulses. After that flag (synchronized) is seen and the FIFO is empty,
   the counter waits one cycle for the last write pointer to arrive. It
   then collects the 0 to 3 leftover pixels from the input register as a
   short final packet and raises `done`. The leftover register is safe to
   read then, because the sensor has stopped.
4. **Storage memory: written on the 25 MHz clock, read on the SPI clock.**
   It holds 256 words of 4 pixels, 1024 pixels in all. Only the last packet
   of a frame can be short, so pixel *i* is in word *i*/4, slot *i*%4.
   Packets beyond 1024 pixels are dropped, but they are still counted, and
   the overflow flag is set. The read side refreshes its output register
   on every SCK edge from the entry at the next read pointer.

The clock gate is built from flip-flops: the enable is synchronized, then
re-registered on the falling edge, then ANDed with the clock. It gives
whole pulses only. The datapath is held in reset between readouts.

**Which crossings have no synchronizer, and why that is safe.** The stored
count, the pixel count, the overflow flag and the SPI-written configuration
cross clock domains as static values:

* The CU wakes the processor only after the readout has finished.
* The CU starts the next readout only after the power manager has returned
  to idle, that is after EOC.
* Software writes the configuration before it sets the run bit.

Every level signal that does change while it is used goes through
`sync_2ff`. That covers `done` into the CU, the end-of-frame flag into the
counter, the clock-gate enable, and the power-gate acknowledges and EOC.

## SPI register map

The SPI slave uses mode 0, MSB first, and is clocked by SCK. The processor
drives SCK at 5 MHz. A transaction is a command byte {write, addr[6:0]}
followed by 16-bit words.

| Addr | Name | Access | Content |
|---|---|---|---|
| 0x00 | CTRL | R/W | bit 0: run (frame timing on) |
| 0x01 | FPERIOD | R/W | frame period in 32 kHz cycles (reset 3277 = 10 fps) |
| 0x02 | EXPOSE | R/W | cycles from frame start to readout (reset 1638) |
| 0x03 | THRESH | R/W | wake-up pixel threshold (reset 80) |
| 0x04 | STATUS | R | {11'b0, overflow, drops, busy, data_ready, active} |
| 0x05 | COUNT | R | pixel count of the last Idle read or Active readout |
| 0x06 | STORED | R | pixels in the storage memory |
| 0x07 | FRAMES | R | frame counter |
| 0x08 | SKIPS | R | Active readouts skipped while the processor was busy |
| 0x10 | DATA | R | burst: one pixel per word, {1, 0, sign, x[5:0], y[6:0]}; 0x0000 when empty |

A write takes effect at the end of its first data word. A read returns
its data in the word after the command. A read of DATA pops one pixel per
word for as long as chip select stays low.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `DEPTH_PIX` | 1024 pixels (12.5 % of 8192) | `smart_cam_fpga`, `cam_datapath`, `storage_fifo` |
| `FIFO_AW` | 4 (16 packets) | `smart_cam_fpga`, `cam_datapath`, `dc_fifo` |
| `RO_MHZ` / `FREQ_MHZ` | 25 | `smart_cam_fpga`, `ring_osc` |
| `PKT_PIX`, `ROWS`, `COLS` | 4, 64, 128 | `cam_pkg` |

`DEPTH_PIX` should be a multiple of 4.

Three application thresholds are used with this kind of node: 40 (street
traffic), 80 (people activity) and 100 (parking entrance). The threshold is
a 16-bit register, so all three fit. So do any frame rate down to 0.5
frames/s (period < 2^16 cycles) and any frame size: the 14-bit counter
covers all 8192 pixels. Frames with more than 1024 changed pixels are
truncated in storage. The detection software is expected to tolerate
that.

## Where this design is its own, not the source design's

The published design gives:

* the block structure and names: Input Stage, DC FIFO, Pixel Counter,
  Storage FIFO, Ring Oscillator, SPI Slave, Control Unit, PULP Power
  Manager;
* the sensor output format and rates: 8-bit bus, WE, EOR, 64 rows,
  7-bit y plus sign, 80 Mpixel/s;
* the 4-pixel input register, 25 MHz, 32 kHz and 1024 pixels;
* the threshold-driven Idle/Active switch;
* the readout-only oscillator;
* the three-state power manager.

Everything else was chosen here:

* **Sensor control port.** The imager's control sequence is documented
  elsewhere, so the port here is abstract: frame, mode, read, count-byte
  select. The two-byte format of the Idle count and the bit layout of the
  pixel byte are assumed. Connecting a real sensor needs a timing adapter
  in `control_unit`.
* **Decisions.** The comparison is strict (count > threshold). After an
  Active readout with too few pixels, the sensor returns to Idle without
  a wake-up. A readout is skipped while the processor is still active, so
  the stored frame cannot be overwritten while it is being read.
* **Clocking of the input stage** by WE and EOR, the FIFO depth, the
  partial-packet hand-off, the drop and overflow rules, and the
  flip-flop clock gate.
* **The SPI protocol and register map.**
* **Power manager details.** Both power-switch acknowledges are required.
  EOC is taken on its rising edge, so a level left high by the last run
  cannot cut the next one short.
* **Not reproduced.** The source design's exact FPGA resource use (about
  3758 logic tiles and all 8 RAM blocks of a small flash FPGA) is not
  reproduced. The storage memory needs 14,336 bits.
* **Ring oscillator.** `ring_osc` is a behavioural model with delays. On
  an FPGA it is a hand-placed chain of inverters, or it can be replaced by
  any gated clock source. Synthesis tools see it as an undriven clock.

## Verification

Each testbench ends with a `TB_RESULT checks=N failures=M` line.

| Testbench | What it establishes |
|---|---|
| `tb_input_stage` | Packets match the native stream grouped by four. Leftover pixels, end of frame after exactly 64 EORs, and drop counting with a full FIFO. |
| `tb_dc_fifo` | Order, no loss, full after 16 writes, latency 2 to 3 read clocks. The write clock runs at 80 MHz in bursts, the read clock at 25 MHz. |
| `tb_pixel_counter` | One packet per clock, counts, leftover packet, done only after the FIFO is empty, overflow. |
| `tb_storage_fifo` | Pixel order, stored count, refusal past 1024, reset. |
| `tb_spi_slave` | Reset values, register write and read-back, status reads, burst read with one pop per word. |
| `tb_control_unit` | Frame period, Idle threshold decision, reset, oscillator and gate order, gate time, wake-up, skip, return to Idle. |
| `tb_power_manager` | State sequence, cycle counts, ignores a single acknowledge and a stale EOC level. |
| `tb_ring_osc` | 40 ns period, duty cycle, clean start and stop. |
| `tb_cam_datapath` | Frames of 0 to 3000 pixels at 80 Mpixel/s through the real datapath. Read-back against the sensor model, overflow, no FIFO drop, no clock while gated. |
| `tb_smart_cam_fpga` | Ten frames at 10 fps with every parameter at its default. See below. |
| `tb_workloads` | The three application thresholds on synthetic activity traces, against a reference model. See below. |

In `tb_smart_cam_fpga`, the power switches acknowledge 590 us after they
are enabled. The processor model boots for 61 us and then reads over SPI
at 5 MHz. The test covers these cases: Idle below threshold, Idle to
Active, readout with wake-up, overflow, partial packet, back to Idle, and
a skip while the processor is busy. Each of them must occur.

`tb_workloads` runs the three application thresholds (100, 40, 80),
each for 40 frames at 10 fps with every parameter at its default. Real
footage is not available in simulation, so each run uses a synthetic
trace. Quiet frames carry noise below half the threshold. Runs of 2 to 8
"object" frames carry 1.25x to 20x the threshold. The share of object
frames is 16 %, 60.5 % and 65.4 %, the relevant-frame shares reported
for these applications. A reference model of the Idle/Active rules,
written in the testbench, predicts the mode after every frame and the
number of readouts and wake-ups. The design must match it exactly, and
every pixel read over SPI must match the sensor frame. The testbench
also prints the wake-up rate and the oscillator's share of the time per
application (under 0.3 % in these runs). It checks that the oscillator is
on for less than 1/39 of the frame period per readout.

`tb/vision_chip_model.sv` models only the sensor's digital outputs. It
makes random frames of a chosen activity, and its rows are spaced so that
a readout lasts about 300 us. `tb/spi_master.svh` holds the SPI master
tasks.

To simulate with Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb -Itb rtl/cam_pkg.sv \
    tb/tb_smart_cam_fpga.sv --top-module tb_smart_cam_fpga -o sim
./obj_dir/sim
```

Substitute any other testbench name. The full-system test simulates one
second of operation in a few seconds.

Limits of the evidence:

* The clock-domain crossings are checked by simulation only. No
  formal CDC analysis or static timing has been done.
* The sensor model follows the published output format, not measured
  sensor waveforms.
