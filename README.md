# Video-sensor boresighting on an FPGA: SystemVerilog RTL

A camera (or radar, or lidar) mounted on a vehicle is never perfectly aligned with the vehicle's
axes, and it drifts out of alignment when it is knocked. This design corrects the misalignment
electronically. An inertial measurement unit fixed to the vehicle and a cheap two-axis
accelerometer fixed to the camera both feel the vehicle's accelerations. The differences between
what they report are mostly due to the misalignment. A Kalman filter, running as software on a
small soft processor, turns those differences into roll, pitch and yaw estimates of the camera
relative to the vehicle. The FPGA hardware then applies the correction to the live video: every
output frame is the last captured frame rotated by the roll angle and shifted by the pitch and
yaw corrections, at one pixel per clock.

The RTL here follows the system published by Chappell, Macarthur, Preston, Olmstead, Flint and
Sullivan ("Exploiting Real-Time FPGA Based Adaptive Systems Technology for Real-Time Sensor
Fusion in Next Generation Automotive Safety Systems"). That system was written in Handel-C on a
Virtex-II board. This SystemVerilog version builds the hardware parts of it. Where the
publication gives only a block's purpose, the simplest circuit that does the job was written, and
every such choice is stated below and in the header comment of each file.

## What is in the RTL and what is not

```
   DMU (IMU) --CAN/RS232--> rs232_periph (SERIAL1) --+
   ACC       ----RS232----> rs232_periph (SERIAL2) --+
                            led_periph, switch_periph+-- sabre_bus <== peripheral bus ==  Sabre core
   touchscreen, GUI, bus memory (ports) ------------+        |                          (not built:
                            control_regs (ANGLES) ---+        |                           ports)
                                 |  roll/pitch/yaw, ready     |   block_ram x2 <== program/data buses
                                 v                            
                            video_ctrl  (wait for result -> capture || output -> swap banks)
                             |        |                 |
    camera pixels -> video_in     video_out (raster -> affine_rotate -> +shift -> read -> pixels) -> display
                             |        |
                            frame_bank_mux -> zbt_ctrl x2 ==> ZBT SRAM bank 0, bank 1 (pins)
```

Built as RTL (all in `rtl/`, top module `boresight_top`):

| module | role |
|---|---|
| `boresight_pkg` | bus request/response structs, address map, register indices, default sizes |
| `sincos_lut` | 1024-entry sine table, cosine read a quarter turn ahead; `rtl/sine_1024.hex` |
| `affine_rotate` | the five-stage rotation pipeline |
| `video_out` | display raster scan, rotation, shift, frame-store read, black fill |
| `video_in` | frame capture into the frame store |
| `frame_bank_mux` | double-buffer routing of capture and display over two SRAM banks |
| `zbt_ctrl` | one per bank: drives the ZBT SRAM pins (late write, pipelined read) |
| `video_ctrl` | the main loop: wait for the processor, capture and display in parallel, swap |
| `control_regs` | twelve memory-mapped registers shared by processor and video path |
| `sabre_bus` | peripheral bus address decoder |
| `rs232_periph` (+ `uart_rx`, `uart_tx`) | serial link peripheral with receive FIFO |
| `led_periph`, `switch_periph` | board LEDs and switches |
| `block_ram` | processor program memory (8 Kbyte) and data memory (64 Kbyte) |

Outside the RTL. The top module has ports for each of these:

- **The Sabre processor core.** It is a 32-bit Harvard RISC whose instruction set is not
  published. The top has its three buses as ports: program memory, data memory and peripheral
  bus. A core that speaks the bus timing below can be attached there.
- **The Kalman filter and sensor-fusion algorithm.** This is processor software that uses
  software floating point. It is not hardware.
- **Touchscreen, GUI (line drawing) and a bus-memory peripheral.** These are only named in the
  original description. Each has its bus slot brought out as `ts_*`, `gui_*` and `busmem_*`.
- **The two external 2 Mbyte ZBT SRAM chips** (`zbt_*` pins). The video decoder and display
  drivers are also outside: the edge of this design is a plain pixel stream. The CAN-to-RS232
  converter and the sensors are external parts too.

## The rotation pipeline (`affine_rotate`, `sincos_lut`)

The correction applied to the picture is an affine transform `r' = A r + B`. Here `A` rotates by
the roll angle θ about a centre of rotation `(Cx, Cy)` and `B = (bx, by)` is a shift:

```
OutX = (InX-Cx)·cosθ − (InY-Cy)·sinθ + Cx        then  + bx
OutY = (InY-Cy)·cosθ + (InX-Cx)·sinθ + Cy        then  + by
```

The pipeline keeps the original five-step split. A new coordinate enters every clock and its
result leaves exactly five clocks later:

| stage | work | registers at its end |
|---|---|---|
| 1 | look up sin θ and cos θ | `sin1`, `cos1` (inside `sincos_lut`), coordinate and centre delayed |
| 2 | subtract the centre, convert to fixed point | `t0 = (InX−Cx)·16`, `t1 = (InY−Cy)·16` |
| 3 | four products | `t2 = t1·(−sin)`, `t3 = t0·cos`, `t4 = t0·sin`, `t5 = t1·cos`, each `>>> 14` |
| 4 | sum, convert back to integer | `(t2+t3+8) >>> 4`, `(t4+t5+8) >>> 4` |
| 5 | add the centre back | `out_x`, `out_y` |

Number formats. The original states only "16-bit fixed point", so these formats are this
design's choice:

- **Angle.** θ is a 10-bit index with 1024 steps per full turn, i.e. 0.3516° per step.
- **Sine and cosine.** Signed 16-bit Q1.14, so 16384 stands for 1.0. The single table holds
  `round(16384·sin(2πk/1024))`, with +16384 clamped to 16383. Cosine is read at index `k+256`.
  The table file is 1024 lines of 4-digit hex, generated from that formula.
- **Intermediate values** `t0..t5`. Signed 16-bit Q12.4, so coordinates up to ±2047 pixels from
  the centre fit.
- **Products.** Q12.4 × Q1.14 gives a 32-bit result, which is shifted right by 14 (arithmetic
  shift, so it rounds toward minus infinity).
- **fixed2Int.** Rounds half up: add 8, then shift right by 4.
- **Coordinates.** In and out are signed 12 bits.

Accuracy. The result is within one pixel of the exact rotation by the quantised angle; this was
checked for random inputs and over full 640×480 frames. The coarser limit is the table itself.
One step of 0.35° moves the corner of a 640×480 frame by about 2.5 pixels. The best table angle
for a given roll is therefore up to 0.18° (≈1.2 px at the corner) away from the estimate. The
roll estimates reported for the original system are −2.082°, 1.986°, −2.152° and −2.199°. They
round to ±6 steps (±2.109°), and the worst pixel error against the unquantised angle over a
full frame is 0.70 to 1.22 px. The filter itself claims about 0.01° confidence, so the display
path, not the filter, limits how exact the corrected picture is. A larger table (`ANGLE_W` in
the package and `ENTRIES`) would reduce this.

## Turning the rotation into a corrected picture (`video_out`)

The original describes the pipeline as mapping each input pixel to its output location. Written
that way, a rotated image gets holes wherever two input pixels land on one output pixel. This
design uses the transform the other way round. It scans the display raster, one position per
clock with x fastest. Each display position is fed to the pipeline as `(InX, InY)`, and the shift
`(bx, by)` is added to the result. The sum is the frame-store location whose pixel is shown
there: if it lies inside the stored frame the word is read, otherwise the pixel is black. So the
picture shown is the stored picture turned by −θ and moved by −(bx, by). Software picks the sign
it needs when it writes the registers.

The centre of rotation is the frame centre `(HRES/2, VRES/2)`. If the processor writes a non-zero
value to either centre register, both centre registers are used instead.

Timing of one frame:

- A `start` pulse begins the frame. The scan begins on the next clock.
- The rotation adds 5 clocks, forming the address adds 1, and the frame-store read adds
  `RD_LAT = 4`.
- The first pixel leaves 10 clocks after the clock that samples `start`.
- After that, one pixel leaves per clock, with `pix_sof` on the first and `done` on the last.
- `outside` marks each black fill pixel.
- There is no back-pressure: the display must accept a pixel every clock.

## Capture, double buffering and the main loop (`video_in`, `frame_bank_mux`, `video_ctrl`)

The two SRAM banks form a double buffer. While `video_in` writes the incoming frame into one bank,
`video_out` reads the previous frame from the other bank. `frame_bank_mux` does the routing:

- `bank_sel` names the bank being written.
- The reader gets the other bank.
- Read data is selected with `bank_sel` delayed by the read latency, so reads still in flight
  when the banks swap return from the bank they addressed.

Each bank is driven by its own `zbt_ctrl`. ZBT ("zero bus turnaround") SRAM samples address and
command at a clock edge and moves the data two edges later, for reads and for writes alike. So
reads and writes can follow each other on consecutive clocks without idle cycles. The controller
registers the command onto the pins and delays the write data and its output enable by two
further clocks. It captures read data in an input register, so read data is back `RD_LAT = 4`
clocks after the frame-store logic registers its request. The data bus is split into `dq_o`,
`dq_oe` and `dq_i`; the tristate buffer belongs in the I/O pad.

Each pixel is stored as one 32-bit word, with RGB in bits 23:0, at address `y·HRES + x`. A
640×480 frame takes 307 200 of the 524 288 words of a 2 Mbyte bank.

`video_ctrl` runs the loop that the original system's top level describes:

1. After reset it enables the video path once (`enable`; pixels are ignored before it).
2. It waits until the processor signals a new Kalman result. That signal is bit 0 of the STATUS
   register, which software sets by writing 1. While it waits, `stall_wait` is high and no video
   moves.
3. It clears the flag with `result_consume` and latches the roll, pitch and yaw values, so one
   frame is transformed with one set of values. It then starts capture and output in the same
   clock.
4. It waits until both have finished, in either order. Capture waits for the next camera
   start-of-frame pixel, so it may finish later than output.
5. It swaps the banks, then goes back to step 2.

So the display of iteration k shows the frame captured in iteration k−1, corrected with
iteration k's angles. The frame rate is set by the processor: no result, no new frame. An
assertion in the top checks that a swap never happens while a frame is in progress.

## The processor side

**Memories.** The processor has two 32-bit memories, both `block_ram` with one synchronous port
and one clock of read latency:

- **Program memory.** 2048 words (8 Kbyte), holding instructions and stack.
- **Data memory.** 16384 words (64 Kbyte), holding constants.

`INIT_FILE` loads a hex image at start-up. This is how machine code is merged into the FPGA
configuration without rebuilding the hardware.

**Peripheral bus** (`sabre_bus`). There is a single master, the processor, on a 32-bit bus:

- A request is a one-clock `re` or `we` strobe, carrying `addr` and `wdata`.
- The addressed peripheral answers on the next clock with `ack` and, for a read, `rdata`.
- The peripheral is chosen by `addr[11:8]`, and `addr[31:12]` must be zero.
- Any other address is answered by the decoder itself with `ack` and zero data, so a stray
  access cannot hang the processor.
- Assertions check that at most one slave answers at a time, and that a request never strobes
  `re` and `we` together.

| `addr[11:8]` | peripheral |
|---|---|
| 0 | LEDs: one register, low 8 bits drive the LEDs |
| 1 | switches: synchronised inputs, read only |
| 2 | touchscreen (external port) |
| 3 | GUI (external port) |
| 4 | SERIAL1: RS232 link to the IMU (through the CAN-to-RS232 converter) |
| 5 | SERIAL2: RS232 link to the camera accelerometer |
| 6 | ANGLES: control registers |
| 7 | bus memory (external port) |

**Control registers** (`control_regs`). There are twelve 32-bit registers, at word offsets
`addr[5:2]`. Offsets 12–15 read as zero.

| offset | register | used by hardware as |
|---|---|---|
| 0 | ROLL | bits 9:0 = rotation index θ (1024 per turn) |
| 1 | PITCH | bits 11:0 = vertical shift `by`, signed pixels |
| 2 | YAW | bits 11:0 = horizontal shift `bx`, signed pixels |
| 3 | STATUS | bit 0 = result ready (software sets, video controller clears) |
| 4–6 | roll, pitch, yaw covariance | not used by hardware; available to the GUI software |
| 7, 8 | centre of rotation x, y | all zero selects the frame centre |
| 9–11 | general purpose | — |

If software writes STATUS in the same clock as the controller clears it, the write wins.
Software must convert the filter's degrees into these units. θ = round(deg·1024/360) mod 1024.
The pixel shifts depend on the camera's focal length, which only the software knows.

**Serial links** (`rs232_periph`). Each link is 8N1 at `CLKS_PER_BIT` clocks per bit. The
default 434 is 115 200 baud at 50 MHz. The receiver samples in the middle of each bit and
rejects a start bit that is only a glitch. Received bytes go into a 16-byte FIFO, so the
processor can read whole sensor messages at once.

| offset | register | behaviour |
|---|---|---|
| 0 | DATA | a read pops the oldest byte (zero if empty); a write sends a byte, dropped if the transmitter is busy |
| 1 | STATUS | see the bits below |

STATUS bits:

- bit 0: data waiting.
- bit 1: transmitter busy.
- bit 2: overflow, sticky; write 1 to clear. A byte that arrives when the FIFO is full is
  dropped and sets it.
- bit 3: framing error, sticky; write 1 to clear. A byte whose stop bit is low is not stored
  and sets it.
- bits 15:8: number of bytes in the FIFO.

`irq` is high while data waits.

## Departures from the original description

- Fixed-point formats, rounding, table format and coordinate width are this design's. See
  the rotation pipeline section.
- The transform is an inverse map (display → stored position) with black fill. The original's
  wording suggests a forward map.
- The original writes the shift `B` as a diagonal 2×2 matrix. It is used here as the vector
  `(bx, by)` added after the rotation, the only reading under which `r' = Ar + B` is
  well formed. The original's listing of the pipeline shows only the rotation.
- The roll/pitch/yaw register encoding is this design's. So are the order of the twelve
  registers, the bus timing and the address map; the original names base-address constants but
  gives no values.
- The software listing of the original labels the IMU link "AMU Interface" and the accelerometer
  link "DMU Interface". Those labels disagree with the function names. The function names are
  followed here: SERIAL1 is the IMU (DMU), SERIAL2 is the accelerometer.
- Swapping the banks once per loop iteration is this design's reading of "double buffering".
- The original used platform-library drivers for the RAM and for video in and out. The RAM
  controller here is this design's own: standard ZBT timing, with a 32-bit data path and the
  parity bits of 36-bit parts unused. The video drivers are replaced by pixel streams with a
  start-of-frame flag.
- Frame size 640×480, LED and switch count (8), FIFO depth (16) and baud rate are assumptions.
  They are all parameters.
- Everything runs in one clock domain.

## Simulating

The testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M` and stops, and
each has a watchdog. Run them from the directory that holds `rtl/` and `tb/`: the sine table is
read by the relative path `rtl/sine_1024.hex`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/boresight_pkg.sv tb/tb_ref_pkg.sv tb/tb_boresight_top.sv --top-module tb_boresight_top
./obj_dir/Vtb_boresight_top
```

| testbench | what it shows |
|---|---|
| `tb_boresight_top` | whole system at 32×24. The testbench acts as the processor: memories, LEDs, switches, external slots, IMU and accelerometer bytes (including a FIFO overflow), a transmitted command byte, then four video iterations. Each output frame is checked pixel by pixel against the previous input frame rotated and shifted, and the start-to-first-pixel delay is checked (12 clocks from the STATUS write). It counts bank swaps, stall clocks, out-of-frame pixels, overflows and serial bytes, and fails if any is missing. |
| `tb_boresight_full` | the same test with every parameter at its default: 640×480 frames, full memories, 434 clocks per bit. Four iterations, about 1.2 million pixel checks, and every SRAM data phase checked against the ZBT pin protocol; a few seconds of simulation. |
| `tb_table1_roll` | the reported roll angles applied to a full 640×480 raster; prints the worst pixel error for each |
| `tb_affine_rotate` | random coordinates and angles, bit-exact against a reference, within 1 px of the real rotation, 5-clock latency |
| `tb_sincos_lut` | all 1024 sine and cosine entries against values recomputed with `$sin` |
| `tb_video_out`, `tb_video_in`, `tb_frame_bank_mux`, `tb_video_ctrl` | the video-path blocks on their own |
| `tb_zbt_ctrl` | controller against the ZBT chip model: pin timing of a write, back-to-back random reads and writes, 4-clock read latency |
| `tb_sabre_bus`, `tb_control_regs`, `tb_rs232_periph`, `tb_led_periph`, `tb_switch_periph`, `tb_block_ram` | the processor-side blocks on their own |

`tb/tb_ref_pkg.sv` holds the reference arithmetic. `tb/zbt_sram_chip.sv` is a behavioural model
of a ZBT SRAM chip at its pins. `tb/zbt_sram_model.sv` is a simpler fixed-latency memory, used by
`tb_video_out` and `tb_frame_bank_mux`, which test the blocks in front of the controllers. `tb/tb_boresight_body.svh` is the shared body of
the two system testbenches.

## Changing the design

- **Frame size.** `HRES`/`VRES` on `boresight_top`, or `H_RES`/`V_RES` in the package. A frame
  must fit in 2^19 words, and `video_in` asserts this.
- **Angle resolution.** `ANGLE_W` in the package, together with a new table file of
  2^`ANGLE_W` entries built with the formula above.
- **Serial rate.** `CLKS_PER_BIT` on the top.
- **Frame-store read latency.** `RD_LAT` in the package. It must equal the latency of
  `zbt_ctrl` plus the SRAM, which is 4.
- **Processor memories.** `PROG_WORDS`/`DATA_WORDS`. `PROG_INIT`/`DATA_INIT` on the top name hex
  images that the memories hold from configuration onwards. This is how the processor's program
  is built into the FPGA image, so new software needs no hardware rebuild. `tb_block_ram` checks
  such a load with a 16-word image, `tb/block_ram_init.hex`, whose word k is
  `(k·0x01010101) xor 0xA5C30000`.
