# Syntroids in SystemVerilog

Syntroids is a small space shooter that runs entirely in FPGA logic. There is
no processor. The player holds a 32 x 32 RGB LED panel with a motion sensor
(accelerometer and gyroscope) attached to it:

- Turning the panel turns the spaceship.
- Tilting it switches the view.
- A quick push towards an enemy fires a shot.

Enemies ("asteroids") fly in from all sides towards the ship in the middle.
A hit removes the enemy and scores a point. An enemy that reaches the ship
ends the game, and the next push starts a new one.

The original game was built from two dozen small controllers, each
synthesized automatically from a temporal-logic specification. Hand-written
functions and predicates supplied the data operations. This repository gives
a register-transfer version of the same architecture:

- one SystemVerilog module per controller of the original;
- the original's module boundaries and signal names, where it gives them;
- the temporal rules of the original's published specifications, met by
  simple hand-written state machines.

Where the original leaves something open, this design makes its own choice. Those
choices are listed under [Departures and own choices](#departures-and-own-choices). Such gaps include
the exact pixel art, the thresholds of the gestures, the enemy speed law and
the sensor's register map.

## The three views

The game state is the same in every view; only the drawing changes.

| mode | how the panel is held | picture |
|------|-----------------------|---------|
| radar (0) | flat, screen up | top view. The ship is a white 2 x 2 block in the centre. Each enemy is a dot at its angle relative to the ship's heading, and its distance is scaled down by 4. |
| cockpit (1) | upright, facing the player | view through the windshield. An enemy within `VIEW_R` = 40 distance units shows as a square. The square gets larger as the enemy comes closer, and is placed left or right by its angle relative to the heading. |
| score (2) | upside down | one dot per point, filled row by row, in the colour of the nearest enemy |

Whenever the game is over, the score screen is shown with both diagonals
drawn in red, whatever the mode.

Each enemy has a fixed colour by index: blue, yellow, green, purple, cyan
(repeating).

## Block structure and data flow

```
 clk_100mhz -> clk_prescaler (/10) -> clk (10 MHz game clock)

 SPI pins <-> spi_master (spi_write, spi_read)      sensor_selector -> chip selects
                 ^  spi_cmd / spi_rsp
         submodule_chooser  <- part_ctrl -  sensor_ctrl (schedule)
          ^        ^        ^
   sensor_init  sensor_part  sensor_part
                (accel)      (gyro)
                 \ register commands /
               register_manager -> 6 x sensor_register
                    acc x,y,z   gyro x,y,z
                          |
     rotation_calculator (heading)  gamemode_chooser (mode)  action_converter (shot/start)
                          |
          game_logic <-> 4 x enemy_module (angle, radius)
                          |
     radar_board   cockpit_board   score_board      (one pixel per clock each)
                          |
                    game_module (pick pixel by mode / game over)
                          |
                    led_matrix + video_ram -> panel pins
```

Every drawing module walks over all 1024 pixels, one pixel per clock. Each
clock it offers the colour of the pixel it is at. `game_module` registers the
pixel of the active view and writes it into the video memory. So the memory
is completely redrawn every 1024 clocks, about 10,000 times per second. The
panel driver reads the memory at its own, much slower, pace. The two sides
never wait for each other.

The main interface types are in `syntroids_pkg.sv`:

- `pixel_t`: x, y and 3-bit colour.
- `enemy_t`: 8-bit angle (256 steps per turn) and 6-bit radius. Radius 63
  is the edge and 0 means the enemy has reached the ship.
- `spi_cmd_t` / `spi_rsp_t`: an SPI read or write command, and its answer.
- `reg_cmd_t`: one received sensor byte, sent to a sensor register.
- `mode_e`: the three views.
- `part_e`: which sensor part is scheduled.

## Driving the LED panel

This is the least obvious part of the design, and the part whose
specification the original gives in the most detail.

### The panel interface

The panel is split into an upper half (rows 0..15) and a lower half
(rows 16..31). The two halves are driven in parallel and share all pins
except colour.

Each half has three parts:

- a 32-pixel shift register, fed from `color1` (upper half) or `color2`
  (lower half), which shifts on every rising `extclock`;
- a latch that copies the shift register while `buffer_pin` is high;
- a line selector, `row_addr` (4 bits, shared by both halves).

The panel shows one line per half at a time: the latched content, on the line
chosen by `row_addr`. `driver_pin` is the panel's output disable. The game
never uses it, so it is tied low.

### One column step

`led_matrix` has one shared read port on the video memory. The memory has one
clock of read latency. For each column `x` of the next line `y+1`, the driver
runs a fixed sequence of six states:

| state | what happens |
|-------|--------------|
| LOOK1 | address pixel (x, y+1) of the upper half |
| LOOK2 | `color1` takes the memory output. Address (x, y+1) of the lower half. |
| LOOK3 | `color2` takes the memory output. Address the read-back pixel. Raise `extclock` for the next clock. If x = 31, raise `buffer_pin` too. |
| CLKH | `extclock` is high. Colours and coordinates are held stable. The read-back colour appears. |
| CLKL | `extclock` is low again and x advances. When x wraps to 0, y advances too, so `row_addr` now names the line just latched. |
| WAIT | 2^`WAIT_W` idle clocks (16 by default) while `waitcounter` runs until it overflows to 0 |

The WAIT state slows the shift clock. If the data is shifted in too fast,
LEDs next to the lit one glow faintly ("ghosting").

A column takes 5 + 2^`WAIT_W` = 21 clocks. A line takes 32 x 21 = 672
clocks, and a full frame of 16 line pairs takes 10,752 clocks. That is
1.08 ms at 10 MHz, or about 930 frames per second.

The five working states are the shortest possible step. For the driver
without the ghosting wait, the original showed that no controller meeting its
rules can advance x more often than every five clocks.

### Rules the state order meets

The original's rules for this driver hold, in this form:

- A colour is taken from memory only in the clock after a lookup of its own
  address.
- There is no lookup in the very first clock.
- While `extclock` is high, the colours and both coordinates hold.
- x advances exactly once per shift clock.
- `buffer_pin` is high exactly in the clock before x wraps from 31 to 0.
- y advances exactly on that wrap.
- The wait counter only runs after `extclock` falls, and x stands still
  until the counter has overflowed.

Two of these are checked by assertions in the module. The testbench
rebuilds the panel from the pins and compares every latched line with the
video memory.

### Timing to watch on real hardware

- `buffer_pin` rises together with the 32nd `extclock` edge of a line. A
  panel that latches on the rising edge of its latch input must therefore
  take in the 32nd pixel in the same edge. The testbench models that
  behaviour. If a particular panel needs one more clock of setup, move
  `buffer_pin` one state later.
- `row_addr` changes two clocks after the latch pulse (in CLKL). For one
  clock, the new line content is shown on the old line address.

### Read-back port and pixel writes

The read-back port (`xcoordinate`, `ycoordinate` → `color`) exists as in the
original. The game does not use it.

Pixel writes (`write`, `writecolor` at `xcoordinate`/`ycoordinate`) go
straight to the memory's write port. They are independent of the refresh.

## Game rules (`game_logic`, `enemy_module`)

- **Enemies.** Each `enemy_module` holds one enemy in polar form. A `move`
  pulse takes one step inward: radius − 1, stopping at 0. A `respawn` pulse
  puts the enemy back at radius 63 on a new angle.
- **Respawn angles.** New angles come from an 8-bit LFSR, spread by
  i·256/N so that enemies respawned together do not overlap.
- **Enemy speed.** A divider gives one tick every `MOVE_DIV` = 65536 clocks
  (6.55 ms). Each enemy steps inward every `period` ticks:
  - `period` starts at 12, so an enemy needs about 5 s to come in from the
    edge;
  - it drops by one for every time that enemy is shot, down to 2 (0.8 s).

  This gives the "faster and faster" enemies of the original, with numbers of
  this design's own.
- **Shots.** The enemies are visited round-robin by `counter`, one per clock.
  A shot opens a window of N clocks (`shotCounter`), so each enemy is tested
  exactly once. An enemy is hit when both hold:
  - its radius is at most `VIEW_R` = 40;
  - its angle is within ±`HIT_TOL` = 6 steps (±8.4°) of the heading.

  A hit adds one point and respawns that enemy. A shot can hit several
  enemies if they line up.
- **Score rules** (the original's three rules):
  - `gamestart` clears the score;
  - while the game is over and not restarted, the score holds;
  - while running, the score rises exactly when the shot window is open and
    the visited enemy is hit.

  Exception: in the clock in which an enemy reaches the ship, the game ends
  and the score does not rise.
- **Game over.** The game is over as soon as any enemy reaches radius 0. An
  enemy whose respawn is being carried out in that very clock does not count.
  Without this exception, a restart would end at once, because the enemies of
  the last game are still at radius 0.
- **Reset.** After reset the game is over, with score 0. The first push
  starts the first game.
- **Score colour.** The score is shown in the colour of the enemy with the
  smallest radius, the most dangerous one.

## Drawing (`radar_board`, `cockpit_board`, `score_board`, `game_module`)

All three boards count x every clock and y on every x wrap. The counters start
together after reset, so the pixels they offer always belong to the same
(x, y).

- **Radar.** Each clock, one enemy's position is converted to Cartesian form.
  With `rel` = angle − heading and d = radius/4 (0..15 pixels):

  ```
  x = 16 + (d·sin(rel)) >>> 4
  y = 16 − (d·cos(rel)) >>> 4
  ```

  Sine and cosine are taken at 64 steps per turn, built from a 17-entry
  quarter-wave table round(16·sin(kπ/32)), k = 0..16. Heading 0 points up.
  The results are kept in registers, so a position is at most N clocks old.
  The player block overrides enemies.
- **Cockpit.** An enemy with radius r ≤ 40 is drawn as a square:
  - side s = (41 − r)/4, from 0 to 10 pixels;
  - centred at column 16 + rel (rel as a signed 8-bit number) and row 16.

  Where squares overlap, the nearest enemy is drawn.
- **Score.** The first `score` pixels in row order are lit.
- **Selection.** `game_module` picks the score board when the game is over,
  otherwise the board of the current mode. It registers the result as a
  write command for the video memory.

## Reading the motion sensor

### Schedule (`sensor_ctrl`)

`part_ctrl` is a one-clock start command for one sensor part. It follows the
original's four rules:

- initialisation is started first, in the first clock after reset, and never
  again;
- the accelerometer part is started when the initialisation or the gyroscope
  part finishes;
- the gyroscope part is started when the accelerometer part finishes;
- at all other times the command is "none".

So each reading part runs to completion before the next starts, and both
run again and again.

### The parts

- `sensor_init` writes two configuration registers: both sensors on at
  952 Hz output rate.
- Each `sensor_part` reads six consecutive registers (x, y, z, low byte then
  high byte):
  - the accelerometer instance reads 0x28..0x2D;
  - the gyroscope instance reads 0x18..0x1D.

  It sends its first read command in its start clock. In the clock in which
  an answer arrives, it sends both the next read command and a register
  command carrying the received byte. After the sixth answer it raises
  `finished` instead.

### Routing (`submodule_chooser`, `spi_master`, `sensor_selector`)

`submodule_chooser` remembers the last part that was started and forwards
that part's SPI commands to the SPI controller, along with its sensor type.
The start pulse goes directly to the part.

A part's last register command arrives in the same clock as its `finished`.
By then the schedule has already moved on to the next part. So register
commands are taken from the part that was selected before this clock.

`spi_master` turns a command into two bytes, in SPI mode 3 (clock idles high,
data sampled on the rising edge, MSB first):

- the first byte is {read/write bit, 7-bit address};
- for a write, the second byte is the data, sent by `spi_write`;
- for a read, `spi_read` clocks the second byte in.

One transaction takes 32·`CLK_DIV` + 3 = 131 clocks. The serial clock runs
at 10 MHz / 4 = 2.5 MHz. The chip select is active during a transaction and
goes inactive for at least one clock between transactions.

`sensor_selector` drives one chip select per sensor type. Only type 0, the
combined accelerometer/gyroscope, is used, so `spi_cs_n[1]` stays high.

A full accelerometer + gyroscope round takes 12 x 131 = 1572 clocks. The
game therefore sees about 6360 new values per sensor per second.

### Storing values (`register_manager`, `sensor_register`)

- Bytes with an even index are the low bytes. `register_manager` caches
  them.
- A byte with an odd index completes a value: it writes {high, low} into
  `sensor_register` number `module_type`·3 + index/2.
- Each `sensor_register` holds its 16-bit value and raises `updated` for one
  clock after every write.

## From motion to game input

- **Heading (`rotation_calculator`).** On each new gyroscope sample, the rate
  of one axis is added to a 28-bit accumulator:
  - the x axis in cockpit mode, when the panel is upright;
  - the z axis otherwise.

  Rates below a dead band of 64 counts (0.56°/s) are dropped, so sensor
  noise does not drift the view. The heading is accumulator bits [27:20].
  With the default clocks, a 245°/s full-scale gyroscope and about 6360
  samples/s, turning the panel once turns the heading by about 351°. This
  scale depends on the sample rate, so `GYRO_SHIFT` (20) must change if the
  SPI timing changes.
- **Mode (`gamemode_chooser`).** The y rate is integrated in the same way
  into a tilt angle (256 steps per turn, 0 = flat). The mode follows the tilt
  read as a signed number:

  | tilt | mode |
  |------|------|
  | −32 .. 31 | radar |
  | 32 .. 95 | cockpit |
  | ≥ 96 or < −96 | score |
  | −96 .. −33 | mode held (no change) |

- **Gesture (`action_converter`).** A push is detected when both hold:
  - |acc z| ≥ 24000 counts (1.46 g at ±2 g full scale);
  - every gyroscope rate is below 4000 counts (35°/s), so the centrifugal
    pull of a turn is not taken for a push.

  The rising edge of this condition gives one pulse. The pulse is `shot`
  while the game runs and `gamestart` while it is over.

## Clocks and reset

- `clk_prescaler` divides the 100 MHz board clock by 10. The original game
  also ran at 10 MHz, for timing reasons.
- All game logic runs on the divided clock.
- `rst` is synchronous and active high. It is registered once on the game
  clock, which gives `rst_g`.
- `rst_g` has a power-up value of 1. The game logic is then in reset even
  before the board reset has reached it.
- Hold `rst` for at least 20 board clocks.

## Top level ports (`syntroids_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk_100mhz, rst | in | 1 | board clock, synchronous reset |
| color1, color2 | out | 3 | {R,G,B} of the upper/lower half pixel being shifted |
| row_addr | out | 4 | line shown in both halves |
| extclock | out | 1 | panel shift clock |
| buffer_pin | out | 1 | panel latch |
| driver_pin | out | 1 | panel output disable (always 0) |
| spi_sclk, spi_sdi | out | 1 | SPI clock and data to the sensor |
| spi_sdo | in | 1 | SPI data from the sensor |
| spi_cs_n | out | 2 | active-low chip selects (index 0: accel/gyro) |
| gameover, score, mode | out | 1, 10, 2 | game status |

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| PRESCALE | 10 | top | board clock / game clock (from the original: 100 MHz → 10 MHz) |
| N_ENEMIES | 4 | top, game_logic, boards | number of enemies (the original's radar photo shows four) |
| MOVE_DIV | 65536 | top, game_logic | game clocks per enemy-speed tick |
| START_PERIOD, MIN_PERIOD | 12, 2 | game_logic | ticks per enemy step at the start / at the fastest |
| HIT_TOL, VIEW_R | 6, 40 | game_logic, cockpit_board | aim tolerance in angle steps; nearest visible radius |
| SPI_CLK_DIV | 4 | top, spi_* | game clocks per serial clock period (one bit) |
| WAIT_W | 4 | top, led_matrix | ghosting wait of 2^WAIT_W clocks per column (WAIT_W at least 1) |
| GYRO_SHIFT | 20 | top, rotation/gamemode | integrator scale |
| DEADBAND | 64 | rotation/gamemode | gyroscope dead band |
| ACC_TH, GYR_TH | 24000, 4000 | action_converter | gesture thresholds |

The screen size is 32. It is set by `SCREEN` and the 5-bit coordinate type in
the package, and by `SIZE` in the display modules.

## Departures and own choices

**Departures from the original:**

- **Line address width.** The original describes a 16-bit line-select pin.
  A 32-row panel driven as two halves needs only 16 lines per half, so this
  design uses a 4-bit binary address.
- **SPI controller structure.** The original splits the SPI read and write
  parts into three controllers each (state, clock, data). Here each is one
  module with a bit counter.
- **Runtime functions.** The original's hand-written runtime functions (42
  functions and 24 predicates) are not published. Their roles are filled by
  plain expressions inside the modules:
  - hit test;
  - polar to Cartesian conversion;
  - square size;
  - random angles;
  - colours;
  - the sensor register map.
- **Registers between modules.** The original's registers between its
  synthesized modules are placed here on the enemy data, the sensor
  registers and the game module's output. Their exact places in the original
  are not known.

**Design choices.** These are this design's own choices, not the original's:

- the numbers in the parameter table, except PRESCALE, N_ENEMIES and the
  screen size;
- the pixel art of every view;
- the LED driver's step order;
- the tilt bands;
- the axis used in each mode;
- the sensor registers and configuration, which assume an LSM9DS1-type
  sensor (as on Digilent's PmodNAV) with ±2 g and 245°/s ranges.

## Verification

Every module has a self-checking testbench in `tb/` named
`tb_<module>.sv`. Each one:

- compares the module's outputs with values computed independently in the
  testbench, most of them on random stimulus;
- prints `TB_RESULT checks=<n> failures=<n>`;
- has a watchdog.

`tb/sensor_model.sv` is a behavioural SPI mode-3 model of the sensor, with a
register array, read and write counters, and a one-shot override of a single
register pair.

Some checks deserve mention:

- **LED driver.** The testbench rebuilds the panel from the pins and
  compares every latched line with the video memory. It also checks the
  column step count and the latch timing.
- **Radar.** The testbench recomputes positions with real-valued sine.
- **SPI controller.** The testbench checks the exact transaction length.
- **Game logic.** The testbench works for any number of enemies; it has
  been run with 1, 2, 3, 4, 7 and 8 (the file sets 4).

Two testbenches run the whole game:

- **`tb_syntroids_top`** runs with reduced timing: prescaler 2, SPI divider
  2, wait 2 clocks, one speed tick per 64 clocks, and `GYRO_SHIFT` 8. It
  plays a full game:
  1. sensor initialisation;
  2. a push that starts the game;
  3. a tilt to cockpit view;
  4. a turn towards an enemy, a hit, and a miss;
  5. a tilt to score view;
  6. an enemy reaching the ship;
  7. a check of the game-over screen on the panel pins;
  8. a restart.

  It counts each mechanism (starts, shots, hits, enemy moves, latches, wait
  clocks, memory writes, time in each mode, SPI reads), and any mechanism
  that never happened counts as a failure.
- **`tb_syntroids_full`** uses every default. It runs the initialisation and
  the start gesture. It then checks one complete panel refresh against the
  radar picture predicted from the enemies' positions, and that every line
  takes exactly 672 game clocks. It also checks that the gyroscope is sampled
  every 1572 game clocks. It takes a few seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/syntroids_pkg.sv \
          tb/tb_syntroids_top.sv --top-module tb_syntroids_top -Mdir obj
obj/Vtb_syntroids_top +verilator+rand+reset+2
```

Everything in `rtl/` passes Verilator lint and the Yosys slang front end. The
remaining lint notes are listed in each module's header:

- unused signals (tilt angle, hit event, read-back colour);
- the power-up value of `rst_g`.

Generic synthesis of the top gives:

- about 1000 cells and 410 flip-flops;
- a 1024 x 3 memory plus small tables.

Mapped to an iCE40 (yosys `synth_ice40`, before place and route), the top
uses 1361 four-input LUTs, 490 flip-flops, 660 carry cells and one 4 kbit
block RAM for the video memory. That is roughly 1400 to 1900 logic cells of
the 7680 on an iCE40 HX8K.

**Not verified:**

- timing closure on an FPGA;
- behaviour with a real panel or sensor;
- whether the chosen thresholds feel right in play.
