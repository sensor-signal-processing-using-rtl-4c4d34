# A layered processing-element array for sensor signal processing

Small sensing devices need some on-board computation, so that a node sends results
instead of raw samples. A general-purpose microcontroller, or an FPGA fabric with fixed
word widths and a fixed routing mesh, pays for flexibility the node does not use. The
architecture implemented here builds the processing element (PE) of such a node from four
layers, from bottom to top:

1. **I/O circuitry.** The sensor interface. Sensors deliver 8, 12, 14 or 16-bit samples.
2. **Fine grained layer.** A finite state machine with datapath (FSMD) that sequences the
   work of one PE.
3. **Coarse grained function definition layer.** Whole application operations
   implemented as single operators. The main one is a 3x3 convolution; basic arithmetic
   primitives sit beside it.
4. **Bypass connection layer.** Switches that connect a PE only to its neighbours and can
   route the data stream around a PE.

The main idea is granularity. A filter such as a 3x3 convolution is one operator with its
own datapath, not a schedule of many small add and multiply steps on a generic ALU array.
Applications are composed by chaining such operators from PE to PE. Each PE holds several
*dynamic contexts*: sets of registers and an instruction that choose what its operator
computes. The evaluation workloads are a 3x3 Laplacian edge filter and a Gaussian
smoothing filter followed by a Laplacian. The default configuration of this RTL
(two PEs) runs both.

The architecture is described only at the level of layers and operator kinds. This RTL
therefore fixes many details of its own. The sections below give those choices, and
"Departures and open points" lists them together.

## Data flow

```
 raw sample  +-----------+   +--------+        +--------+
 ----------->| sensor_io |-->| switch |--...-->| switch |-----> out_*
 (8..16 bit) +-----------+   |  PE 0  |        |  PE 1  |
                             +--+--^--+        +--+--^--+
                                |  |              |  |
                             +--v--+--+        +--v--+--+
                             |  pe 0  |        |  pe 1  |
                             +--------+        +--------+
```

Every arrow is a valid/ready stream of signed 18-bit pixels. A word moves on a clock edge
where both `valid` and `ready` are high. With `bypass = 0`, the switch beside PE *k*
feeds the incoming stream into the PE and sends the PE's results on. With `bypass = 1` it
sends the incoming stream on unchanged, and the PE sees nothing. So with two PEs the array
can compute:

| PE 0 bypass | PE 1 bypass | Output                               |
|-------------|-------------|--------------------------------------|
| 0           | 0           | op1(op0(image)), e.g. Laplacian of Gaussian |
| 0           | 1           | op0(image)                           |
| 1           | 0           | op1(image)                           |
| 1           | 1           | the masked sensor samples themselves |

## Inside a PE

`pe` ties the following blocks together:

- **`pe_fsmd`, the fine grained controller.** In IDLE it waits for `start`. If the PE is
  not bypassed, it latches the frame width, height and context number, then enters RUN.
  In RUN it opens the PE's input and counts accepted pixels in raster order. After the
  last pixel of the frame it spends one clock in DONE (`done` pulses) and returns to
  IDLE. For every accepted pixel it reports the column and whether the 3x3 window that
  ends at that pixel lies wholly inside the frame (`col >= 2 && row >= 2`).
- **`window_gen`, the line buffers.** One memory of `MAX_W` words. Each word holds the
  pixels of rows y-1 and y-2 at one column. Two register columns hold the rest of the
  window. When a pixel at column *x* is accepted, the new window column is
  {buffer row y-2, buffer row y-1, new pixel}, the window shifts one column left, and
  the buffer word at *x* is rewritten as {row y-1, new pixel}. The window is produced
  combinationally, so the operator works on it in the same clock in which the pixel
  arrives.
- **`conv3x3_op`, the convolution operator.** It computes
  `y = sat( (sum_i win[i]*coef[i]) >>> shift )`. The sum is exact (30 bits). The shift
  is arithmetic. `sat` clamps to the 18-bit signed range [-131072, 131071]. Taps are
  numbered `r*3 + c`, with row 0 at the top (oldest) and column 0 at the left (oldest).
- **`basic_alu`, the basic primitives.** They act on the window's centre pixel `a` and
  the context constant `k`:

  | opcode | name | result |
  |---|---|---|
  | 0 | CONV | convolution (computed by `conv3x3_op`) |
  | 1 | ADD  | sat(a + k) |
  | 2 | SUB  | sat(a - k) |
  | 3 | MUL  | sat((a*k) >>> shift), a fixed-point gain |
  | 4 | DIV  | sat(a / k), truncating toward zero; k = 0 gives +max or -max by the sign of a |
  | 5 | CMP  | 1 if a > k, else 0 (a threshold map) |

  Because they use the window centre, the basic operations give the same frame geometry
  as the convolution. Offset and gain correction, for example, are ADD and MUL.
- **`context_regs`, the dynamic contexts.** There are `N_CTX` of them (default 4). Each
  holds nine 8-bit signed coefficients, a 5-bit shift, an 18-bit constant `k` and a
  3-bit opcode. A context can be written at any time. The controller reads the context
  chosen at frame start. Software can therefore load the next context while the current
  one runs, and switch contexts between frames.

A single output register follows the operators. The input is ready only while a frame
runs and while that register is empty or being emptied. A stalled consumer therefore
stalls the PE at once, and no data is lost.

### Timing

- **Throughput.** One pixel per clock, with no gaps or stalls, through any number of
  PEs.
- **Latency.** A result leaves a PE one clock after the pixel that completes its window.
  `sensor_io` adds one register stage.
- **Frame geometry.** A PE produces results only for windows that lie fully inside the
  frame. A W x H frame gives (W-2) x (H-2) results, in raster order. The frame size
  written for PE 1 is therefore the size of the stream that reaches it: W-2 by H-2
  behind a processing PE 0, or W by H behind a bypassed one.
- **Full-frame timing.** For a W x H frame through two cascaded PEs, the first result
  appears about 4W clocks after the first pixel. The (W-4) x (H-4) results then span
  (H-5)*W + (W-4) clocks.

## Sensor I/O

`sensor_io` takes a 16-bit raw sample. It keeps the low 8, 12, 14 or 16 bits, selected by
the `fmt` control word, and zero-extends the result to an 18-bit pixel. It does not
rescale. Like a PE, it has a one-word output register with valid/ready. The analog and
mixed-signal front end that would deliver the raw sample is not part of this RTL: its
output is the top's `sensor_*` port.

## Programming the array

`pe_array_top` has a write-only configuration bus: `cfg_we`, a 12-bit `cfg_addr` and an
18-bit `cfg_wdata`, one word per clock.

| `cfg_addr` | Meaning |
|---|---|
| `0 ppp cccc rrrr` | Context word. PE `ppp`, context `cccc`. Word `rrrr`: 0-8 are the coefficients (8-bit signed, in the low bits), 9 the shift, 10 the opcode, 11 the constant `k`. |
| `1 ... 0x00` | Sensor width: 0 = 8, 1 = 12, 2 = 14, 3 = 16 bits (reset: 16). |
| `1 ... 0x10 + 4p + 0` | Frame width for PE p. |
| `1 ... 0x10 + 4p + 1` | Frame height for PE p. |
| `1 ... 0x10 + 4p + 2` | Context used by PE p from its next frame on. |
| `1 ... 0x10 + 4p + 3` | Bypass of PE p (1 = bypassed). |

A pulse on `start` begins a frame in every PE that is not bypassed. `pe_busy` and
`pe_done` report per-PE progress. Change frame sizes, bypass bits and the sensor width
only between frames. The hardware does not enforce this.

For example, this configures a Laplacian of Gaussian on a 640 x 480 image. The kernels
are the usual textbook ones:

```
PE 0, context 0: coef = 1 2 1 2 4 2 1 2 1, shift = 4, op = 0   (Gaussian /16)
PE 1, context 0: coef = 0 1 0 1 -4 1 0 1 0, shift = 0, op = 0  (Laplacian)
0x810 = 640, 0x811 = 480, 0x814 = 638, 0x815 = 478, bypass words 0
start, then stream 640*480 samples; 636*476 results come out.
```

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `N_PE`  | 2   | `pe_array_top` | PEs in the chain. The fewest that run the cascaded workload. |
| `N_CTX` | 4   | top, `pe`, `context_regs` | Dynamic contexts per PE. |
| `MAX_W` | 640 | top, `pe`, `window_gen` | Largest frame width; sets the line-buffer depth. |
| `MAX_H` | 480 | top, `pe`, `pe_fsmd` | Largest frame height. |
| `SENSOR_W` | 16 | `pe_pkg` | Widest sensor sample. |
| `PIX_W` | 18 | `pe_pkg` | Signed pixel word inside the array. |
| `COEF_W` | 8 | `pe_pkg` | Signed coefficient width. |

Only the sensor widths and the 3x3 operator size come from the architecture. All other
values are choices of this implementation. At the defaults, each PE holds 640 x 36 bits
of line buffer.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`. Results are compared with an independent integer
model in `tb/tb_ref_pkg.sv`.

| Testbench | What it checks |
|---|---|
| `tb_sensor_io` | All four widths, random source gaps and consumer stalls, order and masking |
| `tb_window_gen` | Every window tap against the frame, for several frame sizes, with idle gaps |
| `tb_conv3x3_op` | Gaussian and Laplacian kernels, saturation, 2000 random kernels and windows |
| `tb_basic_alu` | All five operations, divide by zero, overflow, 5000 random cases |
| `tb_context_regs` | Random writes to all contexts, read back, ignored and undefined words |
| `tb_pe_fsmd` | Columns, the window-valid rule, results per frame, done pulse, context latch, disabled start |
| `tb_bypass_switch` | Routing of data, valid and ready in both modes |
| `tb_pe` | Four contexts, frames with gaps and stalls, one-pixel-per-clock rate, one-clock latency |
| `tb_pe_array_top` | End to end: cascade, each bypass combination, context switches, sensor width switches, stalls; fails if any of these never happens |
| `tb_pe_array_full` | Both filter workloads on 640 x 480 frames at the default parameters: Gaussian then Laplacian, then the Laplacian alone with PE 1 bypassed; every result and the streaming rate |

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          rtl/pe_pkg.sv tb/tb_ref_pkg.sv tb/tb_pe_array_full.sv --top-module tb_pe_array_full
./obj_dir/Vtb_pe_array_full
```

Any other testbench runs the same way with its own name. The full-frame run takes a few seconds. The PE and the controller also carry assertions
for their handshake rules:

- A result held while the consumer stalls stays unchanged.
- A pixel is accepted only while a frame runs.

## Departures and open points

- **The operators are fixed RTL.** In the original flow, a high-level synthesis tool
  produces the PEs from C code, with the operators registered as macro blocks in a
  database. Here the operators are hand-written RTL. Their choice is set at run time by
  contexts, not at synthesis time.
- **No operator-database or binding mechanism.** The synthesis-flow side of the
  architecture, where operators are registered and reused automatically during binding,
  is a tool feature and has no hardware counterpart.
- **Only the convolution is dedicated.** Other dedicated functions that the architecture
  names as typical (signal compensation, feature point identification, image compression)
  are not built as operators. Only the convolution and the basic primitives are. Simple
  compensation can be done with ADD/MUL, and thresholding with CMP.
- **Instruction sharing.** Sharing one instruction set among several contexts is done by
  writing the same opcode into each of them. There is no shared instruction table.
- **Layout-only claims.** Layout area, LUT counts and power figures depend on the
  synthesis flow and the target device, and say nothing about function. The comparison
  baselines are not implemented: a dynamically reconfigurable array of basic ALUs, and a
  plain FPGA-library design.
- **Assumed details.** The following are all assumptions:
  - the stream handshake;
  - the frame protocol;
  - the handling of image borders: no output is produced for them;
  - the register map;
  - reset values: an asynchronous active-low reset clears every register except the
    line buffers, which are always written before they are read; the sensor width
    resets to 16 bits;
  - the pixel, coefficient and shift widths;
  - the PE count;
  - the context count;
  - the maximum frame size.
- **Idle output bits.** Some output bits are constant or wired through by construction:
  - the two top bits of the sensor pixel are zero;
  - the bottom-right window tap is the incoming pixel;
  - a switch passes its input data to the PE unchanged.
