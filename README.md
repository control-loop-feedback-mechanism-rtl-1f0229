# A GALS mesh multiprocessor with per-processor throughput control

This is synthesizable SystemVerilog for a globally-asynchronous, locally-synchronous
(GALS) chip multiprocessor. It is a 6 x 6 mesh of small DSP processors. Each
processor runs from its own programmable oscillator. Neighbours exchange data
through dual-clock FIFOs, so no global clock crosses the chip. Each processor also
closes a feedback loop around its own clock. It measures the throughput it actually
delivers, compares that with a set point, and a PID controller raises or lowers the
oscillator frequency until the two match. A processor that does not need its full
speed therefore runs slower, which is where clock- and voltage-scaling power savings
come from.

The design follows the paper "Control Loop Feedback Mechanism for Generic Array
Logic Chip Multiprocessor" (V. Karthikeyan, V. J. Vijayalakshmi). In that paper
"Generic Array Logic" stands for GALS. The paper gives the architecture at block
level and no sizes, widths or instruction set, so much of what follows is this
implementation's own choice. The section "What comes from the paper" separates the two.

## The chip at a glance

```
     ext_in ──►┌────┐  ┌────┐  ┌────┐  ┌────┐  ┌────┐  ┌────┐
               │PE00│◄►│PE01│◄►│PE02│◄►│PE03│◄►│PE04│◄►│PE05│
               └─▲▼─┘  └─▲▼─┘  └─▲▼─┘  └─▲▼─┘  └─▲▼─┘  └─▲▼─┘
                  ...      6 x 6 tiles, nearest-neighbour links ...
               ┌─▲▼─┐
    ext_out ◄──│PE50│◄► ...
               └────┘

 one tile (pe_tile):
                 neighbour clocks + data
                     │          │
              ┌──────▼──┐  ┌────▼────┐      ┌──────┐
              │ FIFO0   │  │ FIFO1   │      │ IMEM │ 64 x 27
              │dual-clk │  │dual-clk │      └──┬───┘
              └────┬────┘  └────┬────┘         │
                   └─────►┌─────▼────────┐◄────┘
                          │ core + ALU/MAC├──► link out (data, valid, clock)
                          └──┬─────▲─────┘
                      DMEM ◄─┘     │ pe_clk
          ┌────────────┐   ┌───────┴──┐   ┌──────────┐   ┌─────────────┐
          │ throughput ├──►│   PID    ├──►│frequency ├──►│ ring osc.   │
          │ monitor    │   │controller│   │ scaler   │   │ (model)     │
          └────────────┘   └──────────┘   └──────────┘   └─────────────┘
                 config registers (set point, gains, routing, base code)
```

There are three kinds of clock. Each tile has its own `pe_clk` from its oscillator.
Each FIFO's write side runs on the clock of the neighbour that feeds it. One shared
reference clock `ref_clk` runs the configuration bus and the control loops. The
control loops use a fixed time base so that their measurements do not depend on the
clock they regulate.

## Crossing clock domains: links and dual-clock FIFOs

This is the part of the design that needs the most care, and most of the subtle
behaviour lives here.

**Source-synchronous links.** A tile drives its output word, a valid bit and its own
clock to all four neighbours. It raises valid only toward the direction in its
`out_dir` register. Each of the receiving tile's two FIFOs chooses one direction
(`in_sel`). It takes data, valid and the clock from that direction, and returns its
`full` flag the same way. The FIFO's write side is clocked by the sender's clock.
The FIFO is therefore the only place where two clock domains meet, and no signal
crosses a link without a synchronizer.

**Edge discipline.** The sender's output is registered (`pe_core`). An instruction
that writes the link commits on a rising edge of the sender clock, but only if
`full` is low at that edge. The word is on the link for the whole next cycle. The
FIFO's write side runs on the inverted forwarded clock, so it samples the word half
a cycle after launch, in the middle of the data eye. `full` is updated on that same
falling edge, and the sender sees it at its next rising edge. A low `full` at commit
time means at least one free slot, so a committed word is never refused or
duplicated. Any external sender or receiver on `ext_in_*`/`ext_out_*` must follow
the same rule: launch on the rising edge, sample on the falling edge. It must also
be able to take one more word after it raises `ext_out_full`.

**FIFO internals (`dcfifo`).** The FIFO follows the paper's clock-domain figure. It
has a write controller, a two-port memory, a read controller, and a block that
passes each side's address to the other. The addresses cross as Gray-coded pointers,
one bit wider than the address, through two-flop synchronizers. `full` and `empty`
are registered and conservative:

* A written word becomes visible to the reader 2-3 read-clock edges later.
* Freed space reaches the writer 2-3 write-clock edges after a pop.
* The read port is first-word-fall-through: `rdata` shows the oldest word while
  `empty` is low.

**Reset and unused links.** Each FIFO side leaves reset on its own clock (`rst_sync`).
While the write side is in reset, `full` is held high. A direction that no FIFO
listens to also reports full. In both cases a sender waits instead of pushing words
into a FIFO that is not there. This matters at start-up, when routing registers are
still being written.

The paper's central claim about GALS is a performance one. Once FIFOs are deep
enough and mappings avoid communication loops, the synchronizer latency
hides behind buffering. In this RTL that latency is the 2-3 cycle pointer delay above.
The FIFO depth is the parameter `FIFO_DEPTH` (default 32).

## The processor

The paper names an "ALU/MAC" datapath fed by an instruction memory, a data memory
and the two FIFOs. The instruction set is this implementation's. A 27-bit
instruction word holds:

| field | bits | meaning |
|---|---|---|
| `op` | 4 | NOP, MOV, ADD, SUB, MUL, MAC, AND, OR, XOR, SHR, JMP, BZ, BNZ, BNEG |
| `dst` | 2 | none, output link, accumulator, DMEM[addr] |
| `srca`, `srcb` | 3 each | FIFO0, FIFO1, accumulator, DMEM[addr], immediate, zero |
| `addr` | 7 | data-memory address, shared by every DMEM operand of the instruction |
| `imm` | 8 | sign-extended immediate, or branch target |

* **Execution.** One instruction per cycle. MUL keeps the low 16 bits of the
  product, and MAC computes `acc + a*b`. SHR is an arithmetic shift by `b[3:0]`. MOV
  uses only `srca`.
* **Branches.** JMP always loads `pc` from `imm`. BZ, BNZ and BNEG do so when the
  accumulator is zero, non-zero or negative.
* **Single address field.** Two DMEM operands of one instruction use the same
  address. Copying between two DMEM words therefore goes through the accumulator.
* **Empty stall.** An instruction that reads an empty FIFO waits. It retries every
  cycle with no side effect.
* **Full stall.** An instruction that writes the link while the downstream FIFO is
  full also waits.

These two stalls are the "empty stall" and "full stall" of the paper's analysis of
communication loops. Each tile counts them (`n_empty_stall`, `n_full_stall`).
`run` low holds `pc` at 0.

## The frequency control loop

The loop runs once per measurement window of `WINDOW` reference cycles (default
256):

1. **Throughput monitor.** A counter in the tile's clock domain counts words the
   core writes to its link. The count crosses to the reference clock as Gray code.
   At each window end the monitor reports the words in that window (`obtained`).
2. **PID controller.** This follows the paper's PID figure: the set point minus the
   obtained throughput gives the error, and three branches are summed:

   `u = (Kp*e + Ki*Σe + Kd*(e − e_prev)) >>> 4`

   Gains are unsigned with 4 fractional bits. The running sum is clamped to ±4095
   against wind-up, and `u` saturates to 12 bits. `u` is ready one reference cycle
   after the measurement.
3. **Frequency scaler.** It sets the oscillator code to `clamp(base + u, 4, 250)`.
   With scaling disabled it holds the base code, so the PID output acts as a
   correction around a programmed operating point.
4. **Oscillator.** A behavioural model of the programmable ring oscillator, with
   `f = code × 5 MHz`. A new code takes effect at the next rising edge. On silicon
   this is an analog macro; the model exists so that the loop can be simulated.

**Choosing gains.** Take a core running a two-instruction loop. One code step
changes its output by about 6.4 words per 256-cycle window (5 MHz / 2 × 2.56 µs).
The reset gains are Kp = Ki = 1/16 and Kd = 0, which give a loop gain of about 0.8
per window. At this setting the loop settles in about 10 windows without overshoot.
Larger gains, such as Kp = 1/2 and Ki = 1/4, make it oscillate between the code
limits. Programs with longer loops have a smaller plant gain and tolerate larger
gains. All three gains are configuration registers.

**Limitation: starved tiles.** The loop regulates the tile's own output rate. A tile
starved by a slower upstream tile cannot reach its set point by speeding up. Its
integral winds up to the clamp, and its clock stays high even though it stalls. The
paper does not address this. The end-to-end test prints the summed oscillator codes,
before and after regulation, as a rough power proxy; it shows this effect. A
controller that also looked at the empty-stall count would avoid this. It is not
built, because the paper does not describe one.

## Configuration

Configuration uses the reference clock: `cfg_we`, `cfg_pe` (tile index row × COLS +
col), `cfg_addr` (9 bits) and `cfg_wdata` (32 bits).

| cfg_addr | target |
|---|---|
| `0x000`–`0x03F` | instruction memory word (`cfg_wdata[26:0]`) |
| `0x100` / `0x101` | FIFO0 / FIFO1 source direction: 0 N, 1 E, 2 S, 3 W, 4 none |
| `0x102` | output direction (same encoding) |
| `0x103` | throughput set point, words per window |
| `0x104` | base oscillator code |
| `0x105` | frequency scaling enable |
| `0x106`–`0x108` | Kp, Ki, Kd |

To set up the chip:

1. Hold `run` low.
2. Write the programs and the routing registers.
3. Raise `run`.

`gals_pkg::mk_instr()` builds instruction words. The external input enters the west
link of tile (0,0). The output leaves the west link of tile (ROWS−1, 0). With an
even number of rows, a serpentine path therefore visits every tile.

## Parameters

| parameter | default | where | from the paper? |
|---|---|---|---|
| `ROWS` × `COLS` | 6 × 6 | `gals_cmp_top` | mesh as drawn in the architecture figure (no number printed) |
| `DATA_W` | 16 | `gals_pkg` | own choice |
| `FIFO_DEPTH` / `FIFO_D` | 32 words | `gals_pkg`, tile, top | own choice (the paper only says "large") |
| IMEM, DMEM | 64 × 27, 128 × 16 | `gals_pkg` | own choice |
| `WINDOW` | 256 reference cycles | tile, top | own choice |
| `STEP_KHZ` | 5000 (5 MHz per code) | oscillator, tile, top | own choice |
| code range | 4 … 250 (20 MHz – 1.25 GHz) | `freq_scaler` | own choice |
| gains at reset | Kp = Ki = 1/16, Kd = 0 | `pe_config` | own choice (the paper leaves them to the user) |

After synthesis, the whole 6 × 6 chip has about 3100 word-level cells and 6500
flip-flop bits, most of them status counters. The 36 instruction memories, data
memories and FIFOs are memory arrays.

## What comes from the paper and what does not

From the paper:

* A mesh of processing elements, each with two dual-clock input FIFOs, an ALU/MAC
  core, instruction and data memories, a configuration block and a local
  programmable oscillator.
* The FIFO's structure: write and read controllers, a memory across the clock
  boundary, and address exchange.
* Source-synchronous communication between clock domains.
* Empty and full stalls.
* The loop itself: a throughput monitor, a PID controller on the error between the
  set point and the obtained throughput, and a frequency scaling module that drives
  the oscillator.

This implementation's own choices:

* Every number in the table above.
* The instruction set.
* The routing registers and link edge discipline.
* The Gray-pointer synchronizers.
* The measurement method (words per fixed window).
* The fixed-point PID form, its anti-wind-up clamp and the base-plus-correction
  frequency law.
* The configuration bus and register map.
* The reset behaviour.

Not built:

* **Per-processor supply-voltage scaling.** The paper mentions it, but it is an
  analog power-delivery function and the paper does not specify it.
* **The synchronous comparison system.**
* **The message-passing software** used by the paper's applications.
* **A shared-bus interconnect.** The paper discusses it only as the alternative that
  a mesh avoids.
* **The paper's measured results.** These cover FIFO-size sweeps, performance
  penalty and power, and nothing here reproduces them. The FIFO depth is a parameter,
  so the FIFO-size experiment can be repeated by changing `FIFO_DEPTH`.

## Testbenches

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_dcfifo` | order and integrity across unrelated, changing clocks; ≤ DEPTH words held; full/empty; first word visible within 4 read edges |
| `tb_alu_mac` | every operation against a reference |
| `tb_pe_imem`, `tb_pe_dmem` | read/write against a shadow copy |
| `tb_pe_config` | reset values, every register, address decode |
| `tb_pe_core` | a mixed program with computed expected outputs; one instruction per cycle with no stalls; both stalls under random starvation and back-pressure; a counted loop at exactly 24 cycles per result; BZ/BNEG |
| `tb_throughput_monitor` | window counts against counted events; window period; no events lost |
| `tb_pid_controller` | every output against an integer PID model; one-cycle latency; clear on disable |
| `tb_freq_scaler` | clamp, hold, direction pulses |
| `tb_ring_osc` | frequency law within 0.1 %; stop |
| `tb_pe_tile` | two neighbours on their own clocks; sum data path; back-pressure; loop settles within 10 % of a set point below and above the start rate |
| `tb_gals_cmp_top` | whole 6 × 6 chip at default parameters: 36-stage serpentine pipeline checked word for word; empty stall, full stall, external back-pressure, scale up and scale down each counted and required; all tiles within 15 % of the set point |
| `tb_fir_mesh` | a 72-tap FIR, two taps per tile across all 36 tiles, 1500 samples bit-exact against a reference, first at fixed mixed clocks and then with the loop on |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gals_pkg.sv tb/tb_gals_cmp_top.sv \
          --top-module tb_gals_cmp_top -o sim && ./obj_dir/sim
```

The two full-chip tests each simulate in under a minute.

Verilator's lint flags the oscillator model's run-time delay (ZERODLY). The delay is
never zero, as the model's header comment explains. `rtl/ring_osc.sv` is the only
file that is not synthesizable. It uses a 1 ps time unit; every other file uses 1 ns.
