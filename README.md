# Uncertainty-triggered wake-up SoC

Most inputs reaching an always-on sensor node are uninteresting: for a heart
monitor, nearly every beat is normal. This design keeps a large programmable
processor switched off and leaves a tiny classifier on instead. The classifier
is a logarithmic Bayesian machine, whose probability tables live in
non-volatile memristor arrays. It looks at every input. When it is confident
the input is normal, it finalises the decision itself. It wakes a RISC-V
back end only in two cases:

- it believes the input is abnormal;
- its own answer cannot be trusted: the normal class ties with an abnormal
  one, or a class score decodes to probability zero.

The back end then classifies the same input again with a neural network (an
int8 MLP), writes its answer back, and goes back to sleep. Because the front
end wakes the back end on doubt as well as on findings, its errors are
caught instead of passed on. An imperfect analog front end therefore costs
wake-ups, not accuracy.

The RTL covers these parts:

- **Front end**, always on: the Bayesian machine (the memristor arrays as
  digital storage plus the adder chains), the controller with its input DMA
  and wake criterion, the power manager and the GPIO peripheral.
- **Back end**, gated: the AXI-Lite interconnect, two 1 Mb memories, the
  system configuration unit and a JTAG debug master.

The RISC-V core (a CV32E40P in the original system) is not part of this
RTL. Its bus port, clock and reset are ports of the top level, `soc_top`.
The testbenches drive them with a behavioural model of the firmware.

The reference application is four-class heartbeat classification: N normal,
L left bundle branch block, R right bundle branch block, P paced. It uses
4 quantised features for the front end and 32 int8 features for the MLP.

## The front-end classifier

A Bayesian classifier with independent features picks the class C that
maximises P(C)·Π P(F_i | C). With balanced classes the prior is constant,
so only the likelihoods are stored.

**Code format.** Each likelihood is stored as an 8-bit code
n = round(16·log_0.15 p), so that p ≈ 0.15^(n/16). Multiplying
probabilities becomes adding codes. A **smaller** code means a **more
probable** event, so the winning class is the one with the smallest summed
code. This base and scale give seven codes to probabilities above 0.5 and the
other 249 to the tail.

**Storage** (`bm_array`, 16 instances inside `bayesian_machine`):

- There are 4 features × 4 classes, and each pair has one array.
- Each feature is quantised to 8 levels, so each array holds eight 8-bit
  codes, one 64-bit word.
- A level selects one code, which is latched in a read register. That
  register stands in for the sense amplifiers of the real 2T2R memristor
  array.
- Programming writes whole codes under a per-code mask and can be read back
  for verification.
- The cells have no reset, because the real storage is non-volatile.
- Nothing analog is modelled: a stored bit always reads back exactly.

**Adder chains.** Each class row has an adder chain running across the
feature columns, so the four codes of a class add up into that class's score.
The adders work on 10 bits and saturate:

- The all-ones code, 255, is reserved for probability zero and is
  *absorbing*. Once a chain sees it, the class score becomes all ones (1023).
- Any other sum clips at 1022. Four real codes sum to at most 4 × 254 =
  1016, so this never happens in practice.

A properly smoothed table never holds a zero probability. So a score of
1023 can only come from a fault, either in the stored data or on its way
out, and the wake criterion treats it as an invalid output.

**Timing.** With `start` in cycle 0, the codes are registered in cycle 1.
The scores are registered, and `done` pulses, in cycle 2.

## The wake criterion

`wake_policy` is combinational. It picks the class with the smallest score,
and on equal scores the lowest index wins. Since N has index 0, a tie
between N and an abnormal class resolves to N, which is exactly the case the
ambiguity test needs to see. It wakes the back end in three cases:

| cause | condition | enabled by |
|---|---|---|
| abnormal  | the winner is L, R or P | CTRL[1] |
| ambiguous | the winner is N and some abnormal class has the same score | CTRL[2] |
| invalid   | any class score is 1023 (probability zero) | CTRL[2] |

With CTRL[2] cleared, the front end behaves as a plain classifier that
only escalates abnormal beats. That is the front-end-only policy the full
policy is compared against. All three causes are recorded in STATUS.

## One input, start to finish

`fe_controller` runs the monitoring loop, clocked by the front-end clock:

1. **Fetch.** A timer fires every PERIOD cycles. This is the monitoring
   period T_s, reset to 2000: 2 ms at a 1 MHz front-end clock.
   - The controller pulses `sensor_req_o`.
   - `fe_dma` accepts a 9-word record on a valid/ready stream, at one word
     per cycle, so a back-to-back record takes 10 cycles.
   - Word 0 carries the four 3-bit front-end features at bits [4i+2:4i].
   - Words 1–8 carry the 32 int8 MLP features, least significant byte first.
   - The MLP features stay in an always-on buffer, so the back end can read
     them after it wakes.
2. **Infer.** It starts the Bayesian machine, which finishes 2 cycles later.
3. **Decide.** If the criterion does not fire, the input is finalised at
   once: `final_valid_o` pulses with the front-end class and
   `final_by_backend_o = 0`.
4. **Wake.** Otherwise the controller:
   - sets the wake flag;
   - latches the cause, the class and the scores into STATUS and SCORES;
   - pulses `wake_req_o`.

   The input stays open until the firmware writes its class to DECISION.
   That write clears the flag and finalises the input with
   `final_by_backend_o = 1`.

While an input is being served, its features must stay in the buffer. If
the timer fires again before DECISION is written, the next input is held:

- STATUS[9] is set and STALLS counts it once.
- The input is fetched as soon as DECISION arrives.
- The timer itself keeps running, so the sampling grid is not shifted.

## Waking by reset

The back end is woken through its reset. There is no interrupt and no
retained CPU state:

- `power_manager` walks SLEEP → PWR_UP (8 cycles with the power switch
  closed) → CLK_UP (4 cycles with the clock running and reset held) → RUN.
- In RUN the reset is released and the core starts from its reset vector.
- The same sequence runs once after chip reset. That pass is the true
  start-up and is not counted as a wake-up.

The firmware's first act is to read STATUS. Bit 0 tells it which case it is
in:

- **Start-up** (flag clear): platform initialisation. This means loading
  or checking the log-likelihood table (LLTAB window), setting PERIOD and
  CTRL, and so on.
- **Wake-up** (flag set): the service routine runs these steps:
  1. set the clock divider to 0 (full speed);
  2. read SCORES0/1 and the 8 words of MLPBUF;
  3. run the MLP with the weights from program memory;
  4. write the class to DECISION.

Either way, it ends by writing 1 to SYS SLEEP. The power manager then walks
back down: RUN → RST_DN (reset) → CLK_DN (clock stopped) → PWR_DN (8 cycles)
→ SLEEP. The back-end isolation (`iso_no`) is active in every state except
RUN, and forces the back-end bus masters to idle.

If a wake request arrives while the back end is still running or on its way
down, the power manager keeps it pending. It serves the request as soon as
SLEEP is reached. This case happens when an input was held during a
service and the firmware still has work to do after DECISION. The held
input is fetched right after DECISION, and its wake request follows about
a dozen front-end cycles later.

## Clocks

The two sides run at different rates: with the defaults, 1 MHz for the
front end and 100 MHz for the back end. Both clocks are gated copies of
one root, `clk_i`, which runs at the back-end rate:

- A fixed `clk_divider` (ratio FE_DIV, default 100) produces an enable that
  is high one root cycle in FE_DIV. An ICG (`clk_gate`, a latch-based
  integrated clock gate) turns it into `clk_fe`, the front-end clock. It
  runs the Bayesian machine and the front-end controller.
- A second `clk_divider`, whose ratio CLK_DIV + 1 the firmware sets,
  ANDed with the power manager's clock enable, gates the root into
  `clk_be`, the back-end clock. That clock runs the interconnect and the
  configuration unit.
- Five more ICGs, switched by SYS CLK_EN, give the CPU, the program memory,
  the data memory, GPIO and debug their own clocks. This is the activity
  gating. The GPIO clock is gated from `clk_fe` rather than `clk_be`, so
  the pins hold their state while the back end sleeps.
- The power manager runs on the root clock itself.

Every clock edge is a root edge, so no synchronisers are needed. The
crossings still need care, because a slow side holds a signal for many
cycles of a fast one:

- A wake request lasts one front-end cycle. The power manager takes it
  only on the root cycle that ends with a front-end edge, so it counts
  once. The sleep request from the back end is taken the same way.
- The front-end registers and GPIO are bus slaves at 1 MHz behind a
  100 MHz interconnect. Each sits behind an `axil_tick_bridge`, which lets
  each side see the other's valid and ready only on root cycles that end
  with an edge of both clocks. A handshake therefore happens exactly once,
  on an edge both sides see. A front-end register access takes one or two
  microseconds.

The only asynchronous clock is the JTAG TCK.

The configuration unit sits in the back end. Its registers therefore
return to their defaults (all enabled, divider 0) at every wake-up. While
the back end is not running, its outputs are isolated, like the CPU and
debug bus requests. The divider ratio is clamped to 0, the module clocks
are on and there is no sleep request. This way the back end is clocked
while its reset is held at power-up, and GPIO keeps its clock.

## Back-end bus and registers

`axil_interconnect` is the AXI-Lite interconnect. It has two masters (the
CPU and the JTAG debug port) and five slaves, and decodes on address bits
[31:28]:

- One transaction is in flight at a time, and masters are served
  round-robin.
- Arbitration costs one cycle.
- An address no slave claims gets DECERR.
- Assertions check that a master holds a raised AR/AW stable until it is
  accepted.

The simple slaves share `axil_to_reg`. A write is accepted when AW and W are
both valid, and B follows one cycle later. A read returns R one cycle after
AR.

| base | slave | contents |
|---|---|---|
| 0x0000_0000 | program memory, 1 Mb (32768 × 32) | firmware, MLP weights |
| 0x1000_0000 | data memory, 1 Mb | variables |
| 0x2000_0000 | front-end controller | see below |
| 0x3000_0000 | system configuration | CLK_EN 0x0, CLK_DIV 0x4, SLEEP 0x8, PM 0xC |
| 0x4000_0000 | GPIO | OUT 0x0, IN 0x4 (2-flop synchronised), DIR 0x8 |

Front-end registers:

| offset | name | meaning |
|---|---|---|
| 0x000 | CTRL | [0] monitor, [1] wake on abnormal, [2] wake on ambiguous/invalid |
| 0x004 | PERIOD | monitoring period in cycles (minimum 16) |
| 0x008 | STATUS | [0] wake flag, [1] abnormal, [2] ambiguous, [3] invalid, [5:4] front-end class, [8] busy, [9] input held |
| 0x00C / 0x010 | SCORES0 / SCORES1 | {L, N} / {P, R}, 10 bits each in the low half-words |
| 0x014 | DECISION | write the back end's class; finalises the open input |
| 0x018 | LAST | [1:0] last final class, [8] decided by the back end |
| 0x01C–0x024 | BEATS, WAKES, STALLS | counters |
| 0x028 | FEAT_BM | feature word of the current input |
| 0x040–0x05C | MLPBUF | 32 int8 MLP features |
| 0x100–0x17C | LLTAB | log-likelihood table: word {class, feature, half}, byte b is level 4·half + b |

The front-end registers and GPIO stay clocked while the back end sleeps.
Only the path to them through the interconnect goes down.

**JTAG debug** (`jtag_debug`) is a standard IEEE 1149.1 TAP with a 4-bit
instruction register:

- IDCODE (0001) reads 0x1BA7E5A1.
- DBG (1000) is a 65-bit register {write, address, data}. Update-DR issues
  one AXI-Lite access.
- STAT (1001) captures {busy, error, read data} without issuing anything.
- Every other code selects BYPASS.

An access crosses into the bus clock as a toggle through a two-flop
synchroniser, and the acknowledge comes back the same way. A host loads the
program memory and the table through DBG, and polls STAT until busy clears.
The debug master, like the CPU, only reaches the bus while the back end is
running.

## Files

| file | contents |
|---|---|
| `rtl/soc_pkg.sv` | sizes, class and state enums, AXI-Lite structs, address and register map |
| `rtl/bm_array.sv` | one memristor array: 8 codes of 8 bits, registered read |
| `rtl/bayesian_machine.sv` | 16 arrays and the 4 saturating adder chains |
| `rtl/wake_policy.sv` | winner, ambiguity and invalid tests |
| `rtl/fe_dma.sv` | record fetch from the sensor stream |
| `rtl/fe_controller.sv` | monitoring loop, wake flag, registers, buffers |
| `rtl/power_manager.sv` | power / clock / reset sequencing |
| `rtl/clk_divider.sv`, `rtl/clk_gate.sv` | divider enable, latch ICG |
| `rtl/sys_config.sv` | clock enables, divider, sleep request |
| `rtl/axil_to_reg.sv` | AXI-Lite slave front for register blocks |
| `rtl/axil_interconnect.sv` | 2-master, 5-slave interconnect |
| `rtl/axil_tick_bridge.sv` | AXI-Lite link between two clocks gated from one root |
| `rtl/axil_sram.sv` | 1 Mb memory with an AXI-Lite port |
| `rtl/axil_gpio.sv` | GPIO |
| `rtl/jtag_debug.sv` | TAP and bus-access debug master |
| `rtl/soc_top.sv` | the SoC |

## Simulation

Each block has a self-checking testbench `tb/tb_<module>.sv`. It ends by
printing `TB_RESULT checks=N failures=M`, and a watchdog ends it if it
hangs. With Verilator 5, build and run a testbench like this:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl rtl/soc_pkg.sv tb/mlp_pkg.sv \
  tb/tb_soc_top.sv --top-module tb_soc_top -o sim
obj_dir/sim
```

(`tb/mlp_pkg.sv` is only needed by `tb_soc_top`.)

**The end-to-end test**, `tb_soc_top`, runs `soc_top` with every parameter
at its default: 1 Mb memories, a 1 MHz front end under a 100 MHz root, and
the 2000-cycle reset period. It covers about 25 ms of simulated time and
runs in seconds. The flow:

1. Chip reset, then the start-up pass of the back end.
2. A JTAG host (`tb/jtag_host.sv`) reads IDCODE and loads two things: a
   log-likelihood table and a 10,348-byte MLP weight image (32-74-100-4).
   It then reads samples back and provokes a decode error.
3. The firmware model (`tb/cpu_model.sv`) does the start-up duties:
   - runs a few accesses with the clock divided by 3;
   - stops and restarts the GPIO clock;
   - sets the GPIO outputs;
   - configures the front end;
   - requests sleep.
   On a wake-up the model spends a random 0 to 3000 cycles after DECISION
   before requesting sleep, so that some wake requests find the back end
   still up.
4. A sensor model, clocked with the front end, streams 150 generated
   inputs, one every 60 µs (PERIOD = 60). The table is built with
   small codes and one zero code per class row, so that ties and invalid
   outputs occur.
5. For every input, the final decision is compared with a reference. The
   reference is an independent score computation and the wake policy. For
   woken inputs, it also includes the MLP (`tb/mlp_pkg.sv`) run on the
   generated weights. The model itself reads the weights and features over
   the bus.

The test counts every mechanism and fails if any never happened:

- local decision;
- wake on abnormal, on ambiguous, and on invalid;
- the start-up and wake-up firmware paths;
- power-up sequences;
- held inputs;
- pending wake requests;
- clock division;
- module clock gating;
- GPIO output;
- decode error.

The MLP arithmetic in `mlp_pkg` is a stand-in for the int8 inference
library of the real firmware:

- `acc = Σ w·x + 64·b`;
- hidden activations are `clamp(acc >>> 7, 0, 127)`;
- the class is the argmax.

It exists to give the back end real work and a checkable answer. It is not
the trained network.

`tb_fe_abnormal_only` runs the front end with CTRL = 011, the
front-end-only policy. It checks that ambiguous and invalid outputs with a
normal winner are then finalised locally.

The block testbenches check, among other things:

- the two-cycle inference latency;
- the N+1-cycle DMA transfer;
- the 8/4-cycle power sequence;
- the one-cycle memory latency;
- the monitoring period between on-time inputs;
- divider ratios;
- arbitration between two masters hitting five slaves at once;
- JTAG accesses with an asynchronous TCK.

## Where this RTL departs from the original system

- **One clock root.** The ASIC study runs the front end at 1 MHz and the back
  end at 100 MHz. The RTL keeps those rates, but derives both from one
  root so that no synchroniser is needed. Two independent oscillators
  would need a real clock-domain crossing on the wake path and the
  front-end register port. The FPGA prototype's 2 MHz / 50 MHz corresponds
  to FE_DIV = 25.
- **No CPU.** The CV32E40P core, its FPU and the real firmware (C with an int8
  inference library) are outside the RTL. They are represented by ports and
  by the testbench model.
- **No analog.** The memristor cells, precharge sense amplifiers, level
  shifters and programming circuits are digital storage here. Device
  variability, low-voltage read errors and programming conditions therefore
  cannot be reproduced. What the RTL does reproduce is the digital reaction
  to them: wrong or zero codes lead to wake-ups.
- **Bus, JTAG and GPIO are new designs.** The original reuses an AXI-Lite
  interconnect, a JTAG interface and GPIO from an existing platform, and
  does not describe them. The versions here are minimal ones with the same
  roles. The same is true of every register map, the record format and the
  wake/sleep handshake.
- **GPIO** is always on, as the original block diagrams place the
  peripherals. Its registers, like the front-end registers, are reached
  through the back-end interconnect, so only a running CPU or debugger can
  change them. The sensor itself is reached through the DMA's stream port,
  not through GPIO.
- **Sizes that are this design's own:** 10-bit scores, the all-ones
  zero-probability code, 8 + 4 cycle power steps, 8 GPIO pins and a 32-bit
  period register. The array, level, code, class, feature, memory and MLP
  input sizes follow the original.
- **Table programming** goes over the bus into the digital array model. On
  the real chip, programming is an analog SET/RESET procedure with
  dedicated supplies.
