# PulseDL-II: a neural-network pulse processor on a small system-on-chip

Calorimeter front-end electronics digitise each detector pulse into a short
waveform, and the physics needs two numbers from it: when the pulse arrived
and how much energy it carried. PulseDL-II extracts both with a small,
8-bit quantised one-dimensional convolutional network, computed by a
dedicated accelerator next to a microcontroller on one chip. This repository
is a synthesizable SystemVerilog model of that chip: the accelerator
(15 processing elements of 4 arithmetic units each, 360 8-bit multipliers),
the dual-port memories, the two AHB buses, and the peripherals that bring
waveforms in and features out. The processor core itself (an Arm
Cortex-M0-class CPU) and its JTAG debug logic are third-party IP. They are
not modelled; their bus ports are brought out of the top level.

The structure follows the published PulseDL-II architecture. Much of the
inside detail (memory organisation, register maps, loop order, serial
protocols) is not published; those parts are this implementation's own and
are marked as such below and in the first comment of every source file.

---

## 1. The chip at a glance

```
            ADC samples (Quad-SPI)   JTAG debug   programming UART
                     |                   |              |
              pdl_qspi_ahb_master   (jtag_req port)  pdl_uart_ahb_master
                     \___________________|______________/
                              auxiliary AHB bus (pdl_aux_bus)
                          priority: Quad-SPI > JTAG > UART
                                         |  port B
           +-----------------+-----------+-----------+
           | program memory  |  system RAM  | double-port buffer |   (pdl_ahb_dpram x3)
           +-----------------+-----------+-----------+
                                         |  port A
   processor (cpu_req port) ---- processor AHB bus (pdl_ahb_mux)
                                  |        |        |         |
                         AHB-APB bridge   GPIO   sys regs   NN accelerator (pdl_nn_accel)
                          |   |   |   |                        15 x pdl_pe
                      timer wdog UART2 UART3
```

| Address | Slave | Notes |
|---|---|---|
| `0x0000_0000` | program memory | 64 KiB, dual-port |
| `0x2000_0000` | system RAM | 64 KiB, dual-port |
| `0x2100_0000` | double-port buffer | 16 KiB, dual-port; waveform samples land here |
| `0x4000_0000` | APB: timer `+0x0000`, watchdog `+0x1000`, UART2 `+0x2000`, UART3 `+0x3000` | each access has at least one wait state |
| `0x4001_0000` | GPIO | zero wait state |
| `0x4002_0000` | system registers | ID, scratch, control, cycle counter |
| `0x5000_0000` | accelerator | 64 KiB per PE, global page at `0x500F_0000` |

The auxiliary bus reaches port B of the three RAMs at the same addresses.
Unmapped addresses read as zero. The processor interrupt lines are
`cpu_irq = {UART3 rx, UART2 rx, timer, accelerator}`.

### One event, end to end

1. The digitiser side streams the samples over Quad-SPI. The Quad-SPI
   master writes them, one 32-bit word per sample, into the double-port
   buffer through port B.
2. The processor reads the buffer through port A and writes the samples
   into the feature-map memory of the first PE.
3. It starts the layer. When the PE finishes, the accelerator interrupt
   rises. The processor copies the layer output into the feature-map memory
   of the PE that holds the next layer, and starts it.
4. After the last layer, the processor stores the features in system RAM
   and sends them out through UART3, which has a 16-byte transmit FIFO.

All data movement between layers goes through the processor. PEs that hold
different layers can work on different events at the same time (layer
pipelining). Each PE carries an event token so that software can tell which
event a finished result belongs to.

---

## 2. The accelerator: NN → PE → AU

The accelerator has three levels:

- **AU (arithmetic unit, `pdl_au`).** An AU holds a window of `MULTS = 6`
  feature-map samples and 6 kernel taps. It multiplies them pairwise and
  adds the six products, giving one dot product per cycle.
- **PE (processing element, `pdl_pe`).** A PE has four AUs, an adder tree
  over their outputs, a partial-sum memory, the final process (bias, ReLU,
  requantisation) and its own memories. It is a complete small accelerator
  that computes one layer (or part of one) with no outside help.
- **NN (`pdl_nn_accel`).** The NN is 15 PEs behind one AHB slave port, with
  a shared interrupt.

6 × 4 × 15 = 360 multipliers. The paper gives the total and the 4 AUs per
PE and 15 PEs per NN; the 6 per AU follows from those. Its accelerator
figure draws four multipliers per AU as a sketch.

### 2.1 How a PE computes a layer

A layer is a 1-D convolution with:

- `ic` input channels and `oc` output channels;
- kernel length `k`, stride `s` and zero padding `pad`;
- an optional up-sampling by `2^ulog`, which inserts zeros between input
  samples to make a transposed (de-)convolution;
- output length `l_out`.

A fully-connected layer is the special case `l_out = 1`, with the inputs
laid out as channels × positions and a kernel covering all positions.

The PE splits the work into **passes**. A pass is one output channel `o`,
one group of input channels `g` and one chunk of 6 kernel taps `c`. Passes
are ordered with `o` outermost, then `g`, then `c`. The number of passes is:

```
passes = oc × ceil(ic / 2^glog) × ceil(k / 6)
```

`glog` sets how many channels form a group: the 4 AUs serve 1, 2 or 4
input channels at a time.

During a pass, each active AU owns one input channel of the group and that
channel's 6 taps. The coordinator (`pdl_coordinator`) streams the channel's
samples into the AU window, one per cycle. The stream is:

```
NS = (l_out − 1) × s + 6   samples, starting at up-sampled position 6c − pad
```

A sample position `t` is read from memory only if all three hold:

- `t ≥ 0`;
- `t` is a multiple of `2^ulog`;
- `t / 2^ulog < l_in`.

Otherwise a zero is shifted in. This one rule gives padding, zero insertion
for deconvolution, and the tail of a short kernel.

Once the window is full (after 6 samples), every `s`-th cycle produces an
output position. The adder tree then sums the AUs of the group, and the
partial-sum accumulator adds the result into `psum[o·l_out + p]`. The first
contribution, where `g = 0` and `c = 0`, overwrites the entry instead. So a
sum over channel groups and kernel chunks never needs a wider adder tree:
it builds up in memory, one pass after another.

After the last pass, the final process walks `psum`. For each entry it:

1. adds the output channel's bias, saturating to 32 bits;
2. applies ReLU if enabled;
3. requantises to 8 bits:

```
q = sat8( (y · mult + 2^(shift−1)) >> shift )      (shift > 0)
q = sat8(  y · mult )                              (shift = 0)
```

It writes either `q` (sign-extended) or the 32-bit `y` (raw mode) to the
result memory. In loopback mode, `q` is also written back into the PE's own
feature-map memory at a programmable base, in the layout the next layer
reads. The processor can then start the next layer on the same PE, after
loading that layer's kernels, bias and registers, without copying the
feature map. The scale and shift are per-layer registers, so quantisation
is static, and there is no time spent searching for a rounding point after
each layer.

### 2.2 Keeping the multipliers busy

Three mechanisms let a pass follow the previous one with no idle cycle:

- **Ping-pong kernel registers.** Each AU has two banks of 6 taps. While a
  pass runs on the active bank, the coordinator loads the next pass's taps
  into the shadow bank (second cycle of the pass). At the first cycle of
  the next pass the banks swap. The kernel memory is read once per pass.
- **Registered pipeline with tags.** Every window carries a tag: whether it
  emits an output, the first-contribution flag, and the partial-sum address.
  The tag travels with the data through the AU (3 cycles) and the adder tree
  (1 to 3 cycles), so the accumulator needs no knowledge of pass timing.
- **Adder tree with multi-stage readout (`pdl_adder_tree`).** The tree is
  fully registered. A readout multiplexer takes the sum of a group from the
  level that holds it:
  - level 0, combinational, for 1 channel per group;
  - level 1 for 2 channels;
  - level 2 for 4 channels.

  Smaller groups therefore see a shorter latency, and the coordinator only
  has to wait for the longest path once per layer (the drain).

### 2.3 Multicast

Two multicast controllers (`pdl_mcast_ctrl`) sit between the 4 byte lanes
of a memory word and the 4 AUs:

- **Feature map:** the 4 channels stored in one word can be rotated by an
  offset, so a group of 1 or 2 channels can start at any lane. AUs outside
  the group receive a copy of the first lane.
- **Kernel:** AUs outside the group receive zero taps.

Channel `c` of the feature map sits in lane `c mod 4` of word
`(c div 4)·l_in + x`. A group of `2^glog` channels starting at channel
`g·2^glog` is therefore read from one word per sample.

### 2.4 Timing of a layer

Counted from the start write to the `done` pulse, a layer takes:

```
cycles = 1 + passes × NS + (log2(4) + 6) + oc × l_out + 3
```

The terms are:

- one set-up cycle that loads the first kernel;
- the streaming passes;
- the pipeline drain;
- one cycle per output for the final process;
- the tail of the final pipeline.

The PE reports this count in its `CYCLES` register, and the testbenches
check it exactly. Two examples:

- a 16→32-channel, kernel-4, stride-2 layer from 8 to 4 samples takes
  128 passes of 12 cycles, 1676 cycles in all (16.8 µs at 100 MHz);
- a 64-input, 16-output fully-connected slice takes 256 passes of 6 cycles,
  1564 cycles in all.

Each pass spends 5 of its `NS` cycles filling the window before it emits.
Short outputs (small `l_out`) therefore use the multipliers least well.
Long outputs approach one output position per `s` cycles for each AU group.

### 2.5 Programming a PE

PE `n` occupies `0x5000_0000 + n·0x1_0000`.

| Offset | Contents |
|---|---|
| `0x0000` | registers (below) |
| `0x1000` | bias memory: one signed 32-bit word per output channel (64 entries) |
| `0x2000` | result memory: one word per output, index `o·l_out + p` (256 entries) |
| `0x4000` | feature-map memory, 256 words × 4 byte lanes (readable only while idle) |
| `0x8000` | kernel memory, write-only |

The kernel memory holds 256 passes × 4 AUs × 8 bytes. Byte
`((pass·4 + au)·8 + j)` holds register tap `j` of that AU. The taps are
stored **reversed**, with tap index `6c + (5 − j)`, because the newest
sample sits at window position 0. Unused taps are zero.

| Reg | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | bit 0 start (ignored while busy), bit 1 interrupt enable |
| 0x04 | STATUS | bit 0 busy, bit 1 done (write 1 to clear) |
| 0x08 | TOKEN | write: token of the event about to start; read: token of the last finished layer |
| 0x0C–0x2C | L_IN, L_OUT, OC, NICG, NKC, GLOG, STRIDE, PAD, ULOG | layer shape (`NICG = ceil(ic/2^glog)`, `NKC = ceil(k/6)`) |
| 0x30 | MODE | bit 0 ReLU, bit 1 raw 32-bit output, bit 2 loopback |
| 0x34 | LOOP_BASE | feature-map word where loopback output starts |
| 0x38, 0x3C | RQ_MULT, RQ_SHIFT | requantisation scale (16 bit) and shift |
| 0x40 | CYCLES | busy cycles of the last layer |

The global page at `0x500F_0000` has three registers:

- `+0` pending-interrupt mask, one bit per PE;
- `+4` busy mask;
- `+8` INFO = `{MULTS, N_AU, N_PE}` in bytes 2..0.

The accelerator interrupt is the OR of all PE interrupts.

**Capacity per PE:**

- 256 passes;
- 256 outputs;
- 64 output channels;
- 256 feature-map words, i.e. `ceil(ic/4)·l_in ≤ 256`, plus room for a
  loopback copy.

Layers that need more are split across PEs by output channel. Each part is
an independent layer over the same input.

---

## 3. The evaluation network on this hardware

The network used to evaluate the chip has three convolution and two
fully-connected layers. It has about 33.4 k multiply-accumulates and
18.8 k parameters. The layer shapes below are not published. They were
chosen to match those totals exactly (33 408 MACs, 18 802 parameters).

| Layer | Shape | MACs | Passes | PEs | Cycles per PE |
|---|---|---|---|---|---|
| conv1 | 1→16 ch, k 4, stride 2, pad 1, 16→8 | 512 | 16 | 1 | 460 |
| conv2 | 16→32 ch, k 4, stride 2, pad 1, 8→4 | 8 192 | 128 | 1 | 1 676 |
| conv3 | 32→64 ch, k 4, stride 2, pad 1, 4→2 | 16 384 | 512 | 2 | 2 124 |
| fc1 | 128→64 (64 ch × 2 positions) | 8 192 | 1 024 | 4 | 1 564 |
| fc2 | 64→2, raw 32-bit outputs | 128 | 32 | 1 | 206 |

Nine of the 15 PEs hold the whole network at once, so kernels are loaded
only once. The accelerator's compute time for one event, layer after
layer, is about 6 030 cycles, or 60 µs at 100 MHz. The published
on-chip inference time of 113.8 µs also includes the processor moving
feature maps between layers. In this design that cost depends on the
processor software and is not part of the RTL.

The full-size SoC testbench runs this network on random weights. It checks
every intermediate output against a reference model.

---

## 4. Peripherals and serial formats

The paper names these blocks but does not describe them. They are the
simplest versions that serve the data flow.

- **Quad-SPI link (`pdl_qspi_ahb_master`).** The external side drives
  chip select (active low), a clock and 4 data lines. All three are
  synchronised, so the SPI clock must be at most ¼ of the system clock.
  - A frame is a 32-bit start address followed by any number of 32-bit
    words, 8 nibbles each, most significant nibble first, taken on rising
    SPI clock edges.
  - Words queue in a 4-entry FIFO for the auxiliary bus. A word that finds
    the FIFO full sets a sticky `qspi_overflow` output.
- **Programming UART (`pdl_uart_ahb_master`).** This is an AHB master
  driven over 8N1 serial, at 868 clocks per bit (115 200 baud at 100 MHz).
  All fields are most significant byte first.
  - `'W' a3 a2 a1 a0 d3 d2 d1 d0` writes a word and answers `'K'`.
  - `'R' a3 a2 a1 a0` answers with the 4 data bytes.
  - Other bytes are ignored.
- **UART2 / UART3 (`pdl_apb_uart`).** Both are 8N1.
  - Registers: DATA (write: push a byte; read: last received byte),
    STATUS (TX full, TX idle, RX valid, RX overrun) and BAUDDIV.
  - UART3 has a 16-byte transmit FIFO; UART2 has one byte.
  - A received byte raises the interrupt until DATA is read.
- **Timer.** A 32-bit down-counter with reload and an interrupt flag.
  Registers: CTRL, VALUE, LOAD, INTCLR.
- **Watchdog.**
  - Enable is one-way.
  - Writing `0x5A5A_5A5A` to KICK reloads the counter.
  - At zero, `wdog_reset` rises and stays high until the system reset,
    which the board is expected to drive from it.
- **GPIO.** Registers: DATA_OUT, OUT_EN, DATA_IN (synchronised), SET and
  CLR, with 16 pins.
- **System registers.** ID `0x5044_4C32`, SCRATCH, CTRL (driven onto
  `sys_ctrl`) and a free-running CYCLE counter for time stamps.
- **Auxiliary bus arbiter.** Fixed priority. Ownership changes only when
  the owner presents an idle cycle and its last transfer has completed.
  A master that does not own the bus sees HREADY low and waits.
- **Dual-port RAMs.** Both ports are zero-wait-state AHB-Lite. If both
  ports write the same word in the same cycle, port A (processor) wins.

All AHB slaves support single 32-bit transfers. An assertion flags other
sizes.

---

## 5. Where this model differs from, or adds to, the published design

- **Processor, JTAG, data-acquisition FPGA logic.** None are modelled. The
  processor and JTAG connect through the `cpu_*` and `jtag_*` bus ports.
- **Normal SPI.** Only the UART side of the "UART/SPI" programming master
  is built. The SPI alternative, and the normal SPI peripherals mentioned
  beside the Quad-SPI, are not.
- **6 multipliers per AU** are derived from the published total of 360.
- **12-bit samples.** The evaluation network takes 12-bit ADC samples. The
  datapath here is 8-bit throughout, so the processor must scale each
  sample into 8 bits when it relays the buffer to the first PE. The
  Quad-SPI link and the buffer carry full 32-bit words.
- **Memory sizes** are this design's choice; none are published. These are
  the PE memory depths, the RAM sizes and the UART FIFO depth.
- **Loop order, memory layouts, the zero-insertion deconvolution, the
  tagged pipeline, loopback, the event token and the `CYCLES` register**
  are this design's way of realising the published blocks:
  - mapping mode coordinator;
  - multicast;
  - ping-pong kernel register;
  - multi-stage adder-tree readout;
  - in-place partial-sum update.
- **Requantisation** uses one multiplier and a rounding shift per layer.
  The published design names "rescale & bit-shift" without giving the
  arithmetic.
- **Memories** are arrays with a synchronous write and a combinational
  read, with no reset, so synthesis maps them to RAM. An ASIC flow would
  replace them with register-file macros. A block RAM with a registered
  read would need one more pipeline stage in the PE.
- **Numbers not reproduced.** The published throughput (8.3 k events/s)
  and total latency (165 µs) depend on the processor software and are not
  reproduced here.

---

## 6. Verification

Every block has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench. Each prints
`TB_RESULT checks=N failures=M` and has a time-out.

- `tb/pdl_ref_pkg.sv` is the layer reference model shared by the
  accelerator tests. It provides:
  - a direct convolution / deconvolution / padding / stride / bias /
    ReLU / requantisation model;
  - the memory images of a PE;
  - the cycle formula above.
- Datapath testbenches: `tb_pdl_au`, `tb_pdl_adder_tree`,
  `tb_pdl_mcast_ctrl`, `tb_pdl_psum_acc`, `tb_pdl_bias_act`,
  `tb_pdl_rescale`, `tb_pdl_ram`.
- `tb_pdl_coordinator` checks the coordinator's control outputs cycle by
  cycle against the loop definition.
- `tb_pdl_pe` and `tb_pdl_nn_accel` run random layers through the host
  port. They cover:
  - conv and deconv, stride, padding, 1/2/4 channels per group;
  - ReLU and raw mode;
  - loopback, token, interrupts, and several PEs at once.

  They check every output and the exact cycle count.
- Bus and peripheral testbenches: `tb_pdl_ahb_dpram`, `tb_pdl_ahb_mux`,
  `tb_pdl_aux_bus`, `tb_pdl_ahb_apb_bridge`, `tb_pdl_apb_timer`,
  `tb_pdl_apb_watchdog`, `tb_pdl_apb_uart`, `tb_pdl_ahb_gpio`,
  `tb_pdl_ahb_sysregs`, `tb_pdl_qspi_ahb_master`,
  `tb_pdl_uart_ahb_master`. They check:
  - protocol rules;
  - wait states and arbitration stalls;
  - FIFO full and overflow;
  - serial framing, using independent encoders and decoders.
- `tb_pulsedl2_soc` is the full-size system test. It uses the top with its
  default parameters and plays the processor. It runs:
  - Quad-SPI input with concurrent JTAG traffic;
  - programming-UART reads and writes;
  - the network of section 3 on 9 PEs, including parallel PEs, loopback
    and raw output;
  - feature output over UART3, debug output over UART2, UART receive
    interrupts;
  - the timer interrupt, GPIO, the system registers and a watchdog reset.

  It counts each of these mechanisms and fails if any never occurred. It
  simulates in a few seconds.

Simulating any testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/pdl_pkg.sv tb/pdl_ref_pkg.sv tb/tb_pulsedl2_soc.sv \
    -y rtl -y tb --top-module tb_pulsedl2_soc -o sim
./obj_dir/sim
```

Replace `tb_pulsedl2_soc` with any other testbench name. The remaining
Verilator warnings are of two kinds:

- unused bits of the shared bus structs (a slave ignores `hsize`, for
  example);
- `rst_n` used both as an asynchronous reset and in the `disable iff` of
  bus assertions.

Neither affects the circuit.

---

## 7. Source files

| File | Contents |
|---|---|
| `rtl/pdl_pkg.sv` | widths, layer configuration struct, AHB/APB structs, saturation helper |
| `rtl/pdl_au.sv`, `rtl/pdl_sum_tree.sv` | arithmetic unit and its product adder |
| `rtl/pdl_adder_tree.sv` | registered adder tree with multi-stage readout |
| `rtl/pdl_mcast_ctrl.sv` | multicast controller |
| `rtl/pdl_psum_acc.sv` | partial-sum accumulator and memory |
| `rtl/pdl_bias_act.sv`, `rtl/pdl_rescale.sv` | final process |
| `rtl/pdl_ram.sv` | PE memory |
| `rtl/pdl_coordinator.sv` | mapping mode coordinator (layer controller) |
| `rtl/pdl_pe.sv`, `rtl/pdl_nn_accel.sv` | processing element, accelerator |
| `rtl/pdl_ahb_slv_port.sv`, `rtl/pdl_ahb_mst_port.sv` | AHB-Lite slave and master helpers |
| `rtl/pdl_ahb_dpram.sv`, `rtl/pdl_ahb_mux.sv`, `rtl/pdl_aux_bus.sv`, `rtl/pdl_ahb_apb_bridge.sv` | memories and interconnect |
| `rtl/pdl_apb_timer.sv`, `rtl/pdl_apb_watchdog.sv`, `rtl/pdl_apb_uart.sv`, `rtl/pdl_uart_tx.sv`, `rtl/pdl_uart_rx.sv` | APB peripherals |
| `rtl/pdl_ahb_gpio.sv`, `rtl/pdl_ahb_sysregs.sv` | AHB peripherals |
| `rtl/pdl_qspi_ahb_master.sv`, `rtl/pdl_uart_ahb_master.sv` | auxiliary-bus masters |
| `rtl/pulsedl2_soc.sv` | top level |
