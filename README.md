# A near-memory compute unit on 4-bit/cell embedded flash: RTL

A battery-powered microcontroller that runs a small neural network spends most
of its life asleep. If its weights live in SRAM, they either cost standby power
or have to be reloaded on every wake-up. The design documented here keeps the
weights in embedded flash built from standard logic transistors. The flash holds
**4 bits per cell**, so one cell stores one 4-bit weight. The flash is tightly
coupled to a **near-memory computing unit (NMCU)**: eight flash banks are read
in parallel, 1024 bits each, straight into sixteen multiply-accumulate units.
Nothing crosses the system bus except the first input vector and the final
results.

The RTL follows the 28 nm AI microcontroller published as *"A 28 nm AI
microcontroller with tightly coupled zero-standby power weight memory featuring
standard logic compatible 4 Mb 4-bits/cell embedded flash technology"* (Kim et
al., ANAFLASH). The publication gives the block structure, bus widths, buffer
sizes, the weight encoding and the program-verify flow. It does not give the
command format, the bus map, the rounding rules or the timing. Those are choices
made here, and the section *Where this RTL departs from, or goes beyond, the
chip* lists each one. The flash array, its high-voltage pump and its word-line
driver are analog. They appear here as behavioural models, so the digital part
can be simulated end to end.

## The system

```
               system bus (host CPU / DMA)  -- not part of this RTL
                  |                    ^
           +------v------+      +------+------+      +-------------+  +-------------+
           | input buffer|      | ping-pong   |<-----| activation  |<-| quantization|<-+
           |   1024 B    |      | 2 x 128 B   | 128b | (ReLU)      |  | bias, scale,|  |
           +------+------+      +------+------+      +-------------+  | shift       |  |
                  |  input fetcher     |                              +-------------+  |
                  +-------> 1024 b <---+                                   ^ 16 x 32 b |
                             |                                             |          |
  flow controller ---------> |  16 PEs, 128 x (int8 x int4) each ----------+          |
   | WL address               ^ 16 x 512 b                                            |
   v                          | weight fetcher (state -> weight)                      |
  8 EFLASH banks (512 rows x 256 cells x 4 b) --- 8 x 1024 b per read                 |
   ^ program / erase      HV generator (VPP4 ~ 10 V)                                  |
```

| Part | Module | Kind |
|---|---|---|
| Top: NMCU + 8 banks + pump | `ai_mcu` | RTL |
| Near-memory computing unit | `nmcu` | RTL |
| Processing element (128-element MAC) | `pe` | RTL |
| Weight fetcher (bank to PE routing, state mapping) | `weight_fetcher` | RTL |
| Input buffer, 1024 B | `input_buffer` | RTL |
| Ping-pong buffer, 2 x 128 B | `pingpong_buffer` | RTL |
| Input fetcher | `input_fetcher` | RTL |
| Bias and scale buffers, 16 x 32 b each | `coef_buffer` (two instances) | RTL |
| Quantization logic | `quant_logic` | RTL |
| Activation (ReLU) | `activation_relu` | RTL |
| Flow controller | `flow_controller` | RTL |
| Program-verify controller | `pv_controller` | RTL |
| Flash unit bank (cell array, sense amplifier) | `eflash_bank` | behavioural model |
| Word-line driver | `wl_driver` | behavioural model |
| High-voltage generator | `hv_generator` | behavioural model |
| Shared sizes, command type, helpers | `nmcu_pkg` | package |

The rest of the microcontroller is not in this RTL: the 32-bit RISC-V core,
the 2 Mb SRAM, the DMA controller, GPIO/SPI/UART, the 128 Kb 1-bit/cell flash
for code, and the reference-voltage generator. The NMCU's bus slave port and a
row-programming port for the weight flash are brought out at the top of
`ai_mcu` instead.

## How a weight gets from a flash cell to a PE

**Cell states and weights.** A cell is programmed to one of 16 threshold-voltage
states. Retention drift moves a cell to a *neighbouring* state far more often
than to a distant one. The state-to-weight mapping therefore makes neighbouring
states differ by exactly one in weight:

| state | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| weight | -8 | -7 | -6 | -5 | -4 | -3 | -2 | -1 | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |

In two's complement this is just the state with its top bit inverted
(`nmcu_pkg::state_to_weight`, `weight_to_state`). A drift of one state therefore
moves a weight by one, never from +7 to -8. Trained weights cluster around zero,
so most cells sit in the middle states.

**One read feeds two PEs.** One read of one bank returns 256 states (1024 bits).
The 4 Mb array gives each of the eight banks 512 word lines. The weight fetcher
sends cells 0-127 of bank *b* to PE 2*b* and cells 128-255 to PE 2*b*+1, after
converting each state to its weight (512 bits per PE). All eight banks are read
at the same word line, so one read delivers 16 rows of 128 weights: 2048 weights
in one access.

**One PE.** A PE multiplies 128 signed int8 inputs by 128 signed 4-bit weights
and adds the 128 products to a 32-bit accumulator in a single cycle
(combinational adder tree). The first read of a command clears the accumulator.
Later reads add to it, which builds dot products longer than 128.

## A matrix-vector command

The host starts one layer slice with a single 32-bit store to the command
register. `flow_controller` then runs it to completion on its own: it steps the
word-line address, chooses the input source and drives the PEs, the
quantization and the write-back. One command computes **16 outputs over
`nreads` x 128 inputs** (`nreads` = 1..8, so up to 1024 inputs, the size of the
input buffer).

Command word (`nmcu_pkg::mvm_cmd_t`, bits 26:0):

| bits | field | meaning |
|---|---|---|
| 8:0 | `wl_base` | word line of the first read; read *r* uses `wl_base + r` |
| 11:9 | `nreads_m1` | number of reads minus one |
| 12 | `in_sel` | 0: input buffer, 1: active ping-pong half |
| 15:13 | `in_seg` | first 128-byte input-buffer segment; read *r* uses `in_seg + r` |
| 18:16 | `out_group` | 16-byte slot (outputs 16g..16g+15) of the ping-pong half written |
| 19 | `relu_en` | apply ReLU |
| 20 | `swap` | make the written half the active one when done |
| 26:21 | `shift` | right shift after the scale multiply |

**Weight layout this implies.** Consider a layer with N outputs and K = 128*R
inputs, stored from word line `base`. Command *g* (outputs 16g..16g+15) reads
word lines `base + g*R + r`, for r = 0..R-1. In word line `base + g*R + r`,
bank *b* holds the weights of output 16g+2b in cells 0-127 and of output
16g+2b+1 in cells 128-255, for inputs 128r..128r+127. A cell is programmed with
`state = weight + 8`.

**Sequence and timing.** For each read: one cycle to issue the read and load the
input fetcher (`S_RD`). Then the bank read latency L (`S_WAIT`); in the cycle
`rd_valid` rises, the PEs accumulate. After the last read come one cycle of
quantization (`S_QUANT`) and one cycle of write-back (`S_WB`), which also pulses
`irq_done`. A command takes **`nreads` x (L + 1) + 2 cycles**. With the bank
model's default L = 2, a 256-input command takes 8 cycles. Reads are not
overlapped with the accumulation.

**Requantization** (`quant_logic`), per output lane *i*:

```
s = acc[i] + bias[i]                        32-bit
p = s * scale[i]                            signed 64-bit
r = (p + 2^(shift-1)) >>> shift             round half up (no rounding when shift = 0)
q = clamp(r, -128, 127)                     int8
y = relu_en ? max(q, 0) : q
```

Bias and scale are per output channel. The buffers hold 16 of each, one per
lane, so the host reloads them before each command of a layer. The shift is
shared by all lanes. This is int8 requantization in the style of TFLite-micro,
with the fixed-point multiplier split into a 32-bit scale and a shift.

## Chaining layers through the ping-pong buffer

The 16 results of a command (128 bits) go to slot `out_group` of the *inactive*
ping-pong half. The half that is read as input is the *active* one, selected by
the `pp_sel` bit. A layer of up to 128 outputs therefore fills the inactive half
in up to eight commands. Its last command sets `swap`, which turns that half
into the input of the next layer. Only the first layer's input has to cross the
bus. The host reads the final results from the ping-pong buffer, which is
read-only from the bus.

## Bus map

32-bit words, byte addresses. Read data comes one cycle after the request. The
buffers must not be written while a command runs (an assertion in `nmcu`
checks this).

| address | access | content |
|---|---|---|
| 0x000-0x3FF | R/W | input buffer (little-endian bytes) |
| 0x400-0x47F | R | ping-pong half 0 |
| 0x480-0x4FF | R | ping-pong half 1 |
| 0x500-0x53C | R/W | bias[0..15] |
| 0x540-0x57C | R/W | scale[0..15] |
| 0x580 | W | command, starts the MVM (ignored while busy) |
| 0x584 | R | status: bit0 busy, bit1 done since last start, bit2 `pp_sel` |
| 0x588 | R/W | `pp_sel` |

## Programming the weights

`ai_mcu` programs one 256-cell row of one bank at a time (`pgm_start`,
`pgm_bank`, `pgm_addr`, `pgm_data` = 256 target states). `erase` returns a row to
state 0. Reads by the NMCU must not overlap programming.

**Program-verify** (`pv_controller`, synthesizable) follows the chip's flow.
Starting at S1, it does a verify read at the level of state *k*. If any cell
aimed at state *k* or higher is still below that level, it pulses exactly those
cells and verifies again. When all such cells pass, it moves to state *k*+1.
After S15 the row is done. So the sixteen states are built bottom-up, each with
its own verify level, and cells aimed at lower states are never disturbed. As in
the published flow there is no pulse limit.

**Bank model** (`eflash_bank`). Each cell keeps a threshold voltage in 10 mV
units, and the array is one 2048-bit word per row. Each pulse raises a masked
cell by 30-60 mV, chosen by an LFSR. A pulse only takes effect if the word line
reached at least 9 V. Verify level *k* is 160*k* mV (0.16-2.4 V). A read
resolves all 4 bits at once against levels 40 mV below each verify level. The
chip uses 15 non-uniform verify levels spread over 0-2.5 V, but their values
are not published, so these levels are placeholders. They are parameters.

**Word-line driver** (`wl_driver`). With SWR1 and SWR2 high, the word line is
driven to VPS4, the program voltage. With SRD high, it is driven to the
verify/read level VRD. The chip's driver adds a PMOS charging path, so VRD
reaches the word line without a threshold drop all the way up to VDDH = 2.5 V.
This is what makes a 2.5 V-wide verify window, and so 16 states, possible. The
model passes VRD unchanged up to VDDH and clips above it.

**HV generator** (`hv_generator`). Six voltage-doubler stages pump
VDDH = 2.5 V up to VPP4 of about 10 V. A voltage detector stops the pump clock at
the regulation level. VPP1-3 sit at 1/4, 1/2 and 3/4 of VPP4, so that no
transistor in the driver stack sees more than its rated voltage. While VPP1 is
above the reference SREF, the VPS1-4 supplies follow VPP1-4. When the pump is
off and discharged, they fall back to VDDH, which is the read condition. In the
model one clock is one pump clock, and the ramp is 0.5 V per clock. The pump
runs while any bank is programming.

## Fitting the evaluated networks

Both networks evaluated on the chip fit the default configuration. Cell counts
are from the network shapes and match the cell counts reported for the chip:

| network | weights (cells) | word lines used of 512 | commands |
|---|---|---|---|
| MNIST MLP 256-128(ReLU)-10 | 128*256 + 10*128 = 34,048 | 8*2 + 1 = 17 | 8 (2 reads) + 1 (1 read) |
| FC-AutoEncoder layer 9, 128x128 | 16,384 | 8 | 8 (1 read) |
| FC-AutoEncoder, all ten layers | 264,192 of 1,048,576 | 40+24+1+8+24+40 = 137 | 105 |

The MNIST input (256 bytes) fits the input buffer, and the 128 hidden units fit
one ping-pong half. The full autoencoder would fit the flash too. Its first layer
has 640 inputs, which is 5 reads and fits the 1024-byte input buffer. Its last
layer has 640 outputs, more than one 128-byte half, so the host would have to
read out the results after every eight commands. On the chip only layer 9 ran
on the NMCU.

## Where this RTL departs from, or goes beyond, the chip

Taken from the chip: 8 banks x 1024 bits per read, 256 4-bit weights per read,
two PEs per bank, 128 elements per PE, 16 PEs with 32-bit results, 16 x 32-bit
bias and scale, a shared shift, ReLU, 128-bit write-back, a 1024-byte input
buffer, 2 x 128-byte ping-pong, the state mapping table, the program-verify
flow, six pump stages with VDDH = 2.5 V and VPP4 of about 10 V, VPPk = k/4 x
VPGM, and the word-line driver's program, verify and read modes.

Chosen here (not published):
- the command word, the bus map, `pp_sel` and swap-at-end, and one shared word
  line for all banks;
- signed int8 inputs with zero point 0; a single-cycle PE adder tree; a 32-bit
  accumulator that wraps;
- round-half-up, saturation to int8, and a ReLU bypass for linear last layers;
- reads not overlapped with accumulation; a 2-cycle read latency;
- programming a whole row in parallel with per-cell inhibit; the row-program
  port at the top;
- all analog numbers in the models: verify levels, pulse response, ramp rate,
  SREF = 1.25 V, and the 9 V minimum program voltage.

Not modelled: analog settling of the word line, retention drift and baking,
the exact non-uniform verify levels, and the internal nodes of the driver and
the pump.

## Simulating

Every module sits in `rtl/<name>.sv`, and every testbench in `tb/<name>.sv`,
one per module. Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nmcu_pkg.sv tb/tb_ai_mcu.sv \
          --top-module tb_ai_mcu -Mdir obj_ai_mcu
./obj_ai_mcu/Vtb_ai_mcu
```

| testbench | what it covers |
|---|---|
| `tb_ai_mcu` | full size, default parameters: programs a two-layer net through program-verify (incl. an erase), runs it from input buffer and ping-pong, checks every output, the cycle counts, and that accumulation, both sources, swap, ReLU, saturation, pump regulation and erase each occur |
| `tb_workloads` | MNIST MLP 256-128-10 and autoencoder layer 9 at full size with generated weights (about 25 s) |
| `tb_nmcu` | NMCU with a bank stub: two chained layers through the bus |
| `tb_flow_controller` | address/segment stepping, clear pattern, command length for 1..8 reads |
| `tb_pv_controller` | program-verify on a modelled row: final levels, inhibit, state order |
| `tb_eflash_bank` | program, read back, read latency, erase (8-row bank) |
| `tb_pe`, `tb_quant_logic`, `tb_weight_fetcher`, `tb_input_buffer`, `tb_pingpong_buffer`, `tb_input_fetcher`, `tb_coef_buffer`, `tb_activation_relu`, `tb_wl_driver`, `tb_hv_generator` | the single blocks against independently computed values |

Verilator simulates with two states, so all state that is read is reset or
initialised. The flash array is not reset: it is non-volatile, and the model
starts it in the factory-erased state.

To change the design: the sizes are in `nmcu_pkg`. `eflash_bank` takes
`NROWS`, `READ_LAT`, the verify-level step and the pulse length as parameters,
and `hv_generator` takes its voltages and rates.
