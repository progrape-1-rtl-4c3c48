# PROGRAPE-1 in SystemVerilog: a board for particle-interaction sums

Most of the work in a many-body simulation is a double sum. Each particle
*i* feels the total of a pairwise function over all other particles *j*:

    f_i = sum over j of g(X_i, X_j)

For gravity, `g` is `(x_j - x_i) / (|x_j - x_i|^2 + eps^2)^(3/2)` times the
mass of *j*. GRAPE machines put this sum into a fixed-function pipeline that
sits beside a host computer. PROGRAPE ("programmable GRAPE") keeps the GRAPE
board but builds the pipeline in FPGAs. Only the interaction function `g` is
meant to change. The memory, the sequencing and the host link stay fixed.
PROGRAPE-1 is the first such board: two pipeline FPGAs, one j-particle
memory, and one interface/control FPGA. Its first interaction was gravity,
with one pipeline per FPGA.

This repository holds synthesizable SystemVerilog for the whole board
(`rtl/`) and self-checking testbenches for each unit (`tb/`). The pipeline
FPGAs are configured with a gravity pipeline of GRAPE-3 style: logarithmic
arithmetic between a fixed-point subtraction and a fixed-point accumulator.
The architecture follows the published description of PROGRAPE-1 by Hamada,
Fukushige, Kawai and Makino. That description leaves many details open:
number formats, register maps, timing and the host protocol. This design
fills them in, and the last sections list where.

## 1. The board

```
            host link                 32-bit write bus
  host ----------------> interface_unit -----+-----------------+-------------> cfg_data/cfg_wr
        <----------------      |  ^           |                 |              (FPGA configuration port)
           results             v  | req/ack   v                 v
                          control_unit ---> memory_unit     IDATA (in) of both chips
                           | strobes,        4 x 16K x 32 SRAM
                           | addresses,      |
                           | CS/WE/RE/ADR/RUN| 128-bit JDATA (same word to both)
                           v                 v
                     +--------------+  +--------------+
                     | pipeline_top |  | pipeline_top |   chip 0, chip 1
                     +--------------+  +--------------+
                            \ IDATA (out), one chip drives at a time /
                             +------> interface_unit (results) <----+
```

| Unit | Module | Role |
|---|---|---|
| Interface unit | `interface_unit` | Takes host words. Drives the 32-bit write bus. Returns result words. |
| Control unit | `control_unit` | Makes every strobe, address and RUN. Runs the j-particle loop. |
| Memory unit | `memory_unit`, 4 x `sram_module` | 16K words of 128 bits. Written 32 bits at a time, read 128 bits at a time. |
| Pipeline FPGA | `pipeline_top` = `io` + `mi` + `pu` | One chip of the gravity pipeline. |
| Board | `progrape1_top` | All of the above, wired. |

### A pass over memory

1. The host writes the j-particles into the memory unit. It sends x, y and z
   as separate 32-bit words to lanes 0, 1 and 2 of the word. Lane 3 is
   spare: it would hold the mass, which this pipeline does not use.
2. The host writes one i-particle (xi, yi, zi, eps^2) into each chip.
3. The host writes the particle count NJ and then the start command.
4. The control unit puts the addresses 0..NJ-1 on the memory unit, one per
   clock. RUN goes out one clock after each address. RUN therefore reaches
   the chips in the same clock as the 128-bit word read at that address.
   Both chips see the same word. Each chip sums the pull of every
   j-particle on its own i-particle.
5. After the last address, the control unit waits `DRAIN` = 16 clocks for
   the pipelines to empty. `busy` then falls.
6. The host reads six 32-bit words from each chip: fx, fy and fz, each as a
   low word and a high word.

A pass over NJ particles keeps the board busy for NJ + 17 clocks. In that
time each chip does NJ interactions, one per clock. At the original 16 MHz
clock this gives 2 x 16 M interactions per second. Counting 30 operations
per gravitational interaction, that is about 0.96 Gflops.

### Host link

The original board was reached through a PCI host interface card and a
cable link with a protocol of its own. Neither is modelled. Instead, a
word channel stands in for the link:

* The host sets `host_valid` with a mode, a 16-bit address and 32 bits of
  data.
* A word is taken on a clock edge where `host_ready` is also high.
* Reads return on `host_rvalid` / `host_rdata`.

The unit holds one word at a time. `host_ready` stays low until the
control unit has finished that word. During a run the control unit does
not take requests, so a host that asks for results early is simply stalled
until the sums are final.

| Mode | Value | Address | Effect |
|---|---|---|---|
| `MODE_CMD` | 1 | `[1:0]`: 0 = NJ, 1 = NHOLD, 2 = start | Writes a control register. |
| `MODE_MEM` | 2 | `[15:2]` word, `[1:0]` lane | Writes 32 bits of one j-particle word. |
| `MODE_PIPE_WR` | 3 | `[10]` chip, `[9:0]` ADR | Writes an i-register. |
| `MODE_PIPE_RD` | 4 | `[10]` chip, `[9:0]` ADR | Reads an accumulator word. Returns on `host_rvalid`. |
| `MODE_CONFIG` | 5 | `[0]` chip | Sends a configuration word out on `cfg_data` / `cfg_wr[chip]`. |

The five modes are the board's five kinds of transfer: command, memory
data, i-particle data, results and FPGA configuration. Configuring an FPGA
is the vendor's own protocol, so configuration words just leave the board
on ports.

## 2. The pipeline chip

Pins (`pipeline_top`):

* `JDATA[127:0]`: j-particle word from the memory unit.
* `IDATA[31:0]`: bidirectional. Here it is split into `i_data_in`,
  `i_data_out` and `i_data_oe`, and the board ORs the chips' outputs by
  their enables.
* `ADR[9:0]`, `CS`, `WE`, `RE`, `RUN` and `CLK`.

Inside the chip:

* `io` registers all host-side pins once. It gives the pipeline unit
  `we = CS & WE`, `adr`, `datai` and `run`. RUN is not qualified by CS: one
  RUN line starts both chips.
* `mi` registers JDATA once, which keeps it in step with RUN.
* `pu` holds the i-registers (`i_register`), the interaction pipeline
  (`gravity_ifp`) and the accumulators (`accumulators`).

Register map inside a chip. `ADR[9:3]` selects the virtual pipeline (see
below) and `ADR[2:0]` selects the field:

| ADR[2:0] | Write (i-registers) | Read (accumulators) |
|---|---|---|
| 0 | xi (low 20 bits) | fx bits 31:0 |
| 1 | yi | fx bits 63:32 |
| 2 | zi | fy bits 31:0 |
| 3 | eps^2 as a log word (low 15 bits) | fy bits 63:32 |
| 4 | - | fz bits 31:0 |
| 5 | - | fz bits 63:32 |
| 6, 7 | - | read as 0 |

Chip timing, counted from the clock in which a signal is on the pins:

| Event | Result |
|---|---|
| CS+WE with ADR and data in clock t | The i-register holds the value from clock t+2. |
| CS+RE in clock t | The word is on IDATA, with its enable high, in clock t+2 only. |
| JDATA+RUN in clock t | The word enters the pipeline in t+1. Its term is in the accumulators after the edge that ends clock t+7. |

**Starting a sum.** There is no clear command. The first term a virtual
pipeline receives after RUN has been low *replaces* its accumulator
instead of adding to it. Every run therefore starts from zero. A gap in
RUN in the middle of a pass would also restart the sums. The control unit
never makes such a gap.

**Virtual pipelines.** With `NVP` > 1 a chip holds NVP i-particles. It
cycles through them on successive clocks while RUN is high, and each
j-particle must then stay on JDATA for NVP clocks. The control unit does
this when the host writes NHOLD = NVP. The virtual-pipeline index travels
beside the interaction pipeline, so each term lands in the accumulator of
its own i-particle. The gravity configuration uses one physical pipeline
per chip, so the default is NVP = 1.

## 3. The gravity pipeline and its number formats

This is the part that most needs explaining. Its structure is GRAPE's:

```
xj -(-)- F->L -+-------------- wait -- (x) -- L->F -- Sum
yj -(-)- F->L -+-------------- wait -- (x) -- L->F -- Sum
zj -(-)- F->L -+-------------- wait -- (x) -- L->F -- Sum
    xi yi zi   |                         ^
               +-> dx^2+dy^2+dz^2+eps^2 -> R^2 -> R^-3 +
```

Coordinate differences are taken in fixed point. Everything after that,
up to the accumulators, is done on logarithms, so multiplying and raising
to a power are additions and scalings. Mass and potential are not
computed, so all j-particles have unit mass.

**Formats** (`progrape1_pkg`):

| Quantity | Format |
|---|---|
| Position | 20-bit two's complement integer. One unit is one position LSB. |
| Difference | 21 bits, so it cannot overflow. |
| Log word `lns_t` | 15 bits: `{sgn, nz, lg[12:0]}`. The value is `(-1)^sgn * 2^(lg/32)`. `lg` is a signed log2 with 5 fraction bits; `nz = 0` means zero. |
| eps^2 | Given by the host as a log word. |
| R^2 during the sum | 48-bit fixed point with 4 fraction bits. |
| Force term | 35-bit signed fixed point with 32 fraction bits. The unit is one (position LSB)^-2. |
| Accumulator | 64-bit signed with 32 fraction bits. |

**Conversions.** Two 32-entry tables do all the approximation:

* `LOG2_TAB[k] = round(32 * log2(1 + k/32))`
* `EXP2_TAB[k] = round(256 * (2^(k/32) - 1))`

*F->L* (`lns_f2l`) finds the leading one at bit p and rounds the six bits
below it to five. A carry out of the rounding moves p up by one. The word
is then `lg = 32*(p - frac_bits) + LOG2_TAB[m]`. *L->F* (`lns_l2f`) builds
the 9-bit mantissa `256 + EXP2_TAB[lg mod 32]` and shifts it by
`floor(lg/32)`. Bits shifted out at the bottom are truncated, and values
too large for the output saturate.

**Stages** (`gravity_ifp`, one register each, latency 6):

1. dx = xj - xi, and likewise for y and z.
2. F->L of |dx|, |dy| and |dz|.
3. R^2 (`r2_unit`). Each square doubles the log. The four terms go to
   fixed point, are added with saturation, and go back to a log.
4. R^-3 (`r2_to_rm3`): `lg = -round_half_up(1.5 * lg(R^2))`.
5. Multiply: the log of dx plus the log of R^-3, for each axis. The
   differences wait two stages to meet R^-3 here.
6. L->F to the signed 35-bit force term.

**Accuracy.** One log LSB is a factor of 2^(1/32), about 2.2%. The
testbenches check the following against double precision:

| Quantity | Tolerance checked |
|---|---|
| R^2 | within 8% |
| Single force terms | within 10% |
| Total force of 300 or 16384 particles | within 5% of its magnitude |

Errors of single terms partly cancel in a sum. Terms below 2^-32 are
lost. This happens when |dx| / r^3 < 2^-32, for example for separations
beyond about 2^16 position units. Positions in a run should therefore be
scaled so that the particles use the 20-bit range without spreading to
its full width.

## 4. Where this design fills in or departs from the original

Taken from the original description:

* The units and their connections.
* Two pipeline chips fed the same 128-bit word.
* Four 16K x 32 SRAMs. The memory is written 32 bits at a time.
* The chip pins (JDATA 128, IDATA 32, ADR 10, CS, RE, WE, RUN, CLK).
* The internal split IO / MI / PU = IREG + IFP + ACC, and the NVP
  parameter.
* The five transfer modes.
* The structure of the gravity pipeline.
* No mass and no potential.
* One pipeline per chip.

This design's own choices:

* **Number formats and conversion method.** The original says only that
  they match the GRAPE chip. The 20-bit position, the 15-bit log word with
  5 fraction bits, the table sizes and the 64-bit accumulators are choices
  modelled on GRAPE-3 practice.
* **Subtraction direction.** The pipeline computes xj - xi. This gives the
  sign of the attraction with the minus sign of g folded in.
* **Register map, command registers, restart-on-RUN rule, read latency,
  memory output register, DRAIN time and the stall of host requests
  during a run.**
* **Clocking.** One clock, `CLK`. The original's generic pipeline template
  had separate interface and pipeline clocks, but the PROGRAPE-1 chip has
  one clock pin.
* **Host link.** A word channel replaces the PCI card and the link
  protocol.
* **FPGA configuration.** It is not modelled. Configuration words leave
  the board on `cfg_data` / `cfg_wr`.
* **I-register readback.** The original's on-chip registers are
  readable; here only the accumulators can be read.
* **Power-up state.** Chip registers start at zero through declaration
  initialisers (the chip has no reset pin). Accumulators hold arbitrary
  values until the first run. Interface and control units use an
  active-low asynchronous `rst_n`.
* **Parameter passing.** The original pipeline template passes its data
  widths (JDATA_WIDTH, IDATA_WIDTH, FDATA_WIDTH) as generics. Here they
  are package constants. The result port is 32 bits wide.

Not included: the SPH, molecular-dynamics and transform pipelines
discussed as future uses, and the host software.

## 5. Simulating and changing it

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
with a watchdog. The arithmetic testbenches compare bit for bit with
`tb/grav_model_pkg.sv`. That package computes both tables from their
formulas with real arithmetic, and it also gives exact floating-point
forces for the accuracy checks.

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/progrape1_pkg.sv tb/grav_model_pkg.sv tb/tb_progrape1_top.sv \
    --top-module tb_progrape1_top
./obj_dir/Vtb_progrape1_top
```

Replace `tb_progrape1_top` with any other testbench name. The main ones:

* `tb_progrape1_top`: the full board at default sizes (16K-word memory,
  NVP = 1). Three passes of 1, 300 and 16384 j-particles, configuration
  words, host stalls, and reads from both chips. About ten seconds.
* `tb_progrape1_top_nvp`: the board with NVP = 2 and NHOLD = 2.
* One testbench per unit, `tb_<module>`.

The simulator used has two-state logic, so the testbenches initialise
every input they drive.

**Another interaction.** The part meant to change is `gravity_ifp`. A new
pipeline needs to:

* take the `jdata` word and the i-register record;
* produce a term per clock with a delayed `runr`;
* set `LAT` in `pu` to its latency, so the virtual-pipeline index stays
  in step.

The i-register record (`ipart_t`), the term (`fterm_t`) and the read map
are in `progrape1_pkg`, `i_register` and `accumulators`. If the new
pipeline is longer than the control unit's drain time, raise `DRAIN` in
`control_unit`.
