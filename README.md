# Cycle generation hardware for a binary-translating SoC prototype

A processor core of a system-on-chip (for example a TriCore or an ARM) can be
prototyped without its RTL. Its object code is translated statically into
code for a fast VLIW processor, here a TI TMS320C6201 ("C6x"), and the C6x
runs that code in place of the core. The SoC hardware that the core would
drive still has to see a cycle-true clock and bus. This RTL is the FPGA logic
that provides both.

The central idea is that the translated program makes the SoC clock itself.
The C6x and the SoC hardware share no clock. The translator predicts, for
every basic block, how many cycles *n* the block would take on the source
core. It brackets the block with two accesses to a small FPGA device:

```
  store n   -> sync device      "start generating n SoC cycles"
  ... the block's translated instructions run in parallel ...
  load      <- sync device      "wait until all n cycles have been generated"
```

The SoC hardware therefore advances by exactly *n* cycles per block. The C6x
touches the hardware only twice per block, instead of once per cycle. When the
translator also models branch prediction and instruction caches, the
translated code counts extra cycles at run time in a software counter. A
**correction block** after the basic block then generates them with a second
store/load pair to the same device.

I/O loads and stores of the source program become C6x accesses to a **bus
interface**. It replays each one as a transfer on the SoC bus, clocked by the
generated cycles.

## Blocks

| file | role |
|---|---|
| `rtl/cabt_pkg.sv` | bus structs and widths shared by all modules |
| `rtl/sync_device.sv` | synchronization device: generates *n* SoC cycles and makes the load wait |
| `rtl/bus_interface.sv` | C6x access to APB-style SoC bus transfer, on generated cycles |
| `rtl/cabt_fpga.sv` | top: address decoder plus the two blocks |
| `tb/soc_periph_model.sv` | testbench stand-in for the attached SoC hardware |

The C6x, the translator, the correction-counting code and the SoC peripherals
are not hardware of this design. The C6x bus and the SoC bus are ports of
`cabt_fpga`.

## The synchronization device

State: `remaining` (cycles still to generate, 32 bits), `phase` (host clock
inside one SoC cycle) and `total` (cycles generated since reset).

* **Store n.** If the device is idle, the store completes in the cycle it is
  presented and loads `remaining = n`. If a generation is still running, the
  store is held (`ready` low) until it ends. The translator never does this,
  because every block ends with a wait, but the hardware gives it a defined
  meaning.
* **Generation.** Each SoC cycle lasts `2*HALF_PERIOD` host clocks.
  `soc_clk` is high for the first half. `soc_clk_en` is high for the first
  host clock of each cycle only, so SoC logic inside the FPGA can run on the
  host clock with `soc_clk_en` as its clock enable. The first cycle begins in
  the host clock right after the store. *n* cycles take exactly
  `2*HALF_PERIOD*n` host clocks. *n* = 0 generates nothing.
* **Load.** The load completes at once when `remaining` is 0. Otherwise the
  C6x is held on `ready` until the last cycle has finished. A load issued
  right after the store therefore waits `2*HALF_PERIOD*n` host clocks, less
  whatever time the C6x spent on the block's own work. The load returns
  `total`. The translated code ignores the value, but it lets software read
  the simulated cycle count.
* **Demand cycles.** The bus interface raises `io_need` while a transfer
  waits for SoC cycles. If the device is idle at that moment, it generates
  whole cycles, one after another, for as long as `io_need` is high. It also
  continues without a gap from the last cycle of a running generation. These
  cycles count in `total`.

Demand cycles are this design's addition, and the subtlest point in it. The
SoC bus can only move on generated cycles. The C6x is the only bus master,
and it is stalled on the I/O access. Suppose the block's *n* cycles have run
out before the C6x reaches an I/O instruction, which is common because the
FPGA generates cycles faster than the C6x executes. Without demand cycles the
access would then never complete. With them it completes, and the extra cycles
show up as a deviation of the simulated cycle count.

## The bus interface

The SoC bus is APB-style: a setup phase (`psel`), then an access phase
(`psel`, `penable`) that the slave can stretch with `pready` low. Every state
change happens on a host clock in which `soc_clk_en` is high:

```
generated cycle:   k        k+1      k+2 ... (k+2+ws)   next host clock
state:  IDLE  ->  SETUP  -> ACCESS -> ... ACCESS+pready -> DONE -> IDLE
C6x:    held ------------------------------------------- ready
```

A transfer uses 3 + *ws* generated cycles, counted from the request: a
launch cycle, setup, access, and *ws* wait states. The `paddr` it drives is
`SOC_BASE` plus the C6x offset. Read data is captured at the cycle that ends
the access phase. `ready` goes to the C6x one host clock later.

## Top level and address map

`cabt_fpga` decodes the most significant bit of the C6x byte address
(`C6X_ADDR_W` = 22 bits):

| address bit 21 | target |
|---|---|
| 0 | synchronization device (any offset) |
| 1 | bus interface; bits 20..0 are the SoC offset |

The C6x side is a synchronous request/ready bus (`c6x_req_t`, `c6x_rsp_t`). A
master raises `sel` and holds `we`, `addr` and `wdata` until a cycle with
`ready` high. Assertions in both blocks check that a waiting request stays
unchanged, and that each APB access phase follows its setup phase. A real
C6201 board would need a thin adapter from its asynchronous external-memory
strobes, with the ready input (ARDY) driven from `ready`. That adapter is not
included.

Parameters of `cabt_fpga`, all of them choices of this design, since the
source gives no sizes:

| parameter | default | meaning |
|---|---|---|
| `CNT_W` | 32 | width of *n* (one C6x word) |
| `HALF_PERIOD` | 1 | host clocks per half SoC cycle |
| `SOC_BASE` | 0 | SoC address of bus-interface offset 0 |

Synthesized, the whole top is about 60 word-level cells and 155 flip-flops.

## What follows the source design and what does not

Taken from the published description:
* a store of *n* starts *n* SoC cycles, which run in parallel with the block;
* a load returns at once when generation has finished and waits otherwise;
* correction blocks generate their cycles through the same start/wait pair;
* I/O accesses of the translated program go through an FPGA bus interface
  onto the SoC bus.

Choices of this design, not specified by the source:
* the C6x-side bus protocol, the address map and all widths;
* the APB-style SoC bus (the source names the emulated cores but no bus);
* the shape and rate of the generated clock;
* what the load returns (the cycle total);
* holding a store during a running generation;
* demand cycles;
* an asynchronous active-low reset.

Limits on accuracy:
* An I/O transfer starts at whatever SoC cycle is being generated when the C6x
  reaches the instruction. That is not necessarily the cycle at which the real
  core would have issued it. Within a block, the SoC sees I/O at the right
  count of blocks but not always at the right cycle.
* Cycle prediction, branch and instruction-cache correction are software. Only
  their result reaches this hardware, as the *n* of a store.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_cabt_fpga \
    -y rtl -y tb +libext+.sv rtl/cabt_pkg.sv tb/tb_cabt_fpga.sv
./obj_dir/Vtb_cabt_fpga
```

Replace `tb_cabt_fpga` by `tb_sync_device` or `tb_bus_interface` to run a
block testbench.

* `tb_sync_device` drives two device instances, with `HALF_PERIOD` 1 and 3. It
  checks pulse and edge counts, clock duty, load wait times with and without
  parallel work, held stores, the returned total, and demand cycles with their
  gap-free hand-over.
* `tb_bus_interface` generates its own cycle enable and uses an APB register
  model with random wait states. It checks the data and addresses of
  transfers, exactly 3 + *ws* cycles per transfer, a stall while no cycles are
  generated, and the APB rules.
* `tb_cabt_fpga` runs the top at its default parameters. It plays the C6x
  running three small translated programs (gcd, sieve of Eratosthenes,
  Fibonacci) at the three accuracy levels: static prediction; plus
  branch-prediction correction; plus instruction-cache correction. For the
  cache level it simulates a two-way LRU tag store in testbench software. It
  checks the program results read back over the SoC bus. It also checks that
  after every wait the device total equals the sum of all *n* issued so far,
  and that the SoC-side cycle counter agrees with the device. It counts every
  mechanism and fails if any never occurred. The per-block cycle numbers,
  branch penalties and cache geometry in this testbench are example values.

The whole run takes well under a second.

The programs evaluated with this kind of system (gcd, dpcm, fir, ellip, sieve,
subband) stay below 32,500 source cycles each. Fibonacci executes 41,419
instructions, roughly 45,000 cycles. All of this is far inside the 32-bit
*n* and the 32-bit cycle total, even if a whole program were a single block. The FPGA logic holds no program state, so nothing else
bounds a workload.
