# MeLPUF: a PUF built from the logic gates of an existing design

A physically unclonable function (PUF) gives each chip an identifier that comes from
manufacturing variation rather than from stored data. Memory-based PUFs (SRAM
start-up values and the like) are hard to model but usually need a dedicated memory
array. MeLPUF ("memory-in-logic" PUF) needs none. It picks ordinary gates of the
design that have timing slack. On the output of each one it adds a cross-coupled
inverter pair and a 2:1 multiplexer. A single control signal selects between two modes:

* **control = 0, PUF mode.** Every chosen gate's fanout receives the power-up state of
  its inverter pair instead of the gate's value. Sampling these lines gives the
  chip's signature.
* **control = 1, functional mode.** The multiplexers pass the original gate outputs
  and the design works as before. Normal test and verification also run in this mode.

The PUF bits are spread across the logic, not gathered in one array. Nothing outside
can write to the pairs. There is no challenge input, so there is no
challenge–response relation to learn. The main configuration has 1024 sites, which
give a 1024-bit signature.

This RTL implements that structure. It has one parameterised site, a block of 1024
sites with a shared control signal, and a small controller that copies the response
into a RAM after power-up and then switches the design to functional mode.

## One site

```
Inv 1 : input n2, output n1          FF1 : D = n1, Q -> MUX input 0
Inv 2 : input n1, output n2          FF2 : D = n2  (balancing load only)
MUX   : input 0 = FF1.Q, input 1 = host gate output, select = ctrl -> cell_out
```

`melpuf_cell` holds one site:

* **Inverter pair** (`melpuf_bistable`). Both nodes start low. At power-up the loop
  settles into one of its two stable states. Which one depends on the mismatch
  between the two inverters. The output of Inv 1 is the response bit.
* **Balancing registers.** Each inverter output drives a flip-flop, so the two
  inverters carry the same load and neither state is favoured. Only Inv 1's flip-flop
  feeds the multiplexer. Inv 2's flip-flop is there for the load, and it makes the
  pair hold "01" or "10", which also balances power against side-channel analysis. The
  cell brings it out as `puf_bal` for testing. `BALANCE_REGS = 0` leaves both
  registers out.
* **Control multiplexer.** Input 0 is the PUF bit and input 1 is the host gate's
  output. The MUX output goes to the gate's fanout cone, so in PUF mode the host logic
  sees the response. The same net is where the response is sampled.

Timing: in functional mode `cell_out` follows the gate output combinationally, with
one multiplexer delay added. In PUF mode the response appears one clock edge after
the pair has resolved, because of the balancing register.

## The inverter pair in simulation

This is the one part whose behaviour cannot be shown in ordinary RTL simulation. A real MeLPUF pair is two
inverters in a loop: two LUTs on an FPGA, two cells in an ASIC. A synthesis tool
accepts it if the loop is kept from being optimised away. A two-state logic simulator
cannot show it, though. The loop has no defined start value, and the value it settles
to comes from analog mismatch. `melpuf_bistable` is therefore a **behavioural
model**. It has the pair's ports (`vdd`, `inv1_out`, `inv2_out`) and this behaviour:

* Each instance has a fixed mismatch `m`, spread uniformly over [-1000, 1000] and
  derived from its `SEED` by a 32-bit hash (the MurmurHash3 finaliser).
* Each power-up `k` adds noise `n_k`, spread uniformly over [-NOISE, NOISE] and
  derived from `SEED` and `k`.
* `SETTLE_NS` (2 ns) after `vdd` rises, Inv 1's output becomes `m + n_k > 0`, and
  Inv 2's output becomes the complement. Both read 0 before that and while `vdd`
  is low.

The process is deterministic, so a testbench can predict every bit. Separate dies
are separate sets of seeds. `melpuf_top` gives site `i` of die `CHIP_SEED` the seed
`(CHIP_SEED << 16) + i`.

Calibration: a site flips between two power-ups only if `|m| < NOISE`. Averaged over
the uniform mismatch, the expected fraction of differing bits (intra-chip Hamming
distance) is `NOISE / (3 * 1000)`. The default `NOISE = 77` gives 2.57 %, which is the
robustness measured on FPGA hardware for this structure. Unbiased mismatch gives an
inter-chip distance of 50 %. The model has no temperature or supply input. To mimic a
harsher operating point, raise `NOISE`.

The real loop is in `melpuf_inv_pair`: two continuous assignments `n1 = ~n2` and
`n2 = ~n1`, with keep attributes so that synthesis neither removes nor merges the
loop. On an FPGA each inverter becomes one LUT. Tools report the combinational loop,
and that warning is expected here because the loop is the memory element. Setting
`SYNTH_PAIR = 1` on `melpuf_top` or `melpuf_cell` builds every site with the loop and
leaves `vdd` unused. That is the setting to implement. The default stays 0 because the
simulator cannot predict the loop's state. A simulator does show the loop as
complementary and stable, with a start value taken from its random initialisation.
When implementing, place the sites apart from each other.
Sites in neighbouring logic blocks tended to resolve alike in hardware. Spreading
them both horizontally and vertically gave the best uniqueness and randomness.

## Capture and read-out

`melpuf_ctrl` is a three-state machine that drives the shared control signal:

| state   | ctrl | what happens                                                        |
|---------|------|---------------------------------------------------------------------|
| SETTLE  | 0    | waits `SETTLE_CYCLES` (16) cycles for the pairs and registers        |
| CAPTURE | 0    | writes one `SIG_W`-bit word per cycle into the RAM                   |
| FUNC    | 1    | normal operation; `sig_valid` = 1; a `reread` pulse returns to SETTLE |

Reset (asynchronous, active low) enters SETTLE. Power-up and reset therefore leave
the design in PUF mode, and it reaches functional mode by itself:

* **Latency:** `SETTLE_CYCLES + N_PUF/SIG_W` cycles from reset release to `sig_valid`.
  That is 16 + 32 = 48 cycles at the defaults, or 480 ns at 100 MHz.
* **Layout:** response bit `i` is stored in word `i / SIG_W`, at bit `i % SIG_W`.
* **Read port:** `melpuf_sig_ram` is a 32 × 32-bit simple dual-port RAM with a
  registered read, so `rd_data` follows `rd_addr` by one cycle. In the original
  set-up an FPGA vendor's JTAG memory editor read this RAM. Here it is a plain port,
  which a debug bridge, a processor or an authentication engine can use.
* **Re-read:** while powered, the pairs keep their state, so `reread` gives the same
  signature. A fresh measurement needs a power cycle (`vdd` low, then high). It
  differs from the first in about 2.6 % of the bits.

Two assertions in the controller state the protocol. The RAM is written only while
ctrl is low, and `sig_valid` is set only in functional mode.

Authentication is done off-chip. The verifier compares a read-out signature with a
golden one recorded at enrolment, and accepts it if the Hamming distance is small.
No comparator or threshold is part of this RTL.

## Inserting sites into a host design

`melpuf_top` has `N_PUF` sites. Both sides of every site are ports: `gate_out[i]` is
the original output of the chosen gate, and `cell_out[i]` goes to the inputs that gate
used to drive. To integrate the block, cut each chosen net and connect its driver and
its loads to these ports.

The sites are chosen at design time, by this procedure:

1. Keep the gates of the target types whose timing slack is positive. Mark gates with
   zero or negative slack as critical and leave them alone.
2. If fewer candidates exist than sites are needed, stop.
3. Sort the candidates by slack, largest first, and insert a site on the first
   `N_PUF`.
4. Re-run synthesis and timing to measure the area, power and delay cost.

That step is a netlist edit done by a tool. It is not part of the RTL. The FPGA
evaluation put 1024 sites into an ISCAS85 benchmark and compared the result with a
1024-bit SRAM PUF and a 1024-bit ring-oscillator PUF built next to the same circuit.
The circuit alone used 1,650 logic elements, 255.94 mW and had an 11.40 ns delay.
Both comparison PUFs were added alongside that circuit:

| version          | logic elements | power     | delay    |
|------------------|----------------|-----------|----------|
| MeLPUF           | 4,743          | 275.81 mW | 13.39 ns |
| SRAM PUF         | 5,977          | 294.44 mW | 12.25 ns |
| ring-oscillator  | 16,983         | 295.70 mW | 14.42 ns |

MeLPUF had the lowest area and power. On delay it beat the ring-oscillator PUF but
not the SRAM PUF, even though the accompanying text says it was lower on all three.

## Parameters

| parameter       | default | where                         | origin                              |
|-----------------|---------|-------------------------------|-------------------------------------|
| `N_PUF`         | 1024    | top, controller               | the 1024-bit configuration          |
| `SIG_W`         | 32      | top, controller, RAM          | own choice                          |
| `SETTLE_CYCLES` | 16      | top, controller               | own choice (≥ 2)                    |
| `BALANCE_REGS`  | 1       | cell                          | register balancing, as in hardware  |
| `SYNTH_PAIR`    | 0       | top, cell                     | 0 pair model, 1 synthesizable loop  |
| `NOISE`         | 77      | top, cell, pair model         | calibrated to 2.57 % intra-HD       |
| `CHIP_SEED`     | 1       | top                           | simulation only: selects the die    |
| `SETTLE_NS`     | 2       | pair model                    | own choice                          |

`N_PUF` must be a multiple of `SIG_W`. The shared types and constants are in
`rtl/melpuf_pkg.sv`.

## Where this RTL departs from the published structure or adds to it

* By default the inverter pair is a behavioural model (see above). The synthesizable
  loop is selected with `SYNTH_PAIR = 1`. The model's uniform mismatch and noise
  replace the Gaussian threshold-voltage spread of a circuit-level Monte-Carlo study.
* The capture controller, its settling time, the RAM width, the word order, the
  `reread` request and the reset behaviour are this design's own. The original work
  says only that the control signal is low at start-up, that the outputs are sampled
  and routed to a RAM, and that a high control signal restores normal operation.
* One control signal is shared by all sites.
* The host circuit is not included. The benchmark's gate outputs and fanout inputs
  are ports.
* The balancing registers have no reset and load on every clock.

## Verification

Each module has a self-checking testbench in `tb/`. `tb/melpuf_ref_pkg.sv` restates
the mismatch model independently, so the testbenches predict every response bit.

| testbench                | checks                                                                                          |
|--------------------------|-------------------------------------------------------------------------------------------------|
| `tb_melpuf_bistable`     | 64 pairs, 5 power-ups: nodes low when off or settling, complementary after, state equals the reference, held while powered |
| `tb_melpuf_inv_pair`     | 16 synthesizable loops: nodes complementary and state held                                      |
| `tb_melpuf_cell`         | MUX polarity, one-edge delay of the balancing register, complement in the second register, pass-through of random data; also cells built with the loop |
| `tb_melpuf_ctrl`         | ctrl low until captured, latency `SETTLE_CYCLES + N_PUF/SIG_W`, each word written once with the right slice, reread |
| `tb_melpuf_sig_ram`      | fill and read back, no write with `we` low, read-during-write returns old data                  |
| `tb_melpuf_top`          | full default size: power-up, response on `cell_out`, 48-cycle capture, all 1024 bits in RAM, functional pass-through, reread, power cycle, intra-HD bound; counts each mechanism |
| `tb_melpuf_hd_workload`  | 10 + 20 dies of 64 sites, two power-ups each: inter-HD and intra-HD                             |

Results of the current RTL:

* `tb_melpuf_top` (1024 bits): 2.64 % intra-HD between two power-ups, 48.05 % ones.
* `tb_melpuf_hd_workload`: inter-HD of 50.35 % and 49.32 %, intra-HD of 2.66 % and
  2.34 %.
* Reported for the FPGA hardware, for comparison: 50.05 % inter-HD and 2.57 % intra-HD.

For the ten-die population the workload testbench uses 64 sites per die instead of
1024. That keeps the simulator build short, since every site is a separate model
instance. The full 1024-site block runs in `tb_melpuf_top`.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/melpuf_pkg.sv tb/melpuf_ref_pkg.sv tb/tb_melpuf_top.sv \
  --top-module tb_melpuf_top --Mdir obj_top
obj_top/Vtb_melpuf_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog ends the
run with a failure if it hangs. Change the file and top-module names to run the
others.

## Files

* `rtl/melpuf_pkg.sv`: sizes, controller state type, hash for the pair model
* `rtl/melpuf_bistable.sv`: behavioural model of the cross-coupled inverter pair
* `rtl/melpuf_inv_pair.sv`: the synthesizable inverter loop
* `rtl/melpuf_cell.sv`: one site (pair, balancing registers, control MUX)
* `rtl/melpuf_ctrl.sv`: control signal and capture state machine
* `rtl/melpuf_sig_ram.sv`: signature RAM
* `rtl/melpuf_top.sv`: `N_PUF` sites with controller and RAM
* `tb/`: the testbenches above and the reference model package
