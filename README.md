# A power-aware heterogeneous adder ALU

A conventional core has one adder as wide as the machine word. It spends about the same time and
energy on `3 + 4` as on a full 64-bit sum. Yet in integer code most additions are small: on
Dhrystone, a third of all ADDs have operands of 16 bits or less. This design replaces the single
wide adder with a **set of ripple-carry adders of different widths**: 4, 8, 16 and 32 bits.
Each ADD is sent to the adder that fits its operands. Small ADDs then run on small, cheap adders.
A wide ADD on a narrow adder runs in several passes, one chunk per pass.

A **power governor** on top of this picks the active configuration from the energy the supply
reports:

| supply level | configuration | adders powered | routing |
|---|---|---|---|
| 100 % | heterogeneous | all | by operand size |
| 100 %, on request | homogeneous *k* | adder *k* only | everything to adder *k* |
| 50 % | reduced | 8-bit only | everything to the 8-bit adder |
| 25 % | reduced | 8-bit only | everything to the 8-bit adder |

The sum is the same in every configuration. Only the latency changes, and which adders toggle.

The RTL follows "Heterogeneous ALU Architecture – Power Aware System" (Alok Anand, Ivan Khokhlov,
Abhishek Anand). That paper is an evaluation study: it characterises ripple-carry adders of each size
and combines the results with ADD operand statistics from Dhrystone. It shows the block diagram
of the core and states the policies, but gives no interface or microarchitecture. Everything at
that level here is this design's own, and is marked as such below and in each file's header.

## Files

| file | contents |
|---|---|
| `rtl/halu_pkg.sv` | energy-level enum, configuration struct, default adder set |
| `rtl/rc_adder_unit.sv` | one W-bit ripple-carry adder with multi-pass sequencing |
| `rtl/unit_selector.sv` | operand-size measurement and adder choice |
| `rtl/power_governor.sv` | energy level → active configuration, power enables |
| `rtl/hetero_alu_core.sv` | top level: governor + selector + the adders |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus a workload run |

## The hard part: timing of a ripple-carry adder at a fixed clock

The timing model is the least obvious part of the design, and everything else depends on it.

A ripple-carry adder's delay grows linearly with its width. At a 1 GHz clock, synthesis of the
four adders (plus a 64-bit one used for comparison) gave delays that need a whole number of clock
cycles per addition:

| adder | cycles per pass (`PASS_CYC`) |
|---|---|
| 4-bit | 1 |
| 8-bit | 1 |
| 16-bit | 2 |
| 32-bit | 3 |
| 64-bit (optional) | 6 |

Delay is rounded up to whole cycles, so the 4- and 8-bit adders both cost one cycle. The 8-bit
adder therefore does the same work as two 4-bit passes in the same time. Because of this
quantisation, some narrow adders lose no speed against wider ones on wide data. They only save
energy.

`rc_adder_unit` reproduces this behaviour in synthesizable form:

* The adder is an explicit chain of W full adders. Its inputs come from registers (`a_q`, `b_q`,
  `carry_q`), and its output is captured only after `PASS_CYC` cycles. In silicon this is a
  **multicycle path of `PASS_CYC` cycles**. A timing constraint must declare it so, or the
  16- and 32-bit units will not meet a 1 ns clock.
* An operand wider than W is added in `ceil(act_w / W)` passes, least significant chunk first.
  After each pass, the operand registers shift right by W and the chunk's carry becomes the next
  pass's carry in. `act_w` is the number of significant bits of the larger operand.
* Latency of one ADD: `ceil(act_w / W) * PASS_CYC` cycles. For example, 32-bit data take 8
  cycles on the 4-bit unit, 4 on the 8-bit unit, 4 on the 16-bit unit and 3 on the 32-bit unit.
  64-bit data take 6 cycles on the 32-bit unit (two passes).
* The passes stop at the operand's active width. Suppose they cover k < 64 bits. Every operand
  bit above k is zero, so the last carry is written into result bit k, and the carry out of
  bit 63 is 0. The result is therefore the exact 64-bit `A + B + Cin`, whichever unit produced
  it. The core may move ADDs between adders freely.

The table below gives the cycles per ADD for the default set. This grid is Fig. 10 of the paper,
and the testbenches check it. The 12-bit row follows the same rule; the paper gives no bar
for it.

| data \ adder | 4 | 8 | 16 | 32 | (64) |
|---|---|---|---|---|---|
| 4-bit | 1 | 1 | 2 | 3 | 6 |
| 8-bit | 2 | 1 | 2 | 3 | 6 |
| 12-bit | 3 | 2 | 2 | 3 | 6 |
| 16-bit | 4 | 2 | 2 | 3 | 6 |
| 32-bit | 8 | 4 | 4 | 3 | 6 |
| 64-bit | 16 | 8 | 8 | 6 | 6 |

## Choosing the adder

`unit_selector` is combinational. It finds the highest set bit of `a | b`, which gives the size
of the larger operand; this is how the operand statistics were collected too. Then:

* **Heterogeneous**: the smallest adder at least as wide as that size. 1–4 bits go to the 4-bit
  adder, 5–8 to the 8-bit adder, 9–16 to the 16-bit adder and 17–64 to the 32-bit adder, which
  runs two passes for anything above 32 bits.
* **Homogeneous**: always the configured adder.

The paper's discussion also suggests that 16-bit ADDs could go to the 8-bit adder. That costs the
same 2 cycles but less energy. Its method section and evaluation setup route by matching size, and
that is what is built here. Cycle counts are identical either way.

## The governor and configuration changes

`power_governor` turns `energy_lvl` (and an optional `homo_req`/`homo_idx` at full energy) into
the requested configuration. The active configuration is a register, for two reasons:

* An adder must not be powered off under an ADD in flight. A change is therefore applied only
  when the core is idle. While it waits, `switch_pending` holds `in_ready` low, and the caller
  sees one stall cycle per switch.
* `pwr_en` is driven from that register: all ones when heterogeneous, one-hot otherwise. In this
  RTL it is a clock enable. A powered-off unit keeps its state and ignores `start`. In a real
  implementation it would also control power switches or clock gates around each unit.

At 50 % and 25 % the behaviour is the same: everything runs on the 8-bit adder. The supply level
overrides a homogeneous request. The 2-bit encoding of the level is local to this design
(`halu_pkg::energy_lvl_e`). The unused code 3 is treated as a reduced level.

## Core interface and timing

`hetero_alu_core` (defaults: `OP_W=64`, adders `{4,8,16,32}`, `PASS_CYC {1,1,2,3}`,
`REDUCED_IDX=1`):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (heterogeneous after reset) |
| `energy_lvl` | in | 2 | `E_FULL`, `E_HALF`, `E_QUARTER` |
| `homo_req`, `homo_idx` | in | 1, 3 | ask for a single-adder configuration (at full energy) |
| `pwr_en` | out | N_ADDERS | adders powered |
| `cfg_hetero`, `mode_switch` | out | 1 | routing mode; one-cycle pulse after a change |
| `in_valid`, `in_ready` | in/out | 1 | ADD request handshake |
| `a`, `b`, `cin` | in | 64, 64, 1 | operands |
| `out_valid` | out | 1 | one-cycle result pulse, no back-pressure |
| `o`, `cout`, `out_idx` | out | 64, 1, 3 | sum, carry out of bit 63, adder that ran it |

One ADD is in flight at a time. An ADD accepted at edge *t* has its result captured at edge
*t + L*, where *L* is its latency from the table above. `out_valid` is high in the cycle after
that edge. `in_ready` is already high in the cycle before edge *t + L*, so the next ADD is
accepted on the same edge that captures the previous result. A stream of ADDs therefore costs
exactly the sum of their latencies. This is the cost model behind the paper's cycle comparisons.

Internal assertions check that:

* only one unit finishes at a time;
* an ADD never goes to an adder that is powered off;
* no unit is started before the last cycle of the ADD it is working on.

## Does it reproduce the published comparison?

`tb_dhrystone_add_mix` runs the Dhrystone ADD operand mix through the core in every
configuration: the published counts of 200,776 / 52,734 / 14,070 / 83,628 / 196 / 712,433 ADDs of
4 / 8 / 12 / 16 / 32 / 64 bits, scaled by 1/100. It also runs a second core built with a 64-bit
adder (`N_ADDERS=5`, `ADDER_W={4,8,16,32,64,...}`, `PASS_CYC={1,1,2,3,6,...}`), which is the
paper's "64-bit architecture". Each ADD's operands use the full width of their class. The cycle
ratios measured in RTL agree with the published ones:

| ratio | measured | paper |
|---|---|---|
| heterogeneous / 32-bit homogeneous (32-bit arch.) | 0.887 | "nearly 12 %" fewer cycles |
| 8-bit / 32-bit homogeneous | 1.154 | "nearly 15 %" worse |
| heterogeneous / 64-bit homogeneous (64-bit arch.) | 0.740 | "nearly 26 %" fewer cycles |
| 8-bit / 64-bit homogeneous | 0.964 | "nearly 4 %" better |
| 32-bit / 64-bit homogeneous | 0.835 | "nearly 17 %" better |

At 50 % energy, the run takes the same number of cycles as the 8-bit homogeneous configuration.

The paper's energy and area figures come from gate-level power reports. This RTL does not model
them. `pwr_en` and `out_idx` tell you which unit worked in each cycle, so an external energy
model can combine them with per-adder energy numbers.

## Where this design departs from, or goes beyond, the paper

* **Operand width 64.** The block diagram labels the operands "4/8/16/32 bit". The benchmark
  statistics, however, include 64-bit operands, and the 32-bit architecture handles them with its
  32-bit adder. The core is therefore 64 bits wide, and the labels are read as the sizes the four
  adders serve. `OP_W` can be set to 32 (`tb_core_op32` runs that build).
* **Carry width.** The diagram's Cin/Cout are labelled with the same "4/8/16/32 bit". Here they
  are single carry bits.
* **No 64-bit adder by default.** The default set follows the block diagram. The 64-bit adder of
  the paper's 64-bit comparison is one parameter change away.
* **Own choices**, none of which the paper specifies:
  * handshake, reset, and one ADD in flight;
  * chunk order in multi-pass operation;
  * placing the final carry above the covered bits;
  * rounding in-between sizes (12-bit) up to the next adder;
  * deferring configuration switches until idle;
  * the homogeneous-request port.
* **Not built**:
  * the energy source itself, which reaches the core only as `energy_lvl`;
  * the host CPU that issues ADDs, which connects to the `in_*` ports;
  * arrays of several cores or several adders of one size. The paper leaves the number of adders
    of each size open.
* The reduced-energy figure of the paper shows some adders left on at 50 % and fewer at 25 %,
  but gives no counts. The text says all work moves to the 8-bit adder at both levels, and that
  is what is built.

## Simulating

Every testbench is self-checking. Each prints `TB_RESULT checks=N failures=M` and stops through
a watchdog if it hangs. With Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -y rtl rtl/halu_pkg.sv \
          tb/tb_hetero_alu_core.sv --top-module tb_hetero_alu_core
./obj_dir/Vtb_hetero_alu_core
```

Replace the testbench name as needed:

| testbench | what it checks |
|---|---|
| `tb_rc_adder_unit` | sums, carries and latencies of 4/8/16/32-bit units on random widths; power-enable freeze |
| `tb_unit_selector` | size measurement and adder choice for every width 1–64, in all modes |
| `tb_power_governor` | configuration, power enables and deferred switches against a reference model |
| `tb_hetero_alu_core` | end to end at default parameters, with a cycle-exact reference model; fails unless stalls, routing to each adder, multi-pass ADDs, both reduced levels, homogeneous mode, switches (also deferred), carry out and back-to-back issue all occur |
| `tb_dhrystone_add_mix` | the benchmark mix above, in every configuration of both architectures |
| `tb_core_op32` | the core built with 32-bit operands: sums, carries, chosen adder and latency, at full and at 50 % energy |

All of them run in a few seconds.

To change the adder set, override `N_ADDERS`, `ADDER_W` and `PASS_CYC` on `hetero_alu_core`.
The lists are 8 entries long; unused entries are 0. Widths must be ascending and divide `OP_W`.
`REDUCED_IDX` selects the adder used at reduced energy.
