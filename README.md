# Low-leakage RISC-V MCU with adaptive reverse body bias and SRAM retention

This is the digital part of a 32-bit RISC-V microcontroller test chip for a
22 nm FD-SOI process. The chip targets IoT and industrial use. It must run at
50 MHz from 0.55 V over the full industrial temperature range (-40 °C to
125 °C), and it must spend most of its life asleep, holding 128 KiB of SRAM
at a few microwatts. The design has three main ideas:

* **Adaptive reverse body bias (ABB).** A regulator in an unbiased top-level
  domain measures how fast the processing element (PE) actually is. It then
  applies as much reverse well bias as the speed target allows. Reverse bias
  slows the transistors and cuts their leakage. Silicon that would be faster
  than needed is therefore biased harder, and every die ends up just fast
  enough.
* **Retention-capable SRAM.** Each 4 KiB SRAM macro can switch off its
  periphery while the bit cells keep their data (retention). It can also
  switch everything off (power-down). Waking up takes 200 ns, because the
  in-rush current is limited.
* **A wake-up controller that coordinates the power modes.** In *sleep* it
  gates the processor clock. In *retention* it also puts all SRAM into
  retention, halves the ABB speed target (so the regulator adds more reverse
  bias), and runs the PE from a 5 MHz clock. On an interrupt it undoes these
  steps in a safe order.

In active mode, data bus gating also saves power. Each 32 KiB bank is made of
eight 4 KiB macros, and only the macro being accessed sees any bus activity.

The RTL here covers everything in the chip that is logic. The processor core
(CV32E40P, an existing open core) is not included. Its bus ports, sleep output,
clock and interrupts are ports of `mcu_top`. The analog parts are not included
either: the PLL, the well-bias charge pumps, the temperature sensor and the
pads.

## Block map

```
                 clk_pll_i (50 MHz)   clk_ref_i (5 MHz)
                        |                  |
                        +---- clk_switch --+---- clk_pe (PE clock)
                        |         ^ sel_slow
                        |         |                   clk_gate -> core_clk_o
   core instr port ---+ |   +-----+--------------+
   core data port  ---+-|-->|      pe_xbar       |--> sram_bank 0  (8 x sram_macro)
   i2c_slave (SCL/SDA)+ |   |  4 masters x 6     |--> sram_bank 1  (8 x sram_macro)
   mbist -------------+ |   |  slaves, RR arb.   |--> sram_bank 2  (8 x sram_macro)
                        |   +--------------------+--> sram_bank 3  (8 x sram_macro)
                        |                        |--> pe_timer ---------- irq 0
                        |                        +--> wakeup_ctrl <------ irq 3:1 (ext)
                        |                               |  |  |  core_sleep_i
                        |        A_PDRET per bank <-----+  |  +--> core_clk_en, core_irq
                        v                                  |
                    abb_ctrl <---- target_low -------------+
                    ro_i -> bias_code_o (to well-bias generator), lock_o
```

| Module | Role |
|---|---|
| `pe_pkg` | Bus structs, sizes, address map, power-state encodings |
| `mcu_top` | Chip top: PE, ABB regulator, I2C interface, clock switch and gate |
| `pe_xbar` | Crossbar: instruction port, data port, I2C and MBIST to the slaves |
| `sram_bank` | 32 KiB bank: 8 macros, address-based bus gating |
| `sram_macro` | Behavioural model of the 4 KiB retention SRAM macro |
| `wakeup_ctrl` | Power-mode state machine, interrupt latching, registers |
| `pe_timer` | Compare timer, the usual wake-up source |
| `abb_ctrl` | Body-bias regulation loop with 100 % / 50 % speed target and lock |
| `clk_switch` | Glitch-free switch between 50 MHz and 5 MHz |
| `clk_gate` | Processor clock gate |
| `mbist` | March C- self-test of the whole SRAM |
| `i2c_slave` | I2C-to-bus bridge for external access |

### Address map and bus

| Range | Slave |
|---|---|
| `0x0000_0000`–`0x0001_FFFF` | SRAM, bank = `addr[16:15]`, macro within bank = `addr[14:12]` |
| `0x1000_0000` | timer |
| `0x1000_1000` | wake-up controller |
| anything else | built-in empty slave: granted at once, reads 0 |

Every bus port uses the same request/grant protocol as the core's
instruction and data ports (`pe_pkg::bus_req_t`, `bus_rsp_t`):

1. A master holds `req` together with `addr`, `we`, `be` and `wdata`.
2. The request is taken on the clock edge where `gnt` is high.
3. Exactly one cycle later `rvalid` returns, with `rdata` for a read.

All slaves answer in exactly one cycle, and `pe_xbar` asserts this.

The crossbar has one round-robin arbiter per slave. Masters that address
different slaves are all served in the same cycle. An SRAM bank withholds
`gnt` while its macros are waking up.

## Power modes and the wake-up sequence

`wakeup_ctrl` decides everything about power. Software chooses a mode in
`CFG` and then executes WFI. The core's sleep output (`core_sleep_i`) starts
the entry. Entry is refused while an enabled interrupt is pending, so a
wake-up event that races with WFI is never lost.

```
            core_sleep & CFG[0]=0           any enabled pending IRQ
  ACTIVE ------------------------> SLEEP ---------------------------> ACTIVE
     |
     | core_sleep & CFG[0]=1
     v
    RET --- enabled IRQ ---> WAKE_ABB --- ABB locked ---> WAKE_SRAM --- banks ready ---> ACTIVE
```

| State | Core clock | SRAM (`A_PDRET`) | ABB target | PE clock |
|---|---|---|---|---|
| ACTIVE | on | active | 100 % | 50 MHz |
| SLEEP | gated | active | 100 % | 50 MHz |
| RET | gated | retention | 50 % if `CFG[1]` | 5 MHz if `CFG[2]` |
| WAKE_ABB | gated | retention | 100 % | back to 50 MHz |
| WAKE_SRAM | gated | active (waking) | 100 % | 50 MHz |

Banks selected in `BANK_PD` are held in power-down in every state. Their
contents are lost.

The wake-up order matters most. The SRAM periphery and the processor must
not run at full speed while the body bias is still tuned for the relaxed 50 %
target, because the logic would be too slow. So the controller works in
three steps:

1. It restores the full target and the fast clock.
2. It waits for the regulator to report lock. For the first `ABB_SETTLE`
   (8) cycles it ignores the lock signal, which is the regulator's stale lock
   from the old target. The regulator runs on its own clock, so the new
   target and the lock each cross a two-flop synchronizer. These cycles cover
   both crossings and the cycle in which the regulator drops its old lock.
3. It powers the SRAM up, waits until every bank reports ready (200 ns, 10
   cycles), and only then enables the core clock.

Measured in the full-chip testbench, the core clock comes back 11 cycles
after the SRAM power-up request: the 10-cycle wake-up plus one cycle for the
state change.

Registers (offsets from `0x1000_1000`):

| Offset | Name | Bits |
|---|---|---|
| 0x00 | CFG | [0] 0 = sleep, 1 = retention; [1] lower ABB target in retention; [2] 5 MHz clock in retention |
| 0x04 | IRQ_EN | one enable per interrupt (0 timer, 1–3 external) |
| 0x08 | IRQ_PEND | latched interrupts, write 1 to clear |
| 0x0C | BANK_PD | one power-down bit per SRAM bank |
| 0x10 | STATUS | [2:0] controller state |

`core_irq_o` (pending and enabled) goes to the core's interrupt inputs.

## SRAM: macro power states and bus gating

`sram_macro` models the custom macro at its pins. `A_PDRET[1:0]` selects the
power state:

| `A_PDRET` | State | Bit array | Periphery | `A_DR_O` |
|---|---|---|---|---|
| 00 | active | on | on | read data |
| 01 | retention | on, data kept | off | held low |
| 1x | power-down | off, data lost | off | held low |

When the macro returns to `00`, `A_RDY_O` stays low for `WAKEUP_CYCLES` (10)
cycles and the macro ignores accesses until then. The output pull-down of the
real macro appears as `A_DR_O` being forced to zero whenever the periphery is
unpowered. Words lost in power-down read as zero in the model. Real silicon
would return garbage.

`sram_bank` decodes `addr[14:12]` to one of its eight macros. Only that macro
gets `A_ME`, the address, the data and the byte mask. The buses of the other
seven are driven to zero, so they do not toggle. A read is answered from the
macro that was selected in the previous cycle.

## ABB regulation

`abb_ctrl` counts the rising edges of a ring oscillator that sits in the
biased domain. The count runs over 256 reference cycles, behind a two-flop
synchronizer, so the oscillator must run below half the reference clock. At
the end of each window it compares the count with the target:

* below the target: the PE is too slow, so `bias_code_o` goes down by one
  (less reverse bias);
* above target + `HYST`: the PE is faster than needed, so the code goes up
  by one (more reverse bias, less leakage);
* otherwise the count is in band. After `LOCK_WINDOWS` in-band windows in a
  row, `lock_o` rises.

`target_low_i` halves the target. It comes from the PE clock domain through
a two-flop synchronizer. A change of target drops lock three cycles later and
starts a new window. The regulator runs on the PLL clock, which is
never switched, so its time base stays the same in retention.

With the testbench's oscillator model (period 20 ns + 2 ns per code step),
the loop locks at code 9 for the full target and code 26 for the 50 % target.

## Clocks

`clk_switch` is a standard glitch-free multiplexer. Each clock has a
request/enable flop pair, and a clock is enabled only after the other has
stopped. While the wake-up controller asks for the slow clock, the whole PE
runs from `clk_ref_i` (5 MHz): crossbar, SRAM, timer, wake-up controller,
MBIST and I2C. This is safe because the core is gated in that state. The
timer keeps counting at the lower rate.

`clk_gate` takes over its enable on the falling edge and ANDs it with the
clock, which gives `core_clk_o`.

## Other blocks

* **`pe_timer`**: a 32-bit counter with a compare register. It restarts on a
  match, so the interrupt period is CMP+1 cycles. Registers: CTRL (enable,
  interrupt enable), COUNT, CMP, STATUS (pending, write 1 to clear).
* **`mbist`**: runs March C- (`w0; up r0 w1; up r1 w0; down r0 w1; down r1 w0;
  r0`) over all 32768 words through the crossbar. That is 10 operations per
  word, about 655k cycles for the full 128 KiB. The result is `done`/`pass`
  plus the first failing address. The test destroys the memory contents.
* **`i2c_slave`**: an I2C slave at address 0x50. It never stretches the
  clock, and it samples SCL and SDA with the PE clock, so it needs the fast
  clock and SCL at most about 1/10 of it. To write, send 4 address bytes and
  then data words, each 4 bytes with the most significant byte first. To
  read, send the 4 address bytes, a repeated start, and a read. The
  address advances by 4 per word.

## How far this follows the paper

The paper describes the chip at block-diagram level. Only a few of the
numbers and behaviours above come from it:

* the 4 × 32 KiB banks made of 4 KiB macros;
* the three macro power states and their meaning, and the
  `A_PDRET[1:0]`/`A_DR_O` pin names with the output pull-down;
* the 200 ns SRAM wake-up;
* one active macro per bank, with the other buses tied low;
* the three PE modes and what each one switches off;
* the 50 % ABB target and the 5 MHz wake-up clock in retention;
* the block list: crossbar, timer, wake-up/IRQ controller, MBIST, I2C
  interface, ABB generator in a zero-bias top-level domain.

The following are this design's own choices, because the paper does not
describe them:

* all encodings, register maps and the address map;
* the bus protocol details and the arbitration;
* the wake-up order and the per-bank power-down register;
* the ring-oscillator speed measurement and the step-by-one bias regulation;
* the March C- algorithm;
* the I2C transaction format;
* the clock-switch and clock-gate circuits;
* the decision to switch the whole PE clock, rather than only the wake-up
  controller's, to 5 MHz.

Known gaps and departures:

* **Not in the RTL:** the core, the ADPLL, the analog well-bias generator
  (its N-well and P-well outputs are represented by the 6-bit
  `abb_bias_code_o`), the temperature sensor, and the supply and IO pads.
* **`A_PDRET` encoding is a guess.** The decode inside the macro (the
  precharge switches and `standby_en`) is only drawn in the paper, with no
  truth table. The encoding used here is an interpretation, and so is the
  reading of `A_DR_O` as the read-data output.
* **The macro is a behavioural model.** Power switching and in-rush limiting
  appear only as a cycle count.
* **No power figures.** Nothing in this RTL reproduces the paper's power,
  leakage or timing-closure results (e.g. 3.2 µW retention, 4.8 µW/MHz), and
  nothing here can be checked against them.
* **Clock domains.** The ABB regulator runs on the PLL clock, and the rest of
  the PE runs on the switched PE clock. The two signals between them,
  `target_low` and `lock`, each pass a two-flop synchronizer. The I2C lines
  and the ring oscillator are synchronized the same way. No other signal
  crosses domains.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. For example,
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/pe_pkg.sv tb/tb_mcu_top.sv --top-module tb_mcu_top
./obj_dir/Vtb_mcu_top
```

Replace `tb_mcu_top` with any other testbench name. `tb_mcu_top` runs the
whole chip at full size (128 KiB) in well under a minute. It stands in for
the core, the I2C host and the ring oscillator, and goes through these steps:

* a program load over I2C, then instruction fetches;
* mixed fetch and data traffic to all banks;
* an unmapped access;
* sleep, woken once by the timer and once by an external interrupt;
* retention with the PE clock at 5 MHz and the ABB relocking at the 50 %
  target and again at full target, with the SRAM contents and the 10-cycle
  wake-up checked afterwards;
* a power-down that loses a bank;
* a full MBIST run.

It counts each of these mechanisms and fails if any never happened. The
block testbenches use smaller memories and exercise corner cases: random
traffic against reference models, crossbar contention, clock-switch glitch
checks, injected stuck-at faults for the MBIST, and a NACK for a foreign I2C
address.

## Changing it

Sizes live in `pe_pkg` (bank and macro size, clock frequency, wake-up time)
and in module parameters:

* `sram_bank`: `MACROS`, `MACRO_WORDS`;
* `abb_ctrl`: `WINDOW`, `TARGET_FULL`, `HYST`, `LOCK_WINDOWS`, `CODE_W`;
* `wakeup_ctrl`: `NIRQ`, `ABB_SETTLE`;
* `mbist`: `WORDS`.

`SRAM_WAKEUP_CYCLES` is derived from the 200 ns wake-up and the 50 MHz clock,
so changing `F_CLK_MHZ` updates it. The crossbar decodes addresses through
`pe_pkg::slave_of`; a new slave needs an entry there and one more slave port.
