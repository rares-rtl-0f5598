# RARES: a control register for detecting, stopping and recovering from runtime memory attacks

Small microcontrollers such as the MSP430 run attestation and application code
side by side with no memory protection unit. A bug or an injected payload can
read the device key, peek at the attestation stack, scribble over application
RAM, or interrupt code that must run atomically. Earlier hardware monitors for
this class of device (VRASED, APEX) react to any such violation the same way:
they reset the chip. RARES keeps the same monitoring idea but does two things
differently:

1. It **classifies** each violation into one of ten kinds and records it in a
   16-bit, software-readable but not software-writable **Ctrl_register**.
2. It attaches a **different, use-case-specific response** to each kind, so the
   device can keep running in a degraded mode instead of resetting:
   idling the CPU, stalling memory, reflashing from a golden image, or (only
   for atomicity violations) resetting.

This directory holds SystemVerilog for the RARES hardware that sits next to an
openMSP430 core: the three violation classifiers, the Ctrl_register, the
prevention logic and the 16 KB recovery ROM. The CPU, its memory backbone, the
other memories and the APEX/VRASED monitors are not included; the top module
exposes their signals as ports.

## Where the logic sits

```
             Pc, Irq, Ren, Wen, Daddr, DMAen, DMAwe, DMAaddr   (tapped out of the CPU)
                                  |
        +-------------------------+------------------------+
        |                         |                        |
 cpu_access_detect        dma_access_detect         atomicity_detect     (combinational)
   D6..D9                   D2..D5                     D0, D1
        +-------------------------+------------------------+
                                  |
                           ctrl_register  --- read port at CTRL_ADDR (software, read only)
                     (sticky D0..D9, D10 = reset request)
                                  |
                           rares_prevent
        +-------------+-----------+------------+-------------------+
   cpuoff_o      pmem_cen_o   dmem_cen_o   core_rst_n_o     recovery_req_o
  (D9 | CPUOFF)  (cen_mux)    (cen_mux)    (D10)            (D6 | D7)

   recovery_rom: 16 KB golden image, read through the memory backbone
```

`rares_hw_mod` groups the three classifiers and the register; `rares_top`
adds `rares_prevent` and `recovery_rom`.

## The Ctrl_register

| bit | name            | set when (in the cycle before)                                   | response            |
|-----|-----------------|------------------------------------------------------------------|---------------------|
| D0  | Atomicity_RAM   | an interrupt is taken while the PC is in application RAM        | leads to D10        |
| D1  | Atomicity_Stack | an interrupt is taken while the PC is in the SW-Att code region | leads to D10        |
| D2  | DMA_RAM_Wr      | DMA writes application RAM while SW-Att runs                     | recorded only       |
| D3  | DMA_RAM_Rd      | DMA reads application RAM while SW-Att runs                      | recorded only       |
| D4  | DMA_Stack_Rd    | DMA reads the reserved SW-Att stack while SW-Att runs            | recorded only       |
| D5  | DMA_ROM_Rd      | DMA reads the key ROM while SW-Att is not running                | recorded only       |
| D6  | CPU_RAM_Wr      | the CPU writes application RAM while SW-Att runs                 | flash and RAM disabled, reflash requested |
| D7  | CPU_RAM_Rd      | the CPU reads application RAM while SW-Att runs                  | flash and RAM disabled, reflash requested |
| D8  | CPU_Stack_Rd    | the CPU reads the reserved stack while SW-Att is not running     | recorded only       |
| D9  | CPU_ROM_Rd      | the CPU reads the key ROM while SW-Att is not running            | CPU idled (CPUOFF)  |
| D10 | Reset           | one cycle after D0 or D1 is set                                  | system reset        |
| D11..D15 | unused     | always 0                                                         |                     |

"SW-Att runs" means that the PC lies inside the SW-Att ROM, which holds the
attestation code (HMAC-SHA256). The SW-Att code is the only code allowed to
touch the key and its private stack, and it should not touch application RAM.

Flags are **sticky**: once set, a bit stays set until the next system reset,
so software can read which attacks happened. No write path exists. Software
reads the register at `CTRL_ADDR` (default `0x014A`, next to the APEX metadata
words). The read port is combinational: `ctrl_rd_data_o` shows the register
while `ctrl_rd_en_i` is high and the address matches, and 0 otherwise.

## Timing

All three classifiers are pure comparisons of the current cycle's PC and
addresses against region bounds. Their outputs are registered, so a violating
access in cycle *n* is visible in the register after the clock edge that ends
cycle *n*. Every response is combinational from the register, so it starts in
cycle *n*+1. The offending access itself is **not** blocked. The chip-enable
override stops the accesses that come after it.

The reset path is the one loop in the design. An atomicity violation in cycle
*n* sets D0 or D1 at the end of *n*, and D10 at the end of *n*+1. During cycle
*n*+2, D10 drives `core_rst_n_o` low. The same internal reset clears the
register at the end of *n*+2, so the reset lasts exactly one mclk and the core
restarts with a clean Ctrl_register. That reset also clears the atomicity
bits, so software can see them only for the two cycles before it.

## Prevention responses

- **Key read by ordinary code (D9) -> CPU idle.** `cpuoff_o` is the CPUOFF bit
  of the status register ORed with D9. On openMSP430 this stops the CPU clock
  while mclk, peripherals and DMA keep running, so a data-acquisition DMA loop
  can continue. The equivalent software response, where code reacting to D9
  sets the low-power bits of r2 itself, is not hardware and is not included.
- **SW-Att touching application RAM (D6/D7) -> memory stall and reflash.**
  `ctrl_cen_sel = D7 | D6` drives a 2:1 mux per memory: input 0 is the
  backbone's own active-low chip enable, input 1 is the constant 1
  (disabled). Two such muxes gate the flash (`pmem_cen`) and the application
  RAM (`dmem_cen`). With its memories disabled the offending code stops making
  progress. `recovery_req_o` tells the core to run the reflash routine, which
  copies the golden image from the recovery ROM back into flash.
- **Interrupt during atomic code (D0/D1) -> reset**, through D10 as described
  above.
- **DMA violations and CPU stack reads (D2..D5, D8)** are recorded for
  software to act on. No hardware response is attached to them.

## Recovery ROM

`recovery_rom` is 16 KB organised as 8192 x 16-bit words. It has an
active-low chip enable and a one-cycle synchronous read. While `cen` is high
the output holds its value. Its contents come from the `INIT_FILE`
parameter, a `$readmemh` word file. Words the file does not cover read as
zero. The memory backbone decodes its address range. That backbone is outside
this RTL, so `rares_top` exposes the ROM as `rrom_cen_i` / `rrom_addr_i`
(word address) / `rrom_dout_o`.

## Memory map

The design fixes which regions exist, not where they sit. The defaults
(package `rares_pkg`, overridable per instance) are openMSP430-like byte
addresses:

| region                         | default range     | parameter pair            |
|--------------------------------|-------------------|---------------------------|
| SW-Att ROM (attestation code)  | 0xA000 - 0xDFFF   | SWATT_BASE / SWATT_LAST   |
| key ROM                        | 0x6A00 - 0x6A3F   | KEY_BASE / KEY_LAST       |
| reserved SW-Att stack (2 KB)   | 0x0400 - 0x0BFF   | STACK_BASE / STACK_LAST   |
| application RAM                | 0x0C00 - 0x1FFF   | APP_BASE / APP_LAST       |
| Ctrl_register (read only)      | 0x014A            | CTRL_ADDR                 |

All bounds are inclusive. The DMA address is taken as a byte address. The
openMSP430 DMA port uses word addresses, so shift its address left by one
before connecting it.

## How far it follows the design, and where it departs

The following come directly from the design: the register's bit map and
width, the three violation groups, the OR of D9 into CPUOFF, the
`D7 | D6` -> mux -> chip-enable structure with constant 1 on the select-1
input, D10 as the reset response to atomicity violations, and the 16 KB
recovery ROM.

The description of the access rules is loose in places. The following are
choices of this RTL:

- **D8 (CPU stack read).** One sentence allows application code to read the
  reserved stack. Another says the design keeps all VRASED/APEX security
  properties, and VRASED keeps that stack private. This RTL follows the
  second: any CPU read of the stack from outside SW-Att sets D8.
- **D4 (DMA stack read)** is set for DMA stack reads *while SW-Att runs*,
  because the description explicitly allows them while application code runs.
  D4 and D8 therefore use opposite PC conditions. Change one line in the
  classifier if your threat model differs.
- **"Unauthorised RAM"** for D2/D3/D6/D7 is read as the application RAM
  region. SW-Att attests flash, not RAM.
- **DMA write strobe.** A separate `dma_wen_i` is used to tell DMA reads from
  writes. The description names only DMA enable and address.
- **Stickiness, the one-cycle D10 delay, the self-clearing reset, the read
  address and the read-port timing** are not specified and were chosen here.
- **No wait-state logic.** The description says disabling the chip enable
  "inserts wait states". Here that is left to the memory and backbone
  behaviour for a disabled memory.
- **The DMA RAM flags D2/D3 do not gate the chip enables**: only D6/D7 do.
- **The recovery request is a level.** The reflash routine is expected to end
  with a reset, since software cannot clear the register.
- The modified APEX/VRASED monitors that the design builds on (proof of
  execution, key protection with reset) are **not** part of this RTL, and
  their modifications are not described. Each rule here is a stateless
  comparison. The openMSP430 core, memory backbone, ROMs, flash and RAM are
  likewise external.

## Resource figures

The published FPGA numbers cover the whole openMSP430 + APEX system (for
example 773 registers for the register-only variant and 830 with the recovery
ROM). They cannot be compared with this RTL alone. Here the register and
reset logic is 11 flip-flops, the ROM read register adds 16, and the
classifiers are about 130 word-level cells of comparators and gates.

## Files

- `rtl/rares_pkg.sv`: Ctrl_register bit enum, violation structs, default map
- `rtl/cpu_access_detect.sv`, `rtl/dma_access_detect.sv`,
  `rtl/atomicity_detect.sv`: the classifiers
- `rtl/ctrl_register.sv`: the register, its read port and a stickiness
  assertion
- `rtl/rares_hw_mod.sv`: classifiers and register
- `rtl/cen_mux.sv`, `rtl/rares_prevent.sv`: the responses
- `rtl/recovery_rom.sv`: golden-image ROM
- `rtl/rares_top.sv`: everything above, with the core-side ports
- `tb/*_tb.sv`: one self-checking testbench per module.
  `tb/rares_top_tb.sv` (with a 512-word test image) and
  `tb/rares_top_full_tb.sv` (all defaults, empty ROM) share
  `tb/rares_top_tb_body.svh`. Both play the core and walk through normal
  operation, the key-read attack, SW-Att writing RAM followed by recovery, the
  DMA violations and both atomicity violations. They count how often each
  response fired and fail if one never did.
- `tb/recovery_image.hex`: test image, word *i* = (*i* x 0x9E37 + 0x1234) mod 2^16.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Run from the directory above `rtl/` and `tb/`, because the testbenches open
`tb/recovery_image.hex` by that relative path:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  --top-module rares_top_tb rtl/rares_pkg.sv tb/rares_top_tb.sv -o sim
./obj_dir/sim
```

Replace `rares_top_tb` with any other testbench name to test one module. Each
run takes well under a second. To retarget the design, override the region
parameters on `rares_top`. To give another violation a hardware response,
add it to `rares_prevent`: it receives the whole register.
