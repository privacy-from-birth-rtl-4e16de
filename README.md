# VERSA: a hardware monitor that keeps sensor data private from the software on its own MCU

A low-end microcontroller (an MSP430-class core with no MMU and no privilege
levels) usually runs all of its software with full access to its peripherals.
If any of that software is compromised, it can read the sensors attached to
the GPIO ports and leak what they measure. VERSA prevents this with a small
piece of logic placed beside the core. The core itself is unchanged.

The monitor's rule is simple. A sensor may be read only by a piece of code that
**has just been authorised**. That code must also **run as one atomic block**.

- The authorised code sits in a memory region called ER (the *executable
  region*). Its bounds are chosen by software and stored in two words of
  memory called METADATA.
- Before ER may read GPIO, a routine in ROM must check a token from the
  device's remote controller against a MAC over ER and METADATA. This routine
  is called Verify, and the ROM region holding it is VR. When the check
  succeeds, Verify leaves through one fixed address, `i_Auth`.
- The lock on GPIO opens only when the program counter reaches `i_Auth`.
- The lock closes again when ER finishes, or as soon as anybody writes to ER or
  METADATA.
- While the lock is open, ER must run straight through:
  - it is entered at its first instruction;
  - it is left at its last instruction;
  - no interrupt and no DMA may occur in between.

Optionally, Verify also derives a one-time key, which it places in a region
called eKR. That key gets the same read protection as GPIO, and only Verify may
write it. The authorised code can then encrypt what it sends out.

The monitor has no way to stop an instruction. When a rule is broken it
**resets the MCU**, and the boot code erases data memory. Whatever an attacker
read, or caused to be read, is gone before any other code runs. Everything
below follows from that single output.

## What the monitor sees

VERSA taps the core's signals once per clock cycle. They are bundled in
`versa_pkg::mcu_sig_t`:

| field      | meaning                                   |
|------------|-------------------------------------------|
| `pc`       | address of the instruction being executed |
| `irq`      | an interrupt is being taken               |
| `r_en`     | CPU data read                             |
| `w_en`     | CPU data write                            |
| `d_addr`   | CPU data address                          |
| `dma_en`   | DMA is accessing memory                   |
| `dma_addr` | DMA address                               |

The bounds of ER come in as two more 16-bit inputs, `er_min_i` and `er_max_i`.
The integration drives them from the METADATA words.

`access_decode` reduces these signals to a set of predicates. Each predicate
tests membership in an inclusive address range:

```
Read_Mem(R)  = (r_en & d_addr in R) | (dma_en & dma_addr in R)
Write_Mem(R) = (w_en & d_addr in R) | (dma_en & dma_addr in R)
```

The DMA signals carry no direction, so any DMA access to a region counts as
both a read and a write of it.

Default memory map (all bounds inclusive, set in `versa_pkg`, every one a
parameter of `versa`):

| region   | default           | where the number comes from |
|----------|-------------------|-----------------------------|
| GPIO     | `0x0018`–`0x0037` | base is MSP430 `P3IN`, used by the example sensing code; top (end of port P6) is a choice of this design |
| eKR      | `0x0360`–`0x037F` | 32-byte key at `0x0360`, as in the example sensing code |
| METADATA | `0x0380`–`0x0383` | 4 bytes (ER_min, ER_max); the base is a choice of this design |
| VR       | `0xA000`–`0xDFFF` | choice of this design |
| `i_Auth` | `0xDFFE`          | choice of this design; it must be the address Verify reaches only on success |

## The three state machines

All three FSMs are Mealy machines with a common output convention. A machine's
local reset is 1 in the cycle it decides to enter its RESET state, and in every
cycle it stays there:

```
local_reset = (state == RESET) | (next_state == RESET)
reset_o     = rd_reset | wr_reset | at_reset
```

A violating access therefore raises `reset_o` **combinationally, in the same
cycle** as the access. The state registers move on the rising clock edge. No
machine has a reset pin of its own. Each machine enters RESET from any state,
including unused encodings, in the first cycle that `ext_reset_i` is high. A
power-on reset of the MCU therefore also initialises the monitor.

### GPIO / eKR read control (`gpio_read_ac`): RESET, rLOCK, rUNLOCK

This is the machine that holds the authorisation. Here "read" means
`Read_Mem(GPIO)`, or also `Read_Mem(eKR)` when `ENC_SUPPORT=1`. "Modify" means
`Write_Mem(ER) | Write_Mem(METADATA)`.

| from    | condition (first match wins)                                   | to      |
|---------|----------------------------------------------------------------|---------|
| RESET   | `pc==0` and no external reset and no read                      | rLOCK   |
| RESET   | otherwise                                                      | RESET   |
| rLOCK   | read, or external reset, or (`pc==i_Auth` and modify)          | RESET   |
| rLOCK   | `pc==i_Auth`                                                   | rUNLOCK |
| rUNLOCK | external reset, or (`pc==i_Auth` and modify)                   | RESET   |
| rUNLOCK | read and (`pc` outside ER, or `pc==ER_max`, or modify)         | RESET   |
| rUNLOCK | `pc==ER_max`, or modify                                        | rLOCK   |
| rUNLOCK | otherwise                                                      | rUNLOCK |

One authorisation buys exactly one run of ER. Reaching `ER_max` uses it up, and
so does any write to ER or METADATA: the rLOCK state must then be left through
`i_Auth` again.

The paper states these rules twice: once as a state diagram and once as
temporal-logic properties that it proves. In three corners the diagram's edge
labels are looser than the properties. This RTL follows the properties:

- A read at `pc==ER_max` resets. The lock is already closing in that cycle.
- A read in the same cycle as a write to ER or METADATA resets. The write must
  block reads from that very cycle on.
- A write to ER or METADATA while `pc==i_Auth` resets. Otherwise ER could be
  swapped at the moment of authorisation.

### eKR write control (`ekr_write_ac`): RESET, wUNLOCK

| from    | condition                                               | to      |
|---------|---------------------------------------------------------|---------|
| RESET   | `pc==0` and no external reset and no eKR write          | wUNLOCK |
| wUNLOCK | `Write_Mem(eKR)` with `pc` outside VR, or external reset | RESET   |

This machine is instantiated only when `ENC_SUPPORT=1`. Otherwise its reset and
state outputs are tied to 0.

### ER atomicity and controlled invocation (`er_atomicity`): RESET, notER, firstER, midER, lastER

The machine follows the program counter through ER. Here "quiet" means
`!irq & !dma_en`.

| state   | stays while                    | moves on                                          |
|---------|--------------------------------|---------------------------------------------------|
| notER   | `pc` outside ER                | `pc==ER_min` and quiet → firstER                  |
| firstER | `pc==ER_min` and quiet         | `ER_min<pc<ER_max` and quiet → midER              |
| midER   | `ER_min<pc<ER_max` and quiet   | `pc==ER_max` and quiet → lastER                   |
| lastER  | `pc==ER_max` and quiet         | `pc` outside ER and quiet → notER                 |
| RESET   | —                              | `pc==0` and no external reset → notER             |

Every other case goes to RESET:
- a jump into the middle of ER;
- a jump out of ER before `ER_max`;
- an interrupt or DMA while `pc` is in ER;
- an external reset.

Because firstER can only move on to midER, an ER must hold at least three
instruction addresses. A direct jump from `ER_min` to `ER_max` counts as a
violation. This is stricter than the bare properties require, and it is what
the paper's state diagram shows.

## Resetting and releasing the MCU

`reset_o` is meant to be ORed into the core's reset. The other reset sources
enter through `ext_reset_i`:
- power-up;
- the reset pin;
- a watchdog;
- another monitor, such as VRASED's.

**`ext_reset_i` must not include `reset_o`.** A machine leaves RESET only while
`ext_reset_i` is low. If `reset_o` were fed back into that input, the core
would be held in reset for ever. It would also form a combinational loop.

The release sequence is:

1. A violation raises `reset_o`. The core resets and starts its reset routine.
   During that routine `pc` is not 0, so the monitors stay in RESET and
   `reset_o` stays high.
2. In the cycle the core presents `pc==0`, each machine takes its exit edge.
   `reset_o` is still 1 in that cycle, because the state is still RESET.
3. From the next cycle on, `reset_o` is 0 and the core runs from its reset
   vector.

The wrapper around the core must therefore let the core's PC reach 0 while
`reset_o` is held. The end-to-end testbench models this.

The data erasure that runs at boot is not part of this RTL. Two constraints
apply to it:

- **It must skip eKR.** If erasure code outside VR wrote to eKR, the key's
  write monitor would reset the MCU again.
- **It need not clear METADATA.** METADATA holds only the public ER bounds.
  Writing it is legal while the lock is closed, and simply forces a fresh
  authorisation.

The authorised code in ER must erase its own stack before it reaches `ER_max`.
No reset follows a successful run, so nothing else will clear it.

## Parameters

| parameter          | default | meaning |
|--------------------|---------|---------|
| `ENC_SUPPORT`      | 1       | also protect eKR: reads only by authorised ER, writes only from VR |
| `GPIO_MIN/MAX`     | see map | GPIO input registers that are protected |
| `EKR_MIN/MAX`      | see map | one-time key region |
| `META_MIN/MAX`     | see map | the words holding ER_min and ER_max |
| `VR_MIN/MAX`       | see map | Verify ROM |
| `I_AUTH`           | `0xDFFE` | success exit of Verify |

The monitor holds 6 flip-flops of state:
- 2 bits for the read controller;
- 1 bit for the eKR write controller;
- 3 bits for the atomicity controller.

Everything else is comparators on 16-bit addresses.

## How this RTL relates to the published design

The three FSMs, their states, the access macros and the single reset output
follow the paper. The following are this design's own:

- The address defaults marked as choices above. Only the GPIO base, the eKR
  base and size, and the METADATA size are taken from the paper.
- The `ext_reset_i` input. The paper's properties contain a "reset" term. Here
  it is the MCU reset from sources other than VERSA itself, and leaving RESET
  also requires it to be low.
- The atomicity FSM also enters RESET on the external reset. The paper's
  diagram for that machine shows no such edge. Adding it makes all three
  machines restart together.
- The three tightened corners of the read controller listed above.
- Size. The paper's FPGA prototype is VERSA combined with VRASED, the remote
  attestation architecture that provides Verify. It reports 18 more
  registers than VRASED alone, and 50 more than the bare core. The 6 state bits here are the minimum the three
  FSMs need. The difference presumably lies in how the prototype registers
  signals and glues into VRASED, which the paper does not detail.

Not included:
- the MSP430 core;
- VRASED, its HMAC-based Verify routine and its own hardware checks;
- the boot-time erasure routine;
- memory;
- the remote controller.

They appear only as behavioural traces in the testbenches.

## Files

| file | content |
|------|---------|
| `rtl/versa_pkg.sv`     | address type, default map, `mcu_sig_t`, `access_t`, state enums |
| `rtl/access_decode.sv` | region predicates |
| `rtl/gpio_read_ac.sv`  | GPIO/eKR read controller |
| `rtl/ekr_write_ac.sv`  | eKR write controller |
| `rtl/er_atomicity.sv`  | ER atomicity controller |
| `rtl/versa.sv`         | top: decoder, three FSMs, OR of the local resets; also exposes each local reset and state for debug |
| `tb/tb_*.sv`           | self-checking testbenches, described below |

Each FSM carries concurrent assertions of its key property, for example "GPIO
read outside ER implies reset". They are checked when simulating with
`--assert`.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
          rtl/versa_pkg.sv tb/tb_versa.sv --top-module tb_versa
./obj_dir/Vtb_versa
```

Replace `tb_versa` with any other testbench name. Every testbench prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | what it does |
|-----------|--------------|
| `tb_access_decode`  | Random and boundary samples against an integer reference model of every predicate. |
| `tb_gpio_read_ac`   | Directed sequence through every edge, then 20 000 random cycles against a reference model. |
| `tb_ekr_write_ac`   | Same approach as `tb_gpio_read_ac`. |
| `tb_er_atomicity`   | Same approach as `tb_gpio_read_ac`. |
| `tb_versa`          | End to end, all parameters at their defaults (details below). |
| `tb_versa_workloads`| The three sample applications (see below). |
| `tb_versa_noenc`    | The monitor with `ENC_SUPPORT=0`. eKR accesses are free; GPIO and atomicity rules still hold. |

`tb_versa` contains a cycle-level model of the MCU:
- 64 KiB of memory;
- a sensor on P3IN;
- a boot routine that erases data memory after every reset;
- Verify, which writes the key and passes `i_Auth`;
- the example sensing operation (32 GPIO reads, XOR with the 32-byte key,
  result written out, stack cleaned).

It runs the honest operation and then each attack, and checks that the right
FSM reset the MCU and that the sensed bytes were erased. It counts 18
mechanisms and fails if any never happened:

- authorised run, failed Verify, token reuse;
- locked read, read outside ER, eKR read outside ER, read at `ER_max`;
- write to ER or METADATA (relock), write at `i_Auth`;
- bad entry, bad exit, interrupt in ER, DMA in ER, DMA read of GPIO;
- eKR write outside VR;
- erasure after reset, external reset.

## Sample workloads

The paper measures three applications on the prototype:

| application | ER size used | operation |
|-------------|--------------|-----------|
| simple              | 162 bytes | reads P3IN 32 times, encrypts with the key, writes the result |
| motion sensor       | 230 bytes | polls P1IN and drives a light on P1OUT |
| temperature sensor  | 498 bytes | reads a 2-byte sample from P6IN and encrypts it |

The ER sizes approximate the binary sizes the paper plots. Their time is
dominated by Verify, about a million cycles. In `tb_versa_workloads` each
application proceeds as follows:

1. Its ER bounds are written into METADATA by unprivileged code. The monitor's
   ER inputs come from those memory words.
2. Verify runs for 10^6 cycles, reading all of ER, then writes the key and
   passes `i_Auth`.
3. The application runs from `ER_min` to `ER_max`.
4. A further GPIO read from outside ER must reset the MCU.

The monitor places no limit on ER size; any range within the 16-bit address
space is accepted. GPIO writes, such as the motion sensor's light, are not
restricted. The whole run is about 3 million cycles and takes a few seconds in
Verilator.
