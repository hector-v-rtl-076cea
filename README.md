# HECTOR-V: a secure SoC fabric built around one identifier

HECTOR-V puts two processors on one chip: a large application processor that
runs the rich operating system (the REE, here a Rocket core), and a small
secure RISC-V processor (the RVSCP) that runs trusted code (the TEE). They do
not have separate worlds of hardware. They share the same bus, memory and
peripherals. What keeps them apart is a single idea, applied everywhere:

* every bus request carries an identifier saying **who** sent it;
* every peripheral has a small firewall (the *wrapper*) that holds the
  identifier of the one party currently allowed in, and refuses everybody else;
* only one hardware block, the *security monitor* (SM), can write those
  firewall registers, and it does so only on request, by fixed rules.

A party that wants a peripheral asks the SM to *claim* it. When it is done it
*releases* it. If it will not let go, the SM can *withdraw* it. The rules
about who may claim what are set by one privileged party, the *SM owner*.
That privilege can be handed on. This makes the same hardware serve a secure
boot (the secure core owns everything at power-on) and a normal run (the
application processor owns the system, but cannot reach the secure core's
private storage).

This repository holds the SystemVerilog of that fabric:

* the security monitor, wrappers, crossbars, memory protection unit and reset unit;
* the on-chip memories;
* the extensions the secure core needs: a hardware scheduler for four virtual
  cores, banked registers, and an identifier derived from its control-flow state.

The two processor pipelines and the vendor or third-party peripherals are not
included. Their connections are ports of the top level (see *What is outside*).

## 1. The identifier

The identifier is 15 bits wide. It travels in bits 14:0 of a 16-bit AXI user
signal; bit 15 is 0.

| field | bits | set by |
|---|---|---|
| core ID | 14 | hard-wired in the bus interface of each processor: 0 = application processor (REE), 1 = secure processor (TEE) |
| process ID | 13:10 | the software entity; on the secure core, the scheduler (virtual core *i* uses *i*+1) |
| peripheral ID | 9:0 | the software entity; on the secure core, a 10-bit fold of its control-flow state |

`id_stamp` overwrites the user field of every AXI4 and AXI4-lite request as
it leaves a processor. Software cannot forge the core ID: whatever user value
the processor drives is replaced.

A stored identifier is compared with a request's identifier by
`hv_pkg::id_match`:

* the core ID must always be equal;
* a stored process ID of zero matches any process;
* a stored peripheral ID of zero matches any peripheral ID.

So `{REE, 0, 0}` admits every process of the application processor, and
`{TEE, 2, 0x155}` admits only virtual core 1, and only in control-flow state
0x155.

## 2. Peripheral wrappers (`periph_wrapper`)

Each wrapper sits between the AXI4 crossbar and one peripheral.

* **ID register.** One register holds a *claimed* bit (bit 16) and the owner's
  identifier (bits 14:0). It is reachable only through the wrapper's AXI4-lite
  configuration port, which only the SM can reach.
* **Access check.** When a request's address is accepted, its user ID is
  checked against the register. A matching request goes through unchanged.
  This is combinational, so it adds no cycle.
* **Refused writes.** The data beats are consumed and the response is a single
  `SLVERR`.
* **Refused reads.** They get `len+1` beats of `SLVERR` with zero data.
* **Interrupts.** The peripheral's interrupt is routed to the REE or the TEE
  interrupt line, according to the owner's core ID. While the peripheral is
  unclaimed, the interrupt goes nowhere.

A *fixed* wrapper (`CONFIGURABLE=0`) is always claimed and has its core and
process ID built in. Only its peripheral-ID part can be written. This is how
the secure storage of a virtual core works:

* the storage is bound to that one virtual core forever;
* the core's own boot code binds it further to one control-flow state, by
  claiming it with that state as the peripheral ID.

`axi4_firewall` does the transaction bookkeeping. The same firewall serves the
wrapper (pass or refuse) and the MPU (pass to memory, pass to registers, or
refuse).

## 3. The security monitor (`security_monitor`)

The SM is the only master of the AXI4-lite configuration crossbar
(`axil_xbar`). Wrapper *k* answers at `0x100·k` on that crossbar.

Each processor has its own point-to-point AXI4-lite link to the SM. Each link
has two registers:

* `0x0` CMD (write): the command;
* `0x4` RESULT (read).

### Command word

| bits | field |
|---|---|
| 31:29 | opcode: 1 CLAIM, 2 RELEASE, 3 STATUS, 4 WITHDRAW, 5 CONFIG, 6 TRANSFER |
| 28:25 | peripheral index *k* |
| 24:23 | allowed-list slot (CONFIG) |
| 22 | slot valid (CONFIG) |
| 21:15 | reserved, must be zero |
| 14:0 | identifier argument |

### Result word

| bit(s) | meaning |
|---|---|
| 31 | busy (command still executing) |
| 30:28 | result: 1 OK, 2 DENIED, 3 BUSY, 4 INVALID |
| 27 | peripheral claimed |
| 26 | withdraw pending |
| 25 | issuer is on the peripheral's allowed list |
| 24 | issuer is the SM owner |

Software writes CMD and polls RESULT until bit 31 is clear. A new command on
the same link waits for the previous one. The two links are served
round-robin. The issuer of a command is known from the user ID of the write,
so it cannot lie about who it is.

### Commands

* **CLAIM *k*.**
  * Refused with DENIED unless the issuer matches one of the four
    allowed-list entries of *k*.
  * Refused with BUSY if *k* is already claimed.
  * Otherwise the wrapper's ID register is written with the issuer's core and
    process ID, plus the peripheral ID given in the command. A zero there
    means any; a control-flow state binds the peripheral to that state.
* **RELEASE *k*.** The claimer (same core and process) may release, and so
  may the SM owner, for any peripheral. It clears the wrapper and cancels any
  pending withdraw.
* **STATUS *k*.** Fills the result word; changes nothing.
* **WITHDRAW *k*.**
  * Allowed from the SM owner always, and from anyone on *k*'s allowed list.
  * If *k* is claimed, it starts a countdown of `WITHDRAW_TIMEOUT` cycles and
    raises the per-peripheral withdraw interrupt towards the claimer's core.
  * If the claimer releases in time, the interrupt drops. Otherwise, at zero,
    the SM clears the wrapper itself and pulses `force_release_o`.
* **CONFIG *k*, slot, valid, ID** (SM owner only). Writes one allowed-list entry.
* **TRANSFER ID** (SM owner only). Makes ID the new SM owner. The owner is
  recognised by core and process ID.

Commands that change a wrapper finish only after the configuration write has
been acknowledged. When RESULT shows "done", the firewall already enforces
the new state.

At reset, virtual core 0 of the secure processor, `{TEE, 1, 0}`, is SM owner.
The reset unit (entry 0) is claimed by it. Nothing else is configured.

## 4. Memory protection (`mpu`)

External DDR memory cannot be handed out as a whole, so an MPU sits in front
of the DDR controller. It is claimed like a peripheral; the SM writes its ID
register.

The claimer programs up to 16 regions through a 4 KiB register window
(`0x4600_0000`). Region *r* sits at `0x4600_0000 + 32·r`:

| offset | register |
|---|---|
| +0x00 | base address |
| +0x08 | limit (inclusive) |
| +0x10 | access list: bits 14:0 ID0, bit 15 ID0 valid, bits 30:16 ID1, bit 31 ID1 valid |

A region with one valid ID is exclusive; one with two is shared, for example
the REE–TEE message buffer.

A DDR burst goes through only if:

* all of its bytes lie inside one enabled region; and
* one of that region's IDs matches the request.

Anything else, including WRAP bursts and a burst that runs past a limit, gets
`SLVERR` and never reaches memory. All regions are disabled after reset. The
check is done once per burst, when its address is accepted.

## 5. Reset unit and secure boot (`reset_unit`)

The reset unit is a claimable peripheral with one register:

* bit 0 holds the application processor in reset;
* bit 1 holds the secure processor in reset.

At power-on it holds the application processor and lets the secure processor
run. Together with the SM reset state, this gives the secure-boot sequence:

1. Virtual core 0 starts from its secure code storage, a BRAM whose wrapper
   is fixed to `{TEE, 1, 0}`.
2. It configures the SM and the MPU.
3. It releases the application processor through the reset unit.
4. It can then hand SM ownership to the application processor with TRANSFER.

From then on the application processor controls the system. It can even stop
the secure core through the reset unit. It still cannot read the secure core's
storage, because those wrappers are fixed.

## 6. Secure processor extensions (`rvscp_ext`)

The secure core runs four virtual cores, VC0 to VC3, in hardware.

* **`hw_scheduler`** runs each VC for `TIME_SLICE` cycles, round-robin. Then
  it raises `halt_req_o` and waits for the pipeline to report `halted_i`. It
  saves the PC and the control-flow (SCFP) state, and on the next cycle loads
  the next VC's PC and state. A switch costs two cycles from *halted* to
  *running*. Each VC also has its own decryption-key register; the pipeline
  writes it with `key_we_i`, and it is presented as `key_o` while that VC runs.
* **`banked_regfile`** keeps one 32×32-bit register set per VC. The scheduler
  selects the bank, so registers are never copied.
* **Control-flow-derived peripheral ID.** The SCFP state is folded to 10 bits:
  state bit *i* is XORed into ID bit *i* mod 10. The fold is placed in the
  peripheral-ID field of every request. The process ID is VC+1. A peripheral
  claimed with a particular state therefore answers only when the code has
  reached that state.

## 7. Interconnect and address map

`axi4_xbar` connects two masters to 15 slaves:

* master 0 is the application processor; master 1 is the secure processor;
* per slave, one transaction at a time, with round-robin arbitration;
* the user signal is carried through;
* unmapped addresses get `DECERR`.

The address map:

| slave | device | base |
|---|---|---|
| 0 | reset unit | 0x4000_0000 |
| 1 | boot BRAM | 0x4100_0000 |
| 2–5 | UART, PS2, SD, SPI (external) | 0x4200_0000 + 0x1_0000·i |
| 6–8 | claimable code BRAMs of VC1–VC3 | 0x4300_0000 + 0x1_0000·i |
| 9 | secure code storage of VC0 (fixed wrapper) | 0x4400_0000 |
| 10–13 | secure storage of VC0–VC3 (fixed wrappers) | 0x4500_0000 + 0x1000·i |
| 14 | MPU registers | 0x4600_0000 |
| 14 | DDR (through the MPU) | 0x8000_0000–0xFFFF_FFFF |

SM table index *k* (and configuration address `0x100·k`):

| k | device |
|---|---|
| 0 | reset unit |
| 1 | boot BRAM |
| 2 | UART |
| 3 | PS2 |
| 4 | SD |
| 5 | SPI |
| 6–8 | code BRAMs |
| 9 | MPU |
| 10–13 | secure storage |

The secure code storage has no SM entry, so its identifier can never change.

## 8. What is outside

The following are not part of this RTL. The top level `hector_v_top` has
ports where they connect:

* the application processor (AXI4 and AXI4-lite master ports, its chosen
  process and peripheral ID, reset, interrupts);
* the secure core pipeline with its instruction decryption (halt/load
  handshake, PC and SCFP state, key, register-file ports, bus ports);
* the DDR controller (AXI4 master port after the MPU);
* the UART, PS2, SD and SPI controllers (AXI4 ports after their wrappers, and
  their interrupt inputs).

Observation outputs (owner, claimed flags, forced release, per-slave refusals,
decode errors) are for test and debug.

## 9. Choices this RTL makes, and how far to trust it

The original description gives the identifier format, the commands, the
withdraw timeout mechanism, the 16 MPU regions, four virtual cores and the
reset state. It does **not** give:

* register layouts and command encodings;
* the number of allowed-list entries (4 here);
* the timeout value (4096 cycles);
* the time slice (1000 cycles);
* the fold used to compress the control-flow state;
* memory sizes (64 KiB code BRAMs, 4 KiB secure storage);
* the address map;
* the bus widths (64-bit AXI4 data, 32-bit AXI4-lite data, 32-bit addresses);
* process IDs per virtual core.

All of these are this design's own choices. The interconnect is deliberately
simple: one outstanding transaction per slave path, no interleaving. It is
correct but slower than a production crossbar.

Every block has a self-checking testbench. Each testbench was also run against
a deliberately broken copy of its block, and it caught the fault each time.

The end-to-end test `tb_hector_v_top` runs the whole fabric at its default
parameters. It uses behavioural processors, block RAMs in place of DDR and
devices, and the full 4096-cycle withdraw timeout. It walks through:

* the secure-boot state, configuration, claims (allowed, denied, busy),
  status, release, withdraw with interrupt and forced release;
* ownership transfer, a forged ID, secure storage bound to a virtual core and
  to a control-flow state;
* MPU programming, shared and private regions;
* context switches with banked registers, decode errors and interrupt routing.

It counts each mechanism and fails if one never happens. With its bus models,
a claim from the application processor plus the status read-back takes 59
cycles in hardware.

Not verified:

* real processors and real peripheral controllers;
* timing closure;
* the SCFP decryption, which is not built.

## 10. Simulating

Every file in `rtl/` is one module or package. `hv_pkg.sv` must be read first.
With Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/hv_pkg.sv tb/tb_mpu.sv --top-module tb_mpu -Mdir obj_mpu -o sim
obj_mpu/sim
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The
testbenches are:

* `tb_periph_wrapper`, `tb_security_monitor`, `tb_axi4_xbar`, `tb_axil_xbar`,
  `tb_mpu`;
* `tb_reset_unit`, `tb_axi4_bram`, `tb_wrapped_bram`, `tb_id_stamp`;
* `tb_hw_scheduler`, `tb_banked_regfile`, `tb_rvscp_ext`;
* `tb_hector_v_top`: the whole SoC, about 30,000 cycles;
* `tb_hv_message`: the whole SoC sending a 1 MiB message from the
  application processor to a trustlet through a shared MPU region, with a
  blocking wait for the acknowledgement, about 290,000 cycles. A plain 1 MiB
  write takes 133,120 cycles (0.98 beats per cycle). The message round trip
  takes 151,441 cycles. The extra time is mostly the trustlet waiting for its
  time slice.

`tb_axi_bfm` and `tb_axil_bfm` are the bus-master models they share. Passing
`+trace` to `tb_security_monitor` prints every SM command and its result.

Top-level parameters (defaults):

* `NUM_VC=4`, `TIME_SLICE=1000`, `WITHDRAW_TIMEOUT=4096`;
* `CODE_BRAM_BYTES=65536`, `SECURE_BYTES=4096`;
* `MPU_REGIONS=16`, `STATE_W=128`, `KEY_W=128`;
* `NUM_PERIPH=14` (fixed by the map above).
