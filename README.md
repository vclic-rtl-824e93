# vCLIC: a virtualisation-aware RISC-V core-local interrupt controller

A hypervisor that hosts a real-time guest next to a general-purpose one
usually has to get involved in every interrupt the real-time guest receives. It
catches the interrupt, works out which guest owns it, emulates the interrupt
controller's registers for that guest and then injects a virtual interrupt.
That path costs thousands of cycles and, worse, a variable number of them.
The RISC-V CLIC (core-local interrupt controller) gives bare-metal code fast,
nested and vectored interrupts, but it only knows the M, S and U privilege
modes. It has no notion of a virtual machine.

vCLIC extends the CLIC so that the hypervisor can **hand individual interrupt
lines to individual guests**. Once a line is handed over, the hardware delivers
its interrupts straight to the guest's virtual-supervisor (VS) mode whenever that
guest is the one running, with the same latency as a bare-metal interrupt and
without the hypervisor. When the line's guest is not running, the interrupt
either waits or, if that guest is more important than the running one, pulls the
hypervisor in so it can switch guests.

Two extensions do this:

* **VSCLIC**: adds one byte per line, `clicintv`. It holds a *v* bit (the line
  belongs to a guest) and a 6-bit *VSID* (which guest, out of up to 64).
  Every privilege view of the register file, including one view per guest, is
  multiplexed onto the same physical registers.
* **VSPRIO**: adds a small priority per guest. It ranks interrupts of
  different guests against each other before their own levels are compared. A
  critical guest's interrupts can then never wait behind a best-effort guest's.

On the core side (a CVA6-class RV64 core with the hypervisor extension), the
design adds the VS copies of the CLIC CSRs (`vstvt`, `vsintthresh`, `vsnxti`).
It also adds a small controller that decides, for every offered interrupt,
whether to trap and to which mode.

This repository holds synthesizable SystemVerilog for the interrupt controller
and for the core-side decision logic and CSRs. It also holds a self-checking
testbench for each block and an end-to-end testbench of the whole subsystem
that plays a two-guest scenario. The rest of the core and the SoC are not
included. See "What is not here" below.

## How an interrupt travels

```
 irq_i[63:0]
     |
 clic_gateway      edge/level detection, pending bits (ip)
     |
 clic_arbiter      comparator tree over {ip&ie, rank, vsprio[vsid], clicintctl}
     |                    ^ configuration from
 clic_handshake    offer / claim / kill      clic_regfile (memory-mapped,
     |  valid, id, level, priv, v, vsid, shv      one view per mode & guest)
     v  ^ ready  kill
 cva6_clic_ctrl    which mode traps: M, HS, VS or none
     |  irq, target, vector
     v
 core pipeline (not included) -- trap_taken, xret --> cva6_clic_csr
```

`vclic` wraps the four controller blocks. `vclic_cva6_top` adds the
core-side controller and CSRs and is the top of the design.

Timing from a rising edge on an edge-triggered line, in clock cycles:

| edge | +1 | +2 |
|---|---|---|
| gateway registers the edge into `ip` | arbiter has the winner (combinational); the handshake registers the offer | `valid` high; the controller's `irq` is high in the same cycle |

So an interrupt reaches the core two cycles after its edge. The end-to-end
testbench measures these two cycles from the line edge to the trap.

## One register set, many views

All software-visible configuration is in `clic_regfile`. The same registers
appear in several address *regions*, and the region used decides what the
access may see. The region is `addr[21:15]`. Each region is 32 KiB.

| region | who uses it | sees |
|---|---|---|
| 0 | machine mode | every line, all fields, `cliccfg` |
| 1 | hypervisor (HS) | lines whose mode is S, whether delegated or not; `clicintv`; `vsprio` |
| 2 + k | guest with VSID k | only S-mode lines with `v = 1` and `vsid = k` |

A line that a region does not own reads as zero and ignores writes. The
hypervisor maps region 2 + k into guest k's physical address space, at the
address where the guest expects a plain CLIC. The guest then programs "its"
CLIC directly, and nothing is emulated. A guest cannot reach `clicintv` or
`vsprio`, cannot change a line's mode, and cannot see another guest's lines.

Offsets within a region:

| offset | register | layout |
|---|---|---|
| `0x0000` | `cliccfg` | `nlbits` [4:1], `nmbits` [6:5]; writable from region 0 only |
| `0x1000 + 4i` | line i | `clicintip` [0], `clicintie` [8], `clicintattr` [23:16] (`shv` 16, edge 17, negative 18, mode 23:22), `clicintctl` [31:24] |
| `0x5000 + i` | `clicintv[i]` | `v` [0], `vsid` [7:2] |
| `0x6000 + k` | `vsprio[k]` | priority of guest k in the low `VsprioWidth` bits |

All registers are byte-writable through `reg_be_i`. The port is single-cycle:
a write takes effect at the clock edge, and a read returns data in the same
cycle. `reg_err_o` flags an unmapped access.

`clicintctl` holds `IntCtlBits` implemented bits, left-aligned; the missing low
bits read as 1. The interrupt *level* is `clicintctl | (0xFF >> nlbits)`, as in
the CLIC specification. `nlbits` is clamped to 8 and `nmbits` to 1. With
`nmbits = 0` every line is M-mode.

## Arbitration: who is offered first

`clic_arbiter` builds, for every line, one unsigned key and finds the largest
with a binary tree of two-input comparators. Its depth is log2(NumSrc), and it
is purely combinational:

```
key = { ip & ie, rank, guest_priority, clicintctl }
rank: M-mode line = 3, S-mode line not delegated (hypervisor) = 2, delegated line = 1
guest_priority = vsprio[vsid] for delegated lines, 0 otherwise
```

When two keys are equal, the higher-numbered line wins. The rank means that
an interrupt for a more privileged mode is always offered before a guest's,
because it could always preempt the guest anyway. Within the guests, `vsprio`
comes *before* the level. A level-0x40 interrupt of a guest with `vsprio = 1`
therefore beats a level-0xC0 interrupt of a guest with `vsprio = 0`. The
end-to-end testbench checks this case. With `VsprioWidth = 0` the field
disappears and the design is VSCLIC only.

Only one interrupt is offered at a time, the global winner. If that winner
belongs to a guest that is not running and has no right to preempt, it stays
offered and is not taken. Lower-ranked interrupts wait behind it until the
hypervisor switches to that guest or clears the line. The ranking (a
higher-priority guest's interrupt sits above a lower one's) is what makes this
acceptable.

## The handshake with the core

`clic_handshake` registers the winner and offers it with `valid`. The
offered fields stay stable while `valid` is high:

* **ready**: the core accepts the offer, either by taking the trap or
  through an `xnxti` read. This gives a one-cycle *claim* to the gateway,
  which clears the pending bit of an edge-triggered line. Level-triggered
  lines stay pending while the source holds them. The handshake then idles for
  one cycle before it makes the next offer.
* **kill**: if the winner changes or disappears while an offer is open
  (a more urgent line arrived, or software disabled the line), the handshake
  withdraws the offer for one cycle with `kill`. `valid` is low in that cycle,
  and the new winner is offered next.

The handshake checks two rules with assertions: `ready` only with `valid`,
and the offer stays stable until it is accepted or killed.

## Which mode takes the interrupt

`cva6_clic_ctrl` is combinational. Given the offer, the hart's current mode
(`priv`, `V`), the interrupt enables and the CSR state, it decides the target.
Trap targets are ordered M > HS > VS.

1. **A more privileged interrupt traps to its own mode.**
   * M-mode lines trap to M if the hart is below M or `mstatus.MIE` is set.
   * Non-delegated S-mode lines trap to HS if the hart is in VS/VU or U, or is
     in HS with `SIE` set.
   * In every case the level must exceed both that mode's current interrupt
     level (`xil`) and its threshold (`xintthresh`).
2. **An interrupt of the running guest is injected directly.** A delegated
   line whose `vsid` equals `hstatus.VGEIN` while `V = 1` traps to VS. This
   requires `vsstatus.SIE` (or the guest's user mode) and a level above
   `vsil` and `vsintthresh`.
3. **Another guest's interrupt goes to the hypervisor only if that guest
   ranks above the running one.** A delegated line of a guest that is not
   running traps to HS if `hgeie[vsid]` is set; otherwise it is not taken. The
   hypervisor keeps `hgeie` set for the guests above the current one, for
   example from their `vsprio`. It then switches to the guest, and because the
   line is still pending, rule 2 injects it.

The controller also drives the trap vector. For a vectored (`shv`) line the
vector is `xtvt + 8 * id`, taken from the target mode's `xtvt`. A delegated line
that is redirected to HS is never vectored, because its handler table belongs
to the guest.

## CSRs, nesting and tail-chaining

`cva6_clic_csr` keeps one set per trap target:

| CSR | M | HS | VS | contents |
|---|---|---|---|---|
| trap-vector table base | `mtvt` 0x307 | `stvt` 0x107 | `vstvt` 0x207 | 64-byte aligned |
| threshold | `mintthresh` 0x347 | `sintthresh` 0x147 | `vsintthresh` 0x247 | 8 bits |
| next-interrupt claim | `mnxti` 0x345 | `snxti` 0x145 | `vsnxti` 0x245 | see below |
| current level | `mintstatus` 0xFB1 [31:24] | `mintstatus` [15:8], `sintstatus` 0xDB1 [15:8] | `vsintstatus` 0x2B1 [15:8] | read-only |
| previous level | `mcause` 0x342 [23:16] | `scause` 0x142 [23:16] | `vscause` 0x242 [23:16] | read/write; only this field is held here |

The hypervisor state used here is `hstatus.VGEIN` (0x600, bits [17:12]) and
`hgeie` (0x607, one bit per guest).

`vsie` (0x204) and `vsip` (0x244) are hardwired to zero, because the
controller's own per-line enable and pending bits take their place. A guest
therefore sees its `sie` and `sip` as zero.

While `V = 1`, the S-mode numbers (`stvt`, `snxti`, `sintthresh`,
`sintstatus`, `scause`, `sie`, `sip`) reach the VS copies. A guest therefore runs unmodified
CLIC code. The privilege check follows CSR address bits [9:8]. Guests cannot
name the hypervisor or VS CSRs directly.

**Nesting.** When a trap is taken, the target's level moves to `xpil` and the
interrupt's level becomes `xil`. On `xret`, `xil` returns to `xpil`. An
interrupt preempts a running handler of the same mode only if its level is
higher. A handler that re-enables interrupts to allow nesting must first save
`xcause.xpil` and restore it before returning, as in the CLIC specification.
The end-to-end testbench does this in the guest.

**Tail-chaining (`xnxti`).** A handler about to return reads `xnxti` with
a CSR write side effect. Suppose the offered interrupt belongs to the same
target, is not vectored, and is above both `xpil` and the threshold. Then the
read claims that interrupt, sets `xil` to its level, and returns
`xtvt + 8 * id`, so the handler can jump there without a new trap. Otherwise
the read returns 0. The claim is ORed into the vCLIC's `ready`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NumSrc` | 64 | interrupt lines (the evaluated system has 64) |
| `NumVsid` | 64 | guest IDs (up to 64 guests active at once; VSID is 6 bits) |
| `IntCtlBits` | 8 | implemented bits of `clicintctl` |
| `VsprioWidth` | 1 | bits of `vsprio` per guest; 0 = VSCLIC only, at most 8 |

The published area study sweeps `VsprioWidth` over 0, 1, 2, 4 and 8, and
calls 1 bit the minimal configuration. The default here is 1.

## Where this RTL departs from the published design or fills gaps

The published design fixes the ideas: the `clicintv` fields, per-guest
`vsprio`, the three trap rules, the new VS CSRs, one register set behind
several views, and a binary arbitration tree. It does not give the following,
so this RTL makes its own choices:

* The address map, the region size, the bit positions inside `clicintv` and
  the per-line word, and the register port protocol (single cycle, with byte
  enables).
* The CSR numbers of `vstvt`, `vsnxti`, `vsintthresh` and `vsintstatus`.
  The VS numbers follow the usual hypervisor pattern: the S number with bit 9
  set.
* The key order in the tree (rank, then `vsprio`, then level) and the tie
  rule (higher id wins).
* How the hypervisor says which other guests may preempt. This RTL uses
  `hgeie[vsid]`, a hypervisor register that already exists for guest
  external interrupts, instead of comparing `vsprio` values in the core.
* The handshake details: a one-cycle idle after a claim, a one-cycle kill,
  and no claim in a kill cycle.
* `xnxti` neither changes `mstatus` nor writes `xcause.exccode`, a reduced
  form of what the CLIC specification describes. Only the `xpil` field of `xcause` is kept in this
  block.
* `clicintip` for edge lines: a new edge wins over a software write, which
  wins over a claim, all in the same cycle.
* Reset: all lines are M-mode, disabled and level-triggered, and all CSRs
  are zero.

## What is not here

The CVA6 pipeline itself (trap entry, `mstatus`/`vsstatus`, `xret`, the
CSR instructions) is not included. Neither is the rest of the SoC the design
was evaluated in: the AXI crossbar, caches, memory controllers, DMA, debug,
peripherals, and the platform-level interrupt controller that feeds the lines.
The top therefore brings the core's side out as ports:

* `priv_i`, `virt_i`, `mie_i`, `sie_i`, `vs_sie_i` come from the pipeline.
* `trap_taken_i` is high in the cycle the pipeline commits the offered trap.
* `xret_i`/`xret_tgt_i` report an `mret`/`sret`.
* `csr_*` is the CSR port for the addresses listed above.

The latency and area figures of the published evaluation depend on that
missing software, core and 16 nm library, and cannot be reproduced from this
RTL alone.

## Files

| file | content |
|---|---|
| `rtl/vclic_pkg.sv` | shared types (`priv_e`, `trap_tgt_e`, `irq_req_t`), address map, CSR numbers |
| `rtl/clic_gateway.sv` | edge/level detection and pending bits |
| `rtl/clic_regfile.sv` | memory-mapped registers and the per-mode/per-guest views |
| `rtl/clic_arbiter.sv` | comparator tree |
| `rtl/clic_handshake.sv` | offer / claim / kill state machine |
| `rtl/vclic.sv` | the interrupt controller (the four blocks above) |
| `rtl/cva6_clic_ctrl.sv` | trap-target decision in the core |
| `rtl/cva6_clic_csr.sv` | CLIC and vCLIC CSRs of the core |
| `rtl/vclic_cva6_top.sv` | controller + core-side logic; the top |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run. With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/vclic_pkg.sv rtl/clic_gateway.sv rtl/clic_regfile.sv rtl/clic_arbiter.sv \
  rtl/clic_handshake.sv rtl/vclic.sv rtl/cva6_clic_ctrl.sv rtl/cva6_clic_csr.sv \
  rtl/vclic_cva6_top.sv tb/tb_vclic_cva6_top.sv --top-module tb_vclic_cva6_top
./obj_dir/Vtb_vclic_cva6_top
```

Swap the testbench name to run another one. Each runs in seconds.

| testbench | what it checks |
|---|---|
| `tb_clic_gateway` | edge/level and polarity, software set/clear, claim, against a reference model with random stimulus |
| `tb_clic_regfile` | every view's visibility and write rights, byte enables, `cliccfg` clamping, level bits |
| `tb_clic_arbiter` | the tree against a brute-force search, at the default 64 lines and at a small non-power-of-two size with 2 vsprio bits |
| `tb_clic_handshake` | offer, claim, kill timing, directed and random against a reference model |
| `tb_vclic` | whole controller: 2-cycle latency, claim, kill, vsprio order, level lines, guest view |
| `tb_cva6_clic_ctrl` | the three trap rules, enables, thresholds, vector; 20 000 random cases against a decision table |
| `tb_cva6_clic_csr` | CSR access rights, S-to-VS redirection, level bookkeeping, `xnxti` |
| `tb_vclic_cva6_top` | end-to-end at the default parameters (below) |
| `tb_vsprio_sweep` | the controller at 64 lines and 64 guests with 0, 1, 2, 4 and 8 vsprio bits: random bursts drained in the order a reference computes, and vsprio overtaking levels only when it has bits |

`tb_vclic_cva6_top` runs the top with no parameter overrides. A small hart
model takes each trap, stacks the interrupted mode, clears the target's
interrupt enable and restores it on `xret`. The test is a two-guest
mixed-criticality story: guest 1 is a general-purpose OS, guest 2 a real-time
OS with a higher `vsprio`, and a hypervisor sits between them. It checks the
direct injection into the running guest with its 2-cycle latency and SHV
vector, and nesting by level with `xpil` saved and restored. It also checks
threshold masking, tail-chaining through `vsnxti`, a kill followed by an M
trap, and a lower-priority guest's interrupt being held back. It then follows
a higher-priority guest's level-triggered interrupt: redirected to HS, the
hypervisor clears a stale pending bit and switches `VGEIN`, and the interrupt
is injected into guest 2. The last part checks `vsprio` ordering against a
higher level, and a switch back to guest 1 through a hypervisor line. It
counts each of these mechanisms and fails any that never happened.
