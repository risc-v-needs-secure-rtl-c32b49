# Initiator-side isolation for a virtualised RISC-V MCU hart

Automotive controllers now host several former ECUs as virtual MCUs on one chip, and
each virtual MCU also holds software of different criticality. Every such partition
needs an identity that the rest of the chip can check. RISC-V WorldGuard supplies that
identity as a *world ID* (WID) attached to each bus access, but it has two gaps for this
use. It stops at 32 worlds. It also has no separate ID for the guest kernel (VS) and the
guest's applications (VU) under the hypervisor extension. The SPMP for hypervisors has a
third problem: it splits its costly region entries between two units when the chip is
designed.

This RTL implements the initiator side of an extension that closes those gaps, for one
hart without an MMU:

* **WorldGuard CSRs with hypervisor support and 128 worlds.** Every privilege mode
  (M, HS, U, VS, VU) gets its own programmable WID. Delegation vectors cover 128 WIDs,
  so each level can only hand out WIDs it was given.
* **A two-stage SPMP with one shared entry pool.** The guest's own *vSPMP* is the first
  stage. The hypervisor's single *unified hSPMP* is the second. The hypervisor decides at
  run time which hSPMP entries are its own and which belong to the current guest, using
  two enable registers (`spmpswitch`, `hspmpswitch`).

The M-level PMP/ePMP, the CPU core, the memory system and the resource-side WorldGuard
checkers are not part of this RTL. The top module's output is the input to those units.

## Access path

```
            VS / VU                     HS / U                  M
               |                          |                     |
           +-------+                      |                     |
           | vSPMP |  guest-owned          |                     |
           +-------+  VS = supervisor      |                     |
               |      VU = user            |                     |
               +------------+-------------+                     |
                            |                                   |
                       +---------+   V=0: HS = supervisor,      |
                       |  hSPMP  |        U = user, spmpswitch   |
                       +---------+   V=1: VS and VU = user,      |
                            |             hspmpswitch            |
                            +-------------------+---------------+
                                                |  + WID tag
                                      out_* -> PMP/ePMP -> bus
```

`initiator_protection` takes one access per cycle, with a valid/ready handshake. It
returns the result one cycle later through a single register stage. The result keeps the
address, access type and privilege, and adds:

* `out_wid_o`: the WID of the mode that issued the access.
* `out_fault_o` and `out_stage_o`: whether a stage refused the access, and which one.
  `STAGE_VSPMP` is a fault for the guest OS to handle. `STAGE_HSPMP` is a fault for the
  hypervisor (or, with V=0, for the OS).

M-mode accesses skip both SPMPs and carry the fixed WID `MWID`. No address is
translated: the guest-physical address is the physical address, and the second stage
re-checks only the permissions.

## World IDs per mode (`wg_csr`)

| mode | WID used                                   | register written by    |
|------|--------------------------------------------|------------------------|
| M    | `MWID` parameter (fixed)                   | nobody                 |
| HS   | `mlwid`                                    | M                      |
| U    | `slwid`, if delegated in `mwiddeleg`       | HS (V=0)               |
| VS   | `hslwid`, if delegated in `mwiddeleg`      | HS                     |
| VU   | `vslwid`, if delegated in `hwiddeleg`      | VS (at the `slwid` address) or HS |

Delegation is a chain:

* `mwiddeleg` lists the WIDs M hands to the hypervisor. It is four 32-bit CSRs
  (`mwiddeleg`, `…h`, `…h2`, `…h3`) for WIDs 0–31, 32–63, 64–95 and 96–127.
* `hwiddeleg`, also four words, lists the WIDs the hypervisor hands to the current
  guest. It can never hold more than `mwiddeleg` does. Writes are masked with
  `mwiddeleg`, and reads return the stored value ANDed with the *current* `mwiddeleg`.
  So when M takes a WID back, the guest loses it at the same moment.

Three rules keep a mode from using a WID it does not own:

1. A write to an lwid register is ignored if it names a WID the writer may not hand out
   (not delegated, or ≥ `NWORLDS`). The register keeps its old value.
2. If delegation is withdrawn later, an lwid register can be left naming a WID that is
   no longer delegated. The access then uses the WID of the level above: VU falls back
   to the VS WID, and VS and U fall back to `mlwid`.
3. With V=0, `hslwid` and `hwiddeleg` have no effect.

After reset every lwid register except `mlwid` is 0 and nothing is delegated. Every mode
therefore uses `MWID` until firmware programs the unit.

## The SPMP stages (`spmp_core`, `vspmp`, `hspmp`)

Both stages use the same entry array, `spmp_core`. Each entry is a PMP-style pair:

* **`spmpcfg<i>`** holds R (bit 0), W (bit 1), X (bit 2), address mode A (bits 4:3:
  OFF, TOR, NA4 or NAPOT) and the mode bit U (bit 7). Bits 6:5 read as zero.
* **`spmpaddr<i>`** holds bits 33:2 of the address.

A check works like this:

* Only entries enabled in the stage's switch register take part, and the
  lowest-numbered matching entry decides.
* A *user* access needs a matching entry with U=1 that grants the access type. A
  *supervisor* access needs one with U=0.
* If no entry matches, a supervisor access is allowed and a user access is refused.
* Only the addressed word is checked. Accesses are assumed naturally aligned and at most
  4 bytes wide, which is exact for RV32 loads, stores and fetches.
* The check is combinational. The only register in the path is the output stage of the
  top module.

The two stages differ only in how the access mode is mapped:

* **vSPMP:** VS is a supervisor access and VU a user access. The enable register is
  `vspmpswitch`.
* **hSPMP:** with V=0, HS is a supervisor access and U a user access, against
  `spmpswitch`. With V=1, VS and VU are **both** user accesses, against `hspmpswitch`.
  So guest entries are ordinary U=1 entries, and the hypervisor marks them as belonging
  to the guest by setting their bits in `hspmpswitch`.

Switching from one VM to another rewrites `hslwid`, `hwiddeleg` (if the guests'
delegations differ) and `hspmpswitch`. It rewrites entries only if the new guest's
regions are not already loaded.

## CSR map and access rules

No CSR addresses exist in the source proposal, so the ones below are this design's
choice. They are collected in `iprot_pkg.sv`.

| address          | register (V=0 view)      | lowest privilege |
|------------------|--------------------------|------------------|
| 0x170            | `spmpswitch`             | S (HS)           |
| 0x190            | `slwid`                  | S (HS)           |
| 0x1A0+i, 0x1C0+i | `spmpcfg<i>`, `spmpaddr<i>` (hSPMP) | S (HS)  |
| 0x270            | `vspmpswitch`            | H                |
| 0x290            | `vslwid`                 | H                |
| 0x2A0+i, 0x2C0+i | `vspmpcfg<i>`, `vspmpaddr<i>` (vSPMP) | H     |
| 0x390            | `mlwid`                  | M                |
| 0x648–0x64B      | `hwiddeleg`, `…h`, `…h2`, `…h3` | H         |
| 0x670            | `hspmpswitch`            | H                |
| 0x690            | `hslwid`                 | H                |
| 0x748–0x74B      | `mwiddeleg`, `…h`, `…h2`, `…h3` | M         |

Address bits 9:8 give the lowest privilege that may access a register, as elsewhere in
RISC-V:

* With V=1, a supervisor address 0x1xx is redirected to 0x2xx. The guest therefore sees
  its own `vslwid` and vSPMP at the ordinary `slwid` and spmp addresses. The hypervisor
  reaches the same registers at 0x2xx to save and restore a guest.
* A VS-mode access to an H-level address raises `csr_virtual_o` (virtual-instruction
  exception).
* Any other access below the required privilege raises `csr_illegal_o`.

CSR reads return their data in the same cycle. A write takes effect at the next rising
clock edge, and is lost if the access is illegal.

## Parameters

| parameter (top)  | default | origin |
|------------------|---------|--------|
| `NWORLDS`        | 128     | the extension's target of up to 128 worlds (2–128 accepted) |
| `MWID`           | 0       | own choice; M-mode WIDs are fixed per hart |
| `HS_ENTRIES`     | 16      | own choice (implementation-defined; 2–32) |
| `VS_ENTRIES`     | 16      | own choice (2–32) |

`XLEN` is 32 and the physical address is 34 bits (RV32); both are set in `iprot_pkg`. At
the defaults the top holds about 1,660 flip-flops. Most of them are the two 16-entry
SPMP arrays (about 650 each); the WID registers and delegation vectors take about 280.

## How far to trust it, and where it departs from the proposal

Taken from the proposal:

* the set of registers and what each means
* which mode uses which WID
* delegation constraining the level below
* the V=1 aliasing of `slwid`
* the 128-world target
* the vSPMP → hSPMP structure
* guests treated as user mode in the hSPMP
* `hspmpswitch` replacing `spmpswitch` while V=1

Filled in here, because the proposal leaves them open:

* all CSR addresses and reset values
* write-ignore for WIDs that are not delegated
* the fall-back rule when delegation is withdrawn
* the SPMP configuration layout and the no-match rule
* entry counts
* the single-cycle pipeline and handshake
* passing faulting accesses on with a flag instead of dropping them

Not modelled:

* RV64 packing of the delegation vectors (two 64-bit CSRs instead of four 32-bit ones)
* more than 32 entries per SPMP
* `sstatus.SUM` and the SPMP shared-region encodings
* accesses that cross a word boundary
* the PMP/ePMP
* resource-side checkers
* DMA and other non-CPU initiators, which would carry their own fixed WIDs

In one place the proposal disagrees with itself. Its table describes `hslwid` as the WID
of "all lower virtualised modes", while its text gives `hslwid` to VS and the new
`vslwid` to VU. This RTL follows the text. The initialisation flow also mentions
`hswiddeleg`, which is read here as `hwiddeleg`.

## Sizes of the example configurations

The motivating analysis counts how many WIDs a whole MCU needs:

* small (2 harts, M+U, 10 DMA-like functions): 16
* medium (4 harts, M+S+U, 30 functions): 43
* high (6 main harts, half of them virtualised with 2 VMs each, plus 2 auxiliary harts,
  50 functions): 82
* variants of these: 6, 52, 71 and 106

All of them fit in 128 worlds. Every budget above 32 would not fit in base WorldGuard.
`tb_wid_budget` checks this.

## Files

| file | contents |
|------|----------|
| `rtl/iprot_pkg.sv` | types (modes, access kinds, SPMP config, CSR request), CSR map, privilege helpers |
| `rtl/wg_csr.sv` | WorldGuard CSRs and the WID selection |
| `rtl/spmp_core.sv` | SPMP entry array and combinational check |
| `rtl/vspmp.sv` | guest first-stage SPMP with `vspmpswitch` |
| `rtl/hspmp.sv` | unified hypervisor SPMP with `spmpswitch` / `hspmpswitch` |
| `rtl/initiator_protection.sv` | top: CSR dispatch, two-stage check, WID tag, output register |
| `tb/spmp_ref_pkg.sv` | byte-range reference model of an SPMP check |
| `tb/tb_wg_csr.sv` | random CSR writes against a register model; WID of every mode after each write |
| `tb/tb_vspmp.sv`, `tb/tb_hspmp.sv` | random entries and accesses against the reference model |
| `tb/tb_initiator_protection.sv` | boot flow M → HS → VS, directed accesses from all modes, VM switch, WID revocation, 3000 random accesses under back-pressure, latency and mechanism counts |
| `tb/tb_wid_budget.sv` | the seven WID budgets, each WID tagged distinctly |

## Simulating

Each testbench prints one line, `TB_RESULT checks=N failures=M`, then stops. From the
directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/iprot_pkg.sv tb/spmp_ref_pkg.sv tb/tb_initiator_protection.sv \
    --top-module tb_initiator_protection
./obj_dir/Vtb_initiator_protection
```

Swap in another testbench name to run it. `tb_wg_csr` needs only `iprot_pkg.sv` and
`wg_csr.sv`. Every testbench finishes in well under a second. The testbenches use
`$urandom`, so give `+verilator+seed+N` to vary the random streams. Lint the design with
`verilator --lint-only -Wall -y rtl rtl/iprot_pkg.sv rtl/initiator_protection.sv`. The
remaining warnings are unused bits: the byte offset of the address, reserved
configuration bits, and the privilege field, which the top module checks once for all
blocks.
