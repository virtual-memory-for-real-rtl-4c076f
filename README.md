# hPMP with region offsets: deterministic address relocation for RV32 hypervisors

Automotive controllers increasingly run several independent software images
("virtual MCUs") on one RISC-V hart under a hypervisor. Each image wants to be
linked once and deployed anywhere, which normally calls for an MMU with page
tables and a TLB. A TLB makes the time of a memory access depend on the
access history, which is exactly what worst-case timing analysis cannot
tolerate.

This RTL takes the other route. The hypervisor-level physical memory
protection unit (hPMP), the second stage of a two-level RISC-V PMP, already
compares every guest access against a small set of address ranges. Each range
is given one extra register, `hpmpoffset`, and a guest access that falls in a
range is relocated by adding that range's offset:

    PA = GPA + hpmpoffset[2k+1]        (region k, guest accesses only)

The ranges are registers, not a cache, so every access costs the same: one
parallel compare across all ranges, one priority pick, one 34-bit add. There is
no miss, no table walk and no history.

The design follows the short proposal "Virtual memory for real-time systems
using hPMP" (Walluszik et al., Infineon). That proposal defines the registers,
the region scheme, the relocation formula and three usage scenarios. It leaves
the CSR encoding, bit positions, reset values and several corner-case rules
open. The choices made for those are listed under
[Where this RTL goes beyond the proposal](#where-this-rtl-goes-beyond-the-proposal).

## Where the block sits

    VS/VU (guest) --> vSPMP --+
                              +--> hPMP (this RTL) --> PMP/ePMP --> memory / MMIO
    HS/U (host) --------------+
    M ----------------------------------------------> PMP/ePMP

- **vSPMP** is the guest OS's own first stage. Its verdict enters as
  `vspmp_allow_i`.
- **hPMP** is programmed by the hypervisor in HS-mode. It isolates the VMs from
  each other and from the hypervisor, and in this design it also relocates.
- **PMP/ePMP** is the machine-level protection. It receives `rsp_pa_o`.

vSPMP, PMP/ePMP, the hart and the memories are not part of this RTL. A guest
works entirely in guest-physical addresses (GPA). Only the hPMP turns them
into physical addresses (PA). The hypervisor itself always uses physical
addresses.

## Region pairs: the OFF-TOR scheme

There are 64 hPMP entries. They are used strictly in pairs, so there are 32
regions:

| entry   | cfg A field          | hpmpaddr holds                           | hpmpoffset          |
|---------|----------------------|------------------------------------------|---------------------|
| 2k      | always OFF           | region start, address bits 33:2          | hardwired 0         |
| 2k+1    | OFF (unused) or TOR  | region end (exclusive), address bits 33:2 | region k's offset, bits 33:2 |

Region k matches a GPA when entry 2k+1 is TOR, its `hpmpswitch` bit is set, and

    hpmpaddr[2k] <= GPA[33:2] < hpmpaddr[2k+1]

This is the ordinary RISC-V top-of-range rule. Because of the fixed pairing, the
start register of every region is private to that region. Only the 32 odd
offset registers exist in hardware.

The cfg byte of entry 2k+1 carries the region's rule:

| bit | 7 | 6:5      | 4:3               | 2 | 1 | 0 |
|-----|---|----------|-------------------|---|---|---|
|     | S | reserved | A (0=OFF, 1=TOR)  | X | W | R |

The register bank legalises writes. An even entry always keeps A=OFF. An odd
entry keeps only OFF or TOR: a request for NA4 or NAPOT stores OFF. The
reserved bits read zero.

The offset register is 32 bits wide and holds bits 33:2 of the byte offset,
so offsets are multiples of 4 and reach the whole 16 GiB RV32 physical space.

**Worked conversion.** A region that is written as "start 0x2000_0000, last byte
0x2000_07FF" (2 KB) is programmed as:

- `hpmpaddr[2k]   = 0x2000_0000 >> 2 = 0x0800_0000`
- `hpmpaddr[2k+1] = 0x2000_0800 >> 2 = 0x0800_0200`

## Deciding an access

All enabled regions are compared at once. The lowest-numbered matching region
wins, and its number `k` is reported on `rsp_region_o`. The S bit splits the
rules between the hypervisor and the guests:

| access                 | hit, S=0 (guest rule)      | hit, S=1 (hypervisor rule) | no hit  |
|------------------------|----------------------------|----------------------------|---------|
| V=1 (VS, VU)           | R/W/X of the rule          | denied                     | denied  |
| V=0, HS or host U      | denied                     | R/W/X of the rule          | allowed |
| M-mode                 | not checked (allowed)      | not checked                | allowed |

For V=1 accesses the result is also ANDed with `vspmp_allow_i`.

This gives the permission model of the example system:

- A guest can reach only its own whitelisted regions.
- The hypervisor's own stack, code and data are S=1 rules. A guest can never
  touch them.
- The hypervisor is still protected against its own faults, for example writing
  to its code, because its RX and RW rules are checked.

`hpmpswitch` is how the hypervisor changes VMs. When all regions of all VMs
fit in the 32 pairs, a VM switch is only two 32-bit writes to `hpmpswitch`:
switch off the previous VM's regions and switch on the next one's. The
hypervisor's S=1 regions stay on permanently.

## Relocation

For a V=1 access that hits region k:

    PA[33:0] = GPA[33:0] + {hpmpoffset[2k+1], 2'b00}     (mod 2^34)

In every other case `PA = GPA`. Relocation happens on any guest hit; whether
the access may proceed is reported separately on `rsp_allow_o`. Bits 1:0 of
the offset are zero, so the byte position and alignment of an access never
change.

Only the base moves. The size of a relocated region is still set by its pair
of `hpmpaddr` registers, and those are compared against the guest address
before the offset is added. A VM can therefore be moved by rewriting one
offset register, while resizing it means rewriting `hpmpaddr`.

## Timing

- **Access path.** Purely combinational, from `req_*` to `rsp_*` in the same
  cycle. The logic depth is:
  - a 32-bit magnitude comparator pair per region,
  - a 32-input priority pick,
  - a 64:1 multiplexer for the cfg byte and a 32:1 multiplexer for the offset,
  - a 34-bit adder.

  This depth is the same for every access, so the added latency is constant
  and independent of history. If a register stage is needed to meet timing, it
  can be added after `rsp_*` without changing that property.
- **CSR writes.** They take effect at the next rising clock edge. Software must
  still make reconfiguration atomic with respect to its own execution: disable
  interrupts and fence around the update, as any PMP reprogramming requires.

## Scenarios

The testbenches program the following configuration. The addresses are the
example address map of the proposal; the table shows inclusive last bytes.

| region | use       | start        | last byte    | S | perm |
|--------|-----------|--------------|--------------|---|------|
| 0      | Stack HV  | 0x2000_0000  | 0x2000_07FF  | 1 | RW   |
| 1      | Stack VM1 | 0x2000_0800  | 0x2000_17FF  | 0 | RW   |
| 2      | Stack VM2 | 0x2000_1800  | 0x2000_27FF  | 0 | RW   |
| 3      | Code HV   | 0x8000_0000  | 0x8003_FFFF  | 1 | RX   |
| 4      | Code VM1  | 0x8004_0000  | 0x800B_FFFF  | 0 | RX   |
| 5      | Code VM2  | 0x800C_0000  | 0x8013_FFFF  | 0 | RX   |
| 6      | Data VM1  | 0x9000_0000  | 0x9001_FFFF  | 0 | RW   |
| 7      | Data VM2  | 0x9002_0000  | 0x9003_FFFF  | 0 | RW   |
| 8      | Data HV   | 0x9080_0000  | 0x9081_7FFF  | 1 | RW   |
| 9      | Data VM1  | 0x9081_8000  | 0x9085_7FFF  | 0 | RW   |
| 10     | Data VM2  | 0x9085_8000  | 0x9089_7FFF  | 0 | RW   |

This uses 22 of the 64 entries.

**Partial update.** VM1's code grows from 512 KB to 768 KB, which means a new
region 4 end at 0x800F_FFFF. VM2's code image is moved rather than relinked:
`hpmpoffset11` is set to 512 KB (register value 0x2_0000). VM2 keeps executing
at GPA 0x800C_0000, which now reaches PA 0x8014_0000. While VM1 runs, VM2's
regions are switched off, so the two overlapping guest ranges never compete.

**Generic images.** Both VMs are linked to one guest layout:

| guest area | GPA         | size   |
|------------|-------------|--------|
| stack      | 0x0000_0000 | 4 KB   |
| code       | 0x0010_0000 | 512 KB |
| data       | 0x0100_0000 | 128 KB |
| data 2     | 0x0200_0000 | 256 KB |

The guest layout addresses are an example; the proposal fixes none. Regions
11–14 (VM1) and 15–18 (VM2) carry these identical guest ranges. Their offsets
point to each VM's physical home in the map above, and `hpmpswitch` selects
which set is live.

## Where this RTL goes beyond the proposal

The proposal fixes:

- the 64 entries;
- the OFF/TOR-only pairing, with even offsets hardwired to zero;
- the offset register layout (offset bits 33:2 in a 32-bit register);
- the formula PA = GPA + hpmpoffset[2k+1], applied only when V=1;
- the S=0 rule for guests and the S=1 rule for the hypervisor;
- the use of `hpmpswitch` to enable regions.

The following are this design's own choices:

- **CSR access.** No CSR numbers are defined. The bank is reached through a
  (class, index) port: cfg, addr, switch or offset, with index 0..63. This
  stands in for an indirect-CSR window.
  - A cfg access carries one entry in `wdata[7:0]`. There is no packing of four
    entries per register.
  - `hpmpswitch` is two 32-bit words: index 0 covers entries 31..0, index 1
    covers entries 63..32.
- **Field positions.** The cfg bit positions follow the RISC-V PMP/SPMP cfg
  byte.
- **Reset.** Every register resets to 0: all entries OFF and switched off.
- **No lock bit.** None is described.
- **Matching rules.**
  - The lowest-numbered match wins.
  - A host access with no match is allowed, and a guest access with no match is
    denied.
  - M-mode bypasses the unit.
  - These follow the usual PMP/SPMP conventions. Overlapping regions are
    explicitly left open by the proposal.
- **Granularity.** Matching is word granular (GPA bits 33:2). It is exact for
  naturally aligned accesses of up to 4 bytes, which covers every RV32
  load/store without misaligned support. A misaligned access that straddles a
  region edge is not detected.
- **Overflow.** The offset addition wraps modulo 2^34. Overflow is not
  flagged.
- **Printed addresses.** The proposal prints region bounds as byte addresses
  with an inclusive last byte, for example `hpmpaddr1 = 0x2000_07FF`. This RTL
  keeps the RISC-V register encoding: address bits 33:2, exclusive top. The
  testbenches convert with `(last+1)>>2`.
- **Offset value of the partial update.** The proposal gives
  `hpmpoffset11 = 0x8_0000` and also says the register holds offset bits 33:2.
  - Taken as a register value, 0x8_0000 would move VM2 by 2 MB.
  - Taken as a byte offset, it moves VM2 by 512 KB, to just after VM1's grown
    code with a 256 KB gap.

  The testbenches use the byte reading (register value 0x2_0000).
- **Verdict and response.** The vSPMP verdict is combined by a plain AND. The
  response is produced in the same cycle.

Not built:

- the guest's vSPMP;
- the machine PMP/ePMP;
- the hart and hypervisor software;
- the memories.

The proposal only names these or takes them from the RISC-V specifications.

## Files

| file | contents |
|------|----------|
| `rtl/hpmp_pkg.sv` | widths (XLEN 32, PA 34 bits, 64 entries), cfg struct, enums for access type, privilege and CSR class |
| `rtl/hpmp_csr_file.sv` | hpmpaddr / hpmpcfg / hpmpswitch / hpmpoffset registers with WARL legalisation and a read port |
| `rtl/hpmp_checker.sv` | per-region TOR compare, priority pick, S-bit and R/W/X decision |
| `rtl/hpmp_translate.sv` | offset select (entry 2k+1) and 34-bit add |
| `rtl/hpmp_top.sv` | the three above wired together, plus the vSPMP verdict |
| `tb/tb_hpmp_csr_file.sv` | random register traffic against a model; WARL, reset and word-select checks |
| `tb/tb_hpmp_checker.sv` | 20 000 random configurations and accesses against a loop model, plus directed edge cases |
| `tb/tb_hpmp_translate.sv` | random offsets and addresses against the formula |
| `tb/tb_hpmp_top.sv` | end to end at full size: example configuration, VM switch, partial update, generic images; counts every mechanism (relocation, the deny rules, switching, overlap priority, M bypass, vSPMP deny, WARL) and fails if one never occurs |
| `tb/tb_hpmp_vm_switch.sv` | workload: 400 scheduler ticks with 40 random guest and host accesses each, occasional relocation of VM2, checked against a reference region table |

Parameters: `NUM_ENTRIES` (default 64, even, at most 64 because the index
port is 6 bits) on every module, and `PLEN` (default 34) on the checker and
translator. `hpmp_top` fixes PLEN to 34.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/hpmp_pkg.sv tb/tb_hpmp_top.sv --top-module tb_hpmp_top
    ./obj_dir/Vtb_hpmp_top

Replace `tb_hpmp_top` with any other testbench name. All of them run in well
under a second, and all run the blocks at their default size.

The RTL is plain synthesizable SystemVerilog 2017: packages, packed structs,
enums, `always_ff` and `always_comb`, and concurrent assertions. The
assertions check:

- even cfg entries are OFF and odd ones are OFF or TOR;
- no access arrives with V=1 in M-mode;
- host addresses pass untranslated.

Lint leaves only expected unused-bit notes. These are the even `hpmpswitch`
bits, GPA bits 1:0 and the A/reserved cfg bits in the decision path, and none
of them are needed by the OFF-TOR scheme.
