# Memory isolation hardware for composite enclaves on RISC-V

A *composite enclave* is a trusted execution environment whose protected
parts are spread across the host CPU and one or more pieces of specialized
hardware, such as an accelerator or an I/O device. The parts talk to each
other only through shared memory, and every private or shared region is
fenced off with ordinary RISC-V physical memory protection (PMP). On the
host this takes nothing more than a standard PMP unit, provided the core
has one. An accelerator that several mutually distrusting tenants share at
the same time is different: it needs isolation inside itself.

This RTL provides both enforcement points.

On the host side, `host_pmp` gives a 64-bit RISC-V application core the
PMP it lacked: the PMP registers (16 entries), which the security monitor
programs from machine mode, and three copies of the PMP check. One checks
data loads and stores, one checks instruction fetches, and one checks the
reads of the hardware page-table walker, so that a page table set up by
the OS cannot point into protected memory.

On the accelerator side, `compute_cluster` is one compute cluster of a
many-core RISC-V accelerator (clusters of eight small cores sharing a
scratchpad). It adds two things to the cluster:

* one **shared PMP control unit** per cluster, with 4 entries. Only one
  designated core, the one running the cluster firmware in machine mode,
  may write it;
* one **PMP enforcement unit per core**, placed between the core's data
  port and the cluster interconnect. It applies the shared entries to every
  load and store the core makes.

The firmware receives a task's regions from the host and writes them into
the control unit. It then runs the task on the worker cores in user mode.
On a context switch it clears the scratchpad the previous task used and
rewrites the entries. A worker core can never reach memory outside its
task's regions, and it cannot change the regions.

`composite_platform` is the top level and holds both. The two halves meet
only in system memory, in the shared regions a host enclave and an
accelerator task exchange data through, so there is no wire between them.
The host core, the accelerator cores and the L2 memory are existing
designs; their connections are the top's ports.

## Files

| file | what it is |
|---|---|
| `rtl/pmp_pkg.sv` | PMP types: configuration byte, address modes, privilege and access encodings, CSR numbers |
| `rtl/cluster_pkg.sv` | cluster bus types: core request/response, bank request, external port, CSR port |
| `rtl/pmp_entry.sv` | address match of one entry (TOR / NA4 / NAPOT) |
| `rtl/pmp.sv` | PMP check: priority, privilege and permission rules over N entries |
| `rtl/pmp_ctrl.sv` | shared PMP control unit of a cluster (registers, lock rules, single writer) |
| `rtl/pmp_enforce.sv` | per-core enforcement unit |
| `rtl/log_interconnect.sv` | cores to scratchpad banks and external port, round-robin arbitration |
| `rtl/tcdm_bank.sv` | one scratchpad bank (512 x 64 bit) |
| `rtl/compute_cluster.sv` | one accelerator cluster with 8 core ports |
| `rtl/host_pmp.sv` | host core PMP: RV64 PMP registers and the data, fetch and page-table-walker checks |
| `rtl/composite_platform.sv` | top level: `host_pmp` and `compute_cluster` |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_composite_platform` runs the whole design, `tb_pmp_enclaves` a seven-enclave workload |

## The PMP check

A PMP entry is an 8-bit configuration byte and an address register
`pmpaddr`, which holds address bits `PLEN-1:2`. The byte is laid out as in
the RISC-V privileged specification:

| bit | 7 | 6:5 | 4:3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|
| field | L (lock) | 0 | A (mode) | X | W | R |

The A field selects how `pmpaddr` describes a region:

| A | mode | region |
|---|---|---|
| 0 | OFF | none |
| 1 | TOR | `pmpaddr[i-1]*4 <= addr < pmpaddr[i]*4` (the lower bound of entry 0 is 0) |
| 2 | NA4 | the 4 bytes at `pmpaddr*4` |
| 3 | NAPOT | with k trailing ones in `pmpaddr`, the aligned `2^(k+3)`-byte block containing `pmpaddr*4` |

For NAPOT, `pmp_entry` does not decode the size. It forms
`free = pmpaddr ^ (pmpaddr + 1)`, which has ones in exactly the k+1 low
word-address bits that vary inside the region. The address matches when it
equals `pmpaddr` on every other bit. With all bits of `pmpaddr` set, the
entry covers the whole address space.

All entries are compared in parallel. The **lowest-numbered** matching
entry decides:

* Machine mode is allowed through an unlocked entry. A locked entry (L=1)
  binds machine mode to its R/W/X bits as well.
* Supervisor and user mode get the entry's R, W or X bit, depending on the
  kind of access.
* If no entry matches, machine mode is allowed and S/U mode is refused.
  The exception is `NR_ENTRIES = 0`, where everything is allowed.

Only the first byte address of an access is checked. Accesses must
therefore be naturally aligned and no wider than the smallest region
they touch. The check is purely combinational. It is the part that
lengthens the critical path of the accelerator core; with it, the cores
were reported to close timing at 666 MHz instead of 750 MHz.

How many enclaves fit is set by the entry count. If the monitor and OS
take 2 entries, and each unit enclave needs one private and one shared
region, N entries hold `(N-2)/2` unit enclaves: 7 for the default 16.

## The host core's PMP

`host_pmp` keeps 16 entries in the RV64 register layout. On a 64-bit core
only the even configuration registers exist:

| CSR | number | contents |
|---|---|---|
| `pmpcfg0` | `0x3A0` | configuration bytes of entries 0..7 |
| `pmpcfg2` | `0x3A2` | configuration bytes of entries 8..15 |
| `pmpaddr0..15` | `0x3B0..0x3BF` | address bits 55:2 of each entry |

An access below machine mode, or to `pmpcfg1`/`pmpcfg3` or any other
number, returns `err` (the core turns it into an illegal-instruction
exception) and changes nothing. The lock rules are those of the cluster's
control unit below.

The three checks share the registers and answer combinationally:

| port | access checked as | typical privilege |
|---|---|---|
| `data_*` | read or write (`data_we_i`) | the effective privilege of the load or store |
| `fetch_*` | execute | the current privilege |
| `ptw_*` | read | the privilege the walk is done for (S or U) |

A low `*_allow_o` means the core raises an access fault. The walker check
matters because the OS controls the page tables. Without it, the OS could
point a page-table entry into enclave memory and read it through the
walker, even though its own loads are fenced off.

A security monitor with this unit keeps entry 0 over its own memory with
no permissions (machine mode still passes, as the entry is not locked). It
gives each running enclave's private and shared regions RWX and every other
enclave's regions nothing. The last entry covers all memory for the OS
while the OS runs, and has no permissions while an enclave runs. A context
switch is a handful of CSR writes, and the work does not depend on region
sizes.

## One register set, many enforcers

```
             csr port of every core                 data port of core c
                     |                                     |
               +-----v------+    cfg/addr (broadcast)  +---v----------+
               |  pmp_ctrl  |------------------------->| pmp_enforce  | x 8
               | 4 entries  |                          |  (pmp inside)|
               +------------+                          +---+----------+
                                                           | allowed only
                                               +-----------v-----------+
                                               |   log_interconnect    |
                                               +--+----------------+---+
                                                  |                |
                                        tcdm_bank x 32       external port
                                       (128 KiB scratchpad)  (L2 / global memory)
```

**`pmp_ctrl`** holds the registers. They are reached through the standard
CSR numbers, in the RV32 layout:

| CSR | number | contents |
|---|---|---|
| `pmpcfg0..3` | `0x3A0..0x3A3` | four configuration bytes per word; entry i is byte `i%4` of `pmpcfg(i/4)` |
| `pmpaddr0..15` | `0x3B0..0x3BF` | address bits 31:2 of each entry |

Each core has a CSR port, and an access is answered in the same cycle. An
access is accepted only if all three of these hold:

* it comes from core `CFG_CORE` (core 0);
* that core is in machine mode;
* the CSR number is a PMP register.

Any other access returns `err=1` and changes nothing, so the worker cores
are locked out structurally. The control unit also applies these rules:

* Entries at and above `NR_ENTRIES` read as zero and ignore writes.
* Bits 6:5 of a configuration byte always read as zero.
* A locked entry ignores writes to its configuration and its address.
* A locked TOR entry also protects the `pmpaddr` below it, which is its
  lower bound.
* Locks clear only at reset, and reset turns every entry OFF. With every
  entry OFF, user-mode cores can reach nothing until the firmware has
  programmed a task.

**`pmp_enforce`** (one per core) checks each request against the
broadcast entries and the core's current privilege mode. A write is checked
against W and a read against R. The two outcomes:

* **Allowed:** the request goes to the interconnect unchanged, and its
  grant and response pass back.
* **Refused:** the request is granted at once and never leaves the unit.
  A refused write cannot change memory, and a refused read sees nothing.
  One cycle later the unit answers with `err=1` and `rdata=0`, and
  `core_fault_o[c]` pulses so that the core can raise an access-fault
  exception.

The unit allows one outstanding request per core. A new request is
accepted when nothing is pending, or when the pending response arrives in
that same cycle.

## Running a task, and switching tasks

The sequence the firmware on core 0 follows, and which
`tb_compute_cluster` plays through:

1. Clear the scratchpad window the task will use. The banks have no reset.
2. Write `pmpaddr0` with the task's scratchpad window, as NAPOT:
   `pmpaddr = (base >> 2) | (size/8 - 1)`. For example, a 4 KiB window at
   `0x1000_0000` gives `0x0400_01FF`.
3. Write `pmpaddr1` with its input buffer in L2, for example NAPOT 256 B at
   `0x8000_0000` (`0x2000_001F`).
4. Write `pmpcfg0`. Byte 0 = `0x1B` (NAPOT, R, W); byte 1 = `0x19`
   (NAPOT, R). A locked NA4 entry with no permissions (`0x90`) can fence a
   word off even from the firmware itself.
5. Run the task on cores 1..7 in user mode. Any access outside the windows
   returns an error and a fault pulse.
6. At a context switch, clear the old window, write the new task's
   addresses and configuration, and continue.

## Interfaces and timing

`composite_platform` carries the ports of `host_pmp` with a `host_` prefix
(`host_csr_*`, `host_data_*`, `host_fetch_*`, `host_ptw_*`) and those of
`compute_cluster` with an `acc_` prefix. Host CSR accesses answer in the
same cycle and a write takes effect at the next edge; the host checks are
combinational.

`compute_cluster` ports (all in `cluster_pkg` / `pmp_pkg` types):

| port | dir | meaning |
|---|---|---|
| `clk_i`, `rst_ni` | in | clock; asynchronous active-low reset |
| `core_priv_i[c]` | in | privilege mode of core c (U=0, S=1, M=3) |
| `core_req_i[c]` | in | `valid, addr[31:0], we, be[7:0], wdata[63:0]`, held until granted |
| `core_gnt_o[c]` | out | request taken this cycle |
| `core_rsp_o[c]` | out | `valid, rdata[63:0], err`; err = PMP access fault |
| `core_fault_o[c]` | out | one-cycle pulse with a refused access's response |
| `csr_req_i[c]` / `csr_rsp_o[c]` | in/out | `valid, we, addr[11:0], wdata[31:0], priv` / `rdata, err`, same cycle |
| `ext_req_o`, `ext_gnt_i`, `ext_rsp_i` | out/in/in | external port. The request carries the core index `id`, is held until `ext_gnt_i`, and the response returns the `id` after any latency |

Latencies:

* An allowed scratchpad access that wins its bank is granted in the cycle
  it is presented and answered in the next cycle.
* If several cores hit the same bank, a round-robin arbiter picks one.
  The others stall, keep their requests, and are served within a bounded
  number of cycles.
* A refused access is answered one cycle after it is presented, whatever
  its address.
* A CSR write takes effect at the next clock edge and is seen by every
  enforcement unit from then on.

Address map: the scratchpad is `[0x1000_0000, 0x1002_0000)`. It is
word-interleaved, so address bits 7:3 select one of the 32 banks and bits
16:8 select the word within the bank. Every other address goes out
through the external port.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `pmp` | `NR_ENTRIES` | 16 | maximum allowed by the RISC-V standard and by the host-core design; evaluated at 0, 8, 16 |
| `pmp` | `PLEN` | 56 | this design's choice for the 64-bit host core |
| `host_pmp`, `composite_platform` | `NR_ENTRIES` / `HOST_PMP_ENTRIES` | 16 | maximum of the standard |
| `host_pmp`, `composite_platform` | `PLEN` / `HOST_PLEN` | 56 | own choice |
| `compute_cluster`, `pmp_ctrl` | `NR_CORES` | 8 | cores per cluster |
| `compute_cluster`, `pmp_ctrl`, `pmp_enforce` | `NR_ENTRIES` | 4 | shared entries per cluster |
| `compute_cluster`, `pmp_ctrl` | `CFG_CORE` | 0 | which core configures; own choice of index |
| `compute_cluster`, `log_interconnect` | `NR_BANKS`, `BANK_WORDS` | 32, 512 | own choice (128 KiB scratchpad) |
| `compute_cluster`, `log_interconnect` | `TCDM_BASE` | `0x1000_0000` | own choice |
| `cluster_pkg` | `AW`, `DW` | 32, 64 | own choice: RV32 cores with a double-precision FPU |

## What follows the source design and what is this design's own

The following come from the source design:

* a PMP unit with a configurable number of entries, up to 16, on the host
  core, used three times: for data accesses and instruction fetches in the
  MMU, and for page-table reads in the page-table walker;
* in the accelerator, clusters of eight cores, one shared PMP control unit
  with 4 entries per cluster, written by only one of the eight cores;
* one enforcement unit per core, placed between the core and the
  logarithmic interconnect;
* a DMA engine in the cluster, and a scratchpad flush plus PMP reprogramming
  on every context switch.

The following come from the RISC-V privileged specification, which the
source design relies on: the entry encoding, the matching modes, the
priority and lock rules, and the CSR numbers.

The following are this design's own choices:

* the way a refused access is answered (immediate grant, error response
  one cycle later, fault pulse);
* the one-outstanding-request rule;
* the CSR ports and their same-cycle answer, and the host checks as
  combinational allow signals at the top's ports;
* placing the host PMP and the cluster side by side in one top level (the
  source evaluates them as two separate prototypes);
* refusing all non-designated cores outright;
* the scratchpad size, banking, width and address map, and its placement
  behind the interconnect (the source's block diagram does not draw it);
* building the logarithmic interconnect as a plain crossbar with
  round-robin arbiters;
* treating the external port as the path to L2 memory;
* checking only the start address of an access;
* leaving instruction fetches unchecked in the cluster (the cores fetch
  through their own instruction caches).

Not in this RTL:

* The accelerator cores, the cluster DMA engine and the L2 cache. These
  are an existing design. Their ports are top-level ports, except the DMA,
  whose connections the block diagram does not show.
* The 64-bit host core, with its MMU, page-table walker and CSR file. The
  core presents its accesses at the `host_*` ports and raises the access
  fault; how the checks sit in its pipeline is not covered.
* The security monitor and runtime software that implement connect,
  synchronous and asynchronous disconnect, and the attestation of composite
  enclaves.
* Interrupt delegation.
* The FPGA prototype's peripheral link. It is a modified I2C protocol over
  PMOD pins whose changes are not specified.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a run that hangs. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/pmp_pkg.sv rtl/cluster_pkg.sv \
          tb/tb_composite_platform.sv --top-module tb_composite_platform -o sim
./obj_dir/sim
```

Replace `tb_composite_platform` with `tb_pmp`, `tb_pmp_ctrl`,
`tb_pmp_enforce`, `tb_log_interconnect`, `tb_tcdm_bank`, `tb_host_pmp`,
`tb_compute_cluster` or `tb_pmp_enclaves` to run the other
testbenches. All of them run at the default parameters (`tb_pmp` with 16
entries and 56-bit addresses) and finish in well under a second.

* `tb_pmp` checks the PMP unit against a model that turns each entry into
  an explicit byte range, over directed cases and 8000 random ones.
* `tb_pmp_ctrl` runs directed and random CSR traffic from all eight cores
  against a register model.
* `tb_pmp_enforce` checks that refused requests never reach the
  interconnect and that their error response comes with the right timing.
* `tb_log_interconnect` checks data integrity, the one-cycle bank latency,
  fairness and that the external port holds its request.
* `tb_host_pmp` programs the host PMP only through its CSR port and
  checks CSR legality, read-back, locks, and all three check ports against
  a byte-range model over random configurations.
* `tb_pmp_enclaves` programs `host_pmp` through its CSRs as a security
  monitor would for seven unit enclaves (a private and a shared region
  each, shared regions from 4 KiB to 1 MiB). It checks isolation after
  every context switch between the OS and the enclaves, and checks that
  every switch takes the same 18 register writes whatever the region size.
* `tb_compute_cluster` runs two tenants and a context switch. It counts
  each mechanism, and fails if any never occurs: permitted and refused
  accesses, refused CSR writes, machine-mode pass, a lock binding machine
  mode, a locked entry keeping its value, bank-conflict stalls, external
  accesses, and the context switch with flush.
* `tb_composite_platform` runs the same cluster scenario on the top level
  and adds the host side: the monitor sets up a CPU enclave with a private
  and a shared region, switches OS to enclave to OS, and checks data,
  fetch and page-table-walker accesses in each context. It also checks a
  refused supervisor-mode CSR write.

Areas and clock rates are not reproduced by this RTL. The source reports
them for a 22 nm flow: on the host core, logic grows from 472k GE with no
PMP to 531k GE with 16 entries; in the accelerator, the 4-entry PMP costs
the core about 15% more area.
