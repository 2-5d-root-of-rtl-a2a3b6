# ISEA: an active interposer as the root of trust for untrusted chiplets

A 2.5D system is built from separately made dies ("chiplets") mounted on an
interposer. When processor and memory chiplets come from a foundry nobody
trusts, nothing inside them can be relied on to enforce security. ISEA moves
all of the enforcement into the interposer instead. The interposer is made in
an older, trusted process, and it carries every wire between chiplets. So the
system bus, the master IDs, the access checks and the policy storage all live
there. A chiplet can only talk to another chiplet through logic it cannot
reach or change.

This RTL models that interposer for the configuration the original work
evaluates:

- 64 untrusted ARM Cortex-M0 cores, in four processor chiplets of 16 cores;
- four untrusted shared-memory chiplets of 1 MB, each built from sixteen
  64 kB SRAM macros;
- one AMBA AHB-Lite bus in the interposer;
- one *transaction monitor* (TRANSMON) in front of every memory chiplet and
  in front of a shared register space, each holding 16 address policies and
  16 data policies;
- a trusted control core (PROC-0) and a Secure Interface to an external
  configuration unit, both of which may program the policies.

The cores, PROC-0 and the configuration unit are not part of the RTL. Their
bus ports are the ports of the top module, `isea_top`.

## How a request travels

```
 core k ──► BI(k) ─┐                       ┌─► TRANSMON 0 ─► memory chiplet 0
 PROC-0 ──► BI(0) ─┤                       ├─► ...
 TCU ─► SI ► BI(65)┼─► arbiter ─► decoder ─┼─► TRANSMON 3 ─► memory chiplet 3
                   │    (one shared bus)   ├─► TRANSMON 4 ─► shared register space
                   │                       ├─► PRS 0..4 (policy registers)
                   │                       └─► default slave (unmapped → ERROR)
                   └◄── response mux ◄─────┘
 TRANSMON k ── irq[k] ──► PROC-0
```

1. **Bus interface (BI), `ahb_master_bi`.** Each master has its own BI in the
   interposer.
   - The BI offers the master's address phase to the arbiter in the same
     cycle. If the bus is granted at once, the transfer goes straight
     through. Otherwise the BI holds the transfer and stalls the master
     until the bus is granted.
   - It stamps the transfer with a master ID that is fixed by which BI this
     is: PROC-0 is 0, core k is k, and the Secure Interface is 65. A core
     cannot forge its ID, because the ID is not a signal the core drives.
   - Only the master that owns the current data phase sees `HRDATA`/`HRESP`.
     Every other BI shows zeros, so a core cannot snoop on other masters'
     read data.
2. **Arbiter, decoder and default slave** (`ahb_arbiter`, `ahb_decoder`,
   `ahb_default_slave`, wrapped in `ahb_interconnect`).
   - The arbiter is round-robin, so each of the 66 masters is served within
     66 transfers.
   - The decoder selects the slave from the address.
   - An address that maps to nothing gets the standard two-cycle AHB ERROR
     from the default slave.
3. **TRANSMON.** Sits between the bus and each memory-like slave, and
   decides whether the transfer may reach it (next section).
4. **Interrupts.** Each time a TRANSMON drops a request, it pulses its line
   of `proc0_irq` for one cycle, so PROC-0 software can log or isolate the
   offender.

### Address map and IDs

| Region | Address | Size |
|---|---|---|
| memory chiplet m (m = 0..3) | `0x2000_0000 + m·0x10_0000` | 1 MB |
| shared register space (SRS) | `0x4002_0000` | 64 words (4 kB window) |
| policy registers of TRANSMON k (k = 0..3 memories, 4 = SRS) | `0x5000_0000 + k·0x4000` | 16 kB window |
| anything else | default slave | ERROR |

The original work prints only example addresses: `0x2000_xxxx` for memory,
and `0x4002_0000`–`0x4002_0FFF` with register 39 at `0x4002_009C` for the
shared registers. The map above is built around those examples. The
placement of the policy registers is this design's own choice, as are the ID
numbers.

## The transaction monitor (TRANSMON)

`transmon` is made of four parts: an address protection unit (`apu`), a data
protection unit (`dpu`), a slave access filter (`saf`), and a response
multiplexer. The policies come from the TRANSMON's own policy register space
(`prs`). **Default-deny** is the core rule: a transfer that no policy allows
is dropped. After reset all policies are zero, so nothing but the policy
registers can be reached until they are loaded.

### Address policies (APU)

Each of the 16 APU policies has four 32-bit fields.

| Field | Meaning |
|---|---|
| `MID` | the one master this policy is for |
| `ADDR` | reference address |
| `MASK` | address bits that are "don't care" |
| `PERM` | bit 0 allows reads, bit 1 allows writes (`3` = read-write) |

A transfer is allowed when at least one policy satisfies all of:

```
MID == HMASTER  and  ((HADDR ^ ADDR) & ~MASK) == 0  and  PERM[HWRITE ? 1 : 0]
```

A policy therefore covers the range from `ADDR & ~MASK` to `ADDR | MASK`.
When the mask is a run of low ones, that range is contiguous. Otherwise it is
the set of addresses in that range whose fixed bits match `ADDR`.

The test is pure combinational logic on the address-phase signals, so it
costs no cycle.

**Example (FFT result protection).** Core 2 is given two policies on the
shared register space:

| | ADDR | MASK | Bounds | Words actually covered |
|---|---|---|---|---|
| policy 1 | `4002_006C` | `0000_006C` | `4002_0000`–`4002_006C` | offsets whose bits other than 2, 3, 5, 6 are 0: `00`–`0C`, `20`–`2C`, `40`–`4C`, `60`–`6C` |
| policy 2 | `4002_0074` | `0000_0F8B` | `4002_0074`–`4002_0FFF` | offsets with bits 2, 4, 5, 6 set: `74`, `7C`, `F4`, `FC`, `174`, ... |

Neither policy covers `4002_0070`, where core 1 keeps its result. So core 2's
write there is dropped.

The original description calls these two policies the ranges
`4002_0000`–`4002_006C` and `4002_0074`–`4002_0FFF`. Those are the bounds
`ADDR & ~MASK` and `ADDR | MASK`. The bit-wise rule it also gives, which
this RTL implements, covers only the words listed in the last column. For
example, `4002_0010` lies inside the first range but is not covered. To get a
whole range, use a mask of low ones and an aligned base, e.g.
`ADDR=4002_0000` with `MASK=0000_007F` for `4002_0000`–`4002_007F`.

### Data policies (DPU)

Each of the 16 DPU policies has five 32-bit fields: `MID`, `ADDR`, `AMASK`,
`DATA` and `DMASK`.

- **Coverage (address phase).** A policy *covers* a transfer when it is a
  write, `MID == HMASTER`, and `((HADDR ^ ADDR) & ~AMASK) == 0`.
- **Blocking (data phase).** A covered write is *blocked* when
  `((HWDATA ^ DATA) & ~DMASK) == 0` for a covering policy. In other words,
  the unmasked bits of the written value equal the restricted value.

Reads are never covered. This is how a key value is kept out of shared
memory, and how a protected word is kept from being overwritten with a
particular pattern.

- **Example (key protection).** With `MID=2`, `ADDR=2000_FFFC`,
  `AMASK=0FFF_FFFF`, `DATA=0BAD_BEEF` and `DMASK=0`, core 2 may never write
  `0x0BAD_BEEF` anywhere in `0x2000_0000`–`0x2FFF_FFFF`.
- **Example (semaphore).** With `ADDR=4002_009C` (register 39), `AMASK=0`,
  `DATA=0` and `DMASK=FFFF_FFFE`, the policy's core may not write a value
  whose bit 0 is 0 to the semaphore. That core therefore cannot clear a
  semaphore held by someone else.

### Slave access filter (SAF): the hard part

The data a DPU checks only exists in the data phase. By then an AHB slave
would already have accepted the address phase, so the SAF must not pass a
covered write's address phase on. Its state machine (`S_IDLE`, `S_FWD`,
`S_CHECK`, `S_ERR1`, `S_ERR2`) handles the three cases:

| Address phase sees | What the SAF does | Master's data phase |
|---|---|---|
| APU allows, no DPU coverage | forwards the address phase in the same cycle (`S_FWD`) | as the memory's own, 2 cycles |
| APU denies | forwards nothing. Answers ERROR itself: `HRESP=1`/`HREADY=0`, then `HRESP=1`/`HREADY=1` (`S_ERR1`, `S_ERR2`) and pulses `irq` | 2 cycles |
| APU allows, DPU covers | registers the address phase and stalls one cycle (`S_CHECK`) while the DPU compares `HWDATA`. Then either replays the held address phase to the memory or answers ERROR as above | 3 cycles |

Points worth knowing before changing this block:

- **A dropped transfer leaves no trace on the memory side.** `HSEL`,
  address, master ID and write data toward the memory are zero whenever
  nothing is being forwarded. The assertion `a_no_denied_fwd` checks that a
  denied transfer never raises the memory's select.
- **The ERROR is always two cycles**, as AHB-Lite requires
  (`a_err_two_cycle`).
- **Latency never reveals the verdict.** The memory controller has one wait
  state, so an allowed transfer takes 2 data-phase cycles, the same as an
  APU denial. A DPU-covered write takes 3 cycles whether it is allowed or
  blocked. Only DPU-covered writes pay the extra cycle; every other transfer
  runs at full speed.
- **Writes are replayed, not merged.** In the replay cycle the memory sees a
  normal address phase, then takes `HWDATA` in the following cycle. The
  master holds `HWDATA` stable while stalled, as AHB requires.

### Policy register space (PRS)

Each TRANSMON's policies are ordinary flip-flops (`prs`). They are read and
written over the bus through a slave port on the PRS.

- Only the two privileged masters can reach them: PROC-0 (ID 0) and the
  Secure Interface (ID 65). Any other master, and any offset that holds no
  register, gets ERROR and changes nothing. In particular, a core cannot
  grant itself access.
- Register map inside the 16 kB window:

  | Policy | Offset | Fields (in order, 4 bytes apart) |
  |---|---|---|
  | APU policy i | `16·i` | MID, ADDR, MASK, PERM |
  | DPU policy j | `0x2000 + 32·j` | MID, ADDR, DATA, AMASK, DMASK |

- Accesses complete with no wait states.

The policy registers drive the comparators continuously, so a new policy
takes effect on the next transfer.

## Other interposer blocks

- **Shared register space (`srs`).** 64 general registers
  (`gpcfg0`…`gpcfg63`) for data that cores share, such as semaphores.
  - It sits behind its own TRANSMON, so it is policed like memory.
  - It has one wait state and supports byte, halfword and word writes.
  - Registers reset to zero. Reads beyond register 63 return zero, and
    writes there are ignored.
  - All registers also appear on the `srs_regs` output for observation.
- **Secure Interface (`secure_if`).** The bus master through which an
  external configuration unit loads code, data and policies and reads back
  results. Its command port works as follows:
  - a command is taken when `tcu_valid` and `tcu_ready` are both high;
  - a single AHB word transfer follows;
  - one `tcu_rvalid` pulse returns `tcu_rdata`, with `tcu_err` high if the
    bus answered ERROR.

  The SI is privileged only for the policy registers. Its memory accesses
  pass the TRANSMONs like anyone else's.
- **Shared-memory chiplet (`shared_mem_chiplet`, `sram_64kb`).** An
  AHB-Lite controller over 16 macros of 16384 × 32 bits.
  - Address bits [15:2] select the row and bits [19:16] select the macro.
  - The controller has one wait state: the macro is read in the first
    data-phase cycle, and the data is returned in the second.
  - Byte lanes follow `HSIZE`.

  The macro model is a plain array with byte write enables and a
  synchronous read. A real design would put the foundry's SRAM macro here
  with the same ports.

## Timing summary

All logic runs on one clock (`hclk`) with an active-low asynchronous reset
(`hresetn`). From a master's point of view, with an idle bus, the data phase
lasts:

| Transfer | Cycles |
|---|---|
| memory or SRS, allowed | 2 |
| memory or SRS, denied by APU | 2 (ERROR) |
| write covered by a DPU policy, allowed or blocked | 3 |
| policy register, privileged master | 1 |
| policy register, other master | 2 (ERROR) |
| unmapped address | 2 (ERROR) |

Under contention, a master additionally waits one cycle for each cycle
before the arbiter grants it the bus.

## Where this RTL departs from the original description, and what it leaves out

- **Arbitration is this design's own.** The original text does not say how
  its bus interfaces share the bus. Here, a transfer granted in the cycle
  its master issues it costs nothing extra. A transfer that has to wait is
  held in the bus interface, which then adds one cycle per cycle waited.
  With 66 masters, a busy bus makes that waiting, not the TRANSMON, the main
  source of delay.
- **Bursts are not supported.** Bursts and protection signals (`HBURST`,
  `HPROT`) are not carried. `SEQ` transfers are issued as `NONSEQ`. A
  Cortex-M0 issues only single transfers, so this matches that core.
- **Own choices where the text gives no values.** The following are this
  design's own: the address map, master ID numbering, policy register
  layout, who may program policies, SRS size and wait state, memory
  controller wait state, SI command protocol and interrupt form.
- **APU permission encoding is assumed.** The text prints only the value
  `3` for read-write; bit 0 = read and bit 1 = write are assumed.
- **DPU mask rows.** One of the original illustrations of the key-protection
  policy lists the data mask and address mask in the opposite order from its
  waveform and text. This RTL follows the waveform and text: the address mask
  is `0FFF_FFFF` and the data mask is `0`.
- **Not built:**
  - the optional memory-security feature (ECC/CRC/mirroring) and its trusted
    control memory, which the evaluated prototype also omits;
  - cryptographic protection of the Secure Interface.
- **Not modelled:**
  - the Cortex-M0 cores and PROC-0;
  - PROC-0's interrupts *to* the cores for task scheduling, which are plain
    wires between the processor chiplets;
  - the physical side: microbumps, floorplan and the two technology nodes.

## Parameters

| Parameter (on `isea_top`) | Default | Meaning |
|---|---|---|
| `N_CORES` | 64 | untrusted cores (masters 1..N) |
| `N_MEM` | 4 | shared-memory chiplets, 1 MB each |
| `N_APU` | 16 | APU policies per TRANSMON |
| `N_DPU` | 16 | DPU policies per TRANSMON |

The other evaluated configurations are handled as follows:

- **32, 64 or 128 policies per TRANSMON.** Set `N_APU`/`N_DPU`. The register
  map has room for 512 APU and 256 DPU policies.
- **Eight processor chiplets of eight cores.** Uses the same RTL: how cores
  are grouped into chiplets has no logic in the interposer.

Shared types, constants and the address map are in `isea_pkg`.

## Files

| File | Content |
|---|---|
| `rtl/isea_pkg.sv` | bus structs, policy structs, address map, helpers |
| `rtl/isea_top.sv` | interposer + memory chiplets |
| `rtl/isea_interposer.sv` | everything on the interposer |
| `rtl/ahb_master_bi.sv`, `ahb_arbiter.sv`, `ahb_decoder.sv`, `ahb_default_slave.sv`, `ahb_interconnect.sv` | bus fabric |
| `rtl/transmon.sv`, `apu.sv`, `dpu.sv`, `saf.sv`, `prs.sv` | transaction monitor and its policies |
| `rtl/srs.sv`, `secure_if.sv`, `shared_mem_chiplet.sv`, `sram_64kb.sv` | other slaves and masters |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_isea_fft.sv` | FFT workload on the full-size system |
| `tb/tb_common.svh`, `tb/tb_master_tasks.svh`, `tb/tb_ahb_slave_model.sv` | testbench helpers |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each
has a watchdog that fails the run if it hangs. To build and run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/isea_pkg.sv tb/tb_isea_top.sv \
          -y rtl -y tb --top-module tb_isea_top -Mdir obj_isea_top -o sim
./obj_isea_top/sim
```

### The full-size test, `tb_isea_top`

`tb_isea_top` runs the whole system at its default size, with no parameter
overrides. It builds in about 20 s and simulates in well under a second. The
cores, PROC-0 and the configuration unit are behavioural models.

1. The configuration unit loads the memory policies through the Secure
   Interface: each core gets its own 4 kB region, one core is read-only, and
   core 2 gets the key policy.
2. PROC-0 loads the shared-register policies: the semaphore and the FFT
   ranges.
3. All 64 cores write their regions at once.
4. All 64 cores then attack at once:
   - writing a neighbour's region;
   - programming a policy register;
   - accessing an unmapped address;
   - writing the forbidden key value;
   - writing a read-only region.
5. The cores use and attack the semaphore.
6. The cores read everything back.

The test checks:

- data and responses;
- that denied writes left no trace;
- the latencies of the table above;
- that there is one interrupt per denied request.

It counts how often each mechanism occurred: policy loads, APU denials,
permission denials, DPU blocks, DPU-delayed writes, bus stalls, default-slave
errors, policy-register denials, semaphore protection, FFT range protection
and interrupts. It fails if any count is zero.

### A protected FFT, `tb_isea_fft`

This test runs a real computation through the full-size system under
policies. It is a 256-point complex FFT split as 32 × 8:

1. PROC-0 writes each of 32 cores its 8 input samples, in the core's own
   4 kB region.
2. The cores run concurrently. Each computes an 8-point DFT, applies the
   twiddle factors, and stores its partial results in its region.
3. PROC-0 gathers the partial results and does the final 32-point stage.

Policies per memory chiplet: one region per core, plus one read-write
policy over the whole chiplet for PROC-0. That is 9 of the 16 policies.
While the cores work, two cores without policies keep trying to overwrite
the partial results, and each computing core tries the same on its
neighbour when it finishes.

The result is compared with a direct DFT; the error from the cores'
integer rounding is a few units. The test also requires every attack to be
denied, with one interrupt per attack.

A point on sizing. With one policy per core plus one for PROC-0, a memory
chiplet at the default 16 policies can give protected regions to at most
15 cores. All 64 cores can only have regions if PROC-0 does without a
policy of its own, as in `tb_isea_top`, or if `N_APU` is raised.

### Other testbenches

The lower-level testbenches check each block against an independent model:

- random policies for `apu`/`dpu`;
- the three worked examples above for `transmon`;
- random concurrent masters for `ahb_interconnect` and the interposer.

Assertions in the RTL are active under `--assert`: one outstanding transfer
per BI, one-hot grant, no forwarding of denied transfers, and the two-cycle
ERROR.
