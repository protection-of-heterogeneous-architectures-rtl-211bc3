# Distributed hardware firewalls for an AXI multiprocessor system-on-chip

Several processors and IP cores share one bus and one external memory. Any of
them could be compromised: a processor might run tampered code, or an IP might
be replaced by a malicious one. Nothing stops such a master from reading or
overwriting memory it should never touch. Nothing protects the off-chip DRAM
from someone probing or rewriting it.

This design does not put one central security unit on the bus. It puts a
small **firewall at every boundary** where an IP meets the bus. Every single
AXI transaction is checked against a table of security policies before it is
allowed through:

- A **Local Firewall** guards a processor or an on-chip slave. It filters by
  address range, read/write right, data size and burst length.
- A **Cryptographic Firewall** guards the external-memory controller. It does
  the same checks, then encrypts and/or authenticates each word with AES-GCM.
  The authentication tags and anti-replay timestamps stay on chip.
- A firewall that refuses an access raises a flag. The flags reach a
  **monitoring IP**, which interrupts an **update processor**. That processor
  rewrites the policies over a separate **security bus**.
- While the update runs, the attacked firewall **freezes** its handshakes, so
  nothing can get through under the old or a half-written policy.

The RTL is SystemVerilog-2017, synthesizable. It is written for the
case-study system: two processors, a shared Block RAM, an image-thresholding
IP and five 32 MB external-memory sections.

## System view

```
 MB1 ──FW0──┐                     ┌──FW2── shared BRAM (16 KiB)
            ├── AXI interconnect ─┼──FW3── threshold IP
 MB2 ──FW1──┘   (round robin)     └──FW4── (crypto) ── memory controller ── DDR
               flags ──► custom bus ──► monitoring IP (reg_m) ──► interrupt controller ──► irq
 update CPU ── security bus (AXI-Lite) ──► monitoring IP, timer/log, bram_ctrl x5
                                            (policy words, recfgEn, AES keys)
```

`mpsoc_top` builds this system. The processors, the update processor and
the DDR controller are not part of the RTL. They are the top's ports:

| Port | Dir | Meaning |
|------|-----|---------|
| `mb_req[2]` / `mb_rsp[2]` | in / out | AXI-4 master ports of MB1 and MB2 (`axi_req_t`, `axi_rsp_t`, single beat) |
| `upd_req` / `upd_rsp` | in / out | AXI-Lite master port of the update processor |
| `irq` | out | interrupt to the update processor |
| `mem_req` / `mem_rsp` | out / in | word port to the external memory controller |
| `reg_m` | out | monitoring main register (debug view) |
| `fw_frozen`, `fw_ready_event`, `fw_recfg_en` | out | per-firewall status, FW0..FW4 |

### Address maps (this design's choice; the paper gives no addresses)

| System bus | Target |
|---|---|
| `0x4000_0000` | shared BRAM, 16 KiB |
| `0x4400_0000` | threshold IP, 16 registers |
| `0x8000_0000` + 32 MB·k | external sections, in order C11, D21, D11, C21, D12 |

| Security bus | Target |
|---|---|
| `0x0000` | monitoring IP: `reg_i` at 4·i, `reg_m` at 0x40; writing 1s clears flags |
| `0x1000` | timer/log: counter 0x0, append 0x4, count 0x8, timestamps 0x100+4e, codes 0x200+4e |
| `0x2000 + 0x1000·i` | `bram_ctrl` of FWi: policy word p at 4·p, recfgEn at 0x100, key words at 0x200+4k |

### Case-study rights

| | shared BRAM | image IP | C21, D21 | C11, D11, D12 |
|---|---|---|---|---|
| MB1 (FW0) | read only | read/write | no policy → nF | read/write |
| MB2 (FW1) | read/write | write only | read/write | no policy → nF |

Protection modes of the sections (in FW4):

- C11 and D11: confidentiality + integrity.
- D12: integrity only.
- C21 and D21: plaintext.

## The security policy word

A policy is one 32-bit word in a small dual-port Block RAM, the `sp_bram`
inside each firewall. The bit layout is this design's own choice:

| Bits | Field | Meaning |
|---|---|---|
| 1:0 | `sp_rnw` | 00 no access, 01 read only, 10 write only, 11 read/write |
| 4:2 | `sp_format` | allowed AxSIZE (2 = 32-bit) |
| 12:5 | `sp_param` | allowed AxLEN (0 = single beat) |
| 13 | `cmode` | encrypt (AES-CTR) |
| 14 | `imode` | authenticate (GHASH tag) |
| 16:15 | `key_idx` | AES/hash key pair in the crypto firewall |

`fw_pkg::mk_policy()` builds a word. Word 0 of each BRAM is reserved: policy
address 0 means "no policy for this address".

## Inside a firewall: one check, six cycles

A Local Firewall (`local_firewall`) has three parts:

- A **Firewall Interface** (`firewall_interface`), which holds the
  transaction.
- A **Security Builder** (`security_builder`), which decides on it.
- The **policy BRAM** (`sp_bram`), which port A reads during checks and
  port B writes during updates.

For a request valid at cycle T:

| Cycle | Unit | Action |
|---|---|---|
| T | Decision Module | captures AR, or AW together with W; starts the check |
| T+1 | Correspondence Table (`corr_table`) | compares the address with N `[low, high[` windows in parallel and ORs the hits into a BRAM address (0 = none) |
| T+2 | Reading Module (`reading_module`) | reads the policy word into its buffer |
| T+3 | Reading Module | presents the fields |
| T+4 | Checking Module (`checking_module`) | preliminary read/write test, then comparators on right, AxSIZE and AxLEN; result `check_out` |
| T+6 | Synchronization Module | drives the request onto the bus |

So one firewall costs 6 cycles: 2 in the interface and 4 in the check.

When no window matches, the Security Builder goes straight to FAIL after
2 cycles and raises **nF** (notFound). When a policy is found but refuses
the access, it raises **cF** (check). In both cases:

- the request never reaches the bus;
- the firewall itself answers SLVERR (read data 0).

The FSM states are Idle → Addr → Par → Chk → OK/FAIL, plus Update.

**Where this departs from the paper.** The paper decides read versus write
from ARID ≠ 0. That test cannot tell a read with ID 0 from a write, so this
design uses the channel the request arrived on. The paper's synchronization
flip-flops are clocked by `check_out`. Here they are ordinary `clk`
flip-flops with `check_out` as the enable, so the design has a single clock
domain.

## Freeze, recfgEn and readyEvent: changing policies under traffic

This is the subtle part. A policy BRAM has two ports, and the update
processor writes port B while the firewall may be reading port A. The design
keeps them apart by freezing the firewall:

1. **Freeze.** After an attack (`FREEZE_ON_ATTACK = 1`), or whenever
   recfgEn is 1, the Firewall Interface holds its AxREADY/WREADY outputs low.
   The requester's next transaction just waits.
2. **Update state.** The update processor writes 1 to recfgEn. Once no check
   is in flight, the Security Builder enters its Update state and starts no
   checks.
3. **Rewrite.** The processor rewrites policy words, one BRAM write per word,
   so N words take N cycles.
4. **Release.** The processor writes 0 to recfgEn. The freeze lifts one cycle
   later.
5. **readyEvent.** A request that arrived while frozen sets the readyEvent
   register. After the release it is checked against the *new* policy, not
   the one that was in force when it arrived.

The policy words themselves carry the security level the update processor
chooses for a component after an attack. The paper's levels map directly
onto `sp_rnw`: an *intermediate* mode for non-critical IPs (01, reads only,
so their state can still be backed up) and a *quarantine* mode for critical
ones (00, nothing passes). The hardware does not pick the level; the update
software does. The Correspondence Tables are fixed at build time, so an update
changes what is allowed in an address window, not the windows themselves.

Authentication failures in the crypto firewall (aF) raise the flag and answer
SLVERR but do not freeze. The paper leaves that case open.

## Monitoring path

Each firewall pulses its flags for one cycle.

- **Custom bus** (`custom_bus`). It carries one (firewall index, flag image)
  report per cycle. When several firewalls report in the same cycle, the
  reports wait in pending bits and the lowest index goes first, so none is
  lost.
- **Monitoring IP** (`monitoring_ip`). It holds one `reg_i` per firewall.
  Flags are active low and sticky. The significant bits are cF in bit 31 and
  nF in bit 30; the crypto firewall also has iF (authentication) in bit 29.
  All other bits read 0.
- **reg_m.** This register packs the significant bits from bit 31 downward:
  FW0 31:30, FW1 29:28, FW2 27:26, FW3 25:24, FW4 23:21. The unused low bits
  read 1.
- **Interrupt controller** (`interrupt_controller`). It raises `irq` two
  cycles after any `reg_m` bit becomes 0.
- **Clearing.** Software clears a flag by writing 1s back to `reg_i`.

A lone report is on the custom bus one cycle after the firewall's flag pulse,
which matches the paper's one-cycle flag extraction. `reg_i` and `reg_m`
show it one cycle later, and `irq` follows two cycles after that.

## Cryptographic Firewall and the external memory

`crypto_firewall` is a Local Firewall whose downstream side is
`crypto_module` instead of the bus. The policy word that the check has just
read also selects the protection mode:

| cmode | imode | Mode | Memory write | Tag |
|---|---|---|---|---|
| 1 | 1 | C+I | the ciphertext | on chip |
| 0 | 1 | I only (GMAC over the plaintext, as AAD) | the plaintext | on chip |
| 0 | 0 | plaintext | the plaintext | none |

The framing is standard GCM with a 96-bit IV and one 32-bit block:

```
IV   = {32'h0, byte address, timestamp}
CPT0 = {IV, 32'h1}        CPT1 = CPT0 + 1
CT   = PT ^ E_K(CPT1)[127:96]
S    = ((D·H) ^ L)·H      D = {word, 96'b0}, L = {len(AAD), len(C)} in bits
TAG  = (S ^ E_K(CPT0))[127:96]
```

- **Timestamps.** Each word has a timestamp counter. Every protected write
  increments it, so a replayed old (word, tag) pair fails.
- **Storage.** The timestamp memory and the 32-bit tag memory are indexed by
  word address modulo `TS_DEPTH`.
- **Reads.** A read recomputes the tag. On a mismatch the firewall raises aF
  and answers SLVERR with data 0.
- **Keys.** The key pair K, H = E_K(0) sits in a key register file. The
  update processor loads it through `bram_ctrl`, and the policy's `key_idx`
  selects the pair.
- **Cores.** `aes128_core` does one round per cycle. `gf128_mul` does one
  GF(2^128) multiply per cycle.
- **Latency.** C+I takes E_K(CPT0) + E_K(CPT1) + 2 multiplies = 22 cycles,
  the paper's 10 + (10+2)·N for N = 1. I-only takes 12 cycles.

**Departures from the paper.**

- The paper also says a 128-bit tag is kept per 128-bit block. This design
  follows its datapath figure instead: 32-bit words and 32-bit tags.
- Keys are not stored inside the policy words; only their index is.
- A protected word that was never written does not authenticate.

## Latency compared with the paper

| Scenario | Path | This RTL | Paper |
|---|---|---|---|
| S0 | one Local Firewall | 6 | 6 |
| S1 | MB2 → threshold IP (two Local Firewalls) | 6 + 1 (bus grant) + 6 = 13 | 12 |
| S2 | MB1 → C+I section | 6 + 1 + 6 + 22 + 1 = 36 | 28 |
| S3 | MB1 → integrity-only section | 6 + 1 + 6 + 12 + 1 = 26 | 18 |
| S4 | MB2 → plaintext section | 6 + 1 + 6 + 1 = 14 | 16 |
| — | reg_m bit to irq | 2 | 2 |
| — | N policy words | N | N |

All counts are in cycles.

The paper's S2 total of 28 is 6 (one firewall check) + 22 (AES-GCM). It does
not count the crypto firewall's own policy check, the bus grant or the
memory-port register, which this design has. Its S3 and S4 figures cannot be
rebuilt from the text, so the numbers above are this design's own.

## Other blocks

- **`axi_interconnect`**: the system bus.
  - Shared, one transaction at a time, round-robin grant in 1 cycle.
  - Windows are decoded as `[base, base+size[`; an unmapped address gets
    DECERR.
  - Single-beat transactions only.
- **`security_bus`**: the AXI-Lite crossbar, one master to N slaves, with
  DECERR for holes.
- **`bram_ctrl`**: turns security-bus writes into policy BRAM writes, the
  recfgEn strobe and key writes.
- **`axil_reg_port`**: the AXI-Lite front end that `bram_ctrl`, the timer
  and the monitoring IP share. Write data is applied in one cycle; read
  data is registered.
- **`timer_log`**: a free-running counter plus a 32-entry event log
  (timestamp and code).
- **`shared_bram`**: 4096 × 32-bit memory with byte strobes.
- **`threshold_ip`**: 16 pixel registers, four 8-bit pixels each. A read
  returns 255 for pixels at or above the hard-wired `THRESHOLD` (128) and
  0 for the rest.

## Not in the RTL

- The MicroBlaze processors, the update processor with its software and code
  ROM, the processor-local memories, the vendor IPIF glue, the DDR controller
  and the DRAM. These are outside the design and appear only as top-level
  ports or in the testbench.
- Multi-beat AXI bursts.
- Several outstanding transactions per firewall.
- The paper's application-level results (three image applications with about
  4–34 million external accesses each) need real processors and software.
  The per-access costs they depend on are the latencies above.
- The default on-chip tag store covers 16 KiB of protected data
  (`TS_DEPTH = 4096`). The paper's board protects 1.87 MB; raise `TS_DEPTH`
  for more.

## Files and simulation

- `rtl/fw_pkg.sv` holds the shared types. Every other file in `rtl/` is one
  module.
- Each module has a self-checking testbench `tb/tb_<module>.sv`, except that
  `axil_reg_port` is tested through `tb_bram_ctrl`.
- Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
- `tb/tb_mpsoc_top.sv` runs the whole chip at its default parameters. It
  stands in for the processors, the update processor and the DDR. It makes
  every mechanism happen at least once and counts each one:
  - pass, cF, nF, aF, freeze and readyEvent;
  - policy update, recfgEn and irq;
  - C+I, I-only and plaintext writes;
  - replay detection, the log entry and thresholding;
  - the read-only and quarantine security modes.

  It checks C+I ciphertexts against standard AES-GCM values and checks the
  S0–S4 cycle counts above.

To run one testbench with plain Verilator (from the directory that holds
`rtl/` and `tb/`; the package must be compiled first):

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_mpsoc_top \
    rtl/fw_pkg.sv $(ls rtl/*.sv | grep -v fw_pkg) tb/tb_mpsoc_top.sv
./obj_dir/Vtb_mpsoc_top
```

The full-chip run finishes in well under a second of wall time after a
build of about ten seconds. To build your own system,
instantiate `local_firewall` or `crypto_firewall` with `RANGE_LOW`,
`RANGE_HIGH`, `RANGE_OUT` (the Correspondence Table) and `SP_INIT` (the
initial policy words), as `mpsoc_top` does.
