# At-speed logic BIST for a multi-clock IP core

A core with its own built-in self-test needs only three pins to test itself:
a start, a "done" flag and a pass/fail flag. This RTL is such a self-test for a
full-scan core whose logic runs in several clock domains. It is built on the
usual STUMPS structure: pseudo-random patterns are shifted into all scan chains
in parallel, and the responses are compressed into signatures. Three design
choices set it apart, and most of this document is about them:

* **At speed, without retuning the clocks.** Each domain's test clock is cut
  out of that domain's own functional clock. A pattern is launched and captured
  by two consecutive functional pulses, so the launch-to-capture time is exactly
  one functional period. No clock frequency is changed for test.
* **One slow scan-enable.** All domains share a single SE signal. It changes
  only in long, programmable gaps with no clock pulse in them, so it needs no
  clock-tree-style skew balancing.
* **One generator/compactor pair per clock domain.** Every domain has its own
  pattern generator (PRPG) and signature register (MISR). The shift path
  PRPG -> chain -> MISR therefore never crosses between two clock trees with
  unbalanced skew.

The core itself is not part of this RTL. Its clock, scan-enable and scan ports
are ports of `lbist_top`. The testbenches use a behavioural core model.

## Structure

Each clock domain `d` has this chain of blocks:

```
            CCKd                             TCKd                         CCKd
  PRPGd ──► PSd/SpEd ──► re-timing FFs ──► input ──► scan chains ──► SpCd ──► MISRd
  (LFSR)    (XOR fan-out)  (falling CCKd)  selector   of the core    (XOR)    (signature)
                                             ▲
                                 ext_si (top-up ATPG data)
```

Shared by all domains:

* one clock gating block per domain (`lbist_clk_gate`). It makes `TCKd` (the
  core's clock in that domain) and `CCKd` (the clock of the PRPG, re-timing FFs
  and MISR) from the domain's free-running clock `CKd`.
* one controller (`lbist_ctrl`) on `ck[0]`. It sequences the session, drives SE
  and reports `finish` and `result`.
* one test access port (`lbist_tap`, pins TCK/TSM/TDI/TDO). Through it you load
  the configuration (seeds, pattern count, golden signatures, gaps, mode) and
  read back the signatures.

| module | block |
|---|---|
| `lbist_pkg` | shared types: `gate_cmd_e`, LFSR tap table `lfsr_taps()`, phase-shifter tap formula `ps_tap()` |
| `lbist_prpg` | PRPG, 19-bit Fibonacci LFSR, seed load |
| `lbist_ps_spe` | phase shifter and space expander: three-input XOR per chain |
| `lbist_retime` | re-timing flip-flops on the falling edge of CCK |
| `lbist_input_sel` | random patterns or external top-up data into the chains |
| `lbist_spc` | space compactor: modulo XOR, or plain wiring if the MISR is wide enough |
| `lbist_misr` | MISR with clear and compress-enable |
| `lbist_icg` | latch-based clock gate |
| `lbist_clk_gate` | per-domain burst generator: INIT / SHIFT / CAPT pulses |
| `lbist_ctrl` | session sequencer |
| `lbist_tap` | 1149.1-style TAP with BYPASS, CONFIG and STATUS |
| `lbist_top` | the wrapper, with `N_DOM` domains |

## A session, pulse by pulse

A rising edge on `start` runs one session. The controller runs it as a fixed
list of commands to the clock gating blocks:

```
INIT      all domains   1 CCK pulse: PRPGs load their seeds, MISRs clear
SHIFT     all domains   shift_len pulses on TCK and CCK; MISRs off (first load only)
repeat num_patterns times:
   SE falls; wait d1
   CAPT  domain 1       2 TCK pulses on consecutive CK1 cycles
   wait d3
   CAPT  domain 2       2 TCK pulses on consecutive CK2 cycles
   ... (wait d3, CAPT) for each further domain
   SE rises; wait d5
   SHIFT all domains    shift_len pulses; MISRs on (unload responses, load next pattern)
compare all signatures with the golden values; finish = 1, result = (equal)
```

For two domains one capture window looks like this (`|` is a pulse):

```
TCK1  | | |     (d1)     | |      (d3)           (d5)     | | |
TCK2  | | |                          | |                  | | |
SE    ‾‾‾‾‾\______________________________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
        shift           C1 C2             C3 C4            shift
```

* **The at-speed pair.** The last shift pulse and the first capture pulse (C1)
  put a transition on some scan cells. The second pulse (C2) catches the result
  one functional CK1 period later. This is a launch-on-capture test at the
  domain's real speed, and it is why each CAPT burst is two adjacent pulses of
  the domain's own clock. The testbenches measure the C1 -> C2 and C3 -> C4
  spacing and require it to be exactly one period.
* **SE is slow.** SE changes only at the start of d1 and of d5. No clock pulse
  follows for at least d1 (or d5) controller cycles plus the handshake latency.
  So one SE net can serve every domain however slowly it settles.
* **d3 separates the domains.** Domain 2 captures only after domain 1 has
  finished. d3 is set larger than the worst skew between the two clock trees.
  Logic that crosses from one domain into the other therefore sees stable values
  and needs no extra hold flip-flops on functional paths. With more than two
  domains they capture in order 1, 2, ..., n, with d3 between each pair.
* **MISRs are off in the first shift window.** The first unload holds the core's
  power-up state, which is undefined, so the MISRs do not take it in. The final
  SHIFT unloads the responses to the last pattern.

The gaps `d1`, `d3` and `d5` count cycles of `ck[0]`. The parameters `D1`, `D3`
and `D5` set their reset values (4 each). You can change them through the TAP.

### Cost per pattern

One pattern takes:

* one shift window of `shift_len` pulses in each domain, and
* one capture window of `d1 + (n-1)*d3 + d5` controller cycles, plus a
  handshake of about 10–14 cycles per command.

At the defaults, with CK1 at period 10 and CK2 at period 12, the full-size
testbench measures 180 CK1 cycles per pattern. 104 of them are shift cycles.
A session of 20 000 patterns takes 3.6 M CK1 cycles.

## Clock gating and the req/ack handshake

The controller runs on `ck[0]`. The other domains may run at any unrelated
frequency, so every command crosses a clock boundary through a four-phase
handshake:

1. The controller sets `cmd` (and `shift_len`) and raises `req[d]`. `cmd` and
   `shift_len` stay fixed while `req` is high, and an assertion checks this.
   A second assertion checks that SE never changes while a burst is requested
   or running.
2. The gating block synchronises `req` with two flip-flops. It then raises its
   internal gate enable for exactly N cycles: 1 for INIT (CCK only),
   `shift_len` for SHIFT (TCK and CCK), 2 for CAPT (TCK only).
3. It raises `ack[d]` on the edge of the last pulse. The controller
   synchronises `ack`, drops `req`, and waits for `ack` to fall.

A latch-and-AND clock gate (`lbist_icg`) applies the enable. The enable is
latched while the clock is low, so only whole pulses get through. An enable set
at one rising edge opens the gate for the next pulse, and a burst starts three
CKd cycles after `req` rises. The latches are intended and are the only latches
in the design. Outside a session (`test_mode` low) `TCKd` is simply `CKd`, and
the core runs normally.

### Why CCK and TCK are two clocks

The PRPG and the MISR run on `CCKd`, and the scan chains run on `TCKd`. In the
shift window both clocks carry the same pulses. The physical design must place
`CCKd` *earlier* in phase than `TCKd`. Then the PRPG -> chain path can only have
hold problems, and the chain -> MISR path only setup problems:

* The hold problem is removed by the re-timing flip-flops (`lbist_retime`,
  `RETIME = 1`). They take the phase-shifter outputs on the falling edge of
  CCK and hold them through the next rising edge of TCK.
* The setup problem is kept small by putting little logic between the scan
  outputs and the MISR. For this reason the default configuration compacts
  nothing.

Either way the chains see the same bit stream, so `RETIME` does not change the
signatures. The phase offset itself belongs to the clock tree. In RTL both
gates are the same cell and the two clocks rise together.

## Pattern generation and compaction

* **PRPG**: a 19-bit LFSR with feedback taps at stages 19, 6, 2 and 1. This is
  the polynomial x^19 + x^6 + x^2 + x + 1, which gives maximal length (period
  2^19 - 1; the PRPG testbench measures it). Stage 1 is bit 0, and the register
  shifts towards the MSB.
* **PS/SpE**: chain `j` gets the XOR of PRPG stages `a`, `b` and `c`, where
  `a = j mod L`, `b = (a + 1 + (3j+2) mod (L-1)) mod L` and
  `c = (a + 1 + (5j+7) mod (L-1)) mod L`, for a PRPG of length `L`. If `c`
  equals `b`, it moves on by one; if it then equals `a`, it moves on by one
  again. The three taps are always distinct. Because their spacing changes from
  chain to chain, neighbouring chains never get the same stream one cycle apart.
  The same network fans 19 bits out to any number of chains.
* **Input selector**: `topup = 1` connects `ext_si` to the chains instead. A
  tester then applies deterministic top-up patterns for the faults that random
  patterns miss. The session sequence stays the same, and the tester reads the
  core's scan outputs directly.
* **SpC**: output `k` is the XOR of scan outputs `i` with `i mod W = k`. When
  there are no more chains than MISR bits, it is plain wiring.
* **MISR**: `sig' = {sig[W-2:0], fb} ^ inputs`. The feedback `fb` uses the
  maximal-length taps for `W`: (19, 6, 2, 1) for 19 bits, (99, 97, 92, 91) for
  99 bits, and (80, 79, 43, 42) for 80 bits. Stage `i` takes input `i`.

## Configuration and status registers

The TAP has a 4-bit instruction register. Reset and Test-Logic-Reset select
BYPASS. The instructions are:

| IR | register | access |
|---|---|---|
| `1111` | BYPASS, 1 bit | |
| `0001` | CONFIG | Capture reads the current configuration; Update writes it |
| `0010` | STATUS | read only |

Registers shift LSB first. Fields are listed from bit 0 upwards:

* CONFIG (`cfg_t` in `lbist_top`): `seed[0] .. seed[n-1]` (PRPG_LEN bits
  each), `golden` (SIG_W bits), `num_patterns` (16), `shift_len` (16), `d1`
  (8), `d3` (8), `d5` (8), `topup` (1). At the defaults it is 213 bits.
* STATUS (`stat_t`): `sig` (SIG_W bits), `busy`, `result`, `finish`.

Both `golden` and `sig` are the MISRs of domains 1..n concatenated, domain 1
in the low bits. The reset configuration holds:

* the seeds: `SEED_BASE` for domain 1, and `SEED_BASE ^ (d * 19'h36A75)` for
  domain d+1,
* `NUM_PATTERNS`, `CHAIN_LEN`, `D1`, `D3` and `D5`,
* a golden signature of 0.

A normal flow:

1. Load CONFIG, with golden signatures taken from a fault-free simulation.
2. Pulse `start`.
3. Wait for `finish`.
4. Read `result`.

The other domains read CONFIG without synchronisers. It must therefore not be
rewritten while a session runs.

## Parameters and the two reference applications

Every parameter of `lbist_top` defaults to the smaller of two commercial CPU
cores, "core X":

| parameter | default | meaning |
|---|---|---|
| `N_DOM` | 2 | clock domains = PRPG/MISR pairs |
| `N_CH` | `'{99, 1}` | scan chains per domain |
| `MISR_W` | `'{99, 19}` | MISR length per domain |
| `TOT_CH`, `SIG_W` | 100, 118 | sums of `N_CH` and `MISR_W`; must be set to match |
| `CHAIN_LEN` | 104 | longest chain = shift pulses per window |
| `PRPG_LEN` | 19 | |
| `NUM_PATTERNS` | 20000 | |
| `D1`, `D3`, `D5` | 4 | gaps, in `ck[0]` cycles |
| `RETIME` | 1 | re-timing FFs on |
| `SEED_BASE` | `19'h2B5A1` | |

The 99 + 1 split of the 100 chains is inferred, not given. Core X has a 99-bit
and a 19-bit MISR and no space compactor, so the large domain must hold 99
chains.

The larger core, "core Y", has 8 domains, 106 chains of up to 345 cells, one
80-bit and seven 19-bit MISRs. It is `N_DOM = 8` with the matching lists. Its
per-domain chain counts are not known. `tb_lbist_core_y` uses 80 chains in the
main domain and 4, 4, 4, 4, 4, 3 and 3 chains in the others. Signals numbered
across domains (`scan_in`, `scan_out`, `ext_si`) give domain d the bits from
`N_CH[0] + ... + N_CH[d-1]` upwards.

## Simulating

All testbenches check themselves and end with a line
`TB_RESULT checks=N failures=M`. Each one:

1. compiles `rtl/lbist_pkg.sv` first, and `tb/lbist_ref_pkg.sv` if it uses the
   reference model,
2. finds the other modules by file name.

For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_lbist_top rtl/lbist_pkg.sv tb/lbist_ref_pkg.sv tb/tb_lbist_top.sv
./obj_dir/Vtb_lbist_top
```

| testbench | what it shows |
|---|---|
| `tb_lbist_prpg`, `tb_lbist_misr`, `tb_lbist_ps_spe`, `tb_lbist_spc`, `tb_lbist_input_sel`, `tb_lbist_retime` | each datapath block against an explicit model; PRPG period 2^19 - 1 |
| `tb_lbist_clk_gate` | pulse counts per command, C1 -> C2 one period apart, handshake, functional pass-through |
| `tb_lbist_ctrl` | command order, SE level per command, d1/d3/d5 gaps, pass and fail results |
| `tb_lbist_tap` | CONFIG write/read-back, STATUS, BYPASS, reset by TMS |
| `tb_lbist_top` | small 2-domain system (clock periods 10 and 16) through the pins only; exact signatures from the reference model; passing, failing (injected core fault) and top-up sessions |
| `tb_lbist_top_full` | one complete 20 000-pattern session at the default size; about 70 s in Verilator |
| `tb_lbist_core_y` | 8-domain core-Y shape with 8 different clock periods, 2000 patterns, domain capture order |

`lbist_ref_pkg` replays a session bit by bit in plain procedural code. It
implements the LFSR taps, the phase-shifter formula, the capture order and the
MISR independently of the RTL. The expected signatures in the system tests come
from it. `lbist_core_model` is the stand-in core. Each domain has logic inside
it and a path from the previous domain, so the d3 ordering matters. Its `fault`
input forces one capture value to 0.

## What comes from the source description and what does not

Taken from the published scheme:

* the block structure, with a TPG, input selector, ODC, clock gating,
  controller and boundary-scan access,
* one PRPG–MISR pair per domain,
* the double capture at functional speed,
* the single slow SE and the d1/d3/d5 gaps,
* CCK ahead of TCK, with re-timing FFs,
* no space compaction in the applications,
* the core X and core Y sizes (PRPG 19, MISR 19/99/80, chains, 20K patterns).

Chosen here, because the source gives only the purpose of these parts:

* every polynomial and the phase-shifter formula,
* the req/ack handshake and the command set,
* the controller clock (`ck[0]`),
* where exactly SE switches: at the start of d1 and of d5,
* holding the MISRs off in the first shift window,
* pass meaning "all signatures equal golden",
* the TAP instruction set and register layout,
* the default gap lengths and seeds,
* the capture order for more than two domains,
* the chain split per domain.

Not built:

* **The core.** The X-blocking, the observation test points (about 1K per core
  in the applications) and the scan cells on the core's I/O are changes to the
  core under test. They do not belong to the BIST logic.
* **The CCK-before-TCK phase lead.** It can only exist in the clock tree, not
  in RTL.
* **A full IEEE 1149.1 implementation.** The TAP has no TRST pin, no IDCODE,
  and no boundary register or EXTEST/SAMPLE. `tdo` is driven to 0 rather than
  tri-stated outside the shift states.
* **A top-up flow controlled by the tester.** Top-up mode reuses the BIST
  sequence.

How far the RTL has been checked:

* Every block has a testbench against an explicit model, and each testbench
  catches a deliberately broken copy of its block.
* The whole wrapper matches the independent reference model bit for bit at
  three sizes: small, core X at full size, and core Y with fewer patterns.
* Nothing has been checked on silicon or at gate level. Fault coverage and area
  depend on the core and its test points, and are not claims of this RTL.
