# Secure NTT: a pipelined Kyber NTT that checks its own control flow and timing

A hardware NTT is driven by a handful of enable, start and reset lines. A
hardware Trojan or an aged, overheated region of an FPGA does not need to
touch the arithmetic to break it: dropping a single `wr_en`, firing
`barrett_strt` one cycle late or stretching the schedule by one cycle is
enough to corrupt the transform. This design wraps a five-stage pipelined
number-theoretic transform (n = 256, q = 3329, the Kyber parameters) with
two independent monitors:

* a **control-flow integrity (CFI) checker**. It rebuilds the expected state
  of the pipeline from a shift register of its own and compares it with the
  control lines actually delivered, every cycle;
* a **clock-cycle counter (CCC)**. It counts how long each active-high
  control line was asserted during a run and how long the run took.

Around the monitors sits a **correction controller**. It decides per fault
whether to redo the loops that were in flight, reload the NTT instance, or
move the computation to another instance. The instances stand for
partial-reconfiguration (PR) regions of an FPGA. All of this is
synthesizable SystemVerilog, and every block has a self-checking
testbench. A fault injector emulates Trojan attacks on any subset of the ten
control lines in any cycle.

## 1. The datapath and its schedule

### Arithmetic

The input sits in `poly_mem`: 256 coefficients of 12 bits in natural order.
The transform is an in-place Cooley–Tukey NTT:

```
for each stage (hl = 128, 64, ..., 1):
  for each group j, for each k < hl:
      k0 = 2*hl*j + k,  k1 = k0 + hl
      V  = A[k1] * w_j mod q          (two-stage Barrett multiplier)
      A[k0] = (A[k0] + V) * w_r mod q
      A[k1] = (A[k0] - V) * w_r mod q
```

* w_j = ω^bitrev(j), with ω = 17, a primitive 256-th root of unity mod 3329.
  The twiddle ROM `w_mem` holds ω^t for t = 0..255 and is filled at
  elaboration by a constant function, so there is no data file.
* w_r is the *local mask* (LM). It is a second ROM read, ω^mask_idx, and
  multiplies every butterfly result. The polynomial therefore never passes
  through the pipeline unmasked. `mask_idx = 0` gives w_r = 1, a plain NTT.
* The output is in bit-reversed order and scaled by w_r^8:
  `out[p] = w_r^8 · A(ω^bitrev8(p))`. Undoing the mask is one constant
  multiplication per coefficient, which software does.

Barrett reduction uses k = 24 and m = ⌊2^24/3329⌋ = 5039, with two
conditional subtractions. The modular helpers live in `ntt_pkg`.

### Pipeline and the CSR

One butterfly is issued per cycle. The CTRL unit (`ntt_ctrl`) holds a 4-bit
Control Status Register (CSR). Each cycle it shifts right and takes the
"issue" bit at the top, so bit i of the CSR says which stage holds valid
work:

| stage | CSR bit | what happens |
|---|---|---|
| issue | – | loop counter, j/k/hl decoded from it |
| read | CSR[3] = `rd_en` | A[k0], A[k1] read; w_j registered |
| Barrett 1 | CSR[2] | product A[k1]·w_j registered |
| Barrett 2 | CSR[1] | reduced V registered |
| add/sub/write | CSR[0] = `wr_en` = `uv_strt` | (U±V)·w_r written back |

All other control lines are Boolean functions of the CSR:

```
barrett_strt = CSR[1] | CSR[2]     barrett_rst = ~barrett_strt
polymem_ce   = CSR[0] | CSR[3]     uv_rst      = ~CSR[0]
barrett_done = registered "two cycles of barrett_strt"   (lines up with wr_en)
CTRL_rst = uBuff_rst = NTT reset
```

A full transform is 8 · 128 = 1024 butterflies. Counted from the start pulse
to `done`, it takes 1024 + 4 = **1028 cycles**. Addresses for the write are
the read addresses delayed by three cycles in `addr_gen`. The `u` operand
is delayed by the two-register `u_buffer`, so it meets V at the add/sub
stage.

The pipeline has no interlock. A read could fetch a stale value only if it
reached an address that one of the three butterflies still in flight is
about to write, and that can happen only at a stage boundary. The last
butterflies of a stage write the highest addresses (for example 125..127 and
253..255 at the end of stage hl = 128). The first butterflies of the next
stage read the lowest ones (0..2 and 64..66). So no read overtakes a pending
write. The full-size testbenches confirm this against a reference
transform.

## 2. Fault detection

### The ten monitored lines

The CTRL unit drives the control/status word `ctrl_sig_t`. Its bit order is
the one used by the fault injector:

| bit | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|---|
| line | rd_en | wr_en | polymem_ce | CTRL_rst | uBuff_rst | barrett_rst | barrett_strt | barrett_done | uv_rst | uv_strt |

Inside each NTT instance the raw word passes through `F_r AND signal`
gates before it reaches the sub-blocks. That is the attack point. The
monitors look at the word *after* the gates, that is, at what the
sub-blocks really receive.

### CFI: a second, independent CSR

`cfi_detector` keeps a Right Shift Register (RSR). RSR[3] is `rd_en` as it
arrives at the memory, and RSR[2:0] are three flip-flops that shift it
along. It shares no logic with the CTRL unit. In a clean run RSR equals CSR
in every cycle. Three checks run in every cycle, combinationally, so a
fault is flagged in the very cycle it appears:

```
barrett_cfi_fault  unless barrett_strt == ~barrett_rst
                          && barrett_strt == (CSR[1]|CSR[2]) == (RSR[1]|RSR[2])
                          && barrett_done == wr_en
polymem_cfi_fault  unless rd_en == RSR[3] && wr_en == RSR[0]
                          && polymem_ce == (RSR[0]|RSR[3])
uv_cfi_fault       unless CSR[3] == RSR[3] && CSR[0] == RSR[0]
                          && uv_strt == ~uv_rst
cfi_fault = barrett_cfi_fault | polymem_cfi_fault | uv_cfi_fault
```

A Trojan that corrupts the CSR itself is caught because the RSR disagrees.
A Trojan on a single delivered line is caught because that line disagrees
with CSR/RSR or with its partner line.

Some blocked lines change nothing, for example `CTRL_rst` or `uBuff_rst`,
which are already 0 during a run. Blocking `uBuff_rst` in the last cycles
is harmless. The end-to-end testbench counts these "ineffective" attacks
separately and checks that the result is still correct.

### CCC: counting cycles

A run may start at loop s > 0 after a correction. For a run of E =
1024 − s butterflies, `ccc` expects exactly:

| quantity | expected |
|---|---|
| cycles with rd_en, wr_en, barrett_done, uv_strt high | E |
| cycles with barrett_strt high | E + 1 |
| cycles with polymem_ce high | E + 3 (2E if E < 3) |
| cycles from start to done | E + 4 |

It compares the counts when `done` rises and raises `ccc_fault` one cycle
later on any mismatch. It also raises `ccc_fault` as soon as the run
outlasts E + 4 cycles without `done`, which catches a stalled controller.
CFI catches a line that is wrong in a given cycle. CCC catches a schedule
that is shifted or stretched, which the cycle-local CFI rules can miss
because CSR and RSR shift together.

## 3. Fault correction

### Regions and interconnects

`secure_ntt_top` holds M = 4 copies of `ntt_core`, one per PR region. Only
the region chosen by `interconnect_ctrl` is active. The others are held in
reset, standing for regions with no bitstream loaded. Three bus
interconnects connect the active region to the shared parts:

* `polymem_interconnect`: j, k, hl to the address generator; rd_en, wr_en,
  ce and U±V to `poly_mem`. It blocks writes while the controller says
  *suppress*, and reports every write that goes through as a *commit*. It
  also keeps a copy of the input polynomial, made while the host loads it.
  This copy can be written back in 256 cycles.
* `wmem_interconnect`: the active region's reversed j to the ROM address,
  plus the mask index register.
* `inctrl_interconnect`: NTT_rst/NTT_strt to the active region only. It also
  holds the *resume counter*, the number of butterflies committed in the
  current transform. A restarted region begins at that loop.

### The controller (`fc_ctrl`)

```
IDLE --host_start--> RST --> START --> RUN --done / ccc_fault--> CHECK --ok--> FINISH --> IDLE (done)
                      ^                 |                          |
                      |            cfi_fault                    ccc_fault
                      |                 v                          v
                      +--- repeat --- decide               decide, clear resume
                      +--- ack ---- PR_WAIT  <-- reload/relocate --+
                      +------------ RESTORE  (input copied back) <-+
```

* **cfi fault.** Writes are blocked in the same cycle the flag rises, so no
  result of a corrupted butterfly reaches memory. Butterflies already in
  the pipeline are discarded with the reset. The region restarts from the
  resume counter, at the first butterfly whose result was not written. Its
  inputs are still intact in `poly_mem`, because the NTT is in place and
  every butterfly writes the two words it read.
* **ccc fault.** The fault is known only at the end, after wrong results may
  have been written. So the input copy is restored and the whole transform
  runs again from loop 0.
* **Choosing the measure.** Each fault increments the per-region count n of
  its kind (`n_cfi[i]` or `n_ccc[i]`, 16-bit saturating). Then:
  * TH_RELD < n < TH_RELC: **reload**. The same bitstream is written again
    into the same region, then the run repeats.
  * n > TH_RELC: **relocate**. The host chooses a region, writes it into
    `interconnect_ctrl`, then the run repeats.
  * otherwise: **repeat** only.

  The thresholds are 256 and 512 by default, separately for cfi and ccc.
  A count equal to a threshold gets a plain repeat.
* **PR handshake.** Reload and relocate raise `pr_req` with `pr_kind` and
  `pr_core` and wait for `pr_ack`. The host side does the configuration
  through ICAP and, for a relocation, picks the region. It is not part of
  the RTL.
* **Counters.** `nr[i]` counts completed runs per region. `n_meas[]`
  counts how often each measure was taken.

### Choosing a region (host side)

The end-to-end testbench plays the host. For a relocation it computes, for
every region i, a risk factor:

```
R_i = W_cfi * (n_cfi[i]/NR_i) / max_k(n_cfi[k]/NR_k)
    + W_ccc * (n_ccc[i]/NR_i) / max_k(n_ccc[k]/NR_k)
```

with W_cfi = W_ccc = 0.5. The fault counts are taken per completed run so
that a region that is used often is not penalised just for its use. The
model uses NR + 1 in place of NR, so that a region that has never run
avoids a division by zero. It chooses the region with the lowest R_i. If R_i
ties, it takes the region with more completed runs `nr`. It then writes
`ic_sel` and acknowledges. Real hardware would do this in the host
application and drive ICAP. The RTL exposes everything that application
needs as ports (`nr`, `n_cfi`, `n_ccc`, `pr_*`, `ic_*`).

## 4. The fault injector

`fault_injector` models the Trojan. The host arms it with R_t and R_s, both
10 bits. It counts cycles from the next NTT start. When the count reaches
R_t, the 10-bit word F_r equals R_s for one cycle; at all other times F_r
is all ones. Each 0 bit blocks the matching control line. The injector then
disarms (one shot).

With `mode = 1` it instead freezes the CTRL unit for one cycle (`hold`).
That emulates a Trojan that adds a delay, and it is what the CCC is there
to catch.

The injector is wired only to the active region, as in an FPGA, where the
attack travels with the bitstream location.

## 5. Interface of `secure_ntt_top`

| group | ports | use |
|---|---|---|
| host memory | `host_we`, `host_addr[7:0]`, `host_wdata[11:0]`, `host_rdata[11:0]` | load input, read result (read data one cycle after address) |
| run | `host_start`, `mask_idx[7:0]`, `busy`, `done` | pulse start; `done` stays high until the next start |
| region select | `ic_we`, `ic_sel`, `active_ntt` | host writes the active region |
| PR handshake | `pr_req`, `pr_kind`, `pr_core`, `pr_ack` | reload / relocate requests |
| fault table | `nr[M]`, `n_cfi[M]`, `n_ccc[M]`, `n_meas[4]`, `last_measure` | for the host's risk factors |
| injector | `fi_arm`, `fi_rt[9:0]`, `fi_rs[9:0]`, `fi_mode`, `fi_fired` | attack emulation |
| monitor | `cfi_fault`, `ccc_fault` | flags of the active region |

Reset is synchronous and active high. In a fault-free run `done` rises
1032 clock edges after the edge that samples `host_start`: two set-up
cycles, the 1028-cycle transform, one check cycle and the finish cycle.

Parameters of the top: `N` (256), `M` (4), `CFI_TH_RELD`/`CFI_TH_RELC`
(256/512) and `CCC_TH_RELD`/`CCC_TH_RELC` (256/512). The arithmetic is fixed
to q = 3329 and 12 bits. Smaller powers of two are
allowed by the parameterization (the ROM then holds powers of ω^(256/N)),
but only N = 256 is exercised end to end. The testbenches run the
defaults.

## 6. Where this design departs from the description it follows

The architecture follows the published description of this Trojan-resilient
NTT (the source below). Where that description contradicts itself or is
silent, this implementation made the following choices.

* **CSR bit assignment.** One timing figure of the source labels `wr_en`
  with CSR[3]. The prose and the signal table assign CSR[3] to `rd_en` and
  CSR[0] to `wr_en`/`uv_strt`. The prose is followed.
* **`uBuff_rst`.** One sentence derives it from CSR[2], while another gives
  `uBuff_rst = rst`, and the timing figure shows it with CSR[1]. The NTT
  reset is used, since both the U buffer and the CFI rules work with it.
* **`uv_rst`.** The source lists `uv_rst = ¬CSR[3]`. The CFI rule
  `uv_strt == ¬uv_rst` only holds in a clean run if `uv_rst = ¬CSR[0]`,
  which is used.
* **Combining the CFI flags.** The source says the final flag is an AND of
  the individual flags. Since the flags are active high, that would only
  fire when all checks fail at once. Here any failing check raises
  `cfi_fault`.
* **Cycle count.** One passage says n = 1024 needs 1028 cycles. The formula
  (log n · n/2) + 4 gives 1028 for n = 256, the size used throughout, so
  n = 256 is taken.
* **Address formula.** The published pseudo-code sets k0 = k inside the
  group loop and loses the group offset. The standard k0 = 2·hl·j + k is
  used.
* **Stuck-at-1 attacks.** The source claims stuck-at-1 and stuck-at-0
  attacks, but its injector connects F_r through AND gates, which can only
  force lines to 0. Its worked example (R_s = 766 "does not block rd_en and
  uv_rst") also disagrees with AND gating. The AND gating is followed, so
  only 0-forcing attacks are emulated. A stretched schedule (`mode = 1`)
  stands in for delay Trojans.
* **Number of regions.** The evaluation uses four PR bitstreams. The
  architecture allows any m. M defaults to 4.
* **Thresholds.** No numeric thresholds are given. 256 and 512 are this
  design's choice.
* **Own choices with no counterpart in the source:**
  * the resume counter;
  * blocking writes in the fault cycle;
  * restoring the input after a ccc fault;
  * the request/acknowledge port for reconfiguration;
  * the one-cycle duration of an attack;
  * the delay-Trojan mode;
  * the 16-bit saturating counters.
* **Not built:**
  * the inverse NTT used elsewhere in Kyber;
  * the host application (bit patcher), ICAP and partial reconfiguration
    itself. Regions are plain instances and "reloading" is a reset of the
    instance;
  * the PCI link.

  Faults on data signals (A[k0], A[k1], w_j) are out of scope, as in the
  source; only the mask protects the data.

## 7. Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. Reference values come from plain `%` arithmetic in
`tb/ntt_ref_pkg.sv`, which evaluates the polynomial directly at ω^bitrev(p);
no butterfly code is shared with the RTL.

| testbench | what it shows |
|---|---|
| `tb_secure_ntt_top` | full size, default parameters. Clean and masked transforms checked coefficient by coefficient, with latency. Two dozen single attacks at random R_t/R_s, each ending in a correct result. Delay attacks caught by the CCC and repaired by restore and rerun. A fault storm that drives one region through repeat, more than 250 reloads, and a relocation chosen by R_i. A clean run on the new region. Fails if any mechanism never happened. |
| `tb_fault_campaign` | 2000 full-size transforms with one random attack each (R_t, R_s uniform in [0, 1023]; every eighth is a delay attack). Every attack that changed a delivered line is detected, no attack that changed nothing raises an alarm, and every result is correct. The counts pass both thresholds, so reloads and relocations happen during the campaign. Typical outcome: about 99 % of attacks hit a line, 100 % of those detected, 100 % of results correct. |
| `tb_ntt_core` | 1028-cycle latency; masked results; each of the ten lines blocked mid-run raises `cfi_fault`; a hold raises `ccc_fault` |
| `tb_ntt_ctrl` | CSR sequence and derived lines for starts at loops 0, 1000, 1023; j/k/hl order; hold |
| `tb_cfi_detector`, `tb_ccc` | no false alarms on clean runs (also resumed ones); each corruption flagged by the expected check |
| `tb_barrett`, `tb_uv_unit`, `tb_u_buffer`, `tb_addr_gen`, `tb_poly_mem`, `tb_w_mem`, `tb_bit_reverser` | datapath blocks against reference models, exhaustive where small |
| `tb_fault_injector`, `tb_fc_ctrl`, `tb_*interconnect*` | attack timing and one-shot behaviour; measure selection at the thresholds; handshake; routing, suppression, resume counter, restore |

Running one testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/ntt_pkg.sv tb/ntt_ref_pkg.sv rtl/*.sv \
          tb/tb_secure_ntt_top.sv --top-module tb_secure_ntt_top -o sim
./obj_dir/sim
```

The full-size end-to-end test runs in well under a second of wall time.
There are no data files; all tables are computed at elaboration.

Synthesis of the top gives about 1,200 flip-flops for M = 4 at N = 256.
The two 12 × 256 memories are the main storage, plus the 12 × 256 input copy
in the poly_mem interconnect. Each region adds one NTT core: CTRL, Barrett,
two mask multipliers, CFI and CCC.
