# RAMPART + BRC-VL: RowHammer-tolerant rank of DDR5 memory, in SystemVerilog

A RowHammer attack activates one DRAM row over and over until bits flip in the rows
next to it. On a server DIMM every DRAM of a rank decodes a row address the same
way, so one attack damages the *same* controller address in all ten DRAMs at once.
That is more than chipkill ECC (SDDC) can repair, because SDDC only tolerates one
bad DRAM per codeword.

RAMPART (Row Address Map Permutation And Reassignment Technique) gives every DRAM
of the rank its own mapping of controller row addresses to rows in the bank. Here the
mapping is a circular left shift by an amount set per DRAM. Two controller addresses
are then physical neighbours in at most one DRAM. A hammered row still flips bits,
but the damaged controller addresses differ from DRAM to DRAM. Any single address
therefore holds corrupted data from only one DRAM, and SDDC corrects it however many
bits flipped. The corrected line is written back, either at once (demand scrub) or
when the patrol scrubber reaches it. Data is lost only if a second attack succeeds on
the same address in another DRAM before the first one has been repaired.

The second mechanism is BRC-VL (Bounded Refresh Configuration with Victim Levels),
which limits how often attacks succeed at all. It is a controller-driven,
probabilistic, PARA-style refresh scheme that fits DDR5's DRFM/RFM commands. In each
window of RAAIMT activates to a bank, the controller picks one activate at random as
the target. On that row's precharge it tells the DRAM to remember the row, together
with a *victim level*: level 1 means refresh R±1, level 2 means refresh R±2. The next
RFM then refreshes only those two rows. DDR5 BRC always budgets time for four rows, so
each BRC-VL RFM is shorter.

This RTL builds one rank: the controller side (command sequencer, BRC-VL selection
logic, RS(10,8) SDDC encode/decode, patrol scrub) and the interface logic of ten x4
DRAMs (RAMPART permutation, DRFM target storage, victim refresh). The DRAM cell arrays
are not RTL. They connect through ports, and the testbench supplies a behavioural
core that models RowHammer disturbance.

## Block map

```
                 host port (64-byte lines)
                          |
  +-----------------------v---------------------------------------------+
  | rampart_system                                                      |
  |  patrol_scrub --> mc_sequencer <--> brcvl_selection_logic           |
  |                     |   ^              brcvl_lfsr                   |
  |                     |   |              brcvl_target_select          |
  |           16 x sddc_encoder / sddc_decoder   bank_activate_counters  |
  |                     |   |              rfm_tracker                  |
  |          dram_cmd_t v   | 10 x 64-bit bursts                         |
  |   +-----------------+---+--------------- x10 ----------------+      |
  |   | dram_interface (DRAM k)                                  |      |
  |   |  shift_value_reg -> row_addr_permute -> core row         |      |
  |   |  command decode, open-row table, drfm_victim_refresh     |      |
  |   +----------------------------------------------------------+      |
  +--------------------------------|------------------------------------+
                                   v  core_* ports (one set per DRAM)
                          DRAM cores (not RTL)
```

| file | role |
|---|---|
| `rtl/rampart_pkg.sv` | command-bundle field widths, `dram_cmd_t`, SDDC layout sizes, GF(16) functions, per-bank bit arrangement |
| `rtl/row_addr_permute.sv` | 16-bit rotate-left barrel shifter (the RAMPART permutation) |
| `rtl/shift_value_reg.sv` | shift value = ID × SHIFT_PER_ID, from fuses or an initialisation write |
| `rtl/dram_interface.sv` | one DRAM's interface logic: command decode, permutation, DRFM/RFM |
| `rtl/drfm_victim_refresh.sv` | saved DRFM targets per bank; RFM → refreshes of bank rows R±level |
| `rtl/brcvl_lfsr.sv` | shared 16-bit LFSR, one new bit per clock |
| `rtl/brcvl_target_select.sv` | per-bank RAAIMT windows, target activate and victim level |
| `rtl/bank_activate_counters.sv` | one Bank Activate Counter (BAC) per bank |
| `rtl/rfm_tracker.sv` | RFM request (same-bank or all-bank) at RAAIMT, activate block at 2 × RAAIMT |
| `rtl/brcvl_selection_logic.sv` | the four BRC-VL parts together (32 banks) |
| `rtl/sddc_encoder.sv`, `rtl/sddc_decoder.sv` | RS(10,8) over 4-bit symbols, one codeword per beat |
| `rtl/patrol_scrub.sv` | background address walker issuing scrub reads |
| `rtl/mc_sequencer.sv` | closed-page ACT/RD-WR/PRE sequencer, RFM insertion, demand scrub |
| `rtl/rampart_system.sv` | top level: one rank |

## The RAMPART mapping

DRAM *k* is given an ID, normally *k*. Its shift is `ID × SHIFT_PER_ID mod 16`, where
`SHIFT_PER_ID` is 1. For a larger blast radius, 2 spreads neighbours further apart.
On an activate, the 16-bit controller row is rotated left by that shift, and the
result addresses the bank:

| controller row | DRAM 0 (shift 0) | DRAM 1 (shift 1) | DRAM 2 (shift 2) | DRAM 9 (shift 9) |
|---|---|---|---|---|
| 0x0000 | 0x0000 | 0x0000 | 0x0000 | 0x0000 |
| 0x0001 | 0x0001 | 0x0002 | 0x0004 | 0x0200 |
| 0x8000 | 0x8000 | 0x0001 | 0x0002 | 0x0100 |
| 0x0080 | 0x0080 | 0x0100 | 0x0200 | 0x0001 |

Suppose controller row 0x0001 is hammered. In DRAM 0 the victims are bank rows 0 and
2, which hold controller rows 0x0000 and 0x0002. In DRAM 1 the victims are bank rows
1 and 3, which hold controller rows 0x8000 and 0x8001. Each DRAM loses different
addresses.

The rotator is combinational (`row_addr_permute`, four mux stages), so the
permutation adds no clock to the activate path. The ID comes from a fuse input, loaded
on the first clock after reset. An initialisation write (`prog_en`, `prog_id`)
overrides it. The top's testbench uses that write to turn the remapping off (all IDs
0) and shows that the same attack then becomes uncorrectable.

Everything after the permutation works on *bank* rows. That includes the open-row
table, the DRFM target and the victim refreshes. Victim refreshes therefore hit the
true physical neighbours in each DRAM.

Spare-row repair is not modelled. DRAMs already remap defective rows to spare rows
with a vendor-specific mapping. Where the rotator sits relative to that repair logic
is up to the DRAM design.

## SDDC: RS(10,8) with one symbol per DRAM per beat

A rank has eight data DRAMs and two check DRAMs, each x4 with burst length 16. In each
beat, the four DQ bits of DRAM *k* form symbol *k* of one Reed-Solomon codeword over
GF(16). The field polynomial is x⁴+x+1 and α = 2. DRAMs 0–7 carry data; DRAMs 8 and 9
carry the checks. Every codeword satisfies

* Σ cᵢ = 0
* Σ cᵢ αⁱ = 0

with the sums over i = 0…9, where i is the DRAM number. The encoder solves these for
c8 and c9: with A = Σ dₖ and B = Σ dₖαᵏ, it sets c8 = α³B + α¹²A and c9 = A + c8.

The decoder forms the syndromes S0 = Σ rᵢ and S1 = Σ rᵢαⁱ. A single bad symbol *j*
gives S0 = e and S1 = eαʲ. So j = log S1 − log S0, and adding S0 to symbol *j*
restores it, whatever its four bits were. A 64-byte line is 16 codewords decoded in
parallel. The rank reports:

* **corrected**, if some beats were corrected and all of them blame the same DRAM;
* **uncorrectable**, if any beat is uncorrectable, or if beats blame different DRAMs.

A two-symbol error is never reported as clean, because the code has distance 3.
Some two-symbol errors are miscorrected, as with any RS(10,8) chipkill code.

After a corrected read, the sequencer writes the corrected line straight back to the
same address (demand scrub). The patrol scrubber sends one read every `scrub_interval`
clocks. It walks burst addresses first, then rows, then banks, so every location is
eventually read, corrected and rewritten.

## BRC-VL selection logic (controller side)

This is the part of the design that is easiest to misread. It has four pieces.

1. **Random source.** One 16-bit LFSR (x¹⁶+x¹⁴+x¹³+x¹¹+1) is shared by all 32 banks
   and shifts in one new bit per clock. Each bank sees its own arrangement of the 16
   bits: rotated left by `bank[3:0]`, and also bit-reversed for banks 16–31.
2. **Target selection, per bank.** A bank's RAAIMT window is its next RAAIMT
   activates. At the first activate of a window the bank samples its random word *r*.
   It then computes:
   * target index `t = (r[7:0] · RAAIMT) >> 8`, which lies in 0…RAAIMT−1;
   * victim level 2 if `(r[15:8] · RAAIMT) >> 8 == 0`, otherwise level 1.

   Level 2 therefore has a probability of about 1/RAAIMT, and exactly 1/16 when
   RAAIMT = 16. The *t*-th activate of the window marks the bank, so exactly one
   activate per window is a target. The bank's next precharge leaves with the DRFM bit
   set and the chosen level. Each DRAM stores the row that was open, as a bank row.
   In a window with one aggressor activate, the aggressor is picked with probability
   1/N and its R±1 victims are refreshed with probability (N−1)/N², for N = RAAIMT.
   Under a high-frequency attack every target is the aggressor, so its R±2 rows are
   refreshed with probability 1/N.
3. **Bank Activate Counters.** One counter per bank counts activates. An RFMsb lowers
   the counters of the eight banks it covers by RAAIMT, to a minimum of zero. Ordinary
   refreshes do not change them.
4. **RFM tracker.** As soon as any bank's BAC reaches RAAIMT, it requests a same-bank
   RFM (RFMsb) for that bank's index within its bank group. A round-robin pointer
   chooses among indices that need one. Alternatively, with `rfm_ab` set, every RFM
   is an all-bank RFM (RFMab). It is requested as soon as any BAC reaches RAAIMT,
   and it lowers every BAC. A bank whose BAC reaches 2 × RAAIMT is blocked: the
   sequencer may not activate it until an RFM brings the count down.

RAAIMT is a run-time input from 1 to 256. The design studies 16–100, and its headline
point is 24. The window counter and the RFM counters are independent. A window is
always exactly RAAIMT activates to the bank. An RFM goes out whenever a BAC reaches
RAAIMT, so one RFM may consume targets from the window that just closed.

## DRAM side: DRFM targets and victim refresh

`drfm_victim_refresh` keeps, per bank, the saved bank row R, its level L and a valid
bit. An RFMsb covers bank index *i* in all eight bank groups; an RFMab covers every
bank. For each covered bank that has a target, from lowest bank number up, the block
emits one refresh per clock: first R−L, then R+L. Rows that would fall outside the
bank are skipped. The target is then cleared. If a new DRFM precharge arrives before
the RFM, it replaces the unconsumed target.

A BRC-VL RFM refreshes two rows per bank. The sequencer reserves `T_RFM` = 364
clocks for it: tDRFMsb of 130 ns at the 2.8 GHz DDR5-5600 command clock. DDR5 BRC
would need 240 ns.

## Command sequencer

`mc_sequencer` is a deliberately small, in-order, closed-page controller. It issues
one command per clock: ACT, RD or WR, then PRE. It chooses work in this order:

1. a pending demand-scrub write-back;
2. the host port;
3. the patrol scrubber.

A pending RFM normally goes out at the next access boundary, followed by `T_RFM` idle
clocks (`T_RFM_AB` for an all-bank RFM). No separate all-bank time is specified for
BRC-VL, so `T_RFM_AB` defaults to the same 364 clocks.

If `rfm_postpone` is set, the RFM waits while some request can still be served. A
request whose bank is blocked at 2 × RAAIMT then stalls, and the RFM is issued at
that point. This option exists so that the activate-suspension rule can be exercised.

The sequencer has no reordering queue, no periodic REF scheduling and no DDR5 timing
other than the RFM time. See "Departures" below.

## Top-level interface and timing

`rampart_system` ports:

* **Configuration:** `raaimt` (9 bits), `rfm_ab`, `rfm_postpone`, `scrub_en`,
  `scrub_interval`, `fuse_id[10]`, `prog_en`, `prog_id[10]`.
* **Host port:** `req_valid/req_ready`, `req_we`, `req_bank` (5 bits), `req_row`
  (16 bits), `req_col` (7-bit burst address), and 512-bit `req_wdata`. The response is
  `resp_valid`, `resp_rdata`, `resp_corrected` and `resp_uncorrectable`. `resp_valid`
  rises three clocks after the clock in which `req_ready` was high.
* **Per DRAM k (one set each):**
  * `core_act/pre/rd/wr`, `core_bank`, `core_row` (already permuted), `core_col`;
  * `core_wdata[k]`, 64 bits: bit 4·b+j is DQ j in beat b;
  * `core_rdata[k]`, which the core must return one clock after a read;
  * victim refreshes `core_ref`, `core_ref_bank`, `core_ref_row`;
  * `dram_shift[k]`.
* **Line layout:** line bit 32·b + 4·k + j is DQ j of data DRAM k in beat b.
* **Events (one clock each):** `ev_rfm`, `ev_drfm_pre` with `ev_drfm_vl`, `ev_stall`,
  `ev_demand_scrub`, `ev_scrub_read`, `ev_scrub_pass`, and `ev_err_dram`.

Resets are asynchronous and active low. All state is reset; the shift value is loaded
from `fuse_id` on the first clock after reset.

## Parameters

| parameter | default | origin |
|---|---|---|
| `ROW_BITS` | 16 | design (16-bit row address, 16-bit shifter) |
| `NUM_DRAMS` | 10 | design (8 data + 2 check x4 DRAMs, SDDC) |
| `NUM_BANKS` | 32 | design (32-bank BRC-VL implementation) |
| `BANKS_PER_BG` | 4 | DDR5 x4 organisation (8 groups × 4), this RTL's choice |
| `SHIFT_PER_ID` | 1 | design (1 bit × ID) |
| `COL_BITS` | 7 | this RTL's choice (128 bursts per row) |
| `RAAIMT_W`, `BAC_W` | 9, 10 | RAAIMT up to 256 (design), BAC to 2 × 256 |
| `T_RFM` | 364 | tDRFMsb 130 ns at 2.8 GHz |
| `T_RFM_AB` | 364 | this RTL's choice (no all-bank time is specified) |
| `SEED` | 16'hACE1 | this RTL's choice |

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself via a watchdog. Highlights:

* `tb_row_addr_permute`: the worked examples above plus 2000 random rotations,
  against a bit-by-bit reference.
* `tb_sddc_encoder`: finds the unique check pair by brute force over all 256
  candidates, using its own table-based field arithmetic.
* `tb_sddc_decoder`: every single-symbol error is corrected and blamed on the right
  DRAM; no double error passes as clean.
* `tb_brcvl_target_select`: a reference model predicts every target and level over
  80 000 activates. It also checks one target per window and a level-2 rate near
  1/RAAIMT, for RAAIMT 16 and 24.
* `tb_rampart_system`: the whole rank at default sizes, with ten behavioural DRAM
  cores (`tb/dram_core_model.sv`, hammer count 64). The run goes through these steps:
  1. Hammering row 0x0001 corrupts 0x0000/0x0002 in DRAM 0 and 0x8000/0x8001 in
     DRAM 1. Every one of those reads is corrected and then reads clean after the
     write-back.
  2. With the remapping switched off, the same attack becomes uncorrectable.
  3. At RAAIMT 16, RFMs, level-1 and level-2 targets and about 3000 victim refreshes
     occur. Every refresh lands at ±level from the permuted target.
  4. With RFMs postponed, a bank stalls at 2 × RAAIMT. With all-bank RFMs, one
     RFM refreshes victims in banks of several bank indices.
  5. The patrol scrubber repairs a corrupted line without a host read.
* `tb_attack_models`: the two attack patterns of the security analysis, on the whole
  rank at RAAIMT 16 and 24. The low-frequency attack hides one aggressor activate
  among RAAIMT−1 decoys in each window. The high-frequency attack activates only the
  aggressor. The testbench counts how often the aggressor's R±1 and R±2 rows are
  refreshed. It checks the counts against (N−1)/N² and 1/N² (low frequency) and
  against (N−1)/N and 1/N (high frequency) per window, within four standard
  deviations. Typical result at N = 16 and high frequency: 562 level-1 and 38
  level-2 refreshes in 600 windows, against expected values of 562.5 and 37.5. It
  also checks one RFM and one DRFM per window, and that no activate comes within
  364 clocks of an RFM.

To run one testbench with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/rampart_pkg.sv tb/tb_rampart_system.sv --top-module tb_rampart_system
./obj_dir/Vtb_rampart_system
```

The testbenches declare `timeunit 1ns` and the RTL modules declare none, so
`--timescale` gives the RTL the same units. Any other testbench runs by changing the
two names. Building takes a few seconds per testbench. `tb_rampart_system` and
`tb_attack_models` run in under 20 s each.

## Changing the design

* **RAAIMT, RFM kind, scrub rate.** These are run-time inputs of `rampart_system`
  and need no rebuild.
* **`SHIFT_PER_ID`.** Set it to 2 for a blast radius of 2. Keep `ID × SHIFT_PER_ID`
  distinct mod 16 for every DRAM of the rank.
* **`T_RFM` / `T_RFM_AB`.** Derive them from the RFM duration and the command clock.
* **`ROW_BITS`, `NUM_BANKS`, `COL_BITS`.** These are parameters of every module. The
  command bundle in `rampart_pkg` has fixed field widths (`CMD_ROW_W`, `CMD_BANK_W`,
  `CMD_COL_W`), so keep the module values at or below them. The row rotator and the
  per-bank random arrangement assume 16-bit rows and a 16-bit LFSR.
* **The SDDC code and line layout.** These are tied to ten x4 DRAMs with burst
  length 16. A different code means replacing `sddc_encoder`, `sddc_decoder` and
  the beat loop in `rampart_system`.

## Departures from the design and limits

* **SDDC code.** Built: RS(10,8) with 4-bit symbols. The design also describes
  RS(40,32) with 16-bit symbols, one per DQ pin, which corrects up to four symbols.
  That variant is not built.
* **Undocumented details.** The design leaves out the LFSR polynomial, how the random
  bits are scaled to the window size, the value that selects level 2, the per-bank bit
  arrangement and the bank-group layout. The choices above are this RTL's own.
* **Victim levels.** The hardware has two victim levels, as in the design's 32-bank
  implementation. The design's probability models use four levels. The `vl_t` field
  could carry level 3, but the selection logic never picks it.
* **Controller.** The design's controller has a closed *adaptive* page policy, a
  32-deep scheduling buffer and full DDR5 timing. Here it is a one-request in-order
  sequencer. It is enough to exercise every mechanism, but not to reproduce the
  bandwidth and CPI figures.
* **Not RTL.** The DRAM core and spare-row repair, the PHY/IO/DLL, the DIMM register
  (RCD) and the host are not RTL. The security figures (attack-success and
  data-corruption probabilities) are analytical results, not something simulation
  reproduces.
* **Hammer count in tests.** The testbench DRAM core uses a hammer count of 64, not
  the 1000–3000 the design studies, so that attacks succeed within a short simulation.
