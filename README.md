# Runtime protection against hardware Trojans in untrusted FPGA IP

A system built on an FPGA often contains IP cores bought from third parties.
Such a core is a black box: there is no trusted "golden" copy to compare it
with, so the usual test-time Trojan detection methods do not apply. The idea
implemented here is to accept that a core may carry a Trojan and to guard
against it **at run time**:

* hide what an untrusted core sends out, so a leak is useless to the attacker;
* buy the same core from several vendors and run more than one variant, so a
  single infected variant either rarely reaches the output or is outvoted;
* count the times each variant disagrees with the others, declare it infected
  past a threshold, and swap it out by partial reconfiguration (PR) of the
  FPGA while the rest of the system keeps running.

The RTL in `rtl/` is the static (non-reconfigurable) part of such a system. It
follows the paper *Dynamic FPGA Detection and Protection of Hardware Trojan: A
Comparative Analysis* (Alanwar, Aboelnaga, Alkabani, El-Kharashi, Bedour),
which proposes four schemes of rising cost and strength. The IP cores
themselves, the FPGA configuration engine and the certificate-authority server
are outside the RTL. The design brings out their interfaces as ports.

## The four schemes

| Scheme | Select with | What reaches the output | Detects? | Removes? |
|---|---|---|---|---|
| SB, simple blockage | `SCH_SINGLE` + `obf_en` | one core's word, scrambled by a confusion function on the link | no | no |
| MRVO, multiplexed reconfigurable variants | `SCH_MRVO` | a randomly chosen variant's word (unbiased or weighted) | no (weights learn) | rotates periodically |
| MCRC, multiplexing + CRC voting | `SCH_MCRC` | a randomly chosen variant's word | yes, by voting on CRCs | yes, evicts by PR |
| MV, multiple variants | `SCH_MV` | the majority word of the variants | yes, by voting on outputs | yes, evicts by PR |

The trade-off between the schemes matters when choosing one. Under MCRC an infected
variant still reaches the output whenever the selector picks it, until its
error count passes the threshold. With three fair slots that is about a third
of the beats. MV never lets a single infected variant through, but every beat
needs a full-width comparison of all the outputs. MCRC compares only 5-bit
CRCs, which is why the paper offers it as the cheaper detector.

In the paper the schemes are alternatives. `trojan_guard_top` holds all four
behind a run-time `scheme` input, so that one design covers the whole
comparison. That choice is this design's own.

## Block structure

```
              in_data ─────────────┬──────────────────────────► (to the IP slots, outside)
                                   │
 slot_out[0..N-1] ──┬──► crc_calc ×N ──► crc_voting_circuit ──► crc alarms ─┐
 (from IP slots)    │                     (majority_vote +                  │
                    │                      error_tracker)                   │
                    ├──► mv_trojan_detector ──► safe_out, mv alarms ────────┤
                    │     (majority_vote + error_tracker)                   │
                    ├──► output_selector ◄── lfsr_rng, weight_tracker       │
                    │          │                                            ▼
                    │          ▼                              pr_controller (queue, evict,
                    │   out_data ──► sb_obfuscate ──► link_out    rotate) ──► pr_req/pr_done
                    │                                             │  slot_active, slot_core
  link_in ──► sb_deobfuscate ──► rx_data                          ▼
                    └──► crc_logger (slot log_slot)          ca_reporter ──► report_*
```

| Module | Role |
|---|---|
| `trojan_pkg` | shared types (`scheme_e`, `core_class_e`, `pr_reason_e`), CRC polynomial, weight width |
| `sb_obfuscate`, `sb_deobfuscate` | confusion function f and its inverse |
| `lfsr_rng` | 16-bit maximal LFSR, the random source of selection |
| `weight_tracker` | 8-bit learned weight per slot for biased selection |
| `output_selector` | the MRVO multiplexer (unbiased or weighted random choice) |
| `crc_calc` | CRC of one word, polynomial x^5 + x^2 + 1 |
| `majority_vote` | majority word among the participating inputs |
| `error_tracker` | per-slot error counters, warning and Trojan alarm |
| `crc_voting_circuit` | majority over CRCs + error tracker (MCRC detector) |
| `mv_trojan_detector` | majority over outputs + error tracker (MV detector) |
| `pr_controller` | alarm handling: core queue, eviction, periodic rotation, PR handshake |
| `crc_logger` | memory of {input CRC, output CRC} pairs of one IP |
| `ca_reporter` | per-period error score and class of every core |
| `trojan_guard_top` | everything above, wired as one system |

## Simple blockage: the confusion function

The output of the untrusted core is scrambled before it leaves the core's
region and unscrambled at the trusted receiver. A Trojan that leaks plain data
over the output lines then sends bits that the attacker cannot read
directly. This protects against leaks only. It does not stop a Trojan that corrupts data.

The function works on 2-bit pairs. In a pair, call the low bit A and the high
bit B:

```
  pair k   input (hi, lo) = (B, A)   output (hi, lo) = (C, B)
           C = A xor B   for k even (pairs 0, 2, 4, ...)
           C = A xnor B  for k odd  (pairs 1, 3, 5, ...)
  inverse: from (C, B):  A = B xor C (k even) or B xnor C (k odd); B moves back up
```

Example, W = 8: `f(8'h00) = 8'h88` (the two XNOR pairs give ones),
`f(8'h01) = 8'h8A`. For an odd width the last bit has no partner. After the
pair step it is swapped with bit 0 (the paper allows any permutation of it).
The function is one-to-one and costs one gate per pair. Half of the
output bits are plain copies of input bits, so this is obfuscation against a
Trojan's fixed leak pattern, not encryption. The paper also suggests
replacing f from time to time by PR with a different function. Only the one
function above is described there, so only that one is built.

## Choosing among variants: unbiased and biased selection

In each beat `output_selector` picks one slot among those that hold a running
core (`slot_active`). A slot being reloaded by PR is never picked. The
random number `rnd` comes from `lfsr_rng`, which steps once per beat:

* **unbiased**: with E eligible slots, slot number `floor(rnd·E / 2^16)`
  among the eligible ones. Every slot is about equally likely.
* **biased**: with S the sum of the eligible slots' weights, the first slot
  whose running sum of weights exceeds `floor(rnd·S / 2^16)`. A slot is
  picked with a probability proportional to its weight. If all weights are
  zero the unbiased rule applies.

`weight_tracker` learns the weights as the paper describes them: 8 bits each,
starting at half scale (128). Each beat where a majority exists, a slot that
agreed with it gains one and an outvoted slot loses one, saturating at 0 and
255. In MRVO the comparison is of the outputs themselves. In MCRC it is the
CRC vote. A slot gets the start weight back when a new core is loaded into it.
Weights can also be loaded from outside through `cert_load`/`cert_weight`,
for example from the certificate of a core. The paper mentions this
option but does not define how a certificate maps to a weight.

With three slots and one infected variant, `tb_selection_experiment` runs
1000 beats and gives:

| Trojan active | selection | infected slot chosen | wrong output | published |
|---|---|---|---|---|
| every cycle | unbiased | 33 % | 33 % | 30 % / 30 % |
| every cycle | biased | 2 % | 2 % | 2 % / 2 % |
| odd cycles | unbiased | 33 % | 16 % | 30 % / 15 % |
| odd cycles | biased | 22 % | 11 % | 20 % / 10 % |

The same trend as the published table: a Trojan that always fires is learned
away almost at once, one that fires half the time only partly.

## Voting, error counts and the two alarm levels

Both detectors use the same parts. `majority_vote` takes the words of the
participating slots (`part` = `slot_active`). A word is the majority when more
than half of the participants carry it, which with three slots is the usual
two-of-three. If no word has a majority (all three differ, or two
participants that disagree), no slot is charged with an error. Otherwise every
participant that differs is charged one error. `error_tracker` keeps a
saturating `CNT_W`-bit counter per slot and gives two levels:

* `warning` from `WARN_TH` (1) errors. A first discrepancy may be a design
  bug in the core rather than a Trojan, so it only warns.
* `trojan_alarm` when the count **exceeds** `ALARM_TH` (4), so from the 5th
  error. This is the level that makes `pr_controller` evict the core.

The paper leaves both thresholds open; the values are this design's choice.

* **MCRC** (`crc_voting_circuit`): each slot's output word goes through
  `crc_calc` (x^5 + x^2 + 1, MSB first, zero start, no final XOR; for the
  8-bit default this is a CRC over each byte). The vote is over the 5-bit
  CRCs. The majority CRC is brought out as `majority_crc`. An error pattern
  that is a multiple of the generator polynomial is not seen. This is the price of comparing
  5 bits instead of W.
* **MV** (`mv_trojan_detector`): the vote is over the full words. The
  majority word is the system output (`safe_out`, registered).

## Core queue and partial reconfiguration

`pr_controller` carries out the paper's Algorithm 1. The system owns
`N_CORES` variants (core numbers 0..N_CORES-1, one per vendor) but has only
`N_SLOTS` reconfigurable regions. After reset slot s runs core s and the
other cores wait in a FIFO queue in number order. Two events reload a slot:

* **evict**, when a running slot's `trojan_alarm` is high and the scheme is
  MCRC or MV. The core is marked in `core_infected` for good (this is also the
  vendor's "suspected" mark) and never re-enters the queue. The queue head is
  loaded in its place. If the queue is empty the slot stays out of service and
  `no_spare` is raised. With several alarms, the lowest slot goes first.
* **rotate**, every `ROT_PERIOD` cycles in MRVO and MCRC. Slot i gets the
  queue head, its old core goes to the queue tail, and i advances round-robin
  (i = (i+1) mod N_SLOTS). With `rot_random` high the slot is drawn at random
  instead, `floor(rnd·N_SLOTS / 2^16)` from the same LFSR, so an attacker
  cannot predict which core leaves next. Rotation limits how long any one core, infected or
  not, sees the data. A due rotation waits while another reload runs. An
  eviction goes first.

Only one reload runs at a time, over a simple handshake with the
configuration engine:

```
 clk        _/‾\_/‾\_/‾\_/‾\_ ... _/‾\_/‾\_/‾\_
 pr_req     ____/‾‾‾‾‾‾‾‾‾‾‾‾ ... ‾‾‾‾‾‾\_____     held, pr_slot/pr_core stable
 pr_done    ___________________ ... __/‾‾\_____     one cycle from the engine
 slot_active‾‾‾‾\______________ ... ______/‾‾‾‾     slot out of vote and selection
 slot_clear ____/‾‾\___________ ... ___________     counter and weight reset
 slot_core  ===old============= ... ======X=new
```

When `pr_req` rises, the slot leaves the vote and the selection, and its
error counter and weight are cleared. When `pr_done` arrives, `slot_core`
takes the new core number and the slot rejoins. Two assertions check the
engine side: `pr_done` only while `pr_req` is high, and the request held
stable until done. On the paper's board a reload took 400 to 500 ms, against
5 to 6 s for a full configuration. The design does not depend on the
latency.

## CRC logger

`crc_logger` sits beside one untrusted IP (in the top, the slot named by
`log_slot`). While `log_en` is high, each beat's input word and output word are
reduced to 5-bit CRCs, and the pair {input CRC, output CRC} goes into the next
row of a `LOG_DEPTH`-row memory. The memory wraps when it is full. The rows can be read
out (`log_rd_addr` → `log_rd_data` one cycle later) and checked off-line
against the IP's specification. Storing CRCs instead of the words keeps the
memory small. The CRC per word, the depth and the wrap-around are this
design's choices.

## Report to the certificate authority

The paper proposes a central authority that keeps a database of cores and
vendors, with each core classed as safe, buggy or infected. `ca_reporter`
produces what the hardware would send it (Algorithm 2, last line). Every
error a detector charges to a slot is added to the score of the core in that slot.
Every `CA_PERIOD` cycles, `report_valid` pulses with each core's score and
class. The class is `CLS_SAFE` for a score of 0, `CLS_BUGGY` below `ALARM_TH`
and `CLS_INFECTED` otherwise. After a report the scores start again from zero.

## Top-level interface and timing

A **beat** is one cycle with `beat` high. In that cycle `in_data` and every
running slot's `slot_out` word belong together: the IP is assumed to give its
output word for the input of the same beat. The serial framing of the UART
cores measured in the paper is not modelled. One cycle after a beat,
`out_valid` and `out_data` give the result, in every scheme, and `out_slot`
names the chosen slot in MRVO and MCRC.

| Port group | Signals |
|---|---|
| control | `scheme` (`scheme_e`), `biased`, `rot_random`, `obf_en` |
| IP slots | `beat`, `in_data[W_IN]`, `slot_out[N_SLOTS][W]` |
| output, SB link | `out_data`, `out_valid`, `out_slot`, `link_out` = f(out_data) when `obf_en`, `link_in` → `rx_data` = f^-1(link_in) when `obf_en` |
| detection | `mismatch`, `majority_crc`, `majority_crc_ok`, `warning[N]`, `trojan_alarm[N]`, `err_count[N]`, `weight[N]`, `cert_load[N]`, `cert_weight[N]` |
| reconfiguration | `pr_req`, `pr_slot`, `pr_core`, `pr_reason`, `pr_done`, `slot_core[N]`, `slot_active[N]`, `core_infected[N_CORES]`, `no_spare`, `evict_event`, `rotate_event` |
| logger | `log_en`, `log_slot`, `log_rd_addr`, `log_rd_data`, `log_wr_ptr`, `log_count` |
| authority | `report_valid`, `report_score[N_CORES]`, `report_class[N_CORES]` |

`warning`, `trojan_alarm` and `err_count` show the detector of the current
scheme: CRC voting in MCRC, output voting otherwise. Reset is asynchronous and
active low. The logger memory and its read register are the only state
it does not clear.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N_SLOTS` | 3 | the paper's example of three running cores |
| `N_CORES` | 8 | assumed; the paper keeps "m" variants without a number |
| `W` | 8 | the byte the paper's CRC is applied to |
| `W_IN` | 8 | assumed |
| CRC polynomial | x^5 + x^2 + 1 | the paper |
| weight width | 8 bits, start 128 | the paper (8-bit weights, start at half of the maximum) |
| `CNT_W` | 8 | assumed |
| `WARN_TH`, `ALARM_TH` | 1, 4 | assumed; the paper says only "a certain threshold" |
| `ROT_PERIOD` | 4096 cycles | assumed; the paper says "a certain periodic time" |
| `CA_PERIOD` | 16384 cycles | assumed; the paper's "time period T" |
| `LOG_DEPTH` | 256 rows | assumed |

The configurations the paper measured and how they map onto these defaults:

* MCRC and MV on three UART cores, and the selection experiment with three
  serial transmitters, fit as they are.
* MV on three AES cores needs `W = 128`.
* SB on the F3M benchmark needs a 194-bit word.

All widths are parameters. The SB functions are simulated at 194 bits.

## Where this design goes beyond or departs from the paper

* All four schemes sit in one top behind a run-time select. The paper
  implements them separately.
* The random generator (LFSR), the way a random number maps to a slot, the
  thresholds, periods, widths, queue order, eviction priority, PR handshake,
  logger depth and the authority score bookkeeping are this design's choices.
  The paper describes the behaviour, not these details.
* With no majority, no error is charged. With an empty queue, an alarmed
  slot is taken out of service.
* The confusion function is not itself reconfigured. The paper suggests it
  but gives only one function.
* "Replace running IPs periodically or even randomly": replacement is always
  periodic. The random part is the choice of slot (`rot_random`), not the
  time of the replacement.

## Outside the RTL

* **The IP cores** (UART / RS_TX transmitters, ALUs, AES and the other
  benchmarks measured in the paper) come from third parties. They connect
  through `in_data`/`slot_out`.
* **The configuration engine** loads partial bitstreams. It connects
  through the `pr_*` handshake.
* **The certificate-authority server** is software. It reads the `report_*`
  outputs.
* **The Trojans** are not part of the design. The testbenches contain an IP
  model whose infected variants XOR a secret key and a PRNG sequence into the
  output, as in the paper's leak example.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against values worked out in the testbench itself, for example:

* CRCs by polynomial long division;
* f from explicit bit equations;
* the queue from a reference model built on an SV queue;
* selection from integer arithmetic.

Each testbench has a watchdog and ends with a line
`TB_RESULT checks=<n> failures=<n>`. Two testbenches run the whole system
at its default parameters:

* `tb_trojan_guard_top` runs SB, MRVO (unbiased and biased), MCRC and then
  MV against eight IP variants. Two of the variants carry Trojans: variant 2
  always active, variant 5 in odd cycles. A configuration-engine model takes
  20 cycles per reload. The testbench checks every output word and the
  logger rows. It counts each mechanism (obfuscation round trip, both
  selection modes, weight learning and certificate load, mismatch, warning,
  alarm, eviction, round-robin and random rotation, MV masking, logger, infected report, scheme
  switch) and fails if one never happens. It finishes in well under a
  second.
* `tb_selection_experiment` gives the selection table above.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/trojan_pkg.sv tb/tb_trojan_guard_top.sv --top-module tb_trojan_guard_top
./obj_dir/Vtb_trojan_guard_top
```

Replace the testbench name to run another one. The RTL is plain
SystemVerilog-2017 and synthesizable. The logger memory is written as an
array, and the assertions in `pr_controller` are the only non-synthesizable
statements.

Things not verified:

* timing closure and resource use on a real FPGA;
* behaviour with real partial bitstreams;
* the serial framing of real UART cores.
