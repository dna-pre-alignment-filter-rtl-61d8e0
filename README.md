# FIRM: DNA pre-alignment filtering next to racetrack memory

Read mappers spend most of their time checking reference locations that in
the end do not match the read. A pre-alignment filter rules most of these
locations out cheaply, before the expensive alignment starts. This repository
holds synthesizable SystemVerilog for such a filter, built next to a
racetrack memory (RTM), along with a behavioural model of that memory. It follows the
FIRM design ("filtering in racetrack memory") by Hameed, Khan, Ollivier, Jones
and Castrillon, "DNA Pre-alignment Filter using Processing Near Racetrack
Memory". The RTL is an independent implementation of what that paper
describes. Where the paper says nothing, the gaps are filled with documented
choices, which are listed in the section on departures below.

## 1. What the filter computes

The reference genome is cut into *bins*. The default has 2^25 = 33,554,432
bins of about 100 nucleotides each. A *token* is a string of five nucleotides.
Each nucleotide is encoded in 2 bits (A=00, C=01, G=10, T=11), so a token is a
10-bit number from 0 (AAAAA) to 1023 (TTTTT). The first nucleotide is the most
significant. For every bin, the memory stores a 1024-bit *presence vector*:
bit t is set when token t occurs somewhere in the bin.

A read of 100 nucleotides contains 96 overlapping tokens. The filter computes a
score for every bin k:

    c_k = sum over distinct tokens t of the read:  count(t) * presence_k[t]

Bin k is passed on to alignment when c_k > T, where T is the threshold
input `thr`. For each group of 4096 consecutive bins (a *binset*), the output
is one 4096-bit word, the *seed location filter bitmask*.

## 2. Where the presence bits live: the interleaved mapping

The memory has 8192 subarrays. Each subarray has 1024 rows of 4096 bits,
which makes 2^35 bits (4 GB). That is exactly 2^25 bins times 1024 presence
bits. Take the 35-bit address {bin, token}. FIRM splits it as follows (most
significant bits first):

| field        | bits | taken from             |
|--------------|------|------------------------|
| row          | 10   | bin[24:15]             |
| subarray hi  | 3    | bin[14:12]             |
| column       | 12   | bin[11:0]              |
| subarray lo  | 10   | token                  |

The subarray number is {bin[14:12], token}. As a result:

* Every subarray holds the bits of **one token only**. A subarray whose token
  does not occur in the read is never touched.
* One row of a subarray holds that token's bit for the 4096 bins of one binset.
  Binset b is row b >> 3 of the subarrays {b[2:0], t}.
* The tokens of one binset sit in different subarrays, so their row accesses
  overlap in time.
* Each subarray is visited again only eight binsets later, at the next row.
  Its track group therefore only ever has to move by one row.

Example: take a read whose distinct tokens begin AAAAG, AAACT, AAAGG, AACTA
(ids 2, 7, 10, 28). The accesses run as follows:

* Binset 0 reads row 0 of subarrays 2, 7, 10 and 28.
* Binset 1 reads row 0 of subarrays 1026, 1031, 1034 and 1052. These ids are
  1024 higher because binset bit 0 is subarray bit 10.
* Binsets 2 to 7 continue the same way.
* Binset 8 is the first to come back to a subarray: subarray 2, row 1.

Without preshifting, no track moves before that point.

A conventional layout puts all 1024 tokens of a bin in one column of one
subarray. Every token access then lands in the same subarray, and the track
has to shift by the distance between successive token indices. The
interleaved layout replaces this with one single-row step per visit.

## 3. Shifting: track groups, preshift and circular tracks

This is the part of the design that needs the most care.

Racetrack memory stores several bits (domains) along one magnetic nanowire
(track). Only the domain under an access port can be read, so the track must
be shifted to bring the wanted domain under the port. Here a track has 64
domains. A subarray's 1024 rows therefore form 16 *track groups* of 64 rows:
rows 0-63, 64-127, and so on. In a track group, row d is domain d of every one
of the 4096 tracks, and the group shifts as a unit. Each track group keeps
its own position, which this design calls the *offset*. At power-up the offset
is 0, meaning row 0 of the group is under the port.

Reading row d costs S = |offset(d) - current offset| shifted domains. Each
shifted domain takes 2 cycles. Three mechanisms keep that cost small and off
the critical path:

**Sequential visits.** As section 2 explains, a subarray is visited at rows
0, 1, 2, ... in order, so every visit is one step from the last.

**Preshift** (`PRESHIFT = 1`). The shift is done right after a row is
precharged instead of right before the next access. The track group is moved
to the row that will be needed next, which is d+1, or row 0 of the group after
row 63. The subarray has about eight binsets of other work in between, so the
shift is hidden. Every access then finds its row already aligned (S = 0), and
all accesses take the same latency.

**Circular two-port tracks** (`US_BUF = 1`, the "unlimited single-shift"
buffer). With one port, a full pass over a group costs 63 forward shifts. It
then costs another 63 to come back to row 0 for the next read. With two ports,
32 domains apart, the second half of the group is stored in reverse order:

| row d of group | port | offset needed |
|----------------|------|---------------|
| 0 .. 31        | A    | d             |
| 32 .. 63       | B    | 63 - d        |

Going from row 0 to row 31 moves the track forward by 31. Row 32 is read
through port B at the same offset as row 31, with no shift. Rows 33..63 move
the track back to offset 0, so after row 63 the group is already in its reset
position. A complete pass costs 62 shifts instead of 126, and no reset is
needed before the next read. `firm_pkg::port_offset` holds this rule, and both
the scheduler and the memory model use it.

The shift counts per visited track group, for one read, are:

| configuration                       | PRESHIFT | US_BUF | shifts per group        |
|-------------------------------------|----------|--------|-------------------------|
| FIRM                                | 0        | 0      | 63 (+63 reset next read)|
| FIRMPR: FIRM + preshift             | 1        | 0      | 126                     |
| FIRMUS: FIRMPR + circular (default) | 1        | 1      | 62                      |

Without preshift, a group left at row 63 is reset lazily: it shifts back by
63 before its next row-0 access.

The three configurations give the same bitmasks and differ only in shifting
and timing. In a reduced-size run, six reads (41 distinct tokens in all)
against 64 binsets with 8-domain track groups gave these results:

| configuration | cycles | shifted domains | second-port reads |
|---------------|--------|-----------------|-------------------|
| FIRM          | 3273   | 3696            | 0                 |
| FIRMPR        | 2853   | 4592            | 0                 |
| FIRMUS        | 2835   | 1968            | 1312              |

Preshifting removes the shift from the access path, which makes FIRMPR
faster than FIRM. The circular tracks then keep FIRMPR's speed with fewer
than half of its shifts. This matches the trend the paper reports: 5.3 %
runtime gain from preshifting, the same runtime with the circular buffer,
and energy saved through fewer shifts. The exact gains depend on the sizes,
so the reduced-size figures are not expected to match the paper's.

## 4. Scheduling and timing

The memory access scheduler (`mem_scheduler`) runs two nested loops: over
binsets b = 0..8191, and inside each binset over the read's distinct tokens in
increasing token order. Each step is one row access. The scheduler keeps two
tables:

* `pos_tab`: the offset of each of the 131,072 track groups.
* `ready_tab`: for each of the 8192 subarrays, the cycle at which its last
  access (including the preshift) ends.

An access issues when two conditions hold. First, its subarray is ready.
Second, its data would arrive strictly after the previously scheduled data. The
second rule keeps the single 4096-bit data path to the accelerator free of
collisions and in order. If either condition fails, the scheduler stalls and
counts the cause (`n_stall_busy`, `n_stall_order`). After reset the tables are
cleared one entry per cycle (131,072 cycles, `init_busy`).

Memory timing in cycles of the 1 GHz clock (package `firm_pkg`):

| step                         | cycles                   |
|------------------------------|--------------------------|
| shift, per domain (T_SH)     | 2                        |
| ACT to read (T_RCD)          | 4                        |
| read + I/O (T_CAS)           | 4                        |
| ACT to PRE minimum (T_RAS)   | 9                        |
| precharge (T_RP)             | 2 (assumed)              |

So data returns 2S + 8 cycles after the command. A subarray is free again
2S + 11 + 2S' cycles after the command, where S' is the preshift distance.

The accelerator (`bin_array`) takes one row per cycle. It latches the row in
4096 1-bit registers, and in the next cycle each of the 4096 bin units adds
count * presence bit. On the binset's last token, the units compare their
scores with T and restart at zero. The bitmask appears two cycles after that
row.

Throughput: with n distinct tokens, a read costs n × 8192 accesses. The
scheduler sustains one access per cycle whenever a subarray's revisit
distance, 8 binsets × n tokens, is at least its busy time, which is 13 cycles
with preshift. For n = 1 it stalls on the busy subarray. In the full-size
test, two random reads with 92 and 89 distinct tokens took 1,482,752 accesses in
1,482,944 cycles. The 192 extra cycles are the counting of the second read,
whose tokens are taken in only after the first read's last access has issued.
Each read shifted exactly 62 domains per visited track group, and the second
read needed no reset shifts.

## 5. Block map

| module             | role                                                                 |
|--------------------|----------------------------------------------------------------------|
| `firm_pkg`         | nucleotide enum, timing constants, `port_offset`, `abs_diff`         |
| `token_extractor`  | sliding window of 5 nucleotides → token ids, 1 per cycle             |
| `count_buffer`     | token counts (1024 entries), then distinct (token, count) list in index order |
| `mem_scheduler`    | binset/token loops, interleaved mapping, offset and busy tables, issue rule, preshift |
| `bin_unit`         | adder, accumulator, comparator of one bin                            |
| `bin_array`        | 4096 1-bit row registers + 4096 bin units → bitmask per binset       |
| `firm_logic_layer` | all of the above plus placement of loaded reference rows              |
| `rtm_memory`       | behavioural racetrack memory: sparse storage, offsets, timing, protocol checks |
| `firm_top`         | `firm_logic_layer` + `rtm_memory`                                     |

Top-level interface (`firm_top`):

* `nt_valid, nt[1:0], nt_last → nt_ready`: one nucleotide per cycle. The next
  read may start as soon as `nt_ready` returns, which happens when the
  previous read's last access has been issued.
* `thr`: the threshold T. Hold it steady while reads are in flight.
* `ld_valid, ld_binset, ld_token, ld_data[4095:0]`: loads the presence bits
  of one token for one binset (bins `ld_binset*4096 ... +4095`). The top
  places the row by the interleaved mapping.
* `mask_valid, mask[4095:0], mask_binset`: one bitmask per binset, in
  increasing binset order, for every read.
* Counters: accesses, shifted and preshifted domains, stall cycles, the
  memory model's own shift count, second-port reads and protocol violations.

`rtm_memory` is not synthesizable. It stands in for the magnetic memory
array, which cannot be written as logic. Its command interface is
(`cmd_sa, cmd_row, cmd_pre_en, cmd_pre_row, cmd_tag`) and its response
interface is (`rsp_valid, rsp_data, rsp_tag`). The model reports a command to
a busy subarray or an out-of-order response slot in `viol_count`. The
scheduler must never trigger one. Everything else is synthesizable.

## 6. Parameters

Defaults are the evaluated configuration: `TOKEN_NT=5`, `READ_LEN=100`,
`SUBARRAYS=8192`, `ROWS=1024`, `COLS=4096`, `DOMAINS=64`, `PRESHIFT=1`,
`US_BUF=1`. All widths are derived from these. The mapping needs
SUBARRAYS ≥ 4^TOKEN_NT, with both powers of two. ROWS must be a multiple of
DOMAINS, and DOMAINS must be even. The testbenches use smaller configurations,
for example 2-nucleotide tokens, 64 subarrays, 16 rows, 32 columns and
8 domains.

## 7. Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/firm_pkg.sv rtl/*.sv tb/tb_firm_top.sv --top-module tb_firm_top
    ./obj_dir/Vtb_firm_top

| testbench            | what it checks                                                       |
|----------------------|----------------------------------------------------------------------|
| `tb_token_extractor` | token ids, count and latency for reads of 100/12/5/3 nucleotides     |
| `tb_count_buffer`    | counts, index order and compaction time; includes a 14-token example read |
| `tb_bin_unit`        | accumulation and the strict `> T` rule, including boundaries         |
| `tb_bin_array`       | bitmasks and their 2-cycle latency at 64 bins                        |
| `tb_rtm_memory`      | data, latency 2S+8 for several S, circular order, preshift, counters, violation detection |
| `tb_mem_scheduler`   | every command, shift totals for the three configurations in closed form, stalls, one access per cycle |
| `tb_firm_top`        | 8 reads end to end at reduced size. Every bitmask is checked, and each mechanism (busy stall, preshift, port-B read, group wrap, pipelining, repeated token, overlapped read input) must occur |
| `tb_firm_configs`    | FIRM, FIRMPR and FIRMUS side by side on the same reads: all bitmasks, shift totals in closed form, second-port reads, run-time order |
| `tb_mapping_example` | the example above at full size, for 8192 binsets: every scheduler command with and without preshift, first shift at binset 8, aligned accesses and 62 shifts per group with preshift |
| `tb_firm_full`       | two reads back to back against the whole default-size reference: all 2 × 8192 bitmasks, access and shift counts per read, throughput (about 1 min to build, 10 s to run) |

## 8. Departures and choices not fixed by the paper

* **Shift timing.** The paper's RTM timing entry for t_RP is "2S". Here it is
  taken as 2 cycles per shifted domain, and precharge itself as 2 cycles.
  Change `T_SH` and `T_RP` in `firm_pkg` to try other readings.
* **Direction in the circular buffer.** The paper's text says both halves are
  read "shifting up". Its figure places rows 63..32 in reverse order under the
  second port. That order only works if the track moves back during the
  second half, and the RTL follows the figure.
* **Domain-block clusters.** The memory groups 512 tracks into a cluster. A
  4096-bit row spans eight such clusters that shift together. The model treats
  the whole row as one unit.
* **Number of bins.** The paper's parameter table lists 33,554,032 bins, while
  its figures use 2^25 = 33,554,432. The design is sized for 2^25, which
  covers both.
* **Scheduler internals.** The paper does not describe these. The offset and
  ready tables, the in-order issue rule, the tags carried with each command
  and the 48-bit timestamps are this design's. The timestamps would wrap
  after about 78 hours of continuous operation at 1 GHz.
* **CountBuffer.** Its organisation is this design's: a table with
  one-cycle clear and a compaction pass into a list. There is one buffer,
  so a read is counted while the previous one's accesses drain, but not
  while they are still being issued.
* **Reference loading.** Writes go straight into the memory model, with no
  timing and no shifting. The paper does not cover writing the reference.
* **Memory model storage.** Storage is sparse, and rows never written read
  as zero, so the 4 GB default configuration simulates in a few MB.
* **Not built.** The DRAM baselines the paper compares against (GRIM, ALPHA,
  ALPHA on RTM) are not built. Energy and power figures are not modelled. The
  physical 3D stacking is not modelled either.
