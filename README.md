# SCREME sub-channel: ChipKill with a write-only check chip and reconfigurable I/O

A DDR5 ChipKill sub-channel has 8 x4 data chips and 2 x4 check chips, so 25 % of it
is redundancy. That redundancy runs at full speed on every access, yet half of it is
only ever needed after something has gone wrong. This RTL builds a memory-controller
and module-side datapath around that idea, following the SCREME proposal
("SCREME: A Scalable Framework for Resilient Memory Design"):

* **Write-only check chip.** Reads check only the first check symbol (p0). The second
  (p1) is written on every write but read only when the p0 check fails. The chip that
  holds p1 is off the read path, so it can be a cheaper part running at half the
  channel rate.
* **Configurable I/O width.** x4 and x8 DRAM parts share one die and one package. If
  the chip pins can be set to x2, x4 (left or right half) or x8, a module can route
  around dead data wires, dead control wires and dead chips instead of being replaced.
* **Spare pool.** Slow spare chips sit behind a switch on every 2-bit wire pair. They
  can take over the parity of a failed chip or hold the extra check symbols of a
  stronger code.

Everything here is synthesizable SystemVerilog. A self-checking testbench per module
and an end-to-end testbench exercise every mechanism listed above.

## 1. The code and where each symbol lives

A 64-byte line crosses the sub-channel as 16 beats on 40 wires (10 x4 chips). Each
chip contributes 8 bytes per line. Each byte is one symbol of GF(2^8) (polynomial
0x11D) and spans two beats of the chip's 4 wires. The line is protected as eight
independent codewords. Codeword k (k = 0..7) holds:

| symbol | chip column | value |
|---|---|---|
| a_c, c = 0..7 | data column c | line byte 8k + c |
| p0 | column 8 | a_0 ^ a_1 ^ ... ^ a_7 |
| p1 | column 9 | a_0 + a_1*alpha + ... + a_7*alpha^7 (alpha = 0x02) |

This is a standard single-symbol-correcting Reed-Solomon code. Any one wrong symbol
per codeword, so one whole dead chip, is corrected. The syndromes S0 (from p0) and
S1 (from p1) decode as follows (`ssc_corrector`):

* S0 = S1 = 0: no error.
* Exactly one of them is zero: that check symbol itself is wrong; the data is fine.
* S1 = S0 * alpha^j: data symbol j is wrong by S0. It is fixed.
* Anything else: detected but uncorrectable (DUE).

Detection alone (`ssc_detector`) needs only S0. This is what lets p1 leave the read
path. An error that hits two symbols with equal values in one codeword leaves S0 = 0
and passes detection. The same is true of any detect-only phase, and the testbench
checks this case explicitly.

The field, the alpha^i weights and the byte-to-codeword layout are choices made
here. The SCREME paper names the code (ChipKill single-symbol correction with two
check symbols) but not its construction.

## 2. Read path: detect first, correct on demand

`decoupled_ecc_ctrl` receives data + p0 from the regular chips.

* **Clean line:** the response leaves one cycle after the data arrives. The p1 chip
  is never touched.
* **Failed p0 check:** the controller raises `p1_req_o` (one cycle) and holds
  `stall_o` high, which blocks every command in the burst scheduler. When p1 arrives
  it runs the full decoder. The response comes *p1 latency + 2* cycles after the
  data.

p1 for the failing line is found in one of two places:

1. **The parity buffer**, if the line was written so recently that its p1 has not
   yet reached the slow chip. It is forwarded from there in one cycle. This is
   counted separately (`n_p1_fwd_o`).
2. **Its storage.** The slow parity writer finishes the transfer in progress, then
   sends a read command and shifts 64 bits back in.

Only one read is in flight at a time. A read whose line is still in the write queue
is answered from the queue, marked clean.

## 3. Write path: the slow chip must keep up

```
host write --> write_queue (32 lines) --------------------> data chips (data + p0)
         \--> ssc_encoder --p1--> parity_buffer (32 x 8 B) --> slow_parity_writer --> p1 storage
                                        ^ released when the line's data write issues
```

At default sizes one line's p1 is 64 bits. It goes to the write-only store either:

* **wide:** x4 at half rate, with each 4-bit beat held two cycles, so the slow chip
  sees a 3200 MT/s stream with no clock change; or
* **narrow:** x2 at full rate.

Either way it takes 32 cycles, against 16 for the data burst. The slow side therefore
falls behind within a write burst.

`rw_burst_sched` handles this with the following rules:

* A write burst starts at 24 queued writes, or whenever no read is waiting. It
  drains to 8 entries, or to empty if no read waits.
* At the start of a burst (time 0), every line issued also releases its p1 to the
  slow writer. The regular chips finish the burst and turn to reads at t1. The slow
  chip keeps writing into the read phase; this is counted as an **overlap**.
* If the next write burst is due (t2) while the slow side still has work, the burst
  waits. These are counted as **stall** cycles and events. The paper argues this
  rarely happens at realistic write intensities.

The parity buffer has one 8-byte entry per write-queue entry. That is 1/8 of the write
buffer's bytes, as proposed. An entry can leave only after its data write was issued,
which is what makes slow writes start together with the write burst.

## 4. Three places p1 can go

`screme_top` routes the slow writer's wires per line, by the line's native rank
(address bit 5):

| target | used when | wire format | on the module |
|---|---|---|---|
| slow chip, column 9 | normal module | x4, half rate | `io_gating_unit` in x4 mode, beat enable = half-rate tick |
| regular chip at x2 | a wire pair of a column died; chip replacement (chip B) | x2, full rate, on one wire pair | `wo_cmd_*`, `pair_dq_o` |
| spare pool | chip replacement (rank of the dead chip), scalable ECC | x2, full rate, on the switched pair | `spare_switch_array` -> `rate_data_buffer` -> spare chip's `io_gating_unit` (x4, half rate) |

`rate_data_buffer` is the on-DIMM buffer in front of the spare pool. Its host side is
2 bits at full rate and its chip side 4 bits at half rate, so the bandwidths match
exactly. Both directions go through a 4-cycle latency pipeline and a bit gearbox
(`bit_gearbox`, least significant bits first).

## 5. I/O gating

`io_gating_unit` models the pin side of one common x4/x8 die. Its modes and pin
groups are:

* x8: all 8 pins.
* x4: pins 0-3 (group 0) or 4-7 (group 1).
* x2: pin pair g, pins 2g and 2g+1.

A burst is always 16 beats, so the internal word is 32, 64 or 128 bits. On write,
bit j of beat b lands at word bit b*W + j. On read, the word is driven back in the
same order, one beat per `beat_en_i`. `beat_en_i` is what sets the chip's speed:
every cycle for a full-speed chip, every second cycle for a slow one.

## 6. Surviving failures

The module has 4 chip rows and 10 columns. Rows 0,1 form rank 0 and rows 2,3 form
rank 1. Within a rank, the two rows drive opposite x4 halves of each column's 8 wires
(rows 0 and 2 on the right half, rows 1 and 3 on the left). Each row therefore stores
half of every 64-bit lane.

### Dead data wires: column swap (`lane_mapper`, `framework_cfg`)

If one wire pair of column F dies, column F swaps roles with column 9:

* Column 9 takes F's data (or p0 when F = 8).
* Column F keeps only the write-only p1, at x2 on its surviving pair.

Reads never need column F, so reads run at full width. `dram_col_wen_o` turns off
writes to column F's lane. This relies on column 9 being a full-speed part, which
only holds if the module was built with a full-speed p1 chip. It does not hold for a
module with a slow p1 chip.

### Dead control wire: rank reorganisation (`rank_reorg`)

A dead control wire takes out a whole row. Its partner row P then pairs with *both*
rows of the other rank: with one using its native half, with the other using its
other half. The three survivors form three ranks of 16 banks. For row 0 failed:

| logical rank | row 1 | row 2 | row 3 |
|---|---|---|---|
| 0 | banks 0-15 (left half) | banks 0-15 | - |
| 1 | banks 16-31 (right half) | - | banks 0-15 |
| 2 | - | banks 16-31 | banks 16-31 |

Capacity drops by the failed row only, and all 40 wires stay in use for every access.
With two rows failed, the survivors form one rank of 32 banks. In that case the
higher row moves to the other half if both sit on the same half. With three or four
rows failed, no rank is left.

### Dead chip: replacement from the spare pool (`framework_cfg`, `spare_switch_array`)

If chip A (row r, column F) dies:

* Column F swaps roles with column 9 and becomes a parity column. A is switched off.
* Chip B, the other rank's chip on the same wires (row r^2), runs x2 on the first
  wire pair and stores p1 for its own rank.
* The second wire pair is switched to the powered-up spare pool, which stores p1 for
  A's rank.
* The other chips of column F stay x4, as write-only parity chips.

ChipKill strength is the same as before the failure.

### Stronger code: scalable-ECC mode

Chip A of column 9 drops to x2 and the switch gives the other pair to the spare pool,
for the extra check symbols of a stronger code. The configuration side of this mode
is built. The stronger code itself is not: the proposal names it (double-symbol
detect, single-symbol correct) without giving its construction.

## 7. Modules

| module | what it is | timing |
|---|---|---|
| `screme_pkg` | constants, `gf_mul`, `gf_alpha_pow`, enums, `chip_cfg_t` | - |
| `ssc_encoder` | p0/p1 of a line | combinational |
| `ssc_detector` | p0 check per codeword | combinational |
| `ssc_corrector` | full SSC decode with both checks | combinational |
| `decoupled_ecc_ctrl` | detect, stall, fetch p1, correct | 1 cycle clean; p1 latency + 2 otherwise |
| `write_queue` | 32-line FIFO with newest-copy read forwarding | 1 cycle |
| `parity_buffer` | 32 x 8 B p1 FIFO, released on data-write issue, associative lookup | 1 cycle |
| `rw_burst_sched` | write/read bursts, overlap and stall accounting | 1 command per 16 cycles |
| `slow_parity_writer` | p1 to and from storage, wide or narrow | 32 cycles per line + 8 recovery |
| `bit_gearbox` | width converter, LSB first | 1 cycle |
| `rate_data_buffer` | 2-bit full rate <-> 4-bit half rate, 4-cycle latency | 4 + gearbox |
| `io_gating_unit` | x2/x4/x8 pin steering of one chip | 16 beats per burst |
| `lane_mapper` | column role swap | combinational |
| `rank_reorg` | logical rank/bank -> rows, banks, pin halves | combinational |
| `spare_switch_array` | one switchable 2-bit pair to the spare pool | combinational |
| `framework_cfg` | roles, widths, switch and p1 routing from mode + failures | combinational |
| `screme_top` | the sub-channel, all of the above | - |

`screme_top`'s address map is bank = addr[4:0], logical rank = addr[6:5] and
row/column = addr[31:7]. A command to a rank that does not exist in the current
configuration raises `addr_err_o`.

The DRAM arrays are outside the design. The top reaches them through four ports:

* the data chips at line level (`dram_*`: one 64-bit lane per column, plus each row's
  bank and pin half);
* the slow chip's array (`slow_arr_*`);
* the spare chip's array (`spare_arr_*`);
* the x2 pairs of regular chips (`wo_cmd_*`, `pair_*`).

The slow and spare arrays sit behind their I/O gating, so their ports carry whole
64-bit words.

All parameters default to the published configuration:
* write queue 32 entries;
* slow chip at half of DDR5-6400;
* burst length 16;
* data buffer latency 4;
* 32 banks, 2 ranks.

The write-drain watermarks (24/8) and the 8-cycle write recovery are own choices.

## 8. Simulation

Each module `m` has a testbench `tb/tb_m.sv`. Every testbench:

* is self-checking and uses `$urandom`;
* has a watchdog;
* prints `TB_RESULT checks=N failures=M`.

To build and run one with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_screme_top \
    rtl/screme_pkg.sv tb/tb_ref_pkg.sv tb/tb_screme_top.sv
./obj_dir/Vtb_screme_top
```

`tb_ref_pkg` holds an independent reference of the code. It uses log/antilog tables
rather than the shift-and-add multiplier, and a brute-force decoder that tries every
symbol position and every error value.

`tb_screme_top` runs the whole sub-channel at default parameters. It includes
behavioural models of:

* the 4 x 10 chip array, with fault injection per chip;
* the slow array, the spare array and the x2 pairs.

It runs five phases on fresh addresses:

1. Normal module, including one faulty chip.
2. Two faulty chips in one row. Expected status comes from the reference decoder.
3. Dead wire pair: lane swap and narrow p1.
4. Chip replacement: the spare pool path.
5. Dead row: three ranks.

At the end it reports how often each mechanism occurred, and counts a failure for any
mechanism that never did. The mechanisms are:

* slow-write stall and overlap;
* detect + correct and DUE;
* p1 fetch and p1 forward;
* slow-chip writes;
* spare-path writes and reads;
* narrow-path writes and reads;
* lane-swap reads and reorganised-rank reads;
* write-queue forwarding.

A typical run shows:

* 388 stall cycles and 78 overlapping slow-write phases;
* 165 corrected reads, 55 DUEs, 183 p1 fetches and 37 p1 forwards;
* 1068 slow-chip writes;
* 236 spare-path writes and 24 reads;
* 664 narrow writes and 33 reads;
* 299 lane-swap reads and 113 reorganised-rank reads;
* 208 write-queue forwards.

All mechanisms are hit and there are 0 failures. Building this testbench takes a few minutes with
full C++ optimisation; `-CFLAGS -O0` builds in under a minute.

`tb_workload_mix` puts the same sub-channel, with no faults, under random traffic
at write shares of 10 %, 25 % and 50 %. Each share runs 600 requests on a 64-line
working set. It checks every read and checks that each host write produced exactly
one p1 write. It also prints how many cycles the regular chips lost waiting for the
slow chip. In one run (about 12 000 cycles per mix) the losses were:

| write share | stall cycles |
|---|---|
| 10 % | about 90 |
| 25 % | 350-600 |
| 50 % | 3300-3900 |

So the slow chip is nearly free at low write shares and becomes visible only when
half the traffic is writes. The traffic is synthetic. The evaluated SPEC CPU2017
and GAP programs are not replayed here.

## 9. Where this departs from the proposal, and what it leaves out

* **Scheduler.** The evaluated controller is FR-FCFS with open-page management.
  Neither is built. The write queue is FIFO and there is no bank timing model
  (tCL, tRCD and the rest); one command takes the bus for 16 cycles. The
  write-burst / slow-write overlap rule is built as described.
* **Line-level DRAM ports.** Data chips are reached one line at a time, not beat by
  beat. Only the write-only targets (slow chip, spare chip) have a beat-level I/O
  model.
* **p1 storage granularity.** p1 is stored per line. Splitting it over the two rows
  of a rank is not modelled.
* **Column 9 after a swap.** As noted in section 6, column swap and chip replacement
  put data into column 9, so that column must be a full-speed part.
* **p1 fetch does not interrupt.** In the proposal, a detected error interrupts the
  slow chip's write and switches it to read mode. Here the slow parity writer first
  finishes the line it is sending, at most 32 cycles, and then reads. Nothing has to
  be replayed this way, and the regular chips are stalled throughout either way.
* **Mixed slow chips and metadata.** Two further options in the proposal are not
  built: several slow chips of different densities sharing the write-only bandwidth
  in proportion to their capacity, and using the spare bandwidth for DRAM-cache
  tags. A single slow array and a single spare array stand in for "one or a few"
  chips of any density.
* **The stronger code.** Scalable-ECC mode configures the module. The double-symbol
  detecting code is not built.
* **DRAM devices.** The data chips, slow chips, spare chips and the register/clock
  driver are taken as given and are outside the RTL. The testbench has behavioural
  models of them.
* **Benchmark count.** The evaluation names 20 benchmarks (10 SPEC CPU2017, 10 GAP)
  while its text says 24. Performance results need a full-system simulator and are
  not reproduced here.
* **Data-buffer latency unit.** The published latency of 4 has no unit; here it is 4
  channel clock cycles.
