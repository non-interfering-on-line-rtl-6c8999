# Hyper-pipelined Ethernet CRC with non-interfering SEU detection and repair

An SoC that has to test itself in the field (for an upset caused by a
particle hit, for aging, for stuck-at faults) usually has to interrupt its
applications to do so, and has to roll back to a checkpoint when an upset is
found. This design shows the alternative built on *system hyper-pipelining*
(SHP): one copy of a logic block serves many threads in interleaved fashion,
so test threads and redundant copies of safety-critical threads run *beside*
the applications instead of in place of them. Redundant copies of a thread are
compared every cycle of that thread, a wrong copy is voted out and repaired in
hardware, and the thread simply repeats the affected cycle. No other thread
notices.

The scheme is the one proposed by T. Strauch in "Non-interfering On-line and
In-field SoC Testing" (RSP 2024), which describes it for the blocks of a
whole SoC. The RTL here applies it to one concrete circuit: the CRC-32 register of an
Ethernet MAC (the `eth_crc` block: a 32-bit `Crc` register, loaded with
`32'hffffffff` on `Initialize`, updated with four data bits per cycle, and a
`CrcError` flag that is high unless `Crc == 32'hc704dd7b`, the 802.3 residue of
a frame with a correct FCS). The default configuration is 16 thread contexts,
a C-slow factor of 4 and triple redundancy.

## The three ideas it combines

**Barrel technique.** Replace each design register by a small memory of depth
`D`, indexed by a thread number. A thread controller (TC) chooses which
thread's state is read (read pointer) and where the result goes (write
pointer). The logic is shared; each thread still gets one logic pass per turn.

**C-slow retiming.** Cut the combinational logic into `C` sections with a
register set between each pair. Now `C` independent threads can be in the
logic at once, one per section, and the clock can run about `C` times faster.
A thread needs `C` of these micro-cycles for one cycle of the original circuit.

**SHP** is both at once: `D >= C` thread states in memory, any of which can be
fed into the `C`-deep logic in any order. At least `C` ready threads keep the
pipeline full; with fewer, bubbles appear.

**Redundant threads.** A thread marked redundant is stored `R` times. Its
copies are fed through the logic one after another, and while they travel, the
*start* states of the copies are compared. The results are written back only
if all start states agreed. Comparing start states rather than results is what
makes the check cheap: the comparator can be pipelined like the logic and
needs no result buffer, as long as the verdict is ready before the first copy
is written back.

## Block diagram

```
              iss_din (thread input)
                   |
   +---------------v---------------------------+
   |  shp_csr_crc: C sections, CR registers     |
   |  rd_data -> [sec0]|CR0|[sec1]|CR1|...[secC-1] -> res_data
   +--^-----------------------------------------+        |
      | rd_data                                          |
 +----+--------------------+   wr_ptr/wdata/we           |
 | shp_state_mem  D x 32   |<------------------------+   |
 |  read pointer  -> rdata |                         |   |
 |  compare ptr   -> cdata |--+                      |   |
 +----^-------^------------+  |                      |   |
      |rd_ptr |cmp_ptr        v                      |   |
      |       |        +-----------------+           |   |
      |       |        | shp_seu_compare |  rdata vs |   |
      |       |        | (1 reg stage)   |  cdata    |   |
      |       |        +--------+--------+           |   |
      |       |                 | SEU (mismatch)     |   |
   +--+-------+-----------------v--------------------+---v--+
   | shp_thread_ctrl: schedule, pointers, vote, repair      |
   +---^------------------------^---------------------------+
       | commands                | host port
```

`shp_top` wires these four modules together; `shp_pkg` holds the shared
constants, the input bundle `crc_in_t` and the command codes.

## Timing of one thread cycle

A thread issued in cycle `t`:

| cycle | what happens |
|---|---|
| t | TC puts the thread's word on the read pointer; the state enters section 0 together with the thread's input nibble. For a redundant copy, the compare pointer reads the next copy and the comparator registers the per-byte differences. |
| t+1 | comparator result valid; section 1 works |
| t+C-1 | last section's result on `res_data`; written to the state memory at the end of the cycle (`wb_valid`) |
| t+C | the new state is readable; the thread may be issued again |

So a thread can be issued at most once every `C` cycles, and `C` ready
threads fill the pipeline.

A redundant thread occupies `R` consecutive issue slots (copies 0..R-1, at
`t..t+R-1`). The result of the last compare arrives at `t+R`; copy 0 is
written back at `t+C-1`. The scheme therefore needs `C > R` (asserted), which
the default `C=4, R=3` meets exactly: the verdict is used combinationally in
the write-back cycle of copy 0. With `C > R` no result ever needs to be parked.
The cycle of a redundant thread ends (`wb_valid`, `wb_commit`) when copy R-1 is
written back, at `t+C+R-2`.

## Detection, vote and repair

Copy `k` of redundant thread `tid` lives at word `(tid + k*S) mod D`, with
`S = floor(D/R)`, so the copies are as far apart in the memory as it allows
(for `D=16, R=3`: thread 0 uses words 0, 5, 10; thread 4 uses 4, 9, 14).

The copies are compared in a ring: when copy `k` is issued, the compare
pointer reads copy `(k+1) mod R`. This gives `R` pairwise verdicts `m[0..R-1]`:

| pattern of failed compares | meaning | action |
|---|---|---|
| none | all copies agree | each copy writes its result: the new state is stored `R` times, `wb_commit` |
| exactly the two compares of copy `f` | copy `f` is the odd one out | nothing is committed; in copy `f`'s write-back slot the captured start state of copy `(f+1) mod R` is written into copy `f` (`seu_recover`, `seu_copy = f`); the cycle repeats on the thread's next turn |
| all | no two neighbouring copies agree (no majority) | nothing is written, `seu_fatal`; software must reload the thread |
| any other | a copy changed while the copies were being read | nothing is written; the cycle repeats |

`seu_detect` marks every redundant cycle that did not commit. Because results
are only ever written from agreeing start states, an upset in the state memory
never reaches a committed result. An upset in a section register (inside the
logic) yields one differing result, which is then caught at the start of the
next cycle and voted out like any memory upset. The repeat costs the affected
thread one turn; other threads keep running.

Only one redundant thread is in flight at a time (its capture registers and
verdict are single); single threads fill the slots in between.

## Scheduling and load balancing

Software controls the schedule with four commands (`cmd_valid`, `cmd_op`,
`cmd_tid`, plus `cmd_red` and `cmd_prio` for insert):

* `TC_INSERT` adds a thread; `red` makes it redundant, `prio` a priority thread.
* `TC_KILL` removes it; `TC_STALL` / `TC_RESUME` pause and restart it.

Each cycle the TC issues, in this order: the remaining copies of a redundant
thread being issued; a ready priority thread (lowest number first); a ready
redundant thread if none is in flight (round robin); a ready single thread
(round robin). A thread is ready when it is inserted, not stalled and not in
flight. Issuing a priority thread does not move the round-robin pointers, so
the other threads keep their turn order while a priority thread runs. This is how performance is shared between application threads and
self-test threads at run time without stopping either.

## Interfaces of `shp_top`

* **Thread input.** In the cycle a thread is issued (`iss_valid`, `iss_tid`,
  `iss_copy`) the environment answers combinationally with that thread's input
  on `iss_din` (`init`, `enable`, `data[3:0]`, `data[3]` taken first). All
  copies of a redundant thread must get the same input, and the environment
  moves on to the next nibble of a thread only after `wb_commit` for it.
* **Thread output.** When a thread (or copy 0 of a redundant thread) is issued,
  `out_valid`, `out_tid`, `out_crc` (its `Crc` register) and `out_crc_error`
  show its state. For a redundant thread, trust them once that cycle commits.
* **Host port.** `host_we/waddr/wdata` writes a state word when the write port
  is free (`host_wready`); `host_re/raddr` reads one through the compare port
  (`host_rready`; `host_rdata` is valid with `host_rvalid` one cycle later). A
  waiting host access holds back new issues, so it is served within `C-1`
  cycles. Threads are loaded this way before insertion; in-field self-tests can
  use it to force a state.
* **Events.** `wb_valid/wb_tid/wb_commit`, `seu_detect`, `seu_recover`,
  `seu_copy`, `seu_fatal`, `seu_diff` (byte lanes that differed in the last
  compare), `thr_active`, `thr_busy`.
* **Upset model.** `inj_en/inj_addr/inj_mask` XOR a mask into one state word.
  It exists for simulation and is tied low in a device.

Reset (`rst_n`, asynchronous, active low) clears the schedule and the slot
tracking; the state memory and the section registers have no reset.

## Files

| file | content |
|---|---|
| `rtl/shp_pkg.sv` | CRC constants, `crc_in_t`, `tc_op_e`, serial CRC step |
| `rtl/shp_state_mem.sv` | `D x W` state memory, one write and two read ports |
| `rtl/shp_csr_crc.sv` | eth_crc logic cut into `C` sections |
| `rtl/shp_seu_compare.sv` | pipelined start-state comparator |
| `rtl/shp_thread_ctrl.sv` | thread controller: schedule, pointers, vote, repair, host port |
| `rtl/shp_top.sv` | the SHP CRC block |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_shp_top_d8` |
| `tb/shp_top_scenario.svh` | end-to-end scenario shared by `tb_shp_top` and `tb_shp_top_d8` |

Parameters (`shp_top`): `D = 16` thread contexts, `C = 4` sections, `R = 3`
copies. These are the FPGA figures of the scheme; its ASIC variant uses
`D = 8`, which `tb_shp_top_d8` simulates. The CRC logic allows `C` = 2 or 4 (it
takes 4 bits per cycle), the controller requires `C > R` and `D >= R`, so with
triple redundancy `C = 4` is the only choice.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run as a failure. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/shp_pkg.sv \
    rtl/shp_state_mem.sv rtl/shp_csr_crc.sv rtl/shp_seu_compare.sv \
    rtl/shp_thread_ctrl.sv rtl/shp_top.sv tb/tb_shp_top.sv --top-module tb_shp_top
./obj_dir/Vtb_shp_top
```

and likewise for `tb_shp_state_mem`, `tb_shp_csr_crc`, `tb_shp_seu_compare` and
`tb_shp_thread_ctrl` (the package first, then the module, then its testbench).

* `tb_shp_csr_crc` runs five interleaved threads through the sectioned logic,
  one entering every cycle, and checks each frame against a CRC computed
  byte-wise with the reflected polynomial (`0xEDB88320`), independently of the
  shift form in the RTL: after the body the register must hold the bit-reversed
  complement of the FCS, after the FCS the residue `0xc704dd7b`.
* `tb_shp_thread_ctrl` replaces memory and logic by a model where every cycle
  adds one to the state, so the expected state is the initial value plus the
  number of commits. It covers priority (including that single threads beside
  a priority thread are all still served), stall/resume, kill, host access,
  latency, a single upset (detected, repaired copy named, states right
  afterwards) and a double upset (no majority, no progress until software
  reloads the thread).
* `tb_shp_top` is the whole block at its default size: five redundant CRC
  threads and one single thread check random frames while single-bit upsets
  are injected every 80 to 120 cycles, mostly into the stored copies of the
  redundant threads and sometimes into a section register of the logic while
  it carries a redundant copy. All frames must still end on the residue. It
  also forces a no-majority case and recovers it through the host port, and
  requires that every mechanism (detection, repair, repeated cycle, host wait,
  priority issue, pipeline bubbles with fewer threads than sections, stall,
  kill, upset in the logic) occurred. It runs in about 5,000 cycles. Not every
  injected memory upset is detected: one that hits a copy after that copy was
  read and before its result is written back is simply overwritten.
* `tb_shp_top_d8` runs the same scenario (shared in
  `tb/shp_top_scenario.svh`) with `D = 8`: two redundant and two single
  threads.

## Where this RTL departs from, or goes beyond, the scheme it implements

* The scheme is described for whole SoC blocks (a barrel RISC-V CPU, matrix
  vector units, AES, an Ethernet MAC, an SDRAM controller). Those cores are
  not part of this RTL. It applies the scheme to one small circuit whose
  function is fully known, the Ethernet CRC register. The CRC
  polynomial and bit order are those of IEEE 802.3.
* The source is of two minds about the Ethernet core: one passage says it
  needs only the barrel technique, the reported configuration applies C-slow
  retiming with `C = 4` to all peripherals and the barrel technique to the
  Ethernet core in addition. This RTL follows the reported configuration.
* Where the logic is cut into sections is this design's choice (one data bit
  per section at `C = 4`), not a timing-driven retiming result.
* The ring comparison, the copy placement formula, the repair source
  (`(f+1) mod R`), the one-redundant-thread-in-flight rule, the scheduling
  order, the meaning of "priority", the command, thread-input and host
  interfaces, and the upset-injection port are all design choices filling in
  what the scheme leaves open.
* Only the main variant is built: a second read port for the compare, `R < C`
  so no results are buffered. The variants that store results in alternating
  memory locations (for `R >= C`), or replace the second read port by a
  pipelined capture register, are not built.
* The software side of in-field testing (stuck-at self-test programs generated
  at RTL, delay-fault test scheduling) is outside this RTL; the host port and
  the scheduler are the hardware hooks such test threads use. The host write
  port is the kind of "set a state from software" hook such tests need; no
  loop-back paths are added, since the CRC block has no output that would
  need one.
* Uninitialised thread words and aliasing (using a redundant thread's copy
  words for another thread) are not checked in hardware; software must load
  a thread's words before inserting it.
