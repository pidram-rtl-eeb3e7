# PiDRAM memory-side hardware: a timing-violating DDR3 controller for processing using memory

Commodity DDR3 chips can do useful work beyond storing data if the memory
controller breaks the rules on purpose. Here is one example. Activate a row,
precharge it far sooner than tRAS allows, then activate a second row of the
same subarray far sooner than tRP allows. The bitlines still hold the first
row's data, so the chip copies it into the second row: a whole 8 KiB row moves
without crossing the memory bus (*RowClone*). Here is another. Read a block
with an activation latency tRCD that is too short. Some cells then return
values that flip at random, which makes them a true random number source
(*D-RaNGe*).

Ordinary memory controllers cannot issue such sequences, and software cannot
ask for them. The RTL here is the memory-side half of a system that can:

* a **PuM Operations Controller (POC)** that software drives with plain loads
  and stores;
* a **custom DDR3 memory controller**. It serves normal cache-block traffic.
  It can also run PuM (processing-using-memory) command sequences that skip
  selected timing checks, and a periodic D-RaNGe sampler.

The CPU, its caches and bus, and the DDR3 PHY sit outside this RTL. The top
level brings out their connection points as plain ports.

```
          CPU loads/stores                     cache-block LOAD/STORE
                 |                                       |
   mmio_* ---> [ POC ] --pim_*--> [ pidram_mc ------------------------------ ]
               instr/flag/data    |  dispatcher   crf (16 x 32 bit)         |
                                  |      |          |                       |
                                  |  cmd_scheduler <-> cmd_timer            |
                                  |      ^    ^                             |
                                  |  periodic_ops: refresh, ZQ,             |
                                  |      drange_ctrl -> rng_buffer (1 KiB)  |
                                  [ ---------------------------- dfi_* ---- ]
                                                                  |
                                                          DDR3 PHY + DRAM
```

## Talking to the POC

The POC has three 64-bit registers on a small MMIO port (`mmio_*`). A load
returns its data one cycle later. Stores complete at once.

| offset | register    | contents |
|--------|-------------|----------|
| 0x00   | instruction | PiDRAM instruction (below) |
| 0x08   | flag        | bit 0 Start, bit 1 Ack, bit 2 Fin |
| 0x10   | data        | result of the last instruction that returned one |

A library call runs an operation in four steps:

1. Store the instruction.
2. Store the flag register with Start = 1. This also clears Ack and Fin.
3. Poll the flag register. Ack means the controller has started the
   operation, and the POC has cleared Start. Fin means its last DRAM command
   has been issued.
4. If the operation returns something, load the data register.

Software may wait for Ack and overlap other work with the operation. It may
also wait for Fin and be sure the operation is done. Inside the POC, Start is
simply `pim_valid` towards the controller. `pim_ack`, `pim_fin` and
`pim_dvalid` set Ack, set Fin and load the data register.

### Instruction format

Operand addresses are 30-bit physical addresses.

| bits    | field |
|---------|-------|
| [63:60] | opcode |
| [59:30] | address A |
| [29:0]  | address B; for CRF access: [35:32] register index, [31:0] value |

| opcode | name      | action | Ack/Fin |
|--------|-----------|--------|---------|
| 0 | NOP       | nothing | same cycle |
| 1 | COPY_ROW  | RowClone: row of A → row of B (same bank) | Ack at first ACT, Fin at last ACT |
| 2 | ACT_FAIL  | reduced-tRCD read of the block at B; data = its low 64 bits | Ack at ACT, Fin with the data |
| 3 | WRITE_CRF | CRF[index] ← value | same cycle |
| 4 | RNG_SIZE  | data = number of 32-bit random words buffered | same cycle |
| 5 | RNG_READ  | data = oldest random word (popped); 0 if the buffer is empty | same cycle |
| 6 | READ_CRF  | data = CRF[index] | same cycle |

Unknown opcodes finish immediately and do nothing.

## Configuration register file

Sixteen 32-bit registers hold the timing values that PuM sequences use. The
ordinary DDR3 timings are fixed in the command timer and are not stored here.

| index | name | reset | meaning |
|-------|------|-------|---------|
| 0 | RC_T1 | 1 | RowClone ACT → PRE, controller cycles (the violated tRAS) |
| 1 | RC_T2 | 1 | RowClone PRE → ACT, cycles (the violated tRP) |
| 2 | TRCD_RED | 1 | reduced ACT → RD, cycles |
| 3 | TRNG_PERIOD | 220 | D-RaNGe period, nanoseconds |
| 4, 5, 6 | TRNG_BANK, TRNG_ROW, TRNG_COL | 0 | block that holds the random cells |
| 7–10 | TRNG_BIT0..3 | 0 | bit offset (0–511) of each random cell in the block |
| 11 | TRNG_EN | 0 | bit 0 starts the sampler |
| 12–15 | – | 0 | free |

With a 10 ns controller clock, the reset values give RowClone timings of
10 ns/10 ns and a 220 ns TRNG period. The values that work depend on the chip
and must be characterised for each module.

## Address map

`dram_addr_of()` in `pidram_pkg` splits a physical address as follows
(1 GiB module, 8 KiB rows, 8 banks). It is pure bit selection, so it is a
function the scheduler calls rather than a module of its own:

```
 29            16 15   13 12          3 2    0
 |     row       | bank  |   column    | byte |
```

Consecutive 8 KiB pages fall in different banks. A 64-byte cache block is one
BL8 burst, starting at column `{PA[12:6], 000}`. The request port moves a
whole 512-bit block per RD or WR.

## Command scheduler and command timer

The scheduler (`cmd_scheduler`) serves one job at a time and issues at most
one command per 10 ns cycle. Each candidate command first goes to the command
timer, together with *bypass* flags, and is issued only when the timer's valid
bit is set.

Banks stay open after an access (open-bank policy). For each bank the
scheduler keeps an open flag and the open row, so a LOAD/STORE costs:

* RD/WR alone on a row hit;
* ACT then RD/WR on a closed bank;
* PRE, ACT, RD/WR on a conflict.

When several jobs wait, a fixed priority decides:

1. **Refresh**: PREA if any bank is open, then REF.
2. **ZQ short calibration**: PREA if needed, then ZQCS.
3. **LOAD/STORE**: kept ahead of PuM work, so adding PuM functions does not
   slow normal traffic.
4. **PuM operation** from the POC (COPY_ROW, ACT_FAIL).
5. **D-RaNGe sample**.

`cmd_timer` holds one down-counter per DDR3 constraint. Counters for per-bank
constraints are kept per bank. An issued command loads every counter it
starts with (length − 1). The valid bit for a query is the AND of the
zero-tests that the queried command must pass.

* The constraints are:
  - tRCD, tRAS, tRP and tRC;
  - read to precharge and write recovery to precharge;
  - tRRD and tCCD;
  - the write-to-read and read-to-write turnarounds;
  - tRFC and tZQCS.
* A new constraint is one more counter of the same form.
* The bypass flags (tRAS, tRP, tRCD) mask exactly the checks that a PuM
  sequence is meant to violate. The scheduler never sets them for normal
  traffic, and an assertion checks that no command leaves without a valid bit.

Defaults are DDR3-800 values in picoseconds, converted to cycles (rounded up):

| constraint | ns | cycles |
|------------|----|--------|
| tRCD | 13.5 | 2 |
| tRP | 13.5 | 2 |
| tRAS | 37.5 | 4 |
| tRC | – | 6 |
| tRRD | 10 | 1 |
| tRTP | 7.5 | 1 |
| WR → PRE | 37.5 | 4 |
| tCCD | 10 | 1 |
| WR → RD | 30 | 3 |
| RD → WR | 15 | 2 |
| tRFC | 110 | 11 |
| tZQCS | 160 | 16 |

## RowClone sequence

COPY_ROW first closes the source bank if it is open. It then issues:

```
cycle      0          T1          T1+T2
command    ACT src    PRE         ACT dst
           (Ack)      tRAS        tRP
                      bypassed    bypassed   (Fin)
```

`since`, the cycles since the last command, is compared with RC_T1 and RC_T2.
After the sequence the destination row is open and the bank is marked open on
that row. The following PRE waits for the full tRAS from the second ACT.

The copy works only when both rows lie in the same subarray. The controller
does not check this; choosing the rows is left to the software allocator.

The destination bank field is ignored, because a copy is always within the
source bank. With T1 = T2 = 1 the three commands take three cycles, i.e. 30 ns
of command bus.

## Reduced-tRCD access and D-RaNGe

ACT_FAIL and the D-RaNGe sampler share one sequence:

1. Close the bank if needed.
2. ACT.
3. RD after TRCD_RED cycles instead of tRCD, with tRCD bypassed.

The bank is left open.

`drange_ctrl` lives inside `periodic_ops`, beside the refresh and ZQ timers.

* **When it samples.** Once enabled, it asks for one sample of the configured
  block every TRNG_PERIOD ns, counted from the previous accepted request in
  10 ns steps, while the random number buffer is not full.
* **What it keeps.** The block's bank, row and column go from the CRF
  straight to the scheduler. From each block read, the sampler takes the four
  configured bits.
  TRNG_BIT0 becomes the most significant bit of the 4-bit sample.
* **How words are built.** Eight samples form a 32-bit word, first sample in
  the top nibble. The word is pushed into `rng_buffer`.
* **The buffer.** `rng_buffer` is a 1 KiB first-word-fall-through FIFO of
  256 words. Software reads its fill level with RNG_SIZE and pops it with
  RNG_READ.

At a 220 ns period the sampler delivers 4 bits / 220 ns, about 18 Mb/s, into
the buffer. The period register also accepts shorter values. The sampler then
runs as fast as the scheduler can serve reduced-tRCD reads: each one is a PRE,
ACT, RD sequence, roughly one row cycle (about 60 ns here). What a program
observes is lower, because it pays the POC round trip for every word.

## Refresh and ZQ

`periodic_ops` raises `ref_req` every tREFI (7.8 µs) and `zq_req` every
128 ms. Each request is held until the scheduler issues the command. Refresh
is never postponed or batched.

## Clocking, reset and interfaces

* **Clock and reset.** One clock domain, with the controller clock at 10 ns.
  That corresponds to DDR3-800 behind a 4:1 PHY, one command slot per cycle.
  Reset is asynchronous and active low. After reset the CRF holds the values
  above, and all banks are taken to be precharged.
* **DFI-style port.** The command slot is a packed struct: CS#, RAS#, CAS#,
  WE#, BA[2:0], A[13:0], encoded by the JEDEC truth table. Write data (512
  bits) travels with the WR command under `dfi_wrdata_en`. Read data comes
  back under `dfi_rddata_valid`. The PHY is expected to do the serialisation
  and the read/write latency alignment.
* **Request port.** `req_valid/req_ready` carries a 30-bit address, a write
  flag and a 512-bit block. `rsp_valid` pulses with LOAD data, or when a
  STORE has been issued. One request is outstanding at a time.

## Where this design departs from, or adds to, the original system

* **Outside this RTL.** The Rocket CPU, with its CLFLUSH extension, the
  memory bus, the Xilinx DDR3 PHY and the software are not included:
  * the PuM library (pumolib);
  * the supervisor software;
  * the subarray-aware allocator (SAMT, AIT and IRT tables).

  The top brings out their connection points as ports instead.
* **Own choices.** The following are choices of this design, not given by
  the original:
  * the instruction encoding, the POC register offsets and flag-bit
    positions;
  * the CRF layout and the TRNG enable bit;
  * the scheduler priorities;
  * the 10 ns controller clock;
  * the ZQ interval;
  * the word packing of random bits.
* **Returned values.** ACT_FAIL returns only the low 64 bits of the block it
  reads. RNG_READ of an empty buffer returns 0.
* **tFAW.** No tFAW counter exists. At one command per 10 ns and tRRD of one
  cycle, four ACTs take at least 40 ns. That is short of the 50 ns DDR3-800
  asks for with 2 KiB pages. Adding tFAW means one more counter in
  `cmd_timer`, plus a small ACT history.
* **TRNG period below 220 ns.** The original controller sampled at most
  once every 220 ns. Here the period is limited only by the access time.
* **Row and subarray checks.** The controller takes the physical addresses it
  is given. It does not check that RowClone operands share a subarray.

## Files

* `rtl/pidram_pkg.sv`: widths, types, command encoding, instruction and
  register maps, reset values.
* `rtl/crf.sv`, `cmd_timer.sv`, `cmd_scheduler.sv`, `rng_buffer.sv`,
  `drange_ctrl.sv`, `periodic_ops.sv`: controller parts.
* `rtl/pidram_mc.sv`: the memory controller. `rtl/poc.sv`: the POC.
  `rtl/pidram_top.sv`: POC plus controller.
* `tb/ddr3_model.sv`: behavioural DRAM model for the testbenches. It is not
  synthesizable. It stores blocks sparsely, checks nominal timings, and
  performs a RowClone when an early PRE is followed by an early ACT in the
  same 512-row subarray. A reduced-tRCD read randomises four cells of the
  block (bits 3, 77, 200 and 511).
* `tb/tb_pkg.sv`: testbench helpers.
* `tb/<module>_tb.sv`: one self-checking testbench per module. `addr_map_tb`
  checks the address-split function.
* `tb/pidram_top_tb.sv`: the end-to-end test. It drives random LOAD/STORE
  traffic, RowClone copies and initialisations, ACT_FAIL, CRF access and
  D-RaNGe through the POC registers, with software polling Ack or Fin. It
  counts each mechanism: row hits, closed-bank and conflict accesses, PREA,
  refresh, ZQ, copies, buffer-full stalls and so on. For speed it shortens
  tREFI, the ZQ interval and the buffer.
* `tb/pidram_top_full_tb.sv`: every parameter at its default. It runs one
  RowClone, fills one random word at the 220 ns period, and waits for a
  refresh.

* `tb/rowclone_workload_tb.sv`: the bulk-copy workloads at default
  parameters, driven through the POC as a library would drive them:
  * rcc/rci on arrays of 8 KiB to 8 MiB;
  * forkbench with 8 to 2048 pages, followed by 32K random loads;
  * compile's two-page initialisation;
  * libquantum's 512 KiB initialisation.

  Copied data is checked, and so is the linear growth of execution time.
  Through the POC, one 8 KiB row copy costs about 12 controller cycles
  (120 ns). 8 MiB takes about 12,200 cycles.
* `tb/drange_workload_tb.sv`: the D-RaNGe throughput loop for periods of
  220 to 1000 ns in 10 ns steps. It checks the cycles per word (eight
  samples) against the period. It measures 18.2 Mb/s at 220 ns and 4.0 Mb/s
  at 1000 ns.

Every testbench ends with the line
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/pidram_pkg.sv tb/tb_pkg.sv tb/pidram_top_tb.sv --top-module pidram_top_tb
./obj_dir/Vpidram_top_tb
```

Replace `pidram_top_tb` with any other testbench name. Block-level benches
that do not use the DRAM model need only `rtl/pidram_pkg.sv` and their own
file. Timing defaults live in the parameters of `cmd_timer` (picoseconds),
`periodic_ops` (nanoseconds) and in `pidram_pkg` (`CLK_PS`, CRF reset values).
