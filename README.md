# RoMe memory system in SystemVerilog

This is a synthesizable model of RoMe, a memory system for HBM that is
accessed one row at a time. Instead of 64 B column reads and writes, the host
memory controller issues whole-row commands:

- `RD_row` reads one 4 KB virtual-bank row.
- `WR_row` writes one.
- `REF` refreshes one virtual bank.

A command generator on the HBM logic die turns each of these into the usual
ACT / RD / WR / PRE / REFpb sequence. The controller no longer needs bank state
tracking, page policy or per-column timing. It keeps a four-entry queue, five
small bank state machines and the ten row-level timing parameters. Because the
command/address (C/A) link is narrower, the saved pins pay for 36 channels per
cube instead of 32.

The top module is `rome_cube`, one full cube with 36 channels. The DRAM dies
sit outside it: their command and data buses are per-channel ports.

## Block structure

```
rome_cube                      host port, address map, 36 channels
 ├─ rome_addr_map              address -> channel, stack ID, VBA, row
 └─ rome_channel  x36
     ├─ rome_mc                memory controller (processor side)
     │   ├─ rome_req_queue     4-entry age-ordered queue of 4 KB requests
     │   ├─ rome_timing_ctrl   Table-5 row-command timing
     │   ├─ rome_refresh_sched one VBA refresh every 2 x tREFIpb
     │   └─ rome_bank_fsm x5   2 access + 3 refresh VBA FSMs (Idle/Reading/Writing/Refreshing)
     └─ rome_cmd_gen           command generator (HBM logic die)
rome_pkg                       shared constants, enums, structs
```

Every file starts with a comment giving its function, interface and timing.
The comment also says which parts follow the paper and which are this design's
own choices.

## Clock and timing values

One clock of 1 ns runs everything, so every timing value is both nanoseconds
and cycles. All of the paper's numbers are parameter defaults:

| value | default | origin |
|---|---|---|
| tR2RS / tR2RR | 64 / 68 | paper, Table 5 |
| tR2WS / tR2WR | 69 / 73 | paper, Table 5 |
| tW2RS / tW2RR | 71 / 75 | paper, Table 5 |
| tW2WS / tW2WR | 64 / 68 | paper, Table 5 |
| tRD_row / tWR_row | 95 / 115 | paper, Table 5 |
| tRCD, tRRDS, tCCDS, tCCDL, tRP, tRAS, tRC, tWR, tCL | 16, 2, 1, 2, 16, 29, 45, 16, 16 | paper, Table 5 |
| tRFCpb, tRREFD | 280, 8 | paper, refresh example |
| queue depth | 4 | paper, evaluation |
| bank FSMs | 2 + 3 | paper |
| channels per cube | 36 | paper |
| tRTP | 0 | own choice (see below) |
| write latency + burst | 3 + 1 | own choice (see below) |
| tREFIpb | 61 | own choice |
| rows per bank | 8192 | own arithmetic |

"S" parameters apply between different VBAs of the same stack ID, and "R"
parameters between different stack IDs.

## Virtual bank and command sequence

A virtual bank (VBA) pairs bank BA of bank group 2m with bank BA of bank group
2m+1, on both pseudo channels at once. The figure in the paper shows VBA 0–3
on BG0/BG1; VBAs 4–7 on BG2/BG3 are this design's extension of the same
pattern. That gives 8 VBAs per stack ID × 4 stack IDs = 32 VBAs per channel.

One row command moves 2 banks × 32 columns × 2 PCs × 32 B = 4 KB, in 64 beats
of 64 B. The command generator counts offsets from the cycle after the command
arrives:

| event | cycle |
|---|---|
| ACT bank A / ACT bank B | 0 / 2 (tRRDS) |
| RD or WR to bank A, k = 0..31 | 17 + 2k (tRCD + tRRDS − tCCDS + k·tCCDL) |
| RD or WR to bank B | 18 + 2k |
| PRE after the last RD | tRTP = 0 later |
| PRE after the last WR | WL + burst + tWR = 20 later |
| REF | REFpb to bank A, then REFpb to bank B 8 cycles later (tRREFD) |

The text of the paper puts the extra tRRDS − tCCDS wait "before the ACT to the
first bank", but its figure draws it before the first RD. This design follows
the figure. Both give the same RD/WR spacing.

The paper gives no tRTP or write latency. tRTP = 0 and WL + burst = 4 are the
values that make this fixed sequence plus tRP land exactly on the paper's
tRD_row = 95 and tWR_row = 115:

- Read: 16 + 1 + 62 + 0 + 16 = 95.
- Write: 16 + 1 + 62 + 20 + 16 = 115.

Two sequence engines let two row commands overlap; the controller's minimum
gap is 64 cycles. The row command bus carries one command per cycle. ACT wins,
then PRE, then REFpb, and a command that loses waits a cycle. The paper does
not discuss this arbitration; it is this design's own.

Read data are returned with the request tag and beat number. The first beat
of a read leaves the channel 35 cycles after the controller's scheduling
decision. Write data are pulled from the host one beat at a time, in the
cycle of each WR.

## Controller

- **Queue.** The request queue is collapsing and age-ordered. Reads and
  writes share it.
- **Scheduling.** Each cycle the scheduler marks which VBAs are held by an FSM.
  It then issues the oldest request that is ready. A request is ready when:
  - its VBA is free,
  - an access FSM is free, and
  - the Table 5 gap since the previous access has passed. The gap depends on
    read/write direction and on whether the stack ID is the same.
- **Same-VBA order.** A request never overtakes an older one to the same VBA.
  This keeps read-after-write order; it is this design's rule.
- **Bank FSMs.** An FSM returns to Idle by itself after tRD_row, tWR_row, or
  tRFCpb + tRREFD + 4. The extra 4 cycles cover a REFpb delayed on the row bus.
- **Refresh.** One VBA refresh falls due every 2 × tREFIpb, round robin over
  the 32 VBAs.
  - A refresh is issued ahead of requests whenever its VBA and a refresh FSM
    are free.
  - It must wait 2 × tRRDS = 4 cycles after an access.
  - Anything after a REF waits tRREFD + 1 = 9 cycles.
  - Up to 8 refreshes may be postponed. When 8 are pending, no new access to
    the refresh target starts.
  - With tREFIpb = 61, at most ⌈288 / 122⌉ = 3 VBAs are in refresh at once.
    That matches the paper's three refresh FSMs.
- **Output.** The row-level command leaves the controller through a register.

## Address map

A 4 KB chunk number c maps as follows:

- channel = c mod 36
- q = c div 36
- VBA = q[2:0]
- stack ID = q[4:3]
- row = q[17:5]

Consecutive 4 KB blocks therefore spread over all channels, then over VBAs and
stack IDs, so streaming traffic alternates VBAs and uses the short "S" gaps.
The paper sweeps mappings without naming the one it selected, so this order is
this design's choice.

Each channel is taken as 32 VBAs × 8192 rows × 4 KB = 1 GiB, which makes
36 GiB per cube. Misaligned and out-of-range addresses are refused and flagged
on `req_err_o`.

## A conflict in the paper's numbers

With tCL = 16, the paper's tR2WS = 69 makes the write data of a
read-then-write pair reach the DQ before the last read data have left it.

- A gap free of overlap would need a write latency of at least 11 cycles.
- tWR_row = 115 fixes WL + burst at 4.
- tW2RS = 71 allows WL of at most 7.

No single write latency satisfies all three, so the paper's values are kept.
The DRAM model in the testbenches counts these overlap cycles separately
instead of treating them as errors. In the full-size run, about 950 cycles
overlap over 6108 requests. A real part would need a longer tR2W or a shorter
tCL.

## Outside this RTL

- **DRAM dies.** Banks, GBUS and I/O are standard HBM4 and are not changed by
  the chosen VBA design.
- **TSV / micro-bump / PHY layer.** This layer is physical. The encoding of
  the 5-pin C/A link is not given: the channel passes the row-level command as
  one registered word.
- **MRS and other commands.** MRS and the rest of the 11-command set are not
  generated.
- **Host accelerator.** The accelerator and its DMA engine are played by the
  testbenches.

## Testbenches

Each block has a self-checking testbench in `tb/`. Each testbench ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

`rome_hbm_model` is a behavioural HBM4 channel:

- It stores data per pseudo channel.
- It checks tRCD, tRAS, tRP, tRC, tRRDS, tFAW, tCCDS, tCCDL, tRTP, tWR and
  tRFCpb, and open/closed bank state.

What each testbench checks:

- **Bank FSM:** exact busy times (95, 115, 292 cycles).
- **Timing control:** each Table 5 gap to the cycle.
- **Refresh scheduler:** the 122-cycle interval, postponement, the urgent flag
  and round-robin order.
- **Queue and address map:** against reference models.
- **Command generator:** every command offset of a lone RD_row, WR_row and
  REF; data on both PCs; a forced PRE deferral.
- **Controller:**
  - bypassing a busy VBA;
  - exact issue times of streams against the Table 5 gaps;
  - refresh rate;
  - a random mix.
- **Channel:** the controller and command generator against the DRAM model,
  with random traffic.
- **Cube (`tb_rome_cube`):**
  - Runs the full 36-channel top with default parameters: 2304 streaming
    writes, 2304 streaming reads and 1500 random requests.
  - Checks every read beat against what was written, and checks timing in all
    36 DRAM models.
  - Counts each mechanism: every one of the eight Table 5 gaps, same-VBA
    chains, REF, PRE and REF deferral, queue-full back-pressure and refused
    addresses. Any mechanism that never occurs counts as a failure.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/rome_pkg.sv tb/rome_tb_pkg.sv tb/tb_rome_cube.sv --top-module tb_rome_cube
./obj_dir/Vtb_rome_cube
```
