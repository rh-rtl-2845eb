# RH+ row-hit scheduling for an HBM3 processing-in-memory stack

In an HBM3-PIM stack every DRAM bank has a small processing unit (PU) next
to its row buffer, and one all-bank command, MAC_AB, makes all PUs of a
pseudo-channel multiply a 32-byte column of weights by a 32-byte slice of the
input vector and accumulate the result. A matrix-vector product (GEMV), the
operation that dominates token-by-token LLM decoding, becomes a long stream
of MAC_AB commands.

How fast that stream can go depends on where consecutive MACs land in the
DRAM. Host-style address interleaving gives consecutive addresses that map
to one bank a stride of 64 columns, while a DRAM row holds only 32 columns.
Every MAC then needs its own row: activate (ACT), one MAC, precharge (PRE),
and the next ACT may not come before the row cycle time nRC (63 clock cycles
at 5.2 Gbps). The power limit on MAC_AB spacing, nCCDAB (6 cycles, or 4 when
power delivery allows), never matters, because nRC is ten times larger.

RH+ lays the weights out so that consecutive MACs read consecutive columns,
a stride of 1. Thirty-two MACs now share one ACT and one PRE and fire back to
back at the nCCDAB rate. For 32 MACs:

| layout, mode            | cost of 32 MACs                        |
|-------------------------|----------------------------------------|
| stride 64, either mode  | 32 x nRC = 32 x 63 = **2016** cycles   |
| stride 1 (RH+), PC      | nRC + 31 x 6 = **249** cycles (8.1x)   |
| stride 1 (RH+), NPC     | 61 + 31 x 4 = **185** cycles (10.9x)   |

This scheme, RH+, comes from "RH+: Row-Hit-Optimized Scheduling for
PIM-based LLM Inference" (Y. Jung, S. M. Anik, B. K. Lee, J. Ryoo). Its
authors evaluate it in a cycle-accurate simulator. The RTL here implements
it as hardware: a per-pseudo-channel command scheduler
that generates the RH+ address sequence, keeps track of the open row, turns
row hits into back-to-back MAC_ABs and obeys the DRAM timing, together with
the datapath the commands drive (the GEMV input buffer and one PU per bank),
for a whole 1024-bank stack. The DRAM arrays themselves are not RTL; their
command and data ports are brought out of the top.

## Organisation

```
rhp_pim_top                  one stack: 16 channels x 2 = 32 pseudo-channels
 └─ rhp_pim_pch  (x32)        one pseudo-channel: 32 banks (8 bank groups x 4)
     ├─ rhp_cmd_sched         command scheduler, timing, open-row state, counters
     │   └─ rhp_addr_gen      MAC index -> (row, column)
     ├─ pim_global_buffer     GEMV buffer: the input vector, 1024 columns
     └─ pim_pu       (x32)    per-bank PU: 16 multipliers, adder tree, Result
pim_pkg                       shared constants, command enum, descriptor and counter structs
```

Data flow inside a pseudo-channel:

```
 host x stream ──WR_GB──> GEMV buffer ──column k──┐ (broadcast)
                                                   v
 bank b row buffer ──column (row_k, col_k)──> PU b: sum_i w_i * x_i  ──+──> Result b
                                                                       ^      │
                                                                       └──────┘
 MV_SB: Result[0..31] -> results output
```

All pseudo-channels of the stack get the same descriptor, the same input
vector and the same start, so they run in lockstep; each holds its own open
row, its own copy of the vector and its own 32 results. One pass yields
1024 dot products.

## The command scheduler and its timing model

This is the part that decides performance, and the part where the RTL has to
commit to details the cycle counts above leave open.

The scheduler keeps, for its pseudo-channel, whether a row is open and
which. Because every command is all-bank, one open-row register serves all
32 banks. For the next MAC (index k, address from `rhp_addr_gen`) it does
exactly one of:

* **row hit** (the open row is MAC k's row): issue MAC_AB once tRCD has
  passed since the ACT and nCCDAB since the previous MAC. While it waits,
  the cycle is counted as a stall.
* **row conflict** (another row is open): issue PRE once the previous MAC
  has had its nCCDAB.
* **row closed**: issue ACT once tRP has passed since the PRE and nRC since
  the previous ACT.

After the last MAC the row is closed the same way, and the MAC phase ends
when the bank could accept its next ACT (tRP after the PRE, nRC after the
ACT). So a row visited by n consecutive MACs costs

```
max(nRC, tRCD + n * nCCDAB + tRP)
```

cycles from its ACT to the next possible ACT. The paper gives nRC = 63 and
nCCDAB = 6 (PC, power-constrained) or 4 (NPC), but not tRCD and tRP. They are
set to 18 and 39 so that tRCD + nCCDAB + tRP equals 63 in PC mode; then a
single-MAC row costs exactly nRC and a full row costs nRC + 31 x nCCDAB = 249,
as in the table. Only the sum tRCD + tRP = 57 affects any count; how it
splits does not.

For NPC mode the formula gives 18 + 32 x 4 + 39 = 185, which is the 185-cycle
figure for 32 row hits. That figure corresponds to an nRC of 61 in the NPC
case, while the text quotes nRC = 63 throughout. The RTL keeps the 63-cycle
ACT-to-ACT limit in both modes. As a result single-MAC rows (stride 64) cost
63 cycles in both modes. This matches the published observation that PC and NPC give
identical baseline cycle counts, and full RH+ rows still cost 185 in NPC.
NPC is then 249 / 185 = 1.35 times faster per full row; the published
figure is 1.36.

A second discrepancy is deliberately not modelled: the baseline discussion
describes MAC_AB commands rotating over 16 channels, which gives each channel
a 16-cycle gap between its commands. Under such a rotation RH+ hits could not
be issued every 4 or 6 cycles either. The RH+ cycle counts assume they can be.
Here each pseudo-channel has its own scheduler, so it issues at nCCDAB.

Around the MAC phase the scheduler also issues the data-movement commands
the design needs:

* **WR_GB** (4 cycles each): `num_wrgb` columns of the input vector, taken
  from the host stream into GEMV-buffer entries 0, 1, 2, ... before the first
  ACT.
* **MV_SB** (4 cycles): once, at the end, to copy all 32 PU results to the
  output register.

The order (all WR_GB, then the MACs, then one MV_SB) is this design's choice.
Refresh is not scheduled.

All timing values are module parameters (`N_RC`, `N_CCDAB_PC`, `N_CCDAB_NPC`,
`T_RCD`, `T_RP`, `T_WRGB`, `T_MVSB`). The PC/NPC choice is a bit of each
pass's descriptor.

## Weight layout and the address sequence

MAC k of a pass reads linear column `k * stride`, counted from column 0 of
`base_row`:

```
row = base_row + (k * stride) / 32      col = (k * stride) mod 32
```

RH+ means programming `stride = 1`: MAC k must then find, in column k mod 32
of row base_row + k/32 of every bank, the 16 weights that multiply elements
16k .. 16k+15 of the input vector. These are the 16 weights of the output
row that bank computes. Putting them there is a one-time offline reordering
of the weight matrix along K; it changes nothing in the result, since the PU
only adds. The stride is a descriptor field rather than a constant. The same
hardware can therefore also walk the host-interleaved stride-64 layout, and
the testbenches use that to measure the difference.

## A GEMV pass

The host drives `rhp_pim_top`:

1. While `busy` is low, pulse `start` with a `gemv_desc_t`:
   `base_row`, `num_macs`, `stride`, `num_wrgb`, `clear_acc` (zero the PU
   results first) and `npc_mode`.
2. Offer `num_wrgb` 256-bit input columns on `x_data` with `x_valid`. A
   column is taken in a cycle where `x_valid` and `x_ready` are both high,
   once every 4 cycles at most (the WR_GB time). Once offered, a column must
   stay offered until taken. This rule is asserted.
3. The stack issues ACT / MAC_AB / PRE on `cmd[p]` for every pseudo-channel
   p. In every cycle `cmd[p].cmd == CMD_MAC`, the DRAM side must present on
   `col_data[p][b]` the column `cmd[p].col` of the open row of bank b. The
   row is the one given with the last ACT and repeated on the MAC. The RTL
   assumes the column is there in the same cycle; a real array's read
   latency is not modelled.
4. `res_valid` pulses with all 1024 results in `results[p][b]`, and `done`
   pulses a few cycles later. `stats` then holds the counters of the pass:
   total cycles, MAC-phase cycles, ACTs, PREs, MACs, row hits, WR_GBs,
   MV_SBs and nCCDAB stalls.

MAC k multiplies by GEMV-buffer entry k (mod 1024). A pass of up to 1024 MACs
(K up to 16384 elements) needs one load of the vector. A pass can skip the
load (`num_wrgb = 0`) and reuse the vector already in the buffer, so several
output rows can follow one load. A longer K is split into passes run with
`clear_acc = 0`, which accumulate on the previous result. A batch of B input
vectors is B passes over the same weights.

## Processing unit and number format

Each PU has 16 lanes, one per 16-bit element of a 32-byte column: 16
multipliers, a four-level binary adder tree and a 48-bit Result register that
the tree's sum is added to. Elements are signed 16-bit integers and the
arithmetic is exact. The data type of real HBM-PIM PUs is not taken up
here; exchanging `pim_pu` for a floating-point one changes nothing else. The
sum is registered one cycle after the MAC_AB. MACs are at least 4 cycles
apart, so the single combinational stage has time to spare.

## What is outside the RTL

* The DRAM arrays, sense amplifiers (row buffers), column decoders and
  multiplexers of the banks, and the PHY and TSVs of the logic die. These are
  process-specific parts of an HBM3 device. The testbenches use a
  behavioural bank model, `tb/pim_dram_model.sv`. It follows ACT/PRE and
  returns a hash of (pseudo-channel, bank, row, column, lane) for each MAC,
  and it flags any MAC that reaches a closed or wrong row.
* The reduction and softmax commands (MV_GB, SFM) and the SoftMax use of the
  GEMV/SoftMax buffer. Only their names are known, and RH+ does not touch
  them.
* The host side: mapping LLM layers onto passes, and attention, which does
  not use MAC_AB.
* Refresh.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_rhp_addr_gen` | addresses against a column-by-column walk; stride 64 gives R0, R2, R4; stride 1 gives C0..C31 of one row |
| `tb_rhp_cmd_sched` | 249 / 185 / 2016 cycles for 32 MACs, row costs for random lengths, strides, modes and bases; an independent command monitor checks every MAC's address and open row, and the tRCD, nCCDAB, tRP, nRC and WR_GB spacings |
| `tb_pim_pu` | 3000 random accumulate/clear cycles with extreme operands against a 64-bit model |
| `tb_pim_global_buffer` | random writes and same-cycle reads of all 1024 entries |
| `tb_rhp_pim_pch` | one pseudo-channel with the bank model: results of 32 banks over five passes (PC/NPC, stride 1/3/64, accumulation, a pass longer than the buffer, reuse of the loaded vector) |
| `tb_rhp_pim_top` | the full 1024-bank stack at default parameters: all 1024 results of three passes, cycle counts (2 x 249, 185, 8 x 63), lockstep of all pseudo-channels; it requires each mechanism to occur (row hits, ACTs, nCCDAB stalls, PC, NPC, WR_GB, host stalls, MV_SB, accumulation) |
| `tb_gemv_qkv_kernel` | the GPT-175B QKV projection (4608 x 12288) on one pseudo-channel, 5 output rows per bank, stride 1 against stride 64 |

Results of the kernel test: the MAC phases take 29,880 cycles with RH+ and
241,920 with the stride-64 layout, a ratio of 8.10. Including the one vector
load and the MV_SBs the ratio is 7.43. At stride 64 a bank's 4.5 output rows
of this kernel cost 4.5 x 768 x 63 = 217,728 cycles. This agrees with the
221K cycles published for the kernel's baseline to within 2 %.

## Simulating

Any testbench builds with plain Verilator 5. Give the package files first:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pim_pkg.sv tb/tb_pim_pkg.sv rtl/*.sv tb/pim_dram_model.sv \
  tb/tb_rhp_pim_top.sv --top-module tb_rhp_pim_top
./obj_dir/Vtb_rhp_pim_top
```

(Verilator warns that the package is given twice, because `rtl/*.sv`
includes it; the warning is harmless.) The full-stack testbench takes a few
minutes to compile, because of the 1024 PUs and 32 bank models, and about a
second to run. The others compile in seconds. To try other timing, change
the parameters of `rhp_pim_top`. The stack size is `NUM_PCH` and `NB`, and
the buffer depth is `GB_ENTRIES`.

## Choices made here, in one list

* tRCD = 18, tRP = 39 (only their sum of 57 is implied). ACT-to-ACT is held
  at 63 in both modes.
* One scheduler per pseudo-channel. The 16-channel command rotation is not
  modelled.
* Pass order: WR_GB first, then the MACs, then one MV_SB. Every pseudo-channel
  of the stack runs the same pass in lockstep.
* The GEMV buffer holds 1024 columns, with a same-cycle read.
* Bank column data arrives in the MAC_AB's own cycle.
* Signed 16-bit integer elements and a 48-bit accumulator. The row address is
  15 bits (32 GiB addressable per stack).
* Asynchronous active-low reset. PU results, counters and scheduler state are
  reset; the GEMV buffer contents are not.
