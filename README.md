# Refresh Triggered Computation (RTC): RTL of the full in-DRAM variant

DRAM cells leak, so every row must be re-activated within a retention window,
64 ms for commodity parts. Usually the memory controller sends a REF command
every 7.8 us, and the DRAM refreshes the next rows of an internal counter,
whether the rows hold data or not and whether they were just read. A
convolutional-network accelerator does not need that blind refresh. It
streams through its weights and feature maps in a fixed, predictable order,
and it often uses only a small part of the DRAM.

RTC puts those two facts to use. It has two mechanisms:

* **Refresh Triggered Transfer (RTT).** A refresh slot can be spent on a row
  the application needs anyway. Opening a row for a read or write restores its
  cells, the same as a refresh. When the memory controller knows that the
  application accesses `N_a` rows per retention period, and `N_r` rows need
  refreshing in that period, it can spread the accesses over the refresh slots.
  Each slot is then either *implicit*, where an access does the refreshing, or
  *explicit*, where the row under the refresh counter is refreshed. Refresh
  work and access work are done once instead of twice.
* **Partial-Array Auto Refresh (PAAR).** The refresh counter gets a
  programmable first and last row. Rows outside that range are never
  refreshed. A small working set no longer pays for refreshing the whole bank.

In this full variant, the DRAM generates the access addresses itself. Two
affine address generators, one for rows and one for columns, live next to the
refresh counter inside the bank. The memory controller only says, once per
slot, whether the slot is implicit or explicit. The DRAM then opens the next
application row and streams its columns, or refreshes the next row of the
range.

This repository gives synthesizable SystemVerilog for that logic, and
self-checking testbenches for each block and for the whole path. One side is
the memory controller, the *frontend*. The other side is the DRAM command
decoder and one DRAM bank, the *backend* and *bank*.

## Block map

```
                 memory controller side              |             DRAM side
  ld refr rtt rate_fsm cfg_*  we rtc_en cke          |
        |                                            |
  +-----v-----------------------------+   command    |  +------------------+
  | rtc_frontend                      |   link       |  | dram_cmd_decoder |
  |   reconfiguration FSM             |--------------+->|  (1-cycle reg)   |
  |   rate_matcher (N_r, N_a, credit) |  cmd,row,col,|  +--+--------+------+
  |   slot timer (REFI_CYCLES)        |  cfg,exp_ref,|     | cfg    | ACT/RD/WR/PRE/REF,
  |   link arbiter                    |  we,ld,cke   |     | slot   | Row ID, Col ID
  +-----^-----------------------------+              |  +--v-----+  |
        | mc_cmd/mc_row/mc_col (base controller)     |  | rtc_   |  |
                                                     |  | backend|  |
                                                     |  |  FSM   |  |
                                                     |  +--+-----+  |
                                                     |     | steps, select
                                                     |  +--v--------v--------------+
                                                     |  | rtc_bank                 |
                                                     |  |  refresh_counter (PAAR)  |
                                                     |  |  Row AGU, Column AGU     |
                                                     |  |  row / column muxes      |
                                                     |  |  self-refresh timer      |
                                                     |  +----------+---------------+
                                                     |             v arr_cmd/row/col
```

`rtc_top` wires the four pieces together. The bank array, the base memory
controller and the accelerator are not part of the RTL. Their signals are
ports of `rtc_top`. `tb/dram_array_model.sv` is a behavioural stand-in for the
array.

| File | Role |
|---|---|
| `rtl/rtc_pkg.sv` | link commands, register map, array commands, mux selects |
| `rtl/rate_matcher.sv` | decides, slot by slot, implicit or explicit |
| `rtl/refresh_counter.sv` | PAAR refresh pointer with start and end row |
| `rtl/agu.sv` | affine sequence `base + i*rate`, `i < count` (used twice) |
| `rtl/rtc_frontend.sv` | reconfiguration FSM, slot timer, link arbiter |
| `rtl/dram_cmd_decoder.sv` | registers the link and decodes it into strobes |
| `rtl/rtc_backend.sv` | in-DRAM slot FSM and configuration strobes |
| `rtl/rtc_bank.sv` | counter, AGUs, address muxes, command selection, self refresh |
| `rtl/rtc_top.sv` | the whole path |

## Rate matching: which slots are implicit

Over one retention period there are `N_r` refresh slots. The application
touches `N_a` distinct rows in that period, in the order the Row AGU produces
them.

* If `N_a >= N_r`, every slot is implicit.
* Otherwise, `N_a` of every `N_r` slots must be implicit and the rest
  explicit, spread as evenly as possible.

`rate_matcher` does this with a credit counter, which works like Bresenham's
line algorithm:

```
P = N_r / gcd(N_r, N_a)          # pattern length in slots
c = N_r
for each slot, restarting every P slots with c = N_r:
    if c > N_r - N_a:  implicit,  c -= N_r - N_a
    else:              explicit,  c += N_a
```

Example: with `N_r = 12` and `N_a = 8`, the decisions are
`I I E I I E ...` (I = implicit, E = explicit). Eight of every twelve slots
are implicit.

After `N_r` or `N_a` is written, the block computes `P` in hardware. A binary
gcd runs first, then a restoring division. Together they take at most about
three cycles per counter bit, about 51 cycles for the 17-bit default. While
this runs, `ready` is low. The frontend sends a plain REF in any slot where
the matcher is not ready, so refresh never pauses.

*A discrepancy in the original description.* Its worked example (`N_r = 4`,
`N_a = 2`) states that the pattern length starts at 1, while the formula gives
`P = 4 / gcd(4, 2) = 2`. With a length of 1, the credit would be reloaded
before every slot and no slot would ever be explicit. That contradicts the
alternating implicit/explicit pattern the same example goes on to describe.
This RTL uses the formula. The testbench model computes the same decisions
independently.

## The frontend: configuration and slot pacing

`rtc_frontend` runs the reconfiguration state machine. The application drives
`ld`, and one of `refr`, `rtt` or `rate_fsm`, then supplies 32-bit words on a
valid/ready port (`cfg_valid`, `cfg_data`, `cfg_ready`).

| From Idle with `ld=1` and | States | Words, in order | Where they go |
|---|---|---|---|
| `refr` | Load refresh start, Load refresh end | start row, end row | CFG on the link → refresh counter |
| `rtt` | Load rate, Load other params | row rate, row base, row count, col rate, col base, col count | CFG on the link → AGUs |
| `rate_fsm` | Load N_r, Load N_a | `N_r`, `N_a` | kept in the frontend's rate matcher |

From Idle, `ld=0` enters **Active**, and `ld=1` in Active returns to Idle.
Entering Active from Idle also restarts the rate matcher's pattern.

A timer counts `REFI_CYCLES` clocks, and each expiry makes one slot due. A
slot always covers exactly one row. A commercial chip receives one REF command
every 7.8 us and refreshes a batch of rows with it. Here the same rate is
spread out row by row: 65,536 rows in the 64 ms retention window is one row
every 0.977 us, so the default is 195 cycles at 200 MHz. A slot has to finish
before the next one starts, which limits the Column AGU count to
`REFI_CYCLES - 4`.

The due slot is sent as **CMD_SLOT**, carrying `exp_ref` and `we`, when all of
these hold:

* the frontend is Active;
* `rtc_en` is high;
* the rate matcher is ready;
* `ld` is low.

Otherwise the due slot is sent as a conventional **CMD_REF**. This is also
how RTC is bypassed (`rtc_en=0`) for applications whose accesses are not
regular. With `cke` low, the timer stops and nothing is sent, because the
DRAM refreshes itself.

The link carries one command per cycle. Priority is:

1. the due slot or REF;
2. a configuration word;
3. the base memory controller's own command on `mc_cmd`/`mc_row`/`mc_col`,
   accepted with `mc_ready`.

The base controller is held off while the frontend is Active. It is also held
off for `col_count + 4` cycles after each slot, long enough for a slot to
finish inside the DRAM.

## The command link and register map

| `dram_cmd_e` | Meaning |
|---|---|
| `CMD_ACT/RD/WR/PRE` | conventional access with Row ID / Column ID |
| `CMD_REF` | conventional refresh of the refresh-counter row |
| `CMD_CFG` | write RTC register `link_cfg_reg` with `link_cfg_data` |
| `CMD_SLOT` | one RTT slot; `link_exp_ref`, `link_we` |

Registers (`cfg_reg_e`): 0 refresh start, 1 refresh end, 2 row rate, 3 row
base, 4 row count, 5 column rate, 6 column base, 7 column count. Writing a base
register also rewinds that AGU to its base.

`dram_cmd_decoder` registers the link, so each command reaches the DRAM-side
logic one cycle after it is on the link. While `cke` is low, the decoder
ignores every command except CMD_CFG. That way the DRAM can be reprogrammed
while its clock enable is held low.

## Inside the DRAM: the backend state machine

`rtc_backend` runs one slot at a time:

```
Idle --(cke=1, ld=0, SLOT)--> Act
Act  --exp_ref=1--> Pre           ACT of the refresh-counter row (explicit)
Act  --exp_ref=0, we=1--> Write   ACT of the Row AGU row (implicit)
Act  --exp_ref=0, we=0--> Read
Read/Write: one column per cycle from the Column AGU, until RowC
            (the Column AGU's last column) --> Pre
Pre  : PRE (first cycle only); then --ld=1--> Idle, --SLOT--> Act
```

* When a slot starts, the Column AGU is rewound to its base.
* In Pre, the refresh counter advances after an explicit slot. The Row AGU
  advances after an implicit one.
* A slot takes `2 + column count` cycles.
* An assertion (`a_no_slot_overrun`) fires if a new SLOT arrives while a slot
  is still running.

The original diagram leaves open what starts Act. Here, the frontend's SLOT
command does, once per refresh interval. So the backend waits for a SLOT in
both Idle and Pre.

## The bank: address path and self refresh

`rtc_bank` contains:

* the PAAR refresh counter. Its pointer walks from `start` to `end`, then
  wraps to `start`. After reset, the range is the whole bank.
* the Row AGU and the Column AGU. Each produces `base + i*rate` (modulo the
  address width) for `i = 0 .. count-1`, then starts again.
* the row address mux. It selects the Row ID, the Row AGU or the refresh
  counter.
* the column address mux. It selects the Column ID or the Column AGU.

When the backend drives the bank, its command wins over a conventional one in
the same cycle. Every refresh advances the counter: a conventional REF, an
explicit RTT slot, or a self refresh. So explicit slots and ordinary REFs
share one walk through the PAAR range.

While `cke` is low, the bank's own timer issues a refresh of the counter row
every `SREF_CYCLES` clocks (default 195, the same per-row rate). This way the
PAAR range also limits self-refresh. A real DRAM would run this timer from an
internal oscillator.

## Assumptions and departures

* **One row per refresh slot.** A real REF covers several rows per command.
  Here a slot or REF restores exactly one row, which keeps the
  slot-for-access trade one-to-one. The slot interval is therefore the
  per-row interval (195 cycles), not the 7.8 us between REF commands.
* **One bank.** The design is drawn with the bank logic replicated per bank.
  How several banks share the frontend is not specified, so one bank is built.
  Several banks would each need their own `rtc_bank`, backend and rate matcher.
* **CKE at the start of RTT.** One description starts RTT by driving clock
  enable and `ld` low. The state diagram starts it on `cke=1, ld=0`. This RTL
  follows the state diagram. CKE low means self refresh, and CKE low is also
  used while reconfiguring.
* **Register map, command encodings, the valid/ready configuration port, the
  guard interval and the one-cycle read latency** are this design's own
  choices.
* **AGU.** It is the simplest affine generator, one stride with a wrap. The
  meaning of "rate" is taken to be the stride.
* **Widths.** These are assumed, not given:
  * 65,536 rows per bank (`ROW_W = 16`);
  * 1024 columns (`COL_W = 10`);
  * 17-bit rate-matching counters;
  * 32-bit configuration words.
* **Not built.** The two lighter variants, which only change the memory
  controller or reuse partial-array self refresh, are not part of this RTL.
  Neither is the data path: data moves between the array and the accelerator
  outside these blocks. `acc_wr_take` and `acc_rd_valid` give its timing.

Sizes the design can hold at its defaults, estimated from common model sizes
at 2 bytes per weight, 2048-byte rows and 65,536 rows per bank:

| Workload | Rows needed | Fits one bank? |
|---|---|---|
| LeNet (about 1 MB) | about 540 rows | yes |
| GoogleNet | about 6,600 rows | yes |
| ResNet-50 | about 25,000 rows | yes |
| AlexNet | about 60,000 rows | yes, with little margin |
| A 1024×1024×3 image | 1,536 rows | yes |

A 30 TB spiking-network model would need a very large number of banks, each
with its own RTC logic.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_rate_matcher` compares each decision with a software model of the
  credit algorithm, over random `N_r`/`N_a` pairs. It also checks that `P` is
  ready within 100 cycles.
* `tb_refresh_counter` and `tb_agu` check sequences, wraps and reloads.
* `tb_dram_cmd_decoder`, `tb_rtc_backend`, `tb_rtc_bank` and
  `tb_rtc_frontend` check strobes, state sequences, mux selection, self-refresh
  spacing, link priority and slot timing, cycle by cycle.
* `tb_rtc_top` is the end-to-end test, at reduced size: 32 rows, 8 columns,
  a 16-cycle refresh interval. It connects `rtc_top` to two testbench models:
  * `dram_array_model`, which tracks when each allocated row was last
    restored and flags any retention loss or protocol error;
  * `rtt_checker`, which predicts every array command from the credit
    algorithm, the AGU patterns and the PAAR range.

  The test runs these phases:
  * conventional refresh over the whole bank, with one write from the base
    controller passed through;
  * PAAR with partial RTT: 12 rows hold data, the Row AGU accesses 8 of them
    and the refresh range covers the other 4; one period of write slots, then
    one of read slots, whose data must match;
  * full RTT, with every slot implicit, after reprogramming the AGUs while
    CKE is held low;
  * bypass with `rtc_en=0`, with conventional REFs over the range;
  * self refresh with CKE low, long enough that rows would be lost without
    the bank's own refreshes;
  * a return to Idle with `ld=1`.

  It counts each mechanism and fails any that never occurred.
* `tb_rtc_top_full` runs `rtc_top` at its default parameters through one
  complete operation:
  * configure the range, the AGUs and the rate matcher;
  * 520 allocated rows (`N_r = 520`), of which 390 are accessed with 64
    columns each (`N_a = 390`), so the pattern length is 4 slots;
  * one full retention period of write slots, then one of read slots, at a
    195-cycle slot interval.

  It checks every array command against the same predictor, checks the read
  data, and checks that no row outside the 520 is touched. Reprogramming the
  AGUs and the rate parameters, including the hardware gcd and division,
  takes 54 cycles; the test allows at most 100. It takes a few
  seconds with Verilator.

* `tb_rtc_workloads` also runs at the default size. It plays the memory
  footprints of five accelerator workloads through `rtc_top`, one after the
  other: LeNet (543 rows), a 1024×1024×3 image (1,536 rows), GoogleNet
  (6,640 rows), ResNet-50 (25,000 rows) and AlexNet (59,600 rows).

  For each workload:
  * The refresh range and the Row AGU cover exactly the footprint.
  * At 60 frames per second, every row is read several times per 64 ms
    window, so `N_a = N_r`.
  * One window of write slots and one of read slots must run with no
    explicit or conventional refresh at all. Every row must be restored, and
    no row outside the footprint may be touched.

  For LeNet, one extra window runs with RTT bypassed. It shows PAAR alone: the
  footprint's rows are each refreshed exactly once. For each workload, the
  test prints how many row refreshes one window costs under conventional
  refresh, under PAAR alone and under RTC. It takes about 40 seconds.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rtc_pkg.sv tb/tb_rtc_top.sv --top-module tb_rtc_top
./obj_dir/Vtb_rtc_top
```

Replace `tb_rtc_top` with any other testbench name. All state is reset
asynchronously by `rst_n`. Nothing relies on initial values.
