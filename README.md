# AHB DDR SDRAM controller

This core connects an AMBA AHB bus (64-bit data, split transactions) to one x16 DDR SDRAM device with four banks.
Each AHB beat becomes one DDR burst of four 16-bit words:

- the controller opens the row,
- reads or writes the burst with auto precharge,
- and so closes the row again.

Every access therefore takes the same number of clocks, wherever it lands in memory. Two small
state machines do the control. The first runs the power-up initialization of the DDR device; the
second runs read, write and refresh cycles. Both step through their wait states with one shared
clock counter. Command and address pins are decoded from the two state variables. A separate data
path turns one 64-bit word into four DDR words (and back) using a clock at twice the system rate.

The design is deliberately simple. It has no open-row (page) policy, no command queue and no
bank interleaving. Its strengths are a fixed latency per access, a tiny gate count and timing
parameters that a designer changes by editing a handful of numbers.

## Structure

```
             +-----------+   sys_adsn, sys_r_wn, sys_a, sys_wdata   +---------------------------+
 AHB  <----> | ahb_slave | ---------------------------------------> | ddr_ctrl                  |
             |           | <------ cstate, sys_cyc_end -------------|  init_fsm  (istate)       |
             +-----------+ <------ sys_rdata, sys_d_valid ---+      |  cmd_fsm   (cstate)       |
                                                             |      |  clk_counter (clk_cnt)    |
 refresh_counter --- sys_ref_req --------------------------> |      +---------------------------+
         ^---------- sys_ref_ack -------------------------------------|   | istate, cstate
                                                             |           v
                                                       +-----------+  +---------+
                                                       | data_path |  | sig_gen |--> CS# CKE RAS# CAS# WE# A[12:0] BA[1:0]
                                                       +-----------+  +---------+
                                                         DQ[15:0], DQS
```

| File | Role |
|---|---|
| `rtl/ddr_pkg.sv` | State and command encodings, bus widths, timing in picoseconds and its conversion to clocks, mode register contents |
| `rtl/init_fsm.sv` | Power-up sequence (INIT_FSM) |
| `rtl/cmd_fsm.sv` | Read, write and refresh cycles (CMD_FSM) |
| `rtl/clk_counter.sv` | Counts clocks in the current state; cleared on every state change |
| `rtl/ddr_ctrl.sv` | The two state machines and the counter |
| `rtl/sig_gen.sv` | Registered command, address and bank pins |
| `rtl/data_path.sv` | 64-bit to 4 x 16-bit double-data-rate conversion, DQS, read capture |
| `rtl/refresh_counter.sv` | Periodic refresh request with request/acknowledge handshake |
| `rtl/ahb_slave.sv` | AHB slave: wait-state writes, split reads |
| `rtl/ddr_ahb_top.sv` | Top level |

## The shared clock counter

Each wait state (tRP, tMRD, tRFC, tRCD, CAS latency, tDAL, the data states) must last a set
number of clocks. Neither state machine has its own timer. Instead, whenever either machine changes
state, it pulses `sync_reset_cnt`, and `clk_counter` restarts from 0. A wait state of N clocks ends
in the clock where the counter reads N-1.

If N is 0, the machine skips the wait state entirely. For example, with `NUM_CLK_TRP = 0` it goes
straight from PRECHARGE to the next command. The two machines never wait at the same time:
CMD_FSM starts only once INIT_FSM has reached `i_ready`. So one counter serves both.

`clk_cnt` also tells the data path which pair of words in a burst belongs to the current clock.

## Initialization (INIT_FSM)

After reset, the machine stays in `i_idle` with CKE low. It waits until `sys_dly_200us` reports that
the device's 200 µs power-up delay has passed. Then it issues:

| State | Command on the pins | Wait after it |
|---|---|---|
| `i_nop` | NOP, CKE goes high | none |
| `i_pre` | PRECHARGE ALL (A10 = 1) | `i_tRP`, NUM_CLK_TRP clocks |
| `i_emrs` | LOAD MODE, BA = 01, value 0 (DLL enable) | `i_tMRD` |
| `i_mrs` | LOAD MODE, BA = 00, value 0x122 (BL 4, sequential, CL 2, DLL reset) | `i_tMRD` |
| `i_pre` | PRECHARGE ALL | `i_tRP` |
| `i_ar1` | AUTO REFRESH | `i_tRFC1`, NUM_CLK_TRFC clocks |
| `i_ar2` | AUTO REFRESH | `i_tRFC2` |
| `i_mrs` | LOAD MODE, BA = 00, value 0x022 (same, DLL reset cleared) | `i_tMRD` |
| `i_ready` | `sys_init_done` = 1 | |

The repeated states (`i_pre`, `i_mrs`, `i_tMRD`) are told apart by two flags:
- `load_mrs_done` is set by the first mode-register load;
- `load_mrs_af` is set by the second auto refresh.

After `i_tMRD`, the machine goes:
- to `i_mrs` if the first mode-register load has not happened yet;
- to `i_ready` if both refreshes are done;
- to `i_pre` otherwise.

At the default timing, the sequence takes 9 + 2·tRP + 3·tMRD + 2·tRFC = 28 clocks, counted from
`sys_dly_200us` until `sys_init_done` rises. Here tRP, tMRD and tRFC are the wait-state lengths in
clocks.

Like the sequence it follows, this one does not wait the 200 clocks that DDR datasheets ask for
between the DLL reset and the first READ. A system that may read within 200 clocks of
`sys_init_done` should hold off its first read.

## Read, write and refresh cycles (CMD_FSM)

From `c_idle`, the machine takes:
- a refresh request (`sys_ref_req`) first;
- otherwise, an access request (`sys_adsn` low), with `sys_r_wn` choosing read or write.

| Cycle | States (clocks at the default timing) | Total |
|---|---|---|
| Read | `c_ACTIVE` 1, `c_tRCD` 1, `c_READA` 1, `c_cl` 2, `c_rdata` 2 | 7 + 1 idle |
| Write | `c_ACTIVE` 1, `c_tRCD` 1, `c_WRITEA` 1, `c_wdata` 2, `c_tDAL` 3 | 8 + 1 idle |
| Refresh | `c_AR` 1, `c_tRFC` 7 | 8 |

- The data states last BL/2 clocks, since a DDR burst moves two words per clock.
- `sys_ref_ack` is high throughout `c_AR` and `c_tRFC`.
- `sys_cyc_end` pulses in the `c_idle` clock that follows a read or write cycle.
- Reads and writes are issued as READ/WRITE with auto precharge (A10 high). So the closing
  PRECHARGE is hidden, and `c_tDAL` covers the write recovery plus precharge time before the next
  ACTIVE.

## Pin timing

`sig_gen` registers every pin, so a command appears on the pins in the clock *after* its state.
The DDR device samples it at the next rising edge. Relative to that edge E:

- Read word j (j = 0..3) is on DQ during half period E + CL + j/2. The data path samples it at the
  end of that half period with the twice-rate clock. Once the last pair is in, it presents the
  64-bit word on `sys_rdata` with a one-clock `sys_d_valid`, two clocks after the last `c_rdata`
  clock.
- Write word j is driven during half period E + 1 + j/2 (write latency one clock). DQS toggles from
  the falling edge of the twice-rate clock, so its edges sit in the middle of each word.

The data path needs `sys_clk2x` with rising edges on every rising edge of `sys_clk`. It finds out
which of its edges is the aligned one without using `sys_clk` as data. A flop toggled by `sys_clk`
is copied on every `sys_clk2x` edge: when the flop and its copy agree, the edge is the aligned one.

Read data are captured at a fixed, computed latency, not with the DQS strobe that the memory
returns. This is exact in simulation. On a board, the capture point has to be matched to the board
delay, or replaced by a DQS-based capture. **This is the least trustworthy part of the design for
real silicon.**

## AHB slave and split transactions

- An address phase (HSEL, HTRANS NONSEQ or SEQ, HREADY high) starts one controller cycle, at the
  64-bit word address `sys_a = HADDR[24:3]`. The slave keeps `sys_adsn` low until the controller
  shows `c_ACTIVE`. A refresh that was pending is simply served first.
- **Writes** complete with wait states. HREADYOUT stays low through the data phase until the
  clock after `sys_cyc_end`. The data phase lasts 7 + tRCD + tDAL = 11 clocks.
- **Reads** are split transactions. This is because a read holds the bus for the full DDR
  latency, while a write has its data at once. The slave:
  1. answers SPLIT immediately (two cycles, the first with HREADYOUT low);
  2. records HMASTER;
  3. runs the DDR read;
  4. when `sys_d_valid` arrives, keeps the word on HRDATA and pulses that master's HSPLIT bit.
  The arbiter can then grant the master again. Its retry of the same read gets OKAY with no
  wait state, and frees the slave. HSPLIT follows the read's data phase by 9 + tRCD + CL = 12
  clocks.
- **A busy slave** answers SPLIT to any transfer that arrives while a read is running or waiting
  for its retry. The slave remembers those masters and pulses their HSPLIT bits together once it is
  free again.
- Bursts work beat by beat, because each beat carries its own address. A split beat is retried,
  and the burst then continues.
- HTRANS IDLE and BUSY get a zero-wait OKAY.

Limits:
- A split master must retry with the same address, as AHB requires. If it does not, the slave
  stays reserved for that master.
- HMASTLOCK is ignored.
- HSIZE is ignored. The device's data-mask pins are not driven, so every write stores a full
  64-bit word.

## Addressing

The 22-bit system word address covers 32 MB, which is one 256 Mbit x16 device:

| Field | Bits | DDR pins |
|---|---|---|
| Bank | `sys_a[21:20]` | BA1..BA0 |
| Row | `sys_a[19:7]` | A12..A0 with ACTIVE |
| Column | `sys_a[6:0]` | A9..A2 with READ/WRITE (A1..A0 = 0, the start of a 4-word burst); A10 = 1 (auto precharge) |

## Refresh

`refresh_counter` raises `sys_ref_req` every `REF_INTERVAL` clocks once initialization is done.
The default is 780 clocks, 7.8 µs at 100 MHz. It drops the request in the first clock of
`sys_ref_ack`, so that exactly one refresh runs per request. A tick that falls while a refresh is
running raises the next request at once, so no refresh is lost.

## Parameters and timing values

These are fixed by the design and match the reference description:
- burst length 4 and CAS latency 2;
- 16-bit DQ and 64-bit system data;
- a 22-bit system address;
- the state names, the command table and the mode-register layout.

The timing values are not given by the reference and were chosen for a DDR-266 class part at a
10 ns clock:

| Item | Value |
|---|---|
| tRP | 20 ns |
| tRFC | 75 ns |
| tMRD | 15 ns |
| tRCD | 20 ns |
| tWR | 15 ns |
| Refresh interval | 7.8 µs |

`ddr_pkg` converts them as follows: a wait state lasts ceil(t/tCK) − 1 clocks, because the command
state already supplies one clock. tDAL = ceil(tWR) + ceil(tRP) − 1. To retarget the design, edit
the picosecond constants in `ddr_pkg`, or override `NUM_CLK_*` on `ddr_ahb_top`.

CAS latency 2.5 is not supported (it would need half-clock read capture). Burst length 4 is
assumed throughout the data path.

## Where this design departs from the reference description

- **Word per clock.** The reference timing diagrams move one word per clock and quote 10 clocks for
  a read and 9 for a write. Here the data states last two clocks (two words per clock, true DDR):
  a read takes 8 clocks including the final idle clock, a write 9.
- **Row policy.** One passage describes a controller that keeps rows open and flags an address
  conflict when a different row is needed. The state machines described in detail close every row
  with auto precharge instead, and those were built. There is no address conflict output, and no
  power-down mode.
- **Init order.** One passage lists a shorter initialization without the extended mode register.
  The longer sequence, with EMRS and DLL reset, is used.
- **Address width.** The block diagram labels the DDR address 22 bits wide, and the pin list shows
  4-bit command pins. Here the DDR address is 13 bits (A0–A12, as in the mode-register layout) and
  there is one set of command pins for one device.
- **A10.** The text calls the A10 function of READA/WRITEA "auto refresh". It is auto precharge,
  and is implemented as such.
- **Read capture.** Read data are captured without DQS (see Pin timing).
- **Refresh counter.** It is a separate block beside the controller, not inside it.
- **Split policy.** The reference says split transfers are supported but not when the slave
  splits. Here every read is split, and so is anything that meets a busy slave.
- **Not implemented.** Byte writes (data mask) are not implemented.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_clk_counter` | Counting, clear and saturation |
| `tb_init_fsm` | The state order and the length of every wait state, for three timing sets including zero waits |
| `tb_cmd_fsm` | Read, write and refresh state sequences and lengths, refresh priority, `sys_ref_ack` and `sys_cyc_end` |
| `tb_ddr_ctrl` | Initialization, read, write and refresh lengths in clocks through the assembled controller |
| `tb_sig_gen` | Every pin value in every state, against hand-derived commands, mode-register values and address splits |
| `tb_data_path` | Write words and DQS in their half periods, DQ enable, read words and the exact `sys_d_valid` clock |
| `tb_refresh_counter` | Request period and the handshake |
| `tb_ahb_slave` | The AHB protocol against a stand-in controller: two masters sharing the bus, split reads and retries, writes split by a busy slave, HSPLIT releases, bursts and idle cycles |
| `tb_ddr_ahb_top` | The whole core at its default parameters, driven by a random AHB master and connected to `tb/ddr_sdram_model.sv` |

The DDR model (`tb/ddr_sdram_model.sv`) checks that:
- no command is issued before initialization allows it;
- banks are open or closed as each command requires;
- the tRCD, tRP, tRFC, tMRD and tDAL spacings are kept.

`tb_ddr_ahb_top` checks:
- all 400 random transfers against a reference memory;
- the exact write data-phase length and read-to-HSPLIT time;
- the SPLIT response and the zero-wait retry;
- the initialization length;
- that bursts, refreshes, a refresh taken before a waiting access, AHB wait states and split
  reads each occur at least once. A directed case makes the refresh-before-access event happen.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
          --top-module tb_ddr_ahb_top rtl/ddr_pkg.sv tb/tb_ddr_ahb_top.sv
./obj_dir/Vtb_ddr_ahb_top
```

Replace the top module and file name for the other testbenches.

Remaining lint notes (they do not indicate faults):
- `disable iff (reset)` in the assertions shares the asynchronous reset, which Verilator reports
  as SYNCASYNCNET.
- `data_path` uses only bit 0 of the clock counter.
- `ahb_slave` ignores `HTRANS[0]` and the address bits outside the 32 MB window.
