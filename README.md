# DESCNet: a hybrid, power-gated scratchpad for capsule-network accelerators

A capsule-network (CapsNet) inference runs as a short sequence of very
different operations. The first convolution streams a large input image. The
primary-capsule layer fills a large accumulator space. The class-capsule layer
needs many weights. The dynamic-routing iterations touch only a few kilobytes.
A scratchpad sized for the worst case of every kind of value at once is mostly
idle and leaks all the time.

DESCNet sizes and gates the on-chip scratchpad of such an accelerator using
knowledge of the application. It rests on two ideas:

1. **Hybrid organisation.** Each kind of value (input data, weights,
   accumulator partial sums) has its own single-port memory, sized below that
   kind's peak. A small shared memory with three ports takes whatever overflows
   in the operation that is running. It is sized for the worst sum of
   overflows, not for the sum of the peaks.
2. **Sector-level power gating driven by the operation profile.** Every memory
   is cut into equal sectors, each behind a sleep transistor. The usage of
   every operation is known ahead of time, so a power manager keeps only the
   sectors the current operation uses switched on. It also wakes the next
   operation's sectors just before they are needed, which hides the wake-up
   latency.

This repository holds synthesizable SystemVerilog for that scratchpad: the
memories, the power manager, the routing of the hybrid organisation and the
write merging. It also has a behavioural model of the sleep transistor and
self-checking testbenches. The default parameters give the organisation chosen
as lowest-energy for CapsNet on MNIST, called HY-PG (hybrid, power-gated):

| memory            | size   | rows of 16 B | sectors | rows per sector | ports |
|-------------------|--------|--------------|---------|-----------------|-------|
| shared            | 32 kiB | 2048         | 2       | 1024            | 3     |
| data              | 25 kiB | 1600         | 2       | 800             | 1     |
| weights           | 25 kiB | 1600         | 4       | 400             | 1     |
| accumulators      | 32 kiB | 2048         | 2       | 1024            | 1     |

That is 114 kiB in total. A single shared memory that holds every operation at
once would need 108 kiB and could not be gated as finely. The accelerator that
computes (a 16x16 array of processing elements), the DRAM and the offline
exploration that picks the sizes are not part of this RTL. Their side of each
interface is a port.

## Banks, rows and sectors

Every memory (`spm_memory`) is made of 16 banks, one per row and column of the
16x16 processing array. Each bank has an 8-bit lane. The banks are addressed
together, so one access moves a *row* of 16 bytes, and byte enables mask a
write. Sizes are in kiB of 1024 bytes, so 25 kiB is 1600 rows.

The row range is split into `NUM_SECTORS` equal sectors. Sector *k* holds rows
`[k*R, (k+1)*R)`, where `R = rows / NUM_SECTORS`. The sectors with the same
index in all 16 banks share one sleep transistor, so a memory has one power
input per sector index (`sector_on`), not one per bank. A request to a row in a
sector that is not powered, or beyond the memory, is dropped: a read returns
zero, and the `err` output rises for one cycle. The top-level testbenches treat
any such event as a failure. A correct power schedule never produces one.

Reads take one cycle: the data appears on the clock edge after the request and
holds until the next read. Writes take effect on the edge of the request. The
shared memory has three ports. Each does a read or a write per cycle. No two
ports may write the same row in one cycle, and an assertion checks this.

## Sleep transistors and their handshake

Each sector group is switched by a footer sleep transistor between its virtual
ground and ground. `sector_power_switch` models it with two signals:

- `sleep_req_n` is driven by the power manager and is **high while the sector
  should be on**. Its falling edge asks for sleep.
- `sleep_ack_n` comes back from an inverter on the virtual ground and is high
  while the sector is powered.

A complete cycle runs ON → OFF → ON: the request falls, and `T_SLEEP_CYC` cycles
later the acknowledge falls. The request rises, and `T_WAKE_CYC` cycles later
the acknowledge rises. A request that reverses before the acknowledge has
followed restarts the delay. Between the two edges the sector is in transition
and counts as off.

The OFF state is a deep sleep that does not retain data. This is safe because
an operation's values are not reused by the next one. The model keeps the
array contents, so a wrong schedule shows up as an access error rather than as
lost data. The published wake-up latency is far below one clock period (0.072
ns in a 32 nm process), so the defaults are one cycle each way. The switch is a
behavioural model of an analog part: it is written in synthesizable style, but
in a real chip it would be a transistor and an inverter, not logic.

## The power manager

`descnet_pmu` is the control centre, and the part that decides whether the
scheme saves energy without costing time.

**Profile.** Before an inference, the host writes one entry per operation
through `cfg_we`/`cfg_op`/`cfg_prof`, and then the number of operations
(`cfg_num_ops`). There are up to 32 entries. Each entry
(`descnet_pkg::op_profile_t`) holds:

- the rows of data, weights and accumulators the operation keeps on chip
  (`d_rows`, `w_rows`, `a_rows`);
- its expected length in cycles.

These come from a prior analysis of the network, and nothing is measured at
run time.

**Where the rows go.** For an operation using `u_X` rows of kind X, with a
separate memory of `ROWS_X` rows:

- rows `0 .. ROWS_X-1` live in the separate memory;
- the overflow `ov_X = max(0, u_X - ROWS_X)` goes to the shared memory;
- in the shared memory the three overflow regions are stacked: data at row 0,
  weights at `ov_D`, accumulators at `ov_D + ov_W`.

The manager publishes the start and length of each region (`sh_base`,
`sh_len`) for the router. If the overflows together exceed the shared memory,
`prof_err` is raised. The offline sizing rule guarantees this cannot happen for
the profile the sizes were chosen for: the shared memory is the largest sum of
overflows over all operations.

**Which sectors are on.** Sector *k* of a memory is needed when the usage that
falls into that memory exceeds *k* sectors' worth of rows. Usage always starts
at row 0, so an operation that touches 300 of the weight memory's 1600 rows
keeps one of its four sectors on, and the other three sleep.

**Sequencing and pre-activation.** `start` begins the inference at operation 0.
The manager counts down the current operation's profiled length. Once
`WAKE_LEAD` cycles (default 8) or fewer are left, it also requests the sectors
of the next operation, and `early_wake` is high. When the accelerator pulses
`op_done`, the index advances. Every sector the new operation does not need is
released, and its sleep request falls on the next edge. `done` pulses after
the last operation, and then every sector sleeps.

```
cycle:        ... L-8 ............ L   L+1
early_wake    ____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\____
sleep_req_n   ____/‾‾‾‾ (next op's sectors) ‾‾‾‾
sleep_ack_n   ______/‾‾ (after T_WAKE_CYC) ‾‾‾‾
op_done       ____________________/‾\______
spm_ready     ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾  (no stall)
```

**Stalls.** `spm_ready` is high only while every sector the current operation
needs has acknowledged ON. If an operation ends well before its profiled
length, the next operation's sectors have not been woken. `spm_ready` then
drops for the wake-up time, and the accelerator must hold its requests. The
first operation of an inference always sees this short stall, because nothing
precedes it.

## Address mapping of the hybrid organisation

The accelerator sees three independent address spaces, one per kind, each
starting at logical row 0. `hy_router` maps logical row `r` of kind X as
follows:

- `r < ROWS_X`: row `r` of X's separate memory;
- `ROWS_X <= r < ROWS_X + sh_len[X]`: row `sh_base[X] + (r - ROWS_X)` on X's
  own port of the shared memory (`to_shared[X]` shows this);
- beyond that: not forwarded, and `range_err[X]` is raised.

Requests pass through combinationally. The multiplexer select that picks which
memory answers is registered along with the read, so `acc_rdata[X]` lines up
with the one-cycle read latency.

Example, the CapsNet class-capsule layer. It uses about 54 kiB of weights
(3456 rows), 1 kiB of data and 12.5 kiB of accumulators:

- weights rows 0..1599 are in the weight memory (all four sectors on);
- weights rows 1600..3455 are in the shared memory at rows 0..1855 (both
  shared sectors on);
- data and accumulators stay in their own memories, one sector each.

## Off-chip writes

While the accelerator computes, the DRAM side writes data and weight rows.
`spm_wr_arbiter` merges the two writers onto the data memory's port and onto
the weight memory's port. The accelerator wins any cycle in which it has a
request. An off-chip write (`ofc_valid`, `ofc_addr`, `ofc_wdata`, `ofc_be`)
goes through in the other cycles and is accepted when `ofc_ready` is high. It
must keep its payload while it waits, and an assertion checks this. Off-chip
writes use the same logical rows and the same operation layout as the
accelerator. The accumulator memory is written by the accelerator only.

## Top level and interface

`descnet_top` wires everything together:

- the power manager;
- 10 sleep switches at the defaults: 2 shared, 2 data, 4 weight and 2
  accumulator;
- the two write mergers;
- the router;
- the three-port shared memory and the three single-port separate memories.

| signal group | direction | meaning |
|---|---|---|
| `cfg_we, cfg_op, cfg_prof, cfg_num_ops` | in | load the operation profile |
| `start`, `op_done` | in | begin the inference; end of the current operation |
| `busy, done, op_idx, early_wake` | out | sequencing state |
| `spm_ready` | out | the current operation's sectors are all on; issue requests only while high |
| `acc_req[3]` / `acc_rdata[3]` | in / out | accelerator rows, one request per kind per cycle (`spm_req_t`: en, we, addr, be, wdata); read data one cycle later |
| `ofc_*[2]` | in / out | off-chip writes, [0] data, [1] weights, valid/ready |
| `sector_on_{s,d,w,a}` | out | sleep acknowledges, one bit per sector |
| `to_shared[3]` | out | this cycle's request of a kind went to the shared memory |
| `mem_err[4]` | out | access to an OFF sector or outside a memory: {shared, acc, weight, data} |
| `range_err[3]`, `prof_err` | out | row beyond a kind's space; profile does not fit |

Parameters are `SZ_{S,D,W,A}` (bytes) and `SC_{S,D,W,A}` (sectors) for the
four memories, plus `WAKE_LEAD`, `T_SLEEP_CYC` and `T_WAKE_CYC`. A size must be
a multiple of 16 bytes times its sector count. Row addresses are 20 bits
(`ADDR_W` in `descnet_pkg`), which covers memories up to 16 MiB. Reset is
asynchronous and active low. After reset every sector is off.

## Other configurations

The same RTL builds the other organisations by changing parameters. The
separate-memory and hybrid variants can be had directly: give the shared memory
the overflow the profile needs, or make each separate memory large enough for
its peak. A design without separate memories (`SZ_X = 0`) is not supported.

For DeepCaps on CIFAR10 (30 operations), the lowest-energy hybrid organisation
uses these sizes:

```
descnet_top #(.SZ_S(131072), .SC_S(2), .SZ_D(131072), .SC_D(8),
              .SZ_W(65536),  .SC_W(8), .SZ_A(8388608), .SC_A(16)) ...
```

DeepCaps does **not** fit the default CapsNet sizes. Its accumulators alone
reach several MiB.

The shared memory always has three ports, one per kind. Some explored DeepCaps
organisations use a single-port shared memory instead. That needs an arbiter
between the three kinds and a way to stall the losers. No such arbiter is
described, so this variant is not provided.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

- `tb_spm_memory`: three ports against a reference model, random traffic with
  sectors switching; and the default 25 kiB size at the sector borders.
- `tb_sector_power_switch`: exact sleep and wake latencies, and aborted
  transitions.
- `tb_descnet_pmu`: an 8-operation profile with real switches. It checks
  sleep requests and acknowledges against the expected masks, the
  shared-memory offsets and lengths, the lead window, a stall after an early
  end, `prof_err` and the final sleep.
- `tb_hy_router`: random rows of each kind against the mapping formula, plus
  range errors and read-data alignment.
- `tb_spm_wr_arbiter`: priority, the handshake and payload holding.
- `tb_descnet_top`: **at the default size**, two CapsNet inferences back to
  back (18 operations). Each row of every operation is written (by the
  off-chip ports and the accelerator) and read back. Sector states are checked
  against the expected masks. It counts and requires:
  - a wake-up stall (one operation ends early);
  - pre-activation;
  - sector sleeps and wakes;
  - shared-memory accesses;
  - off-chip writes that had to wait;
  - a range error.
- `tb_descnet_deepcaps`: one DeepCaps inference (30 operations) at the DeepCaps
  sizes above, with every profiled row written and read back. About 3.8 million
  reads are checked.

The per-operation usage in the two inference testbenches was read off the
published usage charts, which use a log scale. It is therefore approximate.
The testbenches depend on its shape, not its exact values.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/descnet_pkg.sv tb/tb_descnet_top.sv --top-module tb_descnet_top
./obj_dir/Vtb_descnet_top
```

Replace the testbench name to run another one. The full-size end-to-end run
takes well under a second, and the DeepCaps run about ten seconds.

## Where this design departs from the published one

- **Not included:** the accelerator and DRAM. The accelerator's data flow, and
  which rows it touches in which cycle, are not modelled, so the testbenches
  act as both.
- **Sizing is offline.** The exploration that chooses sizes and sector counts
  is an offline method, not hardware. Only its chosen result appears here, as
  the default parameters.
- **Own choices, not published:**
  - the profile format and the way it is loaded;
  - the cycle-count lead window used for pre-activation;
  - the `start`/`op_done` handshake with the accelerator;
  - the order in which the overflow regions are stacked in the shared memory;
  - the logical-row address split;
  - fixed accelerator priority over off-chip writes;
  - byte-wide bank lanes;
  - one-cycle read latency;
  - register-level timing in general.
- **Prefetch layout.** Off-chip writes are placed with the layout of the
  current operation. Prefetching the next operation's values into a different
  layout is not provided.
- **Switch timing in cycles.** The sleep switch's delays are whole clock
  cycles, and its OFF state keeps data in simulation. The real circuit would
  lose it.
- **Sectors per bank.** The published text describes sectors of equal size
  with one sleep signal per sector index across the banks, and that reading
  is built here. A footnote can be read as one signal per bank instead; that
  reading was not followed.
- **Tool warnings.** Verilator's strict lint reports two kinds of warning.
  One is unused bits: the cycle count of a profile entry is not needed for the
  sector masks. The other is `rst_n` being seen as both an asynchronous and a
  synchronous signal. That is because the assertions sample it at the clock
  edge to disable themselves during reset. All flip-flops use it as an
  asynchronous reset. Neither warning affects function.
