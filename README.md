# NeuPIMs memory side: dual-row-buffer PIM channels and their controller

Batched LLM decoding mixes two kinds of work. The weight GEMMs (QKV
generation, projection, feed-forward) are compute-bound and suit a systolic
array. The attention GEMVs over each request's KV cache are memory-bound and
suit processing-in-memory (PIM). In a conventional HBM-PIM bank, the NPU and
the PIM units cannot use memory at the same time. A bank's single row buffer
belongs either to the NPU's normal reads and writes or to the in-bank
multipliers, so the two engines take turns.

This RTL builds the memory side of an accelerator that removes that
restriction. Each bank has **two row buffers**:
- the MEM buffer serves the NPU's normal column reads and writes;
- the PIM buffer feeds the bank's multiply-accumulate unit.

A GEMV can therefore run in every bank of a channel while the NPU keeps
reading and writing other rows of the same banks. The memory controller
interleaves the two command streams on the channel's command/address (C/A)
bus. A new command, `PIM_GEMV`, tells the channel to run a whole
multi-column dot-product on its own, which leaves the C/A bus free for the
NPU's traffic in the meantime.

The NPU itself is not here. It has systolic arrays, vector units and a
scratchpad, but it is a generic accelerator and not the subject of this
design. Its connections are the per-channel ports of the top module
`neupims_device`. The host scheduler's three algorithms are not built
either:
- the latency estimate for multi-head attention (MHA);
- the greedy assignment of requests to channels;
- the split of each batch into two sub-batches.

## Hierarchy

```
neupims_device                  NUM_CHANNELS (32) channels
 └ g_ch[c]
    ├ pim_mem_ctrl  u_ctrl      queues, bank timing, refresh, arbitration
    │  └ sync_fifo  x2          PIM instruction queue, memory request queue
    └ pim_channel   u_chan      C/A decode, global buffer, GEMV sequencer
       └ pim_bank   x32         MEM + PIM row buffers, 16 multipliers, Result
          └ dram_cell_array     rows x 8 Kbit, two row-wide read ports
neupims_pkg                     constants, command encoding, structs
```

## Data layout

- A row (page) is 1 KB: 32 columns of 256 bits.
- Each column holds 16 signed 16-bit elements.
- A bank's dot-product unit multiplies one 256-bit column of its open PIM
  row by the matching column of the channel's **global buffer**, adds the 16
  products, and accumulates into a 48-bit Result register.
- The global buffer holds one 1 KB vector. It is filled by `PIM_GWRITE` from a
  row of a bank.

## The bank: two row buffers over one array

`pim_bank` keeps a MEM row and a PIM row open at the same time. They must be
different rows; the `err` output flags a breach. `dram_cell_array` provides
two combinational full-row read ports, one per buffer, and a column-wide
write port. Writes go straight into the array, so a later activation sees
them. Sense amplifiers and restore-on-precharge are not modelled.

MEM read data comes out registered, one cycle after `RD`. A dot-product
updates Result on the clock edge of the command. `res_clear` clears Result;
if it coincides with a dot-product, that product starts a fresh sum.

## The channel: command decode and the GEMV sequencer

`pim_channel` decodes the C/A bus:

| command | effect |
|---|---|
| ACT / RD / WR / PRE | normal DRAM traffic on the MEM buffers |
| REF | all-bank refresh (all rows must be closed) |
| PIM_GWRITE bank,row | copy that row into the global buffer |
| PIM_ACT group,row | open `row` in the PIM buffer of the 4 banks of a bank group |
| PIM_GEMV col,k | k dot-products, columns col..col+k-1, in all 32 banks |
| PIM_PRE | close every PIM buffer |
| PIM_DOT col / PIM_RDRES | fine-grained form of the above: one dot-product per command, then an explicit result read |

`PIM_GEMV` starts a small sequencer. The first dot-product runs in the
command's own cycle, and the rest follow every tCCD_L = 2 cycles. All 32
Results are presented on `pim_result` with `pim_rvalid` exactly k·tCCD_L
cycles after the command, and are then cleared. While the sequencer runs,
the C/A bus carries only MEM commands. A PIM command in that window is a
protocol error and raises `err`.

## The controller

`pim_mem_ctrl` serves one channel. Its inputs are two valid/ready queues of
8 entries each:
- PIM instructions: HEADER, GWRITE, ACT, GEMV, PRE, DOT, RDRES;
- NPU memory requests: read or write of one column.

Each cycle it issues at most one command, with the following priority:

1. **Refresh.** Every tREFI a refresh falls due. New activations are held
   back until all rows are closed. Then REF is issued, and the channel is
   busy for tRFC.
2. **PIM.** The head PIM instruction is issued as soon as its timing allows.
   `PIM_ACT` opens the bank groups one after another, one command each.
   - If a bank in the group has the same row open in its MEM buffer, that
     row is precharged first (a forced PRE).
   - Once the first group of a tile is open, the remaining groups are
     opened even if a refresh falls due. The refresh then waits for
     `PIM_PRE`. Blocking the remaining groups instead would deadlock: rows
     open for PIM prevent refresh, and refresh prevents them from closing.
3. **MEM.** Requests are served in order, with an open-page policy: ACT if
   needed, then RD/WR; a bank's open row is closed only when a request needs
   another row. A request whose row is open in its bank's PIM buffer waits
   until `PIM_PRE` (counted as a row conflict).

`PIM_HEADER` is not sent to the channel. It carries the tile count and k of
the next GEMV run. From them the controller estimates how long the run will
take:

    n_tiles · ((groups−1)·tFAW + max(tRAS, tRCD + k·tCCD_L + 1) + tRP)

If the estimate is longer than the time left before the next refresh is due,
the refresh is pulled in and done first. That way it cannot land in the
middle of the run. The estimate is visible on `est_latency`.

Timing rules enforced, with values in clock cycles:

| rule | value |
|---|---|
| tRP | 14 |
| tRCD | 14 |
| tRAS | 34 |
| tRRD_L | 6 |
| tWR | 16 |
| tCCD_S | 1 |
| tCCD_L | 2 |
| tREFI | 3900 |
| tRFC | 260 |
| tFAW | 30 |

Further rules:
- tRRD_L is applied between any two activations.
- A `PIM_ACT` counts as four activations for tFAW.
- `PIM_GWRITE` occupies the PIM side for tRAS + tRP.

`stats` counts the following events:
- PIM and MEM commands;
- refreshes and pulled-in refreshes;
- row conflicts;
- cycles in which a MEM command was held back by a PIM command;
- MEM commands issued while a GEMV was running.

The `ca` and `wdata` outputs are registered.

## Where this departs from, or adds to, the source design

The following match the source design:
- the command set;
- the dual row buffers;
- the global buffer;
- one controller and PIM queue per channel;
- the organisation and timing values.

The following are this design's own choices:
- **Data type and widths.** 16-bit elements, 256-bit columns, a 48-bit
  accumulator and 16 multipliers per bank.
- **Rows per bank: 4096.** The source organisation (1 GB per channel) gives
  32768. At that size the 1024 banks hold 32 GiB of simulated state, so the
  default is reduced and the device holds 4 GiB. None of the GPT-3 sizes the
  source evaluates fit in 4 GiB: 7B needs about 3.2 GB of weights per device
  plus its KV cache, and the larger models need more than 4 GiB for weights
  alone.
- **Command encoding on the C/A bus and GEMV result timing.**
- **Controller policy.** The estimate formula, the refresh pull-in, the
  in-order open-page MEM policy, the forced precharge, and the priority
  refresh > PIM > MEM.
- **Scheduler not built.** The three scheduling algorithms (MHA latency
  estimate, greedy channel load balancing, sub-batch partitioning) are
  described in full by the source but are not built here.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. To build and run one:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
      --top-module tb_pim_mem_ctrl rtl/neupims_pkg.sv rtl/*.sv tb/tb_pim_mem_ctrl.sv -o sim
    ./obj_dir/sim

| testbench | what it covers |
|---|---|
| `tb_dram_cell_array` | writes and dual-port reads |
| `tb_pim_bank` | dual open rows, dot-products alongside MEM reads and writes, clear, the row rule |
| `tb_pim_channel` | GEMV results and latency; 31 MEM reads served during a 32-column GEMV; PIM_DOT/PIM_RDRES; error on PIM during GEMV |
| `tb_sync_fifo` | random push and pop against a reference queue |
| `tb_pim_mem_ctrl` | controller plus channel, with an independent monitor of every timing rule on the C/A bus; refresh spacing; read data and GEMV results |
| `tb_neupims_device` | two channels at once, counting GEMV, MEM/GEMV overlap, row conflict, PIM priority, refresh and refresh pull-in |

The testbenches reduce ROWS to 16, and tREFI to 700 where refresh matters,
to keep runs short. There is no testbench that runs the top at its full
default size: 32 channels × 32 banks × 4096 rows of 8 Kbit is 4 GiB of
array state, too much for a practical simulation.

