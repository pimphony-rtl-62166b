# A PIM module orchestrator for long-context attention decoding

During LLM decoding, attention reads the whole key/value (KV) cache once for
every generated token and does only a few operations per byte read. DRAM
processing-in-memory (PIM) fits that pattern: each DRAM bank gets a small
multiply-accumulate unit, and a channel computes a dot product between a
vector its controller streams in and a row the bank already holds.
Conventional PIM modules use this badly when contexts get long, in three ways:

* **Idle channels.** Work is spread over channels by head and by request, and
  a long request has few of those to spread.
* **Stalled pipelines.** The per-channel command stream
  (load input → multiply-accumulate → read result) runs under fixed,
  worst-case timing, although the small head dimension makes input/output
  transfers frequent.
* **Fixed memory slots.** Commands carry fixed physical row addresses, so
  every request must reserve KV memory for the longest possible context.

This RTL implements one PIM module with the three remedies in hardware:

| Remedy | Where | What it does |
|---|---|---|
| Token-centric partitioning | the data layout, the multicast interconnect and the EPU | The tokens of *one* head are spread over all channels. Every channel receives the same query (multicast). Per-channel partial results meet in the register file (GPR) and are summed by the extra processing unit (EPU). |
| Dynamic command scheduling (DCS) | `pim_ctrl`, one per channel | It tracks which buffer entry each command uses. A command waits only on the command it really depends on, and load/readout commands may overtake multiply-accumulates. |
| Dynamic PIM access (DPA) | `dpa_dispatcher` | A compact looping program whose loop bound follows each request's token count. Virtual KV rows are translated to physical rows through a per-request table, so KV memory can be handed out in 1 MB pieces as a request grows. |

The DRAM cell arrays are outside the design. Each channel drives a row/column
read and receives the 16 banks' 32-byte column slices on the same cycle.

## Module structure

```
host ──► dpa_dispatcher ──► inst_sequencer ──► multicast_interconnect ──► pim_ctrl[c] ──► pim_channel[c] ◄─► DRAM banks
          (program, T_cur,    (queue, Op-size      │   ▲   (per channel,       (GBuf, 16 MACs,
           VA2PA, decoder)     unrolling)           ▼   │    DCS)                OBuf per bank)
                                                  gpr ◄─┴── RD-OUT write-back
                                                   ▲▼
                                                  epu (cross-channel reduction)
```

| File | Role |
|---|---|
| `rtl/pim_pkg.sv` | Sizes, timings, instruction/command records, tile arithmetic |
| `rtl/dpa_dispatcher.sv` | Instruction buffer, per-request token counts, VA2PA table, loop/modifier decoder |
| `rtl/inst_sequencer.sv` | Instruction queue; expands an Op-size of N into N single instructions |
| `rtl/multicast_interconnect.sv` | Channel commands by channel mask; GPR → GBuf data; RD-OUT write-back; reduction barrier |
| `rtl/pim_ctrl.sv` | Per-channel controller with dependency and status tables and two issue queues |
| `rtl/pim_channel.sv` | Global buffer, per-bank MAC, per-bank output buffer |
| `rtl/gpr.sv` | 512 KB register file, 32-byte entries |
| `rtl/epu.sv` | Lane-wise sum of the per-channel partial tiles |
| `rtl/sync_fifo.sv` | Small FIFO helper |
| `rtl/pimphony_top.sv` | One module: all of the above, 32 channels |

Data moves in **tiles** of 32 bytes: sixteen 16-bit lanes. The three channel
commands are:

* **WR-INP** copies a GPR tile into a global-buffer (GBuf) entry of the
  channel. The GBuf has 64 entries, which is 2 KB.
* **MAC** multiplies a GBuf tile with the 32-byte slice at (row, col) of every
  bank. Each of the 16 banks adds its 16-lane dot product into its own
  output-buffer (OBuf) entry.
* **RD-OUT** drains one OBuf entry from all 16 banks at once: 2 bytes each,
  32 bytes in all. The result goes back to the GPR.

## Dynamic command scheduling (`pim_ctrl`)

This is the part with the most behaviour to understand.

### Why it exists

Take a static PIM controller running the stream
W0 W1 W2 M3 M4 M5 R6 M7 M8 M9 R10
(W = WR-INP, M = MAC, R = RD-OUT). It must assume every command may depend on
the one before it, so it waits out each command's full latency. Yet M3 needs
only the GBuf entry W0 wrote. And a RD-OUT on one OBuf entry does not conflict
with MACs into another entry.

### Two tables

Each controller keeps two tables, each with one row per GBuf entry and one per
OBuf entry:

* **D-Table (dependency).** This is the ID of the last command *accepted* for
  that entry.
  - On arrival, a command gets an 8-bit ID.
  - It copies the D-Table IDs of the GBuf and OBuf entries it uses as its
    dependency IDs, GBuf-DID and Out-DID. An entry never used before gives no
    dependency.
  - Then it writes its own ID into those rows.
  - Reads count as uses: a RD-OUT depends on the MAC before it, and a WR-INP
    into a GBuf entry waits for the last MAC that read it.
* **S-Table (status).** This is the ID of the last command *issued* on that
  entry, plus the cycle at which its access ends (the expiration time). OBuf
  rows also carry an is-MAC flag.

### Issue rule

MACs go to the compute queue. WR-INP and RD-OUT go to the I/O queue. Each
queue issues in order, and the two queues issue out of order with respect to
each other.

A queue head may issue when, for each entry it uses, one of these holds:

* it has no dependency, or
* the S-Table shows its DID, and the current cycle has reached the expiration
  time.

There is one exception: the **is-MAC bypass**. If the head is a MAC and the
OBuf entry's last issued command was also a MAC (with the right ID), the OBuf
expiration is skipped. Accumulations into one entry therefore pipeline.

Three further rules apply:

* Commands from the same queue are at least t_CCDS apart.
* One command is issued per cycle, and the compute queue wins a tie.
* A RD-OUT additionally needs room in the write-back path (`wb_ok`).

On issue, the S-Table rows of the used entries get the command's ID, and
`t_cur` plus the command's latency.

### Timing

The default timings are t_CCDS = 2, t_WR-INP = 5, t_MAC = 6 and
t_RD-OUT = 4 cycles.

With these timings, the stream above issues at these cycles:

| Command | W0 | W1 | W2 | M3 | M4 | M5 | M7 | M8 | M9 | R6 | R10 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| Cycle | 0 | 2 | 4 | 5 | 7 | 9 | 11 | 13 | 15 | 16 | 21 |

Three things stand out:

* M3 goes out before W2 has finished.
* M4, M5, M7, M8 and M9 follow t_CCDS apart through the bypass.
* R6 waits in the I/O queue while the younger MACs pass it.

`tb/pim_ctrl_tb.sv` checks this schedule cycle by cycle.

### ID reuse and wrapping

IDs wrap after 256 commands. When an ID is handed out again, any table row or
queued DID still holding it is cleared first. At most 2 × QDEPTH commands wait
in the queues, so the old holder of a reused ID issued and completed long
before.

Timestamps are 16 bits and are compared within a window of the longest
command latency. A row left alone through a timestamp wrap therefore costs at
most a few cycles of needless wait, never a hang.

### Storage

Per channel, the tables hold 128 D-Table IDs, 128 × (ID + timestamp) S-Table
rows and 64 is-MAC bits. That is about 520 bytes.

## Token-centric data layout, multicast and reduction

Under token-centric partitioning, a head's tokens are dealt round-robin over
every bank of every channel. One virtual KV row number therefore addresses 512
tokens at once (32 channels × 16 banks), and each channel works on its own
slice.

A query tile is loaded into every channel with one WR-INP whose channel mask
is all ones. The interconnect reads the GPR once and hands the same tile to
all 32 controllers in the same cycle. An instruction is sent only when every
addressed controller can accept it, so all channels see an identical command
stream.

For RD-OUT, the interconnect rewrites the GPR address per channel:
channel c writes to `gpr_addr + c × 512`. The per-channel partial results of
the same output tile therefore sit 512 entries apart.

Results wait in a 4-deep queue per channel and go into the single GPR write
port round-robin. The controller holds a RD-OUT back while that queue is full.

**EPU_RED** is an extra instruction that sums these partials. The
interconnect first waits until every controller and write-back queue is
empty. Then it starts the EPU, which computes, for i = 0 .. count-1:

```
GPR[base + i] = Σ_{c in mask} GPR[base + c·512 + i]
```

The EPU reads one tile per cycle, so a reduction of `count` tiles takes
count·33 + 1 cycles. This barrier is the only ordering the module enforces
through the GPR. Any other GPR read-after-write ordering across instructions
is left to the program.

## Dynamic PIM access (`dpa_dispatcher`)

### Memories

The host writes three memories:

* **Instruction buffer:** 1024 words of `dpa_inst_t`.
* **Configuration buffer:** for each of 32 request IDs, the token count T_cur.
* **VA2PA table:** for each K/V space, request and virtual chunk (1024 per
  request), the physical chunk.

A chunk is 1 MB: 2 rows of every bank of every channel. Physical row =
`VA2PA[kv][req][vrow / 2] · 2 + vrow % 2`.

### Running a step

`run_valid` with a request ID and program address runs one decoding step. The
decoder walks the program and emits at most one plain PIM instruction per
cycle. The program words are:

| Word | Fields | Effect |
|---|---|---|
| PIM | `inst`, `xlate`, `kv` | Emit the instruction. With `xlate` set, its row is a virtual row of the request's K or V space and is translated. |
| Dyn-Loop | `lb_shift`, `le` | The next `le` words are a loop body, run LB = ⌈T_cur / 2^lb_shift⌉ times, with loop index t. LB = 0 skips the body. One loop level. |
| Dyn-Modi | `target`, `coeff` | The next PIM word's field (row, col, GPR address, GBuf index or Out index) is increased by coeff · t. |
| End | | T_cur of the request is incremented, `run_done` pulses and the decoder is ready for the next step. |

Because T_cur advances inside the module, the host only touches the module in
three cases: a new request arrives, a request crosses into a new chunk (write
one VA2PA entry), or a request finishes.

The buffers total about 128 KB: 112 KB for VA2PA, 15.5 KB for the program and
84 B for the configuration buffer.

### Example program

The end-to-end testbench runs this program:

```
WR-INP  x16, all channels        GBuf 0..15 <= query tiles GPR 0..15
Dyn-Loop  lb_shift=10, le=10     LB = ceil(T_cur/1024): two virtual rows per pass
  Dyn-Modi row += 2t ; MAC x16 {K row 0, cols 0..15, out 0}
  Dyn-Modi gpr += 2t ; RD-OUT {GPR 1000, out 0}
  Dyn-Modi row += 2t ; MAC x16 {K row 1, cols 0..15, out 1}
  Dyn-Modi gpr += 2t ; RD-OUT {GPR 1001, out 1}
  Dyn-Modi gpr += 2t ; EPU_RED {GPR 1000, 2 tiles, all channels}
End
```

## Interfaces and timing summary

* All blocks use one clock and an active-low asynchronous reset. Streams use
  valid/ready handshakes.
* **Dispatcher → sequencer → interconnect:** at most one instruction per
  cycle.
* **Sequencer:** emits one unrolled instruction per cycle. Its address fields
  step per repetition:

  | Instruction | Fields that step |
  |---|---|
  | WR-INP | GPR address, GBuf index |
  | MAC | GBuf index, column |
  | RD-OUT | GPR address, Out index |

* **Controller → channel:** a command takes effect in the cycle it is issued.
  The bank slice is read in that cycle. A RD-OUT result appears on the
  channel's response port one cycle later. The controller's expiration times
  stand for the real latencies.
* **GPR:** reads are combinational. Write priority is EPU, then RD-OUT
  write-back, then host. The host should write only while `busy` is low.
* **Event outputs** pulse for monitoring:

  | Output | Pulses on |
  |---|---|
  | `ev_ooo` | a command issued ahead of an older one |
  | `ev_bypass` | a MAC issued through the bypass |
  | `ev_dep_wait` | a cycle in which a head waits on a dependency |
  | `ev_issue` | a command issue |
  | `ev_multicast` | an instruction sent to more than one channel |
  | `ev_xlate` | a translated row |
  | `ev_loop` | a loop back-edge |
  | `ev_reduce` | a finished reduction |
  | `ev_backpressure` | a cycle in which the sequencer is stalled by full controller queues |

## Default sizes

| Quantity | Default | Basis |
|---|---|---|
| Channels × banks | 32 × 16 | Module configuration table of the original work (16 GB module) |
| Row / rows per bank | 1 KB / 32768 | Own choice, making 32 × 16 × 32768 × 1 KB = 16 GB |
| GBuf | 64 × 32 B = 2 KB per channel | Original work |
| OBuf | 64 entries × 2 B per bank | Own choice (the original gives no depth) |
| GPR | 16384 × 32 B = 512 KB | Original work |
| Controller queues | 8 + 8 per channel | Own choice |
| Sequencer queue / write-back queue | 16 / 4 | Own choice |
| Requests / virtual chunks per request and K/V / program words | 32 / 1024 / 1024 | Own choice, kept under the original 200 KB dispatcher budget |
| T_cur width | 21 bits (2M tokens) | Own choice |

Module-level parameters are `N_CH`, `IB_DEPTH`, `MAX_REQ`, `MAX_VCHUNK` and
`TCUR_W`. Geometry and timings live in `pim_pkg`.

### Capacity

With these sizes, one module can hold a request's share of the KV cache up to
1 GB each for K and V. That covers:

* the longest requests of the summarisation, multi-hop QA and long-document
  QA benchmarks used for evaluation, for 7B-class models spread over 8
  modules;
* 72B-class models with grouped-query attention over 32 modules.

It does not cover:

* the longest 30K-token requests of a 72B model without grouped-query
  attention, which need about 1.2 GB of K per module (raise `MAX_VCHUNK`);
* a 1M-token context.

## Where this RTL departs from the original proposal

* **Arithmetic.** The arithmetic is 16-bit integer modulo 2^16, not FP16. The
  dataflow, tile sizes and timing are unaffected, and results can be checked
  bit for bit.
* **Channel count.** 32 channels per module, as in the module configuration
  table the proposal was evaluated with. Its text also describes a commercial
  module with 16 channels. Set `N_CH = 16` in the top and change `NCH` in
  `pim_pkg`. A 1 MB chunk is then 4 rows per bank, so `ROWS_PER_CHUNK` changes
  with it.
* **Expiration test.** The test is "current cycle has reached the expiration
  time" (≥). The proposal's text says "exceeds", but its own timing example
  only works with ≥.
* **Command timings.** The four timings are read off the proposal's scheduling
  example, which gives them only as a drawing.
* **Not modelled:**
  - DRAM row activation, precharge and refresh. The bank arrays answer in the
    same cycle.
  - The activation-function units.
  - The EPU's Softmax. The EPU only does the cross-channel sum.
  - Host software (request manager, chunk allocator, compiler).
  - Module-to-module links.
* **Own additions:** the reduction instruction `EPU_RED` with its drain
  barrier, the End word, the program encoding, the rounding of the loop bound
  upward, and the one-modifier-per-instruction rule.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `pim_ctrl_tb` | The scheduling example cycle by cycle: 22 cycles against 34 for static scheduling. Then 3000 random commands on few buffer entries, with an independent hazard checker: no command may issue before the commands it depends on have expired (except a bypassed MAC), per-queue order and t_CCDS spacing. |
| `pim_channel_tb` | GBuf writes, MAC accumulation and readout against a software model, with a hashed DRAM model. |
| `inst_sequencer_tb` | Op-size unrolling and address stepping under random back-pressure. |
| `multicast_interconnect_tb` | Per-channel command streams under random controller readiness; multicast data; write-back addresses and contents; the EPU barrier. |
| `epu_tb` | Masked reductions and latency. |
| `gpr_tb` | Random reads and writes against a model. |
| `dpa_dispatcher_tb` | Two requests with different translations of the same virtual rows. Loop bounds from T_cur, modifiers, T_cur increment, and a chunk appended between steps. |
| `pimphony_top_tb` | The full module at default size, end to end, running the program above. It uses request 5 with 3000 tokens over three non-contiguous chunks, request 6 with 1000 tokens, then request 5 again at 4000 tokens after a fourth chunk is appended. Every per-channel partial tile and every reduced tile is compared with a value computed in the testbench from the same DRAM hash. Also checked: per-channel command counts and T_cur. Each mechanism is counted and must occur: multicast, translation, loop, reduction, out-of-order issue, bypass, dependency wait and back-pressure. |

`attention_decode_tb` runs one attention head (d_h = 128, as in the 7B and
72B models) through a whole decoding step on the full-size module:

* QK^T over the request's K rows, with the 16 scores per channel and row left
  in the GPR;
* SV over its V rows, accumulated per channel in one OBuf entry and reduced
  by the EPU.

The probabilities are supplied by the testbench, because Softmax is not
built. It runs three token counts:

| Tokens | Rows per K/V space | Cycles |
|---|---|---|
| 13,966 (mean of the summarisation set) | 28 | 1,325 |
| 50,693 (mean of the long-document QA set) | 100 | 4,781 |
| 119,480 (longest multi-field QA request) | 234 | 11,213 |

That is about 48 cycles per row. The floor is 32: sixteen MACs t_CCDS apart.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
          rtl/pim_pkg.sv tb/pimphony_top_tb.sv --top-module pimphony_top_tb -o sim
./obj_dir/sim
```

`-y rtl` lets Verilator find each module in the file of its own name. Only
the package is named explicitly. Swap in another testbench name to run a block
test. The full-size top testbench builds in about a minute and a half and
simulates in under a second.
