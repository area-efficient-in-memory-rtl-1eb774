# Shared-peripheral in-memory computing for a Mixture-of-Experts layer

A Mixture-of-Experts (MoE) layer holds many expert networks, but each token uses only a few
of them. When the experts are stored as weights in analog processing-in-memory (PIM)
crossbars, most crossbars are therefore idle most of the time. Their peripheral circuits
still cost area, and the ADCs alone take most of a PIM chip's area. This design lets
several crossbars, each holding a different expert, share one set of peripherals (input
DAC register, ADC bank, accumulator). That trades a little parallelism for a large area
saving.

Sharing creates two new problems, and the design has hardware for both:

* **Contention.** Two experts of the same group cannot run at the same time. A batch of
  tokens must be ordered so that every group is kept busy. The order should also let groups
  share token transfers where possible. This is the job of the **group scheduler**.
* **Generation with expert-choice routing.** In expert choice, each expert picks its top-k
  tokens. A new token can change those picks, so a naive implementation recomputes every
  token at every decoding step. The **gate-output (GO) cache** avoids this. It keeps each
  token's gate scores and each expert's weighted outputs for the tokens the expert holds.
  A decoding step then touches only the new token. Each expert changes at most one of its
  cached records per step.

The RTL describes one MoE layer. The default configuration has:

* 16 experts;
* 256x256 crossbars with 8-bit inputs and outputs;
* groups of two experts, which gives 8 groups;
* 1536 crossbars in total;
* room for a prompt of 32 tokens.

## Block structure

```
moe_pim_top
├── expert_group  x (E / GS)           one per group of experts
│   ├── shared_xbar_tile x (ROW_TILES*COL_TILES)
│   │   ├── pim_crossbar x GS           behavioural model of the analog array
│   │   └── adc_bank                    behavioural model of the shared ADCs
│   └── acc_buffer x COL_TILES          adds the row tiles' codes, holds E(x)
├── ec_router                           expert-choice routing
│   └── topk_tracker x E                per-expert top-k list (TopKUpdate)
├── token_choice_select x T             token-choice routing (top-KT experts per token)
├── group_scheduler                     slot-by-slot dispatch, compact or rescheduled
├── moe_combiner                        y = sum of gate-weighted expert outputs
└── go_cache_ctrl                       DRAM requests of the gate-output cache
```

`moe_pkg` holds the shared sizes, types and the saturation helper.

Some parts are not in the RTL: the DRAM, the KV cache, the digital units, and the gate
projection with its softmax. The top brings their signals out as ports:

* the gate scores arrive as inputs;
* the GO cache traffic leaves through a DRAM request port;
* the MoE outputs are read through a read port.

## Crossbar multiplexing

### How a group is built

Each expert is a `d_model x d_out` linear layer. With 4096 x 1536 it is cut into
16 row tiles x 6 column tiles of 256x256, so one expert takes 96 crossbars and 16 experts
take 1536.

A group stores GS experts. All crossbars at the same tile position `(rt, ct)` form one
`shared_xbar_tile`, one crossbar per expert of the group. Such a tile has:

* one DAC register, which holds the 256 8-bit inputs of the token slice;
* one ADC bank with one converter per column;
* a mux that connects the active crossbar to the ADC bank.

A group therefore has `ROW_TILES * COL_TILES` peripheral sets instead of
`GS * ROW_TILES * COL_TILES`.

### One activation

In a slot, a group runs one `(token, expert)` pair:

* every tile of the group starts together on its 256-element slice of the token;
* the tile's `sel` picks the expert's crossbar;
* one `acc_buffer` per column tile adds the 16 row tiles' ADC codes;
* the result stays in the buffer while the next slot starts.

A start on a busy tile is a structural hazard. An assertion catches it, and another
assertion checks that at most one crossbar of a tile is active. The scheduler never issues
such a start.

### Latency

The crossbar model computes one row per clock, so an activation takes 256 cycles.

| Stage | Edges |
| --- | --- |
| DAC register latch | 1 |
| Crossbar start | 1 |
| 256 row steps | 256 |
| ADC | 1 |
| Accumulator | 1 |

From `start` to `out_valid` this gives `XBAR_ROWS + 4` edges. A real array computes in one
analog step, which is reported at about 130 ns. The cycle count here is a property of the
model, not of the circuit.

## Scheduling a batch over the groups

This is the least obvious part of the design.

### The problem

A batch is described by a choice matrix `choices[t][e]`. Every group owns the
`(token, expert)` pairs of its experts and processes one pair per slot. Pairs are kept in
token order, then by the expert's place in the group. The largest group load `L*` is the
minimum number of slots.

Several groups often need the same token in the same slot. The token is then transferred
to them once. The number of distinct tokens per slot is therefore the transfer count
(`load_count`).

Two groups can also hold two experts that both want the same token. The two experts are
in different groups, so this is not a conflict. A conflict is when one group holds two
pairs of the same token: they must go in different slots, and the token is sent twice.
`conflict_count` counts these cases.

### The two policies

* **Compact (`SCHED_COMPACT`, "C").** Every group issues its next pair in every slot. The
  batch takes exactly `L*` slots.
* **Rescheduled (`SCHED_RESCHEDULE`, "O").** A group with spare slots may idle. It does so
  when that lines its next token up with a token another group transfers anyway, which
  saves transfers. The batch still takes `L*` slots.

### The per-slot rule

The rescheduling is a rule evaluated each slot for every group `g`:

```
slack[g] = L* - slot - remaining[g]        idles the group can still afford
committed groups  : slack == 0, they must issue now
committed tokens  : the tokens the committed groups issue this slot
a group with slack > 0 idles when its next token
    is not among the committed tokens, and
    is later than the earliest committed token (it is running ahead);
otherwise it issues.
```

A group only idles when it has slack, so the batch never grows beyond `L*`. Compact and
rescheduled batches differ only in the number of transfers.

### The worked example

The rule reproduces the published worked example: 8 experts in groups of two, and 6 tokens.
Tokens are numbered from 1; `-` is an idle slot or a finished group.

| group | compact | rescheduled |
| --- | --- | --- |
| 1 | 1 2 3 3 4 4 5 | 1 2 3 3 4 4 5 |
| 2 | 1 2 2 4 5 6 6 | 1 2 2 4 5 6 6 |
| 3 | 1 3 4 5 6 - - | 1 - 3 4 5 6 - |
| 4 | 1 2 3 5 6 - - | 1 2 3 - 5 6 - |

Both policies take 7 slots. Compact transfers 16 tokens, and rescheduled transfers 12, with
2 idle slots. There are 4 conflicts. `tb_group_scheduler` checks this table slot by slot.

### Timing

The scheduler decides a whole slot combinationally from its pending-pair bitmaps
(`pend[group][token]`). It offers the slot with a valid/ready handshake (`issue_*`). Its
latency is therefore hidden behind the 260-cycle crossbar slot.

## Routing

### Expert choice (`ROUTE_EXPERT_CHOICE`)

Every expert has a `topk_tracker` that holds its K best `(score, token)` pairs in fixed
slots. A new score `s` is handled as follows:

* while the list is not full, `s` goes into the lowest free slot;
* otherwise, `s` replaces the minimum entry if `s >= min`, and is dropped if not.

The `>=` means a tie replaces the older token. The slot index is kept stable, because it
addresses the expert's record in the output cache.

In prefill, the prompt's score vectors are streamed in. After that, `choices[t][e]` is
true when expert e holds prompt token t.

In generation, one new token is streamed in per step. `new_sel[e]` says which experts took
it, `new_slot[e]` where it landed, and `evict_*` which token it pushed out. Only the
experts in `new_sel` run, in a single scheduler batch.

### Token choice (`ROUTE_TOKEN_CHOICE`)

Each token keeps its KT = 4 best experts (`token_choice_select`). Ties go to the lower
expert index. Expert loads are then uneven, which is where rescheduling and idle slots
matter. Under token choice the GO cache is not used.

## Gate-output cache

The cache lives in DRAM next to the KV cache. `go_cache_ctrl` turns two kinds of events into
DRAM requests. The ports use valid/ready handshakes, and one event is handled at a time.

| event | requests | address |
| --- | --- | --- |
| score vector of a token | `GO_SCORE_WR`: 16 x 16 bit = 32 B | `SCORE_BASE + token*32` |
| weighted output of pair (token, expert, slot) | `GO_OUT_WR`: D_OUT bytes | `OUT_BASE + (expert*K + slot)*D_OUT` |
| ... that evicted an older token | `GO_OUT_RD` of that slot first, then the write | same record |

The score cache grows by 32 B per token. The output cache has a fixed size of
`K * E * D_OUT` bytes: 8 x 16 x 1536 = 192 KB at the defaults, or 512 KB if the outputs are
4096 wide. TopKUpdate changes at most one record per expert and step.

The data read back for an evicted record goes to the digital units. There it removes the
departing contribution from that token's result. That part is outside this RTL.

## Top level: operation and timing

`moe_pim_top` is used in four phases.

1. **Configure.**
   * `exp_group[e]` and `exp_local[e]` place expert e in a group and a crossbar of the
     group. The load-sorted grouping is computed offline.
   * The weights are written one crossbar row per cycle through `prog_*`.
   * `sched_mode` selects the scheduling policy and `route_mode` the routing.
2. **Prefill.**
   * Pulse `seq_clear`.
   * Write each prompt token's hidden state into the token buffer (`tok_we`, `tok_idx` =
     token id, `tok_rt` = 256-element slice).
   * Send each token's score vector (`score_valid`, `score_gen = 0`).
   * Pulse `prefill_start`. `batch_done` pulses at the end of the batch.
3. **Read the outputs.** `y_rd_token` selects a token and `y_rd_vec` returns its output.
   `y_valid` says whether the token received any expert output.
4. **Generation step.**
   * Write the new token at buffer index 0.
   * Send its scores with `score_gen = 1` and its global token id. Under expert choice this
     starts the step on its own. The chosen experts run, and their weighted outputs go to
     the output cache, preceded by reads of evicted records.

### The control FSM

The states are `IDLE -> START -> ISSUE -> WAIT -> COMB`, and one slot goes through
ISSUE, WAIT and COMB:

* ISSUE takes a slot from the scheduler and starts the groups that have work.
* WAIT waits `XBAR_ROWS + 4` cycles for the groups.
* COMB combines the results one active group per cycle. Each result is weighted by its
  gate score, added into `y` and, under expert choice, handed to the GO cache. It waits
  while the DRAM port stalls.

### Statistics

These outputs count what happened:

* slots, transfers, idles, conflicts and makespan of the last batch;
* pairs processed;
* generation steps and evictions;
* GO-cache score writes, record reads and record writes.

## Number formats

| quantity | format | notes |
| --- | --- | --- |
| weights, token values, ADC codes | signed 8 bit | 8-bit I/O of the crossbar |
| crossbar column sum | signed 24 bit | exact, 256 products of 8x8 bit |
| ADC | `sum >>> 8`, saturated to 8 bit | fixed full-scale range (assumed) |
| expert output (accumulator) | signed 13 bit | sum of 16 row tiles' codes |
| gate score / gate weight | unsigned 0.16 fraction | 32 B per token for 16 experts |
| weighted contribution | `(E * score) >>> 16` | |
| MoE output `y` | signed 24 bit | sum of contributions |
| output-cache record | contribution saturated to 8 bit | 1 byte per element |

## Where this RTL departs from the source architecture or fills gaps

* **Analog parts are behavioural models.** The crossbar computes exact integer dot products,
  one row per cycle. The ADC is a shift and a saturation. Energy, noise and the analog
  latency are not modelled.
* **The DAC is a register.** It is the input register of a shared tile. The converter
  itself is not modelled.
* **An expert is one linear layer.** The source architecture does not give the expert's
  inner structure (FFN activation, second projection) or how an expert maps onto
  crossbars. The 16 x 6 tiling and `d_out = 1536` are this design's choices. They are what
  makes 96 crossbars per expert.
* **Gate projection and softmax are external.** The scores arrive as inputs and are used
  directly as gate weights.
* **Rescheduling is a per-slot rule.** It has the same goal and bound as the published
  algorithm: insert idles only where a group has spare slots, so that its tokens line up
  with transfers that happen anyway. It is formulated as the rule above, and it matches the
  published example exactly. On other inputs it may place idles differently from the
  original procedure.
* **Scores are also kept on chip.** The cached scores `S_prev` are held inside the top-k
  trackers, as well as written to the DRAM score cache. The decision then needs no DRAM
  read.
* **Assumed sizes.** K = 8 tokens per expert, the address map, and all widths not listed
  above are assumed.
* **Slots are sequential.** Work of successive slots does not overlap, and the combine step
  takes one cycle per active group.
* **Generation uses token-buffer entry 0.** Global token ids up to 255 are supported.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench compares the block
against values computed independently in the testbench, prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

| testbench | what it checks |
| --- | --- |
| `tb_pim_crossbar` | random weights and inputs against a dot-product model; latency |
| `tb_adc_bank` | shift and saturation, including both rails |
| `tb_shared_xbar_tile` | each crossbar through the shared ADCs; latency `ROWS+3`; busy window |
| `tb_acc_buffer` | sums of row-tile codes; hold behaviour |
| `tb_expert_group` | full expert output of a reduced group against a model; latency |
| `tb_topk_tracker` | TopKUpdate against a sorted reference list, ties, clear |
| `tb_ec_router` | per-expert lists, choice matrix, generation decisions and evictions |
| `tb_token_choice_select` | top-KT masks, ties |
| `tb_group_scheduler` | the worked example above; random batches in both policies |
| `tb_group_scheduler_gs4` | group size 4, uniform and scattered groupings |
| `tb_moe_combiner` | weighted sums and saturated records |
| `tb_go_cache_ctrl` | request order, addresses, payloads, DRAM back-pressure |
| `tb_moe_pim_top` | end to end at reduced size |
| `tb_moe_pim_top_full` | end to end at the default size |

### `tb_moe_pim_top`

This testbench runs the whole layer at reduced size: 4 experts in 2 groups, 8x4 crossbars,
2x2 tiles, K = 2 and 8 tokens. It covers:

* token-choice batches in both policies;
* an expert-choice prefill;
* ten generation steps with a DRAM model that stalls at random.

Every output row is compared with a reference that follows the same routing and arithmetic.
The testbench counts each mechanism and fails if one never happens: conflicts, idles,
token reuse, compact and rescheduled batches, both routing modes, evictions, GO-cache reads
and DRAM stalls.

### `tb_moe_pim_top_full`

This testbench uses the top with all parameters at their defaults:

* 16 experts;
* 1536 crossbars of 256x256;
* 32-token buffer, K = 8.

It runs the smallest workload the architecture was evaluated with:

* two token-choice batches of 32 prompt tokens, one rescheduled and one compact;
* an expert-choice prefill of the same 32 tokens;
* 8 generation steps.

It makes 160,028 checks. On a desktop machine the Verilator build takes 2 to 4 minutes and
the run about 75 seconds.

Only the first row tile of each expert carries non-zero weights and inputs. This keeps the
reference model in the testbench fast. All crossbars still run.

### Running a test with Verilator

```
verilator --binary --timing --assert -Irtl rtl/moe_pkg.sv tb/tb_group_scheduler.sv \
          --top-module tb_group_scheduler -o sim -Mdir obj
./obj/sim
```

The same command works for every testbench; Verilator finds the modules in `rtl/` through
`-I`. The full-size testbench builds a large model: allow several minutes and a few GB of
memory for the C++ compile.

## Parameters

| parameter | default | where |
| --- | --- | --- |
| `NUM_EXPERTS` / `E` | 16 | Llama-MoE-4/16 |
| `GROUP_SIZE` / `GS` | 2 | best area efficiency; 4 also supported |
| `XBAR_ROWS`, `XBAR_COLS` | 256 | crossbar size |
| `DATA_W` | 8 | crossbar I/O width |
| `ROW_TILES` x `COL_TILES` | 16 x 6 | 96 crossbars per expert (tiling assumed) |
| `TOPK` / `K` | 8 | tokens per expert under expert choice (assumed) |
| `TC_TOPK` / `KT` | 4 | experts per token under token choice |
| `T_MAX` / `T` | 32 | prompt length |
| `SCORE_W` | 16 | 32 B of scores per token |
| `TOK_W` | 8 | global token id width (assumed) |
