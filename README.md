# ReuseSense: computation reuse for DNN layers on an out-of-order CPU

Consecutive inputs to a neural-network layer are often almost the same.
Consecutive audio frames, video frames and board positions are examples.
A fully-connected or convolution layer computes `O = W·I`. If the previous
input `I_p` and its output `O_p` are kept, the new output is

    O_c = O_p + W·(I_c − I_p) = O_p + W·Δ

Every input whose delta `Δ[j]` is zero removes a whole column of weights from
the work. Those weights need no load and no multiply.

On a general-purpose CPU, software alone gets little of that benefit. SIMD
dot-product instructions work on groups of inputs, so a group can only be
skipped when all of its deltas are zero. Testing each delta in software costs
branches and front-end bandwidth.

ReuseSense moves the kernel's loop control into hardware instead. A new
instruction, `crs` (short for CallReuseSensor), names a small parameter
structure in memory. A unit between decode and dispatch, called
**ReuseSensor**, then *generates* the layer's micro-ops by itself. It feeds
them straight into the core's out-of-order back end. Because the generator can
see each delta value, it can leave out the weight load and multiply for
exactly the inputs whose delta is zero, one input at a time. Front-end work
for the kernel's instruction stream also disappears.

The RTL here implements:

- ReuseSensor: its controller, scratchpad, rename map backup, instruction
  generator, parameter table, delta value register and state history table.
- The two SIMD operations the generated kernel needs:
  - `mla8`: a multiply-accumulate of 16 byte weights by one byte element,
    into 16 32-bit lanes;
  - a byte subtract that reports overflow per lane.

The core itself is outside the RTL. That covers decode, rename, free lists,
the ROB, issue, load/store and caches. The top module exposes the
connections to it as ports.

## Block map

| Module | Role |
|---|---|
| `reusesense` | Top. Connects the controller and generator, and the `mla8` and subtract units the core executes generated ops on. |
| `rs_ctrl` | Five-state controller for one `crs` call. Contains the scratchpad and the rename map backup table. |
| `rs_scratchpad` | 48 × 128-bit copy of the vector physical register file (768 bytes). |
| `rename_backup_table` | Copy of the 32-entry vector rename map, taken when `crs` starts and restored at the end. |
| `instr_gen` | The instruction generator. Up to 4 renamed micro-ops per cycle. |
| `param_table` | Seven kernel parameters. Each is captured at writeback and marked usable at commit. |
| `delta_value_reg` | The 16 deltas of the current input chunk, with per-lane overflow flags. |
| `state_history_table` | Generator state before each generated micro-op, indexed by sequence number, used for squash recovery. |
| `mla8_unit` | `acc[0..3] += w[0..15] * x`. Weight `j` goes to lane `j%4` of accumulator `j/4`. One-cycle latency. |
| `delta_sub_unit` | Byte subtract `a − b` with a per-lane overflow bit. One-cycle latency. |
| `rs_pkg` | Shared constants, the micro-op struct, the generator state struct and enums. |

## One `crs` call, state by state

The controller (`rs_ctrl`) walks through these states:

1. **Idle.** Decode sees `crs` and raises `crs_valid`. The physical integer
   register holding the parameter-structure address is in `crs_src`.
   `decode_block` goes high and stays high until `crs_done`.
2. **Prepare.**
   - The 32-entry vector rename map is copied into the backup table.
   - All 48 vector physical registers are copied into the scratchpad, one per
     cycle, through a read port of the register file.
   - A register still waiting for an older instruction's result
     (`vrf_ready[p]` low) is copied later, once it becomes ready.
   - The state ends when every register is saved *and* the core reports that
     everything older than `crs` has committed (`pipe_empty`).
   - At that point all vector physical registers are handed back to the free
     list (`vfl_release_all`). Their values are safe in the scratchpad, so
     the generated kernel may rename into any of them.
3. **Generate.**
   - The generator (`instr_gen`) first issues seven scalar loads of the
     parameter structure. They use the `crs` source register as base and
     offsets 0, 8, …, 48.
   - It then waits until all seven loads have *committed*. A parameter value
     seen at writeback could still be squashed.
   - It then emits the kernel (next section).
4. **Finish.** The controller waits until every generated micro-op has
   committed (`outstanding == 0`).
5. **Restore.**
   - The scratchpad is written back into the vector register file, one
     register per cycle.
   - The saved rename map is returned (`rmt_restore_valid`,
     `rmt_restore_map`). The core rebuilds its free list from it.
   - The seven integer registers that held parameters are freed
     (`ifl_free_*`).
   - `crs_done` unblocks decode.

To the program, `crs` therefore leaves every vector register and every
rename mapping as it found them. Its only effect is on memory, in the output
array.

## The generated kernel

### Parameter structure

The structure is seven 64-bit words at the address in the `crs` source
register:

| Offset | Word |
|---|---|
| 0 | input address (current inputs, int8) |
| 8 | weight address (int8) |
| 16 | output address (int32, read-modify-written) |
| 24 | previous-input address (int8) |
| 32 | number of inputs (multiple of 16) |
| 40 | number of outputs (multiple of 16) |
| 48 | flags. Bit 0: reuse kernel (otherwise basic). Bit 1: output stationary (otherwise input stationary). |

### Memory layout

- Inputs are packed bytes. Chunk `c` (inputs `16c..16c+15`) is at
  `in + 16c`.
- The 16 weights for input `j` and neuron group `g` (neurons `16g..16g+15`)
  form one 16-byte vector at `w + (g·IN + j)·16`. Byte `r` is neuron
  `16g + r`.
- Outputs of group `g` are 16 int32 values at `out + 64g`, loaded as four
  vectors.

For the reuse kernel, the output array holds `O_p` on entry and `O_c` on
exit. For the basic kernel, it holds a bias on entry and `bias + W·I` on exit.

### Register use and loop order

The kernel uses fixed architectural vector registers:

| Register | Holds |
|---|---|
| `z1` | previous inputs of the chunk |
| `z2` | current inputs of the chunk |
| `z0` | the inputs themselves (basic kernel) or the deltas `z2 − z1` (reuse kernel) |
| `z6` | one weight vector |
| `z10..z13` | the 16 int32 accumulators of one neuron group |

The **input stationary** order is:

    for c in chunks:
        basic:  z0 = load in[c]
        reuse:  z2 = load in[c]; z1 = load prev[c]; z0 = sub z2, z1
        for g in groups:
            z10..z13 = load out[g]
            for k in 0..15 where (basic or z0[k] != 0):
                z6 = load w[g, 16c+k]
                mla8 z10..z13, z6, z0[k]
            store z10..z13 -> out[g]

The **output stationary** order swaps the two loops. Outputs are then loaded
and stored once per group, and the inputs (and deltas) are reloaded for each
group.

### Micro-ops

The micro-op (`rs_uop_t`) is already renamed:

- Each vector destination gets a fresh physical register from a window of
  ten free-list heads (`vfl_head`, `vfl_pop`).
- The micro-op carries the destination's *previous* mapping. The core frees
  that mapping when the micro-op commits, exactly as for a normally renamed
  instruction.
- Sources are physical registers taken from the generator's own copy of the
  map for `z0,z1,z2,z6,z10..z13`.
- Parameter loads take integer physical registers from the integer free
  list. Address operands of later loads and stores use those registers as
  base, plus an immediate offset.
- Every micro-op carries an 8-bit sequence number.

Up to four micro-ops leave per cycle. A bundle is all-or-nothing on
`disp_ready`, and `disp_valid` is contiguous from slot 0. In the tests, the
generator sustains about 3.8 micro-ops per cycle while it is not waiting.

## Deltas: skipping, waiting and overflow

**Waiting for the deltas.**
- The subtract of a chunk is an ordinary micro-op executed by the core.
- Its writeback carries the result and the overflow mask. The delta value
  register takes it when the writeback's sequence number matches the
  subtract's.
- Until then, the generator holds at the first weight load of that chunk,
  because it needs the deltas to choose the next instruction (`ev_dwait`
  counts these cycles).
- The loads and subtract of the chunk itself do not wait.

**Skipping.** For each lane with a zero delta, the generator emits neither
a weight load nor an `mla8`.
- Lanes are visited in order with a find-first-set over the remaining mask.
- Each non-zero lane costs two slots (a load and an `mla8`), so two fit in a
  4-wide cycle. Zero lanes never enter the mask, so they cost neither a slot
  nor a cycle.

**Overflow.** `z2 − z1` of two int8 values lies in −255..+255, which a byte
cannot hold. The subtract unit returns the wrapped byte and an overflow bit,
and together they give the true 9-bit delta. For an overflowed lane, the
generator loads the weights once and emits several `mla8` on them, each with
the delta part as a scalar operand (`use_scalar`, `scalar`):
- The first part is the delta clamped to −128..127.
- The next part is what remains, clamped again.
- So +200 becomes 127 + 73, and −255 becomes −128 + −127.
- +255 needs three parts (127 + 127 + 1), since two signed bytes reach at
  most +254.

Non-overflowed lanes use the register element `z0[k]` directly.

## Recovering from a squash of a generated micro-op

The core may squash a generated micro-op and everything younger. For
example, a load that ran ahead of an older store to the same address is
squashed. The core then reports the oldest squashed sequence number on
`sq_valid`, `sq_seq`. Recovery works like this:

- For every micro-op, the **state history table** keeps the generator state
  from *before* that micro-op was generated. That state includes:
  - the phase and loop counters;
  - the remaining-lane mask and any split residual;
  - the generator's rename map;
  - the delta value register contents.
- On a squash, the generator reloads that state, including the delta value
  register, and generates again from the squashed micro-op onward.
- Entries are retired as micro-ops commit.
- The table has 128 entries, matching the evaluated core's 128-entry reorder
  buffer. The generator never lets more micro-ops be outstanding than the
  table can hold.
- The core frees the physical registers of the squashed micro-ops itself,
  from their `dst` fields, as it would for any squashed instruction.

## Connecting to a core

The top's ports fall into these groups. All are synchronous to `clk`, with
an active-low `rst_n`.

| Group | Signals | Timing |
|---|---|---|
| decode | `crs_valid`, `crs_src`, `decode_block`, `crs_done`, `pipe_empty` | `crs_valid` is a one-cycle pulse. `crs_done` is a one-cycle pulse at the end of Restore. |
| vector register file | `vrf_rd_*`, `vrf_ready`, `vrf_wr_*` | Read data is expected one cycle after `vrf_rd_en`. A write takes effect at the clock edge. |
| rename and free lists | `rmt_map`, `rmt_restore_*`, `vfl_*`, `ifl_*` | `vfl_pop` registers are taken from the front of `vfl_head` in the cycle the bundle is accepted. |
| dispatch | `disp_valid[3:0]`, `disp_uop[3:0]`, `disp_ready` | All four slots are accepted together. |
| writeback, commit, squash | `wb_*`, `cmt_valid[3:0]`, `cmt_seq[3:0]`, `sq_valid`, `sq_seq` | Only the generated micro-ops are reported, in commit order. |
| SIMD units | `mla_*`, `sub_*` | The core's execution port drives operands, and the result is valid the next cycle. |
| observation | `rs_state`, `ev_skip`, `ev_split`, `ev_dwait` | Per-cycle counts of skipped lanes, committed split `mla8` and delta-wait cycles. |

## Sizes

| Parameter | Value | Origin |
|---|---|---|
| vector length | 128 bits (16 × int8, or 4 × int32) | evaluated core |
| vector physical registers | 48 | evaluated core, so the scratchpad is 48 × 16 B = 768 B |
| integer physical registers | 128 | evaluated core |
| generation width | 4 per cycle | evaluated core |
| chunk and group counters | 16 bits | this design's choice, so a layer may have up to 65535·16 inputs and outputs |
| sequence numbers | 8 bits | this design's choice |
| state history table | 128 entries | this design's choice, equal to the evaluated core's 128 reorder-buffer entries, so it can hold an entry for every micro-op in flight |

The layer is streamed from memory, so no on-chip buffer limits its size.

The networks the design was evaluated on fit easily. Their largest layers
are a few thousand inputs, for example:
- 3·3·512 = 4608 inputs for ResNet-50;
- 3·3·3·320 = 8640 inputs for 3D U-Net.

## What is this design's own choice

The following are described only by their function, or not at all. Each
choice below is the simplest one that does the job.

- The layout of the parameter structure, the flags word and the weight and
  output layouts in memory.
- Register naming in the reuse kernel follows its code listing: `z2` holds the
  current inputs and `z1` the previous ones. One prose description instead
  puts the input load in `z1`.
- The micro-op format, the 8-bit sequence number and the exact interface to
  dispatch, writeback, commit and squash.
- Splitting +255 into three parts. The description only speaks of two
  parts.
- Saving registers that are not yet ready later, while draining, rather
  than waiting for all of them.
- Handing every vector physical register to the free list while the kernel
  runs.
- Freeing the parameter registers at Restore.
- Rebuilding the free list from the restored map, on the core side.
- The generator's rename window of ten free-list heads.
- Restoring one register per cycle.
- Recording the full generator state per micro-op in the state history
  table, rather than a smaller delta.

## Verification

Each block has a self-checking testbench, `tb/tb_<module>.sv`, that compares
against values computed in the testbench. The two system-level tests share a
behavioural core model. The model provides:
- a byte memory;
- the physical register files;
- the rename map and free lists;
- a 128-entry ROB that executes generated micro-ops in order, forwards
  stores to loads, writes stores at commit and commits four per cycle;
- random dispatch stalls;
- one injected squash of a weight load per reuse call.

- `tb_reusesense` runs the top at its default parameters through four calls
  on a 64-input, 32-neuron layer: reuse/IS, basic/OS, reuse/OS, basic/IS.
  - Inputs include zero deltas, overflowed deltas of −200, +180 and +255, and
    a register that becomes ready late.
  - It checks:
    - every output;
    - that all 48 vector registers and the rename map are unchanged
      afterwards;
    - that seven parameter loads were issued and their registers freed;
    - that committed weight loads and `mla8` match the counts the non-zero
      and overflowed deltas imply.
  - It also requires each mechanism to occur at least once: lane skip,
    split, delta wait, squash recovery, dispatch back-pressure, late-ready
    save, a full 4-wide bundle, and both kernels and loop orders.
- `tb_rs_workloads` runs three layer shapes (256 × 32, 512 × 16 and
  128 × 128 inputs × neurons) at input similarities
  of 26%, 68%, 41%, 27% and 55%. These are the averages measured for BERT-QA,
  3D U-Net, ResNet-50, DeepSpeech2 and Minigo. It also runs 99%, the
  most similar single layer in the evaluation, and a low 9%.
  - It runs each similarity through both kernels.
  - It checks that exactly the changed inputs get weight loads.
  - It prints the cycles of both kernels.

  With this simple one-op-per-cycle core model, the reuse kernel takes:

  | Similarity | Reuse kernel, as a share of the basic kernel's cycles |
  |---|---|
  | 99% | about 20% |
  | 68% | about 51% |
  | 9% | about 110% |

  At 9% it is slightly slower because of the extra loads and the subtract.
- `tb_instr_gen` compares the generator's micro-op stream, field by field,
  against a reference model of the loop nest. It also checks a generation
  rate of at least 3.5 micro-ops per cycle.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/rs_pkg.sv rtl/*.sv \
        tb/tb_reusesense.sv --top-module tb_reusesense
    ./obj_dir/Vtb_reusesense

Each testbench ends by printing `TB_RESULT checks=N failures=M`. Swap in
another testbench file and `--top-module` to run the others. Block
testbenches need only the package and their module, plus `param_table`,
`delta_value_reg` and `state_history_table` for `instr_gen`, and
`rs_scratchpad` and `rename_backup_table` for `rs_ctrl`.

## Limits

- The core around ReuseSensor is not part of this RTL. That covers decode
  of `crs`, rename, ROB, issue, load/store and caches. The tests use a
  behavioural model of it, which executes one micro-op per cycle, so the
  cycle counts above say nothing about real out-of-order timing.
- Only layers whose input and output counts are multiples of 16 are handled.
  Framework-side padding is assumed.
- No area, power or frequency figures are claimed for this RTL.
