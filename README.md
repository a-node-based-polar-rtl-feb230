# Node-based SC list polar decoder with frame interleaving and graph ensembles

## Design idea

A node-based successive-cancellation list (SCL) decoder leaves its compute
units idle much of the time. The tree descent (f/g LLR updates) and the
special-node step (path forking, sorting, Wagner correction) depend on each
other, so inside one frame only one of them can work at a time. This decoder
keeps **two frames in flight** and shares one LLR update unit (the SCU) and
one node processing unit (the NPU) between them. While frame A descends the
tree, frame B can fork paths at a node, and the other way round.

The same two-slot hardware also runs **graph ensemble decoding**. When a
frame fails its CRC, it is decoded again on a permuted factor graph. The
decoder can also use both slots to decode the same frame on two different
graphs at once. Three modes choose how the slots are used:

| Mode | Slot use |
|------|----------|
| I   | frame interleaving: two frames, one attempt each, original graph |
| II  | graph interleaving: one frame in both slots, graphs 0,2,4,6 in slot 0 and 1,3,5,7 in slot 1; the first CRC pass wins |
| III | hybrid: two frames; a frame that fails its CRC is decoded again on the next graph while the other slot goes on with its own frame |

Two optional strategies lower the latency when both frames compete for the
NPU:

- **S1** lets the repetition-sequence stage (RSU) of one frame's SR node run
  while the other frame's basic node uses the BNU.
- **S2** cuts the number of path forks of R1/SPC/TYPE-III nodes from
  T = [2,3,3] to the lower bound [1,1,2] while the other frame waits for the
  NPU.

Default parameters match the uplink instance: N = 1024, L = 8, 6-bit
sign-magnitude LLRs, 7-bit path metrics, 64 PEs, 3 SCU stages per cycle,
Ns,max = 32, Wmax = 2, 8 graphs, and the 4 lowest tree stages fixed under
permutation.

## Block structure

```
            in_llr/in_info ──► controller ──► out_u / out_crc_ok
                                 │   ├─ sub_ctrl (slot 0)
                                 │   └─ sub_ctrl (slot 1)
 instr_gen ──► instr_fifo[0..1] ─┘
 perm_gen   (per-slot graph view of channel LLRs, info set and u bits)
 scu        (shared f/g PE array)
 npu        (shared: rsu + bnu, S1/S2)
 per slot:  mem_unit, psum_unit, pm_crc_unit
```

| File | Role |
|------|------|
| `rtl/polar_pkg.sv` | widths, node types, instruction format, LLR arithmetic helpers |
| `rtl/node_detect.sv` | classifies the frozen pattern at the head of a 32-bit window: R0, REP, R1, SPC, TYPE-III or SR (R0/REP prefix with a basic source node) |
| `rtl/instr_gen.sv` | online instruction generator; walks each slot's (permuted) information set and emits one node instruction per cycle; stops while the FIFO is full |
| `rtl/instr_fifo.sv` | 4-entry instruction FIFO per slot, flushed at each attempt start |
| `rtl/scu.sv` | 64-PE min-sum f/g array for L paths; up to 3 chained stages per cycle on short vectors, 64-LLR chunks on long ones |
| `rtl/rsu.sv` | repetition-sequence unit; enumerates the 2^W sequences of an SR node per path, merges the LLRs and keeps L of 2^W·L; fixed 2 cycles |
| `rtl/bnu.sv` | basic node unit; adder tree, CAS/rank tree, Wagner correction, T-fork extension and 2L-to-L selection |
| `rtl/list_sorter.sv` | rank-based M-to-L selection |
| `rtl/npu.sv` | RSU followed by BNU for SR nodes, BNU alone for basic nodes, S1 overlap and S2 fork cut |
| `rtl/mem_unit.sv` | per slot: channel LLRs, info set, internal LLRs of every stage, u bits, pointer copy at commit |
| `rtl/psum_unit.sv` | per slot: partial sums (β) of every stage |
| `rtl/pm_crc_unit.sv` | per slot: PMs, path validity, CRC11 check of all paths in one cycle, best passing path |
| `rtl/perm_gen.sv` | factor-graph permutation of LLRs/info set and the inverse for the decoded bits |
| `rtl/sub_ctrl.sv` | per-slot sequencer: fetch, SCU descent, NPU request, commit, CRC |
| `rtl/controller.sv` | frame loading, modes, arbitration, retries, outputs, counters |
| `rtl/polar_top.sv` | top level |

## The hard parts

### Node decoding and its cycle budget

Each node instruction carries:

- the node type;
- the stage s, so the node has 2^s leaves;
- the leaf position;
- for SR nodes, the number W of repetition-sequence prefixes;
- a `last` flag.

The NPU cycle counts follow the paper's cycle analysis exactly, and
`tb_bnu` and `tb_npu` check them:

| Node | Cycles |
|------|--------|
| R0 | 1 |
| REP | 2 |
| R1 | 1+T |
| SPC / TYPE-III | 2+T |
| SR(R1) | 2+T |
| SR(SPC / TYPE-III) | 3+T |

The RSU takes two cycles. For an SR node, its second cycle already does
the first CAS step of an SR(R1) source or the first Wagner step of an
SR(SPC/TYPE-III) source. That is why the SR counts are only one cycle above
the basic node counts.

The BNU forks a node one bit at a time, T times:

1. The CAS tree ranks the node's LLR magnitudes per path. SPC and TYPE-III
   nodes first apply the Wagner parity correction to the least reliable bit.
2. Each fork step offers 2L candidates: keep, or flip the next least
   reliable eligible bit and pay its magnitude.
3. The list sorter keeps the best L.

Path metrics saturate at 7 bits. After each selection the smallest metric is
subtracted, which keeps the live metrics in range.

### Sharing one SCU and one NPU between two frames

The two `sub_ctrl` instances run the same loop, each on its own slot:

1. Fetch an instruction.
2. Descend the tree with the SCU.
3. Request the NPU.
4. Wait for the node result.

When a slot's node result comes out of the NPU, that slot's memories commit
it in the same cycle:

- each path copies its origin path;
- the node's u bits and partial sums are written;
- the path metrics are updated.

The descent starts at the lowest right child above the node. It applies g
there and then f down to the node's stage, with up to 3 stages per cycle.

The controller grants the SCU for a whole descent. When both slots want it,
the slots alternate. The NPU takes one request per cycle of a kind it can
accept. Basic nodes need the BNU free. SR nodes need the RSU free. With S1, an SR
node's RSU stage may start while the BNU is still busy with the other frame's
node. Interleaving comes from this
arbitration: a slot that would otherwise wait for its own NPU result leaves
the SCU to the other frame.

Every cycle one slot waits for a unit that the other slot holds is counted as
a stall. Cycles with both slots active are counted as interleaved. The S1
overlaps and the S2 cuts are counted too.

### Graph permutation

Permuting the stages of the factor graph is the same as permuting the bits of
the leaf index. The 4 lowest index bits stay fixed, so nodes of up to 16
leaves keep their structure. The upper n-4 bits are permuted by σ_g:

- g = 0: identity, the original graph;
- g = 1 … n-5: rotations;
- g ≥ n-4: reflected rotations.

That gives 11 distinct graphs for N = 1024, of which 8 are used.
`perm_gen` permutes the channel LLRs and the information set for the SCU
and the instruction generator. It also maps the decoded bits of each path
back to natural order for the CRC and the output. The node instructions are
therefore generated from the permuted information set, online, for every
attempt.

### Retries and modes

Each attempt ends with a one-cycle CRC check over all L paths. The most
likely passing path is chosen.

- **Mode I:** the result is output as it is.
- **Mode III:** a failed attempt relaunches the same slot on the next graph,
  up to 8 graphs. The other slot keeps decoding its own frame, so frames can
  leave out of order. Each result carries its frame id.
- **Mode II:** the frame is loaded into both slots. The first slot that
  passes ends the frame, and the other slot is dropped at its next node
  boundary.

If no graph passes, the last attempt's most likely path is returned with
`out_crc_ok = 0`.

## Interface and timing (`polar_top`)

- **Frame input.** A frame enters as N/16 beats of 16 LLRs in natural order,
  using an `in_valid`/`in_ready` handshake.
  - `in_info` is the information set (1 = information or CRC bit); the last
    11 information bits are the CRC11.
  - `in_info` and `in_id` are sampled with the last beat.
  - `in_ready` is low while no slot is free.
- **Result output.** `out_valid` pulses for one cycle per frame with:
  - `out_id`;
  - the N decoded u bits in natural order;
  - `out_crc_ok`;
  - `out_graphs`, the number of attempts.

  There is no back-pressure.
- **Configuration.**
  - `cfg_mode` selects the mode and may change only while the decoder is
    idle.
  - `cfg_s1` and `cfg_s2` enable the two strategies.
- **Counters.** `cnt_*` are free-running event counters.
- **Clock and reset.** A single clock with an asynchronous active-low reset.

Latency depends on the code. Each node costs:

- its SCU cycles: one per 3 short stages, or one per 64-LLR chunk;
- its NPU cycles, from the table above;
- the fetch and request cycles between the steps.

The CRC adds one cycle. Measured latencies:

| Code | Case | Latency after the last input beat |
|------|------|-----------------------------------|
| N = 128, K = 64 | one frame | 75 cycles |
| N = 128, K = 64 | two interleaved frames | 96 cycles for both |
| (1024,512) | per frame | 436–521 cycles |

## Where the design departs from the paper

- **Latency is well above the paper's.** The paper reports 212 cycles for
  UL-(1024,512) and 87 for DL-(432,140). This design needs about 436–521 for
  (1024,512). The node steps here are strictly serial: descent, NPU and commit
  each take at least one cycle, with a request handshake between them. The
  frozen sets also come from polarization weight and not from the 5G
  reliability sequence, so the node counts differ from the paper's Fig. 18
  counts as well. The mechanisms (interleaving, S1, S2, modes) behave as
  described, but the cycle totals should not be compared with the paper's
  tables.
- **Intermediate LLRs are stored.** The paper recomputes the intermediate
  stages of a multi-stage SCU pass combinationally and does not store them.
  Here every stage is written to the internal LLR memory, which makes the
  descent planning simpler but costs memory.
- **Registers instead of SRAM.** All memories are register arrays. At the
  default size this is 2 slots × 8 paths × 1024 × 6 bits of internal LLRs,
  plus the u-bit and partial-sum arrays. A path copy is a whole-row copy in
  one cycle, not a pointer memory with lazy copying.
- **Permutation set and CRC are choices made here.**
  - The permutation set σ_g is this design's own; the paper's generator is
    only cited.
  - The CRC is the 5G uplink CRC11 (0x621), taken in increasing
    information-bit order.
  - The downlink CRC24 and 5G rate matching or interleaving are not
    implemented.
- **One code length per build.** The paper's downlink codes (N = 512, N = 128)
  need a build with the matching `N` parameter. The RTL is parametric, and
  N = 128 is the size the end-to-end test uses.
- **REP detection.** The REP node is taken as "all frozen except the last
  leaf", grown from an R0 head. This follows the node definition rather than
  the recursion written in the detection equations, which reads differently.
- **Details the paper does not give were chosen here:** the S2 trigger (the
  other slot is waiting for the NPU), the Mode II graph split and fallback
  result, the FIFO depth (4), the input width (16 LLRs per beat), and the
  generator rate (one node per cycle).
- **Not implemented:** the 28 nm physical design, its 692 MHz clock, area
  and power.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops by itself, and it has a
watchdog. With Verilator 5:

```
verilator --binary --timing -Itb -y rtl rtl/polar_pkg.sv tb/tb_polar_top.sv \
          --top-module tb_polar_top -o sim
./obj_dir/sim
```

To run another bench, replace `tb_polar_top` with its name.

| Bench | What it checks |
|-------|----------------|
| `tb_polar_top` | end to end at N = 128, K = 64: Modes I/II/III, S1, S2, stalls, interleaving gain, CRC failure and retries on all 8 graphs, decoded bits (36 checks) |
| `tb_polar_top_full` | the default N = 1024 build on (1024,512) frames, Mode I and Mode III with S1/S2; the build takes about 70 s, the run under a second |
| `tb_node_detect` | node classification against a reference |
| `tb_instr_gen` | instruction stream against a reference |
| `tb_instr_fifo` | FIFO behaviour |
| `tb_scu` | f/g updates against a reference |
| `tb_list_sorter` | M-to-L selection |
| `tb_rsu` | RSU results and its 2-cycle timing |
| `tb_bnu` | node results and the cycle counts listed above |
| `tb_npu` | NPU results, SR cycle counts and S1 overlap |
| `tb_mem_unit` | slot memory against a model |
| `tb_psum_unit` | partial sums against a model |
| `tb_pm_crc_unit` | PMs, CRC check and path selection |
| `tb_perm_gen` | permutations and their inverse |
| `tb_sub_ctrl` | per-slot sequencer |

`tb/tb_frame_fns.svh` is the shared frame builder. It chooses the
information set, adds the CRC, polar-encodes the frame and maps it to LLRs.

## How far it can be trusted

- **All testbenches pass.**
- **The tests catch real faults.** For each block a copy with a deliberate
  bug was run against the same testbench, and each copy failed at least one
  check.
- **Lint and synthesis front end.** The RTL passes Verilator lint (style
  warnings only) and the slang/yosys front end.
- **Limits of the testing:**
  - The decoder is checked for correct decoding on noiseless frames and for
    plausible decoding on lightly noisy frames.
  - Frame error rates were not measured against a floating-point SCL
    reference, so error-correction performance is untested.
  - Frames are only noiseless or lightly noisy, so corner cases of deep list
    competition are exercised mainly by the unit tests of the BNU, RSU and
    sorter.
  - Synthesis of the full default size was not run to completion, so the
    area and timing of this RTL are unknown.
