# NeRTCAM — a reverse ternary CAM for cortical-column reference frames

In the "thousand brains" view of the neocortex, each cortical column keeps a
*reference frame*: a map that ties what a sensor feels (a feature) to where it
felt it (a location) on a known object (a class). Recognising an object means
sensing one feature-location pair after another and keeping only the objects
consistent with everything sensed so far. NeRTCAM is the storage and lookup
engine for that map — the "place cells" part of the reference frame — built as
an associative memory in ordinary digital logic.

Its central trick is to invert the usual ternary CAM. A networking TCAM stores
patterns with don't-care bits and is searched with a fully specified key. Here
every stored entry is fully specified (the agent only stores what it is sure
of), and it is the *query* that carries the don't-cares: "which stored triplets
have this feature at this location, whatever their class?", or "what features
exist at this location (or near it)?". Hence *Reverse* TCAM.

This repository gives synthesizable SystemVerilog for the whole NeRTCAM system
in its MNIST configuration, a command-level reference model, and
self-checking testbenches for every block.

## 1. What is stored

An entry and a query share one layout, most significant bit first:

```
   | feature (F) | location (L) | class (C) |      + V (valid) + E (empty) per entry
```

Defaults are F = 128, L = 25 (a 5x5 sensor grid flattened), C = 10 (digits),
N = 1024 entries: 163 data bits, 165 bits per entry, all in flip-flops.
Location and class are one-hot. Features are normally one-hot as well, but the
comparator matches any bit pattern exactly, so a k-hot feature vector is stored
and searched unchanged.

* **E** = 1 marks a free slot. CLEAR and hardware reset empty every slot.
* **V** = 1 marks an entry still consistent with the current identification.
  V is the state of the ongoing inference: lookups shrink the set and RESET
  makes every entry valid again.

Entry *i* matches a query (I, DC) when `((data[i] ^ I) & ~DC) == 0`. Bits where
DC = 1 are ignored.

## 2. The agent's commands

The agent drives `cmd`, `sdr` and `padding`. A command is accepted on a rising
edge when `busy` is low and `cmd` is not `CMD_NOP`. The accepted values are
registered, and whatever the agent drives while `busy` is high is ignored.

| command | query (I) | meaning | cycles |
|---|---|---|---|
| CLEAR | ignored | forget all stored triplets | 1 |
| RESET | ignored | forget the identification in progress (all V = 1) | 1 |
| STORE | {f, l, c} | store a triplet unless it is already stored | 3 ok, 2 duplicate, 3 full |
| DELETE | {f, l, c} | delete a stored triplet | 3 ok, 2 missing |
| INFER | {f, l, 0} | "I see f at l": keep the classes that have it | 2 ok, 4 context switch / fail |
| PREDICT_FEAT | {0, l, 0} | which features (and classes) at l, among valid entries | 1 |
| PREDICT_LOC | {f, 0, 0} | where is f (and in which classes), among valid entries | 1 |

A cycle count runs from the accepting edge to the first cycle back in the ready
state. Predictions are combinational. `valid_features`, `valid_locations` and
`valid_classes` show the answer in the cycle the PREDICT command is on the
inputs, before the edge that accepts it. `inferred_classes` and `error` are
registers and change at the edge that ends a command.

Error codes (`err_e`): `ERR_STORE_FAILED` (triplet already stored, or memory
full; `full` tells the two apart), `ERR_DELETE_FAILED` (no such triplet),
`ERR_INFER_FAILED` (nothing matches, even after starting over) and
`ERR_CONTEXT_SWITCH` (nothing matched the objects still in the running, but a
fresh start did match: the agent is evidently looking at a different object,
and the inference has restarted on it). `error` holds its value until the next
command is accepted.

## 3. How an identification proceeds

This is the part that takes the most care to follow. It spans the RTCAM's valid
bits, the validation step and the state machine.

1. **Lookup.** INFER searches with DC set on the class field, and only among
   entries with V = 1. At the next edge V becomes the hit vector. Now only the
   entries holding exactly the sensed (feature, location) pair are valid.
2. **Validate.** That is too narrow for the next step, which will sense a
   different pair. So validation ORs the class fields of the valid entries into
   a k-hot class vector. Then it marks valid *every* stored entry whose class is
   in that vector, and registers the vector on `inferred_classes`. From now on,
   the entries of the surviving classes are the search space.
3. Repeat. Each INFER can only keep or remove classes. Once `inferred_classes`
   is one-hot, the object is identified.
4. **Context switch.** If a lookup finds nothing, the machine does not give up
   at once. It resets all V bits (the *internal reset*) and repeats the lookup
   over the whole memory. A hit there means a new object, so validation runs
   and `ERR_CONTEXT_SWITCH` is reported. No hit means the pair was never
   learned: V stays all ones and `ERR_INFER_FAILED` is reported.

PREDICT is a lookup too, and like every lookup it leaves V equal to its hits.
This follows the micro-op definition literally. So a PREDICT narrows the valid
set to the entries at the queried location (or with the queried feature). An
agent that wants to go on with an identification after a prediction should
RESET and sense again, as the full-size testbench does.

### State machine

Four states. In SS (starting state) the system is ready. In FL (first lookup),
IR (internal reset) and SL (second lookup) it is busy. The micro-op is issued in
the cycle of the transition. The RTCAM carries it out at the next edge. FL and
SL read V/NV, the registered "some stored entry is valid" flag, which reports
the lookup issued one cycle earlier.

```
SS   CLEAR/clear  RESET/reset  PREDICT/lookup                  (stay)
SS   STORE|DELETE|INFER / lookup                               -> FL
FL   V  & STORE  / reset  -> SS  (Store_Failed: duplicate)
FL   NV & STORE  / reset  -> IR    IR  STORE  / store  -> SS    (nothing if full: Store_Failed)
FL   NV & DELETE / reset  -> SS  (Delete_Failed)
FL   V  & DELETE / reset  -> IR    IR  DELETE / delete -> SS
FL   V  & INFER  / validate -> SS
FL   NV & INFER  / reset  -> IR    IR  INFER  / lookup -> SL
SL   V  & INFER  / validate -> SS  (Context_Switch)
SL   NV & INFER  / reset    -> SS  (Infer_Failed)
```

STORE and DELETE check for duplicates over *all* stored entries, not only the
valid ones. Otherwise a duplicate could slip in while an identification has
narrowed V. The RTCAM picks the search scope from the command it is given.

## 4. Don't-care masks and padding

`nertcam_preprocess` derives DC from the command:

| command | DC (feature, location, class) |
|---|---|
| STORE, DELETE, CLEAR, RESET | 0, 0, 0 |
| INFER | 0, pad, 1 |
| PREDICT_FEAT | 1, pad, 1 |
| PREDICT_LOC | 0, 1, 1 |

`pad` is the fuzzy location window. With `padding` = p > 0, every location bit
within p positions of the queried location, that location included, becomes a
don't-care. Location `00100` with p = 1 therefore matches `01000`, `00100` and
`00010`. Distance is counted along the flattened 25-bit vector, so on the 5x5
grid a window can wrap from the end of one row to the start of the next. A
grid-aware window would avoid that, but it is not built. Padding applies to both
commands that carry a location (INFER and PREDICT_FEAT). A 5-bit `padding`
input covers the whole field.

## 5. Blocks

| file | block | kind |
|---|---|---|
| `rtl/nertcam_pkg.sv` | sizes; `cmd_e`, `uop_e`, `err_e`, `state_e` encodings | package |
| `rtl/nertcam_preprocess.sv` | DC mask and padding | combinational |
| `rtl/rtcam.sv` | memory array, comparator, micro-op execution, mem_out | sequential |
| `rtl/rtcam_store_match.sv` | exact hits, lowest free slot, `full` | combinational |
| `rtl/rtcam_validate.sv` | class condensing and revalidation | combinational |
| `rtl/nertcam_fsm.sv` | SS/FL/IR/SL controller, `busy`, `error` | sequential |
| `rtl/nertcam_prediction_map.sv` | OR-condensing of hits into k-hot predictions | combinational |
| `rtl/nertcam.sv` | system top, input register | top |

The RTCAM's `mem_out` is two signals. `mem_data` is every entry's data.
`mem_hit` is, per entry, the combinational lookup hit in a lookup cycle and
V & ~E otherwise. The prediction map ORs the fields of the hit entries. For
PREDICT_FEAT it holds the location output low, because every hit has the queried
location. For PREDICT_LOC it holds the feature output low. For every other
command it outputs zeros. An all-zero answer to a PREDICT means nothing valid
matched.

The critical path runs from `sdr` through the comparators of all N entries and
the OR-trees of the prediction map, or into the V bits. The intended clock is
very slow (100 kHz, a biological time scale), so this single-cycle search is
acceptable. There is no pipelining.

## 6. Departures and own choices

What follows the published design: the entry format and sizes, the match rule,
the command and micro-op sets, every state transition and its cycle count, the
validation rule, the DC masks and the padding example, and the prediction map's
output rules. Choices made here where the description is silent or loose:

* Bit order: {feature, location, class}, MSB first. This follows the explicit
  mask vectors of the source. Some of its figure labels list location first.
* Binary encodings of commands, micro-ops, errors and states, each with a
  NOP/none code. All fit the 3-bit buses of the original block diagram.
* An input register holds the accepted command, SDR and padding while busy.
* A STORE into a full memory fails in IR with `ERR_STORE_FAILED`. The original
  state diagram has no transition for this case.
* STORE/DELETE duplicate checks cover every stored entry, whatever its V bit.
* DELETE makes every stored entry equal to the query invalid and empty. After a successful
  STORE check there is only one such entry.
* Store goes to the lowest-numbered free slot.
* Validation is one combinational step, not a second search through the
  comparator. The result is the same.
* `inferred_classes` (after INFER) and `valid_classes` (after PREDICT) are
  separate outputs.
* Reset is asynchronous and active low. It empties the memory and clears the
  error and class registers. The data bits themselves are not reset.
* Padding on INFER; one-dimensional padding distance.

Not built: the agent, grid cells and output column around NeRTCAM, which the
design only names. Also not built: custom TCAM cells in place of flip-flops,
which the original work leaves for the future.

## 7. Capacity

The 1024-entry default holds the MNIST working point the design targets
(10 sensations x 5 samples x 10 classes = 500 triplets). It does not hold the
largest recognition-network configuration (25 x 20 x 10 = 5000 triplets) unless
N is raised. Every module takes N, F, L and C as parameters. The smaller sweep
points of the original evaluation (64 to 512 entries) are just smaller N.

## 8. Verification

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_nertcam_preprocess` | literal 9-bit masks, padding example, 400 random full-size cases |
| `tb_rtcam_store_match` | exact hits, lowest free slot and `full` on random/corner vectors, N = 1024 |
| `tb_rtcam_validate` | class vector and revalidation vs. a per-class scan, N = 1024 |
| `tb_nertcam_prediction_map` | all commands, per-bit OR reference, zero outputs |
| `tb_nertcam_fsm` | every transition: micro-op per cycle, `busy`, error, cycle count |
| `tb_rtcam` | 8-entry RTCAM vs. a cycle-level model under 4000 random micro-ops |
| `tb_nertcam` | 16-entry system vs. the command-level model (`tb/nertcam_ref_pkg.sv`): directed object learning/recognition, then 3000 random commands; garbage on the inputs while busy; counts every mechanism (store ok/duplicate/full, delete ok/missing, infer ok, context switch, infer failed, both predicts, padding, clear, reset, single-class identification) and fails if one never happened |
| `tb_nertcam_full` | the default-size system on a synthetic MNIST-shaped workload (10 classes x 5 samples x 10 sensations, then recognition with predictions), all checked against the model |

The MNIST-shaped data are synthetic. Each class has a random prototype feature
per grid location, and a sample sees the prototype feature with probability 3/4.
No real digit SDRs are used. So the run shows that the hardware behaves as
specified at full size. It says nothing about recognition accuracy.

To run one with Verilator 5 (two-state, so uninitialised variables start
random), name the two packages and the testbench; Verilator finds every module
in `rtl/` and `tb/` by its file name:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nertcam_pkg.sv tb/nertcam_ref_pkg.sv tb/tb_nertcam.sv \
  --top-module tb_nertcam -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Every testbench builds in well under a minute and runs in under a second, the
full-size one included. To try another size, change the parameters on the
`nertcam` instance in `tb_nertcam.sv` (the reference model takes the same four).

Assertions in the RTL check two rules of the controller/RTCAM interface: a store
is never issued into a full memory, and a delete is never issued without a
match. The state machine also asserts that the command is stable while it is
busy, and that only INFER reaches the second lookup.
