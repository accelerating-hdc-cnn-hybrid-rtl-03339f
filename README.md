# Bound registers: an HDC training unit for a RISC-V GPU core

Hyperdimensional computing (HDC) classifies by adding up long binary
hypervectors (HVs). For training it builds one class HV per class: every
encoded training HV of the class is added element by element into a vector
of counters, reading each bit as +1 or -1. Then each counter is turned back
into a bit by majority vote. On an ordinary GPU thread this is slow. A
thread has only 32 general registers, so the counters live in memory, and
each 32-bit word of an HV costs a load plus, for each of its 32 bits, a
counter read, an update and a write-back.

This RTL implements the fix proposed in "Accelerating HDC-CNN Hybrid Models
Using Custom Instructions on RISC-V GPUs" (Matsumi and Mian). Every hardware
thread of the GPU core gets 32 extra 32-bit *Bound* counters, one for each
bit position of a register word. Four custom RISC-V instructions then work on
all 32 counters at once:

- one instruction accumulates a whole 32-bit HV word;
- one instruction binarises all 32 counters into a 32-bit class-HV word.

The paper evaluated the instructions in the Vortex GPGPU's cycle-level
simulator and did not publish RTL. The code here is a synthesizable version of
the unit it describes. The rest of the GPU is not included: fetch, scheduling,
the load/store unit and the caches. The unit's issue and commit signals are
top-level ports.

## The four instructions

All four are R-type. They use opcode `0x0b` (RISC-V *custom-0*) and funct7
`0x01`, and funct3 selects the operation. An HV bit of 1 means +1 and a bit of
0 means -1.

| Instruction | funct3 | Effect in each active thread |
|---|---|---|
| `vpopcnt.set rs1, rs2` | 1 | `bound[rs1[4:0]] = rs2` |
| `vpopcnt.get rd, rs1` | 2 | `rd = bound[rs1[4:0]]` |
| `vpopcnt.add rs1` | 3 | for j = 0..31: `bound[j] += rs1[j] ? +1 : -1` |
| `vpopcnt.geq rd, rs1` | 5 | for j = 0..31: `rd[j] = (bound[j] >= rs1)`, signed |

The opcode, funct7 and funct3 values and each operation's meaning come from
the paper. Its descriptions are one line each, for example "assign value to
Bound register". The following are this design's own readings:

- `set` and `get` take the counter index from the low five bits of `rs1`, and
  `set` takes the value from `rs2`;
- the `geq` comparison is signed;
- counters wrap in two's complement when they overflow.

With threshold 0, `geq` is exactly the majority vote `h = sign(1/2 + c)`: a
tie (c = 0) gives 1. The paper's worked example agrees:

```
HV A            0  1  1  0 ...  0  0  1
HV B            1  1  0  1 ...  0  1  1
Bound counter   0  2  0  0 ... -2  0  2      (two vpopcnt.add from zero)
Class HV        1  1  1  1 ...  0  1  1      (vpopcnt.geq with threshold 0)
```

Retraining must subtract a misclassified HV from the class it was wrongly
given to. No extra instruction is needed for that: in bipolar form, adding the
bitwise complement `~h` is the same as subtracting `h`.

## How the unit is organised

`hdc_unit` is the top. It sits beside the other execute units of one GPU
core. It is built from the following parts.

- **Decoder** (`vpopcnt_decoder`). This recognises the four encodings. Any
  other word is accepted anyway, changes nothing and is returned with
  `out_illegal` set.
- **Bound register files** (`bound_regfile`). There is one per hardware
  thread: `NUM_WARPS x NUM_THREADS` of them, 2 x 4 in the configuration that
  was evaluated. Each holds 32 signed 32-bit counters. All 32 can be read
  together, and all 32 can be written in one clock edge, as `add` needs. A
  single counter can also be written, as `set` needs. Reset clears them.
  There are 8 192 counter bits in total, all in flip-flops.
- **Lanes** (`bound_alu`). Each lane holds 32 adders (`bound_adder_array`)
  and 32 comparators (`binarize_comparators`). In one cycle it executes one
  instruction for one thread.

The paper says both "32 cumulative sum registers per thread" and "32
arithmetic units per core". This design follows both statements. By default
`NUM_LANES = 1`: there is a single set of 32 units, shared by the threads of
a warp in turn. A warp instruction is therefore split into
`NUM_GROUPS = ceil(NUM_THREADS / NUM_LANES)` thread groups, processed one
group per cycle. Setting `NUM_LANES = NUM_THREADS` gives every thread its own
lane, and a warp instruction then takes one cycle. Any value in between works,
including values that do not divide the thread count.

### Timing and handshake

Both sides use valid/ready. The requester must keep a request unchanged until
it is accepted, and the unit keeps a result unchanged until it is taken.
Assertions check both rules.

- Thread group g executes, and writes its counters, in the g-th cycle that
  the request is on the inputs. Results of earlier groups are collected in a
  staging register.
- The last group executes only if the output register is empty or is being
  emptied in that same cycle. `in_ready` is raised in that cycle.
- If the output is stalled, the last group waits. So does acceptance. No
  counter is written twice.
- The result appears on `out_*` in the cycle after acceptance.
- `out_wb` is set for `get` and `geq`, which write `rd`.

Inactive threads (mask bit 0) keep their counters and return 0.

Instructions execute in order through the same registers. An instruction
therefore always sees every counter written by the one before it, so no
forwarding is needed.

| Configuration | Cycles per warp `add` or `geq` | Instructions per cycle, output always ready |
|---|---|---|
| `NUM_LANES = 1` (default) | 4 | 1/4 |
| `NUM_LANES = 4` | 1 | 1 |

Per thread, one HV word is one lane cycle. The paper's cycle model counts
`2N + 1` cycles to turn N HV words into one class-HV word:

- N loads;
- N accumulations;
- 1 Binarize.

The conventional method needs `97N + 64`. This unit provides the N
accumulations and the single Binarize. The loads belong to the GPU's
load/store unit.

## Running HDC training on it

A thread has 32 counters, so the core holds 8 x 32 = 256 counters at a time.
A 1024-dimensional HV is 32 words, so a program gives each hardware thread one
word position and works through the vector in tiles of 8 words. For one tile:

1. Load saved counter values with `set`; at the start they are 0.
2. Issue one `add` per HV per warp. Each thread supplies its own word of the
   HV.
3. Issue `geq 0` to get the class-HV words.
4. Save the counters back with `get` if they will be needed again, as in
   retraining.

The paper's other stages stay in software on the unmodified GPU: encoding by
sparse random projection, the Hamming-distance search for the nearest class,
and the decision of what to retrain. The paper names encoding as the part
that dominates run time.

## Where this RTL departs from, or adds to, the paper

The paper specifies the instruction encodings, the number and width of the
counters, bipolar bit semantics, one-cycle accumulation and one-cycle
Binarize, and the 2-warp x 4-thread core. This design chose the following
itself:

- the operand roles in `set` and `get`;
- signed comparison and wrap-around on overflow;
- reset to zero;
- the valid/ready interface and its timing;
- the treatment of masked threads and of non-HDC instruction words;
- the lane/thread-group scheme used to reconcile "per thread" registers with
  "per core" arithmetic units.

The paper gives no gate-level structure, so each unit is the simplest logic
that does the job.

The lint warnings left in the code are expected. Some package constants are
not used by every module. The decoder's operand-use flags are meant for the
issue logic outside the unit. The assertions sample the reset that the flops
use asynchronously.

## Files

Folder `rtl/`:

| File | Contents |
|---|---|
| `hdc_pkg.sv` | Encodings, counter types, the decoded-instruction struct |
| `vpopcnt_decoder.sv` | Instruction decoder (combinational) |
| `bound_regfile.sv` | 32 x 32-bit counters of one thread |
| `bound_adder_array.sv` | 32 bipolar +/-1 accumulators (combinational) |
| `binarize_comparators.sv` | 32 signed `>=` comparators (combinational) |
| `bound_alu.sv` | One lane: set/get/add/geq for one thread |
| `hdc_unit.sv` | Top: decoder, register files, lanes, handshake |

Folder `tb/`: one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_vpopcnt_decoder`, `tb_bound_regfile`, `tb_bound_adder_array`, `tb_binarize_comparators`, `tb_bound_alu` | Unit tests against independent models. The adder and comparator tests include the worked example above. |
| `tb_hdc_unit` (with `hdc_unit_tester`) | Random instruction streams with random masks, idle cycles and output back-pressure, against a reference model. It runs three instances: default, `NUM_LANES = 4` and `NUM_LANES = 3`. It checks cycle counts and counts that each mechanism occurred: each op, illegal words, masked threads, output stalls, multi-cycle group sequencing and warp changes. |
| `tb_bound_microbench` | The Bound microbenchmark at full size on the default unit: 1000 HVs of 1024 dimensions. It checks every counter and class-HV bit against a software count, and checks that each pass of 2000 warp `add`s takes exactly 8000 cycles. |
| `tb_hdc_train_workload` | 10-class training at the paper's sizes: 1024 dimensions, 5000 training and 1000 test HVs, 20 retraining epochs. The tiling above is driven through the unit, and class sums and class HVs are compared with a software reference after every epoch. |

About the training workload test:

- The data is synthetic (noisy copies of 10 related prototypes), not encoded
  MNIST features.
- Each misclassified training sample is added to its true class and
  subtracted from the predicted class right away, and both class HVs are
  binarised again. Each such update costs 2 classes x 4 tiles of
  set/add/geq/get.
- The number of misclassified training samples does not fall steadily from
  epoch to epoch. The test requires only that retraining happened and that
  test accuracy is above 50 % (chance is 10 %). The run takes about 15
  seconds.

To simulate one testbench with Verilator 5, run from the folder that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hdc_unit \
    -Irtl -Itb rtl/hdc_pkg.sv rtl/*.sv tb/hdc_unit_tester.sv tb/tb_hdc_unit.sv
./obj_dir/Vtb_hdc_unit
```

For the other testbenches, replace the tester and testbench files with
`tb/<name>.sv`. All testbenches finish in seconds.
