# Field of Groves: a random-forest classifier that stops early

A random forest classifies an input by running many decision trees and
combining what they say. Most inputs are easy: a few trees already agree, and
running the rest only costs energy. The Field of Groves (FoG) splits the forest
into small groups of trees, called *groves*, and connects the groves in a ring.
An input first visits one grove. That grove's trees give a probability for each
label, and the *confidence* is the gap between the two largest probabilities.
If the confidence reaches a threshold, the input is finished. If it does not,
the input and its probabilities move to the next grove in the ring. That grove
adds its own trees' opinion to a running average and makes the same decision.
So easy inputs use one grove, and hard inputs use many. Two run-time settings
choose the trade-off between energy and accuracy:

* the **threshold**, and
* the **maximum number of hops**, which caps how many groves an input may visit.

This repository holds synthesizable SystemVerilog for the accelerator in its
main configuration: **8 groves of 2 trees each** (the "8x2" topology). The
trees have depth 5. Each grove has a 6368-byte data queue. The design is sized
for inputs up to MNIST size: 784 one-byte features, and up to 26 labels.

## Block structure

```
            reg_we/addr/wdata                         in_valid/in_ready/in_features
                   |                                              |
              +----v-----+   cfg, prog (broadcast)          +-----v------+
              | fog_ctrl |------------------------------+   | input_queue|  id, entry, random start
              +----------+                              |   +-----+------+
                                                        |         | grove_req/ack (one grove)
     +--------------------------------------------------v---------v--------------+
     |  G0 --> G1 --> G2 --> ... --> G7 --+     ring of grove_link_if (req/ack/data)
     |  ^                                 |                                      |
     |  +---------------------------------+                                      |
     +----------------------------------------+-----------------------------------+
                                              | res_valid/res_ready (all groves)
                                        +-----v-------+
                                        | output_queue|  round robin + FIFO
                                        +-----+-------+
                                              v  out_valid/out_ready/out_result
```

Inside each `grove`:

* `data_queue`: the byte memory, together with its queue controller. The
  controller keeps the `fr` (front) and `bk` (back) pointers.
* `decision_tree` × `N_TREES`: programmable trees that read features straight
  out of the queue.
* `prob_combine`: averages the trees' leaf vectors and folds the result into
  the running average.
* `minmax_conf`: finds the two largest probabilities, the confidence and the
  label.
* `grove_handshake`: the register for the entry that leaves the grove. It sends
  the entry to the next grove with req/ack, or offers the result to the output
  queue.
* A sequencer state machine that shares the queue's single write port among
  the other blocks.

`fog_pkg` holds every size and type. `grove_link_if` is the bundle of signals
between neighbouring groves. `sync_fifo` is a generic FIFO used by both
accelerator queues.

## The queue entry

Every grove stores each input it holds as one *entry*. An entry is a run of
bytes in the queue memory. For F features and C labels, the layout is:

| byte          | content                                        |
|---------------|------------------------------------------------|
| 0             | hops: how many groves have processed the input |
| 1 .. F        | features, one byte each                        |
| F+1           | id assigned by the input queue                 |
| F+2 .. F+1+C  | probability array, one byte per label          |

The entry length is Γ = F + C + 2 bytes. For MNIST that is 796 bytes; for a
16-feature, 10-label set it is 28. Γ is a run-time register, so one build
serves datasets of any shape up to 784 features and 26 labels. The queue
pointers move in steps of Γ.

**Number format.** Probabilities and the threshold are unsigned bytes, with 255
standing for 1.0. So a threshold of 0.1 is about 26.

**Queue size.** The queue is 6368 bytes, which holds 8 MNIST entries. A second
register, `q_entries`, tells the queue how many entries of the current Γ it may
hold. The host sets it to ⌊6368/Γ⌋, with a maximum of 255. The pointers wrap at
`q_entries·Γ`.

**Changing the format.** Γ and `q_entries` may only change while all queues are
empty. When either changes, the queue controller moves both pointers back to 0.
An assertion checks that the queue was empty.

## Life of an input

1. **Input queue.** The processor offers the features with `in_valid`. The input
   queue then:
   * builds a fresh entry: hops = 0, id = the next value of an 8-bit counter,
     probabilities all 0;
   * stores the entry in a two-entry FIFO;
   * picks a start grove at random, using a 16-bit Galois LFSR (seed `16'hACE1`,
     taps `16'hB400`). If that grove has no room, it takes the next grove that
     does.

   `in_ready` is low whenever the FIFO is full. This is the processor stall.
2. **Back of the queue.** The grove copies a new input to its back pointer,
   one byte per cycle.
3. **Processing element (PE).** The PE works on the entry at the front pointer.
   * Every tree walks down one level per cycle.
   * Node *i* holds a feature offset OFF and a weight w. It reads the byte at
     `fr + 1 + OFF` and goes to child `2i+2` if that byte is greater than w,
     and to child `2i+1` otherwise.
   * After D levels, each tree returns the probability vector stored in its
     leaf.
4. **Combine.** With h = hops already stored in the entry:

   `grove = Σ leaf / N_TREES`, `new = (old·h + grove) / (h+1)`

   Both divisions truncate. For a new input (h = 0), `new` is the grove's own
   average.
5. **Decide.** The confidence is `max1 − max2` of `new`.
   * The grove writes back `hops = h+1` and `new` into the entry.
   * The input is *finished* if `conf ≥ thresh` or `h+1 ≥ max_hops`. A finished
     input's {id, label, hops, conf, probabilities} goes to the output queue.
   * Otherwise, the grove copies the whole entry into its handshake register and
     raises `req` to the next grove.

   Either way, the front pointer then advances by Γ.
6. **Next grove.** The next grove copies the entry byte by byte, in front of
   its current front entry (`fr ← fr − Γ`). It then raises `ack` for one cycle,
   and `req` drops. A partly classified input is therefore served before that
   grove's waiting new inputs.

The label is the argmax of the probability array. On a tie, the lower label
index wins.

## The handshake between groves

`grove_link_if` carries `req`, `ack` and `data`. `data` is a whole entry (812
bytes at the largest size), held in the sender's handshake register. It stays
stable while `req` is high, so the receiver can copy it at its own pace.

Assertions in the interface check three rules:
* `ack` only comes while `req` is high;
* `ack` lasts one cycle;
* `data` does not change while `req` waits.

A grove does not start its PE while its handshake register is still busy, so
an entry is never overwritten before it is sent.

**Avoiding deadlock.** A ring where every grove waits for room in the next
grove could lock up. The design prevents this with one reservation rule:

* a grove accepts a ring entry whenever it has one free entry;
* it accepts a *new* input only when it has two free entries.

So new inputs can never fill every queue, and there is always a place for an
entry that is already moving around the ring.

## Timing

Each grove runs one state machine, and every copy moves one byte per cycle.
For an idle grove, with D = tree depth and C = labels:

| step                                   | cycles      |
|----------------------------------------|-------------|
| copy an entry in (ring or new input)   | Γ + 2       |
| tree walk                              | D + 1       |
| write back hops + C probability bytes  | C + 1       |
| copy an entry into the handshake reg   | Γ           |
| new input → `res_valid`                | Γ + D + C + 5 |
| new input → `req` to the next grove    | 2Γ + D + C + 5 |

For MNIST at the defaults, a result from one grove takes 796 + 5 + 10 + 5 =
816 cycles, and a forward takes 1612 cycles. The byte-serial copies dominate.
They follow from the byte-addressable memory, which is what makes Γ
programmable.

When an idle grove has work from more than one side, it picks in this order:
1. a ring entry waiting at `from_prev`, if the queue has a free entry;
2. the PE, if the queue is not empty and the handshake register is free;
3. a new input, if two entries are free.

## Programming and control registers (`fog_ctrl`)

Writes are 32 bits wide (`reg_we`, `reg_addr[3:0]`, `reg_wdata`) and take
effect on the next clock edge.

| addr | name      | meaning                                       | reset |
|------|-----------|-----------------------------------------------|-------|
| 0    | thresh    | confidence threshold, 255 = 1.0               | 26    |
| 1    | max_hops  | maximum groves per input                      | 8     |
| 2    | gamma     | entry length Γ = F + C + 2                    | 796   |
| 3    | n_classes | labels C (2..26)                              | 10    |
| 4    | q_entries | entries each queue may hold, ⌊6368/Γ⌋         | 8     |
| 5    | node      | write one tree node                           | –     |
| 6    | leaf      | write one probability byte of one leaf        | –     |

Word layout for registers 5 and 6, from bit 0 upward:

| bits  | register 5 (node) | register 6 (leaf)                  |
|-------|-------------------|------------------------------------|
| 7:0   | weight w          | probability byte                   |
| 17:8  | feature offset    | class, in the low bits of the field |
| 22:18 | node index        | leaf index                         |
| 23    | tree              | tree                               |
| 26:24 | grove             | grove                              |

* Node indices form a heap: 0 is the root, and the children of *i* are 2i+1
  and 2i+2. A depth-5 tree has 31 nodes and 32 leaves.
* A trained tree that is shallower than 5 is stored by repeating a leaf's
  vector under all its descendants.
* Writes become a one-cycle `prog` strobe, broadcast to all groves. Each grove
  picks up only the writes that match its `GROVE_ID`.

The top's ports are plain signals:
* clock and reset;
* the register write port;
* the processor input: `in_valid`, `in_ready`, and `in_features`, with feature
  *k* in byte *k*;
* the result output: `out_valid`, `out_ready`, and `out_result`, a
  `result_t` = {id, label, hops, conf, probabilities}.

## Where this design departs from, or goes beyond, the description it follows

The published description gives the ring of groves, the queue with its front
and back pointers and programmable step Γ, and the entry fields in order
{hops, features + id, probabilities}. It also gives:
* trees with programmable weights and feature offsets;
* averaging of probabilities across groves;
* confidence as the gap between the top two probabilities;
* the threshold and maximum-hops stopping rules;
* placing ring entries at the front of the queue;
* the req / one-cycle ack handshake;
* a random start grove.

Everything else is this design's own choice:

* **Queue size.** The description calls the queue "6 kB" and also says it
  holds 8 MNIST inputs. Those two statements disagree (8 × 796 = 6368 >
  6144). The RTL follows the 8-input statement.
* **Hop count.** One passage has the receiving grove add 1 to the hop count.
  The worked example instead shows the count already at 1 after the first
  grove has computed. This design follows the example: the PE writes back
  h+1, and a ring copy keeps the value.
* **Tree depth.** The depth is not given for the hardware. 5 is this design's
  choice.
* **Label count.** The label maximum of 26 comes from the largest label count
  among the evaluated datasets.
* **Feature address.** A node's feature sits at `fr + 1 + OFF`, because the
  hop byte comes first.
* **Branch direction.** Taking the right child when `x > w` is a convention.
* **Numbers.** The byte number format, truncating division, tie-breaking
  toward the lower label, and the layout of the result record are this
  design's.
* **Data movement.** Byte-serial copies, one write port per queue, the
  arbitration order, and the two-free-entries rule for new inputs are this
  design's.
* **Accelerator queues.** The input and output queue depths (2 and 4), the
  LFSR, and the fallback to the next grove with room are this design's.
* **Control.** The register map, the reset values, and the rule that Γ may
  only change while the queues are empty are this design's.

**Not built:**
* the multi-output form of the confidence, which takes the minimum over
  several outputs: its data layout is not defined;
* the host processor, its caches, the accelerator's L2 cache, and the
  CPU–accelerator link. The top's register, input and output ports stand
  where these would connect.

**Topology is fixed at build time.** Other groupings of trees, such as 4
groves of 4 trees, need a rebuild: change `N_GROVES` and `TREES_PER_GROVE` in
`fog_pkg`.

### Datasets at the default build

| dataset      | F   | C  | Γ   | entries per queue |
|--------------|-----|----|-----|-------------------|
| MNIST        | 784 | 10 | 796 | 8                 |
| ISOLET       | 617 | 26 | 645 | 9                 |
| Penbase      | 16  | 10 | 28  | 227               |
| Letter       | 16  | 26 | 44  | 144               |
| Segmentation | 19  | 7  | 28  | 227               |

Every one fits at the default build. The MNIST and Penbase sizes are the
published ones. The other three are the standard sizes of those datasets.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block
with an independent model and prints `TB_RESULT checks=… failures=…`.
`tb/fog_model_pkg.sv` is a plain SystemVerilog reference model of the whole
classifier. It holds the trees, computes each grove's step, and follows an
input around the ring.

| testbench             | what it covers |
|-----------------------|----------------|
| `tb_minmax_conf`      | random vectors, label counts and ties against a sort |
| `tb_prob_combine`     | running average for random hop counts, masking of unused labels, the two-grove worked example |
| `tb_data_queue`       | random push-back / push-front / pop against a queue model, wrap-around, read-back through two ports |
| `tb_decision_tree`    | random trees and inputs against a software walk, `done` exactly D+1 cycles after `start` |
| `tb_grove_handshake`  | req held until the one-cycle ack, data stable, result valid/ready |
| `tb_fog_ctrl`         | every register and programming field |
| `tb_input_queue`      | entry layout, id sequence, start grove against a reference LFSR, skip to the first grove with room, every grove used as a start |
| `tb_output_queue`     | every result out once and in per-grove order, no grove passed over more than N−1 times, back-pressure |
| `tb_grove`            | one grove plus models of its neighbours: results, forwarded entries, the latencies above, stop at max_hops, front placement, the two-free-entries rule |
| `tb_fog_top`          | whole accelerator at its default sizes; four phases: small dataset at threshold 0.1, threshold at maximum (plain random forest), hop cap of 3, then full MNIST-size entries |
| `tb_fog_workloads`    | whole accelerator at default sizes on the shapes of MNIST, ISOLET, Penbase, Letter and Segmentation (random trees), at thresholds 0.1 and 0.5, with the entry format changed between datasets; every result against the model, and more groves used at the higher threshold |

`tb_fog_top` checks every result against the model, started at the grove the
input queue chose. It also counts each mechanism and fails if one never
happens:
* exits at the first grove;
* forwards;
* stops at the hop cap;
* inputs that visit all 8 groves;
* ring entries placed in front of queued inputs;
* processor stalls;
* output back-pressure;
* each grove used as a start.

It runs the top with no parameter overrides, in about 10 seconds of
simulation.

To run a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fog_top \
  -y rtl -y tb +libext+.sv rtl/fog_pkg.sv tb/fog_model_pkg.sv tb/tb_fog_top.sv
./obj_dir/Vtb_fog_top
```

Replace `tb_fog_top` with any other testbench name. Block testbenches that
don't use the reference model don't need `tb/fog_model_pkg.sv`, but passing it
does no harm. The design reads no data files: tree contents and inputs are
generated inside the testbenches.
