# Multiply-and-Fire: an event-driven sparse CNN accelerator in SystemVerilog

In a ReLU network most activations are zero. A dense accelerator still fetches
and multiplies them. Multiply-and-Fire (MNF) works the other way round: every
**non-zero** activation becomes an *event*, and only events cause work. An
event carries everything a processing element (PE) needs to push that one
input into all the output neurons it touches:

* **Multiply phase.** The PE reads the weights that belong to the event. It
  multiplies them by the event's value and adds the products into
  partial-sum memories, one partial sum per output neuron.
* **Fire phase.** When the whole input has been seen (an *end-of-data* event),
  each partial sum is read out. It is quantized to 8 bits, optionally
  max-pooled, and compared with a threshold (ReLU). Each value that passes
  becomes an event of the next layer. Values that do not pass produce no
  traffic at all.

This repository gives synthesizable RTL for that scheme: 11 compute PEs and
one storage node that holds a layer's output events between layers. It also
gives a set of self-checking testbenches. The mesh network that connects the
nodes is not included; each node's network port is a port of the top level.

## 1. Events

`mnf_pkg::event_t` (44 bits) has a kind and five fields:

| kind      | fields used |
|-----------|-------------|
| `EV_CONV` | `data` (8-bit activation), `ch_id` (input channel), `start_weight` (filter tap), `start_neuron` (output neuron), `x_jump`, `y_jump` |
| `EV_FC`   | `data`, `start_neuron` (the index of the input neuron) |
| `EV_EOD`  | none; marks the end of a layer's input |

### Walking a filter from one input pixel

Take a 3x3 filter with stride 1 and a non-zero input pixel. The pixel
contributes to up to 3x3 output neurons, and each one uses a different filter
tap. The event names the first pair:

* the largest tap index involved (`start_weight`);
* the first output neuron (`start_neuron`, the top-left neuron it reaches).

`x_jump` and `y_jump` say how many more columns and rows the pixel reaches.
For entry (x, y), with x ≤ x_jump and y ≤ y_jump:

    tap    = start_weight - stride*x - K*stride*y        (K = filter width)
    neuron = start_neuron + W*y + x                      (W = output-map width)

Worked example: a 4x4 map, a 3x3 filter and pixel (1,1).
* The event is start_weight 4, start_neuron 0, x_jump 1, y_jump 1.
* W is 4, so the pixel updates neurons 0, 1, 4 and 5 with taps 4, 3, 1 and 0.
* `tb_mnf_load_module` checks this case.

The sequential original steps through these pairs one at a time. The
**load module** (`mnf_load_module`) unrolls the walk: all 9 entries of an
event come out together, as a vector with a valid bit per entry. The module
turns the start neuron into a (row, column) pair with one divider, and the
dispatcher uses that pair to find where each neuron lives.

An FC event of input neuron *i* updates every output neuron *j*, using
weight *w(i, j)*.

## 2. The PE pipeline

    network ─► router interface ─► event FIFO ─► load ──► item FIFO ─► dispatcher ─► 9 MAC modules
                  ▲    │ (forward)               │                       ▲              │
                  │    ▼                          └► weight memory ───────┘              ▼
                  └──── output FIFO ◄──────────────── activation (fire) ◄───── quantized readout

    (weight memory = weight memory interface + weight SRAM of 25600 x 216 bit)

Each PE is a `mnf_pe`. The stages of its core (`mnf_core`) are joined by small
valid/ready FIFOs (`mnf_fifo`), so address generation runs ahead of the
arithmetic.

* **Load module.** It handles one event per weight word.
  * For every word it issues a weight read and, in the same cycle, a work
    item (value plus the neuron vector).
  * A conv event needs `n_og` words, one per group of 3 output channels.
  * An FC event needs `ceil(fc_n/27)` words.
  * It swallows end-of-data events until `cfg.n_eod` have arrived, one per
    sending PE, and then passes a single one on.
* **Weight memory interface** (`mnf_weight_mem_if`).
  * It drives the single-port SRAM.
  * Host weight writes take priority over reads.
  * A read is issued only when the return FIFO has room (credit counting),
    so the SRAM never has to stall.
* **Dispatcher** (`mnf_dispatcher`). It joins each work item with its weight
  word and sends every MAC module one group: input value, 3 weights, one
  local address and 3 lane-valid bits. One word is consumed per cycle.
* **MAC cluster.**
  * It has 9 `mnf_mac_module`s with 3 multipliers each, so 27 MACs per cycle.
  * Each multiplier lane has its own 625 x 32-bit two-port bank
    (`mnf_acc_sram`).
* **Activation** (`mnf_activation`). It runs the fire phase (section 4).
* **Router interface** (`mnf_router_if`). It connects the PE to the network
  (section 5).

### Where partial sums and weights live (the part to read carefully)

The key choice is the partial-sum banking. All neurons one event touches must
be updated in the same cycle without two of them hitting the same bank.

* **Conv.** Output neuron (row, col) of output channel `3*og + k` lives in:
  * MAC module `3*(row mod 3) + (col mod 3)`;
  * lane `k`;
  * local address `og*ceil(H/3)*ceil(W/3) + (row/3)*ceil(W/3) + col/3`.

  The up to 3x3 neurons of one event always differ in (row mod 3, col mod 3),
  so they land in 9 different modules. Each module's 3 lanes serve 3 output
  channels with the same input value.
* **Conv weight word** (216 bits = 27 bytes). It holds the 9 taps of one input
  channel for the 3 output channels of one group. Byte `tap*3 + k` is tap
  `tap` of output channel `3*og + k`. Word address:
  `w_base + ch_id*n_og + og`.
* **FC.** Word `q` of input `i` is at `w_base + i*ceil(fc_n/27) + q`. Byte
  `L = 3m + k` of that word is the weight to output neuron `27q + L`. That
  neuron lives in module `m`, lane `k`, local address `q`.

So a PE computes up to `3*n_og` output channels of a conv layer, or up to
16875 FC outputs. A layer wider than one PE is split across PEs by output
channel (or output neuron). All those PEs receive the same input events.

### The MAC module's read-modify-write

* **Stage 1** registers the 3 products and reads the old sums.
* **Stage 2** adds and writes back.

The same neuron can be updated in consecutive cycles. Stage 2 therefore
forwards its own last write (a one-entry bypass per lane) instead of the
stale SRAM value.

* **After reset** every module clears its 625 sums, one address per cycle,
  and holds `ready` low until it is done.
* **Readout** (fire phase) reads one sum per cycle and clears it, so the next
  layer starts from zero.

## 3. Multiply/fire hand-over

When the load module passes on end-of-data, the dispatcher stops taking work.
It waits until every MAC pipeline is empty, then pulses `drain_start`. The
activation module reads out all results and sends its own end-of-data, then
pulses `drain_done`. Only then does the dispatcher accept the next layer's
work. The multiply and fire phases of one PE never overlap.

## 4. Fire phase

For each value the PE holds, in channel/row/column order (or neuron order for
FC), the activation module does the following.

1. **Quantize.** It reads the partial sum through the module's quantizer:
   `q = sat8(round(sum * qmul >> qshift))`. This is a fixed-point rescale with
   a per-layer multiplier and shift, in the style of integer-only inference.
2. **Pool.** With `cfg.pool` it reads the four sums of a 2x2 window in one
   cycle and keeps the largest. The four always sit in different modules.
3. **Threshold.** If the value is greater than `cfg.threshold` (0 gives
   ReLU), it builds the next layer's event; otherwise it drops the value.
   * For a next conv layer with filter K, stride s, padding P and output
     width W, the formulas are in the header of `rtl/mnf_activation.sv`.
     They give the first reachable output neuron, the jumps and the start
     tap.
   * For a next FC layer, the event carries the flattened index
     `nxt_fc_base + (ch_base + c)*H*W + y*W + x`, where H and W are the
     (pooled) output-map size.

Each value takes two cycles: one to read and one to compare and fire. After
the last value, one end-of-data event follows.

## 5. Network side

* **Flit.** A flit (`flit_t`) is a 12-bit destination mask plus an event.
  The 12 nodes are 11 PEs and the storage node, and several mask bits may be
  set (multicast).
* **Router interface.** It hands events addressed to the PE to the core.
  * If `cfg.fwd` is non-zero, it also re-sends each of those events to the
    nodes in `cfg.fwd` (event forwarding). One multicast from the source can
    then feed a chain of PEs.
  * It sends the core's fired events to `cfg.dst`.
  * Forwarded events go before the PE's own output.
  * An offered flit stays unchanged until the network takes it; an assertion
    checks this.
* **Storage node** (`mnf_storage_pe`).
  * It keeps every event sent to it in a receive bank and counts the
    end-of-data events.
  * A host replay command swaps its two 2^18-event banks and streams the old
    receive bank to a destination mask, followed by one end-of-data event.
    The next layer's outputs can arrive while the replay is still running.
  * The host writes the first layer's input through `host_wr_*` and reads
    results back through `host_rd_idx`/`host_rd_ev`.
* **The mesh itself is not part of this RTL.** `mnf_top` brings out
  `net_out_*` and `net_in_*` for all 12 nodes. `tb/mnf_noc_model.sv` is a
  small behavioural multicast crossbar used to close the loop in simulation.

## 6. Configuration

Each PE has a static `cfg_t` input. The host sets it between layers.

| group | fields |
|---|---|
| multiply | `mode` (conv/FC), `k`, `stride`, `ofm_w`, `ofm_h`, `n_og` (groups of 3 output channels), `w_base`, `fc_n`, `n_eod` |
| fire | `n_out_ch`, `ch_base`, `qmul`, `qshift`, `threshold`, `pool` |
| next layer | `nxt_mode`, `nxt_k`, `nxt_stride`, `nxt_pad`, `nxt_ofm_w`, `nxt_ofm_h`, `nxt_fc_base` |
| routing | `dst`, `fwd` |

Weights are loaded through `wl_valid/wl_pe/wl_addr/wl_data` on the top.

## 7. Sizes

| parameter | default | meaning |
|---|---|---|
| `NUM_PE` | 11 | compute PEs |
| `NUM_MAC` × `MULTS` | 9 × 3 | MAC modules per PE × multipliers per module |
| `WDEPTH` × `WWORD_W` | 25600 × 216 | weight SRAM per PE (691.2 kB) |
| `ADEPTH` × `PSUM_W` × 27 | 625 × 32 × 27 | partial sums per PE (67.5 kB) |
| `DATA_W` | 8 | activations and weights |
| storage `DEPTH` | 262144 | events per storage bank (two banks) |

What fits at these sizes:
* **Fits.** A 13x13, 384→256 3x3 layer fits in one pass.
* **Does not fit.**
  * 56x56 and 224x224 maps do not fit in one pass: one channel group of a
    224x224 map needs 5625 words per bank.
  * Filters larger than 3x3, such as AlexNet's 11x11 and 5x5, are not
    supported by the event format or the banking.
  * Large FC layers do not fit the weight SRAM.

## 8. Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_mnf_fifo` | random push/pop against a queue model; full and empty reached |
| `tb_mnf_weight_sram`, `tb_mnf_acc_sram` | read-back, one-cycle latency, old value on read-during-write |
| `tb_mnf_mac_module` | random updates (many back to back on one address) against a model; quantized readout with rounding and saturation; clear on read; bypass used |
| `tb_mnf_mac_cluster` | all 9 modules updating at once; per-cycle multiplication count; bypass only on back-to-back updates; readout of four modules per cycle as in a pooling window |
| `tb_mnf_load_module` | the worked example above; 300 random conv events against the tap/neuron formulas and weight addresses; FC addressing; end-of-data counting |
| `tb_mnf_router_if` | delivery, forwarding, output order and destinations under random back-pressure |
| `tb_mnf_core` | a 7x8, 2-channel conv layer with 4 output channels through load, dispatcher, MAC cluster and activation, with a random-latency weight memory: every fired event (value, channel, start tap, start neuron, jumps) against a reference; again with pooling and a following FC layer |
| `tb_mnf_storage_pe` | host writes, replay order and end-of-data, receive during replay, read-back, second replay |
| `tb_mnf_top` | the whole chip at default size on a small network (below) |

The `tb_mnf_top` network is 28x28 input → 3x3 conv (padding 1) with 2
filters → 2x2 max-pool → ReLU → 392x10 FC.

* **Layer 1.** The storage node multicasts the input to PE0 and PE1, one
  output channel each.
* **Layer 2.** The FC layer is split over the same two PEs. The input goes
  to PE0 only, and PE0 forwards it to PE1.

A reference model in the testbench computes every expected value.

* Both layers' results are compared event by event.
* The testbench counts forwarding, bypass hits, pooling, fired and dropped
  values, end-of-data drains and weight-read stalls. Each must occur at
  least once.
* It runs in about 1500 cycles per two layers.

The dispatcher, activation module, weight memory interface and PE have no
unit testbench of their own. They are covered through `tb_mnf_core` and
`tb_mnf_top`.

To run a test with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/mnf_pkg.sv tb/tb_mnf_top.sv --top-module tb_mnf_top
    ./obj_dir/Vtb_mnf_top

## 9. Departures and limits

* **Neuron numbering in the worked example.** The original worked example
  steps the neuron address by 4 per row even though its 4x4 input and 3x3
  filter give a 2x2 output. This RTL uses the configured output width
  (`ofm_w`) in that place.
* **Own choices.** These are decisions of this implementation, not taken
  from the source design:
  * partial-sum banking and weight word layout (section 2);
  * quantizer form (multiplier and shift);
  * next-layer event formula and flatten order;
  * end-of-data counting;
  * the storage node's size, banks and host port;
  * FIFO depths and all handshakes.
* **Not built.**
  * The mesh network-on-chip.
  * Power gating and idle modes; only the weight SRAM's chip enable is
    modelled.
  * Tiling of large output maps over several passes.
  * Filters larger than 3x3.
  * Loading of the configuration record; it is a plain input.
* **Memories.** They are plain arrays standing in for SRAM macros.
