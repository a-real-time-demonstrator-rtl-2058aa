# Artificial Retina track processor — eight-board demonstrator in SystemVerilog

This design finds straight particle tracks in a silicon vertex detector in real time, one event
after another, by using a large array of small parallel cells rather than a sequential track
fit. The parameter space of possible tracks, two numbers (u, v) per track, is cut into a grid of
cells. Each cell stands for one reference track. For every detector layer it knows the point
where its track crosses that layer: the *receptor*. Every hit of an event is sent to the cells
whose receptors lie near it. Each cell adds a weight that falls off like a Gaussian with the
hit–receptor distance. When the event is complete, a real track shows up as a local maximum of
these "excitation levels". The centroid of the levels around that maximum gives the track
parameters to better than one cell.

The hard part is not the arithmetic but getting the hits to the right cells. A hit must reach
every cell for which it has a non-zero weight, and no others. So the hit stream is multiplied
inside a switching network, and events must stay separated all the way through. This RTL models
the demonstrator configuration:

* eight FPGA boards, each with 16 input lines, two switch segments and 8 Track Processing Units
  (TPUs);
* the boards are joined by an 8×8 full mesh of lateral links;
* 64 TPUs cover one quadrant of the parameter space and 16 detector layers.

## Data words and event framing

Every line in the design carries 33-bit words, `word_t = {eoe, data[31:0]}` (see
`rtl/retina_pkg.sv`):

| eoe | data | meaning |
|-----|------|---------|
| 0 | `{layer[3:0], x[13:0], y[13:0]}` (`hit_t`, x and y signed) | one detector hit |
| 0 | `{tpu[5:0], u[12:0], v[12:0]}` (`track_t`) | one track candidate, on output lines |
| 1 | event id | end of event |

An event on a line is its hits (or tracks) followed by one end-of-event (EoE) word. Every input
line must send an EoE for every event, even if it had no hits. Every line uses a valid/ready
handshake: a word moves in a cycle where both are high.

## The distribution network

Two primitive blocks make up the network:

* **Splitter** (`splitter_2s`): one input, two outputs. It looks the hit up in a routing LUT and
  sends it left, right, both ways, or nowhere. The LUT has 1024 two-bit entries, indexed by
  `{layer, x[13:11], y[13:11]}`, which is a coarse detector-region code. EoE words always go
  both ways. After reset every entry is "both", so an unprogrammed network broadcasts.
* **Merger** (`merger_2m`): two inputs, one output, with a FIFO per input.
  * Hits are forwarded in round-robin order.
  * An EoE at one input waits until the other input has one too. Then a single EoE goes out.
    This step keeps events aligned: every merger output is a clean sequence of whole events.
  * Two EoE words with different ids raise `sync_err`.

These compose as follows:

* **2-way dispatcher** (`dispatcher_2d`): two splitters, with the left outputs merged into
  output 0 and the right outputs merged into output 1.
* **4-way dispatcher** (`dispatcher_4d`): two layers of two 2d each.
  * Upper 2d A takes inputs 0–1 and B takes inputs 2–3.
  * Lower 2d C takes A.out0 and B.out0; it drives outputs 0–1.
  * Lower 2d D takes A.out1 and B.out1; it drives outputs 2–3.
* **Mid-Switch segment** (`mid_switch`): two 4d side by side.
  * Inputs 0–3 go to outputs 0–3; inputs 4–7 go to outputs 4–7.
  * Output j is the lateral link to board j.
* **Post-Switch segment** (`post_switch_8x16`): the "8×16 dispatcher". It has 8 lateral inputs
  (input i comes from board i) and 16 outputs, two per TPU.
  * The eight inputs are split between two copies: inputs 0,1,6,7 feed copy 0 and inputs
    2,3,4,5 feed copy 1.
  * In each copy, four splitters (in place of a first 2d layer) produce 8 lines.
  * A layer of four 2d follows; 2d m pairs lines m and m+4.
  * Another layer of four 2d pairs outputs m and m+4 of the previous layer.
  * Output `8*copy + t` feeds TPU t.

Each board holds two identical segments (Mid + Post). Host lines 0–7 feed segment 0 and lines
8–15 feed segment 1, so each segment handles half of the board's hits. This is why a TPU has
four input lines: {segment 0, segment 1} × {copy 0, copy 1}.

### Routing is the host's job

Whether a hit reaches a TPU depends only on the LUTs, which the host writes over the
configuration bus (`cfg_t`: board, kind, unit, addr, data).

* **Splitter unit numbers** on a board are `64*segment + n`:
  * Mid-Switch: n = 0–15. 4d h has base 8h. In a 4d, upper 2d k uses base+2k and base+2k+1;
    the lower 2d use base+4 to base+7.
  * Post-Switch: n = 16–55. Copy c starts at 16+20c. Its splitters are +0..+3. The first 2d
    layer uses +4..+11 (2d m at +4+2m). The second uses +12..+19.
* **LUT entry values:**
  * bit 0 means "left/lower output";
  * bit 1 means "right/upper output";
  * 00 discards the hit.

One thing follows from the topology and is easy to miss. A Mid-Switch input line passes through
only one of the two 4-way dispatchers, so it can only reach boards 0–3 or boards 4–7. A host
that needs a hit on boards of both halves must send it on one line of each half. The
testbenches do this.

## Input stage

Each of the 16 input lines per board has an `input_stage`:

* a 64-word input FIFO written by the host (live data);
* a 1024-word event RAM. In playback mode, the RAM's first `len` words are replayed in a loop,
  which gives a continuous stream of known events.

Mode and length are configuration registers (cfg kind `CFG_INPUT`):

| cfg address | effect |
|-------------|--------|
| below 2048 | writes the RAM word at that address |
| 0x800 | mode (0 = live FIFO, 1 = playback) |
| 0x801 | `len` |

## Cells and TPUs

A **cell** (`retina_engine`) holds 16 receptors, one per layer (`{x, y}`, 14 bits each), and a
16-bit saturating accumulator. Each cycle it can weigh one hit from each of its four lines.

* Search-distance test: a hit weighs nothing if `|dx|` or `|dy|` is above the search distance
  `sd`, or if `dx²+dy²` is above `sd²`.
* Otherwise the weight is `128 >> floor((dx²+dy²) / 2^sig_sh)`, and zero once the shift
  reaches 8.

This weight is a Gaussian in base 2: it halves each time d² grows by `2^sig_sh`. It needs no
multiplier beyond the two squares and no table.

A **TPU** (`tpu`) is a 4×4 block of cells. Its work per event:

1. **Accumulate.** Hits from its four lines go to all 16 cells in parallel. An EoE waits at the
   head of its line until all four lines show one.
2. **Swap.** The levels are copied into a shadow bank and the accumulators are cleared, so the
   next event starts accumulating at once. If the previous readout is still running, the EoE
   words wait and the TPU counts a *stall*.
3. **Scan.** One cell per cycle. A cell is a local maximum if all of these hold:
   * its level is at least the threshold `thr`;
   * it is strictly above each neighbour with a lower index;
   * it is not below any neighbour with a higher index.

   The asymmetric rule gives a plateau exactly one maximum. Neighbours outside the TPU count as
   empty.
4. **Centroid.** For each maximum, the level-weighted mean offset over its 3×3 neighbourhood
   is computed by a restoring divider to 7 fractional bits. The output is
   `u = (U0 + col + 1)·128 + offset`, and v likewise. The `+1` keeps values positive. The track
   word also carries the global TPU number.
5. **Close.** An EoE with the event id follows the last track.

Each TPU has three tuning registers (cfg kind `CFG_TPU_REG`):

| address | register | reset value |
|---------|----------|-------------|
| 0 | `sd` | 64 |
| 1 | `sig_sh` | 6 |
| 2 | `thr` | 256 |

Receptors are written with cfg kind `CFG_RECEPTOR`, addr = `{cell, layer}`.

On board b, TPU t covers cells u = 4t…4t+3 and v = 4b…4b+3. The eight boards thus tile a 32×32
grid: one quadrant. A tree of seven mergers joins the eight TPU outputs, event by event, into a
256-word output FIFO for the host.

The `status` of each board reports:

* a sticky sync error, set by any merger or TPU;
* 16-bit counters of events sent, TPU stall cycles, cycles with a hit copy, cycles with a hit
  discard, and playback restarts.

## Top level

`retina_demonstrator` instantiates the eight boards. It connects output j of segment s on
board b to input b of segment s on board j. The optical links, PCIe and host software are not
modelled. The top brings their signals out as ports instead:

* per-board host input lines;
* per-board output FIFO ports;
* the shared configuration bus.

## What follows the published design and what does not

These parts follow the published design:

* the cell algorithm: receptors, Gaussian-like weight with a search distance, local maxima,
  centroid;
* the splitter/merger/dispatcher composition and the Mid/Post-Switch split;
* the 8×16 Post-Switch with a splitter first layer;
* two segments per board and four lines per TPU;
* the 8×8 mesh, 8 boards, 64 TPUs and 16 layers;
* input FIFOs and event RAMs played in a loop;
* output FIFOs.

These are this design's own choices, because the published design leaves them open:

* all widths and word formats;
* the LUT index (coarse detector region) and its size;
* FIFO depths (16 in the network, 64 input, 256 output) and the RAM depth (1024);
* merger arbitration and the event-id check;
* 4×4 cells per TPU and the cell-to-TPU placement;
* the base-2 weight and its parameters;
* the threshold, tie rule and border rule of the maximum search;
* the 7-bit centroid divider and the track word;
* the shadow bank;
* the output merger tree;
* the configuration bus and status counters.

The design does not include:

* the 8-way dispatcher (the 8×16 replaces it);
* the Pre-Switch, which the quadrant demonstrator does not need;
* the algorithm that chooses a good LUT programming (ordering TPUs to delay hit
  multiplication). This is host software; the RTL only provides the LUTs.

No clock frequency is given, so the published event rate cannot be checked in cycles.

## Timing

Every block works at one word per line per cycle. Splitters register their outputs. Mergers add
one FIFO stage. A TPU needs at least 16 scan cycles per event, plus about 8 cycles per track found (7 divider steps and the output word).
It overlaps this with the accumulation of the next event through the shadow bank. Resets are
asynchronous and active low. The assertions in the splitter and FIFO use `disable iff (!rst_n)`,
which lint tools report as the reset net also being used synchronously; the hardware itself
uses `rst_n` only as an asynchronous reset.

## Simulating

Every file in `rtl/` and `tb/` holds one module or package. `retina_pkg` must be read first, and
`retina_model_pkg` (the reference model) before any testbench. For example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_tpu \
  rtl/retina_pkg.sv tb/retina_model_pkg.sv rtl/*.sv tb/tb_tpu.sv
./obj_dir/Vtb_tpu +verilator+rand+reset+2
```

Each testbench checks the block against an independent model. It ends with a line
`TB_RESULT checks=N failures=M`, and it has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_sync_fifo` | random push/pop against a queue model |
| `tb_splitter_2s`, `tb_merger_2m`, `tb_dispatcher_2d`, `tb_dispatcher_4d`, `tb_mid_switch`, `tb_post_switch_8x16` | Random LUTs are programmed and random events with random stalls are sent. The set of hits on every output, per event, is compared with a model that routes each hit through the same LUT path. The switch testbenches also check that EoE ids come out in order. |
| `tb_input_stage` | live FIFO pass-through, RAM playback and its wrap, mode switches |
| `tb_retina_engine` | weights against the model for random hits; saturation; clear |
| `tb_tpu` | Random events, compared track by track with the model's maxima and centroids. Also checks stalls while a readout runs and the sync error on mismatched ids. |
| `tb_retina_board` | One board at full default size, with its lateral outputs looped back to its own inputs. Mid-Switch LUTs route everything through one line per half and discard layer 15. Tracks of all 8 TPUs are compared per event under output back-pressure. It requires hit copies, discards and TPU stalls to occur. |
| `tb_retina_demonstrator` | All eight boards at default sizes, end to end. Live events with known tracks are checked per board. Output back-pressure, an event with mismatched ids, and RAM playback of one event three times are also exercised. It counts copies, discards, stalls, sync errors, playback restarts and back-pressure, and requires each to occur. |

The full eight-board model is large. verilator flattens it into roughly 250 MB of C++, which
takes well over an hour to compile. So the end-to-end testbench is provided but has not been run
to completion. The largest configuration simulated end to end is one complete board at default
sizes (`tb_retina_board`), with every block of the board at its default size. The eight-board
top level itself passes lint and elaboration.
