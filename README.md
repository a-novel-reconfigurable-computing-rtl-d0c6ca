# A reconfigurable image preprocessor on a circuit-switched NoC

A camera front end that works in changing light needs different processing
by day and by night. By day, the colour channels are balanced (colour
constancy) before edge detection. By night, the histogram is equalized to lift
the contrast of a dark frame. Both modes share the rest: a Gaussian smoothing
filter first and a Canny edge detector last. Building two complete pipelines
would duplicate the shared stages. This design builds each stage once and
joins the stages with a **circuit-switched network-on-chip (NoC)**. Changing
mode means loading a new set of switch settings into the routers. No datapath
changes.

The model behind it is a synchronous dataflow graph:

* each processing stage is a node;
* each wire between stages is an edge;
* each edge becomes a fixed path through the NoC.

The day graph and the night graph are merged into one union graph, in which
the shared nodes appear once. That union is placed on a 2 x 5 mesh of routers.
A mode is then a subset of the union graph's edges. To select it, switch those
paths on and every other path off.

```
 day   : frame in -> Gaussian -> colour constancy      -> Canny -> frame out
 night : frame in -> Gaussian -> histogram equalization -> Canny -> frame out
```

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. Every default
parameter is the full-size configuration: three colour channels and 640 x 480
frames.

## 1. Tokens: how stages stay in step without handshakes

This is the part to understand first. Everything else depends on it.

A NoC link carries at most one **token** per clock (`isp_pkg::token_t`, 11 bits):

| field  | meaning |
|--------|---------|
| `vld`  | a token is on the link in this cycle |
| `nul`  | *null token*: a token that carries no pixel |
| `sof`  | start of frame: this token is pixel (0,0) |
| `data` | 8-bit pixel value |

No link has a ready signal or back-pressure. A circuit-switched path has a
fixed bandwidth, and every node is built to accept a token in every cycle.
Nodes therefore follow three rules:

1. **Self-timed firing.** A node does its work once per arriving token (or
   once per matched set of tokens, if it has several inputs). Idle cycles
   carry no meaning.
2. **Fixed rate.** Every firing emits exactly one output token. A stage that
   needs a neighbourhood (a 3x3 window) has to wait for later input before it
   can produce a result. Its output therefore *lags* its input by a fixed
   number of tokens. While no result exists, the stage emits null tokens.
3. **Frames are contiguous.** A frame is `IMG_W*IMG_H` consecutive non-null
   tokens, and the first one has `sof` set. Between frames the source may send
   any number of null tokens and may leave idle cycles. Null tokens also push
   the last rows of a frame out of the window stages. Every node finds frame
   positions by counting from `sof`.

Two consequences follow:

* The number of router hops on a path does not matter. Routers add clock
  cycles but never add or remove tokens. Any path delay is therefore harmless
  as long as the graph has no cycles.
* Results are predictable in **tokens**. Pixel 0 of a frame leaves a 3x3
  stage `IMG_W+1` tokens after it entered. It leaves Canny (three window
  stages) `3*(IMG_W+1)` tokens later, and it leaves the whole day or night
  pipeline `4*(IMG_W+1)` tokens later.

A node with several input streams has to line them up again, because each
stream reaches it after its own path delay. `sdf_resync` does this. It gives
each stream a FIFO and fires only when every FIFO holds a token. Because
every producer follows the fixed-rate rule, the k-th tokens of all streams
always belong together. Null tokens are matched like any other token.

## 2. The router (`cs_router`)

Each router is a 5 x 5 crossbar. Its ports are N, E, S, W and L (the local
port, where a node attaches). Each output port has a 6:1 multiplexer that
selects `OFF` or one of the other four input ports. The selection is made by
a 3-bit code `sel_e` (`SEL_OFF=0, N=1, E=2, S=3, W=4, L=5`). One input may
feed several outputs, which gives multicast edges.

The configuration word `router_cfg_t` is the five selects, `sel[PORT_L]` in
the top bits. A word is legal only if all of these hold:

* no output selects its own port (a complete graph on five ports has no
  self-loops);
* each port works in one direction at a time: if a port's output is on, no
  other output may read that port's input. This also makes the local port
  either an input or an output;
* no select code is above `SEL_L`.

Configuring a router takes two steps. `cfg_we` loads the word into a
**shadow** register. Then `cfg_apply`, the external configuration signal,
copies the shadow into the active configuration of all routers in the same
cycle. An illegal shadow word is refused: the old routes stay and `cfg_err`
is set until the next legal apply. Every output is registered, so each router
on a path adds one cycle. Reset turns every output off.

## 3. The mesh plane and the two modes (`cs_mesh_noc`, `isp_top`)

`cs_mesh_noc` is a `ROWS x COLS` mesh with default 5 x 2. Router (r,c) has
index `r*COLS+c`, and row 0 is at the top. Neighbours are joined by a pair of
one-way links. Ports on the edge of the mesh are tied off. A shared bus
(`cfg_we`, `cfg_addr`, `cfg_word`, `cfg_apply`) writes the routers' shadow
words one at a time and then applies them all at once.

`isp_top` instantiates three identical planes, one per colour channel. Each
plane has its own Gaussian, histogram-equalization and Canny node. The single
colour-constancy node spans all three planes, because it needs R, G and B
together. The node placement is fixed by the merged graph:

```
            col 0                          col 1
 row 0   [0] L -> Gaussian in   <====    [1] L <- frame input
            |                                |
 row 1   [2] L -> colour const. in       [3] L <- colour const. out
            :  day                           :  day
 row 2   [4] L <- Gaussian out           [5] L -> Canny in
            :  night                         :  night
 row 3   [6] L -> hist. eq. in           [7] L <- hist. eq. out
            |                                |
 row 4   [8] L -> frame output  <====    [9] L <- Canny out
```

Router settings (output <- input). Every output not listed is `OFF`:

| router | always     | day        | night      |
|--------|------------|------------|------------|
| 0      | L <- E     |            |            |
| 1      | W <- L     |            |            |
| 2      |            | L <- S     |            |
| 3      |            | S <- L     |            |
| 4      |            | N <- L     | S <- L     |
| 5      |            | L <- N     | L <- S     |
| 6      |            |            | L <- N     |
| 7      |            |            | N <- L     |
| 8      | L <- E     |            |            |
| 9      | W <- L     |            |            |

Each mode uses 4 of the 13 inter-router links per plane, and no link twice.
Every path is two routers long. To switch modes, write all ten words (the
same word goes to the router with that index in every plane) and pulse
`cfg_apply`, preferably while only null tokens are flowing between frames.
The testbench function `mode_cfg` in `tb/tb_isp_top.sv` builds both word sets.

## 4. The processing nodes

All window stages are built on `win3x3`. This block has two line buffers of
`IMG_W` entries and a 3x3 register window, and the window shifts by one pixel
per token. The `sof` and "is a pixel" flags travel through the line buffers
with the data. The window centre's (x, y) position is recovered from them.
Neighbours outside the frame are replaced by the nearest pixel inside it
(border replication). A window whose centre is not a frame pixel gives a null
output.

**Gaussian (`gaussian_node`).** Uses the kernel `[1 2 1; 2 4 2; 1 2 1]/16`
with rounding. Lag: `IMG_W+1` tokens.

**Canny (`canny_node`).** Three window stages, joined inside the node (not
through the NoC):

1. Sobel `gx`, `gy`; magnitude `|gx|+|gy|`; the direction quantised to four
   sectors at tan 22.5 deg ~ 106/256 and tan 67.5 deg ~ 618/256.
2. Non-maximum suppression: a pixel survives if its magnitude is not smaller
   than either neighbour along the gradient. A survivor is *strong* above
   `TH_HIGH` (150) and *weak* above `TH_LOW` (60).
3. Hysteresis over the 3x3 neighbourhood: a strong pixel is an edge, and so
   is a weak pixel that touches a strong one.

The output is 255 for an edge pixel and 0 otherwise. Lag: `3*(IMG_W+1)`
tokens. The node does no smoothing of its own, because the Gaussian node runs
before it.

**Histogram equalization (`hist_eq_node`).** Frame k is mapped with a table
built from frame k-1. The first frame after reset passes through unchanged.
After the last pixel of a frame, a sequencer walks the 256 histogram bins in
256 cycles. It builds `lut[v] = floor(255 * cdf(v) / N)` with
`N = IMG_W*IMG_H`. The division is a multiplication by
`K = ceil(255 * 2^S / N)` followed by a shift right by S, where
`S = 2*ceil(log2 N) + 1`. Because `2^S >= 2N^2`, the result is the exact
floor for every count. Histograms and tables are both double-banked. The next
frame is therefore counted while the table is built, and the new table takes
over at the next `sof`. Lag: 0 tokens.

**Colour constancy (`color_constancy_node`).** Uses the gray-world method.
The three channel streams first pass through `sdf_resync`. During frame k the
node sums each channel and outputs `min(255, (in*g + 128) >> 8)` with the
8.8 fixed-point gains of frame k-1 (1.0 after reset). After the frame, three
36-cycle restoring dividers (`seq_div`) compute
`g_c = min(65535, floor(256*(S_R+S_G+S_B) / (3*S_c)))`, which moves each
channel mean to the common gray mean. The new gains take over at the next
`sof`. Lag: 0 tokens.

### Frame-gap requirement

Both frame-statistics nodes need time between the last pixel of one frame and
the `sof` of the next: 256 cycles for a table and about 40 for the gains. A
sof that comes too early is still processed, but with the older table or
gains, and the sticky flag `he_late` or `cc_gain_late` is set. A
vertical-blanking interval of a few hundred null tokens or idle cycles is
enough.

## 5. Top-level interface (`isp_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `frame_in[3]` | in | R, G, B token streams |
| `frame_out[3]` | out | R, G, B edge maps (255 / 0), same token rate as the input |
| `cfg_we`, `cfg_addr[3:0]`, `cfg_word` | in | write router `cfg_addr`'s shadow word in all planes |
| `cfg_apply` | in | switch every router to its shadow word |
| `cfg_err` | out | some router refused an illegal word |
| `he_late`, `cc_gain_late` | out | sticky: a frame started before its table/gains were ready |
| `cc_sync_wait` | out | the resynchronizer is holding an incomplete set |
| `cc_sync_ovf` | out | sticky: channel skew exceeded the resynchronizer depth (16 tokens) |

Parameters: `IMG_W` (640), `IMG_H` (480), `TH_LOW` (60), `TH_HIGH` (150).
The channel count (3) and the mesh size (5 x 2) are fixed by the node
placement.

## 6. What is taken from the source and what is this design's own

Taken from the published architecture:

* the circuit-switched router as a 5 x 5 crossbar, configured on an
  external signal;
* the rule that each neighbour link is one-way at any moment and that the
  local port is either an input or an output;
* the mesh topology and the 2 x 5 size;
* the set of nodes, the day/night algorithms and where the nodes attach;
* the day and night routes, and switching modes by switching paths on and off;
* the dataflow discipline: self-timed firing, a fixed number of output tokens
  per firing, null tokens, and resynchronizing the inputs;
* three colour channels.

Chosen here, because the source gives no detail:

* the token format, the 8-bit pixels and the `sof` marker;
* the configuration encoding, the shadow register, the apply strobe and the
  refusal of illegal words;
* one output register per router;
* one NoC plane per colour channel, with the colour-constancy node shared
  between them and a single configuration bus for all planes;
* the frame size;
* the algorithm inside every node: the Gaussian kernel, the Canny stages and
  thresholds, the histogram-equalization formula, gray-world colour constancy,
  and using the previous frame's statistics.

Differences and limits to be aware of:

* In the source drawing the frame source, the frame sink and the nodes sit
  beside the mesh. Here every one of them uses a router's local port.
* Canny hysteresis looks only at the 3x3 neighbourhood. A weak pixel reached
  only through a chain of other weak pixels is not an edge.
* The published results are FPGA slice counts and clock rates (a 26.4 %
  saving against two separate pipelines). They cannot be reproduced from this
  RTL and were not compared.
* The offline tool flow that merges the graphs and routes them on the mesh
  is not hardware and is not included. Its result for this system is the
  placement in `isp_top` and the route table above.
* There is no stream-end marker. Nodes count pixels from `sof`.

## 7. Verification

Each block has a self-checking testbench in `tb/`. Each compares against
whole-frame reference models in `tb/isp_ref_pkg.sv`, which are written
straight from the formulas above rather than from the streaming structure.
Each ends by printing `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|-----------|---------------|
| `tb_cs_router` | 300 random words, legal and illegal (U-turn, two directions, bad code): legal ones become active and illegal ones are refused; every output matches its selected input one cycle later; multicast works |
| `tb_cs_mesh_noc` | day, night (with multicast) and a six-hop route: latency of one cycle per router; unrouted local outputs stay idle; an illegal word flags only its own router |
| `tb_cs_mesh_noc_3x3` | the mesh at 3 x 3: one source multicast as a tree to the four corner routers, three cycles each |
| `tb_sdf_resync` | three skewed streams with null tokens are matched set by set; an aligned set leaves after one cycle |
| `tb_gaussian_node`, `tb_canny_node` | pixel-exact frames, one output per input token, lag of `IMG_W+1` or `3*(IMG_W+1)` tokens |
| `tb_hist_eq_node`, `tb_color_constancy_node` | pass-through on the first frame, previous-frame statistics afterwards, the late flag and old table/gains when the gap is too short; resynchronization of skewed channels |
| `tb_isp_top` | 32 x 24 frames end to end: two day frames, an illegal configuration refused, a switch to night, two night frames. All pixels exact; token counts conserved; lag `4*(IMG_W+1)`; every mechanism seen at least once |
| `tb_isp_top_full` | the same sequence at the default 640 x 480 size (a few million cycles; under a minute of simulation) |

Any testbench can be run with plain Verilator 5 from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/isp_pkg.sv tb/isp_ref_pkg.sv tb/tb_isp_top.sv --top-module tb_isp_top
./obj_dir/Vtb_isp_top
```

To run another testbench, replace `tb_isp_top` with its name. Add
`+verilator+rand+reset+2` to the run to start from random register values;
every testbench passes with it. The testbenches draw their frames from
`make_image`, which produces gradients, a bright rectangle and noise. To try
other images, change that function or the frame loops.

## 8. Files

| file | content |
|------|---------|
| `rtl/isp_pkg.sv` | token and configuration types, router port numbers, configuration rule `cfg_legal` |
| `rtl/cs_router.sv` | 5 x 5 crossbar router with shadow / active configuration |
| `rtl/cs_mesh_noc.sv` | ROWS x COLS mesh of routers with the configuration bus |
| `rtl/sdf_resync.sv` | multi-stream resynchronizer |
| `rtl/win3x3.sv` | token-driven 3x3 window with line buffers and border replication |
| `rtl/gaussian_node.sv`, `rtl/canny_node.sv`, `rtl/hist_eq_node.sv`, `rtl/color_constancy_node.sv` | processing nodes |
| `rtl/seq_div.sv` | restoring divider used for the colour gains |
| `rtl/isp_top.sv` | three planes, the nodes and their placement |
| `tb/isp_ref_pkg.sv` | reference models and the test-image generator |
| `tb/tb_*.sv` | testbenches |
