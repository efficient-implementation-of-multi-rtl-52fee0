# Multi-channel convolution on a monolithic 3D ReRAM crossbar: RTL of one tile

A ReRAM crossbar computes a vector-matrix product in one analog step. Input
values are applied as word-line (WL) voltages and weights are stored as
memristor conductances. The current collected on each bit line (BL) is a dot
product (Ohm's law for the products, Kirchhoff's current law for the sum).
In a *horizontally integrated monolithic 3D* crossbar, several such layers
are stacked. Voltage planes (sets of WLs) and current planes (sets of BLs)
alternate, and every plane is shared by the two memristor layers on either
side of it. So the current on one shared BL already holds the sum of two
layers' products:

    I = V_above * G_above + V_below * G_below

The design uses this in-stack summation for multi-kernel, multi-channel
convolution (MKMC). An `l x l` kernel over `c` channels is split into `l*l`
1x1 kernels, one per kernel position. Each position gets its own memristor
layer, with the `c` channels on the WLs and the `n` kernels on the BLs. The
stack then adds the per-position partial sums on the shared current planes,
with no digital adder. Negative weights cannot be stored as conductances.
Instead they are placed in the lower layers of the stack and the
non-negative weights in the upper layers. A configurable interconnect sums
the two groups of current planes separately (`I_n` and `I_p`), and a
difference circuit outputs `I_p - I_n`.

This repository holds SystemVerilog for one accelerator tile built this way:
its 3D crossbar engines, the weight-mapping logic, the interconnect, the
read-out chain, the buffer, the bus and the controller. The analog parts are
behavioural integer models, so every result is exact and can be checked
bit for bit.

## 1. The 3D stack and its plane numbering

With `L` memristor layers (`L` even; 16 by default, the size the design is
evaluated at) there are `L/2 + 1` voltage planes and `L/2` current planes:

    voltage plane k+1   ──────────────  (WLs, one per channel)
         layer 2k+1     ▒▒▒▒▒▒▒▒▒▒▒▒▒▒
    current plane k     ══════════════  (BLs, one per kernel)
         layer 2k       ▒▒▒▒▒▒▒▒▒▒▒▒▒▒
    voltage plane k     ──────────────

Current plane `k` collects layer `2k` (fed by voltage plane `k`) and layer
`2k+1` (fed by voltage plane `k+1`). `xbar3d` implements exactly this:

    cp_i[k][j] = Σ_i vp_v[k][i]·G[2k][i][j] + vp_v[k+1][i]·G[2k+1][i][j]

All voltage planes carry the same image column: the WLs that lie above each
other are driven with the same voltage. So one pixel with all its channels is
presented to the whole stack in one *logical cycle*. An image of `h x w`
pixels takes `h*w` logical cycles.

## 2. Sign separation: how a kernel is placed in the layers

This is the heart of the design and is done by `weight_mapper`, once per
kernel (once per BL column):

1. **Scan.** A kernel position is *negative* if any of its channel weights is
   negative. It is *non-negative* if any weight is positive, or if none is
   negative; an all-zero position therefore counts as non-negative. Let
   `nneg` and `npos` be the two counts.
2. **Place.** The separation voltage plane is `v = ceil(nneg/2)`. Negative
   positions occupy layers `2v-nneg … 2v-1`, directly below plane `v`, each
   holding the magnitudes `|w|` of its negative weights. Non-negative
   positions occupy layers `2v … 2v+npos-1`, directly above plane `v`, each
   holding its positive weights. The other layers are left at conductance 0.
   When `nneg` is odd, this includes a *dummy* layer at the bottom (layer
   `2v-nneg-1`). Unused layers at the top are also zero.
3. **Interconnect.** Current plane `k` is routed to `I_p` if `k >= v`, else
   to `I_n`. Because layers are grouped around a voltage plane, no current
   plane ever mixes the two groups.
4. **Read difference.** `I_2 = I_p − I_n` per BL.

Worked example, a 10-layer stack (6 voltage planes, 5 current planes) and
two 3x3 edge-detection kernels whose channels all have the same values:

| kernel | weights (row-major) | nneg | npos | v | negative layers | non-negative layers | dummy | `I_n` planes | `I_p` planes |
|---|---|---|---|---|---|---|---|---|---|
| 0 | 1 −2 1 / −2 4 −2 / 1 −2 1 | 4 | 5 | 2 | 0–3 | 4–8 | 9 | 0–1 | 2–4 |
| 1 | 1 1 1 / 1 −8 1 / 1 1 1 | 1 | 8 | 1 | 1 | 2–9 | 0 | 0 | 1–4 |

`tb_weight_mapper` checks this table cell by cell.

A position whose channels carry weights of **both** signs takes one layer in
each group. This extends the original scheme, which only shows positions with
one sign across all channels. The cost is real: with trained CNN weights,
nearly every position is mixed. A 3x3 kernel then needs up to 18 layers,
more than the 16 of the default stack. When `2v + npos > L` the mapper drops
`fits`, and the controller raises `err_fit` and drops the layers that do not
exist. Larger kernels are run the way the paper suggests, by repeating the
computation: `cfg_ppass` splits the `l*l` positions into passes, and the
passes are added digitally (see *Passes* below). With `ppass <= (L-2)/2`
(7 for 16 layers, 4 for 10) every sign pattern fits.

### Dummy layers: zero conductance, not zero voltage

A dummy layer can be silenced in two ways: zero conductance, or zero voltage
on the WL plane that feeds it. This RTL programs zero conductance. The
zero-voltage option cannot be used per kernel, because a voltage plane is
shared by every kernel (BL) of the crossbar. In the example above, kernel 0
needs voltage plane 5 silent while kernel 1 uses layer 9, which that plane
feeds.

## 3. What a tile computes, and a caveat

Because every voltage plane carries the same pixel and all current planes are
summed in the same logical cycle, output `k` for pixel `p` is

    out[k][p] = clip( Σ_q Σ_i w[k][q][i] · x[p][i] )

where `q` runs over the kernel positions and `i` over the channels. This is
what the stack-sharing scheme described above produces, and it is what the
RTL implements and the testbenches check.

Note that this is **not** an `l x l` spatial convolution. The 1x1
decomposition of MKMC needs each position's partial result to be added at a
*shifted* pixel (`out[y][x]` takes position `(dy,dx)` from pixel
`(y+dy, x+dx)`). Adding all positions at the same pixel instead is a 1x1
convolution with the summed kernel. For the edge-detection kernels above,
whose weights sum to zero, every output is 0 (the end-to-end test checks
this). With a shared voltage per vertical plane and analog summation across
current planes, no shift can be applied. A design that wants true `l x l`
convolution must either drive each voltage plane with its own shifted pixel
(which conflicts with two layers sharing a plane), or read current planes
separately and do the shifted addition digitally. Neither is done here.

## 4. Tile organisation

    host_* (mesh port) ─┐
    tile_controller ────┼── shared_bus (round robin) ── edram_buffer
    pe[0..NPE-1] ───────┘
        pe: vin ─► xbar3d ─► plane_interconnect ─► diff_amp ─► sample_hold ─► adc ─► bus write

| module | what it is | kind |
|---|---|---|
| `conv3d_pkg` | sizes, widths, controller state type | package |
| `conv3d_tile` | top: one tile | RTL |
| `tile_controller` | mapping phase, then one logical cycle per pixel | RTL |
| `weight_mapper` | sign separation and layer assignment (section 2) | RTL, combinational |
| `shared_bus` | round-robin arbiter, req/gnt, read data one clock later | RTL |
| `edram_buffer` | single-port synchronous memory array | RTL (array) |
| `pe` | one processing engine and its bus write | RTL |
| `plane_interconnect` | per-BL `I_p`/`I_n` routing of current planes | RTL, combinational |
| `xbar3d` | 3D crossbar | behavioural model |
| `diff_amp` | inverting op-amp read-out, `I_2 = I_p − I_n` | behavioural model |
| `sample_hold` | S+H, an enabled register | behavioural model |
| `adc` | shift, clip to signed `ADC_BITS`, per-column clip flag | behavioural model |

The DAC has no model: as an ideal converter it would be a wire, so the 8-bit
pixel code is used directly as the WL value. The on-chip mesh that joins
tiles is not part of the RTL. Its access to the tile is the `host_*` port,
one more master on the shared bus.

### Buffer layout and run protocol

Every buffer word is `max(ROWS*8, COLS*ADC_BITS)` bits (2048 by default).

* Kernel word `(j, q)` is at `cfg_wbase + j*cfg_kpos + q`. It holds the
  `ROWS` signed 8-bit weights of kernel `j` at position `q`; channel `i` is in
  bits `[8i +: 8]`. Positions are numbered row-major.
* Image column `p` is at `cfg_ibase + p`. It holds `ROWS` unsigned 8-bit
  pixels, channel `i` in bits `[8i +: 8]`.
* Output word `(p, e)` is at `cfg_obase + p*NPE + e`. It holds `COLS` signed
  `ADC_BITS` codes; code `jj` is kernel `e*COLS + jj`.

Kernel `j` lives in BL column `j % COLS` of engine `j / COLS`, so one tile
holds up to `NPE*COLS` = 512 kernels of up to `ROWS` = 128 channels. To run:
write kernels and image through `host_*`, then set `cfg_kpos` (`l*l`), `cfg_ppass`,
`cfg_nk` (`n`), `cfg_hw` (`h*w`) and the three base addresses. Pulse `start`
and wait for `done`. The controller first programs **every** column of every
engine, writing zeros where `j >= cfg_nk`, so no cell is left undefined. It
then streams the pixels. `err_fit` reports a kernel that did not fit the
stack; `adc_sat` reports that some output clipped.

### Passes

`cfg_ppass` (0 means all positions at once) sets how many kernel positions
one pass maps. Pass `t` uses positions `t*ppass ...` up to `l*l`. Each pass
reprograms every column with its positions, then streams all pixels. From
the second pass on, each engine first reads its output word from the
previous pass and adds it to the new ADC codes. The sum is clipped to
`ADC_BITS` and the clip sets `adc_sat`. `pass_first` shows the first
position of the current pass. How the paper combines repeated passes is not
stated; this digital addition is this design's choice.

How many passes a kernel needs depends on its signs. If every position has one
sign over all channels, as in the original example, a 5x5 kernel runs on the
16-layer stack in two passes (`cfg_ppass` = 13: 13 + 12 positions, at most
14 layers each). That is the two-fold repetition the original evaluation
describes for 5x5 kernels. With mixed-sign positions, use `cfg_ppass` = 7,
which gives four passes.

`host_*` handshake: hold `host_req` with `host_we`, `host_addr` and
`host_wdata` until `host_gnt` is high at a clock edge. Read data arrives
with `host_rvalid` one clock after the grant.

### Timing

* Mapping: per used kernel, `cfg_kpos` bus reads (2 clocks each when the bus
  is free), then `LAYERS` programming clocks and one clock to start the next
  column. Unused columns take `LAYERS + 1` clocks.
* One logical cycle (one pixel) is `5 + NPE` clocks when the host is idle:
  - read the image column (grant, data);
  - sample it into the S+H;
  - convert in the ADC;
  - the engines request the bus, and their `NPE` writes are serialised by
    the arbiter.

  `tb_conv3d_tile` checks this count. From the second pass on, the engines'
  `NPE` partial reads come before the start, so a logical cycle is about
  `5 + 3*NPE` clocks. Pipelining the next read under the
  writes is possible but not done.
* At default size, mapping 512 3x3 kernels and streaming 8 pixels takes
  17,993 clocks.

## 5. Sizes: the paper's numbers and this design's choices

| parameter | default | origin |
|---|---|---|
| `NUM_LAYERS` / `LAYERS` | 16 | the evaluated configuration |
| voltage / current planes | 9 / 8 | follows from 16 layers |
| `NUM_PE` / `NPE` | 4 | four crossbars drawn per tile |
| `XB_ROWS` (`c`), `XB_COLS` (`n`) | 128 x 128 | chosen; the original gives no crossbar size |
| pixel, weight, conductance | 8-bit unsigned, 8-bit signed, 8-bit level = \|w\| | chosen |
| `ADC_BITS`, `ADC_SHIFT` | 16, 0 | chosen; no ADC resolution is given |
| `BUF_DEPTH` | 8192 words | chosen |
| current width | exact (29 bits at default) | derived, so the analog sums never wrap |

The bus protocol, arbitration, buffer layout, reset behaviour (asynchronous,
active low, control state only; the memories are not reset) and the engine
pipeline are also this design's own choices.

## 6. How far to trust it

* Each block has a self-checking testbench that compares with a reference
  written independently in the testbench: for example, the mapper against
  list-based placement, and the tile against the direct double sum. Each
  testbench was also run against a deliberately broken copy of its module
  and failed.
* The end-to-end test (`tb_conv3d_tile`, reduced size) covers:
  - the worked example;
  - random kernels with mixed-sign positions;
  - dummy layers at the bottom and at the top;
  - a kernel too large for the stack;
  - ADC clipping;
  - the host contending with the running tile;
  - engines contending with each other;
  - a kernel run in passes.

  It requires each of these to occur at least once.
* `tb_conv3d_tile_full` runs one complete operation with every parameter at
  its default: 512 kernels, 128 channels, 3x3, 8 pixels. Its kernels keep
  one sign per position, so that they fit the 16 layers.
* The analog models are ideal: no noise, no wire resistance, no conductance
  quantisation or device limits. Performance and energy claims cannot be
  checked with this RTL.
* The CNN layers used to evaluate the design (VGG-16 conv2_1–conv5_2,
  GoogLeNet inception 3a/3b/4e/5b, AlexNet conv2–5) mostly do not fit one
  tile at the default sizes. Their channel counts (up to 832) or image sizes
  (up to 112x112) exceed 128 rows or 8192 buffer words. Spreading a layer
  over several tiles is not described in enough detail to build. GoogLeNet
  inception 3a 5x5 (16 channels, 32 kernels, 28x28) runs in passes of up to
  7 positions (two passes if each position has one sign).
  `tb_workload_googlenet` runs it at default size, and inception 3b in one
  pass, for the first 16 of their 784 pixels. Inception 3b (3x3, 128 to 192 channels, 28x28) fits in one
  pass if at most 7 of its positions carry mixed signs, and in two passes
  otherwise.

## 7. Simulating and changing it

Every testbench prints one line `TB_RESULT checks=N failures=M`. Build and
run any of them with Verilator 5. The package goes first, and `-y rtl` finds
the modules:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/conv3d_pkg.sv \
        tb/tb_conv3d_tile.sv --top-module tb_conv3d_tile -Mdir obj -o sim
    ./obj/sim

| testbench | what it covers | run time |
|---|---|---|
| `tb_weight_mapper` | worked example, 400 random kernels | < 1 s |
| `tb_xbar3d` | plane/layer summation | < 1 s |
| `tb_plane_interconnect` | `I_p`/`I_n` routing | < 1 s |
| `tb_diff_amp` | `I_p − I_n` | < 1 s |
| `tb_sample_hold` | hold behaviour | < 1 s |
| `tb_adc` | shift, clip, flags, latency | < 1 s |
| `tb_edram_buffer` | memory | < 1 s |
| `tb_shared_bus` | round-robin order, read return, bounded wait | < 1 s |
| `tb_pe` | one engine, latency, stalled grants, clipping, pass accumulation | < 1 s |
| `tb_tile_controller` | programming, pixel sequencing, passes | < 1 s |
| `tb_conv3d_tile` | end to end, reduced size | a few s |
| `tb_conv3d_tile_full` | end to end, default size | about 1 min |
| `tb_workload_googlenet` | inception 3b 3x3 (one pass) and 3a 5x5 (4 passes with mixed signs, 2 with single-sign positions), default size, 16 pixels | about 2.5 min |

To change sizes, override the parameters of `conv3d_tile` (`NPE`, `ROWS`,
`COLS`, `LAYERS`, `DEPTH`, `ADC_BITS`, `ADC_SHIFT`) or edit the defaults in
`conv3d_pkg`. `LAYERS` must be even. Odd `l*l` kernels use one dummy layer
when their negative count is odd. The crossbar model evaluates
`LAYERS*ROWS*COLS` products per engine whenever its inputs change, so
simulation time grows with that product.

Lint notes: Verilator reports `SYNCASYNCNET` because `rst_n` is both an
asynchronous reset and the `disable iff` condition of the protocol
assertions. This is intended.
