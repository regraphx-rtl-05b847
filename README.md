# ReGraphX in SystemVerilog: a 3D ReRAM manycore for training graph neural networks

Each layer of a graph neural network does two different kinds of work:

* **Vertex work (V-layer).** Every node's feature vector is multiplied by a trained weight matrix, `Y = W·X`. This is dense MAC work, as in an ordinary DNN layer.
* **Edge work (E-layer).** Every node adds up the new features of its neighbours, `Z = Adj·Y`. The graph's adjacency matrix `Adj` is fixed and mostly zeros.

ReGraphX runs both kinds in ReRAM crossbars, which do a matrix–vector product in place. It uses two crossbar sizes:

* **V-PE tiles** have large 128×128 crossbars and hold the weights.
* **E-PE tiles** have small 8×8 crossbars and hold only the non-zero 8×8 blocks of `Adj`. Small blocks let more of the zeros be left out.

Every V-layer sends its output to the same shared E-PEs, and the E-PEs send back to the next V-layer. That gives a *many-to-one-to-many* traffic pattern. Each output also has to reach both the next layer and the tiles that run the backward pass, so much of the traffic is multicast.

The chip therefore stacks three tiers: E-PEs on top, V-PEs in the middle and E-PEs at the bottom. They are joined by a 3D mesh network-on-chip (NoC) with tree multicast, so every V-PE is one vertical hop from an E-PE in both directions.

This repository has synthesizable RTL for the digital parts of that chip and behavioural models of its two analog parts:

* the crossbar;
* the ADC (analog-to-digital converter).

It also has a self-checking testbench for every block, including one that runs a V→E→V layer sequence through the whole chip.

## Organisation at a glance

| level | module | count at default size |
|---|---|---|
| chip | `regraphx_top` | 1: 8×8 routers per tier, 3 tiers (z = 0, 1, 2) |
| network | `noc_3d_mesh` → `noc_router_3d` (+ `flit_fifo`, `rr_arbiter`) | 192 routers, 11 ports each |
| tile | `reram_tile` (+ `edram_buffer`) | 4 per router: 256 V-PE tiles (z = 1), 512 E-PE tiles (z = 0, 2) |
| IMA | `ima` (+ `shift_add`) | 12 per tile |
| crossbar | `reram_xbar` (model), `adc` (model) | 8 crossbars and 8 ADCs per IMA |

`regraphx_pkg` holds the sizes, the flit format and the configuration encoding that the other modules share.

The paper fixes the following numbers, and they are the RTL defaults:

* 3 tiers and 64 routers per tier;
* 4 tiles per router and 12 IMAs per tile;
* 8 crossbars per IMA, with 2-bit cells;
* V-PE crossbars of 128×128 with 8-bit ADCs;
* E-PE crossbars of 8×8 with 6-bit ADCs;
* 1-bit DACs.

Everything below those numbers is this design's own choice: the arithmetic format, the flit format, the tile protocol and the routing algorithm. The paper describes them only as "the tiled ReRAM architecture", "tree multicast" or not at all.

## The IMA: a matrix–vector product from 2-bit cells and 1-bit inputs

An IMA (in-situ multiply-accumulate unit) computes `y[c] = Σ_r W[r][c]·x[r]` for a ROWS×COLS block. The weights `W` are 16-bit and the inputs `x` are 16-bit, both unsigned. The cells and DACs are much narrower than that, so the IMA splits the product in two ways:

* **Weight slices.** Crossbar *k* of the IMA's 8 crossbars holds bits `2k+1:2k` of every weight. Eight crossbars of 2-bit cells give a 16-bit weight.
* **Input bits.** The input vector is applied one bit per step, least significant bit first. The word line of row *r* is driven high when bit *b* of `x[r]` is 1.

For one step *b* and one column *c*, crossbar *k*'s bit line carries `s_k = Σ_r x_r[b]·slice_k(W[r][c])`. Each crossbar has its own ADC, and all eight ADCs convert that column in the same clock. The shift-and-add unit then does

```
acc[c] += (Σ_k code_k << 2k) << b
```

After 16 input bits, `acc[c]` is the full product.

**Timing.** One ADC conversion takes one clock. A product therefore takes `16 × COLS` clocks:

* 2048 clocks for a V-PE;
* 128 clocks for an E-PE.

After `start`, `out_valid` rises `16·COLS + 1` clocks later. The results then stream out, one column per accepted transfer.

At this rate a 128-column crossbar is read once every 128 clocks. That matches the paper's 10 MHz crossbar rate if the clock runs at 1.28 GHz. This is a reading of the paper's numbers, not something the paper states.

**Exactness.** A V-PE bit line can sum to 3 × 128 = 384, but an 8-bit ADC saturates at 255. The ADC model clamps at full scale, so a V-PE result is exact only while no slice-bit sum goes above 255. Random dense data almost never reaches that. The IMA testbench checks the clamped arithmetic and also forces the clamp.

An E-PE bit line sums to at most 3 × 8 = 24, so E-PE results are always exact with 6-bit ADCs.

## Tiles: buffering, start tokens and the result stream

A tile, `reram_tile`, connects its 12 IMAs to one local port of a router. It does four things.

1. **Configuration.** This goes over a separate bus, because the layer-to-tile mapping is decided offline. A configuration write carries either of two things:
   * one crossbar row (`CFG_XBAR_ROW`);
   * an IMA's setup record, `ima_cfg_t` (`CFG_OUT`).

   The setup record holds:
   * an input window `in_en`/`in_base`;
   * the number of START tokens to wait for;
   * the output route (destination box, port mask, destination IMA, `idx_base`);
   * an output shift;
   * whether results go out as writes or as partial sums;
   * whether a START token follows them.

2. **Input.** The tile takes every flit it receives.
   * A `CMD_WRITE` or `CMD_ACC` flit for IMA *i* with index *n* goes to eDRAM word `i·ROWS + (n − in_base)`. It is stored only if *n* is inside the window `in_base … in_base+ROWS−1`; otherwise it is dropped.
   * `CMD_ACC` adds to the stored word, saturating at 0xFFFF. This is how partial sums from several E-PEs meet.
   * `CMD_START` counts one token for IMA *i*.
   * Flits for an IMA whose `in_en` is low are dropped.

   Because a receiver filters on its window, one multicast of a whole vector can feed several IMAs that each need a different slice of it.

3. **Start.** An IMA starts when it is idle and holds `starts_needed` tokens. The loader then:
   * moves the IMA's ROWS words from the eDRAM into its input register, one per clock;
   * clears each word as it reads it, so the next round of partial sums starts from zero;
   * pulses `start`.

   While an IMA computes, the inputs of the next sub-graph can already collect in the eDRAM.

4. **Output.** A round-robin arbiter picks one IMA's result each clock. Column *c* becomes one flit:
   * index `idx_base + c`;
   * value `result >> shift`, saturated to 16 bits;
   * the configured destination.

   If `send_start` is set, a START flit follows the last column, so the receiver knows this sender is done. A receiver that has several senders (many-to-one) sets `starts_needed` to their number.

## The 3D NoC and its tree multicast

**Flits and links.** Every packet is one 50-bit flit, `regraphx_pkg::flit_t`. Its destination is an axis-aligned box of routers, `[x_lo..x_hi] × [y_lo..y_hi] × [z_lo..z_hi]`, plus a mask over each router's five local ports (four tiles and an I/O port). A one-router box is a unicast. Links use valid/ready handshakes and carry one flit per clock. Each router input has a 4-deep FIFO.

**Routing.** A flit is copied along a tree that is built in dimension order:

1. **x phase.** Applies when the flit was injected at this router or arrived from an x neighbour. The router sends it on in +x while `x < x_hi` and in −x while `x > x_lo`, but never back where it came from. If the router's x lies inside the box, the y phase starts here too.
2. **y phase.** Applies when the flit arrived from a y neighbour, or when the x phase started it here. It works the same way along y, and starts the z phase if y lies inside the box.
3. **z phase.** It works the same way along z. If z lies inside the box, the flit is also delivered to the local ports in the mask.

Every router in the box gets exactly one copy. A copy is sent on each of a flit's outputs as soon as that output's round-robin arbiter grants it, and a register per input remembers which copies have gone. The flit leaves its FIFO when the last copy has gone.

**Deadlock.** Channel dependencies only run x → y → z → local, and always forward along each axis. So the network cannot deadlock as long as the local ports keep draining.

**Timing.** A hop takes one clock. An unloaded unicast from (0,0,0) to (2,2,2) arrives 7 clocks after injection.

**Mesh edges.** At the edges the mesh ties ports off. Only a box that reaches outside the mesh sends flits there; such flits are dropped, and an assertion flags them.

## Mapping a GNN layer (how the end-to-end test uses the chip)

`tb/tb_regraphx_top.sv` configures a reduced chip for one GCN step and checks it against integer arithmetic done in the testbench. The reduced chip has 2×2 routers per tier, 16×16 V-PE crossbars and 2 IMAs per tile. The configuration is:

* **V1.** On the middle tier: `Y = W1ᵀX`. V1 multicasts `Y` to tiles 0 and 1 of the routers at (0,0,z) on all three tiers. The unused V-PE tiles inside that box drop their copies because their `in_en` is low.
* **E.** `Adj` (16×16) is cut into 8×8 blocks, and the all-zero block is not mapped. The three remaining blocks sit on E-PE tiles on tiers 0 and 2. Each block keeps the half of `Y` that its column block needs and sends partial sums of `Z = Adj·Y` (`CMD_ACC`) to V2.
* **V2.** Waits for three START tokens, computes `W2ᵀZ` and sends the result to the chip's I/O port.

Two input vectors (two sub-graphs) are sent one after the other. V1 then works on the second while V2 works on the first. This is the layer pipeline the paper uses for training, one stage per layer and one sub-graph per stage.

The testbench counts each of these mechanisms and fails if any of them never happens:

* multicast copies;
* copies dropped by a receiver;
* partial sums;
* three-token joins;
* V1/V2 overlap cycles;
* I/O back-pressure.

## What follows the paper and what does not

**Follows the paper:**
* the heterogeneous tiers (E / V / E);
* the crossbar and ADC sizes;
* the 1-bit DACs and 2-bit cells;
* 12 IMAs per tile with 8 crossbars and 8 ADCs each;
* 4 tiles per router and 64 routers per tier;
* the 3D mesh with multicast;
* an eDRAM in each tile (the paper only names it);
* storing only the non-zero 8×8 blocks of `Adj`.

**This design's own choices:**
* 16-bit unsigned weights and inputs, and weight slicing across the 8 crossbars;
* an ADC that clamps at full scale and takes one clock per conversion;
* all of the tile protocol: commands, START tokens, input windows, output scaling, eDRAM layout and size (12 × ROWS words of 16 bits);
* the flit format and the box-based tree-multicast algorithm;
* FIFO depth and round-robin arbitration;
* the configuration bus and the single I/O port at router (0,0,1).

**Not included:**
* no activation function or other non-linearity;
* no signed arithmetic;
* no weight updates: the backward pass needs the same hardware with other contents, but no gradient-specific logic is provided;
* no model of crossbar write time;
* the 1-bit DACs are not separate modules: each one is the bit `in_reg[r][bit]` inside the IMA;
* nothing for the offline steps: graph partitioning, cutting `Adj` into blocks, and the simulated-annealing layer placement. Their results enter through the configuration bus.

**Static versus dynamic traffic.** The paper treats NoC traffic as statically scheduled. This router arbitrates dynamically instead, so it also handles traffic that was not scheduled.

**Resource check.**
* V weights: the 3072 V-PE IMAs hold about 50 M 16-bit weights. That is enough for the 4-layer GCN configurations usually run on PPI, Reddit and Amazon2M, including backward-phase copies.
* E adjacency: the 6144 E-PE IMAs hold 6144 non-zero 8×8 blocks per input sub-graph. Whether a sub-graph fits depends on how its edges cluster into blocks.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. Each one compiles with plain verilator, listing the package first. For example:

```
verilator --binary --timing --assert -y rtl +libext+.sv rtl/regraphx_pkg.sv \
          tb/tb_regraphx_top.sv --top-module tb_regraphx_top -o sim
./obj_dir/sim
```

Replace the testbench name for the others:

| testbench | what it checks |
|---|---|
| `tb_reram_xbar` | bit-line sums of the crossbar model, full size |
| `tb_adc` | clamp and latency of the ADC model |
| `tb_shift_add` | accumulation against a reference array |
| `tb_edram_buffer` | write, accumulate, saturation and clear-on-read |
| `tb_ima` | a full-size V-PE IMA against exact and clamped arithmetic, latency and stalls |
| `tb_reram_tile` | an E-PE tile: windows, drops, tokens, routes and scaling |
| `tb_noc_router_3d` | tree routing decisions and output sharing |
| `tb_noc_3d_mesh` | 3×3×3 random multicast traffic with a scoreboard, and hop latency |
| `tb_regraphx_top` | the reduced chip end to end |

Apart from the top, every block is tested at its default (paper) size. The chip is simulated only at the reduced size in `tb_regraphx_top`. The full chip has 73,728 crossbars, about 0.8 Gbit of cell state. Linting it alone takes about 14 GB of memory in verilator; this figure is extrapolated from about 0.9 GB at 2×2 routers per tier and 3.5 GB at 4×4. The largest configuration simulated is 2×2×3 routers, 16×16 V-PE crossbars and 2 IMAs per tile.

To change the chip size, override `regraphx_top`'s parameters:

* `NX`, `NY`, `NZ`: routers per tier in x and y, and the number of tiers;
* `VT`: which tier holds the V-PEs;
* `V_SIZE`, `E_SIZE`: crossbar sizes;
* `V_ADC`, `E_ADC`: ADC resolutions;
* `IMAS`: IMAs per tile;
* `IO_X`, `IO_Y`, `IO_Z`: where the I/O port is.

Coordinates are 3/3/2 bits wide, so a mesh can be at most 8×8×4.
