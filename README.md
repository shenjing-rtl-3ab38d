# Shenjing in SystemVerilog

Shenjing is a neuromorphic accelerator: a mesh of identical tiles, each with a
neuron core of 256 axons x 256 neurons. The core idea is that no layer has to
fit into one core. A layer is split across cores by its inputs, and each core
computes only a *partial sum* per neuron. Those partial sums then travel over
a dedicated **partial-sum (PS) network-on-chip** and are added on the way, so
the full weighted sum reaches the neuron that fires. The resulting spikes travel
over a separate **spike network-on-chip** to the cores of the next layer.
Both networks are fully scheduled at compile time. Every router follows a
cycle-by-cycle control word from a per-tile configuration memory. The routers
therefore need no buffers, no flow control and no routing logic.

Neuron n of every core has its own PS network and its own spike network. A tile
thus holds 256 PS routers and 256 spike routers next to its core, and the
chip contains 256 independent PS meshes and 256 independent spike meshes.

## Design hierarchy

```
shenjing_top        ROWS x COLS mesh of tiles (default 4 x 3, 10 tiles)
 └─ tile            one core plus its routers, config memory, program counter
     ├─ cfg_mem     DEPTH entries: 1 core word + 256 PS words + 256 spike words
     ├─ neuron_core 4 x weight_sram, axon latch, accumulators
     │   └─ weight_sram  128 rows x 640 bits (128 neurons x 5-bit weights)
     └─ per neuron n (256x):
         ├─ ps_router    partial-sum adder and crossbars
         └─ spike_router sum/local mux, if_logic, 5x5 spike crossbar
             └─ if_logic integrate-and-fire
shenjing_pkg        widths, control-word formats, encoding helpers
```

## Control words

Every word is 16 bits. Bits [15:14] give the type: 00 PS router, 01 spike
router, 10 neuron core, 11 no-operation. The remaining fields are packed from
the MSB down in the order listed below, and unused low bits are zero.

| type | fields after the type |
|------|------------------------|
| PS (00) | sum_buf, add_en, consec_add, bypass, in_sel[2], out_sel[3], pad[5] |
| spike (01) | spike_en, sum_or_local, inject_en, bypass, in_sel[2], out_sel[2], pad[6] |
| core (10) | r_weight, w_weight[4], acc[4], pad[5] |

Directions are N=0, S=1, E=2, W=3. Row 0 is the north edge and column 0 is
the west edge. For the PS router, `out_sel = 4` means "eject to this neuron's
spiking logic".

Operations:

* **Core.** `LD_WT` (w_weight selects banks) loads weight rows from the
  `wt_row` bus. `ACC` (r_weight=1, acc selects banks) adds up the weights
  of the axons that spiked.
* **PS router.**
  * `SUM src,consec` adds the registered input from `src` to the local
    partial sum (consec=0) or to the running sum (consec=1).
  * `SEND from_sum,dst` puts the local partial sum or the running sum on
    `dst`.
  * `BYPASS src,dst` forwards a link straight through.
* **Spike router.**
  * `SPIKE s` integrates the local partial sum (s=0) or the weighted sum
    from the PS router (s=1), then fires.
  * `SEND dst` injects the spike produced last.
  * `BYPASS src,dst` forwards a spike.
  * Delivery to the local core is this design's extension. With
    spike_en=0, the sum_or_local bit is an *eject* flag.
    * `RECV src` (eject only) delivers the spike to the core.
    * `BYPASS` + eject delivers it and forwards it, which gives multicast
      along a chain of destinations.
  * A spike carried by neuron n's network lands on axon n of the receiving
    core. This matches the mapping rule that cores feeding the same core use
    non-overlapping neuron ranges.

`shenjing_pkg` provides encoder functions for these words: `ps_sum`,
`ps_send`, `ps_bypass`, `spk_spike`, `spk_send`, `spk_bypass`, `spk_recv`,
`core_ld_wt`, `core_acc`.

## Neuron core

The core has four banks. Each bank has 128 rows of 128 signed 5-bit weights.
Each row belongs to one axon.

| bank | axons | neurons |
|------|-------|---------|
| 0 | 0–127 | 0–127 |
| 1 | 0–127 | 128–255 |
| 2 | 128–255 | 0–127 |
| 3 | 128–255 | 128–255 |

An `ACC` walks the 128 rows of all banks in parallel, one row per cycle, and
adds a row into the bank's 128 accumulators when that axon spiked. After
that, the two accumulators that feed each neuron are added into a 13-bit
signed local partial sum.

Both `LD_WT` and `ACC` take 131 cycles:

* `busy` is high from the issue cycle for 130 further cycles.
* The local sums are valid from issue+130.
* The next core word is accepted at issue+131.
* During `LD_WT`, row r is taken from `wt_row` in cycle issue+r.

Incoming spikes, from the spike network or the `ext_valid`/`ext_spk` input
port, are ORed into an axon latch. An `ACC` snapshots the latch and clears
it, so spikes that arrive during one time step drive the next step's
accumulation.

## PS router

Each cycle, every link input is captured in an input register. The router
works as follows:

* **Operands.** `in_sel` picks OP2 from these input registers. OP1 is the
  core's local partial sum, or the router's own running sum for a
  consecutive addition. The 16-bit sum is written to the sum register, and
  addition wraps around.
* **Output crossbar.** It takes one of three sources: the raw link
  (bypass), the sum register, or the local partial sum. It writes the value
  into one of the four output link registers or onto the weighted-sum line
  to the spiking logic.
* **Idle links.** An output register that is not written in a cycle returns
  to 0.

Timing: a SEND in cycle t is on the link at t+1. The neighbour can BYPASS
it in t+1 (one hop per cycle) or SUM it in t+2.

## Spike router and integrate-and-fire

The multiplexer feeds the IF logic with either the local partial sum (for a
layer that fits in one core) or the ejected weighted sum (for a layer spread
over several cores). The IF logic works like this:

* `SPIKE` adds the input to a 20-bit saturating potential.
* If the potential is strictly above the tile threshold, the neuron fires and
  the threshold is subtracted from the potential.

The paper's sentence literally reads "the potential value is subtracted from
the threshold". This design uses the usual reset by subtraction instead.

The crossbar outputs are registers. A spike therefore moves one hop per
cycle: SPIKE at t, SEND at t+1, on the link at t+2. `fired` pulses for one
cycle after a SPIKE that fired. `clr_pot` clears all potentials, for
example between inputs.

## Tile, program counter and configuration

The configuration memory has 256 entries by default, with an asynchronous
read.

* **Program counter.** While `run` is high, the tile's counter steps through
  entries 0..last_pc and wraps. One pass is one time step of the SNN. All
  tiles run in lock-step.
* **When `run` is low.** The counter is 0 and every word is treated as a
  no-operation.
* **Configuration writes.** Host writes go through
  `cfg_we/cfg_slot/cfg_addr/cfg_mask/cfg_data`:
  * slot 0: core word of an entry
  * slot 1: PS words, written to the neurons selected by the 256-bit mask
  * slot 2: spike words, same masking
  * slot 3: tile registers (address 0 = threshold, address 1 = last_pc)
* **No reset.** The memory has no reset, so software writes every entry it
  runs. The usual way is to broadcast NOPs first.

At the top, `cfg_tile = r*COLS + c` selects the tile. `wt_row` is shared by
all tiles: a tile takes rows while it runs an `LD_WT`.

## Chip top

`shenjing_top` places a tile at each position where `TILE_EN` is 1 and links
every router to its four neighbours. The defaults are the paper's 10-core
example:

* a 4 x 3 grid
* `TILE_EN = 12'b0110_1111_1111`
* positions (2,2) and (3,2) empty

Links into an empty position carry 0. Links that leave the grid are ports
(`edge_ps_*`, `edge_spk_*`). This is where a chip-to-chip link would attach
in a multi-chip system. The paper's full die estimate of 784 tiles
corresponds to `ROWS = COLS = 28`.

## Timing of one MNIST time step (as run in `tb_shenjing_top`)

The 784-512-10 perceptron is mapped onto the 10 tiles like this:

* Row r takes 196 input pixels.
* Column 0 holds hidden neurons 0–255 and column 1 holds 256–511.
* Column 2's two tiles hold the output layer.

The program has 145 entries:

* **Entry 0.** ACC in all tiles.
* **Entries 131–138.** Reduce the partial sums of each column to row 0:
  * row 3 SUM into row 2, and row 1 SEND;
  * row 2 SEND north through a BYPASS in row 1;
  * row 0 does a consecutive SUM;
  * row 0 then ejects to spiking and fires.
* **Entries 139–144.** Send the hidden spikes to column 2 via a BYPASS.

This is within the paper's figure of about 150 cycles per time step (120 kHz
at 40 frames/s and 20 time steps).

The paper's larger networks need more than the default chip offers:

| network | cores | cycles per time step |
|---------|-------|----------------------|
| MNIST CNN | 705 | 345 |
| CIFAR-10 CNN | 2977, on 4 chips | 521 |
| CIFAR-10 ResNet | 5863, on 8 chips | 1179 |

The cycle figures follow from the stated clock rates, frame rates and time
steps. The default grid and the default configuration depth of 256 therefore
hold only the MNIST perceptron. `ROWS`, `COLS` and `DEPTH` are parameters.
The multi-chip networks also need the inter-chip link, which is not built.

## Departures from the paper and own choices

* Signed weights. Bank-to-axon/neuron assignment. Bit positions of the
  control fields. Port codes.
* Eject flag for delivering spikes to the local core (RECV, multicast).
* Only output registers in the spike router, not the input registers the
  figure also draws.
* Reset by subtraction. 20-bit saturating potential. Strict ">" comparison.
* Configuration memory depth (256), layout and masked write port. Program
  counter with `last_pc`. Threshold register per tile.
* Axon latch and external spike input. Broadcast weight-row bus.

Not built:

* the inter-chip serial link, which the paper only assumes for power figures;
* the "pooling registers" the paper names inside the spiking logic without
  describing them;
* the mapping and scheduling software.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block
against a reference model and prints
`TB_RESULT checks=N failures=M`:

* **tb_weight_sram:** writes and reads back rows.
* **tb_if_logic:** runs random integrate/fire/clear sequences.
* **tb_ps_router:** covers SUM, SEND, BYPASS, consecutive sums and
  ejection.
* **tb_spike_router:** covers SPIKE from both sources, SEND, BYPASS,
  RECV and multicast.
* **tb_cfg_mem:** checks masked writes.
* **tb_neuron_core:** runs LD_WT and ACC with random weights and spikes,
  and checks the 131-cycle timing and the axon latch.
* **tb_tile:** runs a full-size tile.
* **tb_shenjing_top:** runs the full default chip on the MNIST perceptron
  with random weights. It counts every mechanism: LD_WT, ACC, hidden and
  output fires, local-sum fires, multicast ejections, edge output and
  received spikes.

Simulation with Verilator, for example:

```
verilator --binary -j 8 --timing --assert -Irtl -y rtl +libext+.sv \
  rtl/shenjing_pkg.sv tb/tb_shenjing_top.sv --top-module tb_shenjing_top
./obj_dir/Vtb_shenjing_top
```
