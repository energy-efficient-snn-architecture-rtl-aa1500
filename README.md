# Multiport-SRAM compute-in-memory accelerator for binary spiking networks

This is register-transfer-level SystemVerilog for a spiking-neural-network (SNN)
inference accelerator. Its synaptic weights sit in SRAM arrays whose bitcells
have four extra, decoupled read ports. The design comes from the published ESAM
architecture: a 1RW+4R SRAM cell, a logic-based multiport arbiter and a
multi-input integrate-and-fire neuron. It is built here in the configuration
evaluated there: a fully connected 768:256:256:256:10 binary SNN for MNIST,
with 128 x 128 arrays and four read ports per cell.

## The idea

In a "compute in the periphery" SRAM accelerator, every input spike activates
one word line. The selected row of binary weights appears on the bit lines,
and every column's neuron adds its weight bit to its membrane potential. This
costs little hardware and skips silent inputs, so sparse spike trains are cheap.
Its weakness is that one row is read per clock, so one input spike is served
per cycle.

This design gives each bitcell P = 4 separate read word lines (RWL0-3) and read
bit lines (RBL0-3), so four rows of one array are read in the same cycle.
Three things then have to work together:

* **An arbiter** picks up to P pending spikes per cycle out of a 128-bit
  request vector and drives one word line on each port.
* **A neuron** that takes P bit lines at once. It adds only the ones that
  carry a real spike, decoding a weight bit of 1 as +1 and 0 as -1.
* **A transposed read/write port.** The cell's ordinary 6T port is turned
  90 degrees: its word line runs along a column and its bit lines along a row.
  A whole column, meaning all the incoming weights of one neuron, can then be
  read or rewritten. That is the access pattern on-chip learning needs.

## One layer: `esam_tile`

A tile computes one fully connected layer with N_IN inputs and N_OUT neurons.
A layer larger than one array is split into a grid of 128 x 128 arrays:

* The inputs form `NRG = N_IN/128` **row groups**. Each row group has its own
  P-port arbiter, so a tile serves up to `NRG * P` spikes per cycle. The
  768-input layer takes 24 per cycle.
* The neurons form `NCG = ceil(N_OUT/128)` **column groups**. The arrays of one
  row group share its word lines.
* Neuron `n` takes P bit lines from every row group, so `NRG * P` inputs in
  all. Each input has a valid flag: the flag of port k of row group g is high
  when that port granted a spike this cycle.

| layer | inputs | neurons | arrays (row x column groups) | spikes per cycle |
|------:|-------:|--------:|:-----------------------------|-----------------:|
| 1 | 768 | 256 | 6 x 2 | 24 |
| 2 | 256 | 256 | 2 x 2 | 8 |
| 3 | 256 | 256 | 2 x 2 | 8 |
| 4 | 256 | 10  | 2 x 1 (arrays 10 columns wide) | 8 |

Altogether that is 22 arrays, 330,240 synapses and 778 neurons.

### Two-stage pipeline

| stage | cycle contents |
|-------|----------------|
| 1 | The arbiters look at the request vector and grant up to P requests per row group. The grants go straight back to the requesters and clear those requests at the clock edge. The grants are also registered as word lines, together with the port-valid flags. |
| 2 | The arrays are read through the registered word lines (a combinational read). Every neuron decodes and adds its valid bit lines into Vmem. |

The clock period is set by the slower stage. The published timing budget has
the arbiter at about 1.0 ns and SRAM read plus neuron at about 1.2 ns for the
4-port cell.

### Requests, grants and the inference token (the subtle part)

Spikes travel between tiles with no addresses at all. The **request vector of
tile k+1 is the set of spike-request flip-flops `r` of tile k's neurons**.
Tile k+1's arbiters grant those bits, and each grant clears the `r` it chose.
The same holds for the first tile, whose requests are the top's input spike
register.

The published description says that tiles are cascaded directly. It does not
say how one image's spikes are kept apart from the next image's. This RTL adds
a one-bit token per tile to do that:

1. When tile k evaluates its neurons, it raises `out_evt` for one cycle. The
   new `r` values appear at the same clock edge, and the next tile sets its
   `pending` flag (`in_busy`).
2. A pending tile arbitrates until all its requests are served
   (`all_served`, the AND of the arbiters' `noR` outputs). It then sends
   **R_empty** into stage 2. In that cycle every neuron compares, fires (sets
   `r`) or stays silent, and clears Vmem. The tile then stops being pending.
3. A tile fires only if the next tile is not pending (`out_busy` low).
   Otherwise it **stalls**: Vmem is held and nothing is lost. Because of this
   rule, the `r` values of two images never mix. It also means every `r` of
   tile k has been granted before tile k evaluates again. So the "grant and
   evaluate in the same cycle" case of the neuron cannot occur inside the
   network.
4. Upstream may raise `in_evt` only while `in_busy` is low.

Latency through a tile, measured from the edge that loads its requests to the
edge at which its neurons' `r` are set:
`max over row groups of ceil(spikes_in_group / P) + 2` cycles, plus any stall
cycles. An image with no spikes takes 2 cycles. Layers overlap: while tile 2
integrates image i, tile 1 can already integrate image i+1.

## The arbiter

`arbiter_mport` chains P one-port arbiters. Port 0 sees the request vector R.
It grants one request and passes R' (R with that request removed) to port 1,
and so on down the chain. So all P one-hot grant vectors are ready in one
combinational pass. `port_valid[k]` is high when port k found a request. The
OR of all grants goes back to the requesters.

A one-port arbiter is a fixed-priority encoder. The lowest index (the "left"
end) has the highest priority. The encoder is a string of identical bit
slices (`prio_enc_cell`). Each slice receives `s[n-1]`, which is high when
something to its left was selected or the encoder is blocked. It computes:

```
g     = r & ~s[n-1]       grant this position
r'    = r &  s[n-1]       leave it for the next port
s[n]  = s[n-1] | r        block everything further right
noR   = ~s[last]          no request at all
```

A 128-slice ripple chain is too slow in the target process: more than 1.1 ns,
against under 0.8 ns for the tree form. So `arbiter_1port` is a two-level tree
of the same encoders. Eight 16-wide base encoders see R, and an 8-wide
higher-level encoder picks the leftmost base encoder that has a request. The
final grant is the base grant ANDed with the group grant. Its result is bit
for bit that of a flat 128-wide encoder, and `tb_arbiter_1port` checks this.
The base width of 16 is this design's choice.

## The neuron: `if_neuron`

* Inputs: NB bit lines with NB valid flags.
* Decode: a valid 1 counts +1, a valid 0 counts -1, and an invalid bit line
  counts 0. The values are summed into `delta`.
* Vmem: a signed register of `VMEM_W` bits (12 by default) that takes
  `Vmem + delta` every cycle.
* Threshold: a signed register of `VTH_W` bits (12 by default), written with
  `vth_we`.
* Evaluation: on `r_empty`, the comparator looks at the adder output
  `Vmem + delta` rather than the register. This lets the last cycle's spikes
  count. The spike request `r` takes the result of `Vmem + delta >= Vth`, and
  Vmem is cleared, whether the neuron fired or not.
* A grant `g` clears `r`. If `r_empty` and `g` come in the same cycle,
  `r_empty` wins.

The network computes a binary network with sign activation and per-neuron
biases. The bias becomes the threshold: a neuron fires when the +/-1-weighted
count of its spiking inputs reaches Vth. Twelve bits hold the largest sum,
+/-768, with no overflow. Vmem wraps rather than saturating.

## Synapse array and transposed port

`tsram_array` is the logic equivalent of a 128 x 128 array of 1RW+4R cells:

* **Inference ports.** `rwl[k]` is port k's one-hot (or all-zero) word-line
  vector. `rbl[k]` returns the selected row, or zero if no line is high. The
  read is combinational. An assertion checks that no port raises two word
  lines.
* **Transposed port.** `t_col` picks a column. The column's 128 cells reach
  32 sense amplifiers through a 4:1 row mux, and `t_sel` picks the mux phase:
  phase s reaches rows s, s+4, s+8, and so on. Reads are combinational. A
  write (`t_we`) takes effect at the clock edge.
* Cell contents are not reset. Weights must be written before use.

`tport_ctrl` turns the port into column commands. It accepts "read column c"
or "write column c with these N_IN bits", runs the four mux phases in four
consecutive cycles, and raises `rsp_valid` one cycle later. A column read and
a column write therefore take 4 cycles each, "2 x 4 cycles" in all. A standard
single-port array would need 2 x 128. In a tile, every row-group array of the
column is accessed at the same time, so a 768-input neuron's column also takes
4 cycles each way.

## Top level: `esam_top`

| port group | signals | use |
|------------|---------|-----|
| input | `in_valid`, `in_ready`, `in_spikes[N0]` | Loads one image's spike vector into the input spike register. `in_ready` is low while tile 1 is still busy with the previous image. |
| output | `out_valid`, `out_spikes[N4]`, `out_ack` | `out_spikes` holds the last layer's spike requests while `out_valid` is high. `out_ack` grants all of them and frees the last tile. |
| thresholds | `vth_we`, `vth_tile`, `vth_addr`, `vth_data` | Writes one neuron's threshold. |
| learning | `lrn_valid`, `lrn_ready`, `lrn_tile`, `lrn_write`, `lrn_col`, `lrn_wdata[N0]`, `lrn_rsp_valid`, `lrn_rdata[N0]` | Reads or writes the weight column of neuron `lrn_col` in tile `lrn_tile`. Tiles 2-4 use the low 256 bits. |

To use it: write every weight column, write every threshold, then stream
images. The learning rule is not part of the design. An external agent reads
a column, computes the update and writes the column back, as shown halfway
through the end-to-end testbench.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `N0..N4` (layer sizes) | 768, 256, 256, 256, 10 | evaluated network |
| `P` (read ports per cell) | 4 | 1RW+4R cell. The 1RW+1R..1RW+3R alternatives are P = 1..3. |
| `ROWS`, `COLS` | 128, 128 | largest array the write-assist limit allows |
| `MUX` | 4 | row mux of the transposed port |
| `BASE_W` | 16 | own choice (width of the arbiter tree's base encoders) |
| `MW`, `TW` (`VMEM_W`, `VTH_W`) | 12, 12 | own choice; the source names them m and t without values |

Shared defaults are in `rtl/esam_pkg.sv`. `N_IN` must be a multiple of `ROWS`,
and `ROWS` a multiple of `MUX`.

## Where this RTL departs from, or adds to, the published design

* **Inference token and stall** (`in_evt`/`in_busy`/`out_evt`/`out_busy`),
  input and output handshakes: own additions, described above.
* **Vmem reset.** The neuron diagram wires R_empty to Vmem's reset, so Vmem is
  cleared at every evaluation. The text mentions the reset only together with
  firing. The RTL follows the diagram, which also covers the text's case.
* **Priority order and mux order.** "Leftmost" is taken as index 0. The
  interleaved row-mux order is assumed.
* **Sense amplifiers, precharge voltage (500 mV), negative-bit-line write
  assist, the transistor-level cell.** These are analog. The arrays are
  flip-flops with combinational reads, so timing, energy and area figures
  cannot be reproduced from this RTL.
* **Multi-array tiles.** The arrays of one row group share their arbiter and
  word lines. This follows "each SRAM has its own 128-wide arbiter" for row
  groups; sharing across column groups is assumed. The 10-neuron output
  layer uses arrays only 10 columns wide, where a physical design would leave
  118 columns of a 128 x 128 macro unused.
* **Not included:** the learning rule (not specified), the image
  preprocessing (cropping 784 pixels to 768 and binarising), and the choice of
  class from the 10 output spikes.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|-----------|----------------|
| `tb_prio_enc_cell` | truth table of the slice |
| `tb_priority_encoder` | 16-wide encoder against a lowest-index reference, Block All, noR |
| `tb_arbiter_1port` | tree equals a flat 128-wide encoder, for all single bits and random densities |
| `tb_arbiter_mport` | four grants are the four lowest requests; k requests drain in ceil(k/4) cycles |
| `tb_tsram_array` | column writes through the mux, random 4-port row reads, column reads, rewrites |
| `tb_if_neuron` | cycle-accurate reference over 20,000 random cycles; both fire and no-fire occur |
| `tb_tport_ctrl` | column data, and exactly 4 port cycles per read and per write |
| `tb_esam_tile` | reduced tile (64 inputs, 40 neurons, 32 x 32 arrays). Outputs against reference sums; latency `max ceil(k/P) + 2 + stalls`; stalls, full-port and multi-group cycles must all occur. |
| `tb_port_configs` | one reduced layer on the same 30 images with P = 1, 2, 3, 4: identical outputs, latency `ceil(k/P) + 2`; integration takes 469, 272, 204 and 171 cycles |
| `tb_esam_top` | whole network at 64:32:32:32:10, 60 images against a layer-by-layer reference |
| `tb_esam_top_full` | the same test with every parameter at its default (768:256:256:256:10), 40 images; it simulates in about a minute |

The end-to-end tests count each mechanism and fail if any of them never
happens: input back-pressure, a tile stalled on its successor, several tiles
busy at once, all four ports granting, two row-group arbiters granting in one
cycle, an all-silent image, firing and silent output neurons, column
read-back, and a column rewritten between images. Weights, thresholds and
images are random, not a trained MNIST network, so classification accuracy
is not tested.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y tb --top-module tb_esam_top \
    tb/tb_esam_top.sv rtl/*.sv -Mdir obj && ./obj/Vtb_esam_top
```

All modules use an asynchronous active-low reset. The weight arrays are the
only state that is not reset.
