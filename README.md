# NGPC: a neural-fields accelerator cluster in SystemVerilog

Neural graphics applications such as NeRF, neural signed distance fields,
neural volumes and gigapixel image fitting spend most of their time in two
kernels. The first is a **multi-resolution grid input encoding**: a 2-D or
3-D coordinate is looked up in L grids of growing resolution, and the
features at each cell's corners are interpolated. The second is a **small
MLP** (64 neurons wide, a few layers, no biases) that turns the
concatenated features into colour, density or distance.

This design puts both kernels in one fixed-function unit, the *neural
fields processor* (NFP). The encoded features go straight from the encoding
engines into the MLP's input memory and never go to DRAM. A *neural graphics
processing cluster* (NGPC) is a group of NFPs next to a GPU's L2 cache. The
GPU keeps the rest of the application.

The RTL is the top `ngpc` (8 NFPs by default) and everything below it. It is
written to be simulated with plain Verilator; a reference model in the
testbenches checks every result bit for bit.

## Hierarchy

```
ngpc                    N_NFP = 8 neural fields processors, shared config bus
└─ nfp                  one processor
   ├─ input_fifo        16-deep sample FIFO
   ├─ ie_engine x16     input encoding engines, one resolution level each
   │  ├─ grid_scale     scale = Nmin * b^level
   │  ├─ pos_fract      coordinate * scale -> cell + fraction
   │  ├─ grid_index     hash or dense index, mod 2^log2T
   │  ├─ interpol_weights  (bi/tri)linear corner weight
   │  └─ grid_sram      2^19 x 16-bit table (1 MB)
   └─ mlp_engine        batched, layer-at-a-time MLP
      ├─ weight_sram    8 matrices of 64x64 weights
      ├─ feature_sram x3  input memory + two hidden-layer buffers
      └─ mac_grid       64x64 MAC array
```

`nfp_pkg` holds the shared types, number formats, hash primes, register map
and configuration struct.

## How one NFP maps levels onto engines

There are 16 IE engines because the deepest encoding, a 16-level hashgrid,
needs 16 levels. Each engine holds the table of one level. Encodings with
fewer levels use the spare engines to encode more samples at once. With L
levels (1, 2, 4, 8 or 16), engine `e` serves level `e mod L` for input slot
`e / L`. So one launch encodes 1 sample for a 16-level hashgrid, 2 for an
8-level densegrid and 8 for a 2-level densegrid.

A grid-table write names a level. It is written into every engine that
serves that level under the current L, which is why L must be written before
the tables.

The gather stage pops up to 16/L samples from the FIFO. It pops fewer if a
sample carries `last`. It then starts all engines in the same cycle. When
every engine has a result, the concatenation stage writes one 64-lane vector
per sample into the MLP input memory. Level `l` feeds lanes `2l` and
`2l+1`, and the unused lanes are zero.

## Input encoding engine

For its level, the engine works in these steps:

1. `grid_scale` computes `Nmin * b^level` by repeated multiplication. This
   takes level+1 cycles, once per reconfiguration (`REG_APPLY`).
2. `pos_fract` multiplies each Q0.16 coordinate by the Q16.16 scale. The
   product splits into an integer cell and a Q0.16 fraction.
3. For each of the 2^d cell corners (d = 2 or 3):
   - `grid_index` forms the table index:
     - hashgrid: `(x0*1) ^ (x1*2654435761) ^ (x2*805459861)`
     - densegrid: `x0 + x1*R + x2*R^2`, with `R = floor(scale) + 2` vertices per axis
   - the index is masked to the table size, a power of two.
   - the table is read.
   - the corner's two int8 features are multiplied by the `interpol_weights` weight and accumulated.
4. The result is two Q8.8 features.

The engine reads one corner per cycle. An accepted input gives `out_valid`
2^d + 2 cycles later, which is 10 cycles for 3-D inputs and 6 for 2-D. The
table is 2^19 entries of two int8 features (6 fraction bits), so exactly
1 MB per engine.

## MLP engine

`mac_grid` is weight-stationary. A 64x64 weight matrix is loaded one row per
cycle, then the grid computes one whole layer for one input vector per
cycle:

- the sum of 64 Q8.8 × Q8.8 products goes into a 40-bit accumulator
- then it is shifted right by 8 and saturated to 16 bits
- hidden layers then apply ReLU
- there is no bias

`mlp_engine` runs a batch (up to 64 vectors, fewer at the end of a stream)
one layer at a time:

- layer 0 reads the input memory; later layers alternate between two hidden buffers
- each layer costs 65 cycles of weight loading plus one cycle per vector
- the first result is valid `1 + n_layers*(nb+67)` cycles after `batch_go`
- results drain one per cycle under valid/ready back-pressure

The input memory is released as soon as layer 0 has read it. The encoding
engines can then fill the next batch while the later layers still run. If
the MLP engine still owns the input memory when the engines finish, the
engines wait. This is the *IE stall* the NFP counts.

## Interface and programming

`ngpc` ports:

- `cfg_we`, `cfg_sel[N]`, `cfg_addr[31:0]`, `cfg_wdata[31:0]` — a write
  goes to every NFP whose `cfg_sel` bit is set. `cfg_busy` is high while
  grid scales are recomputed.
- per NFP: `in_valid/in_ready/in_sample` (three Q0.16 coordinates plus a
  `last` flag) and `out_valid/out_ready/out_vec/out_last` (64 Q8.8 lanes;
  output `k` of the last layer is lane `k`). Results come out in input
  order.
- `idle` — everything has drained.

Address map (`cfg_addr[31:28]` selects the region):

| region | address fields | content |
|---|---|---|
| 0 registers | `[7:0]` = 0 mode (0 dense, 1 hash), 1 levels L, 2 dims, 3 weight matrices, 4 Nmin, 5 b (Q16.16), 6 log2 T, 7 batch size, 8 apply | configuration |
| 1 weights | `[14:12]` layer, `[11:6]` output neuron, `[5:0]` input | Q8.8 weight in `wdata[15:0]` |
| 2 grid | `[23:20]` level, `[18:0]` entry | two int8 features in `wdata[15:0]` (feature 0 low) |

To program an NFP:

1. Write the registers, then `apply`, and wait for `cfg_busy` to drop.
2. Write the weights and the tables.
3. Stream samples in.

Reconfiguring only between streams (when `idle` is high) is the intended
use.

## Following the source architecture, and departing from it

These follow the architecture:

- 16 IE engines, each with the 1 MB table of one level
- the submodule split (grid_scale, pos_fract, grid_index, grid_sram, interpol_weights)
- hash or dense index with a power-of-two modulo
- linear interpolation
- several samples in parallel for encodings with fewer levels
- fusion of the IE output into the MLP input memory
- a 64x64 MAC grid computing one layer at a time
- on-chip hidden features
- MLPs without biases
- batching
- N NFPs per cluster, 8 by default (NGPC-8)

These are this design's own choices, because the architecture does not
describe them:

- all number formats
- the hash primes (the usual instant-NGP ones)
- the dense index layout, and the plain `coordinate*scale` without a half-cell offset
- one lookup per cycle in the IE engine
- weight storage and the weight-stationary schedule
- ReLU on hidden layers
- batch size 64
- FIFO depth 16
- the configuration bus and the stream handshakes

The number formats are Q0.16 coordinates, Q16.16 scale, Q1.16 weights,
int8 table features, and Q8.8 activations and MLP weights.

Known gaps against the evaluated applications:

- Each table entry holds two features. The low-resolution densegrid
  configurations use eight features per entry, so they cannot run as
  specified.
- The gigapixel-image configurations use 2^24-entry tables, which do not fit
  in a 1 MB engine.
- NeRF's colour network needs a view-direction encoding that is not
  produced on chip. Its MLP shape fits the MLP engine, but its inputs would
  have to come from elsewhere.
- The GPU, its L2 cache, the command buffer and DRAM are outside this RTL.
  Their side of the interface is the `ngpc` ports.
- The grid tables are plain arrays. A chip would use SRAM macros.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. The
testbenches share a reference model, `tb/nfp_ref_pkg.sv`, that computes the
encoding and MLP the same way as the RTL but independently of it. Each
testbench prints `TB_RESULT checks=N failures=M`, and each has a watchdog.
Latencies are checked where the design defines them: grid_scale, ie_engine,
mac_grid and mlp_engine.

`tb_ngpc` runs the whole cluster at its default size, with no parameter
overrides: 8 NFPs × 16 engines × 1 MB tables. Each NFP gets its own random
sample stream, and the test runs three phases:

- a broadcast 16-level hashgrid
- per-NFP configuration (an 8-level densegrid on four NFPs, a 2-level densegrid on the other four)
- a 2-D hashgrid

It counts, and requires, these events:

- IE stalls
- full and partial batches
- mode switches
- result back-pressure
- input back-pressure (full FIFO)
- masked configuration writes

It takes about 5 minutes, most of it compilation. `tb_nfp` does the same for
one NFP in a few seconds.

To run a testbench:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/nfp_pkg.sv \
          tb/nfp_ref_pkg.sv tb/tb_nfp.sv --top-module tb_nfp -Mdir obj && obj/Vtb_nfp
```

For a block testbench, leave out `tb/nfp_ref_pkg.sv` if the testbench does not import it. The testbenches use only two-state values and `$urandom`. They read no
files. The width warnings Verilator prints come from the reference model's
mixed-width integer arithmetic.
