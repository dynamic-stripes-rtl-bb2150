# Dynamic Stripes: bit-serial inference with precision detected at runtime

Bit-serial neural-network accelerators multiply a weight by an activation one
activation bit per cycle, so a product costs as many cycles as the activation
has bits. The earlier Stripes design used a precision fixed per layer, found
offline by profiling: every activation of a layer paid for the worst case of
that layer. Dynamic Stripes looks at the activations themselves just before
they are sent. For each small group it finds the highest bit position that
holds a 1 anywhere in the group (nH) and the lowest (nL), and sends only bit
positions nH down to nL. A group whose values happen to be small, or all
multiples of a power of two, finishes in fewer cycles. The published cycle
level estimate puts the gain at about 1.41x over per-layer precision across
six image-classification CNNs (1.27x to 1.62x per network).

This repository holds synthesizable SystemVerilog for the whole compute path:
the precision detectors, the dispatcher that broadcasts bits with their
positions, the modified serial inner-product unit (SIP), the 16 x 16 SIP tile
and a top level of 16 tiles. The memories that feed it (activations, weights,
output sums) are not part of the RTL; their data are top-level ports.

## Organisation

```
                      in_act (256 x 16 b), valid/ready
                                  |
                           +-------------+
                           | dispatcher  |  16 x precision_detector
                           |             |  16 x offset_counter
                           +-------------+
      subgroup 0: 16 bits + offset(4) + EOG(1)  ...  subgroup 15: same
                                  |  (same broadcast to every tile)
            +---------------------+---------------------+
         tile 0                 tile 1      ...       tile 15
   16 x 16 SIPs, column c <- subgroup c, row r <- weights of filter r
```

* 256 activations are processed together, split into 16 **subgroups** of 16.
  Subgroup c goes to SIP column c of every tile, so the 16 columns of a tile
  work on 16 different sets of activations (for instance 16 convolution
  windows).
* Each tile holds 16 filters x 16 weights. Row r of a tile uses filter r's
  16 weights, shared by all 16 columns.
* Per subgroup the dispatcher sends 16 activation bits plus five extra
  wires: a 4-bit offset (the bit position of the bits now on the wires) and an
  End-of-Group (EOG) flag on the last position.
* A tile therefore produces 16 x 16 sums, the chip 4096.

Default sizes, all parameters of `dynamic_stripes` (`rtl/ds_pkg.sv`):

| parameter | default | meaning |
|---|---|---|
| `TILES` | 16 | tiles |
| `ROWS` | 16 | SIP rows per tile = filters per tile |
| `COLS` | 16 | SIP columns per tile = subgroups |
| `LANES` | 16 | activations per subgroup = weights per SIP |
| `BITS` | 16 | activation width |
| `WBITS` | 16 | weight width |
| `ACC_W` | 40 | accumulator width (own choice) |
| `PREC_W` | 4 | width of the output shift `prec` (own choice) |

## Finding the precision of a group (`precision_detector`)

For a subgroup of N activations, ORj is the OR of bit j over all N values,
built as a chain of two-input ORs per bit position. nH is the position of the
leading 1 of the ORj vector, nL the position of its trailing 1:

* `leading_one_detector` keeps bit j of its input when no higher bit is set,
  giving a one-hot vector;
* `trailing_one_detector` is the same block with its input and output
  bit-reversed, i.e. with the priority turned around;
* two `offset_encoder`s (one-hot to binary) produce 4-bit nH and nL.

Example with four 8-bit activations 0x30, 0x14, 0x22, 0x08: OR = 0x3E, so
nH = 5 and nL = 1, and the group needs 5 cycles instead of 8.

Activations are taken to be non-negative (post-ReLU), so a leading-one search
is meaningful. A subgroup that is all zero gets nH = nL = 0 and costs one
cycle; this is a choice of this implementation.

## Per-layer window, then runtime detection

Runtime detection is layered on top of the per-layer precision, not in place
of it. Software sets, per layer, a window `[layer_nl, layer_nh]` of bit
positions (the profiled precision). The dispatcher clears every activation
bit outside that window before detection. So the range actually sent, nH..nL
per subgroup, always lies inside the layer's window and is often narrower.
Clearing the bits above `layer_nh`, rather than saturating the value, is a
choice of this implementation: a correctly profiled layer never has such
bits.

## Broadcasting (`dispatcher`, `offset_counter`)

When a group is accepted (`in_valid && in_ready`) the dispatcher stores the
256 activations and starts one `offset_counter` per subgroup at that
subgroup's nH. In each following cycle every subgroup puts on its wires the
bit of its 16 activations at its current offset; the counter then moves one
position down. The comparator raises EOG when the offset equals nL. After
its EOG a subgroup sends zeros.

All subgroups of a group must finish before the next group starts, so a
group lasts `max over subgroups (nH - nL + 1)` cycles. The next group is
accepted in the final cycle of the current one, so back-to-back groups leave
no idle cycle. Keeping the subgroups in step this way means the tiles can
keep using one set of weights per group; letting subgroups run ahead would
need per-subgroup weight reads.

Interface details chosen here: the input handshake is valid/ready (the
source must hold data while `in_ready` is low); `in_first` marks a group that
starts new output sums and `in_last` the group that completes them.
`bc_valid`, `bc_load` (first cycle of an `in_first` group) and `bc_last`
(final cycle of an `in_last` group) go to the tiles.

## The modified SIP (`sip`)

One SIP computes a 16-term inner product bit-serially:

```
term_i  = n_bit_i ? w_i : 0           (AND gate; negated when sign_bit = 1)
tree    = sum of the 16 terms         (adder tree)
A      <= (load ? i_nbout : A) + (tree << sB)
out     = (pool ? max(A, i_nbout) : A) << prec
```

The point of the modification is the shifter after the adder tree. sB is
the offset broadcast with the bits, so each partial sum is added at its true
bit weight. Since nothing assumes the bits arrive in a fixed window, any range
nH..nL works, and consecutive groups with different ranges add into the same
accumulator. Over a group, A gains exactly `sum_i w_i * a_i`.

Where this RTL differs from the usual drawing of the unit:

* The drawing keeps a `<<1` on the accumulator feedback, left from plain
  MSB-first (Horner) accumulation. With the sB shifter in use that shift would
  count earlier bits twice, so the feedback here is unshifted.
* The drawing drives the negation gates and the feedback mux from one "MSB"
  wire. Here they are separate inputs, `sign_bit` and `load`, because the
  first bit sent is now nH and not the sign bit. At the top level `sign_bit`
  is held at 0 because activations are non-negative.
* `i_nbout` is a partial sum read back from the output buffer; `load` starts a
  new sum from it. The max unit and `prec` shift give max pooling and the
  final fixed-point alignment.

## Tiles (`tile`)

A tile is a 16 x 16 array of SIPs plus a weight register that captures the
group's 16 x 16 weights when the dispatcher accepts the group, so the weight
source can move on while the tile works. Each column uses its subgroup's EOG:
once a column has seen its EOG, its SIPs stop accumulating until the next
group starts. The dispatcher already sends zeros there, so this is a second
guard and saves switching.

## Top level (`dynamic_stripes`) and timing

Ports: `in_valid/in_ready`, `in_act[COLS][LANES]`, `in_first`, `in_last`,
`layer_nh`, `layer_nl` (4 bits each, held for a layer),
`wt_in[TILES][ROWS][LANES]`, `i_nbout[TILES][ROWS][COLS]`, `pool`, `prec`,
and outputs `o_nbout`, `out` (same shape as `i_nbout`) and `out_valid`.

* Group accepted at clock edge E: broadcast cycles E+1 .. E+S with
  S = max(nH - nL + 1) over the subgroups.
* In the first broadcast cycle of an `in_first` group, each SIP loads the
  `i_nbout` value present in that cycle.
* `out_valid` is high in the cycle after the final broadcast cycle of an
  `in_last` group. `o_nbout` then holds the finished sums; `out` is
  combinational from them, `i_nbout`, `pool` and `prec`.

Reset is asynchronous and active low throughout.

## What is not in the RTL

* The activation memory, the synapse (weight) buffer and the output buffer:
  their organisation and sizes are not specified here, so their data are
  ports.
* Per-subgroup advancing, where finished subgroups fetch their next values
  without waiting for the others.
* The precision-trimming idea for the Pragmatic accelerator (keep only the n
  most significant 1-bits of each activation). It belongs to a different
  engine.
* Signed activations. `sign_bit` exists in the SIP and is tested there, but
  the dispatcher assumes non-negative values.

## Verification

Each module has a self-checking testbench in `tb/` whose reference values are
computed directly (bit scans, `sum w*a` in 64-bit arithmetic), independently
of the RTL structure:

| testbench | what it checks |
|---|---|
| `tb_leading_one_detector`, `tb_trailing_one_detector` | all 65536 inputs |
| `tb_offset_encoder` | every one-hot input, 8 and 16 positions |
| `tb_precision_detector` | the 4 x 8-bit example above, then random groups with random bit ranges, 4 x 8 and 16 x 16 |
| `tb_offset_counter` | offset sequence, EOG, nH-nL+1 cycles, back-to-back starts |
| `tb_dispatcher` | offsets/EOG each cycle, bits rebuild every (windowed) activation, group length, back-to-back acceptance, stalls, narrow layer windows |
| `tb_sip` | sums over several groups with reload, signed mode, pooling and prec |
| `tb_tile` | per-column ranges, garbage after EOG ignored, weight register |
| `tb_dynamic_stripes` | end to end at 2 tiles of 3 x 4 SIPs, 4 lanes: sums, out_valid timing, handshake; counts stalls, waiting subgroups, all-zero subgroups, back-to-back groups, reloads, pooling, prec shifts, short groups and layer-window trims |
| `tb_conv_layer` | a 6 x 6 x 8 input, 3 x 3 x 8 x 8 convolution mapped onto 2 tiles of 4 x 4 SIPs (filters on rows, output positions on columns, channels on lanes, one group per kernel position and channel block); all 128 outputs against a direct convolution; prints cycles against a fixed 16-bit schedule |
| `tb_dynamic_stripes_full` | the checks of `tb_dynamic_stripes` at the full default size (16 tiles of 16 x 16 SIPs), over 3 output sets |

Each ends by printing `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/ds_pkg.sv tb/tb_dynamic_stripes.sv \
          --top-module tb_dynamic_stripes -Mdir obj && obj/Vtb_dynamic_stripes
```

Run it the same way for any other testbench. The full-size testbench builds a
model with 4096 SIPs; expect several minutes of C++ compilation.

## How far to trust it, and changing it

* Everything above the SIP is checked against independent reference
  arithmetic, at reduced sizes with many random cases and at the full size
  over a few output sets. Timing checks cover group length, back-to-back
  acceptance and `out_valid`.
* Nothing here reproduces the published speedups. Those come from a
  cycle-level model running real networks; this RTL has no network data. The
  convolution testbench only shows the mechanism: on its synthetic
  activations the broadcast takes about 813 cycles where a fixed 16-bit
  schedule would take 1152 (the exact count depends on the random data).
* Synthesis of the full top level is large (4096 SIPs, each with a 16-input
  adder tree and a 40-bit accumulator). The blocks up to one tile synthesise
  without latches or other structural warnings.
* To change sizes, override the parameters of `dynamic_stripes`; the offset
  width follows `BITS` (`ds_pkg::off_width`). `ACC_W` should cover
  `WBITS + BITS + log2(LANES)` plus headroom for the number of groups summed
  into one output.
