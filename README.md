# A signed bit-slice DNN accelerator in SystemVerilog

Dense DNN layers have few zero values. If every value is cut into short
**signed** bit-slices, though, many slices are zero, and this holds even when
the whole value is not. The accelerator described here works on that idea. All
arithmetic is done with 4-bit × 4-bit signed multipliers. A 4-, 7-, 10- or
13-bit value is one, two, three or four slices. Zero slices are compressed out
of memory and skipped in the multipliers, so the saving comes from slice-level
sparsity rather than value-level sparsity. Partial sums of different slice
orders are then combined with shifts on a small partial-sum network.

The RTL covers the whole accelerator apart from the host processor, DMA and
external memory:

- two data-management (DMU) cores;
- four matrix-processing (MPU) cores, each with 1536 MACs;
- the mesh network between the cores;
- the instruction decoders.

Parameter defaults are the published sizes.

## 1. Signed bit-slice representation (SBR)

A value of `3n+1` bits is split into one signed top slice of 4 bits and
`n-1` lower slices of 3 bits. Each lower slice is stored as a signed 4-bit
number, so all slices share the same 4-bit signed multiplier.

- A non-negative value is cut directly: the top slice is the upper 4 bits
  and each lower slice is 0..7.
- For a negative value, a plain cut leaves the lower slices non-zero far too
  often (−1 would be `1111 111`). The encoder therefore borrows from each
  slice into the one below it:
  - the LSB slice gets `-8` (`+1000`);
  - each middle slice gets `+1-8` (`+1001`);
  - the top slice gets `+1` (`+0001`).

  With these corrections the slices still sum to the value
  (`Σ sᵢ·8ⁱ = x`). Small negative numbers now have zero upper slices, just
  like small positive ones. Example: −25 as a 7-bit value becomes top `1101`
  (−3) and low `1111` (−1): −3·8 − 1 = −25.

The unit takes four spatially adjacent values at once. Slice order `o` of the
four values forms one 16-bit **sub-word**, and sub-words are the unit of
storage, compression and skipping everywhere in the design.
(`rtl/sbr_unit.sv`)

## 2. Coarse run-length coding and the zero-skipping lane

Each stream holds one slice order over the input channels of a tile. In that
stream, an all-zero sub-word is dropped. Each stored sub-word carries a 4-bit
index that counts the zero sub-words dropped just before it. An entry is
forced in two cases, so a lane always knows where a tile ends:

- after 15 zeros in a row;
- at the last channel of a tile.

A binary map, one bit per tile, can mark tiles whose outputs are predicted
not to survive max-pooling. Only the forced last entry of such a tile is
stored, as zero, so the tile costs one cycle. (`rtl/rle_unit.sv`)

A **PE lane** (`rtl/pe_lane.sv`) works through the compressed stream of its
input channels. Each cycle it does the following:

1. It reads one sub-word from the IBUF and its index from the IDXBUF.
2. The zero-skipping unit computes the weight address
   `next = previous + 1 + index`; at the start of a tile it is just `index`.
3. The WBUF word at that address holds four 4-bit weight slices, one per
   output channel. It is applied to four MAC arrays of four signed MACs each,
   which all share the sub-word.

One stored sub-word therefore costs one cycle and does 16 MACs, and a
skipped sub-word costs nothing. The MACs accumulate in 12 bits. A tile takes
(stored entries + 3) cycles, and the read pointer runs straight on into the
next tile.

Buffer sizes per lane:

| Buffer | Size | Organisation |
|---|---|---|
| IBUF | 0.5 KB | 256 × 16 b |
| IDXBUF | 64 B | 128 × 4 b, so with skipping on only IBUF entries 0..127 are used |
| WBUF | 64 B | 32 × 16 b, up to 32 input channels per tile |

For weight skipping the roles swap. Weights are encoded as the stream in the
IBUF, with four output channels per sub-word, and inputs go into the WBUF.
The accumulation unit then transposes the 4×4 result back.

## 3. PE column, accumulation and the Uni-NoC

Hierarchy:

- A **PE** has 4 lanes.
- A **PE column** has 2 PEs (8 lanes) and an accumulation unit.
- A **PE array** has 4 columns and an activation / batch-norm unit.
- An **MPU core** has 3 arrays.

The accumulation unit (`rtl/accum_unit.sv`) works as follows:

- It latches each lane's 16 accumulators as that lane finishes. Lanes then
  go on to the next tile independently.
- A lane whose previous result is still latched stalls. This is the only
  stall in the datapath, and `stall` flags make it visible.
- When all 8 lanes have delivered, an adder tree sums them (transposing if
  weight skipping is on) into the OBUF, a ring of 48 tile results.
- From the OBUF the tile goes into the column's **Uni-NoC** stage, which
  adds the partial sum arriving from the previous column. It then either
  shifts the total right by 3 (`shift_en`, the next slice order is 8× more
  significant) or saturates it to 16 bits.
- `first` makes a column ignore upstream, and `bypass` idles a column.

For 7-bit × 7-bit data the four columns of one array compute the four slice
products in this order:

| Column | Product | Stage after the column |
|---|---|---|
| 0 | I_low × W_low | shift |
| 1 | I_low × W_high | — |
| 2 | I_high × W_low | shift |
| 3 | I_high × W_high | — |

The result is `floor(Σ x·w / 64)`, i.e. the convolution scaled by 2⁻⁶.
Higher precisions continue the chain from array to array inside the MPU
core (`chain`). After the last column, `act_bn_unit` applies
`((x·scale) >>> 8) + bias` with a Q8.8 scale, then ReLU or leaky ReLU
(slope 1/8).

## 4. DMU cores and the Bi-NoC

A DMU core (`rtl/dmu_core.sv`) owns 64 KB of global memory: four banks of
4096 × 32 b, one bank per slice order. It has three jobs:

- **Encoding.** Raw flits of four values pass through the SBR unit and one
  RLE unit per slice order. Each surviving `{index, sub-word}` entry is
  appended to the bank of its order.
- **Sparsity monitoring.** The dynamic sparsity monitor (`rtl/dsm_unit.sv`)
  counts zero sub-words per order, separately for inputs and weights. It
  reports three things:
  - whether an order is worth compressing, set above 20 % zeros (the
    threshold is this design's choice);
  - which operand is sparser and so should be the skipped one;
  - which slice pairs are dense.

  In automatic mode the compression decision is applied directly.
- **Sending and receiving.** A RUN streams memory words as buffer-write
  flits to an MPU core. Each flit carries a multicast mask, one field each
  for PE arrays, columns, PEs and lanes. The MPU's NoC switch writes the
  word into every lane in the cross product of those fields, in one cycle.
  Result flits coming back from the MPUs are stored from a base address.
  Words sent to the control unit carry the whole 32-bit memory word, which
  is how results are read back.

Network layout:

- The six cores sit on a 2 × 3 mesh of 5-port routers
  (`rtl/binoc_router.sv`).
- Routing is X first, then Y.
- Each input has a 2-flit FIFO, and each output has a round-robin arbiter.
- Flits are single-beat.
- The control unit is reached through the north port of router (0,0) and
  has coordinate y = 3.

## 5. Instructions

An instruction is 27 bits: address[6:0], opcode[3:0] and operand[15:0].

- Address bits [6:3] select the core: 0 and 1 are the DMUs, 2..5 the MPUs.
- Address bits [2:0] are passed on as a sub-address, for example a PE array
  or a slice order.
- The top decoder (`rtl/top_inst_decoder.sv`) holds an instruction while its
  core is busy, so a whole layer program can be streamed without polling.
- Address `7'h7F` re-issues the last RUN, which processes the next group of
  tiles with the configuration left in place.

Opcodes and operand layouts are listed in `rtl/sba_pkg.sv`. An MPU RUN's
operand selects which PE arrays start.

## 6. Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against values computed independently in the testbench, from the
arithmetic definition, using `tb/tb_model_pkg.sv`.

The end-to-end test `tb/tb_sba_top.sv` runs the top at its default sizes:

- Inputs are 32 channels of 7-bit values over 6 tiles, and there are 4
  output channels of 7-bit weights.
- Inputs go to DMU 0 with RLE and weights go to DMU 1. The program reads the
  encoded counts and multicasts each slice order to the right columns of
  MPU 0.
- The test runs 3 tiles, re-issues the run for the next 3, and reads all
  results back through the network.
- Tile 4 is masked by the binary map.
- Every output must equal `floor(Σ x·w / 64)`, and masked outputs must be 0.
- The test fails if any of these mechanisms never happens: multicast writes,
  skipped zero sub-words, lane stalls, re-issued runs, masked outputs,
  sparsity-monitor decisions.

Simulate with plain Verilator, for example:

    verilator --binary --timing -j 0 -Wno-fatal --top-module tb_sba_top \
      -y rtl -y tb rtl/sba_pkg.sv tb/tb_model_pkg.sv tb/tb_sba_top.sv -o sim
    obj_dir/sim

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## 7. Departures from the published design, and limits

- **Uni-NoC direction.** The text says the Uni-NoC passes data from right to
  left. The block diagram's labels read "data from PE column 0" and "to PE
  column 2". The chain here runs from column 0 to column 3, as the labels
  show. The result is the same up to naming of the columns.
- **Own choices where the source is silent.** All widths and encodings not
  given in the source are this design's own:
  - the OBUF organisation, the 16-bit saturated partial sums and the floor
    rounding of the shift;
  - the router, its FIFOs and its arbitration;
  - the flit and mask formats;
  - the opcode numbers and the re-issue address;
  - the DSM threshold and the act/BN arithmetic.
- **What was simulated.** Only the 7-bit × 7-bit mapping was checked end to
  end.
  - The chain across arrays used for 10- and 13-bit data is built and was
    exercised at column level, but not simulated as a whole layer.
  - 13 × 13-bit needs 16 slice products, more than the 12 columns of one
    MPU core, so it takes two passes.
- **Testbench coverage.** The NoC switch, the MPU and DMU cores and the
  three decoders are tested through the end-to-end bench rather than on
  their own.
- **Not included.** The control processor, the DMA, the external-memory
  interface and the off-chip DRAM. The top's instruction port and its
  control-unit network link are where they would attach.
- **Memories.** All SRAMs are generic register arrays (`rtl/sram_1r1w.sv`).
