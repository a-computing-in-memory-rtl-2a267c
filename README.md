# IM-ODHD: an SRAM compute-in-memory mat for hyperdimensional outlier detection

One-class hyperdimensional (HDC) outlier detection turns every sample into a
long bipolar hypervector (HV) and learns a single "one-class" HV from the
inliers. A sample is then an outlier when its similarity to that HV is below a
threshold. The method has four steps:

- **Seed HVs.** Each feature value is quantised to one of `k` levels, and each
  level has a random seed HV.
- **Encoding.** The seed of feature `i` is rotated by `i-1` positions, and the
  rotated seeds are added.
- **Training.** The encoded inliers are added into the one-class HV.
- **Threshold and detection.** The threshold is `mean + 2 * MAD` of the training
  similarities, where MAD is the mean absolute deviation. Similarity is the dot
  product of two HVs. Fine-tuning adds any misclassified training HV back into
  the one-class HV.

Every one of these steps works on whole HVs, element by element: bitwise logic,
addition and rotation. So the data can stay in memory, and the memory can do the
arithmetic.

This RTL models the memory that does this work. It is an SRAM mat of `P x Q`
subarrays, and each subarray is a processing element (PE) of `M x N` 6T cells.
A PE computes on its own rows:

1. It opens two rows at once.
2. It combines them in its sense amplifiers.
3. It shifts the result by up to three bits.
4. It writes the result back into one of its rows.

Two mat-level registers and their buses move rows between PEs. That is what a
rotation needs once an HV is spread over several PEs. A sequencer runs that
rotation. Everything else in the flow is a sequence of mat commands from an
outside controller: loading seeds, bundling, binding, similarity, threshold
arithmetic and fine-tuning.

The default size is the large-PE configuration: 16 x 16 PEs of 1024 x 1024
cells, which is 256 Mbit.

## Files

| file | content |
|---|---|
| `rtl/imodhd_pkg.sv` | operation codes, shift mask, PE command word, permutation row set |
| `rtl/sram_array.sv` | cell array with two word line decoders (double-row sensing) |
| `rtl/csa.sv` | customized sense amplifier: READ, NOT, AND, OR, XOR, ADD with carry-in |
| `rtl/log_shifter.sv` | two-stage 0..3-bit left/right shifter |
| `rtl/write_copy_driver.sv` | selects the write driver (bus data) or the copy driver (local result) |
| `rtl/cim_pe.sv` | one PE: array, CSA, shifter, drivers |
| `rtl/mat_decoder.sv` | mat-level row and column decoder pair that selects PE A or PE B |
| `rtl/mat_bus.sv` | one N-bit mat bus, PE to register and back |
| `rtl/mat_register.sv` | register A or B |
| `rtl/cim_mat.sv` | the P x Q mat |
| `rtl/perm_seq.sv` | multi-PE rotation sequencer |
| `rtl/imodhd_top.sv` | mat, sequencer, and the arbitration between the host and the sequencer |

## How a PE computes

Each cycle a PE with `active` set runs one command (`pe_cmd_t`): an operation,
a carry-in, rows `row_x`, `row_y` and `row_w`, and a write select.

The decoders raise word lines X and Y. A bitline stays high only if every
activated cell on it holds 1. So with two rows open, the bitline `bl` carries
`X & Y`, and the complementary bitline `blb` carries `~X & ~Y`. The sense
amplifier derives everything from these two values:

| operation | rows | result |
|---|---|---|
| `CSA_READ` | X | `bl` = X |
| `CSA_NOT` | X | `blb` = ~X |
| `CSA_AND` | X, Y | `bl` |
| `CSA_OR` | X, Y | `~blb` |
| `CSA_XOR` | X, Y | `~bl & ~blb` |
| `CSA_ADD` | X, Y | X + Y + cin, one ripple carry over the N columns |

The operations map onto HDC as follows:

- **Binding** is XOR. This is the pointwise product of bipolar HVs stored as
  one bit per element, with +1 as 0 and -1 as 1.
- **Subtraction** `X - Y` takes two cycles: NOT Y with a local write, then ADD
  with `cin = 1`.
- **Division by 2^s** is a right shift.

The shifter reads a 3-bit mask. Bit 2 is the direction (1 = left) and bits 1:0
are the amount. The shift runs in two stages, by 1 and by 2, and fills with
zeros. The mask is per PE, so in one cycle some PEs can shift left while others
shift right.

The shifter output is the PE's output `dout`. At the rising edge, row `row_w`
can receive one of two values:

- `WR_COPY`: `dout` itself, written by the copy driver.
- `WR_DATA`: the value arriving on the PE's bus, written by the write driver.

Sensing is combinational, so a row can be read and overwritten in the same
cycle. Multi-step shifts depend on this. Column `N-1` is the leftmost,
most significant bit.

## Mat-level movement

Two decoder pairs take a PE address each. The upper `log2 P` bits choose the
row of the PE grid, and the lower `log2 Q` bits choose the column. The address
equals the PE index `p*Q + q`.

When a bus is in use, its pair selects one PE, PE A or PE B. Each bus can do
one of three things in a cycle:

- `BUS_PE_TO_REG`: the selected PE's output goes into the register.
- `BUS_REG_TO_PE`: the register value goes to the selected PE's write driver.
- `BUS_HOST_TO_REG`: the register loads data from the `host_data_*` ports.

Both buses work in the same cycle. An assertion checks that each bus selects
at most one PE.

The mat receives two PE commands per cycle, `cmd0` and `cmd1`, plus a role per
PE: idle, cmd0 or cmd1. Two groups of PEs can therefore do different things at
once. For example, the source PEs of a rotation can mask and shift left while
the destination PEs mask and shift right. Each PE also gets its own shift mask,
which together form a 3 x P x Q-bit bus.

A PE A or PE B takes part in the bus move only if its role is not idle. So a
host write into a PE needs two things at once: `bus_op = BUS_REG_TO_PE`, and a
role whose command says `WR_DATA`.

## Rotating a hypervector across PEs (`perm_seq`)

A D-bit HV sits in row `i` of `L` consecutive PEs, and the first PE holds the
most significant `N` bits. Rotating it right by `m` (`0 <= m < N`) means two
things for every PE:

- it keeps its own bits, shifted right by `m`;
- it takes the low `m` bits of the PE before it, cyclically, as its new top
  bits.

Those `m` bits have to cross between PEs, so they pass through registers A and
B. The PEs of the group alternate as destinations and sources, and the rotation
takes two rounds. In round 1 the even offsets are the destinations; round 2
swaps the roles. Each round runs five steps:

1. **SHIFT0.** All PEs act in one cycle:
   - Sources compute `row_i AND mask_lo` (1s in the low `m` bits) and start a
     left shift.
   - Destinations compute `row_i AND mask_hi` and start a right shift.
   - Both write into spare row 1.
2. **SHIFT.** Each further cycle shifts spare row 1 by up to 3 bits and writes
   it back. This repeats until the sources have moved `N-m` bits and the
   destinations `m` bits. PEs that are done stay idle.
3. **UP.** Two sources put spare row 1 into registers A and B.
4. **DOWN.** The two registers are written into spare row 2 of the destination
   that follows each source. UP and DOWN repeat until every source has been
   handled.
5. **OR.** The destinations OR spare rows 1 and 2 into spare row 3 (row `j`).

After round 2, row `j` of every PE holds its rotated slice. With `copy_out` set,
one more cycle copies row `j` into `row_out` of every PE. Row `i` is never
changed.

Example, with four PEs of four bits and a rotation by 2: `ABCD EFGH IJKL MNOP`
becomes `OPAB CDEF GHIJ KLMN`. In round 1, the source `MNOP` sends `OP00` through
a register into the destination `ABCD`. That destination has shifted its own
bits to `00AB`, and the OR of the two gives `OPAB`.

The mask rows hold 1s in the low `m` bits (`mask_lo`) and in the high `N-m`
bits (`mask_hi`). The controller must write them before it starts the
sequencer.

A run takes this many cycles from `start` to `done`:

    2 * (S + 2*ceil(L/4) + 1) + copy_out + 1,   S = max(ceil((N-m)/3), ceil(m/3), 1)

At the default N = 1024 with m = 5 and L = 4 that is 688 cycles. Almost all of
them are the 3-bit steps of the long left shift in the source PEs.

The configuration the sequencer needs:

- `cfg_base`: the first PE of the group.
- `cfg_len`: `L`, which must be even and at least 2.
- `cfg_shift`: `m`.
- `cfg_rows`: the rows `i`, `mask_lo`, `mask_hi`, spare 1, spare 2, spare 3 and
  the output row, plus `copy_out`.

While the sequencer is busy, `imodhd_top` ignores every host input to the mat,
register loads included.

## Similarity and threshold as mat programs

Detection needs the dot product of a query HV with the one-class HV, and a
comparison with the threshold. With one bit per bipolar element, binding is
XOR and the dot product is `D - 2 * popcount`, so the whole job is a
pop-count. The mat has no pop-count unit; a controller builds it from the
operations above. The pop-count takes three stages:

1. **Inside every PE, in parallel.** For `s = 1, 2, 4, ... N/2`, compute
   `(x & mask_s) + ((x >> s) & mask_s)`. The mask rows hold the usual
   alternating patterns: `0x5555...`, `0x3333...`, `0x0f0f...` and so on.
   Each stage is four commands, an AND, a shift, an AND and an ADD. A shift
   above 3 adds one command per further 3 bits. A field never overflows into
   its neighbour, so the row-wide carry chain gives the right sums.
2. **Across PEs.** The partial count of each PE is read into a register and
   written into a spare row of one PE, which adds them up.
3. **Threshold.** `threshold - count` is NOT, local write, then ADD with
   carry-in 1. Its sign bit is the decision.

`imodhd_detect_tb` runs exactly this sequence.

## What follows the paper and what is this design's own

These parts follow the paper:

- the mat structure and its sizes;
- the two word line decoders and double-row sensing;
- the sense amplifier's operation set;
- subtraction by NOT, then ADD with a carry-in of 1;
- the 3-bit shift mask with 0..3-bit two-way shifts, and multi-step shifts for
  larger amounts;
- the copy and write drivers;
- the row/column split of the PE address;
- two N-bit buses with registers A and B, one selected PE per bus, and a
  per-PE shift-mask bus;
- the two-round rotation with masks, spare rows and both registers.

These are choices made here:

- A clock and one command per cycle. The paper gives only nanosecond latencies
  per operation.
- All command encodings, the bit order of the shift mask, and the `cmd0`/`cmd1`
  role scheme that lets sources and destinations work in parallel.
- A separate write row address, where the paper does not say which decoder
  drives the write word line.
- Binding as XOR of one-bit elements. The paper describes binding as the
  pointwise product of bipolar HVs and names no gate for it; XOR is that
  product when +1 is stored as 0 and -1 as 1.
- A single carry chain across the whole row for ADD. The paper does not say
  how multi-bit HV elements are packed inside a row, so element-wise bundling
  of counters is left to the data layout the controller chooses.
- The direction of a rotation: destination `d` receives from `d-1`, as in the
  paper's worked example. Round 1 has even-offset destinations, and L must be
  even.
- Spare row 1 serves as the scratch row of the long left shift, and the final
  copy goes into a row of the same PE. The paper copies into a "bundle
  segment" whose place it does not give.
- The host ports, the register load from outside, a synchronous reset of the
  registers, and blocking the host while the sequencer runs.

The following are not built:

- Seed HV generation. The paper does this outside the mat.
- The controller that sequences encoding, bundling, training, the
  `mean + 2 * MAD` threshold, fine-tuning and detection. The paper maps these
  steps onto the mat operations above, but it describes no controller,
  instruction format or data layout for them.
- The pop-count that turns a bound HV into a similarity value. The paper
  builds it over many cycles from in-memory additions and shifts of partial
  sums, but gives no schedule. No unit is built for it; the section on
  similarity above gives one command sequence a controller can use. The same
  holds for the comparison with the threshold and for the absolute value in
  MAD.
- Electrical behaviour: lowered word-line voltage, sense margins, energy and
  timing in nanoseconds.

## Capacity

At the defaults the mat holds 256 x 1024 x 1024 bits. At `D = 10,000` an HV
needs 10 PEs of 1024 columns (10,240 bits, an even group), so 25 groups of 1024
rows give 25,600 HV rows. A rotation by up to `N-1 = 1023` positions is
supported, which covers encodings of up to 1024 features.

Seeds, one-class HV, masks and spare rows use fewer than 100 of those rows.
Storing the encoded training set at once is another matter: it depends on how
many bits an encoded element takes. With `ceil(log2(features+1))` bit-planes per
HV, the inlier sets below fit or do not fit as shown. Sizes are from the public
ODDS data sets.

| data set | features | inliers | rows needed | fits |
|---|---|---|---|---|
| WBC | 30 | 357 | 1,785 | yes |
| Lymphography | 18 | 142 | 710 | yes |
| Cardiotocography | 21 | 1,655 | 8,275 | yes |
| Satimage-2 | 36 | 5,732 | 34,392 | no, process in batches |
| MNIST | 100 | 6,903 | 48,321 | no, process in batches |
| Mammography | 6 | 10,923 | 32,769 | no, process in batches |

The medium and small PE configurations are reached by parameters alone:
`P = Q = 32, M = N = 512` or `P = Q = 64, M = N = 256`. The command word
carries 10-bit row addresses, enough for up to 1024 rows.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
design with a model written independently in the testbench and ends with a
`TB_RESULT checks=... failures=...` line.

| testbench | what it checks |
|---|---|
| `sram_array_tb` | single and double sensing, idle bitlines, read during write |
| `csa_tb` | every operation against SV operators, including 65-bit sums and subtraction |
| `log_shifter_tb` | both directions and all amounts |
| `write_copy_driver_tb` | write enable and data for every select |
| `cim_pe_tb` | 600 random commands against a PE model, then full read-back |
| `mat_decoder_tb` | every address at 16 x 16, enable off |
| `mat_bus_tb` | gather and reverse path for every selection |
| `mat_register_tb` | reset, both loads, hold |
| `cim_mat_tb` | dual-bus loads, two command groups in one cycle, dual-bus read-back |
| `perm_seq_tb` | sequencer plus a small mat (2 x 4 PEs of 8 x 8): every rotation 0..7 for groups of 2, 4, 6 and 8 PEs at several bases, the result rows, row `i` unchanged, and the exact cycle count (first case: the 4-PE, shift-by-2 layout of the example above) |
| `imodhd_top_tb` | reduced mat (2 x 4 PEs of 16 x 16, 64-bit HVs over 4 PEs): seeds loaded, two samples encoded as `rho^0(s1) + rho^k(s2)` (k = 1 and 5), binding, subtraction, division, two command groups, a host write blocked during a rotation; it counts each mechanism and fails if one never happened |
| `imodhd_detect_tb` | the detection step on the reduced mat, with the testbench as controller: 13 queries (inlier-like, random, one exactly at the threshold) bound with the one-class HV, in-memory pop-count per PE, counts gathered into one PE, threshold compare; per-PE counts, total and decision checked against `$countones` |
| `imodhd_top_full_tb` | default parameters (16 x 16 PEs of 1024 x 1024): a 4096-bit HV rotated by 5 in 688 cycles, checked bit for bit, then a bundling add |

To run one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/imodhd_pkg.sv \
              tb/perm_seq_tb.sv --top-module perm_seq_tb -Mdir obj_perm
    obj_perm/Vperm_seq_tb

`-y rtl` lets Verilator find each module in the file of the same name; the
package is named first because modules import it. The full-size testbench
takes about four minutes to compile and a few seconds to run.

Open points a user should know about:

- **Carry chain.** The ADD carry runs over all `N` columns, so bundling
  multi-bit counters in a row needs a layout that keeps carries inside
  elements, such as bit-planes with one PE command per plane.
- **Cycle count.** The rotation's cycle count comes from this design's
  one-operation-per-cycle choice. It is not a figure from the paper, whose
  latencies are in nanoseconds.
