# HyperSense near-sensor accelerator in SystemVerilog

HyperSense cuts the cost of high-precision sensing. A low-precision ADC streams
radar frames to this accelerator, which decides if a frame holds an object. The
expensive high-precision ADC is only run at its high frame rate while objects
are present. The decision comes from hyperdimensional computing (HDC):

1. A window of h×w pixels slides over the frame with a given stride.
2. Each window (a *fragment*) is projected into D dimensions, P = Σ I·B.
3. The projection passes through the kernel H = cos(P' + b)·sin(P'), where P' is P divided by the window's L2 norm.
4. H is compared by cosine similarity with a positive and a negative class hypervector.
5. The frame is positive when more than T_detection fragments score above T_score.

## The main idea: reusing products across neighbouring windows

The base hypervectors of one window row are built from one another by a
permutation. Here that permutation is a chunk shift: cut every base vector into
w chunks of T = ceil(D/w) elements, and chunk m of column j equals chunk m−1 of
column j−1. So each row has only 2w−1 distinct chunks (see `hs_chunk_id` in
`hs_pkg`).

A pixel at column x falls into w neighbouring windows, at a different column
of each. Each product pixel × chunk is therefore needed by several windows.
`hs_pe` arranges the array so that each product is computed once:

- The first PE of a row multiplies the pixel by its w chunks.
- Every later PE does one new multiply. It takes the other w−1 products from its left neighbour.
- Products move one PE per cycle. The pixel moves with them.
- Each PE holds w fragment slots (its Registers). Column x's products go into slot (x−j) mod w.
- A slot is complete when the last column of its window has passed. It is then emitted and reused.

The chunk is handled one lane (one element of each of the w chunks) per cycle.
A pixel therefore occupies a PE for T cycles.

## Systolic array (`hs_sa`)

`hs_sa` holds FH rows of FW PEs. The rows work in parallel on the same column
of pixels, one row of the window each.

- The sequencer streams the columns of each band of origin rows.
- Fragment origins that do not lie on the stride grid are masked by a `want` bit.
- The rows' chunk sums are added before the output is deskewed, which is the same by linearity. The deskew delays column m by W−1−m cycles.
- The output is the projection of one fragment, one lane (W words) per cycle.

`en` freezes the whole array for back-pressure.

## Frame buffer and normalisation (`hs_frame_buf`)

- Stores one frame.
- Serves a column of FH pixels to each array per cycle.
- Keeps an integral image of squared pixels, so any window's squared norm takes four lookups.

## Kernel (`hs_kernel`)

For each fragment, `hs_kernel` computes R = round(2^24·(4/π)/‖x‖) once. It then
forms an 8-bit phase, (P·R)>>24, per element and adds a per-dimension bias
phase b from a hash. The result is H = sin(phase+b+π/2)·sin(phase), using a
256-step Q1.7 sine. Padding elements (d ≥ D) are zero. The latency is 2 cycles.

## Classifier and decision

`hs_classifier` accumulates C_pos·H, C_neg·H and H·H. The class vectors are
stored pre-normalised to norm 2^10. The score s = (C_pos·H − C_neg·H)/(2^10‖H‖)
is compared with T_score (signed Q1.15) using squares, with no square root. The
verdict comes one cycle after the last word of the fragment.

`hs_detector` counts the positive fragments of a frame and declares the frame
positive when the count is greater than T_detection. `hs_sensor_ctrl` then sets
the high-precision ADC to its high or low frame rate and issues its triggers.

## Top (`hs_top`)

The fragment origins are split into NSX×NSY regions, one per systolic array.
The arrays share the frame buffer.

- Each array writes into its own buffer (`hs_fifo`). The array stalls when its buffer is full.
- A round-robin arbiter moves whole fragments from the buffers to the single kernel and classifier.

Ports:

- `lp_*`: pixels in.
- `cfg_*`: seed, stride, thresholds.
- `cw_*`: class vector load.
- `frag_*`: per-fragment verdicts.
- `frame_*`: per-frame decision.
- `hp_*`: ADC rate and trigger.

## Departures from the published design and limits

- **Window size.** The default window is 32×32, where the published configuration is 96×96; D = 5000 as published. The array is FH·FW PEs, each with T·FW accumulators. That makes the elaborated design grow roughly with the cube of the window width, and at 96×96 it is too large to lint or simulate on an ordinary workstation. FH/FW are parameters and can be raised.
- **Base vectors.** They are generated from a hash instead of being stored. The block labelled BARM in the published PE diagram is this generator.
- **Assumed details.** These are this design's choices, not published ones: the kernel's fixed-point format, the way the classifier score is formed, the frame rates, and the number of arrays (2×2).
- **Host side.** Analog parts, the host/AXI/DRAM side and the offline training of class vectors are not included.
- **Largest simulation.** The largest end-to-end simulation covers 8×8 frames with 3×3 windows, D = 12 and 2×2 arrays (`tb_hs_top`). There is no full-size end-to-end simulation.

## Simulating

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/hs_pkg.sv tb/tb_hs_top.sv --top-module tb_hs_top -o sim
    ./obj_dir/sim

| testbench | what it checks |
|---|---|
| `tb_hs_pe_row` | one row of PEs, stride 2: every fragment chunk, and when it appears |
| `tb_hs_sa` | whole array with random stalls, against a direct projection |
| `tb_hs_barm` | range, determinism, mean and sigma of base elements, near-orthogonality |
| `tb_hs_frame_buf` | stored pixels and window norms |
| `tb_hs_fifo` | random push/pop against a queue model; full and empty both reached |
| `tb_hs_kernel` | H against a real-valued cos·sin, within quantisation |
| `tb_hs_classifier` | dot products, verdicts and latency |
| `tb_hs_detector` | counts and decisions |
| `tb_hs_sensor_ctrl` | rate switching and trigger spacing |
| `tb_hs_top` | end to end (three frames, strides 1 and 2) |

`tb_hs_top` compares every fragment verdict and frame decision with a
reference model. It also counts stalls, fragments from each array, frames with
stride > 1, and switches of the ADC rate in both directions. Each of these must
occur at least once.
