// hs_pkg -- constants, types and pure functions shared by the HyperSense
// near-sensor HDC accelerator.
//
// What is here:
//  * the default geometry: 128x128 low-precision radar frames, 96x96
//    fragments, hypervector dimension D = 5000, 8-bit hypervector elements
//    (the fragment size, dimension and element width follow the published
//    FPGA configuration; the frame size is that of the radar data set used);
//  * the seeded generator behind the base hypervectors. Each base element is
//    an approximately Gaussian integer (sum of four uniform bytes, mean 0,
//    sigma ~32 LSB) drawn from a counter-based hash of (seed, row, chunk
//    identity, lane). Generating instead of storing the base vectors is this
//    design's choice: a host that knows the seed can rebuild the identical
//    vectors to train the classifier offline;
//  * the chunk-shift permutation rule B[j][m] = B[j-1][m-1] which makes the
//    computation reuse possible, as a function returning the identity of the
//    independently drawn chunk a (position j, chunk m) pair equals;
//  * a 256-entry sine in Q1.7 computed with Bhaskara's rational
//    approximation (no table file), used by the kernel function;
//  * integer square root.
// Nothing in this package holds state; every function is synthesizable.
package hs_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PIX_W   = 8;   // low-precision ADC sample width (assumed)
  localparam int unsigned ELEM_W  = 8;   // hypervector element width
  localparam int unsigned PHASE_W = 8;   // kernel phase: 256 steps per 2*pi

  // Class hypervectors are stored unit-normalised with this norm (2^10).
  localparam int unsigned CLASS_NORM_LOG2 = 10;

  // --------------------------------------------------------------- hashing
  // 32-bit integer mixer (xor-shift-multiply); a bijection on 32 bits.
  function automatic logic [31:0] hs_mix32(input logic [31:0] a);
    logic [31:0] x;
    x = a;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Approximately Gaussian 8-bit base element, sigma ~32 LSB, clipped to
  // +-127. id is the identity of the independently drawn chunk (0..2w-2),
  // row is the fragment row, lane the element inside the chunk.
  function automatic logic signed [ELEM_W-1:0] hs_base_elem(
      input logic [31:0] seed, input logic [15:0] row,
      input logic [15:0] id, input logic [15:0] lane);
    logic [31:0] h;
    int s;
    h = hs_mix32(seed ^ hs_mix32({row, id}) ^ hs_mix32({16'h5a5a, lane} + {row, 16'h0}));
    s = int'(h[7:0]) + int'(h[15:8]) + int'(h[23:16]) + int'(h[31:24]) - 510;
    // 4 uniform bytes: sigma = 147.8; scale by 7/32 -> sigma ~32.3
    s = (s * 7) >>> 5;
    if (s > 127) s = 127;
    if (s < -127) s = -127;
    return ELEM_W'(s);
  endfunction

  // Uniform phase offset b in [0, 2*pi) of the kernel for dimension d.
  function automatic logic [PHASE_W-1:0] hs_bias_phase(
      input logic [31:0] seed, input logic [31:0] d);
    logic [31:0] h;
    h = hs_mix32(hs_mix32(seed ^ 32'hb1a5_0001) ^ d);
    return h[PHASE_W-1:0];
  endfunction

  // Identity of the independently drawn chunk that base chunk (position j,
  // chunk m) of a w-wide window row equals under B[j][m] = B[j-1][m-1]:
  //   j >= m : B[j-m][0]  -> id = j - m           (0 .. w-1)
  //   j <  m : B[0][m-j]  -> id = w + (m - j) - 1 (w .. 2w-2)
  function automatic logic [15:0] hs_chunk_id(input int j, input int m, input int w);
    if (j >= m) return 16'(j - m);
    else        return 16'(w + (m - j) - 1);
  endfunction

  // ----------------------------------------------------------------- sine
  // sin(2*pi*p/256) in Q1.7 (range -127..127), Bhaskara I approximation
  // sin(x) ~ 16 x (pi - x) / (5 pi^2 - 4 x (pi - x)) on a half period,
  // evaluated in integers with q = p mod 128 standing for x = pi*q/128.
  function automatic logic signed [7:0] hs_sin_q7(input logic [PHASE_W-1:0] p);
    int q, num, den, v;
    q   = int'(p[6:0]);
    num = 16 * q * (128 - q);
    den = 5 * 128 * 128 - 4 * q * (128 - q);
    v   = (num * 127 + den / 2) / den;
    if (p[7]) v = -v;
    return 8'(v);
  endfunction

  // ----------------------------------------------------------- integer sqrt
  function automatic logic [31:0] hs_isqrt(input logic [63:0] v);
    logic [63:0] rem, root, bitv;
    rem  = v;
    root = '0;
    bitv = 64'h1 << 62;
    while (bitv > v) bitv = bitv >> 2;
    while (bitv != 0) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[31:0];
  endfunction

  // Reciprocal-norm factor of the kernel: R = round(2^24 * 4/pi / ||x||).
  // The base elements carry sigma = 32 LSB, so the phase in 256ths of a turn
  // of the normalised projection p/(32*||x||) is (p * R) >> 24.
  localparam logic [31:0] KERNEL_RNUM = 32'd21361415;  // 2^24 * 4/pi
  function automatic logic [31:0] hs_recip_norm(input logic [31:0] norm_sq);
    logic [31:0] n;
    n = hs_isqrt({32'h0, norm_sq});
    if (n == 0) n = 1;
    return (KERNEL_RNUM + (n >> 1)) / n;
  endfunction

endpackage
