// hs_kernel -- kernel function: turns the linear projection of a fragment
// into its hypervector,  H[d] = cos(p'[d] + b[d]) * sin(p'[d]),  where
// p' = P / ||x||_2 is the projection of the L2-normalised fragment and b[d]
// a per-dimension phase drawn uniformly from [0, 2*pi).
//
// How. The projection P arrives with base elements scaled to sigma = 32 LSB,
// so the angle of p' in 256ths of a turn is (P * R) >> 24 with
// R = round(2^24 * 4/pi / ||x||) (hs_pkg::hs_recip_norm), computed once per
// fragment from the window's squared norm at lane 0 and held for the other
// lanes. sin and cos come from the 256-step Q1.7 sine; the product is
// rescaled to an 8-bit element (Q1.7). Dimensions d >= D (padding of the
// last chunk) are forced to 0. The formula is the published encoder; the
// fixed-point format, phase resolution and on-the-fly reciprocal are this
// design's choices (the published design takes its kernel unit from earlier
// HDC FPGA work without describing it).
//
// Interface: one word per cycle, lane t of all W chunks (element d = m*T+t).
// The window's squared norm is asked for on q_fy/q_fx in the same cycle as
// the word (combinational answer expected).
// Timing: 2-cycle latency, one word per cycle, no back-pressure.
module hs_kernel
  import hs_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned T     = 157,
  parameter int unsigned D     = 5000,
  parameter int unsigned SUM_W = 27,
  parameter int unsigned XW    = 8,
  parameter int unsigned LW    = $clog2(T)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [31:0]                   seed,
  input  logic                          in_valid,
  input  logic [XW-1:0]                 in_fx,
  input  logic [XW-1:0]                 in_fy,
  input  logic [LW-1:0]                 in_lane,
  input  logic [W-1:0][SUM_W-1:0]       in_data,
  output logic [XW-1:0]                 q_fx,
  output logic [XW-1:0]                 q_fy,
  input  logic [31:0]                   q_norm_sq,
  output logic                          o_valid,
  output logic [XW-1:0]                 o_fx,
  output logic [XW-1:0]                 o_fy,
  output logic [LW-1:0]                 o_lane,
  output logic                          o_last,
  output logic [W-1:0][ELEM_W-1:0]      o_hv
);
  assign q_fx = in_fx;
  assign q_fy = in_fy;

  // stage 1: reciprocal norm
  logic                    s1_valid;
  logic [XW-1:0]           s1_fx, s1_fy;
  logic [LW-1:0]           s1_lane;
  logic [W-1:0][SUM_W-1:0] s1_data;
  logic [31:0]             s1_r;
  logic [31:0]             r_now;

  assign r_now = (in_lane == '0) ? hs_recip_norm(q_norm_sq) : s1_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_fx <= '0; s1_fy <= '0; s1_lane <= '0;
      s1_data  <= '0;   s1_r  <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_fx   <= in_fx;
        s1_fy   <= in_fy;
        s1_lane <= in_lane;
        s1_data <= in_data;
        s1_r    <= r_now;
      end
    end
  end

  // stage 2: phase, sine, cosine, product
  logic [W-1:0][ELEM_W-1:0] hv;
  always_comb begin
    for (int m = 0; m < int'(W); m++) begin
      logic signed [63:0] p;
      logic [7:0]         ph, phb;
      logic signed [15:0] prod;
      int                 d;
      d    = m * int'(T) + int'(s1_lane);
      p    = 64'($signed(s1_data[m])) * $signed({32'h0, s1_r});
      ph   = p[31:24];
      phb  = ph + hs_bias_phase(seed, 32'(d)) + 8'd64;   // cos(x) = sin(x + pi/2)
      prod = 16'(hs_sin_q7(phb)) * 16'(hs_sin_q7(ph));
      hv[m] = (d < int'(D)) ? ELEM_W'(prod >>> 7) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0; o_fx <= '0; o_fy <= '0; o_lane <= '0; o_last <= 1'b0;
      o_hv    <= '0;
    end else begin
      o_valid <= s1_valid;
      o_fx    <= s1_fx;
      o_fy    <= s1_fy;
      o_lane  <= s1_lane;
      o_last  <= s1_valid && (int'(s1_lane) == int'(T) - 1);
      o_hv    <= hv;
    end
  end
endmodule
