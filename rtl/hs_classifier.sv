// hs_classifier -- Fragment-model inference: cosine-similarity check of a
// fragment hypervector H against the two class hypervectors (negative,
// positive), then the score threshold T_score.
//
// Function. Over the T words of a fragment it accumulates
//     dp = C_pos . H,   dn = C_neg . H,   hh = H . H.
// The class hypervectors are stored unit-normalised by the host (norm
// 2^CLASS_NORM_LOG2), so the fragment score
//     s = delta(C_pos, H) - delta(C_neg, H) = (dp - dn) / (2^10 * ||H||)
// and the fragment counts as containing an object when s > T_score. With
// T_score = 0 this is the argmax of the two similarities. The test is done
// without a square root:  (dp-dn) * 2^(15-10) > t_score * ||H||  is decided
// from signs and squares (t_score is signed Q1.15).
// Cosine similarity, two classes, argmax and the threshold s > T_score are
// published; taking the score as the difference of the two similarities,
// storing the classes pre-normalised and the number formats are this
// design's choices.
//
// Class memory: 2 x T words of W signed 8-bit elements, written one element
// per cycle through cw_* (element d = chunk*T + lane).
// Timing: one word per cycle in; the verdict of a fragment leaves one cycle
// after its last word (in_last).
module hs_classifier
  import hs_pkg::*;
#(
  parameter int unsigned W  = 32,
  parameter int unsigned T  = 157,
  parameter int unsigned XW = 8,
  parameter int unsigned LW = $clog2(T),
  parameter int unsigned DW = 48          // dot-product accumulator width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // class hypervector write port
  input  logic                     cw_en,
  input  logic                     cw_class,   // 0 = negative, 1 = positive
  input  logic [LW-1:0]            cw_lane,
  input  logic [15:0]              cw_chunk,
  input  logic [ELEM_W-1:0]        cw_data,
  // threshold
  input  logic signed [15:0]       t_score,
  // fragment hypervector stream
  input  logic                     in_valid,
  input  logic [XW-1:0]            in_fx,
  input  logic [XW-1:0]            in_fy,
  input  logic [LW-1:0]            in_lane,
  input  logic                     in_last,
  input  logic [W-1:0][ELEM_W-1:0] in_hv,
  // verdict
  output logic                     f_valid,
  output logic [XW-1:0]            f_fx,
  output logic [XW-1:0]            f_fy,
  output logic                     f_pos,
  output logic signed [DW-1:0]     f_dot_pos,
  output logic signed [DW-1:0]     f_dot_neg,
  output logic [DW-1:0]            f_hsq
);
  logic [W-1:0][ELEM_W-1:0] cmem [2][T];

  always_ff @(posedge clk) begin
    if (cw_en) cmem[cw_class][cw_lane][cw_chunk] <= cw_data;
  end

  // per-word partial sums
  logic signed [DW-1:0] wp, wn;
  logic        [DW-1:0] wh;
  always_comb begin
    wp = '0; wn = '0; wh = '0;
    for (int m = 0; m < int'(W); m++) begin
      wp = wp + DW'($signed(in_hv[m]) * $signed(cmem[1][in_lane][m]));
      wn = wn + DW'($signed(in_hv[m]) * $signed(cmem[0][in_lane][m]));
      wh = wh + DW'($signed(in_hv[m]) * $signed(in_hv[m]));
    end
  end

  logic signed [DW-1:0] acc_p, acc_n, fin_p, fin_n;
  logic        [DW-1:0] acc_h, fin_h;
  assign fin_p = ((in_lane == '0) ? '0 : acc_p) + wp;
  assign fin_n = ((in_lane == '0) ? '0 : acc_n) + wn;
  assign fin_h = ((in_lane == '0) ? '0 : acc_h) + wh;

  // s > T_score  <=>  A > t * sqrt(hh),  A = (dp - dn) << (15 - CLASS_NORM_LOG2)
  function automatic logic above(input logic signed [DW-1:0] dp,
                                 input logic signed [DW-1:0] dn,
                                 input logic [DW-1:0] hh,
                                 input logic signed [15:0] t);
    logic signed [DW+7:0] a;
    logic [127:0]         a2, r2;
    logic                 a_neg, r_neg, r_zero;
    a      = (DW+8)'(dp - dn) <<< (15 - CLASS_NORM_LOG2);
    a_neg  = a < 0;
    r_zero = (t == 0) || (hh == 0);
    r_neg  = (t < 0) && !r_zero;
    a2     = 128'(a_neg ? -a : a) * 128'(a_neg ? -a : a);
    r2     = 128'(t < 0 ? -32'(t) : 32'(t)) * 128'(t < 0 ? -32'(t) : 32'(t)) * 128'(hh);
    if (!a_neg && r_neg)       return 1'b1;
    else if (a_neg && !r_neg)  return 1'b0;
    else if (!a_neg)           return r_zero ? (a != 0) : (a2 > r2);
    else                       return a2 < r2;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_p <= '0; acc_n <= '0; acc_h <= '0;
      f_valid <= 1'b0; f_fx <= '0; f_fy <= '0; f_pos <= 1'b0;
      f_dot_pos <= '0; f_dot_neg <= '0; f_hsq <= '0;
    end else begin
      f_valid <= 1'b0;
      if (in_valid) begin
        acc_p <= fin_p;
        acc_n <= fin_n;
        acc_h <= fin_h;
        if (in_last) begin
          f_valid   <= 1'b1;
          f_fx      <= in_fx;
          f_fy      <= in_fy;
          f_pos     <= above(fin_p, fin_n, fin_h, t_score);
          f_dot_pos <= fin_p;
          f_dot_neg <= fin_n;
          f_hsq     <= fin_h;
        end
      end
    end
  end
endmodule
