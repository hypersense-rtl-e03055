// tb_hs_classifier -- writes random class hypervectors, streams random
// fragment hypervectors and checks the three dot products and the verdict
// s > T_score, with s = (dp - dn) / (1024 * ||H||) evaluated in real
// arithmetic (cases within 1e-9 of the threshold are skipped). Thresholds
// of both signs and zero are used; both verdicts must occur. The verdict
// must leave one cycle after the fragment's last word.
module tb_hs_classifier;
  import hs_pkg::*;
  localparam int W = 3, T = 4, XW = 8, LW = 2, DW = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, npos = 0, nneg = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cw_en, cw_class;
  logic [LW-1:0] cw_lane;
  logic [15:0] cw_chunk;
  logic [ELEM_W-1:0] cw_data;
  logic signed [15:0] t_score;
  logic in_valid, in_last, f_valid, f_pos;
  logic [XW-1:0] in_fx, in_fy, f_fx, f_fy;
  logic [LW-1:0] in_lane;
  logic [W-1:0][ELEM_W-1:0] in_hv;
  logic signed [DW-1:0] f_dot_pos, f_dot_neg;
  logic [DW-1:0] f_hsq;

  hs_classifier #(.W(W), .T(T), .XW(XW), .LW(LW), .DW(DW)) dut (
    .clk, .rst_n, .cw_en, .cw_class, .cw_lane, .cw_chunk, .cw_data, .t_score,
    .in_valid, .in_fx, .in_fy, .in_lane, .in_last, .in_hv,
    .f_valid, .f_fx, .f_fy, .f_pos, .f_dot_pos, .f_dot_neg, .f_hsq
  );

  int C [2][T][W];
  int H [T][W];
  int exp_cyc;
  longint edp, edn, ehh;

  initial begin
    cw_en = 0; cw_class = 0; cw_lane = 0; cw_chunk = 0; cw_data = 0;
    in_valid = 0; in_last = 0; in_fx = 0; in_fy = 0; in_lane = 0; in_hv = '0; t_score = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++)
      for (int t = 0; t < T; t++)
        for (int m = 0; m < W; m++) begin
          C[c][t][m] = $urandom_range(0, 250) - 125;
          cw_en <= 1; cw_class <= c[0]; cw_lane <= LW'(t); cw_chunk <= 16'(m);
          cw_data <= ELEM_W'(C[c][t][m]);
          @(posedge clk);
        end
    cw_en <= 0;
    for (int f = 0; f < 60; f++) begin
      real s, tr;
      edp = 0; edn = 0; ehh = 0;
      for (int t = 0; t < T; t++)
        for (int m = 0; m < W; m++) begin
          H[t][m] = $urandom_range(0, 254) - 127;
          edp += H[t][m] * C[1][t][m]; edn += H[t][m] * C[0][t][m]; ehh += H[t][m] * H[t][m];
        end
      case (f % 3)
        0: t_score = 16'sd0;
        1: t_score = 16'($urandom_range(0, 3000));
        default: t_score = -16'sd1 * 16'($urandom_range(0, 3000));
      endcase
      for (int t = 0; t < T; t++) begin
        in_valid <= 1; in_lane <= LW'(t); in_last <= (t == T - 1);
        in_fx <= XW'(f); in_fy <= XW'(f + 1);
        for (int m = 0; m < W; m++) in_hv[m] <= ELEM_W'(H[t][m]);
        @(posedge clk);
      end
      in_valid <= 0; in_last <= 0;
      #1;
      exp_cyc = cyc;
      s  = real'(edp - edn) / (1024.0 * $sqrt(real'(ehh)));
      tr = real'(t_score) / 32768.0;
      checks += 5;
      if (!f_valid || cyc != exp_cyc) begin failures++; $display("FAIL verdict timing"); end
      if (f_dot_pos != DW'(edp) || f_dot_neg != DW'(edn) || f_hsq != DW'(ehh)) begin
        failures++; $display("FAIL dots %0d %0d %0d vs %0d %0d %0d", f_dot_pos, f_dot_neg, f_hsq, edp, edn, ehh);
      end
      if (int'(f_fx) != f || int'(f_fy) != f + 1) failures++;
      if (s - tr > 1e-9 || tr - s > 1e-9) begin
        if (f_pos != (s > tr)) begin failures++; $display("FAIL verdict s=%f t=%f got %0d", s, tr, f_pos); end
        if (s > tr) npos++; else nneg++;
      end
      @(posedge clk);
    end
    checks += 2;
    if (npos == 0) failures++;
    if (nneg == 0) failures++;
    $display("positive %0d negative %0d", npos, nneg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
