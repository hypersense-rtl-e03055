// tb_hs_sa -- checks hs_sa (a 2x3 systolic array, chunk length 4) against a
// direct evaluation of the fragment projection
//     P[d = m*T + t] = sum_{r, j} I[fy+r][fx+j] * B_r[j][m][t]
// on a 6x9 frame, piece x0 = 1, nx = 7, two origin rows y0 = 1 and 3
// (stride 2). Fragments at local columns 0, 2 and 4 must each come out once,
// with correct coordinates and all T lanes. The enable is dropped at random
// (back-pressure) and the results must not change; the number of stalled
// cycles is counted and must be above zero.
module tb_hs_sa;
  import hs_pkg::*;
  localparam int FH = 2, W = 3, T = 4, XW = 8, LW = 2;
  localparam int PW = PIX_W + ELEM_W + 1, ACC_W = PW + $clog2(W), SUM_W = ACC_W + $clog2(FH);
  localparam int IH = 6, IW = 9;
  localparam int X0 = 1, NX = 7, Y0 = 1, NY = 2, STRIDE = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  logic [31:0] seed = 32'h0bad_cafe;
  logic en, start, busy, o_valid;
  logic [XW-1:0] rd_row, rd_col, o_fx, o_fy;
  logic [FH-1:0][PIX_W-1:0] rd_pix;
  logic [LW-1:0] o_lane;
  logic [W-1:0][SUM_W-1:0] o_data;

  hs_sa #(.FH(FH), .W(W), .T(T), .XW(XW)) dut (
    .clk, .rst_n, .en, .seed, .start, .x0(XW'(X0)), .nx(XW'(NX)), .y0(XW'(Y0)),
    .ny(XW'(NY)), .stride(XW'(STRIDE)), .busy, .rd_row, .rd_col, .rd_pix,
    .o_valid, .o_fx, .o_fy, .o_lane, .o_data
  );

  int img [IH][IW];
  always_comb
    for (int r = 0; r < FH; r++)
      rd_pix[r] = (int'(rd_row) + r < IH && int'(rd_col) < IW) ?
                  PIX_W'(img[int'(rd_row) + r][int'(rd_col)]) : '0;

  int B [FH][W][W][T];
  int got [IH][IW];

  initial begin
    for (int r = 0; r < FH; r++)
      for (int t = 0; t < T; t++) begin
        for (int j = 0; j < W; j++) B[r][j][0][t] = int'(hs_base_elem(seed, 16'(r), 16'(j), 16'(t)));
        for (int m = 1; m < W; m++) B[r][0][m][t] = int'(hs_base_elem(seed, 16'(r), 16'(W + m - 1), 16'(t)));
        for (int j = 1; j < W; j++)
          for (int m = 1; m < W; m++) B[r][j][m][t] = B[r][j-1][m-1][t];
      end
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) img[y][x] = $urandom_range(0, 255);
    en = 1; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    #1;
    while (busy) begin
      en <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (!en) stalls++;
    end
    en <= 1;
    repeat (4 * W + 4) @(posedge clk);
    for (int yi = 0; yi < NY; yi++)
      for (int k = 0; k <= NX - W; k++) begin
        int fy, fx;
        fy = Y0 + yi * STRIDE; fx = X0 + k;
        checks++;
        if (got[fy][fx] != ((k % STRIDE == 0) ? T : 0)) begin
          failures++;
          $display("FAIL fragment (%0d,%0d) got %0d lanes", fy, fx, got[fy][fx]);
        end
      end
    checks++;
    if (stalls == 0) failures++;
    $display("stalled cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && o_valid) begin
    int fx, fy, t;
    fx = int'(o_fx); fy = int'(o_fy); t = int'(o_lane);
    if (fy < IH && fx < IW) got[fy][fx]++;
    for (int m = 0; m < W; m++) begin
      int e;
      e = 0;
      for (int r = 0; r < FH; r++)
        for (int j = 0; j < W; j++)
          if (fy + r < IH && fx + j < IW) e += img[fy + r][fx + j] * B[r][j][m][t];
      checks++;
      if (int'($signed(o_data[m])) != e) begin
        failures++;
        $display("FAIL (%0d,%0d) lane %0d chunk %0d got %0d exp %0d", fy, fx, t, m,
                 $signed(o_data[m]), e);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
