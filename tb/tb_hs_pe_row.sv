// tb_hs_pe_row -- checks hs_pe by building one systolic-array row of W = 3
// PEs (the 2x3-window example row) and streaming 8 pixels through it.
//
// Reference: the base chunks are rebuilt here from their definition, not
// from the PE's addressing: the first chunk of every position and every
// chunk of position 0 are drawn from the generator, every other chunk by
// the permutation B[j][m] = B[j-1][m-1]. Each finished chunk element is
// compared with sum_j I[k+j] * B[j][m][t]; its arrival cycle is checked
// against (k+W-1)*T + t + m + 1 cycles after streaming began.
// Stride 2 is used, so only fragments k = 0, 2, 4 may be reported.
module tb_hs_pe_row;
  import hs_pkg::*;
  localparam int W = 3, T = 4, NX = 8, XW = 8, LW = 2;
  localparam int PW = PIX_W + ELEM_W + 1, ACC_W = PW + $clog2(W);
  localparam int STRIDE = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] seed = 32'h1234_5678;
  logic                 c_valid [W+1];
  logic [PIX_W-1:0]     c_pix   [W+1];
  logic [XW-1:0]        c_x     [W+1];
  logic [1:0]           c_xm    [W+1];
  logic [LW-1:0]        c_lane  [W+1];
  logic                 c_want  [W+1];
  logic [W-2:0][PW-1:0] c_prod  [W+1];
  logic                 d_valid [W];
  logic [LW-1:0]        d_lane  [W];
  logic [XW-1:0]        d_k     [W];
  logic signed [ACC_W-1:0] d_val [W];

  for (genvar m = 0; m < W; m++) begin : g_pe
    hs_pe #(.W(W), .T(T), .FIRST(m == 0), .XW(XW), .LW(LW)) dut (
      .clk, .rst_n, .en(1'b1), .seed, .row(16'd0), .chunk(16'(m)), .nfrag(XW'(NX - W + 1)),
      .in_valid(c_valid[m]), .in_pix(c_pix[m]), .in_x(c_x[m]), .in_xm(c_xm[m]),
      .in_lane(c_lane[m]), .in_want(c_want[m]), .in_prod(c_prod[m]),
      .out_valid(c_valid[m+1]), .out_pix(c_pix[m+1]), .out_x(c_x[m+1]), .out_xm(c_xm[m+1]),
      .out_lane(c_lane[m+1]), .out_want(c_want[m+1]), .out_prod(c_prod[m+1]),
      .done_valid(d_valid[m]), .done_lane(d_lane[m]), .done_k(d_k[m]), .done_val(d_val[m])
    );
  end
  assign c_prod[0] = '0;

  int pix [NX];
  int B [W][W][T];   // [position j][chunk m][lane t]
  int t0;
  int seen [NX][W];

  initial begin
    for (int t = 0; t < T; t++) begin
      for (int j = 0; j < W; j++) B[j][0][t] = int'(hs_base_elem(seed, 16'd0, 16'(j), 16'(t)));
      for (int m = 1; m < W; m++) B[0][m][t] = int'(hs_base_elem(seed, 16'd0, 16'(W + m - 1), 16'(t)));
      for (int j = 1; j < W; j++)
        for (int m = 1; m < W; m++) B[j][m][t] = B[j-1][m-1][t];
    end
    for (int i = 0; i < NX; i++) pix[i] = $urandom_range(0, 255);
    c_valid[0] = 0; c_pix[0] = 0; c_x[0] = 0; c_xm[0] = 0; c_lane[0] = 0; c_want[0] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    t0 = cyc + 1;
    for (int x = 0; x < NX; x++)
      for (int t = 0; t < T; t++) begin
        c_valid[0] <= 1; c_pix[0] <= PIX_W'(pix[x]); c_x[0] <= XW'(x);
        c_xm[0] <= 2'(x % W); c_lane[0] <= LW'(t);
        c_want[0] <= (x >= W - 1) && ((x - W + 1) % STRIDE == 0);
        @(posedge clk);
      end
    c_valid[0] <= 0;
    repeat (3 * W) @(posedge clk);
    for (int k = 0; k <= NX - W; k++)
      for (int m = 0; m < W; m++) begin
        checks++;
        if ((k % STRIDE == 0) != (seen[k][m] == T)) begin
          failures++;
          $display("FAIL fragment %0d chunk %0d reported %0d lanes", k, m, seen[k][m]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int m = 0; m < W; m++) if (rst_n && d_valid[m]) begin
      int k, t, exp_v, exp_c;
      k = int'(d_k[m]); t = int'(d_lane[m]);
      exp_v = 0;
      for (int j = 0; j < W; j++) exp_v += pix[k + j] * B[j][m][t];
      exp_c = t0 + (k + W - 1) * T + t + m + 1;
      checks += 2;
      seen[k][m]++;
      if (int'(d_val[m]) != exp_v) begin
        failures++;
        $display("FAIL k=%0d m=%0d t=%0d got %0d exp %0d", k, m, t, d_val[m], exp_v);
      end
      if (cyc != exp_c) begin
        failures++;
        $display("FAIL timing k=%0d m=%0d t=%0d cycle %0d exp %0d", k, m, t, cyc, exp_c);
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
