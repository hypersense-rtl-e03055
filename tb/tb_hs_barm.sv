// tb_hs_barm -- checks the base hypervector source: every element is within
// +-127, the same (seed, row, id, lane) always gives the same value, the
// elements of one chunk family have mean ~0 and sigma ~32 (the Gaussian the
// encoder expects), and chunks with different identities, rows or seeds are
// nearly uncorrelated (base hypervectors must be quasi-orthogonal).
module tb_hs_barm;
  import hs_pkg::*;
  localparam int N = 4;
  localparam int L = 2000;   // lanes sampled

  int checks = 0, failures = 0;
  logic [31:0] seed;
  logic [15:0] row, lane;
  logic [N-1:0][15:0] id;
  logic [N-1:0][ELEM_W-1:0] val;

  hs_barm #(.N(N)) dut (.seed, .row, .lane, .id, .val);

  int v [2][N][L];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    real s, ss, mean, sd, dot, n0, n1;
    id = {16'd3, 16'd2, 16'd1, 16'd0};
    for (int pass = 0; pass < 2; pass++)
      for (int l = 0; l < L; l++) begin
        seed = (pass == 0) ? 32'h1 : 32'h2; row = 16'd5; lane = 16'(l);
        #1;
        for (int i = 0; i < N; i++) v[pass][i][l] = int'($signed(val[i]));
      end
    // determinism
    seed = 32'h1; row = 16'd5; lane = 16'd17; #1;
    for (int i = 0; i < N; i++) check(int'($signed(val[i])) == v[0][i][17], "repeatable");
    // range and moments
    for (int i = 0; i < N; i++) begin
      s = 0; ss = 0;
      for (int l = 0; l < L; l++) begin
        s += v[0][i][l]; ss += v[0][i][l] * v[0][i][l];
        if (v[0][i][l] > 127 || v[0][i][l] < -127) failures++;
      end
      mean = s / L; sd = $sqrt(ss / L - mean * mean);
      $display("chunk %0d: mean %f sigma %f", i, mean, sd);
      check(mean > -3.0 && mean < 3.0, "mean near 0");
      check(sd > 28.0 && sd < 37.0, "sigma near 32");
    end
    // quasi-orthogonality: |cos| small between ids and between seeds
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        dot = 0; n0 = 0; n1 = 0;
        for (int l = 0; l < L; l++) begin
          dot += v[0][a][l] * v[(a == b) ? 1 : 0][b][l];
          n0 += v[0][a][l] * v[0][a][l];
          n1 += v[(a == b) ? 1 : 0][b][l] * v[(a == b) ? 1 : 0][b][l];
        end
        check((dot / $sqrt(n0 * n1)) < 0.1 && (dot / $sqrt(n0 * n1)) > -0.1, "quasi-orthogonal");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
