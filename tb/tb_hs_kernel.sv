// tb_hs_kernel -- checks the kernel function against real arithmetic:
//   H[d] = 128 * cos(p' + b[d]) * sin(p'),  p' = P / (32 * ||x||),
// b[d] = 2*pi*bias/256. The fixed-point unit quantises the angle to 1/256
// turn, so a difference of up to 9 (of 127) is accepted. Also checks that
// padding dimensions d >= D are 0, the 2-cycle latency, `o_last`, and that
// the norm is taken at lane 0 and held for the other lanes of a fragment.
module tb_hs_kernel;
  import hs_pkg::*;
  localparam int W = 3, T = 4, D = 10, SUM_W = 30, XW = 8, LW = 2;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] seed = 32'h77;
  logic in_valid, o_valid, o_last;
  logic [XW-1:0] in_fx, in_fy, q_fx, q_fy, o_fx, o_fy;
  logic [LW-1:0] in_lane, o_lane;
  logic [W-1:0][SUM_W-1:0] in_data;
  logic [31:0] q_norm_sq;
  logic [W-1:0][ELEM_W-1:0] o_hv;

  hs_kernel #(.W(W), .T(T), .D(D), .SUM_W(SUM_W), .XW(XW), .LW(LW)) dut (
    .clk, .rst_n, .seed, .in_valid, .in_fx, .in_fy, .in_lane, .in_data,
    .q_fx, .q_fy, .q_norm_sq, .o_valid, .o_fx, .o_fy, .o_lane, .o_last, .o_hv
  );

  // the norm a fragment at (fy, fx) has: a fixed function of the position
  function automatic int norm_of(input int fy, input int fx);
    return 1000 + 7919 * fy + 104729 * fx;
  endfunction
  assign q_norm_sq = 32'(norm_of(int'(q_fy), int'(q_fx)));

  typedef struct { int fx, fy, lane, c; int p [W]; } word_t;
  word_t sent [$];

  initial begin
    in_valid = 0; in_fx = 0; in_fy = 0; in_lane = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      int fx, fy;
      fx = $urandom_range(0, 20); fy = $urandom_range(0, 20);
      for (int t = 0; t < T; t++) begin
        word_t w;
        w.fx = fx; w.fy = fy; w.lane = t;
        // during lanes 1..T-1 the norm port shows another position's norm,
        // which must be ignored
        in_fx <= XW'(fx); in_fy <= XW'((t == 0) ? fy : fy + 1);
        in_lane <= LW'(t); in_valid <= 1;
        for (int m = 0; m < W; m++) begin
          real lim;
          lim = 32.0 * $sqrt(real'(norm_of(fy, fx))) * 12.0;
          w.p[m] = $rtoi(($urandom_range(0, 20000) / 10000.0 - 1.0) * lim);
          in_data[m] <= SUM_W'(w.p[m]);
        end
        w.c = cyc + 2 + 1;
        w.fy = fy;
        sent.push_back(w);
        @(posedge clk);
      end
      if (f % 2 == 1) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d words never came out", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && o_valid) begin
    word_t w;
    w = sent.pop_front();
    checks += 3;
    if (cyc != w.c) begin failures++; $display("FAIL latency: cycle %0d exp %0d", cyc, w.c); end
    if (int'(o_fx) != w.fx || int'(o_lane) != w.lane) failures++;
    if (o_last != (w.lane == T - 1)) failures++;
    for (int m = 0; m < W; m++) begin
      int d, got;
      real ang, b, e;
      d = m * T + w.lane;
      ang = real'(w.p[m]) / (32.0 * $sqrt(real'(norm_of(w.fy, w.fx))));
      b = 2.0 * PI * real'(hs_bias_phase(seed, 32'(d))) / 256.0;
      e = (d < D) ? 128.0 * $cos(ang + b) * $sin(ang) : 0.0;
      got = int'($signed(o_hv[m]));
      checks++;
      if ((d >= D && got != 0) || (real'(got) - e > 9.0) || (e - real'(got) > 9.0)) begin
        failures++;
        $display("FAIL d=%0d p=%0d got %0d exp %f", d, w.p[m], got, e);
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
