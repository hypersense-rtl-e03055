// tb_hs_detector -- several frames of random fragment verdicts with random
// gaps; the decision must come once per frame, one cycle after the last
// verdict, with the right positive count and dec_pos = count > T_detection.
// Both decisions must occur.
module tb_hs_detector;
  localparam int CW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, npos = 0, nneg = 0, ndec = 0;

  logic start, f_valid, f_pos, dec_valid, dec_pos;
  logic [CW-1:0] expect_n, t_det, dec_count;

  hs_detector #(.CW(CW)) dut (
    .clk, .rst_n, .start, .expect_n, .t_det, .f_valid, .f_pos, .dec_valid, .dec_pos, .dec_count
  );
  always @(posedge clk) if (dec_valid) ndec++;

  initial begin
    start = 0; f_valid = 0; f_pos = 0; expect_n = 0; t_det = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 12; fr++) begin
      int n, cnt, d0;
      n = $urandom_range(1, 12); cnt = 0;
      start <= 1; expect_n <= CW'(n); t_det <= CW'($urandom_range(0, 6));
      @(posedge clk);
      start <= 0;
      for (int i = 0; i < n; i++) begin
        while ($urandom_range(0, 1) == 0) begin f_valid <= 0; @(posedge clk); end
        f_valid <= 1; f_pos <= ($urandom_range(0, 1) == 1);
        @(posedge clk);
        #1;
        if (f_pos) cnt++;
        checks++;
        if (i < n - 1 && dec_valid) failures++;
      end
      f_valid <= 0;
      d0 = ndec - 1;
      checks += 3;
      if (ndec != d0 + 1 || !dec_valid) begin failures++; $display("FAIL no decision"); end
      if (int'(dec_count) != cnt) begin failures++; $display("FAIL count %0d exp %0d", dec_count, cnt); end
      if (dec_pos != (cnt > int'(t_det))) failures++;
      if (cnt > int'(t_det)) npos++; else nneg++;
    end
    checks += 2;
    if (npos == 0) failures++;
    if (nneg == 0) failures++;
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
