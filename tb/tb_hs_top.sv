// tb_hs_top -- end-to-end test of the accelerator at reduced size: 8x8
// frames, 3x3 fragments, D = 12 (chunk length 4), 2x2 systolic arrays,
// output buffers of 4 words (so arrays stall), a 600 Hz "clock" for the
// sensor controller (high rate = every 10 cycles, low = every 600).
//
// Three frames: stride 1 with T_detection 0, stride 2 with T_detection 100
// (must be negative), stride 1 again. Every fragment verdict is compared
// with a reference computed here from the definitions: projection
// sum I*B over the window (base chunks rebuilt by the permutation rule),
// kernel cos(p'+b)*sin(p') in the same fixed point, and the sign of
// C_pos.H - C_neg.H (T_score = 0). Frame decisions and the ADC rate flag are
// checked. Mechanisms counted (each must occur): array stalls, fragments
// from every array, stride > 1 frames, positive and negative frames, switches
// of the ADC rate to high and to low.
module tb_hs_top;
  import hs_pkg::*;
  localparam int IH = 8, IW = 8, FH = 3, FW = 3, D = 12, T = 4, NSX = 2, NSY = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lp_valid, lp_ready;
  logic [PIX_W-1:0] lp_pix;
  logic [31:0] cfg_seed = 32'h5eed_0001;
  logic [7:0] cfg_stride;
  logic signed [15:0] cfg_t_score = 16'sd0;
  logic [15:0] cfg_t_det;
  logic cw_en, cw_class;
  logic [1:0] cw_lane;
  logic [15:0] cw_chunk;
  logic [ELEM_W-1:0] cw_data;
  logic frag_valid, frag_pos, frame_done, frame_pos, hp_rate_high, hp_trigger;
  logic [7:0] frag_fx, frag_fy;
  logic [15:0] frame_pos_count;

  hs_top #(.IMG_H(IH), .IMG_W(IW), .FH(FH), .FW(FW), .D(D), .NSX(NSX), .NSY(NSY),
           .CLK_HZ(600), .HIGH_FPS(60), .LOW_FPS(1), .BUF_DEPTH(4)) dut (
    .clk, .rst_n, .lp_valid, .lp_pix, .lp_ready, .cfg_seed, .cfg_stride, .cfg_t_score,
    .cfg_t_det, .cw_en, .cw_class, .cw_lane, .cw_chunk, .cw_data,
    .frag_valid, .frag_fx, .frag_fy, .frag_pos,
    .frame_done, .frame_pos, .frame_pos_count, .hp_rate_high, .hp_trigger
  );

  int img [IH][IW];
  int B [FH][FW][FW][T];
  int C [2][T][FW];
  int exp_pos [IH][IW];
  int nverd [IH][IW];
  int stalls = 0, stride_frames = 0, pos_frames = 0, neg_frames = 0;
  int to_high = 0, to_low = 0, npos_frag;
  int sa_frags [NSX*NSY];
  logic prev_rate = 0;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NSX*NSY; i++) begin
      if (dut.sa_busy[i] && !dut.sa_en[i]) stalls++;
      if (dut.sa_valid[i] && dut.sa_en[i] && dut.sa_lane[i] == '0) sa_frags[i]++;
    end
    if (hp_rate_high && !prev_rate) to_high++;
    if (!hp_rate_high && prev_rate) to_low++;
    prev_rate <= hp_rate_high;
  end

  function automatic int ref_pos(input int fy, input int fx);
    longint dp, dn, nrm;
    logic [31:0] r;
    dp = 0; dn = 0; nrm = 0;
    for (int a = 0; a < FH; a++) for (int b = 0; b < FW; b++) nrm += img[fy+a][fx+b] ** 2;
    r = hs_recip_norm(32'(nrm));
    for (int m = 0; m < FW; m++)
      for (int t = 0; t < T; t++) begin
        longint p, pr;
        int d, h;
        logic [7:0] ph;
        d = m * T + t;
        p = 0;
        for (int a = 0; a < FH; a++)
          for (int j = 0; j < FW; j++) p += img[fy+a][fx+j] * B[a][j][m][t];
        pr = p * longint'(r);
        ph = pr[31:24];
        h = (int'(hs_sin_q7(ph + hs_bias_phase(cfg_seed, 32'(d)) + 8'd64)) * int'(hs_sin_q7(ph))) >>> 7;
        if (d >= D) h = 0;
        dp += h * C[1][t][m];
        dn += h * C[0][t][m];
      end
    return (dp > dn) ? 1 : 0;
  endfunction

  task automatic run_frame(input int stride, input int tdet);
    int nfx, nfy;
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) begin
      img[y][x] = $urandom_range(0, 255);
      nverd[y][x] = 0;
    end
    nfx = (IW - FW) / stride + 1; nfy = (IH - FH) / stride + 1;
    npos_frag = 0;
    for (int a = 0; a < nfy; a++) for (int b = 0; b < nfx; b++) begin
      exp_pos[a*stride][b*stride] = ref_pos(a*stride, b*stride);
      npos_frag += exp_pos[a*stride][b*stride];
    end
    cfg_stride <= 8'(stride); cfg_t_det <= 16'(tdet);
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) begin
        lp_valid <= 1; lp_pix <= PIX_W'(img[y][x]);
        @(posedge clk);
        while (!lp_ready) @(posedge clk);
      end
    lp_valid <= 0;
    while (!frame_done) @(posedge clk);
    #1;
    checks += 3;
    if (int'(frame_pos_count) != npos_frag) begin
      failures++; $display("FAIL frame count %0d exp %0d", frame_pos_count, npos_frag);
    end
    if (frame_pos != (npos_frag > tdet)) failures++;
    for (int a = 0; a < nfy; a++) for (int b = 0; b < nfx; b++) begin
      checks++;
      if (nverd[a*stride][b*stride] != 1) begin
        failures++; $display("FAIL fragment (%0d,%0d) verdicts %0d", a*stride, b*stride, nverd[a*stride][b*stride]);
      end
    end
    if (stride > 1) stride_frames++;
    if (frame_pos) pos_frames++; else neg_frames++;
    @(posedge clk);
    #1;
    checks++;
    if (hp_rate_high != (npos_frag > tdet)) failures++;
    $display("frame stride %0d: %0d fragments, %0d positive, decision %0d", stride, nfx*nfy,
             frame_pos_count, frame_pos);
  endtask

  always @(posedge clk) if (rst_n && frag_valid) begin
    int fy, fx;
    fy = int'(frag_fy); fx = int'(frag_fx);
    checks++;
    if (fy < IH && fx < IW) begin
      nverd[fy][fx]++;
      if (int'(frag_pos) != exp_pos[fy][fx]) begin
        failures++; $display("FAIL verdict (%0d,%0d) got %0d exp %0d", fy, fx, frag_pos, exp_pos[fy][fx]);
      end
    end else failures++;
  end

  initial begin
    for (int r = 0; r < FH; r++)
      for (int t = 0; t < T; t++) begin
        for (int j = 0; j < FW; j++) B[r][j][0][t] = int'(hs_base_elem(cfg_seed, 16'(r), 16'(j), 16'(t)));
        for (int m = 1; m < FW; m++) B[r][0][m][t] = int'(hs_base_elem(cfg_seed, 16'(r), 16'(FW + m - 1), 16'(t)));
        for (int j = 1; j < FW; j++) for (int m = 1; m < FW; m++) B[r][j][m][t] = B[r][j-1][m-1][t];
      end
    lp_valid = 0; lp_pix = 0; cw_en = 0; cw_class = 0; cw_lane = 0; cw_chunk = 0; cw_data = 0;
    cfg_stride = 1; cfg_t_det = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++)
      for (int t = 0; t < T; t++)
        for (int m = 0; m < FW; m++) begin
          C[c][t][m] = $urandom_range(0, 200) - 100;
          cw_en <= 1; cw_class <= c[0]; cw_lane <= 2'(t); cw_chunk <= 16'(m);
          cw_data <= ELEM_W'(C[c][t][m]);
          @(posedge clk);
        end
    cw_en <= 0;
    run_frame(1, 0);
    run_frame(2, 100);
    run_frame(1, 0);
    repeat (20) @(posedge clk);
    checks += 6;
    if (stalls == 0) failures++;
    for (int i = 0; i < NSX*NSY; i++) if (sa_frags[i] == 0) failures++;
    if (stride_frames == 0) failures++;
    if (pos_frames == 0 || neg_frames == 0) failures++;
    if (to_high == 0 || to_low == 0) failures++;
    $display("stall cycles %0d, fragments per array %0d %0d %0d %0d, rate switches up %0d down %0d",
             stalls, sa_frags[0], sa_frags[1], sa_frags[2], sa_frags[3], to_high, to_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
