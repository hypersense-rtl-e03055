// tb_hs_frame_buf -- loads a random 6x7 frame (with gaps in the valid
// stream), checks the `loaded` pulse, the FH-pixel column reads of two ports
// (rows past the frame read 0) and the squared L2 norm of every 2x3 window
// against a direct sum.
module tb_hs_frame_buf;
  import hs_pkg::*;
  localparam int IH = 6, IW = 7, FH = 2, FW = 3, NRD = 2, XW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nloaded = 0;

  logic load, in_valid, in_ready, loaded;
  logic [PIX_W-1:0] in_pix;
  logic [NRD-1:0][XW-1:0] rd_row, rd_col;
  logic [NRD-1:0][FH-1:0][PIX_W-1:0] rd_pix;
  logic [XW-1:0] q_fy, q_fx;
  logic [31:0] q_norm_sq;

  hs_frame_buf #(.IMG_H(IH), .IMG_W(IW), .FH(FH), .FW(FW), .NRD(NRD), .XW(XW)) dut (
    .clk, .rst_n, .load, .in_valid, .in_pix, .in_ready, .loaded,
    .rd_row, .rd_col, .rd_pix, .q_fy, .q_fx, .q_norm_sq
  );

  int img [IH][IW];
  always @(posedge clk) if (loaded) nloaded++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) img[y][x] = $urandom_range(0, 255);
    load = 0; in_valid = 0; in_pix = 0; rd_row = '0; rd_col = '0; q_fy = 0; q_fx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load <= 1;
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) begin
        while ($urandom_range(0, 2) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1; in_pix <= PIX_W'(img[y][x]);
        @(posedge clk);
      end
    in_valid <= 0;
    @(posedge clk);
    load <= 0;
    @(posedge clk);
    check(nloaded == 1, "one loaded pulse");
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) begin
        rd_row[0] = XW'(y); rd_col[0] = XW'(x);
        rd_row[1] = XW'(IH - 1 - y); rd_col[1] = XW'(IW - 1 - x);
        #1;
        for (int r = 0; r < FH; r++) begin
          check(int'(rd_pix[0][r]) == ((y + r < IH) ? img[y + r][x] : 0), "port 0 pixel");
          check(int'(rd_pix[1][r]) == ((IH - 1 - y + r < IH) ? img[IH - 1 - y + r][IW - 1 - x] : 0),
                "port 1 pixel");
        end
      end
    for (int y = 0; y <= IH - FH; y++)
      for (int x = 0; x <= IW - FW; x++) begin
        int e;
        e = 0;
        for (int r = 0; r < FH; r++) for (int c = 0; c < FW; c++) e += img[y + r][x + c] ** 2;
        q_fy = XW'(y); q_fx = XW'(x);
        #1;
        check(int'(q_norm_sq) == e, $sformatf("norm (%0d,%0d) got %0d exp %0d", y, x, q_norm_sq, e));
      end
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
