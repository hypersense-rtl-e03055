// hs_frame_buf -- input frame buffer: holds one low-precision frame for the
// systolic arrays and answers the L2-norm question of the fragment
// normalisation.
//
// Function. Pixels arrive in raster order on a valid/ready stream while
// `load` is high; `loaded` pulses with the last pixel of the frame. The
// buffer then serves NRD column reads, one per systolic array: port i
// returns the FH pixels of column rd_col[i], rows rd_row[i] .. +FH-1 (rows
// past the frame read as 0). Fragments are normalised by ||x||_2, so the
// buffer also keeps an integral image of squared pixels,
//     S[y][x] = sum_{y'<=y, x'<=x} I[y'][x']^2,
// built while the frame is written (one row running sum plus the row
// above), and returns the squared norm of the FH x FW window at
// (q_fy, q_fx) from four entries of S.
//
// Keeping the whole frame on chip and the integral-image norm are this
// design's choices; the published design only says each frame is
// partitioned into pieces mapped to the systolic arrays and that fragments
// are normalised. Reads are combinational (zero latency); write latency is
// one cycle.
module hs_frame_buf
  import hs_pkg::*;
#(
  parameter int unsigned IMG_H = 128,
  parameter int unsigned IMG_W = 128,
  parameter int unsigned FH    = 32,
  parameter int unsigned FW    = 32,
  parameter int unsigned NRD   = 4,
  parameter int unsigned XW    = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // frame write stream
  input  logic                          load,
  input  logic                          in_valid,
  input  logic [PIX_W-1:0]              in_pix,
  output logic                          in_ready,
  output logic                          loaded,
  // column reads for the systolic arrays
  input  logic [NRD-1:0][XW-1:0]        rd_row,
  input  logic [NRD-1:0][XW-1:0]        rd_col,
  output logic [NRD-1:0][FH-1:0][PIX_W-1:0] rd_pix,
  // squared norm of a window
  input  logic [XW-1:0]                 q_fy,
  input  logic [XW-1:0]                 q_fx,
  output logic [31:0]                   q_norm_sq
);
  logic [PIX_W-1:0] pix [IMG_H][IMG_W];
  logic [31:0]      isq [IMG_H][IMG_W];
  logic [XW-1:0]    wy, wx;
  logic [31:0]      rowsum;

  assign in_ready = load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wy <= '0; wx <= '0; rowsum <= '0; loaded <= 1'b0;
    end else begin
      loaded <= 1'b0;
      if (!load) begin
        wy <= '0; wx <= '0; rowsum <= '0;
      end else if (in_valid) begin
        if (int'(wx) == int'(IMG_W) - 1) begin
          wx     <= '0;
          rowsum <= '0;
          if (int'(wy) == int'(IMG_H) - 1) begin
            wy     <= '0;
            loaded <= 1'b1;
          end else begin
            wy <= wy + 1'b1;
          end
        end else begin
          wx     <= wx + 1'b1;
          rowsum <= rowsum + 32'(in_pix) * 32'(in_pix);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load && in_valid) begin
      pix[wy][wx] <= in_pix;
      isq[wy][wx] <= rowsum + 32'(in_pix) * 32'(in_pix) + ((wy == '0) ? 32'd0 : isq[wy-1'b1][wx]);
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NRD); i++) begin
      for (int r = 0; r < int'(FH); r++) begin
        int yy, xx;
        yy = int'(rd_row[i]) + r;
        xx = int'(rd_col[i]);
        rd_pix[i][r] = (yy < int'(IMG_H) && xx < int'(IMG_W)) ? pix[yy][xx] : '0;
      end
    end
  end

  // window sum of squares from the integral image
  function automatic logic [31:0] s_at(input int y, input int x);
    if (y < 0 || x < 0) return 32'd0;
    if (y >= int'(IMG_H)) y = int'(IMG_H) - 1;
    if (x >= int'(IMG_W)) x = int'(IMG_W) - 1;
    return isq[y][x];
  endfunction

  always_comb begin
    int y1, x1, y0m, x0m;
    y1  = int'(q_fy) + int'(FH) - 1;
    x1  = int'(q_fx) + int'(FW) - 1;
    y0m = int'(q_fy) - 1;
    x0m = int'(q_fx) - 1;
    q_norm_sq = s_at(y1, x1) - s_at(y0m, x1) - s_at(y1, x0m) + s_at(y0m, x0m);
  end
endmodule
