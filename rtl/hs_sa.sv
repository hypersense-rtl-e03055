// hs_sa -- systolic-array IP: encodes every fragment of one piece of the
// input frame into the linear projection  P = sum_{r,j} I[y+r][x+j] * B[r][j]
// (the hypervector before the kernel function), one fragment after the other.
//
// Structure (follows the published SA IP): FH rows of W processing elements
// (hs_pe). Row r streams frame row y+r; the PEs of a row form a pipeline that
// shares products (computation reuse), the rows work in parallel. Each row
// has its own base chunks (first axis drawn independently, second axis by
// permutation). The outputs of PE column m of all rows are summed (the
// Accumulation IP) and then delayed by W-1-m cycles so that the W chunks of
// one fragment line up (the FIFO / Concat IP). Summing before the deskew
// instead of after is this design's reordering; because all rows run in
// lockstep and the sum is linear, the result is the same and only one set
// of delay lines is needed instead of one per row.
//
// Sequencer (this design's choice of order): for each fragment origin row
// fy = y0 + i*stride, i < ny, it streams pixel columns x = 0..nx-1 of the
// piece, each for T cycles (one chunk lane per cycle). Fragments at local
// column k with k mod stride == 0 are emitted.
//
// Output: one word per cycle, lane t of all W chunks of one fragment
// (o_data[m] = element m*T + t of the projection); the T lanes of a fragment
// leave on consecutive cycles unless stalled. Fragment (k, row i) leaves
// about (k+W-1)*T + 2W cycles after its row began streaming.
// `en` low freezes the whole array, sequencer included (back-pressure from
// the output buffer).
module hs_sa
  import hs_pkg::*;
#(
  parameter int unsigned FH    = 32,   // fragment height h (PE rows)
  parameter int unsigned W     = 32,   // fragment width w (PEs per row)
  parameter int unsigned T     = 157,  // chunk length ceil(D/w)
  parameter int unsigned XW    = 8,
  parameter int unsigned LW    = $clog2(T),
  parameter int unsigned PW    = PIX_W + ELEM_W + 1,
  parameter int unsigned ACC_W = PW + $clog2(W),
  parameter int unsigned SUM_W = ACC_W + $clog2(FH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [31:0]              seed,
  // piece to encode
  input  logic                     start,
  input  logic [XW-1:0]            x0,      // leftmost pixel column
  input  logic [XW-1:0]            nx,      // pixel columns (>= W)
  input  logic [XW-1:0]            y0,      // first fragment origin row
  input  logic [XW-1:0]            ny,      // fragment origin rows (>= 1)
  input  logic [XW-1:0]            stride,  // >= 1
  output logic                     busy,
  // frame read: FH pixels of column rd_col, rows rd_row .. rd_row+FH-1
  output logic [XW-1:0]            rd_row,
  output logic [XW-1:0]            rd_col,
  input  logic [FH-1:0][PIX_W-1:0] rd_pix,
  // encoded fragments
  output logic                     o_valid,
  output logic [XW-1:0]            o_fx,
  output logic [XW-1:0]            o_fy,
  output logic [LW-1:0]            o_lane,
  output logic [W-1:0][SUM_W-1:0]  o_data
);
  localparam int unsigned MW = $clog2(W);

  // -------------------------------------------------------------- sequencer
  logic            run;
  logic [XW-1:0]   c_x0, c_nx, c_ny, c_stride;
  logic [XW-1:0]   yi, fy, x, kmod;
  logic [MW-1:0]   xm;
  logic [LW-1:0]   lane;
  logic            want;

  assign busy   = run;
  assign rd_row = fy;
  assign rd_col = c_x0 + x;
  assign want   = (int'(x) >= int'(W) - 1) && (kmod == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      {c_x0, c_nx, c_ny, c_stride} <= '0;
      yi <= '0; fy <= '0; x <= '0; kmod <= '0; xm <= '0; lane <= '0;
    end else if (!run) begin
      if (start) begin
        run      <= 1'b1;
        c_x0     <= x0;
        c_nx     <= nx;
        c_ny     <= ny;
        c_stride <= stride;
        yi <= '0; fy <= y0; x <= '0; kmod <= '0; xm <= '0; lane <= '0;
      end
    end else if (en) begin
      if (int'(lane) != int'(T) - 1) begin
        lane <= lane + 1'b1;
      end else begin
        lane <= '0;
        if (x != c_nx - 1'b1) begin
          x    <= x + 1'b1;
          xm   <= (int'(xm) == int'(W) - 1) ? '0 : xm + 1'b1;
          kmod <= (int'(x) + 1 <= int'(W) - 1) ? '0 :
                  ((kmod + 1'b1 == c_stride) ? '0 : kmod + 1'b1);
        end else begin
          x    <= '0;
          xm   <= '0;
          kmod <= '0;
          if (yi == c_ny - 1'b1) run <= 1'b0;
          yi <= yi + 1'b1;
          fy <= fy + c_stride;
        end
      end
    end
  end

  // ------------------------------------------------------------- PE array
  logic [XW-1:0] nfrag;
  assign nfrag = c_nx - XW'(W) + 1'b1;

  logic                   c_valid [FH][W+1];
  logic [PIX_W-1:0]       c_pix   [FH][W+1];
  logic [XW-1:0]          c_x     [FH][W+1];
  logic [MW-1:0]          c_xm    [FH][W+1];
  logic [LW-1:0]          c_lane  [FH][W+1];
  logic                   c_want  [FH][W+1];
  logic [W-2:0][PW-1:0]   c_prod  [FH][W+1];
  logic                   d_valid [FH][W];
  logic [LW-1:0]          d_lane  [FH][W];
  logic [XW-1:0]          d_k     [FH][W];
  logic signed [ACC_W-1:0] d_val  [FH][W];

  for (genvar r = 0; r < int'(FH); r++) begin : g_row
    assign c_valid[r][0] = run;
    assign c_pix[r][0]   = rd_pix[r];
    assign c_x[r][0]     = x;
    assign c_xm[r][0]    = xm;
    assign c_lane[r][0]  = lane;
    assign c_want[r][0]  = want;
    assign c_prod[r][0]  = '0;
    for (genvar m = 0; m < int'(W); m++) begin : g_pe
      hs_pe #(
        .W(W), .T(T), .FIRST(m == 0), .XW(XW), .LW(LW), .PW(PW), .ACC_W(ACC_W)
      ) u_pe (
        .clk, .rst_n, .en, .seed,
        .row(16'(r)), .chunk(16'(m)), .nfrag,
        .in_valid(c_valid[r][m]), .in_pix(c_pix[r][m]), .in_x(c_x[r][m]),
        .in_xm(c_xm[r][m]), .in_lane(c_lane[r][m]), .in_want(c_want[r][m]),
        .in_prod(c_prod[r][m]),
        .out_valid(c_valid[r][m+1]), .out_pix(c_pix[r][m+1]), .out_x(c_x[r][m+1]),
        .out_xm(c_xm[r][m+1]), .out_lane(c_lane[r][m+1]), .out_want(c_want[r][m+1]),
        .out_prod(c_prod[r][m+1]),
        .done_valid(d_valid[r][m]), .done_lane(d_lane[r][m]), .done_k(d_k[r][m]),
        .done_val(d_val[r][m])
      );
    end
  end

  // ----------------------------------- Accumulation IP (sum over the rows)
  logic signed [SUM_W-1:0] colsum [W];
  always_comb begin
    for (int m = 0; m < int'(W); m++) begin
      colsum[m] = '0;
      for (int r = 0; r < int'(FH); r++)
        colsum[m] = colsum[m] + SUM_W'(d_val[r][m]);
    end
  end

  // --------------------------------------- FIFO / Concat IP (deskew columns)
  // Column m is W-1-m cycles ahead of the last column; delay it that much.
  logic [SUM_W-1:0] aligned [W];
  for (genvar m = 0; m < int'(W); m++) begin : g_deskew
    localparam int unsigned DL = W - 1 - m;
    if (DL == 0) begin : g_direct
      assign aligned[m] = colsum[m];
    end else begin : g_delay
      logic [SUM_W-1:0] dl [DL];
      always_ff @(posedge clk) begin
        if (en) begin
          dl[0] <= colsum[m];
          for (int i = 1; i < int'(DL); i++) dl[i] <= dl[i-1];
        end
      end
      assign aligned[m] = dl[DL-1];
    end
  end

  // The last column carries the fragment's metadata with no delay.
  logic          first_row_out;
  logic [XW-1:0] out_fy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_fx    <= '0;
      o_fy    <= '0;
      o_lane  <= '0;
      o_data  <= '0;
      first_row_out <= 1'b1;
      out_fy  <= '0;
    end else if (!run && start) begin
      first_row_out <= 1'b1;
      out_fy        <= y0;
      o_valid       <= 1'b0;
    end else if (en) begin
      o_valid <= d_valid[0][W-1];
      o_lane  <= d_lane[0][W-1];
      o_fx    <= c_x0 + d_k[0][W-1];
      for (int m = 0; m < int'(W); m++) o_data[m] <= aligned[m];
      if (d_valid[0][W-1]) begin
        // a fragment at k = 0, lane 0 opens a new origin row
        if (d_k[0][W-1] == '0 && d_lane[0][W-1] == '0 && !first_row_out) begin
          out_fy <= out_fy + c_stride;
          o_fy   <= out_fy + c_stride;
        end else begin
          o_fy   <= out_fy;
        end
        if (d_k[0][W-1] == '0 && d_lane[0][W-1] == '0) first_row_out <= 1'b0;
      end
    end
  end
endmodule
