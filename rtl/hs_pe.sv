// hs_pe -- processing element P[r][m] of a systolic-array row: encodes chunk
// m (T = ceil(D/w) elements) of the row-r hypervector of every fragment that
// slides past, reusing products computed by its left neighbour.
//
// Function. For a fragment starting at column k, chunk m of row r is
//     H[k][m] = sum_{j=0}^{w-1} I[k+j] * B[j][m]
// With base chunks related by the shift permutation B[j][m] = B[j-1][m-1],
// the product I[x]*B[j][m] (j >= 1) equals I[x]*B[j-1][m-1], which the PE
// to the left already formed. So
//   * the first PE of a row (FIRST = 1) multiplies each pixel with all w
//     first chunks B[j][0];
//   * every other PE multiplies only with its own B[0][m] and takes the
//     other w-1 products from the left PE;
//   * each PE forwards the products I[x]*B[j][m], j = 0..w-2, to the right.
// This is the published reuse scheme. Blocks of the published PE
// micro-architecture map as follows: the input register is buffer 1 (pixel)
// and the product register is buffer 2; the Ctr vector is `act`, which
// enables the products whose fragment exists; the MUL IP forms `prod`; the
// Switch IP sends prod[0..w-2] to the right neighbour and all products to
// the adders; the Addr IP maps each in-flight fragment to a row of Regs
// circularly (fragment k lives in slot k mod w), so the slot that finishes
// moves round the Regs rows as elements arrive.
//
// Timing. Chunk elements are processed one lane per cycle (this design's
// choice: one multiplier per chunk instead of T), so a pixel is presented
// for T consecutive cycles, lane 0..T-1. The right neighbour sees the same
// (pixel, lane) one cycle later; rows of a systolic array are skewed by one
// cycle per PE. A finished chunk element leaves on done_* one cycle after its
// last product: fragment k, lane t leaves P[r][m] when pixel x = k+w-1, lane
// t is processed. `en` low freezes the PE (stall).
//
// Interface: in_* come from the left neighbour (or the SA sequencer for the
// first PE), out_* go to the right neighbour, done_* to the row output.
// The pixel x coordinate travels with x mod w (xm) and a `want` bit that
// marks the fragment finishing at this pixel as one the stride keeps.
module hs_pe
  import hs_pkg::*;
#(
  parameter int unsigned W     = 32,   // window width w (PEs per row)
  parameter int unsigned T     = 157,  // chunk length ceil(D/w)
  parameter bit          FIRST = 1'b0, // first PE of its row
  parameter int unsigned XW    = 8,    // pixel column index width
  parameter int unsigned LW    = $clog2(T),
  parameter int unsigned PW    = PIX_W + ELEM_W + 1,  // product width
  parameter int unsigned ACC_W = PW + $clog2(W)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic [31:0]               seed,
  input  logic [15:0]               row,      // fragment row r
  input  logic [15:0]               chunk,    // chunk index m
  input  logic [XW-1:0]             nfrag,    // fragment positions in this row
  // from left neighbour
  input  logic                      in_valid,
  input  logic [PIX_W-1:0]          in_pix,
  input  logic [XW-1:0]             in_x,
  input  logic [$clog2(W)-1:0]      in_xm,
  input  logic [LW-1:0]             in_lane,
  input  logic                      in_want,
  input  logic [W-2:0][PW-1:0]      in_prod,
  // to right neighbour
  output logic                      out_valid,
  output logic [PIX_W-1:0]          out_pix,
  output logic [XW-1:0]             out_x,
  output logic [$clog2(W)-1:0]      out_xm,
  output logic [LW-1:0]             out_lane,
  output logic                      out_want,
  output logic [W-2:0][PW-1:0]      out_prod,
  // finished chunk element
  output logic                      done_valid,
  output logic [LW-1:0]             done_lane,
  output logic [XW-1:0]             done_k,
  output logic signed [ACC_W-1:0]   done_val
);
  localparam int unsigned NB = FIRST ? W : 1;
  localparam int unsigned MW = $clog2(W);

  // ---------------------------------------------------------- base chunks
  logic [NB-1:0][15:0]       bid;
  logic [NB-1:0][ELEM_W-1:0] bval;
  always_comb begin
    for (int i = 0; i < int'(NB); i++)
      bid[i] = FIRST ? hs_chunk_id(i, 0, W) : (16'(W) + chunk - 16'd1);
  end
  hs_barm #(.N(NB)) u_barm (
    .seed(seed), .row(row), .lane(16'(in_lane)), .id(bid), .val(bval)
  );

  // --------------------------------------------------- MUL IP and Ctr vector
  logic signed [PW-1:0] prod [W];
  logic                 act  [W];
  always_comb begin
    for (int j = 0; j < int'(W); j++) begin
      if (FIRST || j == 0)
        prod[j] = PW'($signed({1'b0, in_pix}) * $signed(bval[FIRST ? j : 0]));
      else
        prod[j] = $signed(in_prod[j-1]);
      act[j] = in_valid && (int'(in_x) >= j) && (int'(in_x) - j < int'(nfrag));
    end
  end

  // ------------------------------------------- Regs IP, Addr IP and adders
  logic [W-1:0][ACC_W-1:0] regs [T];
  logic [W-1:0][ACC_W-1:0] cur, nxt;
  logic [MW-1:0]           done_slot;
  always_comb begin
    cur = regs[in_lane];
    nxt = cur;
    for (int s = 0; s < int'(W); s++) begin
      int js;
      js = (int'(in_xm) >= s) ? int'(in_xm) - s : int'(in_xm) + int'(W) - s;
      if (act[js]) begin
        if (js == 0) nxt[s] = ACC_W'(prod[0]);
        else         nxt[s] = ACC_W'($signed(cur[s]) + ACC_W'(prod[js]));
      end
    end
    done_slot = (int'(in_xm) == int'(W) - 1) ? '0 : MW'(in_xm + 1'b1);
  end

  always_ff @(posedge clk) begin
    if (en && in_valid) regs[in_lane] <= nxt;
  end

  // ------------------------------------------ pipeline to right neighbour
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_pix    <= '0;
      out_x      <= '0;
      out_xm     <= '0;
      out_lane   <= '0;
      out_want   <= 1'b0;
      out_prod   <= '0;
      done_valid <= 1'b0;
      done_lane  <= '0;
      done_k     <= '0;
      done_val   <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      out_pix   <= in_pix;
      out_x     <= in_x;
      out_xm    <= in_xm;
      out_lane  <= in_lane;
      out_want  <= in_want;
      for (int j = 0; j < int'(W) - 1; j++) out_prod[j] <= prod[j];
      // Switch IP: the fragment that started w-1 pixels ago is complete
      done_valid <= act[W-1] && in_want;
      done_lane  <= in_lane;
      done_k     <= in_x - XW'(W - 1);
      done_val   <= $signed(cur[done_slot]) + ACC_W'(prod[W-1]);
    end
  end
endmodule
