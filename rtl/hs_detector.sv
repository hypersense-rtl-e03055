// hs_detector -- frame decision of the HyperSense model: counts the
// fragments the classifier marked positive and declares the frame positive
// when that count exceeds T_detection (published rule: "if the summation
// value is larger than T_detection, the final prediction ... is positive").
//
// Interface: `start` clears the count and latches how many fragment
// verdicts the frame will produce (`expect_n`); each f_valid verdict is
// counted; after the last one, dec_valid pulses with dec_pos and the count.
// Timing: the decision leaves one cycle after the last verdict.
module hs_detector #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] expect_n,
  input  logic [CW-1:0] t_det,
  input  logic          f_valid,
  input  logic          f_pos,
  output logic          dec_valid,
  output logic          dec_pos,
  output logic [CW-1:0] dec_count
);
  logic [CW-1:0] seen, npos, total;
  logic          active;
  logic [CW-1:0] npos_nxt;

  assign npos_nxt = npos + (f_pos ? 1'b1 : 1'b0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= '0; npos <= '0; total <= '0; active <= 1'b0;
      dec_valid <= 1'b0; dec_pos <= 1'b0; dec_count <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (start) begin
        seen <= '0; npos <= '0; total <= expect_n; active <= 1'b1;
      end else if (active && f_valid) begin
        seen <= seen + 1'b1;
        npos <= npos_nxt;
        if (seen + 1'b1 == total) begin
          active    <= 1'b0;
          dec_valid <= 1'b1;
          dec_pos   <= npos_nxt > t_det;
          dec_count <= npos_nxt;
        end
      end
    end
  end
endmodule
