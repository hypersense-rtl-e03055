// hs_fifo -- synchronous first-in first-out buffer (the "buffer" behind each
// systolic array, holding encoded fragment words until the shared kernel
// function and classifier take them).
//
// Function: DEPTH words of WIDTH bits; push when `push` and not full, pop
// when `pop` and not empty, both in the same cycle allowed. `rd_data` shows
// the oldest word combinationally (first-word fall-through). `full` and
// `count` come from registers, so a producer may use !full as its advance
// enable without a combinational loop.
// Depth and fall-through behaviour are this design's choices.
module hs_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (int'(count) == int'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (int'(wp) == int'(DEPTH) - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (int'(rp) == int'(DEPTH) - 1) ? '0 : rp + 1'b1;
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  // a push into a full buffer or a pop from an empty one is dropped
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("hs_fifo: push while full");
endmodule
