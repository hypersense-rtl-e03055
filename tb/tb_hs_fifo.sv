// tb_hs_fifo -- random pushes and pops against a queue model; checks order,
// data, `empty`, `full` and `count`, and that the buffer fills up (full seen)
// and drains (empty seen) during the run.
module tb_hs_fifo;
  localparam int WIDTH = 12, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nfull = 0, nempty = 0;

  logic push, pop, empty, full;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  hs_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .push, .wr_data, .pop, .rd_data, .empty, .full, .count
  );

  logic [WIDTH-1:0] q [$];

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      checks += 3;
      if (int'(count) != q.size()) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
      if (empty != (q.size() == 0)) failures++;
      if (full != (q.size() == DEPTH)) failures++;
      if (full) nfull++;
      if (empty) nempty++;
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %h vs %h", rd_data, q[0]); end
      end
      // phases that favour filling, then draining
      push = !full && ($urandom_range(0, 9) < (((i / 100) % 2 == 0) ? 7 : 3));
      pop  = !empty && ($urandom_range(0, 9) < (((i / 100) % 2 == 0) ? 3 : 7));
      wr_data = WIDTH'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    checks += 2;
    if (nfull == 0) failures++;
    if (nempty == 0) failures++;
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
