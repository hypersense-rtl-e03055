// tb_hs_sensor_ctrl -- with a 600 Hz clock the low rate (1 frame/s) is a
// trigger every 600 cycles and the high rate (60 frames/s) one every 10.
// Checks the trigger spacing in both modes and the mode flag after
// negative and positive decisions; counts the switches each way.
module tb_hs_sensor_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, last = -1, to_high = 0, to_low = 0;
  logic dec_valid, dec_pos, rate_high, hp_trigger;

  hs_sensor_ctrl #(.CLK_HZ(600), .HIGH_FPS(60), .LOW_FPS(1)) dut (
    .clk, .rst_n, .dec_valid, .dec_pos, .rate_high, .hp_trigger
  );

  int expect_gap = 600;
  bit skip_next = 1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && hp_trigger) begin
      if (!skip_next) begin
        checks++;
        if (cyc - last != expect_gap) begin
          failures++; $display("FAIL gap %0d exp %0d", cyc - last, expect_gap);
        end
      end
      skip_next = 0;
      last = cyc;
    end
  end

  task automatic decide(input bit pos);
    dec_valid <= 1; dec_pos <= pos;
    @(posedge clk);
    dec_valid <= 0;
    #1;
    checks++;
    if (rate_high != pos) failures++;
    if (pos) to_high++; else to_low++;
    expect_gap = pos ? 10 : 600;
    skip_next = 1;   // the gap across a switch is not a full period
  endtask

  initial begin
    dec_valid = 0; dec_pos = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (rate_high) failures++;
    repeat (1300) @(posedge clk);
    decide(1);
    repeat (100) @(posedge clk);
    decide(0);
    repeat (1300) @(posedge clk);
    decide(1);
    repeat (50) @(posedge clk);
    checks += 2;
    if (to_high == 0 || to_low == 0) failures++;
    if (checks < 20) failures++;
    $display("switches to high %0d to low %0d", to_high, to_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
