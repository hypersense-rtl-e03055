// hs_sensor_ctrl -- Intelligent Sensor Control: sets the frame rate of the
// high-precision ADC from the HyperSense frame decision.
//
// Function. After a positive frame decision the high-precision ADC runs at
// HIGH_FPS (the sensor's usual 60 frames/s); after a negative one it drops
// to the minimum LOW_FPS (1 frame/s). Both rates are the published example.
// The controller emits `hp_trigger`, a one-cycle pulse that starts one
// high-precision frame, every CLK_HZ/rate cycles. On a switch to the high
// rate, a frame is triggered at once if the high-rate period has already
// elapsed since the last trigger. Trigger-pulse form, the immediate
// catch-up and starting in the low-rate mode after reset are this design's
// choices.
module hs_sensor_ctrl #(
  parameter int unsigned CLK_HZ   = 100_000_000,  // accelerator clock
  parameter int unsigned HIGH_FPS = 60,
  parameter int unsigned LOW_FPS  = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic dec_valid,
  input  logic dec_pos,
  output logic rate_high,
  output logic hp_trigger
);
  localparam int unsigned P_HIGH = CLK_HZ / HIGH_FPS;
  localparam int unsigned P_LOW  = CLK_HZ / LOW_FPS;
  localparam int unsigned CW     = $clog2(P_LOW + 1);

  logic [CW-1:0] cnt;
  logic [CW-1:0] period;
  logic          mode;

  assign rate_high = mode;

  always_comb begin
    logic m;
    m = dec_valid ? dec_pos : mode;
    period = m ? CW'(P_HIGH) : CW'(P_LOW);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= 1'b0; cnt <= '0; hp_trigger <= 1'b0;
    end else begin
      if (dec_valid) mode <= dec_pos;
      if (cnt + 1'b1 >= period) begin
        cnt        <= '0;
        hp_trigger <= 1'b1;
      end else begin
        cnt        <= cnt + 1'b1;
        hp_trigger <= 1'b0;
      end
    end
  end
endmodule
