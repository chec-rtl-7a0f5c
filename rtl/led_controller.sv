// led_controller: drives the four LED flasher units at the camera corners.
//
// Each flasher holds N_LEDS LEDs; which of them light in a flash is set by a
// per-flasher enable pattern (pattern_i), so the combination sets the
// intensity of the calibration flash. A flash starts on the rising edge of
// fire_i (the trigger to the flashers) or, when period_i is non-zero, every
// period_i ticks. On a flash every enabled LED is driven for PULSE_NS ticks,
// starting in the tick after the request; requests during a pulse are ignored.
// flash_count_o counts flashes. The paper gives four flashers of ten LEDs
// used in patterns over a wide intensity range; the periodic mode, the pulse
// width and the pattern register are this design's own.
module led_controller #(
  parameter int unsigned N_FLASHERS = 4,
  parameter int unsigned N_LEDS     = 10,
  parameter int unsigned PULSE_NS   = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   fire_i,
  input  logic [31:0]                            period_i,
  input  logic [N_FLASHERS-1:0][N_LEDS-1:0]      pattern_i,
  output logic [N_FLASHERS-1:0][N_LEDS-1:0]      led_o,
  output logic [31:0]                            flash_count_o
);
  logic        fire_q, start;
  logic [31:0] tmr;
  logic [$clog2(PULSE_NS+1)-1:0] width;
  logic [N_FLASHERS-1:0][N_LEDS-1:0] pat_q;

  assign start = (width == 0) &&
                 ((fire_i && !fire_q) || (period_i != 0 && tmr >= period_i - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fire_q        <= 1'b0;
      tmr           <= '0;
      width         <= '0;
      pat_q         <= '0;
      flash_count_o <= '0;
    end else begin
      fire_q <= fire_i;
      if (period_i == 0 || tmr >= period_i - 1) tmr <= '0;
      else                                      tmr <= tmr + 1'b1;
      if (start) begin
        width         <= PULSE_NS[$bits(width)-1:0];
        pat_q         <= pattern_i;
        flash_count_o <= flash_count_o + 1'b1;
      end else if (width != 0) begin
        width <= width - 1'b1;
      end
    end
  end

  assign led_o = (width != 0) ? pat_q : '0;
endmodule
