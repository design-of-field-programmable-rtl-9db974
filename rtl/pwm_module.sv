// pwm_module -- chopper PWM with two complementary switch commands.
//
// Turns the duty cycle alpha, written by the processor, into the two
// opposite logic commands C0 and C1 of an H-bridge chopper: over each PWM
// period C0 is high for alpha of the period and C1 for the rest, so the
// chopper's mean output is (2*alpha - 1)*Vin. No dead time is inserted.
// An up-counter runs from 0 to PERIOD-1 (PERIOD = CLK_HZ/PWM_HZ, 6250 cycles
// for 16 kHz at 100 MHz); C0 = (count < threshold), C1 = !C0, with
// threshold = alpha * PERIOD.
//
// Register port (stands for the processor-bus slave, one write per cycle):
//   wr_addr 0 : alpha as an unsigned DUTY_W-bit fraction in wr_data[DUTY_W-1:0]
//               (alpha = value / 2^DUTY_W); it is taken into use at the
//               start of the next period so no period is cut short.
//   wr_addr 1 : control, bit 0 = output enable (0 after reset).
// inhibit forces C0 = C1 = 0 at once (the emulated controller fault in which
// the PWM stops driving the chopper); the counter keeps running.
// Outputs are registered; period_start pulses in the cycle C0/C1 show
// count 0. Reset is synchronous and active high.
//
// The complementary outputs, the period and the absence of dead time follow
// the system description; the register map, the alpha format, the update
// rule and the inhibit input are this design's choices.
module pwm_module #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned PWM_HZ = 16_000,
  parameter int unsigned DUTY_W = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  logic        wr_addr,
  input  logic [31:0] wr_data,
  input  logic        inhibit,
  output logic        c0,
  output logic        c1,
  output logic        period_start
);

  localparam int unsigned PERIOD = CLK_HZ / PWM_HZ;
  localparam int unsigned CW     = $clog2(PERIOD + 1);

  logic [CW-1:0]     cnt;
  logic [DUTY_W-1:0] duty_shadow;         // last written alpha
  logic [CW-1:0]     thr;                 // active compare value
  logic              enable;
  logic [CW-1:0]     thr_next;

  // threshold = alpha * PERIOD, alpha = duty / 2^DUTY_W
  assign thr_next = CW'((64'(duty_shadow) * PERIOD) >> DUTY_W);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt          <= '0;
      duty_shadow  <= '0;
      thr          <= '0;
      enable       <= 1'b0;
      c0           <= 1'b0;
      c1           <= 1'b0;
      period_start <= 1'b0;
    end else begin
      if (wr_en && !wr_addr) duty_shadow <= wr_data[DUTY_W-1:0];
      if (wr_en &&  wr_addr) enable      <= wr_data[0];

      cnt <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
      if (cnt == CW'(PERIOD - 1)) thr <= thr_next;

      period_start <= (cnt == '0);
      if (!enable || inhibit) begin
        c0 <= 1'b0;
        c1 <= 1'b0;
      end else begin
        c0 <= (cnt <  thr);
        c1 <= (cnt >= thr);
      end
    end
  end

  a_opposite: assert property (@(posedge clk) disable iff (rst) !(c0 && c1));

endmodule
