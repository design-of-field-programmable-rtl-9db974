// step_timer -- fixed-period enable pulse that paces the emulator.
//
// In the hardware-in-the-loop system the emulator could finish a step in
// about 350 ns, but it is run at exactly one step per microsecond so that
// its time base is fixed. This timer produces that pace: a modulo-PERIOD
// counter whose terminal count gives a one-cycle pulse on tick.
// PERIOD = CLK_HZ * STEP_NS / 1e9, i.e. 100 cycles for 1 us at 100 MHz.
// The first tick comes PERIOD cycles after reset is released (this
// design's choice); reset is synchronous and active high.
module step_timer #(
  parameter int unsigned CLK_HZ  = 100_000_000,
  parameter int unsigned STEP_NS = 1000
) (
  input  logic clk,
  input  logic rst,
  output logic tick
);

  localparam longint unsigned PERIOD_L = (longint'(CLK_HZ) * STEP_NS) / 64'd1_000_000_000;
  localparam int unsigned PERIOD = (PERIOD_L < 2) ? 2 : int'(PERIOD_L);
  localparam int unsigned CW     = $clog2(PERIOD);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else begin
      tick <= (cnt == CW'(PERIOD - 1));
      cnt  <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end

endmodule
