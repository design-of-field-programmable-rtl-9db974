// dcm_emulator_system -- hardware of the DC-motor emulation platform.
//
// This is the programmable-logic side of a hardware-in-the-loop test bench
// for DC-motor controllers. A soft processor (outside this module) runs the
// speed and current controllers; this module holds what is hardware:
//   * dcm_emulator - the motor model co-processor, one float32 step of
//     current Im and speed Wm per enable;
//   * pwm_module   - turns the controller's duty cycle alpha into the two
//     complementary chopper commands C0/C1 (16 kHz, no dead time);
//   * step_timer   - paces the emulator at one step per microsecond;
// and it brings the stream handshake flags out as debug pins for a logic
// analyser.
//
// CHOPPER selects the set-up:
//   CHOP_C0C1 (default, the closed-loop set-up): the processor writes alpha
//     into the PWM registers (pwm_wr_*); C0/C1 leave on pins c0/c1 and are
//     fed straight back into the emulator's chopper; the emulator steps on
//     each 1 us tick and overwrites its Im/Wm results, which the processor
//     reads when it likes through the im_* / wm_* stream ports (point-to-
//     point FIFO links in the full system). pwm_inhibit holds C0 = C1 = 0,
//     the controller-fault test. The alpha stream ports are unused.
//   CHOP_ALPHA_EQ4 (the open-loop set-up): no PWM and no timer; the
//     processor pushes a float alpha on the alpha stream and the emulator
//     answers each one with one Im/Wm pair (about 32 cycles per step).
// All stream ports follow the emulator's rule: a word moves on a clock edge
// where _en and _rdy are both high. One clock, synchronous active-high
// reset.
module dcm_emulator_system
  import fp32_pkg::*;
#(
  parameter chopper_mode_e CHOPPER = CHOP_C0C1,
  parameter int unsigned   CLK_HZ  = 100_000_000,
  parameter int unsigned   PWM_HZ  = 16_000,
  parameter int unsigned   STEP_NS = 1000
) (
  input  logic        clk,
  input  logic        rst,
  // alpha stream from the processor (open-loop set-up)
  input  fp32_t       alpha_data,
  input  logic        alpha_eos,
  input  logic        alpha_en,
  output logic        alpha_rdy,
  // Im and Wm streams to the processor
  input  logic        im_en,
  output fp32_t       im_data,
  output logic        im_rdy,
  output logic        im_eos,
  input  logic        wm_en,
  output fp32_t       wm_data,
  output logic        wm_rdy,
  output logic        wm_eos,
  // PWM register writes from the processor bus (closed-loop set-up)
  input  logic        pwm_wr_en,
  input  logic        pwm_wr_addr,
  input  logic [31:0] pwm_wr_data,
  input  logic        pwm_inhibit,
  // chopper command pins and logic-analyser pins
  output logic        c0,
  output logic        c1,
  output dbg_pins_t   dbg
);

  logic step_tick, busy, period_start;

  generate
    if (CHOPPER == CHOP_C0C1) begin : g_hil
      pwm_module #(.CLK_HZ(CLK_HZ), .PWM_HZ(PWM_HZ)) u_pwm (
        .clk, .rst,
        .wr_en(pwm_wr_en), .wr_addr(pwm_wr_addr), .wr_data(pwm_wr_data),
        .inhibit(pwm_inhibit), .c0, .c1, .period_start);
      step_timer #(.CLK_HZ(CLK_HZ), .STEP_NS(STEP_NS)) u_step (
        .clk, .rst, .tick(step_tick));
    end else begin : g_open_loop
      assign c0 = 1'b0;
      assign c1 = 1'b0;
      assign period_start = 1'b0;
      assign step_tick = 1'b0;
    end
  endgenerate

  dcm_emulator #(.CHOPPER(CHOPPER)) u_emu (
    .clk, .reset(rst),
    .p_Producer_alpha_data(alpha_data),
    .p_Producer_alpha_eos (alpha_eos),
    .p_Consumer_alpha_en  (alpha_en),
    .p_Producer_alpha_rdy (alpha_rdy),
    .p_Consumer_im_en  (im_en),
    .p_Consumer_im_data(im_data),
    .p_Consumer_im_rdy (im_rdy),
    .p_Consumer_im_eos (im_eos),
    .p_Consumer_wm_en  (wm_en),
    .p_Consumer_wm_data(wm_data),
    .p_Consumer_wm_rdy (wm_rdy),
    .p_Consumer_wm_eos (wm_eos),
    .c0, .c1,
    .step_en(step_tick),
    .busy);

  always_comb begin
    dbg.alpha_en  = alpha_en;
    dbg.alpha_rdy = alpha_rdy;
    dbg.im_en     = im_en;
    dbg.im_rdy    = im_rdy;
    dbg.wm_en     = wm_en;
    dbg.wm_rdy    = wm_rdy;
    dbg.c0        = c0;
    dbg.c1        = c1;
    dbg.step_tick = step_tick;
    dbg.busy      = busy;
    dbg.pwm_period = period_start;
  end

endmodule
