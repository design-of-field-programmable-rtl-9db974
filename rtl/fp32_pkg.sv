// fp32_pkg -- types and constants shared by the DC-machine emulator.
//
// The emulator computes in IEEE-754 single precision (32-bit streams carry
// float values). This package holds the float32 type, the float32 encodings
// of the discrete motor-model coefficients (a, beta, gamma, lambda, mu, nu)
// and the supply voltage Vin, the chopper-mode selector, and the bundle of
// debug flags that the system brings out to external pins.
//
// The coefficient values are those of the model's parameter table (step
// hor = 350 ns); each hex constant is the float32 nearest to the decimal
// value written beside it. Everything else here (enum, struct layout) is a
// choice of this design.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  // Common float32 encodings
  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_ONE  = 32'h3F80_0000;   // 1.0
  localparam fp32_t FP32_QNAN = 32'h7FC0_0000;

  // Discrete DC-machine model, Im(k+1) = a*Im + beta*Wm + gamma*Vh,
  //                            Wm(k+1) = lambda*Im + mu*Wm + nu*sign(Wm)
  localparam fp32_t COEF_A      = 32'h3F7F_DF3B; //  0.9995
  localparam fp32_t COEF_BETA   = 32'hB8C0_E3C7; // -9.1977e-5
  localparam fp32_t COEF_GAMMA  = 32'h3A03_09B5; //  4.9987e-4
  localparam fp32_t COEF_LAMBDA = 32'h3919_1FA1; //  1.4603e-4
  localparam fp32_t COEF_MU     = 32'h3F80_0000; //  1.0
  localparam fp32_t COEF_NU     = 32'h0000_0000; //  0.0
  localparam fp32_t VIN_60V     = 32'h4270_0000; //  60.0 V

  // Where the chopper output voltage Vh comes from.
  //   CHOP_ALPHA_EQ4 : open-loop set-up, Vh = (2*alpha - 1)*Vin from a float
  //                    duty cycle received on the alpha stream.
  //   CHOP_C0C1      : hardware-in-the-loop set-up, Vh = +Vin / -Vin / 0
  //                    from the two PWM switch commands C0 and C1.
  typedef enum logic {CHOP_ALPHA_EQ4 = 1'b0, CHOP_C0C1 = 1'b1} chopper_mode_e;

  // Flags brought out to the logic-analyser pins.
  typedef struct packed {
    logic alpha_en;
    logic alpha_rdy;
    logic im_en;
    logic im_rdy;
    logic wm_en;
    logic wm_rdy;
    logic c0;
    logic c1;
    logic step_tick;
    logic busy;
    logic pwm_period;   // start of a PWM period
  } dbg_pins_t;

  // Sign of a float32 as -1/0/+1 applied to a magnitude: returns mag with its
  // sign set to that of x, or +0 when x is zero (used for nu*sign(Wm)).
  function automatic fp32_t fp32_signed_by(fp32_t mag, fp32_t x);
    if (x[30:23] == 8'd0) return FP32_ZERO;
    return {x[31] ^ mag[31], mag[30:0]};
  endfunction

endpackage
