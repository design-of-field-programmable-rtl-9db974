// dcm_emulator -- real-time DC-machine emulator co-processor.
//
// Each step advances the discrete model of a DC motor and its load by one
// computing step (hor = 350 ns for the built-in coefficients):
//     Vh       = (2*alpha - 1)*Vin                  (open-loop set-up), or
//     Vh       = +Vin if C0 & !C1, -Vin if !C0 & C1, else 0   (HIL set-up)
//     Im(k+1)  = (a*Im(k) + gamma*Vh) + beta*Wm(k)
//     Wm(k+1)  = lambda*Im(k) + mu*Wm(k) [+ nu*sign(Wm(k))]
// All values are IEEE-754 single precision. Five pipelined multipliers and
// four pipelined adders do the work, scheduled by a small FSM so that
// independent products run in parallel: a*Im, beta*Wm, lambda*Im and mu*Wm
// start together with 2Vin*alpha; the multiplier used for 2Vin*alpha is then
// reused for gamma*Vh. The speed equation finishes while the current
// equation is still in its adders. A fifth adder for nu*sign(Wm) exists only
// when NU is non-zero (the built-in nu is 0).
//
// Interface: stream ports named as the C-to-HDL generated core names them.
// A word moves on a clock edge where the stream's _en and _rdy are both 1.
//   alpha (input, CHOP_ALPHA_EQ4 only): p_Producer_alpha_rdy is high when the
//     emulator is idle and both previous results have been read; an accepted
//     alpha starts a step. A word accepted with p_Producer_alpha_eos high
//     carries no data: it closes the stream, after which both output _eos
//     flags rise and the emulator stops until reset.
//   im / wm (outputs): one-word registers; _rdy is high while an unread
//     result is held, p_Consumer_xx_en reads it.
//   CHOP_C0C1: a step starts on each step_en pulse taken while idle (a 1 us
//     timer in the HIL system); C0/C1 are sampled in that cycle. Results
//     overwrite the output registers every step whether read or not, so a
//     slow reader sees the latest motor state.
// Timing (defaults MUL_LAT=5, ADD_LAT=7): results appear
// 2*MUL_LAT + 3*ADD_LAT + 1 = 32 cycles after alpha is accepted, and
// MUL_LAT + 2*ADD_LAT + 1 = 20 cycles after step_en in CHOP_C0C1 mode.
// Reset (synchronous, active high) sets Im = Wm = 0.
//
// Following the model description: the equations, coefficients, the
// operator counts (5 multipliers, 4 adders), the order of the current-
// equation additions, the use of Im(k) in the speed equation, the chopper
// rule and the port names. This design's own choices: the handshake
// details, the eos behaviour, the overwrite policy in HIL mode, the pipeline
// latencies, and the absence of a separate stream clock.
module dcm_emulator
  import fp32_pkg::*;
#(
  parameter chopper_mode_e CHOPPER = CHOP_C0C1,
  parameter fp32_t A_COEF  = COEF_A,
  parameter fp32_t BETA    = COEF_BETA,
  parameter fp32_t GAMMA   = COEF_GAMMA,
  parameter fp32_t LAMBDA  = COEF_LAMBDA,
  parameter fp32_t MU      = COEF_MU,
  parameter fp32_t NU      = COEF_NU,
  parameter fp32_t VIN     = VIN_60V,
  parameter int unsigned MUL_LAT = 5,
  parameter int unsigned ADD_LAT = 7
) (
  input  logic  clk,
  input  logic  reset,
  // alpha input stream (open-loop set-up)
  input  fp32_t p_Producer_alpha_data,
  input  logic  p_Producer_alpha_eos,
  input  logic  p_Consumer_alpha_en,
  output logic  p_Producer_alpha_rdy,
  // Im output stream
  input  logic  p_Consumer_im_en,
  output fp32_t p_Consumer_im_data,
  output logic  p_Consumer_im_rdy,
  output logic  p_Consumer_im_eos,
  // Wm output stream
  input  logic  p_Consumer_wm_en,
  output fp32_t p_Consumer_wm_data,
  output logic  p_Consumer_wm_rdy,
  output logic  p_Consumer_wm_eos,
  // chopper commands and step pacing (HIL set-up)
  input  logic  c0,
  input  logic  c1,
  input  logic  step_en,
  output logic  busy
);

  localparam fp32_t TWO_VIN = (VIN[30:23] == 8'd0) ? VIN
                              : {VIN[31], VIN[30:23] + 8'd1, VIN[22:0]};
  localparam bit HAS_NU = (NU[30:23] != 8'd0);

  typedef enum logic [2:0] {
    S_IDLE,   // wait for alpha / step_en
    S_MUL,    // wait for the five products
    S_VH,     // wait for Vh = 2Vin*alpha - Vin         (EQ4 only)
    S_GVH,    // wait for gamma*Vh                      (EQ4 only)
    S_SUM1,   // wait for a*Im + gamma*Vh
    S_SUM2,   // wait for (...) + beta*Wm = Im(k+1)
    S_OUT     // write results, update state
  } state_e;

  state_e state;

  fp32_t im_q, wm_q;              // Im(k), Wm(k)
  fp32_t p_aim, p_bwm;            // held products a*Im, beta*Wm
  fp32_t wm_next;                 // Wm(k+1)
  logic  wm_done;
  fp32_t im_next;                 // Im(k+1)
  logic  closed;

  // ---------------------------------------------------------------- start
  logic alpha_fire, eos_fire, start;
  fp32_t vh_sw;                   // Vh from the switch commands

  always_comb begin
    if (c0 && !c1)      vh_sw = VIN;
    else if (!c0 && c1) vh_sw = {~VIN[31], VIN[30:0]};
    else                vh_sw = FP32_ZERO;
  end

  generate
    if (CHOPPER == CHOP_ALPHA_EQ4) begin : g_eq4_start
      assign p_Producer_alpha_rdy = (state == S_IDLE) && !closed
                                    && !p_Consumer_im_rdy && !p_Consumer_wm_rdy;
      assign alpha_fire = p_Consumer_alpha_en && p_Producer_alpha_rdy;
      assign eos_fire   = alpha_fire && p_Producer_alpha_eos;
      assign start      = alpha_fire && !p_Producer_alpha_eos;
    end else begin : g_c0c1_start
      assign p_Producer_alpha_rdy = 1'b0;
      assign alpha_fire = 1'b0;
      assign eos_fire   = 1'b0;
      assign start      = step_en && (state == S_IDLE);
    end
  endgenerate

  // ---------------------------------------------------------- operators
  logic  m0_iv, m0_ov, mx_ov1, mx_ov2, mx_ov3, mx_ov4;
  fp32_t m0_a, m0_b, m0_y, m1_y, m2_y, m3_y, m4_y;
  logic  a0_ov, a1_iv, a1_ov, a2_iv, a2_ov, a3_iv, a3_ov;
  fp32_t a0_y, a1_y, a2_y, a3_y;
  logic  a0_iv;

  // multiplier 0: 2Vin*alpha at start (EQ4) or gamma*Vh
  always_comb begin
    m0_iv = 1'b0;
    m0_a  = GAMMA;
    m0_b  = vh_sw;
    if (start) begin
      m0_iv = 1'b1;
      if (CHOPPER == CHOP_ALPHA_EQ4) begin
        m0_a = TWO_VIN;
        m0_b = p_Producer_alpha_data;
      end
    end else if (state == S_VH && a0_ov) begin
      m0_iv = 1'b1;
      m0_b  = a0_y;
    end
  end

  fp32_mul #(.LAT(MUL_LAT)) u_m0 (.clk, .rst(reset), .in_valid(m0_iv), .a(m0_a),   .b(m0_b),
                                  .out_valid(m0_ov),  .y(m0_y));
  fp32_mul #(.LAT(MUL_LAT)) u_m1 (.clk, .rst(reset), .in_valid(start), .a(A_COEF), .b(im_q),
                                  .out_valid(mx_ov1), .y(m1_y));
  fp32_mul #(.LAT(MUL_LAT)) u_m2 (.clk, .rst(reset), .in_valid(start), .a(BETA),   .b(wm_q),
                                  .out_valid(mx_ov2), .y(m2_y));
  fp32_mul #(.LAT(MUL_LAT)) u_m3 (.clk, .rst(reset), .in_valid(start), .a(LAMBDA), .b(im_q),
                                  .out_valid(mx_ov3), .y(m3_y));
  fp32_mul #(.LAT(MUL_LAT)) u_m4 (.clk, .rst(reset), .in_valid(start), .a(MU),     .b(wm_q),
                                  .out_valid(mx_ov4), .y(m4_y));

  logic products_in;
  assign products_in = (state == S_MUL) && mx_ov1;

  // adder 0: Vh = 2Vin*alpha - Vin (EQ4)
  assign a0_iv = products_in && (CHOPPER == CHOP_ALPHA_EQ4);
  fp32_add #(.LAT(ADD_LAT)) u_a0 (.clk, .rst(reset), .in_valid(a0_iv), .sub(1'b1),
                                  .a(m0_y), .b(VIN), .out_valid(a0_ov), .y(a0_y));

  // adder 1: a*Im + gamma*Vh
  fp32_t a1_b;
  always_comb begin
    if (CHOPPER == CHOP_ALPHA_EQ4) begin
      a1_iv = (state == S_GVH) && m0_ov;
      a1_b  = m0_y;
    end else begin
      a1_iv = products_in;
      a1_b  = m0_y;
    end
  end
  fp32_add #(.LAT(ADD_LAT)) u_a1 (.clk, .rst(reset), .in_valid(a1_iv), .sub(1'b0),
                                  .a((CHOPPER == CHOP_ALPHA_EQ4) ? p_aim : m1_y), .b(a1_b),
                                  .out_valid(a1_ov), .y(a1_y));

  // adder 2: (...) + beta*Wm
  assign a2_iv = (state == S_SUM1) && a1_ov;
  fp32_add #(.LAT(ADD_LAT)) u_a2 (.clk, .rst(reset), .in_valid(a2_iv), .sub(1'b0),
                                  .a(a1_y), .b(p_bwm), .out_valid(a2_ov), .y(a2_y));

  // adder 3: lambda*Im + mu*Wm
  assign a3_iv = products_in;
  fp32_add #(.LAT(ADD_LAT)) u_a3 (.clk, .rst(reset), .in_valid(a3_iv), .sub(1'b0),
                                  .a(m3_y), .b(m4_y), .out_valid(a3_ov), .y(a3_y));

  // optional adder 4: + nu*sign(Wm(k))
  logic  wm_ov;
  fp32_t wm_y;
  generate
    if (HAS_NU) begin : g_nu
      fp32_add #(.LAT(ADD_LAT)) u_a4 (.clk, .rst(reset), .in_valid(a3_ov), .sub(1'b0),
                                      .a(a3_y), .b(fp32_signed_by(NU, wm_q)),
                                      .out_valid(wm_ov), .y(wm_y));
    end else begin : g_no_nu
      assign wm_ov = a3_ov;
      assign wm_y  = a3_y;
    end
  endgenerate

  // ------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (reset) begin
      state   <= S_IDLE;
      im_q    <= FP32_ZERO;
      wm_q    <= FP32_ZERO;
      p_aim   <= FP32_ZERO;
      p_bwm   <= FP32_ZERO;
      wm_next <= FP32_ZERO;
      wm_done <= 1'b0;
      im_next <= FP32_ZERO;
      closed  <= 1'b0;
      p_Consumer_im_data <= FP32_ZERO;
      p_Consumer_wm_data <= FP32_ZERO;
      p_Consumer_im_rdy  <= 1'b0;
      p_Consumer_wm_rdy  <= 1'b0;
      p_Consumer_im_eos  <= 1'b0;
      p_Consumer_wm_eos  <= 1'b0;
    end else begin
      // consumers read
      if (p_Consumer_im_en && p_Consumer_im_rdy) p_Consumer_im_rdy <= 1'b0;
      if (p_Consumer_wm_en && p_Consumer_wm_rdy) p_Consumer_wm_rdy <= 1'b0;

      if (wm_ov) begin
        wm_next <= wm_y;
        wm_done <= 1'b1;
      end

      if (eos_fire) begin
        closed            <= 1'b1;
        p_Consumer_im_eos <= 1'b1;
        p_Consumer_wm_eos <= 1'b1;
      end

      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_MUL;
          wm_done <= 1'b0;
        end
        S_MUL: if (mx_ov1) begin
          p_aim <= m1_y;
          p_bwm <= m2_y;
          state <= (CHOPPER == CHOP_ALPHA_EQ4) ? S_VH : S_SUM1;
        end
        S_VH:   if (a0_ov) state <= S_GVH;
        S_GVH:  if (m0_ov) state <= S_SUM1;
        S_SUM1: if (a1_ov) state <= S_SUM2;
        S_SUM2: if (a2_ov) begin
          im_next <= a2_y;
          state   <= S_OUT;
        end
        S_OUT: begin
          im_q <= im_next;
          wm_q <= wm_next;
          p_Consumer_im_data <= im_next;
          p_Consumer_wm_data <= wm_next;
          p_Consumer_im_rdy  <= 1'b1;
          p_Consumer_wm_rdy  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // the speed equation is shorter than the current equation: it must be
  // finished when the results are written
  a_wm_before_out: assert property (@(posedge clk) disable iff (reset)
                                    (state == S_OUT) |-> wm_done);
  // in open-loop mode a step never starts over unread results
  a_no_overwrite: assert property (@(posedge clk) disable iff (reset)
                                   (CHOPPER == CHOP_ALPHA_EQ4 && start)
                                   |-> !p_Consumer_im_rdy && !p_Consumer_wm_rdy);

endmodule
