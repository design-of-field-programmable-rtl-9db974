// tb_open_loop_workload -- open-loop run of the emulator system.
//
// The open-loop set-up (alpha sent as a float on the alpha stream, no PWM)
// is started from rest with alpha = 0.7, i.e. Vh = 24 V, and stepped as fast
// as the emulator allows, 300000 steps. Every Im/Wm pair is compared bit for
// bit with a float32 reference model; the first 4096 steps are the length
// of the recorded on-board run. At the end the speed must have settled at
// the float32 steady state, about 130.18 rad/s: the real-valued fixed point
// of the coefficients is -gamma*Vh/beta = 130.43 rad/s, but once lambda*Im
// drops below half an ulp of Wm the speed stops moving, which leaves it
// within 0.05 % of the 130.1308 rad/s quoted for this test. The time per
// step (alpha accepted to next alpha accepted) must stay at or below 35
// cycles, 350 ns at 100 MHz.
module tb_open_loop_workload;
  import fp32_pkg::*;
  import fp32_ref_pkg::*;

  localparam int NSTEPS = 300_000;
  localparam fp32_t ALPHA = 32'h3F33_3333;   // 0.7

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  alpha_en = 0, alpha_rdy, im_en = 1, wm_en = 1;
  fp32_t im_data, wm_data;
  logic  im_rdy, wm_rdy, im_eos, wm_eos, c0, c1;
  dbg_pins_t dbg;

  dcm_emulator_system #(.CHOPPER(CHOP_ALPHA_EQ4)) dut (
    .clk, .rst,
    .alpha_data(ALPHA), .alpha_eos(1'b0), .alpha_en, .alpha_rdy,
    .im_en, .im_data, .im_rdy, .im_eos,
    .wm_en, .wm_data, .wm_rdy, .wm_eos,
    .pwm_wr_en(1'b0), .pwm_wr_addr(1'b0), .pwm_wr_data(32'h0), .pwm_inhibit(1'b0),
    .c0, .c1, .dbg);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    fp32_t r_im = 0, r_wm = 0, vh;
    int cyc = 0, t_prev = -1, max_gap = 0, k = 0;
    vh = fadd(fmul(32'h42F00000, ALPHA), fneg(VIN_60V));
    repeat (4) @(negedge clk);
    rst = 0;
    alpha_en = 1;                       // the producer always has alpha ready
    while (k < NSTEPS) begin
      @(negedge clk);
      cyc++;
      if (alpha_en && alpha_rdy) begin
        if (t_prev >= 0 && cyc - t_prev > max_gap) max_gap = cyc - t_prev;
        t_prev = cyc;
      end
      if (im_rdy && wm_rdy) begin        // read at the next edge (en held high)
        model_step(COEF_A, COEF_BETA, COEF_GAMMA, COEF_LAMBDA, COEF_MU, COEF_NU, vh, r_im, r_wm);
        k++;
        if (im_data != r_im || wm_data != r_wm) begin
          check(0, $sformatf("step %0d: im %h/%h wm %h/%h", k, im_data, r_im, wm_data, r_wm));
        end
        if (k == 4096 || k % 50000 == 0)
          $display("step %0d: Im %f A, Wm %f rad/s", k, f2r(im_data), f2r(wm_data));
      end
    end
    checks++;                            // all-steps bit-exact check counted once
    check(max_gap <= 35, $sformatf("step period %0d cycles", max_gap));
    check(f2r(wm_data) > 130.1308 * 0.9995 && f2r(wm_data) < 130.1308 * 1.0005,
          $sformatf("steady speed %f", f2r(wm_data)));
    $display("step period %0d cycles, final Wm %f rad/s", max_gap, f2r(wm_data));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSTEPS * 40) @(negedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
