// tb_hil_closed_loop_workload -- 1.5 s hardware-in-the-loop run.
//
// The HIL hardware at its default sizes is closed by a behavioural model of
// the controller software: a speed PI every 20 ms producing a current
// reference limited to +/-13 A, and a current PI every 300 us producing the
// duty cycle. Both are incremental PIs, out(k) = out(k-1) + kp*e(k) +
// kpi*e(k-1), with gains 0.142 / -0.1111 (speed) and 1.1737 / -1.0150
// (current). The current PI output is taken as the mean chopper voltage, so
// alpha = (u/Vin + 1)/2 clipped to [0, 1], written to the PWM as alpha*2^16.
// Each interrupt reads the latest Im/Wm from the emulator streams.
// The speed reference is 100 rad/s. Controller faults of 15, 30 and 60 us
// (PWM inhibited) are inserted at 0.6, 0.8 and 1.0 s. Checks: the speed
// reaches and holds 100 rad/s within 2 % over the last 0.4 s, the current
// stays within the limit plus margin, and each fault produced Vh = 0 steps.
module tb_hil_closed_loop_workload;
  import fp32_pkg::*;
  import fp32_ref_pkg::*;

  localparam longint T_END   = 150_000_000;   // cycles, 1.5 s at 100 MHz
  localparam int     T_CUR   = 30_000;        // 300 us
  localparam int     T_SPD   = 2_000_000;     // 20 ms
  localparam real    W_REF   = 100.0;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        im_en = 0, wm_en = 0, pwm_wr_en = 0, pwm_wr_addr = 0, pwm_inhibit = 0;
  logic [31:0] pwm_wr_data = 0;
  fp32_t       im_data, wm_data;
  logic        im_rdy, wm_rdy, im_eos, wm_eos, alpha_rdy, c0, c1;
  dbg_pins_t   dbg;

  dcm_emulator_system dut (
    .clk, .rst,
    .alpha_data(32'h0), .alpha_eos(1'b0), .alpha_en(1'b0), .alpha_rdy,
    .im_en, .im_data, .im_rdy, .im_eos,
    .wm_en, .wm_data, .wm_rdy, .wm_eos,
    .pwm_wr_en, .pwm_wr_addr, .pwm_wr_data, .pwm_inhibit,
    .c0, .c1, .dbg);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int zero_steps = 0;
  always @(negedge clk) if (dbg.step_tick && !c0 && !c1) zero_steps++;

  initial begin
    longint cyc = 0;
    real im = 0, wm = 0, iref = 0, u = 0, e_i_prev = 0, e_w_prev = 0, alpha;
    real im_max = 0, w_min = 1e9, w_max = -1e9;
    int  z0;
    repeat (4) @(negedge clk);
    rst = 0;
    pwm_wr_en = 1; pwm_wr_addr = 0; pwm_wr_data = 32768; @(negedge clk);
    pwm_wr_en = 1; pwm_wr_addr = 1; pwm_wr_data = 1;     @(negedge clk);
    pwm_wr_en = 0;
    while (cyc < T_END) begin
      @(negedge clk);
      cyc++;
      pwm_wr_en = 0; im_en = 0; wm_en = 0;
      // fault insertion
      if (cyc == 60_000_000 || cyc == 80_000_000 || cyc == 100_000_000) begin
        pwm_inhibit = 1; z0 = zero_steps;
      end
      if ((cyc == 60_000_000 + 1500) || (cyc == 80_000_000 + 3000) ||
          (cyc == 100_000_000 + 6000)) begin
        pwm_inhibit = 0;
        check(zero_steps - z0 >= 14, $sformatf("fault gave %0d zero steps", zero_steps - z0));
      end
      if (cyc % T_CUR == 0) begin
        // read the newest motor state (overwritten every 1 us)
        im = f2r(im_data);
        wm = f2r(wm_data);
        if (im_rdy) begin im_en = 1; wm_en = 1; end
        if (cyc % T_SPD == 0) begin
          real e;
          e = W_REF - wm;
          iref = iref + 0.142 * e - 0.1111 * e_w_prev;
          e_w_prev = e;
          if (iref > 13.0) iref = 13.0;
          if (iref < -13.0) iref = -13.0;
          if (cyc % 10_000_000 == 0)
            $display("t = %0d ms: Wm %f rad/s, Im %f A, Iref %f A", cyc / 100_000, wm, im, iref);
          if (cyc >= 110_000_000) begin
            if (wm < w_min) w_min = wm;
            if (wm > w_max) w_max = wm;
          end
        end
        begin
          real e;
          e = iref - im;
          u = u + 1.1737 * e - 1.0150 * e_i_prev;
          e_i_prev = e;
          alpha = (u / 60.0 + 1.0) / 2.0;
          if (alpha < 0.0) alpha = 0.0;
          if (alpha > 65535.0 / 65536.0) alpha = 65535.0 / 65536.0;
          pwm_wr_en = 1; pwm_wr_addr = 0; pwm_wr_data = 32'(int'(alpha * 65536.0));
        end
        if (im > im_max) im_max = im;
        if (-im > im_max) im_max = -im;
      end
    end
    check(w_min > 0.98 * W_REF && w_max < 1.02 * W_REF,
          $sformatf("speed over the last 0.4 s in [%f, %f]", w_min, w_max));
    check(im_max < 20.0, $sformatf("peak current %f", im_max));
    $display("speed over the last 0.4 s: %f .. %f rad/s, peak |Im| %f A", w_min, w_max, im_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (T_END + 1000) @(negedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
