// tb_dcm_emulator_system -- end-to-end test of the HIL hardware at its
// default sizes (100 MHz clock, 16 kHz PWM, one emulator step per 1 us).
//
// The testbench plays the processor: it enables the PWM, writes duty
// cycles, reads the Im/Wm streams only every 15 us (so most results are
// overwritten unread), and inserts three controller faults by holding the
// PWM inhibited for 15, 30 and 60 us. It watches the debug pins: at every
// step tick it takes the C0/C1 levels the emulator samples, advances its own
// float32 model of the motor, and compares the emulator's Im and Wm with it
// when the step ends. It also checks the step pace (100 cycles), the step
// latency, the PWM duty seen on C0, and that the Vh = 0 steps counted during
// each fault match the fault length. Every mechanism (Vh = +Vin, -Vin, 0,
// overwrite, read, duty update, fault) must have occurred.
module tb_dcm_emulator_system;
  import fp32_pkg::*;
  import fp32_ref_pkg::*;

  localparam int STEP = 100;          // cycles per emulator step
  localparam int PWM_PERIOD = 6250;
  localparam int LAT = 5 + 2*7 + 1;   // step_en -> results, cycles

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

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------- step-by-step scoreboard
  fp32_t r_im = 0, r_wm = 0;
  int    last_tick = -1, t_start = -1, steps = 0;
  int    n_vh_pos = 0, n_vh_neg = 0, n_vh_zero = 0, n_overwrite = 0, n_reads = 0;
  int    n_zero_in_fault = 0;
  bit    in_fault = 0, was_busy = 0;

  always @(negedge clk) if (!rst) begin
    cyc++;
    if (dbg.step_tick) begin
      fp32_t vh;
      if (last_tick >= 0) check(cyc - last_tick == STEP, "step pace");
      last_tick = cyc;
      check(!dbg.busy, "tick while busy");
      if (c0 && !c1)      begin vh = VIN_60V;        n_vh_pos++;  end
      else if (!c0 && c1) begin vh = fneg(VIN_60V);  n_vh_neg++;  end
      else                begin vh = FP32_ZERO;      n_vh_zero++; if (in_fault) n_zero_in_fault++; end
      check(c0 == dbg.c0 && c1 == dbg.c1, "debug pins");
      model_step(COEF_A, COEF_BETA, COEF_GAMMA, COEF_LAMBDA, COEF_MU, COEF_NU, vh, r_im, r_wm);
      t_start = cyc;
      if (im_rdy && !im_en) n_overwrite++;
    end
    if (was_busy && !dbg.busy) begin
      steps++;
      check(cyc - t_start == LAT + 1, $sformatf("step latency %0d", cyc - t_start));
      check(im_rdy && wm_rdy, "results ready");
      check(im_data == r_im, $sformatf("im %h expected %h", im_data, r_im));
      check(wm_data == r_wm, $sformatf("wm %h expected %h", wm_data, r_wm));
    end
    was_busy = dbg.busy;
  end

  // processor side: read the latest Im/Wm every 15 us
  initial begin
    wait (!rst);
    forever begin
      repeat (1500) @(negedge clk);
      if (im_rdy && wm_rdy) begin
        im_en = 1; wm_en = 1;
        @(negedge clk);
        im_en = 0; wm_en = 0;
        n_reads++;
      end
    end
  end

  task automatic pwm_write(logic addr, logic [31:0] data);
    pwm_wr_en = 1; pwm_wr_addr = addr; pwm_wr_data = data;
    @(negedge clk);
    pwm_wr_en = 0;
  endtask

  // C0 high cycles over one PWM period
  task automatic measure_duty(output int h0);
    @(posedge dbg.pwm_period);
    @(negedge clk);
    h0 = 0;
    for (int i = 0; i < PWM_PERIOD; i++) begin
      if (c0) h0++;
      check(c0 != c1 || in_fault, "C0/C1 not complementary");
      @(negedge clk);
    end
  endtask

  task automatic fault(int us);
    int z0;
    repeat (37 * STEP) @(negedge clk);
    z0 = n_zero_in_fault;
    in_fault = 1;
    pwm_inhibit = 1;
    repeat (us * STEP) @(negedge clk);
    pwm_inhibit = 0;
    @(negedge clk);
    in_fault = 0;
    check(n_zero_in_fault - z0 >= us - 1 && n_zero_in_fault - z0 <= us + 1,
          $sformatf("%0d us fault gave %0d Vh=0 steps", us, n_zero_in_fault - z0));
  endtask

  initial begin
    int h0;
    repeat (5) @(negedge clk);
    rst = 0;
    pwm_write(0, 45875);               // alpha = 0.7
    pwm_write(1, 1);                   // enable
    measure_duty(h0);
    measure_duty(h0);
    check(h0 == (45875 * PWM_PERIOD) >> 16, $sformatf("duty 0.7: %0d", h0));
    repeat (10 * PWM_PERIOD) @(negedge clk);
    check(f2r(wm_data) > 0.0, "motor accelerates forward at alpha 0.7");
    fault(15);
    fault(30);
    fault(60);
    pwm_write(0, 19661);               // alpha = 0.3: mean Vh negative
    measure_duty(h0);
    measure_duty(h0);
    check(h0 == (19661 * PWM_PERIOD) >> 16, $sformatf("duty 0.3: %0d", h0));
    repeat (20 * PWM_PERIOD) @(negedge clk);
    check(steps > 2000, $sformatf("only %0d steps", steps));
    check(n_vh_pos > 100 && n_vh_neg > 100, "both chopper polarities used");
    check(n_vh_zero >= 100, "fault steps");
    check(n_overwrite > 1000, "results overwritten");
    check(n_reads > 100, "processor reads");
    check(!alpha_rdy && !im_eos && !wm_eos, "open-loop stream idle");
    $display("steps %0d: Vh +%0d -%0d 0:%0d, overwritten %0d, reads %0d, Im %f Wm %f",
             steps, n_vh_pos, n_vh_neg, n_vh_zero, n_overwrite, n_reads,
             f2r(im_data), f2r(wm_data));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(negedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
