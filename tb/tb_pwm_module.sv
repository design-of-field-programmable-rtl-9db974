// tb_pwm_module -- self-checking test of the chopper PWM.
// At the default 100 MHz / 16 kHz (6250-cycle period) it checks, period by
// period: the PWM period, that C0 and C1 are complementary, the number of
// C0-high cycles against alpha*period for several duty cycles (including
// 0 and the largest code), that a new alpha waits for the next period, that
// the outputs stay low until enabled and that inhibit forces both low.
module tb_pwm_module;
  localparam int PERIOD = 100_000_000 / 16_000;
  logic clk = 0, rst = 1, wr_en = 0, wr_addr = 0, inhibit = 0;
  logic [31:0] wr_data = 0;
  logic c0, c1, period_start;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pwm_module dut (.clk, .rst, .wr_en, .wr_addr, .wr_data, .inhibit, .c0, .c1, .period_start);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic write(logic addr, logic [31:0] data);
    wr_en = 1; wr_addr = addr; wr_data = data;
    @(negedge clk);
    wr_en = 0;
  endtask

  // measure one full period starting at a period_start pulse
  task automatic measure(output int high0, output int high1, output int len);
    while (!period_start) @(negedge clk);
    high0 = 0; high1 = 0; len = 0;
    do begin
      if (c0) high0++;
      if (c1) high1++;
      check(!(c0 && c1), "C0 and C1 both high");
      len++;
      @(negedge clk);
    end while (!period_start);
  endtask

  initial begin
    int h0, h1, len;
    int duty[6] = '{16384, 45875, 0, 65535, 32768, 6554};
    repeat (3) @(negedge clk);
    rst = 0;
    write(0, 32768);
    measure(h0, h1, len);
    check(h0 == 0 && h1 == 0, "outputs active before enable");
    write(1, 1);
    foreach (duty[i]) begin
      int exp_h;
      write(0, duty[i]);
      measure(h0, h1, len);                     // period in which it was written
      measure(h0, h1, len);
      exp_h = (duty[i] * PERIOD) >> 16;
      check(len == PERIOD, $sformatf("period %0d", len));
      check(h0 == exp_h, $sformatf("duty %0d: C0 high %0d expected %0d", duty[i], h0, exp_h));
      check(h1 == PERIOD - exp_h, $sformatf("C1 high %0d", h1));
    end
    // a write in mid-period must not change the running period
    write(0, 16384);
    measure(h0, h1, len);
    measure(h0, h1, len);
    repeat (100) @(negedge clk);
    write(0, 49152);
    while (!period_start) begin
      @(negedge clk);
    end
    measure(h0, h1, len);
    check(h0 == (49152 * PERIOD) >> 16, "new duty not applied at period start");
    // inhibit (controller fault)
    inhibit = 1;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 1500; i++) begin
      check(!c0 && !c1, "output during inhibit");
      @(negedge clk);
    end
    inhibit = 0;
    measure(h0, h1, len);
    check(h0 == (49152 * PERIOD) >> 16, "after inhibit");
    write(1, 0);
    repeat (2) @(negedge clk);
    check(!c0 && !c1, "disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30 * PERIOD) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
