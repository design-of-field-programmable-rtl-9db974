// tb_step_timer -- self-checking test of the step pacing timer.
// At 100 MHz and 1000 ns the timer must give single-cycle pulses exactly
// 100 cycles apart, the first one 100 cycles after reset is released, and
// must restart its phase on a second reset.
module tb_step_timer;
  localparam int PERIOD = 100;
  logic clk = 0, rst = 1, tick;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  step_timer dut (.clk, .rst, .tick);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, last = -1, nticks = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int round = 0; round < 2; round++) begin
      cyc = 0; last = -1;
      for (int i = 0; i < 50 * PERIOD + 5; i++) begin
        @(negedge clk);
        cyc++;
        if (tick) begin
          nticks++;
          if (last < 0) check(cyc == PERIOD, $sformatf("first tick at %0d", cyc));
          else          check(cyc - last == PERIOD, $sformatf("tick spacing %0d", cyc - last));
          last = cyc;
        end
      end
      check(nticks == 50 * (round + 1), $sformatf("tick count %0d", nticks));
      rst = 1;
      @(negedge clk);
      check(!tick, "tick during reset");
      rst = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
