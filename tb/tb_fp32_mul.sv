// tb_fp32_mul -- self-checking test of the float32 multiplier.
// Streams one operand pair per cycle (directed cases, then random values
// across a wide exponent range), compares every product bit for bit with a
// double-precision reference rounded to float32, and checks that each
// result appears exactly LAT cycles after its operands.
module tb_fp32_mul;
  import fp32_ref_pkg::*;

  localparam int LAT = 5;
  localparam int NRAND = 20000;

  logic clk = 0, rst = 1, in_valid = 0;
  logic [31:0] a = 0, b = 0, y;
  logic out_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_mul #(.LAT(LAT)) dut (.clk, .rst, .in_valid, .a, .b, .out_valid, .y);

  logic [31:0] exp_q[$];
  int          t_q[$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid && !rst) begin
    logic [31:0] e;
    int t;
    e = exp_q.pop_front();
    t = t_q.pop_front();
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("MISMATCH y=%h exp=%h", y, e);
    end
    checks++;
    if (cyc - t != LAT) begin
      failures++;
      $display("LATENCY %0d expected %0d", cyc - t, LAT);
    end
  end

  function automatic logic [31:0] rnd_f(int emin, int emax);
    logic [7:0] e;
    e = 8'(emin + ($urandom % (emax - emin + 1)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  task automatic drive(logic [31:0] x, logic [31:0] z, logic [31:0] e);
    a <= x; b <= z; in_valid <= 1;
    exp_q.push_back(e);
    t_q.push_back(cyc + 1);
    @(posedge clk);
    in_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    drive(32'h42F00000, 32'h3F400000, 32'h42B40000);   // 120 * 0.75 = 90
    drive(32'h3A0309B5, 32'h41F00000, 32'h3C75B233);   // gamma * 30
    drive(32'h00000000, 32'h3F800000, 32'h00000000);   // 0 * 1
    drive(32'h80000000, 32'h3F800000, 32'h80000000);   // -0 * 1
    drive(32'h3F800000, 32'hBF7FFFFF, 32'hBF7FFFFF);   // 1 * x
    drive(32'h3FFFFFFF, 32'h3FFFFFFF, fmul(32'h3FFFFFFF, 32'h3FFFFFFF)); // round carry
    drive(32'h7F000000, 32'h7F000000, 32'h7F800000);   // overflow -> inf
    drive(32'h00800000, 32'h00800000, 32'h00000000);   // underflow -> 0
    drive(32'h7F800000, 32'h00000000, 32'h7FC00000);   // inf * 0 -> NaN
    drive(32'h3F800003, 32'h40400000, 32'h40400004);   // exact tie, stays even
    drive(32'h3F800001, 32'h40400000, 32'h40400002);   // exact tie, rounds to even
    // short significands: products often end in an exact tie
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] x, z;
      x = {1'($urandom), 8'(100 + $urandom % 50), 13'($urandom), 10'd0};
      z = {1'($urandom), 8'(100 + $urandom % 50), 13'($urandom), 10'd0};
      a <= x; b <= z; in_valid <= 1;
      exp_q.push_back(fmul(x, z));
      t_q.push_back(cyc + 1);
      @(posedge clk);
    end
    for (int i = 0; i < NRAND; i++) begin
      logic [31:0] x, z;
      x = rnd_f(70, 180);
      z = rnd_f(70, 180);
      a <= x; b <= z; in_valid <= 1;
      exp_q.push_back(fmul(x, z));
      t_q.push_back(cyc + 1);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NRAND + 10000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
