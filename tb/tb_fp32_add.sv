// tb_fp32_add -- self-checking test of the float32 adder/subtractor.
// Streams one operation per cycle: directed cases (the Vh subtraction,
// exact cancellation, rounding carries, infinities) and random additions
// and subtractions whose exponents are close (cancellation) or far apart
// (alignment and sticky bit). Every result is compared bit for bit with a
// double-precision reference rounded to float32, and must appear exactly
// LAT cycles after its operands.
module tb_fp32_add;
  import fp32_ref_pkg::*;

  localparam int LAT = 7;
  localparam int NRAND = 30000;

  logic clk = 0, rst = 1, in_valid = 0, sub = 0;
  logic [31:0] a = 0, b = 0, y;
  logic out_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_add #(.LAT(LAT)) dut (.clk, .rst, .in_valid, .sub, .a, .b, .out_valid, .y);

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

  task automatic drive(logic [31:0] x, logic [31:0] z, logic s, logic [31:0] e);
    a <= x; b <= z; sub <= s; in_valid <= 1;
    exp_q.push_back(e);
    t_q.push_back(cyc + 1);
    @(posedge clk);
    in_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    drive(32'h42B40000, 32'h42700000, 1, 32'h41F00000);   // 90 - 60 = 30
    drive(32'h42700000, 32'h42700000, 1, 32'h00000000);   // x - x = +0
    drive(32'h3F800000, 32'h33800000, 0, 32'h3F800000);   // 1 + 2^-24: tie, even
    drive(32'h3F800001, 32'h33800000, 0, 32'h3F800002);   // tie, round up to even
    drive(32'h3FFFFFFF, 32'h34000000, 0, 32'h40000000);   // carry into exponent
    drive(32'h3F800000, 32'h00000000, 1, 32'h3F800000);   // x - 0
    drive(32'h00000000, 32'h3F800000, 1, 32'hBF800000);   // 0 - x
    drive(32'h7F7FFFFF, 32'h7F7FFFFF, 0, 32'h7F800000);   // overflow
    drive(32'h7F800000, 32'h7F800000, 1, 32'h7FC00000);   // inf - inf
    drive(32'h3C75B233, 32'h3C75B233, 0, 32'h3CF5B233);   // doubling
    for (int i = 0; i < NRAND; i++) begin
      logic [31:0] x, z;
      logic [7:0]  ex;
      logic        s;
      int          d;
      ex = 8'(60 + ($urandom % 120));
      case ($urandom % 4)
        0: d = 0;
        1: d = $urandom % 3;
        2: d = $urandom % 30;
        default: d = $urandom % 60;
      endcase
      x = {1'($urandom), ex, 23'($urandom)};
      z = {1'($urandom), 8'(int'(ex) - d), 23'($urandom)};
      if ($urandom % 2) begin logic [31:0] t; t = x; x = z; z = t; end
      s = 1'($urandom);
      a <= x; b <= z; sub <= s; in_valid <= 1;
      exp_q.push_back(s ? fadd(x, fneg(z)) : fadd(x, z));
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
    repeat (NRAND + 1000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
