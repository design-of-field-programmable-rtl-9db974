// fp32_add -- pipelined IEEE-754 single-precision adder / subtractor.
//
// Used for the four additions of the emulator step: the chopper term
// (2*Vin*alpha) - Vin, the two sums of the current equation and the sum of
// the speed equation. The operand of larger magnitude is kept, the other is
// shifted right into a 27-bit field (24-bit significand plus guard, round
// and sticky bits), the two are added or subtracted, the result is
// renormalised with a leading-zero count and rounded to nearest, ties to
// even. As in fp32_mul, one combinational stage is followed by LAT pipeline
// registers: one operation per cycle, result and out_valid LAT cycles later.
//
// Special values, a design choice: subnormals count as zero, underflow
// flushes to zero, exact cancellation returns +0, overflow returns infinity,
// Inf - Inf and NaN operands return a quiet NaN.
module fp32_add
  import fp32_pkg::*;
#(
  parameter int unsigned LAT = 7            // pipeline depth, >= 1
) (
  input  logic  clk,
  input  logic  rst,                        // clears the valid pipeline only
  input  logic  in_valid,
  input  logic  sub,                        // 1: y = a - b, 0: y = a + b
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  function automatic int unsigned lzc27(logic [26:0] v);
    for (int i = 26; i >= 0; i--)
      if (v[i]) return 26 - i;
    return 27;
  endfunction

  function automatic fp32_t add_f(fp32_t x, fp32_t z);
    fp32_t       big, sml;
    logic [7:0]  eb, es;
    logic [7:0]  d;
    logic [49:0] sh;
    logic [26:0] mb, ms, n;
    logic [27:0] sum;
    logic        eff_sub;
    logic signed [10:0] e;
    int unsigned lz;
    logic [24:0] r;
    // NaN / infinity
    if ((x[30:23] == 8'hFF && x[22:0] != 0) || (z[30:23] == 8'hFF && z[22:0] != 0))
      return FP32_QNAN;
    if (x[30:23] == 8'hFF && z[30:23] == 8'hFF)
      return (x[31] == z[31]) ? x : FP32_QNAN;
    if (x[30:23] == 8'hFF) return x;
    if (z[30:23] == 8'hFF) return z;
    // zeros and subnormals
    if (x[30:23] == 8'd0 && z[30:23] == 8'd0) return {x[31] & z[31], 31'd0};
    if (x[30:23] == 8'd0) return z;
    if (z[30:23] == 8'd0) return x;
    // order by magnitude
    if (x[30:0] >= z[30:0]) begin big = x; sml = z; end
    else                    begin big = z; sml = x; end
    eb = big[30:23];
    es = sml[30:23];
    d  = eb - es;
    mb = {1'b1, big[22:0], 3'b000};
    sh = {1'b1, sml[22:0], 26'd0} >> d;
    ms = {sh[49:24], |sh[23:0]};                // keep a sticky bit
    eff_sub = big[31] ^ sml[31];
    sum = eff_sub ? ({1'b0, mb} - {1'b0, ms}) : ({1'b0, mb} + {1'b0, ms});
    if (sum == 28'd0) return FP32_ZERO;
    e = 11'(signed'({3'b000, eb}));
    if (sum[27]) begin
      n = {sum[27:2], sum[1] | sum[0]};
      e = e + 11'sd1;
    end else begin
      lz = lzc27(sum[26:0]);
      n  = sum[26:0] << lz;
      e  = e - 11'(lz);
    end
    // round to nearest even on n[2] (guard) and n[1:0] (round, sticky)
    r = {1'b0, n[26:3]} + 25'((n[2] && (n[1] || n[0] || n[3])) ? 1 : 0);
    if (r[24]) e = e + 11'sd1;
    if (e >= 11'sd255) return {big[31], 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {big[31], 31'd0};
    return {big[31], e[7:0], r[22:0]};
  endfunction

  fp32_t pipe_y [LAT];
  logic  pipe_v [LAT];

  always_ff @(posedge clk) begin
    pipe_y[0] <= add_f(a, sub ? {~b[31], b[30:0]} : b);
    for (int i = 1; i < LAT; i++) pipe_y[i] <= pipe_y[i-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      pipe_v[0] <= in_valid;
      for (int i = 1; i < LAT; i++) pipe_v[i] <= pipe_v[i-1];
    end
  end

  assign y         = pipe_y[LAT-1];
  assign out_valid = pipe_v[LAT-1];

endmodule
