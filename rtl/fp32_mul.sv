// fp32_mul -- pipelined IEEE-754 single-precision multiplier.
//
// One of the five float multipliers of the emulator datapath. The product of
// the two 24-bit significands is normalised by at most one position and
// rounded to nearest, ties to even. The arithmetic is one combinational
// stage followed by LAT pipeline registers (left for the synthesis tool to
// retime), so a new operand pair can enter every cycle and its result leaves
// exactly LAT cycles later together with out_valid.
//
// Special values, a design choice: subnormal inputs count as zero and
// results below the normal range flush to a signed zero; overflow gives a
// signed infinity; NaN inputs or 0*Inf give a quiet NaN. The latency is
// likewise this design's choice; the reference implementation was produced
// by a C-to-HDL tool whose internal cores are not described.
module fp32_mul
  import fp32_pkg::*;
#(
  parameter int unsigned LAT = 5            // pipeline depth, >= 1
) (
  input  logic  clk,
  input  logic  rst,                        // clears the valid pipeline only
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  function automatic fp32_t mul_f(fp32_t x, fp32_t z);
    logic        s;
    logic [7:0]  ex, ez;
    logic [23:0] mx, mz;
    logic [47:0] p;
    logic [22:0] frac;
    logic        g, st;
    logic signed [10:0] e;
    logic [23:0] r;
    s  = x[31] ^ z[31];
    ex = x[30:23];
    ez = z[30:23];
    mx = {1'b1, x[22:0]};
    mz = {1'b1, z[22:0]};
    if ((ex == 8'hFF && x[22:0] != 0) || (ez == 8'hFF && z[22:0] != 0))
      return FP32_QNAN;
    if (ex == 8'hFF || ez == 8'hFF) begin
      if (ex == 8'd0 || ez == 8'd0) return FP32_QNAN;   // 0 * Inf
      return {s, 8'hFF, 23'd0};
    end
    if (ex == 8'd0 || ez == 8'd0) return {s, 31'd0};
    p = mx * mz;
    e = 11'(signed'({3'b000, ex})) + 11'(signed'({3'b000, ez})) - 11'sd127;
    if (p[47]) begin
      frac = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      frac = p[45:23]; g = p[22]; st = |p[21:0];
    end
    r = {1'b0, frac} + 24'((g && (st || frac[0])) ? 1 : 0);
    if (r[23]) e = e + 11'sd1;                           // rounding carried out
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], r[22:0]};
  endfunction

  fp32_t pipe_y [LAT];
  logic  pipe_v [LAT];

  always_ff @(posedge clk) begin
    pipe_y[0] <= mul_f(a, b);
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
