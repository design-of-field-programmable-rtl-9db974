// tb_dcm_emulator -- self-checking test of the DC-machine emulator core.
//
// Two instances:
//  u_eq4 - open-loop chopper (Vh from a float alpha), lambda = 1.46e-4.
//          The first two steps with alpha = 0.75 from rest must give the
//          published simulation values im = 3C75B233, wm = 00000000 and
//          im = 3CF5A27A, wm = 3612EE22 bit for bit. Then a random alpha
//          sequence with a randomly stalling reader is checked step by step
//          against a float32 reference model, including the step latency
//          and the back-pressure rule; finally the alpha stream is closed
//          and both output eos flags must rise.
//  u_hil - C0/C1 chopper, default coefficients but nu = 0.001 so the
//          nu*sign(Wm) adder is exercised. Steps are paced by step_en pulses,
//          with all four C0/C1 combinations; extra pulses while busy must be
//          ignored and unread results must be overwritten.
// Inputs are driven and outputs sampled on the falling clock edge.
module tb_dcm_emulator;
  import fp32_pkg::*;
  import fp32_ref_pkg::*;

  localparam int MUL_LAT = 5, ADD_LAT = 7;
  localparam int LAT_EQ4  = 2*MUL_LAT + 3*ADD_LAT + 1;   // cycles, alpha accept -> rdy
  localparam int LAT_C0C1 = MUL_LAT + 2*ADD_LAT + 1;     // cycles, step_en -> rdy
  localparam fp32_t LAMBDA_SIM = 32'h3919_1794;            // 1.46e-4
  localparam fp32_t NU_TEST    = 32'h3A83_126F;            // 0.001

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------------------------------------------------------- u_eq4
  fp32_t a_data = 0;
  logic  a_eos = 0, a_en = 0, a_rdy;
  logic  e_im_en = 0, e_wm_en = 0;
  fp32_t e_im, e_wm;
  logic  e_im_rdy, e_wm_rdy, e_im_eos, e_wm_eos, e_busy;

  dcm_emulator #(.CHOPPER(CHOP_ALPHA_EQ4), .LAMBDA(LAMBDA_SIM),
                 .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_eq4 (
    .clk, .reset,
    .p_Producer_alpha_data(a_data), .p_Producer_alpha_eos(a_eos),
    .p_Consumer_alpha_en(a_en), .p_Producer_alpha_rdy(a_rdy),
    .p_Consumer_im_en(e_im_en), .p_Consumer_im_data(e_im),
    .p_Consumer_im_rdy(e_im_rdy), .p_Consumer_im_eos(e_im_eos),
    .p_Consumer_wm_en(e_wm_en), .p_Consumer_wm_data(e_wm),
    .p_Consumer_wm_rdy(e_wm_rdy), .p_Consumer_wm_eos(e_wm_eos),
    .c0(1'b0), .c1(1'b0), .step_en(1'b0), .busy(e_busy));

  // ---------------------------------------------------------------- u_hil
  logic  c0 = 0, c1 = 0, step_en = 0, h_im_en = 0, h_wm_en = 0;
  fp32_t h_im, h_wm;
  logic  h_im_rdy, h_wm_rdy, h_im_eos, h_wm_eos, h_busy, h_alpha_rdy;

  dcm_emulator #(.CHOPPER(CHOP_C0C1), .NU(NU_TEST),
                 .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_hil (
    .clk, .reset,
    .p_Producer_alpha_data(32'h0), .p_Producer_alpha_eos(1'b0),
    .p_Consumer_alpha_en(1'b0), .p_Producer_alpha_rdy(h_alpha_rdy),
    .p_Consumer_im_en(h_im_en), .p_Consumer_im_data(h_im),
    .p_Consumer_im_rdy(h_im_rdy), .p_Consumer_im_eos(h_im_eos),
    .p_Consumer_wm_en(h_wm_en), .p_Consumer_wm_data(h_wm),
    .p_Consumer_wm_rdy(h_wm_rdy), .p_Consumer_wm_eos(h_wm_eos),
    .c0, .c1, .step_en, .busy(h_busy));

  // reference state
  fp32_t r_im = 0, r_wm = 0;
  int n_stall = 0, n_overwrite = 0, n_vh[4] = '{0, 0, 0, 0};

  // one open-loop step: push alpha, wait for both results, read them
  task automatic eq4_step(fp32_t alpha, int read_delay, bit chk_lat);
    int t0;
    fp32_t vh;
    // wait for rdy, then offer alpha
    while (!a_rdy) @(negedge clk);
    a_data = alpha; a_en = 1;
    t0 = cyc;
    @(negedge clk);
    a_en = 0;
    vh = fadd(fmul(32'h42F00000, alpha), fneg(VIN_60V));
    model_step(COEF_A, COEF_BETA, COEF_GAMMA, LAMBDA_SIM, COEF_MU, COEF_NU, vh, r_im, r_wm);
    while (!e_im_rdy) begin
      @(negedge clk);
      if (cyc - t0 > 200) break;
    end
    if (chk_lat) check(cyc - t0 == LAT_EQ4 + 1,
                       $sformatf("eq4 latency %0d, expected %0d", cyc - t0, LAT_EQ4 + 1));
    check(e_wm_rdy, "wm_rdy with im_rdy");
    check(e_im == r_im, $sformatf("eq4 im %h expected %h", e_im, r_im));
    check(e_wm == r_wm, $sformatf("eq4 wm %h expected %h", e_wm, r_wm));
    // stalled reader: the emulator must not accept a new alpha
    for (int i = 0; i < read_delay; i++) begin
      check(!a_rdy, "alpha accepted over unread results");
      n_stall++;
      @(negedge clk);
    end
    e_im_en = 1; e_wm_en = 1;
    @(negedge clk);
    e_im_en = 0; e_wm_en = 0;
    check(!e_im_rdy && !e_wm_rdy, "read did not clear rdy");
  endtask

  initial begin : eq4_thread
    repeat (4) @(negedge clk);
    reset = 0;
    @(negedge clk);
    // published first two steps (alpha = 0.75)
    eq4_step(32'h3F400000, 0, 1);
    check(e_im == 32'h3C75B233 && e_wm == 32'h00000000, "first published step");
    eq4_step(32'h3F400000, 3, 1);
    check(e_im == 32'h3CF5A27A && e_wm == 32'h3612EE22, "second published step");
    // random duty cycles in [0,1], random stalls
    for (int k = 0; k < 400; k++)
      eq4_step(r2f(real'($urandom % 10001) / 10000.0), $urandom % 4, 1);
    // close the stream
    while (!a_rdy) @(negedge clk);
    a_eos = 1; a_en = 1;
    @(negedge clk);
    a_en = 0; a_eos = 0;
    @(negedge clk);
    check(e_im_eos && e_wm_eos, "eos not propagated");
    repeat (5) begin
      check(!a_rdy && !e_im_rdy, "activity after eos");
      @(negedge clk);
    end
  end

  // ------------------------------------------------------------ HIL thread
  fp32_t h_im_r = 0, h_wm_r = 0;
  initial begin : hil_thread
    int steps = 0;
    repeat (6) @(negedge clk);
    for (int k = 0; k < 400; k++) begin
      int t0, sel;
      fp32_t vh;
      sel = $urandom % 4;
      c0 = sel[0]; c1 = sel[1];
      n_vh[sel]++;
      step_en = 1;
      t0 = cyc;
      @(negedge clk);
      step_en = 0;
      c0 = 1'($urandom); c1 = 1'($urandom);    // must not matter any more
      vh = (sel == 1) ? VIN_60V : (sel == 2) ? fneg(VIN_60V) : FP32_ZERO;
      model_step(COEF_A, COEF_BETA, COEF_GAMMA, COEF_LAMBDA, COEF_MU, NU_TEST, vh,
                 h_im_r, h_wm_r);
      // a pulse while busy is ignored
      if (k % 7 == 3) begin
        repeat (3) @(negedge clk);
        step_en = 1;
        @(negedge clk);
        step_en = 0;
      end
      while (h_busy) @(negedge clk);
      check(cyc - t0 == LAT_C0C1 + 1,
            $sformatf("hil latency %0d, expected %0d", cyc - t0, LAT_C0C1 + 1));
      check(h_im_rdy && h_wm_rdy, "hil rdy");
      check(h_im == h_im_r, $sformatf("hil im %h expected %h", h_im, h_im_r));
      check(h_wm == h_wm_r, $sformatf("hil wm %h expected %h", h_wm, h_wm_r));
      steps++;
      // read only every third result; the others are overwritten
      if (k % 3 == 0) begin
        h_im_en = 1; h_wm_en = 1;
        @(negedge clk);
        h_im_en = 0; h_wm_en = 0;
        check(!h_im_rdy, "hil read did not clear rdy");
      end else begin
        n_overwrite++;
      end
      repeat ($urandom % 10) @(negedge clk);
    end
    check(!h_alpha_rdy && !h_im_eos && !h_wm_eos, "hil stream flags");
    wait (!e_busy && e_im_eos);
    repeat (10) @(negedge clk);
    check(n_stall > 100, "back-pressure never exercised");
    check(n_overwrite > 100, "overwrite never exercised");
    for (int i = 0; i < 4; i++) check(n_vh[i] > 20, "a C0/C1 combination never used");
    $display("stall cycles %0d, overwrites %0d, Vh cases %0d/%0d/%0d/%0d",
             n_stall, n_overwrite, n_vh[0], n_vh[1], n_vh[2], n_vh[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(negedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
