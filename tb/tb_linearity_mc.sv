// tb_linearity_mc -- Monte Carlo test of scale linearisation in hardware.
//
// Follows the simulation study of the source: for each trial, random
// distortion parameters are drawn (gains Kx, Ky in 0.75..1.25, offsets x0, y0
// in -0.5..0.5, quadrature error beta in 0..pi/6) and 32+-7 random phases in
// (-pi,pi) are turned into  X = Kx*cos(p) + x0 + e,  Y = Ky*sin(p + beta) + y0 + e
// with e uniform in +-0.005, scaled to 12000 ADC codes per unit. The
// correction coefficients come from the drawn parameters (standing in for
// the processor's ellipse fit) and are quantised to Q3.14; the samples pass
// through lin_tran and phase_cordic.
// Checked: the hardware phase agrees within 0.01 degrees with atan2 of the
// same noisy samples corrected in real arithmetic, i.e. fixed-point
// correction and CORDIC add nothing visible to the error budget. Reported:
// the 68.27 / 95.45 / 99.73 percentiles of the phase error against the true
// phase, which are set by the injected noise (the source's study, which
// also includes the fit, quotes 0.19 / 0.22 / 0.24 degrees).
module tb_linearity_mc;
  import ifm_pkg::*;

  localparam real PI     = 3.14159265358979;
  localparam real UNIT   = 12000.0;
  localparam real R      = 20000.0;
  localparam int  TRIALS = 300;
  localparam int  ITER   = 18;

  logic clk = 1'b0, rst_n = 1'b0;
  lin_coef_t coef;
  logic in_valid, lin_valid, out_valid;
  quad_t in_xy;
  lin_t lin_x, lin_y;
  phase_t out_phase;
  mag_t out_mag;
  int checks = 0, failures = 0;

  lin_tran u_lin (.clk, .rst_n, .coef, .in_valid, .in_xy,
                  .out_valid(lin_valid), .out_x(lin_x), .out_y(lin_y));
  phase_cordic #(.ITER(ITER)) u_ph (.clk, .rst_n, .in_valid(lin_valid), .in_x(lin_x), .in_y(lin_y),
                                    .out_valid, .out_phase, .out_mag);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1_000_000)) / 1.0e6;
  endfunction

  function automatic real wrap_deg(real d);
    while (d > 180.0)   d -= 360.0;
    while (d < -180.0)  d += 360.0;
    return (d < 0) ? -d : d;
  endfunction

  typedef struct { real true_deg; real ideal_deg; } exp_t;
  exp_t exp_q[$];
  real  err_true[$];
  real  worst_hw = 0.0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      real got, dh;
      e   = exp_q.pop_front();
      got = real'(out_phase) * 360.0 / real'(1 << PHASE_W);
      dh  = wrap_deg(got - e.ideal_deg);
      if (dh > worst_hw) worst_hw = dh;
      checks++;
      if (dh > 0.01) begin
        failures++; $display("hardware phase %f deg, ideal %f deg", got, e.ideal_deg);
      end
      err_true.push_back(wrap_deg(got - e.true_deg));
    end
  end

  initial begin
    real kx, ky, x0, y0, beta, a11, a21, a22, bx, by, p, xs, ys, xi, yi;
    int  n, i1, i2, i3;
    exp_t e;
    real sorted[$];
    coef = LIN_IDENTITY; in_valid = 1'b0; in_xy = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < TRIALS; t++) begin
      kx = urand(0.75, 1.25) * UNIT; ky = urand(0.75, 1.25) * UNIT;
      x0 = urand(-0.5, 0.5) * UNIT;  y0 = urand(-0.5, 0.5) * UNIT;
      beta = urand(0.0, PI / 6.0);
      a11 = R / kx; a21 = -R * $tan(beta) / kx; a22 = R / (ky * $cos(beta));
      @(negedge clk) in_valid = 1'b0;
      repeat (ITER + 6) @(posedge clk);     // let the previous trial drain
      coef.a11 = coef_t'($rtoi(a11 * 16384.0));
      coef.a12 = '0;
      coef.a21 = coef_t'($rtoi(a21 * 16384.0));
      coef.a22 = coef_t'($rtoi(a22 * 16384.0));
      coef.bx  = lin_t'($rtoi(-a11 * x0));
      coef.by  = lin_t'($rtoi(-(a21 * x0 + a22 * y0)));
      // the real-arithmetic reference uses the quantised coefficients too
      a11 = real'(coef.a11) / 16384.0; a21 = real'(coef.a21) / 16384.0; a22 = real'(coef.a22) / 16384.0;
      bx = real'(coef.bx); by = real'(coef.by);
      n = 25 + int'($urandom_range(14));     // 32 +- 7 points
      for (int i = 0; i < n; i++) begin
        p  = urand(-PI, PI);
        xs = $floor(kx * $cos(p) + x0 + urand(-0.005, 0.005) * UNIT);
        ys = $floor(ky * $sin(p + beta) + y0 + urand(-0.005, 0.005) * UNIT);
        xi = a11 * xs + bx;
        yi = a21 * xs + a22 * ys + by;
        e.true_deg  = p * 180.0 / PI;
        e.ideal_deg = $atan2(yi, xi) * 180.0 / PI;
        @(negedge clk);
        in_valid = 1'b1;
        in_xy.x = adc_t'($rtoi(xs));
        in_xy.y = adc_t'($rtoi(ys));
        exp_q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (ITER + 6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    sorted = err_true;
    sorted.sort();
    $display("%0d trials, %0d points; worst hardware-vs-ideal phase difference %f deg",
             TRIALS, sorted.size(), worst_hw);
    i1 = $rtoi(0.6827 * sorted.size());
    i2 = $rtoi(0.9545 * sorted.size());
    i3 = $rtoi(0.9973 * sorted.size());
    $display("phase error vs true phase: 68.27%% %f deg, 95.45%% %f deg, 99.73%% %f deg",
             sorted[i1], sorted[i2], sorted[i3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
