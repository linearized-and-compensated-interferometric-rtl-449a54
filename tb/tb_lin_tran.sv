// tb_lin_tran -- self-checking test of the aX + b linear transformation.
//
// Part 1: random coefficients and samples; each output is compared with the
// same affine map evaluated here in 64-bit integers (floor of the scaled
// product sum, plus offset, saturated to 18 bits), and the two-clock
// latency is checked.
// Part 2: an ellipse with offsets, unequal amplitudes and a 20-degree
// quadrature error is generated with real arithmetic; coefficients are
// derived from its parameters (Heydemann form) and every corrected point
// must lie on a circle of the wanted radius within 0.1 %.
module tb_lin_tran;
  import ifm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  lin_coef_t coef;
  logic in_valid, out_valid;
  quad_t in_xy;
  lin_t out_x, out_y;
  int checks = 0, failures = 0;
  int cyc = 0;

  lin_tran dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint x; longint y; int cyc; } exp_t;
  exp_t exp_q[$];
  bit   mode_circle = 0;
  real  radius = 20000.0;
  real  max_dev = 0.0;

  function automatic longint sat18(longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (!mode_circle) begin
          if (longint'(out_x) != e.x || longint'(out_y) != e.y) begin
            failures++;
            $display("mismatch got %0d,%0d exp %0d,%0d", out_x, out_y, e.x, e.y);
          end
        end else begin
          real r, dev;
          r   = $sqrt(real'(out_x) * real'(out_x) + real'(out_y) * real'(out_y));
          dev = (r - radius) / radius;
          if (dev < 0) dev = -dev;
          if (dev > max_dev) max_dev = dev;
          if (dev > 1.0e-3) begin
            failures++;
            $display("corrected radius %f, expected %f", r, radius);
          end
        end
        checks++;
        if (cyc != e.cyc) begin
          failures++; $display("latency: output at %0d expected %0d", cyc, e.cyc);
        end
      end
    end
  end

  task automatic send(input adc_t x, input adc_t y);
    exp_t e;
    longint sx, sy;
    @(negedge clk);
    in_valid = 1'b1; in_xy.x = x; in_xy.y = y;
    sx = (longint'(coef.a11) * x + longint'(coef.a12) * y) >>> COEF_FR;
    sy = (longint'(coef.a21) * x + longint'(coef.a22) * y) >>> COEF_FR;
    e.x = sat18(sx + longint'(coef.bx));
    e.y = sat18(sy + longint'(coef.by));
    e.cyc = cyc + 3;   // accepted next edge, two register stages
    exp_q.push_back(e);
  endtask

  initial begin
    real pi = 3.14159265358979;
    real kx, ky, x0, y0, beta, a11, a21, a22, ph;
    in_valid = 0; in_xy = '0; coef = LIN_IDENTITY;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // identity first
    for (int i = 0; i < 50; i++) send(adc_t'($urandom), adc_t'($urandom));
    // random coefficients, including saturating cases
    for (int k = 0; k < 40; k++) begin
      @(negedge clk) in_valid = 1'b0;
      repeat (3) @(posedge clk);
      coef.a11 = coef_t'($urandom); coef.a12 = coef_t'($urandom);
      coef.a21 = coef_t'($urandom); coef.a22 = coef_t'($urandom);
      coef.bx  = lin_t'($urandom);  coef.by  = lin_t'($urandom);
      for (int i = 0; i < 25; i++) send(adc_t'($urandom), adc_t'($urandom));
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (4) @(posedge clk);
    // ellipse correction
    mode_circle = 1;
    kx = 1.2 * 12000.0; ky = 0.8 * 12000.0; x0 = 3000.0; y0 = -2000.0;
    beta = 20.0 * pi / 180.0;
    a11 = radius / kx;
    a21 = -radius * $tan(beta) / kx;
    a22 = radius / (ky * $cos(beta));
    coef.a11 = coef_t'($rtoi(a11 * 16384.0));
    coef.a12 = '0;
    coef.a21 = coef_t'($rtoi(a21 * 16384.0));
    coef.a22 = coef_t'($rtoi(a22 * 16384.0));
    coef.bx  = lin_t'($rtoi(-(a11 * x0)));
    coef.by  = lin_t'($rtoi(-(a21 * x0 + a22 * y0)));
    for (int i = 0; i < 400; i++) begin
      ph = 2.0 * pi * i / 400.0;
      send(adc_t'($rtoi(kx * $cos(ph) + x0)), adc_t'($rtoi(ky * $sin(ph + beta) + y0)));
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("ellipse correction: max relative radius deviation %e", max_dev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
