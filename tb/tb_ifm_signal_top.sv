// tb_ifm_signal_top -- end-to-end test of the two-axis interferometer
// pipeline at its default parameters (80 MHz, 1:16, 18 CORDIC stages,
// 100 ksps records).
//
// The testbench plays the parts around the FPGA logic:
//  * the interferometers and ADCs: for each axis a phase phi(t) in fringes
//    is advanced every 80 MHz clock and turned into distorted quadrature
//    samples  X = Kx*cos(2*pi*phi) + x0 + e,  Y = Ky*sin(2*pi*phi + beta) + y0 + e
//    with Kx, Ky in (0.75,1.25), x0, y0 in (-0.5,0.5), beta in (0, pi/6) and
//    e in (-0.005,0.005) times a unit of 12000 ADC codes;
//  * the processor: it writes the aX + b coefficients that map each ellipse
//    back onto a circle (computed here from the known distortion, standing in
//    for the firmware's ellipse fit), and reads the records over the bus.
// Scenarios, each checked and counted:
//   motion      both axes move a known number of fringes (axis 0 forward at
//               600 kHz fringe frequency, axis 1 backward at 100 kHz); after
//               stopping, N + phi read over the bus must match within 0.01
//               fringe;
//   rate        record sequence numbers advance once per 800 clocks;
//   velocity    1.5 MHz fringe frequency (0.3 fringe per 5 Msps sample)
//               must raise the velocity error while the count stays right;
//   dropout     the signal of axis 1 vanishes for 20 us: amplitude error;
//   clear       CTRL clears the sticky errors and restarts the counts;
//   ratio 1:2   3 MHz fringe frequency is counted correctly without velocity
//               error once the decimation is switched from 1:16 to 1:2.
module tb_ifm_signal_top;
  import ifm_pkg::*;

  localparam int  NA   = 2;
  localparam real PI   = 3.14159265358979;
  localparam real UNIT = 12000.0;
  localparam real FCLK = 80.0e6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic adc_valid;
  quad_t adc_xy [NA];
  logic bus_wr, bus_rd, irq;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  err_t err_now [NA], sticky [NA];
  count_t pos_n [NA];
  phase_t pos_phi [NA];
  int checks = 0, failures = 0;

  ifm_signal_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- interferometer and ADC model -----------------------------------------
  real kx [NA], ky [NA], x0 [NA], y0 [NA], beta [NA];
  real phase [NA];     // in fringes
  real fr_hz [NA];     // fringe frequency, signed
  real ampl  [NA];     // 1.0 normally, 0.0 for a dropout

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1_000_000)) / 1.0e6;
  endfunction

  always @(negedge clk) begin
    for (int a = 0; a < NA; a++) begin
      real ex, ey;
      phase[a] += fr_hz[a] / FCLK;
      ex = urand(-0.005, 0.005);
      ey = urand(-0.005, 0.005);
      adc_xy[a].x <= adc_t'($rtoi(UNIT * (ampl[a] * kx[a] * $cos(2.0 * PI * phase[a]) + x0[a] + ex)));
      adc_xy[a].y <= adc_t'($rtoi(UNIT * (ampl[a] * ky[a] * $sin(2.0 * PI * phase[a] + beta[a]) + y0[a] + ey)));
    end
  end

  // ---- processor bus ----------------------------------------------------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_wr = 1'b1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_wr = 1'b0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_rd = 1'b1; bus_addr = a;
    @(negedge clk);
    bus_rd = 1'b0;
    d = bus_rdata;
  endtask

  // coefficients that turn the ellipse of axis a into a circle of radius R
  task automatic write_coefficients(input int a);
    real r = 20000.0, a11, a21, a22, kxc, kyc, x0c, y0c;
    kxc = kx[a] * UNIT; kyc = ky[a] * UNIT; x0c = x0[a] * UNIT; y0c = y0[a] * UNIT;
    a11 = r / kxc;
    a21 = -r * $tan(beta[a]) / kxc;
    a22 = r / (kyc * $cos(beta[a]));
    wr(8'(16 * (a + 1) + 0), 32'($rtoi(a11 * 16384.0)));
    wr(8'(16 * (a + 1) + 1), 32'd0);
    wr(8'(16 * (a + 1) + 2), 32'($rtoi(a21 * 16384.0)));
    wr(8'(16 * (a + 1) + 3), 32'($rtoi(a22 * 16384.0)));
    wr(8'(16 * (a + 1) + 4), 32'($rtoi(-a11 * x0c)));
    wr(8'(16 * (a + 1) + 5), 32'($rtoi(-(a21 * x0c + a22 * y0c))));
  endtask

  // wait for a new record, then read N + phi of axis a (in fringes)
  task automatic read_position(input int a, output real pos, output err_t st);
    logic [31:0] d, n;
    rd(8'h01, d);                    // acknowledge any old record
    @(posedge irq);
    rd(8'(16 * (a + 1) + 8), n);
    rd(8'(16 * (a + 1) + 9), d);
    pos = real'($signed(n)) + real'(d[17:0]) / real'(1 << PHASE_W);
    st  = err_t'(d[21:20]);
  endtask

  task automatic move(input real f0, input real f1, input real fringes);
    // both axes: f0/f1 fringe frequencies; time set by axis 0 (or 1 if f0 = 0)
    real f = (f0 != 0.0) ? f0 : f1;
    int  cycles = $rtoi(fringes / (f < 0 ? -f : f) * FCLK);
    fr_hz[0] = f0; fr_hz[1] = f1;
    repeat (cycles) @(negedge clk);
    fr_hz[0] = 0.0; fr_hz[1] = 0.0;
    repeat (2000) @(negedge clk);    // settle, at least one full record period
  endtask

  real ref0 [NA];      // phase at the last count restart, fringes
  int  n_motion = 0, n_vel = 0, n_amp = 0, n_clear = 0, n_ratio = 0, n_rate = 0;

  task automatic check_position(input int a, input string what);
    real p, expect_p, d;
    err_t st;
    read_position(a, p, st);
    expect_p = phase[a] - ref0[a];
    d = p - expect_p;
    checks++;
    if (d > 0.01 || d < -0.01) begin
      failures++;
      $display("%s: axis %0d reads %f fringes, expected %f", what, a, p, expect_p);
    end else
      $display("%s: axis %0d reads %f fringes, expected %f", what, a, p, expect_p);
  endtask

  task automatic restart_counts();
    logic [31:0] d;
    wr(8'h00, {22'd0, 1'b1, 1'b1, 5'd0, 3'(ctrl_l2)});   // clear errors and counts
    // the first sample after the restart sets N = 0 with its fraction
    for (int a = 0; a < NA; a++) ref0[a] = phase[a] - (phase[a] - $floor(phase[a]));
    repeat (200) @(negedge clk);
    for (int a = 0; a < NA; a++) begin
      rd(8'(16 * (a + 1) + 9), d);
      checks++;
      if (d[21:20] != 2'b00 || sticky[a] != '0) begin
        failures++; $display("sticky errors not cleared on axis %0d", a);
      end
    end
    n_clear++;
  endtask

  int ctrl_l2 = 4;

  initial begin
    logic [31:0] d, s0, s1;
    real p;
    err_t st;
    bus_wr = 0; bus_rd = 0; bus_addr = '0; bus_wdata = '0; adc_valid = 1'b0;
    for (int a = 0; a < NA; a++) begin
      kx[a] = urand(0.75, 1.25); ky[a] = urand(0.75, 1.25);
      x0[a] = urand(-0.5, 0.5);  y0[a] = urand(-0.5, 0.5);
      beta[a] = urand(0.0, PI / 6.0);
      phase[a] = 0.3 + 0.2 * a; fr_hz[a] = 0.0; ampl[a] = 1.0;
      adc_xy[a] = '0;
      $display("axis %0d: Kx %f Ky %f x0 %f y0 %f beta %f rad", a, kx[a], ky[a], x0[a], y0[a], beta[a]);
    end
    repeat (5) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int a = 0; a < NA; a++) write_coefficients(a);
    @(negedge clk) adc_valid = 1'b1;
    restart_counts();

    // --- motion: axis 0 +50 fringes at 600 kHz, axis 1 -8.3 fringes at 100 kHz
    move(600.0e3, -100.0e3, 50.0);
    check_position(0, "motion"); n_motion++;
    check_position(1, "motion"); n_motion++;
    move(0.0, -100.0e3, 20.0);
    check_position(1, "motion"); n_motion++;
    for (int a = 0; a < NA; a++) begin
      rd(8'(16 * (a + 1) + 9), d);
      checks++;
      if (d[21:20] != 2'b00) begin failures++; $display("unexpected errors %b on axis %0d", d[21:20], a); end
    end

    // --- record rate: one record per 800 clocks
    rd(8'h01, s0);
    repeat (8000) @(negedge clk);
    rd(8'h01, s1);
    checks++;
    d = 32'(s1[31:16] - s0[31:16]);
    // 8002 clocks hold 10 record strobes, or 11 if one falls on the first two
    if (d != 10 && d != 11) begin failures++; $display("%0d records in 8002 clocks, expected 10", d); end
    else n_rate++;

    // --- velocity error: 1.5 MHz fringe frequency on axis 0
    move(1.5e6, 0.0, 30.0);
    read_position(0, p, st);
    checks++;
    if (!st.vel) begin failures++; $display("velocity error not raised"); end
    else n_vel++;
    check_position(0, "after overspeed");
    restart_counts();

    // --- amplitude dropout on axis 1
    ampl[1] = 0.0;
    repeat (1600) @(negedge clk);
    ampl[1] = 1.0;
    repeat (1600) @(negedge clk);
    rd(8'h29, d);
    checks++;
    if (!d[21]) begin failures++; $display("amplitude dropout not raised"); end
    else n_amp++;
    checks++;
    if (sticky[1].amp != 1'b1 || sticky[0] != '0) begin
      failures++; $display("sticky lines %b %b", sticky[0], sticky[1]);
    end
    restart_counts();

    // --- decimation 1:2 allows 3 MHz fringe frequency
    ctrl_l2 = 1;
    wr(8'h00, 32'(ctrl_l2));
    rd(8'h00, d);
    checks++;
    if (d != 32'd1) begin failures++; $display("ratio not set"); end
    restart_counts();
    move(3.0e6, -3.0e6, 100.0);
    check_position(0, "ratio 1:2");
    check_position(1, "ratio 1:2");
    for (int a = 0; a < NA; a++) begin
      rd(8'(16 * (a + 1) + 9), d);
      checks++;
      if (d[21:20] != 2'b00) begin failures++; $display("errors %b at 1:2 on axis %0d", d[21:20], a); end
    end
    n_ratio++;

    // --- every mechanism must have happened
    checks++;
    if (n_motion == 0 || n_rate == 0 || n_vel == 0 || n_amp == 0 || n_clear == 0 || n_ratio == 0) begin
      failures++; $display("a scenario never happened");
    end
    $display("motion %0d, rate %0d, velocity %0d, dropout %0d, clear %0d, ratio 1:2 %0d",
             n_motion, n_rate, n_vel, n_amp, n_clear, n_ratio);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
