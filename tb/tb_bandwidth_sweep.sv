// tb_bandwidth_sweep -- fringe-counting bandwidth test of the whole design.
//
// Repeats the bandwidth experiment of the source: a known number of fringes
// is generated at increasing fringe frequency and the count shown by the
// design is compared with it. The quadrature signals of both axes carry a
// random distortion from the same ranges as tb_ifm_signal_top (gain 0.75..1.25,
// offset +-0.5, quadrature error up to 30 degrees, noise +-0.005), corrected
// by coefficients written over the bus. At the default 1:16 ratio the sweep
// runs 10, 30, 100, 300, 600 and 800 kHz (the points of the source's plot)
// and 1.2 MHz; every point must show 100 % of the fringes (within 0.01
// fringe) and no velocity alarm. Axis 1 moves backwards at the same rate.
// The top runs at its default parameters.
module tb_bandwidth_sweep;
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
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real kx [NA], ky [NA], x0 [NA], y0 [NA], beta [NA];
  real phase [NA], fr_hz [NA];

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1_000_000)) / 1.0e6;
  endfunction

  always @(negedge clk) begin
    for (int a = 0; a < NA; a++) begin
      phase[a] += fr_hz[a] / FCLK;
      adc_xy[a].x <= adc_t'($rtoi(UNIT * (kx[a] * $cos(2.0 * PI * phase[a]) + x0[a] + urand(-0.005, 0.005))));
      adc_xy[a].y <= adc_t'($rtoi(UNIT * (ky[a] * $sin(2.0 * PI * phase[a] + beta[a]) + y0[a] + urand(-0.005, 0.005))));
    end
  end

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

  task automatic read_count(input int a, output real pos, output logic [1:0] st);
    logic [31:0] d, n;
    rd(8'h01, d);
    @(posedge irq);
    rd(8'(16 * (a + 1) + 8), n);
    rd(8'(16 * (a + 1) + 9), d);
    pos = real'($signed(n)) + real'(d[17:0]) / real'(1 << PHASE_W);
    st  = d[21:20];
  endtask

  real freqs [7] = '{10.0e3, 30.0e3, 100.0e3, 300.0e3, 600.0e3, 800.0e3, 1.2e6};

  initial begin
    real ref0 [NA], p, want, fringes;
    logic [1:0] st;
    int cycles;
    bus_wr = 0; bus_rd = 0; bus_addr = '0; bus_wdata = '0; adc_valid = 1'b0;
    for (int a = 0; a < NA; a++) begin
      kx[a] = urand(0.75, 1.25); ky[a] = urand(0.75, 1.25);
      x0[a] = urand(-0.5, 0.5);  y0[a] = urand(-0.5, 0.5);
      beta[a] = urand(0.0, PI / 6.0);
      phase[a] = 0.1; fr_hz[a] = 0.0; adc_xy[a] = '0;
    end
    repeat (5) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int a = 0; a < NA; a++) write_coefficients(a);
    @(negedge clk) adc_valid = 1'b1;
    $display("fringe frequency   axis 0 detected   axis 1 detected");
    foreach (freqs[i]) begin
      // restart counts and clear errors, then move
      wr(8'h00, 32'h0000_0304);
      for (int a = 0; a < NA; a++) ref0[a] = $floor(phase[a]);
      repeat (100) @(negedge clk);
      fringes = (freqs[i] < 50.0e3) ? 10.0 : 40.0;
      cycles  = $rtoi(fringes / freqs[i] * FCLK);
      fr_hz[0] = freqs[i]; fr_hz[1] = -freqs[i];
      repeat (cycles) @(negedge clk);
      fr_hz[0] = 0.0; fr_hz[1] = 0.0;
      repeat (1000) @(negedge clk);
      $write("%10.0f Hz     ", freqs[i]);
      for (int a = 0; a < NA; a++) begin
        read_count(a, p, st);
        want = phase[a] - ref0[a];
        $write("%8.3f %%  ", 100.0 * p / want);
        checks += 2;
        if (p - want > 0.01 || p - want < -0.01) begin
          failures++; $display("\naxis %0d counted %f fringes, expected %f", a, p, want);
        end
        if (st[0]) begin
          failures++; $display("\naxis %0d velocity alarm at %f Hz", a, freqs[i]);
        end
      end
      $display("");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
