// tb_phase_cordic -- self-checking test of the CORDIC phase detector.
//
// Random corrected pairs (all four quadrants, the axes, and the full 18-bit
// range) are compared with atan2 and sqrt computed here in real arithmetic:
// the phase (2^18 codes per turn) must be within 4 codes, the magnitude
// within 0.05 % + 4 LSB of K*sqrt(x^2+y^2), K = 1.646760258. The latency of
// ITER+2 clocks and a throughput of one pair per clock are checked too.
module tb_phase_cordic;
  import ifm_pkg::*;

  localparam int ITER = 18;
  localparam real TURN = real'(1 << PHASE_W);   // codes per turn
  localparam real K = 1.646760258;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid;
  lin_t in_x, in_y;
  phase_t out_phase;
  mag_t out_mag;
  int checks = 0, failures = 0, cyc = 0;

  phase_cordic #(.ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real ph; real mag; int cyc; } exp_t;
  exp_t exp_q[$];
  int worst_ph = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      exp_t e;
      real d, dm;
      checks += 3;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        d = real'(out_phase) - e.ph;
        while (d > TURN / 2.0)  d -= TURN;
        while (d < -TURN / 2.0) d += TURN;
        if (d < 0) d = -d;
        if (int'(d) > worst_ph) worst_ph = int'(d);
        if (d > 4.0) begin
          failures++; $display("phase %0d expected %f", out_phase, e.ph);
        end
        dm = real'(out_mag) - e.mag;
        if (dm < 0) dm = -dm;
        if (dm > 4.0 + 5.0e-4 * e.mag) begin
          failures++; $display("magnitude %0d expected %f", out_mag, e.mag);
        end
        if (cyc != e.cyc) begin
          failures++; $display("latency: at %0d expected %0d", cyc, e.cyc);
        end
      end
    end
  end

  task automatic send(input int x, input int y);
    exp_t e;
    real a;
    @(negedge clk);
    in_valid = 1'b1; in_x = lin_t'(x); in_y = lin_t'(y);
    a = $atan2(real'(y), real'(x)) / (2.0 * PI) * TURN;
    if (a < 0) a += TURN;
    e.ph  = a;
    e.mag = K * $sqrt(real'(x) * real'(x) + real'(y) * real'(y));
    e.cyc = cyc + 1 + ITER + 2;
    exp_q.push_back(e);
  endtask

  initial begin
    int r, x, y;
    in_valid = 0; in_x = '0; in_y = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // axes and diagonals
    send(10000, 0); send(0, 10000); send(-10000, 0); send(0, -10000);
    send(7000, 7000); send(-7000, 7000); send(-7000, -7000); send(7000, -7000);
    send(131071, 0); send(-131072, 0); send(0, -131072); send(92000, -92000);
    // random, magnitude at least 2000
    for (int i = 0; i < 3000; i++) begin
      do begin
        x = int'($urandom_range(262143)) - 131072;
        y = int'($urandom_range(262143)) - 131072;
        r = x * x / 1024 + y * y / 1024;
      end while (r < 4000 || x * 1.0 * x + y * 1.0 * y > 131071.0 * 131071.0);
      send(x, y);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (ITER + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("worst phase error %0d codes of %0d", worst_ph, 1 << PHASE_W);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
