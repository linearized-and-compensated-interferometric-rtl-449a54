// tb_error_detect -- self-checking test of the amplitude / velocity checks.
//
// Drives phase samples whose steps are chosen here (small, exactly at and
// just above the velocity threshold, across the 0/2^PHASE_W wrap in both
// directions) and magnitudes above, at and below the amplitude threshold.
// Each output's flags are compared with a model that takes the step the
// short way round the circle. Sticky flags must accumulate and clear, the
// first sample after reset must not raise a velocity error, and the latency
// must be one clock.
module tb_error_detect;
  import ifm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  mag_t amp_min, in_mag;
  phase_t vel_max, in_phase, out_phase;
  logic clear, in_valid, out_valid;
  err_t out_err, sticky;
  int checks = 0, failures = 0, cyc = 0;
  localparam int TURN = 1 << PHASE_W;   // codes per fringe

  error_detect dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { phase_t ph; err_t err; int cyc; } exp_t;
  exp_t exp_q[$];
  int   prev_ph = -1;   // -1: no previous sample
  err_t exp_sticky = '0;
  int   n_amp = 0, n_vel = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if (out_phase != e.ph || out_err != e.err || cyc != e.cyc) begin
          failures++;
          $display("got ph=%0d err=%b at %0d, expected ph=%0d err=%b at %0d",
                   out_phase, out_err, cyc, e.ph, e.err, e.cyc);
        end
      end
    end
  end

  task automatic send(input int ph, input int mag);
    exp_t e;
    int step;
    @(negedge clk);
    in_valid = 1'b1; in_phase = phase_t'(ph); in_mag = mag_t'(mag);
    e.ph = phase_t'(ph);
    e.err.amp = (mag < int'(amp_min));
    if (prev_ph < 0) e.err.vel = 1'b0;
    else begin
      step = (ph - prev_ph) & (TURN - 1);
      if (step >= TURN / 2) step = TURN - step;
      e.err.vel = (step > int'(vel_max));
    end
    prev_ph = ph & (TURN - 1);
    e.cyc = cyc + 2;
    exp_q.push_back(e);
    exp_sticky = exp_sticky | e.err;
    n_amp += int'(e.err.amp);
    n_vel += int'(e.err.vel);
  endtask

  task automatic idle_and_check_sticky();
    @(negedge clk) in_valid = 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (sticky != exp_sticky) begin
      failures++; $display("sticky %b expected %b", sticky, exp_sticky);
    end
  endtask

  initial begin
    int ph;
    amp_min = mag_t'(5000); vel_max = phase_t'(TURN / 4);
    clear = 0; in_valid = 0; in_phase = '0; in_mag = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // first sample far from the reset value of the previous phase: no vel error
    send(160000, 20000);
    send(160100, 20000);
    send(160100 + TURN / 4, 20000);       // exactly at the threshold: ok
    send(160100 + 2 * (TURN / 4) + 1, 20000); // one code above: error
    send(TURN - 100, 20000);
    send(30, 20000);                      // forward across the wrap: small step
    send(TURN - 6, 20000);                   // backward across the wrap
    send(TURN - 6, 5000);                    // at amplitude threshold: ok
    send(TURN - 6, 4999);                    // below: dropout
    idle_and_check_sticky();
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    exp_sticky = '0;
    idle_and_check_sticky();
    // random walk with random thresholds
    ph = 1000;
    for (int k = 0; k < 20; k++) begin
      @(negedge clk) in_valid = 1'b0;
      amp_min = mag_t'($urandom_range(20000));
      vel_max = phase_t'($urandom_range(TURN / 2 - 1));
      for (int i = 0; i < 50; i++) begin
        ph = (ph + int'($urandom_range(TURN * 5 / 8)) - TURN * 5 / 16) & (TURN - 1);
        send(ph, int'($urandom_range(30000)));
      end
    end
    idle_and_check_sticky();
    checks++;
    if (n_amp == 0 || n_vel == 0) begin failures++; $display("errors never exercised"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("amplitude errors %0d, velocity errors %0d", n_amp, n_vel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
