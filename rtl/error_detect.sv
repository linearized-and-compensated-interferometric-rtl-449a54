// error_detect -- dynamic error detection on the phase stream of one axis.
//
// Two conditions make a fringe count untrustworthy, and both are checked on
// every phase sample before it is unwrapped:
//   amplitude dropout  the signal amplitude falls below amp_min, e.g. when a
//                      beam is blocked or the interference contrast is lost;
//   velocity error     the phase moved by more than vel_max codes since the
//                      previous sample (shortest way round the circle). At or
//                      beyond half a fringe per sample the unwrapper cannot
//                      tell the direction, so fringes would be lost
//                      ("fringe overflow"); vel_max sets the safety margin.
// Each sample is passed on with its own flags; sticky flags hold every error
// until the processor clears them.
//
// Detecting amplitude and velocity errors ahead of the unwrapping follows
// the source design. The thresholds as run-time registers, the
// shortest-way phase step and the sticky/clear scheme are this
// implementation's choices. The first sample after reset has no
// predecessor and is not velocity-checked.
//
// Interface: in_valid/in_phase/in_mag, amp_min, vel_max, clear (pulse);
//            out_valid/out_phase/out_err per sample, sticky.
// Timing:    one cycle latency, one sample per clock.
module error_detect
  import ifm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  mag_t   amp_min,
  input  phase_t vel_max,
  input  logic   clear,
  input  logic   in_valid,
  input  phase_t in_phase,
  input  mag_t   in_mag,
  output logic   out_valid,
  output phase_t out_phase,
  output err_t   out_err,
  output err_t   sticky
);

  typedef logic signed [PHASE_W-1:0] dphase_t;

  phase_t  prev_q;
  logic    have_prev_q;
  dphase_t step;
  phase_t  step_abs;
  err_t    err;

  always_comb begin
    step     = dphase_t'(in_phase - prev_q);          // wraps modulo one fringe
    step_abs = (step < 0) ? phase_t'(-step) : phase_t'(step);
    err.amp  = (in_mag < amp_min);
    err.vel  = have_prev_q && (step_abs > vel_max);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q      <= '0;
      have_prev_q <= 1'b0;
      out_valid   <= 1'b0;
      out_phase   <= '0;
      out_err     <= '0;
      sticky      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        prev_q      <= in_phase;
        have_prev_q <= 1'b1;
        out_phase   <= in_phase;
        out_err     <= err;
      end
      if (clear)         sticky <= '0;
      else if (in_valid) sticky <= sticky | err;
    end
  end

endmodule
