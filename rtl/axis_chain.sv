// axis_chain -- the complete FPGA pipeline of one interferometer axis:
// decimator -> linear transformation -> phase detector -> error detector
// -> fringe counter, in the order of the source design.
//
// Besides the counter's record it keeps the latest decimated raw pair and
// the latest amplitude so that each 100 ksps record also carries the input
// of the firmware's ellipse fit; this bundling is this implementation's
// choice.
//
// Interface: adc_valid/adc_xy 80 Msps samples; configuration from the
//            register bank; rec_valid/rec one record per OUT_DIV clocks;
//            err_now live error flags, sticky latched flags.
// Timing:    sample to position latency: 1 (decimator, after the last sample
//            of a block) + 2 (linear transform) + ITER+2 (CORDIC) + 1 (error)
//            + 1 (counter) = 25 clocks at the defaults.
module axis_chain
  import ifm_pkg::*;
#(
  parameter int unsigned OUT_DIV    = CLK_HZ / OUT_HZ,
  parameter int unsigned CORDIC_ITER = 18
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       adc_valid,
  input  quad_t      adc_xy,
  input  logic [2:0] dec_l2,
  input  lin_coef_t  coef,
  input  mag_t       amp_min,
  input  phase_t     vel_max,
  input  logic       err_clear,
  input  logic       cnt_clear,
  output logic       rec_valid,
  output axis_rec_t  rec,
  output err_t       err_now,
  output err_t       sticky,
  output count_t     pos_n,
  output phase_t     pos_phi
);

  logic   dec_valid, lin_valid, ph_valid, ed_valid;
  quad_t  dec_xy;
  lin_t   lin_x, lin_y;
  phase_t ph_phase, ed_phase;
  mag_t   ph_mag;
  err_t   ed_err;
  quad_t  last_xy_q;
  mag_t   last_mag_q;
  count_t rec_n;
  phase_t rec_phi;
  err_t   rec_err;

  fringe_decimator u_dec (
    .clk, .rst_n, .dec_l2,
    .in_valid(adc_valid), .in_xy(adc_xy),
    .out_valid(dec_valid), .out_xy(dec_xy));

  lin_tran u_lin (
    .clk, .rst_n, .coef,
    .in_valid(dec_valid), .in_xy(dec_xy),
    .out_valid(lin_valid), .out_x(lin_x), .out_y(lin_y));

  phase_cordic #(.ITER(CORDIC_ITER)) u_phase (
    .clk, .rst_n,
    .in_valid(lin_valid), .in_x(lin_x), .in_y(lin_y),
    .out_valid(ph_valid), .out_phase(ph_phase), .out_mag(ph_mag));

  error_detect u_err (
    .clk, .rst_n, .amp_min, .vel_max, .clear(err_clear),
    .in_valid(ph_valid), .in_phase(ph_phase), .in_mag(ph_mag),
    .out_valid(ed_valid), .out_phase(ed_phase), .out_err(ed_err), .sticky);

  fringe_counter #(.OUT_DIV(OUT_DIV)) u_cnt (
    .clk, .rst_n, .clear(cnt_clear),
    .in_valid(ed_valid), .in_phase(ed_phase), .in_err(ed_err),
    .pos_n, .pos_phi,
    .rec_valid, .rec_n, .rec_phi, .rec_err);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_xy_q  <= '0;
      last_mag_q <= '0;
      err_now    <= '0;
    end else begin
      if (dec_valid) last_xy_q  <= dec_xy;
      if (ph_valid)  last_mag_q <= ph_mag;
      if (ed_valid)  err_now    <= ed_err;
    end
  end

  always_comb begin
    rec.n   = rec_n;
    rec.phi = rec_phi;
    rec.err = rec_err;
    rec.xy  = last_xy_q;
    rec.mag = last_mag_q;
  end

endmodule
