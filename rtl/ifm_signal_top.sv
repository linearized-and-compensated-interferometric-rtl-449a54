// ifm_signal_top -- FPGA signal-processing pipeline of a two-axis homodyne
// laser-interferometer length calibrator.
//
// Each axis's quadrature pair arrives from a 16-bit ADC at 80 Msps. Per axis
// the pipeline decimates it (1:16 -> 5 Msps by default), corrects the
// periodic non-linearity with the affine map aX + b, detects the phase with
// atan2(y,x), checks amplitude and velocity, and unwraps the phase into a
// fringe count N plus fraction phi. A 100 ksps record stream of every axis,
// and the coefficients, ratio and thresholds coming the other way, pass
// through one register bank on the processor bus. The processor converts
// N + phi into nanometres (with the air refractive-index correction), fits
// the ellipse that yields the coefficients and talks to the control PC;
// those parts are software and lie outside this module.
//
// Structure, order of the stages, rates and ADC width follow the source
// design; the bus protocol and all internal widths are this implementation's
// own (see the sub-modules).
//
// Interface: adc_valid/adc_xy[NUM_AXES]  ADC samples (valid every clock at
//            80 MHz); bus_* and irq  processor register bus (see reg_bank);
//            err_now/sticky  per-axis error indication lines;
//            pos_n/pos_phi  live unwrapped position of each axis.
module ifm_signal_top
  import ifm_pkg::*;
#(
  parameter int unsigned NUM_AXES    = 2,
  parameter int unsigned OUT_DIV     = CLK_HZ / OUT_HZ,
  parameter int unsigned CORDIC_ITER = 18
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adc_valid,
  input  quad_t       adc_xy  [NUM_AXES],
  input  logic        bus_wr,
  input  logic        bus_rd,
  input  logic [7:0]  bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        irq,
  output err_t        err_now [NUM_AXES],
  output err_t        sticky  [NUM_AXES],
  output count_t      pos_n   [NUM_AXES],
  output phase_t      pos_phi [NUM_AXES]
);

  logic [2:0] dec_l2;
  lin_coef_t  coef      [NUM_AXES];
  mag_t       amp_min   [NUM_AXES];
  phase_t     vel_max   [NUM_AXES];
  logic       err_clear, cnt_clear;
  logic       rec_valid [NUM_AXES];
  axis_rec_t  rec       [NUM_AXES];

  for (genvar a = 0; a < NUM_AXES; a++) begin : g_axis
    axis_chain #(.OUT_DIV(OUT_DIV), .CORDIC_ITER(CORDIC_ITER)) u_axis (
      .clk, .rst_n,
      .adc_valid, .adc_xy(adc_xy[a]),
      .dec_l2, .coef(coef[a]), .amp_min(amp_min[a]), .vel_max(vel_max[a]),
      .err_clear, .cnt_clear,
      .rec_valid(rec_valid[a]), .rec(rec[a]),
      .err_now(err_now[a]), .sticky(sticky[a]),
      .pos_n(pos_n[a]), .pos_phi(pos_phi[a]));
  end

  reg_bank #(.NUM_AXES(NUM_AXES)) u_regs (
    .clk, .rst_n,
    .bus_wr, .bus_rd, .bus_addr, .bus_wdata, .bus_rdata, .irq,
    .dec_l2, .coef, .amp_min, .vel_max, .err_clear, .cnt_clear,
    .rec_valid, .rec, .sticky);

endmodule
