// ifm_pkg -- shared widths, types and constants of the interferometer
// signal-processing pipeline (decimator, linear transformation, phase
// detector, error detector, fringe counter and register bank).
//
// Widths that follow the source design: 16-bit ADC samples taken at 80 MHz,
// decimation 1:16 to 5 Msps, two measurement axes, a 100 ksps output stream.
// Widths that are this implementation's own choice: an 18-bit corrected
// sample, 18-bit signed Q3.14 matrix coefficients, an 18-bit phase word in
// which 2^18 codes make one full fringe (2*pi), a 32-bit signed fringe count.
// With one fringe equal to lambda/2 = 316.4 nm of displacement in a
// single-pass He-Ne interferometer, the phase LSB is 1.21 pm, finer than the
// 1.96 pm quantisation limit that 16-bit conversion gives.
package ifm_pkg;

  // ---- sample widths --------------------------------------------------------
  localparam int unsigned ADC_W   = 16;  // ADC resolution (source design)
  localparam int unsigned LIN_W   = 18;  // corrected (x,y) sample width
  localparam int unsigned COEF_W  = 18;  // matrix coefficient width
  localparam int unsigned COEF_FR = 14;  // fractional bits of a coefficient (Q3.14)
  localparam int unsigned PHASE_W = 18;  // phase word, 2^PHASE_W codes per fringe
  localparam int unsigned MAG_W   = 20;  // CORDIC magnitude (includes gain 1.6468)
  localparam int unsigned COUNT_W = 32;  // signed whole-fringe count N

  // ---- rates ----------------------------------------------------------------
  localparam int unsigned CLK_HZ     = 80_000_000; // ADC sample clock
  localparam int unsigned OUT_HZ     = 100_000;    // output stream rate
  localparam int unsigned MAX_DEC_L2 = 4;          // 1:16 decimation
  localparam int unsigned MIN_DEC_L2 = 1;          // 1:2 decimation

  // ---- types ----------------------------------------------------------------
  typedef logic signed [ADC_W-1:0]  adc_t;
  typedef logic signed [LIN_W-1:0]  lin_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic        [PHASE_W-1:0] phase_t;
  typedef logic        [MAG_W-1:0]   mag_t;
  typedef logic signed [COUNT_W-1:0] count_t;

  // One raw or decimated quadrature pair.
  typedef struct packed {
    adc_t x;
    adc_t y;
  } quad_t;

  // Coefficients of the linear transformation  [x';y'] = A*[x;y] + b.
  // Matrix entries are Q3.14, offsets are in corrected-sample LSBs.
  typedef struct packed {
    coef_t a11;
    coef_t a12;
    coef_t a21;
    coef_t a22;
    lin_t  bx;
    lin_t  by;
  } lin_coef_t;

  // Error indications of one axis.
  typedef struct packed {
    logic amp;  // amplitude dropout: |(x,y)| below threshold
    logic vel;  // velocity error: phase step above threshold (fringe overflow)
  } err_t;

  // One 100 ksps output record of one axis.
  typedef struct packed {
    count_t n;      // whole fringes since zeroing
    phase_t phi;    // fraction of a fringe
    err_t   err;    // errors seen since the previous record
    quad_t  xy;     // decimated raw pair (input of the linearity fit)
    mag_t   mag;    // signal amplitude
  } axis_rec_t;

  // Identity transform: a11 = a22 = 1.0, everything else 0.
  localparam lin_coef_t LIN_IDENTITY = '{
    a11: coef_t'(1 << COEF_FR), a12: '0,
    a21: '0, a22: coef_t'(1 << COEF_FR),
    bx: '0, by: '0 };

endpackage
