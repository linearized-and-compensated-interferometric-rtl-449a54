// lin_tran -- linear transformation aX + b of one quadrature pair.
//
// Corrects the periodic scale non-linearity of a homodyne interferometer:
// offsets, unequal amplitudes and a departure from 90 degrees between the two
// signals turn the ideal circle (x,y) into a shifted, tilted ellipse. Any
// such ellipse maps back onto a circle by an affine map
//     x' = a11*x + a12*y + bx
//     y' = a21*x + a22*y + by
// whose coefficients the processor computes by fitting an ellipse to the
// measured pairs and writes into the register bank. With the usual
// Heydemann parameters (offsets x0,y0, amplitudes Kx,Ky, phase error beta):
//     a11 = 1/Kx, a12 = 0, a21 = -tan(beta)/Kx, a22 = 1/(Ky*cos(beta)),
//     b   = -A*[x0;y0]       (times the wanted output radius).
//
// The form aX + b and its place after the decimator follow the source
// design. Coefficient format (Q3.14), output width (18 bits, saturating)
// and the two-stage pipeline are this implementation's choices.
//
// Interface: in_valid/in_xy raw pair, coef coefficients (static between
//            updates), out_valid/out_x/out_y corrected pair.
// Timing:    two-cycle latency, one pair per clock throughput.
module lin_tran
  import ifm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  lin_coef_t coef,
  input  logic      in_valid,
  input  quad_t     in_xy,
  output logic      out_valid,
  output lin_t      out_x,
  output lin_t      out_y
);

  localparam int unsigned PROD_W = ADC_W + COEF_W;
  localparam int unsigned SUM_W  = PROD_W + 2;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [SUM_W-1:0]  sum_t;

  localparam sum_t LIN_MAX = sum_t'((1 <<< (LIN_W-1)) - 1);
  localparam sum_t LIN_MIN = -sum_t'(1 <<< (LIN_W-1));

  prod_t p11_q, p12_q, p21_q, p22_q;
  logic  v1_q;
  sum_t  sx, sy;

  // stage 1: the four products
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q  <= 1'b0;
      p11_q <= '0; p12_q <= '0; p21_q <= '0; p22_q <= '0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) begin
        p11_q <= coef.a11 * in_xy.x;
        p12_q <= coef.a12 * in_xy.y;
        p21_q <= coef.a21 * in_xy.x;
        p22_q <= coef.a22 * in_xy.y;
      end
    end
  end

  // stage 2: sums, scaling back by 2^-COEF_FR, offsets and saturation
  function automatic lin_t sat(sum_t v);
    if (v > LIN_MAX) return lin_t'(LIN_MAX);
    if (v < LIN_MIN) return lin_t'(LIN_MIN);
    return lin_t'(v);
  endfunction

  always_comb begin
    sx = ((sum_t'(p11_q) + sum_t'(p12_q)) >>> COEF_FR) + sum_t'(coef.bx);
    sy = ((sum_t'(p21_q) + sum_t'(p22_q)) >>> COEF_FR) + sum_t'(coef.by);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= v1_q;
      if (v1_q) begin
        out_x <= sat(sx);
        out_y <= sat(sy);
      end
    end
  end

endmodule
