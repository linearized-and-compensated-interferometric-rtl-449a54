// fringe_decimator -- block-averaging decimator for one quadrature pair.
//
// The ADC delivers an (x,y) pair every clock at 80 MHz. The decimator sums
// 2^dec_l2 consecutive pairs and emits their mean, so with the default
// dec_l2 = 4 (ratio 1:16) the output rate is 5 Msps. Ratios 1:2 .. 1:16 are
// selectable at run time; values of dec_l2 outside 1..4 are clamped. A new
// ratio takes effect at the next block boundary.
//
// The ratio (1:16, 5 Msps) and the lower limit 1:2 follow the source design.
// Averaging (a boxcar filter) rather than plain sample dropping is this
// implementation's choice; the source names the function, not its insides.
//
// Interface: in_valid/in_xy  sample input (normally valid every clock)
//            dec_l2          log2 of the decimation ratio
//            out_valid/out_xy  one-cycle strobe with the block mean
// Timing:    out_valid rises the clock after the last sample of a block
//            was accepted; the mean is rounded toward minus infinity.
module fringe_decimator
  import ifm_pkg::*;
#(
  parameter int unsigned MAX_L2 = MAX_DEC_L2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  dec_l2,
  input  logic        in_valid,
  input  quad_t       in_xy,
  output logic        out_valid,
  output quad_t       out_xy
);

  localparam int unsigned ACC_W = ADC_W + MAX_L2;
  typedef logic signed [ACC_W-1:0] acc_t;

  logic [2:0]        l2_q;      // ratio of the block in progress
  logic [MAX_L2-1:0] cnt_q;
  acc_t              acc_x_q, acc_y_q;
  logic [2:0]        l2_clamped;
  logic [MAX_L2-1:0] last_cnt;
  acc_t              sum_x, sum_y;

  always_comb begin
    if (dec_l2 < 3'(MIN_DEC_L2))      l2_clamped = 3'(MIN_DEC_L2);
    else if (dec_l2 > 3'(MAX_L2))     l2_clamped = 3'(MAX_L2);
    else                              l2_clamped = dec_l2;
    last_cnt = MAX_L2'((1 << l2_q) - 1);
    sum_x    = acc_x_q + acc_t'(in_xy.x);
    sum_y    = acc_y_q + acc_t'(in_xy.y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l2_q      <= 3'(MAX_L2);
      cnt_q     <= '0;
      acc_x_q   <= '0;
      acc_y_q   <= '0;
      out_valid <= 1'b0;
      out_xy    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt_q == last_cnt) begin
          out_valid <= 1'b1;
          out_xy.x  <= adc_t'(sum_x >>> l2_q);
          out_xy.y  <= adc_t'(sum_y >>> l2_q);
          cnt_q     <= '0;
          acc_x_q   <= '0;
          acc_y_q   <= '0;
          l2_q      <= l2_clamped;       // new ratio starts with the next block
        end else begin
          cnt_q     <= cnt_q + 1'b1;
          acc_x_q   <= sum_x;
          acc_y_q   <= sum_y;
        end
      end
    end
  end

endmodule
