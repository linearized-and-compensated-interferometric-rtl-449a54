// fringe_counter -- phase unwrapping, fringe counting and output subsampling.
//
// The phase word phi covers one fringe with 2^PHASE_W codes. Between two
// samples the counter takes the phase step modulo one fringe as a signed
// number (the shortest way round) and adds it to a position register that
// holds N*2^PHASE_W + phi, so N counts whole fringes and the low PHASE_W bits
// are the fraction: the "N + phi" of the source design. The step is correct
// while the phase moves less than half a fringe per sample; faster motion is
// flagged upstream by error_detect.
//
// Every OUT_DIV clocks (800 clocks of 80 MHz = 100 ksps) a record with N,
// phi and the OR of all error flags since the previous record is emitted;
// this rate is independent of the decimation ratio. A clear pulse restarts
// the count at N = 0 from the next phase sample, keeping its fraction.
//
// N + phi and the 100 ksps output rate follow the source design. The widths
// (32-bit N) and the clear behaviour are this implementation's choices.
//
// Interface: in_valid/in_phase/in_err, clear; pos_n/pos_phi live position;
//            rec_valid/rec_n/rec_phi/rec_err subsampled record.
// Timing:    position updates one clock after each sample; rec_valid is a
//            one-clock strobe every OUT_DIV clocks, the first OUT_DIV clocks
//            after reset.
module fringe_counter
  import ifm_pkg::*;
#(
  parameter int unsigned OUT_DIV = CLK_HZ / OUT_HZ
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  phase_t in_phase,
  input  err_t   in_err,
  output count_t pos_n,
  output phase_t pos_phi,
  output logic   rec_valid,
  output count_t rec_n,
  output phase_t rec_phi,
  output err_t   rec_err
);

  localparam int unsigned POS_W = COUNT_W + PHASE_W;
  localparam int unsigned DIV_W = $clog2(OUT_DIV + 1);
  typedef logic signed [POS_W-1:0]   pos_t;
  typedef logic signed [PHASE_W-1:0] dphase_t;

  pos_t       pos_q;
  phase_t     prev_q;
  logic       started_q;
  logic [DIV_W-1:0] div_q;
  err_t       err_acc_q;
  dphase_t    step;

  initial assert (OUT_DIV >= 2) else $error("fringe_counter: OUT_DIV must be at least 2");

  always_comb begin
    step    = dphase_t'(in_phase - prev_q);
    pos_n   = count_t'(pos_q >>> PHASE_W);
    pos_phi = phase_t'(pos_q);
  end

  // unwrapping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q     <= '0;
      prev_q    <= '0;
      started_q <= 1'b0;
    end else if (clear) begin
      started_q <= 1'b0;
    end else if (in_valid) begin
      prev_q    <= in_phase;
      started_q <= 1'b1;
      if (started_q) pos_q <= pos_q + pos_t'(step);
      else           pos_q <= pos_t'({1'b0, in_phase});   // N = 0, fraction kept
    end
  end

  // subsampled record
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q     <= '0;
      err_acc_q <= '0;
      rec_valid <= 1'b0;
      rec_n     <= '0;
      rec_phi   <= '0;
      rec_err   <= '0;
    end else begin
      rec_valid <= 1'b0;
      if (div_q == DIV_W'(OUT_DIV - 1)) begin
        div_q     <= '0;
        rec_valid <= 1'b1;
        rec_n     <= pos_n;
        rec_phi   <= pos_phi;
        rec_err   <= err_acc_q | (in_valid ? in_err : '0);
        err_acc_q <= '0;
      end else begin
        div_q <= div_q + 1'b1;
        if (in_valid) err_acc_q <= err_acc_q | in_err;
      end
    end
  end

endmodule
