// phase_cordic -- pipelined CORDIC phase detector, atan2(y,x) and amplitude.
//
// The corrected quadrature pair (x,y) is turned into the interference phase
// phi = atan2(y,x) and the amplitude sqrt(x^2+y^2). A pre-rotation by half a
// turn brings x >= 0; then ITER vectoring micro-rotations drive y to zero,
// adding +-atan(2^-i) to the angle accumulator at stage i. The accumulated
// angle is kept with 24 bits per turn, the data path with 8 fractional
// guard bits; the angle is rounded to the PHASE_W-bit output,
// in which 2^PHASE_W codes make one full fringe. The magnitude carries the
// CORDIC gain K = 1.64676.
//
// atan2(y,x) as the phase detector follows the source design; the CORDIC
// method, the 18-stage pipeline and the widths are this implementation's
// choices. Angle table: ATAN[i] = round(atan(2^-i) / (2*pi) * 2^24).
//
// Interface: in_valid/in_x/in_y corrected pair, out_valid/out_phase/out_mag.
// Timing:    ITER+2 cycles latency, one pair per clock throughput.
module phase_cordic
  import ifm_pkg::*;
#(
  parameter int unsigned ITER = 18
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  lin_t   in_x,
  input  lin_t   in_y,
  output logic   out_valid,
  output phase_t out_phase,
  output mag_t   out_mag
);

  localparam int unsigned GUARD = 8;          // fractional guard bits
  localparam int unsigned W     = LIN_W + 3 + GUARD;  // room for sqrt(2) * K growth
  localparam int unsigned ANG_W = 24;         // angle accumulator, one turn = 2^24
  typedef logic signed [W-1:0] dat_t;
  typedef logic [ANG_W-1:0]    ang_t;

  localparam ang_t ATAN [20] = '{
    24'd2097152, 24'd1238021, 24'd654136, 24'd332050, 24'd166669,
    24'd83416,   24'd41718,   24'd20860,  24'd10430,  24'd5215,
    24'd2608,    24'd1304,    24'd652,    24'd326,    24'd163,
    24'd81,      24'd41,      24'd20,     24'd10,     24'd5 };

  initial assert (ITER >= 4 && ITER <= 20) else $error("phase_cordic: ITER out of range");

  dat_t x_q [ITER+1];
  dat_t y_q [ITER+1];
  ang_t z_q [ITER+1];
  logic v_q [ITER+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ITER; i++) begin
        x_q[i] <= '0; y_q[i] <= '0; z_q[i] <= '0; v_q[i] <= 1'b0;
      end
    end else begin
      // stage 0: pre-rotation into the right half plane
      v_q[0] <= in_valid;
      if (in_x < 0) begin
        x_q[0] <= -(dat_t'(in_x) <<< GUARD);
        y_q[0] <= -(dat_t'(in_y) <<< GUARD);
        z_q[0] <= ang_t'(1) << (ANG_W-1);   // half a turn
      end else begin
        x_q[0] <= dat_t'(in_x) <<< GUARD;
        y_q[0] <= dat_t'(in_y) <<< GUARD;
        z_q[0] <= '0;
      end
      // vectoring stages
      for (int i = 0; i < ITER; i++) begin
        v_q[i+1] <= v_q[i];
        if (y_q[i] >= 0) begin
          x_q[i+1] <= x_q[i] + (y_q[i] >>> i);
          y_q[i+1] <= y_q[i] - (x_q[i] >>> i);
          z_q[i+1] <= z_q[i] + ATAN[i];
        end else begin
          x_q[i+1] <= x_q[i] - (y_q[i] >>> i);
          y_q[i+1] <= y_q[i] + (x_q[i] >>> i);
          z_q[i+1] <= z_q[i] - ATAN[i];
        end
      end
    end
  end

  // output: round the angle to PHASE_W bits, magnitude is the final x
  ang_t z_round;
  always_comb z_round = z_q[ITER] + (ang_t'(1) << (ANG_W-PHASE_W-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_phase <= '0;
      out_mag   <= '0;
    end else begin
      out_valid <= v_q[ITER];
      if (v_q[ITER]) begin
        out_phase <= z_round[ANG_W-1 -: PHASE_W];
        out_mag   <= mag_t'(x_q[ITER] >>> GUARD);
      end
    end
  end

endmodule
