// reg_bank -- register interface between the processor firmware and the
// FPGA pipeline.
//
// The firmware owns three things the pipeline needs: the coefficients of
// the linear transformation (the result of its ellipse fit), the
// decimation ratio and the error thresholds. In the other direction it
// receives the 100 ksps records of every axis: fringe count N, fraction phi,
// error flags, the decimated raw pair (input of the ellipse fit) and the
// amplitude. Each record is held until the next one arrives, 10 us later;
// a ready flag, an overrun flag and a sequence number tell the firmware
// whether it has read a record and whether it missed one.
//
// That coefficients flow down and subsampled data flow up follows the
// source design. The bus (single-cycle word writes, reads answered the next
// clock), the address map and the reset values are this implementation's
// choices. Word address map (AX = 16 + 16*axis):
//   0x00 CTRL   W/R [2:0] dec_l2 (reset 4 = 1:16); W bit 8: clear sticky
//               errors, W bit 9: restart fringe counts (both self-clearing)
//   0x01 STATUS R   bit 0 record ready (cleared by this read), bit 1 overrun
//               (cleared by this read), [31:16] record sequence number
//   AX+0..3     W/R a11 a12 a21 a22 (Q3.14, 18 bits sign-extended)
//   AX+4..5     W/R bx by (18 bits sign-extended)
//   AX+6        W/R amp_min (reset 4096)
//   AX+7        W/R vel_max (reset 0x10000 = quarter fringe per sample)
//   AX+8        R   N of the last record
//   AX+9        R   [17:0] phi, [19:18] record errors {amp,vel},
//                   [21:20] sticky errors {amp,vel}
//   AX+10       R   [31:16] raw x, [15:0] raw y of the last record
//   AX+11       R   amplitude of the last record
// Unmapped addresses read as zero.
module reg_bank
  import ifm_pkg::*;
#(
  parameter int unsigned NUM_AXES = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  // processor bus
  input  logic       bus_wr,
  input  logic       bus_rd,
  input  logic [7:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic       irq,
  // to the pipeline
  output logic [2:0] dec_l2,
  output lin_coef_t  coef    [NUM_AXES],
  output mag_t       amp_min [NUM_AXES],
  output phase_t     vel_max [NUM_AXES],
  output logic       err_clear,
  output logic       cnt_clear,
  // from the pipeline
  input  logic       rec_valid [NUM_AXES],
  input  axis_rec_t  rec       [NUM_AXES],
  input  err_t       sticky    [NUM_AXES]
);

  localparam mag_t   AMP_MIN_RST = mag_t'(4096);
  localparam phase_t VEL_MAX_RST = phase_t'(1 << (PHASE_W-2));

  axis_rec_t  snap_q [NUM_AXES];
  logic       ready_q, overrun_q;
  logic [15:0] seq_q;

  initial assert (NUM_AXES >= 1 && NUM_AXES <= 14) else $error("reg_bank: NUM_AXES out of range");

  // ---- writes and record capture -------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_l2    <= 3'(MAX_DEC_L2);
      err_clear <= 1'b0;
      cnt_clear <= 1'b0;
      ready_q   <= 1'b0;
      overrun_q <= 1'b0;
      seq_q     <= '0;
      for (int a = 0; a < NUM_AXES; a++) begin
        coef[a]    <= LIN_IDENTITY;
        amp_min[a] <= AMP_MIN_RST;
        vel_max[a] <= VEL_MAX_RST;
        snap_q[a]  <= '0;
      end
    end else begin
      err_clear <= 1'b0;
      cnt_clear <= 1'b0;
      if (bus_wr) begin
        if (bus_addr == 8'h00) begin
          dec_l2    <= bus_wdata[2:0];
          err_clear <= bus_wdata[8];
          cnt_clear <= bus_wdata[9];
        end
        for (int a = 0; a < NUM_AXES; a++) begin
          if (bus_addr[7:4] == 4'(a + 1)) begin
            case (bus_addr[3:0])
              4'd0: coef[a].a11 <= coef_t'(bus_wdata);
              4'd1: coef[a].a12 <= coef_t'(bus_wdata);
              4'd2: coef[a].a21 <= coef_t'(bus_wdata);
              4'd3: coef[a].a22 <= coef_t'(bus_wdata);
              4'd4: coef[a].bx  <= lin_t'(bus_wdata);
              4'd5: coef[a].by  <= lin_t'(bus_wdata);
              4'd6: amp_min[a]  <= mag_t'(bus_wdata);
              4'd7: vel_max[a]  <= phase_t'(bus_wdata);
              default: ;
            endcase
          end
        end
      end
      for (int a = 0; a < NUM_AXES; a++)
        if (rec_valid[a]) snap_q[a] <= rec[a];
      // axis 0 paces the ready flag: all axes share the record clock
      if (bus_rd && bus_addr == 8'h01) begin
        ready_q   <= rec_valid[0];
        overrun_q <= 1'b0;
      end else if (rec_valid[0]) begin
        ready_q   <= 1'b1;
        overrun_q <= overrun_q | ready_q;
      end
      if (rec_valid[0]) seq_q <= seq_q + 1'b1;
    end
  end

  assign irq = ready_q;

  // ---- reads ----------------------------------------------------------------
  function automatic logic [31:0] sext18(logic [17:0] v);
    return {{14{v[17]}}, v};
  endfunction

  logic [31:0] rd_mux;
  always_comb begin
    rd_mux = '0;
    if (bus_addr == 8'h00) rd_mux = {29'd0, dec_l2};
    if (bus_addr == 8'h01) rd_mux = {seq_q, 14'd0, overrun_q, ready_q};
    for (int a = 0; a < NUM_AXES; a++) begin
      if (bus_addr[7:4] == 4'(a + 1)) begin
        case (bus_addr[3:0])
          4'd0:  rd_mux = sext18(coef[a].a11);
          4'd1:  rd_mux = sext18(coef[a].a12);
          4'd2:  rd_mux = sext18(coef[a].a21);
          4'd3:  rd_mux = sext18(coef[a].a22);
          4'd4:  rd_mux = sext18(coef[a].bx);
          4'd5:  rd_mux = sext18(coef[a].by);
          4'd6:  rd_mux = 32'(amp_min[a]);
          4'd7:  rd_mux = 32'(vel_max[a]);
          4'd8:  rd_mux = 32'(snap_q[a].n);
          4'd9:  rd_mux = {10'd0, sticky[a], snap_q[a].err, snap_q[a].phi};
          4'd10: rd_mux = {snap_q[a].xy.x, snap_q[a].xy.y};
          4'd11: rd_mux = 32'(snap_q[a].mag);
          default: rd_mux = '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      bus_rdata <= '0;
    else if (bus_rd) bus_rdata <= rd_mux;
  end

  // a bus cycle is either a read or a write
  assert property (@(posedge clk) disable iff (!rst_n) !(bus_wr && bus_rd))
    else $error("reg_bank: read and write in the same cycle");

endmodule
