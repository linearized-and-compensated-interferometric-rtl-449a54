// tb_reg_bank -- self-checking test of the processor register bank.
//
// Checks the reset values (ratio 1:16, identity matrix, thresholds), writes
// and reads back every configuration register of both axes with random
// data (18-bit fields sign-extended on read), checks that the configuration
// outputs follow, that CTRL bits 8/9 give one-clock clear pulses, that a
// record is captured and readable field by field, and the ready / overrun /
// sequence-number handshake of the STATUS register.
module tb_reg_bank;
  import ifm_pkg::*;

  localparam int NUM_AXES = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_wr, bus_rd, irq, err_clear, cnt_clear;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [2:0] dec_l2;
  lin_coef_t coef [NUM_AXES];
  mag_t amp_min [NUM_AXES];
  phase_t vel_max [NUM_AXES];
  logic rec_valid [NUM_AXES];
  axis_rec_t rec [NUM_AXES];
  err_t sticky [NUM_AXES];
  int checks = 0, failures = 0;

  reg_bank #(.NUM_AXES(NUM_AXES)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++; $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_wr = 1'b1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_wr = 1'b0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_rd = 1'b1; bus_addr = a;
    @(negedge clk);
    bus_rd = 1'b0;
    d = bus_rdata;
  endtask

  function automatic logic [31:0] sx18(logic [31:0] v);
    return {{14{v[17]}}, v[17:0]};
  endfunction

  int n_err_pulse = 0, n_cnt_pulse = 0;
  always @(posedge clk) begin
    n_err_pulse += int'(rst_n && err_clear);
    n_cnt_pulse += int'(rst_n && cnt_clear);
  end

  task automatic pulse_record(input axis_rec_t r0, input axis_rec_t r1);
    @(negedge clk);
    rec[0] = r0; rec[1] = r1;
    rec_valid[0] = 1'b1; rec_valid[1] = 1'b1;
    @(negedge clk);
    rec_valid[0] = 1'b0; rec_valid[1] = 1'b0;
    rec[0] = '0; rec[1] = '0;
  endtask

  initial begin
    logic [31:0] d, v [8];
    axis_rec_t r [2];
    bus_wr = 0; bus_rd = 0; bus_addr = '0; bus_wdata = '0;
    for (int a = 0; a < NUM_AXES; a++) begin
      rec_valid[a] = 1'b0; rec[a] = '0; sticky[a] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // reset values
    rd(8'h00, d); check("reset dec_l2", d, 32'd4);
    check("reset coef", 32'(coef[1] == LIN_IDENTITY), 32'd1);
    rd(8'h10, d); check("reset a11", d, 32'd16384);
    rd(8'h13, d); check("reset a22", d, 32'd16384);
    rd(8'h16, d); check("reset amp_min", d, 32'd4096);
    rd(8'h27, d); check("reset vel_max", d, 32'h10000);
    check("irq idle", 32'(irq), 32'd0);
    // configuration registers
    for (int a = 0; a < NUM_AXES; a++) begin
      for (int i = 0; i < 8; i++) begin
        v[i] = $urandom;
        wr(8'(16 * (a + 1) + i), v[i]);
      end
      for (int i = 0; i < 6; i++) begin
        rd(8'(16 * (a + 1) + i), d);
        check($sformatf("axis %0d reg %0d", a, i), d, sx18(v[i]));
      end
      rd(8'(16 * (a + 1) + 6), d); check("amp_min rd", d, {12'd0, v[6][19:0]});
      rd(8'(16 * (a + 1) + 7), d); check("vel_max rd", d, {14'd0, v[7][17:0]});
      check("a11 out", {14'd0, coef[a].a11}, 32'(v[0][17:0]));
      check("a12 out", {14'd0, coef[a].a12}, 32'(v[1][17:0]));
      check("a21 out", {14'd0, coef[a].a21}, 32'(v[2][17:0]));
      check("a22 out", {14'd0, coef[a].a22}, 32'(v[3][17:0]));
      check("bx out",  {14'd0, coef[a].bx},  32'(v[4][17:0]));
      check("by out",  {14'd0, coef[a].by},  32'(v[5][17:0]));
      check("amp out", 32'(amp_min[a]), 32'(v[6][19:0]));
      check("vel out", 32'(vel_max[a]), 32'(v[7][17:0]));
    end
    // control
    wr(8'h00, 32'h0000_0302);
    check("dec_l2", 32'(dec_l2), 32'd2);
    repeat (3) @(posedge clk);
    check("clear pulses", 32'(n_err_pulse * 16 + n_cnt_pulse), 32'h11);
    rd(8'h40, d); check("unmapped", d, 32'd0);
    // records
    for (int a = 0; a < 2; a++) begin
      r[a].n   = count_t'($urandom);
      r[a].phi = phase_t'($urandom);
      r[a].err = err_t'($urandom);
      r[a].xy  = quad_t'($urandom);
      r[a].mag = mag_t'($urandom);
    end
    sticky[0] = 2'b10; sticky[1] = 2'b01;
    pulse_record(r[0], r[1]);
    check("irq after record", 32'(irq), 32'd1);
    for (int a = 0; a < 2; a++) begin
      rd(8'(16 * (a + 1) + 8), d);  check("rec n", d, 32'(r[a].n));
      rd(8'(16 * (a + 1) + 9), d);  check("rec phi/err", d, {10'd0, sticky[a], r[a].err, r[a].phi});
      rd(8'(16 * (a + 1) + 10), d); check("rec xy", d, r[a].xy);
      rd(8'(16 * (a + 1) + 11), d); check("rec mag", d, 32'(r[a].mag));
    end
    rd(8'h01, d); check("status 1", d, {16'd1, 16'd1});
    rd(8'h01, d); check("status cleared", d, {16'd1, 16'd0});
    check("irq cleared", 32'(irq), 32'd0);
    pulse_record(r[1], r[0]);
    pulse_record(r[0], r[1]);
    rd(8'h01, d); check("status overrun", d, {16'd3, 16'd3});
    rd(8'h18, d); check("latest record kept", d, 32'(r[0].n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
