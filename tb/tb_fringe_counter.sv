// tb_fringe_counter -- self-checking test of phase unwrapping, fringe
// counting and the subsampled record stream.
//
// A displacement is simulated here as an integer position in phase codes
// (2^PHASE_W per fringe), moved by random steps of less than half a fringe, back
// and forth over many fringes and through zero. The counter sees only the
// position modulo one fringe, one sample every DEC clocks as after the 1:16
// decimator; after every sample N*2^PHASE_W + phi must equal the true position.
// Records must arrive exactly every OUT_DIV clocks (the default 800 clocks,
// i.e. 100 ksps at 80 MHz), carry the position of their clock and the OR of
// the error flags since the previous record. A clear restarts N at 0.
module tb_fringe_counter;
  import ifm_pkg::*;

  localparam int OUT_DIV = 800;
  localparam int DEC     = 16;
  localparam int TURN    = 1 << PHASE_W;   // codes per fringe

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, in_valid, rec_valid;
  phase_t in_phase, pos_phi, rec_phi;
  err_t in_err, rec_err;
  count_t pos_n, rec_n;
  int checks = 0, failures = 0, cyc = 0;

  fringe_counter #(.OUT_DIV(OUT_DIV)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint true_pos;      // position in codes since the last clear
  longint exp_pos;       // what the counter should hold now
  err_t   err_since;     // OR of flags since the last record
  int     last_rec_cyc = 0, n_rec = 0;
  longint max_pos = 0, min_pos = 0;

  function automatic longint dut_pos();
    return (longint'(pos_n) <<< PHASE_W) + longint'(pos_phi);
  endfunction

  // every clock: compare position and records (registered values, checked
  // after the edge)
  always @(posedge clk) begin
    cyc++;
    #1;
    if (rst_n) begin
      if (rec_valid) begin
        checks += 3;
        if (last_rec_cyc != 0 && cyc - last_rec_cyc != OUT_DIV) begin
          failures++; $display("record spacing %0d", cyc - last_rec_cyc);
        end
        if (((longint'(rec_n) <<< PHASE_W) + longint'(rec_phi)) != rec_pos_q) begin
          failures++; $display("record position %0d expected %0d",
                               (longint'(rec_n) <<< PHASE_W) + longint'(rec_phi), rec_pos_q);
        end
        if (rec_err != rec_err_q) begin
          failures++; $display("record errors %b expected %b", rec_err, rec_err_q);
        end
        last_rec_cyc = cyc;
        n_rec++;
      end
    end
  end

  // reference of the record contents: sampled at the clock the divider wraps
  longint rec_pos_q;
  err_t   rec_err_q;
  int     div = 0;
  always @(posedge clk) begin
    if (!rst_n) div = 0;
    else begin
      if (div == OUT_DIV - 1) begin
        rec_pos_q = exp_pos;
        rec_err_q = err_since | (in_valid ? in_err : '0);
        err_since = '0;
        div = 0;
      end else begin
        if (in_valid) err_since = err_since | in_err;
        div++;
      end
      if (in_valid) exp_pos = true_pos;
    end
  end

  task automatic step_and_send(input int step, input err_t e);
    @(negedge clk);
    true_pos += step;
    if (true_pos > max_pos) max_pos = true_pos;
    if (true_pos < min_pos) min_pos = true_pos;
    in_valid = 1'b1;
    in_phase = phase_t'(true_pos);
    in_err   = e;
    @(negedge clk);
    in_valid = 1'b0;
    in_err   = '0;
    // position is registered at the edge just passed
    checks++;
    if (dut_pos() != true_pos) begin
      failures++; $display("position %0d expected %0d", dut_pos(), true_pos);
    end
    repeat (DEC - 2) @(negedge clk);
  endtask

  initial begin
    err_t e;
    clear = 0; in_valid = 0; in_phase = '0; in_err = '0;
    err_since = '0; exp_pos = 0; true_pos = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // first sample sets the fraction, N = 0
    true_pos = 12345;
    step_and_send(0, '0);
    // move forward by about 40 fringes, then back through zero
    for (int i = 0; i < 200; i++) step_and_send(int'($urandom_range(TURN * 15 / 32)), '0);
    for (int i = 0; i < 400; i++) step_and_send(-int'($urandom_range(TURN * 15 / 32)), '0);
    // random walk with occasional error flags
    for (int i = 0; i < 600; i++) begin
      e = '0;
      if ($urandom_range(20) == 0) e.amp = 1'b1;
      if ($urandom_range(20) == 0) e.vel = 1'b1;
      step_and_send(int'($urandom_range(TURN - 2)) - (TURN / 2 - 1), e);
    end
    // clear: next sample restarts at N = 0 with its fraction
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    true_pos = true_pos & longint'(TURN - 1);
    step_and_send(0, '0);
    for (int i = 0; i < 100; i++) step_and_send(int'($urandom_range(TURN / 2 - 1)), '0);
    repeat (2 * OUT_DIV) @(posedge clk);
    checks++;
    if (max_pos < longint'(TURN) * 20 || min_pos > -longint'(TURN) * 20) begin
      failures++; $display("walk too short");
    end
    checks++;
    if (n_rec < 10) begin failures++; $display("only %0d records", n_rec); end
    $display("records %0d, position range %0d .. %0d fringes", n_rec, min_pos / TURN, max_pos / TURN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
