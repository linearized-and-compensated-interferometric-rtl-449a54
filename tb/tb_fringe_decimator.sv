// tb_fringe_decimator -- self-checking test of the block-averaging decimator.
//
// Feeds random 16-bit (x,y) pairs every clock and compares each output with
// the floor of the block mean computed here from the same samples. A ratio
// written during a block applies from the next block on. The test runs
// 1:16 (checking one output per 16 input clocks, 80 -> 5 Msps), 1:2, and the
// clamped settings 0 (-> 1:2) and 7 (-> 1:16), and checks the output
// latency of one clock after the last sample of a block.
module tb_fringe_decimator;
  import ifm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] dec_l2;
  logic in_valid;
  quad_t in_xy, out_xy;
  logic out_valid;
  int checks = 0, failures = 0;

  fringe_decimator dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  quad_t exp_q[$];
  int    exp_cyc_q[$];
  int    cyc = 0;

  // drive one block of `ratio` samples; request `next_l2` for later blocks
  task automatic drive_block(input int ratio, input logic [2:0] next_l2);
    longint sx = 0, sy = 0;
    quad_t  e;
    for (int i = 0; i < ratio; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_xy.x  = adc_t'($urandom);
      in_xy.y  = adc_t'($urandom);
      if (i == 0) dec_l2 = next_l2;
      sx += longint'(in_xy.x);
      sy += longint'(in_xy.y);
    end
    e.x = adc_t'(sx >>> $clog2(ratio));
    e.y = adc_t'(sy >>> $clog2(ratio));
    exp_q.push_back(e);
    exp_cyc_q.push_back(cyc + 2);   // accepted at the next edge, strobe seen one edge later
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      quad_t e;
      int    ec;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e  = exp_q.pop_front();
        ec = exp_cyc_q.pop_front();
        if (out_xy != e) begin
          failures++;
          $display("mismatch: got %0d,%0d expected %0d,%0d", out_xy.x, out_xy.y, e.x, e.y);
        end
        checks++;
        if (cyc != ec) begin
          failures++;
          $display("output at cycle %0d, expected %0d", cyc, ec);
        end
      end
    end
  end

  int n_out_window;
  initial begin
    dec_l2 = 3'd4; in_valid = 1'b0; in_xy = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (20) drive_block(16, 3'd4);   // 1:16
    drive_block(16, 3'd1);               // switch to 1:2 after this block
    repeat (40) drive_block(2, 3'd1);
    drive_block(2, 3'd0);                // 0 is clamped to 1:2
    repeat (10) drive_block(2, 3'd0);
    drive_block(2, 3'd7);                // 7 is clamped to 1:16
    repeat (10) drive_block(16, 3'd7);
    @(negedge clk) in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
