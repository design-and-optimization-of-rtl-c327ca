// window_buffer_tb: checks the window buffer in three configurations on
// 8x8x3 frames with a 3x3 filter and padding 1: stride 1 with two output
// pixels per window and temporal-reuse forwarding; stride 2 with two output
// pixels; stride 1 with one output pixel. Two frames each, so the buffer is
// also checked across the frame boundary.
`timescale 1ns/1ps
module window_buffer_tb;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int c0, f0, c1, f1, c2, f2;
  bit d0, d1, d2;

  wb_harness #(.S(1), .OWP(2), .FWD(1)) h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  wb_harness #(.S(2), .OWP(2), .FWD(0)) h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));
  wb_harness #(.S(1), .OWP(1), .FWD(0)) h2 (.clk, .rst_n, .checks(c2), .failures(f2), .done(d2));

  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
