// conv_layer_tb: three conv_layer configurations on small tensors, each
// checked token by token against the golden model (see cl_harness):
//  a) stride 1, 4 -> 8 channels in groups of 4, with skip input and the
//     forwarded input stream (the first convolution of a residual block);
//  b) stride 2, 4 -> 8 channels in groups of 2, with the merged downsample;
//  c) stride 1 with one pixel per token and a single group of 8 channels.
`timescale 1ns/1ps
module conv_layer_tb;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int ca, fa, cb, fb, cc, fc;
  bit da, db, dc;

  cl_harness #(.ICH(4), .IH(8), .IW(8), .OCH(8), .OP(4), .S(1), .HAS_SKIP(1), .FWD(1), .SEED(11))
    ha (.clk, .rst_n, .checks(ca), .failures(fa), .done(da));
  cl_harness #(.ICH(4), .IH(8), .IW(8), .OCH(8), .OP(2), .S(2), .HAS_DS(1), .SEED(21))
    hb (.clk, .rst_n, .checks(cb), .failures(fb), .done(db));
  cl_harness #(.ICH(3), .IH(6), .IW(6), .OCH(8), .OP(8), .S(1), .OWP(1), .SEED(31))
    hc (.clk, .rst_n, .checks(cc), .failures(fc), .done(dc));

  initial begin
    fork
      begin
        #400000;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc + 1);
        $finish;
      end
    join_none
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (da && db && dc);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc);
    $finish;
  end
endmodule
