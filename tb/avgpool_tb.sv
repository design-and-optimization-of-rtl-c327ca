// avgpool_tb: three 4x4x4 frames of random int8 values (two-pixel tokens)
// through global average pooling, with random gaps and back-pressure. Each
// frame must give 4 outputs, channel by channel, equal to the rounded mean
// (sum + 8) >> 4 computed here, clipped to int8.
`timescale 1ns/1ps
module avgpool_tb;
  import resnet_pkg::*;
  import ref_pkg::*;
  localparam int ICH = 4, IH = 4, IW = 4, OWP = 2, NF = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t [OWP-1:0] in_data;
  act_t out_data;
  int checks = 0, failures = 0;

  avgpool #(.ICH(ICH), .IH(IH), .IW(IW), .OW_PAR(OWP)) dut (.*);

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  act_t [OWP-1:0] in_q [$];
  int exp_q [$];

  initial begin
    for (int f = 0; f < NF; f++) begin
      tensor_t x, y;
      x = rand_tensor(IH*IW*ICH, -128, 127);
      if (f == 1) foreach (x[i]) x[i] = 127;     // largest mean
      y = avgpool(x, ICH, IH, IW, 4);
      foreach (y[i]) exp_q.push_back(y[i]);
      for (int yy = 0; yy < IH; yy++)
        for (int g = 0; g < IW/OWP; g++)
          for (int c = 0; c < ICH; c++) begin
            act_t [OWP-1:0] t;
            for (int n = 0; n < OWP; n++) t[n] = act_t'(x[(yy*IW + g*OWP + n)*ICH + c]);
            in_q.push_back(t);
          end
    end
  end

  initial begin
    bit rd, wr;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (exp_q.size() > 0) begin
      @(negedge clk);
      in_valid  = (in_q.size() > 0) && ($urandom % 4 != 0);
      in_data   = (in_q.size() > 0) ? in_q[0] : '0;
      out_ready = ($urandom % 3 != 0);
      #0.2;
      rd = out_valid && out_ready;
      wr = in_valid && in_ready;
      if (rd) begin
        checks++;
        if (int'(out_data) != exp_q[0]) begin
          failures++;
          $display("output %0d: got %0d expected %0d", checks, out_data, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      if (wr) void'(in_q.pop_front());
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
