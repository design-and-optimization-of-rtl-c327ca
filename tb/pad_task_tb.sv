// pad_task_tb: streams three 3x4x2 frames (two-pixel tokens) through the
// padding task with random input gaps and output back-pressure, and checks
// the whole padded output sequence: one zero row above and below, one zero
// token left and right of each row, and the input tokens in order between.
`timescale 1ns/1ps
module pad_task_tb;
  import resnet_pkg::*;
  localparam int ICH = 2, IH = 3, IW = 4, P = 1, OWP = 2, NF = 3;
  localparam int TW = IW / OWP, TWP = TW + 2, IHP = IH + 2;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t [OWP-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  pad_task #(.ICH(ICH), .IH(IH), .IW(IW), .P(P), .OW_PAR(OWP)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pix(int f, int y, int x, int c);
    return 1 + ((f*IH*IW + y*IW + x)*ICH + c) % 120;
  endfunction

  act_t [OWP-1:0] exp_q [$];
  act_t [OWP-1:0] in_q [$];

  initial begin
    act_t [OWP-1:0] tok;
    for (int f = 0; f < NF; f++)
      for (int yp = 0; yp < IHP; yp++)
        for (int gp = 0; gp < TWP; gp++)
          for (int c = 0; c < ICH; c++) begin
            bit img;
            img = yp >= P && yp < IH + P && gp >= 1 && gp <= TW;
            for (int n = 0; n < OWP; n++)
              tok[n] = img ? act_t'(pix(f, yp - P, (gp - 1)*OWP + n, c)) : act_t'(0);
            exp_q.push_back(tok);
            if (img) in_q.push_back(tok);
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
        if (out_data != exp_q[0]) begin
          failures++;
          $display("token %0d: got %h expected %h", checks, out_data, exp_q[0]);
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
