// resnet8_full_tb: end-to-end test of resnet8_top at its default parameters
// (parameters configured in block RAM). Two pseudo-random 32x32x3 images
// are streamed in back to back, with random gaps on the input and random
// back-pressure on the output; the 10 class scores of each frame are compared
// with ref_pkg::resnet8. Also reports the cycles from the first input token
// to the last score of frame 0 and the interval between the two frames'
// last scores (the steady-state frame period).
`timescale 1ns/1ps
module resnet8_full_tb;
  import resnet_pkg::*;
  import ref_pkg::*;

  localparam int NFRAMES = 2;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic       in_valid, in_ready, load_valid, load_ready, params_loaded;
  act_t [1:0] in_data;
  logic [7:0] load_data;
  logic       out_valid, out_ready;
  act_t       out_data;

  resnet8_top dut (.*);

  int checks = 0, failures = 0;
  tensor_t img [NFRAMES];
  tensor_t exp_out [NFRAMES];
  longint cyc = 0, t_first = -1;
  longint t_done [NFRAMES];

  always @(posedge clk) cyc <= cyc + 1;

  // token counts on the internal streams (progress report)
  int n_a0 = 0, n_b1 = 0, n_f1 = 0, n_c1 = 0, n_b2 = 0, n_d2 = 0, n_c2 = 0, n_b3 = 0, n_d3 = 0, n_c3 = 0, n_p = 0;
  always @(posedge clk) begin
    n_a0 += int'(dut.a0_v && dut.a0_r);
    n_b1 += int'(dut.b1_v && dut.b1_r);
    n_f1 += int'(dut.f1_v && dut.f1_r);
    n_c1 += int'(dut.c1_v && dut.c1_r);
    n_b2 += int'(dut.b2_v && dut.b2_r);
    n_d2 += int'(dut.d2_v && dut.d2_r);
    n_c2 += int'(dut.c2_v && dut.c2_r);
    n_b3 += int'(dut.b3_v && dut.b3_r);
    n_d3 += int'(dut.d3_v && dut.d3_r);
    n_c3 += int'(dut.c3_v && dut.c3_r);
    n_p  += int'(dut.p_v && dut.p_r);
  end
  task automatic report();
    $display("tokens a0=%0d b1=%0d f1=%0d c1=%0d b2=%0d d2=%0d c2=%0d b3=%0d d3=%0d c3=%0d p=%0d",
             n_a0, n_b1, n_f1, n_c1, n_b2, n_d2, n_c2, n_b3, n_d3, n_c3, n_p);
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input driver
  initial begin
    in_valid = 0; in_data = '0; load_valid = 0; load_data = '0;
    for (int f = 0; f < NFRAMES; f++) begin
      img[f] = rand_tensor(32*32*3, 0, 127);
      exp_out[f] = resnet8(img[f]);
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < NFRAMES; f++)
      for (int y = 0; y < 32; y++)
        for (int k = 0; k < 16; k++)
          for (int c = 0; c < 3; c++) begin
            // drive on the falling edge; the token moves at the next rising
            // edge on which in_ready is high
            @(negedge clk);
            in_valid = 0;
            while ($urandom % 8 == 0) @(negedge clk);
            in_valid = 1;
            in_data[0] = act_t'(img[f][(y*32 + 2*k)*3 + c]);
            in_data[1] = act_t'(img[f][(y*32 + 2*k + 1)*3 + c]);
            while (!in_ready) @(negedge clk);
            if (t_first < 0) t_first = cyc;
            @(posedge clk);
          end
    @(negedge clk);
    in_valid = 0;
  end

  // output monitor
  initial begin
    out_ready = 0;
    @(posedge rst_n);
    for (int f = 0; f < NFRAMES; f++)
      for (int o = 0; o < 10; o++) begin
        forever begin
          @(negedge clk);
          out_ready = ($urandom % 4 != 0);
          if (out_valid && out_ready) break;
        end
        checks++;
        if (int'(out_data) != exp_out[f][o]) begin
          failures++;
          $display("frame %0d class %0d: got %0d expected %0d", f, o, out_data, exp_out[f][o]);
        end
        t_done[f] = cyc;
      end
    $display("frame 0 latency %0d cycles, frame period %0d cycles",
             t_done[0] - t_first, t_done[1] - t_done[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
