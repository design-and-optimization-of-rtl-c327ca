// param_task_tb: checks both storage modes of the parameter task for a
// layer with 3 input channels, 8 output channels in groups of 4, a 3x3
// filter and a merged downsample. The expected word for (l, m) is assembled
// here from the generator functions: weights w[o][l][t], biases, downsample
// weights and biases of output channels o = 4m..4m+3. Block-RAM mode must
// repeat the ICH*OCH/OCH_PAR words in order for three passes; UltraRAM mode
// gets the same words as a byte stream (sent with random gaps), must pass
// them on during the first pass, stop accepting bytes, and replay them from
// its memory afterwards. Output back-pressure is random.
`timescale 1ns/1ps
module param_task_tb;
  import resnet_pkg::*;
  localparam int ICH = 3, OCH = 8, OP = 4, K = 9, OG = OCH / OP, SEED = 5;
  localparam int PW = OP * (K*8 + 40), NB = PW / 8, DEPTH = ICH * OG;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic lv_b, lr_b, ov_b, or_b, lv_u, lr_u, ov_u, or_u;
  logic [7:0] ld_b, ld_u;
  logic [PW-1:0] od_b, od_u;

  param_task #(.ICH(ICH), .OCH(OCH), .OCH_PAR(OP), .K(K), .HAS_DS(1), .SEED(SEED), .USE_URAM(0)) dut_b (
    .clk, .rst_n, .load_valid(lv_b), .load_ready(lr_b), .load_data(ld_b),
    .out_valid(ov_b), .out_ready(or_b), .out_data(od_b));
  param_task #(.ICH(ICH), .OCH(OCH), .OCH_PAR(OP), .K(K), .HAS_DS(1), .SEED(SEED), .USE_URAM(1)) dut_u (
    .clk, .rst_n, .load_valid(lv_u), .load_ready(lr_u), .load_data(ld_u),
    .out_valid(ov_u), .out_ready(or_u), .out_data(od_u));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [PW-1:0] words [DEPTH];
  logic [7:0] bytes_q [$];

  initial begin
    for (int l = 0; l < ICH; l++)
      for (int m = 0; m < OG; m++) begin
        logic [PW-1:0] wd;
        for (int p = 0; p < OP; p++) begin
          int o;
          o = m*OP + p;
          for (int t = 0; t < K; t++) wd[(p*K + t)*8 +: 8] = param_weight(SEED, (o*ICH + l)*K + t);
          wd[OP*K*8 + p*16 +: 16]     = param_bias(SEED, o);
          wd[OP*(K*8+16) + p*8 +: 8]  = param_weight(SEED + 1, o*ICH + l);
          wd[OP*(K*8+24) + p*16 +: 16] = param_bias(SEED + 1, o);
        end
        words[l*OG + m] = wd;
        for (int b = 0; b < NB; b++) bytes_q.push_back(wd[b*8 +: 8]);
      end
  end

  initial begin
    int nb = 0, nu = 0, extra = 0;
    bit rb, ru, lu;
    lv_b = 0; ld_b = 0; lv_u = 0; ld_u = 0; or_b = 0; or_u = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nb < 3*DEPTH || nu < 3*DEPTH) begin
      @(negedge clk);
      or_b = ($urandom % 3 != 0) && nb < 3*DEPTH;
      or_u = ($urandom % 3 != 0) && nu < 3*DEPTH;
      lv_u = ($urandom % 4 != 0);
      ld_u = (bytes_q.size() > 0) ? bytes_q[0] : 8'hA5;
      #0.2;
      rb = ov_b && or_b; ru = ov_u && or_u; lu = lv_u && lr_u;
      if (rb) begin
        checks++;
        if (od_b != words[nb % DEPTH]) begin failures++; $display("BRAM word %0d wrong", nb); end
        nb++;
      end
      if (ru) begin
        checks++;
        if (od_u != words[nu % DEPTH]) begin failures++; $display("URAM word %0d wrong", nu); end
        nu++;
      end
      if (lu) begin
        if (bytes_q.size() > 0) void'(bytes_q.pop_front());
        else extra++;
      end
      @(posedge clk);
    end
    checks++;
    if (extra != 0 || lr_b) begin
      failures++;
      $display("load stream accepted %0d bytes after the array was full", extra);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
