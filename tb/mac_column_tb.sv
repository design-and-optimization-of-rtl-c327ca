// mac_column_tb: checks a processing-element column against direct dot
// products, for a packed 3x3 column (two chains of 5 and 4 packed stages),
// an unpacked 3x3 column (OW_PAR = 1) and a packed single-tap column.
// Operands are random, with runs of extreme values (all -128 or all 127)
// that drive the packed low lane to its largest magnitude. The enable is
// dropped at random; results must appear after exactly two enabled cycles.
`timescale 1ns/1ps
module mac_column_tb;
  import resnet_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;
  logic en;
  int checks = 0, failures = 0;

  act_t [1:0][8:0] act2;  wgt_t [8:0] w2;  acc_t [1:0] sum2;
  act_t [0:0][8:0] act1;  wgt_t [8:0] w1;  acc_t [0:0] sum1;
  act_t [1:0][0:0] actk;  wgt_t [0:0] wk;  acc_t [1:0] sumk;

  mac_column #(.K(9), .OW_PAR(2)) dut2 (.clk, .en, .act(act2), .w(w2), .sum(sum2));
  mac_column #(.K(9), .OW_PAR(1)) dut1 (.clk, .en, .act(act1), .w(w1), .sum(sum1));
  mac_column #(.K(1), .OW_PAR(2)) dutk (.clk, .en, .act(actk), .w(wk), .sum(sumk));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int e2 [$][2], e1 [$], ek [$][2];
  int ncycles = 0;

  function automatic int rv(int mode);
    if (mode == 1) return -128;
    if (mode == 2) return 127;
    return int'($urandom % 256) - 128;
  endfunction

  initial begin
    int mode, s0, s1, s, k0, k1;
    en = 0;
    repeat (2) @(negedge clk);
    for (int it = 0; it < 3000; it++) begin
      mode = (it % 50 < 3) ? (it % 50) : 0;
      en = (it < 3) || ($urandom % 5 != 0);
      for (int t = 0; t < 9; t++) begin
        act2[0][t] = act_t'(rv(mode)); act2[1][t] = act_t'(rv(mode));
        w2[t] = wgt_t'((mode == 1) ? -128 : rv(mode));
        act1[0][t] = act_t'(rv(mode)); w1[t] = wgt_t'(rv(mode));
      end
      actk[0][0] = act_t'(rv(mode)); actk[1][0] = act_t'(rv(mode)); wk[0] = wgt_t'(rv(mode));
      @(posedge clk);
      if (en) begin
        s0 = 0; s1 = 0; s = 0;
        for (int t = 0; t < 9; t++) begin
          s0 += act2[0][t] * w2[t];
          s1 += act2[1][t] * w2[t];
          s  += act1[0][t] * w1[t];
        end
        e2.push_back('{s0, s1});
        e1.push_back(s);
        ek.push_back('{actk[0][0] * wk[0], actk[1][0] * wk[0]});
        if (e2.size() > 2) begin
          void'(e2.pop_front()); void'(e1.pop_front()); void'(ek.pop_front());
        end
      end
      @(negedge clk);
      // after an enabled edge the output shows the inputs of the enabled edge before it
      if (en && e2.size() == 2) begin
        checks += 3;
        if (sum2[0] != e2[0][0] || sum2[1] != e2[0][1]) begin
          failures++;
          $display("packed 3x3: got %0d %0d expected %0d %0d", sum2[0], sum2[1], e2[0][0], e2[0][1]);
        end
        if (sum1[0] != e1[0]) begin
          failures++;
          $display("plain 3x3: got %0d expected %0d", sum1[0], e1[0]);
        end
        if (sumk[0] != ek[0][0] || sumk[1] != ek[0][1]) begin
          failures++;
          $display("packed 1x1: got %0d %0d expected %0d %0d", sumk[0], sumk[1], ek[0][0], ek[0][1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
