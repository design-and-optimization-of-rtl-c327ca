// param_splitter_tb: sends 12 numbered bytes (two more than the arrays
// hold) to a splitter for three parameter arrays of 3, 5 and 2 bytes, with
// random gaps and random back-pressure on each output. Checks that each
// output receives exactly its bytes, in order, and that done rises and no
// further byte is taken once all 10 are delivered.
`timescale 1ns/1ps
module param_splitter_tb;
  localparam int NL = 3;
  localparam int unsigned LEN [NL] = '{3, 5, 2};
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, done;
  logic [7:0] in_data, out_data;
  logic [NL-1:0] out_valid, out_ready;
  int checks = 0, failures = 0;

  param_splitter #(.NL(NL), .LEN(LEN)) dut (.*);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent = 0, got [NL] = '{0, 0, 0}, idle = 0;
    in_valid = 0; in_data = 0; out_ready = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (idle < 40) begin
      @(negedge clk);
      in_valid  = (sent < 12) && ($urandom % 3 != 0);
      in_data   = 8'(sent + 1);
      out_ready = NL'($urandom);
      #0.2;
      if (in_valid && in_ready) begin
        int dst, cnt;
        dst = -1; cnt = 0;
        for (int l = 0; l < NL; l++) if (out_valid[l] && out_ready[l]) begin dst = l; cnt++; end
        checks++;
        // byte number sent+1 belongs to array 0 for 1..3, 1 for 4..8, 2 for 9..10
        if (cnt != 1 || dst != ((sent < 3) ? 0 : (sent < 8) ? 1 : 2) || sent >= 10) begin
          failures++;
          $display("byte %0d went to %0d (%0d outputs)", sent + 1, dst, cnt);
        end else got[dst]++;
        sent++;
      end else if (sent >= 10) idle++;
      @(posedge clk);
    end
    checks++;
    if (!done || got[0] != 3 || got[1] != 5 || got[2] != 2 || sent != 10) begin
      failures++;
      $display("done=%0d counts %0d %0d %0d sent %0d", done, got[0], got[1], got[2], sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
