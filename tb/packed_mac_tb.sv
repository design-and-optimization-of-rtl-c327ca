// packed_mac_tb: checks the two-MACs-per-multiplier stage.
// For random and extreme operands it checks P_out = P_in + (a*b << 18) + d*b
// on 48 bits, and that with P_in = 0 the low 18-bit lane holds d*b and the
// high lane, after adding back the low lane's sign bit, holds a*b.
`timescale 1ns/1ps
module packed_mac_tb;
  import resnet_pkg::*;

  act_t a, d;
  wgt_t b;
  logic signed [47:0] p_in, p_out;
  int checks = 0, failures = 0;

  packed_mac dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int ia, int id, int ib, longint pin);
    longint expv, lo, hi;
    a = act_t'(ia); d = act_t'(id); b = wgt_t'(ib); p_in = 48'(pin);
    #1;
    expv = pin + (longint'(ia * ib) << 18) + longint'(id * ib);
    checks++;
    if (longint'(p_out) != expv) begin
      failures++;
      $display("a=%0d d=%0d b=%0d p_in=%0d: got %0d expected %0d", ia, id, ib, pin, p_out, expv);
    end
    if (pin == 0) begin
      lo = longint'($signed(p_out[17:0]));
      hi = longint'($signed(p_out[47:18])) + longint'(p_out[17]);
      checks++;
      if (lo != id*ib || hi != ia*ib) begin
        failures++;
        $display("lanes a=%0d d=%0d b=%0d: lo=%0d hi=%0d", ia, id, ib, lo, hi);
      end
    end
  endtask

  initial begin
    int ext [4] = '{-128, -1, 0, 127};
    foreach (ext[i]) foreach (ext[j]) foreach (ext[k]) check(ext[i], ext[j], ext[k], 0);
    for (int i = 0; i < 3000; i++)
      check(int'($urandom % 256) - 128, int'($urandom % 256) - 128, int'($urandom % 256) - 128,
            (i % 2 == 0) ? 0 : (longint'($urandom % 65536) - 32768) * 262144 + longint'($urandom % 65536) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
