// packed_mac: one DSP48-style multiply-accumulate stage that performs two
// 8-bit MACs with a single 27x18 multiplier (operand packing).
//
// The 27-bit pre-adder output holds activation a in its upper part and
// activation d in its lower part:  A + D = (sext(a) << 18) + sext(d).
// The 18-bit B operand is the sign-extended weight b. The 36-bit product
//   M = (A + D) * B = (a*b << 18) + d*b
// therefore carries d*b in the low 18-bit lane and a*b in the high lane,
// with the low lane's sign leaking one unit into the high lane. The product
// is added to the 48-bit partial sum of the previous stage:
//   P_out = P_in + M.
// Up to 7 stages can be chained before the 18-bit low lane may overflow; the
// leak is removed once, at the end of the chain, by mac_column.
//
// Field widths (27/18/36/48 bits, lane boundary at bit 18) are taken from
// the operand-packing drawings of the source. The stage is purely
// combinational here; mac_column registers the chain result.
//
// Ports: a, d activations (int8), b weight (int8), p_in / p_out 48-bit
// partial sums.
module packed_mac
  import resnet_pkg::*;
(
  input  act_t               a,      // goes to the high lane
  input  act_t               d,      // goes to the low lane
  input  wgt_t               b,
  input  logic signed [47:0] p_in,
  output logic signed [47:0] p_out
);

  logic signed [26:0] pre;   // A + D, 27 bits
  logic signed [17:0] bb;    // B, 18 bits
  logic signed [35:0] m;     // product, 36 bits

  always_comb begin
    pre   = (27'(a) <<< 18) + 27'(d);
    bb    = 18'(b);
    m     = 36'(pre * bb);
    p_out = p_in + 48'(m);
  end

endmodule
