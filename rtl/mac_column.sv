// mac_column: one processing-element column of the convolution computation
// task. It multiplies one filter window (K = fh*fw weights of one output
// channel) with OW_PAR input windows and returns the OW_PAR dot products.
//
// With OW_PAR = 2 the K taps are mapped onto packed_mac stages, each
// computing two MACs (one per output pixel) with one multiplier. Because a
// packed chain may hold at most 7 stages, the taps are dealt round-robin to
// NCH = ceil(K/7) chains: for a 3x3 filter, even taps (5 stages) form one
// chain and odd taps (4 stages) the other, as in the source's pipeline
// drawing. At the end of each chain a restore step splits the 48-bit word
// into its two lanes and adds back the low lane's sign bit into the high
// lane; an ADD stage then sums the chains.
// With OW_PAR = 1 every tap is an ordinary MAC on one chain of K stages.
//
// Pixel 0 of a pair feeds the low lane (d) and pixel 1 the high lane (a);
// this assignment is a choice of this design.
//
// Timing: two register stages (chain result, then restore + ADD); both
// advance only when en is high, so the column stalls with its task.
// Latency is 2 enabled cycles. The source pipelines one DSP per stage; this
// design evaluates each chain within one cycle, which changes the latency
// but not the results.
module mac_column
  import resnet_pkg::*;
#(
  parameter int unsigned K      = 9,   // filter taps fh*fw
  parameter int unsigned OW_PAR = 2    // output pixels computed per cycle (1 or 2)
) (
  input  logic                      clk,
  input  logic                      en,
  input  act_t [OW_PAR-1:0][K-1:0]  act,   // act[n][t]: window of output pixel n
  input  wgt_t [K-1:0]              w,     // w[t]
  output acc_t [OW_PAR-1:0]         sum    // sum[n] = sum_t act[n][t]*w[t]
);

  localparam int unsigned NCH = (OW_PAR == 2) ? cdiv(K, MAX_PACKED_CHAIN) : 1;

  logic signed [47:0] chain_q [NCH];

  if (OW_PAR == 2) begin : g_packed
    for (genvar c = 0; c < NCH; c++) begin : g_chain
      localparam int unsigned LEN = (K - c + NCH - 1) / NCH;  // taps c, c+NCH, ...
      logic signed [47:0] p [LEN+1];
      assign p[0] = '0;
      for (genvar s = 0; s < LEN; s++) begin : g_stage
        packed_mac u_mac (
          .a    (act[1][c + s*NCH]),
          .d    (act[0][c + s*NCH]),
          .b    (w[c + s*NCH]),
          .p_in (p[s]),
          .p_out(p[s+1])
        );
      end
      always_ff @(posedge clk) if (en) chain_q[c] <= p[LEN];
    end

    // Restore and ADD stage.
    always_ff @(posedge clk) begin
      if (en) begin
        acc_t lo, hi;
        lo = '0;
        hi = '0;
        for (int c = 0; c < NCH; c++) begin
          lo += acc_t'($signed(chain_q[c][17:0]));
          hi += acc_t'($signed(chain_q[c][47:18])) + acc_t'({1'b0, chain_q[c][17]});
        end
        sum[0] <= lo;
        sum[1] <= hi;
      end
    end
  end else begin : g_plain
    always_ff @(posedge clk) begin
      if (en) begin
        logic signed [47:0] p;
        p = '0;
        for (int t = 0; t < K; t++) p += 48'(act[0][t] * w[t]);
        chain_q[0] <= p;
      end
    end
    always_ff @(posedge clk) if (en) sum[0] <= acc_t'(chain_q[0]);
  end

endmodule
