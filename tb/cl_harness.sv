// cl_harness: drives one conv_layer configuration for conv_layer_tb.
//
// NF random frames (3x3 filter, padding 1, parameters from block-RAM
// initialisation) are streamed in with random gaps while all outputs see
// random back-pressure. Every output token is compared with the golden
// model of ref_pkg: the convolution (with the skip tensor added when
// HAS_SKIP), the stride-2 pointwise downsample when HAS_DS, and the
// forwarded input when FWD. Tokens carry OWP adjacent pixels of one channel
// in depth-first order. The cycle count of the last frame is reported.
`timescale 1ns/1ps
module cl_harness #(
  parameter int ICH = 4, IH = 8, IW = 8, OCH = 8, OP = 4, S = 1,
  parameter bit HAS_SKIP = 0, HAS_DS = 0, FWD = 0,
  parameter int OWP = 2, NF = 2, SEED = 11, SH = 8, SKSH = 3, DSSH = 7
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  import resnet_pkg::*;
  import ref_pkg::*;
  localparam int OH = (IH + 2 - 3) / S + 1, OW = (IW + 2 - 3) / S + 1;

  logic in_valid, in_ready, load_valid, load_ready, skip_valid, skip_ready;
  logic out_valid, out_ready, ds_valid, ds_ready, fwd_valid, fwd_ready;
  logic [7:0] load_data;
  act_t [OWP-1:0] in_data, skip_data, out_data, ds_data, fwd_data;

  conv_layer #(.ICH(ICH), .IH(IH), .IW(IW), .OCH(OCH), .OCH_PAR(OP), .FH(3), .FW(3),
               .S(S), .P(1), .OW_PAR(OWP), .RELU(1), .OUT_SHIFT(SH),
               .HAS_SKIP(HAS_SKIP), .SKIP_SHIFT(SKSH), .HAS_DS(HAS_DS), .DS_SHIFT(DSSH),
               .FWD(FWD), .SEED(SEED), .USE_URAM(0)) dut (.*);

  typedef act_t [OWP-1:0] tok_t;
  tok_t in_q[$], skip_q[$], out_q[$], ds_q[$], fwd_q[$];

  // Tokens of a tensor of shape h x w x c in stream order.
  task automatic push_tokens(ref tok_t q[$], input tensor_t t, input int h, input int w, input int c);
    for (int y = 0; y < h; y++)
      for (int g = 0; g < w/OWP; g++)
        for (int ch = 0; ch < c; ch++) begin
          tok_t k;
          for (int n = 0; n < OWP; n++) k[n] = act_t'(t[(y*w + g*OWP + n)*c + ch]);
          q.push_back(k);
        end
  endtask

  initial begin
    tensor_t x, sk, y, none, d;
    checks = 0; failures = 0; done = 0;
    for (int f = 0; f < NF; f++) begin
      x = rand_tensor(IH*IW*ICH, -128, 127);
      if (f == 1) x = rand_tensor(IH*IW*ICH, 0, 127);
      sk = HAS_SKIP ? rand_tensor(OH*OW*OCH, -128, 127) : none;
      y = conv(x, ICH, IH, IW, OCH, 3, 3, S, 1, SEED, SH, 1'b1, sk, SKSH);
      push_tokens(in_q, x, IH, IW, ICH);
      push_tokens(out_q, y, OH, OW, OCH);
      if (HAS_SKIP) push_tokens(skip_q, sk, OH, OW, OCH);
      if (FWD) push_tokens(fwd_q, x, IH, IW, ICH);
      if (HAS_DS) begin
        d = downsample(x, ICH, IH, IW, OCH, SEED, DSSH);
        push_tokens(ds_q, d, OH, OW, OCH);
      end
    end
  end

  task automatic cmp(input string what, ref tok_t q[$], input tok_t got);
    checks++;
    if (q.size() == 0 || got !== q[0]) begin
      failures++;
      if (failures < 10) $display("%s mismatch (%0d left): got %p exp %p", what, q.size(), got,
                                  q.size() ? q[0] : '0);
    end
    if (q.size()) void'(q.pop_front());
  endtask

  initial begin
    bit wi, ws, ro, rd, rf;
    int t0, per;
    load_valid = 0; load_data = 0;
    in_valid = 0; skip_valid = 0; out_ready = 0; ds_ready = 0; fwd_ready = 0;
    in_data = '0; skip_data = '0;
    t0 = 0;
    @(posedge rst_n);
    while (out_q.size() || ds_q.size() || fwd_q.size()) begin
      @(negedge clk);
      in_valid   = in_q.size() > 0 && $urandom % 8 != 0;
      in_data    = in_q.size() ? in_q[0] : '0;
      skip_valid = skip_q.size() > 0 && $urandom % 8 != 0;
      skip_data  = skip_q.size() ? skip_q[0] : '0;
      out_ready  = $urandom % 6 != 0;
      ds_ready   = $urandom % 6 != 0;
      fwd_ready  = $urandom % 6 != 0;
      #0.2;
      wi = in_valid && in_ready;   ws = skip_valid && skip_ready;
      ro = out_valid && out_ready; rd = ds_valid && ds_ready; rf = fwd_valid && fwd_ready;
      if (ro) cmp("out", out_q, out_data);
      if (rd) cmp("ds", ds_q, ds_data);
      if (rf) cmp("fwd", fwd_q, fwd_data);
      if (wi) begin
        void'(in_q.pop_front());
        if (in_q.size() == (IH*IW*ICH/OWP) - 1) t0 = $time;
      end
      if (ws) void'(skip_q.pop_front());
      @(posedge clk);
    end
    per = ($time - t0) / 2;
    $display("last frame took %0d cycles", per);
    repeat (20) @(posedge clk);
    checks++;
    if (out_valid || ds_valid || fwd_valid) begin failures++; $display("extra output"); end
    done = 1;
  end
endmodule
