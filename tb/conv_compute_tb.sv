// conv_compute_tb: computation task with a 1x1 filter, 4 input channels,
// 8 output channels in two groups of 4, two pixels per token, a skip input
// and the downsample path, for 24 output positions. Windows, parameter
// words (built here in the documented word layout, random values) and skip
// tokens are offered with random gaps; both outputs see random
// back-pressure, so the pipeline stalls often. Each output and downsample
// token is compared with sums computed here:
//   out = requant(bias + skip<<SKSH + sum_l x*w, SH, relu)
//   ds  = requant(dsb + sum_l x*dsw, DSSH, no relu).
`timescale 1ns/1ps
module conv_compute_tb;
  import resnet_pkg::*;
  localparam int ICH = 4, OCH = 8, OP = 4, OWP = 2, K = 1, OG = OCH / OP, NPOS = 24;
  localparam int SH = 6, SKSH = 3, DSSH = 5;
  localparam int PW = OP * (K*8 + 40);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic win_valid, win_ready, par_valid, par_ready, skip_valid, skip_ready;
  logic out_valid, out_ready, ds_valid, ds_ready;
  act_t [OWP-1:0][K-1:0] win_data;
  logic [PW-1:0] par_data;
  act_t [OWP-1:0] skip_data, out_data, ds_data;

  conv_compute #(.ICH(ICH), .OCH(OCH), .OCH_PAR(OP), .OW_PAR(OWP), .K(K), .RELU(1),
                 .OUT_SHIFT(SH), .HAS_SKIP(1), .SKIP_SHIFT(SKSH), .HAS_DS(1),
                 .DS_SHIFT(DSSH)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef act_t [OWP-1:0] tok_t;
  int w [OCH][ICH], b [OCH], dw [OCH][ICH], db [OCH];
  tok_t win_q[$], skip_q[$], out_q[$], ds_q[$];
  logic [PW-1:0] par_q[$];

  function automatic int rq(longint a, int sh, bit relu);
    longint r;
    r = (a + (longint'(1) << (sh - 1))) >>> sh;
    if (relu && r < 0) r = 0;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  initial begin
    for (int o = 0; o < OCH; o++) begin
      b[o]  = int'($urandom % 2048) - 1024;
      db[o] = int'($urandom % 2048) - 1024;
      for (int l = 0; l < ICH; l++) begin
        w[o][l]  = int'($urandom % 256) - 128;
        dw[o][l] = int'($urandom % 256) - 128;
      end
    end
    for (int pos = 0; pos < NPOS; pos++) begin
      int x [OWP][ICH], s [OWP][OCH];
      for (int n = 0; n < OWP; n++) begin
        for (int l = 0; l < ICH; l++) x[n][l] = int'($urandom % 256) - 128;
        for (int o = 0; o < OCH; o++) s[n][o] = int'($urandom % 256) - 128;
      end
      for (int l = 0; l < ICH; l++) begin
        tok_t t;
        for (int n = 0; n < OWP; n++) t[n] = act_t'(x[n][l]);
        win_q.push_back(t);
        for (int m = 0; m < OG; m++) begin
          logic [PW-1:0] wd;
          wd = '0;
          for (int p = 0; p < OP; p++) begin
            int o;
            o = m*OP + p;
            wd[p*8 +: 8] = 8'(w[o][l]);
            wd[OP*8 + p*16 +: 16] = 16'(b[o]);
            wd[OP*24 + p*8 +: 8] = 8'(dw[o][l]);
            wd[OP*32 + p*16 +: 16] = 16'(db[o]);
          end
          par_q.push_back(wd);
        end
      end
      for (int o = 0; o < OCH; o++) begin
        tok_t t, u, v;
        for (int n = 0; n < OWP; n++) begin
          longint acc, dacc;
          acc = b[o] + (longint'(s[n][o]) << SKSH);
          dacc = db[o];
          for (int l = 0; l < ICH; l++) begin
            acc  += x[n][l] * w[o][l];
            dacc += x[n][l] * dw[o][l];
          end
          t[n] = act_t'(s[n][o]);
          u[n] = act_t'(rq(acc, SH, 1'b1));
          v[n] = act_t'(rq(dacc, DSSH, 1'b0));
        end
        skip_q.push_back(t);
        out_q.push_back(u);
        ds_q.push_back(v);
      end
    end
  end

  task automatic cmp(input string what, ref tok_t q[$], input tok_t got);
    checks++;
    if (q.size() == 0 || got !== q[0]) begin
      failures++;
      if (failures < 10) $display("%s mismatch (%0d left)", what, q.size());
    end
    if (q.size()) void'(q.pop_front());
  endtask

  initial begin
    bit ww, wp, ws, ro, rd;
    win_valid = 0; par_valid = 0; skip_valid = 0; out_ready = 0; ds_ready = 0;
    win_data = '0; par_data = '0; skip_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (out_q.size() || ds_q.size()) begin
      @(negedge clk);
      win_valid  = win_q.size() > 0 && $urandom % 5 != 0;
      win_data   = win_q.size() ? win_q[0] : '0;
      par_valid  = par_q.size() > 0 && $urandom % 5 != 0;
      par_data   = par_q.size() ? par_q[0] : '0;
      skip_valid = skip_q.size() > 0 && $urandom % 4 != 0;
      skip_data  = skip_q.size() ? skip_q[0] : '0;
      out_ready  = $urandom % 3 != 0;
      ds_ready   = $urandom % 3 != 0;
      #0.2;
      ww = win_valid && win_ready; wp = par_valid && par_ready; ws = skip_valid && skip_ready;
      ro = out_valid && out_ready; rd = ds_valid && ds_ready;
      if (ro) cmp("out", out_q, out_data);
      if (rd) cmp("ds", ds_q, ds_data);
      if (ww) void'(win_q.pop_front());
      if (wp) void'(par_q.pop_front());
      if (ws) void'(skip_q.pop_front());
      @(posedge clk);
    end
    checks++;
    if (win_q.size() || par_q.size() || skip_q.size()) begin
      failures++;
      $display("inputs left over: %0d %0d %0d", win_q.size(), par_q.size(), skip_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
