// resnet8_top_tb: end-to-end test of the accelerator in its UltraRAM
// configuration (USE_URAM = 1), where every parameter array starts empty
// and is filled from the parameter byte stream during the first frame.
//
// The parameter stream is built here, layer after layer in network order,
// each layer's words in address order (l*OG + m) and each word least
// significant byte first, in the word layout of the parameter task:
// w[p][t] bytes, then bias[p], dsw[p], dsb[p] (16, 8, 16 bits). It is
// offered with random gaps while two random images are streamed in, so the
// first frame also waits for parameters. The ten scores of each frame are
// compared with ref_pkg::resnet8; the second frame runs on the stored
// parameters only.
//
// Mechanisms counted (a count of zero is a failure): parameter bytes taken,
// parameter words replayed from the filled memories, zero tokens inserted
// by the padding task, input tokens forwarded by the window buffer for the
// skip path, downsample tokens from the merged 1x1 convolution, skip words
// folded into accumulator initialisation, computation stalls, input
// back-pressure and output back-pressure.
`timescale 1ns/1ps
module resnet8_top_tb;
  import resnet_pkg::*;
  import ref_pkg::*;
  localparam int NFRAMES = 2, NL = 8;
  localparam int L_ICH [NL] = '{3, 16, 16, 16, 32, 32, 64, 64};
  localparam int L_OCH [NL] = '{16, 16, 16, 32, 32, 64, 64, 10};
  localparam int L_OP  [NL] = '{4, 16, 16, 8, 16, 8, 16, 10};
  localparam int L_K   [NL] = '{9, 9, 9, 9, 9, 9, 9, 1};
  localparam int L_SD  [NL] = '{1, 2, 3, 4, 6, 7, 9, 10};
  localparam bit L_DS  [NL] = '{0, 0, 0, 1, 0, 1, 0, 0};

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic       in_valid, in_ready, load_valid, load_ready, params_loaded;
  act_t [1:0] in_data;
  logic [7:0] load_data;
  logic       out_valid, out_ready;
  act_t       out_data;
  int checks = 0, failures = 0;

  resnet8_top #(.USE_URAM(1)) dut (.*);

  // parameter bytes of the whole network, in stream order
  logic [7:0] pbytes [$];

  task automatic build_stream();
    for (int i = 0; i < NL; i++) begin
      int ich, och, op, k, sd, og;
      ich = L_ICH[i]; och = L_OCH[i]; op = L_OP[i]; k = L_K[i]; sd = L_SD[i];
      og = och / op;
      for (int l = 0; l < ich; l++)
        for (int m = 0; m < og; m++) begin
          logic [7:0] wb [$];
          wb.delete();
          for (int p = 0; p < op; p++)
            for (int t = 0; t < k; t++) wb.push_back(8'(param_weight(sd, ((m*op + p)*ich + l)*k + t)));
          for (int p = 0; p < op; p++) begin
            logic [15:0] bv;
            bv = 16'(param_bias(sd, m*op + p));
            wb.push_back(bv[7:0]); wb.push_back(bv[15:8]);
          end
          for (int p = 0; p < op; p++)
            wb.push_back(L_DS[i] ? 8'(param_weight(sd + 1, (m*op + p)*ich + l)) : 8'h00);
          for (int p = 0; p < op; p++) begin
            logic [15:0] bv;
            bv = L_DS[i] ? 16'(param_bias(sd + 1, m*op + p)) : 16'h0000;
            wb.push_back(bv[7:0]); wb.push_back(bv[15:8]);
          end
          foreach (wb[j]) pbytes.push_back(wb[j]);
        end
    end
  endtask

  // mechanism counters
  longint cyc = 0;
  int n_load = 0, n_replay = 0, n_pad = 0, n_fwd = 0, n_ds = 0, n_skip = 0;
  int n_stall = 0, n_in_bp = 0, n_out_bp = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_load   += int'(load_valid && load_ready);
    n_replay += int'(dut.u_b3c1.u_par.g_uram.loaded_q && dut.u_b3c1.u_par.prod_valid &&
                     dut.u_b3c1.u_par.prod_ready);
    n_pad    += int'(dut.u_l0.pad_valid && dut.u_l0.pad_ready && !dut.u_l0.u_pad.in_img);
    n_fwd    += int'(dut.f1_v && dut.f1_r);
    n_ds     += int'(dut.d2_v && dut.d2_r) + int'(dut.d3_v && dut.d3_r);
    n_skip   += int'(dut.u_b1c1.u_comp.sw_valid && dut.u_b1c1.u_comp.sw_ready);
    n_stall  += int'(!dut.u_b1c1.u_comp.adv);
    n_in_bp  += int'(in_valid && !in_ready);
    n_out_bp += int'(out_valid && !out_ready);
  end

  task automatic mech(string name, int n);
    checks++;
    $display("  %-22s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("  mechanism '%s' never happened", name);
    end
  endtask

  task automatic finish_test();
    $display("mechanism counts:");
    mech("parameter bytes", n_load);
    mech("replayed words", n_replay);
    mech("padding tokens", n_pad);
    mech("forwarded tokens", n_fwd);
    mech("downsample tokens", n_ds);
    mech("skip words", n_skip);
    mech("compute stalls", n_stall);
    mech("input back-pressure", n_in_bp);
    mech("output back-pressure", n_out_bp);
    checks++;
    if (n_load != pbytes.size() || !params_loaded) begin
      failures++;
      $display("took %0d of %0d parameter bytes, params_loaded=%0d", n_load, pbytes.size(), params_loaded);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    finish_test();
  end

  tensor_t img [NFRAMES];
  tensor_t exp_out [NFRAMES];

  // parameter stream driver
  initial begin
    int idx;
    load_valid = 0; load_data = '0;
    build_stream();
    @(posedge rst_n);
    idx = 0;
    while (idx < pbytes.size()) begin
      @(negedge clk);
      load_valid = ($urandom % 8 != 0);
      load_data  = pbytes[idx];
      #0.2;
      if (load_valid && load_ready) idx++;
      @(posedge clk);
    end
    @(negedge clk);
    load_valid = 0;
  end

  // image driver
  initial begin
    in_valid = 0; in_data = '0;
    for (int f = 0; f < NFRAMES; f++) begin
      img[f] = rand_tensor(32*32*3, 0, 127);
      exp_out[f] = resnet8(img[f]);
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++)
      for (int y = 0; y < 32; y++)
        for (int k = 0; k < 16; k++)
          for (int c = 0; c < 3; c++) begin
            @(negedge clk);
            in_valid = 0;
            while ($urandom % 8 == 0) @(negedge clk);
            in_valid = 1;
            in_data[0] = act_t'(img[f][(y*32 + 2*k)*3 + c]);
            in_data[1] = act_t'(img[f][(y*32 + 2*k + 1)*3 + c]);
            #0.2;
            while (!in_ready) begin @(negedge clk); #0.2; end
            @(posedge clk);
          end
    @(negedge clk);
    in_valid = 0;
  end

  // score monitor
  initial begin
    out_ready = 0;
    @(posedge rst_n);
    for (int f = 0; f < NFRAMES; f++)
      for (int o = 0; o < 10; o++) begin
        forever begin
          @(negedge clk);
          out_ready = ($urandom % 4 != 0);
          #0.2;
          if (out_valid && out_ready) break;
        end
        checks++;
        if (int'(out_data) != exp_out[f][o]) begin
          failures++;
          $display("frame %0d class %0d: got %0d expected %0d", f, o, out_data, exp_out[f][o]);
        end
      end
    $display("scores of %0d frames done at cycle %0d", NFRAMES, cyc);
    finish_test();
  end
endmodule
