// wb_harness: drives one window_buffer configuration for window_buffer_tb.
// It builds NF padded frames (3x3 filter, padding 1), streams them in with
// random gaps, applies random back-pressure on the window and forward
// streams, and compares every window and forwarded token with values
// computed directly from the input frame coordinates.
`timescale 1ns/1ps
module wb_harness #(
  parameter int ICH = 3, IH = 8, IW = 8, S = 1, OWP = 2, FWD = 1, NF = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  import resnet_pkg::*;
  localparam int K = 9, P = 1;
  localparam int TW = IW / OWP, PT = (P + OWP - 1) / OWP, TWP = TW + 2*PT, IHP = IH + 2*P;
  localparam int OH = (IH + 2*P - 3) / S + 1, OW = (IW + 2*P - 3) / S + 1, OWG = OW / OWP;

  logic in_valid, in_ready, win_valid, win_ready, fwd_valid, fwd_ready;
  act_t [OWP-1:0] in_data, fwd_data;
  act_t [OWP-1:0][K-1:0] win_data;

  window_buffer #(.ICH(ICH), .IH(IH), .IW(IW), .FH(3), .FW(3), .S(S), .P(P),
                  .OW_PAR(OWP), .FWD(FWD)) dut (.*);

  function automatic int pix(int f, int y, int x, int c);
    if (y < 0 || y >= IH || x < 0 || x >= IW) return 0;
    return 1 + ((f*IH*IW + y*IW + x)*ICH + c) % 125;
  endfunction

  act_t [OWP-1:0] in_q [$];
  act_t [OWP-1:0][K-1:0] win_q [$];
  act_t [OWP-1:0] fwd_q [$];

  initial begin
    act_t [OWP-1:0] tok;
    act_t [OWP-1:0][K-1:0] w;
    checks = 0; failures = 0; done = 0;
    for (int f = 0; f < NF; f++) begin
      for (int yp = 0; yp < IHP; yp++)
        for (int gp = 0; gp < TWP; gp++)
          for (int c = 0; c < ICH; c++) begin
            for (int n = 0; n < OWP; n++) tok[n] = act_t'(pix(f, yp - P, (gp - PT)*OWP + n, c));
            in_q.push_back(tok);
          end
      for (int oy = 0; oy < OH; oy++)
        for (int k = 0; k < OWG; k++)
          for (int c = 0; c < ICH; c++) begin
            for (int n = 0; n < OWP; n++) begin
              for (int qh = 0; qh < 3; qh++)
                for (int qw = 0; qw < 3; qw++)
                  w[n][qh*3 + qw] = act_t'(pix(f, oy*S - P + qh, (k*OWP + n)*S - P + qw, c));
              tok[n] = w[n][4];
            end
            win_q.push_back(w);
            fwd_q.push_back(tok);
          end
    end
  end

  initial begin
    bit rd, fr, wr;
    in_valid = 0; win_ready = 0; fwd_ready = 0; in_data = '0;
    @(posedge rst_n);
    while (win_q.size() > 0 || (FWD && fwd_q.size() > 0)) begin
      @(negedge clk);
      in_valid  = (in_q.size() > 0) && ($urandom % 5 != 0);
      in_data   = (in_q.size() > 0) ? in_q[0] : '0;
      win_ready = ($urandom % 4 != 0);
      fwd_ready = ($urandom % 4 != 0);
      #0.2;
      rd = win_valid && win_ready;
      fr = fwd_valid && fwd_ready;
      wr = in_valid && in_ready;
      if (rd) begin
        checks++;
        if (win_q.size() == 0 || win_data != win_q[0]) begin
          failures++;
          if (failures < 5) $display("S=%0d OWP=%0d window %0d wrong: got %h expected %h", S, OWP, checks, win_data, win_q[0]);
        end
        if (win_q.size() > 0) void'(win_q.pop_front());
      end
      if (fr) begin
        checks++;
        if (fwd_q.size() == 0 || fwd_data != fwd_q[0]) begin
          failures++;
          if (failures < 5) $display("forward token wrong: got %h", fwd_data);
        end
        if (fwd_q.size() > 0) void'(fwd_q.pop_front());
      end
      if (FWD && rd != fr) begin
        failures++;
        $display("window and forward streams not in step");
      end
      if (wr) void'(in_q.pop_front());
      @(posedge clk);
    end
    done = 1;
  end
endmodule
