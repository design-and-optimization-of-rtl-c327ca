// avgpool: global average-pooling computation task.
//
// Consumes one IH x IW x ICH frame in depth-first order (tokens of OW_PAR
// pixels of one channel) and keeps one 32-bit sum per channel. After the
// last token of the frame it emits ICH single-pixel tokens, channel 0 first,
// each the channel mean requant(sum, SHIFT) with SHIFT = log2(IH*IW): the
// pooling window is a power of two, so the division is a rounded shift, in
// keeping with the power-of-two scaling used throughout. While it emits, the
// task does not accept input (the emission takes ICH cycles per frame).
// The source names pooling tasks but does not describe their insides; this
// is the simplest circuit that performs the operation.
module avgpool
  import resnet_pkg::*;
#(
  parameter int unsigned ICH    = 64,
  parameter int unsigned IH     = 8,
  parameter int unsigned IW     = 8,
  parameter int unsigned OW_PAR = 2,
  localparam int unsigned SHIFT = $clog2(IH * IW)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  act_t [OW_PAR-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output act_t               out_data
);

  localparam int unsigned TW = IW / OW_PAR;
  localparam int unsigned CW = (ICH > 1) ? $clog2(ICH) : 1;

  acc_t            sum [ICH];
  logic [CW-1:0]   c;
  logic [$clog2(TW+1)-1:0] g;
  logic [$clog2(IH+1)-1:0] y;
  logic            emitting;

  assign in_ready  = !emitting;
  assign out_valid = emitting;
  assign out_data  = requant(sum[c], SHIFT, 1'b0);

  wire take = in_valid && in_ready;
  wire last = (y == IH - 1) && (g == TW - 1) && (c == CW'(ICH - 1));

  always_ff @(posedge clk) begin
    if (take) begin
      acc_t s;
      s = (g == 0 && y == 0) ? '0 : sum[c];
      for (int n = 0; n < OW_PAR; n++) s += acc_t'(in_data[n]);
      sum[c] <= s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; g <= '0; y <= '0; emitting <= 1'b0;
    end else if (take) begin
      if (last) begin
        emitting <= 1'b1;
        c <= '0; g <= '0; y <= '0;
      end else if (c == CW'(ICH - 1)) begin
        c <= '0;
        if (g == TW - 1) begin
          g <= '0;
          y <= y + 1'b1;
        end else g <= g + 1'b1;
      end else c <= c + 1'b1;
    end else if (out_valid && out_ready) begin
      if (c == CW'(ICH - 1)) begin
        c <= '0;
        emitting <= 1'b0;
      end else c <= c + 1'b1;
    end
  end

endmodule
