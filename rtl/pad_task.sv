// pad_task: padding task in front of a window buffer.
//
// Input: one frame of IH x IW x ICH activations in depth-first order
// (row, column group, channel), one token per handshake; a token carries
// OW_PAR horizontally adjacent pixels of one channel. Output: the same frame
// surrounded by P zero rows at top and bottom and by PT = ceil(P/OW_PAR)
// zero tokens (PT*OW_PAR zero pixels) at the left and right of every row,
// in the same order. Zeros are produced without consuming input; input
// tokens pass through combinationally (valid/ready), so the task adds no
// latency.
//
// The source places padding next to the window buffer ("padding is applied
// before generating the box for the convolution") but draws it after the
// FIFO slices; this design pads the stream before the slices, which lets
// every window be completed by a unique incoming token and needs no extra
// control at the end of a frame. The cost is one cycle per padding token.
module pad_task
  import resnet_pkg::*;
#(
  parameter int unsigned ICH    = 16,
  parameter int unsigned IH     = 32,
  parameter int unsigned IW     = 32,
  parameter int unsigned P      = 1,
  parameter int unsigned OW_PAR = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  act_t [OW_PAR-1:0]        in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output act_t [OW_PAR-1:0]        out_data
);

  localparam int unsigned TW  = IW / OW_PAR;
  localparam int unsigned PT  = cdiv(P, OW_PAR);
  localparam int unsigned TWP = TW + 2*PT;
  localparam int unsigned IHP = IH + 2*P;

  logic [$clog2(IHP+1)-1:0] yp;
  logic [$clog2(TWP+1)-1:0] gp;
  logic [$clog2(ICH+1)-1:0] c;

  wire in_img = (yp >= P) && (yp < IH + P) && (gp >= PT) && (gp < TW + PT);

  assign out_valid = in_img ? in_valid : 1'b1;
  assign in_ready  = in_img && out_ready;
  assign out_data  = in_img ? in_data : '0;

  wire step = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      yp <= '0; gp <= '0; c <= '0;
    end else if (step) begin
      if (c == ICH - 1) begin
        c <= '0;
        if (gp == TWP - 1) begin
          gp <= '0;
          yp <= (yp == IHP - 1) ? '0 : yp + 1'b1;
        end else gp <= gp + 1'b1;
      end else c <= c + 1'b1;
    end
  end

  if (IW % OW_PAR != 0) begin : g_bad_width
    $error("pad_task: IW must be a multiple of OW_PAR");
  end

endmodule
