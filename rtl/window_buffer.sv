// window_buffer: the window buffer tasks of one convolution or pooling node.
//
// The input is the padded activation stream of one frame (see pad_task) in
// depth-first order: for each padded row yp, each token column gp, each
// channel c, one token of OW_PAR horizontally adjacent pixels. The buffer
// turns it into the stream of input windows that the computation task
// consumes: for each output row, each group of OW_PAR output pixels and each
// input channel, one window holding FH x FW activations per output pixel.
//
// Structure: a chain of FIFO slices (delay_slice), one per window position,
// as in the source's partitioned line buffer. Because the stream is
// depth-first, two horizontally neighbouring window positions are ICH tokens
// apart (slice size S1 = ICH) and the last position of a window row is
// (TWP - NT + 1)*ICH tokens from the first position of the next row (size
// S2), where TWP is the padded row length in tokens and NT the number of
// token columns a window spans. The taps of the chain therefore hold, at the
// moment a token arrives, an FH x NT grid of tokens ending at that token; a
// window is emitted when the arriving token is the last one a window needs,
// so every input token produces at most one window and the buffer always
// runs at one token per cycle when its consumer does.
// For OW_PAR = 2 each token carries two pixels, which gives the two
// interleaved chains of the source's drawing (each task output feeding the
// slice two positions further on) as a single chain of two-pixel tokens.
// The source prints S2 = (iw - fh - 1)*ich for its own tap layout; here the
// slice sizes follow from the depth-first distances above.
//
// Temporal reuse: when FWD = 1 every emitted window also sends the centre
// pixel(s) of its window on a second stream (fwd). For a 3x3, stride-1,
// pad-1 convolution the centre of output pixel (y, x)'s window is input
// pixel (y, x), so this stream is the input tensor again, in the order and
// at the rate of the convolution output: the skip connection of a residual
// block without downsampling, taken from the buffer instead of being stored
// twice. The source forwards values "once they have been completely used";
// taking them at the window centre is this design's choice.
//
// Handshake: an input token is accepted when it completes no window, or when
// both the window stream and (if used) the forward stream accept.
// Window element t = qh*FW + qw is row qh (0 = top), column qw (0 = left).
module window_buffer
  import resnet_pkg::*;
#(
  parameter int unsigned ICH    = 16,
  parameter int unsigned IH     = 32,
  parameter int unsigned IW     = 32,
  parameter int unsigned FH     = 3,
  parameter int unsigned FW     = 3,
  parameter int unsigned S      = 1,   // stride
  parameter int unsigned P      = 1,   // zero padding in pixels
  parameter int unsigned OW_PAR = 2,
  parameter bit          FWD    = 0,   // emit the forwarded (skip) stream
  localparam int unsigned K     = FH * FW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // padded input stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  act_t [OW_PAR-1:0]             in_data,
  // window stream: win_data[n][t]
  output logic                          win_valid,
  input  logic                          win_ready,
  output act_t [OW_PAR-1:0][K-1:0]      win_data,
  // forwarded stream (centre pixels), used when FWD = 1
  output logic                          fwd_valid,
  input  logic                          fwd_ready,
  output act_t [OW_PAR-1:0]             fwd_data
);

  localparam int unsigned TW   = IW / OW_PAR;
  localparam int unsigned PT   = cdiv(P, OW_PAR);
  localparam int unsigned TWP  = TW + 2*PT;
  localparam int unsigned IHP  = IH + 2*P;
  localparam int unsigned OH   = (IH + 2*P - FH) / S + 1;
  localparam int unsigned OW   = (IW + 2*P - FW) / S + 1;
  localparam int unsigned OWG  = OW / OW_PAR;
  // first and last token column used by the window of output group 0
  localparam int unsigned GL0  = ((OW_PAR - 1)*S + PT*OW_PAR + FW - 1 - P) / OW_PAR;
  localparam int unsigned GF0  = (PT*OW_PAR - P) / OW_PAR;
  localparam int unsigned NT   = GL0 - GF0 + 1;
  localparam int unsigned BASE = PT*OW_PAR - P - (GL0 - NT + 1)*OW_PAR;
  localparam int unsigned NTAP = FH * NT;
  localparam int unsigned TOKW = OW_PAR * 8;

  logic [TOKW-1:0] tap [NTAP];

  assign tap[0] = in_data;

  wire shift = in_valid && in_ready;

  for (genvar i = 1; i < NTAP; i++) begin : g_slice
    localparam int unsigned DEPTH = ((i % NT) != 0) ? ICH : (TWP - NT + 1) * ICH;
    delay_slice #(.W(TOKW), .DEPTH(DEPTH)) u_slice (
      .clk, .rst_n, .shift, .din(tap[i-1]), .dout(tap[i])
    );
  end

  // Position of the arriving token in the padded frame.
  logic [$clog2(IHP+1)-1:0] yp;
  logic [$clog2(TWP+1)-1:0] gp;
  logic [$clog2(ICH+1)-1:0] c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      yp <= '0; gp <= '0; c <= '0;
    end else if (shift) begin
      if (c == ICH - 1) begin
        c <= '0;
        if (gp == TWP - 1) begin
          gp <= '0;
          yp <= (yp == IHP - 1) ? '0 : yp + 1'b1;
        end else gp <= gp + 1'b1;
      end else c <= c + 1'b1;
    end
  end

  logic row_ok, col_ok, emit;
  always_comb begin
    row_ok = (yp >= FH - 1) && (((yp - (FH - 1)) % S) == 0) && (((yp - (FH - 1)) / S) < OH);
    col_ok = (gp >= GL0) && (((gp - GL0) % S) == 0) && (((gp - GL0) / S) < OWG);
    emit   = row_ok && col_ok;
  end

  // Map the tap grid onto the windows of the OW_PAR output pixels.
  always_comb begin
    for (int n = 0; n < OW_PAR; n++) begin
      for (int qh = 0; qh < FH; qh++) begin
        for (int qw = 0; qw < FW; qw++) begin
          int r, j, ti;
          r  = FH - 1 - qh;
          j  = BASE + n*S + qw;
          ti = r*NT + (NT - 1 - j / OW_PAR);
          win_data[n][qh*FW + qw] = act_t'(tap[ti][(j % OW_PAR)*8 +: 8]);
        end
      end
      fwd_data[n] = win_data[n][(FH/2)*FW + FW/2];
    end
  end

  logic fwd_ok;
  assign fwd_ok    = !FWD || fwd_ready;
  assign in_ready  = !emit || (win_ready && fwd_ok);
  assign win_valid = in_valid && emit && fwd_ok;
  assign fwd_valid = FWD && in_valid && emit && win_ready;

  if (TW * OW_PAR != IW || OWG * OW_PAR != OW) begin : g_bad_shape
    $error("window_buffer: IW and OW must be multiples of OW_PAR");
  end

endmodule
