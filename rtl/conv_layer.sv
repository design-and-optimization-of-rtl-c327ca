// conv_layer: one convolution node of the dataflow accelerator.
//
// Wires the tasks of one convolution with streams:
//   in_* -> pad_task -> window_buffer -> (window stream) -> conv_compute -> out_*
//   param_task -> (2-deep parameter stream) -> conv_compute
// The tasks run concurrently and are driven only by data availability; the
// node has no start/done control. Optional parts:
//   FWD      : the window buffer's forwarded stream (temporal reuse) on fwd_*
//   HAS_SKIP : skip-connection input skip_*, folded into the accumulators
//   HAS_DS   : merged pointwise stride-2 downsample, result on ds_*
//   USE_URAM : parameters loaded once from load_* instead of configured
// Input and output are depth-first streams of OW_PAR-pixel tokens, one
// channel per token. A fully connected layer is the case IH = IW = 1,
// FH = FW = 1, P = 0, OW_PAR = 1.
//
// Timing: no fixed latency; each task moves one token per cycle when its
// neighbours allow. The division into padding, window, parameter and
// computation tasks follows the source design. The stream depths are this
// design's own: the window stream is 2 deep, except for a strided layer,
// whose windows all appear during every other input row; there it holds one
// output row of windows, (OW/OW_PAR)*ICH entries, so that the computation
// keeps working while the odd rows stream in.
module conv_layer
  import resnet_pkg::*;
#(
  parameter int unsigned ICH        = 16,
  parameter int unsigned IH         = 32,
  parameter int unsigned IW         = 32,
  parameter int unsigned OCH        = 16,
  parameter int unsigned OCH_PAR    = 16,
  parameter int unsigned FH         = 3,
  parameter int unsigned FW         = 3,
  parameter int unsigned S          = 1,
  parameter int unsigned P          = 1,
  parameter int unsigned OW_PAR     = 2,
  parameter bit          RELU       = 1,
  parameter int unsigned OUT_SHIFT  = 8,
  parameter bit          HAS_SKIP   = 0,
  parameter int unsigned SKIP_SHIFT = 4,
  parameter bit          HAS_DS     = 0,
  parameter int unsigned DS_SHIFT   = 6,
  parameter bit          FWD        = 0,
  parameter int unsigned SEED       = 1,
  parameter bit          USE_URAM   = 0,
  localparam int unsigned K         = FH * FW,
  localparam int unsigned PW        = OCH_PAR * (K*8 + 16 + 8 + 16)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  act_t [OW_PAR-1:0]  in_data,
  input  logic               load_valid,
  output logic               load_ready,
  input  logic [7:0]         load_data,
  input  logic               skip_valid,
  output logic               skip_ready,
  input  act_t [OW_PAR-1:0]  skip_data,
  output logic               out_valid,
  input  logic               out_ready,
  output act_t [OW_PAR-1:0]  out_data,
  output logic               ds_valid,
  input  logic               ds_ready,
  output act_t [OW_PAR-1:0]  ds_data,
  output logic               fwd_valid,
  input  logic               fwd_ready,
  output act_t [OW_PAR-1:0]  fwd_data
);

  logic                      pad_valid, pad_ready;
  act_t [OW_PAR-1:0]         pad_data;
  logic                      wb_valid, wb_ready, win_valid, win_ready;
  act_t [OW_PAR-1:0][K-1:0]  wb_data, win_data;
  logic                      par_valid, par_ready;
  logic [PW-1:0]             par_data;

  pad_task #(.ICH(ICH), .IH(IH), .IW(IW), .P(P), .OW_PAR(OW_PAR)) u_pad (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(pad_valid), .out_ready(pad_ready), .out_data(pad_data)
  );

  window_buffer #(.ICH(ICH), .IH(IH), .IW(IW), .FH(FH), .FW(FW), .S(S), .P(P),
                  .OW_PAR(OW_PAR), .FWD(FWD)) u_wb (
    .clk, .rst_n,
    .in_valid(pad_valid), .in_ready(pad_ready), .in_data(pad_data),
    .win_valid(wb_valid), .win_ready(wb_ready), .win_data(wb_data),
    .fwd_valid, .fwd_ready, .fwd_data
  );

  // Window stream: 2 deep, or one output row of windows for a strided
  // convolution, whose windows all appear during every other input row.
  localparam int unsigned OWD = (IW + 2*P - FW) / S + 1;
  localparam int unsigned WIN_DEPTH = (S > 1) ? (OWD / OW_PAR) * ICH : 2;

  stream_fifo #(.W(OW_PAR*K*8), .DEPTH(WIN_DEPTH)) u_win_stream (
    .clk, .rst_n,
    .in_valid(wb_valid), .in_ready(wb_ready), .in_data(wb_data),
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  param_task #(.ICH(ICH), .OCH(OCH), .OCH_PAR(OCH_PAR), .K(K), .HAS_DS(HAS_DS),
               .SEED(SEED), .USE_URAM(USE_URAM)) u_par (
    .clk, .rst_n,
    .load_valid, .load_ready, .load_data,
    .out_valid(par_valid), .out_ready(par_ready), .out_data(par_data)
  );

  conv_compute #(.ICH(ICH), .OCH(OCH), .OCH_PAR(OCH_PAR), .OW_PAR(OW_PAR), .K(K),
                 .RELU(RELU), .OUT_SHIFT(OUT_SHIFT), .HAS_SKIP(HAS_SKIP),
                 .SKIP_SHIFT(SKIP_SHIFT), .HAS_DS(HAS_DS), .DS_SHIFT(DS_SHIFT)) u_comp (
    .clk, .rst_n,
    .win_valid, .win_ready, .win_data,
    .par_valid, .par_ready, .par_data,
    .skip_valid, .skip_ready, .skip_data,
    .out_valid, .out_ready, .out_data,
    .ds_valid, .ds_ready, .ds_data
  );

endmodule
