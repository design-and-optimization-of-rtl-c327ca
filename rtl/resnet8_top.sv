// resnet8_top: ResNet8 (CIFAR-10) inference accelerator as a dataflow of
// concurrent tasks.
//
// Every layer is its own hardware: a convolution node (pad task, window
// buffer, parameter task, computation task) or a pooling task, connected by
// streams. Frames flow through continuously; each task works whenever its
// input streams hold data and its output streams have room, and there is no
// global controller. Network, in stream order:
//   L0   : conv 3x3, 3 -> 16, 32x32, ReLU
//   B1   : residual block without downsample, 16 channels, 32x32.
//          conv0's window buffer forwards its input (temporal reuse) as the
//          skip stream; conv1 starts its accumulators from bias + skip.
//   B2   : residual block with downsample, 16 -> 32, 16x16. The pointwise
//          stride-2 downsample is merged into conv0's loop (loop merge) and
//          its output is the skip stream of conv1.
//   B3   : as B2, 32 -> 64, 8x8.
//   POOL : global average pooling 8x8 -> 64
//   FC   : fully connected 64 -> 10 (a 1x1 convolution on a 1x1 image)
// The layer shapes are those of the ResNet8 network used in the evaluation
// (the MLPerf Tiny model); the source gives the residual-block shapes, the
// rest of the topology is standard knowledge about that model.
//
// Parallelism: output pixels per cycle OW_PAR = 2 on every 3x3 layer (one
// packed DSP per two MACs) and OCH_PAR output channels per layer, chosen so
// that the heavy layers need the same number of cycles per frame (8192), as
// the source's throughput-balancing ILP would; about 780 packed DSP stages
// in all. Skip streams are FIFOs about as deep as conv1's window buffer.
//
// Timing: streaming, no fixed latency. In simulation with random input gaps
// and output back-pressure the first scores appear about 14100 cycles after
// the first input token, and frames complete about 11100 cycles apart (the
// balanced ideal is 8192; block 1's padded input takes 9792).
//
// Interface:
//   in_*   : image stream, 32x32x3 int8, depth-first (row, column pair,
//            channel), two horizontally adjacent pixels per token
//   load_* : parameter byte stream, used only when USE_URAM = 1; the bytes
//            of the eight convolutions' arrays one after the other
//   out_*  : 10 int8 class scores per frame, class 0 first
//   params_loaded : all parameter memories hold their data
//
// Lint notes: ports of conv_layer that a layer does not use (skip_ready
// without a skip input, fwd_* and ds_* when not enabled) are left open on
// purpose, and load_* is unused in block-RAM mode.
module resnet8_top
  import resnet_pkg::*;
#(
  parameter bit          USE_URAM = 0,
  // output channels computed in parallel per layer
  parameter int unsigned OP_L0    = 4,
  parameter int unsigned OP_B1C0  = 16,
  parameter int unsigned OP_B1C1  = 16,
  parameter int unsigned OP_B2C0  = 8,
  parameter int unsigned OP_B2C1  = 16,
  parameter int unsigned OP_B3C0  = 8,
  parameter int unsigned OP_B3C1  = 16,
  parameter int unsigned OP_FC    = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  act_t [1:0]    in_data,
  input  logic          load_valid,
  output logic          load_ready,
  input  logic [7:0]    load_data,
  output logic          params_loaded,
  output logic          out_valid,
  input  logic          out_ready,
  output act_t          out_data
);

  localparam int unsigned NL = 8;
  // requantisation shifts (powers of two scales of the quantised model)
  localparam int unsigned SH_L0 = 9, SH_B1C0 = 10, SH_B1C1 = 9, SH_B2C0 = 10,
                          SH_B2C1 = 10, SH_B3C0 = 10, SH_B3C1 = 10, SH_FC = 6;
  localparam int unsigned SK_B1 = 3, SK_B2 = 3, SK_B3 = 3, SH_DS = 9;

  // Bytes of each convolution's parameter array (param_task word x depth).
  function automatic int unsigned pbytes(input int unsigned ich, input int unsigned och,
                                         input int unsigned op, input int unsigned k);
    return (op * (k*8 + 16 + 8 + 16) / 8) * ich * (och / op);
  endfunction
  localparam int unsigned LEN [NL] = '{
    pbytes(3, 16, OP_L0, 9),   pbytes(16, 16, OP_B1C0, 9), pbytes(16, 16, OP_B1C1, 9),
    pbytes(16, 32, OP_B2C0, 9), pbytes(32, 32, OP_B2C1, 9), pbytes(32, 64, OP_B3C0, 9),
    pbytes(64, 64, OP_B3C1, 9), pbytes(64, 10, OP_FC, 1)};

  // Skip FIFO depth in tokens: two padded rows of conv1's input plus a few
  // tokens, i.e. about conv1's window buffer (rows of TWP tokens, OW_PAR = 2).
  function automatic int unsigned skip_depth(input int unsigned iw, input int unsigned ch);
    return (2 * (iw/2 + 2) + 6) * ch;
  endfunction

  // ------------------------------------------------- parameter distribution
  logic [NL-1:0] ld_valid, ld_ready;
  logic [7:0]    ld_data;
  logic          ld_done;

  if (USE_URAM) begin : g_load
    param_splitter #(.NL(NL), .LEN(LEN)) u_split (
      .clk, .rst_n,
      .in_valid(load_valid), .in_ready(load_ready), .in_data(load_data),
      .out_valid(ld_valid), .out_ready(ld_ready), .out_data(ld_data), .done(ld_done)
    );
  end else begin : g_noload
    assign load_ready = 1'b0;
    assign ld_valid   = '0;
    assign ld_data    = '0;
    assign ld_done    = 1'b1;
  end
  assign params_loaded = ld_done;

  // ------------------------------------------------------------ streams
  typedef act_t [1:0] tok_t;
  logic a0_v, a0_r, b1_v, b1_r, f1_v, f1_r, s1_v, s1_r, c1_v, c1_r;
  logic b2_v, b2_r, d2_v, d2_r, s2_v, s2_r, c2_v, c2_r;
  logic b3_v, b3_r, d3_v, d3_r, s3_v, s3_r, c3_v, c3_r;
  logic p_v, p_r;
  tok_t a0_d, b1_d, f1_d, s1_d, c1_d, b2_d, d2_d, s2_d, c2_d, b3_d, d3_d, s3_d, c3_d;
  act_t p_d;
  tok_t unused_tok [6];
  logic unused_v [6];
  act_t [0:0] fc_out, fc_unused [2];
  logic fc_unused_v [2];

  // L0 ----------------------------------------------------------------
  conv_layer #(.ICH(3), .IH(32), .IW(32), .OCH(16), .OCH_PAR(OP_L0), .S(1),
               .OUT_SHIFT(SH_L0), .SEED(1), .USE_URAM(USE_URAM)) u_l0 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .load_valid(ld_valid[0]), .load_ready(ld_ready[0]), .load_data(ld_data),
    .skip_valid(1'b0), .skip_ready(), .skip_data('0),
    .out_valid(a0_v), .out_ready(a0_r), .out_data(a0_d),
    .ds_valid(unused_v[0]), .ds_ready(1'b1), .ds_data(unused_tok[0]),
    .fwd_valid(unused_v[1]), .fwd_ready(1'b1), .fwd_data(unused_tok[1])
  );

  // Block 1: temporal reuse ---------------------------------------------
  conv_layer #(.ICH(16), .IH(32), .IW(32), .OCH(16), .OCH_PAR(OP_B1C0), .S(1),
               .OUT_SHIFT(SH_B1C0), .FWD(1), .SEED(2), .USE_URAM(USE_URAM)) u_b1c0 (
    .clk, .rst_n,
    .in_valid(a0_v), .in_ready(a0_r), .in_data(a0_d),
    .load_valid(ld_valid[1]), .load_ready(ld_ready[1]), .load_data(ld_data),
    .skip_valid(1'b0), .skip_ready(), .skip_data('0),
    .out_valid(b1_v), .out_ready(b1_r), .out_data(b1_d),
    .ds_valid(unused_v[2]), .ds_ready(1'b1), .ds_data(unused_tok[2]),
    .fwd_valid(f1_v), .fwd_ready(f1_r), .fwd_data(f1_d)
  );

  stream_fifo #(.W(16), .DEPTH(skip_depth(32, 16))) u_skip1 (
    .clk, .rst_n, .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d)
  );

  conv_layer #(.ICH(16), .IH(32), .IW(32), .OCH(16), .OCH_PAR(OP_B1C1), .S(1),
               .OUT_SHIFT(SH_B1C1), .HAS_SKIP(1), .SKIP_SHIFT(SK_B1), .SEED(3),
               .USE_URAM(USE_URAM)) u_b1c1 (
    .clk, .rst_n,
    .in_valid(b1_v), .in_ready(b1_r), .in_data(b1_d),
    .load_valid(ld_valid[2]), .load_ready(ld_ready[2]), .load_data(ld_data),
    .skip_valid(s1_v), .skip_ready(s1_r), .skip_data(s1_d),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d),
    .ds_valid(unused_v[3]), .ds_ready(1'b1), .ds_data(unused_tok[3]),
    .fwd_valid(), .fwd_ready(1'b1), .fwd_data()
  );

  // Block 2: loop merge ---------------------------------------------------
  conv_layer #(.ICH(16), .IH(32), .IW(32), .OCH(32), .OCH_PAR(OP_B2C0), .S(2),
               .OUT_SHIFT(SH_B2C0), .HAS_DS(1), .DS_SHIFT(SH_DS), .SEED(4),
               .USE_URAM(USE_URAM)) u_b2c0 (
    .clk, .rst_n,
    .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .load_valid(ld_valid[3]), .load_ready(ld_ready[3]), .load_data(ld_data),
    .skip_valid(1'b0), .skip_ready(), .skip_data('0),
    .out_valid(b2_v), .out_ready(b2_r), .out_data(b2_d),
    .ds_valid(d2_v), .ds_ready(d2_r), .ds_data(d2_d),
    .fwd_valid(unused_v[4]), .fwd_ready(1'b1), .fwd_data(unused_tok[4])
  );

  stream_fifo #(.W(16), .DEPTH(skip_depth(16, 32))) u_skip2 (
    .clk, .rst_n, .in_valid(d2_v), .in_ready(d2_r), .in_data(d2_d),
    .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d)
  );

  conv_layer #(.ICH(32), .IH(16), .IW(16), .OCH(32), .OCH_PAR(OP_B2C1), .S(1),
               .OUT_SHIFT(SH_B2C1), .HAS_SKIP(1), .SKIP_SHIFT(SK_B2), .SEED(6),
               .USE_URAM(USE_URAM)) u_b2c1 (
    .clk, .rst_n,
    .in_valid(b2_v), .in_ready(b2_r), .in_data(b2_d),
    .load_valid(ld_valid[4]), .load_ready(ld_ready[4]), .load_data(ld_data),
    .skip_valid(s2_v), .skip_ready(s2_r), .skip_data(s2_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d),
    .ds_valid(unused_v[5]), .ds_ready(1'b1), .ds_data(unused_tok[5]),
    .fwd_valid(), .fwd_ready(1'b1), .fwd_data()
  );

  // Block 3: loop merge ---------------------------------------------------
  conv_layer #(.ICH(32), .IH(16), .IW(16), .OCH(64), .OCH_PAR(OP_B3C0), .S(2),
               .OUT_SHIFT(SH_B3C0), .HAS_DS(1), .DS_SHIFT(SH_DS), .SEED(7),
               .USE_URAM(USE_URAM)) u_b3c0 (
    .clk, .rst_n,
    .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .load_valid(ld_valid[5]), .load_ready(ld_ready[5]), .load_data(ld_data),
    .skip_valid(1'b0), .skip_ready(), .skip_data('0),
    .out_valid(b3_v), .out_ready(b3_r), .out_data(b3_d),
    .ds_valid(d3_v), .ds_ready(d3_r), .ds_data(d3_d),
    .fwd_valid(), .fwd_ready(1'b1), .fwd_data()
  );

  stream_fifo #(.W(16), .DEPTH(skip_depth(8, 64))) u_skip3 (
    .clk, .rst_n, .in_valid(d3_v), .in_ready(d3_r), .in_data(d3_d),
    .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d)
  );

  conv_layer #(.ICH(64), .IH(8), .IW(8), .OCH(64), .OCH_PAR(OP_B3C1), .S(1),
               .OUT_SHIFT(SH_B3C1), .HAS_SKIP(1), .SKIP_SHIFT(SK_B3), .SEED(9),
               .USE_URAM(USE_URAM)) u_b3c1 (
    .clk, .rst_n,
    .in_valid(b3_v), .in_ready(b3_r), .in_data(b3_d),
    .load_valid(ld_valid[6]), .load_ready(ld_ready[6]), .load_data(ld_data),
    .skip_valid(s3_v), .skip_ready(s3_r), .skip_data(s3_d),
    .out_valid(c3_v), .out_ready(c3_r), .out_data(c3_d),
    .ds_valid(), .ds_ready(1'b1), .ds_data(),
    .fwd_valid(), .fwd_ready(1'b1), .fwd_data()
  );

  // Pooling and classifier ----------------------------------------------
  avgpool #(.ICH(64), .IH(8), .IW(8), .OW_PAR(2)) u_pool (
    .clk, .rst_n,
    .in_valid(c3_v), .in_ready(c3_r), .in_data(c3_d),
    .out_valid(p_v), .out_ready(p_r), .out_data(p_d)
  );

  conv_layer #(.ICH(64), .IH(1), .IW(1), .OCH(10), .OCH_PAR(OP_FC), .FH(1), .FW(1),
               .S(1), .P(0), .OW_PAR(1), .RELU(0), .OUT_SHIFT(SH_FC), .SEED(10),
               .USE_URAM(USE_URAM)) u_fc (
    .clk, .rst_n,
    .in_valid(p_v), .in_ready(p_r), .in_data(p_d),
    .load_valid(ld_valid[7]), .load_ready(ld_ready[7]), .load_data(ld_data),
    .skip_valid(1'b0), .skip_ready(), .skip_data('0),
    .out_valid, .out_ready, .out_data(fc_out),
    .ds_valid(fc_unused_v[0]), .ds_ready(1'b1), .ds_data(fc_unused[0]),
    .fwd_valid(fc_unused_v[1]), .fwd_ready(1'b1), .fwd_data(fc_unused[1])
  );
  assign out_data = fc_out[0];

endmodule
