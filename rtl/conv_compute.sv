// conv_compute: convolution computation task.
//
// Implements the output-stationary loop nest of the source, per output
// position (row, group of OW_PAR pixels):
//   for l in ICH:             read one input window (channel l)
//     for m in OCH/OCH_PAR:   one cycle: OCH_PAR x OW_PAR x K MACs
//   write OCH x OW_PAR outputs
// OCH_PAR mac_column instances (the PEs) each multiply the K window taps of
// OW_PAR output pixels with the K weights of one output channel. A window is
// held for OCH/OCH_PAR cycles; a parameter word is consumed every cycle.
//
// Accumulators (32 bit) are kept for all OCH x OW_PAR outputs of the current
// position. At l = 0 an accumulator starts from the bias and, when HAS_SKIP,
// from the skip-connection value shifted to the accumulator scale
// (skip <<< SKIP_SHIFT): the residual addition is folded into the
// accumulator initialisation of the block's second convolution, so no
// separate add layer exists. At l = ICH-1 the sum is requantised
// (requant: round, >>> OUT_SHIFT, ReLU clip if RELU) and pushed into the
// output burst FIFO.
//
// Loop merge (HAS_DS): the pointwise stride-2 downsample convolution of a
// residual block reads the same input as the block's first 3x3 stride-2
// convolution; its input pixel is the centre of that window. It is computed
// in the same loop by OCH_PAR extra single-tap columns with its own
// accumulators, and its requantised result (no ReLU, DS_SHIFT) leaves on a
// second output stream, ds_*, at the same rate as the main output.
//
// Pipeline: issue, chain, restore/ADD, accumulate (latency 3). The whole
// pipeline stalls, without flushing, when a result must be written and an
// output FIFO is full; it also waits for a window, a parameter word and (at
// l = 0) a skip word.
module conv_compute
  import resnet_pkg::*;
#(
  parameter int unsigned ICH        = 16,
  parameter int unsigned OCH        = 16,
  parameter int unsigned OCH_PAR    = 16,
  parameter int unsigned OW_PAR     = 2,
  parameter int unsigned K          = 9,
  parameter bit          RELU       = 1,
  parameter int unsigned OUT_SHIFT  = 8,
  parameter bit          HAS_SKIP   = 0,
  parameter int unsigned SKIP_SHIFT = 4,
  parameter bit          HAS_DS     = 0,
  parameter int unsigned DS_SHIFT   = 6,
  localparam int unsigned PW        = OCH_PAR * (K*8 + 16 + 8 + 16)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        win_valid,
  output logic                        win_ready,
  input  act_t [OW_PAR-1:0][K-1:0]    win_data,
  input  logic                        par_valid,
  output logic                        par_ready,
  input  logic [PW-1:0]               par_data,
  input  logic                        skip_valid,
  output logic                        skip_ready,
  input  act_t [OW_PAR-1:0]           skip_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output act_t [OW_PAR-1:0]           out_data,
  output logic                        ds_valid,
  input  logic                        ds_ready,
  output act_t [OW_PAR-1:0]           ds_data
);

  localparam int unsigned OG   = OCH / OCH_PAR;
  localparam int unsigned MW   = (OG > 1) ? $clog2(OG) : 1;
  localparam int unsigned LW   = (ICH > 1) ? $clog2(ICH) : 1;
  localparam int unsigned CTR  = K / 2;     // centre tap (odd square filters)

  typedef struct packed {
    logic                                      valid;
    logic                                      first;   // l == 0
    logic                                      last;    // l == ICH-1
    logic [MW-1:0]                             m;
    acc_t [OCH_PAR-1:0][OW_PAR-1:0]            init;
    acc_t [OCH_PAR-1:0]                        ds_init;
  } side_t;

  // ---------------------------------------------------------------- issue
  logic [LW-1:0] l;
  logic [MW-1:0] m;
  logic          adv, issue;
  logic          sw_valid, sw_ready;
  act_t [OCH_PAR-1:0][OW_PAR-1:0] sw_data;

  if (HAS_SKIP) begin : g_skip
    skip_gather #(.OCH_PAR(OCH_PAR), .OW_PAR(OW_PAR)) u_gather (
      .clk, .rst_n,
      .in_valid(skip_valid), .in_ready(skip_ready), .in_data(skip_data),
      .out_valid(sw_valid), .out_ready(sw_ready), .out_data(sw_data)
    );
  end else begin : g_noskip
    assign skip_ready = 1'b0;
    assign sw_valid   = 1'b1;
    assign sw_data    = '0;
  end

  wire first_l = (l == '0);
  assign issue     = adv && win_valid && par_valid && (!first_l || sw_valid);
  assign par_ready = issue;
  assign win_ready = issue && (m == MW'(OG - 1));
  assign sw_ready  = issue && first_l && HAS_SKIP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l <= '0; m <= '0;
    end else if (issue) begin
      if (m == MW'(OG - 1)) begin
        m <= '0;
        l <= (l == LW'(ICH - 1)) ? '0 : l + 1'b1;
      end else m <= m + 1'b1;
    end
  end

  // Unpack the parameter word.
  wgt_t  [OCH_PAR-1:0][K-1:0] w;
  bias_t [OCH_PAR-1:0]        bias, dsb;
  wgt_t  [OCH_PAR-1:0]        dsw;
  side_t                      s0, s1, s2;

  always_comb begin
    for (int p = 0; p < OCH_PAR; p++) begin
      for (int t = 0; t < K; t++) w[p][t] = wgt_t'(par_data[(p*K + t)*8 +: 8]);
      bias[p] = bias_t'(par_data[OCH_PAR*K*8 + p*16 +: 16]);
      dsw[p]  = wgt_t'(par_data[OCH_PAR*(K*8+16) + p*8 +: 8]);
      dsb[p]  = bias_t'(par_data[OCH_PAR*(K*8+24) + p*16 +: 16]);
    end
    s0.valid = issue;
    s0.first = first_l;
    s0.last  = (l == LW'(ICH - 1));
    s0.m     = m;
    for (int p = 0; p < OCH_PAR; p++) begin
      s0.ds_init[p] = acc_t'(dsb[p]);
      for (int n = 0; n < OW_PAR; n++)
        s0.init[p][n] = acc_t'(bias[p]) + (HAS_SKIP ? (acc_t'(sw_data[p][n]) <<< SKIP_SHIFT) : '0);
    end
  end

  // ------------------------------------------------------- MAC columns
  acc_t [OCH_PAR-1:0][OW_PAR-1:0] sum, ds_sum;
  act_t [OW_PAR-1:0][0:0]         ctr_act;

  always_comb for (int n = 0; n < OW_PAR; n++) ctr_act[n][0] = win_data[n][CTR];

  for (genvar p = 0; p < OCH_PAR; p++) begin : g_pe
    mac_column #(.K(K), .OW_PAR(OW_PAR)) u_col (
      .clk, .en(adv), .act(win_data), .w(w[p]), .sum(sum[p])
    );
    if (HAS_DS) begin : g_ds
      mac_column #(.K(1), .OW_PAR(OW_PAR)) u_ds (
        .clk, .en(adv), .act(ctr_act), .w(dsw[p +: 1]), .sum(ds_sum[p])
      );
    end else begin : g_nods
      assign ds_sum[p] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
    end else if (adv) begin
      s1 <= s0;
      s2 <= s1;
    end
  end

  // --------------------------------------------------------- accumulate
  acc_t [OCH_PAR-1:0][OW_PAR-1:0] acc    [OG];
  acc_t [OCH_PAR-1:0][OW_PAR-1:0] ds_acc [OG];
  acc_t [OCH_PAR-1:0][OW_PAR-1:0] acc_new, ds_new;
  act_t [OCH_PAR-1:0][OW_PAR-1:0] q_out, q_ds;
  logic o_ready, d_ready;

  always_comb begin
    for (int p = 0; p < OCH_PAR; p++) begin
      for (int n = 0; n < OW_PAR; n++) begin
        acc_new[p][n] = (s2.first ? s2.init[p][n] : acc[s2.m][p][n]) + sum[p][n];
        ds_new[p][n]  = (s2.first ? s2.ds_init[p] : ds_acc[s2.m][p][n]) + ds_sum[p][n];
        q_out[p][n]   = requant(acc_new[p][n], OUT_SHIFT, RELU);
        q_ds[p][n]    = requant(ds_new[p][n], DS_SHIFT, 1'b0);
      end
    end
  end

  wire write_out = s2.valid && s2.last;
  assign adv = !(write_out && (!o_ready || (HAS_DS && !d_ready)));

  always_ff @(posedge clk) begin
    if (adv && s2.valid) begin
      acc[s2.m]    <= acc_new;
      ds_acc[s2.m] <= ds_new;
    end
  end

  burst_serializer #(.OCH_PAR(OCH_PAR), .OW_PAR(OW_PAR), .DEPTH(OG)) u_out (
    .clk, .rst_n,
    .in_valid(write_out && (!HAS_DS || d_ready)), .in_ready(o_ready), .in_data(q_out),
    .out_valid, .out_ready, .out_data
  );

  if (HAS_DS) begin : g_dsout
    burst_serializer #(.OCH_PAR(OCH_PAR), .OW_PAR(OW_PAR), .DEPTH(OG)) u_ds_out (
      .clk, .rst_n,
      .in_valid(write_out && o_ready), .in_ready(d_ready), .in_data(q_ds),
      .out_valid(ds_valid), .out_ready(ds_ready), .out_data(ds_data)
    );
  end else begin : g_nodsout
    assign d_ready  = 1'b1;
    assign ds_valid = 1'b0;
    assign ds_data  = '0;
  end

endmodule
