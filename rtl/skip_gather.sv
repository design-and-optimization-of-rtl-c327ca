// skip_gather: skip-connection input of a computation task.
//
// The skip stream arrives one channel per token (OW_PAR pixels of channel c,
// channels in increasing order per output position). The computation task
// adds the skip values of OCH_PAR channels at once, when it initialises the
// accumulators of one output-channel group, so this block collects OCH_PAR
// tokens into one word and offers it on a 2-deep stream.
module skip_gather
  import resnet_pkg::*;
#(
  parameter int unsigned OCH_PAR = 4,
  parameter int unsigned OW_PAR  = 2
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  act_t [OW_PAR-1:0]                in_data,
  output logic                             out_valid,
  input  logic                             out_ready,
  output act_t [OCH_PAR-1:0][OW_PAR-1:0]   out_data
);

  localparam int unsigned PWID = $clog2(OCH_PAR + 1);

  act_t [OCH_PAR-1:0][OW_PAR-1:0] word_q;
  logic [PWID-1:0]                cnt;
  logic                           w_ready;
  wire full = (cnt == PWID'(OCH_PAR));

  assign in_ready = !full;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) word_q[cnt[PWID-1:0] % OCH_PAR] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (in_valid && in_ready) cnt <= cnt + 1'b1;
    else if (full && w_ready) cnt <= '0;
  end

  stream_fifo #(.W(OCH_PAR*OW_PAR*8), .DEPTH(2)) u_fifo (
    .clk, .rst_n,
    .in_valid(full), .in_ready(w_ready), .in_data(word_q),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

endmodule
