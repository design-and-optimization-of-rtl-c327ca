// burst_serializer: output stream of a computation task.
//
// The computation task finishes OCH_PAR output channels x OW_PAR pixels at a
// time and writes a burst of OCH/OCH_PAR such words per output position.
// They are held in a FIFO of DEPTH words (the source sizes this FIFO to
// och/och_par so a whole burst fits) and sent on one channel per handshake:
// a token of OW_PAR pixels of channel c, channels in increasing order, which
// is the depth-first order the next layer's window buffer expects.
module burst_serializer
  import resnet_pkg::*;
#(
  parameter int unsigned OCH_PAR = 4,
  parameter int unsigned OW_PAR  = 2,
  parameter int unsigned DEPTH   = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  act_t [OCH_PAR-1:0][OW_PAR-1:0]   in_data,
  output logic                             out_valid,
  input  logic                             out_ready,
  output act_t [OW_PAR-1:0]                out_data
);

  localparam int unsigned PWID = (OCH_PAR > 1) ? $clog2(OCH_PAR) : 1;

  logic                            f_valid, f_ready;
  act_t [OCH_PAR-1:0][OW_PAR-1:0]  f_data;
  logic [PWID-1:0]                 p;

  stream_fifo #(.W(OCH_PAR*OW_PAR*8), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
  );

  assign out_valid = f_valid;
  assign out_data  = f_data[p];
  assign f_ready   = out_ready && (p == PWID'(OCH_PAR - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p <= '0;
    else if (out_valid && out_ready) p <= (p == PWID'(OCH_PAR - 1)) ? '0 : p + 1'b1;
  end

endmodule
