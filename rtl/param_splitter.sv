// param_splitter: distributes the off-chip parameter stream to the parameter
// tasks of the individual convolutions (UltraRAM storage mode).
//
// The packed parameter array is read from off-chip memory once, at power-up,
// as a byte stream. The first LEN[0] bytes belong to convolution 0, the next
// LEN[1] to convolution 1, and so on; the splitter routes each byte to the
// stream of its convolution with a plain valid/ready handshake and then
// stops accepting (done = 1). Which byte goes where is set only by LEN, so
// the order of the array is the order of the convolutions in the network.
module param_splitter #(
  parameter int unsigned NL = 2,                         // convolutions
  parameter int unsigned LEN [NL] = '{default: 4}        // bytes per convolution
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [7:0]    in_data,
  output logic [NL-1:0] out_valid,
  input  logic [NL-1:0] out_ready,
  output logic [7:0]    out_data,
  output logic          done
);

  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1;

  logic [LW-1:0] sel;
  logic [31:0]   cnt;

  assign done     = (sel == LW'(NL - 1)) && (cnt == LEN[NL-1]);
  assign out_data = in_data;

  always_comb begin
    out_valid = '0;
    out_valid[sel] = in_valid && !done;
    in_ready = out_ready[sel] && !done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= '0;
      cnt <= '0;
    end else if (in_valid && in_ready) begin
      if (cnt + 1 == LEN[sel] && sel != LW'(NL - 1)) begin
        sel <= sel + 1'b1;
        cnt <= '0;
      end else cnt <= cnt + 1;
    end
  end

endmodule
