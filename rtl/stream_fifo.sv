// stream_fifo: the stream (FIFO channel) that connects two concurrent tasks.
//
// A synchronous FIFO with valid/ready handshakes on both sides. A word is
// written when in_valid && in_ready and read when out_valid && out_ready.
// in_ready is low when the FIFO is full (a registered condition, so ready
// never ripples combinationally from one task to the next); out_valid is high
// whenever it holds a word, and out_data shows the oldest word (first-word
// fall-through, read combinationally from the storage array). With DEPTH >= 2
// it sustains one write and one read per cycle.
//
// Stream depths are chosen per stream type by the parent (2 for parameter
// streams, och/och_par for computation outputs, the window-buffer size for
// skip connections), as in the source's stream sizing rules.
//
// rst_n is an asynchronous reset for the pointers and also disables the two
// handshake assertions; lint reports that double use, which is intended.
module stream_fifo #(
  parameter int unsigned W     = 8,   // word width in bits
  parameter int unsigned DEPTH = 2    // number of words, >= 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign out_valid = (count != 0);
  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // Stream rules: no write into a full FIFO, no read from an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) do_rd |-> count != 0);

endmodule
