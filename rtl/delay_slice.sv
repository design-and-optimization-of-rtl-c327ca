// delay_slice: one FIFO slice of a window buffer.
//
// A FIFO that is always full: each time shift is high it outputs the word
// written DEPTH shifts earlier and stores the new one. It is built as a
// circular buffer with one write and one read per shift; the output is the
// word at the pointer, visible combinationally before the shift. Its depth
// is the distance, in tokens of the depth-first stream, between two
// neighbouring positions of the input window. Contents are not reset: they
// are overwritten by the padding rows before any window reads them.
module delay_slice #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         shift,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (shift) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (shift) ptr <= (ptr == AW'(DEPTH-1)) ? '0 : ptr + 1'b1;
  end

endmodule
