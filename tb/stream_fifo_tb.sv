// stream_fifo_tb: random traffic through a 3-deep stream against a queue
// model. Checks the order and value of every word read, that in_ready is
// low exactly when the model holds DEPTH words, and that a full FIFO read and
// written in the same cycle keeps streaming.
`timescale 1ns/1ps
module stream_fifo_tb;
  localparam int DEPTH = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [15:0] model [$];

  stream_fifo #(.W(16), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit rd, wr;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((it / 500) % 2 ? 80 : 40);
      out_ready = ($urandom % 100) < ((it / 500) % 2 ? 40 : 80);
      in_data   = 16'($urandom);
      checks++;
      if (in_ready != (model.size() < DEPTH) || out_valid != (model.size() != 0)) begin
        failures++;
        $display("flags: in_ready=%0d out_valid=%0d model=%0d", in_ready, out_valid, model.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin
          failures++;
          $display("data: got %h expected %h", out_data, model[0]);
        end
      end
      rd = out_valid && out_ready;
      wr = in_valid && in_ready;
      @(posedge clk);
      if (rd) void'(model.pop_front());
      if (wr) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
