// tb_fifo_queue: self-checking test of fifo_queue.
// Random pushes and pops (never on full / empty) against a queue model;
// checks head data, full and empty every cycle.
module tb_fifo_queue;
  localparam int W = 20, D = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0;

  fifo_queue #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("FAIL flags size=%0d full=%b empty=%b", q.size(), full, empty);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL head %h exp %h", dout, q[0]); end
      end
      push = !full && ($urandom_range(0, 99) < 55);
      pop  = !empty && ($urandom_range(0, 99) < 50);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
