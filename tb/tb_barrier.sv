// tb_barrier: self-checking test of barrier.
// Four participants arrive once per round at random times; 'release' must
// rise exactly in the cycle of the last arrival and never earlier.
module tb_barrier;
  logic clk = 0, rst_n = 0, release_o;
  logic [3:0] arrive = '0, seen;
  int checks = 0, failures = 0, rounds = 0;

  barrier #(.N(4)) dut (.*);
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
    seen = '0;
    while (rounds < 300) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) arrive[i] = !seen[i] && ($urandom_range(0, 3) == 0);
      #1;
      checks++;
      if (release_o != ((seen | arrive) == 4'hF)) begin
        failures++; $display("FAIL round %0d seen=%b arrive=%b rel=%b", rounds, seen, arrive, release_o);
      end
      @(posedge clk);
      seen = seen | arrive;
      if (seen == 4'hF) begin seen = '0; rounds++; end
      #1 arrive = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
