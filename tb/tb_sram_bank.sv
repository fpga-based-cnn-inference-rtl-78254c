// tb_sram_bank: self-checking test of sram_bank.
// Writes random tiles through port B, reads them back through port A and
// checks the one-cycle read latency, that read data hold while 're' is low,
// and that a read colliding with a write to the same address returns the
// old word.
module tb_sram_bank;
  localparam int DEPTH = 64, W = 144;
  logic clk = 0, re = 0, we = 0;
  logic [5:0] raddr = '0, waddr = '0;
  logic [W-1:0] rdata, wdata = '0;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_bank #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(logic [W-1:0] exp, string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = rnd(); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int a = $urandom_range(0, DEPTH-1);
      re = 1; raddr = 6'(a);
      @(negedge clk);
      re = 0;
      check(model[a], "read");
      @(negedge clk);
      check(model[a], "hold");
    end
    // read and write the same address in one cycle: old data come out
    for (int n = 0; n < 20; n++) begin
      automatic int a = $urandom_range(0, DEPTH-1);
      re = 1; raddr = 6'(a); we = 1; waddr = 6'(a); wdata = rnd();
      @(negedge clk);
      re = 0; we = 0;
      check(model[a], "collision old");
      model[a] = wdata;
      re = 1;
      @(negedge clk);
      re = 0;
      check(model[a], "collision new");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
