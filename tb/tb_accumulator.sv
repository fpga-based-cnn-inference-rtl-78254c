// tb_accumulator: self-checking test of accumulator.
// Streams random products from 4 sources with random valid bits for a random
// number of cycles, then flushes.  The emitted tile must equal
// ReLU(min(sum >> shift, 255)) of the integer sums kept here, one cycle after
// the flush, with the address taken from the marker; the next tile must start
// from zero.  Includes sums that go negative (ReLU) and overflow 255.
module tb_accumulator;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, addr_valid = 0, flush = 0, out_valid;
  prod_tile_t [3:0] prod;
  logic [3:0] prod_valid = '0;
  logic [ADDR_W-1:0] addr_in = '0;
  logic [4:0] shift = '0;
  wr_t out;
  int checks = 0, failures = 0, n_relu = 0, n_sat = 0;

  accumulator #(.NSRC(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum [NVAL];
    logic [ADDR_W-1:0] a;
    prod = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int len = $urandom_range(1, 40);
      for (int p = 0; p < NVAL; p++) sum[p] = 0;
      shift = 5'($urandom_range(0, 10));
      a = ADDR_W'($urandom);
      for (int c = 0; c < len; c++) begin
        for (int s = 0; s < 4; s++) begin
          prod_valid[s] = ($urandom_range(0, 3) != 0);
          for (int p = 0; p < NVAL; p++) begin
            prod[s][p] = prod_t'($signed($urandom_range(0, 130050)) - 65025);
            if (prod_valid[s]) sum[p] += longint'(prod[s][p]);
          end
        end
        addr_valid = (c == len - 1);
        addr_in    = addr_valid ? a : ADDR_W'($urandom);
        flush      = (c == len - 1);
        @(negedge clk);
        addr_valid = 0; flush = 0; prod_valid = '0;
      end
      checks++;
      if (!out_valid || out.addr != a) begin
        failures++; $display("FAIL tile %0d valid=%b addr %h exp %h", t, out_valid, out.addr, a);
      end
      for (int p = 0; p < NVAL; p++) begin
        automatic longint v = sum[p] >>> shift;
        automatic int exp = (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
        if (v < 0) n_relu++;
        if (v > 255) n_sat++;
        checks++;
        if (out.data[p].sign || int'(out.data[p].mag) != exp) begin
          failures++; $display("FAIL tile %0d p=%0d got %0d exp %0d", t, p, out.data[p].mag, exp);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL spurious out_valid"); end
    end
    checks++;
    if (n_relu == 0 || n_sat == 0) begin failures++; $display("FAIL ReLU/saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
