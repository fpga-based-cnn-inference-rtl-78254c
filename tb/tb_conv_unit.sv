// tb_conv_unit: self-checking test of conv_unit.
// Random IFM tiles A-D and random weight words; every one of the 64 products
// must equal weight x IFM value at (r + wy, c + wx) of the 8x8 window built
// from A|B over C|D, worked out here with integers, one cycle later.  Also
// checks the per-filter valid bits and the end-of-tile marker and address.
module tb_conv_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_last;
  tile_t [3:0] ifm;
  wword_t wword;
  logic [ADDR_W-1:0] in_addr = '0, out_addr;
  prod_tile_t [NFILT-1:0] prod;
  logic [NFILT-1:0] prod_valid;
  int checks = 0, failures = 0;

  conv_unit dut (.*);
  always #5 clk = ~clk;

  function automatic int sv(sm_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_t [3:0] s_ifm;
    wword_t s_w;
    logic s_v, s_l;
    logic [ADDR_W-1:0] s_a;
    ifm = '0; wword = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int t = 0; t < 4; t++) for (int i = 0; i < NVAL; i++) ifm[t][i] = sm_t'($urandom);
      for (int f = 0; f < NFILT; f++) begin
        wword.lane[f].valid = ($urandom_range(0, 3) != 0);
        wword.lane[f].w     = sm_t'($urandom);
        wword.lane[f].off   = 4'($urandom);
      end
      wword.last = 1'b0;
      in_valid = ($urandom_range(0, 7) != 0);
      in_last  = ($urandom_range(0, 3) == 0);
      in_addr  = ADDR_W'($urandom);
      s_ifm = ifm; s_w = wword; s_v = in_valid; s_l = in_last; s_a = in_addr;
      @(posedge clk); #1;
      for (int f = 0; f < NFILT; f++) begin
        checks++;
        if (prod_valid[f] != (s_v && s_w.lane[f].valid)) begin
          failures++; $display("FAIL valid f=%0d", f);
        end
        if (s_v) begin
          for (int p = 0; p < NVAL; p++) begin
            automatic int y = p/4 + int'(s_w.lane[f].off[3:2]);
            automatic int x = p%4 + int'(s_w.lane[f].off[1:0]);
            automatic int t = (y >= 4 ? 2 : 0) + (x >= 4 ? 1 : 0);
            automatic int exp = sv(s_w.lane[f].w) * sv(s_ifm[t][(y%4)*4 + x%4]);
            checks++;
            if (int'(prod[f][p]) != exp) begin
              failures++; $display("FAIL f=%0d p=%0d got %0d exp %0d", f, p, int'(prod[f][p]), exp);
            end
          end
        end
      end
      checks++;
      if (out_last != (s_v && s_l) || (s_v && out_addr != s_a)) begin
        failures++; $display("FAIL last/addr");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
