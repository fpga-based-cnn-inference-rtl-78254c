// tb_conv_staging: self-checking test of conv_staging with a real bank and
// weight scratchpad behind it.
//
// Random IFM tiles and random packed weight streams (1 to 7 words per
// channel) are loaded; the test then follows every injected cycle and checks
// that it carries the right 4 IFM tiles (A,B,C,D at the current tile position
// and channel) and the next weight word of the stream, that the end-of-tile
// marker comes with the right OFM address, that the stream restarts for every
// tile position and moves on for the next group, and that each channel takes
// at most max(4, words) cycles once injection has begun (the last channel of
// a position: its word count).  A channel can be quicker than 4 cycles when
// its tiles were already loaded ahead while an earlier channel ran, but never
// quicker than one cycle per word.  The barrier is
// released 1 to 4 cycles after the marker.
module tb_conv_staging;
  import cnn_pkg::*;
  localparam int DEPTH = 3, GROUPS = 2, OHT = 2, OWT = 2, IHT = 3, IWT = 3;
  logic clk = 0, rst_n = 0, start = 0, busy;
  instr_t instr;
  logic bank_re, wt_re, conv_valid, conv_last, bar_release = 0;
  logic [7:0] bank_raddr;
  logic [7:0] wt_raddr;
  tile_t bank_rdata;
  wword_t wt_rdata, conv_wword;
  tile_t [3:0] conv_ifm;
  logic [ADDR_W-1:0] conv_addr;
  logic [31:0] n_apply, n_stall, n_bar_wait;
  logic bwe = 0, wwe = 0;
  logic [7:0] bwa = '0, wwa = '0;
  tile_t bwd = '0;
  wword_t wwd = '0;
  int checks = 0, failures = 0;

  sram_bank #(.DEPTH(256), .WIDTH($bits(tile_t))) u_bank (.clk, .re(bank_re), .raddr(bank_raddr),
    .rdata(bank_rdata), .we(bwe), .waddr(bwa), .wdata(bwd));
  weight_scratchpad #(.DEPTH(256), .WIDTH($bits(wword_t))) u_wt (.clk, .re(wt_re), .raddr(wt_raddr),
    .rdata(wt_rdata), .we(wwe), .waddr(wwa), .wdata(wwd));
  conv_staging #(.AW(8), .WAW(8)) dut (.*);
  always #5 clk = ~clk;

  tile_t  ifm [DEPTH][IHT*IWT];
  wword_t ws  [GROUPS][DEPTH][8];
  int     nws [GROUPS][DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // barrier model: release 1..4 cycles after the marker
  initial begin
    forever begin
      @(posedge clk);
      if (conv_valid && conv_last) begin
        repeat ($urandom_range(1, 4)) @(negedge clk);
        bar_release = 1;
        @(negedge clk);
        bar_release = 0;
      end
    end
  end

  initial begin
    int wa;
    instr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < DEPTH; c++) for (int t = 0; t < IHT*IWT; t++) begin
      ifm[c][t] = tile_t'({5{$urandom}});
      bwe = 1; bwa = 8'(10 + c*IHT*IWT + t); bwd = ifm[c][t];
      @(negedge clk);
    end
    bwe = 0;
    wa = 5;
    for (int g = 0; g < GROUPS; g++) for (int c = 0; c < DEPTH; c++) begin
      nws[g][c] = (c == 1) ? ((g == 0) ? 4 : 7) : $urandom_range(1, 7);   // 4: the landing tile must be forwarded
      if (g == 1 && c == 2) nws[g][c] = 1;
      for (int k = 0; k < nws[g][c]; k++) begin
        ws[g][c][k] = wword_t'({$urandom, $urandom});
        ws[g][c][k].last = (k == nws[g][c] - 1);
        wwe = 1; wwa = 8'(wa); wwd = ws[g][c][k]; wa++;
        @(negedge clk);
      end
    end
    wwe = 0;
    instr.op = OP_CONV; instr.ifm_addr = 10; instr.ifm_h = IHT; instr.ifm_w = IWT; instr.depth = DEPTH;
    instr.ofm_addr = 100; instr.ofm_h = OHT; instr.ofm_w = OWT; instr.groups = GROUPS; instr.wt_addr = 5;
    start = 1;
    @(negedge clk);
    start = 0;
    for (int g = 0; g < GROUPS; g++) for (int ty = 0; ty < OHT; ty++) for (int tx = 0; tx < OWT; tx++) begin
      automatic int cyc = 0, exp_cyc = 0, min_cyc = 0;
      for (int c = 0; c < DEPTH; c++) begin
        exp_cyc += (c == DEPTH-1) ? nws[g][c] : (nws[g][c] > 4 ? nws[g][c] : 4);
        min_cyc += nws[g][c];
        for (int k = 0; k < nws[g][c]; k++) begin
          // wait for the next injected word
          while (!conv_valid) begin
            @(negedge clk);
            if (c != 0 || k != 0) cyc++;
          end
          checks++;
          if (conv_wword != ws[g][c][k] ||
              conv_ifm[0] != ifm[c][ty*IWT + tx]       || conv_ifm[1] != ifm[c][ty*IWT + tx + 1] ||
              conv_ifm[2] != ifm[c][(ty+1)*IWT + tx]   || conv_ifm[3] != ifm[c][(ty+1)*IWT + tx + 1]) begin
            failures++; $display("FAIL g%0d ty%0d tx%0d c%0d k%0d data", g, ty, tx, c, k);
          end
          checks++;
          if (conv_last != (c == DEPTH-1 && k == nws[g][c]-1) ||
              (conv_last && conv_addr != ADDR_W'(100 + g*OHT*OWT + ty*OWT + tx))) begin
            failures++; $display("FAIL marker g%0d ty%0d tx%0d c%0d k%0d", g, ty, tx, c, k);
          end
          @(negedge clk);
          cyc++;
        end
      end
      checks++;
      if (cyc > exp_cyc || cyc < min_cyc) begin
        failures++; $display("FAIL tile g%0d ty%0d tx%0d took %0d cycles, expected %0d..%0d", g, ty, tx, cyc, min_cyc, exp_cyc);
      end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (busy || n_apply == 0) begin failures++; $display("FAIL still busy at the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
