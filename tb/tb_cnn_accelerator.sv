// tb_cnn_accelerator: end-to-end test of one accelerator instance.
//
// Loads banks and weight scratchpads through the external memory port, then
// programs three instructions through the control registers and checks every
// output tile against a reference computed here with integers:
//  1. a 3x3 convolution, 8 input channels -> 8 output maps (2 groups of 4),
//     8x8 output pixels, with pruned (sparse) filters, so that zero-skipping,
//     unequal filter lengths (bubbles), the 4-cycle floor per channel, a
//     channel with no weights at all, the barrier, ReLU and saturation all
//     occur; the cycle count is checked against the ideal for the packing;
//  2. a 2x2/stride-2 max-pool of 8 channels of 16x16;
//  3. zero padding by 1 of 8 channels of 7x7 (a width that is not a
//     multiple of the tile size) into 9x9.
module tb_cnn_accelerator;
  import cnn_pkg::*;
  localparam int C = 8, O = 8, OH = 8, OW = 8, IH = 12, IW = 12;   // conv sizes (pixels)
  logic clk = 0, rst_n = 0;
  logic [3:0] avs_address = '0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic [2:0] mem_sel = '0;
  logic mem_re = 0, mem_we = 0, busy;
  logic [ADDR_W-1:0] mem_addr = '0;
  tile_t mem_wdata = '0, mem_rdata;
  logic [NBANK-1:0][31:0] n_apply, n_stall, n_bar_wait, n_written;
  int checks = 0, failures = 0;

  cnn_accelerator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  function automatic sm_t enc(int v);
    return '{sign: v < 0, mag: 8'(v < 0 ? -v : v)};
  endfunction
  function automatic int dec(sm_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  task automatic mem_write(int sel, int addr, tile_t d);
    @(negedge clk);
    mem_sel = 3'(sel); mem_addr = ADDR_W'(addr); mem_wdata = d; mem_we = 1;
    @(negedge clk);
    mem_we = 0;
  endtask
  task automatic mem_read(int sel, int addr, output tile_t d);
    @(negedge clk);
    mem_sel = 3'(sel); mem_addr = ADDR_W'(addr); mem_re = 1;
    @(negedge clk);
    mem_re = 0;
    d = mem_rdata;
  endtask
  task automatic csr_write(int a, int v);
    @(negedge clk);
    avs_address = 4'(a); avs_writedata = 32'(v); avs_write = 1;
    @(negedge clk);
    avs_write = 0;
  endtask
  task automatic csr_read(int a, output int v);
    @(negedge clk);
    avs_address = 4'(a); avs_read = 1;
    #1 v = int'(avs_readdata);
    @(negedge clk);
    avs_read = 0;
  endtask
  // fields: op ifm_addr ifm_h ifm_w hpx wpx depth ofm_addr ofm_h ofm_w groups wt shift pad
  task automatic run_instr(int f[14], output int cycles);
    int st;
    for (int i = 0; i < 14; i++) csr_write(i + 1, f[i]);
    csr_write(0, 1);
    do csr_read(0, st); while (st[1] == 0);
    csr_read(15, cycles);
  endtask

  // ---------------- data ----------------
  int x  [C][IH][IW];            // padded IFM, pixels
  int w  [O][C][3][3];           // filters
  int nw [NBANK][C/4][O/4];      // packed words per (bank, local channel, group)
  int pin [8][16][16];           // pool / pad input pixels

  initial begin
    tile_t t;
    int cyc, addr, sh, ideal, words_total, n_zero_ch, n_bubble, n_relu, n_sat, n_short;
    int f[14];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- 1. convolution ----
    sh = 5; n_bubble = 0; n_relu = 0; n_sat = 0; n_short = 0; n_zero_ch = 0;
    for (int c = 0; c < C; c++) for (int y = 0; y < IH; y++) for (int xx = 0; xx < IW; xx++)
      x[c][y][xx] = $urandom_range(0, 255);
    for (int o = 0; o < O; o++) for (int c = 0; c < C; c++) begin
      // density differs per filter; channel 5 of group 1 is pruned away entirely
      automatic int dens = (o % 4 == 0) ? 90 : (o % 4 == 1) ? 50 : (o % 4 == 2) ? 25 : 10;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        w[o][c][a][b] = ($urandom_range(0, 99) < dens) ? $urandom_range(0, 30) - 10 : 0;
        if (c == 5 && o >= 4) w[o][c][a][b] = 0;
      end
    end
    // write IFM tiles: channel c -> bank c%4, local channel c/4, plane of 3x3 tiles at 0
    for (int c = 0; c < C; c++) for (int ty = 0; ty < IH/4; ty++) for (int tx = 0; tx < IW/4; tx++) begin
      for (int i = 0; i < NVAL; i++) t[i] = enc(x[c][ty*4 + i/4][tx*4 + i%4]);
      mem_write(c % 4, (c/4)*9 + ty*3 + tx, t);
    end
    // pack weights: bank j, group g, local channel lc -> words; lane f = OFM 4g+f
    for (int j = 0; j < NBANK; j++) begin
      addr = 0;
      for (int g = 0; g < O/4; g++) for (int lc = 0; lc < C/4; lc++) begin
        automatic int c = 4*lc + j;
        int cnt [4];
        int n;
        wword_t ww [9];
        for (int k = 0; k < 9; k++) ww[k] = '0;
        n = 1;
        for (int fl = 0; fl < 4; fl++) begin
          cnt[fl] = 0;
          for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
            if (w[4*g+fl][c][a][b] != 0) begin
              ww[cnt[fl]].lane[fl] = '{valid: 1'b1, w: enc(w[4*g+fl][c][a][b]), off: 4'(4*a + b)};
              cnt[fl]++;
            end
          if (cnt[fl] > n) n = cnt[fl];
        end
        for (int fl = 0; fl < 4; fl++) if (cnt[fl] != n) n_bubble++;
        if (cnt[0] == 0 && cnt[1] == 0 && cnt[2] == 0 && cnt[3] == 0) n_zero_ch++;
        if (n < 4) n_short++;
        ww[n-1].last = 1'b1;
        nw[j][lc][g] = n;
        for (int k = 0; k < n; k++) mem_write(4 + j, addr + k, tile_t'($bits(tile_t)'(ww[k])));
        addr += n;
      end
    end
    // ideal cycles: per tile position the slowest bank, each channel max(4, words)
    ideal = 0; words_total = 0;
    for (int g = 0; g < O/4; g++) begin
      automatic int worst = 0;
      for (int j = 0; j < NBANK; j++) begin
        automatic int s = 0;
        for (int lc = 0; lc < C/4; lc++) begin
          s += (nw[j][lc][g] > 4) ? nw[j][lc][g] : 4;
          words_total += nw[j][lc][g] * (OH/4) * (OW/4);
        end
        if (s > worst) worst = s;
      end
      ideal += worst * (OH/4) * (OW/4);
    end
    f = '{1, 0, IH/4, IW/4, IH, IW, C/4, 200, OH/4, OW/4, O/4, 0, sh, 0};
    run_instr(f, cyc);
    $display("conv: %0d cycles, ideal %0d, words %0d", cyc, ideal, words_total);
    checks++;
    if (cyc < ideal || cyc > ideal + 12*(O/4)*(OH/4)*(OW/4) + 20) begin
      failures++; $display("FAIL conv cycle count %0d outside [%0d, ideal + overhead]", cyc, ideal);
    end
    checks++;
    if (n_apply[0] + n_apply[1] + n_apply[2] + n_apply[3] != 32'(words_total)) begin
      failures++; $display("FAIL applied words %0d exp %0d", n_apply[0]+n_apply[1]+n_apply[2]+n_apply[3], words_total);
    end
    for (int o = 0; o < O; o++) for (int ty = 0; ty < OH/4; ty++) for (int tx = 0; tx < OW/4; tx++) begin
      mem_read(o % 4, 200 + (o/4)*4 + ty*2 + tx, t);
      for (int i = 0; i < NVAL; i++) begin
        automatic int yy = ty*4 + i/4, xx = tx*4 + i%4;
        automatic longint s = 0;
        automatic int e;
        for (int c = 0; c < C; c++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
          s += longint'(x[c][yy+a][xx+b] * w[o][c][a][b]);
        s = s >>> sh;
        e = (s < 0) ? 0 : (s > 255) ? 255 : int'(s);
        if (s < 0) n_relu++;
        if (s > 255) n_sat++;
        checks++;
        if (dec(t[i]) != e) begin
          failures++; $display("FAIL conv o=%0d y=%0d x=%0d got %0d exp %0d", o, yy, xx, dec(t[i]), e);
        end
      end
    end
    checks++;
    if (n_bubble == 0 || n_zero_ch == 0 || n_relu == 0 || n_sat == 0 || n_short == 0 ||
        n_bar_wait[3] == 0) begin
      failures++;
      $display("FAIL mechanism missing: bubble %0d zero-ch %0d relu %0d sat %0d short %0d barwait %0d",
               n_bubble, n_zero_ch, n_relu, n_sat, n_short, n_bar_wait[3]);
    end
    // ---- 2. max-pool 16x16 -> 8x8, 2 channels per bank ----
    for (int c = 0; c < 8; c++) for (int ty = 0; ty < 4; ty++) for (int tx = 0; tx < 4; tx++) begin
      for (int i = 0; i < NVAL; i++) begin
        pin[c][ty*4 + i/4][tx*4 + i%4] = $urandom_range(0, 255);
        t[i] = enc(pin[c][ty*4 + i/4][tx*4 + i%4]);
      end
      mem_write(c % 4, 1000 + (c/4)*16 + ty*4 + tx, t);
    end
    f = '{2, 1000, 4, 4, 16, 16, 2, 1100, 2, 2, 0, 0, 0, 0};
    run_instr(f, cyc);
    $display("pool: %0d cycles", cyc);
    checks++;   // 4 ops per output tile, 8 output tiles per bank
    if (cyc < 2*4*4 || cyc > 2*4*4 + 20) begin failures++; $display("FAIL pool cycles %0d", cyc); end
    for (int c = 0; c < 8; c++) for (int ty = 0; ty < 2; ty++) for (int tx = 0; tx < 2; tx++) begin
      mem_read(c % 4, 1100 + (c/4)*4 + ty*2 + tx, t);
      for (int i = 0; i < NVAL; i++) begin
        automatic int oy = ty*4 + i/4, ox = tx*4 + i%4, e = -1000;
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
          if (pin[c][2*oy + a][2*ox + b] > e) e = pin[c][2*oy + a][2*ox + b];
        checks++;
        if (dec(t[i]) != e) begin failures++; $display("FAIL pool c=%0d (%0d,%0d) got %0d exp %0d", c, oy, ox, dec(t[i]), e); end
      end
    end
    // ---- 3. pad 7x7 (stored in 2x2 tiles) by 1 -> 9x9 in 3x3 tiles ----
    for (int c = 0; c < 8; c++) for (int ty = 0; ty < 2; ty++) for (int tx = 0; tx < 2; tx++) begin
      for (int i = 0; i < NVAL; i++) begin
        pin[c][ty*4 + i/4][tx*4 + i%4] = $urandom_range(1, 255);   // non-zero, so a missed copy shows
        t[i] = enc(pin[c][ty*4 + i/4][tx*4 + i%4]);
      end
      mem_write(c % 4, 2000 + (c/4)*4 + ty*2 + tx, t);
    end
    f = '{3, 2000, 2, 2, 7, 7, 2, 2100, 3, 3, 0, 0, 0, 1};
    run_instr(f, cyc);
    $display("pad: %0d cycles", cyc);
    checks++;   // 8 ops per output tile, 18 output tiles per bank
    if (cyc < 2*9*8 || cyc > 2*9*8 + 20) begin failures++; $display("FAIL pad cycles %0d", cyc); end
    for (int c = 0; c < 8; c++) for (int ty = 0; ty < 3; ty++) for (int tx = 0; tx < 3; tx++) begin
      mem_read(c % 4, 2100 + (c/4)*9 + ty*3 + tx, t);
      for (int i = 0; i < NVAL; i++) begin
        automatic int oy = ty*4 + i/4, ox = tx*4 + i%4;
        automatic int e = (oy >= 1 && oy <= 7 && ox >= 1 && ox <= 7) ? pin[c][oy-1][ox-1] : 0;
        checks++;
        if (dec(t[i]) != e) begin failures++; $display("FAIL pad c=%0d (%0d,%0d) got %0d exp %0d", c, oy, ox, dec(t[i]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
