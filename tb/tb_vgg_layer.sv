// tb_vgg_layer: one VGG-16-style layer step on an accelerator instance at its
// default sizes, the sequence a host runs for every convolution layer:
//   zero-pad by 1  ->  3x3 convolution + ReLU  ->  2x2/stride-2 max-pool.
// The map is 14x14 pixels (the size of VGG-16's last convolution block, not a
// multiple of the tile size), with 32 input channels (8 per bank) and 8
// output channels (2 groups).  The depth is cut down from VGG-16's 512 to keep
// the simulation short; everything else follows the layer's shape.  The
// convolution is run twice: with dense filters (all 9 weights non-zero, the
// unpruned model) and with pruned filters (about 30 % of the weights kept).
// Every pooled output is compared with an integer reference computed here,
// and the convolution cycle counts are checked against the packing: at least
// the ideal sum of max(4, words) per channel, at most that plus a small
// per-position overhead; the pruned run must be faster than the dense one.
module tb_vgg_layer;
  import cnn_pkg::*;
  localparam int C = 32, O = 8, H = 14, T = 4, TP = 5;   // T: OFM tiles, TP: padded IFM tiles
  localparam int LC = C/4, G = O/4;
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
    repeat (2000000) @(posedge clk);
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

  int x  [C][H][H];              // input pixels
  int w  [O][C][3][3];           // filters
  int nw [NBANK][LC][G];         // packed words per (bank, local channel, group)

  // pack the filters of w into every scratchpad from word 'base'; returns the
  // ideal cycle count (slowest bank per tile position, max(4, words) per channel)
  task automatic pack(int base, output int ideal);
    ideal = 0;
    for (int j = 0; j < NBANK; j++) begin
      automatic int addr = base;
      for (int g = 0; g < G; g++) for (int lc = 0; lc < LC; lc++) begin
        automatic int c = 4*lc + j;
        automatic int n = 1;
        int cnt [4];
        wword_t ww [9];
        for (int k = 0; k < 9; k++) ww[k] = '0;
        for (int fl = 0; fl < 4; fl++) begin
          cnt[fl] = 0;
          for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
            if (w[4*g+fl][c][a][b] != 0) begin
              ww[cnt[fl]].lane[fl] = '{valid: 1'b1, w: enc(w[4*g+fl][c][a][b]), off: 4'(4*a + b)};
              cnt[fl]++;
            end
          if (cnt[fl] > n) n = cnt[fl];
        end
        ww[n-1].last = 1'b1;
        nw[j][lc][g] = n;
        for (int k = 0; k < n; k++) mem_write(4 + j, addr + k, tile_t'($bits(tile_t)'(ww[k])));
        addr += n;
      end
    end
    for (int g = 0; g < G; g++) begin
      automatic int worst = 0;
      for (int j = 0; j < NBANK; j++) begin
        automatic int s = 0;
        for (int lc = 0; lc < LC; lc++) s += (nw[j][lc][g] > 4) ? nw[j][lc][g] : 4;
        if (s > worst) worst = s;
      end
      ideal += worst * T * T;
    end
  endtask

  // run conv + pool on the padded map and check the pooled result
  task automatic conv_pool(int wt, int sh, string name, output int cyc);
    tile_t t;
    int ideal, pc;
    int f[14];
    int relu = 0, sat = 0;
    pack(wt, ideal);
    f = '{1, 1000, TP, TP, 4*TP, 4*TP, LC, 3000, T, T, G, wt, sh, 0};
    run_instr(f, cyc);
    $display("%s conv: %0d cycles, ideal %0d (%0d tile positions)", name, cyc, ideal, G*T*T);
    checks++;
    if (cyc < ideal || cyc > ideal + 5*G*T*T + 30) begin
      failures++; $display("FAIL %s conv cycles %0d, ideal %0d", name, cyc, ideal);
    end
    f = '{2, 3000, T, T, 4*T, 4*T, G, 4000, T/2, T/2, 0, 0, 0, 0};
    run_instr(f, pc);
    for (int o = 0; o < O; o++) for (int ty = 0; ty < T/2; ty++) for (int tx = 0; tx < T/2; tx++) begin
      mem_read(o % 4, 4000 + (o/4)*(T/2)*(T/2) + ty*(T/2) + tx, t);
      for (int i = 0; i < NVAL; i++) begin
        automatic int oy = ty*4 + i/4, ox = tx*4 + i%4, e = 0;
        if (oy < H/2 && ox < H/2) begin
          for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
            automatic int yy = 2*oy + a, xx = 2*ox + b, v;
            automatic longint s = 0;
            for (int c = 0; c < C; c++) for (int p = 0; p < 3; p++) for (int q = 0; q < 3; q++) begin
              automatic int iy = yy + p - 1, ix = xx + q - 1;
              if (iy >= 0 && iy < H && ix >= 0 && ix < H) s += longint'(x[c][iy][ix] * w[o][c][p][q]);
            end
            s = s >>> sh;
            if (s < 0) relu++;
            if (s > 255) sat++;
            v = (s < 0) ? 0 : (s > 255) ? 255 : int'(s);
            if (v > e) e = v;
          end
          checks++;
          if (dec(t[i]) != e) begin
            failures++; $display("FAIL %s o=%0d (%0d,%0d) got %0d exp %0d", name, o, oy, ox, dec(t[i]), e);
          end
        end
      end
    end
    $display("%s: %0d pooled values checked, ReLU clipped %0d, saturated %0d", name, O*(H/2)*(H/2), relu, sat);
  endtask

  initial begin
    tile_t t;
    int cyc, cyc_dense, cyc_pruned;
    int f[14];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // input: channel c -> bank c%4, local channel c/4, 4x4 tiles at 0
    for (int c = 0; c < C; c++) for (int y = 0; y < H; y++) for (int xx = 0; xx < H; xx++)
      x[c][y][xx] = $urandom_range(0, 255);
    for (int c = 0; c < C; c++) for (int ty = 0; ty < T; ty++) for (int tx = 0; tx < T; tx++) begin
      for (int i = 0; i < NVAL; i++) begin
        automatic int yy = ty*4 + i/4, xx = tx*4 + i%4;
        t[i] = enc((yy < H && xx < H) ? x[c][yy][xx] : 0);
      end
      mem_write(c % 4, (c/4)*T*T + ty*T + tx, t);
    end
    // pad by 1 into TP x TP tiles (one tile more than the output, zero beyond)
    f = '{3, 0, T, T, H, H, LC, 1000, TP, TP, 0, 0, 0, 1};
    run_instr(f, cyc);
    $display("pad: %0d cycles", cyc);
    // dense (unpruned) filters
    for (int o = 0; o < O; o++) for (int c = 0; c < C; c++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
      automatic int v = $urandom_range(1, 12) - 6;
      w[o][c][a][b] = (v == 0) ? 1 : v;
    end
    conv_pool(0, 7, "dense", cyc_dense);
    // pruned filters: about 30 % of the weights kept
    for (int o = 0; o < O; o++) for (int c = 0; c < C; c++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
      w[o][c][a][b] = ($urandom_range(0, 99) < 30) ? $urandom_range(0, 20) - 8 : 0;
    conv_pool(1000, 7, "pruned", cyc_pruned);
    $display("zero-skipping speed-up: %0d.%02d", cyc_dense / cyc_pruned, (100*cyc_dense / cyc_pruned) % 100);
    checks++;
    if (cyc_pruned >= cyc_dense) begin failures++; $display("FAIL pruned run not faster"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
