// tb_cnn_soc: end-to-end test of the whole FPGA design at its default sizes
// (two accelerator instances, 16384-tile banks).
//
// A behavioural DDR memory with random wait-requests sits on the DMA master;
// the test plays the host.  For each of the two instances (each with its own
// stripe of input data) it
//   1. builds in DRAM the tiled input (8 channels of 8x8, spread over the 4
//      banks) and the pruned, packed weights of a 3x3 convolution 8 -> 8,
//   2. moves them into the banks and weight scratchpads with the DMA,
//   3. runs, on both instances at the same time, the VGG-style sequence
//      pad by 1 -> 3x3 convolution + ReLU -> 2x2/stride-2 max-pool,
//   4. moves the pooled maps back to DRAM with the DMA and compares them with
//      an integer reference of the same three layers.
// It counts each mechanism of the design and fails if one never happened:
// DMA loads and stores, DRAM wait-requests, padding, convolution, pooling,
// skipped zero weights, filter-length bubbles, the 4-cycle floor, barrier
// waits, ReLU clipping, saturation, and both instances busy at once.
module tb_cnn_soc;
  import cnn_pkg::*;
  localparam int NI = 2, C = 8, O = 8, H = 8;    // per instance: C channels of HxH
  logic clk = 0, rst_n = 0;
  logic [NI-1:0][3:0]  acc_avs_address = '0;
  logic [NI-1:0]       acc_avs_write = '0, acc_avs_read = '0, acc_busy;
  logic [NI-1:0][31:0] acc_avs_writedata = '0, acc_avs_readdata;
  logic [2:0]   dma_avs_address = '0;
  logic         dma_avs_write = 0, dma_avs_read = 0;
  logic [31:0]  dma_avs_writedata = '0, dma_avs_readdata;
  logic [31:0]  avm_address;
  logic         avm_read, avm_write, avm_readdatavalid = 0, avm_waitrequest;
  logic [255:0] avm_writedata, avm_readdata = '0;
  int checks = 0, failures = 0;

  cnn_soc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // ---------------- behavioural DDR behind the SDRAM controller ----------------
  logic [255:0] dram [8192];             // 32-byte words
  logic wait_q = 1;
  int n_dram_wait = 0, n_dma_load = 0, n_dma_store = 0;
  assign avm_waitrequest = wait_q;
  always @(posedge clk) begin
    wait_q <= ($urandom_range(0, 3) == 0);
    if (wait_q && (avm_read || avm_write)) n_dram_wait++;
    if (avm_write && !wait_q) begin dram[avm_address[17:5]] <= avm_writedata; n_dma_store++; end
  end
  initial forever begin
    @(posedge clk);
    if (avm_read && !wait_q) begin
      automatic logic [255:0] d = dram[avm_address[17:5]];
      n_dma_load++;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1 avm_readdata = d; avm_readdatavalid = 1;
      @(posedge clk);
      #1 avm_readdatavalid = 0;
    end
  end

  // ---------------- host side ----------------
  task automatic acc_wr(int i, int a, int v);
    @(negedge clk); acc_avs_address[i] = 4'(a); acc_avs_writedata[i] = 32'(v); acc_avs_write[i] = 1;
    @(negedge clk); acc_avs_write[i] = 0;
  endtask
  task automatic acc_rd(int i, int a, output int v);
    @(negedge clk); acc_avs_address[i] = 4'(a); #1 v = int'(acc_avs_readdata[i]);
  endtask
  task automatic dma_wr(int a, int v);
    @(negedge clk); dma_avs_address = 3'(a); dma_avs_writedata = 32'(v); dma_avs_write = 1;
    @(negedge clk); dma_avs_write = 0;
  endtask
  task automatic dma_copy(int dram_word, int inst, int sel, int local_a, int n, int dir);
    int v;
    dma_wr(1, dram_word*32); dma_wr(2, (inst << 3) | sel); dma_wr(3, local_a);
    dma_wr(4, n); dma_wr(5, dir); dma_wr(0, 1);
    do begin @(negedge clk); dma_avs_address = 0; #1 v = int'(dma_avs_readdata); end while (v[1] == 0);
  endtask
  // fields: op ifm_addr ifm_h ifm_w hpx wpx depth ofm_addr ofm_h ofm_w groups wt shift pad
  task automatic set_instr(int i, int f[14]);
    for (int k = 0; k < 14; k++) acc_wr(i, k + 1, f[k]);
  endtask

  function automatic sm_t enc(int v);
    return '{sign: v < 0, mag: 8'(v < 0 ? -v : v)};
  endfunction
  function automatic int dec(sm_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  int x   [NI][C][H][H];
  int w   [NI][O][C][3][3];
  int ref_pool [NI][O][H/2][H/2];
  int n_zero_w = 0, n_bubble = 0, n_short = 0, n_relu = 0, n_sat = 0, n_both_busy = 0;
  int sh = 7;

  always @(posedge clk) if (&acc_busy) n_both_busy++;

  // run one instruction on both instances at once and wait for both
  task automatic run_both(int f0[14], int f1[14]);
    int v0, v1;
    set_instr(0, f0); set_instr(1, f1);
    fork acc_wr(0, 0, 1); acc_wr(1, 0, 1); join
    do begin acc_rd(0, 0, v0); acc_rd(1, 0, v1); end while (v0[1] == 0 || v1[1] == 0);
  endtask

  initial begin
    int wbase [NI][NBANK], wlen [NI][NBANK];
    int dptr;
    for (int k = 0; k < 8192; k++) dram[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- data and reference ----
    for (int i = 0; i < NI; i++) begin
      for (int c = 0; c < C; c++) for (int y = 0; y < H; y++) for (int xx = 0; xx < H; xx++)
        x[i][c][y][xx] = $urandom_range(0, 255);
      for (int o = 0; o < O; o++) for (int c = 0; c < C; c++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        automatic int dens = (o < 4) ? 15 + 25*(o % 4) : 5 + 8*(o % 4);
        w[i][o][c][a][b] = ($urandom_range(0, 99) < dens) ? $urandom_range(0, 30) - 10 : 0;
        if (w[i][o][c][a][b] == 0) n_zero_w++;
      end
      for (int o = 0; o < O; o++) for (int py = 0; py < H/2; py++) for (int pxx = 0; pxx < H/2; pxx++) begin
        automatic int m = 0;
        for (int d = 0; d < 4; d++) begin
          automatic int yy = 2*py + d/2, xx = 2*pxx + d%2, e;
          automatic longint s = 0;
          for (int c = 0; c < C; c++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
            automatic int iy = yy + a - 1, ix = xx + b - 1;
            if (iy >= 0 && iy < H && ix >= 0 && ix < H) s += longint'(x[i][c][iy][ix] * w[i][o][c][a][b]);
          end
          s = s >>> sh;
          if (s < 0) n_relu++;
          if (s > 255) n_sat++;
          e = (s < 0) ? 0 : (s > 255) ? 255 : int'(s);
          if (e > m) m = e;
        end
        ref_pool[i][o][py][pxx] = m;
      end
    end
    // ---- DRAM image: per instance and bank, input tiles then packed weights ----
    dptr = 0;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NBANK; j++) begin
      tile_t t;
      automatic int base = 1000*(i*NBANK + j) / 2;
      // input: local channel lc (channel 4*lc + j), 2x2 tiles each
      for (int lc = 0; lc < C/4; lc++) for (int ty = 0; ty < 2; ty++) for (int tx = 0; tx < 2; tx++) begin
        for (int k = 0; k < NVAL; k++) t[k] = enc(x[i][4*lc + j][ty*4 + k/4][tx*4 + k%4]);
        dram[base + lc*4 + ty*2 + tx] = 256'(t);
      end
      wbase[i][j] = base + 16;
      wlen[i][j]  = 0;
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
            if (w[i][4*g+fl][c][a][b] != 0) begin
              ww[cnt[fl]].lane[fl] = '{valid: 1'b1, w: enc(w[i][4*g+fl][c][a][b]), off: 4'(4*a + b)};
              cnt[fl]++;
            end
          if (cnt[fl] > n) n = cnt[fl];
        end
        for (int fl = 0; fl < 4; fl++) if (cnt[fl] != n) n_bubble++;
        if (n < 4) n_short++;
        ww[n-1].last = 1'b1;
        for (int k = 0; k < n; k++) dram[wbase[i][j] + wlen[i][j] + k] = 256'(ww[k]);
        wlen[i][j] += n;
      end
    end
    // ---- DMA in ----
    for (int i = 0; i < NI; i++) for (int j = 0; j < NBANK; j++) begin
      automatic int base = 1000*(i*NBANK + j) / 2;
      dma_copy(base, i, j, 0, 8, 0);                       // IFM tiles -> bank j, address 0
      dma_copy(wbase[i][j], i, 4 + j, 0, wlen[i][j], 0);   // weights -> scratchpad j
    end
    // ---- pad 8x8 -> 10x10 (3x3 tiles) at 100, conv -> 8x8 at 200, pool -> 4x4 at 300 ----
    begin
      int fp [14] = '{3, 0,   2, 2, 8, 8, 2, 100, 3, 3, 0, 0, 0, 1};
      int fc [14] = '{1, 100, 3, 3, 12, 12, 2, 200, 2, 2, 2, 0, 7, 0};
      int fq [14] = '{2, 200, 2, 2, 8, 8, 2, 300, 1, 1, 0, 0, 0, 0};
      int cyc;
      run_both(fp, fp);
      run_both(fc, fc);
      acc_rd(0, 15, cyc);
      $display("conv cycles (instance 0): %0d", cyc);
      run_both(fq, fq);
    end
    // ---- DMA out and compare ----
    for (int i = 0; i < NI; i++) for (int j = 0; j < NBANK; j++)
      dma_copy(6000 + 8*(i*NBANK + j), i, j, 300, 2, 1);
    for (int i = 0; i < NI; i++) for (int o = 0; o < O; o++) begin
      automatic tile_t t = tile_t'(dram[6000 + 8*(i*NBANK + o%4) + o/4][143:0]);
      checks++;
      if (dram[6000 + 8*(i*NBANK + o%4) + o/4][255:144] != '0) begin failures++; $display("FAIL upper bits"); end
      for (int k = 0; k < NVAL; k++) begin
        checks++;
        if (dec(t[k]) != ref_pool[i][o][k/4][k%4]) begin
          failures++;
          $display("FAIL inst %0d ofm %0d (%0d,%0d) got %0d exp %0d", i, o, k/4, k%4, dec(t[k]), ref_pool[i][o][k/4][k%4]);
        end
      end
    end
    // ---- mechanisms ----
    begin
      automatic int bar = 0;
      bar = dut.g_inst[0].u_acc.n_bar_wait[0] + dut.g_inst[1].u_acc.n_bar_wait[3];
      $display("mechanisms: dma_load=%0d dma_store=%0d dram_wait=%0d zero_w=%0d bubble=%0d short=%0d barrier=%0d relu=%0d sat=%0d both_busy=%0d",
               n_dma_load, n_dma_store, n_dram_wait, n_zero_w, n_bubble, n_short, bar, n_relu, n_sat, n_both_busy);
      checks++;
      if (n_dma_load == 0 || n_dma_store == 0 || n_dram_wait == 0 || n_zero_w == 0 || n_bubble == 0 ||
          n_short == 0 || bar == 0 || n_relu == 0 || n_sat == 0 || n_both_busy == 0) begin
        failures++; $display("FAIL a mechanism never happened");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
