// tb_poolpad_staging: self-checking test of poolpad_staging driving a real
// bank and pool/pad unit.
//
// Runs a 2x2/stride-2 max-pool (including an input whose tile count is odd,
// so the last output tile is half empty) and zero padding by 1, 2 and 3
// pixels of maps whose sizes are not multiples of 4.  Every output tile that
// leaves the pool/pad unit is compared with an integer reference, the number
// of output tiles and the one-operation-per-cycle rate (4 cycles per pooled
// tile, 8 per padded tile) are checked.
module tb_poolpad_staging;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, bank_re, op_valid, out_valid;
  instr_t instr;
  logic [7:0] bank_raddr;
  tile_t bank_rdata;
  ppop_t op;
  logic [ADDR_W-1:0] op_addr;
  wr_t out;
  logic bwe = 0;
  logic [7:0] bwa = '0;
  tile_t bwd = '0;
  int checks = 0, failures = 0;

  sram_bank #(.DEPTH(256), .WIDTH($bits(tile_t))) u_bank (.clk, .re(bank_re), .raddr(bank_raddr),
    .rdata(bank_rdata), .we(bwe), .waddr(bwa), .wdata(bwd));
  poolpad_staging #(.AW(8)) dut (.*);
  pool_pad_unit u_pp (.clk, .rst_n, .op_valid, .op, .tile(bank_rdata), .addr(op_addr), .out_valid, .out);
  always #5 clk = ~clk;

  int    px [2][16][16];
  tile_t got [256];
  bit    seen [256];
  int    n_out;

  always @(posedge clk) if (out_valid) begin
    got[out.addr[7:0]] <= out.data;
    seen[out.addr[7:0]] <= 1'b1;
    n_out <= n_out + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one instruction over 2 channels; returns cycles while busy
  task automatic run(op_e o, int ih, int iw, int hpx, int wpx, int oh, int ow, int pad, output int cyc);
    for (int c = 0; c < 2; c++) for (int ty = 0; ty < ih; ty++) for (int tx = 0; tx < iw; tx++) begin
      for (int i = 0; i < NVAL; i++) begin
        px[c][ty*4 + i/4][tx*4 + i%4] = $urandom_range(1, 255);
        bwd[i] = '{sign: 1'b0, mag: 8'(px[c][ty*4 + i/4][tx*4 + i%4])};
      end
      bwe = 1; bwa = 8'(c*ih*iw + ty*iw + tx);
      @(negedge clk);
    end
    bwe = 0;
    for (int a = 0; a < 256; a++) seen[a] = 0;
    n_out = 0;
    instr = '0;
    instr.op = o; instr.ifm_addr = 0; instr.ifm_h = 8'(ih); instr.ifm_w = 8'(iw);
    instr.ifm_hpx = 10'(hpx); instr.ifm_wpx = 10'(wpx); instr.depth = 2;
    instr.ofm_addr = 128; instr.ofm_h = 8'(oh); instr.ofm_w = 8'(ow); instr.pad = 2'(pad);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy) begin cyc++; @(negedge clk); end
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != 2*oh*ow) begin failures++; $display("FAIL %0d tiles out, expected %0d", n_out, 2*oh*ow); end
    for (int c = 0; c < 2; c++) for (int ty = 0; ty < oh; ty++) for (int tx = 0; tx < ow; tx++) begin
      automatic int a = 128 + c*oh*ow + ty*ow + tx;
      for (int i = 0; i < NVAL; i++) begin
        automatic int oy = ty*4 + i/4, ox = tx*4 + i%4, e = 0;
        if (o == OP_POOL) begin
          if (2*oy < 4*ih && 2*ox < 4*iw) begin
            for (int d = 0; d < 4; d++) if (px[c][2*oy + d/2][2*ox + d%2] > e) e = px[c][2*oy + d/2][2*ox + d%2];
          end
        end else if (oy >= pad && oy < hpx + pad && ox >= pad && ox < wpx + pad) begin
          e = px[c][oy - pad][ox - pad];
        end
        checks++;
        if (!seen[a] || int'(got[a][i].mag) != e || got[a][i].sign) begin
          failures++; $display("FAIL op%0d pad%0d c%0d (%0d,%0d) got %0d exp %0d", o, pad, c, oy, ox, got[a][i].mag, e);
        end
      end
    end
  endtask

  initial begin
    int cyc;
    instr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(OP_POOL, 4, 4, 16, 16, 2, 2, 0, cyc);
    checks++; if (cyc != 2*2*2*4) begin failures++; $display("FAIL pool rate %0d", cyc); end
    run(OP_POOL, 3, 3, 12, 12, 2, 2, 0, cyc);      // odd tile count: half-filled edge tiles
    run(OP_PAD, 2, 2, 7, 7, 3, 3, 1, cyc);
    checks++; if (cyc != 2*3*3*8) begin failures++; $display("FAIL pad rate %0d", cyc); end
    run(OP_PAD, 2, 2, 6, 5, 3, 3, 2, cyc);
    run(OP_PAD, 1, 2, 3, 6, 3, 3, 3, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
