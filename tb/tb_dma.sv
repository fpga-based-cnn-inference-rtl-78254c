// tb_dma: self-checking test of dma.
// A DRAM model with random wait-requests and random read latency sits on the
// 256-bit master; a bank model sits on the memory side.  The test copies
// words DRAM -> bank, checks them and the target/instance decoding, then
// copies bank -> DRAM and checks the DRAM image, including that the bytes
// beyond the 144-bit word are written as zero.
module tb_dma;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] avs_address = '0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic [31:0] avm_address;
  logic avm_read, avm_write, avm_readdatavalid = 0, avm_waitrequest;
  logic [255:0] avm_writedata, avm_readdata = '0;
  logic [0:0] mem_inst;
  logic [2:0] mem_sel;
  logic mem_re, mem_we;
  logic [ADDR_W-1:0] mem_addr;
  tile_t mem_wdata, mem_rdata;
  int checks = 0, failures = 0, n_wait = 0;

  dma #(.DATA_W(256), .NUM_INST(2)) dut (.*);
  always #5 clk = ~clk;

  logic [255:0] dram [1024];          // 32-byte words
  tile_t bank [2][8][256];            // instance, sel, address

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM: random waitrequest, read data 1..3 cycles after acceptance
  assign avm_waitrequest = wait_q;
  logic wait_q = 1;
  always @(posedge clk) begin
    wait_q <= ($urandom_range(0, 2) == 0);
    if (wait_q && (avm_read || avm_write)) n_wait++;
    if (avm_write && !wait_q) dram[avm_address[14:5]] <= avm_writedata;
  end
  initial forever begin
    @(posedge clk);
    if (avm_read && !wait_q) begin
      automatic logic [255:0] d = dram[avm_address[14:5]];
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1 avm_readdata = d; avm_readdatavalid = 1;
      @(posedge clk);
      #1 avm_readdatavalid = 0;
    end
  end
  // bank side: 1-cycle read latency
  always @(posedge clk) begin
    if (mem_we) bank[mem_inst][mem_sel][mem_addr[7:0]] <= mem_wdata;
    if (mem_re) mem_rdata <= bank[mem_inst][mem_sel][mem_addr[7:0]];
  end

  task automatic wr(int a, int v);
    @(negedge clk); avs_address = 3'(a); avs_writedata = 32'(v); avs_write = 1;
    @(negedge clk); avs_write = 0;
  endtask
  task automatic wait_done();
    int v;
    do begin
      @(negedge clk); avs_address = 0; #1 v = int'(avs_readdata);
    end while (v[1] == 0);
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) dram[i] = {8{$urandom}};
    for (int n = 0; n < 2; n++) for (int s = 0; s < 8; s++) for (int a = 0; a < 256; a++) bank[n][s][a] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // DRAM words 10..29 -> instance 1, bank 2, addresses 40..59
    wr(1, 10*32); wr(2, (1 << 3) | 2); wr(3, 40); wr(4, 20); wr(5, 0); wr(0, 1);
    wait_done();
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (bank[1][2][40+k] != tile_t'(dram[10+k][143:0])) begin failures++; $display("FAIL load word %0d", k); end
    end
    checks++;
    if (bank[0][2][40] != '0 || bank[1][1][40] != '0) begin failures++; $display("FAIL wrong target written"); end
    // weight scratchpad 3 of instance 0
    wr(1, 100*32); wr(2, 7); wr(3, 0); wr(4, 5); wr(0, 1);
    wait_done();
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (bank[0][7][k] != tile_t'(dram[100+k][143:0])) begin failures++; $display("FAIL weight word %0d", k); end
    end
    // instance 1 bank 2 addresses 40..59 -> DRAM words 500..519
    for (int k = 0; k < 20; k++) bank[1][2][40+k] = tile_t'({5{$urandom}});
    wr(1, 500*32); wr(2, (1 << 3) | 2); wr(3, 40); wr(4, 20); wr(5, 1); wr(0, 1);
    wait_done();
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (dram[500+k] != {112'd0, 144'(bank[1][2][40+k])}) begin failures++; $display("FAIL store word %0d", k); end
    end
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL waitrequest never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
