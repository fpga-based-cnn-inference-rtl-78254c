// tb_write2mem: self-checking test of write2mem.
// Two FIFO queues (as in the accelerator) are filled at random with tiles
// for random addresses; every tile must reach the bank write port exactly
// once, in order per queue, with the convolution queue served first when
// both hold data.  The written tiles are checked in a bank model.
module tb_write2mem;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic conv_empty, conv_pop, pp_empty, pp_pop, bank_we, busy;
  wr_t conv_head, pp_head, cin, pin;
  logic cpush = 0, ppush = 0, cfull, pfull;
  logic [13:0] bank_waddr;
  tile_t bank_wdata;
  logic [31:0] tiles_written;
  wr_t cq [$], pq [$];
  int checks = 0, failures = 0, n_both = 0;

  fifo_queue #(.WIDTH($bits(wr_t)), .DEPTH(4)) qc (.clk, .rst_n, .push(cpush), .din(cin), .full(cfull),
    .pop(conv_pop), .dout(conv_head), .empty(conv_empty));
  fifo_queue #(.WIDTH($bits(wr_t)), .DEPTH(4)) qp (.clk, .rst_n, .push(ppush), .din(pin), .full(pfull),
    .pop(pp_pop), .dout(pp_head), .empty(pp_empty));
  write2mem #(.AW(14)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producers
  initial begin
    cin = '0; pin = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      cpush = !cfull && ($urandom_range(0, 2) == 0);
      ppush = !pfull && ($urandom_range(0, 2) == 0);
      cin.addr = ADDR_W'($urandom_range(0, 16383)); cin.data = tile_t'({5{$urandom}});
      pin.addr = ADDR_W'($urandom_range(0, 16383)); pin.data = tile_t'({5{$urandom}});
      if (cpush) cq.push_back(cin);
      if (ppush) pq.push_back(pin);
      @(negedge clk);
      cpush = 0; ppush = 0;
    end
    repeat (10) @(negedge clk);
    checks++;
    if (cq.size() != 0 || pq.size() != 0 || busy) begin
      failures++; $display("FAIL leftovers %0d %0d", cq.size(), pq.size());
    end
    checks++;
    if (n_both == 0) begin failures++; $display("FAIL priority never exercised"); end
    $display("tiles written: %0d", tiles_written);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank-side checker
  always @(posedge clk) if (rst_n) begin
    if (!conv_empty && !pp_empty) n_both++;
    if (bank_we) begin
      wr_t e;
      checks++;
      if (!conv_empty) begin
        e = cq.pop_front();
        if (!conv_pop || pp_pop) begin failures++; $display("FAIL priority"); end
      end else begin
        e = pq.pop_front();
      end
      if (bank_waddr != e.addr[13:0] || bank_wdata != e.data) begin
        failures++; $display("FAIL write addr %h exp %h", bank_waddr, e.addr);
      end
    end
  end
endmodule
