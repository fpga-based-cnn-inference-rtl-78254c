// tb_main_controller: self-checking test of main_controller.
// Writes every instruction register and reads it back, starts a convolution
// and a pool instruction and checks the one-cycle start pulse on the right
// output only, that 'busy' holds while the (modelled) staging units and write
// path are busy, that 'done' rises only after they have all gone quiet, that
// a start while busy is ignored, and that the cycle counter is plausible.
module tb_main_controller;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] avs_address = '0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  instr_t instr;
  logic start_conv, start_pp, units_busy = 0, drain_busy = 0, busy;
  int checks = 0, failures = 0;

  main_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int v);
    @(negedge clk); avs_address = 4'(a); avs_writedata = 32'(v); avs_write = 1;
    @(negedge clk); avs_write = 0;
  endtask
  task automatic rd(int a, output int v);
    @(negedge clk); avs_address = 4'(a); avs_read = 1; #1 v = int'(avs_readdata);
    @(negedge clk); avs_read = 0;
  endtask
  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // modelled staging units: busy for 'work' cycles after the start pulse,
  // then the write path stays busy 'drain' more cycles (longer than the
  // controller's 4 quiet cycles, so that waiting for it matters)
  int work = 0, drain = 12, n_conv = 0, n_pp = 0, n_early = 0;
  initial forever begin
    @(posedge clk);
    if (!rst_n) continue;
    if (start_conv) n_conv++;
    if (start_pp) n_pp++;
    if (start_conv || start_pp) begin
      #1 units_busy = 1;
      repeat (work) @(posedge clk);
      #1 units_busy = 0; drain_busy = 1;
      repeat (drain) @(posedge clk);
      #1 drain_busy = 0;
    end
  end

  // 'busy' must hold while any modelled unit or the write path is busy
  always @(posedge clk) if (rst_n && !busy && (units_busy || drain_busy)) n_early++;

  initial begin
    int v, t0, cyc;
    int vals [15] = '{0, 1, 1234, 56, 78, 300, 301, 512, 4321, 28, 29, 64, 999, 17, 2};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 1; a < 15; a++) wr(a, vals[a]);
    for (int a = 1; a < 15; a++) begin rd(a, v); expect_eq(v, vals[a], "register readback"); end
    expect_eq(int'(instr.ifm_addr), 1234, "instr.ifm_addr");
    expect_eq(int'(instr.groups), 64, "instr.groups");
    expect_eq(int'(instr.pad), 2, "instr.pad");
    expect_eq(int'(instr.op), 1, "instr.op");
    // convolution
    work = 40;
    wr(0, 1);
    rd(0, v); expect_eq(v & 3, 1, "busy after start");
    wr(2, 77);                        // ignored while busy
    rd(2, v); expect_eq(v, 1234, "write ignored while busy");
    wr(0, 1);                         // ignored while busy
    t0 = 0;
    do begin rd(0, v); t0++; end while (v[1] == 0 && t0 < 200);
    expect_eq(v & 3, 2, "done, not busy");
    expect_eq(n_conv, 1, "one conv start");
    expect_eq(n_pp, 0, "no pool/pad start");
    rd(15, cyc);
    checks++;
    if (cyc < work + drain || cyc > work + drain + 12) begin failures++; $display("FAIL cycles %0d", cyc); end
    // pool
    wr(1, 2); work = 10;
    wr(0, 1);
    do rd(0, v); while (v[1] == 0);
    expect_eq(n_pp, 1, "one pool/pad start");
    expect_eq(n_conv, 1, "still one conv start");
    // nop finishes at once
    wr(1, 0); wr(0, 1);
    repeat (8) @(negedge clk);
    rd(0, v); expect_eq(v & 3, 2, "nop done");
    expect_eq(n_early, 0, "cycles not busy while work was pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
