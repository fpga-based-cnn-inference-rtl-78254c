// tb_pool_pad_unit: self-checking test of pool_pad_unit.
// Sends random sequences of micro-instructions (random MAX select masks,
// random update/keep and source choices per output, clear on the first op,
// emit on the last) and compares the emitted tile with a model kept here.
// Also runs the 2x2/stride-2 pooling pattern on known data.
module tb_pool_pad_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, op_valid = 0, out_valid;
  ppop_t op;
  tile_t tile;
  logic [ADDR_W-1:0] addr = '0;
  wr_t out;
  int checks = 0, failures = 0;

  pool_pad_unit dut (.*);
  always #5 clk = ~clk;

  function automatic int sv(sm_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  function automatic sm_t mx(tile_t t, logic [NVAL-1:0] s);
    sm_t b = '0; bit any = 0;
    for (int i = 0; i < NVAL; i++)
      if (s[i] && (!any || sv(t[i]) > sv(b))) begin b = t[i]; any = 1; end
    return b;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_t model;
    logic [ADDR_W-1:0] a;
    op = '0; tile = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = '0;
    for (int s = 0; s < 300; s++) begin
      automatic int len = $urandom_range(1, 8);
      a = ADDR_W'($urandom);
      for (int k = 0; k < len; k++) begin
        for (int i = 0; i < NVAL; i++) tile[i] = sm_t'($urandom);
        for (int m = 0; m < 4; m++) op.max_sel[m] = NVAL'($urandom);
        op.upd = NVAL'($urandom);
        op.src = 32'($urandom);
        op.clear = (k == 0);
        op.emit  = (k == len - 1);
        op_valid = 1; addr = a;
        if (op.clear) model = '0;
        for (int p = 0; p < NVAL; p++)
          if (op.upd[p]) model[p] = mx(tile, op.max_sel[op.src[p]]);
        @(negedge clk);
        op_valid = 0;
        checks++;
        if (out_valid != op.emit || (op.emit && (out.data != model || out.addr != a))) begin
          failures++; $display("FAIL seq %0d op %0d valid=%b", s, k, out_valid);
        end
        // an idle cycle now and then must not disturb the tile being built
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
    // 2x2 max-pool of known tiles, as the pooling controller issues it
    for (int q = 0; q < 4; q++) begin
      for (int i = 0; i < NVAL; i++) tile[i] = '{sign: 1'b0, mag: 8'(16*q + i)};
      op = '0;
      for (int m = 0; m < 4; m++) begin
        for (int d = 0; d < 4; d++) op.max_sel[m][(2*(m/2) + d/2)*4 + 2*(m%2) + d%2] = 1'b1;
        op.upd[(2*(q/2) + m/2)*4 + 2*(q%2) + m%2] = 1'b1;
        op.src[(2*(q/2) + m/2)*4 + 2*(q%2) + m%2] = 2'(m);
      end
      op.clear = (q == 0); op.emit = (q == 3); op_valid = 1; addr = 16'h1234;
      @(negedge clk);
      op_valid = 0;
    end
    for (int p = 0; p < NVAL; p++) begin
      automatic int q  = (p/8)*2 + (p%4)/2;          // quadrant of output p
      automatic int my = (p/4)%2, mxx = p%2;
      checks++;
      if (out.data[p].mag != 8'(16*q + (2*my+1)*4 + 2*mxx + 1)) begin
        failures++; $display("FAIL pool p=%0d got %0d", p, out.data[p].mag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
