// tb_max_unit: self-checking test of max_unit.
// Random sign-magnitude tiles and random select masks (including single-bit
// masks, as padding uses, and the empty mask); the result must equal the
// largest selected value computed here with plain integers.
module tb_max_unit;
  import cnn_pkg::*;
  tile_t tile;
  logic [NVAL-1:0] sel;
  sm_t max_o;
  int checks = 0, failures = 0;

  max_unit dut (.*);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int best, got;
      bit any;
      for (int i = 0; i < NVAL; i++) tile[i] = sm_t'($urandom);
      case (n % 4)
        0: sel = NVAL'(1) << $urandom_range(0, NVAL-1);
        1: sel = (n % 40 == 1) ? '0 : NVAL'($urandom);
        default: sel = NVAL'($urandom);
      endcase
      #1;
      any = 0; best = 0;
      for (int i = 0; i < NVAL; i++) begin
        automatic int v = tile[i].sign ? -int'(tile[i].mag) : int'(tile[i].mag);
        if (sel[i] && (!any || v > best)) begin best = v; any = 1; end
      end
      got = max_o.sign ? -int'(max_o.mag) : int'(max_o.mag);
      checks++;
      if (got != best) begin
        failures++; $display("FAIL sel=%h got %0d exp %0d", sel, got, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
