// pool_pad_unit: the padding / max-pooling unit of the paper's Fig. 5.
//
// Four MAX units each take the maximum over any subset of the 16 values of
// the incoming IFM tile (Max_kSel).  Sixteen 4-to-1 multiplexers then either
// load OFM value O_p with one of the four MAX outputs or keep its old value
// (O_pSel).  One micro-instruction (cnn_pkg::ppop_t) is executed per cycle;
// a short sequence of them builds any pooling or padding pattern.  The
// 'clear' bit (start the tile from zeros, which is what padding leaves around
// the border) and the 'emit' bit (tile finished) are this design's own way of
// framing the sequence.  The finished tile and its address appear one cycle
// after the micro-instruction that emits it.
module pool_pad_unit
  import cnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  input  ppop_t             op,
  input  tile_t             tile,
  input  logic [ADDR_W-1:0] addr,
  output logic              out_valid,
  output wr_t               out
);
  sm_t   mx [4];
  tile_t ofm_q, ofm_d;

  for (genvar k = 0; k < 4; k++) begin : g_max
    max_unit u_max (.tile(tile), .sel(op.max_sel[k]), .max_o(mx[k]));
  end

  always_comb begin
    for (int p = 0; p < NVAL; p++) begin
      ofm_d[p] = op.clear ? sm_t'('0) : ofm_q[p];
      if (op.upd[p]) ofm_d[p] = mx[op.src[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ofm_q     <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= op_valid && op.emit;
      if (op_valid) begin
        ofm_q <= ofm_d;
        if (op.emit) begin
          out.data <= ofm_d;
          out.addr <= addr;
        end
      end
    end
  end
endmodule
