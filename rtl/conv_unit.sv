// conv_unit: convolution unit, 4 weights x 16 IFM values = 64 products/cycle.
//
// Each cycle the data-staging unit presents four IFM tiles A (aligned with the
// OFM tile), B (right of A), C (below A) and D (below-right), and one packed
// weight word holding one weight from each of 4 filters with its intra-tile
// offset (wy, wx).  For OFM position p = (r, c) a weight multiplies the IFM
// value at row r+wy, column c+wx of the 8x8 window A|B over C|D: that is the
// offset-driven steering multiplexer of the paper's Fig. 4(b), one per product.
// Products are signed two's-complement (sign-magnitude in, 17 bits out) and
// registered: outputs appear one cycle after the inputs.  The end-of-tile
// marker and the OFM address ride along with the same latency.
// The accumulation (the adder of Fig. 4b) lives in the accumulator units.
module conv_unit
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  tile_t [3:0]             ifm,        // 0:A 1:B 2:C 3:D
  input  wword_t                  wword,
  input  logic                    in_last,    // last weight word of this tile position
  input  logic [ADDR_W-1:0]       in_addr,    // OFM tile address (for write-back)
  output prod_tile_t [NFILT-1:0]  prod,
  output logic [NFILT-1:0]        prod_valid,
  output logic                    out_last,
  output logic [ADDR_W-1:0]       out_addr
);
  // IFM value at window row y, column x (0..7)
  function automatic sm_t win(tile_t [3:0] t, int y, int x);
    return t[(y >= 4 ? 2 : 0) + (x >= 4 ? 1 : 0)][(y % 4)*4 + (x % 4)];
  endfunction

  prod_tile_t [NFILT-1:0] prod_d;

  always_comb begin
    for (int f = 0; f < NFILT; f++) begin
      for (int p = 0; p < NVAL; p++) begin
        prod_d[f][p] = sm_mul(wword.lane[f].w,
                              win(ifm, p/4 + int'(wword.lane[f].off[3:2]),
                                       p%4 + int'(wword.lane[f].off[1:0])));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_valid <= '0;
      out_last   <= 1'b0;
      out_addr   <= '0;
      prod       <= '0;
    end else begin
      for (int f = 0; f < NFILT; f++) prod_valid[f] <= in_valid && wword.lane[f].valid;
      out_last <= in_valid && in_last;
      if (in_valid) begin
        prod     <= prod_d;
        out_addr <= in_addr;
      end
    end
  end
endmodule
