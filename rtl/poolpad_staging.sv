// poolpad_staging: the padding/pooling half of a data-staging/control unit.
//
// For a pool or pad instruction unit j walks the input channels in its bank
// and, for every output tile, reads the IFM tiles it needs (one per cycle)
// and sends the pool/pad unit one micro-instruction per tile read, so the
// pool/pad unit works at one operation per cycle.  The paper states that a
// few such instructions realise any padding or pooling; the two sequences
// generated here are this design's:
//
//  * OP_POOL, 2x2 max-pool with stride 2 (the VGG-16 case): an output tile
//    covers 2x2 input tiles.  Each input tile gives one quadrant of the
//    output: MAX unit k takes the 2x2 window k of that tile.  4 ops per tile.
//  * OP_PAD, zero border of 'pad' pixels: output row r of the tile comes
//    from at most two horizontally adjacent input tiles; for each (r, half)
//    one op copies up to 4 single values (MAX unit k = output column k).
//    Positions that fall outside the input stay at the zero they were
//    cleared to.  8 ops per tile.  The input size in pixels (ifm_hpx,
//    ifm_wpx) bounds what is copied, so maps whose width is not a multiple
//    of 4 are handled.
//
// Outputs are registered: the micro-instruction arrives at the pool/pad unit
// together with the bank data, one cycle after the read.
module poolpad_staging
  import cnn_pkg::*;
#(
  parameter int AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  output logic              bank_re,
  output logic [AW-1:0]     bank_raddr,
  output logic              op_valid,
  output ppop_t             op,
  output logic [ADDR_W-1:0] op_addr
);
  instr_t     ins;
  logic       run;
  logic [9:0] ch;
  logic [7:0] oy, ox;
  logic [2:0] k;

  ppop_t             op_d;
  logic              src_ok;
  logic [ADDR_W-1:0] src_addr, plane_in, plane_out;
  logic [2:0]        k_last;

  assign plane_in  = ADDR_W'(ins.ifm_h * ins.ifm_w);
  assign plane_out = ADDR_W'(ins.ofm_h * ins.ofm_w);
  assign k_last    = (ins.op == OP_POOL) ? 3'd3 : 3'd7;

  always_comb begin
    int sy, sx, iy, ix0, ix, stx, r, h;
    logic ok;
    op_d     = '0;
    src_ok   = 1'b0;
    sy = 0; sx = 0; iy = 0; ix0 = 0; ix = 0; stx = 0; r = 0; h = 0; ok = 1'b0;
    op_d.clear = (k == 3'd0);
    op_d.emit  = (k == k_last);
    if (ins.op == OP_POOL) begin
      sy = 2*int'(oy) + int'(k[1]);
      sx = 2*int'(ox) + int'(k[0]);
      src_ok = (sy < int'(ins.ifm_h)) && (sx < int'(ins.ifm_w));
      for (int m = 0; m < 4; m++) begin
        for (int d = 0; d < 4; d++)
          op_d.max_sel[m][(2*(m/2) + d/2)*4 + 2*(m%2) + d%2] = 1'b1;
        op_d.upd[(2*int'(k[1]) + m/2)*4 + 2*int'(k[0]) + m%2] = src_ok;
        op_d.src[(2*int'(k[1]) + m/2)*4 + 2*int'(k[0]) + m%2] = 2'(m);
      end
    end else begin
      r   = int'(k[2:1]);
      h   = int'(k[0]);
      iy  = 4*int'(oy) + r - int'(ins.pad);
      ix0 = 4*int'(ox) - int'(ins.pad);
      stx = (ix0 >>> 2) + h;
      sy  = iy >>> 2;
      sx  = stx;
      for (int c = 0; c < 4; c++) begin
        ix = ix0 + c;
        ok = (iy >= 0) && (iy < int'(ins.ifm_hpx)) && (ix >= 0) &&
             (ix < int'(ins.ifm_wpx)) && ((ix >>> 2) == stx);
        if (ok) begin
          op_d.max_sel[c][(iy % 4)*4 + (ix % 4)] = 1'b1;
          op_d.upd[r*4 + c] = 1'b1;
          op_d.src[r*4 + c] = 2'(c);
          src_ok = 1'b1;
        end
      end
    end
    src_addr = ins.ifm_addr + ch * plane_in +
               ADDR_W'(src_ok ? sy : 0) * ADDR_W'(ins.ifm_w) + ADDR_W'(src_ok ? sx : 0);
  end

  assign bank_re    = run && src_ok;
  assign bank_raddr = AW'(src_addr);
  assign busy       = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ins <= '0; run <= 1'b0; ch <= '0; oy <= '0; ox <= '0; k <= '0;
      op_valid <= 1'b0; op <= '0; op_addr <= '0;
    end else begin
      op_valid <= run;
      if (run) begin
        op      <= op_d;
        op_addr <= ins.ofm_addr + ch * plane_out + ADDR_W'(oy) * ADDR_W'(ins.ofm_w) + ADDR_W'(ox);
        if (k != k_last) begin
          k <= k + 3'd1;
        end else begin
          k <= '0;
          if (ox != ins.ofm_w - 8'd1) ox <= ox + 8'd1;
          else begin
            ox <= '0;
            if (oy != ins.ofm_h - 8'd1) oy <= oy + 8'd1;
            else begin
              oy <= '0;
              if (ch != ins.depth - 10'd1) ch <= ch + 10'd1;
              else run <= 1'b0;
            end
          end
        end
      end else if (start) begin
        ins <= instr; ch <= '0; oy <= '0; ox <= '0; k <= '0;
        run <= 1'b1;
      end
    end
  end
endmodule
