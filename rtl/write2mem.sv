// write2mem: write-to-memory unit (Write2Mem in the paper's Fig. 3).
//
// Takes finished OFM tiles from two FIFO queues, one fed by the accumulator
// (convolution) and one by the pool/pad unit, and writes one tile per cycle
// into its bank through port B.  Only one kind of instruction runs at a time,
// but if both queues hold data the convolution queue goes first (a fixed
// priority of this design's choosing).  The bank write happens in the cycle the
// tile is popped.  'busy' is high while either queue holds a tile.
module write2mem
  import cnn_pkg::*;
#(
  parameter int AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              conv_empty,
  input  wr_t               conv_head,
  output logic              conv_pop,
  input  logic              pp_empty,
  input  wr_t               pp_head,
  output logic              pp_pop,
  output logic              bank_we,
  output logic [AW-1:0]     bank_waddr,
  output tile_t             bank_wdata,
  output logic              busy,
  output logic [31:0]       tiles_written
);
  assign conv_pop   = !conv_empty;
  assign pp_pop     = conv_empty && !pp_empty;
  assign bank_we    = conv_pop || pp_pop;
  assign bank_waddr = conv_pop ? AW'(conv_head.addr) : AW'(pp_head.addr);
  assign bank_wdata = conv_pop ? conv_head.data : pp_head.data;
  assign busy       = !conv_empty || !pp_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       tiles_written <= '0;
    else if (bank_we) tiles_written <= tiles_written + 1;
  end
endmodule
