// weight_scratchpad: memory for the packed, zero-skipped filter weights of one
// data-staging unit.
//
// The paper says the weights and their intra-tile offsets are packed offline
// and "read directly into scratchpad memory"; word format (cnn_pkg::wword_t)
// and depth are this design's own.  Each word carries the next non-zero weight
// of each of the 4 filters being computed plus a flag marking the last word of
// an input channel.  Read data appear one cycle after 're' and hold while 're'
// is low, so the reader can stall.  Writes come from the DMA.
module weight_scratchpad #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 57,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
