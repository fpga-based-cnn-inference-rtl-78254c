// sram_bank: one on-FPGA SRAM bank of tiles.
//
// The paper's banks are dual-port block RAM: the accelerator reads on port A
// and writes on port B, and one whole 4x4 tile (16 values) moves per cycle.
// This model keeps that split: port A is a synchronous read (data one cycle
// after 're'), port B a synchronous write.  A read and a write to the same
// address in one cycle return the old contents.  The depth is not given in the
// paper (it says only that bank size was maximised for the RAM available);
// 16384 tiles per bank is this design's choice.
module sram_bank #(
  parameter int DEPTH = 16384,
  parameter int WIDTH = 144,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: read
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  // port B: write
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
