// fifo_queue: the FIFO queue that links two streaming kernels.
//
// In the paper every edge between threads is a LegUp FIFO with a chosen
// length and width, implemented in LUT RAM.  This is a plain synchronous FIFO
// with first-word fall-through: 'dout' shows the head whenever 'empty' is
// low, 'pop' removes it.  Pushing when full or popping when empty is a
// protocol error (asserted).  Width and depth are this design's choices.
module fifo_queue #(
  parameter int WIDTH = 160,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);
  localparam int PW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      cnt;

  assign full  = (cnt == (PW+1)'(DEPTH));
  assign empty = (cnt == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) begin
        wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      end
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
endmodule
