// accumulator: keeps the 16 running sums of one OFM tile (Accum0..3 in the
// paper's Fig. 3).
//
// Accumulator j receives, each cycle, the 16 products for filter j from each
// of the 4 convolution units (one per input-channel quarter) and adds all
// valid ones into its 32-bit sums: output-stationary, no rounding of partial
// sums.  When 'flush' (the barrier release: all 4 staging units finished the
// tile) is high, the sums including this cycle's products are converted and
// emitted on the next cycle, and the sums restart at zero.  Conversion is this
// design's choice, as the paper does not say where ReLU and rescaling happen:
// arithmetic shift right by 'shift', ReLU, saturate to 255.  The output
// address is the one carried by convolution unit j's end-of-tile marker.
module accumulator
  import cnn_pkg::*;
#(
  parameter int NSRC = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  prod_tile_t [NSRC-1:0]   prod,
  input  logic [NSRC-1:0]         prod_valid,
  input  logic                    addr_valid,  // marker from conv unit j
  input  logic [ADDR_W-1:0]       addr_in,
  input  logic                    flush,
  input  logic [4:0]              shift,
  output logic                    out_valid,
  output wr_t                     out
);
  logic signed [ACC_W-1:0] acc   [NVAL];
  logic signed [ACC_W-1:0] acc_d [NVAL];
  logic [ADDR_W-1:0]       addr_q;

  always_comb begin
    for (int p = 0; p < NVAL; p++) begin
      acc_d[p] = acc[p];
      for (int s = 0; s < NSRC; s++)
        if (prod_valid[s]) acc_d[p] = acc_d[p] + ACC_W'(prod[s][p]);
    end
  end

  function automatic sm_t relu_q(logic signed [ACC_W-1:0] v, logic [4:0] sh);
    logic signed [ACC_W-1:0] s;
    s = v >>> sh;
    if (s < 0)        return '0;
    else if (s > 255) return '{sign: 1'b0, mag: 8'd255};
    else              return '{sign: 1'b0, mag: s[7:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NVAL; p++) acc[p] <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      addr_q    <= '0;
    end else begin
      if (addr_valid) addr_q <= addr_in;
      out_valid <= flush;
      if (flush) begin
        out.addr <= addr_valid ? addr_in : addr_q;
        for (int p = 0; p < NVAL; p++) begin
          out.data[p] <= relu_q(acc_d[p], shift);
          acc[p]      <= '0;
        end
      end else begin
        for (int p = 0; p < NVAL; p++) acc[p] <= acc_d[p];
      end
    end
  end
endmodule
