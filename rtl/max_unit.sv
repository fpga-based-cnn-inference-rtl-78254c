// max_unit: one MAX unit of the padding/pooling unit (paper Fig. 5).
//
// It returns the largest of the tile values whose bit is set in 'sel'
// (Max_kSel in the figure); values compare as signed sign-magnitude numbers.
// With one bit set it passes that single value through, which is how padding
// copies a value.  With no bit set it returns +0, this design's choice.
// Purely combinational.
module max_unit
  import cnn_pkg::*;
(
  input  tile_t           tile,
  input  logic [NVAL-1:0] sel,
  output sm_t             max_o
);
  always_comb begin
    logic                    any;
    logic signed [MAG_W+1:0] best;
    any   = 1'b0;
    best  = '0;
    max_o = '0;
    for (int i = 0; i < NVAL; i++) begin
      if (sel[i] && (!any || sm_to_int(tile[i]) > best)) begin
        best  = sm_to_int(tile[i]);
        max_o = tile[i];
        any   = 1'b1;
      end
    end
  end
endmodule
