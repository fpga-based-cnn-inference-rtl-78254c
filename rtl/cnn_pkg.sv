// cnn_pkg: types and constants shared by the accelerator.
//
// Data are 8-bit magnitude plus a sign bit (sign-magnitude), as the paper
// specifies.  Feature maps are stored as 4x4 tiles; one tile (16 values,
// 144 bits) is one word of an SRAM bank, and value X_i of a tile sits at bits
// [9*i +: 9] with i = 4*row + column (Fig. 2 numbering).  The packed weight
// word, the instruction layout and the accumulator width are this design's
// own choices; the paper names the instruction fields only in part
// (InstructionType, IFM Address, IFM Dim, IFM Depth, OFM Address, ...).
package cnn_pkg;

  localparam int TILE_DIM = 4;                 // tile is 4x4 values
  localparam int NVAL     = TILE_DIM*TILE_DIM; // 16 values per tile
  localparam int MAG_W    = 8;                 // magnitude bits
  localparam int VAL_W    = MAG_W + 1;         // sign + magnitude
  localparam int TILE_W   = NVAL*VAL_W;        // 144 bits
  localparam int NBANK    = 4;                 // banks / staging units / conv units
  localparam int NFILT    = 4;                 // OFMs computed at once
  localparam int PROD_W   = 2*MAG_W + 1;       // signed product width
  localparam int ACC_W    = 32;                // accumulator width (assumed)
  localparam int ADDR_W   = 16;                // address fields of an instruction

  // sign-magnitude value: {sign, magnitude}
  typedef struct packed {
    logic             sign;
    logic [MAG_W-1:0] mag;
  } sm_t;

  typedef sm_t [NVAL-1:0] tile_t;              // element i = X_i

  typedef logic signed [PROD_W-1:0] prod_t;
  typedef prod_t [NVAL-1:0] prod_tile_t;

  // one weight of a packed (zero-skipped) filter stream
  typedef struct packed {
    logic       valid;   // 0: this filter has no weight left for the channel (bubble)
    sm_t        w;       // weight value
    logic [3:0] off;     // intra-tile offset, 4*wy + wx
  } wlane_t;

  // one scratchpad word: the next non-zero weight of each of the 4 filters
  typedef struct packed {
    logic                   last;  // final word of this input channel
    wlane_t [NFILT-1:0]     lane;
  } wword_t;
  localparam int WWORD_W = $bits(wword_t);   // 57

  typedef enum logic [1:0] {
    OP_NOP  = 2'd0,
    OP_CONV = 2'd1,
    OP_POOL = 2'd2,   // 2x2 max-pool, stride 2
    OP_PAD  = 2'd3    // zero padding by 'pad' pixels on each side
  } op_e;

  typedef struct packed {
    op_e               op;
    logic [ADDR_W-1:0] ifm_addr;   // first tile of channel 0 in each bank
    logic [7:0]        ifm_h;      // IFM height in tiles
    logic [7:0]        ifm_w;      // IFM width in tiles
    logic [9:0]        ifm_hpx;    // IFM height in pixels (padding)
    logic [9:0]        ifm_wpx;    // IFM width in pixels (padding)
    logic [9:0]        depth;      // channels held by each bank
    logic [ADDR_W-1:0] ofm_addr;   // first tile of output plane 0 in each bank
    logic [7:0]        ofm_h;      // OFM height in tiles
    logic [7:0]        ofm_w;      // OFM width in tiles
    logic [9:0]        groups;     // convolution: groups of 4 OFMs
    logic [ADDR_W-1:0] wt_addr;    // convolution: start of the packed weights
    logic [4:0]        shift;      // convolution: right shift before ReLU/saturation
    logic [1:0]        pad;        // padding: pixels added on each side
  } instr_t;

  // pool/pad micro-instruction (Fig. 5): 4 MAX selects, 16 output selects
  typedef struct packed {
    logic [3:0][NVAL-1:0] max_sel; // Max_kSel: which IFM values MAX unit k considers
    logic [NVAL-1:0]      upd;     // O_pSel: update O_p (1) or keep it (0)
    logic [NVAL-1:0][1:0] src;     // O_pSel: which MAX output O_p takes
    logic                 clear;   // start a new OFM tile at zero
    logic                 emit;    // OFM tile complete after this op
  } ppop_t;

  // OFM tile on its way to a bank
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    tile_t             data;
  } wr_t;

  // signed value of a sign-magnitude number
  function automatic logic signed [MAG_W+1:0] sm_to_int(sm_t v);
    return v.sign ? -$signed({2'b00, v.mag}) : $signed({2'b00, v.mag});
  endfunction

  // sign-magnitude product as a two's-complement number
  function automatic prod_t sm_mul(sm_t a, sm_t b);
    logic [2*MAG_W-1:0] m;
    m = a.mag * b.mag;
    return (a.sign ^ b.sign) ? -$signed({1'b0, m}) : $signed({1'b0, m});
  endfunction

endpackage
