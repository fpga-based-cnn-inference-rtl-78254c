// cnn_accelerator: one instance of the accelerator of the paper's Fig. 3.
//
// Four lanes j = 0..3, each with an SRAM bank, a weight scratchpad, a
// data-staging/control unit (here its two halves, conv_staging and
// poolpad_staging), a convolution unit, an accumulator, a pool/pad unit and a
// write-to-memory unit, plus one main controller and the tile barrier.
//
// Convolution: lane j holds input channels j, j+4, ... in bank j.  Every
// cycle each staging unit pushes one packed weight word (one weight of each
// of 4 filters) and its IFM tiles into its convolution unit, which makes 64
// products.  Accumulator f adds the 16 products of filter f from all four
// convolution units, so the four accumulators build four OFM tiles at the same
// x/y position: 256 multiplies per cycle.  When all four staging units have
// passed the end-of-tile marker, the barrier releases, the tiles go through
// their write-to-memory units into banks 0..3 (OFM 4g+f into bank f, as plane
// g), and the staging units move to the next tile position.
//
// Pad/pool: lane j reads bank j, runs its pool/pad unit and writes results
// back into bank j; the four lanes work on their own channels concurrently.
//
// The banks are also reachable from outside (the DMA) through the 'mem_*'
// port, which the paper describes as bringing the banks to the top level:
// mem_sel 0..3 selects bank 0..3, 4..7 weight scratchpad 0..3.  External
// accesses are honoured only while the accelerator is idle; read data come one
// cycle after mem_re.  The host programs the accelerator through the Avalon-MM
// slave of the main controller.
module cnn_accelerator
  import cnn_pkg::*;
#(
  parameter int BANK_DEPTH = 16384,
  parameter int WT_DEPTH   = 4096,
  localparam int AW        = $clog2(BANK_DEPTH),
  localparam int WAW       = $clog2(WT_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host control/status (Avalon-MM slave)
  input  logic [3:0]             avs_address,
  input  logic                   avs_write,
  input  logic [31:0]            avs_writedata,
  input  logic                   avs_read,
  output logic [31:0]            avs_readdata,
  // bank access from the DMA
  input  logic [2:0]             mem_sel,
  input  logic                   mem_re,
  input  logic                   mem_we,
  input  logic [ADDR_W-1:0]      mem_addr,
  input  tile_t                  mem_wdata,
  output tile_t                  mem_rdata,
  output logic                   busy,
  // activity counters per lane
  output logic [NBANK-1:0][31:0] n_apply,
  output logic [NBANK-1:0][31:0] n_stall,
  output logic [NBANK-1:0][31:0] n_bar_wait,
  output logic [NBANK-1:0][31:0] n_written
);
  instr_t instr;
  logic   start_conv, start_pp, bar_release, units_busy, drain_busy;
  logic [NBANK-1:0] cs_busy, pp_busy, lane_drain, conv_last_o;
  logic   ext_ok;
  logic [2:0] sel_q;

  prod_tile_t [NBANK-1:0][NFILT-1:0] prod;
  logic       [NBANK-1:0][NFILT-1:0] prod_valid;
  logic       [NBANK-1:0][ADDR_W-1:0] conv_addr_o;
  tile_t      [NBANK-1:0]            bank_rdata;
  wword_t     [NBANK-1:0]            wt_rdata;

  logic [$bits(tile_t)-1:0] mem_wflat;   // DMA word seen as plain bits
  assign mem_wflat = mem_wdata;
  assign ext_ok    = !busy;

  main_controller u_ctrl (
    .clk, .rst_n, .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata,
    .instr, .start_conv, .start_pp, .units_busy, .drain_busy, .busy
  );

  barrier #(.N(NBANK)) u_bar (.clk, .rst_n, .arrive(conv_last_o), .release_o(bar_release));

  assign units_busy = |cs_busy || |pp_busy;
  assign drain_busy = |lane_drain;

  for (genvar j = 0; j < NBANK; j++) begin : g_lane
    logic              cs_re, pp_re, w2m_we, cs_wt_re;
    logic [AW-1:0]     cs_raddr, pp_raddr, w2m_waddr;
    logic [WAW-1:0]    cs_wt_raddr;
    tile_t             w2m_wdata;
    logic              conv_valid, conv_last, pp_op_valid, acc_valid, pp_valid;
    tile_t [3:0]       conv_ifm;
    wword_t            conv_wword;
    logic [ADDR_W-1:0] conv_addr, pp_op_addr;
    ppop_t             pp_op;
    wr_t               acc_out, pp_out, acc_head, pp_head;
    logic              acc_full, acc_empty, acc_pop, pp_full, pp_empty, pp_pop, w2m_busy;
    prod_tile_t [NBANK-1:0] acc_prod;
    logic       [NBANK-1:0] acc_pv;
    logic              ext_rd, ext_wr, wt_rd, wt_wr;

    assign ext_rd = ext_ok && mem_re && mem_sel == 3'(j);
    assign ext_wr = ext_ok && mem_we && mem_sel == 3'(j);
    assign wt_rd  = ext_ok && mem_re && mem_sel == 3'(j + 4);
    assign wt_wr  = ext_ok && mem_we && mem_sel == 3'(j + 4);

    sram_bank #(.DEPTH(BANK_DEPTH), .WIDTH($bits(tile_t))) u_bank (
      .clk,
      .re   (cs_re || pp_re || ext_rd),
      .raddr(cs_re ? cs_raddr : pp_re ? pp_raddr : AW'(mem_addr)),
      .rdata(bank_rdata[j]),
      .we   (w2m_we || ext_wr),
      .waddr(w2m_we ? w2m_waddr : AW'(mem_addr)),
      .wdata(w2m_we ? w2m_wdata : mem_wdata)
    );

    weight_scratchpad #(.DEPTH(WT_DEPTH), .WIDTH($bits(wword_t))) u_wt (
      .clk,
      .re   (cs_wt_re || wt_rd),
      .raddr(cs_wt_re ? cs_wt_raddr : WAW'(mem_addr)),
      .rdata(wt_rdata[j]),
      .we   (wt_wr),
      .waddr(WAW'(mem_addr)),
      .wdata(mem_wflat[$bits(wword_t)-1:0])
    );

    conv_staging #(.AW(AW), .WAW(WAW)) u_cs (
      .clk, .rst_n, .start(start_conv), .instr, .busy(cs_busy[j]),
      .bank_re(cs_re), .bank_raddr(cs_raddr), .bank_rdata(bank_rdata[j]),
      .wt_re(cs_wt_re), .wt_raddr(cs_wt_raddr), .wt_rdata(wt_rdata[j]),
      .conv_valid, .conv_ifm, .conv_wword, .conv_last, .conv_addr,
      .bar_release,
      .n_apply(n_apply[j]), .n_stall(n_stall[j]), .n_bar_wait(n_bar_wait[j])
    );

    conv_unit u_conv (
      .clk, .rst_n, .in_valid(conv_valid), .ifm(conv_ifm), .wword(conv_wword),
      .in_last(conv_last), .in_addr(conv_addr),
      .prod(prod[j]), .prod_valid(prod_valid[j]),
      .out_last(conv_last_o[j]), .out_addr(conv_addr_o[j])
    );

    // accumulator j collects filter j's products from every convolution unit
    for (genvar u = 0; u < NBANK; u++) begin : g_src
      assign acc_prod[u] = prod[u][j];
      assign acc_pv[u]   = prod_valid[u][j];
    end

    accumulator #(.NSRC(NBANK)) u_acc (
      .clk, .rst_n, .prod(acc_prod), .prod_valid(acc_pv),
      .addr_valid(conv_last_o[j]), .addr_in(conv_addr_o[j]),
      .flush(bar_release), .shift(instr.shift),
      .out_valid(acc_valid), .out(acc_out)
    );

    poolpad_staging #(.AW(AW)) u_pps (
      .clk, .rst_n, .start(start_pp), .instr, .busy(pp_busy[j]),
      .bank_re(pp_re), .bank_raddr(pp_raddr),
      .op_valid(pp_op_valid), .op(pp_op), .op_addr(pp_op_addr)
    );

    pool_pad_unit u_pp (
      .clk, .rst_n, .op_valid(pp_op_valid), .op(pp_op), .tile(bank_rdata[j]),
      .addr(pp_op_addr), .out_valid(pp_valid), .out(pp_out)
    );

    fifo_queue #(.WIDTH($bits(wr_t)), .DEPTH(4)) u_qacc (
      .clk, .rst_n, .push(acc_valid), .din(acc_out), .full(acc_full),
      .pop(acc_pop), .dout(acc_head), .empty(acc_empty)
    );
    fifo_queue #(.WIDTH($bits(wr_t)), .DEPTH(4)) u_qpp (
      .clk, .rst_n, .push(pp_valid), .din(pp_out), .full(pp_full),
      .pop(pp_pop), .dout(pp_head), .empty(pp_empty)
    );

    write2mem #(.AW(AW)) u_w2m (
      .clk, .rst_n,
      .conv_empty(acc_empty), .conv_head(acc_head), .conv_pop(acc_pop),
      .pp_empty(pp_empty), .pp_head(pp_head), .pp_pop(pp_pop),
      .bank_we(w2m_we), .bank_waddr(w2m_waddr), .bank_wdata(w2m_wdata),
      .busy(w2m_busy), .tiles_written(n_written[j])
    );

    assign lane_drain[j] = conv_valid || (|prod_valid[j]) || conv_last_o[j] || acc_valid ||
                           pp_op_valid || pp_valid || w2m_busy;

    // one tile per cycle leaves each producer and write2mem drains one per cycle
    a_qacc: assert property (@(posedge clk) disable iff (!rst_n) !(acc_valid && acc_full));
    a_qpp:  assert property (@(posedge clk) disable iff (!rst_n) !(pp_valid && pp_full));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= '0;
    else if (mem_re) sel_q <= mem_sel;
  end

  always_comb begin
    if (sel_q[2]) mem_rdata = tile_t'($bits(tile_t)'(wt_rdata[sel_q[1:0]]));
    else          mem_rdata = bank_rdata[sel_q[1:0]];
  end
endmodule
