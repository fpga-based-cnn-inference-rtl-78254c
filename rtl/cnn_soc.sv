// cnn_soc: the FPGA side of the paper's system (Fig. 1): two accelerator
// instances and the DMA.
//
// The paper places two instances of the accelerator on the Arria 10 SX660,
// each working on its own stripe of the feature maps, for 512 multiply-
// accumulates per cycle.  Each instance has its own four banks.  The DMA moves
// words between DRAM and any bank or weight scratchpad of either instance.
// The host processor, its interconnect, the SDRAM controller and the DDR4
// are outside: their connections are this module's ports.
//   acc_avs_*  one Avalon-MM control/status slave per instance ("System II")
//   dma_avs_*  the DMA's control/status slave ("System II")
//   avm_*      the DMA's 256-bit master to the SDRAM controller ("System I")
// All ports are synchronous to 'clk'; 'rst_n' is an asynchronous active-low
// reset.  The DMA must not touch an instance while it is busy; such accesses
// are dropped.
module cnn_soc
  import cnn_pkg::*;
#(
  parameter int NUM_INST   = 2,
  parameter int BANK_DEPTH = 16384,
  parameter int WT_DEPTH   = 4096
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NUM_INST-1:0][3:0]   acc_avs_address,
  input  logic [NUM_INST-1:0]        acc_avs_write,
  input  logic [NUM_INST-1:0][31:0]  acc_avs_writedata,
  input  logic [NUM_INST-1:0]        acc_avs_read,
  output logic [NUM_INST-1:0][31:0]  acc_avs_readdata,
  output logic [NUM_INST-1:0]        acc_busy,
  input  logic [2:0]                 dma_avs_address,
  input  logic                       dma_avs_write,
  input  logic [31:0]                dma_avs_writedata,
  input  logic                       dma_avs_read,
  output logic [31:0]                dma_avs_readdata,
  output logic [31:0]                avm_address,
  output logic                       avm_read,
  output logic                       avm_write,
  output logic [255:0]               avm_writedata,
  input  logic [255:0]               avm_readdata,
  input  logic                       avm_readdatavalid,
  input  logic                       avm_waitrequest
);
  localparam int IW = $clog2(NUM_INST > 1 ? NUM_INST : 2);
  logic [IW-1:0]     mem_inst;
  logic [2:0]        mem_sel;
  logic              mem_re, mem_we;
  logic [ADDR_W-1:0] mem_addr;
  tile_t             mem_wdata;
  tile_t [NUM_INST-1:0] mem_rdata;
  logic [IW-1:0]     inst_q;

  dma #(.DATA_W(256), .NUM_INST(NUM_INST)) u_dma (
    .clk, .rst_n,
    .avs_address(dma_avs_address), .avs_write(dma_avs_write),
    .avs_writedata(dma_avs_writedata), .avs_read(dma_avs_read),
    .avs_readdata(dma_avs_readdata),
    .avm_address, .avm_read, .avm_write, .avm_writedata, .avm_readdata,
    .avm_readdatavalid, .avm_waitrequest,
    .mem_inst, .mem_sel, .mem_re, .mem_we, .mem_addr, .mem_wdata,
    .mem_rdata(mem_rdata[inst_q])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      inst_q <= '0;
    else if (mem_re) inst_q <= mem_inst;
  end

  for (genvar i = 0; i < NUM_INST; i++) begin : g_inst
    cnn_accelerator #(.BANK_DEPTH(BANK_DEPTH), .WT_DEPTH(WT_DEPTH)) u_acc (
      .clk, .rst_n,
      .avs_address(acc_avs_address[i]), .avs_write(acc_avs_write[i]),
      .avs_writedata(acc_avs_writedata[i]), .avs_read(acc_avs_read[i]),
      .avs_readdata(acc_avs_readdata[i]),
      .mem_sel, .mem_re(mem_re && mem_inst == IW'(i)), .mem_we(mem_we && mem_inst == IW'(i)),
      .mem_addr, .mem_wdata, .mem_rdata(mem_rdata[i]), .busy(acc_busy[i]),
      .n_apply(), .n_stall(), .n_bar_wait(), .n_written()
    );
  end
endmodule
