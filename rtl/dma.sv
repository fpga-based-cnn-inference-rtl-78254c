// dma: moves tiles and packed weights between system DRAM and the on-FPGA
// banks of the accelerator instances.
//
// The paper's DMA is the one hand-written RTL block of its system; it says
// that the DMA is driven by the host through control/status registers and
// reaches DRAM through the 256-bit "System I" bus straight to the SDRAM
// controller, but not how it works inside.  This is the simplest DMA that does
// that job: one 256-bit Avalon-MM transfer at a time, one bank word per
// transfer (a tile in bits 143:0 of the 256-bit beat, a packed weight word in
// bits 56:0; the remaining bits are written as zero and ignored on reads).
//
// Registers (Avalon-MM slave, 32-bit, read latency 0):
//   0 CTRL   w: bit0 start          r: bit0 busy, bit1 done
//   1 DRAM   byte address of the first beat (32-byte aligned)
//   2 TARGET bits 2:0 mem_sel (bank 0..3, weight scratchpad 4..7),
//            bits 7:3 accelerator instance
//   3 LOCAL  first word address in the bank / scratchpad
//   4 COUNT  number of words
//   5 DIR    0: DRAM -> FPGA, 1: FPGA -> DRAM
// DRAM addresses advance by 32 bytes per word, local addresses by one.
module dma
  import cnn_pkg::*;
#(
  parameter int DATA_W = 256,
  parameter int NUM_INST = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control/status slave
  input  logic [2:0]           avs_address,
  input  logic                 avs_write,
  input  logic [31:0]          avs_writedata,
  input  logic                 avs_read,
  output logic [31:0]          avs_readdata,
  // DRAM master
  output logic [31:0]          avm_address,
  output logic                 avm_read,
  output logic                 avm_write,
  output logic [DATA_W-1:0]    avm_writedata,
  input  logic [DATA_W-1:0]    avm_readdata,
  input  logic                 avm_readdatavalid,
  input  logic                 avm_waitrequest,
  // bank side
  output logic [$clog2(NUM_INST > 1 ? NUM_INST : 2)-1:0] mem_inst,
  output logic [2:0]           mem_sel,
  output logic                 mem_re,
  output logic                 mem_we,
  output logic [ADDR_W-1:0]    mem_addr,
  output tile_t                mem_wdata,
  input  tile_t                mem_rdata
);
  localparam int IW = $clog2(NUM_INST > 1 ? NUM_INST : 2);
  typedef enum logic [2:0] {D_IDLE, D_RREQ, D_RWAIT, D_LRD, D_LWAIT, D_WREQ} dst_e;
  dst_e st;

  logic [31:0]       dram, cur_dram;
  logic [7:0]        target;
  logic [ADDR_W-1:0] local_a, cur_local;
  logic [31:0]       count, left;
  logic              dir, done;
  logic [DATA_W-1:0] beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; dram <= '0; target <= '0; local_a <= '0; count <= '0; dir <= 1'b0;
      done <= 1'b0; cur_dram <= '0; cur_local <= '0; left <= '0; beat <= '0;
    end else begin
      if (avs_write && st == D_IDLE) begin
        unique case (avs_address)
          3'd0: if (avs_writedata[0] && count != 0) begin
                  st <= dir ? D_LRD : D_RREQ;
                  cur_dram <= dram; cur_local <= local_a; left <= count; done <= 1'b0;
                end
          3'd1: dram    <= avs_writedata;
          3'd2: target  <= avs_writedata[7:0];
          3'd3: local_a <= avs_writedata[ADDR_W-1:0];
          3'd4: count   <= avs_writedata;
          3'd5: dir     <= avs_writedata[0];
          default: ;
        endcase
      end
      unique case (st)
        D_RREQ:  if (!avm_waitrequest) st <= D_RWAIT;
        D_RWAIT: if (avm_readdatavalid) begin       // word goes to the bank now
                   cur_dram <= cur_dram + 32'd32; cur_local <= cur_local + 1'b1;
                   left <= left - 1;
                   if (left == 32'd1) begin st <= D_IDLE; done <= 1'b1; end
                   else st <= D_RREQ;
                 end
        D_LRD:   st <= D_LWAIT;
        D_LWAIT: begin
                   beat <= DATA_W'($bits(tile_t)'(mem_rdata));
                   st   <= D_WREQ;
                 end
        D_WREQ:  if (!avm_waitrequest) begin
                   cur_dram <= cur_dram + 32'd32; cur_local <= cur_local + 1'b1;
                   left <= left - 1;
                   if (left == 32'd1) begin st <= D_IDLE; done <= 1'b1; end
                   else st <= D_LRD;
                 end
        default: ;
      endcase
    end
  end

  assign avm_address   = cur_dram;
  assign avm_read      = (st == D_RREQ);
  assign avm_write     = (st == D_WREQ);
  assign avm_writedata = beat;

  assign mem_inst  = IW'(target[7:3]);
  assign mem_sel   = target[2:0];
  assign mem_addr  = cur_local;
  assign mem_re    = (st == D_LRD);
  assign mem_we    = (st == D_RWAIT) && avm_readdatavalid;
  assign mem_wdata = tile_t'(avm_readdata[$bits(tile_t)-1:0]);

  always_comb begin
    unique case (avs_address)
      3'd0: avs_readdata = {30'd0, done, st != D_IDLE};
      3'd1: avs_readdata = dram;
      3'd2: avs_readdata = 32'(target);
      3'd3: avs_readdata = 32'(local_a);
      3'd4: avs_readdata = count;
      3'd5: avs_readdata = 32'(dir);
      default: avs_readdata = left;
    endcase
  end

  logic unused_read;
  assign unused_read = avs_read;

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) !(avm_read && avm_write));
endmodule
