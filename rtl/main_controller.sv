// main_controller: receives instructions from the host and dispatches them to
// the four data-staging units (Main controller in the paper's Fig. 3).
//
// The host writes the instruction fields into memory-mapped registers over
// an Avalon-MM slave (the paper's "System II" control/status interface) and
// then writes 1 to bit 0 of register 0.  The controller hands the instruction
// to all four convolution or pad/pool controllers with a one-cycle start
// pulse, waits until they are idle and every result tile has been written,
// and raises 'done'.  Register map (32-bit words, read latency 0):
//   0 CTRL    w: bit0 start            r: bit0 busy, bit1 done
//   1 OP      0 nop, 1 conv, 2 max-pool 2x2/2, 3 pad
//   2 IFM_ADDR   3 IFM_H (tiles)  4 IFM_W (tiles)  5 IFM_HPX  6 IFM_WPX
//   7 DEPTH (channels per bank)   8 OFM_ADDR  9 OFM_H  10 OFM_W
//  11 GROUPS (of 4 OFMs)         12 WT_ADDR  13 SHIFT  14 PAD
//  15 CYCLES  r: clock cycles taken by the last instruction
// The field list follows the instruction box of Fig. 3 (type, IFM address,
// IFM dimensions, IFM depth, OFM address, ...); the map itself is this
// design's.  A start while busy is ignored.
module main_controller
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  avs_address,
  input  logic        avs_write,
  input  logic [31:0] avs_writedata,
  input  logic        avs_read,
  output logic [31:0] avs_readdata,
  output instr_t      instr,
  output logic        start_conv,
  output logic        start_pp,
  input  logic        units_busy,    // any staging unit busy
  input  logic        drain_busy,    // results still on their way to a bank
  output logic        busy
);
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cst_e;
  cst_e        st;
  logic        done;
  logic [31:0] cycles;
  logic [1:0]  quiet;   // consecutive idle cycles seen while waiting

  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr <= '0; st <= C_IDLE; done <= 1'b0; cycles <= '0; quiet <= '0;
      start_conv <= 1'b0; start_pp <= 1'b0;
    end else begin
      start_conv <= 1'b0;
      start_pp   <= 1'b0;
      if (avs_write && st == C_IDLE) begin
        unique case (avs_address)
          4'd0:  if (avs_writedata[0]) begin
                   st <= C_ISSUE; done <= 1'b0; cycles <= '0;
                 end
          4'd1:  instr.op       <= op_e'(avs_writedata[1:0]);
          4'd2:  instr.ifm_addr <= avs_writedata[ADDR_W-1:0];
          4'd3:  instr.ifm_h    <= avs_writedata[7:0];
          4'd4:  instr.ifm_w    <= avs_writedata[7:0];
          4'd5:  instr.ifm_hpx  <= avs_writedata[9:0];
          4'd6:  instr.ifm_wpx  <= avs_writedata[9:0];
          4'd7:  instr.depth    <= avs_writedata[9:0];
          4'd8:  instr.ofm_addr <= avs_writedata[ADDR_W-1:0];
          4'd9:  instr.ofm_h    <= avs_writedata[7:0];
          4'd10: instr.ofm_w    <= avs_writedata[7:0];
          4'd11: instr.groups   <= avs_writedata[9:0];
          4'd12: instr.wt_addr  <= avs_writedata[ADDR_W-1:0];
          4'd13: instr.shift    <= avs_writedata[4:0];
          4'd14: instr.pad      <= avs_writedata[1:0];
          default: ;
        endcase
      end
      unique case (st)
        C_ISSUE: begin
          start_conv <= (instr.op == OP_CONV);
          start_pp   <= (instr.op == OP_POOL) || (instr.op == OP_PAD);
          quiet      <= '0;
          cycles     <= cycles + 1;
          st         <= C_WAIT;
        end
        C_WAIT: begin
          cycles <= cycles + 1;
          if (units_busy || drain_busy || start_conv || start_pp) quiet <= '0;
          else if (quiet != 2'd3) quiet <= quiet + 2'd1;
          else begin
            st   <= C_IDLE;
            done <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (avs_address)
      4'd0:  avs_readdata = {30'd0, done, busy};
      4'd1:  avs_readdata = 32'(instr.op);
      4'd2:  avs_readdata = 32'(instr.ifm_addr);
      4'd3:  avs_readdata = 32'(instr.ifm_h);
      4'd4:  avs_readdata = 32'(instr.ifm_w);
      4'd5:  avs_readdata = 32'(instr.ifm_hpx);
      4'd6:  avs_readdata = 32'(instr.ifm_wpx);
      4'd7:  avs_readdata = 32'(instr.depth);
      4'd8:  avs_readdata = 32'(instr.ofm_addr);
      4'd9:  avs_readdata = 32'(instr.ofm_h);
      4'd10: avs_readdata = 32'(instr.ofm_w);
      4'd11: avs_readdata = 32'(instr.groups);
      4'd12: avs_readdata = 32'(instr.wt_addr);
      4'd13: avs_readdata = 32'(instr.shift);
      4'd14: avs_readdata = 32'(instr.pad);
      default: avs_readdata = cycles;
    endcase
  end

  // the read strobe has no side effect
  logic unused_read;
  assign unused_read = avs_read;
endmodule
