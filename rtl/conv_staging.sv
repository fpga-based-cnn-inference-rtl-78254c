// conv_staging: the convolution half of a data-staging/control unit.
//
// The paper splits each data-staging/control unit into a convolution
// controller and a padding/pooling controller.  Unit j owns SRAM bank j, which
// holds every 4th input channel (one quarter of the IFMs), and its own
// weight scratchpad.  For a convolution instruction it walks
//   for each group g of 4 OFMs, for each OFM tile (ty, tx),
//     for each of its input channels c: apply that channel's packed weights
// and at the end of every tile position waits at the barrier for the other
// three units.
//
// Per channel it needs the 2x2 block of IFM tiles A,B,C,D at tile (ty,tx) of
// the padded IFM, read at one tile per cycle, and a stream of packed weight
// words, one per cycle (zero weights were removed offline, so every word is
// useful work).  The next channel's 4 tiles are preloaded into a second buffer
// while the current channel's weights are applied, so a channel takes
// max(4, number of weight words) cycles: the paper's 4-cycle floor that caps
// zero-skipping at 75%.  The last of the 4 landing tiles is forwarded straight
// into the working buffer so that back-to-back channels need no extra cycle.
// The same preloading continues across tile positions: the loader keeps its
// own position counter and loads the next position's first channel while the
// last channel of the current one is applied.  After the last word of a
// position the unit also fetches the next position's first weight word while
// it waits at the barrier, but injects nothing new until the barrier has
// opened and the accumulators have been flushed.
//
// The weight stream of a group is read from the scratchpad sequentially,
// restarted at the group's first word for each tile position; the next group
// follows directly after.  Every input channel must have at least one word
// (its lanes may all be invalid).  Both memories have one cycle of read
// latency.  Loop order, memory layout and the buffering scheme are this
// design's reading of the paper, which gives the behaviour but not the FSM.
//
// IFM layout in the bank: channel c of this bank, tile (y, x) at
//   ifm_addr + c*ifm_h*ifm_w + y*ifm_w + x      (row-major tiles, Fig. 2)
// OFM tile (ty, tx) of group g is written at ofm_addr + g*ofm_h*ofm_w +
// ty*ofm_w + tx; that address travels with the end-of-tile marker.
module conv_staging
  import cnn_pkg::*;
#(
  parameter int AW  = 14,   // bank address bits
  parameter int WAW = 12    // scratchpad address bits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  // SRAM bank, port A
  output logic              bank_re,
  output logic [AW-1:0]     bank_raddr,
  input  tile_t             bank_rdata,
  // weight scratchpad
  output logic              wt_re,
  output logic [WAW-1:0]    wt_raddr,
  input  wword_t            wt_rdata,
  // to the convolution unit
  output logic              conv_valid,
  output tile_t [3:0]       conv_ifm,
  output wword_t            conv_wword,
  output logic              conv_last,
  output logic [ADDR_W-1:0] conv_addr,
  // barrier
  input  logic              bar_release,
  // activity counters
  output logic [31:0]       n_apply,      // weight words injected
  output logic [31:0]       n_stall,      // cycles waiting for IFM tiles
  output logic [31:0]       n_bar_wait    // cycles waiting at the barrier
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_BAR} st_e;
  st_e st;

  instr_t            ins;
  logic [9:0]        g;
  logic [7:0]        ty, tx;
  logic [WAW-1:0]    grp_start, wt_next;

  // loader
  logic [9:0]        ld_ch;
  logic [9:0]        l_g;       // tile position being loaded (runs ahead)
  logic [7:0]        l_ty, l_tx;
  logic              l_fin;     // every position has been loaded
  logic              l_last;
  logic [1:0]        ld_k;
  logic              land_v;
  logic [1:0]        land_k;
  tile_t [3:0]       nxt;
  logic              nxt_busy, nxt_full;
  // applier
  tile_t [3:0]       cur;
  logic              cur_full;
  logic [9:0]        ap_ch;
  logic              w_valid;
  logic              wt_pend;   // scratchpad read in flight
  logic              fin;       // the last tile position has been applied
  logic              fetch;     // weight fetch may run

  logic apply, ch_end, tile_end, nxt_ready, swap, issue_ld, tile_done_all;
  logic [ADDR_W-1:0] plane_in, plane_out;

  assign plane_in  = ADDR_W'(ins.ifm_h * ins.ifm_w);
  assign plane_out = ADDR_W'(ins.ofm_h * ins.ofm_w);

  assign apply     = (st == S_RUN) && cur_full && w_valid;
  assign ch_end    = apply && wt_rdata.last;
  assign tile_end  = ch_end && (ap_ch == ins.depth - 10'd1);
  assign nxt_ready = nxt_full || (land_v && land_k == 2'd3);
  assign swap      = nxt_ready && (!cur_full || (ch_end && !tile_end));
  assign fetch     = (st == S_RUN) || (st == S_BAR && !fin);
  assign l_last    = (l_tx == ins.ofm_w - 8'd1) && (l_ty == ins.ofm_h - 8'd1) &&
                     (l_g == ins.groups - 10'd1);
  assign issue_ld  = (st != S_IDLE) && !l_fin &&
                     (ld_k != 2'd0 || !nxt_busy || swap);
  assign tile_done_all = (tx == ins.ofm_w - 8'd1) && (ty == ins.ofm_h - 8'd1) &&
                         (g == ins.groups - 10'd1);

  // IFM read address: tile (ty + ld_k[1], tx + ld_k[0]) of channel ld_ch
  assign bank_re    = issue_ld;
  assign bank_raddr = AW'(ins.ifm_addr + ld_ch * plane_in +
                          ADDR_W'(l_ty + 8'(ld_k[1])) * ins.ifm_w +
                          ADDR_W'(l_tx) + ADDR_W'(ld_k[0]));

  // weights: fetch the first word of a tile, then one more per applied word
  assign wt_re    = fetch && ((!w_valid && !wt_pend) || (apply && !tile_end));
  assign wt_raddr = wt_next;

  assign conv_valid = apply;
  assign conv_ifm   = cur;
  assign conv_wword = wt_rdata;
  assign conv_last  = tile_end;
  assign conv_addr  = ins.ofm_addr + g * plane_out + ADDR_W'(ty) * ins.ofm_w + ADDR_W'(tx);
  assign busy       = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; g <= '0; ty <= '0; tx <= '0;
      grp_start <= '0; wt_next <= '0;
      ld_ch <= '0; ld_k <= '0; land_v <= 1'b0; land_k <= '0;
      l_g <= '0; l_ty <= '0; l_tx <= '0; l_fin <= 1'b0;
      nxt <= '0; nxt_busy <= 1'b0; nxt_full <= 1'b0;
      cur <= '0; cur_full <= 1'b0; ap_ch <= '0; w_valid <= 1'b0; wt_pend <= 1'b0;
      fin <= 1'b0;
      n_apply <= '0; n_stall <= '0; n_bar_wait <= '0;
    end else begin
      // tile landing from the bank
      land_v <= issue_ld;
      land_k <= ld_k;
      if (land_v) begin
        nxt[land_k] <= bank_rdata;
        if (land_k == 2'd3) nxt_full <= 1'b1;
      end
      if (issue_ld) begin
        ld_k <= ld_k + 2'd1;
        if (ld_k == 2'd3) begin
          if (ld_ch != ins.depth - 10'd1) begin
            ld_ch <= ld_ch + 10'd1;
          end else begin
            // last channel of this position: go on to the next one
            ld_ch <= '0;
            if (l_last) l_fin <= 1'b1;
            else if (l_tx != ins.ofm_w - 8'd1) l_tx <= l_tx + 8'd1;
            else if (l_ty != ins.ofm_h - 8'd1) begin l_tx <= '0; l_ty <= l_ty + 8'd1; end
            else begin l_tx <= '0; l_ty <= '0; l_g <= l_g + 10'd1; end
          end
        end
        if (ld_k == 2'd0) nxt_busy <= 1'b1;
      end
      // weight words
      wt_pend <= wt_re;
      if (wt_re) begin
        wt_next <= wt_next + WAW'(1);
        w_valid <= 1'b1;
      end else if (apply) begin
        w_valid <= 1'b0;
      end
      // applier
      if (apply) n_apply <= n_apply + 1;
      if (st == S_RUN && !apply) n_stall <= n_stall + 1;
      if (ch_end) begin
        cur_full <= 1'b0;
        ap_ch    <= ap_ch + 10'd1;
      end
      if (swap) begin
        cur      <= nxt;
        if (!nxt_full) cur[3] <= bank_rdata;   // forward the landing tile
        cur_full <= 1'b1;
        nxt_full <= 1'b0;
        if (!(issue_ld && ld_k == 2'd0)) nxt_busy <= 1'b0;
      end

      unique case (st)
        S_IDLE: if (start) begin
          ins <= instr; g <= '0; ty <= '0; tx <= '0;
          grp_start <= WAW'(instr.wt_addr); wt_next <= WAW'(instr.wt_addr);
          ld_ch <= '0; ld_k <= '0; ap_ch <= '0;
          l_g <= '0; l_ty <= '0; l_tx <= '0; l_fin <= 1'b0;
          cur_full <= 1'b0; nxt_full <= 1'b0; nxt_busy <= 1'b0; w_valid <= 1'b0;
          fin <= 1'b0;
          st <= S_RUN;
        end
        S_RUN: if (tile_end) begin
          // Move on to the next tile position at once, so that its first
          // weight word is fetched while waiting at the barrier.
          // conv_addr of this position has been taken by the conv unit in
          // this same cycle.
          st <= S_BAR;
          ap_ch <= '0;
          fin <= tile_done_all;
          if (!tile_done_all) begin
            if (tx != ins.ofm_w - 8'd1) begin
              tx <= tx + 8'd1;
              wt_next <= grp_start;
            end else if (ty != ins.ofm_h - 8'd1) begin
              tx <= '0; ty <= ty + 8'd1;
              wt_next <= grp_start;
            end else begin
              tx <= '0; ty <= '0; g <= g + 10'd1;
              grp_start <= wt_next;             // next group follows this one
            end
          end
        end
        S_BAR: begin
          n_bar_wait <= n_bar_wait + 1;
          // no product of the next position may reach the accumulators
          // before they have been flushed by the release
          if (bar_release) st <= fin ? S_IDLE : S_RUN;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_swap_safe: assert property (@(posedge clk) disable iff (!rst_n)
                                 (land_v && land_k == 2'd0) |-> !nxt_full);
endmodule
