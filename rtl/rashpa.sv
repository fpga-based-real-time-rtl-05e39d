// rashpa: RASHPA data channel. It turns the user's transfer rules into AXI
// CDMA transfers that copy image lines from the FPGA's DDR into local buffers
// (LB) of the receiving computer's RASHPA buffer (RB).
//
// Source rules: a block is src_line_count lines of src_line_size bytes,
// src_line_stride apart, starting at src_addr + b * src_block_stride for
// block b of src_block_count. Each trigger (a frame written by the DDR
// writer) moves all blocks of the source once, one CDMA transfer per line.
//
// Destination rules: each block goes to one block slot of a local buffer,
//   lb_base[lb] + dst_offset + slot * dst_block_stride + line * dst_line_stride.
// The slot walk follows the dispatch rule:
//   global overwrite   : every trigger restarts at LB dst_index, slot 0;
//   global concatenate : slots continue from trigger to trigger, moving to the
//                        next LB after nb_blocks_in_lb slots; when all
//                        nb_lb_in_rb LBs are full the channel stops (rb_full);
//   circular           : as concatenate, but wraps back to LB dst_index.
// LB indices count from dst_index and wrap modulo nb_lb_in_rb. group_done
// pulses every nb_blocks_in_group blocks sent.
//
// Transfers are handed alternately to two CDMA engines (ping-pong), so one
// engine is programmed while the other copies. A descriptor port is a
// valid/ready pair; ready means the engine is idle and takes it.
// The rule names come from the paper; their exact semantics above, the
// per-line transfer and the notification pulse are this design's reading.
module rashpa
  import smartpix_pkg::*;
#(
  parameter int unsigned MAX_LB = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rashpa_cfg_t       cfg,
  input  logic [ADDR_W-1:0] lb_base [MAX_LB],
  input  logic              start,        // reset the dispatch position
  input  logic              trigger,      // one frame is ready in DDR
  output cdma_desc_t        desc   [2],
  output logic              desc_valid [2],
  input  logic              desc_ready [2],
  output logic              group_done,
  output logic              rb_full,
  output logic              idle
);
  logic [15:0]       pending;          // triggers not yet served
  logic              active;
  logic [15:0]       b, l;             // block and line within the trigger
  logic [ADDR_W-1:0] src_boff, src_loff;
  logic [31:0]       dst_boff, dst_loff;
  logic [7:0]        rel_lb, abs_lb;   // position in the RB
  logic [15:0]       slot;             // block slot within the LB
  logic [15:0]       grp_cnt;
  logic              port;             // CDMA that gets the next transfer
  logic              hold_valid;
  cdma_desc_t        hold;
  logic              take, fire, line_end, blk_end, trig_end;
  logic [8:0]        lb_sum;

  assign lb_sum   = 9'(cfg.dst_index) + 9'(rel_lb);
  assign abs_lb   = (lb_sum >= 9'(cfg.nb_lb_in_rb)) ? 8'(lb_sum - 9'(cfg.nb_lb_in_rb)) : 8'(lb_sum);
  assign fire     = hold_valid && desc_ready[port];
  assign take     = active && !rb_full && (!hold_valid || fire);
  assign line_end = (l == cfg.src_line_count - 16'd1);
  assign blk_end  = line_end;
  assign trig_end = blk_end && (b == cfg.src_block_count - 16'd1);
  assign idle     = !active && !hold_valid && (pending == 16'd0);

  for (genvar p = 0; p < 2; p++) begin : g_port
    assign desc[p]       = hold;
    assign desc_valid[p] = hold_valid && (port == 1'(p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; active <= 1'b0; b <= '0; l <= '0;
      src_boff <= '0; src_loff <= '0; dst_boff <= '0; dst_loff <= '0;
      rel_lb <= '0; slot <= '0; grp_cnt <= '0; port <= 1'b0;
      hold_valid <= 1'b0; hold <= '0; group_done <= 1'b0; rb_full <= 1'b0;
    end else begin
      group_done <= 1'b0;
      if (start) begin
        rel_lb <= '0; slot <= '0; dst_boff <= '0; rb_full <= 1'b0; grp_cnt <= '0;
      end
      pending <= pending + 16'(trigger && !start) - 16'(!active && pending != 0 && !start);
      if (!active && pending != 0 && !start) begin
        active <= 1'b1;
        b <= '0; l <= '0; src_boff <= '0; src_loff <= '0; dst_loff <= '0;
        if (cfg.dispatch == DISP_OVERWRITE) begin
          rel_lb <= '0; slot <= '0; dst_boff <= '0;
        end
      end
      if (fire) begin
        hold_valid <= 1'b0;
        port       <= !port;
      end
      if (take) begin
        hold.src   <= cfg.src_addr + src_boff + src_loff;
        hold.dst   <= lb_base[abs_lb[$clog2(MAX_LB)-1:0]] + ADDR_W'(cfg.dst_offset)
                      + ADDR_W'(dst_boff) + ADDR_W'(dst_loff);
        hold.len   <= cfg.src_line_size;
        hold_valid <= 1'b1;
        l        <= line_end ? '0 : l + 16'd1;
        src_loff <= line_end ? '0 : src_loff + ADDR_W'(cfg.src_line_stride);
        dst_loff <= line_end ? '0 : dst_loff + cfg.dst_line_stride;
        if (blk_end) begin
          b        <= b + 16'd1;
          src_boff <= src_boff + ADDR_W'(cfg.src_block_stride);
          if (grp_cnt == cfg.nb_blocks_in_group - 16'd1) begin
            grp_cnt    <= '0;
            group_done <= 1'b1;
          end else begin
            grp_cnt <= grp_cnt + 16'd1;
          end
          if (slot == cfg.nb_blocks_in_lb - 16'd1) begin
            slot     <= '0;
            dst_boff <= '0;
            if (rel_lb == cfg.nb_lb_in_rb - 8'd1) begin
              rel_lb <= '0;
              if (cfg.dispatch == DISP_CONCATENATE) rb_full <= 1'b1;
            end else begin
              rel_lb <= rel_lb + 8'd1;
            end
          end else begin
            slot     <= slot + 16'd1;
            dst_boff <= dst_boff + cfg.dst_block_stride;
          end
        end
        if (trig_end) active <= 1'b0;
      end
    end
  end

  a_desc_stable: assert property (@(posedge clk) disable iff (!rst_n)
    desc_valid[0] && !desc_ready[0] |=> desc_valid[0] && $stable(desc[0]));
  a_desc1_stable: assert property (@(posedge clk) disable iff (!rst_n)
    desc_valid[1] && !desc_ready[1] |=> desc_valid[1] && $stable(desc[1]));
endmodule
