// ddr_writer: places each image line at its address in DDR.
//
// Configured with a start address, a line size in bytes, a line stride (bytes
// from one line's start to the next line's of the same chip) and a block
// stride (bytes from one chip's block to the next), it rebuilds the module or
// system frame in DDR. Lines arrive interleaved over the blocks, as the
// rotation reader sends them: row 0 of block 0, row 0 of block 1, ...,
// row 1 of block 0, ... Line i therefore goes to
//   start + (i mod n_blocks) * block_stride + (i div n_blocks) * line_stride.
// Gaps left by strides larger than the data are not written, so the value
// the memory initializer put there stays as dummy (null) pixels between chips
// and modules.
//
// Each input beat becomes one write beat of cfg_beat_bytes bytes (32 for a
// 256-bit stream carried in the low half of in_data, 64 for a 512-bit
// stream); lines must be a whole number of beats and addresses multiples of
// the beat size. As on an AXI bus, data sits on the byte lanes of the 64-byte
// bus that its address selects, and strb marks them. Output is registered, one beat per cycle;
// frame_done pulses in the cycle the frame's last write is accepted, so a
// reader of the frame (RASHPA) never starts before the data is in DDR.
module ddr_writer
  import smartpix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] cfg_start,
  input  logic [31:0]       cfg_line_size,
  input  logic [31:0]       cfg_line_stride,
  input  logic [31:0]       cfg_block_stride,
  input  logic [15:0]       cfg_nblocks,
  input  logic [15:0]       cfg_lines_per_block,
  input  logic [6:0]        cfg_beat_bytes,   // 32 or 64
  input  logic [WIDE_W-1:0] in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output ddr_wr_t           wr,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic              frame_done       // the frame's last write is accepted
);
  logic [31:0]       off;        // byte offset within the line
  logic [15:0]       blk, row;
  logic [ADDR_W-1:0] blk_base, row_base;
  logic              in_fire, line_end, blk_end, frame_end, wr_last;

  logic [ADDR_W-1:0] waddr;
  assign frame_done = wr_valid && wr_ready && wr_last;
  assign waddr      = cfg_start + blk_base + row_base + ADDR_W'(off);

  assign in_ready  = !wr_valid || wr_ready;
  assign in_fire   = in_valid && in_ready;
  assign line_end  = (off + 32'(cfg_beat_bytes) >= cfg_line_size);
  assign blk_end   = (blk == cfg_nblocks - 16'd1);
  assign frame_end = line_end && blk_end && (row == cfg_lines_per_block - 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off <= '0; blk <= '0; row <= '0; blk_base <= '0; row_base <= '0;
      wr_valid <= 1'b0; wr <= '0; wr_last <= 1'b0;
    end else begin
      if (in_fire) begin
        wr.addr  <= waddr;
        if (cfg_beat_bytes == 7'd64) begin
          wr.data <= in_data;
          wr.strb <= '1;
        end else begin
          // 32-byte beat on the byte lanes its address selects (AXI rule)
          wr.data <= {2{in_data[WIDE_W/2-1:0]}};
          wr.strb <= waddr[5] ? {32'hffff_ffff, 32'h0} : {32'h0, 32'hffff_ffff};
        end
        wr_valid <= 1'b1;
        wr_last  <= frame_end;
        off      <= line_end ? '0 : off + 32'(cfg_beat_bytes);
        if (line_end) begin
          if (blk_end) begin
            blk      <= '0;
            blk_base <= '0;
            if (frame_end) begin
              row        <= '0;
              row_base   <= '0;
            end else begin
              row      <= row + 16'd1;
              row_base <= row_base + ADDR_W'(cfg_line_stride);
            end
          end else begin
            blk      <= blk + 16'd1;
            blk_base <= blk_base + ADDR_W'(cfg_block_stride);
          end
        end
      end else if (wr_ready) begin
        wr_valid <= 1'b0;
      end
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr));
endmodule
