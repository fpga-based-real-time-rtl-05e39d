// tb_ddr_writer: self-checking test of the DDR writer. Streams two frames
// of lines interleaved over blocks and checks every write's address
// (start + block * block_stride + row * line_stride + offset), data and byte
// strobes (32-byte beats on the lanes their address selects), for 32- and 64-byte beats, with random back-pressure; frame_done
// must pulse once per frame, with the frame's last write.
module tb_ddr_writer;
  import smartpix_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] cfg_start; logic [31:0] cfg_line_size, cfg_line_stride, cfg_block_stride;
  logic [15:0] cfg_nblocks, cfg_lines_per_block; logic [6:0] cfg_beat_bytes;
  logic [511:0] in_data; logic in_valid, in_ready;
  ddr_wr_t wr; logic wr_valid, wr_ready, frame_done;
  int checks = 0, failures = 0;

  ddr_writer dut (.*);

  task automatic run(input int bb, input int nblk, input int nrow, input int lsize,
                     input int lstride, input int bstride, input bit stall);
    int bpl, total, bi, wo, cyc, dones;
    logic [511:0] sent [$];
    cfg_start = 64'h4_0000_1000; cfg_line_size = lsize; cfg_line_stride = lstride;
    cfg_block_stride = bstride; cfg_nblocks = 16'(nblk); cfg_lines_per_block = 16'(nrow);
    cfg_beat_bytes = 7'(bb);
    bpl = lsize / bb; total = 2 * nblk * nrow * bpl;
    rst_n = 0; in_valid = 0; wr_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bi = 0; wo = 0; cyc = 0; dones = 0;
    while (wo < total && cyc < 20000) begin
      @(negedge clk);
      in_valid = (bi < total) && (!stall || $urandom % 3 != 0);
      in_data  = {$urandom, $urandom, 448'(bi)};
      wr_ready = !stall || $urandom % 3 != 0;
      #1;
      if (frame_done) dones++;
      if (wr_valid && wr_ready) begin
        int line, blk, row, off;
        logic [ADDR_W-1:0] ea;
        line = (wo % (total/2)) / bpl; off = (wo % bpl) * bb;
        blk = line % nblk; row = line / nblk;
        ea = cfg_start + 64'(blk) * 64'(bstride) + 64'(row) * 64'(lstride) + 64'(off);
        checks += 3;
        if (wr.addr != ea) begin
          failures++;
          if (failures < 8) $display("FAIL write %0d addr %0h exp %0h", wo, wr.addr, ea);
        end
        begin
          logic [511:0] d;
          d = sent.pop_front();
          if (bb == 64) begin
            if (wr.data != d || wr.strb != {64{1'b1}}) begin failures++; $display("FAIL data/strb %0d", wo); end
          end else if (ea[5]) begin
            if (wr.data[511:256] != d[255:0] || wr.strb != {{32{1'b1}}, 32'h0}) begin
              failures++; $display("FAIL upper-lane data/strb %0d", wo);
            end
          end else begin
            if (wr.data[255:0] != d[255:0] || wr.strb != {32'h0, {32{1'b1}}}) begin
              failures++; $display("FAIL lower-lane data/strb %0d", wo);
            end
          end
        end
        wo++;
      end
      if (in_valid && in_ready) begin sent.push_back(in_data); bi++; end
      cyc++;
    end
    @(negedge clk); if (frame_done) dones++;
    checks += 2;
    if (wo != total) begin failures++; $display("FAIL %0d writes of %0d", wo, total); end
    if (dones != 2) begin failures++; $display("FAIL frame_done %0d times", dones); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(32, 4, 8, 512, 2048, 512 + 64, 0);   // 4 chips in a row with 64-byte gaps
    run(64, 8, 4, 1024, 4096, 1088, 1);
    run(32, 1, 16, 64, 96, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
