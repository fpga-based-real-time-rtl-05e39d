// tb_diu_sequence: end-to-end test of one image pipeline. A front-end model
// sends whole frames (256 x 256 pixels per chip) over the link; a byte-wide
// DDR model takes the writes. After each acquisition every pixel of every
// chip is read back from the DDR model at
//   start + chip * block_stride + row * line_stride + column offset
// and compared with the value predicted from the configuration. Covered:
// plain rotation with mixed angles (4 and 8 chips, 12- and 6-bit), 3-frame
// accumulation, 24-bit mode, spectroscopic mode, and accumulation plus
// spectroscopic mode, 1-bit frames (0 and 180 degrees), with random DDR
// back-pressure in some runs.
module tb_diu_sequence;
  import smartpix_pkg::*;
  import frontend_model_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  diu_cfg_t cfg;
  logic [255:0] link_data; logic link_valid, link_ready;
  ddr_wr_t wr; logic wr_valid, wr_ready, frame_done;
  int checks = 0, failures = 0;

  diu_sequence dut (.*);

  logic [7:0] mem [longint];
  always @(posedge clk)
    if (wr_valid && wr_ready)
      for (int b = 0; b < 64; b++) if (wr.strb[b]) mem[(longint'(wr.addr) & ~longint'(63)) + b] = wr.data[b*8 +: 8];

  task automatic acquire(input diu_cfg_t c, input int nframes, input bit stall);
    int pw, beats, f, w, cyc, dones, nexp;
    pw = (c.pix == PIX_1) ? 1 : (c.pix == PIX_6) ? 6 : 12;
    beats = link_beats(int'(c.nchips), pw);
    cfg = c;
    mem.delete();
    rst_n = 0; link_valid = 0; wr_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    f = 0; w = 0; cyc = 0; dones = 0;
    nexp = (c.acc_mode == ACC_SUM) ? nframes / int'(c.acc_nframes) :
           (c.acc_mode == ACC_SHIFT) ? nframes / 2 : nframes;
    while (dones < nexp && cyc < 1000000) begin
      @(negedge clk);
      link_valid = (f < nframes);
      if (f < nframes) link_data = link_beat(f, int'(c.nchips), w, pw);
      wr_ready = !stall || $urandom % 4 != 0;
      #1;
      if (frame_done) dones++;
      if (link_valid && link_ready) begin
        if (w == beats - 1) begin w = 0; f++; end else w++;
      end
      cyc++;
    end
    repeat (3) @(posedge clk);
    checks++;
    if (dones != nexp) begin failures++; $display("FAIL %0d frames written of %0d", dones, nexp); end
  endtask

  // Compare the last stored frame (its first input frame is f0).
  task automatic verify(input int f0, input string name);
    int bad, pb;
    bad = 0;
    pb = px_bytes(cfg);
    for (int k = 0; k < int'(cfg.nchips); k++)
      for (int r = 0; r < 256; r++)
        for (int col = 0; col < 256; col++) begin
          longint a;
          longint unsigned got, ex;
          a = longint'(cfg.ddr_start) + k * longint'(cfg.ddr_block_stride) + r * longint'(cfg.ddr_line_stride)
              + col_offset(cfg, col);
          got = 0;
          for (int b = 0; b < pb; b++) got |= longint'(mem.exists(a + b) ? mem[a + b] : 8'h5a) << (8*b);
          if (cfg.pix == PIX_1) got = (got >> (col % 8)) & 1;
          ex = ddr_pix(cfg, f0, k, r, col);
          checks++;
          if (got != ex) begin
            bad++; failures++;
            if (bad < 5) $display("FAIL %s chip %0d r %0d c %0d: got %0h exp %0h", name, k, r, col, got, ex);
          end
        end
  endtask

  function automatic diu_cfg_t base_cfg(int n, pix_mode_e pm);
    diu_cfg_t c;
    c = '0;
    c.nchips = 4'(n); c.pix = pm;
    c.angle = {ROT_0, ROT_90, ROT_180, ROT_270, ROT_270, ROT_180, ROT_90, ROT_0};
    c.acc_mode = ACC_OFF; c.acc_nframes = 1; c.spectro_en = 0;
    c.ddr_start = 64'h10000;
    return c;
  endfunction

  // chips side by side: block stride = line + 64-byte gap, line stride = whole row
  function automatic diu_cfg_t place(diu_cfg_t c);
    int lsz;
    lsz = (c.pix == PIX_1) ? 32 : 256 * px_bytes(c);
    c.ddr_line_size = lsz;
    c.ddr_block_stride = lsz + 64;
    c.ddr_line_stride = int'(c.nchips) * (lsz + 64);
    return c;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    diu_cfg_t c;
    c = place(base_cfg(4, PIX_12));
    acquire(c, 1, 0); verify(0, "rot4x12");
    c = place(base_cfg(8, PIX_6));
    acquire(c, 2, 1); verify(1, "rot8x6");
    c = base_cfg(1, PIX_12); c.acc_mode = ACC_SUM; c.acc_nframes = 3; c = place(c);
    acquire(c, 3, 0); verify(0, "acc3");
    c = base_cfg(4, PIX_24); c.acc_mode = ACC_SHIFT; c = place(c);
    acquire(c, 2, 1); verify(0, "bit24");
    c = base_cfg(1, PIX_12); c.spectro_en = 1; c = place(c);
    acquire(c, 1, 1); verify(0, "spectro");
    c = base_cfg(4, PIX_12); c.acc_mode = ACC_SUM; c.acc_nframes = 2; c.spectro_en = 1; c = place(c);
    acquire(c, 2, 0); verify(0, "acc+spectro");
    c = place(base_cfg(8, PIX_1));
    acquire(c, 2, 1); verify(1, "rot8x1");
    c = place(base_cfg(1, PIX_1)); c.angle[0] = ROT_180;
    acquire(c, 1, 0); verify(0, "rot1x1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
