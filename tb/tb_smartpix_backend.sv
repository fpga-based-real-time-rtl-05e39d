// tb_smartpix_backend: end-to-end test of the back-end at its default sizes.
//
// Around the design sit behavioural stand-ins for what the design leaves to
// vendor IP: an interconnect + DDR model (64-byte words, random
// back-pressure per port), two CDMA engines that copy lines from the DDR
// model into a host-memory model (the RASHPA buffer behind PCIe), and two
// front-end boards (from frontend_model_pkg).
//
// Two acquisitions run. In each, both pipelines take full frames; RASHPA then
// copies the frame of pipeline 0 chip by chip into the host's local buffers.
// Checked: every host pixel against the predicted value (the whole chain
// de-interleave -> rotate -> acc/24-bit/spectro -> DDR -> CDMA), every pixel
// of pipeline 1 in DDR, and that the gaps between chips in DDR still hold the
// initializer's value (dummy pixels). Counted, and required at least once:
// memory clear, writes held back during the clear, link back-pressure, DDR
// back-pressure, each rotation angle, accumulation, 24-bit mode,
// spectroscopic mode, both CDMA engines, group notifications, local-buffer
// wrap-around.
module tb_smartpix_backend;
  import smartpix_pkg::*;
  import frontend_model_pkg::*;
  localparam int MAX_LB = 16;
  localparam logic [31:0] CLEAR_VAL = 32'hfeed_0bad;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  diu_cfg_t diu_cfg [2];
  logic [ADDR_W-1:0] clear_base, clear_bytes; logic [31:0] clear_value; logic clear_start;
  rashpa_cfg_t rashpa_cfg; logic [ADDR_W-1:0] lb_base [MAX_LB]; logic rashpa_start;
  logic [BUS_W-1:0] link_data [2]; logic link_valid [2], link_ready [2];
  ddr_wr_t diu_wr [2]; logic diu_wr_valid [2], diu_wr_ready [2];
  ddr_wr_t clr_wr; logic clr_wr_valid, clr_wr_ready, clr_done;
  cdma_desc_t cdma_desc [2]; logic cdma_valid [2], cdma_ready [2];
  logic group_done, rb_full, rashpa_idle;
  int checks = 0, failures = 0;

  smartpix_backend dut (.*);

  // ---- interconnect + DDR model ----
  logic [511:0] ddr [longint];
  logic [511:0] host [longint];
  bit stall_ddr;
  int n_clear_wr, n_held, n_ddr_stall, n_link_stall, n_group, n_cdma [2];
  int n_acc, n_24, n_spectro, n_wrap, n_rot [4];
  logic [7:0] prev_lb;

  function automatic logic [511:0] rd_word(longint a);
    return ddr.exists(a) ? ddr[a] : '0;
  endfunction
  task automatic ddr_write(ddr_wr_t w);
    logic [511:0] d;
    d = rd_word(longint'(w.addr >> 6));
    for (int b = 0; b < 64; b++) if (w.strb[b]) d[b*8 +: 8] = w.data[b*8 +: 8];
    ddr[longint'(w.addr >> 6)] = d;
  endtask

  // All models sample the handshakes half a cycle after the falling edge,
  // when every DUT output is stable, and change what the DUT sees only
  // after the next rising edge.
  int cd_busy [2], fsent [2], wpos [2], nfr [2];
  bit link_fire [2], cd_fire [2];

  always_comb for (int p = 0; p < 2; p++) cdma_ready[p] = (cd_busy[p] == 0);

  always @(negedge clk) begin
    for (int i = 0; i < 2; i++) begin
      int pw;
      diu_wr_ready[i] = !stall_ddr || ($urandom % 4 != 0);
      pw = (diu_cfg[i].pix == PIX_6) ? 6 : 12;
      link_valid[i] = (fsent[i] < nfr[i]);
      if (link_valid[i]) link_data[i] = link_beat(fsent[i], int'(diu_cfg[i].nchips), wpos[i], pw);
    end
    clr_wr_ready = 1'b1;
    #1;
    if (clr_wr_valid && clr_wr_ready) begin ddr_write(clr_wr); n_clear_wr++; end
    if ((dut.g_diu[0].w_valid || dut.g_diu[1].w_valid) && !clr_done) n_held++;
    if (group_done) n_group++;
    if (prev_lb != 0 && dut.u_rashpa.rel_lb == 0) n_wrap++;
    prev_lb = dut.u_rashpa.rel_lb;
    if (dut.g_diu[0].u_diu.u_acc.out_valid && diu_cfg[0].acc_mode == ACC_SUM) n_acc++;
    if (dut.g_diu[1].u_diu.u_acc.out_valid && diu_cfg[1].acc_mode == ACC_SUM) n_acc++;
    if (dut.g_diu[0].u_diu.u_acc.out_valid && diu_cfg[0].acc_mode == ACC_SHIFT) n_24++;
    if (dut.g_diu[1].u_diu.u_acc.out_valid && diu_cfg[1].acc_mode == ACC_SHIFT) n_24++;
    if (dut.g_diu[0].u_diu.u_spectro.out_valid || dut.g_diu[1].u_diu.u_spectro.out_valid) n_spectro++;
    if (dut.g_diu[0].u_diu.di_valid && dut.g_diu[0].u_diu.di_ready)
      for (int k = 0; k < int'(diu_cfg[0].nchips); k++) n_rot[diu_cfg[0].angle[k]]++;
    if (dut.g_diu[1].u_diu.di_valid && dut.g_diu[1].u_diu.di_ready)
      for (int k = 0; k < int'(diu_cfg[1].nchips); k++) n_rot[diu_cfg[1].angle[k]]++;
    for (int i = 0; i < 2; i++) begin
      if (diu_wr_valid[i] && diu_wr_ready[i]) ddr_write(diu_wr[i]);
      if (diu_wr_valid[i] && !diu_wr_ready[i]) n_ddr_stall++;
      if (link_valid[i] && !link_ready[i]) n_link_stall++;
      link_fire[i] = link_valid[i] && link_ready[i];
    end
    // CDMA engines copy len bytes, taking len/64 cycles
    for (int p = 0; p < 2; p++) begin
      cd_fire[p] = cdma_valid[p] && cdma_ready[p];
      if (cd_fire[p]) begin
        for (int o = 0; o < int'(cdma_desc[p].len); o += 64)
          host[longint'((cdma_desc[p].dst + 64'(o)) >> 6)] = rd_word(longint'((cdma_desc[p].src + 64'(o)) >> 6));
        n_cdma[p]++;
      end
    end
  end

  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (cd_fire[p]) cd_busy[p] <= int'(cdma_desc[p].len) / 64;
      else if (cd_busy[p] > 0) cd_busy[p] <= cd_busy[p] - 1;
      cd_fire[p] = 0;
    end
    for (int i = 0; i < 2; i++) begin
      if (link_fire[i]) begin
        if (wpos[i] == link_beats(int'(diu_cfg[i].nchips), (diu_cfg[i].pix == PIX_6) ? 6 : 12) - 1) begin
          wpos[i] = 0; fsent[i]++;
        end else wpos[i]++;
      end
      link_fire[i] = 0;
    end
  end

  function automatic diu_cfg_t mk(int n, pix_mode_e pm, acc_mode_e am, int nacc, bit sp, longint start);
    diu_cfg_t c;
    int lsz;
    c = '0;
    c.nchips = 4'(n); c.pix = pm;
    c.angle = {ROT_270, ROT_180, ROT_90, ROT_0, ROT_270, ROT_180, ROT_90, ROT_0};
    c.acc_mode = am; c.acc_nframes = 16'(nacc); c.spectro_en = sp;
    c.ddr_start = 64'(start);
    lsz = 256 * px_bytes(c);
    c.ddr_line_size = lsz; c.ddr_block_stride = lsz + 64; c.ddr_line_stride = n * (lsz + 64);
    return c;
  endfunction

  // Check every pixel of a pipeline's frame, either in DDR or in the host copy
  // (chip k's 256 lines packed at host_base + k * 256 * line_size).
  task automatic check_frame(input diu_cfg_t c, input int f0, input bit in_host, input longint host_base,
                             input string name);
    int bad, pb;
    bad = 0; pb = px_bytes(c);
    for (int k = 0; k < int'(c.nchips); k++)
      for (int r = 0; r < 256; r++)
        for (int col = 0; col < 256; col++) begin
          longint a;
          logic [511:0] wd;
          longint unsigned got, ex;
          a = in_host ? host_base + (k * 256 + r) * longint'(c.ddr_line_size) + col_offset(c, col)
                      : longint'(c.ddr_start) + k * longint'(c.ddr_block_stride) + r * longint'(c.ddr_line_stride)
                        + col_offset(c, col);
          wd = in_host ? (host.exists(a >> 6) ? host[a >> 6] : '0) : rd_word(a >> 6);
          got = 0;
          for (int b = 0; b < pb; b++) got |= longint'(wd[((a % 64) + b) * 8 +: 8]) << (8*b);
          ex = ddr_pix(c, f0, k, r, col);
          checks++;
          if (got != ex) begin
            bad++; failures++;
            if (bad < 5) $display("FAIL %s chip %0d r %0d c %0d: got %0h exp %0h", name, k, r, col, got, ex);
          end
        end
    // dummy pixels: the 64-byte gap after each chip line in DDR
    for (int k = 0; k < int'(c.nchips); k++)
      for (int r = 0; r < 256; r += 51) begin
        longint a;
        a = longint'(c.ddr_start) + k * longint'(c.ddr_block_stride) + r * longint'(c.ddr_line_stride)
            + longint'(c.ddr_line_size);
        checks++;
        if (rd_word(a >> 6) != {16{CLEAR_VAL}}) begin
          failures++; $display("FAIL %s: gap after chip %0d row %0d not the clear value", name, k, r);
        end
      end
  endtask

  task automatic acquisition(input diu_cfg_t c0, input diu_cfg_t c1, input int nf0, input int nf1,
                             input int nlb, input int nblk_lb, input string name);
    int cyc, lbase, want;
    diu_cfg[0] = c0; diu_cfg[1] = c1;
    rashpa_cfg = '0;
    rashpa_cfg.src_addr = c0.ddr_start;
    rashpa_cfg.src_line_size = c0.ddr_line_size;
    rashpa_cfg.src_line_stride = c0.ddr_line_stride;
    rashpa_cfg.src_line_count = 256;
    rashpa_cfg.src_block_stride = c0.ddr_block_stride;
    rashpa_cfg.src_block_count = 16'(c0.nchips);
    rashpa_cfg.dst_index = 0; rashpa_cfg.dst_offset = 0;
    rashpa_cfg.dst_line_stride = c0.ddr_line_size;
    rashpa_cfg.dst_block_stride = 256 * c0.ddr_line_size;
    rashpa_cfg.nb_lb_in_rb = 8'(nlb); rashpa_cfg.nb_blocks_in_lb = 16'(nblk_lb);
    rashpa_cfg.nb_blocks_in_group = 2; rashpa_cfg.dispatch = DISP_CIRCULAR;
    for (int i = 0; i < MAX_LB; i++) lb_base[i] = 64'h10_0000_0000 + 64'h1000_0000 * i;
    host.delete();
    rst_n = 0; fsent = '{0, 0}; wpos = '{0, 0}; nfr = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); rashpa_start = 1; @(negedge clk); rashpa_start = 0;
    nfr = '{nf0, nf1};
    cyc = 0;
    want = n_cdma[0] + n_cdma[1] + int'(c0.nchips) * 256;
    // wait for both pipelines and for RASHPA to finish the frame
    while (cyc < 1000000 && !(fsent[0] == nf0 && fsent[1] == nf1 && rashpa_idle &&
                              n_cdma[0] + n_cdma[1] == want && cd_busy[0] == 0 && cd_busy[1] == 0)) begin
      @(posedge clk); cyc++;
    end
    repeat (20) @(posedge clk);
    $display("%s: finished after %0d cycles", name, cyc);
    checks++;
    if (n_cdma[0] + n_cdma[1] != want) begin failures++; $display("FAIL %s: %0d CDMA transfers short", name, want - n_cdma[0] - n_cdma[1]); end
    // chips of pipeline 0 were sent as blocks 0..n-1; with circular dispatch
    // block k lands in LB k / nblk_lb, slot k % nblk_lb, wrapping around the
    // RASHPA buffer; only the last block written to each slot is checked
    for (int k = 0; k < int'(c0.nchips); k++) begin
      if (k < int'(c0.nchips) - nlb * nblk_lb) continue;
      check_frame_chip(c0, k, longint'(lb_base[(k / nblk_lb) % nlb]) + (k % nblk_lb) * 256 * longint'(c0.ddr_line_size), name);
    end
    check_frame(c1, 0, 0, 0, {name, "/pipe1"});
  endtask

  task automatic check_frame_chip(input diu_cfg_t c, input int k, input longint base, input string name);
    int bad, pb;
    bad = 0; pb = px_bytes(c);
    for (int r = 0; r < 256; r++)
      for (int col = 0; col < 256; col++) begin
        longint a;
        logic [511:0] wd;
        longint unsigned got, ex;
        a = base + r * longint'(c.ddr_line_size) + col_offset(c, col);
        wd = host.exists(a >> 6) ? host[a >> 6] : '0;
        got = 0;
        for (int b = 0; b < pb; b++) got |= longint'(wd[((a % 64) + b) * 8 +: 8]) << (8*b);
        ex = ddr_pix(c, 0, k, r, col);
        checks++;
        if (got != ex) begin
          bad++; failures++;
          if (bad < 5) $display("FAIL %s host chip %0d r %0d c %0d: got %0h exp %0h", name, k, r, col, got, ex);
        end
      end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    diu_cfg_t a0, a1, b0, b1;
    clear_base = 64'h0; clear_bytes = 64'h40_0000; clear_value = CLEAR_VAL; clear_start = 0;
    rashpa_start = 0; stall_ddr = 0;
    n_clear_wr = 0; n_held = 0; n_ddr_stall = 0; n_link_stall = 0; n_group = 0; n_cdma = '{0, 0};
    cd_busy = '{0, 0}; n_acc = 0; n_24 = 0; n_spectro = 0; n_wrap = 0; n_rot = '{0, 0, 0, 0}; prev_lb = 0;
    // A: pipe 0 = 4 chips, 12-bit, mixed rotation; pipe 1 = 1 chip, 2-frame accumulation + spectroscopic
    a0 = mk(4, PIX_12, ACC_OFF, 1, 0, 64'h10_0000);
    a1 = mk(1, PIX_12, ACC_SUM, 2, 1, 64'h30_0000);
    acquisition(a0, a1, 1, 2, 2, 3, "A");
    // B: pipe 0 = 4 chips, 24-bit mode; pipe 1 = 8 chips, 6-bit, with DDR back-pressure
    stall_ddr = 1;
    b0 = mk(4, PIX_24, ACC_SHIFT, 1, 0, 64'h10_0000);
    b1 = mk(8, PIX_6, ACC_OFF, 1, 0, 64'h30_0000);
    acquisition(b0, b1, 2, 1, 2, 1, "B");
    // mechanisms
    begin
      int cnt [string];
      cnt["memory clear writes"] = n_clear_wr;
      cnt["writes held during clear"] = n_held;
      cnt["link back-pressure cycles"] = n_link_stall;
      cnt["DDR back-pressure cycles"] = n_ddr_stall;
      cnt["CDMA 0 transfers"] = n_cdma[0];
      cnt["CDMA 1 transfers"] = n_cdma[1];
      cnt["group notifications"] = n_group;
      cnt["accumulated output-valid cycles"] = n_acc;
      cnt["24-bit output-valid cycles"] = n_24;
      cnt["spectroscopic output-valid cycles"] = n_spectro;
      cnt["RASHPA buffer wrap-arounds"] = n_wrap;
      cnt["rotation 0 deg (chip-beats)"] = n_rot[0];
      cnt["rotation 90 deg (chip-beats)"] = n_rot[1];
      cnt["rotation 180 deg (chip-beats)"] = n_rot[2];
      cnt["rotation 270 deg (chip-beats)"] = n_rot[3];
      foreach (cnt[s]) begin
        $display("  %-40s %0d", s, cnt[s]);
        checks++;
        if (cnt[s] == 0) begin failures++; $display("FAIL mechanism never happened: %s", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
