// tb_deinterleaver: self-checking test of the de-interleaver.
// For 1, 4 and 8 chips and for 12-, 6- and 1-bit pixels it builds random
// per-chip pixel sequences, interleaves them into 32-bit slots the way the
// front-end does (slot s carries chip s mod N), and checks that every output
// lane carries its chip's pixels in order, widened to 16 or 8 bits (1-bit
// pixels stay packed). Random stalls on both sides; the output must reach
// 4 beats per 3 input beats and sustain one beat per cycle when unstalled.
module tb_deinterleaver;
  import smartpix_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  nchips_t cfg_nchips; pix_mode_e cfg_pix;
  logic [255:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;

  deinterleaver dut (.*);

  localparam int GROUPS = 4;
  int unsigned px [8][1024];     // per chip pixel values
  logic [3071:0] stream [8];    // per chip packed bit stream (4 groups)
  int in_beats, out_beats, stall_in, stall_out;

  task automatic run(input int n, input pix_mode_e pm, input int stall);
    int pw, ow, npx, nin, nout, per_lane, lane_w, bi, ob, cyc, first_out, last_out;
    logic [255:0] beats [16];
    pw  = (pm == PIX_12) ? 12 : (pm == PIX_6) ? 6 : 1;
    ow  = (pm == PIX_12) ? 16 : (pm == PIX_6) ? 8 : 1;
    nin = (pm == PIX_1) ? GROUPS : 3*GROUPS;
    npx = nin * (256/n) / pw;           // pixels per chip
    for (int c = 0; c < n; c++) begin
      stream[c] = '0;
      for (int i = 0; i < npx; i++) begin
        px[c][i] = $urandom & ((1 << pw) - 1);
        for (int b = 0; b < pw; b++) stream[c][i*pw + b] = px[c][i][b];
      end
    end
    // interleave: beat w slot s -> chip s%n, its (w*(8/n) + s/n)-th 32-bit word
    for (int w = 0; w < nin; w++)
      for (int s = 0; s < 8; s++)
        beats[w][s*32 +: 32] = stream[s % n][(w*(8/n) + s/n)*32 +: 32];
    cfg_nchips = 4'(n); cfg_pix = pm;
    rst_n = 0; in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nout = (pm == PIX_1) ? GROUPS : 4*GROUPS;
    lane_w = 256/n; per_lane = lane_w / ow;
    bi = 0; ob = 0; cyc = 0; first_out = -1; last_out = 0;
    while (ob < nout && cyc < 2000) begin
      @(negedge clk);
      in_valid  = (bi < nin) && (stall == 0 || ($urandom % 3 != 0));
      in_data   = (bi < nin) ? beats[bi] : '0;
      out_ready = (stall == 0 || ($urandom % 3 != 0));
      #1;
      if (in_valid && in_ready) bi++;
      if (out_valid && out_ready) begin
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
        for (int c = 0; c < n; c++)
          for (int m = 0; m < per_lane; m++) begin
            int unsigned exp_v, got;
            exp_v = px[c][ob*per_lane + m];
            got = 32'(out_data[c*lane_w + m*ow +: 16]) & ((1 << ow) - 1);
            checks++;
            if (got != exp_v) begin
              failures++;
              if (failures < 10) $display("FAIL n=%0d pix=%s beat %0d chip %0d px %0d: got %0h exp %0h",
                                          n, pm.name(), ob, c, m, got, exp_v);
            end
          end
        ob++;
      end
      cyc++;
    end
    checks++;
    if (ob != nout) begin failures++; $display("FAIL n=%0d: only %0d output beats", n, ob); end
    if (stall == 0) begin
      // unstalled: output beats back to back after the first group
      checks++;
      if (last_out - first_out != nout - 1) begin
        failures++; $display("FAIL n=%0d pix=%s: %0d cycles for %0d beats", n, pm.name(),
                             last_out - first_out + 1, nout);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (px[c, i]) px[c][i] = 0;
    for (int st = 0; st < 2; st++) begin
      run(1, PIX_12, st); run(4, PIX_12, st); run(8, PIX_12, st);
      run(1, PIX_6, st);  run(4, PIX_6, st);  run(8, PIX_6, st);
      run(1, PIX_1, st);  run(4, PIX_1, st);  run(8, PIX_1, st);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
