// tb_rotation: self-checking test of the rotation block at full chip size
// (256 x 256 pixels per chip). For several chip counts, pixel sizes and
// per-chip angle sets it streams two frames back to back, computes the
// rotated frame from the input pixels directly (out(r,c) = in(255-c, r) for
// 90 degrees clockwise, and so on), and compares every output pixel. It also
// checks the paper's timing: a frame leaves one image after it entered
// (latency one frame), and with no stalls each frame streams out at one beat
// per cycle. One run per pixel size adds random stalls on both sides. 1-bit
// frames are rotated by 0 and 180 degrees only, as the block supports.
module tb_rotation;
  import smartpix_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  nchips_t cfg_nchips; pix_mode_e cfg_pix;
  angle_e [MAX_CHIPS-1:0] cfg_angle;
  logic [255:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready, out_frame_last;
  int checks = 0, failures = 0;

  rotation dut (.*);

  function automatic int unsigned pix(int f, int k, int y, int x, int pw);
    return (f*7919 + k*104729 + y*263 + x*17 + y*x*3) & ((1 << pw) - 1);
  endfunction

  // Input pixel that lands at output (r, c) of chip k.
  function automatic int unsigned expect_px(int f, int k, int r, int c, angle_e a, int pw);
    case (a)
      ROT_90:  return pix(f, k, 255 - c, r, pw);
      ROT_180: return pix(f, k, 255 - r, 255 - c, pw);
      ROT_270: return pix(f, k, c, 255 - r, pw);
      default: return pix(f, k, r, c, pw);
    endcase
  endfunction

  task automatic run(input int n, input pix_mode_e pm, input angle_e a [8], input bit stall);
    int pw, q, p, beats, bi, ob, fi, fo, cyc, r, k, cb, bad;
    int last_in_cyc [2], first_out_cyc [2], last_out_cyc [2];
    pw = (pm == PIX_1) ? 1 : (pm == PIX_6) ? 8 : 16;
    q  = 256 / pw;  p = q / n;
    beats = 256 * 256 / q * n;
    cfg_nchips = 4'(n); cfg_pix = pm;
    for (int i = 0; i < 8; i++) cfg_angle[i] = a[i];
    rst_n = 0; in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bi = 0; fi = 0; ob = 0; fo = 0; cyc = 0; bad = 0;
    while (fo < 2 && cyc < 400000) begin
      @(negedge clk);
      in_valid = (fi < 2) && (!stall || ($urandom % 4 != 0));
      if (fi < 2) begin
        int y, xb;
        y  = bi / (256 / p);  xb = bi % (256 / p);
        for (int kk = 0; kk < n; kk++)
          for (int j = 0; j < p; j++)
            if (pw == 1) in_data[kk*p + j] = 1'(pix(fi, kk, y, xb*p + j, pw));
            else         in_data[(kk*p + j)*pw +: 16] = 16'(pix(fi, kk, y, xb*p + j, pw));
      end
      out_ready = !stall || ($urandom % 4 != 0);
      #1;
      if (in_valid && in_ready) begin
        if (bi == beats - 1) begin last_in_cyc[fi] = cyc; bi = 0; fi++; end
        else bi++;
      end
      if (out_valid && out_ready) begin
        if (ob == 0) first_out_cyc[fo] = cyc;
        r  = ob / (n * (256 / q));
        k  = (ob / (256 / q)) % n;
        cb = ob % (256 / q);
        for (int i = 0; i < q; i++) begin
          int unsigned got, ex;
          got = (pw == 1) ? 32'(out_data[i]) : 32'(out_data[i*pw +: 16]) & ((1 << pw) - 1);
          ex  = expect_px(fo, k, r, cb*q + i, a[k], pw);
          if (got != ex) begin
            bad++;
            if (failures + bad < 8) $display("FAIL n=%0d %s frame %0d chip %0d r %0d c %0d: got %0h exp %0h",
                                            n, pm.name(), fo, k, r, cb*q + i, got, ex);
          end
        end
        checks++;
        if (ob == beats - 1) begin
          checks++;
          if (!out_frame_last) begin failures++; $display("FAIL frame_last missing"); end
          last_out_cyc[fo] = cyc; ob = 0; fo++;
        end else ob++;
      end
      cyc++;
    end
    failures += (bad != 0) ? 1 : 0;
    checks++;
    if (fo != 2) begin failures++; $display("FAIL n=%0d: %0d frames out", n, fo); end
    else if (!stall) begin
      // latency of one image: frame 0 starts leaving right after it is complete
      checks += 2;
      if (first_out_cyc[0] - last_in_cyc[0] > 2) begin
        failures++; $display("FAIL latency %0d", first_out_cyc[0] - last_in_cyc[0]);
      end
      if (last_out_cyc[0] - first_out_cyc[0] != beats - 1 ||
          last_out_cyc[1] - first_out_cyc[1] != beats - 1) begin
        failures++; $display("FAIL output rate: %0d cycles for %0d beats",
                             last_out_cyc[0] - first_out_cyc[0] + 1, beats);
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static angle_e a0 [8] = '{ROT_0, ROT_0, ROT_0, ROT_0, ROT_0, ROT_0, ROT_0, ROT_0};
    static angle_e a90 [8] = '{default: ROT_90};
    static angle_e a180 [8] = '{default: ROT_180};
    static angle_e a270 [8] = '{default: ROT_270};
    static angle_e a01 [8] = '{ROT_0, ROT_180, ROT_180, ROT_0, ROT_180, ROT_0, ROT_0, ROT_180};
    static angle_e amix [8] = '{ROT_0, ROT_90, ROT_180, ROT_270, ROT_270, ROT_180, ROT_90, ROT_0};
    run(1, PIX_12, a0, 0);
    run(1, PIX_12, a90, 0);
    run(1, PIX_12, a180, 0);
    run(1, PIX_12, a270, 0);
    run(4, PIX_12, amix, 0);
    run(8, PIX_12, amix, 0);
    run(1, PIX_6, a90, 0);
    run(8, PIX_6, amix, 1);
    // 1-bit mode: 0 and 180 degrees
    run(1, PIX_1, a180, 0);
    run(4, PIX_1, a01, 0);
    run(8, PIX_1, a01, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
