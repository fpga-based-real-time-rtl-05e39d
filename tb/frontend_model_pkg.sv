// frontend_model_pkg: testbench helpers shared by the pipeline tests.
// It stands in for the front-end board (which is not part of the back-end
// design): it defines test pixel values per frame, chip and position, packs
// them into the interleaved 256-bit link beats (slot s carries chip s mod N,
// pixels LSB first), and predicts what the back-end must leave in DDR for a
// given configuration, straight from the definitions of rotation,
// accumulation, 24-bit joining and spectroscopic splitting.
package frontend_model_pkg;
  import smartpix_pkg::*;

  function automatic int unsigned in_pix(int f, int k, int y, int x, int pw);
    return ((f + 1) * 40503 + k * 7331 + y * 263 + x * 17 + ((y * x) >> 3)) & ((1 << pw) - 1);
  endfunction

  // Bits [32*word +: 32] of chip k's packed pixel stream of frame f.
  function automatic logic [31:0] stream_word(int f, int k, int word, int pw);
    logic [31:0] w;
    for (int b = 0; b < 32; b++) begin
      int bit_i, p;
      int unsigned v;
      bit_i = word * 32 + b;
      p = bit_i / pw;
      v = in_pix(f, k, p / 256, p % 256, pw);
      w[b] = v[bit_i % pw];
    end
    return w;
  endfunction

  // Link beat w of frame f for n chips.
  function automatic logic [255:0] link_beat(int f, int n, int w, int pw);
    logic [255:0] d;
    for (int s = 0; s < 8; s++) d[s*32 +: 32] = stream_word(f, s % n, w * (8 / n) + s / n, pw);
    return d;
  endfunction

  function automatic int link_beats(int n, int pw);
    return 65536 * pw * n / 256;
  endfunction

  // Input pixel of chip k that the rotation puts at output (r, c).
  function automatic int unsigned rot_pix(int f, int k, int r, int c, angle_e a, int pw);
    case (a)
      ROT_90:  return in_pix(f, k, 255 - c, r, pw);
      ROT_180: return in_pix(f, k, 255 - r, 255 - c, pw);
      ROT_270: return in_pix(f, k, c, 255 - r, pw);
      default: return in_pix(f, k, r, c, pw);
    endcase
  endfunction

  // Value the DDR must hold for chip k, output row r, column c, after the
  // frames f0 .. f0+nacc-1 (nacc = 1 without accumulation).
  function automatic longint unsigned ddr_pix(diu_cfg_t cfg, int f0, int k, int r, int c);
    int pw;
    longint unsigned v;
    pw = (cfg.pix == PIX_1) ? 1 : (cfg.pix == PIX_6) ? 6 : 12;
    v  = 0;
    // 1-bit frames are rotated by 0 or 180 degrees only
    if (cfg.pix == PIX_1) return rot_pix(f0, k, r, c, (cfg.angle[k] == ROT_180) ? ROT_180 : ROT_0, 1);
    case (cfg.acc_mode)
      ACC_SUM:   for (int f = 0; f < int'(cfg.acc_nframes); f++) v += rot_pix(f0 + f, k, r, c, cfg.angle[k], pw);
      ACC_SHIFT: v = (longint'(rot_pix(f0 + 1, k, r, c, cfg.angle[k], pw)) << 12) | rot_pix(f0, k, r, c, cfg.angle[k], pw);
      default:   v = rot_pix(f0, k, r, c, cfg.angle[k], pw);
    endcase
    return v;
  endfunction

  // Bytes per stored pixel and the byte offset of column c within its line
  // (1-bit frames: eight pixels per byte, column c in bit c mod 8).
  function automatic int px_bytes(diu_cfg_t cfg);
    if (cfg.acc_mode != ACC_OFF || cfg.spectro_en) return 4;
    if (cfg.pix == PIX_1) return 1;
    return (cfg.pix == PIX_6) ? 1 : 2;
  endfunction

  function automatic int col_offset(diu_cfg_t cfg, int c);
    if (cfg.spectro_en) return ((c % 2) * 128 + c / 2) * 4;
    if (cfg.pix == PIX_1) return c / 8;
    return c * px_bytes(cfg);
  endfunction
endpackage
