// rotation: per-chip static image rotation by 0, 90, 180 or 270 degrees.
//
// Structure (as in the paper): a BRAM writer, 32 parallel block RAMs and a
// BRAM reader. The RAMs hold two full frames of eight chips at 16 bits per
// pixel, so one frame is written while the previous one is read (ping-pong);
// the latency is therefore one image and the throughput one 256-bit beat per
// cycle on both sides.
//
// Input: de-interleaved beats; chip k of N owns lane k of each beat, holding
// P = Q/N consecutive pixels of one row (Q = 16 pixels of 16 bits, or 32
// pixels of 8 bits in 6-bit mode). Beats run through each chip row, rows top
// to bottom.
// Output: the rotated frame line by line: row 0 of chip 0, row 0 of chip 1,
// ..., row 0 of chip N-1, row 1 of chip 0, ...; a chip row is 256/Q beats.
//
// Bank mapping (this design's): chip k owns banks k*B .. k*B+B-1, B = 32/N.
// Rotated pixel (r, c) of chip k goes to bank k*B + (r+c) mod B, lane
// (c/B) mod (G/B) of the 64-bit bank word, word r*(256/G) + c/G, G = max(B, Q),
// plus half the depth for the second frame buffer. The skew (r+c) makes both
// a row run and a column run of P pixels land in P different banks, so the
// writer places a whole input beat in one cycle whatever the angle, and the
// reader gets Q pixels of one chip row from different banks or lanes.
// Rotation is clockwise: 90 degrees sends input (y, x) to (x, 255-y).
//
// 1-bit mode (as in the paper, angles 0 and 180 only): an input beat holds
// 256/N pixels of one row per chip, and a chip row is 256 bits, four 64-bit
// words. Word w of rotated row r of chip k is kept in bank k*B + w at word r,
// so the writer fills part of one or more words per chip (byte enables), and
// the reader takes a whole chip row, one output beat, from four banks.
// 180 degrees reverses the bit order of the row and the row order. In 1-bit
// mode ROT_180 selects 180 degrees and every other angle acts as 0.
module rotation
  import smartpix_pkg::*;
#(
  parameter int unsigned NBANKS     = 32,
  parameter int unsigned BANK_W     = 64,
  parameter int unsigned BANK_DEPTH = 8192   // two frames of 8 chips at 16 bpp
) (
  input  logic             clk,
  input  logic             rst_n,
  input  nchips_t          cfg_nchips,
  input  pix_mode_e        cfg_pix,
  input  angle_e [MAX_CHIPS-1:0] cfg_angle,   // per chip
  input  logic [BUS_W-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [BUS_W-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             out_frame_last   // with the last beat of a frame
);
  localparam int unsigned AW   = $clog2(BANK_DEPTH);
  localparam int unsigned HALF = BANK_DEPTH / 2;
  localparam int unsigned D    = CHIP_DIM;

  // Geometry as log2 values.
  logic [2:0] lg_n, lg_b, lg_q, lg_p, lg_g, lg_pb;
  logic       one_bit;
  assign one_bit = (cfg_pix == PIX_1);
  always_comb begin
    unique case (cfg_nchips)
      4'd4:    lg_n = 3'd2;
      4'd8:    lg_n = 3'd3;
      default: lg_n = 3'd0;
    endcase
    lg_b  = 3'd5 - lg_n;
    lg_q  = (cfg_pix == PIX_6) ? 3'd5 : 3'd4;
    lg_pb = (cfg_pix == PIX_6) ? 3'd3 : 3'd4;
    lg_p  = lg_q - lg_n;
    lg_g  = (lg_b > lg_q) ? lg_b : lg_q;
  end

  // Bank ports.
  logic              b_we    [NBANKS];
  logic [AW-1:0]     b_waddr [NBANKS];
  logic [BANK_W-1:0] b_wdata [NBANKS];
  logic [BANK_W/8-1:0] b_wbe [NBANKS];
  logic              b_rd    [NBANKS];
  logic [AW-1:0]     b_raddr [NBANKS];
  logic [BANK_W-1:0] b_q     [NBANKS];

  // 1-bit writer outputs, selected in 1-bit mode
  logic              b1_we    [NBANKS];
  logic [AW-1:0]     b1_waddr [NBANKS];
  logic [BANK_W-1:0] b1_wdata [NBANKS];
  logic [BANK_W/8-1:0] b1_wbe [NBANKS];

  for (genvar g = 0; g < NBANKS; g++) begin : g_bank
    dp_ram #(.WIDTH(BANK_W), .DEPTH(BANK_DEPTH)) u_bram (
      .clk,
      .we   (one_bit ? b1_we[g]    : b_we[g]),
      .waddr(one_bit ? b1_waddr[g] : b_waddr[g]),
      .wdata(one_bit ? b1_wdata[g] : b_wdata[g]),
      .wbe  (one_bit ? b1_wbe[g]   : b_wbe[g]),
      .rd_en(b_rd[g]), .raddr(b_raddr[g]), .rdata(b_q[g]));
  end

  // Location of rotated pixel (r, c) of chip k.
  function automatic void locate(input int k, input int r, input int c,
                                 input logic [2:0] lb, input logic [2:0] lg,
                                 input logic [2:0] lpb, input logic buf_sel,
                                 output int bank, output int lane_bit, output int word);
    int bsz, gsz;
    bsz  = 1 << lb;
    gsz  = 1 << lg;
    bank = k*bsz + ((r + c) % bsz);
    lane_bit = (((c >> lb) % (gsz >> lb)) << lpb);
    word = (buf_sel ? int'(HALF) : 0) + r*(int'(D) >> lg) + (c >> lg);
  endfunction

  // ---------------- writer ----------------
  logic       wbuf;
  logic [7:0] wy;          // input row
  logic [7:0] wxb;         // beat within input row
  logic [1:0] full;        // frame buffer holds a complete frame
  logic       in_fire;
  logic       w_row_end, w_frame_end;

  assign in_ready    = !full[wbuf];
  assign in_fire     = in_valid && in_ready;
  // 1-bit mode: 256/N pixels per chip and beat, so N beats per row
  assign w_row_end   = one_bit ? (int'(wxb) == (1 << lg_n) - 1)
                               : (int'(wxb) == (int'(D) >> lg_p) - 1);
  assign w_frame_end = w_row_end && (wy == 8'(D - 1));

  always_comb begin
    int r, c, x, bank, lbit, word, pbits;
    logic [BUS_W-1:0] px;
    r = 0; c = 0; x = 0; bank = 0; lbit = 0; word = 0; px = '0;
    for (int g = 0; g < NBANKS; g++) begin
      b_we[g] = 1'b0; b_waddr[g] = '0; b_wdata[g] = '0; b_wbe[g] = '0;
    end
    pbits = 1 << lg_pb;
    for (int k = 0; k < int'(MAX_CHIPS); k++) begin
      for (int j = 0; j < 32; j++) begin
        if (!one_bit && k < (1 << lg_n) && j < (1 << lg_p)) begin
          x  = (int'(wxb) << lg_p) + j;
          px = in_data >> ((k*(1 << lg_p) + j) * pbits);
          unique case (cfg_angle[k])
            ROT_90:  begin r = x;             c = int'(D) - 1 - int'(wy); end
            ROT_180: begin r = int'(D) - 1 - int'(wy); c = int'(D) - 1 - x; end
            ROT_270: begin r = int'(D) - 1 - x; c = int'(wy); end
            default: begin r = int'(wy);      c = x; end
          endcase
          locate(k, r, c, lg_b, lg_g, lg_pb, wbuf, bank, lbit, word);
          b_we[bank]    = in_fire;
          b_waddr[bank] = AW'(word);
          if (lg_pb == 3'd3) begin
            b_wdata[bank][lbit +: 8] = px[7:0];
            b_wbe[bank][lbit/8]      = 1'b1;
          end else begin
            b_wdata[bank][lbit +: 16]  = px[15:0];
            b_wbe[bank][lbit/8 +: 2]   = 2'b11;
          end
        end
      end
    end
  end

  // 1-bit writer: place the chip's 256/N bits in a 256-bit row image, at x0
  // (0 degrees) or bit-reversed at 256 - 256/N - x0 (180 degrees), then
  // write the words the image touches.
  always_comb begin
    logic [D-1:0] lane, lmask, rlane, rmask, seg, smask;
    int p1, x0, row, bank;
    lane = '0; lmask = '0; rlane = '0; rmask = '0; seg = '0; smask = '0; p1 = 0; x0 = 0; row = 0; bank = 0;
    for (int g = 0; g < NBANKS; g++) begin
      b1_we[g] = 1'b0; b1_waddr[g] = '0; b1_wdata[g] = '0; b1_wbe[g] = '0;
    end
    p1 = int'(D) >> lg_n;
    x0 = int'(wxb) * p1;
    lmask = {D{1'b1}} >> (int'(D) - p1);
    for (int k = 0; k < int'(MAX_CHIPS); k++) begin
      if (one_bit && k < (1 << lg_n)) begin
        lane = (in_data >> (k * p1)) & lmask;
        if (cfg_angle[k] == ROT_180) begin
          rlane = {<<{lane}};
          rmask = {<<{lmask}};
          seg   = rlane >> x0;
          smask = rmask >> x0;
          row   = int'(D) - 1 - int'(wy);
        end else begin
          seg   = lane << x0;
          smask = lmask << x0;
          row   = int'(wy);
        end
        for (int w = 0; w < int'(D) / BANK_W; w++) begin
          if (smask[w*BANK_W +: BANK_W] != '0) begin
            bank = k * (1 << lg_b) + w;
            b1_we[bank]    = in_fire;
            b1_waddr[bank] = AW'((wbuf ? int'(HALF) : 0) + row);
            b1_wdata[bank] = seg[w*BANK_W +: BANK_W];
            for (int b = 0; b < BANK_W / 8; b++)
              b1_wbe[bank][b] = |smask[w*BANK_W + b*8 +: 8];
          end
        end
      end
    end
  end

  // ---------------- reader ----------------
  logic       rbuf;
  logic [7:0] rr;          // output row
  logic [2:0] rk;          // chip
  logic [3:0] rcb;         // beat within chip row
  logic [7:0] qr;  logic [2:0] qk;  logic [3:0] qcb;  logic qlast;
  logic       issue, r_last_beat, r_frame_end;

  assign issue       = full[rbuf] && (!out_valid || out_ready);
  assign r_last_beat = one_bit || (int'(rcb) == (int'(D) >> lg_q) - 1);
  assign r_frame_end = r_last_beat && (int'(rk) == (1 << lg_n) - 1) && (rr == 8'(D - 1));

  always_comb begin
    int c, bank, lbit, word;
    c = 0; bank = 0; lbit = 0; word = 0;
    for (int g = 0; g < NBANKS; g++) begin
      b_rd[g] = issue; b_raddr[g] = '0;
    end
    for (int i = 0; i < 32; i++) begin
      if (!one_bit && i < (1 << lg_q)) begin
        c = (int'(rcb) << lg_q) + i;
        locate(int'(rk), int'(rr), c, lg_b, lg_g, lg_pb, rbuf, bank, lbit, word);
        b_raddr[bank] = AW'(word);
      end
    end
    for (int w = 0; w < int'(D) / BANK_W; w++)
      if (one_bit) b_raddr[int'(rk) * (1 << lg_b) + w] = AW'((rbuf ? int'(HALF) : 0) + int'(rr));
  end

  // Reassemble the beat from the registered bank outputs.
  always_comb begin
    int c, bank, lbit, word;
    c = 0; bank = 0; lbit = 0; word = 0;
    out_data = '0;
    for (int w = 0; w < int'(D) / BANK_W; w++)
      if (one_bit) out_data[w*BANK_W +: BANK_W] = b_q[int'(qk) * (1 << lg_b) + w];
    for (int i = 0; i < 32; i++) begin
      if (!one_bit && i < (1 << lg_q)) begin
        c = (int'(qcb) << lg_q) + i;
        locate(int'(qk), int'(qr), c, lg_b, lg_g, lg_pb, 1'b0, bank, lbit, word);
        if (lg_pb == 3'd3) out_data[i*8 +: 8]   = b_q[bank][lbit +: 8];
        else               out_data[i*16 +: 16] = b_q[bank][lbit +: 16];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= 1'b0; wy <= '0; wxb <= '0; full <= '0;
      rbuf <= 1'b0; rr <= '0; rk <= '0; rcb <= '0;
      qr <= '0; qk <= '0; qcb <= '0; qlast <= 1'b0; out_valid <= 1'b0;
    end else begin
      // writer
      if (in_fire) begin
        wxb <= w_row_end ? '0 : wxb + 8'd1;
        if (w_row_end) wy <= wy + 8'd1;
        if (w_frame_end) begin
          full[wbuf] <= 1'b1;
          wbuf       <= !wbuf;
        end
      end
      // reader
      if (issue) begin
        qr <= rr; qk <= rk; qcb <= rcb; qlast <= r_frame_end;
        out_valid <= 1'b1;
        rcb <= r_last_beat ? '0 : rcb + 4'd1;
        if (r_last_beat) begin
          if (int'(rk) == (1 << lg_n) - 1) begin
            rk <= '0;
            rr <= rr + 8'd1;
          end else begin
            rk <= rk + 3'd1;
          end
        end
        if (r_frame_end) begin
          full[rbuf] <= 1'b0;
          rbuf       <= !rbuf;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  assign out_frame_last = out_valid && qlast;

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
