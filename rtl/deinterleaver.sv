// deinterleaver: splits the interleaved front-end stream into per-chip lanes.
//
// The front-end board sends 256-bit beats made of eight 32-bit slots. With N
// chips under acquisition (1, 4 or 8) slot s belongs to chip s mod N, chip 0
// in the lowest slot. Pixels of one chip are packed LSB first across that
// chip's slots, beat after beat.
//
// 6- and 12-bit modes: three input beats (768 bits) carry 128/N 6-bit or 64/N
// 12-bit pixels per chip; they are widened to 8 or 16 bits and sent out as four
// 256-bit beats. In each output beat chip c owns lane c, bits
// [c*256/N +: 256/N], holding the next pixels of that chip in row order.
// 1-bit mode uses its own path: each input beat becomes one output beat with
// the slots of each chip gathered into its lane, no widening.
// 24-bit mode arrives as two 12-bit frames and is handled like 12-bit mode.
//
// Interface: AXI-stream style valid/ready on both sides. A block of four
// output beats is held while the next three input beats are collected, so
// the output runs at one beat per cycle and the input is never throttled
// below 3 beats per 4 cycles. Latency: one cycle after the third beat.
// The 3-to-4 conversion, widening and 1-bit path follow the paper; the slot
// order, bit order inside a chip's stream and handshake are this design's.
module deinterleaver
  import smartpix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  nchips_t           cfg_nchips,   // 1, 4 or 8
  input  pix_mode_e         cfg_pix,
  input  logic [BUS_W-1:0]  in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [BUS_W-1:0]  out_data,
  output logic              out_valid,
  input  logic              out_ready
);
  logic [BUS_W-1:0]   acc0, acc1;        // first two beats of a group
  logic [1:0]         cnt;               // beats held in acc0/acc1
  logic [4*BUS_W-1:0] hold;              // converted block
  logic               hold_valid;
  logic [1:0]         out_idx, out_last;
  logic               in_fire, out_fire, hold_free, one_bit, load;
  logic [3*BUS_W-1:0] grp;
  logic [4*BUS_W-1:0] wide;
  logic [BUS_W-1:0]   packed1;

  assign one_bit   = (cfg_pix == PIX_1);
  assign in_fire   = in_valid && in_ready;
  assign out_fire  = out_valid && out_ready;
  assign hold_free = !hold_valid || (out_ready && out_idx == out_last);
  assign in_ready  = one_bit ? hold_free : ((cnt < 2'd2) || hold_free);
  assign load      = in_fire && (one_bit || cnt == 2'd2);
  assign grp       = {in_data, acc1, acc0};
  assign out_valid = hold_valid;
  assign out_data  = hold[out_idx*BUS_W +: BUS_W];

  // Word-level conversion for each supported chip count. Chip c's stream is
  // its slots c, c+N, ... of beat 0, then of beat 1, then of beat 2.
  logic [4*BUS_W-1:0] wide_n   [3];
  logic [BUS_W-1:0]   packed_n [3];
  for (genvar gi = 0; gi < 3; gi++) begin : g_n
    localparam int N  = (gi == 0) ? 1 : (gi == 1) ? 4 : 8;
    localparam int LB = BUS_W / N;        // lane bits
    localparam int SPB = 8 / N;           // slots per chip per beat
    always_comb begin
      logic [3*LB-1:0] s;
      logic [4*LB-1:0] e;
      wide_n[gi]   = '0;
      packed_n[gi] = '0;
      for (int c = 0; c < N; c++) begin
        for (int w = 0; w < 3; w++)
          for (int k = 0; k < SPB; k++)
            s[(w*SPB + k)*SLOT_W +: SLOT_W] = grp[w*BUS_W + (c + N*k)*SLOT_W +: SLOT_W];
        e = '0;
        if (cfg_pix == PIX_6) begin
          for (int i = 0; i < 128/N; i++) e[8*i +: 8] = {2'b00, s[6*i +: 6]};
        end else begin
          for (int i = 0; i < 64/N; i++) e[16*i +: 16] = {4'h0, s[12*i +: 12]};
        end
        for (int j = 0; j < 4; j++)
          wide_n[gi][j*BUS_W + c*LB +: LB] = e[j*LB +: LB];
        for (int k = 0; k < SPB; k++)
          packed_n[gi][c*LB + k*SLOT_W +: SLOT_W] = in_data[(c + N*k)*SLOT_W +: SLOT_W];
      end
    end
  end

  always_comb begin
    unique case (cfg_nchips)
      4'd4:    begin wide = wide_n[1]; packed1 = packed_n[1]; end
      4'd8:    begin wide = wide_n[2]; packed1 = packed_n[2]; end
      default: begin wide = wide_n[0]; packed1 = packed_n[0]; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; hold_valid <= 1'b0; out_idx <= '0; out_last <= '0;
      acc0 <= '0; acc1 <= '0; hold <= '0;
    end else begin
      if (out_fire) begin
        out_idx <= out_idx + 2'd1;
        if (out_idx == out_last) hold_valid <= 1'b0;
      end
      if (in_fire && !one_bit) begin
        if (cnt == 2'd0) acc0 <= in_data;
        if (cnt == 2'd1) acc1 <= in_data;
        cnt <= (cnt == 2'd2) ? 2'd0 : cnt + 2'd1;
      end
      if (load) begin
        hold       <= one_bit ? {{(3*BUS_W){1'b0}}, packed1} : wide;
        out_last   <= one_bit ? 2'd0 : 2'd3;
        out_idx    <= '0;
        hold_valid <= 1'b1;
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
