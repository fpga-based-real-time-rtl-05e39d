// acc24: frame accumulator and 24-bit counter concatenator (Acc24 FSM).
//
// One block of hardware serves two modes, as in the paper. Input pixels are
// 16 bits (12-bit counters widened), 16 per 256-bit beat; output pixels are
// 32 bits, 16 per 512-bit beat. Eight UltraRAM banks of 64 bits form one
// 512-bit word per input beat, and hold two frame buffers.
//   ACC_SUM   : the first of n frames is stored; each later frame reads the
//               stored partial sums, adds the new pixels and stores the result
//               in the other buffer; during the n-th frame the sums are sent
//               out instead of stored. n = 1 sends each frame straight out.
//   ACC_SHIFT : 24-bit mode. The first frame (low counter) is stored; with the
//               second frame (high counter) each pixel leaves as
//               (high << 12) | low.
// Reading one buffer and writing the other lets a read, an add and a write
// happen for every beat, so the block takes one beat per cycle.
//
// Timing: two-stage pipeline (RAM read, then add/write or output); an output
// beat appears two cycles after its input beat. in_ready drops only while an
// output beat is held by out_ready low.
// Choices of this design: the low counter is the first frame of a pair; the
// frame length is a run-time input; the two buffers alternate per frame.
module acc24
  import smartpix_pkg::*;
#(
  parameter int unsigned NBANKS = 8,
  parameter int unsigned DEPTH  = 65536   // two frames of 8 chips (32768 beats each)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  acc_mode_e         cfg_mode,
  input  logic [15:0]       cfg_nframes,     // n >= 1 (ACC_SUM)
  input  logic [$clog2(DEPTH)-1:0] cfg_frame_beats,  // input beats per frame, <= DEPTH/2
  input  logic [BUS_W-1:0]  in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [WIDE_W-1:0] out_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              out_frame_last
);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = WIDE_W / NBANKS;
  localparam int unsigned NPIX  = BUS_W / 16;

  logic [AW-1:0]  beat;
  logic [15:0]    frame;
  logic           in_fire, advance, first, last, beat_end;
  logic [15:0]    nfr;

  assign nfr      = (cfg_mode == ACC_SHIFT) ? 16'd2 : ((cfg_nframes == 0) ? 16'd1 : cfg_nframes);
  assign advance  = !out_valid || out_ready;
  assign in_ready = advance;
  assign in_fire  = in_valid && in_ready;
  assign first    = (frame == 16'd0);
  assign last     = (frame == nfr - 16'd1);
  assign beat_end = (beat == cfg_frame_beats - AW'(1));

  // Stage 1 registers: the input beat while its stored sums are read.
  logic             s1_valid, s1_first, s1_last, s1_eof, s1_wbuf;
  logic [AW-1:0]    s1_beat;
  logic [BUS_W-1:0] s1_data;
  logic [WIDE_W-1:0] q, result;

  // RAM banks: buffer select is the top address bit.
  logic              we;
  logic [AW-1:0]     waddr, raddr;
  for (genvar g = 0; g < NBANKS; g++) begin : g_uram
    dp_ram #(.WIDTH(BW), .DEPTH(DEPTH)) u_uram (
      .clk, .we, .waddr, .wdata(result[g*BW +: BW]), .wbe('1),
      .rd_en(in_fire), .raddr, .rdata(q[g*BW +: BW]));
  end

  // Frame f reads buffer !f[0] and writes buffer f[0].
  assign raddr = {~frame[0], beat[AW-2:0]};
  assign waddr = {s1_wbuf, s1_beat[AW-2:0]};
  assign we    = advance && s1_valid && !s1_last;

  always_comb begin
    logic [31:0] px, old;
    for (int i = 0; i < int'(NPIX); i++) begin
      px  = {16'h0, s1_data[i*16 +: 16]};
      old = q[i*32 +: 32];
      if (s1_first)                    result[i*32 +: 32] = px;
      else if (cfg_mode == ACC_SHIFT)  result[i*32 +: 32] = (px << 12) | old;
      else                             result[i*32 +: 32] = px + old;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; frame <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_eof <= 1'b0;
      s1_wbuf <= 1'b0; s1_beat <= '0; s1_data <= '0;
      out_valid <= 1'b0; out_data <= '0; out_frame_last <= 1'b0;
    end else begin
      if (in_fire) begin
        beat <= beat_end ? '0 : beat + AW'(1);
        if (beat_end) frame <= last ? 16'd0 : frame + 16'd1;
      end
      if (advance) begin
        s1_valid <= in_fire;
        s1_first <= first;
        s1_last  <= last;
        s1_eof   <= beat_end;
        s1_wbuf  <= frame[0];
        s1_beat  <= beat;
        s1_data  <= in_data;
        out_valid      <= s1_valid && s1_last;
        out_data       <= result;
        out_frame_last <= s1_valid && s1_last && s1_eof;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
