// spectro: spectroscopic-mode splitter.
//
// In spectroscopic mode neighbouring pixels belong to four sub-images: on even
// rows even pixels form sub-image 1 and odd pixels sub-image 2, on odd rows
// sub-images 3 and 4. The splitter rewrites each line as its even pixels
// followed by its odd pixels, so the DDR writer can store each half as a line
// of its own sub-image.
//
// Structure (as in the paper): a writer, two dual-port BRAMs and a reader.
// The writer puts the 8 even pixels of each 16-pixel input beat into bram0
// and the 8 odd pixels into bram1 (256 bits each); the reader flushes a whole
// line as 512-bit beats, all of bram0 then all of bram1, while the writer
// fills the other half of the BRAMs with the next line. This adds one line of
// latency and keeps one beat per cycle.
//
// Inputs: a 256-bit stream of 16-bit pixels from the rotation block, or a
// 512-bit stream of 32-bit pixels from acc24 (cfg_from_acc selects). Either
// carries 16 pixels per beat; 16-bit pixels are zero-extended to 32 bits, so
// the output is always 32-bit pixels (this design's choice).
module spectro
  import smartpix_pkg::*;
#(
  parameter int unsigned LINE_BEATS = 16   // 256-pixel chip line, 16 pixels per beat
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_from_acc,
  input  logic [BUS_W-1:0]  rot_data,
  input  logic              rot_valid,
  output logic              rot_ready,
  input  logic [WIDE_W-1:0] acc_data,
  input  logic              acc_valid,
  output logic              acc_ready,
  output logic [WIDE_W-1:0] out_data,
  output logic              out_valid,
  input  logic              out_ready
);
  localparam int unsigned HB = LINE_BEATS / 2;       // 512-bit words per half line
  localparam int unsigned AW = $clog2(LINE_BEATS);   // two lines of HB words
  localparam int unsigned CW = $clog2(LINE_BEATS);

  logic [WIDE_W-1:0] in_px;      // 16 x 32-bit pixels
  logic              in_valid, in_ready, in_fire;
  logic [1:0]        full;
  logic              wbuf, rbuf;
  logic [CW-1:0]     wb;         // input beat within line
  logic [CW-1:0]     rb;         // output beat within line
  logic              issue, q_odd;
  logic [255:0]      even_px, odd_px;
  logic [WIDE_W-1:0] q0, q1;

  always_comb begin
    for (int i = 0; i < 16; i++)
      in_px[i*32 +: 32] = cfg_from_acc ? acc_data[i*32 +: 32] : {16'h0, rot_data[i*16 +: 16]};
    for (int i = 0; i < 8; i++) begin
      even_px[i*32 +: 32] = in_px[(2*i)*32 +: 32];
      odd_px[i*32 +: 32]  = in_px[(2*i+1)*32 +: 32];
    end
  end

  assign in_valid  = cfg_from_acc ? acc_valid : rot_valid;
  assign in_ready  = !full[wbuf];
  assign rot_ready = in_ready && !cfg_from_acc;
  assign acc_ready = in_ready && cfg_from_acc;
  assign in_fire   = in_valid && in_ready;

  logic [AW-1:0]         waddr, raddr;
  logic [WIDE_W/8-1:0]   wbe;
  assign waddr = AW'(int'(wbuf) * int'(HB) + int'(wb) / 2);
  assign wbe   = wb[0] ? {32'hffff_ffff, 32'h0} : {32'h0, 32'hffff_ffff};
  assign raddr = AW'(int'(rbuf) * int'(HB) + int'(rb) % int'(HB));

  dp_ram #(.WIDTH(WIDE_W), .DEPTH(LINE_BEATS)) u_bram0 (
    .clk, .we(in_fire), .waddr, .wdata({even_px, even_px}), .wbe,
    .rd_en(issue), .raddr, .rdata(q0));
  dp_ram #(.WIDTH(WIDE_W), .DEPTH(LINE_BEATS)) u_bram1 (
    .clk, .we(in_fire), .waddr, .wdata({odd_px, odd_px}), .wbe,
    .rd_en(issue), .raddr, .rdata(q1));

  assign issue    = full[rbuf] && (!out_valid || out_ready);
  assign out_data = q_odd ? q1 : q0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wbuf <= 1'b0; rbuf <= 1'b0; wb <= '0; rb <= '0;
      out_valid <= 1'b0; q_odd <= 1'b0;
    end else begin
      if (in_fire) begin
        wb <= (int'(wb) == LINE_BEATS - 1) ? '0 : wb + CW'(1);
        if (int'(wb) == LINE_BEATS - 1) begin
          full[wbuf] <= 1'b1;
          wbuf       <= !wbuf;
        end
      end
      if (issue) begin
        out_valid <= 1'b1;
        q_odd     <= (int'(rb) >= int'(HB));
        rb        <= (int'(rb) == LINE_BEATS - 1) ? '0 : rb + CW'(1);
        if (int'(rb) == LINE_BEATS - 1) begin
          full[rbuf] <= 1'b0;
          rbuf       <= !rbuf;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
