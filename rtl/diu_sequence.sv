// diu_sequence: the image pipeline for one front-end board.
//
// De-interleaver -> rotation -> {acc24, spectro} -> DDR writer, with the
// stream multiplexers of the paper's block diagram choosing the path:
//   acc off, spectro off : rotation -> DDR writer (256-bit beats, 16/8-bit px)
//   acc off, spectro on  : rotation -> spectro -> DDR writer (32-bit px)
//   acc on,  spectro off : rotation -> acc24 -> DDR writer (32-bit px)
//   acc on,  spectro on  : rotation -> acc24 -> spectro -> DDR writer
// "acc on" is accumulation of n frames or the 24-bit mode. Every stage uses
// valid/ready, so a stall anywhere (DDR back-pressure) propagates back to the
// link. The DDR writer sees lines of one chip at a time and places them with
// the configured strides; its block count is the chip count and each block
// has 256 lines. The acc24 frame length follows from the chip count
// (4096 beats of 16-bit pixels per chip).
// The path selection is the paper's; steering by configuration bits and the
// derived frame sizes are this design's.
module diu_sequence
  import smartpix_pkg::*;
#(
  parameter int unsigned ROT_DEPTH = 8192,    // words per rotation bank
  parameter int unsigned ACC_DEPTH = 65536    // words per acc24 bank
) (
  input  logic              clk,
  input  logic              rst_n,
  input  diu_cfg_t          cfg,
  input  logic [BUS_W-1:0]  link_data,     // from the Aurora receiver
  input  logic              link_valid,
  output logic              link_ready,
  output ddr_wr_t           wr,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic              frame_done
);
  logic acc_en;
  assign acc_en = (cfg.acc_mode != ACC_OFF);

  // de-interleaver -> rotation
  logic [BUS_W-1:0] di_data;  logic di_valid, di_ready;
  deinterleaver u_deint (
    .clk, .rst_n, .cfg_nchips(cfg.nchips), .cfg_pix(cfg.pix),
    .in_data(link_data), .in_valid(link_valid), .in_ready(link_ready),
    .out_data(di_data), .out_valid(di_valid), .out_ready(di_ready));

  logic [BUS_W-1:0] rot_data; logic rot_valid, rot_ready, rot_last;
  rotation #(.BANK_DEPTH(ROT_DEPTH)) u_rot (
    .clk, .rst_n, .cfg_nchips(cfg.nchips), .cfg_pix(cfg.pix), .cfg_angle(cfg.angle),
    .in_data(di_data), .in_valid(di_valid), .in_ready(di_ready),
    .out_data(rot_data), .out_valid(rot_valid), .out_ready(rot_ready),
    .out_frame_last(rot_last));

  // first mux: rotation -> acc24 | spectro | DDR writer
  logic acc_in_ready, sp_rot_ready, sp_acc_ready, dw_ready;
  logic [WIDE_W-1:0] acc_data; logic acc_valid, acc_ready, acc_last;
  logic [WIDE_W-1:0] sp_data;  logic sp_valid, sp_ready;

  assign rot_ready = acc_en ? acc_in_ready : (cfg.spectro_en ? sp_rot_ready : dw_ready);

  logic [$clog2(ACC_DEPTH)-1:0] acc_frame_beats;
  assign acc_frame_beats = $clog2(ACC_DEPTH)'(32'(cfg.nchips) << 12);

  acc24 #(.DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n, .cfg_mode(cfg.acc_mode), .cfg_nframes(cfg.acc_nframes),
    .cfg_frame_beats(acc_frame_beats),
    .in_data(rot_data), .in_valid(rot_valid && acc_en), .in_ready(acc_in_ready),
    .out_data(acc_data), .out_valid(acc_valid), .out_ready(acc_ready),
    .out_frame_last(acc_last));

  // second mux: acc24 -> spectro | DDR writer
  assign acc_ready = cfg.spectro_en ? sp_acc_ready : dw_ready;

  spectro u_spectro (
    .clk, .rst_n, .cfg_from_acc(acc_en),
    .rot_data(rot_data), .rot_valid(rot_valid && !acc_en && cfg.spectro_en), .rot_ready(sp_rot_ready),
    .acc_data(acc_data), .acc_valid(acc_valid && cfg.spectro_en), .acc_ready(sp_acc_ready),
    .out_data(sp_data), .out_valid(sp_valid), .out_ready(sp_ready));

  // last mux: into the DDR writer
  logic [WIDE_W-1:0] dw_data; logic dw_valid;
  always_comb begin
    if (cfg.spectro_en) begin
      dw_data = sp_data;  dw_valid = sp_valid;
    end else if (acc_en) begin
      dw_data = acc_data; dw_valid = acc_valid;
    end else begin
      dw_data = {{(WIDE_W-BUS_W){1'b0}}, rot_data}; dw_valid = rot_valid;
    end
  end
  assign sp_ready = dw_ready;

  logic wide;
  assign wide = acc_en || cfg.spectro_en;

  ddr_writer u_dw (
    .clk, .rst_n, .cfg_start(cfg.ddr_start), .cfg_line_size(cfg.ddr_line_size),
    .cfg_line_stride(cfg.ddr_line_stride), .cfg_block_stride(cfg.ddr_block_stride),
    .cfg_nblocks(16'(cfg.nchips)), .cfg_lines_per_block(16'(CHIP_DIM)),
    .cfg_beat_bytes(wide ? 7'd64 : 7'd32),
    .in_data(dw_data), .in_valid(dw_valid), .in_ready(dw_ready),
    .wr, .wr_valid, .wr_ready, .frame_done);
endmodule
