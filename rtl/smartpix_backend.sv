// smartpix_backend: the back-end FPGA logic of a SMARTPIX detector.
//
// Two diu_sequence pipelines, one per front-end board, take the 256-bit
// streams delivered by the two Aurora receivers, manipulate the images
// (de-interleave, rotate, accumulate / 24-bit, spectroscopic split) and write
// the frames into DDR4. The memory initializer clears the DDR region at
// power-up; the pipelines' DDR writes are held back until it is done. RASHPA
// then copies each finished frame, line by line, into the receiving
// computer's buffers through two CDMA engines used in ping-pong.
//
// The Aurora cores, the AXI interconnect, the DDR4 controllers, the CDMA
// engines and the PCIe endpoint are vendor IP and stay outside: each pipeline
// and the initializer has a write port (to the interconnect), and RASHPA has
// two CDMA descriptor ports. A frame is handed to RASHPA once both pipelines
// have written it (a small counter per pipeline joins the two frame_done
// pulses); this join is this design's choice.
module smartpix_backend
  import smartpix_pkg::*;
#(
  parameter int unsigned MAX_LB = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration (from the SMARTPIX / LIBRASHPA controller)
  input  diu_cfg_t          diu_cfg   [2],
  input  logic [ADDR_W-1:0] clear_base,
  input  logic [ADDR_W-1:0] clear_bytes,
  input  logic [31:0]       clear_value,
  input  logic              clear_start,
  input  rashpa_cfg_t       rashpa_cfg,
  input  logic [ADDR_W-1:0] lb_base   [MAX_LB],
  input  logic              rashpa_start,
  // Aurora receive streams
  input  logic [BUS_W-1:0]  link_data  [2],
  input  logic              link_valid [2],
  output logic              link_ready [2],
  // write ports to the AXI interconnect / DDR4
  output ddr_wr_t           diu_wr       [2],
  output logic              diu_wr_valid [2],
  input  logic              diu_wr_ready [2],
  output ddr_wr_t           clr_wr,
  output logic              clr_wr_valid,
  input  logic              clr_wr_ready,
  output logic              clr_done,
  // CDMA descriptor ports
  output cdma_desc_t        cdma_desc  [2],
  output logic              cdma_valid [2],
  input  logic              cdma_ready [2],
  output logic              group_done,
  output logic              rb_full,
  output logic              rashpa_idle
);
  logic       frame_done [2];
  logic [7:0] frames [2];
  logic       trigger, clr_busy;

  for (genvar i = 0; i < 2; i++) begin : g_diu
    logic w_valid, w_ready;
    diu_sequence u_diu (
      .clk, .rst_n, .cfg(diu_cfg[i]),
      .link_data(link_data[i]), .link_valid(link_valid[i]), .link_ready(link_ready[i]),
      .wr(diu_wr[i]), .wr_valid(w_valid), .wr_ready(w_ready),
      .frame_done(frame_done[i]));
    assign diu_wr_valid[i] = w_valid && clr_done;
    assign w_ready         = diu_wr_ready[i] && clr_done;
  end

  mem_clear u_clear (
    .clk, .rst_n, .start(clear_start), .cfg_base(clear_base), .cfg_bytes(clear_bytes),
    .cfg_value(clear_value), .wr(clr_wr), .wr_valid(clr_wr_valid), .wr_ready(clr_wr_ready),
    .busy(clr_busy), .done(clr_done));

  // Join the two pipelines' frame completions.
  assign trigger = (frames[0] != 0 || frame_done[0]) && (frames[1] != 0 || frame_done[1]);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frames[0] <= '0; frames[1] <= '0;
    end else begin
      for (int i = 0; i < 2; i++)
        frames[i] <= frames[i] + 8'(frame_done[i]) - 8'(trigger);
    end
  end

  rashpa #(.MAX_LB(MAX_LB)) u_rashpa (
    .clk, .rst_n, .cfg(rashpa_cfg), .lb_base, .start(rashpa_start), .trigger,
    .desc(cdma_desc), .desc_valid(cdma_valid), .desc_ready(cdma_ready),
    .group_done, .rb_full, .idle(rashpa_idle));
endmodule
