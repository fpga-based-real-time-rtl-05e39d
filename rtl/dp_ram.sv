// dp_ram: simple dual-port RAM with one byte-enabled write port and one
// registered read port, the form in which block RAMs and UltraRAMs are used
// throughout the back-end. The read data register only loads when rd_en is
// high, so it holds its value while a downstream stage is stalled. Reading
// and writing the same address in one cycle returns the old data. Contents
// are not reset.
module dp_ram #(
  parameter int unsigned WIDTH = 64,   // multiple of 8
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH/8-1:0]       wbe,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WIDTH/8; b++)
        if (wbe[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    end
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
