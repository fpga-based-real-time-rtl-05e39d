// mem_clear: memory initializer. After reset it writes a configurable 32-bit
// value, repeated over the 512-bit bus, to every address of a DDR region, one
// 64-byte beat per cycle, so that an acquisition starts from clean memory and
// the gaps the DDR writer leaves between chips read as dummy pixels.
// It starts by itself one cycle after reset is released (power-up), and again
// on a start pulse; busy is high until the last beat is accepted and done
// then stays high. The region is [cfg_base, cfg_base + cfg_bytes), both
// multiples of 64. The write port is the same as the DDR writer's.
module mem_clear
  import smartpix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] cfg_base,
  input  logic [ADDR_W-1:0] cfg_bytes,
  input  logic [31:0]       cfg_value,
  output ddr_wr_t           wr,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic              busy,
  output logic              done
);
  logic              powerup;
  logic [ADDR_W-1:0] off;

  assign wr_valid = busy;
  assign wr.addr  = cfg_base + off;
  assign wr.data  = {(WIDE_W/32){cfg_value}};
  assign wr.strb  = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      powerup <= 1'b1; busy <= 1'b0; done <= 1'b0; off <= '0;
    end else begin
      powerup <= 1'b0;
      if ((powerup || start) && !busy) begin
        busy <= (cfg_bytes != '0);
        done <= (cfg_bytes == '0);
        off  <= '0;
      end else if (busy && wr_ready) begin
        if (off + ADDR_W'(WIDE_W/8) >= cfg_bytes) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          off <= off + ADDR_W'(WIDE_W/8);
        end
      end
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr));
endmodule
