// tb_mem_clear: self-checking test of the memory initializer. After reset it
// must write the configured value to every 64-byte beat of the region,
// in order, exactly once, one beat per cycle when not stalled, then raise
// done; a start pulse runs it again with a new value under back-pressure.
module tb_mem_clear;
  import smartpix_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start; logic [ADDR_W-1:0] cfg_base, cfg_bytes; logic [31:0] cfg_value;
  ddr_wr_t wr; logic wr_valid, wr_ready, busy, done;
  int checks = 0, failures = 0;

  mem_clear dut (.*);

  task automatic collect(input int nbeats, input bit stall);
    int n, cyc, first, last;
    n = 0; cyc = 0; first = -1; last = 0;
    while (!done && cyc < 10000) begin
      @(negedge clk);
      wr_ready = !stall || $urandom % 2 == 0;
      #1;
      if (wr_valid && wr_ready) begin
        if (first < 0) first = cyc;
        last = cyc;
        checks += 3;
        if (wr.addr != cfg_base + 64'(n) * 64) begin
          failures++; if (failures < 8) $display("FAIL addr %0h beat %0d", wr.addr, n);
        end
        if (wr.data != {16{cfg_value}}) begin failures++; $display("FAIL data"); end
        if (wr.strb != '1) begin failures++; $display("FAIL strb"); end
        n++;
      end
      cyc++;
    end
    checks++;
    if (n != nbeats) begin failures++; $display("FAIL %0d beats, expected %0d", n, nbeats); end
    if (!stall) begin
      checks++;
      if (last - first != nbeats - 1) begin failures++; $display("FAIL rate"); end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; wr_ready = 0;
    cfg_base = 64'h2_0000_0000; cfg_bytes = 64 * 300; cfg_value = 32'hdead_beef;
    repeat (3) @(posedge clk);
    rst_n = 1;
    collect(300, 0);
    checks++;
    if (!done || busy) begin failures++; $display("FAIL done/busy"); end
    cfg_base = 64'h1000; cfg_bytes = 64 * 77; cfg_value = 32'h0;
    @(negedge clk); wr_ready = 0; start = 1; @(negedge clk); start = 0;
    checks++;
    if (!busy || done) begin failures++; $display("FAIL restart"); end
    collect(77, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
