// tb_spectro: self-checking test of the spectroscopic splitter. Lines of
// 256 pixels (16 beats of 16 pixels) enter from either input; each output
// line must be the even pixels followed by the odd pixels, as 32-bit pixels.
// Checks one line of latency and one beat per cycle without stalls, and
// correctness with random stalls on both sides.
module tb_spectro;
  import smartpix_pkg::*;
  localparam int LB = 16, NL = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_from_acc;
  logic [255:0] rot_data; logic rot_valid, rot_ready;
  logic [511:0] acc_data; logic acc_valid, acc_ready;
  logic [511:0] out_data; logic out_valid, out_ready;
  int checks = 0, failures = 0;

  spectro dut (.*);

  int unsigned lines [NL][256];

  task automatic run(input bit from_acc, input bit stall);
    int bi, li, ob, lo, cyc, first_o, last_o, last_in0;
    for (int l = 0; l < NL; l++)
      for (int p = 0; p < 256; p++) lines[l][p] = from_acc ? $urandom : ($urandom & 32'hffff);
    cfg_from_acc = from_acc;
    rst_n = 0; rot_valid = 0; acc_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bi = 0; li = 0; ob = 0; lo = 0; cyc = 0; first_o = -1; last_o = 0; last_in0 = 0;
    while (lo < NL && cyc < 5000) begin
      @(negedge clk);
      rot_valid = !from_acc && li < NL && (!stall || $urandom % 3 != 0);
      acc_valid = from_acc && li < NL && (!stall || $urandom % 3 != 0);
      for (int i = 0; i < 16; i++) begin
        rot_data[i*16 +: 16] = (li < NL) ? 16'(lines[li][bi*16 + i]) : 16'h0;
        acc_data[i*32 +: 32] = (li < NL) ? lines[li][bi*16 + i] : 32'h0;
      end
      out_ready = !stall || $urandom % 3 != 0;
      #1;
      if ((rot_valid && rot_ready) || (acc_valid && acc_ready)) begin
        if (li == 0 && bi == LB - 1) last_in0 = cyc;
        if (bi == LB - 1) begin bi = 0; li++; end else bi++;
      end
      if (out_valid && out_ready) begin
        if (first_o < 0) first_o = cyc;
        last_o = cyc;
        for (int i = 0; i < 16; i++) begin
          int p;
          p = (ob < LB/2) ? 2*(ob*16 + i) : 2*((ob - LB/2)*16 + i) + 1;
          checks++;
          if (out_data[i*32 +: 32] != lines[lo][p]) begin
            failures++;
            if (failures < 8) $display("FAIL line %0d beat %0d px %0d: got %0h exp %0h (pixel %0d)",
                                       lo, ob, i, out_data[i*32 +: 32], lines[lo][p], p);
          end
        end
        if (ob == LB - 1) begin ob = 0; lo++; end else ob++;
      end
      cyc++;
    end
    checks++;
    if (lo != NL) begin failures++; $display("FAIL only %0d lines", lo); end
    if (!stall) begin
      checks++;
      if (first_o - last_in0 > 2 || last_o - first_o != NL*LB - 1) begin
        failures++; $display("FAIL timing: line in at %0d, out %0d..%0d", last_in0, first_o, last_o);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(0, 0); run(1, 0); run(0, 1); run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
