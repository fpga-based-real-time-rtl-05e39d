// tb_acc24: self-checking test of the accumulator / 24-bit concatenator.
// Runs at the default RAM size with a short frame length (cfg_frame_beats).
// ACC_SUM with n = 3 (two groups back to back) and n = 1, and ACC_SHIFT,
// with random 12-bit pixels; expected sums and (high << 12) | low words are
// computed from the stimulus. One pass adds random stalls. Without stalls
// the output must follow the input at one beat per cycle, two cycles late.
module tb_acc24;
  import smartpix_pkg::*;
  localparam int FB = 64;       // beats per test frame
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  acc_mode_e cfg_mode; logic [15:0] cfg_nframes; logic [15:0] cfg_frame_beats;
  logic [255:0] in_data; logic [511:0] out_data;
  logic in_valid, in_ready, out_valid, out_ready, out_frame_last;
  int checks = 0, failures = 0;

  acc24 dut (.*);

  int unsigned frames [8][FB][16];
  int unsigned expq [$];

  task automatic run(input acc_mode_e m, input int n, input int groups, input bit stall);
    int nf, bi, fi, ob, cyc, first_o, last_o, in_last_cyc;
    nf = groups * n;
    cfg_mode = m; cfg_nframes = 16'(n); cfg_frame_beats = 16'(FB);
    for (int f = 0; f < nf; f++)
      for (int b = 0; b < FB; b++)
        for (int i = 0; i < 16; i++) frames[f][b][i] = $urandom & 32'hfff;
    expq.delete();
    for (int g = 0; g < groups; g++)
      for (int b = 0; b < FB; b++)
        for (int i = 0; i < 16; i++) begin
          int unsigned e;
          e = 0;
          if (m == ACC_SHIFT) e = (frames[g*2+1][b][i] << 12) | frames[g*2][b][i];
          else for (int f = 0; f < n; f++) e += frames[g*n + f][b][i];
          expq.push_back(e);
        end
    rst_n = 0; in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bi = 0; fi = 0; ob = 0; cyc = 0; first_o = -1; last_o = 0; in_last_cyc = 0;
    while (ob < groups*FB && cyc < 20000) begin
      @(negedge clk);
      in_valid = (fi < nf) && (!stall || $urandom % 3 != 0);
      for (int i = 0; i < 16; i++) in_data[i*16 +: 16] = (fi < nf) ? 16'(frames[fi][bi][i]) : 16'h0;
      out_ready = !stall || $urandom % 3 != 0;
      #1;
      if (in_valid && in_ready) begin
        in_last_cyc = cyc;
        if (bi == FB - 1) begin bi = 0; fi++; end else bi++;
      end
      if (out_valid && out_ready) begin
        if (first_o < 0) first_o = cyc;
        last_o = cyc;
        for (int i = 0; i < 16; i++) begin
          int unsigned e;
          e = expq.pop_front();
          checks++;
          if (out_data[i*32 +: 32] != e) begin
            failures++;
            if (failures < 8) $display("FAIL %s n=%0d beat %0d px %0d: got %0h exp %0h",
                                       m.name(), n, ob, i, out_data[i*32 +: 32], e);
          end
        end
        checks++;
        if (out_frame_last != (ob % FB == FB - 1)) begin failures++; $display("FAIL frame_last"); end
        ob++;
      end
      cyc++;
    end
    checks++;
    if (ob != groups*FB) begin failures++; $display("FAIL %s: %0d beats out", m.name(), ob); end
    if (!stall) begin
      checks++;
      if (last_o - in_last_cyc != 2 || (groups == 1 && last_o - first_o != FB - 1)) begin
        failures++; $display("FAIL timing %s: last in %0d, out %0d..%0d", m.name(), in_last_cyc, first_o, last_o);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(ACC_SUM, 3, 2, 0);
    run(ACC_SUM, 1, 1, 0);
    run(ACC_SHIFT, 2, 1, 0);
    run(ACC_SUM, 4, 2, 1);
    run(ACC_SHIFT, 2, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
