// tb_rashpa: self-checking test of the RASHPA data channel. For each dispatch
// rule it sends three triggers and compares every CDMA transfer (source,
// destination, length) with a reference computed from the rules as a global
// block count: overwrite restarts at LB dst_index on every trigger, circular
// wraps around the RASHPA buffer, concatenate stops with rb_full once all
// local buffers are filled. Transfers must alternate between the two CDMA
// ports, each of which is held busy for a random time after taking one;
// group_done must pulse once per nb_blocks_in_group blocks.
module tb_rashpa;
  import smartpix_pkg::*;
  localparam int MAX_LB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rashpa_cfg_t cfg; logic [ADDR_W-1:0] lb_base [MAX_LB];
  logic start, trigger;
  cdma_desc_t desc [2]; logic desc_valid [2], desc_ready [2];
  logic group_done, rb_full, idle;
  int checks = 0, failures = 0;

  rashpa dut (.*);

  int busy [2];
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (desc_valid[p] && desc_ready[p]) busy[p] <= 1 + $urandom % 6;
      else if (busy[p] > 0) busy[p] <= busy[p] - 1;
    end
  end
  always_comb for (int p = 0; p < 2; p++) desc_ready[p] = (busy[p] == 0);

  task automatic run(input dispatch_e rule);
    int LC, BC, NLB, NBL, total, got, cyc, port_exp, groups;
    cdma_desc_t expq [$];
    LC = 4; BC = 3; NLB = 3; NBL = 2;
    cfg = '0;
    cfg.src_addr = 64'h1000; cfg.src_line_size = 512; cfg.src_line_stride = 2048;
    cfg.src_line_count = 16'(LC); cfg.src_block_stride = 512; cfg.src_block_count = 16'(BC);
    cfg.dst_index = 1; cfg.dst_offset = 32'h40; cfg.dst_line_stride = 1024;
    cfg.dst_block_stride = 8192; cfg.nb_lb_in_rb = 8'(NLB); cfg.nb_blocks_in_lb = 16'(NBL);
    cfg.nb_blocks_in_group = 3; cfg.dispatch = rule;
    for (int i = 0; i < MAX_LB; i++) lb_base[i] = 64'h1_0000_0000 * (i + 1);
    for (int t = 0; t < 3; t++)
      for (int b = 0; b < BC; b++) begin
        int g, pos, lb, slot;
        g = t*BC + b;
        if (rule == DISP_CONCATENATE && g >= NLB*NBL) continue;
        pos  = (rule == DISP_OVERWRITE) ? b : (g % (NLB*NBL));
        lb   = (1 + pos / NBL) % NLB;
        slot = pos % NBL;
        for (int l = 0; l < LC; l++) begin
          cdma_desc_t d;
          d.src = 64'h1000 + 64'(b*512 + l*2048);
          d.dst = lb_base[lb] + 64'h40 + 64'(slot*8192 + l*1024);
          d.len = 512;
          expq.push_back(d);
        end
      end
    total = expq.size();
    rst_n = 0; start = 0; trigger = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0; cyc = 0; port_exp = 0; groups = 0;
    while (cyc < 3000) begin
      @(negedge clk);
      trigger = (cyc == 2 || cyc == 5 || cyc == 40);
      #1;
      if (group_done) groups++;
      for (int p = 0; p < 2; p++)
        if (desc_valid[p] && desc_ready[p]) begin
          cdma_desc_t e;
          checks += 2;
          if (p != port_exp) begin failures++; $display("FAIL port %0d", p); end
          port_exp = 1 - port_exp;
          if (expq.size() == 0) begin failures++; $display("FAIL extra transfer"); end
          else begin
            e = expq.pop_front();
            if (desc[p] != e) begin
              failures++;
              if (failures < 8) $display("FAIL %s transfer %0d: src %0h dst %0h exp src %0h dst %0h",
                                         rule.name(), got, desc[p].src, desc[p].dst, e.src, e.dst);
            end
          end
          got++;
        end
      cyc++;
    end
    checks += 3;
    if (got != total) begin failures++; $display("FAIL %s: %0d transfers of %0d", rule.name(), got, total); end
    if (groups != total / LC / 3) begin failures++; $display("FAIL groups %0d", groups); end
    if (rb_full != (rule == DISP_CONCATENATE)) begin failures++; $display("FAIL rb_full"); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    busy[0] = 0; busy[1] = 0;
    run(DISP_OVERWRITE);
    run(DISP_CIRCULAR);
    run(DISP_CONCATENATE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
