// tb_pruning_unit: self-checking test of one pruning unit.
//  1. The worked example of the source design's pruner figure (coefficients
//     scaled by 100): with K = 7 the heap 0.1 0.2 0.6 0.4 0.3 0.7 0.9
//     (IDs 3 7 2 20 5 61 14) receives 0.5 (ID 11); expected result
//     0.2 0.3 0.6 0.4 0.5 0.7 0.9 (IDs 7 5 2 20 11 61 14), ID 3 evicted,
//     within log2(K)+1 heapifier cycles. Then 0.1 and 0.2 (equal to the
//     root) are discarded.
//  2. Random streams with K = 50 and K = 100 (distinct coefficients): every
//     decision, the min-heap property and the final kept set are checked
//     against a reference that keeps the K largest values, and every sift
//     must finish within floor(log2(size)) + 1 cycles.
module tb_pruning_unit;
  localparam int RD = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_ready, dec_valid, dec_keep, dec_evict, busy;
  logic [6:0] k, size, rd_idx;
  logic signed [15:0] in_theta, rd_theta;
  logic [16:0] in_id, evict_id, rd_id;

  pruning_unit #(.K_DEFAULT(50)) dut (.clk, .rst_n, .start, .k, .in_valid, .in_ready, .in_theta, .in_id,
    .dec_valid, .dec_keep, .dec_evict, .evict_id, .size, .busy, .rd_idx, .rd_theta, .rd_id);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_cycles;

  task automatic push(int th, int id, output logic keep, output logic ev, output int eid);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_theta = 16'(th); in_id = 17'(id);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!dec_valid) begin failures++; $display("no decision"); end
    keep = dec_keep; ev = dec_evict; eid = int'(evict_id);
    busy_cycles = 0;
    while (busy) begin busy_cycles++; @(negedge clk); end
  endtask

  task automatic begin_target(int kk);
    @(negedge clk); start = 1; k = 7'(kk);
    @(negedge clk); start = 0;
  endtask

  function automatic int flog2(int n);
    int r; r = 0;
    while (n > 1) begin n = n / 2; r++; end
    return r;
  endfunction

  task automatic check_heap(int n);
    for (int i = 1; i < n; i++) begin
      logic signed [15:0] ci, pi;
      rd_idx = 7'(i); #1 ci = rd_theta;
      rd_idx = 7'((i - 1) / 2); #1 pi = rd_theta;
      checks++;
      if (pi > ci) begin failures++; $display("heap broken at %0d", i); end
    end
  endtask

  int fig_th [7] = '{10, 20, 60, 40, 30, 70, 90};
  int fig_id [7] = '{3, 7, 2, 20, 5, 61, 14};
  int exp_th [7] = '{20, 30, 60, 40, 50, 70, 90};
  int exp_id [7] = '{7, 5, 2, 20, 11, 61, 14};

  logic keep, ev;
  int eid;
  int vals [300];
  int kept [$];

  initial begin
    start = 0; k = 0; in_valid = 0; in_theta = 0; in_id = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- 1. figure example ----
    begin_target(7);
    for (int i = 0; i < 7; i++) begin
      push(fig_th[i], fig_id[i], keep, ev, eid);
      checks++; if (!keep || ev) failures++;
    end
    for (int i = 0; i < 7; i++) begin
      rd_idx = 7'(i); #1;
      checks++;
      if (rd_theta != 16'(fig_th[i]) || rd_id != 17'(fig_id[i])) begin failures++; $display("fig (a) slot %0d", i); end
    end
    push(50, 11, keep, ev, eid);
    checks++; if (!keep || !ev || eid != 3) begin failures++; $display("0.5 push: keep %0d evict %0d id %0d", keep, ev, eid); end
    checks++; if (busy_cycles > flog2(7) + 1) begin failures++; $display("sift took %0d cycles", busy_cycles); end
    for (int i = 0; i < 7; i++) begin
      rd_idx = 7'(i); #1;
      checks++;
      if (rd_theta != 16'(exp_th[i]) || rd_id != 17'(exp_id[i])) begin
        failures++; $display("fig (c) slot %0d: %0d/%0d expected %0d/%0d", i, rd_theta, rd_id, exp_th[i], exp_id[i]);
      end
    end
    push(10, 99, keep, ev, eid);
    checks++; if (keep) failures++;
    push(20, 98, keep, ev, eid);   // equal to the root: discarded
    checks++; if (keep) failures++;
    checks++; if (size != 7) failures++;

    // ---- 2. random streams ----
    for (int pass = 0; pass < 2; pass++) begin
      int kk, n;
      kk = pass == 0 ? 50 : RD;
      n  = pass == 0 ? 300 : 250;
      for (int i = 0; i < 300; i++) vals[i] = i * 7 - 900;
      vals.shuffle();
      begin_target(kk);
      kept.delete();
      for (int i = 0; i < n; i++) begin
        logic exp_keep, exp_ev;
        int exp_eid, mi;
        exp_keep = 0; exp_ev = 0; exp_eid = -1; mi = 0;
        if (kept.size() < kk) exp_keep = 1;
        else begin
          for (int j = 1; j < kept.size(); j++) if (vals[kept[j]] < vals[kept[mi]]) mi = j;
          if (vals[i] > vals[kept[mi]]) begin exp_keep = 1; exp_ev = 1; exp_eid = kept[mi]; end
        end
        push(vals[i], i, keep, ev, eid);
        checks++;
        if (keep != exp_keep || ev != exp_ev || (ev && eid != exp_eid)) begin
          failures++; $display("random push %0d: keep %0d ev %0d id %0d, expected %0d %0d %0d", i, keep, ev, eid, exp_keep, exp_ev, exp_eid);
        end
        if (exp_ev) kept.delete(mi);
        if (exp_keep) kept.push_back(i);
        checks++;
        if (busy_cycles > flog2(kept.size()) + 1) begin failures++; $display("sift %0d cycles at size %0d", busy_cycles, kept.size()); end
        if (i % 50 == 49) check_heap(kept.size());
      end
      checks++; if (int'(size) != kk) failures++;
      // final set
      for (int j = 0; j < kk; j++) begin
        int found; found = 0;
        rd_idx = 7'(j); #1;
        foreach (kept[q]) if (kept[q] == int'(rd_id) && vals[kept[q]] == int'(rd_theta)) found = 1;
        checks++;
        if (!found) begin failures++; $display("slot %0d holds %0d/%0d, not a top-K entry", j, rd_theta, rd_id); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
