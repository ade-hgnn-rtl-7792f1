// tb_pruner: self-checking test of the pruner with 4 units (retention
// domain 16). Four targets with different K are pruned at the same time:
// coefficients for the four units are interleaved at random. Each decision
// is checked against a per-unit reference that keeps the K largest values,
// and the read-out of every unit must hold exactly its top-K set.
module tb_pruner;
  localparam int NU = 4, RD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start_valid, in_valid, in_ready, dec_valid, dec_keep, dec_evict;
  logic [1:0] start_unit, in_unit, dec_unit, rd_unit;
  logic [4:0] k, rd_size;
  logic [3:0] rd_idx;
  logic signed [15:0] in_theta, rd_theta;
  logic [16:0] in_id, evict_id, rd_id;
  logic [NU-1:0] unit_busy;

  pruner #(.NUM_UNITS(NU), .K_DEFAULT(8), .RD_DEPTH(RD)) dut (.clk, .rst_n, .start_valid, .start_unit, .k,
    .in_valid, .in_ready, .in_unit, .in_theta, .in_id, .dec_valid, .dec_unit, .dec_keep, .dec_evict,
    .evict_id, .unit_busy, .rd_unit, .rd_idx, .rd_theta, .rd_id, .rd_size);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int kk [NU] = '{3, 8, 16, 5};
  int vals [NU*60];
  int kept [NU][$];

  initial begin
    start_valid = 0; start_unit = 0; k = 0; in_valid = 0; in_unit = 0; in_theta = 0; in_id = 0;
    rd_unit = 0; rd_idx = 0;
    for (int i = 0; i < NU*60; i++) vals[i] = i * 3 - 300;
    vals.shuffle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < NU; u++) begin
      @(negedge clk); start_valid = 1; start_unit = 2'(u); k = 5'(kk[u]);
    end
    @(negedge clk); start_valid = 0;
    for (int i = 0; i < NU*60; i++) begin
      int u, mi;
      logic ek, ee;
      int eid;
      u = $urandom % NU;
      ek = 0; ee = 0; eid = -1; mi = 0;
      if (kept[u].size() < kk[u]) ek = 1;
      else begin
        for (int j = 1; j < kept[u].size(); j++) if (vals[kept[u][j]] < vals[kept[u][mi]]) mi = j;
        if (vals[i] > vals[kept[u][mi]]) begin ek = 1; ee = 1; eid = kept[u][mi]; end
      end
      @(negedge clk);
      in_unit = 2'(u);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_theta = 16'(vals[i]); in_id = 17'(i);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!dec_valid || dec_unit != 2'(u) || dec_keep != ek || dec_evict != ee || (ee && int'(evict_id) != eid)) begin
        failures++;
        $display("push %0d unit %0d: valid %0d unit %0d keep %0d ev %0d id %0d, expected %0d %0d %0d", i, u, dec_valid, dec_unit, dec_keep, dec_evict, evict_id, ek, ee, eid);
      end
      if (ee) kept[u].delete(mi);
      if (ek) kept[u].push_back(i);
    end
    while (unit_busy != 0) @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      rd_unit = 2'(u); #1;
      checks++;
      if (int'(rd_size) != kept[u].size()) begin failures++; $display("unit %0d size %0d", u, rd_size); end
      for (int j = 0; j < kept[u].size(); j++) begin
        int found; found = 0;
        rd_idx = 4'(j); #1;
        foreach (kept[u][q]) if (kept[u][q] == int'(rd_id) && vals[kept[u][q]] == int'(rd_theta)) found = 1;
        checks++;
        if (!found) begin failures++; $display("unit %0d slot %0d: %0d/%0d not in top-K", u, j, rd_theta, rd_id); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
