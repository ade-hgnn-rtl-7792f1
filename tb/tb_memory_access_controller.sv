// tb_memory_access_controller: self-checking test of the HBM scheduler with
// 256-bit lines (8 edge indices per line) and a behavioural HBM that grants
// every other cycle and answers reads after 3 cycles. The edge-fetch engine
// is run over random index ranges while the edge buffer signals full at
// random; every pushed index must equal the stored one, in order, with none
// missing. At the same time a dispatcher client issues random line reads
// and writes, which must return the right data while edge reads are
// outstanding.
module tb_memory_access_controller;
  localparam int LW = 256, AW = 10, DEP = 64, IPL = LW / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic hbm_req, hbm_we, hbm_gnt, hbm_rvalid;
  logic [AW-1:0] hbm_addr, d_addr, ef_base;
  logic [LW-1:0] hbm_wdata, hbm_rdata, d_wdata, d_rdata;
  logic d_req, d_we, d_gnt, d_rvalid;
  logic ef_start, ef_busy, eb_push, eb_full;
  logic [31:0] ef_begin, ef_end, eb_din;

  memory_access_controller #(.LINE_W(LW), .HBM_AW(AW)) dut (.clk, .rst_n, .hbm_req, .hbm_we, .hbm_addr,
    .hbm_wdata, .hbm_gnt, .hbm_rvalid, .hbm_rdata, .d_req, .d_we, .d_addr, .d_wdata, .d_gnt, .d_rvalid,
    .d_rdata, .ef_start, .ef_base, .ef_begin, .ef_end, .ef_busy, .eb_push, .eb_din, .eb_full);

  hbm_model #(.LINE_W(LW), .AW(AW), .DEPTH(DEP), .LAT(3), .GNT_EVERY(2)) hbm (.clk, .req(hbm_req),
    .we(hbm_we), .addr(hbm_addr), .wdata(hbm_wdata), .gnt(hbm_gnt), .rvalid(hbm_rvalid), .rdata(hbm_rdata));

  // lines 0..31 hold edge indices (value = 1000 + position); lines 32..63
  // belong to the dispatcher client
  logic [LW-1:0] mirror [DEP];
  int exp_q [$];
  int npush = 0, nd = 0;
  bit dispatcher_on = 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // edge buffer side: random back-pressure, check every push
  always @(posedge clk) if (rst_n) begin
    if (eb_push) begin
      checks++; npush++;
      if (exp_q.size() == 0 || int'(eb_din) != exp_q[0]) begin
        failures++; $display("push %0d: got %0d expected %0d", npush, eb_din, exp_q.size() ? exp_q[0] : -1);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    eb_full <= ($urandom % 4) == 0;
  end

  // dispatcher client
  initial begin
    d_req = 0; d_we = 0; d_addr = 0; d_wdata = 0;
    wait (rst_n);
    while (dispatcher_on) begin
      int a;
      logic [LW-1:0] w;
      repeat ($urandom % 6) @(negedge clk);
      a = 32 + $urandom % 32;
      w = {8{$urandom}};
      d_req = 1; d_we = $urandom % 2; d_addr = AW'(a); d_wdata = w;
      do @(posedge clk); while (!d_gnt);
      @(negedge clk);
      d_req = 0;
      if (d_we) mirror[a] = w;
      else begin
        while (!d_rvalid) @(negedge clk);
        checks++; nd++;
        if (d_rdata != mirror[a]) begin failures++; $display("dispatcher read line %0d wrong", a); end
      end
    end
  end

  initial begin
    ef_start = 0; ef_base = 0; ef_begin = 0; ef_end = 0;
    #1;
    for (int l = 0; l < DEP; l++) begin
      for (int j = 0; j < IPL; j++) mirror[l][j*32 +: 32] = (l < 32) ? 32'(1000 + l*IPL + j) : 32'($urandom);
      hbm.mem[l] = mirror[l];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int b, e, base;
      base = $urandom % 8;
      b = $urandom % 64;
      e = b + (r == 0 ? 0 : $urandom % 40);
      for (int i = b; i < e; i++) exp_q.push_back(1000 + base*IPL + i);
      @(negedge clk);
      ef_start = 1; ef_base = AW'(base); ef_begin = b; ef_end = e;
      @(negedge clk);
      ef_start = 0;
      while (ef_busy) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("range %0d: %0d indices missing", r, exp_q.size()); exp_q.delete(); end
    end
    dispatcher_on = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nd == 0) begin failures++; $display("no dispatcher read"); end
    $display("edge pushes %0d dispatcher reads %0d", npush, nd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
