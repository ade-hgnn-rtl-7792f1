// ade_hgnn_tb_body.svh: shared body of the accelerator's end-to-end tests.
//
// Included inside a testbench module that has defined TB_WB_DEPTH (weight-
// buffer depth of the instance), TB_RD (retention-domain depth) and that
// instantiates the accelerator as `dut` on the signals declared here. It
// builds a random heterogeneous semantic graph of NVX vertices (in-degrees
// 0..12, CSC layout) and raw features of F_IN = 300 values (two HBM lines
// per vertex, so projections stall for a second line), loads two sets of
// weights (two semantic graphs) into the weight buffer, and runs three jobs:
//   job 0: graph 0, targets 0..NVX-1, K = 4, no ELU, new graph
//   job 1: graph 0, targets 20..NVX-1, K = 8, ELU, reuse state of job 0
//   job 2: graph 1 (other weights), targets 0..15, K = 2, no ELU, new graph
// The reference computes the projected features and attention coefficients
// bit-exactly in integers, replays the retention-domain min-heap to know
// which neighbours are retained, and computes the softmax-weighted sums in
// real arithmetic; each output value must lie within an error bound derived
// from the Q7.8 weight resolution and the exp approximation. The event
// counters with a closed-form expectation (targets, edges, pruning decisions
// and evictions, which depend on every coefficient's exact value, retained
// aggregations, bitmap reuse, feature fetches) are checked exactly. Every mechanism of the flow must
// have occurred at least once over the three jobs, else it counts as a
// failure.
  localparam int NVX = 40, F_IN = 300, FL = 2, DEG_MAX = 12;
  localparam int PTR_BASE = 100, IDX_BASE = 110, OUT_BASE = 128, HDEP = 256;
  localparam int WBASE [2] = '{0, 400};
  localparam int TB_WAW = $clog2(TB_WB_DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  cfg_t cfg;
  perf_t perf;
  logic wb_wr_en;
  logic [5:0] wb_wr_bank;
  logic [TB_WAW-1:0] wb_wr_addr;
  logic signed [15:0] wb_wr_data;
  logic hbm_req, hbm_we, hbm_gnt, hbm_rvalid;
  logic [HBM_AW-1:0] hbm_addr;
  logic [LINE_W-1:0] hbm_wdata, hbm_rdata;

  hbm_model #(.LINE_W(LINE_W), .AW(HBM_AW), .DEPTH(HDEP), .LAT(8), .GNT_EVERY(1)) hbm (.clk, .req(hbm_req),
    .we(hbm_we), .addr(hbm_addr), .wdata(hbm_wdata), .gnt(hbm_gnt), .rvalid(hbm_rvalid), .rdata(hbm_rdata));

  // ---------------- data set ----------------
  int xr [NVX][F_IN];
  int wt [2][D][F_IN];
  int as [2][D], ad [2][D];
  int hp [2][NVX][D];
  int ths [2][NVX], thd [2][NVX];
  int cptr [NVX+1];
  int ridx [NVX*DEG_MAX];
  bit bm [NVX];

  // mechanism tallies over all jobs
  perf_t tot;
  int n_deg0 = 0, n_elu_neg = 0, n_outputs = 0;

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // retention-domain min-heap, same order of operations as a pruning unit
  function automatic void heap_run(input int g, input int v, input int kc,
                                   output int ids [$], output int keep, output int disc, output int evict);
    int hv [TB_RD], hi [TB_RD];
    int n, cur, p, l, r, ch, tmp;
    n = 0; keep = 0; disc = 0; evict = 0;
    for (int e = cptr[v]; e < cptr[v+1]; e++) begin
      int u, th;
      u = ridx[e]; th = ths[g][u];
      if (n < kc) begin
        hv[n] = th; hi[n] = u; cur = n; n++; keep++;
        while (cur != 0) begin
          p = (cur - 1) / 2;
          if (hv[cur] < hv[p]) begin
            tmp = hv[cur]; hv[cur] = hv[p]; hv[p] = tmp;
            tmp = hi[cur]; hi[cur] = hi[p]; hi[p] = tmp;
            cur = p;
          end else break;
        end
      end else if (th > hv[0]) begin
        hv[0] = th; hi[0] = u; cur = 0; keep++; evict++;
        forever begin
          l = 2*cur + 1; r = 2*cur + 2;
          if (l >= n) break;
          ch = (r < n && hv[r] < hv[l]) ? r : l;
          if (hv[ch] < hv[cur]) begin
            tmp = hv[cur]; hv[cur] = hv[ch]; hv[ch] = tmp;
            tmp = hi[cur]; hi[cur] = hi[ch]; hi[ch] = tmp;
            cur = ch;
          end else break;
        end
      end else disc++;
    end
    ids.delete();
    for (int i = 0; i < n; i++) ids.push_back(hi[i]);
  endfunction

  task automatic build_data();
    int e;
    for (int u = 0; u < NVX; u++)
      for (int i = 0; i < F_IN; i++) xr[u][i] = int'($urandom % 257) - 128;
    for (int g = 0; g < 2; g++)
      for (int j = 0; j < D; j++) begin
        for (int i = 0; i < F_IN; i++) wt[g][j][i] = int'($urandom % 129) - 64;
        as[g][j] = int'($urandom % 129) - 64;
        ad[g][j] = int'($urandom % 129) - 64;
      end
    for (int g = 0; g < 2; g++)
      for (int u = 0; u < NVX; u++) begin
        longint s1, s2;
        for (int j = 0; j < D; j++) begin
          int acc;
          acc = 0;
          for (int i = 0; i < F_IN; i++) acc += xr[u][i] * wt[g][j][i];
          hp[g][u][j] = sat(longint'(acc) >>> 8);
        end
        s1 = 0; s2 = 0;
        for (int j = 0; j < D; j++) begin
          s1 += longint'(hp[g][u][j] * as[g][j]);
          s2 += longint'(hp[g][u][j] * ad[g][j]);
        end
        ths[g][u] = sat(s1 >>> 8);
        thd[g][u] = sat(s2 >>> 8);
      end
    // graph: vertex 3 has no neighbour, vertex 5 has DEG_MAX
    e = 0;
    for (int v = 0; v < NVX; v++) begin
      int dg;
      dg = (v == 3) ? 0 : (v == 5) ? DEG_MAX : int'($urandom % (DEG_MAX + 1));
      cptr[v] = e;
      for (int i = 0; i < dg; i++) begin ridx[e] = int'($urandom % NVX); e++; end
    end
    cptr[NVX] = e;
    // HBM image
    for (int l = 0; l < HDEP; l++) hbm.mem[l] = '0;
    for (int u = 0; u < NVX; u++)
      for (int i = 0; i < F_IN; i++) hbm.mem[u*FL + i/256][(i%256)*16 +: 16] = 16'(xr[u][i]);
    for (int v = 0; v <= NVX; v++) hbm.mem[PTR_BASE + v/128][(v%128)*32 +: 32] = 32'(cptr[v]);
    for (int i = 0; i < e; i++) hbm.mem[IDX_BASE + i/128][(i%128)*32 +: 32] = 32'(ridx[i]);
  endtask

  task automatic load_weights();
    for (int g = 0; g < 2; g++)
      for (int j = 0; j < D; j++)
        for (int t = 0; t < F_IN + 2; t++) begin
          @(negedge clk);
          wb_wr_en = 1; wb_wr_bank = 6'(j); wb_wr_addr = TB_WAW'(WBASE[g] + t);
          wb_wr_data = 16'((t < F_IN) ? wt[g][j][t] : (t == F_IN) ? as[g][j] : ad[g][j]);
        end
    @(negedge clk);
    wb_wr_en = 0;
  endtask

  function automatic void fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endfunction

  task automatic run_job(int jn, int g, int vf, int vc, int k, bit elu, bit newg);
    int kc, n_edges, n_pr, n_direct, n_keep, n_disc, n_evict, n_ret, n_reuse, n_fetch;
    if (newg) for (int u = 0; u < NVX; u++) bm[u] = 0;
    for (int v = 0; v < NVX; v++) hbm.mem[OUT_BASE + v] = '1;
    @(negedge clk);
    cfg = '0;
    cfg.v_first = vf; cfg.v_count = vc;
    cfg.ptr_base = HBM_AW'(PTR_BASE); cfg.idx_base = HBM_AW'(IDX_BASE);
    cfg.feat_base = '0; cfg.out_base = HBM_AW'(OUT_BASE);
    cfg.feat_lines = 8'(FL); cfg.f_in = 16'(F_IN); cfg.w_base = 16'(WBASE[g]);
    cfg.k = 8'(k); cfg.elu = elu; cfg.new_graph = newg;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);

    kc = (k < 1) ? 1 : (k > TB_RD) ? TB_RD : k;
    n_edges = 0; n_pr = 0; n_direct = 0; n_keep = 0; n_disc = 0; n_evict = 0; n_ret = 0;
    n_reuse = 0; n_fetch = 0;
    for (int v = vf; v < vf + vc; v++) begin
      int dg, kp, ds, ev;
      int ids [$];
      real wsum, tol, out [D], num [D];
      real w [$];
      logic [LINE_W-1:0] line;
      dg = cptr[v+1] - cptr[v];
      n_edges += dg;
      n_fetch++;                                   // h'_v
      for (int e = cptr[v]; e < cptr[v+1]; e++) begin
        if (bm[ridx[e]]) n_reuse++;
        else begin bm[ridx[e]] = 1; n_fetch++; end
      end
      if (dg > k) begin
        n_pr++;
        heap_run(g, v, kc, ids, kp, ds, ev);
        n_keep += kp; n_disc += ds; n_evict += ev; n_ret += ids.size();
      end else begin
        ids.delete();
        for (int e = cptr[v]; e < cptr[v+1]; e++) ids.push_back(ridx[e]);
        n_direct += dg;
      end
      n_fetch += ids.size();
      if (dg == 0) n_deg0++;
      // reference output
      wsum = 0;
      for (int j = 0; j < D; j++) num[j] = 0;
      foreach (ids[q]) begin
        int x;
        real lr, wq;
        x = ths[g][ids[q]] + thd[g][v];
        lr = (x >= 0) ? real'(x) : real'(x) / 4.0;
        wq = $exp(lr / 256.0);
        w.push_back(wq);
        wsum += wq;
        for (int j = 0; j < D; j++) num[j] += wq * real'(hp[g][ids[q]][j]) / 256.0;
      end
      for (int j = 0; j < D; j++) out[j] = (wsum == 0) ? 0.0 : num[j] / wsum;
      tol = 3.0 / 256.0;
      foreach (ids[q]) begin
        real dev;
        dev = 0;
        for (int j = 0; j < D; j++) begin
          real dd;
          dd = real'(hp[g][ids[q]][j]) / 256.0 - out[j];
          if (dd < 0) dd = -dd;
          if (dd > dev) dev = dd;
        end
        tol += (2.0 / 256.0 + 0.008 * w[q]) * dev / wsum;
      end
      line = hbm.mem[OUT_BASE + v];
      for (int j = 0; j < D; j++) begin
        real ex, got, df;
        ex = out[j];
        if (elu && ex < 0) begin ex = $exp(ex) - 1.0; n_elu_neg++; end
        got = real'($signed(line[j*16 +: 16])) / 256.0;
        df = got - ex;
        if (df < 0) df = -df;
        checks++; n_outputs++;
        if ((dg == 0 && line[j*16 +: 16] != 0) || df > tol + (elu ? 2.0 / 256.0 : 0.0))
          fail($sformatf("job %0d target %0d (deg %0d) lane %0d: got %f expected %f tol %f", jn, v, dg, j, got, ex, tol));
      end
      checks++;
      if (line[LINE_W-1:D*16] != '0) fail($sformatf("job %0d target %0d: unused bits of the output line set", jn, v));
    end
    // outputs outside the target range untouched
    for (int v = 0; v < NVX; v++) if (v < vf || v >= vf + vc) begin
      checks++;
      if (hbm.mem[OUT_BASE + v] != '1) fail($sformatf("job %0d wrote output of non-target %0d", jn, v));
    end
    // event counters with a closed-form expectation
    checks += 10;
    if (int'(perf.targets) != vc)          fail($sformatf("job %0d targets %0d", jn, perf.targets));
    if (int'(perf.edges) != n_edges)       fail($sformatf("job %0d edges %0d expected %0d", jn, perf.edges, n_edges));
    if (int'(perf.pruned_targets) != n_pr) fail($sformatf("job %0d pruned targets %0d expected %0d", jn, perf.pruned_targets, n_pr));
    if (int'(perf.direct_aggs) != n_direct) fail($sformatf("job %0d direct aggs %0d expected %0d", jn, perf.direct_aggs, n_direct));
    if (int'(perf.prune_keep) != n_keep)   fail($sformatf("job %0d keeps %0d expected %0d", jn, perf.prune_keep, n_keep));
    if (int'(perf.prune_discard) != n_disc) fail($sformatf("job %0d discards %0d expected %0d", jn, perf.prune_discard, n_disc));
    if (int'(perf.prune_evict) != n_evict) fail($sformatf("job %0d evictions %0d expected %0d", jn, perf.prune_evict, n_evict));
    if (int'(perf.retained_aggs) != n_ret) fail($sformatf("job %0d retained aggs %0d expected %0d", jn, perf.retained_aggs, n_ret));
    if (int'(perf.coef_reuse) != n_reuse)  fail($sformatf("job %0d coefficient reuses %0d expected %0d", jn, perf.coef_reuse, n_reuse));
    if (int'(perf.projections + perf.cache_hits) != n_fetch)
      fail($sformatf("job %0d feature fetches %0d expected %0d", jn, perf.projections + perf.cache_hits, n_fetch));
    $display("job %0d: targets %0d edges %0d proj %0d hits %0d reuse %0d direct %0d pruned %0d keep %0d disc %0d evict %0d ret %0d stalls %0d waits %0d cevict %0d",
             jn, perf.targets, perf.edges, perf.projections, perf.cache_hits, perf.coef_reuse, perf.direct_aggs,
             perf.pruned_targets, perf.prune_keep, perf.prune_discard, perf.prune_evict, perf.retained_aggs,
             perf.line_stalls, perf.edge_waits, perf.cache_evicts);
    tot.targets += perf.targets;         tot.edges += perf.edges;
    tot.projections += perf.projections; tot.cache_hits += perf.cache_hits;
    tot.coef_reuse += perf.coef_reuse;   tot.direct_aggs += perf.direct_aggs;
    tot.pruned_targets += perf.pruned_targets; tot.prune_keep += perf.prune_keep;
    tot.prune_discard += perf.prune_discard;   tot.prune_evict += perf.prune_evict;
    tot.retained_aggs += perf.retained_aggs;   tot.line_stalls += perf.line_stalls;
    tot.edge_waits += perf.edge_waits;   tot.cache_evicts += perf.cache_evicts;
  endtask

  function automatic void need(string what, int n);
    checks++;
    if (n == 0) fail($sformatf("mechanism never happened: %s", what));
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cfg = '0; wb_wr_en = 0; wb_wr_bank = 0; wb_wr_addr = 0; wb_wr_data = 0;
    tot = '0;
    #1;
    build_data();
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    run_job(0, 0, 0, NVX, 4, 1'b0, 1'b1);
    run_job(1, 0, 20, NVX - 20, 8, 1'b1, 1'b0);
    run_job(2, 1, 0, 16, 2, 1'b0, 1'b1);
    need("feature projection", tot.projections);
    need("projection stall for a feature line", tot.line_stalls);
    need("feature-cache hit", tot.cache_hits);
    need("feature-cache LFU eviction", tot.cache_evicts);
    need("theta_u* reuse through the bitmap", tot.coef_reuse);
    need("aggregation without pruning", tot.direct_aggs);
    need("pruned target", tot.pruned_targets);
    need("neighbour kept by the pruner", tot.prune_keep);
    need("neighbour discarded by the pruner", tot.prune_discard);
    need("retained neighbour replaced", tot.prune_evict);
    need("aggregation of a retained neighbour", tot.retained_aggs);
    need("target without neighbours", n_deg0);
    need("ELU on a negative value", n_elu_neg);
    $display("outputs checked %0d, edge-buffer wait cycles %0d", n_outputs, tot.edge_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
