// tb_feature_cache: self-checking test of the LFU feature cache with 16
// lines in 4-way sets and 8-bit vertex IDs. A reference model of the same
// organisation (set = id mod 4) and policy (same ID, else first free way,
// else least-used way, lowest way on a tie) predicts hits, data, evictions
// and the evicted ID for a random mix of lookups and inserts over 24
// vertices. Accesses are skewed so that some vertices are used far more
// often and must survive eviction. A flush in the middle is also checked.
module tb_feature_cache;
  localparam int LINES = 16, WAYS = 4, SETS = LINES / WAYS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush, lk_touch, lk_hit, ins_valid, ins_evict;
  logic [7:0] lk_id, ins_id, ins_evict_id;
  logic [31:0] lk_data, ins_data;

  feature_cache #(.LINES(LINES), .WAYS(WAYS), .LINE_W(32), .VID_W(8)) dut (.clk, .rst_n, .flush,
    .lk_id, .lk_touch, .lk_hit, .lk_data, .ins_valid, .ins_id, .ins_data, .ins_evict, .ins_evict_id);

  // reference
  bit          mv [LINES];
  int          mid [LINES];
  int          mc [LINES];
  logic [31:0] md [LINES];
  int nev = 0, nhit = 0, hot_kept = 0;

  function automatic int find(int id);
    for (int w = 0; w < WAYS; w++) if (mv[(id % SETS)*WAYS + w] && mid[(id % SETS)*WAYS + w] == id) return (id % SETS)*WAYS + w;
    return -1;
  endfunction

  function automatic int victim(int id, output bit ev);
    int s, best;
    s = (id % SETS) * WAYS;
    ev = 0;
    if (find(id) >= 0) return find(id);
    for (int w = 0; w < WAYS; w++) if (!mv[s + w]) return s + w;
    ev = 1; best = s;
    for (int w = 1; w < WAYS; w++) if (mc[s + w] < mc[best]) best = s + w;
    return best;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; lk_touch = 0; lk_id = 0; ins_valid = 0; ins_id = 0; ins_data = 0;
    for (int i = 0; i < LINES; i++) begin mv[i] = 0; mc[i] = 0; mid[i] = 0; md[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int id, ln, v;
      bit ev;
      @(negedge clk);
      // vertices 0..3 are hot; 4..23 are cold
      id = ($urandom % 3 == 0) ? $urandom % 4 : 4 + $urandom % 20;
      flush = (it == 1500);
      lk_id = 8'(id); lk_touch = 1; ins_valid = 0;
      #1;
      ln = find(id);
      checks++;
      if (lk_hit != (ln >= 0) || (ln >= 0 && lk_data != md[ln])) begin
        failures++; $display("it %0d id %0d: hit %0d expected %0d", it, id, lk_hit, ln >= 0);
      end
      @(posedge clk);
      if (flush) for (int i = 0; i < LINES; i++) mv[i] = 0;
      else if (ln >= 0 && mc[ln] < 255) mc[ln]++;
      if (ln >= 0) nhit++;
      if (ln < 0 && !flush) begin
        @(negedge clk);
        flush = 0; lk_touch = 0; ins_valid = 1; ins_id = 8'(id); ins_data = $urandom;
        v = victim(id, ev);
        #1;
        checks++;
        if (ins_evict != ev || (ev && int'(ins_evict_id) != mid[v])) begin
          failures++; $display("it %0d insert %0d: evict %0d/%0d expected %0d/%0d", it, id, ins_evict, ins_evict_id, ev, mid[v]);
        end
        if (ev) nev++;
        @(posedge clk);
        mv[v] = 1; mid[v] = id; mc[v] = 1; md[v] = ins_data;
      end
    end
    @(negedge clk);
    ins_valid = 0; lk_touch = 0; flush = 0;
    for (int h = 0; h < 4; h++) begin lk_id = 8'(h); #1; if (lk_hit) hot_kept++; end
    checks += 3;
    if (nev == 0)      begin failures++; $display("no eviction happened"); end
    if (nhit == 0)     begin failures++; $display("no hit happened"); end
    if (hot_kept != 4) begin failures++; $display("only %0d hot vertices still cached", hot_kept); end
    $display("evictions %0d hits %0d", nev, nhit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
