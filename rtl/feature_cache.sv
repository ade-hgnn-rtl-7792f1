// feature_cache: cache of projected feature vectors with LFU replacement.
//
// A line is one vertex's projected feature h'_u (LINE_W = 64 x 16 bits).
// LINES = 40960 lines of 128 B is the 5.00 MB of the source design, which
// also fixes the Least-Frequently-Used policy. Organisation (WAYS-way set
// associative, set = id mod SETS, tag = id / SETS) and the 8-bit saturating
// use counters are this design's own.
//
// Lookup is combinational: lk_id -> lk_hit, lk_data. lk_touch (with a hit)
// counts one use of that line. ins_valid writes ins_data for ins_id: an
// existing line for the same ID is overwritten, otherwise the victim is the
// first invalid way, else the way with the smallest use count (lowest way
// on a tie). ins_evict / ins_evict_id tell, in the insert cycle, whether a
// valid line of another vertex is being replaced. flush invalidates all.
module feature_cache #(
  parameter int unsigned LINES  = 40960,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned LINE_W = 1024,
  parameter int unsigned VID_W  = 17,
  localparam int unsigned SETS = LINES / WAYS,
  localparam int unsigned LW   = $clog2(LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic [VID_W-1:0]  lk_id,
  input  logic              lk_touch,
  output logic              lk_hit,
  output logic [LINE_W-1:0] lk_data,
  input  logic              ins_valid,
  input  logic [VID_W-1:0]  ins_id,
  input  logic [LINE_W-1:0] ins_data,
  output logic              ins_evict,
  output logic [VID_W-1:0]  ins_evict_id
);

  logic [LINE_W-1:0] data [LINES];
  logic [VID_W-1:0]  tag  [LINES];
  logic [7:0]        cnt  [LINES];
  logic [LINES-1:0]  valid;

  // lookup
  logic [31:0] lk_set, lk_tag, lk_line;
  always_comb begin
    lk_set  = 32'(lk_id) % SETS;
    lk_tag  = 32'(lk_id) / SETS;
    lk_hit  = 1'b0;
    lk_line = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && valid[lk_set*WAYS + w] && 32'(tag[lk_set*WAYS + w]) == lk_tag) begin
        lk_hit  = 1'b1;
        lk_line = lk_set*WAYS + w;
      end
    end
  end
  assign lk_data = data[lk_line[LW-1:0]];

  // victim choice for an insert
  logic [31:0] in_set, in_tag, vic_line;
  logic        in_hit, found_inv;
  logic [7:0]  min_cnt;
  always_comb begin
    in_set    = 32'(ins_id) % SETS;
    in_tag    = 32'(ins_id) / SETS;
    in_hit    = 1'b0;
    found_inv = 1'b0;
    vic_line  = in_set * WAYS;
    min_cnt   = 8'hff;
    for (int w = 0; w < WAYS; w++) begin
      if (valid[in_set*WAYS + w] && 32'(tag[in_set*WAYS + w]) == in_tag && !in_hit) begin
        in_hit   = 1'b1;
        vic_line = in_set*WAYS + w;
      end
    end
    if (!in_hit) begin
      for (int w = 0; w < WAYS; w++) begin
        if (!found_inv && !valid[in_set*WAYS + w]) begin
          found_inv = 1'b1;
          vic_line  = in_set*WAYS + w;
        end
      end
      if (!found_inv) begin
        for (int w = 0; w < WAYS; w++) begin
          if (w == 0 || cnt[in_set*WAYS + w] < min_cnt) begin
            min_cnt  = cnt[in_set*WAYS + w];
            vic_line = in_set*WAYS + w;
          end
        end
      end
    end
  end
  assign ins_evict    = ins_valid && !in_hit && !found_inv;
  assign ins_evict_id = VID_W'(32'(tag[vic_line[LW-1:0]]) * SETS + in_set);

  always_ff @(posedge clk) begin
    if (ins_valid) begin
      data[vic_line[LW-1:0]] <= ins_data;
      tag[vic_line[LW-1:0]]  <= VID_W'(in_tag);
    end
    if (ins_valid)
      cnt[vic_line[LW-1:0]] <= 8'd1;
    else if (lk_touch && lk_hit && cnt[lk_line[LW-1:0]] != 8'hff)
      cnt[lk_line[LW-1:0]] <= cnt[lk_line[LW-1:0]] + 8'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         valid <= '0;
    else if (flush)     valid <= '0;
    else if (ins_valid) valid[vic_line[LW-1:0]] <= 1'b1;
  end

endmodule
