// ade_pkg: types and constants shared by the ADE-HGNN blocks.
//
// Numbers are signed fixed point: DATA_W-bit operands with FRAC fraction bits
// (Q7.8 by default) and ACC_W-bit accumulators that hold products at 2*FRAC
// fraction bits. The number format is this design's own choice; the source
// design does not state one for the accelerator.
package ade_pkg;

  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC   = 8;
  localparam int unsigned ACC_W  = 32;

  // Computing-unit modes. The two bits are the row select (horizontal mux)
  // and the column select (vertical mux); 1 takes the neighbour's pass
  // register, 0 takes the external operand.
  typedef enum logic [1:0] {
    MODE_SIMD      = 2'b00,  // row 0, column 0: every PE takes its own operands
    MODE_SYS_I_COL = 2'b01,  // row 0, column 1: independent systolic, columns
    MODE_SYS_I_ROW = 2'b10,  // row 1, column 0: independent systolic, rows
    MODE_SYS_C     = 2'b11   // row 1, column 1: combined 2-D systolic (MM)
  } cu_mode_e;

  // Activation-module operations.
  typedef enum logic [2:0] {
    ACT_LRELU   = 3'd0,  // y = x >= 0 ? x : x / 2^LRELU_SHIFT
    ACT_ELU     = 3'd1,  // y = x >= 0 ? x : exp(x) - 1
    ACT_EXP     = 3'd2,  // y = exp(x); masked lanes add into the sum
    ACT_NORM    = 3'd3,  // y = x / sum (x at 2*FRAC, sum at FRAC fraction bits)
    ACT_CLR_SUM = 3'd4   // sum = 0
  } act_op_e;

  // System sizes
  localparam int unsigned D      = 64;     // hidden (projected) dimension
  localparam int unsigned VID_W  = 17;     // vertex ID width
  localparam int unsigned LINE_W = 4096;   // HBM line: 512 B per cycle
  localparam int unsigned HBM_AW = 22;     // 2 GB of 512 B lines

  // Job configuration of the dispatcher, written by the host.
  // HBM layout: col_ptr and row_idx are arrays of 32-bit words, 128 per
  // line, starting at lines ptr_base and idx_base. The raw feature of
  // vertex u (f_in Q7.8 values, 256 per line) starts at line
  // feat_base + u * feat_lines. The result of target v goes to line
  // out_base + v (D values in the low D*16 bits).
  typedef struct packed {
    logic [31:0]       v_first;     // first target vertex
    logic [31:0]       v_count;     // number of target vertices
    logic [HBM_AW-1:0] ptr_base;
    logic [HBM_AW-1:0] idx_base;
    logic [HBM_AW-1:0] feat_base;
    logic [HBM_AW-1:0] out_base;
    logic [7:0]        feat_lines;
    logic [15:0]       f_in;        // raw feature length
    logic [15:0]       w_base;      // weight-buffer base of this semantic graph
    logic [7:0]        k;           // pruning threshold K
    logic              elu;         // apply ELU to the aggregated feature
    logic              new_graph;   // forget reuse state (bitmap, cache)
  } cfg_t;

  // Event counters of the dispatcher.
  typedef struct packed {
    logic [31:0] targets;         // target vertices finished
    logic [31:0] edges;           // edges taken from the edge buffer
    logic [31:0] projections;     // feature projections run
    logic [31:0] cache_hits;      // projected features found in the cache
    logic [31:0] coef_reuse;      // theta_u* reused through the bitmap
    logic [31:0] direct_aggs;     // aggregations without pruning (deg <= K)
    logic [31:0] pruned_targets;  // targets with deg > K
    logic [31:0] prune_keep;      // neighbours pushed into the heap
    logic [31:0] prune_discard;   // neighbours discarded by the comparator
    logic [31:0] prune_evict;     // retained neighbours replaced
    logic [31:0] retained_aggs;   // aggregations of retained neighbours
    logic [31:0] line_stalls;     // projection stalls for a feature line
    logic [31:0] edge_waits;      // cycles waiting for the edge buffer
    logic [31:0] cache_evicts;    // cache lines replaced
  } perf_t;

  // Saturate a wide signed value to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[DATA_W-1:0];
  endfunction

endpackage
