// dispatcher: central controller running the operation-fusion execution flow.
//
// The source design schedules neighbour aggregation edge by edge instead of
// stage by stage, and prunes unimportant neighbours on the fly. For each
// target vertex v of a job (cfg.v_first .. +v_count) this controller:
//   1. reads col_ptr[v], col_ptr[v+1] from HBM (degree = difference);
//   2. starts pruning unit (v mod NUM_UNITS) with threshold k, clears the
//      softmax sum and the aggregation array;
//   3. gets h'_v (feature cache, or a feature projection on array 0) and
//      theta_*v = a_dst . h'_v (array 1 plus an adder tree);
//   4. for each incoming edge u (popped from the edge buffer): gets
//      theta_u* from the attention buffer when the redundancy-aware bitmap
//      says it is known, else projects u and computes it (and sets the bit);
//      then
//        deg <= k: importance w = exp(LeakyReLU(theta_u* + theta_*v)) on the
//                  activation module and w * h'_u accumulated on array 2;
//        deg >  k: theta_u* goes to the pruner, which keeps or discards u;
//   5. for deg > k, aggregates the retained neighbours read back from the
//      retention domain in the same way;
//   6. normalises (softmax: divide by the sum of w), optionally applies
//      ELU, and writes h_v to HBM.
// The edge-fetch engine of the memory access controller streams all row
// indices of the job into the edge buffer from the start.
//
// Feature projection h' = W h runs on array 0 in independent systolic mode
// (rows): h[t] enters column 0 at step t and moves one PE per cycle, PE
// (r,c) computes output j = r*COLS + c and reads W[j][t-c] from its weight
// bank. It takes f_in + COLS enabled cycles plus a clear cycle; it pauses
// while the next raw-feature line is fetched. Results are scaled back to
// Q7.8 and inserted into the feature cache.
//
// The flow and the bitmap follow the source design. The sequencing (one
// target at a time, importance of retained neighbours computed after the
// last edge rather than during the heap update), the array mapping and the
// HBM layout are this design's own.
module dispatcher
  import ade_pkg::*;
#(
  parameter int unsigned ROWS      = 32,
  parameter int unsigned COLS      = 32,
  parameter int unsigned NUM_UNITS = 128,
  parameter int unsigned RD_DEPTH  = 100,
  parameter int unsigned NV        = 104857,
  parameter int unsigned WB_DEPTH  = 19988,
  localparam int unsigned NCU = 3,
  localparam int unsigned UW  = (NUM_UNITS > 1) ? $clog2(NUM_UNITS) : 1,
  localparam int unsigned SW  = $clog2(RD_DEPTH + 1),
  localparam int unsigned IW  = $clog2(RD_DEPTH),
  localparam int unsigned WAW = $clog2(WB_DEPTH),
  localparam int unsigned NAW = $clog2(NV),
  localparam int unsigned EPL = LINE_W / DATA_W   // raw values per line
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfg_t              cfg,
  output logic              busy,
  output logic              done,
  output perf_t             perf,
  // memory access controller
  output logic              d_req,
  output logic              d_we,
  output logic [HBM_AW-1:0] d_addr,
  output logic [LINE_W-1:0] d_wdata,
  input  logic              d_gnt,
  input  logic              d_rvalid,
  input  logic [LINE_W-1:0] d_rdata,
  output logic              ef_start,
  output logic [HBM_AW-1:0] ef_base,
  output logic [31:0]       ef_begin,
  output logic [31:0]       ef_end,
  // edge buffer
  output logic              eb_flush,
  output logic              eb_pop,
  input  logic [31:0]       eb_dout,
  input  logic              eb_empty,
  // computing unit, arrays 0 (projection), 1 (coefficients), 2 (aggregation)
  output cu_mode_e          cu_mode  [NCU],
  output logic              cu_en    [NCU],
  output logic              cu_clr   [NCU],
  output logic signed [DATA_W-1:0] cu_ext_a [NCU][ROWS][COLS],
  output logic signed [DATA_W-1:0] cu_ext_b [NCU][ROWS][COLS],
  input  logic signed [ACC_W-1:0]  cu_result [NCU][ROWS][COLS],
  // weight buffer
  output logic [WAW-1:0]           wb_rd_addr [D],
  input  logic signed [DATA_W-1:0] wb_rd_data [D],
  // attention buffer
  output logic                     ab_wr_src,
  output logic                     ab_wr_dst,
  output logic [NAW-1:0]           ab_wr_addr,
  output logic signed [DATA_W-1:0] ab_wr_data,
  output logic [NAW-1:0]           ab_rd_addr,
  input  logic signed [DATA_W-1:0] ab_rd_src,
  // feature cache
  output logic                fc_flush,
  output logic [VID_W-1:0]    fc_lk_id,
  output logic                fc_lk_touch,
  input  logic                fc_lk_hit,
  input  logic [D*DATA_W-1:0] fc_lk_data,
  output logic                fc_ins_valid,
  output logic [VID_W-1:0]    fc_ins_id,
  output logic [D*DATA_W-1:0] fc_ins_data,
  input  logic                fc_ins_evict,
  // activation module
  output logic                     act_valid,
  output act_op_e                  act_op,
  output logic [D-1:0]             act_mask,
  output logic signed [ACC_W-1:0]  act_x [D],
  input  logic signed [DATA_W-1:0] act_y [D],
  // pruner
  output logic                     pr_start_valid,
  output logic [UW-1:0]            pr_start_unit,
  output logic [SW-1:0]            pr_k,
  output logic                     pr_in_valid,
  input  logic                     pr_in_ready,
  output logic [UW-1:0]            pr_in_unit,
  output logic signed [DATA_W-1:0] pr_in_theta,
  output logic [VID_W-1:0]         pr_in_id,
  input  logic                     pr_dec_valid,
  input  logic                     pr_dec_keep,
  input  logic                     pr_dec_evict,
  output logic [UW-1:0]            pr_rd_unit,
  output logic [IW-1:0]            pr_rd_idx,
  input  logic signed [DATA_W-1:0] pr_rd_theta,
  input  logic [VID_W-1:0]         pr_rd_id,
  input  logic [SW-1:0]            pr_rd_size
);

  typedef enum logic [5:0] {
    S_IDLE, S_INIT, S_PTR_REQ, S_PTR_WAIT, S_JOB_EF, S_TGT, S_TSETUP,
    S_GF, S_FP_CLR, S_FP_RUN, S_FP_LREQ, S_FP_LWAIT, S_FP_DONE,
    S_CF0, S_CF1, S_CF2, S_EDGE, S_ESRC, S_EUSE, S_PUSH, S_PDEC,
    S_RET, S_IMP0, S_IMP1, S_AGG, S_FIN, S_NORM, S_ELU, S_WR, S_DONE
  } state_e;

  // pointer reads: which pointer is being fetched
  typedef enum logic [1:0] {P_JOB_LO, P_JOB_HI, P_TGT_LO, P_TGT_HI} ptr_e;

  state_e st, gf_ret, cf_ret;
  ptr_e   psel;
  cfg_t   c;

  logic [31:0] tcount, v, ptr_idx, p_lo, e_lo;
  logic [31:0] edges_left;
  logic        pruned, cf_dst;
  logic [31:0] t;               // projection step
  logic [31:0] fline_idx;
  logic        fline_ok;
  logic [LINE_W-1:0] fline;
  logic [VID_W-1:0]  gf_id, u;
  logic [D*DATA_W-1:0] hfeat;
  logic signed [DATA_W-1:0] theta_u, theta_v;
  logic [SW-1:0] ri;
  logic [NV-1:0] bitmap;

  // ---------------- combinational helpers ----------------
  logic [31:0] fp_line;
  assign fp_line = t / EPL;

  logic fp_need_line;
  assign fp_need_line = (t < 32'(c.f_in)) && (!fline_ok || fline_idx != fp_line);

  // projection result scaled to Q7.8
  logic [D*DATA_W-1:0] proj_line;
  always_comb begin
    for (int j = 0; j < D; j++)
      proj_line[j*DATA_W +: DATA_W] = sat16(64'(cu_result[0][j / COLS][j % COLS] >>> FRAC));
  end

  // coefficient adder tree
  logic signed [63:0] coef_sum;
  always_comb begin
    coef_sum = '0;
    for (int j = 0; j < D; j++)
      coef_sum = coef_sum + 64'(cu_result[1][j / COLS][j % COLS]);
  end

  // ---------------- computing-unit drive ----------------
  always_comb begin
    for (int a = 0; a < NCU; a++) begin
      cu_en[a]  = 1'b0;
      cu_clr[a] = 1'b0;
      for (int r = 0; r < ROWS; r++)
        for (int cc = 0; cc < COLS; cc++) begin
          cu_ext_a[a][r][cc] = '0;
          cu_ext_b[a][r][cc] = '0;
        end
    end
    cu_mode[0] = MODE_SYS_I_ROW;
    cu_mode[1] = MODE_SIMD;
    cu_mode[2] = MODE_SIMD;
    for (int j = 0; j < D; j++) wb_rd_addr[j] = '0;

    unique case (st)
      S_FP_CLR: begin
        cu_en[0] = 1'b1; cu_clr[0] = 1'b1;
      end
      S_FP_RUN: if (!fp_need_line) begin
        cu_en[0] = 1'b1;
        for (int j = 0; j < D; j++) begin
          wb_rd_addr[j] = WAW'(32'(c.w_base) + t - 32'(j % COLS));
          if (j % COLS == 0)
            cu_ext_a[0][j / COLS][0] = (t < 32'(c.f_in)) ? fline[(t % EPL) * DATA_W +: DATA_W] : '0;
          if (t >= 32'(j % COLS) && t - 32'(j % COLS) < 32'(c.f_in))
            cu_ext_b[0][j / COLS][j % COLS] = wb_rd_data[j];
        end
      end
      S_CF0: begin
        cu_en[1] = 1'b1; cu_clr[1] = 1'b1;
        for (int j = 0; j < D; j++) begin
          wb_rd_addr[j] = WAW'(32'(c.w_base) + 32'(c.f_in) + (cf_dst ? 32'd1 : 32'd0));
          cu_ext_a[1][j / COLS][j % COLS] = hfeat[j*DATA_W +: DATA_W];
          cu_ext_b[1][j / COLS][j % COLS] = wb_rd_data[j];
        end
      end
      S_CF1: cu_en[1] = 1'b1;
      S_TSETUP: begin
        cu_en[2] = 1'b1; cu_clr[2] = 1'b1;
      end
      S_AGG: begin
        cu_en[2] = 1'b1;
        for (int j = 0; j < D; j++) begin
          cu_ext_a[2][j / COLS][j % COLS] = hfeat[j*DATA_W +: DATA_W];
          cu_ext_b[2][j / COLS][j % COLS] = act_y[0];
        end
      end
      S_FIN: cu_en[2] = 1'b1;
      default: ;
    endcase
  end

  // ---------------- activation drive ----------------
  always_comb begin
    act_valid = 1'b0;
    act_op    = ACT_LRELU;
    act_mask  = '0;
    for (int j = 0; j < D; j++) act_x[j] = '0;
    unique case (st)
      S_TSETUP: begin act_valid = 1'b1; act_op = ACT_CLR_SUM; end
      S_IMP0: begin
        act_valid = 1'b1; act_op = ACT_LRELU;
        act_x[0]  = ACC_W'(theta_u) + ACC_W'(theta_v);
      end
      S_IMP1: begin
        act_valid = 1'b1; act_op = ACT_EXP; act_mask[0] = 1'b1;
        act_x[0]  = ACC_W'(act_y[0]);
      end
      S_NORM: begin
        act_valid = 1'b1; act_op = ACT_NORM;
        for (int j = 0; j < D; j++) act_x[j] = cu_result[2][j / COLS][j % COLS];
      end
      S_ELU: if (c.elu) begin
        act_valid = 1'b1; act_op = ACT_ELU;
        for (int j = 0; j < D; j++) act_x[j] = ACC_W'(act_y[j]);
      end
      default: ;
    endcase
  end

  // ---------------- other combinational outputs ----------------
  logic [D*DATA_W-1:0] y_line;
  always_comb for (int j = 0; j < D; j++) y_line[j*DATA_W +: DATA_W] = act_y[j];

  assign busy      = (st != S_IDLE);
  assign d_req     = (st == S_PTR_REQ) || (st == S_FP_LREQ) || (st == S_WR);
  assign d_we      = (st == S_WR);
  assign d_wdata   = LINE_W'(y_line);
  always_comb begin
    unique case (st)
      S_PTR_REQ: d_addr = HBM_AW'(c.ptr_base + HBM_AW'(ptr_idx / 128));
      S_FP_LREQ: d_addr = HBM_AW'(c.feat_base + HBM_AW'(32'(gf_id) * 32'(c.feat_lines) + fp_line));
      S_WR:      d_addr = HBM_AW'(c.out_base + HBM_AW'(v));
      default:   d_addr = '0;
    endcase
  end

  assign ef_base  = c.idx_base;
  assign eb_pop   = (st == S_EDGE) && edges_left != 0 && !eb_empty;
  assign fc_lk_id    = gf_id;
  assign fc_lk_touch = (st == S_GF) && fc_lk_hit;
  assign fc_ins_valid = (st == S_FP_DONE);
  assign fc_ins_id    = gf_id;
  assign fc_ins_data  = proj_line;

  assign ab_rd_addr = NAW'(u);
  assign ab_wr_addr = cf_dst ? NAW'(v) : NAW'(u);
  assign ab_wr_data = sat16(coef_sum >>> FRAC);
  assign ab_wr_src  = (st == S_CF2) && !cf_dst;
  assign ab_wr_dst  = (st == S_CF2) && cf_dst;

  assign pr_start_valid = (st == S_TSETUP);
  assign pr_start_unit  = UW'(v % NUM_UNITS);
  assign pr_k           = SW'(c.k);
  assign pr_in_valid    = (st == S_PUSH);
  assign pr_in_unit     = UW'(v % NUM_UNITS);
  assign pr_in_theta    = theta_u;
  assign pr_in_id       = u;
  assign pr_rd_unit     = UW'(v % NUM_UNITS);
  assign pr_rd_idx      = IW'(ri);

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; gf_ret <= S_IDLE; cf_ret <= S_IDLE; psel <= P_JOB_LO;
      c <= '0; tcount <= '0; v <= '0; ptr_idx <= '0; p_lo <= '0; e_lo <= '0;
      edges_left <= '0; pruned <= 1'b0; cf_dst <= 1'b0;
      t <= '0; fline_idx <= '0; fline_ok <= 1'b0; fline <= '0;
      gf_id <= '0; u <= '0; hfeat <= '0; theta_u <= '0; theta_v <= '0; ri <= '0;
      bitmap <= '0; perf <= '0; done <= 1'b0;
      ef_start <= 1'b0; ef_begin <= '0; ef_end <= '0; eb_flush <= 1'b0; fc_flush <= 1'b0;
    end else begin
      done     <= 1'b0;
      ef_start <= 1'b0;
      eb_flush <= 1'b0;
      fc_flush <= 1'b0;
      if (fc_ins_valid && fc_ins_evict) perf.cache_evicts <= perf.cache_evicts + 1;
      unique case (st)
        S_IDLE: if (start) begin
          c      <= cfg;
          tcount <= '0;
          perf   <= '0;
          st     <= S_INIT;
        end
        S_INIT: begin
          if (c.new_graph) begin
            bitmap   <= '0;
            fc_flush <= 1'b1;
          end
          eb_flush <= 1'b1;
          ptr_idx  <= c.v_first;
          psel     <= P_JOB_LO;
          st       <= S_PTR_REQ;
        end
        S_PTR_REQ: if (d_gnt) st <= S_PTR_WAIT;
        S_PTR_WAIT: if (d_rvalid) begin
          logic [31:0] w;
          w = d_rdata[(ptr_idx % 128) * 32 +: 32];
          unique case (psel)
            P_JOB_LO: begin e_lo <= w; ptr_idx <= c.v_first + c.v_count; psel <= P_JOB_HI; st <= S_PTR_REQ; end
            P_JOB_HI: begin ef_begin <= e_lo; ef_end <= w; st <= S_JOB_EF; end
            P_TGT_LO: begin p_lo <= w; ptr_idx <= v + 1; psel <= P_TGT_HI; st <= S_PTR_REQ; end
            default: begin
              edges_left <= w - p_lo;
              pruned     <= (w - p_lo) > 32'(c.k);
              st         <= S_TSETUP;
            end
          endcase
        end
        S_JOB_EF: begin
          ef_start <= 1'b1;
          st       <= S_TGT;
        end
        S_TGT: begin
          if (tcount == c.v_count) begin
            st <= S_DONE;
          end else begin
            v       <= c.v_first + tcount;
            ptr_idx <= c.v_first + tcount;
            psel    <= P_TGT_LO;
            st      <= S_PTR_REQ;
          end
        end
        S_TSETUP: begin
          // pruner start, sum clear and array-2 clear happen this cycle
          if (pruned) perf.pruned_targets <= perf.pruned_targets + 1;
          gf_id  <= VID_W'(v);
          gf_ret <= S_CF0;
          cf_dst <= 1'b1;
          cf_ret <= S_EDGE;
          st     <= S_GF;
        end
        // ----- get projected feature of gf_id into hfeat -----
        S_GF: begin
          if (fc_lk_hit) begin
            hfeat <= fc_lk_data;
            perf.cache_hits <= perf.cache_hits + 1;
            st <= gf_ret;
          end else begin
            st <= S_FP_CLR;
          end
        end
        S_FP_CLR: begin
          t        <= '0;
          fline_ok <= 1'b0;
          perf.projections <= perf.projections + 1;
          st       <= S_FP_RUN;
        end
        S_FP_RUN: begin
          if (fp_need_line) begin
            if (fline_ok) perf.line_stalls <= perf.line_stalls + 1;
            st <= S_FP_LREQ;
          end else if (t == 32'(c.f_in) + COLS - 1) begin
            st <= S_FP_DONE;
          end else begin
            t <= t + 1;
          end
        end
        S_FP_LREQ: if (d_gnt) st <= S_FP_LWAIT;
        S_FP_LWAIT: if (d_rvalid) begin
          fline     <= d_rdata;
          fline_idx <= fp_line;
          fline_ok  <= 1'b1;
          st        <= S_FP_RUN;
        end
        S_FP_DONE: begin
          hfeat <= proj_line;
          st    <= gf_ret;
        end
        // ----- attention coefficient of hfeat -----
        S_CF0: st <= S_CF1;
        S_CF1: st <= S_CF2;
        S_CF2: begin
          if (cf_dst) theta_v <= sat16(coef_sum >>> FRAC);
          else begin
            theta_u <= sat16(coef_sum >>> FRAC);
            bitmap[NAW'(u)] <= 1'b1;
          end
          st <= cf_ret;
        end
        // ----- edges of the target -----
        S_EDGE: begin
          if (edges_left == 0) begin
            // a pruned target waits for its heapifier to settle
            ri <= '0;
            if (!pruned)          st <= S_FIN;
            else if (pr_in_ready) st <= S_RET;
          end else if (!eb_empty) begin
            u          <= VID_W'(eb_dout);
            edges_left <= edges_left - 1;
            perf.edges <= perf.edges + 1;
            st         <= S_ESRC;
          end else begin
            perf.edge_waits <= perf.edge_waits + 1;
          end
        end
        S_ESRC: begin
          if (bitmap[NAW'(u)]) begin
            theta_u <= ab_rd_src;
            perf.coef_reuse <= perf.coef_reuse + 1;
            st <= S_EUSE;
          end else begin
            gf_id  <= u;
            gf_ret <= S_CF0;
            cf_dst <= 1'b0;
            cf_ret <= S_EUSE;
            st     <= S_GF;
          end
        end
        S_EUSE: begin
          if (pruned) st <= S_PUSH;
          else begin
            gf_id  <= u;
            gf_ret <= S_IMP0;
            perf.direct_aggs <= perf.direct_aggs + 1;
            st     <= S_GF;
          end
        end
        S_PUSH: if (pr_in_ready) st <= S_PDEC;
        S_PDEC: if (pr_dec_valid) begin
          if (pr_dec_keep) perf.prune_keep    <= perf.prune_keep + 1;
          else             perf.prune_discard <= perf.prune_discard + 1;
          if (pr_dec_evict) perf.prune_evict  <= perf.prune_evict + 1;
          st <= S_EDGE;
        end
        // ----- retained neighbours of a pruned target -----
        S_RET: begin
          if (ri == pr_rd_size) st <= S_FIN;
          else begin
            u       <= pr_rd_id;
            gf_id   <= pr_rd_id;
            theta_u <= pr_rd_theta;
            gf_ret  <= S_IMP0;
            perf.retained_aggs <= perf.retained_aggs + 1;
            st      <= S_GF;
          end
        end
        // ----- importance and aggregation of hfeat -----
        S_IMP0: st <= S_IMP1;
        S_IMP1: st <= S_AGG;
        S_AGG: begin
          if (pruned) begin
            ri <= ri + 1'b1;
            st <= S_RET;
          end else begin
            st <= S_EDGE;
          end
        end
        // ----- finish the target -----
        S_FIN:  st <= S_NORM;
        S_NORM: st <= S_ELU;
        S_ELU:  st <= S_WR;
        S_WR: if (d_gnt) begin
          tcount       <= tcount + 1;
          perf.targets <= perf.targets + 1;
          st           <= S_TGT;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // the ELU pass must see the normalised values one cycle after S_NORM
  assert property (@(posedge clk) disable iff (!rst_n) st == S_ELU |-> $past(st) == S_NORM);

endmodule
