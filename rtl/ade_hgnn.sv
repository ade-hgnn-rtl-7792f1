// ade_hgnn: top level of the HGNN inference accelerator.
//
// Wires the blocks of the accelerator together:
//   dispatcher (with the redundancy-aware bitmap) -> sequences everything
//   computing_unit (NUM_ARRAYS reconfigurable PE arrays) -> projection,
//       coefficients and aggregation on arrays 0, 1 and 2
//   activation_module -> LeakyReLU / exp / softmax normalisation / ELU
//   pruner (128 min-heap pruning units) -> keeps the top-K neighbours
//   weight_buffer, attention_buffer, feature_cache, edge_buffer
//   memory_access_controller -> the HBM port and the edge-fetch engine
// HBM itself is off chip; its line port is brought out (hbm_*). Weights are
// loaded over the wb_* port before a job. A job (cfg) runs after a start
// pulse; done pulses at its end and perf holds the dispatcher's event counts.
// The current dispatcher drives arrays 0..2 only; the other arrays of the
// computing unit are held idle (en low) and are available to a dispatcher
// that runs several targets at once.
module ade_hgnn
  import ade_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS = 8,
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned NUM_UNITS  = 128,
  parameter int unsigned K_DEFAULT  = 50,
  parameter int unsigned RD_DEPTH   = 2 * K_DEFAULT,
  parameter int unsigned WB_DEPTH   = 19988,
  parameter int unsigned AB_DEPTH   = 104857,
  parameter int unsigned EB_DEPTH   = 314572,
  parameter int unsigned FC_LINES   = 40960,
  parameter int unsigned FC_WAYS    = 8,
  localparam int unsigned WAW = $clog2(WB_DEPTH),
  localparam int unsigned DBW = $clog2(D)
) (
  input  logic              clk,
  input  logic              rst_n,
  // job control
  input  logic              start,
  input  cfg_t              cfg,
  output logic              busy,
  output logic              done,
  output perf_t             perf,
  // weight load
  input  logic              wb_wr_en,
  input  logic [DBW-1:0]    wb_wr_bank,
  input  logic [WAW-1:0]    wb_wr_addr,
  input  logic signed [DATA_W-1:0] wb_wr_data,
  // HBM line port
  output logic              hbm_req,
  output logic              hbm_we,
  output logic [HBM_AW-1:0] hbm_addr,
  output logic [LINE_W-1:0] hbm_wdata,
  input  logic              hbm_gnt,
  input  logic              hbm_rvalid,
  input  logic [LINE_W-1:0] hbm_rdata
);

  localparam int unsigned NCU = 3;
  localparam int unsigned UW  = (NUM_UNITS > 1) ? $clog2(NUM_UNITS) : 1;
  localparam int unsigned SW  = $clog2(RD_DEPTH + 1);
  localparam int unsigned IW  = $clog2(RD_DEPTH);
  localparam int unsigned NAW = $clog2(AB_DEPTH);

  // dispatcher <-> memory access controller
  logic              d_req, d_we, d_gnt, d_rvalid;
  logic [HBM_AW-1:0] d_addr;
  logic [LINE_W-1:0] d_wdata, d_rdata;
  logic              ef_start, ef_busy;
  logic [HBM_AW-1:0] ef_base;
  logic [31:0]       ef_begin, ef_end;
  // edge buffer
  logic              eb_flush, eb_push, eb_full, eb_pop, eb_empty;
  logic [31:0]       eb_din, eb_dout;
  logic [$clog2(EB_DEPTH+1)-1:0] eb_count;
  // computing unit
  cu_mode_e                 d_mode [NCU];
  logic                     d_en [NCU], d_clr [NCU];
  logic signed [DATA_W-1:0] d_ext_a [NCU][ROWS][COLS];
  logic signed [DATA_W-1:0] d_ext_b [NCU][ROWS][COLS];
  logic signed [ACC_W-1:0]  d_result [NCU][ROWS][COLS];
  cu_mode_e                 cu_mode [NUM_ARRAYS];
  logic                     cu_en [NUM_ARRAYS], cu_clr [NUM_ARRAYS];
  logic signed [DATA_W-1:0] cu_ext_a [NUM_ARRAYS][ROWS][COLS];
  logic signed [DATA_W-1:0] cu_ext_b [NUM_ARRAYS][ROWS][COLS];
  logic signed [ACC_W-1:0]  cu_result [NUM_ARRAYS][ROWS][COLS];
  // weight buffer
  logic [WAW-1:0]           wb_rd_addr [D];
  logic signed [DATA_W-1:0] wb_rd_data [D];
  // attention buffer
  logic                     ab_wr_src, ab_wr_dst;
  logic [NAW-1:0]           ab_wr_addr, ab_rd_addr;
  logic signed [DATA_W-1:0] ab_wr_data, ab_rd_src, ab_rd_dst;
  // feature cache
  logic                fc_flush, fc_lk_touch, fc_lk_hit, fc_ins_valid, fc_ins_evict;
  logic [VID_W-1:0]    fc_lk_id, fc_ins_id, fc_ins_evict_id;
  logic [D*DATA_W-1:0] fc_lk_data, fc_ins_data;
  // activation
  logic                     act_valid, act_vout;
  act_op_e                  act_op;
  logic [D-1:0]             act_mask;
  logic signed [ACC_W-1:0]  act_x [D];
  logic signed [DATA_W-1:0] act_y [D];
  logic signed [ACC_W-1:0]  act_sum;
  // pruner
  logic                     pr_start_valid, pr_in_valid, pr_in_ready;
  logic                     pr_dec_valid, pr_dec_keep, pr_dec_evict;
  logic [UW-1:0]            pr_start_unit, pr_in_unit, pr_rd_unit, pr_dec_unit;
  logic [SW-1:0]            pr_k, pr_rd_size;
  logic [IW-1:0]            pr_rd_idx;
  logic signed [DATA_W-1:0] pr_in_theta, pr_rd_theta;
  logic [VID_W-1:0]         pr_in_id, pr_rd_id, pr_evict_id;
  logic [NUM_UNITS-1:0]     pr_busy;

  dispatcher #(
    .ROWS(ROWS), .COLS(COLS), .NUM_UNITS(NUM_UNITS), .RD_DEPTH(RD_DEPTH),
    .NV(AB_DEPTH), .WB_DEPTH(WB_DEPTH)
  ) u_dispatcher (
    .clk, .rst_n, .start, .cfg, .busy, .done, .perf,
    .d_req, .d_we, .d_addr, .d_wdata, .d_gnt, .d_rvalid, .d_rdata,
    .ef_start, .ef_base, .ef_begin, .ef_end,
    .eb_flush, .eb_pop, .eb_dout, .eb_empty,
    .cu_mode(d_mode), .cu_en(d_en), .cu_clr(d_clr),
    .cu_ext_a(d_ext_a), .cu_ext_b(d_ext_b), .cu_result(d_result),
    .wb_rd_addr, .wb_rd_data,
    .ab_wr_src, .ab_wr_dst, .ab_wr_addr, .ab_wr_data, .ab_rd_addr, .ab_rd_src,
    .fc_flush, .fc_lk_id, .fc_lk_touch, .fc_lk_hit, .fc_lk_data,
    .fc_ins_valid, .fc_ins_id, .fc_ins_data, .fc_ins_evict,
    .act_valid, .act_op, .act_mask, .act_x, .act_y,
    .pr_start_valid, .pr_start_unit, .pr_k, .pr_in_valid, .pr_in_ready,
    .pr_in_unit, .pr_in_theta, .pr_in_id, .pr_dec_valid, .pr_dec_keep,
    .pr_dec_evict, .pr_rd_unit, .pr_rd_idx, .pr_rd_theta, .pr_rd_id, .pr_rd_size
  );

  memory_access_controller #(.LINE_W(LINE_W), .HBM_AW(HBM_AW)) u_mac (
    .clk, .rst_n,
    .hbm_req, .hbm_we, .hbm_addr, .hbm_wdata, .hbm_gnt, .hbm_rvalid, .hbm_rdata,
    .d_req, .d_we, .d_addr, .d_wdata, .d_gnt, .d_rvalid, .d_rdata,
    .ef_start, .ef_base, .ef_begin, .ef_end, .ef_busy,
    .eb_push, .eb_din, .eb_full
  );

  edge_buffer #(.DEPTH(EB_DEPTH), .W(32)) u_edge_buffer (
    .clk, .rst_n, .flush(eb_flush), .push(eb_push), .din(eb_din), .full(eb_full),
    .pop(eb_pop), .dout(eb_dout), .empty(eb_empty), .count(eb_count)
  );

  weight_buffer #(.BANKS(D), .DEPTH(WB_DEPTH)) u_weight_buffer (
    .clk, .wr_en(wb_wr_en), .wr_bank(wb_wr_bank), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  attention_buffer #(.DEPTH(AB_DEPTH)) u_attention_buffer (
    .clk, .wr_src(ab_wr_src), .wr_dst(ab_wr_dst), .wr_addr(ab_wr_addr), .wr_data(ab_wr_data),
    .rd_addr(ab_rd_addr), .rd_src(ab_rd_src), .rd_dst(ab_rd_dst)
  );

  feature_cache #(.LINES(FC_LINES), .WAYS(FC_WAYS), .LINE_W(D*DATA_W), .VID_W(VID_W)) u_feature_cache (
    .clk, .rst_n, .flush(fc_flush),
    .lk_id(fc_lk_id), .lk_touch(fc_lk_touch), .lk_hit(fc_lk_hit), .lk_data(fc_lk_data),
    .ins_valid(fc_ins_valid), .ins_id(fc_ins_id), .ins_data(fc_ins_data),
    .ins_evict(fc_ins_evict), .ins_evict_id(fc_ins_evict_id)
  );

  activation_module #(.LANES(D)) u_activation (
    .clk, .rst_n, .valid_in(act_valid), .op(act_op), .lane_mask(act_mask),
    .x(act_x), .y(act_y), .valid_out(act_vout), .sum(act_sum)
  );

  pruner #(.NUM_UNITS(NUM_UNITS), .K_DEFAULT(K_DEFAULT), .RD_DEPTH(RD_DEPTH), .VID_W(VID_W)) u_pruner (
    .clk, .rst_n,
    .start_valid(pr_start_valid), .start_unit(pr_start_unit), .k(pr_k),
    .in_valid(pr_in_valid), .in_ready(pr_in_ready), .in_unit(pr_in_unit),
    .in_theta(pr_in_theta), .in_id(pr_in_id),
    .dec_valid(pr_dec_valid), .dec_unit(pr_dec_unit), .dec_keep(pr_dec_keep),
    .dec_evict(pr_dec_evict), .evict_id(pr_evict_id), .unit_busy(pr_busy),
    .rd_unit(pr_rd_unit), .rd_idx(pr_rd_idx), .rd_theta(pr_rd_theta),
    .rd_id(pr_rd_id), .rd_size(pr_rd_size)
  );

  // arrays 0..NCU-1 belong to the dispatcher, the rest idle
  always_comb begin
    for (int a = 0; a < NUM_ARRAYS; a++) begin
      if (a < NCU) begin
        cu_mode[a]  = d_mode[a];
        cu_en[a]    = d_en[a];
        cu_clr[a]   = d_clr[a];
        cu_ext_a[a] = d_ext_a[a];
        cu_ext_b[a] = d_ext_b[a];
      end else begin
        cu_mode[a] = MODE_SIMD;
        cu_en[a]   = 1'b0;
        cu_clr[a]  = 1'b0;
        for (int r = 0; r < ROWS; r++)
          for (int cc = 0; cc < COLS; cc++) begin
            cu_ext_a[a][r][cc] = '0;
            cu_ext_b[a][r][cc] = '0;
          end
      end
    end
    for (int a = 0; a < NCU; a++) d_result[a] = cu_result[a];
  end

  computing_unit #(.NUM_ARRAYS(NUM_ARRAYS), .ROWS(ROWS), .COLS(COLS)) u_cu (
    .clk, .rst_n, .mode(cu_mode), .en(cu_en), .clr(cu_clr),
    .ext_a(cu_ext_a), .ext_b(cu_ext_b), .result(cu_result)
  );

endmodule
