// tb_ade_hgnn: end-to-end test of the accelerator at a reduced size.
//
// Three PE arrays of 2 x 32 (enough for the 64-lane datapath), 4 pruning
// units with a retention domain of 8, a 16-line 2-way feature cache, a
// 64-entry edge buffer and 64-vertex attention buffer, so that pruning,
// cache eviction and edge-buffer back-pressure all occur on a 40-vertex
// graph. The stimulus, reference and checks are in ade_hgnn_tb_body.svh,
// which can equally drive an instance at other sizes (set TB_WB_DEPTH and
// TB_RD to the instance's weight-buffer and retention-domain depths).
module tb_ade_hgnn;
  import ade_pkg::*;
  localparam int TB_WB_DEPTH = 1024, TB_RD = 8;
  `include "ade_hgnn_tb_body.svh"

  ade_hgnn #(.NUM_ARRAYS(3), .ROWS(2), .COLS(32), .NUM_UNITS(4), .K_DEFAULT(4), .RD_DEPTH(TB_RD),
             .WB_DEPTH(TB_WB_DEPTH), .AB_DEPTH(64), .EB_DEPTH(64), .FC_LINES(16), .FC_WAYS(2)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .perf,
    .wb_wr_en, .wb_wr_bank, .wb_wr_addr, .wb_wr_data,
    .hbm_req, .hbm_we, .hbm_addr, .hbm_wdata, .hbm_gnt, .hbm_rvalid, .hbm_rdata);
endmodule
