// weight_buffer: on-chip store of the pre-trained model parameters.
//
// 2.44 MB in the source design; here BANKS banks of DEPTH DATA_W-bit words
// (64 x 19988 x 2 B = 2.44 MiB). Bank j holds everything output dimension j
// needs, so that every PE column can read its own weight in the same cycle:
// for a semantic graph whose parameters start at base B, bank j holds
// W[j][k] at B + k (k < F_IN), a_src[j] at B + F_IN and a_dst[j] at
// B + F_IN + 1. That layout and the banking are this design's own.
//
// One write port (host load) and one combinational read port per bank.
module weight_buffer #(
  parameter int unsigned BANKS  = 64,
  parameter int unsigned DEPTH  = 19988,
  parameter int unsigned DATA_W = ade_pkg::DATA_W,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [BW-1:0]            wr_bank,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [DATA_W-1:0] wr_data,
  input  logic [AW-1:0]            rd_addr [BANKS],
  output logic signed [DATA_W-1:0] rd_data [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic signed [DATA_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[wr_addr] <= wr_data;
    end
    assign rd_data[b] = (32'(rd_addr[b]) < DEPTH) ? mem[rd_addr[b]] : '0;
  end

endmodule
