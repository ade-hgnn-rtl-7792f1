// attention_buffer: per-vertex store of the decomposed attention coefficients.
//
// The attention score of edge u->v splits into theta_u* = a_src . h'_u and
// theta_*v = a_dst . h'_v, each fixed for a vertex within a semantic graph,
// so each is computed once and kept here for every later edge. One entry per
// vertex ID holds both (2 x 2 B); DEPTH = 104857 entries is the 0.40 MB of
// the source design. Direct indexing by vertex ID is this design's own.
// Writes are synchronous, reads combinational.
module attention_buffer #(
  parameter int unsigned DEPTH  = 104857,
  parameter int unsigned DATA_W = ade_pkg::DATA_W,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_src,
  input  logic                     wr_dst,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [DATA_W-1:0] wr_data,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [DATA_W-1:0] rd_src,
  output logic signed [DATA_W-1:0] rd_dst
);

  logic signed [DATA_W-1:0] th_src [DEPTH];
  logic signed [DATA_W-1:0] th_dst [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_src) th_src[wr_addr] <= wr_data;
    if (wr_dst) th_dst[wr_addr] <= wr_data;
  end

  assign rd_src = th_src[rd_addr];
  assign rd_dst = th_dst[rd_addr];

endmodule
