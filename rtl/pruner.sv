// pruner: NUM_UNITS basic pruning units (128 in the source design), so that
// many target vertices can be pruned at the same time.
//
// A neighbour coefficient arrives tagged with the unit of its target vertex
// (in_unit) and goes to that unit only; in_ready is that unit's ready. The
// decision of a unit is returned one cycle after acceptance on dec_*, with
// dec_unit naming the unit. start_valid/start_unit empties one unit's
// retention domain and sets its threshold k. A read-out port selects any
// unit's entry (rd_unit, rd_idx) and size for neighbour aggregation.
//
// Each unit handles k up to RD_DEPTH. The source design also lets adjacent
// units join their retention domains for larger K; that is not built here.
module pruner
  import ade_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 128,
  parameter int unsigned K_DEFAULT = 50,
  parameter int unsigned RD_DEPTH  = 2 * K_DEFAULT,
  parameter int unsigned VID_W     = 17,
  localparam int unsigned UW = (NUM_UNITS > 1) ? $clog2(NUM_UNITS) : 1,
  localparam int unsigned SW = $clog2(RD_DEPTH + 1),
  localparam int unsigned IW = $clog2(RD_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start_valid,
  input  logic [UW-1:0]            start_unit,
  input  logic [SW-1:0]            k,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [UW-1:0]            in_unit,
  input  logic signed [ade_pkg::DATA_W-1:0] in_theta,
  input  logic [VID_W-1:0]         in_id,
  output logic                     dec_valid,
  output logic [UW-1:0]            dec_unit,
  output logic                     dec_keep,
  output logic                     dec_evict,
  output logic [VID_W-1:0]         evict_id,
  output logic [NUM_UNITS-1:0]     unit_busy,
  input  logic [UW-1:0]            rd_unit,
  input  logic [IW-1:0]            rd_idx,
  output logic signed [ade_pkg::DATA_W-1:0] rd_theta,
  output logic [VID_W-1:0]         rd_id,
  output logic [SW-1:0]            rd_size
);

  logic                             u_ready  [NUM_UNITS];
  logic                             u_dvalid [NUM_UNITS];
  logic                             u_keep   [NUM_UNITS];
  logic                             u_evict  [NUM_UNITS];
  logic [VID_W-1:0]                 u_eid    [NUM_UNITS];
  logic [SW-1:0]                    u_size   [NUM_UNITS];
  logic signed [ade_pkg::DATA_W-1:0] u_rth   [NUM_UNITS];
  logic [VID_W-1:0]                 u_rid    [NUM_UNITS];

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    pruning_unit #(.K_DEFAULT(K_DEFAULT), .RD_DEPTH(RD_DEPTH), .VID_W(VID_W)) u_pu (
      .clk, .rst_n,
      .start    (start_valid && start_unit == UW'(u)),
      .k,
      .in_valid (in_valid && in_unit == UW'(u)),
      .in_ready (u_ready[u]),
      .in_theta, .in_id,
      .dec_valid(u_dvalid[u]),
      .dec_keep (u_keep[u]),
      .dec_evict(u_evict[u]),
      .evict_id (u_eid[u]),
      .size     (u_size[u]),
      .busy     (unit_busy[u]),
      .rd_idx,
      .rd_theta (u_rth[u]),
      .rd_id    (u_rid[u])
    );
  end

  assign in_ready = u_ready[in_unit];

  // the unit that accepted last cycle reports its decision now
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dec_unit <= '0;
    else if (in_valid && in_ready) dec_unit <= in_unit;
  end

  assign dec_valid = u_dvalid[dec_unit];
  assign dec_keep  = u_keep[dec_unit];
  assign dec_evict = u_evict[dec_unit];
  assign evict_id  = u_eid[dec_unit];
  assign rd_theta  = u_rth[rd_unit];
  assign rd_id     = u_rid[rd_unit];
  assign rd_size   = u_size[rd_unit];

endmodule
