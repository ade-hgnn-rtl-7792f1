// hbm_model: behavioural stand-in for the off-chip HBM (testbench only).
//
// A line-wide memory of DEPTH lines behind the accelerator's HBM port.
// A request is granted when hbm_gnt is high (GNT_EVERY = 1: always; N:
// every N-th cycle). Reads answer in order LAT cycles after the grant;
// writes take effect at the grant. Testbenches fill and inspect mem
// directly.
module hbm_model #(
  parameter int unsigned LINE_W    = 4096,
  parameter int unsigned AW        = 22,
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned LAT       = 4,
  parameter int unsigned GNT_EVERY = 1
) (
  input  logic              clk,
  input  logic              req,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [LINE_W-1:0] wdata,
  output logic              gnt,
  output logic              rvalid,
  output logic [LINE_W-1:0] rdata
);
  logic [LINE_W-1:0] mem [DEPTH];
  logic              pv [LAT];
  logic [LINE_W-1:0] pd [LAT];
  int unsigned       cyc = 0;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  end

  assign gnt    = (cyc % GNT_EVERY) == 0;
  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= req && gnt && !we;
    pd[0] <= (32'(addr) < DEPTH) ? mem[addr[$clog2(DEPTH)-1:0]] : '0;
    if (req && gnt && we && 32'(addr) < DEPTH) mem[addr[$clog2(DEPTH)-1:0]] <= wdata;
  end
endmodule
