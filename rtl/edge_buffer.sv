// edge_buffer: FIFO of edges waiting to be processed.
//
// Holds the source-vertex IDs (CSC row indices) that the memory access
// controller fetches ahead of the dispatcher. DEPTH = 314572 entries of
// 4 bytes is the 1.20 MB of the source design; the FIFO organisation is this
// design's own. Show-ahead: dout is the oldest entry whenever empty is low;
// pop removes it. push is ignored when full; flush empties the FIFO.
module edge_buffer #(
  parameter int unsigned DEPTH = 314572,
  parameter int unsigned W     = 32,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          push,
  input  logic [W-1:0]  din,
  output logic          full,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic [CW-1:0] count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign full    = (32'(count) == DEPTH);
  assign empty   = (count == 0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

endmodule
