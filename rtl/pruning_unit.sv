// pruning_unit: one basic pruning unit of the pruner.
//
// Keeps, for one target vertex, the K neighbours with the largest source
// attention coefficient theta_u* (Algorithm 1 of the source design). The
// retention domain holds (theta, vertex ID) pairs arranged as a min-heap,
// element 0 being the smallest retained coefficient. An input comparator
// tests each new coefficient against element 0:
//   * retention domain not full (size < k): the pair is appended and sifted
//     up (compare with parent, swap) until the heap holds again;
//   * full and theta > rd[0] ("Greater"): rd[0] is overwritten, the old
//     neighbour is reported as evicted, and the new root is sifted down:
//     the smaller child (l/r comparator) is compared with the parent and
//     the swapper exchanges them, one heap level per cycle;
//   * full and theta <= rd[0] ("Less / Equal"): the neighbour is discarded.
// The register names, the comparators, the swapper and the greater /
// less-or-equal decision follow the source design's pruner figure; the
// sift-up for the not-full case, the handshake and the one-level-per-cycle
// timing are this design's own.
//
// The retention domain holds RD_DEPTH = 2*K_DEFAULT entries, so a runtime k
// up to RD_DEPTH is accepted. It is a register array read combinationally
// (parent and both children in one cycle).
//
// Interface and timing: start (one cycle) empties the heap and latches k.
// in_valid/in_ready accept one neighbour; in_ready is low while the
// heapifier runs. dec_valid pulses the cycle after acceptance with the
// decision (dec_keep, dec_evict, evict_id). A sift needs at most
// floor(log2(size)) + 1 busy cycles after acceptance. rd_idx reads entry
// rd_idx (valid below size) for aggregation once the target is done.
module pruning_unit
  import ade_pkg::*;
#(
  parameter int unsigned K_DEFAULT = 50,
  parameter int unsigned RD_DEPTH  = 2 * K_DEFAULT,
  parameter int unsigned VID_W     = 17,
  parameter int unsigned DATA_W    = ade_pkg::DATA_W,
  localparam int unsigned SW = $clog2(RD_DEPTH + 1),
  localparam int unsigned IW = $clog2(RD_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [SW-1:0]            k,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_theta,
  input  logic [VID_W-1:0]         in_id,
  output logic                     dec_valid,
  output logic                     dec_keep,
  output logic                     dec_evict,
  output logic [VID_W-1:0]         evict_id,
  output logic [SW-1:0]            size,
  output logic                     busy,
  input  logic [IW-1:0]            rd_idx,
  output logic signed [DATA_W-1:0] rd_theta,
  output logic [VID_W-1:0]         rd_id
);

  typedef enum logic [1:0] {S_IDLE, S_UP, S_DOWN} state_e;
  state_e state;

  // retention domain
  logic signed [DATA_W-1:0] rd_th [RD_DEPTH];
  logic [VID_W-1:0]         rd_vid [RD_DEPTH];

  logic [SW-1:0] k_reg;
  logic [31:0]   cur;

  // heapifier data path (combinational reads of the retention domain)
  logic [31:0]              l_idx, r_idx, p_idx, child_idx;
  logic                     l_ok, r_ok;
  logic signed [DATA_W-1:0] l_val, r_val, parent_val, child_val, cur_val;
  logic                     pick_r;

  assign l_idx      = 2 * cur + 1;
  assign r_idx      = 2 * cur + 2;
  assign p_idx      = (cur - 1) >> 1;
  assign l_ok       = l_idx < 32'(size);
  assign r_ok       = r_idx < 32'(size);
  assign l_val      = l_ok ? rd_th[l_idx[IW-1:0]] : '0;
  assign r_val      = r_ok ? rd_th[r_idx[IW-1:0]] : '0;
  assign cur_val    = rd_th[cur[IW-1:0]];
  assign parent_val = rd_th[p_idx[IW-1:0]];
  // l/r comparator and 0/1 mux: the smaller child (left on a tie)
  assign pick_r     = r_ok && (r_val < l_val);
  assign child_idx  = pick_r ? r_idx : l_idx;
  assign child_val  = pick_r ? r_val : l_val;

  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_IDLE) && !start;
  assign rd_theta = rd_th[rd_idx];
  assign rd_id    = rd_vid[rd_idx];

  logic accept;
  assign accept = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      size      <= '0;
      k_reg     <= SW'(K_DEFAULT);
      cur       <= '0;
      dec_valid <= 1'b0;
      dec_keep  <= 1'b0;
      dec_evict <= 1'b0;
      evict_id  <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (start) begin
        state <= S_IDLE;
        size  <= '0;
        if (k == 0)                    k_reg <= SW'(1);
        else if (32'(k) > RD_DEPTH)    k_reg <= SW'(RD_DEPTH);
        else                           k_reg <= k;
      end else begin
        unique case (state)
          S_IDLE: if (accept) begin
            dec_valid <= 1'b1;
            dec_evict <= 1'b0;
            if (size < k_reg) begin
              // not full: push at the end, then sift up
              rd_th[size[IW-1:0]]  <= in_theta;
              rd_vid[size[IW-1:0]] <= in_id;
              size     <= size + 1'b1;
              cur      <= 32'(size);
              dec_keep <= 1'b1;
              if (size != 0) state <= S_UP;
            end else if (in_theta > rd_th[0]) begin
              // greater than the root: replace it, then sift down
              rd_th[0]  <= in_theta;
              rd_vid[0] <= in_id;
              evict_id  <= rd_vid[0];
              dec_evict <= 1'b1;
              dec_keep  <= 1'b1;
              cur       <= '0;
              if (size > 1) state <= S_DOWN;
            end else begin
              // less than or equal to the root: discard
              dec_keep <= 1'b0;
            end
          end
          S_UP: begin
            if (cur != 0 && cur_val < parent_val) begin
              rd_th[cur[IW-1:0]]    <= parent_val;
              rd_vid[cur[IW-1:0]]   <= rd_vid[p_idx[IW-1:0]];
              rd_th[p_idx[IW-1:0]]  <= cur_val;
              rd_vid[p_idx[IW-1:0]] <= rd_vid[cur[IW-1:0]];
              cur <= p_idx;
              if (p_idx == 0) state <= S_IDLE;
            end else begin
              state <= S_IDLE;
            end
          end
          S_DOWN: begin
            if (l_ok && child_val < cur_val) begin
              rd_th[cur[IW-1:0]]        <= child_val;
              rd_vid[cur[IW-1:0]]       <= rd_vid[child_idx[IW-1:0]];
              rd_th[child_idx[IW-1:0]]  <= cur_val;
              rd_vid[child_idx[IW-1:0]] <= rd_vid[cur[IW-1:0]];
              cur <= child_idx;
            end else begin
              state <= S_IDLE;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
