// memory_access_controller: schedules traffic between the chip and HBM.
//
// The HBM port moves one LINE_W-bit line per request (4096 bits = 512 B per
// cycle at 1 GHz, the 512 GB/s of the source design). Two clients share it:
//   * the dispatcher (d_*): single-line reads (column pointers, raw
//     features) and writes (results); it has priority;
//   * the edge-fetch engine (ef_*): given the line base of the CSC row-index
//     array and an edge range [ef_begin, ef_end), it reads the lines that
//     hold those indices and pushes them, one 32-bit index per cycle, into
//     the edge buffer, pausing while the buffer is full.
// HBM answers reads in order (hbm_rvalid/hbm_rdata, any latency); a small
// FIFO of owner tags routes each answer to its client. A request is taken
// when hbm_req and hbm_gnt are both high. Each client keeps at most one read
// outstanding. All of this is this design's own: the source design only
// says that this controller schedules the on-chip/HBM interactions.
module memory_access_controller #(
  parameter int unsigned LINE_W = 4096,
  parameter int unsigned HBM_AW = 22,
  localparam int unsigned IDX_PER_LINE = LINE_W / 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // HBM
  output logic              hbm_req,
  output logic              hbm_we,
  output logic [HBM_AW-1:0] hbm_addr,
  output logic [LINE_W-1:0] hbm_wdata,
  input  logic              hbm_gnt,
  input  logic              hbm_rvalid,
  input  logic [LINE_W-1:0] hbm_rdata,
  // dispatcher
  input  logic              d_req,
  input  logic              d_we,
  input  logic [HBM_AW-1:0] d_addr,
  input  logic [LINE_W-1:0] d_wdata,
  output logic              d_gnt,
  output logic              d_rvalid,
  output logic [LINE_W-1:0] d_rdata,
  // edge-fetch engine
  input  logic              ef_start,
  input  logic [HBM_AW-1:0] ef_base,
  input  logic [31:0]       ef_begin,
  input  logic [31:0]       ef_end,
  output logic              ef_busy,
  output logic              eb_push,
  output logic [31:0]       eb_din,
  input  logic              eb_full
);

  // ---------------- edge-fetch engine ----------------
  typedef enum logic [1:0] {E_IDLE, E_REQ, E_WAIT, E_UNPACK} e_state_e;
  e_state_e          es;
  logic [31:0]       e_cur, e_end;
  logic [HBM_AW-1:0] e_base;
  logic [LINE_W-1:0] e_line;
  logic              e_req, e_gnt, e_rvalid;

  assign ef_busy = (es != E_IDLE);
  assign e_req   = (es == E_REQ);
  assign eb_din  = e_line[(e_cur % IDX_PER_LINE) * 32 +: 32];
  assign eb_push = (es == E_UNPACK) && !eb_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      es <= E_IDLE; e_cur <= '0; e_end <= '0; e_base <= '0; e_line <= '0;
    end else begin
      unique case (es)
        E_IDLE: if (ef_start) begin
          e_cur  <= ef_begin;
          e_end  <= ef_end;
          e_base <= ef_base;
          es     <= (ef_begin < ef_end) ? E_REQ : E_IDLE;
        end
        E_REQ:  if (e_gnt) es <= E_WAIT;
        E_WAIT: if (e_rvalid) begin
          e_line <= hbm_rdata;
          es     <= E_UNPACK;
        end
        E_UNPACK: if (!eb_full) begin
          e_cur <= e_cur + 1;
          if (e_cur + 1 >= e_end)                       es <= E_IDLE;
          else if ((e_cur + 1) % IDX_PER_LINE == 0)     es <= E_REQ;
        end
        default: es <= E_IDLE;
      endcase
    end
  end

  // ---------------- arbiter ----------------
  logic sel_d;
  assign sel_d     = d_req;
  assign hbm_req   = d_req || e_req;
  assign hbm_we    = sel_d ? d_we : 1'b0;
  assign hbm_addr  = sel_d ? d_addr : HBM_AW'(e_base + HBM_AW'(e_cur / IDX_PER_LINE));
  assign hbm_wdata = d_wdata;
  assign d_gnt     = sel_d && hbm_gnt;
  assign e_gnt     = !sel_d && e_req && hbm_gnt;

  // owner of each outstanding read: 1 = dispatcher, 0 = edge engine
  logic [3:0] tag_q;
  logic [2:0] tag_n;
  logic       tag_push, tag_val, tag_head;
  assign tag_push = hbm_req && hbm_gnt && !hbm_we;
  assign tag_val  = sel_d;
  assign tag_head = tag_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_q <= '0; tag_n <= '0;
    end else begin
      logic [3:0] q;
      logic [2:0] n;
      q = tag_q; n = tag_n;
      if (hbm_rvalid && n != 0) begin
        q = q >> 1; n = n - 1'b1;
      end
      if (tag_push && n < 3'd4) begin
        q[n[1:0]] = tag_val; n = n + 1'b1;
      end
      tag_q <= q; tag_n <= n;
    end
  end

  assign d_rvalid = hbm_rvalid && tag_n != 0 && tag_head;
  assign e_rvalid = hbm_rvalid && tag_n != 0 && !tag_head;
  assign d_rdata  = hbm_rdata;

  // HBM may only answer a read it was given
  assert property (@(posedge clk) disable iff (!rst_n) hbm_rvalid |-> tag_n != 0);

endmodule
