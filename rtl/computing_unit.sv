// computing_unit: the unified reconfigurable computing unit.
//
// NUM_ARRAYS independent arrays of ROWS x COLS PEs (8 x 32 x 32 = 8192 PEs
// by default, the PE count of the source design; the split into arrays is
// this design's own). Each PE's left operand comes from a 2:1 mux whose
// input 1 is the left neighbour's pass_reg0 and input 0 an external operand
// ext_a; likewise the top operand mux chooses between the upper neighbour's
// pass_reg1 (1) and ext_b (0). The two select signals of an array (row
// signal, column signal) come from its mode, as in the source design's mode
// table:
//   MODE_SYS_I_ROW / MODE_SYS_I_COL  systolic (I): one direction systolic,
//                                    for matrix-vector products per row/column
//   MODE_SYS_C                       systolic (C): both directions, for
//                                    matrix-matrix products (output stationary)
//   MODE_SIMD                        every PE takes its own ext_a / ext_b,
//                                    for element-wise work
// Which mux input carries which source is this design's reading of the
// figure. Column-0 (row-0) PEs always take ext_a (ext_b).
//
// Timing is that of the PE: an operand moves one PE per enabled cycle and a
// product reaches result two enabled edges after it was presented.
module computing_unit
  import ade_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS = 8,
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned DATA_W     = ade_pkg::DATA_W,
  parameter int unsigned ACC_W      = ade_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  cu_mode_e                 mode   [NUM_ARRAYS],
  input  logic                     en     [NUM_ARRAYS],
  input  logic                     clr    [NUM_ARRAYS],
  input  logic signed [DATA_W-1:0] ext_a  [NUM_ARRAYS][ROWS][COLS],
  input  logic signed [DATA_W-1:0] ext_b  [NUM_ARRAYS][ROWS][COLS],
  output logic signed [ACC_W-1:0]  result [NUM_ARRAYS][ROWS][COLS]
);

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_arr
    logic row_sel, col_sel;
    logic signed [DATA_W-1:0] pass_a [ROWS][COLS];
    logic signed [DATA_W-1:0] pass_b [ROWS][COLS];

    assign row_sel = mode[a][1];
    assign col_sel = mode[a][0];

    for (genvar r = 0; r < ROWS; r++) begin : g_row
      for (genvar c = 0; c < COLS; c++) begin : g_col
        logic signed [DATA_W-1:0] in_a, in_b;
        if (c == 0) begin : g_ea
          assign in_a = ext_a[a][r][c];
        end else begin : g_ma
          assign in_a = row_sel ? pass_a[r][c-1] : ext_a[a][r][c];
        end
        if (r == 0) begin : g_eb
          assign in_b = ext_b[a][r][c];
        end else begin : g_mb
          assign in_b = col_sel ? pass_b[r-1][c] : ext_b[a][r][c];
        end
        pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
          .clk, .rst_n, .en(en[a]), .clr(clr[a]),
          .in_a, .in_b,
          .pass_a(pass_a[r][c]), .pass_b(pass_b[r][c]),
          .result(result[a][r][c])
        );
      end
    end
  end

endmodule
