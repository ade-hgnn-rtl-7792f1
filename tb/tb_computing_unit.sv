// tb_computing_unit: self-checking test of the reconfigurable computing unit
// on 2 arrays of 4 x 4 PEs. Checks each mode against products computed here:
//   MODE_SYS_C      C = A (4xN) * B (Nx4) with skewed inputs (output stationary)
//   MODE_SIMD       one independent product per PE
//   MODE_SYS_I_ROW  y_j = sum_k M[j][k] x[k], x streamed along each row
//   MODE_SYS_I_COL  the same with x streamed down each column
// and the cycle count of the systolic matrix product (N + R + C - 1 steps).
module tb_computing_unit;
  import ade_pkg::*;
  localparam int NA = 2, R = 4, C = 4, N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cu_mode_e mode [NA];
  logic en [NA], clr [NA];
  logic signed [15:0] ext_a [NA][R][C], ext_b [NA][R][C];
  logic signed [31:0] result [NA][R][C];

  computing_unit #(.NUM_ARRAYS(NA), .ROWS(R), .COLS(C)) dut (.clk, .rst_n, .mode, .en, .clr, .ext_a, .ext_b, .result);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [15:0] A [R][N], Bm [N][C], M [R*C][N], x [N];
  logic signed [15:0] sa [R][C], sb [R][C];
  int steps;

  task automatic zero();
    for (int a = 0; a < NA; a++) begin
      en[a] = 0; clr[a] = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin ext_a[a][r][c] = 0; ext_b[a][r][c] = 0; end
    end
  endtask

  task automatic clear_array(int a);
    @(negedge clk); zero(); en[a] = 1; clr[a] = 1;
    @(negedge clk); zero();
  endtask

  task automatic check(string what, int a, int r, int c, longint exp);
    checks++;
    if (result[a][r][c] !== 32'(exp)) begin
      failures++;
      $display("%s: PE(%0d,%0d,%0d) = %0d, expected %0d", what, a, r, c, result[a][r][c], exp);
    end
  endtask

  initial begin
    zero();
    mode[0] = MODE_SYS_C; mode[1] = MODE_SIMD;
    for (int r = 0; r < R; r++) for (int k = 0; k < N; k++) A[r][k] = 16'($urandom % 512) - 16'sd256;
    for (int k = 0; k < N; k++) for (int c = 0; c < C; c++) Bm[k][c] = 16'($urandom % 512) - 16'sd256;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin sa[r][c] = 16'($urandom); sb[r][c] = 16'($urandom); end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- systolic (C) matrix product on array 0, SIMD on array 1 ----
    clear_array(0);
    steps = 0;
    for (int t = 0; t < N + R + C - 1; t++) begin
      @(negedge clk);
      zero();
      en[0] = 1;
      for (int r = 0; r < R; r++) if (t - r >= 0 && t - r < N) ext_a[0][r][0] = A[r][t-r];
      for (int c = 0; c < C; c++) if (t - c >= 0 && t - c < N) ext_b[0][0][c] = Bm[t-c][c];
      if (t == 0) begin
        en[1] = 1; clr[1] = 1;
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin ext_a[1][r][c] = sa[r][c]; ext_b[1][r][c] = sb[r][c]; end
      end
      if (t == 1) en[1] = 1;
      steps++;
    end
    @(negedge clk); zero();
    checks++;
    if (steps != N + R + C - 1) failures++;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      longint s; s = 0;
      for (int k = 0; k < N; k++) s += A[r][k] * Bm[k][c];
      check("SYS_C", 0, r, c, s);
      check("SIMD", 1, r, c, longint'(sa[r][c]) * longint'(sb[r][c]));
    end

    // ---- systolic (I) rows, then columns, on array 1 ----
    for (int dir = 0; dir < 2; dir++) begin
      mode[1] = dir == 0 ? MODE_SYS_I_ROW : MODE_SYS_I_COL;
      for (int j = 0; j < R*C; j++) for (int k = 0; k < N; k++) M[j][k] = 16'($urandom % 512) - 16'sd256;
      for (int k = 0; k < N; k++) x[k] = 16'($urandom % 512) - 16'sd256;
      clear_array(1);
      for (int t = 0; t < N + C; t++) begin
        @(negedge clk);
        zero();
        en[1] = 1;
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
          int pos;
          pos = dir == 0 ? c : r;   // distance from the injection edge
          if (pos == 0 && t < N) begin
            if (dir == 0) ext_a[1][r][c] = x[t]; else ext_b[1][r][c] = x[t];
          end
          if (t - pos >= 0 && t - pos < N) begin
            if (dir == 0) ext_b[1][r][c] = M[r*C+c][t-pos]; else ext_a[1][r][c] = M[r*C+c][t-pos];
          end
        end
      end
      @(negedge clk); zero();
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        longint s; s = 0;
        for (int k = 0; k < N; k++) s += M[r*C+c][k] * x[k];
        check(dir == 0 ? "SYS_I_ROW" : "SYS_I_COL", 1, r, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
