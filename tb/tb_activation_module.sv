// tb_activation_module: self-checking test of the activation module (4 lanes).
// LeakyReLU is checked exactly, exp and ELU against real-valued exp() within
// 0.5 % + 2 LSB, the softmax sum against the sum of the masked lanes, and
// NORM against integer division. Also checks the one-cycle latency.
module tb_activation_module;
  import ade_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid_in, valid_out;
  act_op_e op;
  logic [L-1:0] lane_mask;
  logic signed [31:0] x [L];
  logic signed [15:0] y [L];
  logic signed [31:0] sum;

  activation_module #(.LANES(L)) dut (.clk, .rst_n, .valid_in, .op, .lane_mask, .x, .y, .valid_out, .sum);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(act_op_e o, logic [L-1:0] m);
    @(negedge clk);
    valid_in = 1; op = o; lane_mask = m;
    @(negedge clk);
    valid_in = 0;
    checks++;
    if (!valid_out) begin failures++; $display("valid_out missing"); end
  endtask

  task automatic near(string what, real got, real exp, real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("%s: got %f expected %f", what, got, exp);
    end
  endtask

  longint run_sum;

  initial begin
    valid_in = 0; op = ACT_LRELU; lane_mask = 0;
    for (int l = 0; l < L; l++) x[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    issue(ACT_CLR_SUM, '0);
    checks++; if (sum != 0) failures++;
    run_sum = 0;
    for (int it = 0; it < 40; it++) begin
      // LeakyReLU
      for (int l = 0; l < L; l++) x[l] = 32'($urandom % 4000) - 32'sd2000;
      issue(ACT_LRELU, '0);
      for (int l = 0; l < L; l++) begin
        longint e;
        e = x[l] >= 0 ? longint'(x[l]) : longint'(x[l]) >>> 2;
        checks++;
        if (y[l] != 16'(e)) begin failures++; $display("LRELU x=%0d y=%0d exp=%0d", x[l], y[l], e); end
      end
      // exp with softmax sum on lanes 0 and 2
      for (int l = 0; l < L; l++) x[l] = 32'($urandom % 2048) - 32'sd1024;   // -4 .. 4
      issue(ACT_EXP, 4'b0101);
      for (int l = 0; l < L; l++) begin
        real e;
        e = $exp(real'(x[l]) / 256.0) * 256.0;
        near("EXP", real'(y[l]), e, e * 0.005 + 2.0);
      end
      run_sum += longint'(y[0]) + longint'(y[2]);
      checks++;
      if (longint'(sum) != run_sum) begin failures++; $display("sum %0d expected %0d", sum, run_sum); end
      // ELU
      for (int l = 0; l < L; l++) x[l] = 32'($urandom % 2048) - 32'sd1024;
      issue(ACT_ELU, '0);
      for (int l = 0; l < L; l++) begin
        real e;
        e = x[l] >= 0 ? real'(x[l]) : ($exp(real'(x[l]) / 256.0) - 1.0) * 256.0;
        near("ELU", real'(y[l]), e, 3.0);
      end
    end
    // NORM: x at 16 fraction bits divided by the sum (8 fraction bits)
    for (int l = 0; l < L; l++) x[l] = 32'($urandom % 2000000) - 32'sd1000000;
    issue(ACT_NORM, '0);
    for (int l = 0; l < L; l++) begin
      longint e;
      e = longint'(x[l]) / run_sum;
      checks++;
      if (longint'(y[l]) != e) begin failures++; $display("NORM x=%0d y=%0d exp=%0d", x[l], y[l], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
