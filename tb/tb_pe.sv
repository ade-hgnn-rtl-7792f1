// tb_pe: self-checking test of one processing element.
// Drives random operand streams with random en and clr, and compares
// result and the pass registers with a cycle model written here.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, clr;
  logic signed [15:0] in_a, in_b, pass_a, pass_b;
  logic signed [31:0] result;

  pe dut (.clk, .rst_n, .en, .clr, .in_a, .in_b, .pass_a, .pass_b, .result);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic signed [15:0] m_a, m_b;
  logic               m_v, m_c;
  logic signed [31:0] m_r;

  initial begin
    en = 0; clr = 0; in_a = 0; in_b = 0;
    m_a = 0; m_b = 0; m_v = 0; m_c = 0; m_r = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en   = ($urandom % 4) != 0;
      clr  = ($urandom % 10) == 0;
      in_a = 16'($urandom);
      in_b = 16'($urandom);
      @(posedge clk);
      if (en) begin
        if (m_v) m_r = (m_c ? 32'sd0 : m_r) + 32'(m_a * m_b);
        m_a = in_a; m_b = in_b; m_v = 1; m_c = clr;
      end
      #1;
      checks++;
      if (result !== m_r || pass_a !== m_a || pass_b !== m_b) begin
        failures++;
        $display("cycle %0d: result %0d exp %0d pass %0d/%0d exp %0d/%0d", i, result, m_r, pass_a, pass_b, m_a, m_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
