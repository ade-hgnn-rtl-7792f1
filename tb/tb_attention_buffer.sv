// tb_attention_buffer: self-checking test of the attention-coefficient store
// (depth 32). Random writes to the source and destination halves, separately
// and together, with reads checked every cycle against a model.
module tb_attention_buffer;
  localparam int DEP = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_src, wr_dst;
  logic [4:0] wr_addr, rd_addr;
  logic signed [15:0] wr_data, rd_src, rd_dst;
  logic signed [15:0] ms [DEP], md [DEP];

  attention_buffer #(.DEPTH(DEP)) dut (.clk, .wr_src, .wr_dst, .wr_addr, .wr_data, .rd_addr, .rd_src, .rd_dst);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_src = 0; wr_dst = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int a = 0; a < DEP; a++) begin
      @(negedge clk); wr_src = 1; wr_dst = 1; wr_addr = 5'(a); wr_data = 16'(a);
      ms[a] = wr_data; md[a] = wr_data;
    end
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      wr_src = $urandom % 2; wr_dst = $urandom % 2; wr_addr = 5'($urandom); wr_data = 16'($urandom);
      rd_addr = 5'($urandom);
      #1;
      checks++;
      if (rd_src !== ms[rd_addr] || rd_dst !== md[rd_addr]) begin
        failures++; $display("addr %0d: %0d %0d expected %0d %0d", rd_addr, rd_src, rd_dst, ms[rd_addr], md[rd_addr]);
      end
      @(posedge clk);
      if (wr_src) ms[wr_addr] = wr_data;
      if (wr_dst) md[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
