// tb_edge_buffer: self-checking test of the edge FIFO (depth 8). Random
// pushes and pops against a queue model, covering full, empty, show-ahead
// data, the occupancy count and flush.
module tb_edge_buffer;
  localparam int DEP = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush, push, pop, full, empty;
  logic [31:0] din, dout;
  logic [3:0] count;
  logic [31:0] q [$];
  int nfull = 0;

  edge_buffer #(.DEPTH(DEP)) dut (.clk, .rst_n, .flush, .push, .din, .full, .pop, .dout, .empty, .count);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == DEP) || empty != (q.size() == 0) || int'(count) != q.size() ||
          (q.size() != 0 && dout != q[0])) begin
        failures++; $display("it %0d: full %0d empty %0d count %0d size %0d", it, full, empty, count, q.size());
      end
      if (full) nfull++;
      flush = (it % 500) == 499;
      push = ($urandom % 100) < (it < 750 ? 70 : 35);
      pop  = ($urandom % 100) < 50;
      din  = $urandom;
      @(posedge clk);
      if (flush) q.delete();
      else begin
        logic [31:0] d; d = din;
        if (pop && q.size() != 0) void'(q.pop_front());
        if (push && !full) q.push_back(d);
      end
    end
    checks++; if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
