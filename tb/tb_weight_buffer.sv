// tb_weight_buffer: self-checking test of the banked weight buffer (4 banks
// x 64 words). Writes random words through the load port, then reads all
// banks at once with a different address per bank and compares with a copy
// kept here.
module tb_weight_buffer;
  localparam int NB = 4, DEP = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en;
  logic [1:0] wr_bank;
  logic [5:0] wr_addr, rd_addr [NB];
  logic signed [15:0] wr_data, rd_data [NB];
  logic signed [15:0] ref_m [NB][DEP];

  weight_buffer #(.BANKS(NB), .DEPTH(DEP)) dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    for (int b = 0; b < NB; b++) rd_addr[b] = 0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < DEP; a++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 2'(b); wr_addr = 6'(a); wr_data = 16'($urandom);
      ref_m[b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 200; it++) begin
      for (int b = 0; b < NB; b++) rd_addr[b] = 6'($urandom);
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[b] !== ref_m[b][rd_addr[b]]) begin failures++; $display("bank %0d addr %0d", b, rd_addr[b]); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
