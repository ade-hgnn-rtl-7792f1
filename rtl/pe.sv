// pe: one processing element of the reconfigurable computing unit.
//
// The PE holds two operand registers (op_reg0 from the left, op_reg1 from
// the top) that feed a multiply-accumulate unit, a result register that keeps
// the running sum, and two pass registers (pass_reg0 to the right neighbour,
// pass_reg1 to the neighbour below). The register set and MAC follow the
// architecture figure of the source design; the control (en, clr) and the
// timing are this design's own.
//
// Timing: when en is high, the operand and pass registers load in_a / in_b
// at the clock edge, so an operand moves one PE per cycle. In the same
// cycle the MAC adds the product of the operands loaded one cycle earlier:
// result <= (clr_q ? 0 : result) + op_reg0 * op_reg1, where clr_q is clr
// delayed with the operands. A product therefore reaches result two edges
// after its operands were presented. When en is low nothing changes.
module pe
  import ade_pkg::*;
#(
  parameter int unsigned DATA_W = ade_pkg::DATA_W,
  parameter int unsigned ACC_W  = ade_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] in_a,
  input  logic signed [DATA_W-1:0] in_b,
  output logic signed [DATA_W-1:0] pass_a,
  output logic signed [DATA_W-1:0] pass_b,
  output logic signed [ACC_W-1:0]  result
);

  logic signed [DATA_W-1:0] op_reg0, op_reg1, pass_reg0, pass_reg1;
  logic                     op_valid, op_clr;
  logic signed [2*DATA_W-1:0] prod;

  assign prod = op_reg0 * op_reg1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_reg0   <= '0;
      op_reg1   <= '0;
      pass_reg0 <= '0;
      pass_reg1 <= '0;
      op_valid  <= 1'b0;
      op_clr    <= 1'b0;
      result    <= '0;
    end else if (en) begin
      op_reg0   <= in_a;
      op_reg1   <= in_b;
      pass_reg0 <= in_a;
      pass_reg1 <= in_b;
      op_valid  <= 1'b1;
      op_clr    <= clr;
      if (op_valid)
        result <= (op_clr ? ACC_W'(0) : result) + ACC_W'(prod);
    end
  end

  assign pass_a = pass_reg0;
  assign pass_b = pass_reg1;

endmodule
