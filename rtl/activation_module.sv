// activation_module: vector unit for the non-linear functions of HGNNs.
//
// LANES lanes apply one operation per cycle (op, valid_in); results appear
// registered one cycle later with valid_out. The source design names the
// functions this module must perform (LeakyReLU, ELU, Softmax); the
// arithmetic below is this design's own.
//
//   ACT_LRELU    y = x            if x >= 0, else x >>> LRELU_SHIFT (slope 1/4)
//   ACT_ELU      y = x            if x >= 0, else exp(x) - 1
//   ACT_EXP      y = exp(x); lanes set in lane_mask add y into the softmax sum
//   ACT_NORM     y = x / sum      (x with 2*FRAC fraction bits, sum with FRAC,
//                                  so y has FRAC; 0 when sum is 0)
//   ACT_CLR_SUM  sum = 0
//
// x is an ACC_W-bit signed lane; for LRELU, ELU and EXP it is read with
// FRAC fraction bits. The number format is fixed by ade_pkg (Q7.8 operands,
// 32-bit accumulators); the exp constants assume FRAC = 8. y saturates to DATA_W bits. Softmax over a set of
// scores is ACT_CLR_SUM, one ACT_EXP per score, then ACT_NORM on the
// weighted sums; no maximum is subtracted, so exp saturates above about 4.85.
//
// exp(x) = 2^(x log2 e): the integer part of x*log2(e) becomes a shift and
// the fraction f uses 2^f ~ 1 + f - 0.3431 f(1-f), within 0.3 %.
module activation_module
  import ade_pkg::*;
#(
  parameter int unsigned LANES       = 64,
  parameter int unsigned LRELU_SHIFT = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_in,
  input  act_op_e                  op,
  input  logic [LANES-1:0]         lane_mask,
  input  logic signed [ACC_W-1:0]  x [LANES],
  output logic signed [DATA_W-1:0] y [LANES],
  output logic                     valid_out,
  output logic signed [ACC_W-1:0]  sum
);

  localparam logic signed [31:0] LOG2E_Q14 = 32'sd23638;  // log2(e) * 2^14
  localparam logic signed [31:0] CORR_Q8  = 32'sd88;   // 0.3431 * 256

  // exp of a FRAC=8 fixed-point value, saturated to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] fx_exp(input logic signed [ACC_W-1:0] xin);
    logic signed [31:0] xc, z, i;
    logic [31:0] f, corr, m;
    logic signed [63:0] r;
    if (xin > 32'sd2048)        xc = 32'sd2048;     // 8.0
    else if (xin < -32'sd8192)  xc = -32'sd8192;    // -32.0
    else                        xc = 32'(xin);
    z    = (xc * LOG2E_Q14) >>> 14;
    i    = z >>> 8;
    f    = 32'(z) & 32'hff;
    corr = (f * (32'd256 - f) * 32'(CORR_Q8)) >> 16;
    m    = 32'd256 + f - corr;
    if (i >= 32'sd7)       r = 64'sd32767;
    else if (i >= 0)       r = 64'(m) << i;
    else if (i > -32'sd24) r = 64'(m >> (-i));
    else                   r = 64'sd0;
    return sat16(r);
  endfunction

  logic signed [DATA_W-1:0] y_n [LANES];
  logic signed [ACC_W-1:0]  exp_sum;

  always_comb begin
    exp_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [DATA_W-1:0] e;
      logic signed [ACC_W-1:0]  lr;
      e  = fx_exp(x[l]);
      lr = (x[l] >= 0) ? x[l] : (x[l] >>> LRELU_SHIFT);
      unique case (op)
        ACT_LRELU: y_n[l] = sat16(64'(lr));
        ACT_ELU:   y_n[l] = x[l] >= 0 ? sat16(64'(x[l])) : sat16(64'(e) - 64'sd256);
        ACT_EXP:   y_n[l] = e;
        ACT_NORM:  y_n[l] = (sum == 0) ? '0 : sat16(64'(x[l]) / 64'(sum));
        default:   y_n[l] = '0;
      endcase
      if (lane_mask[l]) exp_sum = exp_sum + ACC_W'(e);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      sum       <= '0;
      for (int l = 0; l < LANES; l++) y[l] <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) begin
        for (int l = 0; l < LANES; l++) y[l] <= y_n[l];
        if (op == ACT_CLR_SUM)  sum <= '0;
        else if (op == ACT_EXP) sum <= sum + exp_sum;
      end
    end
  end

endmodule
