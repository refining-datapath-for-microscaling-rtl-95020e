// mxint_add: element-wise sum of two MXInt blocks (the residual "+" nodes of the encoder
// block, and the accumulator of the linear operators).
//
// The block with the smaller exponent is shifted right by the exponent difference (a shift
// of M+GUARD or more leaves only its sign), both are added with GUARD extra low bits, and the
// sum is renormalised to OUT_M bits by mxint_block_quant. Only one dynamic shift is needed per
// block because the exponent is shared. The paper names the operation; the guard bits and
// this alignment order are this design's choices. Purely combinational.
module mxint_add
  import mxint_pkg::*;
#(
  parameter int N     = 16,
  parameter int M     = ACT_M,  // input mantissa bits (both operands)
  parameter int OUT_M = ACT_M,
  parameter int GUARD = 2
) (
  input  logic [N-1:0][M-1:0]     a_man,
  input  exp_t                    a_exp,
  input  logic [N-1:0][M-1:0]     b_man,
  input  exp_t                    b_exp,
  output logic [N-1:0][OUT_M-1:0] y_man,
  output exp_t                    y_exp
);
  localparam int W = M + GUARD + 1;

  logic [N-1:0][W-1:0] sum;
  iexp_t               e_base;

  always_comb begin
    int unsigned d;
    logic a_big;
    a_big  = a_exp >= b_exp;
    d      = a_big ? int'(a_exp - b_exp) : int'(b_exp - a_exp);
    if (d > W) d = W;
    e_base = (a_big ? unbias(a_exp) : unbias(b_exp)) - iexp_t'(GUARD);
    for (int i = 0; i < N; i++) begin
      logic signed [W-1:0] av, bv;
      av = W'($signed(a_man[i])) <<< GUARD;
      bv = W'($signed(b_man[i])) <<< GUARD;
      if (a_big) bv = bv >>> d;
      else       av = av >>> d;
      sum[i] = av + bv;
    end
  end

  mxint_block_quant #(.N(N), .IN_W(W), .OUT_M(OUT_M)) u_norm (
    .in_val(sum), .in_exp(e_base), .out_man(y_man), .out_exp(y_exp)
  );
endmodule
