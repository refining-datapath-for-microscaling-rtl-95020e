// mxint_dot_tile: MXInt dot-product unit for one tile.
//
// K activation mantissas (one MXInt block, exponent x_exp) are multiplied with each of the H
// rows of a weight tile (H x K mantissas sharing w_exp). Each row is an integer multiply and
// adder tree; the exponents are added once for the whole tile. The H sums then go through one
// shared leading-zero count and rounding (mxint_block_quant) to OUT_M-bit mantissas with one
// exponent. This is the structure of the paper's MXInt dot product; the integer reading of the
// mantissas and round-half-up are this design's choices. Purely combinational.
module mxint_dot_tile
  import mxint_pkg::*;
#(
  parameter int K     = 16,     // values per activation block
  parameter int H     = 16,     // rows of the weight tile
  parameter int XM    = ACT_M,  // activation mantissa bits
  parameter int WM    = W_M,    // weight mantissa bits
  parameter int OUT_M = ACC_M   // output mantissa bits
) (
  input  logic [K-1:0][XM-1:0]         x_man,
  input  exp_t                         x_exp,
  input  logic [H-1:0][K-1:0][WM-1:0]  w_man,
  input  exp_t                         w_exp,
  output logic [H-1:0][OUT_M-1:0]      y_man,
  output exp_t                         y_exp
);
  localparam int PW = XM + WM;              // product width
  localparam int SW = PW + $clog2(K);       // sum width

  logic [H-1:0][SW-1:0] sums;
  iexp_t                e_sum;

  always_comb begin
    for (int h = 0; h < H; h++) begin
      logic signed [SW-1:0] acc;
      acc = '0;
      for (int k = 0; k < K; k++)
        acc += SW'($signed(x_man[k]) * $signed(w_man[h][k]));
      sums[h] = acc;
    end
    e_sum = unbias(x_exp) + unbias(w_exp);
  end

  mxint_block_quant #(.N(H), .IN_W(SW), .OUT_M(OUT_M)) u_norm (
    .in_val(sums), .in_exp(e_sum), .out_man(y_man), .out_exp(y_exp)
  );
endmodule
