// mxint_block_quant: turns N wide signed integers that share one exponent into an MXInt block
// with OUT_M-bit mantissas.
//
// This is the "parallel leading-zero counter" and "rounding" stage of the MXInt dot product:
// the lanes' magnitudes are ORed together (negative lanes are inverted first), one
// leading-zero count of that word gives the shift that makes the largest lane fit in OUT_M
// bits, and every lane is shifted right by that one amount with round-half-up and saturation.
// The shift is added to the exponent. Values are never shifted left, so a block that already
// fits keeps its exponent. The exponent is clamped to the 8-bit biased range: an exponent
// below 0 flushes the block to zero, one above 255 saturates to 255 (own choices).
// Purely combinational.
module mxint_block_quant
  import mxint_pkg::*;
#(
  parameter int N     = 16,   // lanes
  parameter int IN_W  = 20,   // width of the wide signed inputs
  parameter int OUT_M = 8     // output mantissa bits
) (
  input  logic [N-1:0][IN_W-1:0]  in_val,   // signed lanes
  input  iexp_t                   in_exp,   // unbiased exponent of the lanes
  output logic [N-1:0][OUT_M-1:0] out_man,  // signed mantissas
  output exp_t                    out_exp   // biased shared exponent
);
  localparam int SW = $clog2(IN_W + 1);

  logic [IN_W-1:0] mag_or;
  logic [SW-1:0]   lz;
  int unsigned     need;     // bits the largest lane needs, sign included
  int unsigned     shift;
  iexp_t           e_new;

  always_comb begin
    mag_or = '0;
    for (int i = 0; i < N; i++)
      mag_or |= in_val[i] ^ {IN_W{in_val[i][IN_W-1]}};
    lz = SW'(IN_W);
    for (int b = 0; b < IN_W; b++)
      if (mag_or[b]) lz = SW'(IN_W - 1 - b);
    need  = IN_W - int'(lz) + 1;
    shift = (need > OUT_M) ? need - OUT_M : 0;
    e_new = in_exp + iexp_t'(shift) + iexp_t'(EXP_BIAS);
  end

  always_comb begin
    logic signed [IN_W:0] v, r;
    for (int i = 0; i < N; i++) begin
      v = {in_val[i][IN_W-1], in_val[i]};
      if (shift == 0) r = v;
      else            r = (v + ((IN_W+1)'(1) <<< (shift - 1))) >>> shift;
      if (r > (IN_W+1)'((1 << (OUT_M-1)) - 1))      out_man[i] = {1'b0, {(OUT_M-1){1'b1}}};
      else if (r < -(IN_W+1)'(1 << (OUT_M-1)))      out_man[i] = {1'b1, {(OUT_M-1){1'b0}}};
      else                                          out_man[i] = r[OUT_M-1:0];
      if (e_new < 0) out_man[i] = '0;
    end
    if (e_new < 0)                  out_exp = '0;
    else if (e_new > iexp_t'(255))  out_exp = '1;
    else                            out_exp = e_new[EXP_W-1:0];
  end
endmodule
