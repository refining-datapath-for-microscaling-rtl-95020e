// mxint_gelu: GELU on an MXInt block with a small look-up table.
//
// The shared exponent passes straight through: GELU changes a value little, so the output
// block keeps the input exponent. Each mantissa is "denormalised" to a fixed-point number x
// with F = LUT_W - 1 - ceil(log2 A) fraction bits by one shift of the block exponent (left by
// up to KMAX = LUT_W + ceil(log2 A) - 1 bits, or right with rounding). Then, per lane:
//   x >= A        -> y = x          (the mantissa is passed on unchanged)
//   x <= -A       -> y = 0
//   -A < x < A    -> y = LUT_GELU(x), the LUT_W-bit two's-complement fixed-point x being
//                    the table address.
// The table holds round(GELU(x) * 2^FO) with FO = OUT_M - 1 - ceil(log2 A) fraction bits and
// GELU(x) = x/2 * (1 + erf(x / sqrt(2))). Its entry is shifted back into the mantissa domain
// of the (unchanged) exponent, with rounding and saturation.
// The three-way split, the pass-through exponent, the domain A = 3 and the 5-bit LUT follow
// the paper; the fraction bits, the rounding and the shift back after the table (which the
// paper's datapath figure does not draw) are this design's choices.
// One register stage: an accepted block appears at the output on the next cycle;
// valid/ready handshake on both sides.
module mxint_gelu
  import mxint_pkg::*;
#(
  parameter int N     = BLK,
  parameter int M     = ACT_M,
  parameter int LUT_W = 5,   // LUT address bits (paper: 5)
  parameter int A     = 3    // LUT domain (-A, A) (paper: 3)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [N-1:0][M-1:0]  in_man,
  input  exp_t                 in_exp,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [N-1:0][M-1:0]  out_man,
  output exp_t                 out_exp,
  // per-lane path taken by the last accepted block: 0 LUT, 1 ReLU (x), 2 zero
  output logic [N-1:0][1:0]    out_path
);
  localparam int IB   = $clog2(A);            // integer bits of the LUT domain
  localparam int F    = LUT_W - 1 - IB;       // fraction bits of the LUT address
  localparam int FO   = M - 1 - IB;           // fraction bits of the LUT entries
  localparam int KMAX = LUT_W + IB - 1;       // largest left shift of the denormaliser
  localparam int XW   = M + KMAX + 1;         // width of the denormalised value
  localparam logic signed [XW-1:0] A_FX = XW'(A << F);

  // round(GELU(i * 2^-F) * 2^FO), address i as LUT_W-bit two's complement
  function automatic logic signed [M-1:0] lut_gelu(logic [LUT_W-1:0] adr);
    logic [4:0] a5;
    a5 = 5'(adr);
    unique case (a5)
      5'd0:  return M'(0);    5'd1:  return M'(5);    5'd2:  return M'(11);   5'd3:  return M'(19);
      5'd4:  return M'(27);   5'd5:  return M'(36);   5'd6:  return M'(45);   5'd7:  return M'(54);
      5'd8:  return M'(63);   5'd9:  return M'(71);   5'd10: return M'(80);   5'd11: return M'(88);
      5'd12: return M'(96);   5'd13: return M'(104);  5'd14: return M'(112);  5'd15: return M'(120);
      5'd16: return M'(0);    5'd17: return M'(0);    5'd18: return M'(0);    5'd19: return M'(0);
      5'd20: return M'(0);    5'd21: return M'(0);    5'd22: return M'(0);    5'd23: return -M'(1);
      5'd24: return -M'(1);   5'd25: return -M'(2);   5'd26: return -M'(3);   5'd27: return -M'(4);
      5'd28: return -M'(5);   5'd29: return -M'(5);   5'd30: return -M'(5);   5'd31: return -M'(3);
      default: return '0;
    endcase
  endfunction

  logic [N-1:0][M-1:0] y_man;
  logic [N-1:0][1:0]   y_path;

  always_comb begin
    int s;   // x = m * 2^(s - F): left shift by s to reach F fraction bits
    int t;   // LUT entry to mantissa: right shift by t
    s = int'(unbias(in_exp)) + F;
    t = s + FO - F;
    for (int i = 0; i < N; i++) begin
      logic signed [XW-1:0] xw;
      logic signed [XW+M:0] yl;
      logic sat;
      sat = 1'b0;
      yl  = '0;
      if (s > KMAX) begin
        sat = 1'b1;
        xw  = $signed(in_man[i]) < 0 ? -A_FX : A_FX;
      end else if (s >= 0) begin
        xw = XW'($signed(in_man[i])) <<< s;
      end else if (-s <= M) begin
        xw = (XW'($signed(in_man[i])) + (XW'(1) <<< (-s - 1))) >>> (-s);
      end else begin
        xw = '0;
      end
      if (in_man[i] == '0) begin
        y_man[i]  = '0;
        y_path[i] = 2'd0;
      end else if (xw >= A_FX || (sat && !in_man[i][M-1])) begin
        y_man[i]  = in_man[i];
        y_path[i] = 2'd1;
      end else if (xw <= -A_FX) begin
        y_man[i]  = '0;
        y_path[i] = 2'd2;
      end else begin
        y_path[i] = 2'd0;
        yl = (XW+M+1)'(lut_gelu(xw[LUT_W-1:0]));
        if (t > 0)      yl = (yl + ((XW+M+1)'(1) <<< (t - 1))) >>> t;
        else if (t < 0) yl = (-t > M) ? ((yl == 0) ? yl : (yl < 0 ? -(XW+M+1)'(1 << M) : (XW+M+1)'(1 << M)))
                                      : yl <<< (-t);
        if (yl > (XW+M+1)'((1 << (M-1)) - 1))  y_man[i] = {1'b0, {(M-1){1'b1}}};
        else if (yl < -(XW+M+1)'(1 << (M-1)))  y_man[i] = {1'b1, {(M-1){1'b0}}};
        else                                  y_man[i] = yl[M-1:0];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_man   <= '0;
      out_exp   <= '0;
      out_path  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_man  <= y_man;
        out_exp  <= in_exp;
        out_path <= y_path;
      end
    end
  end
endmodule
