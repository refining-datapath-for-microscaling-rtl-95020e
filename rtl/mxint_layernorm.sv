// mxint_layernorm: integer-only LayerNorm over one token of DIM values (DIM/N MXInt blocks).
//
// Because every block of the token is first aligned to one exponent lambda (the largest
// block exponent), the normalisation (x - E(x)) / sqrt(Var(x)) can be computed on the
// mantissas alone: lambda cancels between numerator and denominator (epsilon is taken as 0).
// The unit works in passes over a token buffer:
//   LOAD  accept DIM/N blocks, remember the largest exponent;
//   SUM   align each block (arithmetic right shift by e_max - e; a block more than
//         MAX_ALIGN = 6 below e_max becomes 0) and add up its mantissas;
//   MEAN  mean = sum / DIM as fixed point with MF fraction bits (multiply by 2^RS/DIM);
//   VAR   d = x - mean for every value, accumulate d^2;
//   RSQRT var = sumsq / DIM is rescaled to a small float vm * 2^ve with an LUT_W-bit vm
//         (leading one found by a priority encoder); 1/sqrt(var) = LUT(vm) * 2^(-ve/2) for
//         even ve and LUT(vm/2) * 2^(-(ve+1)/2) for odd ve;
//   OUT   y = d * LUT, one block per cycle, renormalised to OUT_M-bit MXInt blocks whose
//         exponent carries the 2^(-ve/2) factor and the fixed-point scaling.
// The LUT has 2^LUT_W entries, entry i = round(2^LF / sqrt(i)) for i >= 2^(LUT_W-2) (smaller
// addresses are never used and hold 0).
// Follows the paper: alignment to the largest exponent (up to 6 bits), mantissa-only mean and
// variance, rescaling of the variance, the even/odd exponent rule and a 5-bit-address
// 1/sqrt LUT. This design's choices: the pass structure, MF, the LUT entry width (8 bits,
// LF = 9), rounding, and the handshakes. The affine gamma/beta step is not included.
// Timing: a token takes 4*DIM/N + 2 cycles when the output is always ready; in_ready is high
// only in LOAD.
module mxint_layernorm
  import mxint_pkg::*;
#(
  parameter int DIM       = 192,
  parameter int N         = BLK,
  parameter int M         = ACT_M,
  parameter int OUT_M     = ACT_M,
  parameter int MAX_ALIGN = 6,
  parameter int LUT_W     = 5,
  parameter int MF        = 4     // fraction bits of mean and d
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [N-1:0][M-1:0]     in_man,
  input  exp_t                    in_exp,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [N-1:0][OUT_M-1:0] out_man,
  output exp_t                    out_exp,
  // number of blocks of the last token that were shifted by alignment / flushed to zero
  output logic [15:0]             align_cnt,
  output logic [15:0]             flush_cnt
);
  localparam int NB  = DIM / N;
  localparam int BW  = (NB > 1) ? $clog2(NB) : 1;
  localparam int SW  = M + $clog2(DIM) + 1;           // sum width
  localparam int DW  = M + MF + 2;                    // d width
  localparam int QW  = 2 * DW + $clog2(DIM) + 1;      // sum of squares width
  localparam int RS  = 24;
  localparam longint RECIP = ((64'd1 << RS) + DIM / 2) / DIM;
  localparam int LF  = 9;                             // LUT fraction bits
  localparam int LD  = 8;                             // LUT entry bits
  localparam int PW  = DW + LD + 1;                   // product width

  // round(2^LF / sqrt(i)) in integers: largest y with y^2 * i <= 2^(2 LF), then rounded
  function automatic logic [LD-1:0] rsqrt_entry(int i);
    longint y, lim;
    if (i < (1 << (LUT_W - 2))) return '0;
    lim = longint'(1) << (2 * LF);
    y = 0;
    while ((y + 1) * (y + 1) * i <= lim) y++;
    if ((2 * y + 1) * (2 * y + 1) * i <= 4 * lim) y++;
    return LD'(y);
  endfunction

  logic [LD-1:0] lut [2**LUT_W];
  for (genvar g = 0; g < 2**LUT_W; g++) begin : g_lut
    assign lut[g] = rsqrt_entry(g);
  end

  typedef enum logic [2:0] {LOAD, SUM, MEAN, VAR, RSQRT, OUT} state_e;
  state_e state;

  logic [N-1:0][M-1:0] buf_man [NB];
  exp_t                buf_exp [NB];
  logic [BW-1:0]       idx;
  exp_t                e_max;
  logic signed [SW-1:0] sum;
  logic signed [DW-1:0] mean;
  logic [QW-1:0]        sumsq;
  logic [LD-1:0]        rs_lut;
  iexp_t                out_e;      // unbiased exponent of d*LUT

  // aligned block at idx
  logic [N-1:0][M-1:0]  al;
  logic                 al_shift, al_flush;
  always_comb begin
    int unsigned sh;
    sh       = int'(e_max - buf_exp[idx]);
    al_shift = sh != 0;
    al_flush = sh > MAX_ALIGN;
    for (int i = 0; i < N; i++)
      al[i] = al_flush ? '0 : M'($signed(buf_man[idx][i]) >>> sh);
  end

  // per-lane d = x * 2^MF - mean, d^2 summed over the block, d * LUT
  logic [N-1:0][DW-1:0] d;
  logic [QW-1:0]        blk_sq;
  logic signed [SW-1:0] blk_sum;
  logic [N-1:0][PW-1:0] prod;
  always_comb begin
    blk_sq  = '0;
    blk_sum = '0;
    for (int i = 0; i < N; i++) begin
      d[i]     = (DW'($signed(al[i])) <<< MF) - mean;
      blk_sq  += QW'($signed(d[i]) * $signed(d[i]));
      blk_sum += SW'($signed(al[i]));
      prod[i]  = PW'($signed(d[i]) * $signed({1'b0, rs_lut}));
    end
  end

  // rescaling of the variance and table look-up
  logic [QW+RS-1:0] var_wide;
  logic [QW-1:0]    var_fx;      // 2*MF fraction bits
  int               lead;
  logic [LUT_W-1:0] vm;
  int               ve;
  logic [LUT_W-1:0] lut_idx;
  int               half;
  always_comb begin
    var_wide = (QW+RS)'(sumsq) * (QW+RS)'(RECIP);
    var_fx   = QW'(var_wide >> RS);
    lead = -1;
    for (int b = 0; b < QW; b++) if (var_fx[b]) lead = b;
    if (lead >= LUT_W - 1) vm = LUT_W'(var_fx >> (lead - (LUT_W - 1)));
    else                   vm = LUT_W'(var_fx);
    ve = (lead >= LUT_W - 1) ? lead - (LUT_W - 1) - 2 * MF : -2 * MF;
    if ((ve % 2) == 0) begin
      lut_idx = vm;
      half    = ve / 2;
    end else begin
      lut_idx = vm >> 1;
      half    = (ve + 1) / 2;
    end
  end

  mxint_block_quant #(.N(N), .IN_W(PW), .OUT_M(OUT_M)) u_out (
    .in_val(prod), .in_exp(out_e), .out_man(out_man), .out_exp(out_exp)
  );

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= LOAD;
      idx       <= '0;
      e_max     <= '0;
      sum       <= '0;
      mean      <= '0;
      sumsq     <= '0;
      rs_lut    <= '0;
      out_e     <= '0;
      align_cnt <= '0;
      flush_cnt <= '0;
    end else begin
      unique case (state)
        LOAD: if (in_valid) begin
          buf_man[idx] <= in_man;
          buf_exp[idx] <= in_exp;
          if (idx == '0 || in_exp > e_max) e_max <= in_exp;
          if (idx == BW'(NB - 1)) begin
            idx       <= '0;
            sum       <= '0;
            align_cnt <= '0;
            flush_cnt <= '0;
            state     <= SUM;
          end else idx <= idx + 1'b1;
        end
        SUM: begin
          sum       <= sum + blk_sum;
          align_cnt <= align_cnt + 16'(al_shift);
          flush_cnt <= flush_cnt + 16'(al_flush);
          if (idx == BW'(NB - 1)) begin
            idx   <= '0;
            state <= MEAN;
          end else idx <= idx + 1'b1;
        end
        MEAN: begin
          mean  <= DW'((($signed({sum, MF'(0)}) * $signed({1'b0, 32'(RECIP)}))
                        + (64'sd1 <<< (RS - 1))) >>> RS);
          sumsq <= '0;
          state <= VAR;
        end
        VAR: begin
          sumsq <= sumsq + blk_sq;
          if (idx == BW'(NB - 1)) begin
            idx   <= '0;
            state <= RSQRT;
          end else idx <= idx + 1'b1;
        end
        RSQRT: begin
          rs_lut <= lut[lut_idx];
          out_e  <= iexp_t'(-MF - LF - half);
          state  <= OUT;
        end
        OUT: if (out_ready) begin
          if (idx == BW'(NB - 1)) begin
            idx   <= '0;
            state <= LOAD;
          end else idx <= idx + 1'b1;
        end
        default: state <= LOAD;
      endcase
    end
  end
endmodule
