// mxint_softmax: softmax over one row of SEQ_LEN attention scores given as MXInt blocks.
//
// The exponential is split as e^x = 2^(x log2 e) = 2^n * 2^r: x * log2(e) is formed from the
// mantissa times a constant (log2 e with LQ fraction bits) and the block exponent, cast to a
// fixed-point number with R_W fraction bits (fp2Int); n is its integer part (floor) and r its
// R_W-bit fraction. 2^r comes from a 2^R_W-entry table, entry r = round(2^(r / 2^R_W) * 2^(PW-1)).
// The result is already a small float (mantissa LUT(r), exponent n), so no maximum is
// subtracted. The row is handled in passes:
//   LOAD  per block: compute n and r of every lane, store them; align the 16 LUT values to
//         the block's largest n and add them; add that block sum into a running float sum
//         (mantissa SMW bits, exponent).
//   DIV   one restoring divider forms 2^QB / S_m (QB cycles), the reciprocal of the sum
//         mantissa.
//   OUT   per block: y = LUT(r) * (2^QB / S_m) * 2^(n - S_n); the lanes are aligned to the
//         block's largest n and renormalised to an OUT_M-bit MXInt block.
// Lanes at or beyond SEQ_LEN (padding of the last block) are masked: they count as
// e^x = 0 and come out as 0. n saturates to [-2^(NW-1), 2^(NW-1)-1].
// Follows the paper: the 2^n * LUT_pow2(r) decomposition, the 2-bit r, the float-form
// exponentials and division as mantissa division plus exponent subtraction. This design's
// choices: the reciprocal-then-multiply division, LQ, NW, SMW, the passes and handshakes.
// Timing: a row takes NB (load) + QB + 1 (divide) + NB (output) cycles with NB = ceil(SEQ_LEN/N);
// in_ready is high only in LOAD.
module mxint_softmax
  import mxint_pkg::*;
#(
  parameter int SEQ_LEN = 197,
  parameter int N       = BLK,
  parameter int M       = ACT_M,
  parameter int OUT_M   = ACT_M,
  parameter int R_W     = 2,     // fraction bits of r (paper: 2)
  parameter int NW      = 8      // bits of n
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
  output logic [15:0]             sat_cnt     // lanes of the last row whose n saturated
);
  localparam int NB   = (SEQ_LEN + N - 1) / N;
  localparam int BW   = (NB > 1) ? $clog2(NB) : 1;
  localparam int LQ   = 8;
  localparam int L2E  = 369;                 // round(log2(e) * 2^LQ)
  localparam int PW   = 8;                   // bits of a LUT_pow2 entry, value in [1, 2)
  localparam int G    = 4;                   // guard bits of the alignment
  localparam int BSW  = PW + G + $clog2(N) + 1;
  localparam int SMW  = BSW + 4;             // running sum mantissa
  localparam int QB   = SMW + OUT_M + 2;     // reciprocal fraction bits
  localparam int XW   = M + 10;              // m * L2E
  localparam int TW   = NW + R_W + 1;        // fixed-point x log2 e, saturated
  localparam int NMAX = (1 << (NW - 1)) - 1;
  localparam int NMIN = -(1 << (NW - 1));
  localparam int YW   = PW + QB + 1;

  function automatic logic [PW-1:0] pow2_entry(int r);
    // round(2^(r / 2^R_W) * 2^(PW-1)) computed with integers: the largest y with
    // y^(2^R_W) <= 2^r * 2^((PW-1) 2^R_W), then rounded by comparing (y + 1/2)^(2^R_W)
    longint y, lim, p, q;
    int k;
    k = 1 << R_W;
    lim = longint'(1) << (r + (PW - 1) * k);
    y = longint'(1) << (PW - 1);
    forever begin
      p = 1;
      for (int j = 0; j < k; j++) p = p * (y + 1);
      if (p > lim) break;
      y++;
    end
    // rounding: (2y+1)^k <= 2^k * lim  ->  round up
    q = 1;
    for (int j = 0; j < k; j++) q = q * (2 * y + 1);
    if (q <= (lim << k)) y++;
    return PW'(y);
  endfunction

  logic [PW-1:0] lut_pow2 [2**R_W];
  for (genvar g = 0; g < 2**R_W; g++) begin : g_lut
    assign lut_pow2[g] = pow2_entry(g);
  end

  typedef enum logic [1:0] {LOAD, DIV, OUT} state_e;
  state_e state;

  logic [N-1:0][NW-1:0]  buf_n [NB];
  logic [N-1:0][R_W-1:0] buf_r [NB];
  logic [BW-1:0]         idx;
  logic [SMW-1:0]        s_man;
  logic signed [NW+1:0]  s_exp;
  logic                  s_any;
  logic [QB:0]           rem;
  logic [QB:0]           recip;
  int                    div_cnt;

  // ---------------- exponential of the incoming block ----------------
  logic [N-1:0]          valid_lane, out_lane;
  logic [N-1:0][NW-1:0]  en;
  logic [N-1:0][R_W-1:0] er;
  logic [N-1:0]          esat;
  always_comb begin
    int s;
    s = int'(unbias(in_exp)) - LQ + R_W;
    for (int i = 0; i < N; i++) begin
      logic signed [XW-1:0] xl;
      logic signed [TW-1:0] t;
      logic signed [XW+TW:0] tw;
      valid_lane[i] = (int'(idx) * N + i) < SEQ_LEN;
      xl = XW'($signed(in_man[i])) * XW'(L2E);
      tw = (XW+TW+1)'(xl);
      if (s > TW) begin
        if (xl < 0)      tw = -((XW+TW+1)'(1) <<< TW);
        else if (xl > 0) tw = (XW+TW+1)'(1) <<< TW;
      end else if (s >= 0) begin
        tw = tw <<< s;
      end else if (-s > XW) begin
        tw = (xl < 0) ? -(XW+TW+1)'(1) : (XW+TW+1)'(0);
      end else begin
        tw = tw >>> (-s);
      end
      // saturate to the range of n
      esat[i] = 1'b0;
      if (tw > (XW+TW+1)'(((NMAX + 1) << R_W) - 1)) begin
        t = TW'(((NMAX + 1) << R_W) - 1);  esat[i] = 1'b1;
      end else if (tw < (XW+TW+1)'(NMIN << R_W)) begin
        t = TW'(NMIN << R_W);              esat[i] = 1'b1;
      end else t = TW'(tw);
      en[i] = NW'(t >>> R_W);
      er[i] = t[R_W-1:0];
    end
  end

  // block sum of the exponentials aligned to the block's largest n
  logic signed [NW-1:0]  bmax;
  logic [BSW-1:0]        bsum;
  logic                  bany;
  always_comb begin
    bmax = NW'(NMIN);
    bany = 1'b0;
    for (int i = 0; i < N; i++)
      if (valid_lane[i] && (!bany || $signed(en[i]) > bmax)) begin
        bmax = $signed(en[i]);
        bany = 1'b1;
      end
    bsum = '0;
    for (int i = 0; i < N; i++) begin
      int unsigned d;
      d = int'(bmax - $signed(en[i]));
      if (valid_lane[i] && d < PW + G)
        bsum += BSW'(({lut_pow2[er[i]], G'(0)}) >> d);
    end
  end

  // running float sum: value = s_man * 2^(s_exp - (PW-1) - G)
  logic [SMW:0]         sum_next;
  logic signed [NW+1:0] sexp_next;
  always_comb begin
    int unsigned d;
    logic [SMW:0] a, b;
    d = 0;
    a = '0;
    b = '0;
    sum_next  = '0;
    sexp_next = '0;
    if (!s_any) begin
      sum_next  = (SMW+1)'(bsum);
      sexp_next = (NW+2)'(bmax);
    end else if ((NW+2)'(bmax) > s_exp) begin
      d = int'((NW+2)'(bmax) - s_exp);
      a = (d > SMW) ? '0 : ((SMW+1)'(s_man) >> d);
      b = (SMW+1)'(bsum);
      sum_next  = a + b;
      sexp_next = (NW+2)'(bmax);
    end else begin
      d = int'(s_exp - (NW+2)'(bmax));
      a = (SMW+1)'(s_man);
      b = (d > SMW) ? '0 : ((SMW+1)'(bsum) >> d);
      sum_next  = a + b;
      sexp_next = s_exp;
    end
    if (sum_next[SMW]) begin
      sum_next  = sum_next >> 1;
      sexp_next = sexp_next + 1'b1;
    end
  end

  // ---------------- output block ----------------
  logic [N-1:0][YW-1:0] yv;
  logic signed [NW-1:0] omax;
  logic                 oany;
  iexp_t                y_e;
  always_comb begin
    omax = NW'(NMIN);
    oany = 1'b0;
    for (int i = 0; i < N; i++) begin
      out_lane[i] = (int'(idx) * N + i) < SEQ_LEN;
      if (out_lane[i] && (!oany || $signed(buf_n[idx][i]) > omax)) begin
        omax = $signed(buf_n[idx][i]);
        oany = 1'b1;
      end
    end
    for (int i = 0; i < N; i++) begin
      int unsigned d;
      logic [YW-1:0] q;
      d = int'(omax - $signed(buf_n[idx][i]));
      q = YW'(lut_pow2[buf_r[idx][i]]) * YW'(recip);
      yv[i] = (out_lane[i] && d < YW) ? (q >> d) : '0;
    end
    // y = yv * 2^(omax - s_exp + G - QB)
    y_e = iexp_t'(omax) - iexp_t'(s_exp) + iexp_t'(G) - iexp_t'(QB);
  end

  mxint_block_quant #(.N(N), .IN_W(YW), .OUT_M(OUT_M)) u_out (
    .in_val(yv), .in_exp(y_e), .out_man(out_man), .out_exp(out_exp)
  );

  // restoring-division step: shift the remainder left, bringing in the dividend's single 1
  logic [QB+1:0] r2;
  assign r2 = {rem, (div_cnt == QB) ? 1'b1 : 1'b0};

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= LOAD;
      idx     <= '0;
      s_man   <= '0;
      s_exp   <= '0;
      s_any   <= 1'b0;
      rem     <= '0;
      recip   <= '0;
      div_cnt <= 0;
      sat_cnt <= '0;
    end else begin
      unique case (state)
        LOAD: if (in_valid) begin
          buf_n[idx] <= en;
          buf_r[idx] <= er;
          if (bany) begin
            s_man <= SMW'(sum_next);
            s_exp <= sexp_next;
            s_any <= 1'b1;
          end
          sat_cnt <= ((idx == '0) ? 16'd0 : sat_cnt) + 16'($countones(esat & valid_lane));
          if (idx == BW'(NB - 1)) begin
            idx     <= '0;
            rem     <= '0;
            recip   <= '0;
            div_cnt <= QB;
            state   <= DIV;
          end else idx <= idx + 1'b1;
        end
        DIV: begin
          // restoring division of 2^QB by s_man, one quotient bit per cycle
          if (r2 >= (QB+2)'(s_man)) begin
            rem   <= QB'(r2 - (QB+2)'(s_man));
            recip <= {recip[QB-1:0], 1'b1};
          end else begin
            rem   <= QB'(r2);
            recip <= {recip[QB-1:0], 1'b0};
          end
          if (div_cnt == 0) state <= OUT;
          else div_cnt <= div_cnt - 1;
        end
        OUT: if (out_ready) begin
          if (idx == BW'(NB - 1)) begin
            idx   <= '0;
            s_any <= 1'b0;
            state <= LOAD;
          end else idx <= idx + 1'b1;
        end
        default: state <= LOAD;
      endcase
    end
  end
endmodule
