// kv_tile_builder: regroups the K or V output of one attention head into 16x16 tiles for
// the attention matrix multiplies ("transpose" of K and "reorder" of V).
//
// The input is the MM_K or MM_V stream: per token, CH = DH/16 MXInt blocks (one exponent per
// block of 16 head dimensions). Blocks of 16 consecutive tokens are collected; then, for each
// of the CH chunks, one tile is written to the consuming unit's tile memory:
//   TRANSPOSE = 0 (K, for Q K^T): tile rows are the 16 tokens, columns 16 dimensions;
//                                 address = token_group * CH + chunk.
//   TRANSPOSE = 1 (V, for A V):   tile rows are 16 dimensions, columns the 16 tokens;
//                                 address = chunk * NG + token_group.
// The 16 block exponents of a tile are replaced by their maximum and every row is shifted
// right by its difference (arithmetic shift; 8 or more bits leave only the sign), so the
// tile shares one exponent as a weight tile does. After SEQ_LEN tokens the last group is
// padded with zero tokens, all tiles are written and done goes high until the next start.
// Timing: 16*CH input cycles per group, then CH write cycles; in_ready is low while writing.
// The paper draws transpose and reorder steps; the tile regrouping is this design's choice.
module kv_tile_builder
  import mxint_pkg::*;
#(
  parameter int SEQ_LEN   = 197,
  parameter int DH        = 64,
  parameter bit TRANSPOSE = 0,
  parameter int N         = BLK,
  parameter int M         = ACT_M
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,      // clears done for a new sequence
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [N-1:0][M-1:0]           in_man,
  input  exp_t                          in_exp,
  output logic                          w_we,
  output logic [$clog2(((SEQ_LEN+N-1)/N)*(DH/N))-1:0] w_addr,
  output logic [N-1:0][N-1:0][M-1:0]    w_man,
  output exp_t                          w_exp,
  output logic                          done
);
  localparam int CH  = DH / N;
  localparam int NG  = (SEQ_LEN + N - 1) / N;
  localparam int AW  = $clog2(NG * CH);
  localparam int CW  = (CH > 1) ? $clog2(CH) : 1;
  localparam int TW  = $clog2(N);
  localparam int GW  = (NG > 1) ? $clog2(NG) : 1;
  localparam int SQW = $clog2(SEQ_LEN + 1);

  typedef enum logic [1:0] {COLLECT, WRITE, FINISHED} state_e;
  state_e state;

  logic [N-1:0][M-1:0] gman [N][CH];   // [token in group][chunk]
  exp_t                gexp [N][CH];
  logic [TW-1:0]       tok;            // token within group
  logic [CW-1:0]       ch;
  logic [GW-1:0]       grp;
  logic [SQW-1:0]      seen;           // tokens received

  assign in_ready = (state == COLLECT);
  assign done     = (state == FINISHED);

  // tile for chunk ch of the collected group
  always_comb begin
    exp_t emax;
    emax = '0;
    for (int r = 0; r < N; r++)
      if (gexp[r][ch] > emax) emax = gexp[r][ch];
    w_exp = emax;
    for (int r = 0; r < N; r++) begin
      int unsigned sh;
      sh = int'(emax - gexp[r][ch]);
      if (sh > M) sh = M;
      for (int c = 0; c < N; c++) begin
        logic [M-1:0] v;
        v = M'($signed(gman[r][ch][c]) >>> sh);
        if (TRANSPOSE) w_man[c][r] = v;
        else           w_man[r][c] = v;
      end
    end
    w_we   = (state == WRITE);
    w_addr = TRANSPOSE ? AW'(ch) * AW'(NG) + AW'(grp) : AW'(grp) * AW'(CH) + AW'(ch);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= COLLECT;
      tok   <= '0;
      ch    <= '0;
      grp   <= '0;
      seen  <= '0;
    end else begin
      unique case (state)
        COLLECT: begin
          if (seen == SQW'(SEQ_LEN)) begin
            // pad the rest of the last group with zero tokens
            for (int c = 0; c < CH; c++) begin
              gman[tok][c] <= '0;
              gexp[tok][c] <= '0;
            end
            if (tok == TW'(N - 1)) begin
              tok   <= '0;
              state <= WRITE;
            end else tok <= tok + 1'b1;
          end else if (in_valid) begin
            gman[tok][ch] <= in_man;
            gexp[tok][ch] <= in_exp;
            if (ch == CW'(CH - 1)) begin
              ch   <= '0;
              seen <= seen + 1'b1;
              if (tok == TW'(N - 1)) begin
                tok   <= '0;
                state <= WRITE;
              end else tok <= tok + 1'b1;
            end else ch <= ch + 1'b1;
          end
        end
        WRITE: begin
          if (ch == CW'(CH - 1)) begin
            ch <= '0;
            if (grp == GW'(NG - 1)) begin
              grp   <= '0;
              state <= FINISHED;
            end else begin
              grp   <= grp + 1'b1;
              state <= COLLECT;
            end
          end else ch <= ch + 1'b1;
        end
        FINISHED: if (start) begin
          seen  <= '0;
          state <= COLLECT;
        end
        default: state <= COLLECT;
      endcase
    end
  end
endmodule
