// mxint_concat: concatenates the per-head attention outputs B_0 .. B_{H-1} of one token into
// the token B_c = [B_0 | B_1 | ... | B_{H-1}].
//
// Each head delivers its token as PER_HEAD MXInt blocks on its own valid/ready stream. The
// unit passes PER_HEAD blocks from head 0, then PER_HEAD from head 1, and so on, then starts
// over with head 0 for the next token. Blocks are not re-quantised: a head's blocks keep their
// exponents, since the MXInt block is also the 16-value tile. Combinational pass-through with
// a head counter and a block counter. The paper names the step; the ordering is this design's.
module mxint_concat
  import mxint_pkg::*;
#(
  parameter int HEADS    = 3,
  parameter int PER_HEAD = 4,
  parameter int N        = BLK,
  parameter int M        = ACT_M
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [HEADS-1:0]              in_valid,
  output logic [HEADS-1:0]              in_ready,
  input  logic [HEADS-1:0][N-1:0][M-1:0] in_man,
  input  exp_t [HEADS-1:0]              in_exp,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N-1:0][M-1:0]           out_man,
  output exp_t                          out_exp
);
  localparam int HW = (HEADS > 1) ? $clog2(HEADS) : 1;
  localparam int PW = (PER_HEAD > 1) ? $clog2(PER_HEAD) : 1;

  logic [HW-1:0] h;
  logic [PW-1:0] b;

  always_comb begin
    in_ready    = '0;
    in_ready[h] = out_ready;
    out_valid   = in_valid[h];
    out_man     = in_man[h];
    out_exp     = in_exp[h];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h <= '0;
      b <= '0;
    end else if (out_valid && out_ready) begin
      if (b == PW'(PER_HEAD - 1)) begin
        b <= '0;
        h <= (h == HW'(HEADS - 1)) ? '0 : h + 1'b1;
      end else b <= b + 1'b1;
    end
  end
endmodule
