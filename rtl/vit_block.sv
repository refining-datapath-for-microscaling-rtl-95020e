// vit_block: one transformer encoder block of a DeiT vision transformer, computed entirely
// in MXInt arithmetic as a dataflow pipeline of dedicated operator units.
//
//   X  -> LayerNorm -> X'
//   per head h:  Q = W_Q X', K = W_K X', V = W_V X'       (mxint_linear, weights on chip)
//                K, V regrouped into tiles                  (kv_tile_builder)
//                A = Q K^T -> Softmax -> B = A' V           (mxint_linear, mxint_softmax)
//   B_c = concat(B_0..B_{H-1});  B_o = W_O B_c;  B' = B_o + X'
//   B_n = LayerNorm(B');  U = W_U B_n;  S' = GELU(U);  D = W_D S';  O = D + B_n
//
// Tokens stream in and out as MXInt blocks of 16 values (DIM/16 blocks per token, SEQ_LEN
// tokens) on valid/ready streams. All weights are first fetched from off-chip memory by the
// weight scheduler through its ping-pong buffer into the units' tile stores; the input is
// accepted once that is done. Q waits in a FIFO until every K and V tile of its head is
// written, since each row of Q K^T needs all of K. Two FIFOs hold X' and B_n for the
// residual additions. The 1/sqrt(d_k) scale of Q K^T is expected to be folded into W_Q.
//
// Weight tiles are 16x16 6-bit mantissas with one 8-bit exponent (mxint_pkg::w_tile_t) and
// sit in off-chip memory in schedule order: for each head Q, K, V; then W_O, W_U, W_D; inside
// one matrix tile (o, i) is at o * (IN_DIM/16) + i.
// The operator graph, the MXInt formats and the ping-pong prefetch follow the paper; the
// stream protocol, buffer depths and the schedule layout are this design's choices. Default
// sizes are DeiT-Tiny's (192 hidden, 3 heads, 768 MLP, 197 tokens).
// Lint notes: the status outputs of the LayerNorm, softmax and GELU units and the bank-swap
// count of the ping-pong buffer are left unconnected or unread here on purpose; they exist
// for test and debug visibility and cost nothing once synthesis removes them.
module vit_block
  import mxint_pkg::*;
#(
  parameter int SEQ_LEN  = 197,
  parameter int DIM      = 192,
  parameter int HEADS    = 3,
  parameter int MLP      = 768,
  parameter int PP_DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,      // fetch the weights, then run one sequence
  output logic                       weights_ready,
  // off-chip weight memory
  output logic                       mem_req,
  output logic [$clog2(HEADS*3*(DIM/16)*(DIM/HEADS/16) + (DIM/16)*(DIM/16)
                       + 2*(DIM/16)*(MLP/16))-1:0] mem_addr,
  input  logic                       mem_rvalid,
  input  w_tile_t                    mem_rdata,
  // input tokens X
  input  logic                       x_valid,
  output logic                       x_ready,
  input  act_blk_t                   x_blk,
  // output tokens O
  output logic                       o_valid,
  input  logic                       o_ready,
  output act_blk_t                   o_blk
);
  localparam int DH    = DIM / HEADS;
  localparam int DB    = DIM / BLK;          // blocks per token
  localparam int CH    = DH / BLK;           // blocks per head per token
  localparam int NG    = (SEQ_LEN + BLK - 1) / BLK;
  localparam int SPAD  = NG * BLK;
  localparam int QT    = DB * CH;            // tiles of one W_Q / W_K / W_V
  localparam int OT    = DB * DB;
  localparam int UT    = DB * (MLP / BLK);
  localparam int OFF_O = HEADS * 3 * QT;
  localparam int OFF_U = OFF_O + OT;
  localparam int OFF_D = OFF_U + UT;
  localparam int TOTAL = OFF_D + UT;
  localparam int IW    = $clog2(TOTAL);
  localparam int ABW   = $bits(act_blk_t);

  // ---------------- weight scheduler ----------------
  logic            st_we;
  logic [IW-1:0]   st_idx;
  w_tile_t         st_tile;
  logic [15:0]     pp_swaps;

  weight_scheduler #(.W($bits(w_tile_t)), .TOTAL(TOTAL), .DEPTH(PP_DEPTH)) u_sched (
    .clk, .rst_n, .start,
    .mem_req, .mem_addr, .mem_rvalid, .mem_rdata,
    .st_we, .st_idx, .st_data(st_tile), .done(weights_ready), .swaps(pp_swaps)
  );

  // ---------------- LayerNorm 1 ----------------
  act_blk_t ln1_blk;
  logic     ln1_valid, ln1_ready;
  logic     ln1_in_ready;

  assign x_ready = weights_ready && ln1_in_ready;

  mxint_layernorm #(.DIM(DIM)) u_ln1 (
    .clk, .rst_n,
    .in_valid(x_valid && weights_ready), .in_ready(ln1_in_ready),
    .in_man(x_blk.man), .in_exp(x_blk.exp),
    .out_valid(ln1_valid), .out_ready(ln1_ready), .out_man(ln1_blk.man), .out_exp(ln1_blk.exp),
    .align_cnt(), .flush_cnt()
  );

  // X' goes to 3*HEADS projections and to the residual FIFO at once
  logic [HEADS-1:0][2:0] proj_ready;
  logic                  xres_in_ready;
  logic                  ln1_fire;
  assign ln1_ready = (&proj_ready) && xres_in_ready;
  assign ln1_fire  = ln1_valid && ln1_ready;

  logic     xres_valid, xres_ready;
  act_blk_t xres_blk;
  stream_fifo #(.W(ABW), .DEPTH(SEQ_LEN * DB)) u_xres (
    .clk, .rst_n,
    .in_valid(ln1_fire), .in_ready(xres_in_ready), .in_data(ln1_blk),
    .out_valid(xres_valid), .out_ready(xres_ready), .out_data(xres_blk)
  );

  // ---------------- attention heads ----------------
  logic [HEADS-1:0]                     hb_valid, hb_ready;
  logic [HEADS-1:0][BLK-1:0][ACT_M-1:0] hb_man;
  exp_t [HEADS-1:0]                     hb_exp;

  for (genvar h = 0; h < HEADS; h++) begin : g_head
    localparam int OFF_Q = h * 3 * QT;
    localparam int OFF_K = OFF_Q + QT;
    localparam int OFF_V = OFF_K + QT;

    act_blk_t q_blk, k_blk, v_blk;
    logic     q_valid, q_ready, k_valid, k_ready, v_valid, v_ready;

    mxint_linear #(.IN_DIM(DIM), .OUT_DIM(DH)) u_mm_q (
      .clk, .rst_n,
      .w_we(st_we && (st_idx - IW'(OFF_Q)) < IW'(QT)),
      .w_addr($clog2(QT)'(st_idx - IW'(OFF_Q))), .w_man(st_tile.man), .w_exp(st_tile.exp),
      .in_valid(ln1_fire), .in_ready(proj_ready[h][0]), .in_man(ln1_blk.man), .in_exp(ln1_blk.exp),
      .out_valid(q_valid), .out_ready(q_ready), .out_man(q_blk.man), .out_exp(q_blk.exp)
    );
    mxint_linear #(.IN_DIM(DIM), .OUT_DIM(DH)) u_mm_k (
      .clk, .rst_n,
      .w_we(st_we && (st_idx - IW'(OFF_K)) < IW'(QT)),
      .w_addr($clog2(QT)'(st_idx - IW'(OFF_K))), .w_man(st_tile.man), .w_exp(st_tile.exp),
      .in_valid(ln1_fire), .in_ready(proj_ready[h][1]), .in_man(ln1_blk.man), .in_exp(ln1_blk.exp),
      .out_valid(k_valid), .out_ready(k_ready), .out_man(k_blk.man), .out_exp(k_blk.exp)
    );
    mxint_linear #(.IN_DIM(DIM), .OUT_DIM(DH)) u_mm_v (
      .clk, .rst_n,
      .w_we(st_we && (st_idx - IW'(OFF_V)) < IW'(QT)),
      .w_addr($clog2(QT)'(st_idx - IW'(OFF_V))), .w_man(st_tile.man), .w_exp(st_tile.exp),
      .in_valid(ln1_fire), .in_ready(proj_ready[h][2]), .in_man(ln1_blk.man), .in_exp(ln1_blk.exp),
      .out_valid(v_valid), .out_ready(v_ready), .out_man(v_blk.man), .out_exp(v_blk.exp)
    );

    // Q waits here until K and V are complete
    logic     qf_valid, qf_ready;
    act_blk_t qf_blk;
    stream_fifo #(.W(ABW), .DEPTH(SEQ_LEN * CH)) u_qfifo (
      .clk, .rst_n,
      .in_valid(q_valid), .in_ready(q_ready), .in_data(q_blk),
      .out_valid(qf_valid), .out_ready(qf_ready), .out_data(qf_blk)
    );

    localparam int KAW = $clog2(NG * CH);
    logic                                kt_we, vt_we, k_done, v_done;
    logic [KAW-1:0]                      kt_addr, vt_addr;
    logic [BLK-1:0][BLK-1:0][ACT_M-1:0]  kt_man, vt_man;
    exp_t                                kt_exp, vt_exp;

    kv_tile_builder #(.SEQ_LEN(SEQ_LEN), .DH(DH), .TRANSPOSE(1'b0)) u_kt (
      .clk, .rst_n, .start,
      .in_valid(k_valid), .in_ready(k_ready), .in_man(k_blk.man), .in_exp(k_blk.exp),
      .w_we(kt_we), .w_addr(kt_addr), .w_man(kt_man), .w_exp(kt_exp), .done(k_done)
    );
    kv_tile_builder #(.SEQ_LEN(SEQ_LEN), .DH(DH), .TRANSPOSE(1'b1)) u_vt (
      .clk, .rst_n, .start,
      .in_valid(v_valid), .in_ready(v_ready), .in_man(v_blk.man), .in_exp(v_blk.exp),
      .w_we(vt_we), .w_addr(vt_addr), .w_man(vt_man), .w_exp(vt_exp), .done(v_done)
    );

    // A = Q K^T : K tiles act as the weights, one output per (padded) token
    logic     a_valid, a_ready, a_in_ready;
    act_blk_t a_blk;
    assign qf_ready = a_in_ready && k_done && v_done;
    mxint_linear #(.IN_DIM(DH), .OUT_DIM(SPAD), .WM(ACT_M)) u_mm_a (
      .clk, .rst_n,
      .w_we(kt_we), .w_addr(kt_addr), .w_man(kt_man), .w_exp(kt_exp),
      .in_valid(qf_valid && k_done && v_done), .in_ready(a_in_ready),
      .in_man(qf_blk.man), .in_exp(qf_blk.exp),
      .out_valid(a_valid), .out_ready(a_ready), .out_man(a_blk.man), .out_exp(a_blk.exp)
    );

    logic     s_valid, s_ready;
    act_blk_t s_blk;
    mxint_softmax #(.SEQ_LEN(SEQ_LEN)) u_softmax (
      .clk, .rst_n,
      .in_valid(a_valid), .in_ready(a_ready), .in_man(a_blk.man), .in_exp(a_blk.exp),
      .out_valid(s_valid), .out_ready(s_ready), .out_man(s_blk.man), .out_exp(s_blk.exp),
      .sat_cnt()
    );

    // B = A' V : V^T tiles act as the weights
    mxint_linear #(.IN_DIM(SPAD), .OUT_DIM(DH), .WM(ACT_M)) u_mm_b (
      .clk, .rst_n,
      .w_we(vt_we), .w_addr(vt_addr), .w_man(vt_man), .w_exp(vt_exp),
      .in_valid(s_valid), .in_ready(s_ready), .in_man(s_blk.man), .in_exp(s_blk.exp),
      .out_valid(hb_valid[h]), .out_ready(hb_ready[h]), .out_man(hb_man[h]), .out_exp(hb_exp[h])
    );
  end

  // ---------------- concat, output projection, residual, LayerNorm 2 ----------------
  logic     bc_valid, bc_ready;
  act_blk_t bc_blk;
  mxint_concat #(.HEADS(HEADS), .PER_HEAD(CH)) u_concat (
    .clk, .rst_n,
    .in_valid(hb_valid), .in_ready(hb_ready), .in_man(hb_man), .in_exp(hb_exp),
    .out_valid(bc_valid), .out_ready(bc_ready), .out_man(bc_blk.man), .out_exp(bc_blk.exp)
  );

  logic     bo_valid, bo_ready;
  act_blk_t bo_blk;
  mxint_linear #(.IN_DIM(DIM), .OUT_DIM(DIM)) u_mm_o (
    .clk, .rst_n,
    .w_we(st_we && (st_idx - IW'(OFF_O)) < IW'(OT)),
    .w_addr($clog2(OT)'(st_idx - IW'(OFF_O))), .w_man(st_tile.man), .w_exp(st_tile.exp),
    .in_valid(bc_valid), .in_ready(bc_ready), .in_man(bc_blk.man), .in_exp(bc_blk.exp),
    .out_valid(bo_valid), .out_ready(bo_ready), .out_man(bo_blk.man), .out_exp(bo_blk.exp)
  );

  // B' = B_o + X'
  act_blk_t r1_blk;
  logic     r1_valid, r1_ready;
  mxint_add u_add1 (
    .a_man(bo_blk.man), .a_exp(bo_blk.exp), .b_man(xres_blk.man), .b_exp(xres_blk.exp),
    .y_man(r1_blk.man), .y_exp(r1_blk.exp)
  );
  assign r1_valid   = bo_valid && xres_valid;
  assign bo_ready   = r1_ready && xres_valid;
  assign xres_ready = r1_ready && bo_valid;

  logic     bn_valid, bn_ready;
  act_blk_t bn_blk;
  mxint_layernorm #(.DIM(DIM)) u_ln2 (
    .clk, .rst_n,
    .in_valid(r1_valid), .in_ready(r1_ready), .in_man(r1_blk.man), .in_exp(r1_blk.exp),
    .out_valid(bn_valid), .out_ready(bn_ready), .out_man(bn_blk.man), .out_exp(bn_blk.exp),
    .align_cnt(), .flush_cnt()
  );

  // ---------------- MLP ----------------
  logic u_in_ready, bres_in_ready, bn_fire;
  assign bn_ready = u_in_ready && bres_in_ready;
  assign bn_fire  = bn_valid && bn_ready;

  logic     bres_valid, bres_ready;
  act_blk_t bres_blk;
  stream_fifo #(.W(ABW), .DEPTH(4 * DB)) u_bres (
    .clk, .rst_n,
    .in_valid(bn_fire), .in_ready(bres_in_ready), .in_data(bn_blk),
    .out_valid(bres_valid), .out_ready(bres_ready), .out_data(bres_blk)
  );

  logic     u_valid, u_ready;
  act_blk_t u_blk;
  mxint_linear #(.IN_DIM(DIM), .OUT_DIM(MLP)) u_mm_u (
    .clk, .rst_n,
    .w_we(st_we && (st_idx - IW'(OFF_U)) < IW'(UT)),
    .w_addr($clog2(UT)'(st_idx - IW'(OFF_U))), .w_man(st_tile.man), .w_exp(st_tile.exp),
    .in_valid(bn_fire), .in_ready(u_in_ready), .in_man(bn_blk.man), .in_exp(bn_blk.exp),
    .out_valid(u_valid), .out_ready(u_ready), .out_man(u_blk.man), .out_exp(u_blk.exp)
  );

  logic     g_valid, g_ready;
  act_blk_t g_blk;
  mxint_gelu u_gelu (
    .clk, .rst_n,
    .in_valid(u_valid), .in_ready(u_ready), .in_man(u_blk.man), .in_exp(u_blk.exp),
    .out_valid(g_valid), .out_ready(g_ready), .out_man(g_blk.man), .out_exp(g_blk.exp),
    .out_path()
  );

  logic     d_valid, d_ready;
  act_blk_t d_blk;
  mxint_linear #(.IN_DIM(MLP), .OUT_DIM(DIM)) u_mm_d (
    .clk, .rst_n,
    .w_we(st_we && st_idx >= IW'(OFF_D)),
    .w_addr($clog2(UT)'(st_idx - IW'(OFF_D))), .w_man(st_tile.man), .w_exp(st_tile.exp),
    .in_valid(g_valid), .in_ready(g_ready), .in_man(g_blk.man), .in_exp(g_blk.exp),
    .out_valid(d_valid), .out_ready(d_ready), .out_man(d_blk.man), .out_exp(d_blk.exp)
  );

  // O = D + B_n
  mxint_add u_add2 (
    .a_man(d_blk.man), .a_exp(d_blk.exp), .b_man(bres_blk.man), .b_exp(bres_blk.exp),
    .y_man(o_blk.man), .y_exp(o_blk.exp)
  );
  assign o_valid    = d_valid && bres_valid;
  assign d_ready    = o_ready && bres_valid;
  assign bres_ready = o_ready && d_valid;
endmodule
