// mxint_linear: streaming MXInt matrix multiply y = W x for one token at a time (the MM_*
// operators of the encoder block).
//
// The token arrives as IN_DIM/K activation blocks on a valid/ready stream and is held in a
// small buffer. For each group of H outputs the unit walks the IN_DIM/K weight tiles of that
// row of tiles, one per cycle: mxint_dot_tile produces H partial sums as 12-bit MXInt values
// and mxint_add adds them into a 12-bit-mantissa MXInt accumulator (the paper widens the
// accumulator to 12 bits). When the row of tiles is done the accumulator is rounded to OUT_M
// bits and sent as one output block; the next row starts when that block is taken.
// Weights live in an on-chip tile memory (asynchronous read) written through w_we/w_addr;
// tile (o, i) sits at address o*IN_BLKS + i. For the attention products the same unit is
// used with tiles of activations (WM = 8).
//
// Timing: after the last input block, each output block takes IN_BLKS cycles plus one cycle
// in which it is offered; in_ready is low while a token is being processed.
// The paper gives the dot-product datapath and the 12-bit accumulator; the token buffer,
// the tile order and the handshake are this design's choices.
module mxint_linear
  import mxint_pkg::*;
#(
  parameter int IN_DIM  = 192,
  parameter int OUT_DIM = 192,
  parameter int K       = BLK,
  parameter int H       = BLK,
  parameter int XM      = ACT_M,
  parameter int WM      = W_M,
  parameter int AM      = ACC_M,
  parameter int OM      = ACT_M
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight tile write port
  input  logic                         w_we,
  input  logic [$clog2((IN_DIM/K)*(OUT_DIM/H))-1:0] w_addr,
  input  logic [H-1:0][K-1:0][WM-1:0]  w_man,
  input  exp_t                         w_exp,
  // input activation stream
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [K-1:0][XM-1:0]         in_man,
  input  exp_t                         in_exp,
  // output activation stream
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [H-1:0][OM-1:0]         out_man,
  output exp_t                         out_exp
);
  localparam int IN_BLKS  = IN_DIM / K;
  localparam int OUT_BLKS = OUT_DIM / H;
  localparam int NT       = IN_BLKS * OUT_BLKS;
  localparam int AW       = $clog2(NT);
  localparam int IBW      = (IN_BLKS > 1) ? $clog2(IN_BLKS) : 1;
  localparam int OBW      = (OUT_BLKS > 1) ? $clog2(OUT_BLKS) : 1;

  typedef enum logic [1:0] {LOAD, MAC, EMIT} state_e;

  logic [H-1:0][K-1:0][WM-1:0] wmem_man [NT];
  exp_t                        wmem_exp [NT];
  logic [K-1:0][XM-1:0]        xbuf_man [IN_BLKS];
  exp_t                        xbuf_exp [IN_BLKS];

  state_e           state;
  logic [IBW-1:0]   ib;
  logic [OBW-1:0]   ob;
  logic [H-1:0][AM-1:0] acc_man;
  exp_t             acc_exp;
  logic             acc_first;

  always_ff @(posedge clk)
    if (w_we) begin
      wmem_man[w_addr] <= w_man;
      wmem_exp[w_addr] <= w_exp;
    end

  // datapath: one tile per cycle
  logic [AW-1:0]        t_addr;
  logic [H-1:0][AM-1:0] p_man, s_man;
  exp_t                 p_exp, s_exp;

  assign t_addr = AW'(ob) * AW'(IN_BLKS) + AW'(ib);

  mxint_dot_tile #(.K(K), .H(H), .XM(XM), .WM(WM), .OUT_M(AM)) u_dot (
    .x_man(xbuf_man[ib]), .x_exp(xbuf_exp[ib]),
    .w_man(wmem_man[t_addr]), .w_exp(wmem_exp[t_addr]),
    .y_man(p_man), .y_exp(p_exp)
  );

  mxint_add #(.N(H), .M(AM), .OUT_M(AM)) u_acc (
    .a_man(acc_man), .a_exp(acc_exp), .b_man(p_man), .b_exp(p_exp),
    .y_man(s_man), .y_exp(s_exp)
  );

  mxint_block_quant #(.N(H), .IN_W(AM), .OUT_M(OM)) u_out (
    .in_val(acc_man), .in_exp(unbias(acc_exp)), .out_man(out_man), .out_exp(out_exp)
  );

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == EMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= LOAD;
      ib        <= '0;
      ob        <= '0;
      acc_man   <= '0;
      acc_exp   <= '0;
      acc_first <= 1'b1;
    end else begin
      unique case (state)
        LOAD: if (in_valid) begin
          xbuf_man[ib] <= in_man;
          xbuf_exp[ib] <= in_exp;
          if (ib == IBW'(IN_BLKS - 1)) begin
            ib        <= '0;
            ob        <= '0;
            acc_first <= 1'b1;
            state     <= MAC;
          end else ib <= ib + 1'b1;
        end
        MAC: begin
          if (acc_first) begin
            acc_man <= p_man;
            acc_exp <= p_exp;
          end else begin
            acc_man <= s_man;
            acc_exp <= s_exp;
          end
          acc_first <= 1'b0;
          if (ib == IBW'(IN_BLKS - 1)) begin
            ib    <= '0;
            state <= EMIT;
          end else ib <= ib + 1'b1;
        end
        EMIT: if (out_ready) begin
          acc_first <= 1'b1;
          if (ob == OBW'(OUT_BLKS - 1)) begin
            ob    <= '0;
            state <= LOAD;
          end else begin
            ob    <= ob + 1'b1;
            state <= MAC;
          end
        end
        default: state <= LOAD;
      endcase
    end
  end
endmodule
