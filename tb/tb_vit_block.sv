// tb_vit_block: one encoder block end to end at reduced size (20 tokens, 32 hidden, 2 heads,
// 64 MLP), checked against a double-precision model by vit_block_harness. It also counts how
// often each mechanism of the design happens and requires every one at least once: bank
// swaps of the ping-pong buffer, LayerNorm exponent alignment and flushing, softmax padding
// lanes, the three GELU paths, Q waiting for K and V, and output back-pressure.
module tb_vit_block;
  import mxint_pkg::*;

  localparam int SEQ_LEN = 20, DIM = 32, HEADS = 2, MLP = 64;
  localparam int TOTAL = HEADS * 3 * (DIM/16) * (DIM/HEADS/16) + (DIM/16)*(DIM/16) + 2*(DIM/16)*(MLP/16);

  logic clk, rst_n, start, weights_ready, mem_req, mem_rvalid, x_valid, x_ready, o_valid, o_ready;
  logic [$clog2(TOTAL)-1:0] mem_addr;
  w_tile_t  mem_rdata;
  act_blk_t x_blk, o_blk;

  vit_block #(.SEQ_LEN(SEQ_LEN), .DIM(DIM), .HEADS(HEADS), .MLP(MLP)) dut (.*);

  `include "vit_block_mech.svh"

  vit_block_harness #(.SEQ_LEN(SEQ_LEN), .DIM(DIM), .HEADS(HEADS), .MLP(MLP),
                      .MAX_CYCLES(100000)) harness (.*);
endmodule
