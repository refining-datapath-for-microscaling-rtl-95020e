// tb_vit_block_full: one encoder block end to end at the default (DeiT-Tiny) size: 197 tokens,
// 192 hidden, 3 heads, 768 MLP. The block is instantiated with its own default parameters;
// stimulus, memory model, reference and checks are those of vit_block_harness, and the same
// mechanism counters as in tb_vit_block must all be non-zero.
module tb_vit_block_full;
  import mxint_pkg::*;

  localparam int SEQ_LEN = 197, DIM = 192, HEADS = 3, MLP = 768;
  localparam int TOTAL = HEADS * 3 * (DIM/16) * (DIM/HEADS/16) + (DIM/16)*(DIM/16) + 2*(DIM/16)*(MLP/16);

  logic clk, rst_n, start, weights_ready, mem_req, mem_rvalid, x_valid, x_ready, o_valid, o_ready;
  logic [$clog2(TOTAL)-1:0] mem_addr;
  w_tile_t  mem_rdata;
  act_blk_t x_blk, o_blk;

  vit_block dut (.*);

  `include "vit_block_mech.svh"

  vit_block_harness #(.SEQ_LEN(SEQ_LEN), .DIM(DIM), .HEADS(HEADS), .MLP(MLP),
                      .MAX_CYCLES(3000000)) harness (.*);
endmodule
