// tb_mxint_concat: three heads each offer tokens of two tagged blocks, with random gaps and a
// random sink. The output must be head 0's two blocks, then head 1's, then head 2's, token
// after token, each block exactly once.
module tb_mxint_concat;
  import mxint_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [2:0] in_valid, in_ready;
  logic [2:0][15:0][7:0] in_man;
  exp_t [2:0] in_exp;
  logic out_valid, out_ready;
  logic [15:0][7:0] out_man;
  exp_t out_exp;
  int checks = 0, failures = 0;
  int sent [3];

  mxint_concat #(.HEADS(3), .PER_HEAD(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // head h, block k carries tag h*64 + k in lane 0 and its exponent
  for (genvar h = 0; h < 3; h++) begin : g_src
    initial begin
      in_valid[h] = 0; in_man[h] = '0; in_exp[h] = '0;
      sent[h] = 0;
      @(posedge rst_n);
      for (int k = 0; k < 20; k++) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        #1;
        in_valid[h] = 1;
        in_man[h] = '0;
        in_man[h][0] = 8'(h * 64 + k);
        in_exp[h] = exp_t'(100 + h);
        @(negedge clk);
        while (!in_ready[h]) @(negedge clk);
        @(posedge clk);
        #1 in_valid[h] = 0;
      end
    end
  end

  initial begin
    int n;
    out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    n = 0;
    while (n < 60) begin
      @(posedge clk);
      #1 out_ready = ($urandom_range(0, 2) != 0);
      @(negedge clk);
      if (out_valid && out_ready) begin
        int tok, h, k;
        tok = n / 6; h = (n % 6) / 2; k = tok * 2 + n % 2;
        checks++;
        if (out_man[0] != 8'(h * 64 + k) || out_exp != exp_t'(100 + h)) begin
          failures++;
          $display("output %0d: tag %0d exp %0d, expected %0d/%0d", n, out_man[0], out_exp, h*64+k, 100+h);
        end
        n++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
