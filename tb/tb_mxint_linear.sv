// tb_mxint_linear: a 48-in, 32-out MXInt linear unit (3 input blocks, 2 output blocks).
// Random weight tiles are written, then tokens are streamed through. Each output must match
// the real-valued product W x within the rounding of the 12-bit accumulator and the 8-bit
// output, and a token must take IN_BLKS + OUT_BLKS*(IN_BLKS+1) cycles with a ready sink.
module tb_mxint_linear;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  localparam int IN_DIM = 48, OUT_DIM = 32, IB = 3, OB = 2;

  logic clk = 0, rst_n = 0;
  logic w_we;
  logic [2:0] w_addr;
  logic [15:0][15:0][5:0] w_man;
  exp_t w_exp;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0][7:0] in_man, out_man;
  exp_t in_exp, out_exp;
  int checks = 0, failures = 0;
  int cyc = 0;

  mxint_linear #(.IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint wm [OB*IB][16][16];
  int     we [OB*IB];
  longint xm [IB][16];
  int     xe [IB];

  initial begin
    w_we = 0; in_valid = 0; out_ready = 1; w_addr = '0; w_man = '0; w_exp = '0;
    in_man = '0; in_exp = '0;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1;
    for (int t = 0; t < OB*IB; t++) begin
      we[t] = $urandom_range(115, 125);
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
        wm[t][r][c] = sext($urandom, 6);
        w_man[r][c] = 6'(wm[t][r][c]);
      end
      w_exp = exp_t'(we[t]); w_addr = 3'(t); w_we = 1;
      @(posedge clk);
      #1;
    end
    w_we = 0;
    for (int tok = 0; tok < 6; tok++) begin
      int t0, t_first, t_last;
      for (int b = 0; b < IB; b++) begin
        xe[b] = (tok == 5 && b == 1) ? 100 : $urandom_range(118, 124);
        for (int i = 0; i < 16; i++) xm[b][i] = sext($urandom, 8);
      end
      out_ready = (tok % 2 == 0);
      t0 = cyc;
      for (int b = 0; b < IB; b++) begin
        in_valid = 1; in_man = '0;
        for (int i = 0; i < 16; i++) in_man[i] = 8'(xm[b][i]);
        in_exp = exp_t'(xe[b]);
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1;
      end
      in_valid = 0;
      for (int o = 0; o < OB; o++) begin
        int k;
        k = 0;
        while (!(out_valid && out_ready)) begin
          @(negedge clk);
          if (tok % 2 == 1) out_ready = ($urandom_range(0, 2) == 0);
          if (out_valid && out_ready) break;
          @(posedge clk);
          k++;
        end
        for (int i = 0; i < 16; i++) begin
          real ref_v, abs_sum, got, tol;
          ref_v = 0; abs_sum = 0;
          for (int b = 0; b < IB; b++) for (int c = 0; c < 16; c++) begin
            real p;
            p = mx_val(xm[b][c], xe[b]) * mx_val(wm[o*IB+b][i][c], we[o*IB+b]);
            ref_v += p; abs_sum += fabs(p);
          end
          begin
            longint om;
            om = sext(out_man[i], 8);
            got = mx_val(om, int'(out_exp));
          end
          tol = 0.5 * p2(int'(out_exp) - 127) + abs_sum * p2(-9);
          checks++;
          if (fabs(got - ref_v) > tol) begin
            failures++;
            if (failures < 10) $display("tok %0d o %0d i %0d: got %f exp %f", tok, o, i, got, ref_v);
          end
        end
        if (o == OB - 1) t_last = cyc;
        @(posedge clk);
        #1;
        if (tok % 2 == 0) out_ready = 1;
      end
      if (tok % 2 == 0) begin
        // with the sink always ready: IB load cycles, then OB*(IB+1) cycles
        checks++;
        if (t_last - t0 + 1 != IB + OB * (IB + 1)) begin
          failures++;
          $display("token %0d took %0d cycles, expected %0d", tok, t_last - t0 + 1, IB + OB*(IB+1));
        end
      end
      out_ready = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
