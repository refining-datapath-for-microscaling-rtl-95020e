// tb_mxint_softmax: rows of 40 scores (3 MXInt blocks, the last 8 lanes padding) through the
// softmax unit. The expected result uses the paper's exponential split with real arithmetic:
// t = floor(4 * x * 369/256) / 4 (x log2 e cast to a fixed-point number with 2 fraction
// bits), p = 2^t, y = p / sum(p). Outputs must be within 3 % + half an output step of y,
// padding lanes must be 0 and the 40 outputs must sum to 1 within 4 %. The first output
// must be offered QB + 1 = 32 cycles after the clock edge that takes the last input.
module tb_mxint_softmax;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  localparam int SEQ = 40, NB = 3, QB = 31;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0][7:0] in_man, out_man;
  exp_t in_exp, out_exp;
  logic [15:0] sat_cnt;
  int checks = 0, failures = 0, cyc = 0;

  mxint_softmax #(.SEQ_LEN(SEQ)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; in_man = '0; in_exp = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int row = 0; row < 40; row++) begin
      longint xm [NB][16];
      int     xe [NB];
      real    p [NB*16];
      real    psum, ysum;
      int     tl, tf;
      psum = 0;
      for (int b = 0; b < NB; b++) begin
        xe[b] = $urandom_range(119, 123);
        for (int i = 0; i < 16; i++) begin
          longint t4;
          xm[b][i] = sext($urandom, 8);
          // 4 * x * 369/256, floored
          t4 = fdiv(xm[b][i] * 369, 8 - 2 - (xe[b] - 127));
          p[b*16+i] = (b*16 + i < SEQ) ? $pow(2.0, real'(t4) / 4.0) : 0.0;
          psum += p[b*16+i];
        end
      end
      for (int b = 0; b < NB; b++) begin
        for (int i = 0; i < 16; i++) in_man[i] = 8'(xm[b][i]);
        in_exp = exp_t'(xe[b]);
        in_valid = 1;
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        tl = cyc;
        @(posedge clk);
        #1;
      end
      in_valid = 0;
      ysum = 0;
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while (!out_valid) @(negedge clk);
        if (b == 0) tf = cyc;
        for (int i = 0; i < 16; i++) begin
          real got, ref_v;
          longint om;
          om = sext(out_man[i], 8);
          got = mx_val(om, int'(out_exp));
          ref_v = p[b*16+i] / psum;
          ysum += got;
          checks++;
          if (b*16 + i >= SEQ ? (om != 0)
              : (fabs(got - ref_v) > 0.03 * ref_v + 0.5 * p2(int'(out_exp) - 127))) begin
            failures++;
            if (failures < 10) $display("row %0d lane %0d got %g expected %g", row, b*16+i, got, ref_v);
          end
        end
        @(posedge clk);
        #1;
      end
      checks += 2;
      if (fabs(ysum - 1.0) > 0.04) begin
        failures++;
        $display("row %0d sums to %f", row, ysum);
      end
      // tl and tf are sampled half a cycle before an edge: tf - tl = 1 + (QB + 1)
      if (tf - tl != QB + 2) begin
        failures++;
        $display("row %0d: first output %0d cycles after last input, expected %0d", row, tf - tl, QB + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
