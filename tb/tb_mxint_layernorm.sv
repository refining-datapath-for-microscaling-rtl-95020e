// tb_mxint_layernorm: tokens of 64 values (4 MXInt blocks) with block exponents up to 8
// apart go through the LayerNorm unit. Each output must be close to the real
// (x - mean) / std of the token (the 5-bit 1/sqrt table, the alignment shift and the 8-bit
// output limit the accuracy; the tolerance is 0.06 + 6 %). The unit's counts of aligned and
// flushed blocks must match the exponents sent, and a token must take 4*4+2 cycles.
module tb_mxint_layernorm;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  localparam int DIM = 64, NB = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0][7:0] in_man, out_man;
  exp_t in_exp, out_exp;
  logic [15:0] align_cnt, flush_cnt;
  int checks = 0, failures = 0, cyc = 0;
  int n_align = 0, n_flush = 0;

  mxint_layernorm #(.DIM(DIM)) dut (.*);

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
    for (int tok = 0; tok < 60; tok++) begin
      longint xm [NB][16];
      int     xe [NB];
      int     emax, exp_align, exp_flush, t0, t1;
      real    xv [DIM];
      real    mean, var_v, sd;
      emax = 0; exp_align = 0; exp_flush = 0;
      for (int b = 0; b < NB; b++) begin
        xe[b] = (tok % 3 == 0) ? 120 : 120 - $urandom_range(0, (tok % 3 == 1) ? 2 : 8);
        if (xe[b] > emax) emax = xe[b];
        for (int i = 0; i < 16; i++) xm[b][i] = sext($urandom, 8);
      end
      for (int b = 0; b < NB; b++) begin
        if (xe[b] != emax) exp_align++;
        if (emax - xe[b] > 6) exp_flush++;
      end
      // reference on the values as the unit sees them after alignment
      mean = 0;
      for (int b = 0; b < NB; b++) for (int i = 0; i < 16; i++) begin
        xv[b*16+i] = (emax - xe[b] > 6) ? 0.0 : real'(fdiv(xm[b][i], emax - xe[b]));
        mean += xv[b*16+i];
      end
      mean /= DIM;
      var_v = 0;
      for (int j = 0; j < DIM; j++) var_v += (xv[j] - mean) * (xv[j] - mean);
      var_v /= DIM;
      sd = $sqrt(var_v);
      for (int b = 0; b < NB; b++) begin
        for (int i = 0; i < 16; i++) in_man[i] = 8'(xm[b][i]);
        in_exp = exp_t'(xe[b]);
        in_valid = 1;
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        if (b == 0) t0 = cyc;
        @(posedge clk);
        #1;
      end
      in_valid = 0;
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while (!out_valid) @(negedge clk);
        for (int i = 0; i < 16; i++) begin
          real got, ref_v;
          longint om;
          om = sext(out_man[i], 8);
          got = mx_val(om, int'(out_exp));
          ref_v = (xv[b*16+i] - mean) / sd;
          checks++;
          if (fabs(got - ref_v) > 0.06 + 0.06 * fabs(ref_v)) begin
            failures++;
            if (failures < 10) $display("tok %0d b %0d i %0d got %f expected %f", tok, b, i, got, ref_v);
          end
        end
        t1 = cyc;
        @(posedge clk);
        #1;
      end
      checks += 3;
      if (int'(align_cnt) != exp_align || int'(flush_cnt) != exp_flush) begin
        failures++;
        $display("tok %0d: align %0d/%0d flush %0d/%0d", tok, align_cnt, exp_align, flush_cnt, exp_flush);
      end
      n_align += exp_align; n_flush += exp_flush;
      if (t1 - t0 + 1 != 4 * NB + 2) begin
        failures++;
        $display("tok %0d took %0d cycles, expected %0d", tok, t1 - t0 + 1, 4 * NB + 2);
      end
      if (n_align == 0 && tok == 59) failures++;
    end
    checks++;
    if (n_flush == 0) failures++;
    $display("aligned blocks %0d, flushed blocks %0d", n_align, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
