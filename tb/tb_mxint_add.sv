// tb_mxint_add: random pairs of MXInt blocks, including large exponent gaps. Each output
// element must be within half an output step plus the dropped guard bits of the exact sum,
// and the mantissas must use the 8-bit range (no needless loss of precision).
module tb_mxint_add;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  logic [15:0][7:0] a_man, b_man, y_man;
  exp_t             a_exp, b_exp, y_exp;
  int checks = 0, failures = 0;

  mxint_add dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      real ya, yr, tol, big;
      int emax;
      for (int i = 0; i < 16; i++) begin
        a_man[i] = 8'($urandom);
        b_man[i] = 8'($urandom);
      end
      a_exp = exp_t'($urandom_range(110, 140));
      b_exp = (it % 4 == 0) ? exp_t'($urandom_range(100, 150)) : a_exp + exp_t'($urandom_range(0, 3));
      #1;
      emax = (a_exp > b_exp) ? int'(a_exp) : int'(b_exp);
      big = 0;
      for (int i = 0; i < 16; i++) begin
        longint ym, am, bm;
        ym = sext(y_man[i], 8); am = sext(a_man[i], 8); bm = sext(b_man[i], 8);
        ya = mx_val(ym, 0 + y_exp);
        yr = mx_val(am, 0 + a_exp) + mx_val(bm, 0 + b_exp);
        tol = 0.5 * p2(int'(y_exp) - 127) + p2(emax - 127 - 2) + 1e-12;
        checks++;
        if (fabs(ya - yr) > tol) begin
          failures++;
          if (failures < 10) $display("it=%0d i=%0d got %f exp %f", it, i, ya, yr);
        end
        if (fabs(real'(ym)) > big) big = fabs(real'(ym));
      end
      // the largest output mantissa uses the top of the range unless the block was not shifted
      checks++;
      if (int'(y_exp) > emax - 2 && big < 64.0 && big != 0.0) begin
        failures++;
        $display("it=%0d output not normalised: max |m| = %0f", it, big);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
