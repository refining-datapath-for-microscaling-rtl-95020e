// tb_mxint_dot_tile: random tiles through the MXInt dot-product unit. The expected result is
// the exact integer dot product of every row, then the smallest common right shift that fits
// all rows in 12 bits, round-half-up, and exponent x_exp + w_exp - 127 + shift.
module tb_mxint_dot_tile;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  logic [15:0][7:0]       x_man;
  exp_t                   x_exp, w_exp, y_exp;
  logic [15:0][15:0][5:0] w_man;
  logic [15:0][11:0]      y_man;
  int checks = 0, failures = 0;

  mxint_dot_tile dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      longint sums[];
      int s, ee;
      sums = new[16];
      for (int k = 0; k < 16; k++) x_man[k] = 8'($urandom);
      for (int h = 0; h < 16; h++) for (int k = 0; k < 16; k++) w_man[h][k] = 6'($urandom);
      if (it % 5 == 0) for (int k = 0; k < 16; k++) x_man[k] = 8'($urandom_range(0, 3));
      if (it == 1) begin
        for (int k = 0; k < 16; k++) x_man[k] = 8'h80;
        for (int h = 0; h < 16; h++) for (int k = 0; k < 16; k++) w_man[h][k] = 6'h20;
      end
      x_exp = exp_t'($urandom_range(100, 150));
      w_exp = exp_t'($urandom_range(100, 150));
      #1;
      for (int h = 0; h < 16; h++) begin
        sums[h] = 0;
        for (int k = 0; k < 16; k++) sums[h] += sext(x_man[k], 8) * sext(w_man[h][k], 6);
      end
      s  = ref_shift(sums, 12);
      ee = int'(x_exp) + int'(w_exp) - 127 + s;
      checks++;
      if (int'(y_exp) != ee) begin
        failures++;
        $display("exp mismatch it=%0d got %0d exp %0d", it, y_exp, ee);
      end
      for (int h = 0; h < 16; h++) begin
        checks++;
        if (sext(y_man[h], 12) != ref_round(sums[h], s, 12)) begin
          failures++;
          if (failures < 10) $display("man mismatch it=%0d h=%0d got %0d exp %0d", it, h,
                                      sext(y_man[h], 12), ref_round(sums[h], s, 12));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
