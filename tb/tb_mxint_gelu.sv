// tb_mxint_gelu: random MXInt blocks over a wide range of exponents through the GELU unit.
// Expected per lane, from the real GELU: x rounded to the 0.25 grid of the 5-bit LUT address;
// x >= 3 gives the input mantissa, x <= -3 gives 0, otherwise round(GELU(x) * 32) brought
// back to the input exponent (round half up, saturate). The exponent must pass unchanged,
// every path must be taken, and a block must appear one cycle after it is accepted.
module tb_mxint_gelu;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0][7:0] in_man, out_man;
  exp_t in_exp, out_exp;
  logic [15:0][1:0] out_path;
  int checks = 0, failures = 0;
  int n_lut = 0, n_relu = 0, n_zero = 0;

  mxint_gelu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; in_man = '0; in_exp = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      longint xm [16];
      int e;
      e = $urandom_range(113, 125);
      for (int i = 0; i < 16; i++) begin
        xm[i] = sext($urandom, 8);
        in_man[i] = 8'(xm[i]);
      end
      in_exp = exp_t'(e);
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid || out_exp != exp_t'(e)) begin
        failures++;
        $display("it=%0d: valid=%0b exp %0d expected %0d", it, out_valid, out_exp, e);
      end
      for (int i = 0; i < 16; i++) begin
        real x, xr;
        longint exp_m, got;
        int path;
        x  = mx_val(xm[i], e);
        xr = real'(rnd(x * 4.0));
        if (xm[i] == 0) begin
          exp_m = 0; path = 0;
        end else if (xr >= 12.0) begin
          exp_m = xm[i]; path = 1;
        end else if (xr <= -12.0) begin
          exp_m = 0; path = 2;
        end else begin
          longint entry;
          real y;
          entry = rnd(gelu(xr / 4.0) * 32.0);
          y = real'(entry) / 32.0 / p2(e - 127);
          exp_m = rnd(y);
          if (exp_m > 127) exp_m = 127;
          if (exp_m < -128) exp_m = -128;
          path = 0;
        end
        got = sext(out_man[i], 8);
        checks++;
        if (got != exp_m || int'(out_path[i]) != path) begin
          failures++;
          if (failures < 10) $display("it=%0d i=%0d x=%f got %0d/%0d expected %0d/%0d",
                                      it, i, x, got, out_path[i], exp_m, path);
        end
        if (xm[i] != 0) begin
          if (path == 0) n_lut++;
          if (path == 1) n_relu++;
          if (path == 2) n_zero++;
        end
      end
    end
    checks++;
    if (n_lut == 0 || n_relu == 0 || n_zero == 0) begin
      failures++;
      $display("paths not all taken: lut %0d relu %0d zero %0d", n_lut, n_relu, n_zero);
    end
    $display("paths: lut %0d relu %0d zero %0d", n_lut, n_relu, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
