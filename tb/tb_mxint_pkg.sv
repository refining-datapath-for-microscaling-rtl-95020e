// tb_mxint_pkg: checks the shared MXInt definitions: the sizes of the published design point
// (8-bit exponent, blocks of 16, 8-bit activation and 6-bit weight mantissas, 12-bit
// accumulator), the packed widths of the block and tile types, and that unbias() maps every
// stored exponent e to e - 127 (compared with plain integer arithmetic).
module tb_mxint_pkg;
  import mxint_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act_blk_t a;
    w_tile_t  w;
    a_tile_t  t;
    check(EXP_W == 8, "exponent width 8");
    check(BLK == 16, "block size 16");
    check(ACT_M == 8 && W_M == 6 && ACC_M == 12, "mantissa widths 8/6/12");
    check($bits(a) == 8 + 16 * 8, "act_blk_t width");
    check($bits(w) == 8 + 256 * 6, "w_tile_t width");
    check($bits(t) == 8 + 256 * 8, "a_tile_t width");
    for (int e = 0; e < 256; e++) begin
      iexp_t u;
      u = unbias(exp_t'(e));
      check(int'(u) == e - 127, $sformatf("unbias(%0d) = %0d", e, int'(u)));
    end
    // a packed block keeps its exponent in the top bits and lane 0 in the lowest bits
    a = '0;
    a.exp = 8'hA5;
    a.man[0] = 8'h81;
    check(a[$bits(a)-1 -: 8] == 8'hA5 && a[7:0] == 8'h81, "act_blk_t layout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
