// tb_kv_tile_builder: 20 tokens of a 32-wide head (2 blocks per token) go into a K builder
// and a V builder. Every written tile is captured. For each token t and dimension j the
// tile entry must equal floor(m / 2^(tile_exp - block_exp)), in row t%16 / column j%16 for K
// and transposed for V; the tile exponent must be the largest block exponent of its rows;
// padding rows (tokens 20..31) must be 0; every one of the 4 tiles must be written once and
// done must rise.
module tb_kv_tile_builder;
  import mxint_pkg::*;
  import mxint_ref_pkg::*;

  localparam int SEQ = 20, DH = 32, CH = 2, NG = 2;

  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid, kin_ready, vin_ready;
  logic [15:0][7:0] in_man;
  exp_t in_exp;
  logic kw_we, vw_we, k_done, v_done;
  logic [1:0] kw_addr, vw_addr;
  logic [15:0][15:0][7:0] kw_man, vw_man;
  exp_t kw_exp, vw_exp;
  int checks = 0, failures = 0;

  kv_tile_builder #(.SEQ_LEN(SEQ), .DH(DH), .TRANSPOSE(1'b0)) dut_k (
    .clk, .rst_n, .start, .in_valid, .in_ready(kin_ready), .in_man, .in_exp,
    .w_we(kw_we), .w_addr(kw_addr), .w_man(kw_man), .w_exp(kw_exp), .done(k_done));
  kv_tile_builder #(.SEQ_LEN(SEQ), .DH(DH), .TRANSPOSE(1'b1)) dut_v (
    .clk, .rst_n, .start, .in_valid, .in_ready(vin_ready), .in_man, .in_exp,
    .w_we(vw_we), .w_addr(vw_addr), .w_man(vw_man), .w_exp(vw_exp), .done(v_done));

  always #5 clk = ~clk;

  logic [15:0][15:0][7:0] ktile [4], vtile [4];
  int ktexp [4], vtexp [4], kwrites [4], vwrites [4];
  always @(posedge clk) begin
    if (rst_n && kw_we) begin ktile[kw_addr] <= kw_man; ktexp[kw_addr] <= int'(kw_exp); kwrites[kw_addr]++; end
    if (rst_n && vw_we) begin vtile[vw_addr] <= vw_man; vtexp[vw_addr] <= int'(vw_exp); vwrites[vw_addr]++; end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint xm [SEQ][CH][16];
  int     xe [SEQ][CH];

  initial begin
    in_valid = 0; in_man = '0; in_exp = '0;
    for (int a = 0; a < 4; a++) begin kwrites[a] = 0; vwrites[a] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < SEQ; t++) for (int c = 0; c < CH; c++) begin
      xe[t][c] = $urandom_range(115, 127);
      for (int i = 0; i < 16; i++) begin
        xm[t][c][i] = sext($urandom, 8);
        in_man[i] = 8'(xm[t][c][i]);
      end
      in_exp = exp_t'(xe[t][c]);
      in_valid = 1;
      @(negedge clk);
      while (!(kin_ready && vin_ready)) @(negedge clk);
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks += 2;
    if (!k_done || !v_done) begin failures++; $display("done missing"); end
    for (int a = 0; a < 4; a++)
      if (kwrites[a] != 1 || vwrites[a] != 1) begin
        failures++; $display("tile %0d written %0d/%0d times", a, kwrites[a], vwrites[a]);
      end
    for (int g = 0; g < NG; g++) for (int c = 0; c < CH; c++) begin
      int emax, ka, va;
      ka = g * CH + c;       // K: token group major
      va = c * NG + g;       // V: chunk major
      emax = 0;
      for (int r = 0; r < 16; r++) if (g*16 + r < SEQ && xe[g*16+r][c] > emax) emax = xe[g*16+r][c];
      checks += 2;
      if (ktexp[ka] != emax || vtexp[va] != emax) begin
        failures++; $display("tile g%0d c%0d exp %0d/%0d expected %0d", g, c, ktexp[ka], vtexp[va], emax);
      end
      for (int r = 0; r < 16; r++) for (int j = 0; j < 16; j++) begin
        longint ev, kv, vv;
        int t;
        t = g * 16 + r;
        ev = (t < SEQ) ? fdiv(xm[t][c][j], emax - xe[t][c] > 8 ? 8 : emax - xe[t][c]) : 0;
        kv = sext(ktile[ka][r][j], 8);
        vv = sext(vtile[va][j][r], 8);
        checks++;
        if (kv != ev || vv != ev) begin
          failures++;
          if (failures < 10) $display("g%0d c%0d r%0d j%0d: K %0d V %0d expected %0d", g, c, r, j, kv, vv, ev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
