// vit_block_harness: stimulus, off-chip memory model and checker for an encoder block
// instance of the given sizes (used by tb_vit_block and tb_vit_block_full).
//
// The weight tiles are generated from their schedule index by a hash (mantissas uniform in
// [-31, 31], one exponent per tile chosen so that each matrix has a standard deviation near
// gain / sqrt(fan-in)); the memory model answers each request 1-2 cycles later. The input
// tokens are random 8-bit mantissas with block exponents that differ by up to 2, and one
// block 9 below its neighbours so that LayerNorm has to flush it. The harness pulses start,
// streams the tokens once the weights are loaded, collects the output with a sink that
// stalls at random, and compares the result with a double-precision model of the block
// (exact LayerNorm, softmax, GELU). MXInt quantisation and the approximations of the
// non-linear units make the two differ; the check is that every output token points the same
// way as the reference (cosine similarity above MIN_COS) and that the overall relative
// error stays below MAX_REL. Mechanism counts from the testbench are checked to be non-zero.
module vit_block_harness
  import mxint_pkg::*;
  import mxint_ref_pkg::*;
#(
  parameter int SEQ_LEN = 20,
  parameter int DIM     = 32,
  parameter int HEADS   = 2,
  parameter int MLP     = 64,
  parameter int MAX_CYCLES = 200000,
  parameter real MIN_COS = 0.97,
  parameter real MAX_REL = 0.15,
  parameter int NMECH   = 9,
  localparam int DB    = DIM / BLK,
  localparam int DH    = DIM / HEADS,
  localparam int CH    = DH / BLK,
  localparam int QT    = DB * CH,
  localparam int OT    = DB * DB,
  localparam int UT    = DB * (MLP / BLK),
  localparam int OFF_O = HEADS * 3 * QT,
  localparam int OFF_U = OFF_O + OT,
  localparam int OFF_D = OFF_U + UT,
  localparam int TOTAL = OFF_D + UT,
  localparam int IW    = $clog2(TOTAL)
) (
  output logic            clk,
  output logic            rst_n,
  output logic            start,
  input  logic            weights_ready,
  input  logic            mem_req,
  input  logic [IW-1:0]   mem_addr,
  output logic            mem_rvalid,
  output w_tile_t         mem_rdata,
  output logic            x_valid,
  input  logic            x_ready,
  output act_blk_t        x_blk,
  input  logic            o_valid,
  output logic            o_ready,
  input  act_blk_t        o_blk,
  input  int              mech [NMECH],   // how often each mechanism happened
  input  string           mech_name [NMECH]
);
  int checks = 0, failures = 0, cyc = 0;

  initial clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // ---------------- weights ----------------
  function automatic int hash3(int a, int b, int c);
    logic [31:0] h;
    h = 32'(a) * 32'd2654435761 ^ 32'(b) * 32'd40503 ^ 32'(c) * 32'd97 ^ 32'h1234567;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return int'(h & 32'h7fffffff);
  endfunction

  // matrix of a schedule index: 0 Q, 1 K, 2 V, 3 O, 4 U, 5 D
  function automatic int kind_of(int g);
    if (g < OFF_O) return (g / QT) % 3;
    if (g < OFF_U) return 3;
    if (g < OFF_D) return 4;
    return 5;
  endfunction

  function automatic int tile_exp(int g);
    int fan;
    real gain, sd;
    fan  = (kind_of(g) == 5) ? MLP : DIM;
    gain = (kind_of(g) == 4) ? 4.0 : 1.0;
    sd   = gain / $sqrt(real'(fan)) / 18.0;     // 18 ~ std of a uniform [-31, 31] mantissa
    return 127 + int'($floor($ln(sd) / $ln(2.0) + 0.5)) - ((hash3(g, 99, 99) % 3 == 0) ? 1 : 0);
  endfunction

  function automatic int tile_man(int g, int r, int c);
    return hash3(g, r, c) % 63 - 31;
  endfunction

  // off-chip memory model
  initial begin
    mem_rvalid = 0; mem_rdata = '0;
    forever begin
      @(posedge clk);
      if (rst_n && mem_req) begin
        int g;
        g = int'(mem_addr);
        #1;
        repeat ($urandom_range(0, 1)) @(posedge clk);
        #1;
        mem_rdata.exp = exp_t'(tile_exp(g));
        for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++)
          mem_rdata.man[r][c] = W_M'(tile_man(g, r, c));
        mem_rvalid = 1;
        @(posedge clk);
        #1 mem_rvalid = 0;
      end
    end
  end

  // ---------------- reference model ----------------
  real X  [SEQ_LEN][DIM];
  real Xn [SEQ_LEN][DIM];
  real Wq [HEADS][DH][DIM], Wk [HEADS][DH][DIM], Wv [HEADS][DH][DIM];
  real Wo [DIM][DIM], Wu [MLP][DIM], Wd [DIM][MLP];
  real Bc [SEQ_LEN][DIM], Bn [SEQ_LEN][DIM], O [SEQ_LEN][DIM];
  real Ohw [SEQ_LEN][DIM];

  function automatic real wval(int g, int r, int c);
    return real'(tile_man(g, r, c)) * p2(tile_exp(g) - 127);
  endfunction

  task automatic build_weights();
    for (int h = 0; h < HEADS; h++) for (int k = 0; k < 3; k++)
      for (int t = 0; t < QT; t++) for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
        int g, o, i;
        g = h * 3 * QT + k * QT + t; o = t / DB; i = t % DB;
        if (k == 0) Wq[h][o*16+r][i*16+c] = wval(g, r, c);
        if (k == 1) Wk[h][o*16+r][i*16+c] = wval(g, r, c);
        if (k == 2) Wv[h][o*16+r][i*16+c] = wval(g, r, c);
      end
    for (int t = 0; t < OT; t++) for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++)
      Wo[(t/DB)*16+r][(t%DB)*16+c] = wval(OFF_O + t, r, c);
    for (int t = 0; t < UT; t++) for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      Wu[(t/DB)*16+r][(t%DB)*16+c] = wval(OFF_U + t, r, c);
      Wd[(t/(MLP/16))*16+r][(t%(MLP/16))*16+c] = wval(OFF_D + t, r, c);
    end
  endtask

  task automatic layernorm(ref real a [SEQ_LEN][DIM], ref real y [SEQ_LEN][DIM]);
    for (int t = 0; t < SEQ_LEN; t++) begin
      real m, v;
      m = 0; v = 0;
      for (int j = 0; j < DIM; j++) m += a[t][j];
      m /= DIM;
      for (int j = 0; j < DIM; j++) v += (a[t][j] - m) * (a[t][j] - m);
      v /= DIM;
      for (int j = 0; j < DIM; j++) y[t][j] = (a[t][j] - m) / $sqrt(v);
    end
  endtask

  task automatic reference();
    real q [SEQ_LEN][DH], k [SEQ_LEN][DH], v [SEQ_LEN][DH];
    real bp [SEQ_LEN][DIM];
    layernorm(X, Xn);
    for (int h = 0; h < HEADS; h++) begin
      for (int t = 0; t < SEQ_LEN; t++) for (int d = 0; d < DH; d++) begin
        q[t][d] = 0; k[t][d] = 0; v[t][d] = 0;
        for (int j = 0; j < DIM; j++) begin
          q[t][d] += Wq[h][d][j] * Xn[t][j];
          k[t][d] += Wk[h][d][j] * Xn[t][j];
          v[t][d] += Wv[h][d][j] * Xn[t][j];
        end
      end
      for (int t = 0; t < SEQ_LEN; t++) begin
        real a [SEQ_LEN];
        real amax, s;
        amax = -1e30; s = 0;
        for (int u = 0; u < SEQ_LEN; u++) begin
          a[u] = 0;
          for (int d = 0; d < DH; d++) a[u] += q[t][d] * k[u][d];
          if (a[u] > amax) amax = a[u];
        end
        for (int u = 0; u < SEQ_LEN; u++) begin a[u] = $exp(a[u] - amax); s += a[u]; end
        for (int d = 0; d < DH; d++) begin
          Bc[t][h*DH+d] = 0;
          for (int u = 0; u < SEQ_LEN; u++) Bc[t][h*DH+d] += a[u] / s * v[u][d];
        end
      end
    end
    for (int t = 0; t < SEQ_LEN; t++) for (int j = 0; j < DIM; j++) begin
      bp[t][j] = Xn[t][j];
      for (int i = 0; i < DIM; i++) bp[t][j] += Wo[j][i] * Bc[t][i];
    end
    layernorm(bp, Bn);
    for (int t = 0; t < SEQ_LEN; t++) begin
      real u [MLP];
      for (int m = 0; m < MLP; m++) begin
        u[m] = 0;
        for (int j = 0; j < DIM; j++) u[m] += Wu[m][j] * Bn[t][j];
        u[m] = gelu(u[m]);
      end
      for (int j = 0; j < DIM; j++) begin
        O[t][j] = Bn[t][j];
        for (int m = 0; m < MLP; m++) O[t][j] += Wd[j][m] * u[m];
      end
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; x_valid = 0; x_blk = '0;
    build_weights();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1 start = 1;
    @(posedge clk);
    #1 start = 0;
    for (int t = 0; t < SEQ_LEN; t++) for (int b = 0; b < DB; b++) begin
      int e;
      e = 120 + $urandom_range(0, 2);
      if (t == 1 && b == 0) e = 112;
      x_blk.exp = exp_t'(e);
      for (int i = 0; i < 16; i++) begin
        longint m;
        m = sext($urandom_range(0, 254) - 127, 8);
        x_blk.man[i] = ACT_M'(m);
        X[t][b*16+i] = mx_val(m, e);
      end
      x_valid = 1;
      @(negedge clk);
      while (!x_ready) @(negedge clk);
      @(posedge clk);
      #1;
    end
    x_valid = 0;
  end

  // ---------------- collection and checks ----------------
  initial begin
    int n;
    real err2, ref2;
    o_ready = 0;
    n = 0;
    @(posedge rst_n);
    while (n < SEQ_LEN * DB) begin
      @(posedge clk);
      #1 o_ready = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (o_valid && o_ready) begin
        for (int i = 0; i < 16; i++) begin
          longint m;
          m = sext(o_blk.man[i], 8);
          Ohw[n / DB][(n % DB) * 16 + i] = mx_val(m, int'(o_blk.exp));
        end
        n++;
      end
    end
    $display("all %0d output blocks received at cycle %0d", n, cyc);
    reference();
    err2 = 0; ref2 = 0;
    for (int t = 0; t < SEQ_LEN; t++) begin
      real dot, na, nb, cs;
      dot = 0; na = 0; nb = 0;
      for (int j = 0; j < DIM; j++) begin
        dot += Ohw[t][j] * O[t][j];
        na  += Ohw[t][j] * Ohw[t][j];
        nb  += O[t][j] * O[t][j];
        err2 += (Ohw[t][j] - O[t][j]) * (Ohw[t][j] - O[t][j]);
      end
      ref2 += nb;
      cs = dot / $sqrt(na * nb + 1e-30);
      checks++;
      if (cs < MIN_COS) begin
        failures++;
        $display("token %0d: cosine similarity %f", t, cs);
      end
    end
    checks++;
    $display("relative error of the block output: %f", $sqrt(err2 / ref2));
    if ($sqrt(err2 / ref2) > MAX_REL) failures++;
    for (int k = 0; k < NMECH; k++) begin
      checks++;
      $display("mechanism %-28s happened %0d times", mech_name[k], mech[k]);
      if (mech[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
