// tb_weight_scheduler: a schedule of 21 tiles (32-bit words here) through a scheduler with
// 4-word ping-pong banks, against an off-chip memory model that answers each request after
// 1 to 3 cycles with data = f(address). Every tile must be stored exactly once, in order,
// with its own data; done must rise only after the last one; 6 bank swaps are expected.
module tb_weight_scheduler;
  localparam int TOTAL = 21;

  logic clk = 0, rst_n = 0, start = 0;
  logic mem_req, mem_rvalid, st_we, done;
  logic [4:0] mem_addr, st_idx;
  logic [31:0] mem_rdata, st_data;
  logic [15:0] swaps;
  int checks = 0, failures = 0, stored = 0;

  weight_scheduler #(.W(32), .TOTAL(TOTAL), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] tile_data(int a);
    return 32'(a) * 32'h9E3779B1 ^ 32'h5A5A0000;
  endfunction

  // off-chip memory model: one request at a time, 1..3 cycles latency
  initial begin
    mem_rvalid = 0; mem_rdata = '0;
    forever begin
      @(posedge clk);
      if (rst_n && mem_req) begin
        int a;
        a = int'(mem_addr);
        #1;
        repeat ($urandom_range(0, 2)) @(posedge clk);
        #1;
        mem_rvalid = 1; mem_rdata = tile_data(a);
        @(posedge clk);
        #1 mem_rvalid = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && st_we) begin
    checks += 2;
    if (int'(st_idx) != stored) begin failures++; $display("stored index %0d, expected %0d", st_idx, stored); end
    if (st_data != tile_data(int'(st_idx))) begin failures++; $display("tile %0d data %h", st_idx, st_data); end
    if (done) begin failures++; $display("done before the last tile"); end
    stored++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1 start = 1;
    @(posedge clk);
    #1 start = 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    checks += 2;
    if (stored != TOTAL) begin failures++; $display("%0d tiles stored", stored); end
    if (swaps != 16'd6) begin failures++; $display("swaps %0d", swaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
