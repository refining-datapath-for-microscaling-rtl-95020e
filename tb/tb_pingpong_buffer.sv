// tb_pingpong_buffer: 11 words (the last marked wr_last) through a ping-pong buffer of two
// 4-word banks, with a reader that stalls at random. Words must come out in order with
// rd_last on words 4, 8 and 11; three banks must be handed over; and there must be cycles in
// which one bank is written while the other is read (the point of the double buffer).
module tb_pingpong_buffer;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, wr_last, rd_valid, rd_ready, rd_last;
  logic [31:0] wr_data, rd_data;
  logic [15:0] swaps;
  int checks = 0, failures = 0, overlap = 0;

  pingpong_buffer #(.W(32), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && wr_valid && wr_ready && rd_valid && rd_ready) overlap++;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    wr_valid = 0; wr_data = '0; wr_last = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 11; i++) begin
      wr_valid = 1; wr_data = 32'hA000 + i; wr_last = (i == 10);
      @(negedge clk);
      while (!wr_ready) @(negedge clk);
      @(posedge clk);
      #1;
    end
    wr_valid = 0; wr_last = 0;
  end

  // reader
  initial begin
    int n;
    n = 0;
    rd_ready = 0;
    @(posedge rst_n);
    while (n < 11) begin
      @(posedge clk);
      #1 rd_ready = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (rd_valid && rd_ready) begin
        checks += 2;
        if (rd_data != 32'hA000 + n) begin
          failures++; $display("word %0d: got %h", n, rd_data);
        end
        if (rd_last != (n == 3 || n == 7 || n == 10)) begin
          failures++; $display("word %0d: rd_last %0b", n, rd_last);
        end
        n++;
      end
    end
    @(posedge clk);
    #1 rd_ready = 0;
    repeat (3) @(posedge clk);
    checks += 3;
    if (swaps != 16'd3) begin failures++; $display("swaps %0d", swaps); end
    if (rd_valid) begin failures++; $display("buffer not empty"); end
    if (overlap == 0) begin failures++; $display("no overlapped fill and drain"); end
    $display("overlapped cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
