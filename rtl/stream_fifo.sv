// stream_fifo: synchronous first-in first-out buffer on valid/ready streams.
//
// DEPTH entries of W bits in a register array with read and write pointers and an occupancy
// counter. in_ready is high while the buffer is not full, out_valid while it is not empty;
// the head entry is read combinationally. A write and a read may happen in the same cycle.
// Used for the token buffers the encoder block needs for its residual paths and for holding
// Q until K and V are complete. This helper is this design's own.
module stream_fifo #(
  parameter int W     = 136,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          push, pop;

  assign in_ready  = cnt != (AW+1)'(DEPTH);
  assign out_valid = cnt != '0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
