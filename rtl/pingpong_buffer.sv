// pingpong_buffer: two on-chip RAM banks used alternately between off-chip memory and the
// operators' weight stores.
//
// Words are written into the "fill" bank in order until it holds DEPTH words (or a word
// marked wr_last arrives); the bank is then handed to the read side and filling continues in
// the other bank, if that one is empty. The read side drains the full bank in order and
// hands it back when its last word is taken. So one bank can be filled from off-chip memory
// while the other is emptied into the operators. Read data come combinationally from the
// bank (asynchronous read). wr_ready is low while both banks are full; rd_valid is high while
// the drain bank is full. swaps counts the banks handed over.
// The paper shows the two on-chip RAMs between off-chip memory and the operators; the bank
// depth, the handover rule and the handshakes are this design's choices.
module pingpong_buffer #(
  parameter int W     = 1544,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  input  logic         wr_last,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data,
  output logic         rd_last,     // last word of the drained bank
  output logic [15:0]  swaps
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  bank [2][DEPTH];
  logic [1:0]    full, full_next;
  logic [AW:0]   count [2];         // words held by each bank
  logic          fsel, dsel;        // bank being filled / drained
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign wr_ready = !full[fsel];
  assign rd_valid = full[dsel];
  assign rd_data  = bank[dsel][rp];
  assign rd_last  = (AW+1)'(rp) == count[dsel] - 1'b1;
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_valid && rd_ready;

  always_ff @(posedge clk) if (push) bank[fsel][wp] <= wr_data;

  always_comb begin
    full_next = full;
    if (push && (wr_last || wp == AW'(DEPTH - 1))) full_next[fsel] = 1'b1;
    if (pop && rd_last)                            full_next[dsel] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= '0;
      count[0] <= '0;
      count[1] <= '0;
      fsel     <= 1'b0;
      dsel     <= 1'b0;
      wp       <= '0;
      rp       <= '0;
      swaps    <= '0;
    end else begin
      if (push) begin
        if (wr_last || wp == AW'(DEPTH - 1)) begin
          count[fsel] <= (AW+1)'(wp) + 1'b1;
          fsel        <= !fsel;
          wp          <= '0;
          swaps       <= swaps + 1'b1;
        end else wp <= wp + 1'b1;
      end
      if (pop) begin
        if (rd_last) begin
          dsel    <= !dsel;
          rp      <= '0;
        end else rp <= rp + 1'b1;
      end
      full <= full_next;
    end
  end
endmodule
