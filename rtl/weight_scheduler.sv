// weight_scheduler: predefined schedule that brings the weight tiles of the encoder block
// from off-chip memory into the operators' on-chip weight stores through the ping-pong
// buffer.
//
// After start, tiles 0 .. TOTAL-1 are read from off-chip memory in order (one request
// outstanding at a time: mem_req/mem_addr, answered by mem_rvalid/mem_rdata) and written
// into the ping-pong buffer. On its other side the buffer is drained one tile per cycle
// onto the store port (st_we, st_idx, st_data); st_idx is the tile's position in the
// schedule, which the owner of the stores decodes into a unit and a local address. done is
// high once all TOTAL tiles have been stored, until the next start.
// The paper specifies a predefined scheduler that prefetches parameters through a ping-pong
// buffer; the linear tile order, the single outstanding request and the port protocol are
// this design's choices. The buffer's rd_last output is left unconnected: the drain side
// counts tiles itself, so the lint note about that empty pin is expected.
module weight_scheduler #(
  parameter int W     = 1544,
  parameter int TOTAL = 1728,
  parameter int DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  // off-chip memory read port
  output logic                     mem_req,
  output logic [$clog2(TOTAL)-1:0] mem_addr,
  input  logic                     mem_rvalid,
  input  logic [W-1:0]             mem_rdata,
  // weight store port
  output logic                     st_we,
  output logic [$clog2(TOTAL)-1:0] st_idx,
  output logic [W-1:0]             st_data,
  output logic                     done,
  output logic [15:0]              swaps
);
  localparam int IW = $clog2(TOTAL);

  logic          busy, waiting;
  logic [IW:0]   issued, stored;
  logic          pp_wr_ready, pp_rd_valid;

  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) u_pp (
    .clk, .rst_n,
    .wr_valid(mem_rvalid), .wr_ready(pp_wr_ready), .wr_data(mem_rdata),
    .wr_last(issued == (IW+1)'(TOTAL)),
    .rd_valid(pp_rd_valid), .rd_ready(1'b1), .rd_data(st_data), .rd_last(),
    .swaps(swaps)
  );

  assign mem_req  = busy && !waiting && issued != (IW+1)'(TOTAL) && pp_wr_ready;
  assign mem_addr = IW'(issued);
  assign st_we    = pp_rd_valid;
  assign st_idx   = IW'(stored);
  assign done     = !busy && stored == (IW+1)'(TOTAL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      waiting <= 1'b0;
      issued  <= '0;
      stored  <= '0;
    end else begin
      if (start) begin
        busy    <= 1'b1;
        waiting <= 1'b0;
        issued  <= '0;
        stored  <= '0;
      end else if (busy) begin
        if (mem_req) begin
          waiting <= 1'b1;
          issued  <= issued + 1'b1;
        end
        if (mem_rvalid) waiting <= 1'b0;
        if (st_we) begin
          stored <= stored + 1'b1;
          if (stored == (IW+1)'(TOTAL - 1)) busy <= 1'b0;
        end
      end
    end
  end
endmodule
