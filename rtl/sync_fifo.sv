// sync_fifo: single-clock first-in first-out buffer used by the capture DMA.
//
// DEPTH entries of W bits held in a register array with read and write
// pointers one bit wider than the address. push is ignored when full, pop
// when empty; rdata shows the oldest entry (first-word fall-through) and
// count the number of entries. flush empties the buffer in one cycle.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count = wp - rp;
  assign full  = count == (AW+1)'(DEPTH);
  assign empty = count == '0;
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
