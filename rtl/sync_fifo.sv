// sync_fifo: single-clock first-word-fall-through FIFO.
//
// rd_data shows the oldest entry whenever empty is low; rd_en pops it.
// A write and a read may happen in the same cycle, also when full (the read
// frees the slot). Writing when full without reading, or reading when empty,
// is an error flagged by assertions. The storage is a plain array; count
// gives the number of stored entries. This is a generic helper of this design.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  assign empty   = (count == 0);
  assign full    = (int'(count) == DEPTH);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= inc(wptr);
      if (rd_en) rptr <= inc(rptr);
      count <= count + $bits(count)'(wr_en) - $bits(count)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule
