// fifo: synchronous first-in first-out queue of DEPTH entries of type T.
//
// Write when wr_en, read (pop) when rd_en; rd_data shows the oldest entry
// whenever empty is low (first-word fall-through). Writing a full queue or
// popping an empty one is a protocol error and is caught by assertions.
// count gives the occupancy. Reset empties the queue.
module fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  T     wr_data,
  input  logic rd_en,
  output T     rd_data,
  output logic empty,
  output logic full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= inc(wr_ptr);
      if (rd_en) rd_ptr <= inc(rd_ptr);
      count <= count + CW'(wr_en) - CW'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
  end

  // protocol checks
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
