// stream_unit: memory element plus streaming unit for one streaming bus.
//
// Two-way streaming uses one of these per mesh row (input activations,
// word = N_PE activations, one per PE of a node) and one per mesh column
// (filter weights, word = one weight). The memory element is written by the
// host through wr_en / wr_addr / wr_data. A pulse on start streams `count`
// words beginning at `base`, one word per cycle, as a broadcast on the bus
// (bus_valid / bus_data) to all N_DEST network interfaces on the row or
// column. The bus has no backpressure wires: the unit keeps one credit
// counter per destination queue (CREDITS slots each), decrements all of them
// for every word sent and increments one when that destination returns a
// credit pulse. It sends only while every destination has a free slot,
// otherwise it stalls (stall high). A word read in cycle t is on the bus in
// cycle t+1. done pulses when the last word has been sent.
//
// From the paper: one streaming unit per row and per column (two-way
// streaming), broadcast to all nodes of a row/column, the unit streams only
// if all nodes have free space, credit status kept at the memory side.
// Own choices: memory depth (enough for C*R*R = 4608, the largest round of
// the VGG-16 layers), the start/base/count control and word widths.
module stream_unit #(
  parameter int unsigned WORD_W  = 16,
  parameter int unsigned N_DEST  = 8,
  parameter int unsigned DEPTH   = 4608,
  parameter int unsigned CREDITS = 4,
  parameter int unsigned AW      = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory element write port
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  // stream control
  input  logic              start,
  input  logic [AW-1:0]     base,
  input  logic [AW:0]       count,
  output logic              busy,
  output logic              done,
  output logic              stall,
  // streaming bus
  output logic              bus_valid,
  output logic [WORD_W-1:0] bus_data,
  input  logic [N_DEST-1:0] credit_in
);
  localparam int unsigned CW = $clog2(CREDITS + 1);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [AW-1:0]     addr;
  logic [AW:0]       left;
  logic [CW-1:0]     cred [N_DEST];
  logic              all_free, send;

  always_comb begin
    all_free = 1'b1;
    for (int d = 0; d < N_DEST; d++)
      if (cred[d] == '0) all_free = 1'b0;
  end
  assign send  = busy && all_free;
  assign stall = busy && !all_free;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      addr      <= '0;
      left      <= '0;
      bus_valid <= 1'b0;
      bus_data  <= '0;
      for (int d = 0; d < N_DEST; d++) cred[d] <= CW'(CREDITS);
    end else begin
      done      <= 1'b0;
      bus_valid <= send;
      if (send) bus_data <= mem[addr];
      if (start && !busy) begin
        busy <= count != '0;
        addr <= base;
        left <= count;
      end else if (send) begin
        addr <= addr + 1'b1;
        left <= left - 1'b1;
        if (left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      for (int d = 0; d < N_DEST; d++)
        cred[d] <= cred[d] + CW'(credit_in[d]) - CW'(send);
    end
  end

  for (genvar d = 0; d < N_DEST; d++) begin : g_chk
    a_credit_range: assert property (@(posedge clk) disable iff (!rst_n) cred[d] <= CW'(CREDITS));
  end
endmodule
