// tb_noc_accel_full: the accelerator at its default (full) size with no
// parameter overrides: 8x8 mesh, one PE per router, 3-flit gather packets
// (8 payload slots, so one gather packet carries a whole row).
// One round of K = 9 MACs is streamed (activations on the row buses,
// weights on the column buses). The west column has delta = 0 and starts
// the gather packets; the other nodes wait long enough to be picked up.
// Checks: all 64 partial sums reach the global buffer in west-to-east order
// per row and match a reference computed here, exactly one gather packet
// arrives per row, no unicast traffic, and the first packet arrives within
// a bound derived from the pipeline (stream + T_MAC + 5 cycles per hop).
module tb_noc_accel_full;
  import noc_pkg::*;
  localparam int ROWS = 8, COLS = 8, N_PE = 1, DW = 16, K = 9;
  localparam int SAW = $clog2(4608), GAW = $clog2(1024), RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic [ROWS-1:0] act_wr_en; logic [SAW-1:0] act_wr_addr; logic [N_PE*DW-1:0] act_wr_data;
  logic [COLS-1:0] wgt_wr_en; logic [SAW-1:0] wgt_wr_addr; logic [DW-1:0] wgt_wr_data;
  logic act_start, wgt_start; logic [SAW-1:0] stream_base; logic [SAW:0] stream_count;
  logic [ROWS-1:0] act_busy, act_stall; logic [COLS-1:0] wgt_busy, wgt_stall;
  logic [15:0] k_len; logic relu_en;
  logic [ROWS-1:0][COLS-1:0][15:0] delta;
  logic [ROWS-1:0][COLS-1:0] node_uploaded, node_initiated, node_saw_full, node_rx_valid;
  logic [RW-1:0] gb_rd_row; logic [GAW-1:0] gb_rd_addr; logic [31:0] gb_rd_data;
  logic [ROWS-1:0][31:0] gb_row_count; logic [31:0] gb_gather_pkts, gb_unicast_pkts;
  int checks = 0, failures = 0, cycle = 0;

  noc_accel dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", msg, cycle); end
  endtask

  logic signed [DW-1:0] A [ROWS][K];
  logic signed [DW-1:0] W [COLS][K];

  int n_upload = 0, n_init = 0;
  always @(posedge clk) if (rst_n) begin
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++) begin
        if (node_uploaded[y][x]) n_upload++;
        if (node_initiated[y][x]) n_init++;
      end
  end

  initial begin
    int t0, t_first, waited, total;
    act_wr_en = 0; act_wr_addr = 0; act_wr_data = 0; wgt_wr_en = 0; wgt_wr_addr = 0; wgt_wr_data = 0;
    act_start = 0; wgt_start = 0; stream_base = 0; stream_count = 0; k_len = 16'(K); relu_en = 0;
    gb_rd_row = 0; gb_rd_addr = 0;
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++) delta[y][x] = (x == 0) ? 16'd0 : 16'(100 + 10 * x);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < K; j++) begin
      for (int y = 0; y < ROWS; y++) begin
        A[y][j] = DW'($signed($urandom_range(0, 2000)) - 1000);
        act_wr_en <= '0; act_wr_en[y] <= 1'b1; act_wr_addr <= SAW'(j); act_wr_data <= A[y][j];
        @(posedge clk);
      end
      act_wr_en <= '0;
      for (int x = 0; x < COLS; x++) begin
        W[x][j] = DW'($signed($urandom_range(0, 2000)) - 1000);
        wgt_wr_en <= '0; wgt_wr_en[x] <= 1'b1; wgt_wr_addr <= SAW'(j); wgt_wr_data <= W[x][j];
        @(posedge clk);
      end
      wgt_wr_en <= '0;
    end

    stream_base <= '0; stream_count <= (SAW+1)'(K);
    act_start <= 1; wgt_start <= 1; @(posedge clk); act_start <= 0; wgt_start <= 0;
    t0 = cycle; t_first = -1; waited = 0;
    do begin
      @(posedge clk); waited++;
      total = 0;
      for (int y = 0; y < ROWS; y++) total += int'(gb_row_count[y]);
      if (total > 0 && t_first < 0) t_first = cycle - t0;
    end while (total < ROWS * COLS && waited < 20000);
    repeat (20) @(posedge clk);
    check(total == ROWS * COLS, $sformatf("%0d partial sums arrived", total));
    // stream of K words, then T_MAC, then the west node's packet crosses
    // COLS hops; the east nodes wait at most their delta on top of that
    $display("first row complete %0d cycles after start", t_first);
    check(t_first > K + 5 && t_first < K + 5 + 40 + 5 * (COLS + 2) + 100,
          $sformatf("first row arrival time plausible (%0d)", t_first));
    for (int y = 0; y < ROWS; y++) begin
      logic [31:0] exp_q[$], got_q[$];
      for (int x = 0; x < COLS; x++) begin
        logic signed [31:0] s;
        s = 0;
        for (int j = 0; j < K; j++) s += 32'(A[y][j]) * 32'(W[x][j]);
        exp_q.push_back(s);
      end
      for (int a = 0; a < int'(gb_row_count[y]); a++) begin
        gb_rd_row <= RW'(y); gb_rd_addr <= GAW'(a);
        @(posedge clk); #1;
        got_q.push_back(gb_rd_data);
      end
      check(got_q == exp_q, $sformatf("row %0d partial sums in west-to-east order", y));
    end
    check(gb_gather_pkts == 32'(ROWS), $sformatf("one gather packet per row (%0d)", gb_gather_pkts));
    check(n_init == ROWS && n_upload == ROWS * (COLS - 1), "west node starts, the others are picked up");
    check(gb_unicast_pkts == 0 && node_rx_valid == 0, "no other traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
