// tb_noc_accel: end-to-end test of the accelerator at a reduced size:
// 3x6 mesh, 2 PEs per router, gather packets of 2 flits (4 payload slots),
// so a row's 12 partial sums need three gather packets.
// Phase A: two rounds of 9 MACs; the weight streams start 30 cycles after
// the activation streams, so the activation buses stall on credits; the west
// column has delta = 0 and starts the gather packets, the others wait long
// enough to be picked up; a node that meets a full packet waits delta again
// and starts the next packet if nothing else picks its payload up.
// Phase B: one round of 5 MACs with ReLU and delta = 0 everywhere, so every
// node sends its own packet (the repetitive-unicast-like case).
// Every partial sum in the global buffer is checked against a reference
// computed here; the mechanisms (stream stall, payload picked up by a
// passing packet, packet started on timeout, packet started after a full
// packet, overlap of a round's gather with the next round's MACs) are
// counted and each must occur.
module tb_noc_accel;
  import noc_pkg::*;
  localparam int ROWS = 3, COLS = 6, N_PE = 2, GF = 2, DW = 16;
  localparam int SD = 256, GD = 256;
  localparam int SAW = $clog2(SD), GAW = $clog2(GD), RW = $clog2(ROWS);

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

  noc_accel #(.ROWS(ROWS), .COLS(COLS), .N_PE(N_PE), .GATHER_FLITS(GF),
              .STREAM_DEPTH(SD), .GB_DEPTH(GD)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", msg, cycle); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_upload = 0, n_init_timeout = 0, n_init_full = 0, n_overlap = 0, n_saw_full = 0;
  bit [ROWS-1:0][COLS-1:0] seen_full = '0;
  always @(posedge clk) if (rst_n) begin
    if (act_stall != 0 || wgt_stall != 0) n_stall++;
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++) begin
        if (node_saw_full[y][x]) begin n_saw_full++; seen_full[y][x] = 1'b1; end
        if (node_uploaded[y][x]) begin n_upload++; seen_full[y][x] = 1'b0; end
        if (node_initiated[y][x]) begin
          // started after a full packet had passed, or plainly on timeout
          if (seen_full[y][x]) n_init_full++;
          else                 n_init_timeout++;
          seen_full[y][x] = 1'b0;
        end
      end
    // gather traffic in the mesh while the streams still run
    if ((act_busy != 0 || wgt_busy != 0) && (node_uploaded != 0 || node_initiated != 0)) n_overlap++;
  end

  // ---------------- data ----------------
  logic signed [DW-1:0] A [ROWS][SD][N_PE];
  logic signed [DW-1:0] W [COLS][SD];

  task automatic load_mem();
    for (int j = 0; j < SD; j++) begin
      logic [N_PE*DW-1:0] w;
      for (int y = 0; y < ROWS; y++) begin
        for (int i = 0; i < N_PE; i++) begin
          A[y][j][i] = DW'($signed($urandom_range(0, 200)) - 100);
          w[i*DW +: DW] = A[y][j][i];
        end
        act_wr_en <= '0; act_wr_en[y] <= 1'b1; act_wr_addr <= SAW'(j); act_wr_data <= w;
        @(posedge clk);
      end
      for (int x = 0; x < COLS; x++) begin
        W[x][j] = DW'($signed($urandom_range(0, 200)) - 100);
        act_wr_en <= '0;
        wgt_wr_en <= '0; wgt_wr_en[x] <= 1'b1; wgt_wr_addr <= SAW'(j); wgt_wr_data <= W[x][j];
        @(posedge clk);
      end
      wgt_wr_en <= '0;
    end
    act_wr_en <= '0; wgt_wr_en <= '0;
  endtask

  function automatic logic [31:0] ref_ps(input int y, input int x, input int i,
                                         input int base, input int k, input bit relu);
    logic signed [31:0] s = 0;
    for (int j = 0; j < k; j++) s += 32'(A[y][base + j][i]) * 32'(W[x][base + j]);
    if (relu && s < 0) s = 0;
    return s;
  endfunction

  // run `rounds` rounds of k MACs from stream address base; check the
  // global buffer words that arrive (as a multiset per row)
  task automatic run_phase(input int base, input int k, input int rounds, input bit relu,
                           input int wgt_lag, input bit exact_order);
    int start_cnt [ROWS];
    int total, waited;
    for (int y = 0; y < ROWS; y++) start_cnt[y] = int'(gb_row_count[y]);
    k_len <= 16'(k); relu_en <= relu;
    stream_base <= SAW'(base); stream_count <= (SAW+1)'(k * rounds);
    act_start <= 1; @(posedge clk); act_start <= 0;
    repeat (wgt_lag) @(posedge clk);
    wgt_start <= 1; @(posedge clk); wgt_start <= 0;
    waited = 0;
    do begin
      @(posedge clk); waited++;
      total = 0;
      for (int y = 0; y < ROWS; y++) total += int'(gb_row_count[y]) - start_cnt[y];
    end while (total < ROWS * COLS * N_PE * rounds && waited < 20000);
    repeat (20) @(posedge clk);
    check(total == ROWS * COLS * N_PE * rounds,
          $sformatf("%0d partial sums arrived, expected %0d", total, ROWS * COLS * N_PE * rounds));
    for (int y = 0; y < ROWS; y++) begin
      logic [31:0] exp_q[$], got_q[$];
      for (int r = 0; r < rounds; r++)
        for (int x = 0; x < COLS; x++)
          for (int i = 0; i < N_PE; i++) exp_q.push_back(ref_ps(y, x, i, base + r * k, k, relu));
      for (int a = start_cnt[y]; a < int'(gb_row_count[y]); a++) begin
        gb_rd_row <= RW'(y); gb_rd_addr <= GAW'(a);
        @(posedge clk); #1;
        got_q.push_back(gb_rd_data);
      end
      if (exact_order) begin
        check(got_q == exp_q, $sformatf("row %0d partial sums in west-to-east order", y));
      end
      exp_q.sort(); got_q.sort();
      check(got_q == exp_q, $sformatf("row %0d partial sums match the reference", y));
    end
  endtask

  initial begin
    int pk0;
    act_wr_en = 0; act_wr_addr = 0; act_wr_data = 0; wgt_wr_en = 0; wgt_wr_addr = 0; wgt_wr_data = 0;
    act_start = 0; wgt_start = 0; stream_base = 0; stream_count = 0; k_len = 9; relu_en = 0;
    gb_rd_row = 0; gb_rd_addr = 0;
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++) delta[y][x] = (x == 0) ? 16'd0 : 16'(60 + 30 * x);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_mem();

    // Phase A
    run_phase(0, 9, 2, 0, 30, 0);
    check(gb_gather_pkts == 32'(ROWS * 3 * 2), $sformatf("three gather packets per row and round (%0d)", gb_gather_pkts));
    pk0 = int'(gb_gather_pkts);

    // Phase B
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++) delta[y][x] = 16'd0;
    run_phase(40, 5, 1, 1, 0, 0);
    check(int'(gb_gather_pkts) - pk0 == ROWS * COLS, "delta = 0: one packet per node");
    check(gb_unicast_pkts == 0 && node_rx_valid == 0, "no other traffic");

    $display("mechanisms: stall=%0d upload=%0d init_timeout=%0d saw_full=%0d init_full=%0d overlap=%0d",
             n_stall, n_upload, n_init_timeout, n_saw_full, n_init_full, n_overlap);
    check(n_stall > 0, "stream stall happened");
    check(n_upload > 0, "payload picked up by a passing gather packet");
    check(n_init_timeout > 0, "gather packet started on timeout");
    check(n_saw_full > 0, "full gather packet passed a waiting node");
    check(n_init_full > 0, "gather packet started after a full packet");
    check(n_overlap > 0, "gather of one round overlapped the next round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
